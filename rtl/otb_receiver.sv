// otb_receiver: receiving side of the optical test bed.
//
// It recovers the parallel payload words of a returned packet using the
// packet's own source-synchronous clock. A rising frame starts a packet: the
// header is taken and the clock-edge count cleared. Every transition of the
// received clock while the frame is high is one bit period; the first
// PRE_CLK_BITS of them are the pre-clocks (receiver start-up) and the next
// PAYLOAD_BITS carry the payload, sampled on all four data lanes. The
// remaining post-clocks are ignored. When the frame falls the packet is
// counted and compared with the expected header and payload (the ones the
// transmitter was given); every differing bit adds to `bit_errors`, and a
// packet with fewer clock edges than pre-clocks + payload counts as a
// `short_pkts` packet.
// The paper says the test bed has five receive channels that recover the
// parallel words, and that the pre- and post-clocks serve receiver start-up
// and pipeline flush; how the words are recovered and checked here is this
// design's own. In this one-clock model the receiver samples the data in the
// UI in which the clock lane changes; on hardware the clock lane's delay code
// centres that edge in the data eye.
// Timing: all inputs sampled on clk (one UI); results update the cycle after
// the frame falls.
module otb_receiver
  import dlc_pkg::*;
#(
  parameter int PRE_CLK_BITS = 7,
  parameter int PAYLOAD_BITS = 32
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   rx_frame,
  input  logic                                   rx_clk,
  input  logic [OTB_LANES-1:0]                   rx_data,
  input  logic [HDR_BITS-1:0]                    rx_header,
  input  logic [HDR_BITS-1:0]                    exp_header,
  input  logic [OTB_LANES-1:0][PAYLOAD_BITS-1:0] exp_payload,
  output logic [OTB_LANES-1:0][PAYLOAD_BITS-1:0] rx_words,
  output logic [HDR_BITS-1:0]                    rx_hdr,
  output logic [31:0]                            rx_pkts,
  output logic [31:0]                            bit_errors,
  output logic [31:0]                            short_pkts
);
  localparam int CW = $clog2(PRE_CLK_BITS + PAYLOAD_BITS + 2) + 1;

  logic          frame_q, clk_q;
  logic [CW-1:0] edges;
  logic [OTB_LANES-1:0][PAYLOAD_BITS-1:0] words;
  logic [HDR_BITS-1:0] hdr;
  logic [31:0]   diff_bits;

  always_comb begin
    diff_bits = 32'($countones(hdr ^ exp_header));
    for (int j = 0; j < OTB_LANES; j++)
      diff_bits += 32'($countones(words[j] ^ exp_payload[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_q    <= 1'b0;
      clk_q      <= 1'b0;
      edges      <= '0;
      words      <= '0;
      hdr        <= '0;
      rx_words   <= '0;
      rx_hdr     <= '0;
      rx_pkts    <= '0;
      bit_errors <= '0;
      short_pkts <= '0;
    end else begin
      frame_q <= rx_frame;
      clk_q   <= rx_clk;
      if (rx_frame && !frame_q) begin
        edges <= '0;
        words <= '0;
        hdr   <= rx_header;
      end else if (rx_frame && (rx_clk != clk_q)) begin
        if (int'(edges) >= PRE_CLK_BITS && int'(edges) < PRE_CLK_BITS + PAYLOAD_BITS)
          for (int j = 0; j < OTB_LANES; j++)
            words[j][int'(edges) - PRE_CLK_BITS] <= rx_data[j];
        if (int'(edges) < PRE_CLK_BITS + PAYLOAD_BITS + 1) edges <= edges + 1'b1;
      end
      if (!rx_frame && frame_q) begin
        rx_pkts    <= rx_pkts + 1;
        rx_words   <= words;
        rx_hdr     <= hdr;
        bit_errors <= bit_errors + diff_bits;
        if (int'(edges) < PRE_CLK_BITS + PAYLOAD_BITS) short_pkts <= short_pkts + 1;
      end
    end
  end
endmodule
