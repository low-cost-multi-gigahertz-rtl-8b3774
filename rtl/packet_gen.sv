// packet_gen: Data Vortex packet formatter of the optical test bed.
//
// A packet slot is SLOT_BITS bit periods of 400 ps (2.5 Gbps). Slot bit b:
//   frame/header : high for b < GUARD + WINDOW + GUARD (56), low for the
//                  DEAD_BITS dead time (8); the header lanes carry `addr`.
//   clock lane   : inside the window (b = GUARD .. GUARD+WINDOW-1) it toggles
//                  every bit period, starting high; low outside it.
//   data lanes   : payload bit (b - GUARD - PRE_CLK_BITS) for the PAYLOAD_BITS
//                  bits that follow the pre-clocks; low elsewhere.
// The slot, guard, window, dead-time and payload lengths are the ones printed in
// the paper's timing diagram; the pre-clock count, clock phase and header
// levels are this design's choice. The post-clocks fill the rest of the window.
//
// Output is one word per `word_en` (registered): SER_W bits per high-speed lane,
// bit 0 first, for the serializers, and one frame/header value per word, which
// the FPGA drives directly (frame edges fall on word boundaries).
// With prbs_mode the four data lanes carry `prbs_word` continuously, the clock
// lane toggles and frame/header stay low (eye-diagram test).
// A slot is only started when `enable` is high at its first word; a slot once
// started is finished. pkt_count counts finished slots.
module packet_gen
  import dlc_pkg::*;
#(
  parameter int SLOT_BITS    = 64,
  parameter int GUARD_BITS   = 5,
  parameter int WINDOW_BITS  = 46,
  parameter int DEAD_BITS    = 8,
  parameter int PAYLOAD_BITS = 32,
  parameter int PRE_CLK_BITS = 7
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                word_en,
  input  logic                                enable,
  input  logic                                prbs_mode,
  input  logic [HDR_BITS-1:0]                 addr,
  input  logic [OTB_LANES-1:0][PAYLOAD_BITS-1:0] payload,
  input  logic [SER_W-1:0]                    prbs_word,
  output otb_word_t                           word,
  output logic [31:0]                         pkt_count
);
  localparam int WORDS     = SLOT_BITS / SER_W;
  localparam int FRAME_END = GUARD_BITS + WINDOW_BITS + GUARD_BITS;
  localparam int WIN_END   = GUARD_BITS + WINDOW_BITS;
  localparam int DATA_BEG  = GUARD_BITS + PRE_CLK_BITS;
  localparam int DATA_END  = DATA_BEG + PAYLOAD_BITS;
  localparam int WIDX_W    = $clog2(WORDS) > 0 ? $clog2(WORDS) : 1;

  logic [WIDX_W-1:0] widx;    // word index within the slot
  logic              active;  // a slot is in progress
  otb_word_t         nword;

  int b;

  always_comb begin
    b     = 0;
    nword = '0;
    if (prbs_mode) begin
      for (int j = 0; j < OTB_LANES; j++) nword.data_word[j] = prbs_word;
      for (int i = 0; i < SER_W; i++)     nword.clk_word[i] = ~i[0];
    end else if (active || enable) begin
      for (int i = 0; i < SER_W; i++) begin
        b = int'(widx) * SER_W + i;
        if (b >= GUARD_BITS && b < WIN_END)
          nword.clk_word[i] = ((b - GUARD_BITS) % 2) == 0;
        if (b >= DATA_BEG && b < DATA_END)
          for (int j = 0; j < OTB_LANES; j++)
            nword.data_word[j][i] = payload[j][b - DATA_BEG];
      end
      nword.frame  = (int'(widx) * SER_W) < FRAME_END;
      nword.header = nword.frame ? addr : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx      <= '0;
      active    <= 1'b0;
      word      <= '0;
      pkt_count <= '0;
    end else if (word_en) begin
      word <= nword;
      if (prbs_mode) begin
        widx   <= '0;
        active <= 1'b0;
      end else if (active || enable) begin
        if (int'(widx) == WORDS - 1) begin
          widx      <= '0;
          active    <= 1'b0;
          pkt_count <= pkt_count + 1;
        end else begin
          widx   <= widx + 1'b1;
          active <= 1'b1;
        end
      end
    end
  end

  initial begin
    assert (FRAME_END + DEAD_BITS == SLOT_BITS)
      else $error("packet_gen: guard + window + guard + dead must fill the slot");
    assert (SLOT_BITS % SER_W == 0 && FRAME_END % SER_W == 0)
      else $error("packet_gen: frame edges must fall on word boundaries");
    assert (PRE_CLK_BITS + PAYLOAD_BITS <= WINDOW_BITS)
      else $error("packet_gen: payload does not fit the window");
  end
endmodule
