// xor_precoder: splits the wanted 5 Gbps stream for the XOR output stage.
//
// The miniature tester doubles its rate by XORing two 2.5 Gbps serializer
// outputs, the second one half a 2.5 Gbps bit (one 5 Gbps UI) behind the
// first. Output UI 2k then shows a[k] ^ b[k-1] and UI 2k+1 shows a[k] ^ b[k].
// To make the output equal the wanted bits d[], this block computes
//   a[k] = d[2k] ^ b[k-1],   b[k] = d[2k+1] ^ a[k]
// with b[-1] the last b bit of the previous word (held in a register).
// The XOR stage is the paper's (its block diagram prints an XOR, where the
// text speaks of a second-stage multiplexer); the precoding is this design's
// way of making that stage carry arbitrary data.
// Timing: a_word / b_word are registered on `en`.
module xor_precoder #(
  parameter int W = 8  // bits per serializer word; d has 2*W bits
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic [2*W-1:0] d,
  output logic [W-1:0]   a_word,
  output logic [W-1:0]   b_word
);
  logic         b_last;
  logic [W-1:0] na, nb;

  always_comb begin
    logic prev;
    prev = b_last;
    for (int k = 0; k < W; k++) begin
      na[k] = d[2*k] ^ prev;
      nb[k] = d[2*k+1] ^ na[k];
      prev  = nb[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_last <= 1'b0;
      a_word <= '0;
      b_word <= '0;
    end else if (en) begin
      b_last <= nb[W-1];
      a_word <= na;
      b_word <= nb;
    end
  end
endmodule
