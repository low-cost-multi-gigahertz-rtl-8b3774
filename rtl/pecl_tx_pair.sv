// pecl_tx_pair: the miniature tester's 5 Gbps output stage.
//
// Two 8:1 serializers each run at 2.5 Gbps (one bit every second UI). The
// second one is clocked one UI (half its bit) later than the first, and the
// two outputs are XORed into the 5 Gbps stream, as in the paper's PECL block
// diagram. In hardware the half-bit offset comes from two programmable clock
// delays; here it is the fixed one-UI phase of the enables.
// Timing, with `phase` the UI index within the 16-UI word (0..15):
//   serializer A loads a_word at the end of phase 15, shifts at the end of odd
//   phases; serializer B loads b_word at the end of phase 0, shifts at the end
//   of even phases 2..14. dout = A ^ B (combinational, like the PECL XOR).
// a_word must be stable at phase 15 and b_word at phase 0 of the next word.
module pecl_tx_pair #(
  parameter int W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [3:0]   phase,
  input  logic [W-1:0] a_word,
  input  logic [W-1:0] b_word,
  output logic         dout
);
  logic a_out, b_out;
  logic a_load, a_shift, b_load, b_shift;

  assign a_load  = (phase == 4'd15);
  assign a_shift = phase[0] && !a_load;
  assign b_load  = (phase == 4'd0);
  assign b_shift = !phase[0] && !b_load;

  serializer #(.W(W)) u_ser_a (
    .clk, .rst_n, .load(a_load), .shift(a_shift), .din(a_word), .sout(a_out)
  );
  serializer #(.W(W)) u_ser_b (
    .clk, .rst_n, .load(b_load), .shift(b_shift), .din(b_word), .sout(b_out)
  );

  assign dout = a_out ^ b_out;

  initial assert (2 * W == 16) else $error("pecl_tx_pair: phase counter assumes 16 UI per word");
endmodule
