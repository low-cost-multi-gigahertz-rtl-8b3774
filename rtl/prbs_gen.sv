// prbs_gen: LFSR pseudo-random bit source, W bits per word cycle.
//
// A Fibonacci LFSR of ORDER bits with feedback taps TAPS (default PRBS7,
// x^7 + x^6 + 1). Each `en` advances it W serial steps at once; word bit 0 is
// the earliest bit of the serial sequence. Serial step: out = state[ORDER-1],
// state <= {state[ORDER-2:0], ^(state & TAPS)}. The paper only says the eye
// tests use "an LFSR in the DLC"; polynomial, seed and width are this design's.
// Timing: `word` is registered and changes the cycle after `en`.
module prbs_gen #(
  parameter int               W     = 16,
  parameter int               ORDER = 7,
  parameter logic [ORDER-1:0] TAPS  = 7'h60,
  parameter logic [ORDER-1:0] SEED  = '1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [W-1:0] word
);
  logic [ORDER-1:0] state, nstate;
  logic [W-1:0]     nword;

  always_comb begin
    nstate = state;
    for (int i = 0; i < W; i++) begin
      nword[i] = nstate[ORDER-1];
      nstate   = {nstate[ORDER-2:0], ^(nstate & TAPS)};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= SEED;
      word  <= '0;
    end else if (en) begin
      state <= nstate;
      word  <= nword;
    end
  end

  initial assert (SEED != '0) else $error("prbs_gen: an all-zero seed locks the LFSR");
endmodule
