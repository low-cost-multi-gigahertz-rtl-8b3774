// pattern_source: data source of the miniature tester, W bits per word cycle.
//
// Either a PRBS7 stream (prbs_gen) or a host-written pattern of `len` words
// (1..DEPTH) that repeats. The pattern memory has one write port for the host
// and is read by a pointer that steps once per `word_en` and wraps after
// len-1. The paper describes the source as programmable and the patterns as
// generated by state machines and an LFSR in the FPGA; the pattern memory and
// its depth are this design's choice.
// Timing: `word` is registered on `word_en`; a mode switch takes effect on the
// next word. The read pointer restarts at 0 when `run` is low.
module pattern_source #(
  parameter int W     = 16,
  parameter int DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     word_en,
  input  logic                     run,
  input  logic                     pattern_mode,  // 0: PRBS, 1: pattern memory
  input  logic [$clog2(DEPTH):0]   len,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  output logic [W-1:0]             word
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rptr;
  logic [W-1:0]  prbs_word;
  logic          prbs_en;

  assign prbs_en = word_en && run && !pattern_mode;

  prbs_gen #(.W(W)) u_prbs (.clk, .rst_n, .en(prbs_en), .word(prbs_word));

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  logic [W-1:0] pat_word;
  logic         use_pat, running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr     <= '0;
      pat_word <= '0;
      use_pat  <= 1'b0;
      running  <= 1'b0;
    end else if (word_en) begin
      use_pat <= pattern_mode;
      running <= run;
      if (run && pattern_mode) begin
        pat_word <= mem[rptr];
        rptr     <= ({1'b0, rptr} + 1'b1 >= len) ? '0 : rptr + 1'b1;
      end else if (!run) begin
        rptr <= '0;
      end
    end
  end

  // both sources are registered on word_en, so a mode switch lands on a word
  assign word = !running ? '0 : (use_pat ? pat_word : prbs_word);
endmodule
