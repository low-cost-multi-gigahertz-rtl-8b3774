// data_capture: sampling input of the miniature tester.
//
// A 4:1 data-select multiplexer picks one of the returned signals and a
// capture flip-flop samples it when `strobe` is high. In hardware the flip-flop
// is clocked by a programmable-delay copy of the RF clock, so its sampling
// instant moves in 10 ps steps; here one cycle is one UI and `strobe` marks the
// UI in which that delayed edge falls. The multiplexer, its select and the
// capture element follow the paper's block diagram; the strobe model is this
// design's.
// Timing: q and q_valid are registered, one cycle after strobe.
module data_capture #(
  parameter int N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         din,
  input  logic [$clog2(N)-1:0] sel,
  input  logic                 strobe,
  output logic                 q,
  output logic                 q_valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= 1'b0;
      q_valid <= 1'b0;
    end else begin
      q_valid <= strobe;
      if (strobe) q <= din[sel];
    end
  end
endmodule
