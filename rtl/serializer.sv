// serializer: bit-level model of the PECL 8:1 parallel-to-serial converter.
//
// On `load` the W-bit word is taken in; `sout` shows bit 0 first and each
// `shift` moves on to the next bit, so with shift every second UI the output
// runs at 2.5 Gbps from a 312.5 MHz word. The paper gives the 8:1 ratio of the
// miniature tester ("two groups of eight"); bit order and the load/shift
// enables are this design's choice. load has priority over shift.
module serializer #(
  parameter int W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic         shift,
  input  logic [W-1:0] din,
  output logic         sout
);
  logic [W-1:0] shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     shreg <= '0;
    else if (load)  shreg <= din;
    else if (shift) shreg <= {1'b0, shreg[W-1:1]};
  end

  assign sout = shreg[0];
endmodule
