// tb_serializer: self-checking test of the 8:1 serializer.
// Loads random words, shifts every second cycle (2.5 Gbps pacing) and compares
// each output bit with the loaded word, bit 0 first; also checks that load wins
// over shift and that an idle register holds its bit.
module tb_serializer;
  localparam int W = 8;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [W-1:0] din = '0;
  logic sout;
  int checks = 0, failures = 0;

  serializer #(.W(W)) dut (.*);

  always #1 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b exp %0b", what, got, exp);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      w = W'($urandom);
      @(negedge clk); load = 1; shift = (n % 3 == 0); din = w;  // load wins over shift
      @(negedge clk); load = 0; shift = 0; din = ~w;
      for (int k = 0; k < W; k++) begin
        check(sout, w[k], $sformatf("word %0d bit %0d", n, k));
        @(negedge clk);                    // hold: no shift
        check(sout, w[k], $sformatf("hold word %0d bit %0d", n, k));
        shift = 1; @(negedge clk); shift = 0;
      end
      check(sout, 1'b0, "drained register outputs 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
