// tb_prbs_gen: self-checking test of the parallel LFSR.
// A serial PRBS7 (x^7 + x^6 + 1) model in the testbench produces the expected
// bit stream; every word must equal the next 16 serial bits, bit 0 first, and
// the word may only change on cycles after `en`.
module tb_prbs_gen;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, en = 0;
  logic [W-1:0] word;
  int checks = 0, failures = 0;
  logic [6:0] s;

  prbs_gen #(.W(W)) dut (.*);

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp, held;
    s = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      en = ($urandom % 3) != 0;
      held = word;
      @(negedge clk);
      if (en) begin
        for (int i = 0; i < W; i++) begin
          exp[i] = s[6];
          s = {s[5:0], s[6] ^ s[5]};
        end
        checks++;
        if (word !== exp) begin
          failures++;
          $display("FAIL word %0d: got %h exp %h", n, word, exp);
        end
      end else begin
        checks++;
        if (word !== held) begin
          failures++;
          $display("FAIL word changed without en");
        end
      end
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
