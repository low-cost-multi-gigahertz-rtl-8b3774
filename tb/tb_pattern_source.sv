// tb_pattern_source: self-checking test of the miniature-tester data source.
// Writes a random pattern of random length, runs it and expects the words to
// repeat in order with that period; switches to PRBS and compares with a
// serial PRBS7 model; checks that run = 0 gives zeros and restarts the pattern.
module tb_pattern_source;
  localparam int W = 16, DEPTH = 64;
  logic clk = 0, rst_n = 0, word_en = 0, run = 0, pattern_mode = 0, wr_en = 0;
  logic [$clog2(DEPTH):0] len = '0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0;
  logic [W-1:0] wr_data = '0, word;
  int checks = 0, failures = 0;
  logic [W-1:0] pat [DEPTH];

  pattern_source #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #1 clk = ~clk;

  task automatic check(input logic [W-1:0] got, input logic [W-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic step_word();
    @(negedge clk); word_en = 1;
    @(negedge clk); word_en = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [6:0] s;
    logic [W-1:0] exp;
    int L;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      L = (t == 0) ? DEPTH : 1 + $urandom % 20;
      for (int i = 0; i < L; i++) begin
        pat[i] = W'($urandom);
        @(negedge clk); wr_en = 1; wr_addr = i[5:0]; wr_data = pat[i];
      end
      @(negedge clk); wr_en = 0;
      len = 7'(L); pattern_mode = 1; run = 1;
      for (int n = 0; n < 3 * L; n++) begin
        step_word();
        check(word, pat[n % L], $sformatf("pattern len %0d word %0d", L, n));
      end
      run = 0;
      step_word();
      check(word, '0, "stopped source outputs zero");
    end
    // PRBS
    s = '1; pattern_mode = 0; run = 1;
    for (int n = 0; n < 40; n++) begin
      step_word();
      for (int i = 0; i < W; i++) begin exp[i] = s[6]; s = {s[5:0], s[6] ^ s[5]}; end
      check(word, exp, $sformatf("prbs word %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
