// tb_xor_precoder: self-checking test of the XOR precoder.
// For random 16-bit words the testbench rebuilds the output of an ideal XOR
// stage (UI 2k = a[k] ^ b[k-1], UI 2k+1 = a[k] ^ b[k], b[-1] from the previous
// word) from a_word/b_word and requires it to equal the wanted bits, across
// word boundaries. Words only change on `en`.
module tb_xor_precoder;
  localparam int W = 8;
  logic clk = 0, rst_n = 0, en = 0;
  logic [2*W-1:0] d = '0;
  logic [W-1:0] a_word, b_word;
  int checks = 0, failures = 0;

  xor_precoder #(.W(W)) dut (.*);

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic bprev;
    logic [2*W-1:0] out;
    logic [W-1:0] ha, hb;
    bprev = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      d  = (n < 3) ? {2*W{1'b1}} : (2*W)'($urandom);
      en = 1;
      @(negedge clk);
      en = 0;
      for (int k = 0; k < W; k++) begin
        out[2*k]   = a_word[k] ^ bprev;
        out[2*k+1] = a_word[k] ^ b_word[k];
        bprev      = b_word[k];
      end
      checks++;
      if (out !== d) begin
        failures++;
        $display("FAIL word %0d: xor stage gives %h, wanted %h", n, out, d);
      end
      ha = a_word; hb = b_word;
      d = ~d;
      @(negedge clk);
      checks++;
      if (a_word !== ha || b_word !== hb) begin
        failures++;
        $display("FAIL output changed without en");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
