// tb_data_capture: self-checking test of the data-select multiplexer and
// capture flip-flop. Random inputs, select and strobes; on the cycle after a
// strobe q must hold the selected input as it was at the strobe and q_valid
// must be high; without a strobe q must hold and q_valid be low.
module tb_data_capture;
  logic clk = 0, rst_n = 0, strobe = 0;
  logic [3:0] din = '0;
  logic [1:0] sel = '0;
  logic q, q_valid;
  int checks = 0, failures = 0;

  data_capture #(.N(4)) dut (.*);

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_q, exp_v;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    exp_q = 0;
    for (int n = 0; n < 1000; n++) begin
      din = 4'($urandom); sel = 2'($urandom); strobe = ($urandom % 2) == 1;
      exp_v = strobe;
      if (strobe) exp_q = din[sel];
      @(negedge clk);
      checks++;
      if (q !== exp_q || q_valid !== exp_v) begin
        failures++;
        $display("FAIL cycle %0d: q %0b/%0b valid %0b/%0b", n, q, exp_q, q_valid, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
