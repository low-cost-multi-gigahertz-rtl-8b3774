// tb_capture_ctrl: self-checking test of the delay-sweep controller.
// The testbench plays the sampled signal: a random pattern of period P, ANDed
// with random noise, returned one cycle after each strobe. It keeps its own
// pattern-phase counter (restarted with `start`) and checks that every strobe
// of step s falls at phase (s / 20) mod P with fine code s mod 20, tallies the
// ones it returned per step, and after `done` reads the result memory and
// compares. It also bounds the sweep time: at least SETTLE cycles and at most
// SETTLE + P * nsamp + 4 cycles per step.
module tb_capture_ctrl;
  localparam int RES_DEPTH = 1024, SETTLE = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] period = 16'd1, nsamp = '0;
  logic [10:0] nsteps = '0;
  logic strobe, q = 0, q_valid = 0, busy, done;
  logic [9:0] fine_code, rd_addr = '0;
  logic [15:0] rd_data;
  int checks = 0, failures = 0;

  capture_ctrl #(.RES_DEPTH(RES_DEPTH), .SETTLE(SETTLE)) dut (.*);

  always #1 clk = ~clk;

  logic pat [64];
  int tb_ph = 0, strobes = 0;
  int tally [RES_DEPTH];

  always @(posedge clk) begin
    logic bit_v;
    int s;
    q_valid <= strobe;
    if (start) tb_ph <= 0;
    else       tb_ph <= (tb_ph + 1 >= int'(period)) ? 0 : tb_ph + 1;
    if (strobe) begin
      s = strobes / int'(nsamp);
      checks++;
      if (tb_ph != (s / 20) % int'(period) || int'(fine_code) != s % 20) begin
        failures++;
        $display("FAIL step %0d: strobe at phase %0d fine %0d", s, tb_ph, fine_code);
      end
      bit_v = pat[tb_ph] & ($urandom % 4 != 0);
      q <= bit_v;
      tally[s] = tally[s] + int'(bit_v);
      strobes = strobes + 1;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep(input int P, input int NS, input int NSAMP);
    int cyc;
    for (int i = 0; i < 64; i++) pat[i] = 1'($urandom);
    for (int i = 0; i < RES_DEPTH; i++) tally[i] = 0;
    strobes = 0;
    @(negedge clk);
    period = 16'(P); nsteps = 11'(NS); nsamp = 16'(NSAMP); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!busy || done) begin failures++; $display("FAIL not busy after start"); end
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < NS * SETTLE || cyc > NS * (SETTLE + P * NSAMP + 4)) begin
      failures++;
      $display("FAIL sweep took %0d cycles", cyc);
    end
    checks++;
    if (strobes != NS * NSAMP) begin failures++; $display("FAIL %0d strobes", strobes); end
    for (int s = 0; s < NS; s++) begin
      rd_addr = 10'(s);
      @(negedge clk);
      checks++;
      if (int'(rd_data) != tally[s]) begin
        failures++;
        $display("FAIL result[%0d] = %0d exp %0d", s, rd_data, tally[s]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    sweep(7, 200, 5);
    sweep(13, 1000, 3);
    sweep(1, 25, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
