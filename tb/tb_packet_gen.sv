// tb_packet_gen: self-checking test of the Data Vortex packet formatter.
// The expected waveforms are built from the timing numbers alone: a 64-bit slot,
// frame and header high for 5 + 46 + 5 = 56 bits then 8 dead bits, the clock
// toggling (starting high) through the 46-bit window, and the 32 payload bits of
// each lane after 7 pre-clock bits. Word enables come at random intervals. Also
// checks the packet counter (one per 8 words), stop at the end of a slot after
// enable falls, and the PRBS mode.
module tb_packet_gen;
  import dlc_pkg::*;
  logic clk = 0, rst_n = 0, word_en = 0, enable = 0, prbs_mode = 0;
  logic [HDR_BITS-1:0] addr;
  logic [OTB_LANES-1:0][31:0] payload;
  logic [SER_W-1:0] prbs_word;
  otb_word_t word;
  logic [31:0] pkt_count;
  int checks = 0, failures = 0;

  packet_gen dut (.*);

  always #1 clk = ~clk;

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic step_word();
    @(negedge clk); word_en = 1;
    @(negedge clk); word_en = 0;
    repeat ($urandom % 3) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] ck, dt [4];
    int b;
    addr = 4'hA; payload = '0; prbs_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      addr = 4'($urandom);
      for (int j = 0; j < 4; j++) payload[j] = $urandom;
      enable = 1;
      for (int w = 0; w < 8; w++) begin
        step_word();
        for (int i = 0; i < 8; i++) begin
          b = w * 8 + i;
          ck[i] = (b >= 5 && b < 51) ? ((b - 5) % 2 == 0) : 1'b0;
          for (int j = 0; j < 4; j++) dt[j][i] = (b >= 12 && b < 44) ? payload[j][b-12] : 1'b0;
        end
        check(32'(word.frame), 32'(w * 8 < 56), $sformatf("frame p%0d w%0d", p, w));
        check(32'(word.header), (w * 8 < 56) ? 32'(addr) : 0, $sformatf("header p%0d w%0d", p, w));
        check(32'(word.clk_word), 32'(ck), $sformatf("clock p%0d w%0d", p, w));
        for (int j = 0; j < 4; j++)
          check(32'(word.data_word[j]), 32'(dt[j]), $sformatf("data%0d p%0d w%0d", j, p, w));
        if (w == 3) enable = (p != 3);  // drop enable mid-slot in the last packet
      end
      check(pkt_count, 32'(p + 1), "packet count");
    end
    // idle after the last slot
    step_word();
    check(32'(word.frame), 0, "idle frame");
    check(32'(word.clk_word), 0, "idle clock");
    check(pkt_count, 4, "count stays");
    // PRBS mode
    prbs_mode = 1;
    for (int n = 0; n < 10; n++) begin
      prbs_word = 8'($urandom);
      step_word();
      for (int j = 0; j < 4; j++) check(32'(word.data_word[j]), 32'(prbs_word), "prbs lane");
      check(32'(word.clk_word), 32'h55, "prbs clock lane");
      check(32'(word.frame), 0, "prbs frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
