// tb_host_regs: self-checking test of the host register file.
// Writes every register with random values and checks both the decoded
// outputs and the read-back; checks the pattern write port and its
// auto-incrementing pointer, the one-cycle capture start pulse and the
// read-only status, result and packet-count registers.
module tb_host_regs;
  import dlc_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [7:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  ctrl_t ctrl;
  logic [3:0] otb_addr;
  logic [3:0][31:0] payload;
  logic [6:0] pat_len;
  logic pat_wr_en;
  logic [5:0] pat_wr_addr;
  logic [15:0] pat_wr_data;
  logic [9:0] tx_delay_a, tx_delay_b;
  logic [OTB_CH-1:0][9:0] otb_delay;
  logic cap_start;
  logic [1:0] cap_sel;
  logic [15:0] cap_period, cap_nsamp;
  logic [10:0] cap_nsteps;
  logic [9:0] cap_raddr;
  logic cap_busy = 0, cap_done = 0;
  logic [15:0] cap_rdata = '0;
  logic [31:0] pkt_count = '0, rx_pkts = '0, rx_bit_errors = '0, rx_short_pkts = '0;
  logic [3:0] rx_hdr = '0;
  logic [3:0][31:0] rx_words = '0;
  int checks = 0, failures = 0;

  host_regs dut (.*);

  always #1 clk = ~clk;

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); addr = a; wdata = d; we = 1;
    @(negedge clk); we = 0;
  endtask

  task automatic rd_check(input logic [7:0] a, input logic [31:0] exp, input string what);
    addr = a;
    @(posedge clk);
    check(rdata, exp, what);
    @(negedge clk);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    logic [31:0] pay [4];
    logic [9:0] dly [OTB_CH];
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    check(32'(pat_len), 1, "pattern length reset value");
    wr(REG_CTRL, 32'h15);
    check(32'(ctrl), 32'h15, "ctrl");
    check(32'(ctrl.clock_select), 1, "clock select bit 4");
    rd_check(REG_CTRL, 32'h15, "ctrl read");
    v = $urandom; wr(REG_OTB_ADDR, v); check(32'(otb_addr), v & 32'hF, "otb addr");
    rd_check(REG_OTB_ADDR, v & 32'hF, "otb addr read");
    for (int j = 0; j < 4; j++) begin pay[j] = $urandom; wr(8'(REG_PAYLOAD0 + j), pay[j]); end
    for (int j = 0; j < 4; j++) begin
      check(payload[j], pay[j], $sformatf("payload %0d", j));
      rd_check(8'(REG_PAYLOAD0 + j), pay[j], "payload read");
    end
    for (int j = 0; j < OTB_CH; j++) begin dly[j] = 10'($urandom); wr(8'(REG_OTB_DLY0 + j), 32'(dly[j])); end
    for (int j = 0; j < OTB_CH; j++) begin
      check(32'(otb_delay[j]), 32'(dly[j]), $sformatf("otb delay %0d", j));
      rd_check(8'(REG_OTB_DLY0 + j), 32'(dly[j]), "otb delay read");
    end
    wr(REG_TX_DLY_A, 32'h3AB); wr(REG_TX_DLY_B, 32'h1F0);
    check(32'(tx_delay_a), 32'h3AB, "tx delay a"); check(32'(tx_delay_b), 32'h1F0, "tx delay b");
    wr(REG_PAT_LEN, 32'd40); check(32'(pat_len), 40, "pattern length");
    wr(REG_PAT_WADDR, 32'd5);
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); addr = REG_PAT_WDATA; wdata = 32'h1000 + i; we = 1;
      @(negedge clk); we = 0;
      check(32'(pat_wr_en), 1, "pattern write strobe");
      check(32'(pat_wr_addr), 5 + i, "pattern write address");
      check(32'(pat_wr_data), 32'h1000 + i, "pattern write data");
      @(negedge clk);
      check(32'(pat_wr_en), 0, "pattern write strobe is one cycle");
    end
    rd_check(REG_PAT_WADDR, 8, "pointer advanced");
    wr(REG_CAP_PER, 32'd77); wr(REG_CAP_STEPS, 32'd999); wr(REG_CAP_NSAMP, 32'd12); wr(REG_CAP_RADDR, 32'd321);
    check(32'(cap_period), 77, "cap period"); check(32'(cap_nsteps), 999, "cap steps");
    check(32'(cap_nsamp), 12, "cap nsamp"); check(32'(cap_raddr), 321, "cap raddr");
    @(negedge clk); addr = REG_CAP_CTRL; wdata = 32'h5; we = 1;
    @(negedge clk); we = 0;
    check(32'(cap_start), 1, "start pulse"); check(32'(cap_sel), 2, "data select");
    @(negedge clk);
    check(32'(cap_start), 0, "start pulse ends");
    cap_busy = 1; cap_done = 0; rd_check(REG_CAP_STAT, 1, "status busy");
    cap_busy = 0; cap_done = 1; rd_check(REG_CAP_STAT, 2, "status done");
    cap_rdata = 16'hBEEF; rd_check(REG_CAP_RDATA, 32'hBEEF, "result read");
    pkt_count = 32'd12345; rd_check(REG_PKT_CNT, 32'd12345, "packet count read");
    rx_pkts = 32'd77; rx_bit_errors = 32'd5; rx_short_pkts = 32'd2; rx_hdr = 4'hC;
    for (int j = 0; j < 4; j++) rx_words[j] = $urandom;
    rd_check(REG_RX_PKTS, 77, "rx packets"); rd_check(REG_RX_ERR, 5, "rx errors");
    rd_check(REG_RX_SHORT, 2, "rx short"); rd_check(REG_RX_HDR, 32'hC, "rx header");
    for (int j = 0; j < 4; j++) rd_check(8'(REG_RX_WORD0 + j), rx_words[j], "rx word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
