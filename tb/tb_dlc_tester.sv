// tb_dlc_tester: end-to-end test of the digital logic core at its default sizes.
// Acting as the PC, the testbench programs the core through the register bus
// and checks the serial outputs UI by UI against models built only from the
// timing numbers and the PRBS7 polynomial:
//  1. optical test bed packets: two slots of frame, header, clock and four
//     payload lanes at 2.5 Gbps (each bit held two 200 ps UIs), packet count;
//     the lanes are looped back through an 11-UI delay into the receiver,
//     which must recover header and payload without errors, and count errors
//     while one lane is inverted;
//  2. optical test bed PRBS mode (mode switch from packets);
//  3. miniature tester PRBS at 5 Gbps through the XOR stage (one bit per UI);
//  4. miniature tester host pattern (mode switch to pattern memory);
//  5. a full 1000-step (10 ns in 10 ps steps) capture sweep of the looped-back
//     5 Gbps output, with coarse wrap-around: result[s] must equal
//     nsamp * pattern bit at UI (s / 20 + offset) mod 16;
//  6. delay codes and clock select reach their ports.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_dlc_tester;
  import dlc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata;
  logic host_we = 0;
  logic [3:0] otb_data, otb_header, mt_in;
  logic otb_clk, otb_frame, mt_out, clock_select;
  logic [OTB_CH-1:0][9:0] otb_delay;
  logic [9:0] tx_delay_a, tx_delay_b, rx_delay;
  int checks = 0, failures = 0;

  dlc_tester dut (.*);

  assign mt_in = {1'b0, mt_out, 2'b11};  // returned signal on input 2

  // optical loopback through a LOOP_UI-long "fiber"; `corrupt` inverts lane 1
  localparam int LOOP_UI = 11;
  logic otb_rx_frame, otb_rx_clk;
  logic [3:0] otb_rx_data, otb_rx_header;
  logic [9:0] fib [LOOP_UI];
  logic corrupt = 0;
  initial for (int i = 0; i < LOOP_UI; i++) fib[i] = '0;
  always @(posedge clk) begin
    fib[0] <= rst_n ? {otb_frame, otb_clk, otb_header, otb_data} : '0;
    for (int i = 1; i < LOOP_UI; i++) fib[i] <= fib[i-1];
  end
  assign {otb_rx_frame, otb_rx_clk, otb_rx_header} = fib[LOOP_UI-1][9:4];
  assign otb_rx_data = fib[LOOP_UI-1][3:0] ^ {2'b00, corrupt, 1'b0};

  always #1 clk = ~clk;

  // mechanism counters
  int n_packets = 0, n_otb_prbs = 0, n_mt_prbs = 0, n_mt_pattern = 0, n_mode_switch = 0;
  int n_sweeps = 0, n_coarse_wrap = 0, n_rx_packets = 0, n_rx_errors = 0;

  localparam int MAXREC = 1200;
  logic rec_d [4][MAXREC];
  logic rec_c [MAXREC], rec_f [MAXREC], rec_mt [MAXREC];
  logic [3:0] rec_h [MAXREC];
  bit ref7 [127];

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); host_addr = a; host_wdata = d; host_we = 1;
    @(negedge clk); host_we = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); host_addr = a;
    @(posedge clk); d = host_rdata;
  endtask

  task automatic record(input int n);
    for (int u = 0; u < n; u++) begin
      @(negedge clk);
      for (int j = 0; j < 4; j++) rec_d[j][u] = otb_data[j];
      rec_c[u] = otb_clk; rec_f[u] = otb_frame; rec_h[u] = otb_header; rec_mt[u] = mt_out;
    end
  endtask

  // offset o with seq[i] == ref7[(o + i) % 127] for all i, or -1
  function automatic int prbs_align(input bit seq [], input int n);
    for (int o = 0; o < 127; o++) begin
      bit ok = 1;
      for (int i = 0; i < n && ok; i++) if (seq[i] != ref7[(o + i) % 127]) ok = 0;
      if (ok) return o;
    end
    return -1;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [31:0] v;
    logic [31:0] pay [4];
    logic [3:0] hdr;
    logic [15:0] pat [3];
    int u0, b, o, off;
    bit seq [];
    logic [6:0] s;

    s = '1;
    for (int i = 0; i < 127; i++) begin ref7[i] = s[6]; s = {s[5:0], s[6] ^ s[5]}; end

    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;

    // ---------------------------------------------------------- 1. packets
    hdr = 4'h9;
    wr(REG_OTB_ADDR, 32'(hdr));
    for (int j = 0; j < 4; j++) begin pay[j] = $urandom; wr(8'(REG_PAYLOAD0 + j), pay[j]); end
    wr(REG_CTRL, 32'h01);
    record(MAXREC);
    u0 = -1;
    for (int u = 1; u < MAXREC && u0 < 0; u++) if (!rec_f[u-1] && rec_f[u]) u0 = u;
    check(32'(u0 >= 0 && u0 + 256 <= MAXREC), 1, "frame rises");
    if (u0 >= 0 && u0 + 256 <= MAXREC)
      for (int p = 0; p < 2; p++) begin
        for (int u = 0; u < 128; u++) begin
          int t;
          t = u0 + p * 128 + u;
          b = u / 2;
          check(32'(rec_f[t]), 32'(b < 56), $sformatf("frame slot %0d bit %0d", p, b));
          check(32'(rec_h[t]), (b < 56) ? 32'(hdr) : 0, "header");
          check(32'(rec_c[t]), (b >= 5 && b < 51) ? 32'((b - 5) % 2 == 0) : 0,
                $sformatf("clock slot %0d bit %0d", p, b));
          for (int j = 0; j < 4; j++)
            check(32'(rec_d[j][t]), (b >= 12 && b < 44) ? 32'(pay[j][b-12]) : 0,
                  $sformatf("data%0d slot %0d bit %0d", j, p, b));
        end
        n_packets++;
      end
    rd(REG_PKT_CNT, v);
    check(32'(v >= 2), 1, "packet counter");
    // the looped-back packets are received intact
    rd(REG_RX_PKTS, v);
    check(32'(v >= 2), 1, "receiver packet counter");
    n_rx_packets += int'(v);
    rd(REG_RX_ERR, v);   check(v, 0, "no receive errors on a clean loop");
    rd(REG_RX_SHORT, v); check(v, 0, "no short packets");
    rd(REG_RX_HDR, v);   check(v, 32'(hdr), "received header");
    for (int j = 0; j < 4; j++) begin
      rd(8'(REG_RX_WORD0 + j), v);
      check(v, pay[j], $sformatf("received payload lane %0d", j));
    end
    // corrupt lane 1 for a while: errors must appear, then stop
    corrupt = 1;
    repeat (400) @(negedge clk);
    corrupt = 0;
    repeat (300) @(negedge clk);
    rd(REG_RX_ERR, v);
    check(32'(v > 0), 1, "receiver counts bit errors");
    if (v > 0) n_rx_errors++;
    begin
      logic [31:0] v2;
      repeat (300) @(negedge clk);
      rd(REG_RX_ERR, v2);
      check(v2, v, "errors stop with the corruption");
    end

    // ---------------------------------------------------------- 2. optical PRBS
    wr(REG_CTRL, 32'h03);
    n_mode_switch++;
    repeat (200) @(negedge clk);
    record(600);
    // find the lane's bit boundary: bits are held for two UIs
    seq = new[280];
    o = (rec_d[0][0] == rec_d[0][1]) ? 0 : 1;
    for (int j = 0; j < 4; j++) begin
      for (int i = 0; i < 280; i++) begin
        seq[i] = rec_d[j][o + 2 * i];
        check(32'(rec_d[j][o + 2 * i + 1]), 32'(seq[i]), "optical bit held two UIs");
      end
      check(32'(prbs_align(seq, 280) >= 0), 1, $sformatf("optical lane %0d is PRBS7", j));
    end
    for (int i = 0; i < 280; i++) check(32'(rec_c[o + 2 * i]), 32'(rec_c[o] ^ i[0]), "prbs clock lane toggles");
    n_otb_prbs++;

    // ---------------------------------------------------------- 3. mini tester PRBS
    wr(REG_CTRL, 32'h04);
    n_mode_switch++;
    repeat (200) @(negedge clk);
    record(800);
    seq = new[800];
    for (int i = 0; i < 800; i++) seq[i] = rec_mt[i];
    check(32'(prbs_align(seq, 800) >= 0), 1, "5 Gbps output is PRBS7, one bit per UI");
    n_mt_prbs++;

    // ---------------------------------------------------------- 4. mini tester pattern
    wr(REG_PAT_WADDR, 0);
    for (int i = 0; i < 3; i++) begin pat[i] = 16'($urandom); wr(REG_PAT_WDATA, 32'(pat[i])); end
    wr(REG_PAT_LEN, 3);
    wr(REG_CTRL, 32'h0C);
    n_mode_switch++;
    repeat (200) @(negedge clk);
    record(480);
    off = -1;
    for (int o2 = 0; o2 < 48 && off < 0; o2++) begin
      bit ok;
      ok = 1;
      for (int i = 0; i < 480 && ok; i++) begin
        int k;
        k = (o2 + i) % 48;
        if (rec_mt[i] !== pat[k / 16][k % 16]) ok = 0;
      end
      if (ok) off = o2;
    end
    check(32'(off >= 0), 1, "5 Gbps output repeats the 48-bit host pattern");
    n_mt_pattern++;

    // ---------------------------------------------------------- 5. capture sweep
    wr(REG_PAT_WADDR, 0);
    pat[0] = 16'($urandom) | 16'h0001; pat[0][15] = 1'b0;  // both levels present
    wr(REG_PAT_WDATA, 32'(pat[0]));
    wr(REG_PAT_LEN, 1);
    repeat (64) @(negedge clk);
    wr(REG_CAP_PER, 16);
    wr(REG_CAP_STEPS, 1000);
    wr(REG_CAP_NSAMP, 4);
    wr(REG_CAP_CTRL, 32'h5);  // start, select input 2
    do begin
      repeat (100) @(negedge clk);
      rd(REG_CAP_STAT, v);
    end while (v[0]);
    check(v[1], 1, "sweep done");
    n_sweeps++;
    begin
      int res [1000];
      for (int st = 0; st < 1000; st++) begin
        wr(REG_CAP_RADDR, st);
        rd(REG_CAP_RDATA, v);
        res[st] = int'(v);
      end
      off = -1;
      for (int o2 = 0; o2 < 16 && off < 0; o2++) begin
        bit ok;
        ok = 1;
        for (int st = 0; st < 1000 && ok; st++)
          if (res[st] != 4 * int'(pat[0][(st / 20 + o2) % 16])) ok = 0;
        if (ok) off = o2;
      end
      check(32'(off >= 0), 1, "sweep results trace the looped-back pattern");
      // steps 320.. revisit the same UIs as steps 0..: the coarse position wrapped
      for (int st = 320; st < 1000; st++) check(32'(res[st]), 32'(res[st - 320]), "coarse wrap");
      n_coarse_wrap++;
    end

    // ---------------------------------------------------------- 6. delays and clock select
    wr(REG_TX_DLY_A, 32'd123); wr(REG_TX_DLY_B, 32'd456);
    check(32'(tx_delay_a), 123, "tx delay a port"); check(32'(tx_delay_b), 456, "tx delay b port");
    for (int j = 0; j < OTB_CH; j++) wr(8'(REG_OTB_DLY0 + j), 32'(j * 97));
    for (int j = 0; j < OTB_CH; j++) check(32'(otb_delay[j]), 32'(j * 97), "otb delay port");
    wr(REG_CTRL, 32'h10);
    check(32'(clock_select), 1, "clock select port");

    if (n_rx_packets == 0)  begin failures++; $display("FAIL no packet received"); end
    if (n_rx_errors == 0)   begin failures++; $display("FAIL no receive error detected"); end
    $display("mechanisms: rx_packets=%0d rx_errors=%0d", n_rx_packets, n_rx_errors);
    $display("mechanisms: packets=%0d otb_prbs=%0d mt_prbs=%0d mt_pattern=%0d mode_switch=%0d sweeps=%0d coarse_wrap=%0d",
             n_packets, n_otb_prbs, n_mt_prbs, n_mt_pattern, n_mode_switch, n_sweeps, n_coarse_wrap);
    if (n_packets == 0)     begin failures++; $display("FAIL no packet"); end
    if (n_otb_prbs == 0)    begin failures++; $display("FAIL no optical PRBS"); end
    if (n_mt_prbs == 0)     begin failures++; $display("FAIL no 5G PRBS"); end
    if (n_mt_pattern == 0)  begin failures++; $display("FAIL no pattern"); end
    if (n_mode_switch == 0) begin failures++; $display("FAIL no mode switch"); end
    if (n_sweeps == 0)      begin failures++; $display("FAIL no sweep"); end
    if (n_coarse_wrap == 0) begin failures++; $display("FAIL no coarse wrap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
