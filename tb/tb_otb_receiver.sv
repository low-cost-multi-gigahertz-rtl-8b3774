// tb_otb_receiver: self-checking test of the optical test bed receiver.
// The testbench builds returned packets UI by UI from the slot timing (frame
// and header for 56 of 64 bit periods, clock toggling over bits 5-50, payload
// on bits 12-43, two UIs per bit) with random gaps between packets. It checks
// the recovered words and header, then corrupts chosen payload and header bits
// and expects exactly that many bit errors, and cuts one packet short.
module tb_otb_receiver;
  import dlc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rx_frame = 0, rx_clk = 0;
  logic [3:0] rx_data = '0, rx_header = '0, exp_header = '0;
  logic [3:0][31:0] exp_payload = '0, rx_words;
  logic [3:0] rx_hdr;
  logic [31:0] rx_pkts, bit_errors, short_pkts;
  int checks = 0, failures = 0;

  otb_receiver dut (.*);

  always #1 clk = ~clk;

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  // send one packet (payload, header); the frame ends early at stop_bit
  task automatic send(input logic [3:0][31:0] pay, input logic [3:0] hdr, input int stop_bit);
    int b;
    for (int u = 0; u < 128; u++) begin
      @(negedge clk);
      b = u / 2;
      rx_frame  = (b < 56) && (b < stop_bit);
      rx_header = rx_frame ? hdr : 4'h0;
      rx_clk    = (b >= 5 && b < 51 && b < stop_bit) ? ((b - 5) % 2 == 0) : 1'b0;
      for (int j = 0; j < 4; j++) rx_data[j] = (b >= 12 && b < 44) ? pay[j][b-12] : 1'b0;
    end
    repeat ($urandom % 7) @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0][31:0] pay, bad;
    int errs, flips;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    errs = 0;
    for (int p = 0; p < 20; p++) begin
      for (int j = 0; j < 4; j++) pay[j] = $urandom;
      exp_payload = pay; exp_header = 4'($urandom);
      bad = pay; flips = 0;
      if (p % 4 == 3) begin
        for (int k = 0; k < 3; k++) begin
          bad[k][(p + 7 * k) % 32] = ~bad[k][(p + 7 * k) % 32];
          flips++;
        end
      end
      send(bad, (p == 10) ? ~exp_header : exp_header, 99);
      if (p == 10) flips += 4;
      errs += flips;
      check(rx_pkts, 32'(p + 1), "packets received");
      for (int j = 0; j < 4; j++) check(rx_words[j], bad[j], $sformatf("packet %0d lane %0d", p, j));
      check(32'(rx_hdr), (p == 10) ? 32'(4'(~exp_header)) : 32'(exp_header), "header");
      check(bit_errors, 32'(errs), $sformatf("bit errors after packet %0d", p));
      check(short_pkts, 0, "no short packets");
    end
    // a packet whose frame ends after 20 bit periods
    send(pay, exp_header, 20);
    check(short_pkts, 1, "short packet counted");
    check(rx_pkts, 21, "short packet still counted as received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
