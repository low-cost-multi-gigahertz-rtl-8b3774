// tb_pecl_tx_pair: self-checking test of the XOR output stage.
// A 16-UI phase counter drives the pair; random a/b words are presented at
// phase 14 of each word, as the top does. The testbench expects, in word n,
// UI 2k = a_n[k] ^ b_n[k-1] (b_{n-1}[7] for k = 0) and UI 2k+1 = a_n[k] ^ b_n[k],
// i.e. one output bit per UI (5 Gbps) with serializer B one UI behind A.
module tb_pecl_tx_pair;
  localparam int W = 8;
  logic clk = 0, rst_n = 0;
  logic [3:0] phase = '0;
  logic [W-1:0] a_word = '0, b_word = '0;
  logic dout;
  int checks = 0, failures = 0;

  pecl_tx_pair #(.W(W)) dut (.*);

  always #1 clk = ~clk;
  always_ff @(posedge clk) if (rst_n) phase <= phase + 1'b1;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int N = 100;
  logic [W-1:0] wa [N], wb [N];
  int presented = 0, shown = -1;

  // driver: present word `presented` during phase 14
  always @(negedge clk) if (rst_n && phase == 4'd14 && presented < N) begin
    a_word <= wa[presented];
    b_word <= wb[presented];
    presented <= presented + 1;
  end

  initial begin
    logic exp, bprev;
    for (int n = 0; n < N; n++) begin wa[n] = W'($urandom); wb[n] = W'($urandom); end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    while (presented == 0) @(negedge clk);
    forever begin
      @(negedge clk);
      if (phase == 4'd0) shown++;
      if (shown >= N) break;
      if (shown >= 0) begin
        bprev = (shown == 0) ? 1'b0 : wb[shown-1][W-1];
        if (phase[0] == 1'b0)
          exp = wa[shown][phase/2] ^ ((phase == 0) ? bprev : wb[shown][phase/2-1]);
        else
          exp = wa[shown][phase/2] ^ wb[shown][phase/2];
        checks++;
        if (dout !== exp) begin
          failures++;
          $display("FAIL word %0d UI %0d: got %0b exp %0b", shown, phase, dout, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
