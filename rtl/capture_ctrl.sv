// capture_ctrl: equivalent-time sampling sweep of the miniature tester.
//
// The returned signal repeats every `period` UI. For each delay step s
// (0 .. nsteps-1, 10 ps per step) the controller sets the capture delay,
// waits SETTLE cycles for the delay line, then fires the capture strobe
// `nsamp` times, once per pattern period at UI offset coarse, and counts how
// many captured bits were 1. The count is written to result[s]. The step is
// split as s = coarse * FINE_PER_UI + fine: `fine` (0..19, 10 ps units) goes
// to the external clock delay, `coarse` (whole 200 ps UIs, taken modulo the
// period) is the strobe's position. Plotting result[] against s traces the
// waveform, or the eye with a PRBS, at 10 ps resolution.
// The paper names picosecond sampling under FPGA control and 10 ps resolution
// over a 10 ns range; the sweep itself is this design's.
// Interface: `start` (one cycle) begins a sweep from step 0 and clears `done`;
// `busy` is high during it. result[] is read through rd_addr -> rd_data,
// registered (one cycle). Each strobe expects q_valid one cycle later.
module capture_ctrl
  import dlc_pkg::*;
#(
  parameter int RES_DEPTH   = 1024,
  parameter int CNT_W       = 16,
  parameter int PER_W       = 16,
  parameter int SETTLE      = 16,
  parameter int FINE_STEPS  = FINE_PER_UI
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [PER_W-1:0]             period,
  input  logic [$clog2(RES_DEPTH):0]   nsteps,
  input  logic [CNT_W-1:0]             nsamp,
  output logic                         strobe,
  input  logic                         q,
  input  logic                         q_valid,
  output logic [DLY_W-1:0]             fine_code,
  output logic                         busy,
  output logic                         done,
  input  logic [$clog2(RES_DEPTH)-1:0] rd_addr,
  output logic [CNT_W-1:0]             rd_data
);
  localparam int AW = $clog2(RES_DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_SETTLE, S_SAMPLE, S_STORE} state_e;
  state_e state;

  logic [CNT_W-1:0]  result [RES_DEPTH];
  logic [PER_W-1:0]  ph, coarse;
  logic [DLY_W-1:0]  fine;
  logic [AW:0]       step;
  logic [7:0]        settle_cnt;
  logic [CNT_W-1:0]  issued, got, ones;

  assign busy      = (state != S_IDLE);
  assign fine_code = fine;
  assign strobe    = (state == S_SAMPLE) && (ph == coarse) && (issued < nsamp);

  always_ff @(posedge clk) begin
    if (state == S_STORE) result[step[AW-1:0]] <= ones;
    rd_data <= result[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      ph         <= '0;
      coarse     <= '0;
      fine       <= '0;
      step       <= '0;
      settle_cnt <= '0;
      issued     <= '0;
      got        <= '0;
      ones       <= '0;
    end else begin
      // pattern phase counter, free running modulo period
      ph <= (ph + 1'b1 >= period) ? '0 : ph + 1'b1;
      unique case (state)
        S_IDLE: if (start && nsteps != 0 && period != 0 && nsamp != 0) begin
          state      <= S_SETTLE;
          done       <= 1'b0;
          ph         <= '0;
          coarse     <= '0;
          fine       <= '0;
          step       <= '0;
          settle_cnt <= '0;
        end
        S_SETTLE: begin
          settle_cnt <= settle_cnt + 1'b1;
          if (int'(settle_cnt) == SETTLE - 1) begin
            state  <= S_SAMPLE;
            issued <= '0;
            got    <= '0;
            ones   <= '0;
          end
        end
        S_SAMPLE: begin
          if (strobe) issued <= issued + 1'b1;
          if (q_valid) begin
            got  <= got + 1'b1;
            ones <= ones + CNT_W'(q);
            if (got + 1'b1 == nsamp) state <= S_STORE;
          end
        end
        S_STORE: begin
          settle_cnt <= '0;
          step       <= step + 1'b1;
          if (int'(fine) == FINE_STEPS - 1) begin
            fine   <= '0;
            coarse <= (coarse + 1'b1 >= period) ? '0 : coarse + 1'b1;
          end else begin
            fine <= fine + 1'b1;
          end
          if (step + 1'b1 == nsteps) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_SETTLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a strobe answered by exactly one q_valid, one cycle later
  property p_strobe_answered;
    @(posedge clk) disable iff (!rst_n) strobe |=> q_valid;
  endproperty
  assert property (p_strobe_answered);

  initial assert (SETTLE >= 1 && SETTLE <= 256) else $error("capture_ctrl: SETTLE out of range");
endmodule
