// dlc_tester: the digital logic core of the PECL test systems, top level.
//
// One FPGA-based core drives two multi-gigabit test set-ups:
//  * Optical test bed transmitter: packet_gen builds Data Vortex packets
//    (frame, 4 header bits, a source-synchronous clock and 4 payload lanes)
//    one 8-bit word per lane per word cycle; five 8:1 serializers turn the
//    clock and payload lanes into 2.5 Gbps streams, frame and header leave at
//    word rate. A PRBS mode replaces the packets for eye tests. otb_receiver
//    recovers the payload of returned packets with their own clock lane and
//    counts bit errors against what was sent.
//  * Miniature tester: pattern_source (PRBS or host pattern) gives 16 bits per
//    word cycle, xor_precoder splits them for pecl_tx_pair, whose two
//    serializers, half a bit apart, are XORed into one 5 Gbps stream.
//    data_capture and capture_ctrl sample a returned signal, sweeping the
//    capture delay in 10 ps steps and counting ones per step.
//  * host_regs holds everything the PC sets through USB, including the codes
//    of the analog delay lines and the RF clock select, which leave as ports.
// Time base: clk is one 200 ps UI of the 5 Gbps stream; a 16-UI phase counter
// makes the 312.5 MHz word cycle. Per word: sources update at the end of
// phase 13, the precoder at 14, serializer A / optical lanes and frame/header
// load at 15, serializer B at 0. Optical lanes shift at the end of odd phases.
// The block structure follows the paper's diagrams; the single clock domain,
// the register bus and the word pipeline are this design's choices.
module dlc_tester
  import dlc_pkg::*;
#(
  parameter int PAT_DEPTH = 64,
  parameter int RES_DEPTH = 1024
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host register bus (from the USB microcontroller)
  input  logic [7:0]                   host_addr,
  input  logic [31:0]                  host_wdata,
  input  logic                         host_we,
  output logic [31:0]                  host_rdata,
  // optical test bed transmitter
  output logic [OTB_LANES-1:0]         otb_data,
  output logic                         otb_clk,
  output logic                         otb_frame,
  output logic [HDR_BITS-1:0]          otb_header,
  output logic [OTB_CH-1:0][DLY_W-1:0] otb_delay,
  // optical test bed receiver (returned lanes)
  input  logic                         otb_rx_frame,
  input  logic                         otb_rx_clk,
  input  logic [OTB_LANES-1:0]         otb_rx_data,
  input  logic [HDR_BITS-1:0]          otb_rx_header,
  // miniature tester
  output logic                         mt_out,
  input  logic [3:0]                   mt_in,
  output logic [DLY_W-1:0]             tx_delay_a,
  output logic [DLY_W-1:0]             tx_delay_b,
  output logic [DLY_W-1:0]             rx_delay,
  output logic                         clock_select
);
  localparam int PW = $clog2(PAT_DEPTH);
  localparam int RW = $clog2(RES_DEPTH);

  // ---------------------------------------------------------------- word timing
  logic [3:0] phase;
  logic       src_en, pre_en, lane_load, lane_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= '0;
    else        phase <= phase + 1'b1;
  end

  assign src_en     = (int'(phase) == UI_PER_WORD - 3);
  assign pre_en     = (int'(phase) == UI_PER_WORD - 2);
  assign lane_load  = (int'(phase) == UI_PER_WORD - 1);
  assign lane_shift = phase[0] && !lane_load;

  // ---------------------------------------------------------------- registers
  ctrl_t                       ctrl;
  logic [HDR_BITS-1:0]         otb_addr;
  logic [OTB_LANES-1:0][31:0]  payload;
  logic [PW:0]                 pat_len;
  logic                        pat_wr_en;
  logic [PW-1:0]               pat_wr_addr;
  logic [MT_W-1:0]             pat_wr_data;
  logic                        cap_start, cap_busy, cap_done;
  logic [1:0]                  cap_sel;
  logic [15:0]                 cap_period, cap_nsamp, cap_rdata;
  logic [RW:0]                 cap_nsteps;
  logic [RW-1:0]               cap_raddr;
  logic [31:0]                 pkt_count;
  logic [31:0]                 rx_pkts, rx_bit_errors, rx_short_pkts;
  logic [HDR_BITS-1:0]         rx_hdr;
  logic [OTB_LANES-1:0][31:0]  rx_words;

  host_regs #(.PAT_DEPTH(PAT_DEPTH), .RES_DEPTH(RES_DEPTH)) u_regs (
    .clk, .rst_n,
    .addr(host_addr), .wdata(host_wdata), .we(host_we), .rdata(host_rdata),
    .ctrl, .otb_addr, .payload, .pat_len, .pat_wr_en, .pat_wr_addr, .pat_wr_data,
    .tx_delay_a, .tx_delay_b, .otb_delay,
    .cap_start, .cap_sel, .cap_period, .cap_nsteps, .cap_nsamp, .cap_raddr,
    .cap_busy, .cap_done, .cap_rdata, .pkt_count,
    .rx_pkts, .rx_bit_errors, .rx_short_pkts, .rx_hdr, .rx_words
  );

  assign clock_select = ctrl.clock_select;

  // ---------------------------------------------------------------- optical test bed
  logic [SER_W-1:0] otb_prbs_word;
  otb_word_t        otb_word;
  logic [OTB_LANES:0][SER_W-1:0] lane_words;  // data0..3, clock
  logic [OTB_LANES:0]            lane_out;

  prbs_gen #(.W(SER_W)) u_otb_prbs (
    .clk, .rst_n, .en(src_en && ctrl.otb_en && ctrl.otb_prbs), .word(otb_prbs_word)
  );

  packet_gen u_pkt (
    .clk, .rst_n, .word_en(src_en),
    .enable(ctrl.otb_en && !ctrl.otb_prbs),
    .prbs_mode(ctrl.otb_en && ctrl.otb_prbs),
    .addr(otb_addr), .payload, .prbs_word(otb_prbs_word),
    .word(otb_word), .pkt_count
  );

  assign lane_words = {otb_word.clk_word, otb_word.data_word};

  for (genvar l = 0; l <= OTB_LANES; l++) begin : g_lane
    serializer #(.W(SER_W)) u_ser (
      .clk, .rst_n, .load(lane_load), .shift(lane_shift),
      .din(lane_words[l]), .sout(lane_out[l])
    );
  end

  assign otb_data = lane_out[OTB_LANES-1:0];
  assign otb_clk  = lane_out[OTB_LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      otb_frame  <= 1'b0;
      otb_header <= '0;
    end else if (lane_load) begin
      otb_frame  <= otb_word.frame;
      otb_header <= otb_word.header;
    end
  end

  otb_receiver u_rx (
    .clk, .rst_n,
    .rx_frame(otb_rx_frame), .rx_clk(otb_rx_clk), .rx_data(otb_rx_data), .rx_header(otb_rx_header),
    .exp_header(otb_addr), .exp_payload(payload),
    .rx_words, .rx_hdr, .rx_pkts, .bit_errors(rx_bit_errors), .short_pkts(rx_short_pkts)
  );

  // ---------------------------------------------------------------- miniature tester TX
  logic [MT_W-1:0]  mt_word;
  logic [SER_W-1:0] a_word, b_word;

  pattern_source #(.W(MT_W), .DEPTH(PAT_DEPTH)) u_src (
    .clk, .rst_n, .word_en(src_en), .run(ctrl.mt_en), .pattern_mode(ctrl.mt_pattern),
    .len(pat_len), .wr_en(pat_wr_en), .wr_addr(pat_wr_addr), .wr_data(pat_wr_data),
    .word(mt_word)
  );

  xor_precoder #(.W(SER_W)) u_pre (
    .clk, .rst_n, .en(pre_en), .d(mt_word), .a_word, .b_word
  );

  pecl_tx_pair #(.W(SER_W)) u_tx (
    .clk, .rst_n, .phase, .a_word, .b_word, .dout(mt_out)
  );

  // ---------------------------------------------------------------- miniature tester RX
  logic strobe, q, q_valid;

  data_capture #(.N(4)) u_cap (
    .clk, .rst_n, .din(mt_in), .sel(cap_sel), .strobe, .q, .q_valid
  );

  capture_ctrl #(.RES_DEPTH(RES_DEPTH)) u_sweep (
    .clk, .rst_n, .start(cap_start), .period(cap_period), .nsteps(cap_nsteps),
    .nsamp(cap_nsamp), .strobe, .q, .q_valid, .fine_code(rx_delay),
    .busy(cap_busy), .done(cap_done), .rd_addr(cap_raddr), .rd_data(cap_rdata)
  );
endmodule
