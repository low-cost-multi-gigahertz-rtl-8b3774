// host_regs: register file between the PC (through the USB microcontroller)
// and the test logic.
//
// The PC gives high-level control: it enables the transmitters, chooses the
// data source, loads the Data Vortex header and payload words and the
// miniature-tester pattern, sets every programmable delay and the RF clock
// select, starts capture sweeps and reads back their results. The register
// map (dlc_pkg::reg_addr_e) and the simple bus are this design's own: a write
// takes effect at the clock edge where `we` is high; `rdata` is combinational
// from `addr`. Reading REG_CAP_RDATA returns the result word addressed by
// REG_CAP_RADDR one cycle after that register was written. The optical
// receiver's counters and last packet are read-only registers.
// Writing REG_PAT_WDATA stores a pattern word at the write pointer and
// advances the pointer; writing REG_CAP_CTRL with bit 0 set pulses cap_start.
module host_regs
  import dlc_pkg::*;
#(
  parameter int PAT_DEPTH = 64,
  parameter int RES_DEPTH = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [7:0]                     addr,
  input  logic [31:0]                    wdata,
  input  logic                           we,
  output logic [31:0]                    rdata,
  output ctrl_t                          ctrl,
  output logic [HDR_BITS-1:0]            otb_addr,
  output logic [OTB_LANES-1:0][31:0]     payload,
  output logic [$clog2(PAT_DEPTH):0]     pat_len,
  output logic                           pat_wr_en,
  output logic [$clog2(PAT_DEPTH)-1:0]   pat_wr_addr,
  output logic [MT_W-1:0]                pat_wr_data,
  output logic [DLY_W-1:0]               tx_delay_a,
  output logic [DLY_W-1:0]               tx_delay_b,
  output logic [OTB_CH-1:0][DLY_W-1:0]   otb_delay,
  output logic                           cap_start,
  output logic [1:0]                     cap_sel,
  output logic [15:0]                    cap_period,
  output logic [$clog2(RES_DEPTH):0]     cap_nsteps,
  output logic [15:0]                    cap_nsamp,
  output logic [$clog2(RES_DEPTH)-1:0]   cap_raddr,
  input  logic                           cap_busy,
  input  logic                           cap_done,
  input  logic [15:0]                    cap_rdata,
  input  logic [31:0]                    pkt_count,
  input  logic [31:0]                    rx_pkts,
  input  logic [31:0]                    rx_bit_errors,
  input  logic [31:0]                    rx_short_pkts,
  input  logic [HDR_BITS-1:0]            rx_hdr,
  input  logic [OTB_LANES-1:0][31:0]     rx_words
);
  localparam int PW = $clog2(PAT_DEPTH);
  localparam int RW = $clog2(RES_DEPTH);

  logic [PW-1:0] wptr;

  logic [7:0]    pay_idx, dly_idx, rxw_idx;
  logic          in_payload, in_otb_dly, in_rx_word;

  assign pat_wr_addr = wptr;
  assign pay_idx     = addr - REG_PAYLOAD0;
  assign dly_idx     = addr - REG_OTB_DLY0;
  assign in_payload  = (addr >= REG_PAYLOAD0) && (int'(pay_idx) < OTB_LANES);
  assign in_otb_dly  = (addr >= REG_OTB_DLY0) && (int'(dly_idx) < OTB_CH);
  assign rxw_idx     = addr - REG_RX_WORD0;
  assign in_rx_word  = (addr >= REG_RX_WORD0) && (int'(rxw_idx) < OTB_LANES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl        <= '0;
      otb_addr    <= '0;
      payload     <= '0;
      pat_len     <= (PW+1)'(1);
      wptr        <= '0;
      pat_wr_en   <= 1'b0;
      pat_wr_data <= '0;
      tx_delay_a  <= '0;
      tx_delay_b  <= '0;
      otb_delay   <= '0;
      cap_start   <= 1'b0;
      cap_sel     <= '0;
      cap_period  <= 16'd1;
      cap_nsteps  <= '0;
      cap_nsamp   <= '0;
      cap_raddr   <= '0;
    end else begin
      cap_start <= 1'b0;
      pat_wr_en <= 1'b0;
      if (pat_wr_en) wptr <= wptr + 1'b1;
      if (we) begin
        if (in_payload)
          payload[pay_idx[1:0]] <= wdata;
        if (in_otb_dly)
          otb_delay[dly_idx[3:0]] <= wdata[DLY_W-1:0];
        case (addr)
          REG_CTRL:      ctrl        <= wdata[$bits(ctrl_t)-1:0];
          REG_OTB_ADDR:  otb_addr    <= wdata[HDR_BITS-1:0];
          REG_PAT_LEN:   pat_len     <= wdata[PW:0];
          REG_PAT_WADDR: wptr        <= wdata[PW-1:0];
          REG_PAT_WDATA: begin
            pat_wr_en   <= 1'b1;
            pat_wr_data <= wdata[MT_W-1:0];
          end
          REG_TX_DLY_A:  tx_delay_a  <= wdata[DLY_W-1:0];
          REG_TX_DLY_B:  tx_delay_b  <= wdata[DLY_W-1:0];
          REG_CAP_CTRL: begin
            cap_start <= wdata[0];
            cap_sel   <= wdata[2:1];
          end
          REG_CAP_PER:   cap_period  <= wdata[15:0];
          REG_CAP_STEPS: cap_nsteps  <= wdata[RW:0];
          REG_CAP_NSAMP: cap_nsamp   <= wdata[15:0];
          REG_CAP_RADDR: cap_raddr   <= wdata[RW-1:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (in_payload)
      rdata = payload[pay_idx[1:0]];
    else if (in_otb_dly)
      rdata = 32'(otb_delay[dly_idx[3:0]]);
    else if (in_rx_word)
      rdata = rx_words[rxw_idx[1:0]];
    else
      case (addr)
        REG_CTRL:      rdata = 32'(ctrl);
        REG_OTB_ADDR:  rdata = 32'(otb_addr);
        REG_PAT_LEN:   rdata = 32'(pat_len);
        REG_PAT_WADDR: rdata = 32'(wptr);
        REG_TX_DLY_A:  rdata = 32'(tx_delay_a);
        REG_TX_DLY_B:  rdata = 32'(tx_delay_b);
        REG_CAP_CTRL:  rdata = 32'({cap_sel, 1'b0});
        REG_CAP_PER:   rdata = 32'(cap_period);
        REG_CAP_STEPS: rdata = 32'(cap_nsteps);
        REG_CAP_NSAMP: rdata = 32'(cap_nsamp);
        REG_CAP_STAT:  rdata = {30'd0, cap_done, cap_busy};
        REG_CAP_RADDR: rdata = 32'(cap_raddr);
        REG_CAP_RDATA: rdata = 32'(cap_rdata);
        REG_PKT_CNT:   rdata = pkt_count;
        REG_RX_PKTS:   rdata = rx_pkts;
        REG_RX_ERR:    rdata = rx_bit_errors;
        REG_RX_SHORT:  rdata = rx_short_pkts;
        REG_RX_HDR:    rdata = 32'(rx_hdr);
        default:       rdata = '0;
      endcase
  end
endmodule
