// dlc_pkg: constants, register map and shared types of the digital logic core.
//
// Time base: one cycle of the design clock is one unit interval (UI, 200 ps)
// of the 5 Gbps miniature-tester output. The FPGA logic proper runs at the word
// rate, one word every UI_PER_WORD = 16 UI (3.2 ns, 312.5 MHz), which is inside
// the 300-400 Mbps the FPGA I/O is run at. An 8:1 PECL serializer fed at that
// rate and shifting every second UI gives a 2.5 Gbps lane; two such lanes half
// a bit apart, XORed, give 5 Gbps.
//
// The register map is this design's own; the PC reaches it through the USB
// microcontroller, whose bus protocol is not modelled.
package dlc_pkg;

  localparam int UI_PER_WORD = 16;  // 5 Gbps UIs per DLC word cycle
  localparam int SER_W       = 8;   // serializer ratio (two groups of eight)
  localparam int MT_W        = 2 * SER_W;  // bits of the 5 Gbps stream per word
  localparam int OTB_LANES   = 4;   // optical test bed payload lanes
  localparam int HDR_BITS    = 4;   // header (routing address) lanes
  localparam int OTB_CH      = OTB_LANES + 1 + 1 + HDR_BITS;  // lanes with an edge delay
  localparam int DLY_W       = 10;  // delay code: 10 ps LSB, 10 ns range
  localparam int FINE_PER_UI = 20;  // 200 ps UI / 10 ps

  // Host register addresses
  typedef enum logic [7:0] {
    REG_CTRL      = 8'h00,  // [0] otb_en [1] otb_prbs [2] mt_en [3] mt_pattern [4] clock_select
    REG_OTB_ADDR  = 8'h01,  // [3:0] header / routing address
    REG_PAYLOAD0  = 8'h02,  // 02..05: 32-bit payload word of lane 0..3
    REG_PAT_LEN   = 8'h06,  // pattern length in 16-bit words (1..depth)
    REG_PAT_WADDR = 8'h07,  // pattern write pointer
    REG_PAT_WDATA = 8'h08,  // write [15:0] at pointer, pointer increments
    REG_TX_DLY_A  = 8'h10,
    REG_TX_DLY_B  = 8'h11,
    REG_OTB_DLY0  = 8'h20,  // 20..29: per-lane delay, order data0..3, clk, frame, header0..3
    REG_CAP_CTRL  = 8'h30,  // write [0]=1 starts a sweep; [2:1] data select
    REG_CAP_PER   = 8'h31,  // pattern period in UI
    REG_CAP_STEPS = 8'h32,  // number of 10 ps delay steps
    REG_CAP_NSAMP = 8'h33,  // samples per step
    REG_CAP_STAT  = 8'h34,  // read: [0] busy [1] done
    REG_CAP_RADDR = 8'h35,  // result read address
    REG_CAP_RDATA = 8'h36,  // read: count of ones at that step
    REG_PKT_CNT   = 8'h3F,  // read: packets sent
    REG_RX_PKTS   = 8'h40,  // read: packets received
    REG_RX_ERR    = 8'h41,  // read: payload/header bits received wrong
    REG_RX_SHORT  = 8'h42,  // read: packets with too few clock edges
    REG_RX_HDR    = 8'h43,  // read: header of the last packet
    REG_RX_WORD0  = 8'h44   // 44..47 read: payload of lane 0..3, last packet
  } reg_addr_e;

  typedef struct packed {
    logic clock_select;
    logic mt_pattern;  // 0: PRBS, 1: host pattern
    logic mt_en;
    logic otb_prbs;    // 0: packets, 1: continuous PRBS on the data lanes
    logic otb_en;
  } ctrl_t;

  // One word cycle of the optical test bed transmitter
  typedef struct packed {
    logic [HDR_BITS-1:0]             header;
    logic                            frame;
    logic [SER_W-1:0]                clk_word;
    logic [OTB_LANES-1:0][SER_W-1:0] data_word;
  } otb_word_t;

endpackage
