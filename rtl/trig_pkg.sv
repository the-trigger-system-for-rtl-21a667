// trig_pkg: types and constants shared by the trigger system.
//
// The link words: every word on a fibre link is 16 bits wide. The slave
// trigger module (STM) sends sub-trigger words {4'b0100, Tsum[11:0]}; the
// 4-bit tag 4'b0100 follows the paper. The global trigger word sent back by
// the master trigger module (MTM), the idle/comma word and the register map
// are choices of this design. Idle word: low byte K28.5 (the comma used for
// byte alignment), high byte D16.2, TXCHARISK = 2'b01.
package trig_pkg;

  localparam logic [3:0]  TAG_SUB   = 4'b0100;   // sub-trigger information
  localparam logic [3:0]  TAG_GT    = 4'b1000;   // global trigger (this design)
  localparam logic [7:0]  K28_5     = 8'hBC;
  localparam logic [7:0]  D16_2     = 8'h50;
  localparam logic [15:0] IDLE_WORD = {D16_2, K28_5};
  localparam logic [15:0] GT_WORD   = {TAG_GT, 12'h000};

  // Parallel side of one GTP transceiver, as seen from the FPGA fabric.
  typedef struct packed {
    logic [15:0] txdata;
    logic [1:0]  txcharisk;
    logic        pllreset;
    logic        gttxreset;
    logic        gtrxreset;
  } gtp_out_t;

  typedef struct packed {
    logic [15:0] rxdata;
    logic [1:0]  rxcharisk;
    logic        plllock;
    logic        txresetdone;
    logic        rxresetdone;
  } gtp_in_t;

  // Register port between the PXI interface CPLD and the FPGA.
  typedef struct packed {
    logic [7:0]  addr;
    logic [31:0] wdata;
    logic        we;
    logic        re;
  } reg_req_t;

  // MTM pattern selection (the MUX of the MTM trigger logic).
  typedef enum logic [1:0] {
    MODE_ANY   = 2'd0,   // A||B||C||D
    MODE_ALL   = 2'd1,   // A&B&C&D
    MODE_PAIRS = 2'd2,   // A&B||C&D
    MODE_OFF   = 2'd3
  } gt_mode_e;

  // STM register map
  localparam logic [7:0] STM_R_CTRL   = 8'h00; // [0] INIT_PULSE (w), [1] test mode, [2] link ready (r)
  localparam logic [7:0] STM_R_MASK   = 8'h01; // input mask
  localparam logic [7:0] STM_R_EXPAND = 8'h02; // sub_trg_flag expansion time
  localparam logic [7:0] STM_R_ENDLY  = 8'h03; // enable pulse delay
  localparam logic [7:0] STM_R_GTCNT  = 8'h04; // global trigger count (write clears)
  localparam logic [7:0] STM_R_EVENT  = 8'h05; // write: one test event
  localparam logic [7:0] STM_R_SUBCNT = 8'h06; // sub-trigger words sent
  localparam logic [7:0] STM_R_RNUM   = 8'h10; // 0x10..0x1F: last test random numbers

  // MTM register map
  localparam logic [7:0] MTM_R_CTRL   = 8'h00; // [0] INIT_PULSE (w), [3:2] mode
  localparam logic [7:0] MTM_R_THRESH = 8'h01; // hit-number threshold
  localparam logic [7:0] MTM_R_HOLD   = 8'h02; // STnum hold time
  localparam logic [7:0] MTM_R_GTCNT  = 8'h03; // GT_OK count (write clears)
  localparam logic [7:0] MTM_R_LINKS  = 8'h04; // [15:0] link ready, [31:16] rx synced
  localparam logic [7:0] MTM_R_BUFST  = 8'h05; // [7:0] buffer count, [8] overflow
  localparam logic [7:0] MTM_R_POP    = 8'h06; // write: drop the buffer head
  localparam logic [7:0] MTM_R_DELAY  = 8'h10; // 0x10..0x1F: delay of ST_i
  localparam logic [7:0] MTM_R_BUF    = 8'h20; // 0x20..0x2F: STnum_i of the buffer head

  // Configuration commands of the CPLD (fpga_ps_reconfig)
  localparam logic [1:0] CFG_ERASE    = 2'd0;  // erase the sector holding addr
  localparam logic [1:0] CFG_PROGRAM  = 2'd1;  // program len bytes at addr
  localparam logic [1:0] CFG_RECONFIG = 2'd2;  // reload the FPGA, len bytes

  typedef struct packed {
    logic        start;
    logic [1:0]  op;
    logic [23:0] addr;
    logic [23:0] len;
    logic        wr_valid;
    logic [7:0]  wr_data;
  } cfg_cmd_t;

  typedef struct packed {
    logic wr_ready;
    logic busy;
    logic done;
    logic error;
  } cfg_stat_t;

  // serial flash and FPGA passive-serial pins driven by the CPLD
  typedef struct packed {
    logic sck;
    logic cs_n;
    logic mosi;
  } flash_out_t;

  typedef struct packed {
    logic nconfig;
    logic dclk;
    logic data0;
  } ps_out_t;

  typedef struct packed {
    logic nstatus;
    logic conf_done;
  } ps_in_t;

endpackage
