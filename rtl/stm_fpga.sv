// stm_fpga: the FPGA of one slave trigger module (STM).
//
// Contents: the STM trigger logic (stm_trigger), the GTP link to the master
// (gtp_ctrl + gtp_init), 16 pseudo-random hit generators for testing
// (lfsr_hit_gen), the control/command registers written by the PXI
// interface, a counter of global triggers, and the fan-out of each global
// trigger onto the crate's star trigger bus.
//
// Flow: hits from the N_IN front-end modules (or, in test mode, from the
// generators) -> stm_trigger -> sub-trigger word {4'b0100, Tsum} -> fibre
// to the MTM. A global trigger word {4'b1000, 12'h0} arriving from the MTM
// gives a one-cycle pulse on all star_trig lines (one register later) and
// increments the GT counter.
//
// Registers (addr: meaning; reset value). Reads are combinational on addr.
//   0x00 CTRL   w[0]=1: INIT_PULSE, starts GTP initialization;
//               [1] test mode (0); r[2] link ready, r[3] rx synced
//   0x01 MASK   inputs taking part (16'hFFFF)
//   0x02 EXPAND sub_trg_flag expansion time, cycles (4)
//   0x03 ENDLY  delay of the adder enable, cycles (12)
//   0x04 GTCNT  global triggers received; any write clears it
//   0x05 EVENT  write: every generator produces one random event
//   0x06 SUBCNT sub-trigger words sent; any write clears it
//   0x10+i      last random number of generator i
// Follows the paper: the block contents, user-selectable inputs, user
// expansion time, the GT count read by the DAQ, test generators. The
// register map and the GT word are this design's. Generator i of this STM
// starts from the seed SEED_BASE ^ (i * 16'h1F35).
module stm_fpga
  import trig_pkg::*;
#(
  parameter int unsigned N_IN      = 16,
  parameter logic [15:0] SEED_BASE = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_IN-1:0]  hit,
  input  reg_req_t         reg_req,
  output logic [31:0]      reg_rdata,
  output gtp_out_t         gtp_out,
  input  gtp_in_t          gtp_in,
  output logic [N_IN-1:0]  star_trig,
  output logic             sub_trg_flag
);
  logic             test_mode;
  logic [N_IN-1:0]  mask;
  logic [7:0]       expand_len, en_delay;
  logic [31:0]      gt_cnt, sub_cnt;
  logic             init_pulse, event_strobe, link_ready, rx_synced;
  logic [N_IN-1:0]  gen_hit, hit_sel;
  logic [N_IN-1:0][3:0] gen_num;
  logic             adder_en, sub_valid, rx_valid, gt_pulse;
  logic [15:0]      sub_word, rx_word;
  logic [N_IN-1:0][7:0] tnum;

  assign init_pulse   = reg_req.we && reg_req.addr == STM_R_CTRL && reg_req.wdata[0];
  assign event_strobe = reg_req.we && reg_req.addr == STM_R_EVENT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      test_mode  <= 1'b0;
      mask       <= '1;
      expand_len <= 8'd4;
      en_delay   <= 8'd12;
    end else if (reg_req.we) begin
      unique case (reg_req.addr)
        STM_R_CTRL:   test_mode  <= reg_req.wdata[1];
        STM_R_MASK:   mask       <= reg_req.wdata[N_IN-1:0];
        STM_R_EXPAND: expand_len <= reg_req.wdata[7:0];
        STM_R_ENDLY:  en_delay   <= reg_req.wdata[7:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    reg_rdata = '0;
    unique case (reg_req.addr)
      STM_R_CTRL:   reg_rdata = {28'd0, rx_synced, link_ready, test_mode, 1'b0};
      STM_R_MASK:   reg_rdata = 32'(mask);
      STM_R_EXPAND: reg_rdata = 32'(expand_len);
      STM_R_ENDLY:  reg_rdata = 32'(en_delay);
      STM_R_GTCNT:  reg_rdata = gt_cnt;
      STM_R_SUBCNT: reg_rdata = sub_cnt;
      default:
        if (reg_req.addr[7:4] == STM_R_RNUM[7:4] && 32'(reg_req.addr[3:0]) < N_IN)
          reg_rdata = 32'(gen_num[reg_req.addr[3:0]]);
    endcase
  end

  // Test generators, one per front-end input
  for (genvar i = 0; i < N_IN; i++) begin : g_gen
    lfsr_hit_gen #(.SEED(SEED_BASE ^ 16'(i * 16'h1F35))) u_gen (
      .clk, .rst_n, .event_strobe, .hit(gen_hit[i]), .num(gen_num[i])
    );
  end
  assign hit_sel = test_mode ? gen_hit : hit;

  stm_trigger #(.N_IN(N_IN), .TSUM_W(12), .CNT_W(8), .LEN_W(8)) u_trig (
    .clk, .rst_n, .hit(hit_sel), .mask, .expand_len, .en_delay,
    .sub_trg_flag, .adder_en, .tnum, .sub_valid, .sub_word
  );

  gtp_init u_init (
    .clk, .rst_n, .init_pulse,
    .pllreset(gtp_out.pllreset), .gttxreset(gtp_out.gttxreset), .gtrxreset(gtp_out.gtrxreset),
    .plllock(gtp_in.plllock), .txresetdone(gtp_in.txresetdone), .rxresetdone(gtp_in.rxresetdone),
    .ready(link_ready)
  );

  gtp_ctrl u_link (
    .clk, .rst_n, .link_ready,
    .tx_valid(sub_valid), .tx_word(sub_word),
    .txdata(gtp_out.txdata), .txcharisk(gtp_out.txcharisk),
    .rxdata(gtp_in.rxdata), .rxcharisk(gtp_in.rxcharisk),
    .rx_synced, .rx_valid, .rx_word
  );

  assign gt_pulse = rx_valid && rx_word[15:12] == TAG_GT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gt_cnt    <= '0;
      sub_cnt   <= '0;
      star_trig <= '0;
    end else begin
      star_trig <= {N_IN{gt_pulse}};
      if (reg_req.we && reg_req.addr == STM_R_GTCNT) gt_cnt <= '0;
      else if (gt_pulse)                             gt_cnt <= gt_cnt + 1'b1;
      if (reg_req.we && reg_req.addr == STM_R_SUBCNT) sub_cnt <= '0;
      else if (sub_valid && link_ready)               sub_cnt <= sub_cnt + 1'b1;
    end
  end
endmodule
