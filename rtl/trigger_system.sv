// trigger_system: the complete three-level trigger.
//
// Level 1: N_STM x N_FE front-end preprocessing blocks (fe_preproc), one
// per front-end measurement module, turn PMT hits into hit-number pulses.
// Level 2: in each of the N_STM crates an STM FPGA (stm_fpga) collects its
// N_FE front-end pulses and sends a sub-trigger word over its fibre link.
// Level 3: the MTM FPGA (mtm_fpga) gathers the N_STM links and decides the
// global trigger GT_OK, which goes back over the links to every STM and out
// on each crate's star trigger bus.
//
// The GTP transceivers, optical transceivers and fibres are not logic of
// this design: the STM side and MTM side of link i appear as the port
// pairs stm_gtp_out[i]/stm_gtp_in[i] and mtm_gtp_out[i]/mtm_gtp_in[i], to
// be joined by a transceiver model or by the real parts. The PXI interface
// CPLDs are outside too: each FPGA's register port is a top-level port.
// Only their configuration path is built (fpga_ps_reconfig, one per module,
// index N_STM being the MTM): its serial-flash and passive-serial pins are
// top-level ports, to be joined to the flash chips and to the FPGAs' PS
// configuration pins.
// Everything runs on the shared 40 MHz clock. MTM link i is wired to STM i.
// The test generators of STM s use the seed base 16'hACE1 ^ (s * 16'h0B17).
module trigger_system
  import trig_pkg::*;
#(
  parameter int unsigned N_STM = 16,
  parameter int unsigned N_FE  = 16,
  parameter int unsigned N_CH  = 16
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic [N_STM-1:0][N_FE-1:0][N_CH-1:0]    pmt_hit,
  input  logic [7:0]                              fe_win_len,
  input  reg_req_t [N_STM-1:0]                    stm_req,
  output logic [N_STM-1:0][31:0]                  stm_rdata,
  input  reg_req_t                                mtm_req,
  output logic [31:0]                             mtm_rdata,
  output gtp_out_t [N_STM-1:0]                    stm_gtp_out,
  input  gtp_in_t  [N_STM-1:0]                    stm_gtp_in,
  output gtp_out_t [N_STM-1:0]                    mtm_gtp_out,
  input  gtp_in_t  [N_STM-1:0]                    mtm_gtp_in,
  output logic [N_STM-1:0][N_FE-1:0]              star_trig,
  output logic [N_STM-1:0]                        sub_trg_flag,
  output logic [N_STM-1:0][N_FE-1:0]              fe_hit,
  output logic                                    gt_ok,
  // configuration path of each module (index N_STM is the MTM)
  input  cfg_cmd_t   [N_STM:0]                    cfg_cmd,
  output cfg_stat_t  [N_STM:0]                    cfg_stat,
  output flash_out_t [N_STM:0]                    flash_out,
  input  logic       [N_STM:0]                    flash_miso,
  output ps_out_t    [N_STM:0]                    ps_out,
  input  ps_in_t     [N_STM:0]                    ps_in
);
  for (genvar s = 0; s < N_STM; s++) begin : g_crate
    for (genvar f = 0; f < N_FE; f++) begin : g_fe
      fe_preproc #(.N_CH(N_CH), .EXPAND_CYCLES(1), .WIN_W(8)) u_fe (
        .clk, .rst_n, .pmt_hit(pmt_hit[s][f]), .win_len(fe_win_len),
        .meantimer(), .hit_out(fe_hit[s][f])
      );
    end
    stm_fpga #(.N_IN(N_FE), .SEED_BASE(16'hACE1 ^ 16'(s * 16'h0B17))) u_stm (
      .clk, .rst_n, .hit(fe_hit[s]), .reg_req(stm_req[s]), .reg_rdata(stm_rdata[s]),
      .gtp_out(stm_gtp_out[s]), .gtp_in(stm_gtp_in[s]),
      .star_trig(star_trig[s]), .sub_trg_flag(sub_trg_flag[s])
    );
  end

  mtm_fpga #(.N_LINK(N_STM)) u_mtm (
    .clk, .rst_n, .reg_req(mtm_req), .reg_rdata(mtm_rdata),
    .gtp_out(mtm_gtp_out), .gtp_in(mtm_gtp_in), .gt_ok
  );

  // one CPLD configuration path per module: STMs 0..N_STM-1, then the MTM
  for (genvar m = 0; m <= N_STM; m++) begin : g_cfg
    fpga_ps_reconfig u_cfg (
      .clk, .rst_n,
      .cmd_start(cfg_cmd[m].start), .cmd_op(cfg_cmd[m].op),
      .cmd_addr(cfg_cmd[m].addr), .cmd_len(cfg_cmd[m].len),
      .wr_valid(cfg_cmd[m].wr_valid), .wr_data(cfg_cmd[m].wr_data),
      .wr_ready(cfg_stat[m].wr_ready), .busy(cfg_stat[m].busy),
      .done(cfg_stat[m].done), .error(cfg_stat[m].error),
      .fl_sck(flash_out[m].sck), .fl_cs_n(flash_out[m].cs_n),
      .fl_mosi(flash_out[m].mosi), .fl_miso(flash_miso[m]),
      .ps_nconfig(ps_out[m].nconfig), .ps_dclk(ps_out[m].dclk),
      .ps_data0(ps_out[m].data0), .ps_nstatus(ps_in[m].nstatus),
      .ps_conf_done(ps_in[m].conf_done)
    );
  end
endmodule
