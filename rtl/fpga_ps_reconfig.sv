// fpga_ps_reconfig: the CPLD's configuration path on a trigger module. It
// writes a new FPGA image, sent by the DAQ, into the module's serial flash and
// then reloads the FPGA from that flash in passive-serial (PS) mode.
//
// From the paper: the CPLD receives configuration data from the DAQ, stores
// them in an external serial flash (M25P32 on an STM, M25P128 on the MTM) and
// then starts the reconfiguration of the FPGA, which is set to PS mode. The
// paper gives this function only; the command set below is this design's.
// The DAQ side (reached through the PXI core in the real module) issues
//   CMD_ERASE     erase the flash sector holding `cmd_addr`,
//   CMD_PROGRAM   program `cmd_len` (1..256) bytes at `cmd_addr`, streamed in
//                 on wr_valid/wr_data (wr_ready acknowledges each byte),
//   CMD_RECONFIG  reload the FPGA from flash address 0 with `cmd_len` bytes.
// `busy` is high while a command runs, `done` pulses at its end and `error`
// (valid with done) reports a failed reload. Commands given while busy are
// ignored. Flash access goes through spi_flash_ctrl, the reload through
// ps_loader, which borrows the flash controller for its read.
module fpga_ps_reconfig (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_start,
  input  logic [1:0]  cmd_op,      // trig_pkg::CFG_*
  input  logic [23:0] cmd_addr,
  input  logic [23:0] cmd_len,
  input  logic        wr_valid,
  input  logic [7:0]  wr_data,
  output logic        wr_ready,
  output logic        busy,
  output logic        done,
  output logic        error,
  // serial flash pins
  output logic        fl_sck,
  output logic        fl_cs_n,
  output logic        fl_mosi,
  input  logic        fl_miso,
  // FPGA passive-serial pins
  output logic        ps_nconfig,
  output logic        ps_dclk,
  output logic        ps_data0,
  input  logic        ps_nstatus,
  input  logic        ps_conf_done
);
  import trig_pkg::*;

  logic        by_loader;     // the running command is a reload
  logic        f_start, f_busy, f_done, f_rd_valid, f_rd_ready;
  logic [1:0]  f_op;
  logic [23:0] f_addr, f_len;
  logic [7:0]  f_rd_data;
  logic        l_start, l_busy, l_done, l_error, l_fl_start;
  logic [23:0] l_fl_len;

  wire host_go = cmd_start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) by_loader <= 1'b0;
    else if (host_go) by_loader <= (cmd_op == CFG_RECONFIG);
  end

  assign l_start = host_go && (cmd_op == CFG_RECONFIG);

  always_comb begin
    if (by_loader && l_busy) begin
      f_start = l_fl_start; f_op = 2'd0; f_addr = 24'd0; f_len = l_fl_len;
    end else begin
      f_start = host_go && (cmd_op != CFG_RECONFIG);
      f_op    = (cmd_op == CFG_ERASE) ? 2'd2 : 2'd1;
      f_addr  = cmd_addr;
      f_len   = cmd_len;
    end
  end

  spi_flash_ctrl u_flash (
    .clk, .rst_n,
    .start(f_start), .op(f_op), .addr(f_addr), .len(f_len),
    .busy(f_busy), .done(f_done),
    .wr_valid, .wr_data, .wr_ready,
    .rd_valid(f_rd_valid), .rd_data(f_rd_data), .rd_ready(f_rd_ready),
    .sck(fl_sck), .cs_n(fl_cs_n), .mosi(fl_mosi), .miso(fl_miso)
  );

  ps_loader u_ps (
    .clk, .rst_n,
    .start(l_start), .image_len(cmd_len),
    .busy(l_busy), .done(l_done), .error(l_error),
    .fl_start(l_fl_start), .fl_len(l_fl_len),
    .fl_rd_valid(f_rd_valid), .fl_rd_data(f_rd_data), .fl_rd_ready(f_rd_ready),
    .fl_done(f_done && by_loader),
    .nconfig(ps_nconfig), .dclk(ps_dclk), .data0(ps_data0),
    .nstatus(ps_nstatus), .conf_done(ps_conf_done)
  );

  assign busy  = f_busy || l_busy;
  assign done  = by_loader ? l_done : f_done;
  assign error = by_loader && l_error;

  // a reload never writes the flash
  a_reload_reads_only: assert property (@(posedge clk) disable iff (!rst_n)
    (by_loader && l_busy && f_start) |-> (f_op == 2'd0));
endmodule
