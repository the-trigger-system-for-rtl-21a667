// tb_fpga_ps_reconfig: self-checking testbench of the CPLD configuration
// path. The flash is the m25p_model (64 KiB, 4 KiB sectors) and the FPGA is
// the ps_fpga_model. Each round erases sector 0, writes an image of random
// length page by page with random gaps in the byte stream, checks the flash
// contents against the image, reloads the FPGA and checks every byte the
// FPGA received, that nCONFIG was pulsed and that the load took between 16
// and 20 clock cycles per byte (DCLK at clk/2, 8 bits per byte). The image
// bytes are ((i * 37) ^ (i >> 3) ^ seed) mod 256. One round makes the FPGA
// report a configuration error part-way and checks that `error` is raised.
// It also checks that the untouched sector 1 keeps its contents, that a
// command given while busy is ignored and that the flash saw no protocol
// error.
module tb_fpga_ps_reconfig;
  import trig_pkg::*;

  localparam int MAXB = 700;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cmd_start = 1'b0, wr_valid = 1'b0;
  logic [1:0]  cmd_op = '0;
  logic [23:0] cmd_addr = '0, cmd_len = '0;
  logic [7:0]  wr_data = '0;
  logic        wr_ready, busy, done, error;
  logic        fl_sck, fl_cs_n, fl_mosi, fl_miso;
  logic        nconfig, dclk, data0, nstatus, conf_done;

  fpga_ps_reconfig dut (
    .clk, .rst_n, .cmd_start, .cmd_op, .cmd_addr, .cmd_len, .wr_valid,
    .wr_data, .wr_ready, .busy, .done, .error, .fl_sck, .fl_cs_n, .fl_mosi,
    .fl_miso, .ps_nconfig(nconfig), .ps_dclk(dclk), .ps_data0(data0),
    .ps_nstatus(nstatus), .ps_conf_done(conf_done));

  m25p_model #(.ADDR_BITS(16), .SECTOR_BITS(12)) flash (
    .sck(fl_sck), .cs_n(fl_cs_n), .mosi(fl_mosi), .miso(fl_miso));

  ps_fpga_model #(.IMAGE_BYTES(MAXB)) fpga (
    .nconfig, .dclk, .data0, .nstatus, .conf_done);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  function automatic logic [7:0] img(int i, logic [7:0] seed);
    return 8'((i * 37) ^ (i >> 3)) ^ seed;
  endfunction

  // nCONFIG low time, measured in clock cycles
  int ncfg_low = 0, ncfg_len = 0;
  always @(posedge clk) begin
    if (!nconfig) ncfg_low++;
    else if (ncfg_low != 0) begin ncfg_len = ncfg_low; ncfg_low = 0; end
  end

  task automatic run_cmd(input logic [1:0] op, input int addr, input int len,
                         output int took);
    int t0;
    @(negedge clk);
    cmd_op = op; cmd_addr = 24'(addr); cmd_len = 24'(len); cmd_start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    cmd_start = 1'b0;
    check(busy, "busy after a command");
    // a second command while busy must be ignored
    cmd_op = CFG_ERASE; cmd_addr = 24'h001000; cmd_start = 1'b1;
    @(negedge clk);
    cmd_start = 1'b0;
    while (!done) @(negedge clk);
    took = cyc - t0;
  endtask

  task automatic program_page(input int addr, input int len, input int base,
                              input logic [7:0] seed);
    int took, sent;
    sent = 0;
    fork
      run_cmd(CFG_PROGRAM, addr, len, took);
      begin
        while (sent < len) begin
          @(posedge clk);
          if (wr_valid && wr_ready) sent++;
          @(negedge clk);
          if (sent < len) begin
            wr_valid = ($urandom_range(0, 3) != 0);
            wr_data  = img(base + sent, seed);
          end else wr_valid = 1'b0;
        end
      end
    join
    wr_valid = 1'b0;
    check(sent == len, "all program bytes taken");
  endtask

  initial begin
    int took, n, bad;
    logic [7:0] seed;
    // junk in sectors 0 and 1 before the first erase
    for (int i = 0; i < 8192; i++) flash.mem[i] = 8'(i * 11);
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (4) @(negedge clk);
    check(!busy && nconfig && !dclk, "idle after reset");

    for (int round = 0; round < 4; round++) begin
      n    = $urandom_range(300, MAXB);
      seed = 8'($urandom);
      if (round == 0) n = MAXB;
      // erase
      run_cmd(CFG_ERASE, $urandom_range(0, 4095), 0, took);
      bad = 0;
      for (int i = 0; i < 4096; i++) if (flash.mem[i] != 8'hFF) bad++;
      check(bad == 0, "sector 0 erased");
      bad = 0;
      for (int i = 4096; i < 8192; i++) if (flash.mem[i] != 8'(i * 11)) bad++;
      check(bad == 0, "sector 1 untouched");
      check(!error, "no error on erase");
      // program, one page at a time
      for (int p = 0; p * 256 < n; p++) begin
        program_page(p * 256, (n - p * 256 > 256) ? 256 : n - p * 256, p * 256, seed);
      end
      bad = 0;
      for (int i = 0; i < n; i++) if (flash.mem[i] != img(i, seed)) bad++;
      check(bad == 0, $sformatf("flash holds the image (%0d bad of %0d)", bad, n));
      // reload
      fpga.expect_n = n;
      fpga.fail_at  = (round == 2) ? int'($urandom_range(10, n - 10)) : -1;
      run_cmd(CFG_RECONFIG, $urandom_range(0, 255), n, took);
      if (round == 2) begin
        check(error, "configuration error reported");
        check(!conf_done, "no CONF_DONE after an error");
      end else begin
        check(!error, "reload without error");
        check(conf_done, "CONF_DONE high after reload");
        bad = 0;
        for (int i = 0; i < n; i++) if (fpga.got[i] != img(i, seed)) bad++;
        check(bad == 0, $sformatf("FPGA received the image (%0d bad)", bad));
        check(fpga.nbytes == n, "FPGA got exactly the image length");
        check(took >= 16 * n && took <= 20 * n + 400,
              $sformatf("reload time %0d cycles for %0d bytes", took, n));
      end
      check(ncfg_len == 8, $sformatf("nCONFIG low for 8 cycles (%0d)", ncfg_len));
      repeat (3) @(negedge clk);
      check(!busy, "idle after the command");
    end
    check(flash.bad_cmds == 0, $sformatf("flash protocol errors: %0d", flash.bad_cmds));
    check(fpga.loads == 3, $sformatf("three good loads (%0d)", fpga.loads));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
