// tb_trigger_system: end-to-end test of the whole trigger at full size
// (16 crates x 16 front-end modules x 16 PMT channels, one MTM).
//
// Every fibre link is a behavioural link model; link i has a latency of
// 4 + i % 6 cycles and the MTM delays are set to 9 - latency.
//
// Part 1, detector events: PMT hits are driven into the front-end modules
// of a random set of crates. Each module gets a random set of hit bars (both
// PMTs in the same cycle) plus single-ended noise. The testbench computes
// each crate's Tsum from the bars it drove, and the global decision from the
// pattern mode and the threshold. Checked: global trigger counts (MTM and
// every STM), one star-trigger pulse in every crate per trigger, and the
// STnum_i stored in the MTM buffer. The STM input mask, all three pattern
// modes and threshold rejects are exercised.
//
// Part 2, link re-initialization by command on the MTM and on one STM,
// after which events must still trigger. Part 3, the buffer is overfilled.
//
// Part 4, the laboratory test: two STMs (crates 0 and 4, in groups A and B)
// run their 16 LFSR generators per event; the pattern needs both crates
// (A&B||C&D) and a total above 128. 50 runs of 100 events, as in the
// laboratory test; the expected
// number of valid events per run is recomputed here from the generator
// definition and compared with the GT counter read from each STM.
//
// Part 5, FPGA reconfiguration: the configuration paths of the MTM and of
// one random STM, each with its own flash model and PS-port model, erase
// their flash, store an image of 300 bytes ((i * 37) ^ (i >> 3) ^ seed)
// page by page and reload their FPGA at the same time; the bytes each FPGA
// model received are compared with the image.
//
// The count of every mechanism is printed; one that never happened fails.
module tb_trigger_system;
  import trig_pkg::*;
  localparam int NS = 16, NF = 16, NC = 16, RUNS = 50, EVENTS = 100;

  logic clk = 0, rst_n = 0;
  logic [NS-1:0][NF-1:0][NC-1:0] pmt_hit = '0;
  logic [7:0] fe_win_len = 8'd8;
  reg_req_t [NS-1:0] stm_req = '0;
  logic [NS-1:0][31:0] stm_rdata;
  reg_req_t mtm_req = '0;
  logic [31:0] mtm_rdata;
  gtp_out_t [NS-1:0] stm_gtp_out, mtm_gtp_out;
  gtp_in_t  [NS-1:0] stm_gtp_in, mtm_gtp_in;
  logic [NS-1:0][NF-1:0] star_trig, fe_hit;
  logic [NS-1:0] sub_trg_flag;
  logic gt_ok;
  localparam int IMG = 300;
  cfg_cmd_t   [NS:0] cfg_cmd = '0;
  cfg_stat_t  [NS:0] cfg_stat;
  flash_out_t [NS:0] flash_out;
  logic       [NS:0] flash_miso;
  ps_out_t    [NS:0] ps_out;
  ps_in_t     [NS:0] ps_in;
  int n_reload = 0;
  logic [7:0] got_all [NS+1][IMG];   // image each FPGA model received

  int checks = 0, failures = 0, cyc = 0;
  int star_cnt[NS];
  // mechanism counters
  int n_coinc = 0, n_noise = 0, n_masked = 0, n_subflag = 0, n_gt = 0, n_reject = 0;
  int n_mode[3] = '{0, 0, 0}, n_reinit = 0, n_overflow = 0, n_buffer = 0, n_test_gt = 0;

  always #5 clk = ~clk;

  trigger_system dut (.clk, .rst_n, .pmt_hit, .fe_win_len, .stm_req, .stm_rdata, .mtm_req, .mtm_rdata,
                      .stm_gtp_out, .stm_gtp_in, .mtm_gtp_out, .mtm_gtp_in, .star_trig,
                      .sub_trg_flag, .fe_hit, .gt_ok, .cfg_cmd, .cfg_stat, .flash_out,
                      .flash_miso, .ps_out, .ps_in);

  for (genvar m = 0; m <= NS; m++) begin : g_cfg
    m25p_model #(.ADDR_BITS(12), .SECTOR_BITS(12)) u_flash (
      .sck(flash_out[m].sck), .cs_n(flash_out[m].cs_n), .mosi(flash_out[m].mosi),
      .miso(flash_miso[m]));
    ps_fpga_model #(.IMAGE_BYTES(IMG)) u_fpga (
      .nconfig(ps_out[m].nconfig), .dclk(ps_out[m].dclk), .data0(ps_out[m].data0),
      .nstatus(ps_in[m].nstatus), .conf_done(ps_in[m].conf_done));
    always @(posedge ps_in[m].conf_done) got_all[m] = u_fpga.got;
  end

  function automatic logic [7:0] img(int i, logic [7:0] seed);
    return 8'((i * 37) ^ (i >> 3)) ^ seed;
  endfunction

  // one configuration command on module m; program data come from img()
  task automatic cfg_run(input int m, input logic [1:0] op, input int addr, input int len,
                         input logic [7:0] seed);
    int sent = 0;
    @(negedge clk);
    cfg_cmd[m].op = op; cfg_cmd[m].addr = 24'(addr); cfg_cmd[m].len = 24'(len);
    cfg_cmd[m].start = 1'b1;
    @(negedge clk);
    cfg_cmd[m].start = 1'b0;
    while (1) begin
      if (op == CFG_PROGRAM && sent < len) begin
        cfg_cmd[m].wr_valid = 1'b1;
        cfg_cmd[m].wr_data  = img(addr + sent, seed);
      end else cfg_cmd[m].wr_valid = 1'b0;
      @(posedge clk);
      if (cfg_cmd[m].wr_valid && cfg_stat[m].wr_ready) sent++;
      if (cfg_stat[m].done) break;
      @(negedge clk);
    end
    @(negedge clk);
    cfg_cmd[m].wr_valid = 1'b0;
    if (op == CFG_PROGRAM) check("program bytes taken", sent, len);
  endtask

  task automatic cfg_reload(input int m, input logic [7:0] seed);
    cfg_run(m, CFG_ERASE, 0, 0, seed);
    for (int p = 0; p * 256 < IMG; p++)
      cfg_run(m, CFG_PROGRAM, p * 256, (IMG - p * 256 > 256) ? 256 : IMG - p * 256, seed);
    cfg_run(m, CFG_RECONFIG, 0, IMG, seed);
    check("reload error flag", int'(cfg_stat[m].error), 0);
    check("CONF_DONE", int'(ps_in[m].conf_done), 1);
    n_reload++;
  endtask

  for (genvar i = 0; i < NS; i++) begin : g_link
    gtp_link_model #(.LAT(4 + i % 6)) u_fibre (.clk, .a_out(stm_gtp_out[i]), .a_in(stm_gtp_in[i]),
                                              .b_out(mtm_gtp_out[i]), .b_in(mtm_gtp_in[i]));
  end

  logic [NS-1:0] flag_q = '0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int s = 0; s < NS; s++) begin
        if (star_trig[s] == '1) star_cnt[s]++;
        else if (star_trig[s] != '0) begin failures++; $display("FAIL partial star trigger"); end
        if (sub_trg_flag[s] && !flag_q[s]) n_subflag++;
      end
      flag_q <= sub_trg_flag;
    end
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cyc %0d)", what, got, exp, cyc);
    end
  endtask

  task automatic mwr(input logic [7:0] a, input logic [31:0] d);
    mtm_req = '{addr: a, wdata: d, we: 1'b1, re: 1'b0};
    @(negedge clk);
    mtm_req = '0;
  endtask
  task automatic mrd(input logic [7:0] a, output logic [31:0] d);
    mtm_req = '{addr: a, wdata: '0, we: 1'b0, re: 1'b1};
    #1 d = mtm_rdata;
    @(negedge clk);
    mtm_req = '0;
  endtask
  task automatic swr(input int s, input logic [7:0] a, input logic [31:0] d);
    stm_req[s] = '{addr: a, wdata: d, we: 1'b1, re: 1'b0};
    @(negedge clk);
    stm_req[s] = '0;
  endtask
  task automatic srd(input int s, input logic [7:0] a, output logic [31:0] d);
    stm_req[s] = '{addr: a, wdata: '0, we: 1'b0, re: 1'b1};
    #1 d = stm_rdata[s];
    @(negedge clk);
    stm_req[s] = '0;
  endtask

  function automatic bit pattern(input logic [NS-1:0] f, input int m);
    bit a, b, c, d;
    a = |f[3:0]; b = |f[7:4]; c = |f[11:8]; d = |f[15:12];
    case (m)
      0: return a | b | c | d;
      1: return a & b & c & d;
      2: return (a & b) | (c & d);
      default: return 0;
    endcase
  endfunction

  logic [NS-1:0][NF-1:0] stm_mask;

  // one detector event on the crates in `crates`
  task automatic det_event(input logic [NS-1:0] crates, input int m, input int thr, input bit keep);
    int tsum[NS], total, nb;
    logic [NS-1:0] f;
    logic [NC-1:0] pat;
    logic [31:0] g0, g1, d;
    bit exp;
    mrd(MTM_R_GTCNT, g0);
    for (int s = 0; s < NS; s++) star_cnt[s] = 0;
    total = 0; f = '0;
    for (int s = 0; s < NS; s++) begin
      tsum[s] = 0;
      for (int fe = 0; fe < NF; fe++) begin
        pat = '0;
        if (crates[s]) begin
          nb = 0;
          for (int b = 0; b < NC / 2; b++) begin
            int r;
            r = $urandom_range(0, 9);
            if (r < 3) begin pat[2*b] = 1'b1; pat[2*b+1] = 1'b1; nb++; n_coinc++; end
            else if (r == 3) begin pat[2*b + (r & 1)] = 1'b1; n_noise++; end
          end
          if (stm_mask[s][fe]) tsum[s] += nb;
          else if (nb > 0) n_masked++;
        end
        pmt_hit[s][fe] = pat;
      end
      if (tsum[s] > 0) f[s] = 1'b1;
      total += tsum[s];
    end
    @(negedge clk);
    pmt_hit = '0;
    repeat (70) @(negedge clk);
    exp = pattern(f, m) && total > thr;
    mrd(MTM_R_GTCNT, g1);
    check("GT count", int'(g1 - g0), int'(exp));
    for (int s = 0; s < NS; s++) check("star trigger", star_cnt[s], int'(exp));
    if (exp) begin
      n_gt++; n_mode[m]++;
      if (keep) n_buffer++;
      else begin
        for (int s = 0; s < NS; s++) begin
          mrd(8'(MTM_R_BUF + 8'(s)), d);
          check("buffered STnum", int'(d), tsum[s]);
        end
        mwr(MTM_R_POP, 0);
        n_buffer++;
      end
    end else if (pattern(f, m)) n_reject++;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [15:0] l0[NF], l4[NF];
    int m, thr, valid, s0, s4;
    for (int s = 0; s < NS; s++) stm_mask[s] = '1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (120) @(negedge clk);
    mrd(MTM_R_LINKS, d); check("MTM links up", int'(d == '1), 1);
    for (int s = 0; s < NS; s++) begin
      srd(s, STM_R_CTRL, d); check("STM link up", int'(d[3:2]), 3);
    end
    for (int i = 0; i < NS; i++) mwr(8'(MTM_R_DELAY + 8'(i)), 32'(9 - (4 + i % 6)));
    // mask out two inputs of crate 2
    stm_mask[2] = 16'hFF3F;
    swr(2, STM_R_MASK, 32'(stm_mask[2]));

    // Part 1: detector events
    for (int e = 0; e < 60; e++) begin
      logic [NS-1:0] cr;
      m = e % 3;
      cr = 16'($urandom) & 16'($urandom);
      if (e % 6 == 1) cr = '1;
      if (e % 7 == 0) cr = 16'h0004;
      thr = $urandom_range(0, 150);
      mwr(MTM_R_CTRL, 32'(m << 2));
      mwr(MTM_R_THRESH, 32'(thr));
      det_event(cr, m, thr, 0);
    end

    // Part 2: re-initialize links by command
    mwr(MTM_R_CTRL, 32'h1);
    swr(3, STM_R_CTRL, 32'h1);
    mrd(MTM_R_LINKS, d); check("links down after INIT_PULSE", int'(d[15:0] == 0), 1);
    repeat (120) @(negedge clk);
    mrd(MTM_R_LINKS, d); check("links up after re-init", int'(d == '1), 1);
    srd(3, STM_R_CTRL, d); check("STM 3 link up after re-init", int'(d[3:2]), 3);
    if (d[3:2] == 3) n_reinit++;
    mwr(MTM_R_THRESH, 0);
    for (int e = 0; e < 3; e++) det_event(16'h0008, 0, 0, 0);

    // Part 3: overfill the buffer
    for (int e = 0; e < 18; e++) det_event(16'h0001, 0, 0, 1);
    mrd(MTM_R_BUFST, d);
    check("buffer full", int'(d[7:0]), 16);
    check("overflow flag", int'(d[8]), 1);
    if (d[8]) n_overflow++;
    for (int e = 0; e < 16; e++) mwr(MTM_R_POP, 0);
    mwr(MTM_R_BUFST, 0);

    // Part 4: laboratory random test with crates 0 and 4
    mwr(MTM_R_CTRL, 32'(2 << 2));
    mwr(MTM_R_THRESH, 128);
    stm_req[0] = '{addr: STM_R_CTRL, wdata: 32'h2, we: 1'b1, re: 1'b0};
    stm_req[4] = '{addr: STM_R_CTRL, wdata: 32'h2, we: 1'b1, re: 1'b0};
    @(negedge clk);
    stm_req = '0;
    for (int i = 0; i < NF; i++) begin
      l0[i] = 16'hACE1 ^ 16'(0 * 16'h0B17) ^ 16'(i * 16'h1F35);
      l4[i] = 16'hACE1 ^ 16'(4 * 16'h0B17) ^ 16'(i * 16'h1F35);
    end
    for (int run = 0; run < RUNS; run++) begin
      swr(0, STM_R_GTCNT, 0);
      swr(4, STM_R_GTCNT, 0);
      valid = 0;
      for (int e = 0; e < EVENTS; e++) begin
        s0 = 0; s4 = 0;
        for (int i = 0; i < NF; i++) begin
          l0[i] = {l0[i][14:0], l0[i][15] ^ l0[i][13] ^ l0[i][12] ^ l0[i][10]};
          l4[i] = {l4[i][14:0], l4[i][15] ^ l4[i][13] ^ l4[i][12] ^ l4[i][10]};
          s0 += int'(l0[i][7:0]) % 9;
          s4 += int'(l4[i][7:0]) % 9;
        end
        if (s0 > 0 && s4 > 0 && s0 + s4 > 128) valid++;
        stm_req[0] = '{addr: STM_R_EVENT, wdata: 0, we: 1'b1, re: 1'b0};
        stm_req[4] = '{addr: STM_R_EVENT, wdata: 0, we: 1'b1, re: 1'b0};
        @(negedge clk);
        stm_req = '0;
        repeat (60) @(negedge clk);
      end
      srd(0, STM_R_GTCNT, d); check("valid events in run (STM 0)", int'(d), valid);
      srd(4, STM_R_GTCNT, d); check("valid events in run (STM 4)", int'(d), valid);
      $display("run %0d: %0d of %0d events valid (expected %0d)", run, d, EVENTS, valid);
      n_test_gt += int'(d);
      while (1) begin
        mrd(MTM_R_BUFST, d);
        if (d[7:0] == 0) break;
        mwr(MTM_R_POP, 0);
      end
    end

    // Part 5: reload the MTM FPGA and one STM FPGA from their flash
    begin
      int sm, bad;
      logic [7:0] sd0, sd1;
      sm = $urandom_range(0, NS - 1);
      sd0 = 8'($urandom); sd1 = 8'($urandom);
      fork
        cfg_reload(NS, sd0);
        cfg_reload(sm, sd1);
      join
      bad = 0;
      for (int i = 0; i < IMG; i++) if (got_all[NS][i] != img(i, sd0)) bad++;
      check("MTM FPGA image bytes wrong", bad, 0);
      bad = 0;
      for (int i = 0; i < IMG; i++) if (got_all[sm][i] != img(i, sd1)) bad++;
      check("STM FPGA image bytes wrong", bad, 0);
    end

    $display("mechanisms: coincident bars %0d, single-ended hits %0d, masked hits %0d, sub_trg_flag %0d",
             n_coinc, n_noise, n_masked, n_subflag);
    $display("  triggers %0d (modes %0d/%0d/%0d), threshold rejects %0d, buffered %0d, re-init %0d, overflow %0d, test-run triggers %0d",
             n_gt, n_mode[0], n_mode[1], n_mode[2], n_reject, n_buffer, n_reinit, n_overflow, n_test_gt);
    $display("  FPGA reloads %0d", n_reload);
    check("coincidences", int'(n_coinc > 0), 1);
    check("single-ended hits", int'(n_noise > 0), 1);
    check("masked inputs", int'(n_masked > 0), 1);
    check("sub_trg_flag", int'(n_subflag > 0), 1);
    for (int k = 0; k < 3; k++) check("mode used", int'(n_mode[k] > 0), 1);
    check("threshold reject", int'(n_reject > 0), 1);
    check("buffer", int'(n_buffer > 0), 1);
    check("re-init", n_reinit, 1);
    check("overflow", n_overflow, 1);
    check("test-run triggers", int'(n_test_gt > 0), 1);
    check("FPGA reloads", n_reload, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
