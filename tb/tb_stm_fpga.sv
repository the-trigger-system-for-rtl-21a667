// tb_stm_fpga: self-checking test of the STM FPGA.
//
// The STM's GTP port goes through a behavioural fibre-link model to a far
// end played by the testbench (the MTM side, always ready, sending idle
// words and now and then a global trigger word). Checked: register reset
// values and write/read-back; GTP initialization and word alignment after
// reset and after an INIT_PULSE command; sub-trigger words for front-end
// events ({4'b0100, sum of masked hit numbers}), also with a mask; in test
// mode, the 16 LFSR generators, whose numbers are recomputed here from the
// LFSR definition and also read back through registers; each global
// trigger word gives one pulse on all 16 star trigger lines and counts in
// the GT counter, which a write clears.
module tb_stm_fpga;
  import trig_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] hit = '0, star_trig;
  reg_req_t req = '0;
  logic [31:0] rdata;
  gtp_out_t s_out, m_out;
  gtp_in_t  s_in, m_in;
  logic sub_trg_flag;
  int checks = 0, failures = 0, cyc = 0, n_star = 0;
  int words[$];

  always #5 clk = ~clk;

  stm_fpga dut (.clk, .rst_n, .hit, .reg_req(req), .reg_rdata(rdata), .gtp_out(s_out),
                .gtp_in(s_in), .star_trig, .sub_trg_flag);
  gtp_link_model #(.LAT(7)) u_fibre (.clk, .a_out(s_out), .a_in(s_in), .b_out(m_out), .b_in(m_in));

  // far end (MTM side)
  logic send_gt = 0;
  always_comb begin
    m_out = '0;
    m_out.txdata    = send_gt ? GT_WORD : IDLE_WORD;
    m_out.txcharisk = send_gt ? 2'b00 : 2'b01;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (m_in.rxcharisk == 2'b00 && m_in.rxdata[15:12] == TAG_SUB && m_in.rxresetdone)
      words.push_back(int'(m_in.rxdata[11:0]));
    if (rst_n && star_trig != 0) begin
      n_star++;
      checks++;
      if (star_trig != '1) begin failures++; $display("FAIL star trigger lines %h", star_trig); end
    end
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cyc %0d)", what, got, exp, cyc);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    req = '{addr: a, wdata: d, we: 1'b1, re: 1'b0};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    req = '{addr: a, wdata: '0, we: 1'b0, re: 1'b1};
    #1 d = rdata;
    @(negedge clk);
    req = '0;
  endtask

  // one front-end event; returns the expected Tsum
  task automatic fe_event(input logic [N-1:0] mask, output int sum);
    int w[N];
    sum = 0;
    for (int i = 0; i < N; i++) begin
      w[i] = $urandom_range(0, 8);
      if (mask[i]) sum += w[i];
    end
    for (int k = 0; k < 9; k++) begin
      for (int i = 0; i < N; i++) hit[i] = (k < w[i]);
      @(negedge clk);
    end
    hit = '0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [15:0] l[N];
    int sum, n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd(STM_R_MASK, d);   check("MASK reset", int'(d), 32'hFFFF);
    rd(STM_R_EXPAND, d); check("EXPAND reset", int'(d), 4);
    rd(STM_R_ENDLY, d);  check("ENDLY reset", int'(d), 12);
    repeat (80) @(negedge clk);
    rd(STM_R_CTRL, d);   check("link ready and synced", int'(d[3:2]), 3);
    // re-initialize by command
    wr(STM_R_CTRL, 32'h1);
    rd(STM_R_CTRL, d);   check("link down during init", int'(d[2]), 0);
    repeat (80) @(negedge clk);
    rd(STM_R_CTRL, d);   check("link up again", int'(d[3:2]), 3);
    wr(STM_R_ENDLY, 32'd14);
    rd(STM_R_ENDLY, d);  check("ENDLY write", int'(d), 14);
    // front-end events, all inputs and masked
    for (int e = 0; e < 60; e++) begin
      logic [N-1:0] m;
      m = (e < 20) ? '1 : 16'($urandom);
      wr(STM_R_MASK, 32'(m));
      words.delete();
      fe_event(m, sum);
      repeat (40) @(negedge clk);
      if (sum == 0) check("no word", words.size(), 0);
      else begin
        check("one word", words.size(), 1);
        if (words.size() == 1) check("Tsum", words[0], sum);
      end
    end
    rd(STM_R_SUBCNT, d); check("SUBCNT nonzero", int'(d != 0), 1);
    // test mode with the LFSR generators
    wr(STM_R_MASK, 32'hFFFF);
    wr(STM_R_CTRL, 32'h2);
    for (int i = 0; i < N; i++) l[i] = 16'hACE1 ^ 16'(i * 16'h1F35);
    for (int e = 0; e < 100; e++) begin
      sum = 0;
      for (int i = 0; i < N; i++) begin
        l[i] = {l[i][14:0], l[i][15] ^ l[i][13] ^ l[i][12] ^ l[i][10]};
        sum += int'(l[i][7:0]) % 9;
      end
      words.delete();
      wr(STM_R_EVENT, 32'h0);
      repeat (45) @(negedge clk);
      check("test word count", words.size(), (sum > 0) ? 1 : 0);
      if (words.size() == 1) check("test Tsum", words[0], sum);
      n = $urandom_range(0, N - 1);
      rd(8'(STM_R_RNUM + 8'(n)), d);
      check("random number read back", int'(d), int'(l[n][7:0]) % 9);
    end
    wr(STM_R_CTRL, 32'h0);
    // global triggers from the MTM
    wr(STM_R_GTCNT, 32'h0);
    n_star = 0;
    for (int g = 0; g < 25; g++) begin
      send_gt = 1; @(negedge clk); send_gt = 0;
      repeat ($urandom_range(3, 10)) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    rd(STM_R_GTCNT, d); check("GT count", int'(d), 25);
    check("star trigger pulses", n_star, 25);
    wr(STM_R_GTCNT, 32'h0);
    rd(STM_R_GTCNT, d); check("GT count cleared", int'(d), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
