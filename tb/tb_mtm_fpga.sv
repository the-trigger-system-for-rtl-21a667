// tb_mtm_fpga: self-checking test of the MTM FPGA.
//
// Each of the 16 GTP ports goes through a behavioural fibre-link model with
// its own latency (4..9 cycles) to a far end played by the testbench (the
// STM side). After the links come up, the per-link delays are programmed
// to 9 - latency so that words sent in the same cycle line up. Each event
// sends sub-trigger words {4'b0100, n_i} on a random subset of links.
// Expected, from the pattern mode and threshold written by command: GT_OK
// (counted in GTCNT), one global trigger word {4'b1000, 0} arriving at
// every far end, and a buffer entry whose STnum_i equal the n_i sent (0 on
// silent links), read and popped through registers. Finally the buffer is
// filled past its depth and the overflow flag is checked and cleared.
module tb_mtm_fpga;
  import trig_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, gt_ok;
  reg_req_t req = '0;
  logic [31:0] rdata;
  gtp_out_t [N-1:0] m_out, s_out;
  gtp_in_t  [N-1:0] m_in, s_in;
  logic [N-1:0] send = '0;
  logic [N-1:0][11:0] sval = '0;
  int checks = 0, failures = 0, cyc = 0;
  int gt_rx[N];
  int n_mode[4] = '{0, 0, 0, 0}, n_reject = 0;

  always #5 clk = ~clk;

  mtm_fpga dut (.clk, .rst_n, .reg_req(req), .reg_rdata(rdata), .gtp_out(m_out), .gtp_in(m_in), .gt_ok);

  for (genvar i = 0; i < N; i++) begin : g_link
    gtp_link_model #(.LAT(4 + i % 6)) u_fibre (.clk, .a_out(m_out[i]), .a_in(m_in[i]),
                                              .b_out(s_out[i]), .b_in(s_in[i]));
    always_comb begin
      s_out[i] = '0;
      s_out[i].txdata    = send[i] ? {TAG_SUB, sval[i]} : IDLE_WORD;
      s_out[i].txcharisk = send[i] ? 2'b00 : 2'b01;
    end
    always @(posedge clk)
      if (s_in[i].rxresetdone && s_in[i].rxcharisk == 2'b00 && s_in[i].rxdata == GT_WORD)
        gt_rx[i]++;
  end

  always @(posedge clk) cyc <= cyc + 1;

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

  function automatic bit pattern(input logic [N-1:0] f, input int m);
    bit a, b, c, d;
    a = |f[3:0]; b = |f[7:4]; c = |f[11:8]; d = |f[15:12];
    case (m)
      0: return a | b | c | d;
      1: return a & b & c & d;
      2: return (a & b) | (c & d);
      default: return 0;
    endcase
  endfunction

  // one event; returns whether a global trigger was expected
  task automatic event_(input logic [N-1:0] f, input int m, input int thr, output bit exp);
    int sum;
    logic [31:0] gt_before, d;
    sum = 0;
    for (int i = 0; i < N; i++) begin
      sval[i] = 12'($urandom_range(0, 120));
      if (f[i]) sum += int'(sval[i]);
    end
    wr(MTM_R_CTRL, 32'(m << 2));
    wr(MTM_R_THRESH, 32'(thr));
    rd(MTM_R_GTCNT, gt_before);
    for (int i = 0; i < N; i++) gt_rx[i] = 0;
    send = f; @(negedge clk); send = '0;
    repeat (50) @(negedge clk);
    exp = pattern(f, m) && (sum > thr);
    rd(MTM_R_GTCNT, d);
    check("GT count step", int'(d - gt_before), int'(exp));
    for (int i = 0; i < N; i++) check("GT word at STM", gt_rx[i], int'(exp));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    bit exp;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd(MTM_R_HOLD, d); check("HOLD reset", int'(d), 32);
    repeat (100) @(negedge clk);
    rd(MTM_R_LINKS, d); check("all links ready and synced", int'(d == '1), 1);
    for (int i = 0; i < N; i++) wr(8'(MTM_R_DELAY + 8'(i)), 32'(9 - (4 + i % 6)));
    rd(8'(MTM_R_DELAY + 8'd5), d); check("delay read back", int'(d), 0);
    rd(8'(MTM_R_DELAY + 8'd6), d); check("delay read back", int'(d), 5);
    for (int e = 0; e < 300; e++) begin
      logic [N-1:0] f;
      int m, thr;
      m = e % 4;
      f = 16'($urandom) & 16'($urandom);
      thr = $urandom_range(0, 300);
      event_(f, m, thr, exp);
      if (exp) begin
        n_mode[m]++;
        rd(MTM_R_BUFST, d); check("one buffered event", int'(d[7:0]), 1);
        for (int i = 0; i < N; i++) begin
          rd(8'(MTM_R_BUF + 8'(i)), d);
          check("buffered STnum", int'(d), f[i] ? int'(sval[i]) : 0);
        end
        wr(MTM_R_POP, 0);
        rd(MTM_R_BUFST, d); check("buffer empty", int'(d[7:0]), 0);
      end else if (pattern(f, m)) n_reject++;
    end
    for (int m = 0; m < 3; m++) check("mode fired", int'(n_mode[m] > 3), 1);
    check("threshold rejected events", int'(n_reject > 3), 1);
    // fill the buffer past its depth
    for (int e = 0; e < 20; e++) event_('1, 0, 0, exp);
    rd(MTM_R_BUFST, d);
    check("buffer full", int'(d[7:0]), 16);
    check("overflow flagged", int'(d[8]), 1);
    wr(MTM_R_BUFST, 0);
    rd(MTM_R_BUFST, d); check("overflow cleared", int'(d[8]), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
