// tb_mtm_trigger: self-checking test of the MTM core trigger logic.
//
// Every event: a random subset of the 16 STMs sends a flag with a random
// hit number, each at its own arrival offset (0..5 cycles, like unequal
// fibre lengths); the delays are set to 10 - offset so the flags line up.
// Two instances run side by side: the default (OR inside every group) and
// one with AND inside groups B and D. Modes cycle through all four MUX
// settings and the threshold is drawn around the event's sum. Expected:
// GT_OK for exactly one cycle, 13 cycles after the event start, if and only
// if the selected pattern holds and the summed hit numbers exceed the
// threshold. A last part shifts one flag of group B by a cycle: with AND
// inside group B the A&B&C&D pattern must then not fire.
module tb_mtm_trigger;
  import trig_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] st_flag = '0;
  logic [N-1:0][11:0] st_num = '0;
  logic [N-1:0][3:0] delay = '0;
  gt_mode_e mode = MODE_ANY;
  logic [15:0] threshold = '0;
  logic [7:0] hold_len = 8'd20;
  logic [N-1:0] al1, al2;
  logic [3:0] g1, g2;
  logic t1, t2, e1, e2, ok1, ok2;
  logic [N-1:0][11:0] h1, h2;
  int checks = 0, failures = 0, cyc = 0;
  int c1[$], c2[$];
  int n_fire = 0, n_pat_only = 0, n_sum_only = 0, n_mode[4] = '{0, 0, 0, 0};

  always #5 clk = ~clk;

  mtm_trigger dut1 (.clk, .rst_n, .st_flag, .st_num, .delay, .mode, .threshold, .hold_len,
                    .st_aligned(al1), .group_out(g1), .gt_ok_tmp(t1), .gt_eff(e1), .gt_ok(ok1), .stnum_held(h1));
  mtm_trigger #(.GROUP_AND(4'b1010)) dut2 (.clk, .rst_n, .st_flag, .st_num, .delay, .mode, .threshold, .hold_len,
                    .st_aligned(al2), .group_out(g2), .gt_ok_tmp(t2), .gt_eff(e2), .gt_ok(ok2), .stnum_held(h2));

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ok1) c1.push_back(cyc);
    if (ok2) c2.push_back(cyc);
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cyc %0d)", what, got, exp, cyc);
    end
  endtask

  function automatic bit pattern(input logic [N-1:0] f, input logic [3:0] gand, input gt_mode_e m);
    bit g[4];
    for (int k = 0; k < 4; k++) g[k] = gand[k] ? &f[4*k +: 4] : |f[4*k +: 4];
    case (m)
      MODE_ANY:   return g[0] | g[1] | g[2] | g[3];
      MODE_ALL:   return g[0] & g[1] & g[2] & g[3];
      MODE_PAIRS: return (g[0] & g[1]) | (g[2] & g[3]);
      default:    return 0;
    endcase
  endfunction

  task automatic run_event(input logic [N-1:0] f, input int off[N], input int shift_one);
    int t0, sum;
    bit exp1, exp2, eff;
    logic [N-1:0] fa;
    sum = 0;
    for (int i = 0; i < N; i++) begin
      st_num[i] = 12'($urandom_range(0, 128));
      if (f[i]) sum += int'(st_num[i]);
    end
    threshold = 16'($urandom_range(0, 900));
    c1.delete(); c2.delete();
    @(negedge clk);
    t0 = cyc;
    for (int k = 0; k < 8; k++) begin
      for (int i = 0; i < N; i++)
        st_flag[i] = f[i] && (k == off[i] + ((i == shift_one) ? 1 : 0));
      @(negedge clk);
    end
    st_flag = '0;
    repeat (30) @(negedge clk);
    eff  = sum > int'(threshold);
    fa = f;
    if (shift_one >= 0) fa[shift_one] = 1'b0;   // flags that are aligned
    exp1 = eff && pattern(fa, 4'b0000, mode);
    exp2 = eff && pattern(fa, 4'b1010, mode);
    if (pattern(f, 4'b0000, mode) && !eff) n_sum_only++;
    if (!pattern(f, 4'b0000, mode) && eff) n_pat_only++;
    if (exp1) begin n_fire++; n_mode[mode]++; end
    check("GT_OK count (OR groups)", c1.size(), int'(exp1));
    check("GT_OK count (mixed groups)", c2.size(), int'(exp2));
    if (exp1 && c1.size() == 1) check("GT_OK latency", c1[0] - t0, 13);
    if (exp2 && c2.size() == 1) check("GT_OK latency 2", c2[0] - t0, 13);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int off[N];
    logic [N-1:0] f;
    for (int i = 0; i < N; i++) begin
      off[i] = $urandom_range(0, 5);
      delay[i] = 4'(10 - off[i]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 2000; e++) begin
      mode = gt_mode_e'(e % 4);
      f = 16'($urandom) | 16'($urandom);
      if (e % 5 == 0) f = '1;
      run_event(f, off, -1);
    end
    // a flag one cycle late breaks the full coincidence
    mode = MODE_ALL;
    threshold = 0;
    run_event('1, off, 6);
    check("misaligned flag blocks AND group", c2.size(), 0);
    check("GT_OK fired", int'(n_fire > 50), 1);
    check("pattern without sum seen", int'(n_sum_only > 20), 1);
    check("sum without pattern seen", int'(n_pat_only > 20), 1);
    for (int m = 0; m < 3; m++) check("each mode fired", int'(n_mode[m] > 5), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
