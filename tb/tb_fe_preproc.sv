// tb_fe_preproc: self-checking test of the front-end preprocessing.
//
// Two instances are driven with the same PMT hits: one with the default
// expansion of one clock period and one with two periods. Each event hits a
// random set of bars; each bar's two PMTs fire either in the same cycle or
// one cycle apart, and the bars start at random offsets inside the counting
// window. Single-ended hits (one PMT only) are added as noise. Expected:
// a pulse whose width is the number of coincident bars (same-cycle pairs
// for the 1-period expander, all pairs for the 2-period one), starting
// exactly win_len cycles after the first coincidence, and no pulse when
// there is no coincidence.
module tb_fe_preproc;
  localparam int N_CH = 16, N_BAR = 8;
  logic clk = 0, rst_n = 0;
  logic [N_CH-1:0] pmt_hit = '0;
  logic [7:0] win_len = 8'd8;
  logic [N_BAR-1:0] mt1, mt2;
  logic out1, out2;
  int checks = 0, failures = 0, cyc = 0;
  int n_nopulse = 0, n_straddle = 0;

  always #5 clk = ~clk;

  fe_preproc #(.N_CH(N_CH), .EXPAND_CYCLES(1)) dut1 (.clk, .rst_n, .pmt_hit, .win_len, .meantimer(mt1), .hit_out(out1));
  fe_preproc #(.N_CH(N_CH), .EXPAND_CYCLES(2)) dut2 (.clk, .rst_n, .pmt_hit, .win_len, .meantimer(mt2), .hit_out(out2));

  // pulse monitors: start cycle and width of each output pulse
  int st1[$], w1[$], st2[$], w2[$];
  int cw1 = 0, cw2 = 0, cs1 = 0, cs2 = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out1) begin if (cw1 == 0) cs1 = cyc; cw1++; end
    else if (cw1 != 0) begin st1.push_back(cs1); w1.push_back(cw1); cw1 = 0; end
    if (out2) begin if (cw2 == 0) cs2 = cyc; cw2++; end
    else if (cw2 != 0) begin st2.push_back(cs2); w2.push_back(cw2); cw2 = 0; end
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cyc %0d)", what, got, exp, cyc);
    end
  endtask

  // one event; returns after the output pulses are over
  task automatic run_event(input logic [N_BAR-1:0] bars, input logic [N_BAR-1:0] skew,
                           input int unsigned start[N_BAR], input logic [N_CH-1:0] noise);
    int t0, first1, first2, n1, n2;
    logic [N_CH-1:0] pat [12];
    for (int k = 0; k < 12; k++) pat[k] = '0;
    n1 = 0; n2 = 0; first1 = 99; first2 = 99;
    for (int b = 0; b < N_BAR; b++) if (bars[b]) begin
      pat[start[b]][2*b] = 1'b1;
      pat[start[b] + skew[b]][2*b+1] = 1'b1;
      n2++;
      if (start[b] + skew[b] < first2) first2 = start[b] + skew[b];
      if (!skew[b]) begin n1++; if (start[b] < first1) first1 = start[b]; end
    end
    for (int c = 0; c < N_CH; c += 2) if (noise[c] && !bars[c/2]) pat[c % 5][c + int'(noise[c+1])] = 1'b1;
    st1.delete(); w1.delete(); st2.delete(); w2.delete();
    @(negedge clk);
    t0 = cyc;
    for (int k = 0; k < 12; k++) begin
      pmt_hit = pat[k];
      @(negedge clk);
      pmt_hit = '0;
    end
    repeat (40) @(negedge clk);
    if (n1 == 0) begin
      n_nopulse++;
      check("no pulse (1-period)", st1.size(), 0);
    end else begin
      check("pulse count 1", st1.size(), 1);
      if (st1.size() == 1) begin
        check("hit number 1", w1[0], n1);
        check("latency 1", st1[0] - t0, first1 + int'(win_len));
      end
    end
    if (n2 != n1) n_straddle++;
    if (n2 == 0) check("no pulse (2-period)", st2.size(), 0);
    else begin
      check("pulse count 2", st2.size(), 1);
      if (st2.size() == 1) begin
        check("hit number 2", w2[0], n2);
        check("latency 2", st2[0] - t0, first2 + int'(win_len));
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned st[N_BAR];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // all bars, same cycle: hit number 8
    for (int b = 0; b < N_BAR; b++) st[b] = 0;
    run_event('1, '0, st, '0);
    // only single-ended hits: nothing
    run_event('0, '0, st, 16'h5555);
    // one pair one cycle apart: only the 2-period expander sees it
    run_event(8'h01, 8'h01, st, '0);
    for (int e = 0; e < 300; e++) begin
      for (int b = 0; b < N_BAR; b++) st[b] = $urandom_range(0, 4);
      if (e % 50 == 0) win_len = 8'($urandom_range(6, 12));
      run_event(8'($urandom), 8'($urandom), st, 16'($urandom));
    end
    check("saw no-coincidence events", int'(n_nopulse > 0), 1);
    check("saw straddling pairs", int'(n_straddle > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
