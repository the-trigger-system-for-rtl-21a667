// tb_gtp_init: self-checking test of the GTP initialization controller.
//
// A small transceiver model answers PLLRESET by dropping PLLLOCK and
// raising it LOCK cycles later, and answers GTTXRESET/GTRXRESET by holding
// RESETDONE low until DONE cycles after they fall (RX slower than TX).
// Checked for the start after reset and for several INIT_PULSEs: PLLRESET
// lasts exactly PLLRST_CYCLES; GTTXRESET/GTRXRESET are high from the start
// and fall exactly one cycle after PLLLOCK is seen; `ready` rises exactly one
// cycle after both RESETDONEs are high; without PLLLOCK the datapath resets
// stay asserted; a lost lock restarts the sequence.
module tb_gtp_init;
  logic clk = 0, rst_n = 0, init_pulse = 0;
  logic pllreset, gttxreset, gtrxreset, plllock, txresetdone, rxresetdone, ready;
  int checks = 0, failures = 0, cyc = 0;
  int lockcnt = 0, txcnt = 0, rxcnt = 0, lock_delay = 10;
  bit block_lock = 0;
  int prst_w, t_lock, t_fall, t_done, t_ready;
  logic p_lock, p_gtx, p_done, p_ready;

  always #5 clk = ~clk;

  gtp_init #(.PLLRST_CYCLES(4)) dut (.clk, .rst_n, .init_pulse, .pllreset, .gttxreset, .gtrxreset,
                                     .plllock, .txresetdone, .rxresetdone, .ready);

  assign plllock     = (lockcnt >= lock_delay) && !block_lock;
  assign txresetdone = (txcnt >= 5);
  assign rxresetdone = (rxcnt >= 9);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    lockcnt <= pllreset ? 0 : (lockcnt < 1000 ? lockcnt + 1 : lockcnt);
    txcnt   <= gttxreset ? 0 : (txcnt < 100 ? txcnt + 1 : txcnt);
    rxcnt   <= gtrxreset ? 0 : (rxcnt < 100 ? rxcnt + 1 : rxcnt);
    if (pllreset) prst_w++;
    if (plllock && !p_lock) t_lock = cyc;
    if (!gttxreset && p_gtx) t_fall = cyc;
    if (txresetdone && rxresetdone && !p_done) t_done = cyc;
    if (ready && !p_ready) t_ready = cyc;
    checks++;
    if (gttxreset != gtrxreset) begin failures++; $display("FAIL tx/rx reset differ"); end
    p_lock = plllock; p_gtx = gttxreset; p_done = txresetdone && rxresetdone; p_ready = ready;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cyc %0d)", what, got, exp, cyc);
    end
  endtask

  task automatic check_sequence();
    check("PLLRESET width", prst_w, 4);
    check("GTTXRESET falls after PLLLOCK", t_fall - t_lock, 1);
    check("ready after RESETDONE", t_ready - t_done, 1);
    check("ready", int'(ready), 1);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    prst_w = 0;
    rst_n = 1;
    repeat (60) @(negedge clk);
    check_sequence();
    for (int k = 0; k < 4; k++) begin
      lock_delay = 3 + 7 * k;
      prst_w = 0;
      init_pulse = 1; @(negedge clk); init_pulse = 0;
      check("ready drops on INIT_PULSE", int'(ready), 0);
      check("PLLRESET on INIT_PULSE", int'(pllreset), 1);
      repeat (80) @(negedge clk);
      check_sequence();
    end
    // no lock: the datapath resets stay on
    block_lock = 1;
    prst_w = 0;
    init_pulse = 1; @(negedge clk); init_pulse = 0;
    repeat (100) @(negedge clk);
    check("held in reset without lock", int'(gttxreset), 1);
    check("not ready without lock", int'(ready), 0);
    block_lock = 0;
    repeat (60) @(negedge clk);
    check("ready after late lock", int'(ready), 1);
    // lost lock restarts the sequence
    prst_w = 0;
    block_lock = 1; @(negedge clk); @(negedge clk); block_lock = 0;
    check("PLLRESET after lost lock", int'(pllreset), 1);
    repeat (80) @(negedge clk);
    check_sequence();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
