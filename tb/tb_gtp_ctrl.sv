// tb_gtp_ctrl: self-checking test of the GTP link control.
//
// TX: with the link not ready only idle words {D16.2, K28.5} with
// TXCHARISK = 01 go out; with it ready a valid word goes out one cycle
// later with TXCHARISK = 00, idle otherwise.
// RX: a random stream of aligned idle words, misaligned commas (K in the
// high byte) and data words is applied, with directed runs first, and
// rx_synced / rx_valid / rx_word are compared every cycle with a reference
// of the rule "synced after 4 aligned idles in a row, lost on a misplaced
// K character, data passed only while synced".
module tb_gtp_ctrl;
  import trig_pkg::*;
  logic clk = 0, rst_n = 0, link_ready = 0, tx_valid = 0;
  logic [15:0] tx_word = '0, txdata, rxdata = '0, rx_word;
  logic [1:0] txcharisk, rxcharisk = 2'b00;
  logic rx_synced, rx_valid;
  int checks = 0, failures = 0, n_sync = 0, n_lost = 0, n_data = 0;

  always #5 clk = ~clk;

  gtp_ctrl dut (.clk, .rst_n, .link_ready, .tx_valid, .tx_word, .txdata, .txcharisk,
                .rxdata, .rxcharisk, .rx_synced, .rx_valid, .rx_word);

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // reference for the receive side
  int r_cnt = 0;
  bit r_sync = 0, r_valid = 0;
  logic [15:0] r_word = '0;
  task automatic rx_step(input logic [15:0] d, input logic [1:0] k);
    bit idle, bad;
    rxdata = d; rxcharisk = k;
    idle = (k == 2'b01) && (d[7:0] == 8'hBC);
    bad  = (k != 2'b00) && !idle;
    @(negedge clk);
    r_valid = 0;
    if (bad) begin if (r_sync) n_lost++; r_cnt = 0; r_sync = 0; end
    else if (idle) begin
      if (!r_sync) begin
        if (r_cnt == 3) begin r_sync = 1; n_sync++; end else r_cnt++;
      end
    end else if (r_sync) begin r_valid = 1; r_word = d; n_data++; end
    else r_cnt = 0;
    check("rx_synced", int'(rx_synced), int'(r_sync));
    check("rx_valid", int'(rx_valid), int'(r_valid));
    if (r_valid) check("rx_word", int'(rx_word), int'(r_word));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // TX, link not ready
    tx_valid = 1; tx_word = 16'h4123;
    @(negedge clk);
    check("tx idle when not ready", int'(txdata), int'(IDLE_WORD));
    check("tx idle K", int'(txcharisk), 1);
    link_ready = 1;
    for (int i = 0; i < 200; i++) begin
      tx_valid = 1'($urandom);
      tx_word  = 16'($urandom);
      @(negedge clk);
      check("tx data", int'(txdata), tx_valid ? int'(tx_word) : int'(IDLE_WORD));
      check("tx K", int'(txcharisk), tx_valid ? 0 : 1);
    end
    tx_valid = 0;
    // RX directed: misaligned, 3 idles + data (not yet synced), 4 idles, data
    repeat (5) rx_step(16'h50BC << 8, 2'b10);
    repeat (3) rx_step(IDLE_WORD, 2'b01);
    rx_step(16'h4005, 2'b00);
    repeat (4) rx_step(IDLE_WORD, 2'b01);
    for (int i = 0; i < 10; i++) rx_step(16'h4000 + 16'(i), 2'b00);
    rx_step(16'hBC50, 2'b10);
    rx_step(16'h4001, 2'b00);
    // RX random
    for (int i = 0; i < 3000; i++) begin
      int r;
      r = $urandom_range(0, 99);
      if (r < (r_sync ? 50 : 93)) rx_step(IDLE_WORD, 2'b01);
      else if (r < (r_sync ? 52 : 95)) rx_step(16'hBC50, 2'b10);
      else             rx_step(16'($urandom), 2'b00);
    end
    // link not ready drops sync
    link_ready = 0; @(negedge clk); @(negedge clk);
    check("sync lost with link down", int'(rx_synced), 0);
    check("synced seen", int'(n_sync > 1), 1);
    check("sync loss seen", int'(n_lost > 0), 1);
    check("data seen", int'(n_data > 100), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
