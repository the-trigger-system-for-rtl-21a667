// tb_lfsr_hit_gen: self-checking test of the pseudo-random hit generator.
//
// The expected number sequence is computed here from the LFSR definition
// (x^16+x^14+x^13+x^11+1, one step per event, number = low byte mod 9).
// For each event the test checks the number read back and that `hit` is high
// for exactly that many cycles, starting the cycle after the strobe. Over
// 2000 events every value 0..8 must appear.
module tb_lfsr_hit_gen;
  logic clk = 0, rst_n = 0, strobe = 0, hit;
  logic [3:0] num;
  int checks = 0, failures = 0, width = 0, first = -1, cyc = 0, t0;
  int seen[9];

  always #5 clk = ~clk;

  lfsr_hit_gen #(.SEED(16'h1234)) dut (.clk, .rst_n, .event_strobe(strobe), .hit, .num);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (hit) begin width++; if (first < 0) first = cyc; end
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] l;
    int n;
    l = 16'h1234;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int e = 0; e < 2000; e++) begin
      l = {l[14:0], l[15] ^ l[13] ^ l[12] ^ l[10]};
      n = int'(l[7:0]) % 9;
      seen[n]++;
      width = 0; first = -1;
      strobe = 1; t0 = cyc; @(negedge clk); strobe = 0;
      repeat (12) @(negedge clk);
      check("number", int'(num), n);
      check("pulse width", width, n);
      if (n > 0) check("pulse start", first - t0, 1);
    end
    for (int v = 0; v < 9; v++) check("value seen", int'(seen[v] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
