// tb_data_buffer: self-checking test of the event data FIFO.
//
// Random pushes and pops (also together, also on empty and full) are
// compared every cycle with a queue model: head data, fill level, and the
// sticky overflow flag when a push meets a full buffer; the flag clears on
// request. Runs of pushes fill it completely and runs of pops empty it.
module tb_data_buffer;
  localparam int W = 192, D = 16;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, clr = 0;
  logic [W-1:0] din = '0, dout;
  logic [4:0] count;
  logic overflow;
  int checks = 0, failures = 0, n_full = 0, n_ovf = 0;
  logic [W-1:0] q[$];
  bit m_ovf = 0;

  always #5 clk = ~clk;

  data_buffer #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .count,
                                      .overflow, .clr_overflow(clr));

  task automatic check(input string what, input logic [W-1:0] got, input logic [W-1:0] exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic step(input bit pu, input bit po, input bit cl);
    bit popped, full;
    push = pu; pop = po; clr = cl;
    din = {6{32'($urandom)}};
    @(negedge clk);
    popped = po && q.size() > 0;
    full = q.size() == D;
    if (popped) void'(q.pop_front());
    if (pu && (!full || popped)) q.push_back(din);
    if (pu && full && !popped) begin m_ovf = 1; n_ovf++; end
    else if (cl) m_ovf = 0;
    if (q.size() == D) n_full++;
    check("count", W'(count), W'(q.size()));
    check("head", dout, q.size() ? q[0] : '0);
    check("overflow", W'(overflow), W'(m_ovf));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    step(0, 1, 0);                        // pop on empty
    repeat (20) step(1, 0, 0);            // fill and overflow
    step(1, 1, 0);                        // push+pop when full
    step(0, 0, 1);                        // clear overflow
    repeat (20) step(0, 1, 0);            // drain
    for (int i = 0; i < 5000; i++) begin
      int r;
      r = $urandom_range(0, 99);
      step(r < 55, r > 40, (r % 17) == 0);
    end
    check("filled", W'(n_full > 0), 1);
    check("overflowed", W'(n_ovf > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
