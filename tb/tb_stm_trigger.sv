// tb_stm_trigger: self-checking test of the STM trigger logic.
//
// Each event gives every input a pulse of random width 0..8 (its hit
// number) at a random start offset of 0..3 cycles, under a random input
// mask. Expected: one sub-trigger word {4'b0100, sum of the masked widths}
// exactly en_delay+1 cycles after the first masked hit; nothing when all
// masked inputs are silent; a single one-cycle hit holds sub_trg_flag for
// exactly expand_len cycles.
module tb_stm_trigger;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] hit = '0, mask = '1;
  logic [7:0] expand_len = 8'd4, en_delay = 8'd12;
  logic sub_trg_flag, adder_en, sub_valid;
  logic [N-1:0][7:0] tnum;
  logic [15:0] sub_word;
  int checks = 0, failures = 0, cyc = 0, flag_w = 0, n_empty = 0;
  int vcyc[$], vword[$];

  always #5 clk = ~clk;

  stm_trigger dut (.clk, .rst_n, .hit, .mask, .expand_len, .en_delay, .sub_trg_flag,
                   .adder_en, .tnum, .sub_valid, .sub_word);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sub_valid) begin vcyc.push_back(cyc); vword.push_back(int'(sub_word)); end
    if (sub_trg_flag) flag_w++;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cyc %0d)", what, got, exp, cyc);
    end
  endtask

  task automatic run_event(input int w[N], input int o[N]);
    int t0, first, sum;
    logic [N-1:0] pat [14];
    for (int k = 0; k < 14; k++) pat[k] = '0;
    first = 99; sum = 0;
    for (int i = 0; i < N; i++) if (w[i] > 0) begin
      for (int k = 0; k < w[i]; k++) pat[o[i] + k][i] = 1'b1;
      if (mask[i]) begin
        sum += w[i];
        if (o[i] < first) first = o[i];
      end
    end
    vcyc.delete(); vword.delete();
    @(negedge clk);
    t0 = cyc;
    for (int k = 0; k < 14; k++) begin hit = pat[k]; @(negedge clk); end
    hit = '0;
    repeat (int'(en_delay) + 20) @(negedge clk);
    if (first == 99) begin
      n_empty++;
      check("no word", vcyc.size(), 0);
    end else begin
      check("one word", vcyc.size(), 1);
      if (vcyc.size() == 1) begin
        check("word", vword[0], {16'd0, 4'b0100, 12'(sum)});
        check("latency", vcyc[0] - t0, first + int'(en_delay) + 1);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w[N], o[N];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // expansion time of sub_trg_flag
    for (int e = 1; e <= 6; e += 5) begin
      expand_len = 8'(e);
      repeat (30) @(negedge clk);
      flag_w = 0;
      hit[3] = 1'b1; @(negedge clk); hit = '0;
      repeat (30) @(negedge clk);
      check("flag width", flag_w, e);
    end
    expand_len = 8'd4;
    for (int e = 0; e < 400; e++) begin
      if (e % 100 == 0) en_delay = 8'(12 + 4 * (e / 100));
      mask = (e % 3 == 0) ? '1 : 16'($urandom);
      if (e % 40 == 7) mask = 16'h0001;
      for (int i = 0; i < N; i++) begin
        w[i] = $urandom_range(0, 8);
        o[i] = $urandom_range(0, 3);
      end
      if (e % 40 == 7) w[0] = 0;
      run_event(w, o);
    end
    check("saw empty events", int'(n_empty > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
