// mtm_trigger: core trigger logic in the FPGA of the master trigger module.
//
// Input from each of the N_ST links: st_flag[i] (ST_i), a one-cycle pulse
// when a sub-trigger word arrived from STM i, and st_num[i] (STnum_i), the
// 12-bit hit number it carried. A global trigger GT_OK needs two things:
//   * pattern: each ST_i passes a delay line whose length delay[i] is set
//     by command, so that flags of one event from STMs at different fibre
//     distances line up. The aligned flags form four groups of N_ST/4
//     (A = ST_1..ST_4, ..., D = ST_13..ST_16); inside each group the flags
//     are combined by a fixed function (OR, or AND where GROUP_AND has a 1).
//     A multiplexer, switched by command (`mode`), selects A||B||C||D,
//     A&B&C&D or A&B||C&D (or nothing) as GT_OK_tmp;
//   * hit sum: every STnum_i is held for hold_len cycles after it arrives
//     (then cleared); an adder sums the held values and a comparator sets
//     GT_eff when the sum is greater than `threshold`.
// GT_OK = GT_OK_tmp & GT_eff. The pattern is registered twice and the sum
// is compared one cycle after the aligned flags, when the STnum_i that came
// with the flags are already held; GT_OK is registered once more, so it is
// high delay[i]+3 cycles after st_flag[i]. A held STnum_i stays present
// hold_len cycles, so hold_len must exceed the largest (arrival time +
// delay) difference between the STMs of one event by at least one.
//
// Follows the paper: the delays, four groups, the three printed pattern
// functions, the command-driven MUX, adder + comparator, the final AND.
// This design's choices: the grouping, the group functions, the hold time,
// mode 3 = off, and "exceeds" as strictly greater.
module mtm_trigger
  import trig_pkg::*;
#(
  parameter int unsigned N_ST      = 16,
  parameter int unsigned NUM_W     = 12,
  parameter int unsigned DLY_W     = 4,
  parameter int unsigned HOLD_W    = 8,
  parameter logic [3:0]  GROUP_AND = 4'b0000
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N_ST-1:0]             st_flag,
  input  logic [N_ST-1:0][NUM_W-1:0]  st_num,
  input  logic [N_ST-1:0][DLY_W-1:0]  delay,
  input  gt_mode_e                    mode,
  input  logic [NUM_W+3:0]            threshold,
  input  logic [HOLD_W-1:0]           hold_len,
  output logic [N_ST-1:0]             st_aligned,
  output logic [3:0]                  group_out,
  output logic                        gt_ok_tmp,
  output logic                        gt_eff,
  output logic                        gt_ok,
  output logic [N_ST-1:0][NUM_W-1:0]  stnum_held
);
  localparam int unsigned GS    = N_ST / 4;
  localparam int unsigned DEPTH = (1 << DLY_W) - 1;
  localparam int unsigned SUM_W = NUM_W + 4;

  logic [N_ST-1:0][DEPTH-1:0]  dl;
  logic [N_ST-1:0][HOLD_W-1:0] hold_cnt;
  logic [SUM_W-1:0]            sum;
  logic                        a, b, c, d, sel, sel_q;

  // Delay component: shift register with a command-selected tap
  for (genvar i = 0; i < N_ST; i++) begin : g_dly
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) dl[i] <= '0;
      else        dl[i] <= {dl[i][DEPTH-2:0], st_flag[i]};
    end
    assign st_aligned[i] = (delay[i] == 0) ? st_flag[i] : dl[i][delay[i]-1];
  end

  // Fixed logic inside each group
  for (genvar g = 0; g < 4; g++) begin : g_grp
    assign group_out[g] = GROUP_AND[g] ? &st_aligned[g*GS +: GS]
                                       : |st_aligned[g*GS +: GS];
  end
  assign {d, c, b, a} = group_out;

  // MUX of pattern functions, switched by command
  always_comb begin
    unique case (mode)
      MODE_ANY:   sel = a | b | c | d;
      MODE_ALL:   sel = a & b & c & d;
      MODE_PAIRS: sel = (a & b) | (c & d);
      default:    sel = 1'b0;
    endcase
  end

  // STnum_i held for the adder
  for (genvar i = 0; i < N_ST; i++) begin : g_hold
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        stnum_held[i] <= '0;
        hold_cnt[i]   <= '0;
      end else if (st_flag[i]) begin
        stnum_held[i] <= st_num[i];
        hold_cnt[i]   <= hold_len;
      end else if (hold_cnt[i] > 1) begin
        hold_cnt[i]   <= hold_cnt[i] - 1'b1;
      end else begin
        hold_cnt[i]   <= '0;
        stnum_held[i] <= '0;
      end
    end
  end

  // Adder
  always_comb begin
    sum = '0;
    for (int i = 0; i < N_ST; i++) sum = sum + SUM_W'(stnum_held[i]);
  end

  // Comparator, pattern register, final AND
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q     <= 1'b0;
      gt_ok_tmp <= 1'b0;
      gt_eff    <= 1'b0;
      gt_ok     <= 1'b0;
    end else begin
      sel_q     <= sel;
      gt_ok_tmp <= sel_q;
      gt_eff    <= (sum > threshold);
      gt_ok     <= gt_ok_tmp & gt_eff;
    end
  end
endmodule
