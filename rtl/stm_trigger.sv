// stm_trigger: second trigger hierarchy, in the FPGA of a slave trigger
// module (STM). One STM serves the front-end modules of one crate.
//
// Each of the N_IN inputs carries one pulse per event whose width in clock
// cycles is that front-end module's hit number. Inputs not selected by
// `mask` are ignored. The selected inputs are stretched by retriggerable
// expanders of expand_len cycles and ORed into sub_trg_flag ("at least one
// hit in this crate"); the expansion sets the time range over which hits
// are summed. The rising edge of sub_trg_flag starts the enable pulse
// generator, which gives a one-cycle enable en_delay cycles later. In the
// meantime one counter per input measures its pulse width (the hit number).
// On the enable the adder sums the counters into the 12-bit Tsum and the
// counters are cleared; one cycle later the sub-trigger word
// {4'b0100, Tsum} is presented with sub_valid for one cycle.
//
// Follows the paper: mask, expanders + OR, enable pulse generator, width
// counters, adder, output register, the 16-bit word with tag 4'b0100.
// This design's choices: the single clock (the paper clocks the counters
// at 80 MHz from a PLL and re-times Tsum), a one-cycle enable at a
// programmable delay, clearing the counters on the enable, saturating
// counters.
//
// Timing: first hit edge at cycle t -> enable at t+en_delay -> sub_valid
// at t+en_delay+1. en_delay must exceed the longest hit pulse plus the
// spread of the arrival times, or late pulses are cut.
module stm_trigger
  import trig_pkg::*;
#(
  parameter int unsigned N_IN   = 16,
  parameter int unsigned TSUM_W = 12,
  parameter int unsigned CNT_W  = 8,
  parameter int unsigned LEN_W  = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_IN-1:0]            hit,
  input  logic [N_IN-1:0]            mask,
  input  logic [LEN_W-1:0]           expand_len,
  input  logic [LEN_W-1:0]           en_delay,
  output logic                       sub_trg_flag,
  output logic                       adder_en,
  output logic [N_IN-1:0][CNT_W-1:0] tnum,
  output logic                       sub_valid,
  output logic [15:0]                sub_word
);
  logic [N_IN-1:0]  hit_m, expanded;
  logic             flag_q, flag_rise;
  logic             busy;
  logic [LEN_W-1:0] tmr;
  logic [TSUM_W-1:0] tsum_c;

  assign hit_m = hit & mask;

  for (genvar i = 0; i < N_IN; i++) begin : g_exp
    pulse_expander #(.LEN_W(LEN_W)) u_exp (
      .clk, .rst_n, .in(hit_m[i]), .len(expand_len), .out(expanded[i])
    );
  end
  assign sub_trg_flag = |expanded;

  // Enable pulse generator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flag_q   <= 1'b0;
      busy     <= 1'b0;
      tmr      <= '0;
      adder_en <= 1'b0;
    end else begin
      flag_q   <= sub_trg_flag;
      adder_en <= 1'b0;
      if (!busy && flag_rise) begin
        busy <= 1'b1;
        tmr  <= (en_delay > 1) ? en_delay - 1'b1 : '0;
        if (en_delay <= 1) begin
          busy     <= 1'b0;
          adder_en <= 1'b1;
        end
      end else if (busy) begin
        tmr <= tmr - 1'b1;
        if (tmr == 1) begin
          busy     <= 1'b0;
          adder_en <= 1'b1;
        end
      end
    end
  end
  assign flag_rise = sub_trg_flag & ~flag_q;

  // Pulse-width counters (one per input)
  for (genvar i = 0; i < N_IN; i++) begin : g_cnt
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                  tnum[i] <= '0;
      else if (adder_en)           tnum[i] <= '0;
      else if (hit_m[i] && tnum[i] != '1) tnum[i] <= tnum[i] + 1'b1;
    end
  end

  // Adder
  always_comb begin
    tsum_c = '0;
    for (int i = 0; i < N_IN; i++) tsum_c = tsum_c + TSUM_W'(tnum[i]);
  end

  // D flip-flop: sub-trigger word
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sub_valid <= 1'b0;
      sub_word  <= '0;
    end else begin
      sub_valid <= adder_en;
      if (adder_en) sub_word <= {TAG_SUB, tsum_c};
    end
  end
endmodule
