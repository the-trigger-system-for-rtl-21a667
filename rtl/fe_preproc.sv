// fe_preproc: first trigger hierarchy, run in each front-end time/charge
// measurement module (16 PMT channels = 8 scintillator bars).
//
// Each PMT hit is stretched by a pulse expander to EXPAND_CYCLES clock
// periods (the paper's 25 ns is one period of the 40 MHz clock). The two
// PMTs at the ends of one bar (channels 2k and 2k+1) are ANDed into the
// "meantimer k" signal: a bar counts as hit when both ends fire within the
// expansion time. The rising edges of the meantimers are summed every cycle
// and accumulated over a counting window of win_len cycles that opens with
// the first meantimer hit. When the window closes, hit_out goes high for as
// many clock cycles as bars were hit (0..8), which is how the hit number is
// carried to the slave trigger module. Hits that arrive while that pulse is
// being sent are not counted (dead time).
//
// Follows the paper: expanders, AND meantimers, sum, counter, pulse-width
// coding, 40 MHz synchronous logic. This design's choices: the channel
// pairing, counting meantimer edges, the window opening on the first hit,
// the dead time, and no pulse for zero hits.
//
// Timing: a hit in cycle t (window of W cycles) gives hit_out rising at
// cycle t+W (registered), lasting N cycles.
module fe_preproc #(
  parameter int unsigned N_CH          = 16,
  parameter int unsigned EXPAND_CYCLES = 1,
  parameter int unsigned WIN_W         = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_CH-1:0]   pmt_hit,
  input  logic [WIN_W-1:0]  win_len,
  output logic [N_CH/2-1:0] meantimer,
  output logic              hit_out
);
  localparam int unsigned N_BAR = N_CH / 2;
  localparam int unsigned CW    = $clog2(N_BAR + 1) + 1;  // room for > N_BAR over long windows

  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_EMIT} state_e;

  logic [N_CH-1:0]  expanded;
  logic [N_BAR-1:0] mt_q, mt_rise;
  logic [CW-1:0]    nsum;
  logic [CW-1:0]    cnt;
  logic [WIN_W-1:0] rem;
  state_e           state;

  for (genvar c = 0; c < N_CH; c++) begin : g_exp
    pulse_expander #(.LEN_W(8)) u_exp (
      .clk, .rst_n, .in(pmt_hit[c]), .len(8'(EXPAND_CYCLES)), .out(expanded[c])
    );
  end

  for (genvar b = 0; b < N_BAR; b++) begin : g_mt
    assign meantimer[b] = expanded[2*b] & expanded[2*b+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mt_q <= '0;
    else        mt_q <= meantimer;
  end
  assign mt_rise = meantimer & ~mt_q;

  // "sum": number of bars that newly fired this cycle
  always_comb begin
    nsum = '0;
    for (int b = 0; b < N_BAR; b++) nsum = nsum + CW'(mt_rise[b]);
  end

  function automatic logic [CW-1:0] sat_add(logic [CW-1:0] a, logic [CW-1:0] b);
    logic [CW:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[CW] ? '1 : s[CW-1:0];
  endfunction

  // "counter": windowed hit count, then pulse-width output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      rem   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (nsum != 0) begin
          cnt <= nsum;
          rem <= (win_len > 1) ? win_len - 1'b1 : '0;
          state <= (win_len > 1) ? S_COUNT : S_EMIT;
        end
        S_COUNT: begin
          cnt <= sat_add(cnt, nsum);
          rem <= rem - 1'b1;
          if (rem == 1) state <= S_EMIT;
        end
        S_EMIT: begin
          cnt <= cnt - 1'b1;
          if (cnt == 1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign hit_out = (state == S_EMIT);

  // The output pulse is never started empty.
  a_emit_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                   state == S_EMIT |-> cnt != 0);
endmodule
