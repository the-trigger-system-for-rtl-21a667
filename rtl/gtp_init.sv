// gtp_init: initialization control logic for one GTP serial transceiver.
//
// After power-up the fibre link is unusable until the transceiver's PLL and
// datapaths have been reset in order. An initialization starts on
// init_pulse (INIT_PULSE, decoded from a user command) and also once after
// rst_n is released. The sequence:
//   1. PLLRESET is asserted for PLLRST_CYCLES cycles, and GTTXRESET and
//      GTRXRESET go high at the same time;
//   2. after PLLRESET falls, the controller waits for PLLLOCK; when it is
//      asserted GTTXRESET and GTRXRESET are released, and the transceiver
//      resets its TX and RX datapaths;
//   3. when both RESETDONE outputs are high, `ready` is raised.
// A new init_pulse restarts the sequence at any time, and so does a loss of
// PLLLOCK while ready.
//
// Follows the paper: the signal names and the order INIT_PULSE -> PLLRESET
// with GTTXRESET high -> GTTXRESET low on PLLLOCK -> RESETDONE = ready, and
// the RX side handled the same way. This design's choices: the PLLRESET
// length, handling TX and RX in one controller that share the PLL, the
// automatic start after reset and the restart on a lost PLL lock.
module gtp_init #(
  parameter int unsigned PLLRST_CYCLES = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic init_pulse,
  output logic pllreset,
  output logic gttxreset,
  output logic gtrxreset,
  input  logic plllock,
  input  logic txresetdone,
  input  logic rxresetdone,
  output logic ready
);
  typedef enum logic [1:0] {S_PLLRST, S_WAIT_LOCK, S_WAIT_DONE, S_READY} state_e;
  state_e state;
  logic [$clog2(PLLRST_CYCLES+1)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_PLLRST;
      cnt   <= '0;
    end else if (init_pulse) begin
      state <= S_PLLRST;
      cnt   <= '0;
    end else begin
      unique case (state)
        S_PLLRST: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == PLLRST_CYCLES - 1) state <= S_WAIT_LOCK;
        end
        S_WAIT_LOCK: if (plllock) state <= S_WAIT_DONE;
        S_WAIT_DONE: if (txresetdone && rxresetdone) state <= S_READY;
        S_READY: if (!plllock) begin                    // lost lock: start again
          state <= S_PLLRST;
          cnt   <= '0;
        end
        default:     state <= S_PLLRST;
      endcase
    end
  end

  assign pllreset  = (state == S_PLLRST);
  assign gttxreset = (state == S_PLLRST) || (state == S_WAIT_LOCK);
  assign gtrxreset = gttxreset;
  assign ready     = (state == S_READY);

  // Datapath resets are released only with the PLL locked.
  a_release_locked: assert property (@(posedge clk) disable iff (!rst_n)
      $fell(gttxreset) && !$past(init_pulse) |-> $past(plllock));
endmodule
