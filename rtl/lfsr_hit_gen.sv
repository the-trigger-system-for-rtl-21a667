// lfsr_hit_gen: pseudo-random hit source for testing an STM without
// detectors, standing in for one front-end module.
//
// A 16-bit Fibonacci LFSR (taps 16, 14, 13, 11; x^16+x^14+x^13+x^11+1)
// advances once on every event_strobe. The new state gives the event's hit
// number num = state[7:0] mod 9, a value from 0 to 8 as a 16-channel
// front-end module can produce, and `hit` then goes high for num cycles,
// starting the cycle after the strobe (no pulse for 0). `num` keeps the last
// number so the DAQ can read back what was generated. The paper uses LFSR
// generators of numbers 0..8, 16 per STM; polynomial, seed and mapping are
// this design's. Strobes must be at least 9 cycles apart.
module lfsr_hit_gen #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       event_strobe,
  output logic       hit,
  output logic [3:0] num
);
  logic [15:0] lfsr, lfsr_next;
  logic [3:0]  left;

  assign lfsr_next = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= (SEED == 0) ? 16'h1 : SEED;
      num  <= '0;
      left <= '0;
    end else if (event_strobe) begin
      lfsr <= lfsr_next;
      num  <= 4'(lfsr_next[7:0] % 8'd9);
      left <= 4'(lfsr_next[7:0] % 8'd9);
    end else if (left != 0) begin
      left <= left - 1'b1;
    end
  end

  assign hit = (left != 0);
endmodule
