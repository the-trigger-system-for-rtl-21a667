// pulse_expander: retriggerable one-shot that stretches a hit.
//
// A rising edge on `in` (sampled on clk) makes `out` high in that same cycle
// and keeps it high for `len` cycles in total; a new edge restarts the count.
// len = 0 is treated as 1. Used by the front-end preprocessing (fixed 25 ns,
// one 40 MHz period) and by the STM sub_trg_flag logic (user-defined time).
module pulse_expander #(
  parameter int unsigned LEN_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in,
  input  logic [LEN_W-1:0] len,
  output logic             out
);
  logic             in_q;
  logic [LEN_W-1:0] remain;   // cycles still to be held after this one
  logic             rise;

  assign rise = in & ~in_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q   <= 1'b0;
      remain <= '0;
    end else begin
      in_q <= in;
      if (rise)            remain <= (len > 1) ? len - 1'b1 : '0;
      else if (remain != 0) remain <= remain - 1'b1;
    end
  end

  assign out = rise | (remain != 0);
endmodule
