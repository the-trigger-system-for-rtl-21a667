// data_buffer: FIFO that keeps the STnum_i values of each accepted event
// until the DAQ reads them through the register interface.
//
// One entry of W bits is written by `push` (on GT_OK, the held STnum_i of
// all links) and the head entry `dout` is dropped by `pop`. A push to a full
// buffer is discarded and sets the sticky `overflow` flag, cleared by
// `clr_overflow`. A pop on an empty buffer does nothing. Push and pop in the
// same cycle are both done. The paper says the STnum data are buffered and
// sent to the DAQ; depth, record layout and overflow handling are this
// design's choices. dout shows the head in the cycle after it was written.
module data_buffer #(
  parameter int unsigned W     = 192,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       overflow,
  input  logic                       clr_overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          full, empty, do_push, do_pop;

  assign full    = (32'(count) == DEPTH);
  assign empty   = (count == 0);
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
      if (push && !do_push) overflow <= 1'b1;
      else if (clr_overflow) overflow <= 1'b0;
    end
  end

  assign dout = empty ? '0 : mem[rp];
endmodule
