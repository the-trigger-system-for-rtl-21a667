// gtp_link_model: behavioural model (not synthesizable logic of the design)
// of one full fibre link: the GTP transceiver at each end, the two optical
// transceivers and the fibre, seen from the parallel fabric ports.
//
// For each end: PLLLOCK falls while PLLRESET is high and returns LOCK_CYC
// cycles after it falls; TX/RX RESETDONE are low while GTTXRESET/GTRXRESET
// are high and return DONE_CYC cycles after they fall. A word written at
// one end appears at the other end LAT cycles later, provided the sending
// TX and the receiving RX are both out of reset. Until the receiver has
// aligned (MISALIGN_CYC cycles after its reset ended) it delivers the bytes
// shifted by one, so the comma shows up in the wrong byte; with a TX or RX
// in reset it delivers junk flagged as K characters in the high byte.
module gtp_link_model
  import trig_pkg::*;
#(
  parameter int unsigned LAT          = 8,
  parameter int unsigned LOCK_CYC     = 10,
  parameter int unsigned DONE_CYC     = 6,
  parameter int unsigned MISALIGN_CYC = 12
) (
  input  logic     clk,
  input  gtp_out_t a_out,
  output gtp_in_t  a_in,
  input  gtp_out_t b_out,
  output gtp_in_t  b_in
);
  typedef struct packed { logic [15:0] d; logic [1:0] k; logic ok; } word_t;

  // one end's reset / lock state
  int lock_a = 0, lock_b = 0, txd_a = 0, txd_b = 0, rxd_a = 0, rxd_b = 0;
  word_t pipe_ab [LAT], pipe_ba [LAT];
  logic [7:0] prev_hi_a = 8'h00, prev_hi_b = 8'h00;

  function automatic int step(input logic rst, input int c, input int lim);
    return rst ? 0 : ((c < lim) ? c + 1 : c);
  endfunction

  initial begin
    for (int i = 0; i < LAT; i++) begin
      pipe_ab[i] = '0;
      pipe_ba[i] = '0;
    end
  end

  always @(posedge clk) begin
    lock_a <= step(a_out.pllreset, lock_a, LOCK_CYC);
    lock_b <= step(b_out.pllreset, lock_b, LOCK_CYC);
    txd_a  <= step(a_out.gttxreset, txd_a, DONE_CYC);
    txd_b  <= step(b_out.gttxreset, txd_b, DONE_CYC);
    rxd_a  <= step(a_out.gtrxreset, rxd_a, DONE_CYC + MISALIGN_CYC);
    rxd_b  <= step(b_out.gtrxreset, rxd_b, DONE_CYC + MISALIGN_CYC);
    for (int i = LAT - 1; i > 0; i--) begin
      pipe_ab[i] <= pipe_ab[i-1];
      pipe_ba[i] <= pipe_ba[i-1];
    end
    pipe_ab[0] <= '{d: a_out.txdata, k: a_out.txcharisk, ok: (txd_a >= DONE_CYC)};
    pipe_ba[0] <= '{d: b_out.txdata, k: b_out.txcharisk, ok: (txd_b >= DONE_CYC)};
    prev_hi_a  <= pipe_ba[LAT-1].d[15:8];
    prev_hi_b  <= pipe_ab[LAT-1].d[15:8];
  end

  function automatic gtp_in_t rx_view(input word_t w, input int rxd, input logic [7:0] prev_hi,
                                      input int lock, input int txd);
    gtp_in_t r;
    r.plllock     = (lock >= LOCK_CYC);
    r.txresetdone = (txd >= DONE_CYC);
    r.rxresetdone = (rxd >= DONE_CYC);
    if (!w.ok || rxd < DONE_CYC) begin
      r.rxdata    = 16'hBC00 ^ 16'(rxd);
      r.rxcharisk = 2'b10;
    end else if (rxd < DONE_CYC + MISALIGN_CYC) begin
      r.rxdata    = {w.d[7:0], prev_hi};      // one byte off
      r.rxcharisk = {w.k[0], 1'b0};
    end else begin
      r.rxdata    = w.d;
      r.rxcharisk = w.k;
    end
    return r;
  endfunction

  assign a_in = rx_view(pipe_ba[LAT-1], rxd_a, prev_hi_a, lock_a, txd_a);
  assign b_in = rx_view(pipe_ab[LAT-1], rxd_b, prev_hi_b, lock_b, txd_b);
endmodule
