// ps_fpga_model: behavioural model of the passive-serial configuration port
// of an FPGA, for simulation only. Pulling nCONFIG low clears the device:
// nSTATUS and CONF_DONE go low. NSTATUS_T time units after nCONFIG returns
// high, nSTATUS is released. The device then takes one bit of DATA0 on each
// rising DCLK, least significant bit of each byte first, and stores the
// bytes in `got`. When `expect_n` bytes (IMAGE_BYTES unless the testbench
// sets it lower) have arrived CONF_DONE goes high.
// If `fail_at` is non-negative, nSTATUS is pulled low (a configuration
// error) after that many bytes instead.
module ps_fpga_model #(
  parameter int unsigned IMAGE_BYTES = 512,
  parameter int unsigned NSTATUS_T   = 100
) (
  input  logic nconfig,
  input  logic dclk,
  input  logic data0,
  output logic nstatus,
  output logic conf_done
);
  logic [7:0] got [IMAGE_BYTES];
  int         nbytes, nbits, fail_at, loads, expect_n;
  logic [7:0] sh;

  initial begin
    nstatus = 1'b1; conf_done = 1'b0; nbytes = 0; nbits = 0; fail_at = -1;
    loads = 0; sh = '0; expect_n = IMAGE_BYTES;
    for (int i = 0; i < IMAGE_BYTES; i++) got[i] = '0;
  end

  always @(negedge nconfig) begin
    nstatus = 1'b0; conf_done = 1'b0; nbytes = 0; nbits = 0;
  end

  always @(posedge nconfig) begin
    #(NSTATUS_T) nstatus = 1'b1;
  end

  always @(posedge dclk) if (nconfig && nstatus && !conf_done) begin
    sh = {data0, sh[7:1]};
    nbits++;
    if (nbits == 8) begin
      nbits = 0;
      if (nbytes < IMAGE_BYTES) got[nbytes] = sh;
      nbytes++;
      if (fail_at >= 0 && nbytes == fail_at) nstatus = 1'b0;
      else if (nbytes == expect_n) begin conf_done = 1'b1; loads++; end
    end
  end
endmodule
