// m25p_model: behavioural model of an M25P-family SPI serial flash, for
// simulation only (not synthesizable). It answers the commands the
// configuration controller uses: WREN (06h), RDSR (05h), READ (03h),
// PAGE PROGRAM (02h, data wrap inside the 256-byte page, bits can only be
// cleared) and SECTOR ERASE (D8h, sets the sector to FFh). A program or
// erase starts when chip select rises and keeps the write-in-progress bit
// (status bit 0) set for PROG_T or ERASE_T time units; the write-enable
// latch (bit 1) is needed for both and cleared by them. SPI mode 0.
// The real parts hold 4 MiB (M25P32) or 16 MiB (M25P128) in 64 KiB or
// 256 KiB sectors; this model keeps 2**ADDR_BITS bytes and uses sectors of
// 2**SECTOR_BITS bytes so that testbenches stay small. Addresses above the
// model's size wrap. `bad_cmds` counts protocol errors it saw (a program or
// erase without WREN, a command while busy, chip select raised mid-byte).
module m25p_model #(
  parameter int unsigned ADDR_BITS   = 16,
  parameter int unsigned SECTOR_BITS = 12,
  parameter int unsigned PROG_T      = 400,
  parameter int unsigned ERASE_T     = 2000
) (
  input  logic sck,
  input  logic cs_n,
  input  logic mosi,
  output logic miso
);
  logic [7:0]  mem [2**ADDR_BITS];
  logic [7:0]  page [256];
  logic [7:0]  insh, outsh, cmd;
  logic [23:0] addr;
  int          bitn, bytes, n_data;
  logic        wel, wip;
  int          bad_cmds;

  initial begin
    for (int i = 0; i < 2**ADDR_BITS; i++) mem[i] = 8'hFF;
    wel = 1'b0; wip = 1'b0; miso = 1'b0; bad_cmds = 0; outsh = '0;
    bitn = 0; bytes = 0; n_data = 0; cmd = '0; addr = '0; insh = '0;
  end

  always @(negedge cs_n) begin
    bitn = 0; bytes = 0; n_data = 0; outsh = '0;
  end

  always @(posedge sck) if (!cs_n) begin
    insh = {insh[6:0], mosi};
    bitn++;
    if (bitn == 8) begin
      bitn = 0;
      if (bytes == 0) begin
        cmd = insh;
        if (wip && cmd != 8'h05) bad_cmds++;
        if (cmd == 8'h05) outsh = {6'b0, wel, wip};
      end else if (bytes <= 3 && (cmd == 8'h03 || cmd == 8'h02 || cmd == 8'hD8)) begin
        addr = {addr[15:0], insh};
        if (bytes == 3 && cmd == 8'h03) outsh = mem[addr[ADDR_BITS-1:0]];
      end else if (cmd == 8'h03) begin
        addr = addr + 1;
        outsh = mem[addr[ADDR_BITS-1:0]];
      end else if (cmd == 8'h05) begin
        outsh = {6'b0, wel, wip};
      end else if (cmd == 8'h02) begin
        page[(addr[7:0] + n_data) % 256] = insh;
        n_data++;
      end
      bytes++;
    end
  end

  always @(negedge sck) if (!cs_n) begin
    miso = outsh[7];
    outsh = {outsh[6:0], 1'b0};
  end

  always @(posedge cs_n) begin
    if (bitn != 0 && !wip) bad_cmds++;
    else if (bytes == 1 && cmd == 8'h06 && !wip) wel = 1'b1;
    else if (bytes >= 4 && (cmd == 8'h02 || cmd == 8'hD8) && !wip) begin
      if (!wel) bad_cmds++;
      else if (cmd == 8'h02) begin
        for (int i = 0; i < n_data && i < 256; i++) begin
          automatic logic [ADDR_BITS-1:0] a =
            ADDR_BITS'({addr[23:8], 8'(addr[7:0] + i)});
          mem[a] = mem[a] & page[(addr[7:0] + i) % 256];
        end
        wel = 1'b0; wip = 1'b1;
        #(PROG_T) wip = 1'b0;
      end else begin
        for (int i = 0; i < 2**SECTOR_BITS; i++)
          mem[ADDR_BITS'({addr[ADDR_BITS-1:SECTOR_BITS], SECTOR_BITS'(i)})] = 8'hFF;
        wel = 1'b0; wip = 1'b1;
        #(ERASE_T) wip = 1'b0;
      end
    end
  end
endmodule
