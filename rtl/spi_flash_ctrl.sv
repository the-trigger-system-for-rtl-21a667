// spi_flash_ctrl: SPI master for an M25P-family serial flash (M25P32 /
// M25P128, 24-bit addresses, 256-byte pages), used to keep the FPGA
// configuration image on the trigger module.
//
// Operations, started by `start` with `op`, `addr` and `len` (bytes):
//   OP_READ     READ (03h) + address, then `len` bytes out on rd_data with
//               rd_valid; the SPI clock pauses while rd_ready is low, so the
//               consumer sets the pace;
//   OP_PROGRAM  WREN (06h), then PAGE PROGRAM (02h) + address with `len`
//               bytes taken from wr_data/wr_valid (wr_ready acknowledges
//               each), then RDSR (05h) polling until the write-in-progress
//               bit clears. The caller keeps a program inside one page;
//   OP_ERASE    WREN, SECTOR ERASE (D8h) + address, then polling.
// `done` pulses when the operation is over. SPI mode 0: SCK idles low, MOSI
// changes while SCK is low, MISO is sampled at the end of the high phase.
// SCK runs at clk/2. Only the command set of the flash is used; the paper
// names the flash parts and says the configuration data are stored there.
module spi_flash_ctrl #(
  parameter int unsigned LEN_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [1:0]       op,        // 0 read, 1 program, 2 erase
  input  logic [23:0]      addr,
  input  logic [LEN_W-1:0] len,
  output logic             busy,
  output logic             done,
  input  logic             wr_valid,
  input  logic [7:0]       wr_data,
  output logic             wr_ready,
  output logic             rd_valid,
  output logic [7:0]       rd_data,
  input  logic             rd_ready,
  output logic             sck,
  output logic             cs_n,
  output logic             mosi,
  input  logic             miso
);
  localparam logic [1:0] OP_READ = 2'd0, OP_PROGRAM = 2'd1, OP_ERASE = 2'd2;
  localparam logic [7:0] C_WREN = 8'h06, C_RDSR = 8'h05, C_READ = 8'h03,
                         C_PP = 8'h02, C_SE = 8'hD8;

  typedef enum logic [3:0] {
    S_IDLE, S_WREN, S_GAP, S_HDR, S_DATA, S_DATA_WAIT, S_POLL_CMD, S_POLL_RD,
    S_POLL_GAP, S_END
  } state_e;

  // byte engine
  logic       e_busy, e_start, e_done, e_phase;
  logic [7:0] e_tx, e_sh, e_rx;
  logic [2:0] e_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_busy <= 1'b0; e_phase <= 1'b0; e_sh <= '0; e_rx <= '0; e_cnt <= '0;
      sck <= 1'b0; e_done <= 1'b0;
    end else begin
      e_done <= 1'b0;
      if (e_start) begin
        e_busy <= 1'b1; e_sh <= e_tx; e_cnt <= '0; e_phase <= 1'b0; sck <= 1'b0;
      end else if (e_busy) begin
        if (!e_phase) begin
          sck <= 1'b1; e_phase <= 1'b1;
        end else begin
          sck <= 1'b0; e_phase <= 1'b0;
          e_rx <= {e_rx[6:0], miso};
          e_sh <= {e_sh[6:0], 1'b0};
          e_cnt <= e_cnt + 1'b1;
          if (e_cnt == 3'd7) begin e_busy <= 1'b0; e_done <= 1'b1; end
        end
      end
    end
  end
  assign mosi = e_sh[7];

  state_e           state;
  logic [1:0]       op_q;
  logic [23:0]      addr_q;
  logic [LEN_W-1:0] left;
  logic [1:0]       hidx;
  logic             hold_rd;

  always_comb begin
    e_start = 1'b0;
    e_tx    = 8'h00;
    wr_ready = 1'b0;
    unique case (state)
      S_WREN:     if (!e_busy && !e_done) begin e_start = 1'b1; e_tx = C_WREN; end
      S_HDR:      if (!e_busy && !e_done) begin
                    e_start = 1'b1;
                    unique case (hidx)
                      2'd0: e_tx = (op_q == OP_READ) ? C_READ : (op_q == OP_PROGRAM) ? C_PP : C_SE;
                      2'd1: e_tx = addr_q[23:16];
                      2'd2: e_tx = addr_q[15:8];
                      default: e_tx = addr_q[7:0];
                    endcase
                  end
      S_DATA:     if (!e_busy && !e_done && !hold_rd) begin
                    if (op_q == OP_PROGRAM) begin
                      e_start  = wr_valid;
                      e_tx     = wr_data;
                      wr_ready = wr_valid;
                    end else begin
                      e_start = 1'b1;
                    end
                  end
      S_POLL_CMD: if (!e_busy && !e_done) begin e_start = 1'b1; e_tx = C_RDSR; end
      S_POLL_RD:  if (!e_busy && !e_done) e_start = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; op_q <= '0; addr_q <= '0; left <= '0; hidx <= '0;
      cs_n <= 1'b1; done <= 1'b0; rd_valid <= 1'b0; rd_data <= '0; hold_rd <= 1'b0;
    end else begin
      done <= 1'b0;
      if (rd_valid && rd_ready) begin rd_valid <= 1'b0; hold_rd <= 1'b0; end
      unique case (state)
        S_IDLE: if (start) begin
          op_q <= op; addr_q <= addr; left <= len; hidx <= '0;
          cs_n <= 1'b0;
          state <= (op == OP_READ) ? S_HDR : S_WREN;
        end
        S_WREN: if (e_done) begin cs_n <= 1'b1; state <= S_GAP; end
        S_GAP: begin cs_n <= 1'b0; state <= S_HDR; end
        S_HDR: if (e_done) begin
          hidx <= hidx + 1'b1;
          if (hidx == 2'd3) begin
            if (op_q == OP_ERASE || left == 0) begin
              cs_n <= 1'b1;
              state <= (op_q == OP_READ) ? S_END : S_POLL_GAP;
            end else state <= S_DATA;
          end
        end
        S_DATA: if (e_done) begin
          left <= left - 1'b1;
          if (op_q == OP_READ) begin
            rd_valid <= 1'b1; rd_data <= e_rx; hold_rd <= 1'b1;
          end
          if (left == 1) begin
            state <= (op_q == OP_READ) ? S_DATA_WAIT : S_POLL_GAP;
            cs_n  <= (op_q == OP_READ) ? 1'b0 : 1'b1;
          end
        end
        S_DATA_WAIT: if (!rd_valid || rd_ready) begin cs_n <= 1'b1; state <= S_END; end
        S_POLL_GAP: begin cs_n <= 1'b0; state <= S_POLL_CMD; end
        S_POLL_CMD: if (e_done) state <= S_POLL_RD;
        S_POLL_RD: if (e_done && !e_rx[0]) begin cs_n <= 1'b1; state <= S_END; end
        S_END: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
