// ps_loader: reloads the FPGA from the serial flash in passive-serial (PS)
// mode, the job of the CPLD's "FPGA controller" in the paper.
//
// From the paper: the CPLD stores the configuration data from the DAQ in the
// serial flash and "then starts the re-configuration of FPGA with the data",
// with the FPGA in PS mode. Design choices: the image starts at flash address
// 0 and its length is given by `image_len`; nCONFIG is held low for
// NCONFIG_CYCLES; bytes go out LSB first on DATA0, one bit per DCLK (clk/2);
// after the last byte up to TAIL_CLKS extra DCLKs are given while waiting for
// CONF_DONE. nSTATUS going low during the load, or no CONF_DONE after the
// tail, ends the load with `error` (a broken-off flash read is drained).
module ps_loader #(
  parameter int unsigned NCONFIG_CYCLES = 8,
  parameter int unsigned TAIL_CLKS      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [23:0] image_len,
  output logic        busy,
  output logic        done,
  output logic        error,
  // flash read request (to spi_flash_ctrl)
  output logic        fl_start,
  output logic [23:0] fl_len,
  input  logic        fl_rd_valid,
  input  logic [7:0]  fl_rd_data,
  output logic        fl_rd_ready,
  input  logic        fl_done,
  // PS pins
  output logic        nconfig,
  output logic        dclk,
  output logic        data0,
  input  logic        nstatus,
  input  logic        conf_done
);
  typedef enum logic [2:0] {
    S_IDLE, S_NCFG, S_WAIT_ST, S_REQ, S_SHIFT, S_TAIL, S_DRAIN, S_END
  } state_e;

  state_e      state;
  logic [15:0] cnt;
  logic [7:0]  sh;
  logic [3:0]  bits;     // bits left in sh
  logic        phase;
  logic        flash_over;

  assign fl_len      = image_len;
  assign fl_start    = (state == S_REQ);
  assign fl_rd_ready = ((state == S_SHIFT) && (bits == 0)) || (state == S_DRAIN);
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; sh <= '0; bits <= '0; phase <= 1'b0;
      nconfig <= 1'b1; dclk <= 1'b0; data0 <= 1'b0; done <= 1'b0; error <= 1'b0;
      flash_over <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          error <= 1'b0; nconfig <= 1'b0; cnt <= '0; state <= S_NCFG;
        end
        S_NCFG: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(NCONFIG_CYCLES - 1)) begin nconfig <= 1'b1; state <= S_WAIT_ST; end
        end
        S_WAIT_ST: if (nstatus) state <= S_REQ;
        S_REQ: begin bits <= '0; phase <= 1'b0; flash_over <= 1'b0; state <= S_SHIFT; end
        S_SHIFT: begin
          if (fl_done) flash_over <= 1'b1;
          if (!nstatus) begin
            error <= 1'b1; dclk <= 1'b0;
            state <= (flash_over || fl_done) ? S_END : S_DRAIN;
          end else if (bits == 0) begin
            dclk <= 1'b0;
            if (fl_rd_valid) begin
              sh <= {1'b0, fl_rd_data[7:1]}; data0 <= fl_rd_data[0];
              bits <= 4'd8; phase <= 1'b0;
            end else if (flash_over || fl_done) begin
              cnt <= '0; state <= S_TAIL;
            end
          end else if (!phase) begin
            dclk <= 1'b1; phase <= 1'b1;
          end else begin
            dclk <= 1'b0; phase <= 1'b0;
            bits <= bits - 1'b1;
            if (bits != 4'd1) begin data0 <= sh[0]; sh <= {1'b0, sh[7:1]}; end
          end
        end
        S_TAIL: begin
          if (conf_done) begin
            dclk <= 1'b0; state <= S_END;
          end else if (cnt == 16'(2 * TAIL_CLKS)) begin
            error <= 1'b1; dclk <= 1'b0; state <= S_END;
          end else begin
            dclk <= ~dclk; cnt <= cnt + 1'b1;
          end
        end
        S_DRAIN: if (fl_done) state <= S_END;   // let the flash read finish
        S_END: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
