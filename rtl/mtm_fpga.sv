// mtm_fpga: the FPGA of the master trigger module (MTM).
//
// Contents: N_LINK GTP links to the slave trigger modules (gtp_ctrl +
// gtp_init each), translation of received sub-trigger words into the flag
// ST_i and the 12-bit hit number STnum_i, the MTM trigger logic
// (mtm_trigger), the data buffer holding the STnum_i of accepted events for
// the DAQ (data_buffer), and the control/command registers.
//
// Flow: word {4'b0100, n} on link i -> ST_i pulse and STnum_i = n (one
// register after the link) -> mtm_trigger -> GT_OK. Each GT_OK sends the
// global trigger word {4'b1000, 12'h0} on every link (one register later)
// and pushes the held STnum_1..STnum_N of the event into the buffer.
// Words with other tags are ignored.
//
// Registers (addr: meaning; reset value). Reads are combinational on addr.
//   0x00 CTRL   w[0]=1: INIT_PULSE to all links; [3:2] pattern mode
//               (0 A||B||C||D, 1 A&B&C&D, 2 A&B||C&D, 3 off) (0)
//   0x01 THRESH hit-number threshold, GT_eff = sum > THRESH (0)
//   0x02 HOLD   cycles a received STnum_i is held for the adder (32)
//   0x03 GTCNT  GT_OK count; any write clears it
//   0x04 LINKS  r: [15:0] link ready, [31:16] rx synced
//   0x05 BUFST  r: [7:0] entries, [8] overflow; any write clears overflow
//   0x06 POP    write: drop the buffer head
//   0x10+i      delay of ST_i in cycles (0)
//   0x20+i      STnum_i of the buffer head
// The register map and the GT word are this design's choices.
module mtm_fpga
  import trig_pkg::*;
#(
  parameter int unsigned N_LINK    = 16,
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  reg_req_t              reg_req,
  output logic [31:0]           reg_rdata,
  output gtp_out_t [N_LINK-1:0] gtp_out,
  input  gtp_in_t  [N_LINK-1:0] gtp_in,
  output logic                  gt_ok
);
  localparam int unsigned NUM_W = 12;
  localparam int unsigned BW    = N_LINK * NUM_W;

  gt_mode_e                       mode;
  logic [NUM_W+3:0]               threshold;
  logic [7:0]                     hold_len;
  logic [N_LINK-1:0][3:0]         delay;
  logic [31:0]                    gt_cnt;
  logic                           init_pulse;
  logic [N_LINK-1:0]              link_ready, rx_synced, rx_valid;
  logic [N_LINK-1:0][15:0]        rx_word;
  logic [N_LINK-1:0]              st_flag, st_aligned;
  logic [N_LINK-1:0][NUM_W-1:0]   st_num, stnum_held;
  logic [3:0]                     group_out;
  logic                           gt_ok_tmp, gt_eff;
  logic [BW-1:0]                  buf_dout;
  logic [$clog2(BUF_DEPTH+1)-1:0] buf_count;
  logic                           buf_ovf;

  assign init_pulse = reg_req.we && reg_req.addr == MTM_R_CTRL && reg_req.wdata[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode      <= MODE_ANY;
      threshold <= '0;
      hold_len  <= 8'd32;
      delay     <= '0;
    end else if (reg_req.we) begin
      if (reg_req.addr == MTM_R_CTRL)   mode      <= gt_mode_e'(reg_req.wdata[3:2]);
      if (reg_req.addr == MTM_R_THRESH) threshold <= reg_req.wdata[NUM_W+3:0];
      if (reg_req.addr == MTM_R_HOLD)   hold_len  <= reg_req.wdata[7:0];
      if (reg_req.addr[7:4] == MTM_R_DELAY[7:4] && 32'(reg_req.addr[3:0]) < N_LINK)
        delay[reg_req.addr[3:0]] <= reg_req.wdata[3:0];
    end
  end

  always_comb begin
    reg_rdata = '0;
    unique case (reg_req.addr)
      MTM_R_CTRL:   reg_rdata = {28'd0, mode, 2'b00};
      MTM_R_THRESH: reg_rdata = 32'(threshold);
      MTM_R_HOLD:   reg_rdata = 32'(hold_len);
      MTM_R_GTCNT:  reg_rdata = gt_cnt;
      MTM_R_LINKS:  reg_rdata = {16'(rx_synced), 16'(link_ready)};
      MTM_R_BUFST:  reg_rdata = {23'd0, buf_ovf, 8'(buf_count)};
      default: begin
        if (reg_req.addr[7:4] == MTM_R_DELAY[7:4] && 32'(reg_req.addr[3:0]) < N_LINK)
          reg_rdata = 32'(delay[reg_req.addr[3:0]]);
        if (reg_req.addr[7:4] == MTM_R_BUF[7:4] && 32'(reg_req.addr[3:0]) < N_LINK)
          reg_rdata = 32'(buf_dout[32'(reg_req.addr[3:0]) * NUM_W +: NUM_W]);
      end
    endcase
  end

  for (genvar i = 0; i < N_LINK; i++) begin : g_link
    gtp_init u_init (
      .clk, .rst_n, .init_pulse,
      .pllreset(gtp_out[i].pllreset), .gttxreset(gtp_out[i].gttxreset),
      .gtrxreset(gtp_out[i].gtrxreset), .plllock(gtp_in[i].plllock),
      .txresetdone(gtp_in[i].txresetdone), .rxresetdone(gtp_in[i].rxresetdone),
      .ready(link_ready[i])
    );
    gtp_ctrl u_link (
      .clk, .rst_n, .link_ready(link_ready[i]),
      .tx_valid(gt_ok), .tx_word(GT_WORD),
      .txdata(gtp_out[i].txdata), .txcharisk(gtp_out[i].txcharisk),
      .rxdata(gtp_in[i].rxdata), .rxcharisk(gtp_in[i].rxcharisk),
      .rx_synced(rx_synced[i]), .rx_valid(rx_valid[i]), .rx_word(rx_word[i])
    );
    assign st_flag[i] = rx_valid[i] && rx_word[i][15:12] == TAG_SUB;
    assign st_num[i]  = rx_word[i][NUM_W-1:0];
  end

  mtm_trigger #(.N_ST(N_LINK), .NUM_W(NUM_W), .DLY_W(4), .HOLD_W(8)) u_trig (
    .clk, .rst_n, .st_flag, .st_num, .delay, .mode, .threshold, .hold_len,
    .st_aligned, .group_out, .gt_ok_tmp, .gt_eff, .gt_ok, .stnum_held
  );

  data_buffer #(.W(BW), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .push(gt_ok), .din(stnum_held),
    .pop(reg_req.we && reg_req.addr == MTM_R_POP),
    .dout(buf_dout), .count(buf_count), .overflow(buf_ovf),
    .clr_overflow(reg_req.we && reg_req.addr == MTM_R_BUFST)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                        gt_cnt <= '0;
    else if (reg_req.we && reg_req.addr == MTM_R_GTCNT) gt_cnt <= '0;
    else if (gt_ok)                                    gt_cnt <= gt_cnt + 1'b1;
  end
endmodule
