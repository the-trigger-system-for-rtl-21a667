// gtp_ctrl: fabric-side control of one GTP link (16-bit words both ways).
//
// TX: when tx_valid is high and the link is ready the 16-bit word tx_word
// goes to TXDATA with TXCHARISK = 0; in every other cycle the idle word
// {D16.2, K28.5} is sent with TXCHARISK = 2'b01, so the far receiver always
// finds the K28.5 comma it needs for byte alignment. The transceiver itself
// does the 8B/10B coding and serialisation.
//
// RX: a word whose low byte is a K character K28.5 and whose high byte is
// data is an aligned idle word. After SYNC_IDLES such words in a row the
// link is declared synced; any K character elsewhere (a comma in the wrong
// byte, i.e. the words are not aligned) drops sync. While synced, words
// with RXCHARISK = 0 are passed on as rx_word with rx_valid for one cycle.
//
// Follows the paper: 16-bit parallel words, K28.5 comma for alignment.
// This design's choices: the idle word, the sync rule. Latency: TX one
// register, RX one register.
module gtp_ctrl
  import trig_pkg::*;
#(
  parameter int unsigned SYNC_IDLES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        link_ready,
  input  logic        tx_valid,
  input  logic [15:0] tx_word,
  output logic [15:0] txdata,
  output logic [1:0]  txcharisk,
  input  logic [15:0] rxdata,
  input  logic [1:0]  rxcharisk,
  output logic        rx_synced,
  output logic        rx_valid,
  output logic [15:0] rx_word
);
  logic [$clog2(SYNC_IDLES+1)-1:0] idle_cnt;
  logic aligned_idle, bad_k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      txdata    <= IDLE_WORD;
      txcharisk <= 2'b01;
    end else if (tx_valid && link_ready) begin
      txdata    <= tx_word;
      txcharisk <= 2'b00;
    end else begin
      txdata    <= IDLE_WORD;
      txcharisk <= 2'b01;
    end
  end

  assign aligned_idle = (rxcharisk == 2'b01) && (rxdata[7:0] == K28_5);
  assign bad_k        = (rxcharisk != 2'b00) && !aligned_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idle_cnt  <= '0;
      rx_synced <= 1'b0;
      rx_valid  <= 1'b0;
      rx_word   <= '0;
    end else if (!link_ready) begin
      idle_cnt  <= '0;
      rx_synced <= 1'b0;
      rx_valid  <= 1'b0;
    end else begin
      rx_valid <= 1'b0;
      if (bad_k) begin
        idle_cnt  <= '0;
        rx_synced <= 1'b0;
      end else if (aligned_idle) begin
        if (!rx_synced) begin
          if (32'(idle_cnt) == SYNC_IDLES - 1) rx_synced <= 1'b1;
          else                            idle_cnt  <= idle_cnt + 1'b1;
        end
      end else if (rx_synced) begin
        rx_valid <= 1'b1;
        rx_word  <= rxdata;
      end else begin
        idle_cnt <= '0;
      end
    end
  end
endmodule
