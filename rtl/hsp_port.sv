// hsp_port: high-speed data port between the host and the DMA.
//
// The host side is a byte stream in each direction with valid/ready
// handshakes, one byte per clock at most (200 MB/s at a 200 MHz clock, the
// rate the paper gives for this port). Incoming bytes are packed into
// BYTES-byte DRAM words, first byte in the least significant position, and
// offered to the DMA as one word. Outgoing words from the DMA are sent out
// byte by byte in the same order. The port's real protocol is proprietary
// and not published; the byte stream and packing are this design's choices.
module hsp_port #(
  parameter int BYTES = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  // host -> chip bytes
  input  logic               rx_valid,
  output logic               rx_ready,
  input  logic [7:0]         rx_data,
  // packed words to the DMA
  output logic               win_valid,
  input  logic               win_ready,
  output logic [BYTES*8-1:0] win_data,
  // words from the DMA
  input  logic               wout_valid,
  output logic               wout_ready,
  input  logic [BYTES*8-1:0] wout_data,
  // chip -> host bytes
  output logic               tx_valid,
  input  logic               tx_ready,
  output logic [7:0]         tx_data
);
  localparam int CW = $clog2(BYTES);
  logic [CW-1:0]      rx_cnt, tx_cnt;
  logic [BYTES*8-1:0] rx_buf, tx_buf;
  logic               rx_full, tx_busy;

  // Packing: a full word is held until the DMA takes it; the next word's
  // first byte may arrive in the cycle the full word is taken.
  assign rx_ready  = !rx_full || win_ready;
  assign win_valid = rx_full;
  assign win_data  = rx_buf;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_cnt <= '0; rx_full <= 1'b0; rx_buf <= '0;
    end else begin
      if (rx_valid && rx_ready) begin
        rx_buf[rx_cnt*8 +: 8] <= rx_data;
        rx_cnt <= rx_cnt + 1'b1;
        if (rx_cnt == CW'(BYTES-1)) rx_full <= 1'b1;
      end
      if (win_valid && win_ready) rx_full <= 1'b0;
    end
  end

  // Unpacking: a word is taken when the previous one's last byte goes out.
  assign wout_ready = !tx_busy || (tx_ready && tx_cnt == CW'(BYTES-1));
  assign tx_valid   = tx_busy;
  assign tx_data    = tx_buf[tx_cnt*8 +: 8];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_cnt <= '0; tx_busy <= 1'b0; tx_buf <= '0;
    end else if (wout_valid && wout_ready) begin
      tx_buf <= wout_data; tx_busy <= 1'b1; tx_cnt <= '0;
    end else if (tx_valid && tx_ready) begin
      tx_cnt <= tx_cnt + 1'b1;
      if (tx_cnt == CW'(BYTES-1)) tx_busy <= 1'b0;
    end
  end
endmodule
