// hit_tx: hybrid data transmitter for one VMM3a.
//
// Pops padded 40-bit hits from the hybrid hit FIFO (first-word-fall-through)
// and sends each as five bytes, most significant byte first, through the
// 8b/10b encoder, one byte per 44.4 MHz link-clock period. When the FIFO is
// empty the K28.5 comma is sent as idle. Hits may follow each other without an
// idle, so the link carries 44.4 M symbols / 5 = 8.8 Mhits/s, which matches
// the maximum readout rate of one VMM3a on the hybrid. `code` is the 10-bit
// symbol for the OSERDES, valid one period after the byte is chosen. Byte order
// and the idle character are this design's choices.
module hit_tx (
  input  logic        clk,
  input  logic        rst,
  input  logic        fifo_empty,
  input  logic [39:0] fifo_data,
  output logic        fifo_rd,
  output logic [9:0]  code
);
  import srs_pkg::*;

  logic [2:0]  byte_idx;    // 0: idle / next hit, 1..4: remaining bytes
  logic [31:0] rest;
  logic [7:0]  tx_byte;
  logic        tx_k;
  logic        rd_pos_unused;

  always_comb begin
    fifo_rd = 1'b0;
    tx_k    = 1'b0;
    tx_byte = K28_5;
    if (byte_idx == 3'd0) begin
      if (!fifo_empty) begin
        fifo_rd = 1'b1;
        tx_byte = fifo_data[39:32];
      end else begin
        tx_k = 1'b1;
      end
    end else begin
      tx_byte = rest[31:24];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      byte_idx <= '0;
      rest     <= '0;
    end else if (byte_idx == 3'd0) begin
      if (!fifo_empty) begin
        rest     <= fifo_data[31:0];
        byte_idx <= 3'd1;
      end
    end else begin
      rest     <= {rest[23:0], 8'h00};
      byte_idx <= (byte_idx == 3'd4) ? 3'd0 : byte_idx + 1'b1;
    end
  end

  enc8b10b u_enc (.clk, .rst, .en(1'b1), .is_k(tx_k), .data(tx_byte), .code, .rd_pos(rd_pos_unused));
endmodule
