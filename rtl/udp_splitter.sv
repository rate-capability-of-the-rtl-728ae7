// udp_splitter: cuts 48-bit FEC words into six 8-bit chunks for the UDP FIFO.
//
// Reads the FEC hit FIFO (first-word-fall-through) on the 125 MHz clock and
// writes bytes, most significant first, into the 8-bit UDP FIFO, one per cycle
// while that FIFO is not full; the 48-bit word is popped with its sixth byte.
// The byte order is this design's choice.
module udp_splitter (
  input  logic        clk,
  input  logic        rst,
  input  logic        src_empty,
  input  logic [47:0] src_data,
  output logic        src_rd,
  input  logic        dst_full,
  output logic        dst_wr,
  output logic [7:0]  dst_data
);
  logic [2:0] idx;   // byte 0..5 of the current word

  always_comb begin
    dst_wr   = !src_empty && !dst_full;
    dst_data = src_data[8*(5 - idx) +: 8];
    src_rd   = dst_wr && (idx == 3'd5);
  end

  always_ff @(posedge clk) begin
    if (rst)         idx <= '0;
    else if (dst_wr) idx <= (idx == 3'd5) ? 3'd0 : idx + 1'b1;
  end
endmodule
