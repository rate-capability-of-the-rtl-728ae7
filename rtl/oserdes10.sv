// oserdes10: 10:1 output serialiser (OSERDES equivalent) for one LVDS pair.
//
// `word` is produced in the divided-clock domain (clk_div = clk_bit / 10, both
// from the same PLL, as on the hybrid: 44.4 MHz and 444.4 MHz). A toggle flag
// marks each new word; the bit-clock side sees the toggle one bit period after
// the clk_div edge, loads the word into a shift register and sends it bit 9
// first, one bit per clk_bit. The word register is stable for the ten bit
// periods in between, so the hand-over is safe for any fixed phase between the
// two clocks. Latency: about one clk_div period plus one bit. The paper names
// the OSERDES and its 10:1 ratio; the internal structure is this design's.
module oserdes10 (
  input  logic       clk_bit,
  input  logic       clk_div,
  input  logic       rst,
  input  logic [9:0] word,
  output logic       sout
);
  logic [9:0] word_q;
  logic       tog;
  always_ff @(posedge clk_div) begin
    if (rst) begin
      tog    <= 1'b0;
      word_q <= 10'b0011111010;
    end else begin
      tog    <= ~tog;
      word_q <= word;
    end
  end

  logic       tog_s1, tog_s2;
  logic [9:0] sh;
  always_ff @(posedge clk_bit) begin
    if (rst) begin
      tog_s1 <= 1'b0;
      tog_s2 <= 1'b0;
      sh     <= '0;
    end else begin
      tog_s1 <= tog;
      tog_s2 <= tog_s1;
      if (tog_s1 != tog_s2) sh <= word_q;
      else                  sh <= {sh[8:0], 1'b0};
    end
  end
  assign sout = sh[9];
endmodule
