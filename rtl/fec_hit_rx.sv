// fec_hit_rx: FEC receiver for the data line of one VMM3a.
//
// A link_rx (1:10 ISERDES, comma alignment, 8b/10b decoding) on the 444.4 MHz
// bit clock and the 44.4 MHz FEC clock, followed by a byte assembler: every
// K28.5 restarts byte counting, and each run of five data bytes forms one
// padded 40-bit hit, i.e. a 38-bit VMM3a event carried in 5 x 10 bits. The
// 38-bit hit is presented with `hit_valid` for one clk_div period. Decoding
// errors, lost framing and hits with non-zero padding (which are dropped) are
// counted in `err_count`. The ESS FEC runs its
// SERDES in DDR at 222.2 MHz; this design uses an equivalent single-rate
// 444.4 MHz bit clock.
module fec_hit_rx (
  input  logic        clk_bit,
  input  logic        clk_div,
  input  logic        rst,
  input  logic        sin,
  output logic [37:0] hit,
  output logic        hit_valid,
  output logic        locked,
  output logic [15:0] err_count
);
  logic [7:0] d;
  logic       k, v, cerr;

  link_rx u_rx (.clk_bit, .clk_div, .rst, .sin, .data(d), .is_k(k), .valid(v),
                .locked, .code_err(cerr));

  logic [2:0]  nbytes;
  logic [31:0] acc;

  always_ff @(posedge clk_div) begin
    if (rst) begin
      nbytes    <= '0;
      acc       <= '0;
      hit       <= '0;
      hit_valid <= 1'b0;
      err_count <= '0;
    end else begin
      hit_valid <= 1'b0;
      if (cerr) begin
        err_count <= err_count + 1'b1;
        nbytes    <= '0;
      end else if (v) begin
        if (k) begin
          if (nbytes != '0) err_count <= err_count + 1'b1;   // truncated hit
          nbytes <= '0;
        end else if (nbytes == 3'd4) begin
          hit <= {acc[29:0], d};
          if (acc[31:30] != 2'b00) err_count <= err_count + 1'b1;   // padding not zero: drop
          else                     hit_valid <= 1'b1;
          nbytes    <= '0;
        end else begin
          acc    <= {acc[23:0], d};
          nbytes <= nbytes + 1'b1;
        end
      end
    end
  end
endmodule
