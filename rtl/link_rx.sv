// link_rx: 1:10 deserialiser with bit-slip word alignment and 8b/10b decoding.
//
// Receiving end of one LVDS pair (the FEC data lines and the hybrid's
// trigger/config line). The bit-clock side shifts the line into a 20-bit
// history register. On every clk_div edge (clk_bit / 10, same PLL) a 10-bit
// symbol is taken from that history at offset `slip`. While unaligned, `slip`
// advances by one bit per clk_div period (the ISERDES bit-slip) until the symbol
// is the K28.5 comma; it then stays locked. An error score that rises by two per invalid
// symbol and falls by one per valid one drops the lock when it passes 7
// (four errors in a row, or errors in over a third of the symbols). Decoded characters appear one clk_div period after capture, with
// `valid` high for every symbol received while locked. The paper names the
// ISERDES, the bit slip and the 8b/10b decoding; the comma-based search and the
// loss-of-lock rule are this design's.
module link_rx (
  input  logic       clk_bit,
  input  logic       clk_div,
  input  logic       rst,
  input  logic       sin,
  output logic [7:0] data,
  output logic       is_k,
  output logic       valid,
  output logic       locked,
  output logic       code_err
);
  logic [19:0] hist;
  always_ff @(posedge clk_bit) begin
    if (rst) hist <= '0;
    else     hist <= {hist[18:0], sin};
  end

  logic [3:0] slip;
  logic [9:0] sym;
  logic [7:0] dec_data;
  logic       dec_k, dec_err;
  logic [3:0] err_run;   // leaky error score

  assign sym = hist[{1'b0, slip} +: 10];

  dec8b10b u_dec (.code(sym), .data(dec_data), .is_k(dec_k), .err(dec_err));

  always_ff @(posedge clk_div) begin
    if (rst) begin
      slip     <= '0;
      locked   <= 1'b0;
      err_run  <= '0;
      data     <= '0;
      is_k     <= 1'b0;
      valid    <= 1'b0;
      code_err <= 1'b0;
    end else begin
      data     <= dec_data;
      is_k     <= dec_k;
      code_err <= locked && dec_err;
      if (!locked) begin
        valid <= 1'b0;
        if (dec_k && !dec_err) locked <= 1'b1;
        else                   slip   <= (slip == 4'd9) ? 4'd0 : slip + 1'b1;
      end else begin
        valid <= !dec_err;
        if (dec_err) begin
          if (err_run >= 4'd6) begin
            locked  <= 1'b0;
            err_run <= '0;
          end else begin
            err_run <= err_run + 4'd2;
          end
        end else if (err_run != '0) begin
          err_run <= err_run - 1'b1;
        end
      end
    end
  end
endmodule
