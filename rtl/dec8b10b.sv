// dec8b10b: combinational 8b/10b decoder.
//
// Inverse of enc8b10b for the 256 data characters and the K28.5 comma. The
// 6-bit and 4-bit sub-blocks are looked up in both disparity columns; a
// complement is accepted only for unbalanced codes and for the two balanced
// codes with disparity alternates (D.07 and D.x.3). `err` flags a symbol that is
// no valid code; running-disparity errors are not checked (own choice: the
// paper only names the decoding step).
module dec8b10b (
  input  logic [9:0] code,     // {a,b,c,d,e,i,f,g,h,j}, a = bit 9
  output logic [7:0] data,
  output logic       is_k,
  output logic       err
);

  function automatic logic [5:0] t6(input logic [4:0] x);
    case (x)
      5'd0:  t6 = 6'b100111; 5'd1:  t6 = 6'b011101; 5'd2:  t6 = 6'b101101; 5'd3:  t6 = 6'b110001;
      5'd4:  t6 = 6'b110101; 5'd5:  t6 = 6'b101001; 5'd6:  t6 = 6'b011001; 5'd7:  t6 = 6'b111000;
      5'd8:  t6 = 6'b111001; 5'd9:  t6 = 6'b100101; 5'd10: t6 = 6'b010101; 5'd11: t6 = 6'b110100;
      5'd12: t6 = 6'b001101; 5'd13: t6 = 6'b101100; 5'd14: t6 = 6'b011100; 5'd15: t6 = 6'b010111;
      5'd16: t6 = 6'b011011; 5'd17: t6 = 6'b100011; 5'd18: t6 = 6'b010011; 5'd19: t6 = 6'b110010;
      5'd20: t6 = 6'b001011; 5'd21: t6 = 6'b101010; 5'd22: t6 = 6'b011010; 5'd23: t6 = 6'b111010;
      5'd24: t6 = 6'b110011; 5'd25: t6 = 6'b100110; 5'd26: t6 = 6'b010110; 5'd27: t6 = 6'b110110;
      5'd28: t6 = 6'b001110; 5'd29: t6 = 6'b101110; 5'd30: t6 = 6'b011110; default: t6 = 6'b101011;
    endcase
  endfunction

  function automatic logic [3:0] t4(input logic [2:0] y);
    case (y)
      3'd0: t4 = 4'b1011; 3'd1: t4 = 4'b1001; 3'd2: t4 = 4'b0101; 3'd3: t4 = 4'b1100;
      3'd4: t4 = 4'b1101; 3'd5: t4 = 4'b1010; 3'd6: t4 = 4'b0110; default: t4 = 4'b1110;
    endcase
  endfunction

  always_comb begin
    logic [5:0] c6;
    logic [3:0] c4;
    logic       hit6, hit4;
    logic [5:0] t;
    logic [3:0] u;
    t    = '0;
    u    = '0;
    c6   = code[9:4];
    c4   = code[3:0];
    data = '0;
    is_k = 1'b0;
    hit6 = 1'b0;
    hit4 = 1'b0;
    if (code == 10'b0011111010 || code == 10'b1100000101) begin
      data = 8'hBC;
      is_k = 1'b1;
      hit6 = 1'b1;
      hit4 = 1'b1;
    end else begin
      for (int i = 0; i < 32; i++) begin
        t = t6(5'(i));
        if (c6 == t || (c6 == ~t && (($countones(t) != 3) || i == 7))) begin
          data[4:0] = 5'(i);
          hit6 = 1'b1;
        end
      end
      for (int j = 0; j < 8; j++) begin
        u = t4(3'(j));
        if (c4 == u || (c4 == ~u && (($countones(u) != 2) || j == 3))) begin
          data[7:5] = 3'(j);
          hit4 = 1'b1;
        end
      end
      if (c4 == 4'b0111 || c4 == 4'b1000) begin
        data[7:5] = 3'd7;
        hit4 = 1'b1;
      end
    end
    err = !(hit6 && hit4);
  end

endmodule
