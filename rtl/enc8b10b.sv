// enc8b10b: registered 8b/10b encoder with running disparity.
//
// Standard 8b/10b line code (5b/6b + 3b/4b sub-blocks). Supports all 256 data
// characters and the K28.5 comma (is_k=1 with data 8'hBC; other K codes are
// sent as K28.5). The 10-bit symbol is {a,b,c,d,e,i,f,g,h,j} with 'a' in bit 9;
// the serialiser sends bit 9 first. One symbol per clock when `en` is high; the
// output register and the running disparity update on that edge (1-cycle
// latency). Running disparity resets to negative. The paper states only that
// hit data and commands are 8b/10b encoded; the choice of K28.5 as idle/comma is
// this design's.
module enc8b10b (
  input  logic       clk,
  input  logic       rst,
  input  logic       en,
  input  logic       is_k,
  input  logic [7:0] data,
  output logic [9:0] code,
  output logic       rd_pos     // running disparity after `code` (1 = positive)
);

  // 5b/6b table, RD- column, 'a' in bit 5.
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

  // 3b/4b table, RD- column, 'f' in bit 3 (index 7 = primary P7).
  function automatic logic [3:0] t4(input logic [2:0] y);
    case (y)
      3'd0: t4 = 4'b1011; 3'd1: t4 = 4'b1001; 3'd2: t4 = 4'b0101; 3'd3: t4 = 4'b1100;
      3'd4: t4 = 4'b1101; 3'd5: t4 = 4'b1010; 3'd6: t4 = 4'b0110; default: t4 = 4'b1110;
    endcase
  endfunction

  logic       rd;          // current running disparity, 1 = positive
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd_mid, rd_next;

  always_comb begin
    logic [4:0] x;
    logic [2:0] y;
    logic       alt7;
    alt7 = 1'b0;
    x = data[4:0];
    y = data[7:5];
    if (is_k) begin
      // K28.5: 001111 1010 (RD-) / 110000 0101 (RD+)
      c6      = rd ? 6'b110000 : 6'b001111;
      c4      = rd ? 4'b0101   : 4'b1010;
      rd_mid  = ~rd;
      rd_next = ~rd;
    end else begin
      c6 = t6(x);
      if (rd && (($countones(c6) != 3) || (x == 5'd7))) c6 = ~c6;
      rd_mid = ($countones(c6) == 3) ? rd : ~rd;
      // alternate D.x.A7 avoids a run of five equal bits
      alt7 = (y == 3'd7) &&
             ((!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
              ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14)));
      c4 = alt7 ? 4'b0111 : t4(y);
      if (rd_mid && (($countones(c4) != 2) || (y == 3'd3))) c4 = ~c4;
      rd_next = ($countones(c4) == 2) ? rd_mid : ~rd_mid;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd   <= 1'b0;
      code <= 10'b0011111010;
    end else if (en) begin
      rd   <= rd_next;
      code <= {c6, c4};
    end
  end

  assign rd_pos = rd;

endmodule
