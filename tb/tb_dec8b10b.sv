// tb_dec8b10b: checks the 8b/10b decoder against code words from the standard
// tables (both disparities), against symbols that are no code word, and by
// decoding every character produced by enc8b10b in both running disparities.
module tb_dec8b10b;
  timeunit 1ns; timeprecision 1ps;
  logic [9:0] code;
  logic [7:0] data;
  logic is_k, err;
  dec8b10b u_dut (.code, .data, .is_k, .err);

  logic clk = 0, rst = 1, ek = 0;
  logic [7:0] ed = 0;
  logic [9:0] ecode;
  logic rdp;
  always #5 clk = ~clk;
  enc8b10b u_enc (.clk, .rst, .en(1'b1), .is_k(ek), .data(ed), .code(ecode), .rd_pos(rdp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic expect_dec(input logic [9:0] c, input logic k, input logic [7:0] d);
    code = c; #1;
    check(!err && is_k == k && data == d, $sformatf("%b -> %h k%0d err%0d, want %h", c, data, is_k, err, d));
  endtask
  task automatic expect_err(input logic [9:0] c);
    code = c; #1;
    check(err, $sformatf("%b should be invalid", c));
  endtask

  initial begin
    // from the standard 8b/10b tables, written abcdei fghj
    expect_dec(10'b100111_0100, 0, 8'h00);   // D0.0 RD-
    expect_dec(10'b011000_1011, 0, 8'h00);   // D0.0 RD+
    expect_dec(10'b101010_1010, 0, 8'hB5);   // D21.5
    expect_dec(10'b110001_1011, 0, 8'h03);   // D3.0 RD+ (6b balanced, 4b RD+)
    expect_dec(10'b111000_1110, 0, 8'hE7);   // D7.7 RD+ ... (000111 0001 is RD+ form)
    expect_dec(10'b000111_0001, 0, 8'hE7);
    expect_dec(10'b100011_0111, 0, 8'hF1);   // D17.7 A7 RD-
    expect_dec(10'b110100_1000, 0, 8'hEB);   // D11.7 A7 RD+
    expect_dec(10'b101011_0001, 0, 8'hFF);   // D31.7 RD-
    expect_dec(10'b010100_1110, 0, 8'hFF);   // D31.7 RD+
    expect_dec(10'b0011111010, 1, 8'hBC);    // K28.5 RD-
    expect_dec(10'b1100000101, 1, 8'hBC);    // K28.5 RD+
    expect_err(10'b0000000000);
    expect_err(10'b1111111111);
    expect_err(10'b111111_0000);
    expect_err(10'b000011_1010);
    // round trip through the encoder, each character at both disparities
    #3 rst = 0;
    for (int rep = 0; rep < 2; rep++) begin
      for (int i = 0; i < 256; i++) begin
        ek = 0; ed = 8'(i);
        @(posedge clk); #1;
        code = ecode; #1;
        check(!err && !is_k && data == 8'(i), $sformatf("round trip %h", i));
      end
      ek = 1; ed = 8'hBC; @(posedge clk); #1;  // flips disparity for the second pass
      code = ecode; #1;
      check(!err && is_k, "round trip K28.5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
