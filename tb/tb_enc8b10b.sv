// tb_enc8b10b: checks the 8b/10b encoder against known code words, the
// running-disparity rules (every symbol has 4, 5 or 6 ones, disparity
// alternates correctly, the running disparity stays within +-1) and a maximum
// run length of 5 in the bit stream, and decodes every symbol back with
// dec8b10b. All 256 data characters and the K28.5 comma are sent, in both
// disparities, then a long random sequence.
module tb_enc8b10b;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst = 1, is_k = 0;
  logic [7:0] data = 0;
  logic [9:0] code;
  logic rd_pos;
  always #5 clk = ~clk;

  enc8b10b u_dut (.clk, .rst, .en(1'b1), .is_k, .data, .code, .rd_pos);

  logic [7:0] ddata;
  logic dk, derr;
  dec8b10b u_dec (.code, .data(ddata), .is_k(dk), .err(derr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int disp = -1;   // running disparity as seen on the line
  int run = 0;
  logic lastbit = 0;

  task automatic send(input logic k, input logic [7:0] d);
    int ones;
    is_k = k; data = d;
    @(posedge clk); #1;
    ones = $countones(code);
    check(ones >= 4 && ones <= 6, $sformatf("symbol %b ones %0d", code, ones));
    if (ones == 6) begin check(disp == -1, "+2 symbol at RD+"); disp = 1; end
    if (ones == 4) begin check(disp == 1, "-2 symbol at RD-"); disp = -1; end
    check(rd_pos == (disp == 1), "rd_pos output");
    for (int b = 9; b >= 0; b--) begin
      if (code[b] == lastbit) run++; else run = 1;
      lastbit = code[b];
      check(run <= 5, "run length > 5");
    end
    check(!derr && ddata == d && dk == k, $sformatf("decode %h k%0d -> %h k%0d err%0d", d, k, ddata, dk, derr));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    #1;
    // known code words at RD-
    is_k = 1; data = 8'hBC; @(posedge clk); #1;
    check(code == 10'b0011111010, "K28.5 RD-");
    disp = 1;
    is_k = 0; data = 8'h00; @(posedge clk); #1;          // D0.0 at RD+
    check(code == 10'b0110001011, $sformatf("D0.0 RD+ %b", code));
    data = 8'hB5; @(posedge clk); #1;                     // D21.5 balanced
    check(code == 10'b1010101010, $sformatf("D21.5 %b", code));
    check(rd_pos == 1'b1, "balanced D0.0 and D21.5 keep RD+");
    run = 0;
    for (int rep = 0; rep < 2; rep++)
      for (int i = 0; i < 256; i++) send(1'b0, 8'(i));
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(0, 7) == 0) send(1'b1, 8'hBC);
      else                            send(1'b0, 8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
