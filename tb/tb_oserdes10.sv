// tb_oserdes10: sends a fixed preamble and then random 10-bit words through
// the 10:1 serialiser (444.4 MHz bit clock, 44.4 MHz word clock with a small
// phase offset), rebuilds the words from the serial line in the testbench and
// checks that every word comes out complete, bit 9 first, in order and with
// exactly ten bit periods per word.
module tb_oserdes10;
  timeunit 1ns; timeprecision 1ps;
  logic clk_bit = 0, clk_div = 0, rst = 1;
  always #1.125 clk_bit = ~clk_bit;
  initial begin #0.3; forever #11.25 clk_div = ~clk_div; end

  logic [9:0] word = 10'h155;
  logic sout;
  oserdes10 u_dut (.clk_bit, .clk_div, .rst, .word, .sout);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [9:0] sent[$];
  logic [9:0] sh = '0;
  int nbits = 0, aligned = 0;
  localparam logic [9:0] PRE = 10'b1100000101;

  always @(posedge clk_div) if (!rst) begin
    sent.push_back(word);
    if (sent.size() > 3) word <= 10'($urandom);
    else                 word <= PRE;
  end

  always @(posedge clk_bit) if (!rst) begin
    sh = {sh[8:0], sout};
    nbits++;
    if (!aligned && sh == PRE) begin
      aligned = 1;
      nbits = 0;
      void'(sent.pop_front());
    end else if (aligned && nbits == 10) begin
      logic [9:0] e;
      nbits = 0;
      e = sent.pop_front();
      check(sh == e, $sformatf("word %b expected %b", sh, e));
    end
  end

  initial begin
    word = PRE;
    repeat (4) @(posedge clk_div);
    rst = 0;
    repeat (500) @(posedge clk_div);
    check(aligned == 1, "preamble found");
    check(checks > 400, "enough words compared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #50us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
