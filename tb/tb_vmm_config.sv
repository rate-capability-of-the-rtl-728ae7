// tb_vmm_config: writes a random 216-byte (1728-bit) image into the
// configuration memory, starts the serial transfer and captures sdi on every
// rising sck edge while cs_n is low. Checks the bit order (byte 0 first, MSB
// first), the bit count, that sck runs at clk/2, and that busy lasts
// 2*1728 clock cycles. A second transfer after rewriting some bytes must send
// the new values.
module tb_vmm_config;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst = 1;
  always #2.8125 clk = ~clk;

  logic       we = 0, start = 0, sck, sdi, cs_n, busy;
  logic [7:0] waddr = 0, wdata = 0;
  vmm_config u_dut (.clk, .rst, .we, .waddr, .wdata, .start, .sck, .sdi, .cs_n, .busy);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit   bits[$];
  realtime last_rise = 0;
  int   n_bad_period = 0;
  always @(posedge sck) begin
    if (!cs_n) bits.push_back(sdi);
    // within a transfer rising edges are 2 clk (11.25 ns) apart, never closer
    if (last_rise > 0 && $realtime - last_rise < 11.24) n_bad_period++;
    last_rise = $realtime;
  end

  logic [7:0] img [216];
  task automatic load(input int a, input logic [7:0] v);
    @(negedge clk); we = 1; waddr = 8'(a); wdata = v;
    @(negedge clk); we = 0;
    img[a] = v;
  endtask
  task automatic transfer;
    int cyc = 0;
    bits.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) begin @(negedge clk); cyc++; end
    check(cyc == 2 * 1728 - 1 || cyc == 2 * 1728, $sformatf("busy for %0d cycles", cyc + 1));
    check(bits.size() == 1728, $sformatf("%0d bits", bits.size()));
    if (bits.size() == 1728)
      for (int i = 0; i < 1728; i++)
        check(bits[i] == img[i / 8][7 - i % 8], $sformatf("bit %0d", i));
    check(cs_n, "cs_n released");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int a = 0; a < 216; a++) load(a, 8'($urandom));
    transfer();
    for (int i = 0; i < 20; i++) load($urandom_range(0, 215), 8'($urandom));
    transfer();
    check(n_bad_period == 0, "sck period 2 clk");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
