// tb_cktp_gen: checks single test pulses (one pulse of `width` 177.7 MHz
// periods per trigger) and periodic pulses (one pulse every `period` clock
// periods), measured in clock cycles, and the pulse counter.
module tb_cktp_gen;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst = 1;
  always #2.8125 clk = ~clk;
  logic        trigger = 0, periodic = 0, cktp;
  logic [15:0] width = 0, period = 0;
  logic [31:0] pulse_count;
  cktp_gen u_dut (.clk, .rst, .trigger, .periodic, .width, .period, .cktp, .pulse_count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, rise_cyc[$], hi_len[$], hi = 0;
  logic cktp_q = 0;
  always @(posedge clk) begin
    #0.1;
    cyc++;
    if (cktp && !cktp_q) rise_cyc.push_back(cyc);
    if (cktp) hi++;
    if (!cktp && cktp_q) begin hi_len.push_back(hi); hi = 0; end
    cktp_q = cktp;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 20; i++) begin
      int w;
      w = $urandom_range(1, 40);
      @(negedge clk); width = 16'(w); trigger = 1;
      @(negedge clk); trigger = 0;
      repeat (w + 10) @(posedge clk);
      check(hi_len.size() == i + 1 && hi_len[i] == w, $sformatf("single pulse width %0d", w));
    end
    check(pulse_count == 20, "20 single pulses counted");
    rise_cyc.delete(); hi_len.delete();
    @(negedge clk); width = 10; period = 1000; periodic = 1;
    repeat (10000) @(posedge clk);
    @(negedge clk); periodic = 0;
    repeat (1100) @(posedge clk);
    check(rise_cyc.size() == 10, $sformatf("%0d periodic pulses", rise_cyc.size()));
    for (int i = 1; i < rise_cyc.size(); i++)
      check(rise_cyc[i] - rise_cyc[i-1] == 1000, $sformatf("period %0d", rise_cyc[i] - rise_cyc[i-1]));
    foreach (hi_len[i]) check(hi_len[i] == 10, "periodic width");
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
