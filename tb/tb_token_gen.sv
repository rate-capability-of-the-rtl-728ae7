// tb_token_gen: CKTK must have a period of 20 process-clock periods (8.8 MHz at
// 177.7 MHz) and be high for 5 of them (about 28 ns), with `phase` counting
// 0..19 and CKTK high in phases 0..4. With acquisition off CKTK stays low.
module tb_token_gen;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst = 1, acq_en = 0;
  always #2.8125 clk = ~clk;
  logic cktk, frame_start;
  logic [4:0] phase;
  token_gen u_dut (.clk, .rst, .acq_en, .cktk, .phase, .frame_start);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  realtime t_rise[$];
  realtime t_last_rise, t_fall;
  always @(posedge cktk) t_rise.push_back($realtime);
  always @(negedge cktk) if (t_rise.size() > 0 && acq_en)
    check($realtime - t_rise[$] > 28.0 - 0.01 && $realtime - t_rise[$] < 28.2,
          $sformatf("token width %0.3f ns", $realtime - t_rise[$]));

  int exp_phase = 0;
  initial begin
    repeat (4) @(posedge clk);
    rst = 0;
    repeat (40) @(posedge clk);
    check(t_rise.size() == 0 && !cktk, "no token while acquisition off");
    @(negedge clk) acq_en = 1;
    @(posedge clk); #0.1;
    for (int i = 0; i < 400; i++) begin
      check(phase == 5'(i % 20), $sformatf("phase %0d expected %0d", phase, i % 20));
      check(cktk == ((i % 20) < 5), $sformatf("cktk at phase %0d", i % 20));
      check(frame_start == ((i % 20) == 0), "frame_start");
      @(posedge clk); #0.1;
    end
    for (int i = 1; i < t_rise.size(); i++)
      check(t_rise[i] - t_rise[i-1] > 112.45 && t_rise[i] - t_rise[i-1] < 112.55,
            $sformatf("token period %0.3f ns", t_rise[i] - t_rise[i-1]));
    check(t_rise.size() == 21, $sformatf("%0d tokens", t_rise.size()));
    @(negedge clk) acq_en = 0;
    repeat (3) @(posedge clk);
    check(!cktk, "token stops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
