// tb_ckbc_gen: checks that CKBC is held low while not running and that while
// running it is a 44.4 MHz clock (22.5 ns period, 50 % duty) derived from the
// 88.8 MHz clock, with bc_tick high in the 88.8 MHz period before each rising
// CKBC edge.
module tb_ckbc_gen;
  timeunit 1ns; timeprecision 1ps;
  logic clk88 = 0, rst = 1, run = 0;
  always #5.625 clk88 = ~clk88;
  logic ckbc, bc_tick;
  ckbc_gen u_dut (.clk88, .rst, .run, .ckbc, .bc_tick);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  realtime t_rise = 0, t_fall = 0;
  int n_rise = 0;
  always @(posedge ckbc) begin
    if (n_rise > 0) check($realtime - t_rise > 22.49 && $realtime - t_rise < 22.51,
                          $sformatf("period %0.3f ns", $realtime - t_rise));
    t_rise = $realtime; n_rise++;
  end
  always @(negedge ckbc) if (n_rise > 0) begin
    check($realtime - t_rise > 11.24 && $realtime - t_rise < 11.26, "high time 11.25 ns");
  end
  always @(posedge clk88) begin
    if (run && !rst) check(bc_tick == !ckbc, "bc_tick before rising edge");
  end

  initial begin
    repeat (3) @(posedge clk88);
    rst = 0;
    repeat (20) begin @(posedge clk88); #1 check(!ckbc, "low while stopped"); end
    run = 1;
    repeat (2000) @(posedge clk88);
    check(n_rise == 1000, $sformatf("%0d CKBC cycles in 2000 clk88 cycles", n_rise));
    @(negedge clk88) run = 0;
    repeat (2) @(posedge clk88);
    repeat (20) begin @(posedge clk88); #1 check(!ckbc, "low after stop"); end
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
