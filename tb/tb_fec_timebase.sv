// tb_fec_timebase: checks the FEC time base with the paper's example reset
// latency of 47: the soft reset must be issued when the 12-bit BC counter is at
// 4049, hits are accepted from then on, the overflow counter advances every
// 4096 BC, and a marker with the 42-bit timestamp of the following clock is
// produced every 16 overflows (every 65536 BC).
module tb_fec_timebase;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst = 1, acq_on = 0;
  always #11.25 clk = ~clk;

  logic [11:0] bc;
  logic [3:0]  ovf;
  logic [41:0] ts, marker_ts;
  logic        send_soft_reset, accept, marker;

  fec_timebase u_dut (.clk, .rst, .acq_on, .reset_latency(12'd47), .bc, .ovf, .ts,
                      .send_soft_reset, .accept, .marker, .marker_ts);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, n_srst = 0, n_mark = 0, last_mark = -1, n_ovf = 0;
  logic [3:0] ovf_q = 0;
  always @(negedge clk) if (acq_on) begin
    cyc++;
    check(ts == 42'(cyc - 1) && bc == 12'(cyc - 1) && ovf == 4'((cyc - 1) / 4096), "counters");
    if (send_soft_reset) begin
      n_srst++;
      check(bc == 12'd4050, $sformatf("soft reset registered at BC %0d", int'(bc) - 1));
    end
    check(accept == (cyc - 1 > 4049), "accept after soft reset");
    if (marker) begin
      n_mark++;
      check(marker_ts == ts && bc == 0 && ovf == 0, "marker at overflow 16 with timestamp");
      if (last_mark >= 0) check(cyc - last_mark == 65536, "marker period 65536 BC");
      last_mark = cyc;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (5) @(posedge clk);
    check(bc == 0 && !accept, "idle while acquisition off");
    @(posedge clk) acq_on <= 1;
    repeat (3 * 65536 + 10) @(posedge clk);
    check(n_srst == 1, $sformatf("%0d soft resets", n_srst));
    check(n_mark == 3, $sformatf("%0d markers", n_mark));
    @(posedge clk) acq_on <= 0;
    @(posedge clk); @(negedge clk);
    check(bc == 0 && !accept && ts == 0, "cleared when acquisition stops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
