// tb_fec_cmd_tx: decodes the command line of fec_cmd_tx with dec8b10b and
// checks that every command is a data character directly after a K28.5, that
// acquisition on/off follows acq_on, that soft reset wins over a simultaneous
// acquisition change and test pulse, that no request is lost, and that a
// configuration frame (0x10, VMM, 216 bytes) is sent as one contiguous run of
// data characters at one byte per 44.4 MHz cycle.
module tb_fec_cmd_tx;
  timeunit 1ns; timeprecision 1ps;
  import srs_pkg::*;
  logic clk = 0, rst = 1;
  always #11.25 clk = ~clk;

  logic       acq_on = 0, soft_reset = 0, test_pulse = 0, cfg_valid = 0, cfg_last = 0, cfg_ready;
  logic [7:0] cfg_data = 0;
  logic [9:0] code;
  fec_cmd_tx u_dut (.clk, .rst, .acq_on, .soft_reset, .test_pulse, .cfg_valid, .cfg_data, .cfg_last,
                    .cfg_ready, .code);
  logic [7:0] d; logic k, err;
  dec8b10b u_dec (.code, .data(d), .is_k(k), .err);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // received stream: runs of data characters after a K
  logic [7:0] run[$];
  logic [7:0] runs[$][$];
  bit live = 0;
  always @(posedge clk) begin
    #1;
    if (live) begin
      check(!err, "valid code");
      if (k) begin
        check(d == K28_5, "K28.5");
        if (run.size()) begin runs.push_back(run); run.delete(); end
      end else run.push_back(d);
    end
  end
  function automatic int n_cmd(input logic [7:0] c);
    int n = 0;
    foreach (runs[i]) if (runs[i].size() == 1 && runs[i][0] == c) n++;
    return n;
  endfunction

  logic [7:0] frame[$];
  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk); live = 1;
    repeat (5) @(posedge clk);
    acq_on <= 1;
    repeat (10) @(posedge clk);
    check(n_cmd(CMD_ACQ_ON) == 1, "acquisition on sent");
    // soft reset, test pulse and an acquisition change in the same cycle
    acq_on <= 0; soft_reset <= 1; test_pulse <= 1;
    @(posedge clk); soft_reset <= 0; test_pulse <= 0;
    repeat (10) @(posedge clk);
    check(runs.size() >= 4 && runs[1][0] == CMD_SOFT_RESET && runs[2][0] == CMD_ACQ_OFF
          && runs[3][0] == CMD_TEST_PULSE, "priority soft reset > acquisition > test pulse");
    check(n_cmd(CMD_SOFT_RESET) == 1 && n_cmd(CMD_TEST_PULSE) == 1 && n_cmd(CMD_ACQ_OFF) == 1,
          "each request once");
    // configuration frame
    frame.push_back(CMD_CONFIG); frame.push_back(8'h01);
    for (int i = 0; i < 216; i++) frame.push_back(8'($urandom));
    runs.delete();
    begin
      automatic int i = 0, t0 = 0, t1 = 0, cyc = 0;
      cfg_valid <= 1; cfg_data <= frame[0]; cfg_last <= 0;
      while (i < frame.size()) begin
        @(posedge clk); cyc++;
        if (cfg_ready) begin
          if (i == 0) t0 = cyc;
          t1 = cyc;
          i++;
          if (i < frame.size()) begin cfg_data <= frame[i]; cfg_last <= (i == frame.size() - 1); end
          else begin cfg_valid <= 0; cfg_last <= 0; end
        end
      end
      check(t1 - t0 == 217, $sformatf("frame takes %0d cycles", t1 - t0 + 1));
    end
    repeat (5) @(posedge clk);
    check(runs.size() == 1 && runs[0].size() == 218, "frame is one contiguous run");
    if (runs.size() == 1 && runs[0].size() == 218)
      foreach (frame[i]) check(runs[0][i] == frame[i], "frame byte");
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
