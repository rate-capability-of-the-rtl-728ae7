// tb_hybrid_cmd_decoder: drives decoded characters into the hybrid command
// decoder. Checks acquisition on/off, the one-cycle soft reset and test pulse
// strobes, that a data character without a preceding K is ignored, and that
// a configuration frame writes 216 bytes (1728 bits) with addresses 0..215 to
// the selected VMM and then signals cfg_done.
module tb_hybrid_cmd_decoder;
  timeunit 1ns; timeprecision 1ps;
  import srs_pkg::*;
  logic clk = 0, rst = 1;
  always #11.25 clk = ~clk;

  logic [7:0] rx_data = 0;
  logic       rx_k = 0, rx_valid = 0;
  logic       acq_en, soft_reset, test_pulse, cfg_we, cfg_vmm, cfg_done;
  logic [7:0] cfg_addr, cfg_byte;
  hybrid_cmd_decoder u_dut (.clk, .rst, .rx_data, .rx_k, .rx_valid, .acq_en, .soft_reset, .test_pulse,
                            .cfg_we, .cfg_vmm, .cfg_addr, .cfg_byte, .cfg_done);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_srst = 0, n_tp = 0, n_done = 0;
  logic [7:0] wr [int];
  bit wr_vmm;
  always @(posedge clk) if (!rst) begin
    if (soft_reset) n_srst++;
    if (test_pulse) n_tp++;
    if (cfg_done)   n_done++;
    if (cfg_we) begin wr[int'(cfg_addr)] = cfg_byte; wr_vmm = cfg_vmm; end
  end

  task automatic sym(input bit kk, input logic [7:0] dd);
    @(negedge clk); rx_valid = 1; rx_k = kk; rx_data = dd;
    @(negedge clk); rx_valid = 0;
  endtask

  logic [7:0] cfg [216];
  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    sym(1, K28_5); sym(0, CMD_ACQ_ON);
    check(acq_en, "acquisition on");
    sym(0, CMD_SOFT_RESET);                 // second data character: no K before, ignored
    repeat (2) @(posedge clk);
    check(n_srst == 0, "data without K ignored");
    sym(1, K28_5); sym(0, CMD_SOFT_RESET);
    sym(1, K28_5); sym(0, CMD_TEST_PULSE); sym(1, K28_5);
    repeat (2) @(posedge clk);
    check(n_srst == 1 && n_tp == 1, "soft reset and test pulse strobes");
    sym(1, K28_5); sym(0, CMD_ACQ_OFF); sym(1, K28_5);
    check(!acq_en, "acquisition off");
    foreach (cfg[i]) cfg[i] = 8'($urandom);
    sym(1, K28_5); sym(0, CMD_CONFIG); sym(0, 8'h01);
    foreach (cfg[i]) sym(0, cfg[i]);
    sym(1, K28_5);
    repeat (3) @(posedge clk);
    check(n_done == 1, "cfg_done");
    check(wr.num() == 216 && wr_vmm == 1, $sformatf("%0d bytes for VMM %0d", wr.num(), wr_vmm));
    foreach (cfg[i]) check(wr.exists(i) && wr[i] == cfg[i], "config byte");
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
