// tb_hybrid_top: the hybrid firmware with two VMM3a behavioural models. The
// FEC side is emulated with the FEC's own blocks: a command transmitter
// (fec_cmd_tx + oserdes10) drives the command line, and two fec_hit_rx
// receivers decode the data lines. Checks that the command link locks; that
// acquisition on starts CKBC (44.4 MHz) and the CKTK token clock; that a soft
// reset command gives one reset pulse to the VMMs; that a test pulse command
// gives one CKTP pulse of TP_WIDTH readout clocks; that a configuration frame
// reaches the selected VMM's serial port bit for bit; that every injected hit
// arrives once and unchanged at the FEC receivers; and that a burst of 64 hits
// per VMM is read out at one hit per 20 readout clocks (8.8 Mhits/s per VMM,
// (64+1) token periods including the empty token at the wrap) and sent
// without loss over the 8b/10b link.
module tb_hybrid_top;
  timeunit 1ns; timeprecision 1ps;
  import srs_pkg::*;
  logic clk_bit = 0, clk_proc = 0, clk_bc2 = 0, clk_word = 0, rst = 1;
  always #1.125  clk_bit  = ~clk_bit;
  always #2.8125 clk_proc = ~clk_proc;
  always #5.625  clk_bc2  = ~clk_bc2;
  always #11.25  clk_word = ~clk_word;

  // FEC-side command source
  logic       acq_on = 0, soft_reset = 0, test_pulse = 0, cfg_valid = 0, cfg_last = 0, cfg_ready;
  logic [7:0] cfg_data = 0;
  logic [9:0] ccode;
  logic       cmd_sin;
  fec_cmd_tx u_ctx (.clk(clk_word), .rst, .acq_on, .soft_reset, .test_pulse, .cfg_valid, .cfg_data,
                    .cfg_last, .cfg_ready, .code(ccode));
  oserdes10  u_cser (.clk_bit, .clk_div(clk_word), .rst, .word(ccode), .sout(cmd_sin));

  logic [1:0]  data_sout, cktk, ckdt, cfg_sck, cfg_sdi, cfg_cs_n;
  wire  [1:0]  data0, data1;
  logic        ckbc, cktp, vmm_srst, acq_en, cmd_locked;
  logic [31:0] hits_read [2], hits_dropped [2];
  hybrid_top u_dut (.clk_word, .clk_bc2, .clk_proc, .clk_bit, .rst, .cmd_sin, .data_sout,
                    .ckbc, .cktp, .vmm_srst, .cktk, .ckdt, .data0, .data1, .cfg_sck, .cfg_sdi,
                    .cfg_cs_n, .acq_en, .cmd_locked, .hits_read, .hits_dropped);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [37:0] expw [2][$];
  int          nrx [2];
  realtime     t_first [2], t_last [2];
  for (genvar v = 0; v < 2; v++) begin : g_v
    vmm3a_model u_vmm (.ckbc, .cktk(cktk[v]), .ckdt(ckdt[v]), .srst(vmm_srst),
                       .data0(data0[v]), .data1(data1[v]));
    logic [37:0] hit;
    logic        hv, lk;
    logic [15:0] ec;
    fec_hit_rx u_rx (.clk_bit, .clk_div(clk_word), .rst, .sin(data_sout[v]), .hit, .hit_valid(hv),
                     .locked(lk), .err_count(ec));
    always @(posedge clk_word) if (hv && !rst) begin
      automatic int idx = -1;
      foreach (expw[v][i]) if (idx < 0 && expw[v][i] == hit) idx = i;
      check(idx >= 0, $sformatf("vmm %0d received unknown hit %h at %0t (hit %0d)", v, hit, $time, nrx[v]));
      if (idx >= 0) expw[v].delete(idx);
      if (nrx[v] == 0) t_first[v] = $realtime;
      t_last[v] = $realtime;
      nrx[v]++;
    end
  end

  // clock / pulse measurements
  int n_srst = 0, n_cktp = 0, cktp_len = 0, n_cktk = 0;
  realtime t_ckbc = 0, ckbc_per = 0;
  always @(posedge vmm_srst) n_srst++;
  always @(posedge cktk[0]) n_cktk++;
  always @(posedge ckbc) begin ckbc_per = $realtime - t_ckbc; t_ckbc = $realtime; end
  always @(posedge clk_proc) if (cktp && !rst) cktp_len++;
  always @(posedge cktp) n_cktp++;
  bit cfg_bits [$];
  always @(posedge cfg_sck[0]) if (!cfg_cs_n[0]) cfg_bits.push_back(cfg_sdi[0]);

  task automatic wait_w(input int n); repeat (n) @(posedge clk_word); endtask
  task automatic inject(input int v, input int n);
    for (int i = 0; i < n; i++) begin
      int ch;
      ch = -1;
      for (int c = 0; c < 64 && ch < 0; c++) begin
        int cc;
        cc = (c * 37 + n + i) % 64;
        if (v == 0 ? !g_v[0].u_vmm.pending[cc] : !g_v[1].u_vmm.pending[cc]) ch = cc;
      end
      if (ch >= 0) begin
        if (v == 0) begin
          void'(g_v[0].u_vmm.inject(ch, 1'($urandom), 10'($urandom), 8'($urandom)));
          expw[0].push_back(g_v[0].u_vmm.word[ch]);
        end else begin
          void'(g_v[1].u_vmm.inject(ch, 1'($urandom), 10'($urandom), 8'($urandom)));
          expw[1].push_back(g_v[1].u_vmm.word[ch]);
        end
      end
    end
  endtask

  logic [7:0] img [216];
  initial begin
    nrx[0] = 0; nrx[1] = 0;
    repeat (5) @(posedge clk_word);
    rst = 0;
    wait_w(60);
    check(cmd_locked, "command link locked");
    check(g_v[0].lk && g_v[1].lk, "data links locked");
    check(!acq_en && n_cktk == 0, "idle before acquisition");
    acq_on = 1;
    wait_w(40);
    check(acq_en, "acquisition on");
    check(ckbc_per > 22.49 && ckbc_per < 22.51, $sformatf("CKBC period %0.3f ns", ckbc_per));
    begin
      int k0;
      k0 = n_cktk;
      wait_w(100);   // 2250 ns = 20 token periods of 112.5 ns
      check(n_cktk - k0 >= 19 && n_cktk - k0 <= 21, $sformatf("%0d CKTK pulses in 2.25 us", n_cktk - k0));
    end
    @(negedge clk_word) soft_reset = 1; @(negedge clk_word) soft_reset = 0;
    @(negedge clk_word) test_pulse = 1; @(negedge clk_word) test_pulse = 0;
    wait_w(30);
    check(n_srst == 1, "one soft reset pulse");
    check(n_cktp == 1 && cktp_len == 32, $sformatf("%0d test pulses, %0d clocks wide", n_cktp, cktp_len));
    // configuration of VMM 0
    foreach (img[i]) img[i] = 8'($urandom);
    begin
      logic [7:0] fr [$];
      automatic int i = 0;
      fr.push_back(CMD_CONFIG); fr.push_back(8'h00);
      foreach (img[k]) fr.push_back(img[k]);
      @(negedge clk_word); cfg_valid = 1; cfg_data = fr[0];
      while (i < fr.size()) begin
        @(posedge clk_word); #0.1;
        if (cfg_ready) begin
          i++;
          if (i < fr.size()) begin cfg_data = fr[i]; cfg_last = (i == fr.size() - 1); end
          else begin cfg_valid = 0; cfg_last = 0; end
        end
      end
    end
    wait_w(3600);
    check(cfg_bits.size() == 1728, $sformatf("%0d configuration bits", cfg_bits.size()));
    if (cfg_bits.size() == 1728)
      for (int i = 0; i < 1728; i++) check(cfg_bits[i] == img[i / 8][7 - i % 8], "configuration bit");
    check(cfg_cs_n[1], "VMM 1 not selected");
    // isolated hits
    for (int r = 0; r < 30; r++) begin
      @(negedge clk_word);
      inject(r % 2, 1);
      wait_w(15);
    end
    wait_w(50);
    check(nrx[0] + nrx[1] == 30 && expw[0].size() == 0 && expw[1].size() == 0, "isolated hits received");
    // 64-hit bursts on both VMMs
    nrx[0] = 0; nrx[1] = 0;
    @(negedge clk_word);
    inject(0, 64); inject(1, 64);
    wait_w(400);
    for (int v = 0; v < 2; v++) begin
      real per;
      check(nrx[v] == 64 && expw[v].size() == 0, $sformatf("vmm %0d: %0d of 64 burst hits", v, nrx[v]));
      // spacing of the received hits: 20 readout clocks (112.5 ns), plus one
      // empty token (112.5 ns) where the token ring wraps
      per = (t_last[v] - t_first[v]) / 112.5;
      check(per > 62.5 && per < 64.5, $sformatf("vmm %0d: 64 hits spread over %0.2f token periods", v, per));
    end
    check(hits_read[0] + hits_read[1] == 30 + 128, $sformatf("hit counters %0d %0d", hits_read[0], hits_read[1]));
    check(hits_dropped[0] == 0 && hits_dropped[1] == 0, "no FIFO drops");
    acq_on = 0;
    wait_w(40);
    check(!acq_en, "acquisition off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
