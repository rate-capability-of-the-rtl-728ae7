// tb_srs_top: end-to-end test of the SRS VMM3a readout chain.
//
// One FEC with N_HYB hybrids, each hybrid with two VMM3a behavioural models
// (vmm3a_model). The bench acts as the slow-control PC and the Ethernet side:
// it drives acquisition, test pulses and configuration frames, and reads the
// FEC's UDP FIFO, cuts the byte stream into 48-bit words and checks them.
//
// Sequence:
//   1. Configuration: one 1728-bit image is sent to VMM 1 of hybrid 0 and the
//      bits on its serial configuration port are compared with the image.
//   2. Reset-latency calibration (as described in the paper): acquisition with
//      reset latency 47, single hits on VMM 0, the difference between the FEC
//      BC counter at arrival and the hit's BCID gives the correction.
//   3. Main run with the calibrated reset latency: random single hits, bursts
//      just before each BC overflow (so that hits of the previous overflow
//      period arrive after the overflow, including the last period before a
//      marker), hits with a too old BCID (invalid), test pulses (CKTP injects a
//      hit on channel 0 of both VMMs of a hybrid), and a window in which the
//      UDP FIFO is not read while all VMMs send bursts (FIFO back-pressure).
//   4. Drain and compare.
//
// Checks: every hit read from a VMM arrives exactly once in the UDP stream;
// hits expected to be invalid carry offset -16 and no others do; for every
// valid hit the time rebuilt from marker timestamp, offset and BCID
// (t = marker + offset * 2^BC_BITS + BCID) equals the injection time plus one
// constant (+-1 BC); markers arrive for every VMM with timestamps that are
// multiples of 16 * 2^BC_BITS; the FEC statistics counters match the stream.
// Counted mechanisms (each must occur at least once): configuration load,
// acquisition start, soft reset, hits read, empty token, marker, offset n,
// offset n-1, offset -1, invalid hit, scheduler stall, test pulse.
//
// FULL = 0 shrinks the system (2 hybrids, 9-bit FEC BC counter so that a
// marker comes every 8192 instead of 65536 BC); FULL = 1 (tb_srs_top_full)
// keeps the top at its default size (8 hybrids, 12-bit counter). Both use the
// paper's latency jitter 4 and maximum latency 320 BC.
module tb_srs_top #(
  parameter bit FULL = 1'b0
);
  timeunit 1ns; timeprecision 1ps;
  import srs_pkg::*;

  localparam int N_HYB = FULL ? 8 : 2;
  localparam int BC_BITS = FULL ? 12 : 9;
  localparam int NV = 2 * N_HYB;
  localparam int PERIOD = 1 << BC_BITS;
  localparam int MAXL = 320;
  localparam int JIT = 4;
  localparam int RUN_MARKERS = FULL ? 1 : 3;    // marker periods in the main run

  // ---------------- clocks (one PLL: 444.4 / 177.7 / 88.8 / 44.4 MHz) ----------------
  logic clk_bit = 0, clk_proc = 0, clk_bc2 = 0, clk_fec = 0, clk_125 = 0, rst = 1;
  always #1.125  clk_bit  = ~clk_bit;
  always #2.8125 clk_proc = ~clk_proc;
  always #5.625  clk_bc2  = ~clk_bc2;
  always #11.25  clk_fec  = ~clk_fec;
  always #4      clk_125  = ~clk_125;

  // ---------------- DUT ----------------
  logic               acq_on = 0, test_pulse = 0, cfg_last = 0, udp_rd = 0;
  logic [BC_BITS-1:0] reset_latency = 47, latency_jitter = BC_BITS'(JIT), max_latency = BC_BITS'(MAXL);
  logic [N_HYB-1:0]   cfg_valid = '0, cfg_ready;
  logic [7:0]         cfg_data = 0, udp_data;
  logic               udp_empty;
  logic [N_HYB-1:0]   ckbc, cktp, vmm_srst, hyb_acq_en, hyb_cmd_locked;
  logic [NV-1:0]      cktk, ckdt, cfg_sck, cfg_sdi, cfg_cs_n, fec_link_locked;
  wire  [NV-1:0]      data0, data1;
  logic [31:0]        hits_read [NV], hits_dropped_hybrid [NV];
  logic [31:0]        n_present [NV], n_prev_same [NV], n_prev_prev [NV], n_invalid [NV], n_markers [NV];
  logic [31:0]        n_dropped_fec, n_sched_stall;

  // FEC internals watched for the calibration and for time stamping injections
  logic [11:0] fec_bc;
  logic [3:0]  fec_ovf;
  logic [41:0] fec_ts;
  logic        fec_accept, cal_hv;
  logic [37:0] cal_hit;

  if (FULL) begin : g_dut
    srs_top u_dut (.*);
    assign fec_bc     = 12'(u_dut.u_fec.bc);
    assign fec_ovf    = u_dut.u_fec.ovf;
    assign fec_ts     = u_dut.u_fec.ts;
    assign fec_accept = u_dut.u_fec.accept;
    assign cal_hv     = u_dut.u_fec.g_vmm[0].hit_valid;
    assign cal_hit    = u_dut.u_fec.g_vmm[0].hit;
  end else begin : g_dut
    srs_top #(.N_HYB(N_HYB), .BC_BITS(BC_BITS)) u_dut (.*);
    assign fec_bc     = 12'(u_dut.u_fec.bc);
    assign fec_ovf    = u_dut.u_fec.ovf;
    assign fec_ts     = u_dut.u_fec.ts;
    assign fec_accept = u_dut.u_fec.accept;
    assign cal_hv     = u_dut.u_fec.g_vmm[0].hit_valid;
    assign cal_hit    = u_dut.u_fec.g_vmm[0].hit;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- expected hits ----------------
  typedef enum int {K_NORMAL, K_INVALID, K_CALIB} kind_t;
  longint exp_t [logic [42:0]];     // key {vmm, hit38}: FEC time at injection
  kind_t  exp_k [logic [42:0]];
  int     n_inj = 0, n_tp_hits = 0;

  // requests from the sequencer to the VMM models
  int req_burst [NV];
  bit req_old   [NV];
  bit stopped = 1'b1;               // no injections
  bit calib   = 1'b0;

  function automatic logic [11:0] gray2bin(input logic [11:0] g);
    logic [11:0] b;
    b[11] = g[11];
    for (int i = 10; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  for (genvar v = 0; v < NV; v++) begin : g_vm
    vmm3a_model u_vmm (.ckbc(ckbc[v/2]), .cktk(cktk[v]), .ckdt(ckdt[v]), .srst(vmm_srst[v/2]),
                       .data0(data0[v]), .data1(data1[v]));

    // request handling; each new hit is recorded with the FEC time at injection
    always @(negedge clk_fec) begin
      int ch, s;
      logic [42:0] key;
      for (int i = 0; i < req_burst[v] + int'(req_old[v]); i++) begin
        bit old;
        old = (i == req_burst[v]);
        ch = -1;
        s = $urandom_range(0, 63);
        for (int j = 0; j < 64 && ch < 0; j++) if (!u_vmm.pending[(s + j) % 64]) ch = (s + j) % 64;
        if (ch >= 0) begin
          bit ok;
          if (old) ok = u_vmm.inject_bcid(ch, 10'($urandom), 8'($urandom), u_vmm.bcid_bin - 12'(MAXL + 30));
          else     ok = u_vmm.inject(ch, 1'($urandom), 10'($urandom), 8'($urandom));
          if (ok) begin
            key = {5'(v), u_vmm.word[ch]};
            check(!exp_t.exists(key), "unique hit word");
            exp_t[key] = longint'(fec_ts);
            exp_k[key] = old ? K_INVALID : (calib ? K_CALIB : K_NORMAL);
            n_inj++;
          end
        end
      end
      req_burst[v] = 0;
      req_old[v]   = 0;
    end

    // test pulse: the ASIC injects charge into channel 0
    always @(posedge cktp[v/2]) if (!rst) begin
      if (!stopped && !u_vmm.pending[0] && u_vmm.inject(0, 1'b0, 10'($urandom), 8'($urandom))) begin
        exp_t[{5'(v), u_vmm.word[0]}] = longint'(fec_ts);
        exp_k[{5'(v), u_vmm.word[0]}] = K_NORMAL;
        n_inj++;
        n_tp_hits++;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int m_cfg_bits = 0, m_cfg_loads = 0, m_srst [N_HYB], m_tp [N_HYB], m_empty_tokens = 0;
  int m_markers = 0, m_present = 0, m_prev_same = 0, m_prev_prev = 0, m_invalid = 0;
  int m_hits_rx = 0, m_acq = 0;

  for (genvar h = 0; h < N_HYB; h++) begin : g_cnt
    always @(posedge vmm_srst[h]) if (!rst) m_srst[h]++;
    always @(posedge cktp[h])     if (!rst) m_tp[h]++;
    always @(posedge hyb_acq_en[h]) if (!rst) m_acq++;
  end

  // configuration port of VMM 1 on hybrid 0
  logic [7:0] cfg_img [216];
  bit         cfg_bits [$];
  always @(posedge cfg_sck[1]) if (!cfg_cs_n[1]) cfg_bits.push_back(cfg_sdi[1]);
  always @(posedge cfg_cs_n[1]) if (cfg_bits.size() > 0) begin
    bit ok;
    ok = (cfg_bits.size() == 1728);
    if (ok) for (int i = 0; i < 1728; i++) if (ok && cfg_bits[i] != cfg_img[i / 8][7 - i % 8]) begin
      ok = 0;
      $display("config bit %0d differs", i);
    end
    check(ok, $sformatf("configuration image on the serial port (%0d bits)", cfg_bits.size()));
    if (ok) m_cfg_loads++;
    m_cfg_bits += cfg_bits.size();
    cfg_bits.delete();
  end

  // ---------------- calibration measurement ----------------
  int cal_min = 1 << 30, cal_n = 0;
  always @(posedge clk_fec) if (calib && cal_hv && fec_accept) begin
    int d;
    d = (int'(fec_bc) - int'(gray2bin(cal_hit[11:0]))) % PERIOD;
    if (d < 0) d += PERIOD;
    if (d >= PERIOD / 2) d -= PERIOD;
    if (d < cal_min) cal_min = d;
    cal_n++;
  end

  // ---------------- UDP reader and checker ----------------
  bit      udp_enable = 1'b1;
  logic [47:0] acc = '0;
  int      nb = 0, n_words = 0;
  longint  mbase [NV];
  int      mcount [NV];
  longint  tconst = 0;
  bit      tconst_set = 0;
  int      t_dev_max = 0;

  task automatic word_in(input logic [47:0] w);
    n_words++;
    if (w[47]) begin
      logic [37:0] h;
      logic [4:0]  vid, ofs;
      logic [42:0] key;
      h = w[47:10]; vid = w[9:5]; ofs = w[4:0];
      key = {vid, h};
      m_hits_rx++;
      if (int'(vid) >= NV || !exp_t.exists(key)) begin
        check(0, $sformatf("unexpected hit vmm %0d word %h", vid, h));
        return;
      end
      if (ofs == OFS_INVALID) m_invalid++;
      if (ofs == OFS_MINUS1)  m_prev_prev++;
      if (exp_k[key] == K_INVALID) begin
        check(ofs == OFS_INVALID, "old BCID marked invalid");
      end else if (exp_k[key] == K_NORMAL) begin
        longint t_rec, dlt;
        check(ofs != OFS_INVALID, $sformatf("valid hit marked invalid (vmm %0d)", vid));
        t_rec = mbase[vid] + longint'($signed(ofs)) * PERIOD
              + longint'(gray2bin(h[11:0]) % PERIOD);
        dlt = t_rec - exp_t[key];
        if (!tconst_set) begin tconst = dlt; tconst_set = 1; end
        if (dlt - tconst > t_dev_max || tconst - dlt > t_dev_max)
          t_dev_max = int'((dlt > tconst) ? dlt - tconst : tconst - dlt);
        check(dlt - tconst <= 1 && tconst - dlt <= 1,
              $sformatf("time rebuilt from marker/offset/BCID off by %0d BC (vmm %0d ofs %0d)",
                        dlt - tconst, vid, $signed(ofs)));
      end
      exp_t.delete(key);
      exp_k.delete(key);
    end else begin
      logic [4:0] vid;
      vid = w[46:42];
      m_markers++;
      if (int'(vid) < NV) begin
        mcount[vid]++;
        check(w[41:0] == 42'(longint'(mcount[vid]) * 16 * PERIOD),
              $sformatf("marker %0d of vmm %0d has timestamp %0d", mcount[vid], vid, w[41:0]));
        mbase[vid] = longint'(w[41:0]);
      end else check(0, "marker VMM id");
    end
  endtask

  always @(negedge clk_125) begin
    udp_rd = 1'b0;
    if (udp_enable && !udp_empty) begin
      udp_rd = 1'b1;
      acc = {acc[39:0], udp_data};
      nb++;
      if (nb == 6) begin
        word_in(acc);
        nb = 0;
      end
    end
  end

  task automatic new_run();
    foreach (mbase[i]) begin mbase[i] = 0; mcount[i] = 0; end
    tconst_set = 0;
  endtask

  // ---------------- sequencer ----------------
  task automatic wait_fec(input int n);
    repeat (n) @(posedge clk_fec);
  endtask

  task automatic send_config(input int h, input logic vmm);
    logic [7:0] frame [$];
    int i = 0;
    frame.push_back(CMD_CONFIG);
    frame.push_back({7'd0, vmm});
    foreach (cfg_img[k]) frame.push_back(cfg_img[k]);
    @(negedge clk_fec);
    cfg_valid[h] = 1; cfg_data = frame[0]; cfg_last = 0;
    while (i < frame.size()) begin
      @(posedge clk_fec); #0.1;
      if (cfg_ready[h]) begin
        i++;
        if (i < frame.size()) begin cfg_data = frame[i]; cfg_last = (i == frame.size() - 1); end
        else begin cfg_valid[h] = 0; cfg_last = 0; end
      end
    end
  endtask

  task automatic drain();
    int quiet = 0;
    stopped = 1;
    wait_fec(10);
    for (int t = 0; t < 40000 && quiet < 400; t++) begin
      int pend = 0;
      for (int v = 0; v < NV; v++) pend += req_burst[v];
      @(posedge clk_fec);
      if (udp_empty && pend == 0) quiet++; else quiet = 0;
    end
    // hits still inside a VMM cannot be seen from here; allow the token ring time
    wait_fec(2000);
    while (!udp_empty) wait_fec(1);
    wait_fec(200);
  endtask

  int tp_sent = 0;
  longint run_end;

  initial begin
    foreach (req_burst[i]) begin req_burst[i] = 0; req_old[i] = 0; end
    foreach (m_srst[i]) begin m_srst[i] = 0; m_tp[i] = 0; end
    new_run();
    repeat (5) @(posedge clk_fec);
    rst = 0;
    wait_fec(100);
    check(&hyb_cmd_locked, "hybrid command links locked");
    check(&fec_link_locked, "FEC data links locked");

    // 1. configuration
    foreach (cfg_img[i]) cfg_img[i] = 8'($urandom);
    send_config(0, 1'b1);
    wait_fec(2 * 1728 / 1 + 200);

    // 2. calibration of the reset latency
    calib = 1;
    acq_on = 1;
    wait_fec(5);
    wait (fec_accept);
    stopped = 0;
    wait_fec(50);
    for (int i = 0; i < 12; i++) begin
      req_burst[0] = 1;
      wait_fec(37 + $urandom_range(0, 20));
    end
    drain();
    acq_on = 0;
    calib = 0;
    check(cal_n >= 10, $sformatf("%0d calibration hits", cal_n));
    reset_latency = BC_BITS'((47 + cal_min) % PERIOD);
    $display("reset latency calibrated: 47 + (%0d) -> %0d BC", cal_min, reset_latency);
    wait_fec(100);
    exp_t.delete(); exp_k.delete();
    new_run();

    // 3. main run
    acq_on = 1;
    wait_fec(5);
    wait (fec_accept);
    stopped = 0;
    run_end = longint'(fec_ts) + longint'(RUN_MARKERS) * 16 * PERIOD + 3 * PERIOD;
    fork
      // random single hits and bursts before each overflow
      while (longint'(fec_ts) < run_end) begin
        @(posedge clk_fec);
        for (int v = 0; v < NV; v++) begin
          if (int'(fec_bc) == PERIOD - 40 && $urandom_range(0, 1) == 0) req_burst[v] += $urandom_range(5, 25);
          else if ($urandom_range(0, 400) == 0) req_burst[v] += 1;
          if ($urandom_range(0, 20000) == 0) req_old[v] = 1;
        end
      end
      // test pulses
      begin
        wait_fec(300);
        for (int i = 0; i < 5; i++) begin
          @(negedge clk_fec) test_pulse = 1;
          @(negedge clk_fec) test_pulse = 0;
          tp_sent++;
          wait_fec(500);
        end
      end
      // one invalid hit per VMM for sure
      begin
        wait_fec(1000);
        for (int v = 0; v < NV; v++) req_old[v] = 1;
      end
      // back-pressure window: UDP FIFO not read while all VMMs send bursts
      begin
        wait_fec(2000);
        udp_enable = 0;
        for (int r = 0; r < 40; r++) begin
          for (int v = 0; v < NV; v++) req_burst[v] += 16;
          wait_fec(160);
        end
        udp_enable = 1;
      end
    join
    drain();

    // 4. compare
    begin
      automatic int missing = 0;
      foreach (exp_t[k]) begin
        if (missing < 5) $display("missing hit vmm %0d word %h", k[42:38], k[37:0]);
        missing++;
      end
      check(missing == 0, $sformatf("%0d hits not received", missing));
    end
    begin
      automatic int s_pres = 0, s_ps = 0, s_pp = 0, s_inv = 0, s_mk = 0, s_read = 0, s_drop = 0;
      for (int v = 0; v < NV; v++) begin
        s_pres += n_present[v]; s_ps += n_prev_same[v]; s_pp += n_prev_prev[v];
        s_inv += n_invalid[v]; s_mk += n_markers[v]; s_read += hits_read[v];
        s_drop += hits_dropped_hybrid[v];
        m_empty_tokens += empty_tok[v];
        check(mcount[v] >= RUN_MARKERS, $sformatf("vmm %0d: %0d markers", v, mcount[v]));
      end
      m_present = s_pres; m_prev_same = s_ps;
      check(s_pp == m_prev_prev, $sformatf("offset -1: counter %0d, stream %0d", s_pp, m_prev_prev));
      check(s_inv == m_invalid, $sformatf("invalid: counter %0d, stream %0d", s_inv, m_invalid));
      check(s_drop == 0 && n_dropped_fec == 0, "no FIFO overflow");
      $display("hits injected %0d (test pulse %0d), read by hybrids %0d, received %0d, words %0d",
               n_inj, n_tp_hits, s_read, m_hits_rx, n_words);
      $display("time rebuilt from marker+offset+BCID: constant %0d BC, largest deviation %0d",
               tconst, t_dev_max);
    end
    acq_on = 0;
    wait_fec(50);
    check(hyb_acq_en == '0, "acquisition off on all hybrids");
    for (int h = 0; h < N_HYB; h++) begin
      check(m_srst[h] == 2, $sformatf("hybrid %0d: %0d soft resets", h, m_srst[h]));
      check(m_tp[h] == tp_sent, $sformatf("hybrid %0d: %0d test pulses", h, m_tp[h]));
    end
    report("configuration loads", m_cfg_loads);
    report("acquisition starts", m_acq);
    check(m_acq == 2 * N_HYB, "every hybrid started twice");
    report("soft resets", m_srst[0]);
    report("hits read (received)", m_hits_rx);
    report("empty tokens", m_empty_tokens);
    report("markers", m_markers);
    report("offset n", m_present);
    report("offset n-1", m_prev_same);
    report("offset -1", m_prev_prev);
    report("invalid (-16)", m_invalid);
    report("scheduler stall cycles", int'(n_sched_stall));
    report("test pulses", m_tp[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int empty_tok [NV];
  for (genvar v = 0; v < NV; v++) begin : g_et
    assign empty_tok[v] = g_vm[v].u_vmm.empty_tokens;
  end

  task automatic report(input string what, input int n);
    $display("mechanism %-24s %0d", what, n);
    check(n > 0, $sformatf("mechanism '%s' never happened", what));
  endtask

  initial begin
    #(FULL ? 8ms : 2ms);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
