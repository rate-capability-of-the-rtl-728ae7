// tb_fec_top: the FEC firmware at its default size (8 hybrids, 16 VMM data
// lines) with the hybrids replaced by hit sources built from the hybrid's own
// transmit blocks (hit_tx + oserdes10) fed from bench queues, and one command
// line decoded with link_rx.
//
// Each generated hit has an absolute time t_h on the FEC time base; its BCID
// is t_h mod 4096 (Gray coded) and it is sent with a chosen latency: mostly
// 0..280 BC (valid), sometimes 400..3000 BC (must be marked invalid). The
// bench reads the UDP FIFO, rebuilds t = marker + offset * 4096 + BCID for
// every valid hit and requires t = t_h exactly; invalid hits must carry -16.
// Also checks: the soft reset command is issued when the BC counter is at
// 4096 - 47 = 4049 (reset latency 47) and appears on the command line; each
// VMM gets a marker with timestamp 65536 after 16 overflows; the UDP stream
// holds every hit exactly once; reading the UDP FIFO slowly stalls the
// scheduler without losing data; offsets n, n-1, -1 and -16 all occur.
module tb_fec_top;
  timeunit 1ns; timeprecision 1ps;
  import srs_pkg::*;
  localparam int NH = 8, NV = 16;
  logic clk_bit = 0, clk_fec = 0, clk_125 = 0, rst = 1;
  always #1.125 clk_bit = ~clk_bit;
  always #11.25 clk_fec = ~clk_fec;
  always #4     clk_125 = ~clk_125;

  logic [NV-1:0] data_sin, link_locked;
  logic [NH-1:0] cmd_sout, cfg_valid = '0, cfg_ready;
  logic          acq_on = 0, test_pulse = 0, cfg_last = 0, udp_rd = 0, udp_empty;
  logic [7:0]    cfg_data = 0, udp_data;
  logic [31:0]   n_present [NV], n_prev_same [NV], n_prev_prev [NV], n_invalid [NV], n_markers [NV];
  logic [31:0]   n_dropped, n_sched_stall;

  fec_top u_dut (.clk_bit, .clk_fec, .clk_125, .rst, .data_sin, .cmd_sout, .acq_on,
                 .reset_latency(12'd47), .latency_jitter(12'd4), .max_latency(12'd320),
                 .test_pulse, .cfg_valid, .cfg_data, .cfg_last, .cfg_ready, .udp_rd, .udp_data,
                 .udp_empty, .link_locked, .n_present, .n_prev_same, .n_prev_prev, .n_invalid,
                 .n_markers, .n_dropped, .n_sched_stall);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [11:0] gray(input logic [11:0] b); return b ^ (b >> 1); endfunction
  function automatic logic [11:0] gray2bin(input logic [11:0] g);
    logic [11:0] b;
    b[11] = g[11];
    for (int i = 10; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // expected hits: key {vmm, hit38} -> absolute hit time, -1 = must be invalid
  longint exp_t [logic [42:0]];
  logic [39:0] srcq [NV][$];
  int  gen_on = 0;
  longint t_acc = -1;

  for (genvar v = 0; v < NV; v++) begin : g_src
    logic        empty, rd, pend;
    logic [39:0] q;
    logic [9:0]  code;
    assign empty = (srcq[v].size() == 0);
    assign q     = empty ? 40'h0 : srcq[v][0];
    hit_tx    u_tx  (.clk(clk_fec), .rst, .fifo_empty(empty), .fifo_data(q), .fifo_rd(rd), .code);
    oserdes10 u_ser (.clk_bit, .clk_div(clk_fec), .rst, .word(code), .sout(data_sin[v]));
    always @(negedge clk_fec) pend = rd;
    always @(posedge clk_fec) begin
      #1;
      if (pend) void'(srcq[v].pop_front());
      pend = 0;
      // new hit with a chosen latency
      if (gen_on == 1 && srcq[v].size() < 2 && $urandom_range(0, 24) == 0) begin
        longint now, th;
        int l;
        logic [37:0] h;
        now = longint'(u_dut.ts);
        l = ($urandom_range(0, 40) == 0) ? $urandom_range(400, 3000) : $urandom_range(0, 280);
        th = now - l;
        if (th > t_acc + 8) begin
          h = {1'b1, 1'($urandom), 6'($urandom), 10'($urandom), 8'($urandom), gray(12'(th % 4096))};
          if (!exp_t.exists({5'(v), h})) begin
            exp_t[{5'(v), h}] = (l >= 400) ? -1 : th;
            srcq[v].push_back({2'b00, h});
          end
        end
      end
    end
  end

  // command line of hybrid 0
  logic [7:0] c_d; logic c_k, c_v, c_lk, c_err;
  link_rx u_crx (.clk_bit, .clk_div(clk_fec), .rst, .sin(cmd_sout[0]), .data(c_d), .is_k(c_k),
                 .valid(c_v), .locked(c_lk), .code_err(c_err));
  int n_cmd_srst = 0, n_cmd_acq = 0, n_cmd_tp = 0, srst_bc = -1;
  always @(posedge clk_fec) begin
    if (c_v && !c_k && c_d == CMD_SOFT_RESET) n_cmd_srst++;
    if (c_v && !c_k && c_d == CMD_ACQ_ON)     n_cmd_acq++;
    if (c_v && !c_k && c_d == CMD_TEST_PULSE) n_cmd_tp++;
    if (u_dut.send_soft_reset) begin srst_bc = int'(u_dut.bc) - 1; t_acc = longint'(u_dut.ts); end
  end

  // UDP reader
  int  udp_div = 1, ucyc = 0, nb = 0, m_hits = 0, m_markers = 0, m_minus1 = 0, m_inv = 0;
  logic [47:0] acc = 0;
  longint mbase [NV];
  int     mcnt [NV];
  always @(negedge clk_125) begin
    ucyc++;
    udp_rd = 0;
    if (!udp_empty && ucyc % udp_div == 0) begin
      udp_rd = 1;
      acc = {acc[39:0], udp_data};
      if (++nb == 6) begin
        nb = 0;
        if (acc[47]) begin
          logic [42:0] key;
          logic [4:0]  ofs;
          key = {acc[9:5], acc[47:10]};
          ofs = acc[4:0];
          m_hits++;
          if (ofs == OFS_MINUS1) m_minus1++;
          if (ofs == OFS_INVALID) m_inv++;
          if (!exp_t.exists(key)) check(0, $sformatf("unexpected hit %h", key));
          else begin
            if (exp_t[key] < 0) check(ofs == OFS_INVALID, "late hit marked invalid");
            else begin
              longint tr;
              tr = mbase[acc[9:5]] + longint'($signed(ofs)) * 4096 + longint'(gray2bin(acc[21:10]));
              check(ofs != OFS_INVALID && tr == exp_t[key],
                    $sformatf("vmm %0d: rebuilt time %0d, hit time %0d (offset %0d)",
                              acc[9:5], tr, exp_t[key], $signed(ofs)));
            end
            exp_t.delete(key);
          end
        end else begin
          int v;
          v = int'(acc[46:42]);
          m_markers++;
          mcnt[v]++;
          check(acc[41:0] == 42'(65536 * mcnt[v]), $sformatf("marker timestamp %0d", acc[41:0]));
          mbase[v] = longint'(acc[41:0]);
        end
      end
    end
  end

  initial begin
    foreach (mbase[i]) begin mbase[i] = 0; mcnt[i] = 0; end
    repeat (5) @(posedge clk_fec);
    rst = 0;
    repeat (60) @(posedge clk_fec);
    check(&link_locked && c_lk, "all links locked");
    acq_on = 1;
    repeat (4100) @(posedge clk_fec);
    check(srst_bc == 4049, $sformatf("soft reset issued at BC %0d", srst_bc));
    check(n_cmd_acq == 1 && n_cmd_srst == 1, "acquisition and soft reset commands on the line");
    gen_on = 1;
    @(negedge clk_fec) test_pulse = 1; @(negedge clk_fec) test_pulse = 0;
    repeat (20000) @(posedge clk_fec);
    udp_div = 4;                         // UDP side slower than the hit rate
    repeat (5000) @(posedge clk_fec);
    udp_div = 1;
    wait (u_dut.ts > 42'(65536 + 400));
    gen_on = 2;
    repeat (3000) @(posedge clk_fec);
    wait (udp_empty);
    repeat (100) @(posedge clk_fec);
    check(n_cmd_tp == 1, "test pulse command");
    check(exp_t.num() == 0, $sformatf("%0d hits missing", exp_t.num()));
    foreach (mcnt[v]) check(mcnt[v] == 1, $sformatf("vmm %0d: %0d markers", v, mcnt[v]));
    check(n_dropped == 0, $sformatf("%0d words dropped", n_dropped));
    begin
      automatic int sp = 0, sps = 0, spp = 0, si = 0;
      for (int v = 0; v < NV; v++) begin
        sp += n_present[v]; sps += n_prev_same[v]; spp += n_prev_prev[v]; si += n_invalid[v];
      end
      $display("hits %0d: offset n %0d, n-1 %0d, -1 %0d, invalid %0d; markers %0d; stall cycles %0d",
               m_hits, sp, sps, spp, si, m_markers, n_sched_stall);
      check(sp > 0 && sps > 0 && spp > 0 && si > 0, "all offset cases occur");
      check(spp == m_minus1 && si == m_inv && sp + sps + spp + si == m_hits, "counters match stream");
      check(n_sched_stall > 0, "scheduler stalled by back-pressure");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
