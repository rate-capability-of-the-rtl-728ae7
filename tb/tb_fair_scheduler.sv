// tb_fair_scheduler: 16 VMM FIFO models with random fill and a destination
// with random back-pressure. Checks that every word reaches the destination
// in per-source order, that at most one source is read per cycle, that a word
// moves in every cycle in which the destination is free and some source has
// data (one 48-bit word per 125 MHz cycle), and that with all sources busy the
// grants rotate so that each source is served once in 16 consecutive grants.
module tb_fair_scheduler;
  timeunit 1ns; timeprecision 1ps;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;

  logic [N-1:0]  src_empty, src_rd;
  logic [47:0]   src_data [N];
  logic          dst_full = 0, dst_wr;
  logic [47:0]   dst_data;

  logic [47:0] q [N][$];
  int          seq [N];
  always_comb
    for (int i = 0; i < N; i++) begin
      src_empty[i] = (q[i].size() == 0);
      src_data[i]  = src_empty[i] ? 48'h0 : q[i][0];
    end

  fair_scheduler #(.N(N), .WIDTH(48)) u_dut (.clk, .rst, .src_empty, .src_data, .src_rd,
                                             .dst_full, .dst_wr, .dst_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int exp_seq [N];
  int pop_src = -1;
  int all_busy_grants[$];
  int total = 0, mode = 0;
  always @(negedge clk) if (!rst) begin
    pop_src = -1;
    check($countones(src_rd) <= 1, "one read per cycle");
    check(dst_wr == (!dst_full && src_empty != '1), "work conserving");
    if (dst_wr) begin
      int s;
      s = int'(dst_data[47:44]);
      check(src_rd[s], "read strobe matches source");
      check(dst_data[31:0] == 32'(exp_seq[s]), $sformatf("source %0d word %0d got %0d", s, exp_seq[s], dst_data[31:0]));
      exp_seq[s]++;
      pop_src = s;
      total++;
      if (src_empty == '0) all_busy_grants.push_back(s);
      else all_busy_grants.delete();
      if (all_busy_grants.size() == N) begin
        int seen [N];
        automatic bit ok = 1;
        foreach (seen[i]) seen[i] = 0;
        foreach (all_busy_grants[i]) seen[all_busy_grants[i]]++;
        foreach (seen[i]) if (seen[i] != 1) ok = 0;
        check(ok, "each source once in 16 grants while all are busy");
        all_busy_grants.delete();
      end
    end
  end
  always @(posedge clk) if (!rst) begin
    #1;
    if (pop_src >= 0) void'(q[pop_src].pop_front());
    for (int i = 0; i < N; i++)
      if ((mode == 0 && $urandom_range(0, 40) == 0) || (mode == 1 && q[i].size() < 4)) begin
        q[i].push_back({4'(i), 12'h0, 32'(seq[i])});
        seq[i]++;
      end
    dst_full = (mode == 0) ? ($urandom_range(0, 3) == 0) : 1'b0;
  end

  initial begin
    foreach (seq[i]) begin seq[i] = 0; exp_seq[i] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (5000) @(posedge clk);
    mode = 1;   // saturate all sources
    repeat (5000) @(posedge clk);
    mode = 2;   // drain
    repeat (200) @(posedge clk);
    foreach (q[i]) check(q[i].size() == 0, "drained");
    check(total > 5000, $sformatf("%0d words moved", total));
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
