// tb_latency_logic: checks the FEC latency logic (offset classification of
// Fig. 10) against a model that works on absolute time. For each hit an
// absolute hit time and an absolute FEC arrival time are drawn; the model's
// offset is the overflow period of the hit relative to the present one:
// the same period gives the present overflow count n, the previous period
// gives n-1 (or -1 when n = 0), and a hit whose latency reaches the maximum
// latency gives
// the invalid code. The hit's BCID is Gray coded as sent by the VMM3a. Uses
// the paper's latency jitter 4 and maximum latency 320 BC. Also checks that a
// marker takes priority and the held hit follows one cycle later, and that
// each word leaves two cycles after the hit arrives.
module tb_latency_logic;
  timeunit 1ns; timeprecision 1ps;
  import srs_pkg::*;
  logic clk = 0, rst = 1;
  always #11.25 clk = ~clk;

  localparam int JIT = 4, MAXL = 320;
  logic [11:0] bc = 0;
  logic [3:0]  ovf = 0;
  logic        accept = 1, marker = 0, hit_valid = 0;
  logic [41:0] marker_ts = 0;
  logic [37:0] hit = 0;
  logic [47:0] wr_data;
  logic        wr_en;
  logic [31:0] n_present, n_prev_same, n_prev_prev, n_invalid, n_markers;

  latency_logic u_dut (.clk, .rst, .vmm_id(5'd9), .latency_jitter(12'(JIT)), .max_latency(12'(MAXL)),
                       .bc, .ovf, .accept, .marker, .marker_ts, .hit, .hit_valid,
                       .wr_data, .wr_en, .n_present, .n_prev_same, .n_prev_prev, .n_invalid, .n_markers);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [11:0] bin2gray(input logic [11:0] b);
    return b ^ (b >> 1);
  endfunction

  int cnt[4];
  // one hit: absolute times in BC units
  task automatic one_hit(input longint t_hit, input longint t_now);
    longint p_hit, p_now;
    logic [4:0] exp_ofs;
    int kind;
    logic [37:0] h;
    p_hit = t_hit / 4096;
    p_now = t_now / 4096;
    if (t_now - t_hit >= MAXL) begin exp_ofs = OFS_INVALID; kind = 3; end
    else if (p_hit >= p_now) begin exp_ofs = 5'(p_now % 16); kind = 0; end
    else if ((p_now % 16) != 0) begin exp_ofs = 5'(p_now % 16) - 5'd1; kind = 1; end
    else begin exp_ofs = OFS_MINUS1; kind = 2; end
    h = {1'b1, 1'b0, 6'($urandom), 10'($urandom), 8'($urandom), bin2gray(12'(t_hit % 4096))};
    @(negedge clk);
    hit = h; hit_valid = 1;
    bc = 12'(t_now % 4096); ovf = 4'((t_now / 4096) % 16);
    @(negedge clk);
    hit_valid = 0;
    check(!wr_en, "no output one cycle after the hit");
    @(negedge clk);
    check(wr_en && wr_data == {h, 5'd9, exp_ofs},
          $sformatf("t_hit=%0d t_now=%0d got ofs %b want %b", t_hit, t_now, wr_data[4:0], exp_ofs));
    cnt[kind]++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 4000; i++) begin
      longint th, tn;
      int l, sel;
      th = longint'($urandom_range(0, 2000000));
      sel = $urandom_range(0, 9);
      if (sel < 5)       l = $urandom_range(0, MAXL);  // MAXL itself is already too late
      else if (sel < 6)  l = -$urandom_range(1, JIT);
      else if (sel < 8)  l = $urandom_range(MAXL, 4095 - JIT);
      else begin
        // put the hit just before an overflow and the arrival just after
        th = (th / 4096) * 4096 + 4096 - $urandom_range(1, 200);
        l  = $urandom_range(0, MAXL);
        if ($urandom_range(0, 3) == 0) th = (th / 65536) * 65536 + 65536 - $urandom_range(1, 200);
      end
      tn = th + l;
      // a negative latency (jitter) must not cross an overflow in this model
      if (l < 0 && (tn / 4096) != (th / 4096)) tn = th;
      one_hit(th, tn);
    end
    check(cnt[0] > 0 && cnt[1] > 0 && cnt[2] > 0 && cnt[3] > 0,
          $sformatf("cases present=%0d prev=%0d minus1=%0d invalid=%0d", cnt[0], cnt[1], cnt[2], cnt[3]));
    check(n_present == cnt[0] && n_prev_same == cnt[1] && n_prev_prev == cnt[2] && n_invalid == cnt[3],
          "statistics counters");
    // marker priority: hit arrives, marker in the following cycle
    @(negedge clk);
    bc = 100; ovf = 3;
    hit = {1'b1, 25'h5a5a5a, bin2gray(12'd90)}; hit_valid = 1;
    @(negedge clk);
    hit_valid = 0; marker = 1; marker_ts = 42'h123456789;
    @(negedge clk);
    marker = 0;
    check(wr_en && wr_data == {1'b0, 5'd9, 42'h123456789}, "marker word");
    @(negedge clk);
    check(wr_en && wr_data == {1'b1, 25'h5a5a5a, bin2gray(12'd90), 5'd9, 5'd3}, "held hit after marker");
    @(negedge clk);
    check(!wr_en, "nothing further");
    check(n_markers == 1, "marker counted");
    // hits are ignored until the time base accepts them
    accept = 0;
    @(negedge clk); hit_valid = 1; @(negedge clk); hit_valid = 0;
    @(negedge clk);
    check(!wr_en, "hit before soft reset is dropped");
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
