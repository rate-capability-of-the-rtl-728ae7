// tb_udp_splitter: 48-bit words from a FIFO model are split into 6 bytes for
// the UDP FIFO. Checks the byte order (most significant byte first), that the
// word is popped with its last byte, that back-pressure holds the byte, and
// that with a free destination one word leaves every 6 cycles.
module tb_udp_splitter;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;

  logic        src_empty, src_rd, dst_full = 0, dst_wr;
  logic [47:0] src_data;
  logic [7:0]  dst_data;
  logic [47:0] q[$];
  assign src_empty = (q.size() == 0);
  assign src_data  = src_empty ? 48'h0 : q[0];

  udp_splitter u_dut (.clk, .rst, .src_empty, .src_data, .src_rd, .dst_full, .dst_wr, .dst_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] expb[$];
  bit pend = 0, sat = 0;
  int nwords = 0, nbytes = 0;
  always @(negedge clk) if (!rst) begin
    pend = src_rd;
    if (sat) check(dst_wr, "byte every cycle when not blocked");
    if (dst_wr) begin
      nbytes++;
      check(expb.size() > 0 && dst_data == expb[0], "byte order");
      if (expb.size()) void'(expb.pop_front());
      check(src_rd == (expb.size() % 6 == 0), "pop with the sixth byte");
    end
    if (src_rd) nwords++;
    check(!(dst_full && dst_wr), "no write into full FIFO");
  end
  task automatic push(input logic [47:0] w);
    q.push_back(w);
    for (int b = 5; b >= 0; b--) expb.push_back(w[8*b +: 8]);
  endtask
  int mode = 0;
  always @(posedge clk) if (!rst) begin
    #1;
    if (pend) void'(q.pop_front());
    if (mode == 0) begin
      if ($urandom_range(0, 9) == 0) push({16'($urandom), 32'($urandom)});
      dst_full = ($urandom_range(0, 2) == 0);
    end else begin
      if (q.size() < 3) push({16'($urandom), 32'($urandom)});
      dst_full = 0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (3000) @(posedge clk);
    mode = 1;
    @(posedge clk); #2; sat = 1;
    nwords = 0;
    repeat (600) @(posedge clk);
    #2 sat = 0;
    check(nwords == 100, $sformatf("%0d words in 600 cycles", nwords));
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
