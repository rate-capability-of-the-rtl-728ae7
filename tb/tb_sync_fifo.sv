// tb_sync_fifo: single-clock FIFO at the FEC hit FIFO width (48 bits), depth
// 1024. Checks content and order against a queue under random traffic, that
// `full` and `count` follow the number of stored words, and `empty`.
module tb_sync_fifo;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [47:0] wr_data = 0, rd_data;
  logic [10:0] count;
  sync_fifo #(.WIDTH(48), .DEPTH(1024)) u_dut (.clk, .rst, .wr_en, .wr_data, .full, .rd_en, .rd_data, .empty, .count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [47:0] q[$];
  int wp = 50, rp = 50;
  always @(posedge clk) if (!rst) begin
    if (rd_en && !empty) begin
      check(rd_data == q[0], $sformatf("read %h want %h", rd_data, q[0]));
      void'(q.pop_front());
    end
    if (wr_en && !full) q.push_back(wr_data);
    #0.1;
    check(count == 11'(q.size()), $sformatf("count %0d model %0d", count, q.size()));
    check(full == (q.size() == 1024) && empty == (q.size() == 0), "flags");
    wr_en   = ($urandom_range(0, 99) < wp) && (q.size() < 1024);
    rd_en   = ($urandom_range(0, 99) < rp) && (q.size() > 0);
    wr_data = {16'($urandom), 32'($urandom)};
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wp = 90; rp = 10;
    repeat (3000) @(posedge clk);
    wp = 50; rp = 50;
    repeat (3000) @(posedge clk);
    wp = 5; rp = 95;
    repeat (3000) @(posedge clk);
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
