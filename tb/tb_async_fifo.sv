// tb_async_fifo: dual-clock FIFO between 177.7 MHz (write) and 44.4 MHz (read)
// at the hybrid's size, 1024 x 40. Random write/read activity; checks order and
// content of every word against a queue, that `full` rises after exactly 1024
// words with the reader stopped, that nothing is lost or duplicated, and that
// `empty` is reported at the end.
module tb_async_fifo;
  timeunit 1ns; timeprecision 1ps;
  logic wclk = 0, rclk = 0, rst = 1;
  always #2.8125 wclk = ~wclk;
  always #11.25  rclk = ~rclk;

  logic        wr_en = 0, rd_en = 0, full, empty;
  logic [39:0] wr_data = 0, rd_data;
  async_fifo #(.WIDTH(40), .DEPTH(1024)) u_dut (.wr_clk(wclk), .wr_rst(rst), .wr_en, .wr_data, .full,
                                               .rd_clk(rclk), .rd_rst(rst), .rd_en, .rd_data, .empty);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [39:0] q[$];
  int nw = 0, nr = 0;
  bit reading = 0, writing = 0;

  always @(posedge wclk) begin
    if (wr_en && !full) begin q.push_back(wr_data); nw++; end
    #0.1;
    wr_en   = writing && !full && ($urandom_range(0, 3) != 0);
    wr_data = {8'($urandom), 32'($urandom)};
  end
  always @(posedge rclk) begin
    if (rd_en && !empty) begin
      logic [39:0] e;
      e = q.pop_front();
      check(rd_data == e, $sformatf("read %h expected %h", rd_data, e));
      nr++;
    end
    #0.1;
    rd_en = reading && !empty && ($urandom_range(0, 1) != 0);
  end

  initial begin
    repeat (4) @(posedge rclk);
    rst = 0;
    repeat (4) @(posedge rclk);
    // fill with the reader stopped
    writing = 1;
    wait (full);
    @(posedge wclk); #0.2;
    writing = 0;
    check(nw == 1024, $sformatf("full after %0d words", nw));
    // drain with random activity on both sides
    reading = 1;
    repeat (300) @(posedge rclk);
    writing = 1;
    repeat (3000) @(posedge rclk);
    writing = 0;
    repeat (5000) @(posedge rclk);
    check(empty && q.size() == 0, $sformatf("empty at end, %0d left", q.size()));
    check(nr == nw && nr > 2000, $sformatf("%0d written %0d read", nw, nr));
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
