// tb_fec_hit_rx: a hybrid-side transmitter (hit_tx + oserdes10) sends hits over
// a serial line with a bit delay to fec_hit_rx. Checks that the receiver locks,
// returns every 38-bit hit in order, keeps up with back-to-back hits (one per 5
// symbol periods), and counts a hit whose two padding bits are not zero as an
// error.
module tb_fec_hit_rx;
  timeunit 1ns; timeprecision 1ps;
  logic clk_bit = 0, clk_div = 0, rst = 1;
  always #1.125 clk_bit = ~clk_bit;
  initial begin #0.3; forever #11.25 clk_div = ~clk_div; end

  logic [39:0] fifo [$];
  logic        fifo_rd, fifo_empty;
  logic [39:0] fifo_data;
  logic [9:0]  code;
  logic        sout;
  assign fifo_empty = (fifo.size() == 0);
  assign fifo_data  = fifo_empty ? 40'h0 : fifo[0];
  bit pend = 0;
  always @(negedge clk_div) pend = fifo_rd;
  always @(posedge clk_div) begin #1; if (pend) void'(fifo.pop_front()); pend = 0; end

  hit_tx    u_tx  (.clk(clk_div), .rst, .fifo_empty, .fifo_data, .fifo_rd, .code);
  oserdes10 u_ser (.clk_bit, .clk_div, .rst, .word(code), .sout);
  logic [7:0] dl = 0;
  always @(posedge clk_bit) dl <= {dl[6:0], sout};

  logic [37:0] hit;
  logic        hit_valid, locked;
  logic [15:0] err_count;
  fec_hit_rx u_dut (.clk_bit, .clk_div, .rst, .sin(dl[4]), .hit, .hit_valid, .locked, .err_count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [37:0] expq[$];
  int nrx = 0, first_t = 0, last_t = 0, cyc = 0;
  always @(posedge clk_div) begin
    cyc++;
    if (hit_valid) begin
      nrx++;
      if (nrx == 1) first_t = cyc;
      last_t = cyc;
      check(expq.size() > 0 && hit == expq[0], $sformatf("hit %h want %h", hit, expq.size() ? expq[0] : 38'h0));
      if (expq.size()) void'(expq.pop_front());
    end
  end

  task automatic push(input logic [37:0] h);
    fifo.push_back({2'b00, h});
    expq.push_back(h);
  endtask

  initial begin
    repeat (3) @(posedge clk_div);
    rst = 0;
    repeat (30) @(posedge clk_div);
    check(locked, "receiver locked on idles");
    for (int i = 0; i < 5; i++) begin
      @(negedge clk_div);
      push({1'b1, 37'($urandom) << 5 | 37'($urandom)});
      repeat (9) @(posedge clk_div);
    end
    repeat (10) @(posedge clk_div);
    check(nrx == 5, $sformatf("%0d isolated hits", nrx));
    nrx = 0;
    @(negedge clk_div);
    for (int i = 0; i < 200; i++) push({1'b1, 5'($urandom), 32'($urandom)});
    repeat (1100) @(posedge clk_div);
    check(nrx == 200, $sformatf("%0d burst hits", nrx));
    check(last_t - first_t == 199 * 5, $sformatf("burst spacing %0d periods", last_t - first_t));
    check(err_count == 0, "no errors");
    @(negedge clk_div);
    fifo.push_back({2'b10, 38'h1});   // bad padding
    repeat (20) @(posedge clk_div);
    check(err_count == 1, $sformatf("padding error counted (%0d)", err_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
