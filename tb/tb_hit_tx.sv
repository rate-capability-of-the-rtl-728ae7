// tb_hit_tx: feeds padded 40-bit hits to hit_tx from a FIFO model and decodes
// the symbols: each hit must appear as five data characters, most significant
// byte first, K28.5 idles must fill the gaps, and with the FIFO full of hits
// the hits must follow each other without idles (one hit per 5 symbol periods,
// 8.8 Mhits/s at 44.4 MHz).
module tb_hit_tx;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst = 1;
  always #11.25 clk = ~clk;

  logic [39:0] fifo [$];
  logic        fifo_rd;
  logic        fifo_empty;
  logic [39:0] fifo_data;
  logic [9:0]  code;
  assign fifo_empty = (fifo.size() == 0);
  assign fifo_data  = fifo_empty ? 40'h0 : fifo[0];

  hit_tx u_dut (.clk, .rst, .fifo_empty, .fifo_data, .fifo_rd, .code);

  logic [7:0] d; logic k, err;
  dec8b10b u_dec (.code, .data(d), .is_k(k), .err);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] expq[$];
  int nsym = 0, nk = 0, ndata = 0;
  bit started = 0;
  // the FIFO model is sampled half a cycle before the edge that consumes it
  bit pend = 0;
  always @(negedge clk) if (!rst && fifo_rd) begin
    for (int b = 4; b >= 0; b--) expq.push_back(fifo[0][8*b +: 8]);
    pend = 1;
  end
  always @(posedge clk) if (!rst) begin
    #1;
    if (pend) begin void'(fifo.pop_front()); pend = 0; end
    if (started) begin
      nsym++;
      check(!err, "valid symbol");
      if (k) begin
        nk++;
        check(d == 8'hBC, "idle is K28.5");
      end else begin
        ndata++;
        check(expq.size() > 0 && d == expq[0], $sformatf("byte %h want %h", d, expq.size() ? expq[0] : 8'h0));
        if (expq.size()) void'(expq.pop_front());
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk); started = 1;
    // isolated hits
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      fifo.push_back({2'b00, 6'($urandom), 32'($urandom)});
      repeat (12) @(posedge clk);
    end
    check(nk > 0 && ndata == 50, $sformatf("isolated: %0d data %0d idle", ndata, nk));
    // burst of 100 hits: no idles between them
    @(negedge clk);
    nk = 0; ndata = 0;
    for (int i = 0; i < 100; i++) fifo.push_back({2'b00, 6'($urandom), 32'($urandom)});
    @(posedge clk);              // first byte leaves the encoder
    nk = 0; ndata = 0;
    repeat (500) @(posedge clk);
    check(ndata == 500 && nk == 0, $sformatf("burst: %0d data symbols, %0d idles in 500 periods", ndata, nk));
    repeat (5) @(posedge clk);
    check(expq.size() == 0 && fifo.size() == 0, "all bytes sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
