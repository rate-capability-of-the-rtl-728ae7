// tb_link_rx: enc8b10b -> oserdes10 -> a 0..9 bit delay line -> link_rx.
// For every delay (every possible word phase) the receiver must lock on the
// K28.5 idles within 20 word periods by bit slipping, and then return exactly
// the data characters that were sent, in order. Finally a corrupted line must
// drop the lock.
module tb_link_rx;
  timeunit 1ns; timeprecision 1ps;
  logic clk_bit = 0, clk_div = 0, rst = 1;
  always #1.125 clk_bit = ~clk_bit;
  initial begin #0.3; forever #11.25 clk_div = ~clk_div; end

  logic       tk = 1;
  logic [7:0] td = 8'hBC;
  logic [9:0] code;
  logic       sout, rdp;
  enc8b10b  u_enc (.clk(clk_div), .rst, .en(1'b1), .is_k(tk), .data(td), .code, .rd_pos(rdp));
  oserdes10 u_ser (.clk_bit, .clk_div, .rst, .word(code), .sout);

  logic [15:0] dl = '0;
  int          delay = 0;
  logic        corrupt = 0;
  logic rnd = 0;
  always @(posedge clk_bit) begin
    dl <= {dl[14:0], sout};
    rnd <= 1'($urandom);
  end
  wire sin = corrupt ? rnd : (delay == 0 ? sout : dl[delay-1]);

  logic [7:0] data;
  logic is_k, valid, locked, cerr;
  link_rx u_dut (.clk_bit, .clk_div, .rst, .sin, .data, .is_k, .valid, .locked, .code_err(cerr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] sentq[$];
  int nrecv;
  always @(posedge clk_div) if (!rst && !corrupt && valid && !is_k) begin
    logic [7:0] e;
    nrecv++;
    e = (sentq.size() > 0) ? sentq.pop_front() : 8'hxx;
    check(data == e, $sformatf("delay %0d: got %h want %h", delay, data, e));
  end

  initial begin
    for (delay = 0; delay < 10; delay++) begin
      int t;
      rst = 1; tk = 1; td = 8'hBC; sentq.delete(); nrecv = 0;
      repeat (3) @(posedge clk_div);
      rst = 0;
      t = 0;
      while (!locked && t < 40) begin @(posedge clk_div); t++; end
      check(locked && t <= 20, $sformatf("delay %0d: lock after %0d words", delay, t));
      repeat (5) @(posedge clk_div);
      for (int i = 0; i < 200; i++) begin
        @(negedge clk_div);
        if ($urandom_range(0, 9) == 0) begin tk = 1; td = 8'hBC; end
        else begin tk = 0; td = 8'($urandom); sentq.push_back(td); end
      end
      @(negedge clk_div); tk = 1; td = 8'hBC;
      repeat (8) @(posedge clk_div);
      check(sentq.size() == 0 && nrecv > 150, $sformatf("delay %0d: %0d left, %0d received", delay, sentq.size(), nrecv));
    end
    corrupt = 1;
    begin
      automatic bit lost = 0;
      repeat (400) begin @(posedge clk_div); if (!locked) lost = 1; end
      check(lost, "lock lost on a corrupted line");
    end
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
