// tb_vmm_readout: token_gen + vmm_readout against the VMM3a behavioural model.
// Injects hits on random channels, checks every 38-bit hit written to the FIFO
// port against the injected word, that each write falls in the first period of
// a readout cycle, that each transfer uses exactly 10 CKDT pulses, and that with
// many channels loaded one hit is read per 20-period readout cycle (8.8 Mhits/s
// at 177.7 MHz), plus one empty token where the token ring wraps.
module tb_vmm_readout;
  timeunit 1ns; timeprecision 1ps;

  logic clk = 0, rst = 1, ckbc = 0;
  always #2.8125 clk = ~clk;          // 177.7 MHz
  always #11.25  ckbc = ~ckbc;        // 44.4 MHz

  logic        cktk, ckdt, d0, d1, hit_valid, frame_start;
  logic [4:0]  phase;
  logic [39:0] hit_data;
  logic [31:0] hit_count;

  token_gen   u_tok (.clk, .rst, .acq_en(1'b1), .cktk, .phase, .frame_start);
  vmm_readout u_dut (.clk, .rst, .phase, .data0(d0), .data1(d1), .ckdt,
                     .hit_data, .hit_valid, .hit_count);
  vmm3a_model u_vmm (.ckbc, .cktk, .ckdt, .srst(rst), .data0(d0), .data1(d1));

  int checks = 0, failures = 0;
  logic [37:0] expq[$];
  int ckdt_edges = 0;
  int empty0;
  int first_hit_cyc, last_hit_cyc, ncyc = 0, nhits = 0;

  always @(posedge clk) ncyc++;
  always @(posedge ckdt) if (!rst) ckdt_edges++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (!rst && hit_valid) begin
    logic [37:0] e;
    nhits++;
    if (nhits == 1) first_hit_cyc = ncyc;
    last_hit_cyc = ncyc;
    check(hit_data[39:38] == 2'b00, "padding bits");
    check(phase == 5'd0, $sformatf("write not in first period (phase %0d) t=%0t ch=%0d", phase, $time, hit_data[35:30]));
    check(ckdt_edges == 10 * nhits, $sformatf("CKDT pulses %0d for %0d hits", ckdt_edges, nhits));
    // find expected word by channel (order follows the token ring)
    e = '0;
    foreach (expq[i]) if (expq[i][35:30] == hit_data[35:30]) begin
      e = expq[i];
      expq.delete(i);
      break;
    end
    check(hit_data[37:0] == e, $sformatf("hit %h expected %h", hit_data[37:0], e));
  end

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    // phase 1: a few single hits, spaced out
    for (int k = 0; k < 6; k++) begin
      automatic int ch = $urandom_range(0, 63);
      void'(u_vmm.inject(ch, 1'b1, 10'($urandom), 8'($urandom)));
      expq.push_back(u_vmm.word[ch]);
      repeat (100) @(posedge clk);
    end
    check(nhits == 6, $sformatf("single hits read %0d", nhits));
    // phase 2: load all 64 channels at once, measure the readout rate
    nhits = 0; ckdt_edges = 0;
    empty0 = u_vmm.empty_tokens;
    @(posedge clk);
    while (u_tok.phase != 5'd10) @(posedge clk);
    for (int ch = 0; ch < 64; ch++) begin
      void'(u_vmm.inject(ch, ch[0], 10'($urandom), 8'($urandom)));
      expq.push_back(u_vmm.word[ch]);
    end
    repeat (64 * 20 + 200) @(posedge clk);
    check(nhits == 64, $sformatf("burst hits read %0d", nhits));
    // 64 hits plus one empty token where the token ring wraps: (N+1) readout
    // cycles of 20 periods, i.e. 64*20 periods between first and last write
    check(u_vmm.empty_tokens - empty0 == 1, "one empty token in the burst");
    check(last_hit_cyc - first_hit_cyc == 64 * 20,
          $sformatf("burst took %0d periods", last_hit_cyc - first_hit_cyc));
    check(expq.size() == 0, "all injected hits read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
