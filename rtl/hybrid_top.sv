// hybrid_top: FPGA logic of the RD51 VMM3a hybrid (ESS firmware structure).
//
// Two data readout blocks, one per VMM3a, and a common configuration and clock
// part, as drawn in the paper's hybrid firmware diagram:
//  * per VMM: token_gen (CKTK) and vmm_readout (flag detection, CKDT, DDR
//    capture, 40-bit hit) on the 177.7 MHz process clock, a 1024 x 40 bit
//    dual-clock hit FIFO, and hit_tx + oserdes10 sending 8b/10b symbols on the
//    VMM's data pair at 444.4 MHz (44.4 MHz symbol clock);
//  * common: link_rx on the trigger/config pair, hybrid_cmd_decoder, one
//    vmm_config loader per VMM, ckbc_gen (44.4 MHz CKBC from 88.8 MHz) and
//    cktp_gen (test-pulse clock on 177.7 MHz).
// Clocks come from the hybrid PLL, which is outside this module: clk_word
// 44.4 MHz (recovered base clock from the FEC), clk_bc2 88.8 MHz, clk_proc
// 177.7 MHz and clk_bit 444.4 MHz, all phase related. `rst` must be held for a
// few clk_word periods; it is used synchronously in every domain. Level and
// pulse signals that cross from the 44.4 MHz command domain into the other
// domains go through two-flop synchronisers (the test-pulse request as a
// toggle). A hit that finds the FIFO full is dropped and counted.
//
// Unused outputs by design: the configuration busy flag, the command
// receiver's error flag and the token generators' frame_start strobe are not
// needed here.
module hybrid_top #(
  parameter int unsigned FIFO_DEPTH = 1024,
  parameter int unsigned CFG_BYTES  = 216,
  parameter int unsigned TP_WIDTH   = 32
) (
  input  logic        clk_word,
  input  logic        clk_bc2,
  input  logic        clk_proc,
  input  logic        clk_bit,
  input  logic        rst,
  // HDMI pairs
  input  logic        cmd_sin,
  output logic [1:0]  data_sout,
  // VMM3a pins
  output logic        ckbc,
  output logic        cktp,
  output logic        vmm_srst,
  output logic [1:0]  cktk,
  output logic [1:0]  ckdt,
  input  logic [1:0]  data0,
  input  logic [1:0]  data1,
  output logic [1:0]  cfg_sck,
  output logic [1:0]  cfg_sdi,
  output logic [1:0]  cfg_cs_n,
  // status
  output logic        acq_en,
  output logic        cmd_locked,
  output logic [31:0] hits_read  [2],
  output logic [31:0] hits_dropped [2]
);
  // ---------------- command path (clk_word) ----------------
  logic [7:0] rx_data;
  logic       rx_k, rx_valid, rx_err;
  logic       soft_reset, test_pulse, cfg_we, cfg_vmm, cfg_done;
  logic [$clog2(CFG_BYTES)-1:0] cfg_addr;
  logic [7:0] cfg_byte;

  link_rx u_cmd_rx (.clk_bit, .clk_div(clk_word), .rst, .sin(cmd_sin), .data(rx_data),
                    .is_k(rx_k), .valid(rx_valid), .locked(cmd_locked), .code_err(rx_err));

  hybrid_cmd_decoder #(.CFG_BYTES(CFG_BYTES)) u_dec (
    .clk(clk_word), .rst, .rx_data, .rx_k, .rx_valid, .acq_en, .soft_reset, .test_pulse,
    .cfg_we, .cfg_vmm, .cfg_addr, .cfg_byte, .cfg_done);

  always_ff @(posedge clk_word) begin
    if (rst) vmm_srst <= 1'b0;
    else     vmm_srst <= soft_reset;
  end

  for (genvar v = 0; v < 2; v++) begin : g_cfg
    vmm_config #(.CFG_BYTES(CFG_BYTES)) u_cfg (
      .clk(clk_word), .rst, .we(cfg_we && (cfg_vmm == 1'(v))), .waddr(cfg_addr), .wdata(cfg_byte),
      .start(cfg_done && (cfg_vmm == 1'(v))), .sck(cfg_sck[v]), .sdi(cfg_sdi[v]),
      .cs_n(cfg_cs_n[v]), .busy());
  end

  // ---------------- clock generators ----------------
  logic acq_bc_s1, acq_bc;
  always_ff @(posedge clk_bc2) begin
    acq_bc_s1 <= acq_en;
    acq_bc    <= acq_bc_s1;
  end
  logic bc_tick_unused;
  ckbc_gen u_ckbc (.clk88(clk_bc2), .rst, .run(acq_bc), .ckbc, .bc_tick(bc_tick_unused));

  logic acq_p_s1, acq_p;
  logic tp_tog, tp_s1, tp_s2, tp_s3;
  always_ff @(posedge clk_word) begin
    if (rst)             tp_tog <= 1'b0;
    else if (test_pulse) tp_tog <= ~tp_tog;
  end
  always_ff @(posedge clk_proc) begin
    acq_p_s1 <= acq_en;
    acq_p    <= acq_p_s1;
    tp_s1    <= tp_tog;
    tp_s2    <= tp_s1;
    tp_s3    <= tp_s2;
  end
  logic [31:0] tp_count_unused;
  cktp_gen u_cktp (.clk(clk_proc), .rst, .trigger(tp_s2 ^ tp_s3), .periodic(1'b0),
                   .width(16'(TP_WIDTH)), .period(16'd0), .cktp, .pulse_count(tp_count_unused));

  // ---------------- data readout blocks ----------------
  for (genvar v = 0; v < 2; v++) begin : g_vmm
    logic [4:0]  phase;
    logic        frame_start;
    logic [39:0] hit_data, fifo_q;
    logic        hit_valid, full, empty, fifo_rd;
    logic [9:0]  code;

    token_gen u_tok (.clk(clk_proc), .rst, .acq_en(acq_p), .cktk(cktk[v]), .phase, .frame_start);

    vmm_readout u_rd (.clk(clk_proc), .rst, .phase, .data0(data0[v]), .data1(data1[v]),
                      .ckdt(ckdt[v]), .hit_data, .hit_valid, .hit_count(hits_read[v]));

    always_ff @(posedge clk_proc) begin
      if (rst)                    hits_dropped[v] <= '0;
      else if (hit_valid && full) hits_dropped[v] <= hits_dropped[v] + 1'b1;
    end

    async_fifo #(.WIDTH(40), .DEPTH(FIFO_DEPTH)) u_fifo (
      .wr_clk(clk_proc), .wr_rst(rst), .wr_en(hit_valid && !full), .wr_data(hit_data), .full,
      .rd_clk(clk_word), .rd_rst(rst), .rd_en(fifo_rd), .rd_data(fifo_q), .empty);

    hit_tx u_tx (.clk(clk_word), .rst, .fifo_empty(empty), .fifo_data(fifo_q), .fifo_rd, .code);

    oserdes10 u_ser (.clk_bit, .clk_div(clk_word), .rst, .word(code), .sout(data_sout[v]));
  end
endmodule
