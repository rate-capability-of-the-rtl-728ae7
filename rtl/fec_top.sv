// fec_top: data path of the RD51 SRS FEC (Virtex-6) firmware for VMM3a hybrids.
//
// Per hybrid (N_HYB, up to 8 on one DVMM card) the FEC has one trigger/config
// transmitter (fec_cmd_tx + oserdes10) and two data receivers, one per VMM3a.
// Per VMM: fec_hit_rx (1:10 deserialiser, 8b/10b decoding, 5-byte hit
// assembly), latency_logic (overflow-period assignment, 48-bit hits and
// markers) and a 48-bit dual-clock VMM hit FIFO written at 44.4 MHz and read at
// 125 MHz. One fec_timebase (BC counter, overflow counter, 42-bit timestamp,
// soft-reset timing) serves all VMMs. On the 125 MHz side the fair_scheduler
// moves one hit per cycle round robin from the non-empty VMM FIFOs into the FEC
// hit FIFO; udp_splitter cuts the 48-bit words into bytes for the 8-bit UDP
// FIFO, whose read side is the output of this module (the UDP/Ethernet framer
// that drains it at 125 MHz is outside). VMM-ID = 2*hybrid + VMM on hybrid.
// Clocks: clk_bit 444.4 MHz and clk_fec 44.4 MHz from one PLL (clk_fec is also
// sent to the hybrids), clk_125 for the readout side. Slow-control settings are
// plain inputs. FIFO depths are this design's choice; the paper gives none for
// the FEC.
//
// Unused outputs by design: the FIFO fill counts of the FEC and UDP FIFOs, the
// receivers' error counters and the running timestamp are left unconnected
// (the timestamp reaches the data only through the markers).
module fec_top #(
  parameter int unsigned N_HYB          = 8,
  parameter int unsigned VMM_FIFO_DEPTH = 1024,
  parameter int unsigned FEC_FIFO_DEPTH = 1024,
  parameter int unsigned UDP_FIFO_DEPTH = 4096,
  parameter int unsigned BC_BITS        = 12,
  localparam int unsigned NV            = 2 * N_HYB
) (
  input  logic               clk_bit,
  input  logic               clk_fec,
  input  logic               clk_125,
  input  logic               rst,
  // HDMI pairs
  input  logic [NV-1:0]      data_sin,
  output logic [N_HYB-1:0]   cmd_sout,
  // slow control
  input  logic               acq_on,
  input  logic [BC_BITS-1:0] reset_latency,
  input  logic [BC_BITS-1:0] latency_jitter,
  input  logic [BC_BITS-1:0] max_latency,
  input  logic               test_pulse,
  input  logic [N_HYB-1:0]   cfg_valid,
  input  logic [7:0]         cfg_data,
  input  logic               cfg_last,
  output logic [N_HYB-1:0]   cfg_ready,
  // UDP FIFO read side (125 MHz)
  input  logic               udp_rd,
  output logic [7:0]         udp_data,
  output logic               udp_empty,
  // status
  output logic [NV-1:0]      link_locked,
  output logic [31:0]        n_present   [NV],
  output logic [31:0]        n_prev_same [NV],
  output logic [31:0]        n_prev_prev [NV],
  output logic [31:0]        n_invalid   [NV],
  output logic [31:0]        n_markers   [NV],
  output logic [31:0]        n_dropped,
  output logic [31:0]        n_sched_stall
);
  // ---------------- time base (clk_fec) ----------------
  logic [BC_BITS-1:0] bc;
  logic [3:0]         ovf;
  logic [41:0]        ts, marker_ts;
  logic               send_soft_reset, accept, marker;

  fec_timebase #(.BC_BITS(BC_BITS)) u_tb (
    .clk(clk_fec), .rst, .acq_on, .reset_latency, .bc, .ovf, .ts, .send_soft_reset,
    .accept, .marker, .marker_ts);

  // ---------------- command links ----------------
  for (genvar h = 0; h < N_HYB; h++) begin : g_hyb
    logic [9:0] code;
    fec_cmd_tx u_ctx (.clk(clk_fec), .rst, .acq_on, .soft_reset(send_soft_reset),
                      .test_pulse, .cfg_valid(cfg_valid[h]), .cfg_data, .cfg_last,
                      .cfg_ready(cfg_ready[h]), .code);
    oserdes10 u_ser (.clk_bit, .clk_div(clk_fec), .rst, .word(code), .sout(cmd_sout[h]));
  end

  // ---------------- per-VMM receive path ----------------
  logic [NV-1:0] vf_empty, vf_rd, vf_full, vf_wr;
  logic [47:0]   vf_q  [NV];
  logic [31:0]   drop_v [NV];

  for (genvar v = 0; v < NV; v++) begin : g_vmm
    logic [37:0] hit;
    logic        hit_valid;
    logic [15:0] err_count;
    logic [47:0] wdata;
    logic        wen;

    fec_hit_rx u_rx (.clk_bit, .clk_div(clk_fec), .rst, .sin(data_sin[v]), .hit, .hit_valid,
                     .locked(link_locked[v]), .err_count);

    latency_logic #(.BC_BITS(BC_BITS)) u_lat (
      .clk(clk_fec), .rst, .vmm_id(5'(v)), .latency_jitter, .max_latency,
      .bc, .ovf, .accept, .marker, .marker_ts, .hit, .hit_valid,
      .wr_data(wdata), .wr_en(wen), .n_present(n_present[v]), .n_prev_same(n_prev_same[v]),
      .n_prev_prev(n_prev_prev[v]), .n_invalid(n_invalid[v]), .n_markers(n_markers[v]));

    assign vf_wr[v] = wen && !vf_full[v];
    always_ff @(posedge clk_fec) begin
      if (rst)                     drop_v[v] <= '0;
      else if (wen && vf_full[v])  drop_v[v] <= drop_v[v] + 1'b1;
    end

    async_fifo #(.WIDTH(48), .DEPTH(VMM_FIFO_DEPTH)) u_vf (
      .wr_clk(clk_fec), .wr_rst(rst), .wr_en(vf_wr[v]), .wr_data(wdata), .full(vf_full[v]),
      .rd_clk(clk_125), .rd_rst(rst), .rd_en(vf_rd[v]), .rd_data(vf_q[v]), .empty(vf_empty[v]));
  end

  always_comb begin
    n_dropped = '0;
    for (int v = 0; v < NV; v++) n_dropped = n_dropped + drop_v[v];
  end

  // ---------------- common readout part (clk_125) ----------------
  logic        ff_full, ff_empty, ff_wr, ff_rd;
  logic [47:0] ff_din, ff_q;
  logic        uf_full, uf_wr;
  logic [7:0]  uf_din;

  fair_scheduler #(.N(NV), .WIDTH(48)) u_sched (
    .clk(clk_125), .rst, .src_empty(vf_empty), .src_data(vf_q), .src_rd(vf_rd),
    .dst_full(ff_full), .dst_wr(ff_wr), .dst_data(ff_din));

  always_ff @(posedge clk_125) begin
    if (rst)                          n_sched_stall <= '0;
    else if (ff_full && !(&vf_empty)) n_sched_stall <= n_sched_stall + 1'b1;
  end

  sync_fifo #(.WIDTH(48), .DEPTH(FEC_FIFO_DEPTH)) u_fecfifo (
    .clk(clk_125), .rst, .wr_en(ff_wr), .wr_data(ff_din), .full(ff_full),
    .rd_en(ff_rd), .rd_data(ff_q), .empty(ff_empty), .count());

  udp_splitter u_split (.clk(clk_125), .rst, .src_empty(ff_empty), .src_data(ff_q),
                        .src_rd(ff_rd), .dst_full(uf_full), .dst_wr(uf_wr), .dst_data(uf_din));

  sync_fifo #(.WIDTH(8), .DEPTH(UDP_FIFO_DEPTH)) u_udpfifo (
    .clk(clk_125), .rst, .wr_en(uf_wr), .wr_data(uf_din), .full(uf_full),
    .rd_en(udp_rd && !udp_empty), .rd_data(udp_data), .empty(udp_empty), .count());
endmodule
