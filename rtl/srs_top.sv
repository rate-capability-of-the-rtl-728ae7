// srs_top: one RD51 SRS FEC with N_HYB RD51 VMM3a hybrids (two VMM3a each).
//
// Wires fec_top to N_HYB hybrid_top instances through the HDMI pairs of each
// hybrid cable: two data pairs (hybrid to FEC, one per VMM3a) and the
// trigger/config pair (FEC to hybrid). The DVMM adapter card and the cables
// carry no logic and are plain wires here; the base clock the FEC sends to the
// hybrids is the common clk_fec input, and the hybrid PLL outputs (88.8 MHz,
// 177.7 MHz, 444.4 MHz) are inputs too. The VMM3a pins of all hybrids are
// ports (index = 2*hybrid + VMM), as is the read side of the FEC's UDP FIFO,
// which the Ethernet framer would drain. Default: 8 hybrids, 16 VMM3a, the full
// capacity of one FEC with a DVMM card.
module srs_top #(
  parameter int unsigned N_HYB      = 8,
  parameter int unsigned BC_BITS    = 12,
  localparam int unsigned NV        = 2 * N_HYB
) (
  input  logic               clk_fec,     // 44.4 MHz, FEC logic and hybrid base clock
  input  logic               clk_bit,     // 444.4 MHz SERDES clock
  input  logic               clk_bc2,     // 88.8 MHz CKBC generator clock
  input  logic               clk_proc,    // 177.7 MHz hybrid readout clock
  input  logic               clk_125,     // 125 MHz FEC readout / Ethernet clock
  input  logic               rst,
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
  // VMM3a pins
  output logic [N_HYB-1:0]   ckbc,
  output logic [N_HYB-1:0]   cktp,
  output logic [N_HYB-1:0]   vmm_srst,
  output logic [NV-1:0]      cktk,
  output logic [NV-1:0]      ckdt,
  input  logic [NV-1:0]      data0,
  input  logic [NV-1:0]      data1,
  output logic [NV-1:0]      cfg_sck,
  output logic [NV-1:0]      cfg_sdi,
  output logic [NV-1:0]      cfg_cs_n,
  // UDP FIFO read side
  input  logic               udp_rd,
  output logic [7:0]         udp_data,
  output logic               udp_empty,
  // status
  output logic [N_HYB-1:0]   hyb_acq_en,
  output logic [N_HYB-1:0]   hyb_cmd_locked,
  output logic [NV-1:0]      fec_link_locked,
  output logic [31:0]        hits_read   [NV],
  output logic [31:0]        hits_dropped_hybrid [NV],
  output logic [31:0]        n_present   [NV],
  output logic [31:0]        n_prev_same [NV],
  output logic [31:0]        n_prev_prev [NV],
  output logic [31:0]        n_invalid   [NV],
  output logic [31:0]        n_markers   [NV],
  output logic [31:0]        n_dropped_fec,
  output logic [31:0]        n_sched_stall
);
  logic [NV-1:0]    data_link;
  logic [N_HYB-1:0] cmd_link;

  fec_top #(.N_HYB(N_HYB), .BC_BITS(BC_BITS)) u_fec (
    .clk_bit, .clk_fec, .clk_125, .rst, .data_sin(data_link), .cmd_sout(cmd_link),
    .acq_on, .reset_latency, .latency_jitter, .max_latency, .test_pulse,
    .cfg_valid, .cfg_data, .cfg_last, .cfg_ready, .udp_rd, .udp_data, .udp_empty,
    .link_locked(fec_link_locked), .n_present, .n_prev_same, .n_prev_prev, .n_invalid,
    .n_markers, .n_dropped(n_dropped_fec), .n_sched_stall);

  for (genvar h = 0; h < N_HYB; h++) begin : g_hyb
    logic [31:0] hr [2];
    logic [31:0] hd [2];
    hybrid_top u_hyb (
      .clk_word(clk_fec), .clk_bc2, .clk_proc, .clk_bit, .rst,
      .cmd_sin(cmd_link[h]), .data_sout(data_link[2*h +: 2]),
      .ckbc(ckbc[h]), .cktp(cktp[h]), .vmm_srst(vmm_srst[h]),
      .cktk(cktk[2*h +: 2]), .ckdt(ckdt[2*h +: 2]), .data0(data0[2*h +: 2]),
      .data1(data1[2*h +: 2]), .cfg_sck(cfg_sck[2*h +: 2]), .cfg_sdi(cfg_sdi[2*h +: 2]),
      .cfg_cs_n(cfg_cs_n[2*h +: 2]), .acq_en(hyb_acq_en[h]), .cmd_locked(hyb_cmd_locked[h]),
      .hits_read(hr), .hits_dropped(hd));
    assign hits_read[2*h]             = hr[0];
    assign hits_read[2*h+1]           = hr[1];
    assign hits_dropped_hybrid[2*h]   = hd[0];
    assign hits_dropped_hybrid[2*h+1] = hd[1];
  end
endmodule
