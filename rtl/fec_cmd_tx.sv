// fec_cmd_tx: FEC transmitter on the trigger/config pair of one hybrid.
//
// Sends K28.5 idles on the 44.4 MHz symbol clock and inserts commands as one
// data character after an idle: CMD_SOFT_RESET on `soft_reset`, CMD_ACQ_ON /
// CMD_ACQ_OFF whenever `acq_on` changes, CMD_TEST_PULSE on `test_pulse`, in
// that priority. Requests are latched until sent, so a soft-reset request is
// delayed by at most one symbol period plus any configuration frame in
// progress; its fixed part is absorbed in the reset latency. Configuration
// frames arrive as a byte stream (`cfg_valid`/`cfg_ready`, `cfg_last` on the
// final byte, already holding CMD_CONFIG, the VMM index and the 216 bytes) and
// are sent after one idle without further idles. The symbols feed an oserdes10.
// The paper says that control commands like acquisition start/stop and the soft
// reset travel on this pair, 8b/10b encoded; framing and codes are this design's.
module fec_cmd_tx (
  input  logic       clk,
  input  logic       rst,
  input  logic       acq_on,
  input  logic       soft_reset,
  input  logic       test_pulse,
  input  logic       cfg_valid,
  input  logic [7:0] cfg_data,
  input  logic       cfg_last,
  output logic       cfg_ready,
  output logic [9:0] code
);
  import srs_pkg::*;

  logic pend_srst, pend_tp, acq_sent, after_k, in_cfg;
  logic [7:0] tx_byte;
  logic       tx_k;
  logic       sel_srst, sel_acq, sel_tp;

  always_comb begin
    tx_k      = 1'b1;
    tx_byte   = K28_5;
    cfg_ready = 1'b0;
    sel_srst  = 1'b0;
    sel_acq   = 1'b0;
    sel_tp    = 1'b0;
    if (in_cfg) begin
      tx_k      = 1'b0;
      tx_byte   = cfg_data;
      cfg_ready = cfg_valid;
      if (!cfg_valid) begin
        tx_k    = 1'b1;     // stream stalled: frame is aborted by the idle
        tx_byte = K28_5;
      end
    end else if (after_k) begin
      if (pend_srst || soft_reset) begin
        tx_k = 1'b0; tx_byte = CMD_SOFT_RESET; sel_srst = 1'b1;
      end else if (acq_on != acq_sent) begin
        tx_k = 1'b0; tx_byte = acq_on ? CMD_ACQ_ON : CMD_ACQ_OFF; sel_acq = 1'b1;
      end else if (pend_tp || test_pulse) begin
        tx_k = 1'b0; tx_byte = CMD_TEST_PULSE; sel_tp = 1'b1;
      end else if (cfg_valid) begin
        tx_k      = 1'b0;
        tx_byte   = cfg_data;
        cfg_ready = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pend_srst <= 1'b0;
      pend_tp   <= 1'b0;
      acq_sent  <= 1'b0;
      after_k   <= 1'b0;
      in_cfg    <= 1'b0;
    end else begin
      after_k <= tx_k;
      if (soft_reset) pend_srst <= 1'b1;
      if (test_pulse) pend_tp   <= 1'b1;
      if (sel_srst) pend_srst <= 1'b0;
      if (sel_tp)   pend_tp   <= 1'b0;
      if (sel_acq)  acq_sent  <= acq_on;
      if (cfg_ready) in_cfg <= !cfg_last;
      else if (in_cfg && !cfg_valid) in_cfg <= 1'b0;
    end
  end

  logic rd_unused;
  enc8b10b u_enc (.clk, .rst, .en(1'b1), .is_k(tx_k), .data(tx_byte), .code, .rd_pos(rd_unused));
endmodule
