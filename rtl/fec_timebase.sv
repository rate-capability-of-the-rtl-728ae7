// fec_timebase: FEC BC counter, overflow counter, 42-bit timestamp and
// soft-reset timing.
//
// Runs on the 44.4 MHz FEC clock, one count per BC period (22.5 ns). When the
// acquisition is started (`acq_on` rises) all counters start from zero: the
// 12-bit BC counter `bc`, the 4-bit overflow counter `ovf` (incremented at
// every BC wrap, 0..15) and the 42-bit timestamp `ts`. When `bc` first reaches
// 4096 - reset_latency (4049 for the 47-cycle latency of 2 m HDMI cables) the
// block asks for the soft reset command to be sent to the hybrids
// (`send_soft_reset`, one cycle); from then on `accept` is high and hits are
// taken. Whenever `ovf` wraps from 15 to 0 (every 16 BC periods of 4096, i.e.
// 1.47 ms) `marker` pulses with `marker_ts`, the timestamp of that moment.
// While `acq_on` is low everything is held at zero. Counting the overflows and
// the timestamp from the acquisition start is this design's choice.
module fec_timebase #(
  parameter int unsigned BC_BITS  = 12,
  parameter int unsigned OVF_BITS = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 acq_on,
  input  logic [BC_BITS-1:0]   reset_latency,
  output logic [BC_BITS-1:0]   bc,
  output logic [OVF_BITS-1:0]  ovf,
  output logic [41:0]          ts,
  output logic                 send_soft_reset,
  output logic                 accept,
  output logic                 marker,
  output logic [41:0]          marker_ts
);
  logic [BC_BITS-1:0] reset_at;
  assign reset_at = BC_BITS'(0) - reset_latency;

  always_ff @(posedge clk) begin
    if (rst || !acq_on) begin
      bc              <= '0;
      ovf             <= '0;
      ts              <= '0;
      send_soft_reset <= 1'b0;
      accept          <= 1'b0;
      marker          <= 1'b0;
      marker_ts       <= '0;
    end else begin
      bc              <= bc + 1'b1;
      ts              <= ts + 1'b1;
      send_soft_reset <= 1'b0;
      marker          <= 1'b0;
      if (!accept && bc == reset_at) begin
        send_soft_reset <= 1'b1;
        accept          <= 1'b1;
      end
      if (bc == '1) begin
        ovf <= ovf + 1'b1;
        if (ovf == '1) begin
          marker    <= 1'b1;
          marker_ts <= ts + 1'b1;
        end
      end
    end
  end
endmodule
