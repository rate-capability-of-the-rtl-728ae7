// cktp_gen: test-pulse clock (CKTP) generator.
//
// Runs on the 177.7 MHz readout clock. A trigger command from the FEC
// (`trigger`, one cycle) produces one CKTP pulse of `width` clock periods,
// which makes the VMM3a inject its internal test charge into the channels that
// have test pulses enabled. With `periodic` set, pulses repeat every `period`
// clock periods until `periodic` is cleared. The paper only states that the
// test-pulse clock is generated on the 177.7 MHz clock and is started by a
// trigger command; pulse width and period registers are this design's.
module cktp_gen #(
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          trigger,
  input  logic          periodic,
  input  logic [CW-1:0] width,
  input  logic [CW-1:0] period,
  output logic          cktp,
  output logic [31:0]   pulse_count
);
  logic [CW-1:0] cnt;
  logic          busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt         <= '0;
      busy        <= 1'b0;
      cktp        <= 1'b0;
      pulse_count <= '0;
    end else if (!busy) begin
      if (trigger || periodic) begin
        busy        <= 1'b1;
        cktp        <= (width != '0);
        cnt         <= 1;
        pulse_count <= pulse_count + 1'b1;
      end
    end else begin
      cnt <= cnt + 1'b1;
      if (cnt >= width) cktp <= 1'b0;
      // single shot ends after the pulse; periodic mode after one period
      if ((!periodic && cnt >= width) || (periodic && cnt >= period - 1'b1 && cnt >= width))
        busy <= 1'b0;
    end
  end
endmodule
