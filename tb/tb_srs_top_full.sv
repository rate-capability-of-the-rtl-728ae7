// tb_srs_top_full: the end-to-end test of tb_srs_top with the top at its
// default size: one FEC with 8 hybrids (16 VMM3a models), 12-bit BC counter
// with a marker every 65536 BC, latency jitter 4 and maximum latency 320 BC.
// The main run covers one full marker period so that hits of the last overflow
// period before a marker (offset -1) occur.
module tb_srs_top_full;
  timeunit 1ns; timeprecision 1ps;
  tb_srs_top #(.FULL(1'b1)) u_bench ();
endmodule
