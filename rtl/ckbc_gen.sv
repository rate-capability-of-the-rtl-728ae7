// ckbc_gen: bunch-crossing clock (CKBC) generator of the ESS hybrid firmware.
//
// A toggle flip-flop on the 88.8 MHz clock gives the fixed 44.4 MHz CKBC that
// drives the VMM3a BCID counter (22.5 ns BCID resolution). While `run` is low
// the output is held low (an own choice, so that the VMM's BCID counter only
// advances during acquisition). `bc_tick` is high in the 88.8 MHz period that
// precedes each rising CKBC edge, for logic that needs to know the BC phase.
module ckbc_gen (
  input  logic clk88,
  input  logic rst,
  input  logic run,
  output logic ckbc,
  output logic bc_tick
);
  always_ff @(posedge clk88) begin
    if (rst || !run) ckbc <= 1'b0;
    else             ckbc <= ~ckbc;
  end
  assign bc_tick = run && !ckbc;
endmodule
