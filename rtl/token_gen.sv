// token_gen: VMM3a token clock (CKTK) generator and readout-cycle phase counter.
//
// A counter on the readout process clock (177.7 MHz in the ESS firmware) divides
// it by FRAME = 20, so one readout cycle lasts 20 process-clock periods and one
// token is sent per cycle (8.8 MHz). CKTK is high for the first TOKEN_HIGH = 5
// periods of each cycle (about 28 ns), as in the published readout timing
// diagram where "token n" covers cycles 1..5. Tokens run continuously while
// `acq_en` is high; while it is low the counter waits at FRAME-1, so the first
// token after enabling is a full one, and CKTK is low
// (an own choice). `phase` is the 0-based position of the current process-clock
// period inside the readout cycle (figure cycle number minus one); the data
// readout block uses it to place the flag window and the FIFO write.
module token_gen #(
  parameter int unsigned FRAME      = 20,
  parameter int unsigned TOKEN_HIGH = 5
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     acq_en,
  output logic                     cktk,
  output logic [$clog2(FRAME)-1:0] phase,
  output logic                     frame_start   // high in the first period of a cycle
);
  always_ff @(posedge clk) begin
    if (rst || !acq_en) begin
      phase <= $clog2(FRAME)'(FRAME-1);   // first enabled period is phase 0
      cktk  <= 1'b0;
    end else begin
      if (phase == $clog2(FRAME)'(FRAME-1)) phase <= '0;
      else                                  phase <= phase + 1'b1;
      // value for the period that starts at this edge
      cktk <= (phase == $clog2(FRAME)'(FRAME-1)) || (phase < $clog2(FRAME)'(TOKEN_HIGH-1));
    end
  end

  assign frame_start = cktk && (phase == '0);

  initial assert (TOKEN_HIGH < FRAME);
endmodule
