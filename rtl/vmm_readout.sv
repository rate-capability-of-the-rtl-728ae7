// vmm_readout: data readout block for one VMM3a (ESS hybrid firmware).
//
// Works on the 177.7 MHz process clock, in readout cycles of FRAME = 20 periods
// numbered by `phase` from token_gen (CKTK is high in phases 0..4).
//  * Flag detection: when the VMM holds data for the token it raises data0. The
//    line is sampled on every rising edge; a high sample taken no later than
//    phase FRAME-CKDT_PULSES-2 starts a transfer. (In the paper's timing diagram
//    the flag is detected at cycle 9 and CKDT is enabled at cycle 10.)
//  * CKDT: the enable is high for CKDT_PULSES = 10 periods; it is re-timed on
//    the falling edge and ANDed with the process clock, giving 10 glitch-free
//    CKDT pulses in cycles 11..20, in phase with the process clock (like an
//    ODDR2 clock forward).
//  * DDR capture (IDDR2 equivalent): data0/data1 are sampled on the rising and
//    falling process-clock edges. The 10 rising and first 9 falling edges of
//    CKDT give 19 bits per line; data0 carries the even-numbered bits of the
//    38-bit hit counted from the MSB (the flag first) and data1 the odd ones
//    (the over-threshold bit first), following the diagram's labels
//    "Data line 0 (flag, channel, ...)" and "Data line 1 (THL, channel, ...)".
//    The exact interleaving is this design's assumption.
//  * The 38-bit hit, padded with two zeros in the MSBs to 40 bits, is written to
//    the hit FIFO with a one-cycle `hit_valid` in the first period of the next
//    readout cycle, together with the next token.
// Only the DDR mode used by the ESS firmware is built; SDR is not.
module vmm_readout #(
  parameter int unsigned FRAME       = 20,
  parameter int unsigned CKDT_PULSES = 10
) (
  input  logic                     clk,      // process clock
  input  logic                     rst,
  input  logic [$clog2(FRAME)-1:0] phase,
  input  logic                     data0,
  input  logic                     data1,
  output logic                     ckdt,
  output logic [39:0]              hit_data,
  output logic                     hit_valid,
  output logic [31:0]              hit_count
);
  localparam int unsigned LAST_FLAG_PHASE = FRAME - CKDT_PULSES - 2;

  // IDDR2 equivalent
  logic r0, r1, f0, f1;
  always_ff @(posedge clk) begin
    r0 <= data0;
    r1 <= data1;
  end
  always_ff @(negedge clk) begin
    f0 <= data0;
    f1 <= data1;
  end

  logic                              en, en_l, ck_active;
  logic [$clog2(CKDT_PULSES+1)-1:0]  en_cnt, pair_cnt;
  logic [35:0]                       sr;
  logic [39:0]                       sr_next;

  assign sr_next = {sr[35:0], r0, r1, f0, f1};

  always_ff @(posedge clk) begin
    if (rst) begin
      en        <= 1'b0;
      en_cnt    <= '0;
      ck_active <= 1'b0;
      pair_cnt  <= '0;
      sr        <= '0;
      hit_valid <= 1'b0;
      hit_data  <= '0;
      hit_count <= '0;
    end else begin
      hit_valid <= 1'b0;
      ck_active <= en;
      // flag detection and CKDT enable
      if (!en && !ck_active && pair_cnt == '0 && r0 &&
          phase <= $clog2(FRAME)'(LAST_FLAG_PHASE)) begin
        en     <= 1'b1;
        en_cnt <= '0;
      end else if (en) begin
        if (en_cnt == $bits(en_cnt)'(CKDT_PULSES-1)) en <= 1'b0;
        en_cnt <= en_cnt + 1'b1;
      end
      // one rise/fall sample pair per CKDT pulse
      if (ck_active) begin
        sr <= sr_next[35:0];
        if (pair_cnt == $bits(pair_cnt)'(CKDT_PULSES-1)) begin
          pair_cnt  <= '0;
          hit_data  <= {2'b00, sr_next[39:2]};
          hit_valid <= 1'b1;
          hit_count <= hit_count + 1'b1;
        end else begin
          pair_cnt <= pair_cnt + 1'b1;
        end
      end
    end
  end

  // CKDT clock forwarding: enable re-timed on the falling edge, then gated.
  always_ff @(negedge clk) begin
    if (rst) en_l <= 1'b0;
    else     en_l <= en;
  end
  assign ckdt = clk & en_l;

  initial assert (2 * CKDT_PULSES - 1 == 19) else $error("19 bits per data line expected");
endmodule
