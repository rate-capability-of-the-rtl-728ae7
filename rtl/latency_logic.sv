// latency_logic: assigns each VMM3a hit to a BC overflow period and builds the
// 48-bit words written into the VMM's FIFO on the FEC.
//
// On arrival the hit's BCID (sent Gray coded by the VMM, decoded here) is
// compared with the FEC BC counter following the paper's flow chart
// (n = present overflow counter, all comparisons on BC values, 4096 = 2^BC_BITS):
//   FEC_BC >= BCID:  FEC_BC - BCID <  max_latency   -> present cycle, offset n
//                    otherwise                      -> invalid, offset -16
//   FEC_BC <  BCID:  BCID - FEC_BC <= latency_jitter -> present cycle, offset n
//                    BCID + max_latency > FEC_BC + 4096:
//                        n > 0 -> previous cycle, present marker,  offset n-1
//                        n = 0 -> previous cycle, previous marker, offset -1
//                    otherwise                      -> invalid, offset -16
// The offset is a 5-bit two's complement field; -16 and the flow chart's
// "16" are the same 5-bit code. Hits go out as {38-bit hit, VMM-ID, offset}
// (bit 47 = VMM data flag = 1). On `marker` the word {0, VMM-ID, 42-bit
// timestamp} is written instead; a hit arriving in the same cycle waits one
// cycle (hits arrive at most every 5 cycles). Hits before `accept` are dropped.
// Counters report how often each case of the flow chart occurred.
// The paper states the previous-cycle test as a strict comparison ("FEC BC
// counter plus 4096 is smaller than the BCID plus the maximum latency"); the
// same-cycle test is made strict as well so that a hit is valid exactly when
// its latency is below max_latency, whichever side of an overflow it falls.
module latency_logic #(
  parameter int unsigned BC_BITS  = 12,
  parameter int unsigned OVF_BITS = 4
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [4:0]          vmm_id,
  input  logic [BC_BITS-1:0]  latency_jitter,
  input  logic [BC_BITS-1:0]  max_latency,
  // time base
  input  logic [BC_BITS-1:0]  bc,
  input  logic [OVF_BITS-1:0] ovf,
  input  logic                accept,
  input  logic                marker,
  input  logic [41:0]         marker_ts,
  // hit from the receiver
  input  logic [37:0]         hit,
  input  logic                hit_valid,
  // to the VMM hit FIFO
  output logic [47:0]         wr_data,
  output logic                wr_en,
  // statistics
  output logic [31:0]         n_present,
  output logic [31:0]         n_prev_same,
  output logic [31:0]         n_prev_prev,
  output logic [31:0]         n_invalid,
  output logic [31:0]         n_markers
);
  import srs_pkg::*;

  function automatic logic [11:0] gray2bin(input logic [11:0] g);
    logic [11:0] b;
    b[11] = g[11];
    for (int i = 10; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  typedef enum logic [1:0] {C_PRESENT, C_PREV_SAME, C_PREV_PREV, C_INVALID} case_t;

  logic [37:0]        hq;        // hit being classified (held if a marker wins)
  logic               hq_valid;
  logic [BC_BITS-1:0] bcid;
  logic [BC_BITS:0]   lhs, rhs;
  case_t              cls;
  logic [4:0]         offset;

  assign bcid = BC_BITS'(gray2bin(hq[11:0]));
  assign lhs  = {1'b0, bcid} + {1'b0, max_latency};
  assign rhs  = {1'b1, bc};                        // FEC BC + 4096

  always_comb begin
    offset = 5'(ovf);
    if (bc >= bcid) begin
      cls = (bc - bcid < max_latency) ? C_PRESENT : C_INVALID;
    end else if (bcid - bc <= latency_jitter) begin
      cls = C_PRESENT;
    end else if (lhs > rhs) begin
      cls = (ovf != '0) ? C_PREV_SAME : C_PREV_PREV;
    end else begin
      cls = C_INVALID;
    end
    unique case (cls)
      C_PRESENT:   offset = 5'(ovf);
      C_PREV_SAME: offset = 5'(ovf) - 5'd1;
      C_PREV_PREV: offset = OFS_MINUS1;
      C_INVALID:   offset = OFS_INVALID;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hq          <= '0;
      hq_valid    <= 1'b0;
      wr_en       <= 1'b0;
      wr_data     <= '0;
      n_present   <= '0;
      n_prev_same <= '0;
      n_prev_prev <= '0;
      n_invalid   <= '0;
      n_markers   <= '0;
    end else begin
      wr_en <= 1'b0;
      if (marker) begin
        wr_en     <= 1'b1;
        wr_data   <= {1'b0, vmm_id, marker_ts};
        n_markers <= n_markers + 1'b1;
      end else if (hq_valid) begin
        wr_en   <= 1'b1;
        wr_data <= {hq, vmm_id, offset};
        unique case (cls)
          C_PRESENT:   n_present   <= n_present + 1'b1;
          C_PREV_SAME: n_prev_same <= n_prev_same + 1'b1;
          C_PREV_PREV: n_prev_prev <= n_prev_prev + 1'b1;
          C_INVALID:   n_invalid   <= n_invalid + 1'b1;
        endcase
      end
      // load a new hit once the held one has gone out
      if (hit_valid && accept) begin
        hq       <= hit;
        hq_valid <= 1'b1;
      end else if (!marker) begin
        hq_valid <= 1'b0;
      end
    end
  end

  a_no_hit_overrun: assert property (@(posedge clk) disable iff (rst)
                                     !(hit_valid && accept && hq_valid && marker));
endmodule
