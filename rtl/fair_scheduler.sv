// fair_scheduler: round-robin transfer from the per-VMM hit FIFOs into the
// common FEC hit FIFO.
//
// Runs on the 125 MHz readout clock. Each cycle in which the FEC FIFO is not
// full, the first non-empty VMM FIFO at or after the round-robin pointer is
// popped and its word written to the FEC FIFO; the pointer then moves past
// it, so every non-empty FIFO is served once before any is served again. One
// word per cycle at most (125 M words/s). The input FIFOs are
// first-word-fall-through. The paper states the function (fair scheduler at
// 125 MHz, one hit at a time from all non-empty FIFOs, only when the FEC FIFO
// is not full); the pointer-based round robin is this design's.
//
// The loop index is one bit wider than the FIFO select so that the modulo
// arithmetic cannot overflow; its top bit is unused.
module fair_scheduler #(
  parameter int unsigned N     = 16,
  parameter int unsigned WIDTH = 48
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [N-1:0]     src_empty,
  input  logic [WIDTH-1:0] src_data [N],
  output logic [N-1:0]     src_rd,
  input  logic             dst_full,
  output logic             dst_wr,
  output logic [WIDTH-1:0] dst_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr, sel;
  logic          found;

  always_comb begin
    found = 1'b0;
    sel   = ptr;
    for (int k = 0; k < N; k++) begin
      logic [IW:0] idx;
      idx = (IW+1)'((int'(ptr) + k) % N);
      if (!found && !src_empty[idx[IW-1:0]]) begin
        found = 1'b1;
        sel   = idx[IW-1:0];
      end
    end
  end

  always_comb begin
    src_rd   = '0;
    dst_wr   = found && !dst_full;
    dst_data = src_data[sel];
    if (dst_wr) src_rd[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst)         ptr <= '0;
    else if (dst_wr) ptr <= (int'(sel) == N - 1) ? '0 : sel + 1'b1;
  end

  a_onehot_rd: assert property (@(posedge clk) disable iff (rst) $onehot0(src_rd));
endmodule
