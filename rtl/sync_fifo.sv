// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used on the FEC for the 48-bit FEC hit FIFO and the 8-bit UDP FIFO, both
// written and read at 125 MHz. Storage is a plain array (maps to block RAM or
// distributed RAM). `rd_data` shows the oldest word whenever `empty` is low;
// `rd_en` pops it. A write when full and a read when empty are ignored and
// flagged by assertions. The depths are not given in the paper and are this
// design's choice (parameter DEPTH, a power of two).
module sync_fifo #(
  parameter int unsigned WIDTH = 48,
  parameter int unsigned DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  assign count   = wptr - rptr;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (wr_en && !full) wptr <= wptr + 1'b1;
      if (rd_en && !empty) rptr <= rptr + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(rd_en && empty));

endmodule
