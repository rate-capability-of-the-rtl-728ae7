// async_fifo: dual-clock first-word-fall-through FIFO with Gray-code pointers.
//
// On the hybrid it holds up to 1024 padded 40-bit hits between the 177.7 MHz
// readout clock and the 44.4 MHz link clock (depth 1024 is the paper's); on the
// FEC it is the per-VMM 48-bit hit FIFO written at 44.4 MHz and read by the
// 125 MHz scheduler (depth there is this design's choice). Pointers cross
// domains as Gray codes through two-flop synchronisers, so `full` and `empty`
// are conservative by two cycles of the other clock. `rd_data` shows the oldest
// word while `empty` is low; `rd_en` pops it. Each side has its own reset.
module async_fifo #(
  parameter int unsigned WIDTH = 40,
  parameter int unsigned DEPTH = 1024
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in read domain

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [AW:0] wbin_next;
  assign wbin_next = wbin + 1'b1;
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin  <= wbin_next;
        wgray <= b2g(wbin_next);
      end
    end
  end

  // read side
  logic [AW:0] rbin_next;
  assign rbin_next = rbin + 1'b1;
  assign empty   = (rgray == wgray_r2);
  assign rd_data = mem[rbin[AW-1:0]];

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rbin  <= rbin_next;
        rgray <= b2g(rbin_next);
      end
    end
  end

  a_no_overflow:  assert property (@(posedge wr_clk) disable iff (wr_rst) !(wr_en && full));
  a_no_underflow: assert property (@(posedge rd_clk) disable iff (rd_rst) !(rd_en && empty));

endmodule
