// vmm_config: configuration memory and serial loader for one VMM3a.
//
// Holds the 1728-bit VMM3a configuration (global and per-channel settings) as
// CFG_BYTES = 216 bytes in a RAM written byte by byte from the command decoder.
// A `start` pulse shifts the whole image into the ASIC over a serial port:
// `cs_n` low for the transfer, `sdi` changes on the falling and is valid on the
// rising edge of `sck`, which runs at clk/2; byte 0 goes first, each byte MSB
// first. `busy` is high during the 2*1728-cycle transfer. The paper gives the
// 1728-bit size and that the image is kept in block RAM; the serial-port timing
// and bit order are this design's assumptions.
module vmm_config #(
  parameter int unsigned CFG_BYTES = 216
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         we,
  input  logic [$clog2(CFG_BYTES)-1:0] waddr,
  input  logic [7:0]                   wdata,
  input  logic                         start,
  output logic                         sck,
  output logic                         sdi,
  output logic                         cs_n,
  output logic                         busy
);
  logic [7:0] mem [CFG_BYTES];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  logic [$clog2(CFG_BYTES)-1:0] raddr;
  logic [2:0]                   bitn;
  logic [7:0]                   cur;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      sck   <= 1'b0;
      sdi   <= 1'b0;
      cs_n  <= 1'b1;
      raddr <= '0;
      bitn  <= '0;
      cur   <= '0;
    end else if (!busy) begin
      sck <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        cs_n  <= 1'b0;
        cur   <= mem[0];
        sdi   <= mem[0][7];
        raddr <= '0;
        bitn  <= '0;
      end
    end else begin
      sck <= ~sck;
      if (sck) begin
        // falling edge of sck: next bit
        if (bitn == 3'd7) begin
          bitn <= '0;
          if (raddr == $bits(raddr)'(CFG_BYTES-1)) begin
            busy <= 1'b0;
            cs_n <= 1'b1;
            sdi  <= 1'b0;
          end else begin
            raddr <= raddr + 1'b1;
            cur   <= mem[raddr + 1'b1];
            sdi   <= mem[raddr + 1'b1][7];
          end
        end else begin
          bitn <= bitn + 1'b1;
          sdi  <= cur[3'd6 - bitn];
        end
      end
    end
  end
endmodule
