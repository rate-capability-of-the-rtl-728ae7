// vmm3a_model: behavioural model of the VMM3a digital readout interface (not
// synthesizable, testbench use only).
//
// Models what the hybrid readout logic sees of the ASIC in the continuous
// (non-ATLAS) mode: 64 channels that each hold at most one hit until it has been
// read out (a hit arriving at a busy channel is lost), a 12-bit Gray-coded BCID
// counter on CKBC that the soft reset clears, and the token ring. On each rising
// CKTK edge the token moves to the next channel above the last one read that
// holds a hit; after FLAG_DELAY the model raises data0 (the flag, first data
// bit) and data1 (the threshold bit) and then shifts one bit pair of the 38-bit
// hit on every CKDT edge, rising and falling, 19 pairs in all. When no channel
// above the last one read has a hit but a lower one does, the token wraps and
// that CKTK pulse returns no data (the "empty token" of the Bonn measurements).
// Hits are injected by the testbench through the `inject` task.
module vmm3a_model #(
  parameter realtime FLAG_DELAY = 40ns
) (
  input  logic ckbc,
  input  logic cktk,
  input  logic ckdt,
  input  logic srst,
  output logic data0,
  output logic data1
);
  timeunit 1ns; timeprecision 1ps;

  logic        pending [64];
  logic [37:0] word    [64];
  logic [11:0] bcid_bin;
  int          last_ch;
  logic        xfer;
  int          xfer_ch;
  int          idx;
  int          lost, sent, empty_tokens;

  initial begin
    for (int i = 0; i < 64; i++) begin
      pending[i] = 1'b0;
      word[i]    = '0;
    end
    bcid_bin     = '0;
    last_ch      = -1;
    xfer         = 1'b0;
    xfer_ch      = 0;
    idx          = 0;
    lost         = 0;
    sent         = 0;
    empty_tokens = 0;
    data0        = 1'b0;
    data1        = 1'b0;
  end

  function automatic logic [11:0] gray(input logic [11:0] b);
    return b ^ (b >> 1);
  endfunction

  always @(posedge ckbc or posedge srst) begin
    if (srst) bcid_bin <= '0;
    else      bcid_bin <= bcid_bin + 1'b1;
  end

  // Store a hit on a channel; returns 0 if the channel still holds one.
  function automatic bit inject(input int ch, input logic thr, input logic [9:0] adc,
                                input logic [7:0] tdc);
    if (pending[ch]) begin
      lost++;
      return 1'b0;
    end
    pending[ch] = 1'b1;
    word[ch]    = {1'b1, thr, 6'(ch), adc, tdc, gray(bcid_bin)};
    return 1'b1;
  endfunction

  // same, with an explicit BCID (binary) for latency-logic tests
  function automatic bit inject_bcid(input int ch, input logic [9:0] adc,
                                     input logic [7:0] tdc, input logic [11:0] b);
    if (pending[ch]) begin
      lost++;
      return 1'b0;
    end
    pending[ch] = 1'b1;
    word[ch]    = {1'b1, 1'b1, 6'(ch), adc, tdc, gray(b)};
    return 1'b1;
  endfunction

  function automatic int count_pending();
    int n = 0;
    for (int i = 0; i < 64; i++) if (pending[i]) n++;
    return n;
  endfunction

  always @(posedge cktk) begin
    if (!xfer) begin
      automatic int nxt = -1;
      automatic bit any = 1'b0;
      for (int i = 63; i >= 0; i--) begin
        if (pending[i]) begin
          any = 1'b1;
          if (i > last_ch) nxt = i;
        end
      end
      if (nxt >= 0) begin
        xfer    = 1'b1;
        xfer_ch = nxt;
        idx     = 0;
        #(FLAG_DELAY);
        data0 = word[xfer_ch][37];
        data1 = word[xfer_ch][36];
      end else if (any) begin
        last_ch = -1;          // token wraps: this pulse carries no data
        empty_tokens++;
      end
    end
  end

  always @(ckdt) begin
    if (xfer && idx < 19) begin
      #0.5;
      idx = idx + 1;
      if (idx == 19) begin
        data0 = 1'b0;
        data1 = 1'b0;
        pending[xfer_ch] = 1'b0;
        last_ch = xfer_ch;
        xfer    = 1'b0;
        sent++;
      end else begin
        data0 = word[xfer_ch][37-2*idx];
        data1 = word[xfer_ch][36-2*idx];
      end
    end
  end
endmodule
