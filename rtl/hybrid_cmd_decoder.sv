// hybrid_cmd_decoder: command decoder of the hybrid's config and trigger logic.
//
// Consumes decoded characters from the trigger/config link (link_rx) on the
// 44.4 MHz link clock. A command is one data character after a K28.5 idle:
//   CMD_ACQ_ON / CMD_ACQ_OFF  set / clear the acquisition level `acq_en`
//   CMD_SOFT_RESET            one-cycle `soft_reset` (clears the VMM BCID)
//   CMD_TEST_PULSE            one-cycle `test_pulse` (starts a CKTP pulse)
//   CMD_CONFIG                followed by a VMM index byte and CFG_BYTES
//                             configuration bytes, written to `cfg_*`; after
//                             the last byte `cfg_done` pulses for that VMM.
// A K28.5 inside a configuration frame aborts it. The paper gives the function
// (start/stop of acquisition and other control commands, 1728-bit VMM
// configuration) but not the protocol; the framing and codes are this design's.
module hybrid_cmd_decoder #(
  parameter int unsigned CFG_BYTES = 216   // 1728 bits
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [7:0]                   rx_data,
  input  logic                         rx_k,
  input  logic                         rx_valid,
  output logic                         acq_en,
  output logic                         soft_reset,
  output logic                         test_pulse,
  output logic                         cfg_we,
  output logic                         cfg_vmm,
  output logic [$clog2(CFG_BYTES)-1:0] cfg_addr,
  output logic [7:0]                   cfg_byte,
  output logic                         cfg_done
);
  import srs_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_CMD, S_VMM, S_DATA} state_t;
  state_t state;
  logic [$clog2(CFG_BYTES)-1:0] nrx;
  logic last_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      acq_en     <= 1'b0;
      soft_reset <= 1'b0;
      test_pulse <= 1'b0;
      cfg_we     <= 1'b0;
      cfg_vmm    <= 1'b0;
      cfg_addr   <= '0;
      cfg_byte   <= '0;
      cfg_done   <= 1'b0;
      nrx        <= '0;
      last_q     <= 1'b0;
    end else begin
      soft_reset <= 1'b0;
      test_pulse <= 1'b0;
      cfg_we     <= 1'b0;
      cfg_done   <= 1'b0;
      if (rx_valid) begin
        if (rx_k) begin
          state <= S_CMD;
        end else begin
          unique case (state)
            S_IDLE: ;
            S_CMD: begin
              state <= S_IDLE;
              case (rx_data)
                CMD_ACQ_ON:     acq_en     <= 1'b1;
                CMD_ACQ_OFF:    acq_en     <= 1'b0;
                CMD_SOFT_RESET: soft_reset <= 1'b1;
                CMD_TEST_PULSE: test_pulse <= 1'b1;
                CMD_CONFIG:     state      <= S_VMM;
                default: ;
              endcase
            end
            S_VMM: begin
              cfg_vmm <= rx_data[0];
              nrx     <= '0;
              state   <= S_DATA;
            end
            S_DATA: begin
              cfg_we   <= 1'b1;
              cfg_byte <= rx_data;
              cfg_addr <= nrx;
              nrx      <= nrx + 1'b1;
              if (nrx == $bits(nrx)'(CFG_BYTES-1)) begin
                state    <= S_IDLE;
                last_q   <= 1'b1;
              end
            end
          endcase
        end
      end
      // cfg_done follows the write of the last byte
      if (last_q) begin
        cfg_done <= 1'b1;
        last_q   <= 1'b0;
      end
    end
  end
endmodule
