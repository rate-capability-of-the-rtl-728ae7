// srs_pkg: types and constants shared by the VMM3a hybrid and FEC readout logic.
//
// The VMM3a hit layout (38 bits: data flag, over-threshold flag, 6-bit channel,
// 10-bit ADC, 8-bit TDC, 12-bit BCID) and the 48-bit FEC word sizes (38-bit hit
// + 5-bit VMM-ID + 5-bit overflow offset; 42-bit timestamp + 5-bit VMM-ID +
// 1-bit flag) follow the published readout scheme. The order of the fields inside
// the 38-bit hit, the bit placement inside the 48-bit words and the command codes
// on the FEC-to-hybrid link are this design's own choices.
//
// Some constants (HIT_BITS, HIT_PAD, FEC_BITS, K28_5, OFS_MINUS1, OFS_INVALID)
// are used only by the testbenches and documentation of the word formats, so a
// linter reports them as unused in the synthesised design.
package srs_pkg;

  localparam int unsigned HIT_BITS    = 38;  // one VMM3a hit
  localparam int unsigned HIT_PAD     = 40;  // hit padded with two zeros
  localparam int unsigned FEC_BITS    = 48;  // FEC hit / marker word
  localparam int unsigned TS_BITS     = 42;  // FEC timestamp in markers
  localparam int unsigned VMMID_BITS  = 5;
  localparam int unsigned OFS_BITS    = 5;   // signed overflow offset -16..15

  // 38-bit VMM3a hit (Table "data format"), MSB first as listed there.
  typedef struct packed {
    logic        flag;      // data flag, always 1
    logic        thr;       // over-threshold flag (0 only with neighbouring logic)
    logic [5:0]  channel;
    logic [9:0]  adc;       // PDO
    logic [7:0]  tdc;       // TDO
    logic [11:0] bcid;      // coarse time, Gray coded as sent by the VMM3a
  } vmm_hit_t;

  // 48-bit hit word sent by the FEC: bit 47 is the VMM data flag (=1).
  typedef struct packed {
    vmm_hit_t                hit;
    logic [VMMID_BITS-1:0]   vmm_id;
    logic [OFS_BITS-1:0]     offset;   // two's complement overflow offset
  } fec_hit_t;

  // 48-bit marker: bit 47 is 0.
  typedef struct packed {
    logic                    flag;     // always 0
    logic [VMMID_BITS-1:0]   vmm_id;
    logic [TS_BITS-1:0]      timestamp;
  } fec_marker_t;

  // 8b/10b comma used as idle and alignment character.
  localparam logic [7:0] K28_5 = 8'hBC;

  // Commands on the FEC-to-hybrid trigger/config pair (data characters that
  // follow a K28.5 idle). Codes are this design's own.
  typedef enum logic [7:0] {
    CMD_ACQ_ON     = 8'h01,
    CMD_ACQ_OFF    = 8'h02,
    CMD_SOFT_RESET = 8'h03,
    CMD_TEST_PULSE = 8'h04,
    CMD_CONFIG     = 8'h10   // followed by VMM index byte and config bytes
  } cmd_t;

  // Overflow offset codes from the latency logic.
  localparam logic [OFS_BITS-1:0] OFS_MINUS1  = 5'b11111;  // -1
  localparam logic [OFS_BITS-1:0] OFS_INVALID = 5'b10000;  // -16

endpackage
