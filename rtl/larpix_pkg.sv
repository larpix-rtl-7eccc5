// larpix_pkg: constants, record types and record layouts shared by the
// LArPix digital core.
//
// A LArPix chip talks to the outside world in 54-bit records. A hit record
// carries a 2-bit type, the 8-bit chip ID, the 7-bit channel ID, a 24-bit
// timestamp in system-clock cycles, the ADC value, a 2-bit FIFO status flag
// and a parity bit; these fields and widths follow the paper. Those fields
// add up to 52 bits, so the ADC value sits in the low 8 bits of a 10-bit data
// field to fill the record. The bit order (type in the LSBs, parity in the
// MSB) and the odd parity are this design's choices, as are the type codes and
// the layout of the configuration record (register address and data in place
// of channel/timestamp).
package larpix_pkg;

  localparam int unsigned NCHAN  = 32;   // analog inputs per chip
  localparam int unsigned REC_W  = 54;   // record width on the serial line
  localparam int unsigned TS_W   = 24;   // timestamp width
  localparam int unsigned ADC_W  = 8;    // SAR ADC resolution
  localparam int unsigned CHIP_W = 8;    // chip ID width
  localparam int unsigned CH_W   = 7;    // channel ID field width
  localparam int unsigned NREG   = 51;   // configuration registers

  // Configuration register addresses.
  localparam int unsigned REG_TRIM0      = 0;   // 0..31: 5-bit trim per channel
  localparam int unsigned REG_GLOBAL_THR = 32;
  localparam int unsigned REG_PULSER_DAC = 33;
  localparam int unsigned REG_MASK0      = 34;  // 34..37: self-trigger mask, 1 = inhibited
  localparam int unsigned REG_EXTTRIG0   = 38;  // 38..41: external trigger enable
  localparam int unsigned REG_PULSE_EN0  = 42;  // 42..45: test pulse enable
  localparam int unsigned REG_MONITOR    = 46;  // [7] enable, [4:0] channel
  localparam int unsigned REG_PRST_CTRL  = 47;  // [0] periodic reset enable
  localparam int unsigned REG_PRST_LO    = 48;  // periodic reset interval, low byte
  localparam int unsigned REG_PRST_HI    = 49;  // periodic reset interval, high byte
  localparam int unsigned REG_CSA_CTRL   = 50;  // [0] amplifier high-gain mode

  typedef enum logic [1:0] {
    REC_DATA      = 2'd0,
    REC_TEST      = 2'd1,
    REC_CFG_WRITE = 2'd2,
    REC_CFG_READ  = 2'd3
  } rec_type_e;

  // Hit (data) record, MSB first.
  typedef struct packed {
    logic                parity;     // [53]
    logic [1:0]          fifo_flags; // [52:51] {full, half}
    logic [9:0]          data;       // [50:41] ADC value in [48:41]
    logic [TS_W-1:0]     timestamp;  // [40:17]
    logic [CH_W-1:0]     channel;    // [16:10]
    logic [CHIP_W-1:0]   chip_id;    // [9:2]
    rec_type_e           rtype;      // [1:0]
  } hit_rec_t;

  // Configuration record, MSB first.
  typedef struct packed {
    logic                parity;     // [53]
    logic [26:0]         unused;     // [52:26]
    logic [7:0]          reg_data;   // [25:18]
    logic [7:0]          reg_addr;   // [17:10]
    logic [CHIP_W-1:0]   chip_id;    // [9:2]
    rec_type_e           rtype;      // [1:0]
  } cfg_rec_t;

  // Parity bit that makes the XOR of all 54 bits equal to 1 (odd parity).
  function automatic logic odd_parity(input logic [REC_W-2:0] body);
    return ~(^body);
  endfunction

  function automatic logic parity_ok(input logic [REC_W-1:0] rec);
    return ^rec;
  endfunction

endpackage
