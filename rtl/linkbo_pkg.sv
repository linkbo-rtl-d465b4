// linkbo_pkg - constants and types shared by the LinkBo single-wire interface.
//
// The link carries Manchester-coded bits (IEEE 802.3 convention: a rising
// edge in the middle of a bit slot is a 1, a falling edge a 0) over one
// open-drain wire that idles high. One Manchester bit slot (Mb) lasts
// MB_CYCLES_DEF clock cycles; ten cycles per slot follows the prescaler count
// 0..9 drawn for one slot in the protocol description, and gives 300 kbit/s
// at a 3 MHz clock. CRC-4 uses the polynomial x^4 + x + 1. Field widths
// (3-bit size, 8-bit payload bytes, 4-bit CRC) are the protocol's own. The
// timing tolerances derived from MB_CYCLES in the functions below are this
// implementation's choice.
package linkbo_pkg;

  localparam int unsigned MB_CYCLES_DEF = 10;  // clock cycles per Manchester slot
  localparam int unsigned CW_DEF        = 8;   // width of the slot-timing counters

  localparam int unsigned BYTE_W = 8;          // payload byte
  localparam int unsigned SIZE_W = 3;          // LP size field: 1..7 bytes
  localparam int unsigned CRC_W  = 4;          // CRC field

  localparam logic [CRC_W-1:0] CRC_POLY = 4'b0011;  // x^4 + x + 1 (x^4 implicit)

  // Fields of a message, also the select of the TX output multiplexer.
  typedef enum logic [1:0] {
    FLD_SYNC = 2'd0,
    FLD_SIZE = 2'd1,
    FLD_DATA = 2'd2,
    FLD_CRC  = 2'd3
  } field_e;

  // One bit-serial CRC step (MSB-first, no reflection).
  function automatic logic [CRC_W-1:0] crc4_step(input logic [CRC_W-1:0] crc, input logic din);
    logic fb;
    fb = crc[CRC_W-1] ^ din;
    return {crc[CRC_W-2:0], 1'b0} ^ (fb ? CRC_POLY : '0);
  endfunction

  // A low level longer than this many cycles marks a high-priority SYNC and
  // an interrupt: one slot plus a quarter slot of tolerance.
  function automatic int unsigned hp_threshold(input int unsigned mb);
    return mb + mb / 4;
  endfunction

endpackage
