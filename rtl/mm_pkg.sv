// mm_pkg: types and default sizes shared by the memristor platform.
//
// The array holds 8,192 hafnium-oxide memristors. They are paired into
// complementary two-transistor/two-resistor (2T2R) cells: each cell stores one
// bit as one device in the low-resistance state and its partner in the
// high-resistance state. The split of the 8,192 devices into 64 word lines by
// 64 cell columns (128 device columns, each with its own bit line and source
// line) is this design's choice; only the total device count is fixed.
package mm_pkg;

  // Default array geometry.
  parameter int unsigned DEF_ROWS = 64;   // word lines
  parameter int unsigned DEF_COLS = 64;   // complementary cell columns (2 devices each)

  // Digital-mode operations.
  //   OP_READ  : read a whole row through the sense amplifiers; each column
  //              returns the stored bit XNOR the column's input bit.
  //   OP_WRITE : program one complementary cell: SET one device, then RESET
  //              its partner.
  //   OP_FORM  : forming of one complementary cell: a SET-polarity pulse on
  //              the left device, then on the right device.
  //   OP_SET   : one SET-polarity pulse on one device (bit line high).
  //   OP_RESET : one RESET-polarity pulse on one device (source line high).
  typedef enum logic [2:0] {
    OP_READ  = 3'd0,
    OP_WRITE = 3'd1,
    OP_FORM  = 3'd2,
    OP_SET   = 3'd3,
    OP_RESET = 3'd4
  } op_e;

  // Analog-mode connection of one array line.
  typedef enum logic [1:0] {
    LINE_GND   = 2'b00,
    LINE_PAD_A = 2'b01,
    LINE_PAD_B = 2'b10,
    LINE_GND2  = 2'b11   // unused code, also ground
  } line_sel_e;

  // Operating mode of the array connections.
  typedef enum logic [1:0] {
    MODE_DIGITAL   = 2'd0,
    MODE_TO_ANALOG = 2'd1,   // all lines disconnected, on the way to analog
    MODE_ANALOG    = 2'd2,
    MODE_TO_DIGITAL= 2'd3    // all lines disconnected, on the way to digital
  } mode_e;

  // Bit encoding of a complementary cell: bit 1 means the left device (even
  // device column) is in the low-resistance state; side 0 is left, 1 right.

endpackage
