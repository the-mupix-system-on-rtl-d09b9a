// mupix_pkg: constants and types shared by the MuPix7 digital readout.
//
// The matrix is 32 columns by 40 rows of pixels, each latching an 8-bit
// Gray-coded time stamp; these three numbers follow the paper. The link
// slot type and the control characters of the frame format are this
// design's own choice: the readout emits one 16-bit slot (two bytes, each
// with a K-character flag) per 62.5 MHz cycle, which at 10 bits per byte
// after 8b/10b coding fills the 1.25 Gbit/s link exactly.
package mupix_pkg;

  localparam int unsigned COLS    = 32;  // columns of the matrix
  localparam int unsigned ROWS    = 40;  // pixels per column
  localparam int unsigned TS_BITS = 8;   // time-stamp width

  // 8b/10b control characters (K28.y) used by the frame format.
  localparam logic [7:0] K28_0 = 8'h1C;  // header: start of a readout cycle
  localparam logic [7:0] K28_4 = 8'h9C;  // trailer: end of a readout cycle
  localparam logic [7:0] K28_5 = 8'hBC;  // comma: idle / filler

  // One byte for the link with its control flag.
  typedef struct packed {
    logic       k;     // 1: control character, 0: data byte
    logic [7:0] data;
  } link_byte_t;

  // One 62.5 MHz link slot: hi is sent first.
  typedef struct packed {
    link_byte_t hi;
    link_byte_t lo;
  } link_slot_t;

  // Content of a column buffer.
  typedef struct packed {
    logic [7:0]         row;
    logic [TS_BITS-1:0] ts;
  } col_hit_t;

endpackage
