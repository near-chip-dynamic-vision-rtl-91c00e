// dvs_pkg: types and constants shared by the near-chip DVS event filter.
//
// Coordinates follow the filter's convention: x is the pixel row (0..H-1,
// 320 rows on the 480x320 sensor) and y is the pixel column (0..W-1, 480
// columns). The polarity travels as two one-hot bits, one per sign, so that a
// pixel that fired both ways in one window simply has both bits set. Field
// widths here are sized for the sensor (up to 512 rows and columns); the
// array dimensions themselves are module parameters.
package dvs_pkg;

  localparam int unsigned X_W  = 9;   // row address width
  localparam int unsigned Y_W  = 9;   // column address width
  localparam int unsigned CG_W = 6;   // column-group (8 columns) index width

  // One-hot polarity, two bits per pixel in the coincidence memories.
  typedef logic [1:0] pol_t;
  localparam pol_t POL_ON  = 2'b01;
  localparam pol_t POL_OFF = 2'b10;

  // Decoded event (x, y, p).
  typedef struct packed {
    logic [X_W-1:0] x;
    logic [Y_W-1:0] y;
    pol_t           p;
  } event_t;

  // G-AER packet type, bits [31:30] of the 32-bit sensor word.
  typedef enum logic [1:0] {
    GAER_TIME   = 2'b00,  // timestamp, not used by the filter
    GAER_COLUMN = 2'b01,  // column address: y in [8:0]
    GAER_GROUP  = 2'b10,  // row group: polarity [16], group [13:8], mask [7:0]
    GAER_RSVD   = 2'b11
  } gaer_type_e;

  // Beat from coincidence detection to the two aggregators.
  typedef enum logic [1:0] {
    BEAT_PIX    = 2'b00,  // active pixels of one row segment of 8 columns
    BEAT_WBEGIN = 2'b01,  // a tau window readout starts
    BEAT_WEND   = 2'b10   // a tau window readout ended
  } beat_kind_e;

  typedef struct packed {
    beat_kind_e      kind;
    logic [X_W-1:0]  row;
    logic [CG_W-1:0] cg;      // column group: columns cg*8 .. cg*8+7
    logic [7:0]      mask_v;  // vertical coincidences, bit i = column cg*8+i
    logic [7:0]      mask_h;  // horizontal coincidences
  } coin_beat_t;

  // Packet preamble "SAIC" in ASCII, sent first byte first.
  localparam logic [31:0] PREAMBLE = 32'h5341_4943;

endpackage
