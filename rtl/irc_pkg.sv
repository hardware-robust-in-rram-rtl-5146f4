// irc_pkg: sizes and encodings shared by the in-RRAM-computing (IRC) macro.
//
// The macro is one 1024 x 1024 array of 1T1R RRAM cells. All 1024 word-lines
// (WL) can be raised at once; the bit-lines (BL) are organised in 64 groups of
// 16. Inside a group, BL[16g+0..7] form the positive side (G+) and
// BL[16g+8..15] the negative side (G-), and one sense amplifier per group
// compares the current of the two sides. These numbers, the ternary cell-pair
// encoding (+1 -> LRS/HRS, -1 -> HRS/LRS, 0 -> HRS/HRS) and the row layout
// (rows 0..31 extra bias, rows 32..571 the 540 weights of a 3x3x60 kernel) are
// those of the published design. The 2-bit code of a ternary weight and the
// meaning "one output channel per selected BL column" are this design's own.
package irc_pkg;

  // Array geometry.
  localparam int unsigned ROWS         = 1024;  // word-lines
  localparam int unsigned GROUPS       = 64;    // SA groups
  localparam int unsigned BL_PER_SIDE  = 8;     // BLs on G+ (and on G-) of one group
  localparam int unsigned BL_PER_GROUP = 2 * BL_PER_SIDE;
  localparam int unsigned BLS          = GROUPS * BL_PER_GROUP;  // 1024 bit-lines
  localparam int unsigned CHANNELS     = GROUPS * BL_PER_SIDE;   // 512 columns pairs

  // Row layout of the model without batch normalisation.
  localparam int unsigned BIAS_ROWS = 32;   // WL0..WL31: extra bias, input fixed to 1
  localparam int unsigned CONV_ROWS = 540;  // WL32..WL571: 3 x 3 x 60 kernel

  // Cell current of one LRS cell is GAIN_ONE units (1/32 of an LRS cell).
  localparam int unsigned GAIN_W   = 8;
  localparam int unsigned GAIN_ONE = 32;
  // Log-normal spread (sigma of ln I, x1000) of an LRS cell at WL = 0.44 V.
  localparam int unsigned VAR_SIGMA_MILLI = 420;

  // Sense amplifier window and cell current.
  localparam int unsigned I_MIN_UA = 35;    // lower end of the sensing range
  localparam int unsigned I_MAX_UA = 300;   // upper end / bit-line current limit

  // Ternary weight code (this design's own).
  typedef enum logic [1:0] {
    TW_ZERO = 2'b00,
    TW_POS  = 2'b01,
    TW_NEG  = 2'b10
  } tern_t;

  // One cell pair on the same word-line: 1 = LRS (formed), 0 = HRS (unformed).
  typedef struct packed {
    logic gp;  // cell on the positive bit-line
    logic gn;  // cell on the negative bit-line
  } cell_pair_t;

  typedef enum logic [0:0] {
    MODE_COMPUTE = 1'b0,
    MODE_PROGRAM = 1'b1
  } mode_t;

  // Ternary weight to cell pair; the unused code 2'b11 maps to weight 0.
  function automatic cell_pair_t map_ternary(input logic [1:0] w);
    cell_pair_t c;
    case (w)
      TW_POS:  c = '{gp: 1'b1, gn: 1'b0};
      TW_NEG:  c = '{gp: 1'b0, gn: 1'b1};
      default: c = '{gp: 1'b0, gn: 1'b0};
    endcase
    return c;
  endfunction

  // Bit-line index of column k of a group side (neg = 0: G+, neg = 1: G-).
  function automatic int unsigned bl_index(input int unsigned g, input int unsigned k,
                                           input logic neg, input int unsigned per_side);
    return g * 2 * per_side + (neg ? per_side : 0) + k;
  endfunction

endpackage
