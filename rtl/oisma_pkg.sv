// oisma_pkg: types and constants shared by the OISMA array.
//
// Geometry: one array is 256 columns x 128 rows of 1T1R RRAM bitcells (4 KB),
// built as two 128 x 128 sub-arrays that share one address decoder. These
// numbers follow the paper. The array stores and multiplies numbers in the
// compressed 8-bit Bent-Pyramid format (BP8): each number occupies 8 adjacent
// columns, so a row holds 32 numbers.
//
// Bent-Pyramid (BP) numbers are fixed bit patterns for the values 0.0 .. 0.9.
// Two complementary sets exist: right-biased patterns (used for the
// multipliers, i.e. the input vector IN) and left-biased patterns (used for
// the multiplicands, i.e. the weights stored in the rows). ANDing one of each
// and counting the ones gives the product in tenths. The 10-bit tables below
// are the published BP10 datasets, bit 9 being the leftmost bit; BP8 keeps
// bits 8..1 (the outer bit of each pattern never contributes to a product).
//
// The control word (ctrl_t) carries the column control signals named in the
// column schematic: WE, S, Sb, R and Pre_en. Bitline drive states are
// Charge / Discharge / Floating.
package oisma_pkg;

  localparam int unsigned COLS         = 256;  // columns of one array
  localparam int unsigned SUB_COLS     = 128;  // columns of one sub-array
  localparam int unsigned ROWS         = 128;  // wordlines
  localparam int unsigned BP_BITS      = 8;    // compressed BP format
  localparam int unsigned NUMS_PER_ROW = COLS / BP_BITS;  // 32
  localparam int unsigned SUM_W        = 9;    // 0..256

  // Operation requested of the array.
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,
    OP_MAC   = 2'd1,   // bit-wise AND of IN with a row, then accumulate
    OP_WRITE = 2'd2
  } op_e;

  // Drive state of one bitline (BL or BLb) during a phase.
  typedef enum logic [1:0] {
    BL_FLOAT     = 2'd0,
    BL_CHARGE    = 2'd1,
    BL_DISCHARGE = 2'd2
  } bl_drive_e;

  // Column control signals, common to all columns.
  typedef struct packed {
    logic we;
    logic s;
    logic sb;
    logic r;
    logic pre_en;
  } ctrl_t;

  // BP10 datasets, index = value in tenths (0..9), bit 9 = leftmost bit.
  localparam logic [9:0] BP10_RIGHT [10] = '{
    10'b0000000000, 10'b0000010000, 10'b0000011000, 10'b0000011100,
    10'b0000111100, 10'b0000111110, 10'b0001111110, 10'b0001111111,
    10'b0011111111, 10'b0111111111
  };
  localparam logic [9:0] BP10_LEFT [10] = '{
    10'b0000000000, 10'b0000100000, 10'b0001100000, 10'b0011100000,
    10'b0011110000, 10'b0111110000, 10'b0111111000, 10'b1111111000,
    10'b1111111100, 10'b1111111110
  };

  // Right-biased BP8 pattern of a value in tenths (multiplier / input).
  function automatic logic [7:0] bp8_right(input logic [3:0] tenths);
    return (tenths > 4'd9) ? BP10_RIGHT[9][8:1] : BP10_RIGHT[tenths][8:1];
  endfunction

  // Left-biased BP8 pattern of a value in tenths (multiplicand / weight).
  function automatic logic [7:0] bp8_left(input logic [3:0] tenths);
    return (tenths > 4'd9) ? BP10_LEFT[9][8:1] : BP10_LEFT[tenths][8:1];
  endfunction

endpackage
