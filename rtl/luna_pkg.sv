// luna_pkg: widths and types shared by the LUT-based compute-in-memory design.
//
// The multiplier is a 4b weight (W) x 4b input (Y) divide-and-conquer LUT
// multiplier: Y is split into two 2-bit halves, each half selects one of four
// 6-bit LUT entries (W x 00 .. W x 11), and the two partial products are
// combined as (Z_MSB << 2) + Z_LSB into an 8-bit result. These widths follow
// the paper's 4b configuration. The array row layout (W in the high nibble, Y
// in the low nibble of the even rows, the product in the odd rows) is read
// from the paper's array drawing.
package luna_pkg;

  localparam int unsigned W_BITS   = 4;               // weight width
  localparam int unsigned Y_BITS   = 4;               // input width
  localparam int unsigned Z_BITS   = 6;               // partial product W x 2b
  localparam int unsigned P_BITS   = 8;               // full product
  localparam int unsigned ROW_BITS = 8;               // SRAM row width (8 columns)

  // Unit-local LUT cells. The four W x 01 cells are the W cells of the
  // array row above the unit and are not part of this struct.
  typedef struct packed {
    logic [4:0] w11_msb;   // bits 5:1 of W x 11 (= 3W); bit 0 is W[0]
    logic       zero;      // the single stored '0' wired to all of W x 00
  } lut_cells_t;

  // Word stored in an operand row: {W<3:0>, Y<3:0>}.
  typedef struct packed {
    logic [W_BITS-1:0] w;
    logic [Y_BITS-1:0] y;
  } operand_row_t;

endpackage
