// approx_mult_pkg: types shared by the 8x8 approximate multipliers.
//
// The multipliers take two unsigned 8-bit operands and return an unsigned
// 16-bit product. The partial-product array is kept as a packed 8x8 array
// where element [i][j] is a[i] & b[j], the bit of weight 2^(i+j). Operand
// width is fixed at 8: the compressor placement in the multipliers is drawn
// for 8x8 and does not generalise to other widths.
package approx_mult_pkg;

  localparam int unsigned OPW = 8;           // operand width
  localparam int unsigned PRW = 2 * OPW;     // product width

  typedef logic [OPW-1:0]          operand_t;
  typedef logic [PRW-1:0]          product_t;
  typedef logic [OPW-1:0][OPW-1:0] pp_array_t;  // [i][j] = a[i] & b[j]

endpackage : approx_mult_pkg
