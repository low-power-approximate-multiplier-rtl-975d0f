// mult_pkg: types and sizes shared by the 8x8 approximate multiplier.
//
// The multiplier takes two 8-bit unsigned operands and returns a 16-bit
// product. The partial-product array is 8 rows by 8 bits; row i holds
// a & {8{b[i]}} and is shifted left by i, so bit j of row i has weight
// 2^(i+j) and lands in column i+j of the dot diagram (columns 0..14).
// The operand width of 8 is the one the multiplier is built for; the
// reduction tree is hand-placed for it and does not scale with a parameter.
package mult_pkg;
  localparam int unsigned OP_W   = 8;               // operand width
  localparam int unsigned PROD_W = 2 * OP_W;        // product width
  localparam int unsigned N_COLS = 2 * OP_W - 1;    // dot-diagram columns 0..14

  typedef logic [OP_W-1:0]   operand_t;
  typedef logic [PROD_W-1:0] product_t;
  typedef logic [N_COLS-1:0] row_t;                 // one row of the final two
  typedef logic [OP_W-1:0][OP_W-1:0] pp_array_t;    // pp[i][j] = a[j] & b[i]
endpackage : mult_pkg
