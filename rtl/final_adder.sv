// final_adder: carry-propagate adder closing the multiplier.
//
// After the two reduction stages every column 0..14 holds at most two bits.
// They are gathered into two 15-bit rows and added here to give the 16-bit
// product. The kind of adder is left open; this one is written as a plain
// binary addition so that synthesis picks the adder architecture for the
// timing target. The sum never overflows 16 bits because the approximate
// product never exceeds the exact one (at most 255*255).
// Combinational, no clock.
module final_adder
  import mult_pkg::*;
(
  input  row_t     row0,
  input  row_t     row1,
  output product_t p
);
  assign p = product_t'(row0) + product_t'(row1);
endmodule : final_adder
