// pp_gen: partial-product generator of the 8x8 unsigned multiplier.
//
// pp[i][j] = a[j] & b[i]; the bit has weight 2^(i+j). Row i of the array
// is row i+1 (counted from the top) of the dot diagram before reduction,
// so column k of the diagram holds pp[i][k-i] for every valid i.
// The row numbering matches the published dot diagram; the plain AND array
// itself is the usual one for unsigned operands and is not spelled out there.
// Interface: a, b operands in; pp array out. 64 AND gates, combinational,
// no clock.
module pp_gen
  import mult_pkg::*;
(
  input  operand_t  a,
  input  operand_t  b,
  output pp_array_t pp
);
  always_comb begin
    for (int i = 0; i < OP_W; i++) begin
      for (int j = 0; j < OP_W; j++) begin
        pp[i][j] = a[j] & b[i];
      end
    end
  end
endmodule : pp_gen
