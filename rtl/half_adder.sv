// half_adder: exact 1-bit half adder, a + b = 2*carry + sum.
// One of the four cell types of the multiplier's reduction tree; used where
// a column holds two bits too many or too few for a 4:2 compressor.
// The published design only names the cell; this is the textbook gate form.
// Interface: a, b in; sum, carry out. Combinational, no clock.
module half_adder (
  input  logic a,
  input  logic b,
  output logic sum,
  output logic carry
);
  assign sum   = a ^ b;
  assign carry = a & b;
endmodule : half_adder
