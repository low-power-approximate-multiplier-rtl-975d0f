// full_adder: exact 1-bit full adder, a + b + c = 2*carry + sum.
// Used on its own in the reduction tree and, in pairs, inside the exact
// 4:2 compressor. The published design only names the cell; this is the
// textbook gate form (sum = parity, carry = majority).
// Interface: a, b, c in; sum, carry out. Combinational, no clock.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic sum,
  output logic carry
);
  assign sum   = a ^ b ^ c;
  assign carry = (a & b) | (a & c) | (b & c);
endmodule : full_adder
