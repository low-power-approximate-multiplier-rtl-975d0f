// exact_comp42: conventional exact 4:2 compressor made of two full adders.
//
// x1 + x2 + x3 + x4 + cin = sum + 2*(carry + cout), for all 32 inputs.
// The first full adder adds x2, x3, x4 and produces cout; its sum bit is
// added to x1 and cin by the second full adder, which produces sum and
// carry. Because cout does not depend on cin, a row of these compressors
// chained cout -> cin has no ripple longer than one cell.
// In the multiplier only two of them are used, in columns 11 and 12 of the
// second reduction stage, with column 11's cout feeding column 12's cin.
//
// Interface: x[0..3] = x1..x4. Combinational, no clock.
module exact_comp42 (
  input  logic [3:0] x,
  input  logic       cin,
  output logic       cout,
  output logic       carry,
  output logic       sum
);
  logic s_mid;

  full_adder u_fa_upper (.a(x[3]), .b(x[2]), .c(x[1]), .sum(s_mid), .carry(cout));
  full_adder u_fa_lower (.a(s_mid), .b(x[0]), .c(cin), .sum(sum), .carry(carry));
endmodule : exact_comp42
