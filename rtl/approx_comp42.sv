// approx_comp42: high-accuracy approximate 4:2 compressor.
//
// Four bits of equal weight 2^n go in; Carry (weight 2^(n+1)) and Sum
// (weight 2^n) come out. There is no Cin and no Cout, so no carry ripples
// between neighbouring compressors. Two output bits can encode at most 3,
// so one input pattern must be wrong: here it is only 1111, whose count of
// 4 is reported as 3 (Carry=1, Sum=1). That pattern has probability 1/256
// when each input is a partial-product bit that is 1 with probability 1/4.
//
// Internally the two input pairs are first classified with 2-input NOR and
// NAND:  A = ~(x1|x2)  B = ~(x1&x2)  C = ~(x3|x4)  D = ~(x3&x4).
// For a pair, A (or C) says "none set", ~B (or ~D) says "both set", and
// ~A&B (or ~C&D) says "exactly one set".
//   Carry = ~(B&D) | ~(A|C)           at least two inputs set
//   Sum   = ~A&B&C | ~A&B&~D | A&~C&D | ~B&~C&D | ~B&~D
// The Sum terms are, in order: count 1, count 3, count 1, count 3, count 4.
// The Carry equation and the NOR/NAND front end follow the paper's
// equations (1) and (3). For Sum the paper's equation (2) prints the third
// term as ~A&~C&D; that term would set Sum for input patterns with two
// ones and clear it for x1=x2=0 with one of x3, x4 set, contradicting the
// paper's own truth table. The term A&~C&D used here reproduces the truth
// table row for row (see tb_approx_comp42).
//
// Interface: x[0..3] = x1..x4. Purely combinational, no clock.
module approx_comp42 (
  input  logic [3:0] x,
  output logic       carry,
  output logic       sum
);
  logic a_nor, b_nand, c_nor, d_nand;

  always_comb begin
    a_nor  = ~(x[0] | x[1]);
    b_nand = ~(x[0] & x[1]);
    c_nor  = ~(x[2] | x[3]);
    d_nand = ~(x[2] & x[3]);

    carry = ~(b_nand & d_nand) | ~(a_nor | c_nor);
    sum   = (~a_nor &  b_nand &  c_nor)
          | (~a_nor &  b_nand & ~d_nand)
          | ( a_nor & ~c_nor  &  d_nand)
          | (~b_nand & ~c_nor &  d_nand)
          | (~b_nand & ~d_nand);
  end
endmodule : approx_comp42
