// approx_mult8x8: 8x8 unsigned approximate Dadda multiplier.
//
// The 64 partial-product bits (column k = i + j, heights 1,2,..,8,..,2,1)
// are reduced in two stages to two rows, which a final adder sums.
//   Stage 1 (height 8 -> 4): approximate 4:2 compressors in columns 5..10
//     (two in column 7), exact half adders in columns 4, 6, 9, 11 and an
//     exact full adder in column 8. Columns 0..3 and 12..14 pass through.
//   Stage 2 (height 4 -> 2): an exact half adder in column 2, approximate
//     4:2 compressors in columns 3..10, exact 4:2 compressors in columns
//     11 and 12 (cout of column 11 drives cin of column 12, cin of column 11
//     is 0) and an exact full adder in column 13 that takes column 12's
//     cout as its third input.
// Nothing is truncated and there is no error-correction logic. The only
// source of error is an approximate compressor whose four inputs are all 1:
// it reports 3 instead of 4, so the product can only come out too small,
// by 2^k for each such compressor in column k. Over operands 1..255 this
// gives 4548 wrong products out of 65025 (error rate 6.994%), a mean error
// distance of 0.046% of 255*255, and a mean relative error of about 0.11%.
//
// The placement of every cell, and which partial-product rows each stage-1
// cell takes, follow the dot diagram of the proposed multiplier, where dot
// row r holds partial-product row r-1. In stage 2 every approximate and
// exact 4:2 compressor takes all four bits of its column, so the order of
// the bits within a column does not change the result. The final adder
// type and the purely combinational form (no pipeline registers) are this
// design's choices.
//
// Interface: a, b unsigned operands; p the approximate product.
// Timing: combinational from a, b to p; no clock or reset.
module approx_mult8x8
  import mult_pkg::*;
(
  input  operand_t a,
  input  operand_t b,
  output product_t p
);
  pp_array_t pp;

  pp_gen u_pp (.a(a), .b(b), .pp(pp));

  // ---------------------------------------------------------------- stage 1
  // Outputs of stage 1, one vector per column (index = bit within column).
  logic [3:0] s1_c3, s1_c4, s1_c5, s1_c6, s1_c7, s1_c8, s1_c9, s1_c10, s1_c11, s1_c12;
  logic [2:0] s1_c2;
  logic [1:0] s1_c13;

  logic ha4_s, ha4_c, ha6_s, ha6_c, ha9_s, ha9_c, ha11_s, ha11_c;
  logic fa8_s, fa8_c;
  logic ac5_s, ac5_c, ac6_s, ac6_c, ac7a_s, ac7a_c, ac7b_s, ac7b_c;
  logic ac8_s, ac8_c, ac9_s, ac9_c, ac10_s, ac10_c;

  half_adder    u_s1_ha4  (.a(pp[0][4]), .b(pp[1][3]), .sum(ha4_s), .carry(ha4_c));
  approx_comp42 u_s1_ac5  (.x({pp[3][2], pp[2][3], pp[1][4], pp[0][5]}), .carry(ac5_c), .sum(ac5_s));
  approx_comp42 u_s1_ac6  (.x({pp[3][3], pp[2][4], pp[1][5], pp[0][6]}), .carry(ac6_c), .sum(ac6_s));
  half_adder    u_s1_ha6  (.a(pp[4][2]), .b(pp[5][1]), .sum(ha6_s), .carry(ha6_c));
  approx_comp42 u_s1_ac7a (.x({pp[3][4], pp[2][5], pp[1][6], pp[0][7]}), .carry(ac7a_c), .sum(ac7a_s));
  approx_comp42 u_s1_ac7b (.x({pp[7][0], pp[6][1], pp[5][2], pp[4][3]}), .carry(ac7b_c), .sum(ac7b_s));
  approx_comp42 u_s1_ac8  (.x({pp[4][4], pp[3][5], pp[2][6], pp[1][7]}), .carry(ac8_c), .sum(ac8_s));
  full_adder    u_s1_fa8  (.a(pp[5][3]), .b(pp[6][2]), .c(pp[7][1]), .sum(fa8_s), .carry(fa8_c));
  approx_comp42 u_s1_ac9  (.x({pp[5][4], pp[4][5], pp[3][6], pp[2][7]}), .carry(ac9_c), .sum(ac9_s));
  half_adder    u_s1_ha9  (.a(pp[6][3]), .b(pp[7][2]), .sum(ha9_s), .carry(ha9_c));
  approx_comp42 u_s1_ac10 (.x({pp[6][4], pp[5][5], pp[4][6], pp[3][7]}), .carry(ac10_c), .sum(ac10_s));
  half_adder    u_s1_ha11 (.a(pp[4][7]), .b(pp[5][6]), .sum(ha11_s), .carry(ha11_c));

  assign s1_c2  = {pp[2][0], pp[1][1], pp[0][2]};
  assign s1_c3  = {pp[3][0], pp[2][1], pp[1][2], pp[0][3]};
  assign s1_c4  = {pp[4][0], pp[3][1], pp[2][2], ha4_s};
  assign s1_c5  = {ha4_c,    pp[5][0], pp[4][1], ac5_s};
  assign s1_c6  = {ac5_c,    pp[6][0], ha6_s,    ac6_s};
  assign s1_c7  = {ha6_c,    ac6_c,    ac7b_s,   ac7a_s};
  assign s1_c8  = {ac7b_c,   ac7a_c,   fa8_s,    ac8_s};
  assign s1_c9  = {fa8_c,    ac8_c,    ha9_s,    ac9_s};
  assign s1_c10 = {ha9_c,    ac9_c,    pp[7][3], ac10_s};
  assign s1_c11 = {ac10_c,   pp[7][4], pp[6][5], ha11_s};
  assign s1_c12 = {ha11_c,   pp[7][5], pp[6][6], pp[5][7]};
  assign s1_c13 = {pp[7][6], pp[6][7]};

  // ---------------------------------------------------------------- stage 2
  // row0 / row1 are the two rows handed to the final adder.
  row_t row0, row1;
  logic [10:3] s2_ac_c;                 // carry of the approximate compressor in column k
  logic        ha2_c;
  logic        ec11_cout, ec11_c, ec12_cout, ec12_c, fa13_c;

  assign row0[0] = pp[0][0];
  assign row1[0] = 1'b0;
  assign row0[1] = pp[0][1];
  assign row1[1] = pp[1][0];

  half_adder u_s2_ha2 (.a(s1_c2[0]), .b(s1_c2[1]), .sum(row0[2]), .carry(ha2_c));
  assign row1[2] = s1_c2[2];
  assign row1[3] = ha2_c;

  approx_comp42 u_s2_ac3  (.x(s1_c3),  .carry(s2_ac_c[3]),  .sum(row0[3]));
  approx_comp42 u_s2_ac4  (.x(s1_c4),  .carry(s2_ac_c[4]),  .sum(row0[4]));
  approx_comp42 u_s2_ac5  (.x(s1_c5),  .carry(s2_ac_c[5]),  .sum(row0[5]));
  approx_comp42 u_s2_ac6  (.x(s1_c6),  .carry(s2_ac_c[6]),  .sum(row0[6]));
  approx_comp42 u_s2_ac7  (.x(s1_c7),  .carry(s2_ac_c[7]),  .sum(row0[7]));
  approx_comp42 u_s2_ac8  (.x(s1_c8),  .carry(s2_ac_c[8]),  .sum(row0[8]));
  approx_comp42 u_s2_ac9  (.x(s1_c9),  .carry(s2_ac_c[9]),  .sum(row0[9]));
  approx_comp42 u_s2_ac10 (.x(s1_c10), .carry(s2_ac_c[10]), .sum(row0[10]));
  assign row1[10:4] = s2_ac_c[9:3];
  assign row1[11]   = s2_ac_c[10];

  exact_comp42 u_s2_ec11 (.x(s1_c11), .cin(1'b0),      .cout(ec11_cout), .carry(ec11_c), .sum(row0[11]));
  exact_comp42 u_s2_ec12 (.x(s1_c12), .cin(ec11_cout), .cout(ec12_cout), .carry(ec12_c), .sum(row0[12]));
  assign row1[12] = ec11_c;

  full_adder u_s2_fa13 (.a(s1_c13[0]), .b(s1_c13[1]), .c(ec12_cout), .sum(row0[13]), .carry(fa13_c));
  assign row1[13] = ec12_c;
  assign row0[14] = pp[7][7];
  assign row1[14] = fa13_c;

  final_adder u_cpa (.row0(row0), .row1(row1), .p(p));
endmodule : approx_mult8x8
