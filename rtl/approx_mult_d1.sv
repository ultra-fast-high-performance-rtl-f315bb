// approx_mult_d1: 8x8 unsigned approximate multiplier, "Design #1".
//
// The partial-product array (up to 8 bits per column) is reduced to the final
// 16-bit product in two stages, with no separate final adder:
//
//  Stage 1 brings every column down to at most three bits.
//   * Upper group, inexact multicolumn compressors (notation NB,NA:2 with NB
//     bits of column k+1 and NA bits of column k):
//       1,2:2 without Cin at columns 8,7
//       3,2:2 without Cin at 6,5  --Cout-->  3,3:2 at 8,7  --Cout-->  1,3:2 at 10,9
//   * Lower group, a carry chain from column 3 to column 13:
//       exact HA (col 3) --carry--> 3,3:2 at 5,4 --> 3,3:2 at 7,6 --> 3,3:2 at 9,8
//       --Cout--> exact 4:2 (col 10) --> exact 4:2 (col 11)
//       --> exact 4:2 with three inputs (col 12) --> exact FA (col 13)
//   The four precise cells in columns 10-13 keep the high-order product bits
//   accurate; their couts do not depend on their cins, so the chain does not
//   ripple.
//  Stage 2 turns the (up to) three bits per column directly into product bits:
//       F0 = a0 & b0
//       3,2:2 without Cin at columns 2,1 -> F1, F2
//       --Cout--> 3,3:2 at 4,3 -> F3, F4 --> 3,3:2 at 6,5 -> F5, F6
//       --> 3,3:2 at 8,7 -> F7, F8
//       --Cout--> 6-bit ripple-carry adder over columns 9-14 -> F9..F14, F15
//
// The compressor placement is that of the paper's Design #1 (four precise
// stage-1 cells). The paper draws the partial products as anonymous dots;
// here they are identified by the usual dot-diagram convention: the dots of
// column c are stacked at the bottom of an 8-row diagram in order of the
// b-index j, top to bottom (so for c >= 7 the dot in row r, counted from 1 at
// the top, is p[c-r+1][r-1]). Each instance lists the bits it takes. The
// product is never larger than the exact product. Over all 65536 operand
// pairs this gives a mean error distance of 353.7 and an error rate of 66.95%.
//
// Interface: a, b unsigned 8-bit; f unsigned 16-bit. Purely combinational:
// no clock, no reset.
module approx_mult_d1
  import approx_mult_pkg::*;
(
  input  operand_t a,
  input  operand_t b,
  output product_t f
);
  pp_array_t p;   // p[i][j] = a[i] & b[j], weight 2^(i+j)

  pp_gen #(.N(OPW)) u_pp (.a(a), .b(b), .pp(p));

  // ------------------------------------------------------------ stage 1
  // upper group
  logic u1_sum, u1_car, u1_co;             // 1,2:2 w/o Cin, k = 7 (u1_co is 0)
  logic u2_sum, u2_car, u2_co;             // 3,2:2 w/o Cin, k = 5
  logic u3_sum, u3_car, u3_co;             // 3,3:2,         k = 7
  logic u4_sum, u4_car, u4_co;             // 1,3:2,         k = 9 (u4_co is 0)
  // lower group
  logic h3_sum, h3_car;                    // HA, column 3
  logic l4_sum, l4_car, l4_co;             // 3,3:2, k = 4
  logic l6_sum, l6_car, l6_co;             // 3,3:2, k = 6
  logic l8_sum, l8_car, l8_co;             // 3,3:2, k = 8
  logic x10_s, x10_c, x10_co;              // exact 4:2, column 10
  logic x11_s, x11_c, x11_co;              // exact 4:2, column 11
  logic x12_s, x12_c, x12_co;              // exact 4:2 (3 inputs), column 12
  logic x13_s, x13_c;                      // exact FA, column 13

  mc_compressor #(.NB(1), .NA(2), .HAS_CIN(1'b0)) u_s1_u1 (
    .b({p[7][1]}), .a({p[7][0], p[6][1]}), .cin(1'b0),
    .sum(u1_sum), .carry(u1_car), .cout(u1_co));

  mc_compressor #(.NB(3), .NA(2), .HAS_CIN(1'b0)) u_s1_u2 (
    .b({p[5][1], p[4][2], p[3][3]}), .a({p[4][1], p[3][2]}), .cin(1'b0),
    .sum(u2_sum), .carry(u2_car), .cout(u2_co));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b1)) u_s1_u3 (
    .b({p[6][2], p[5][3], p[4][4]}), .a({p[5][2], p[4][3], p[3][4]}), .cin(u2_co),
    .sum(u3_sum), .carry(u3_car), .cout(u3_co));

  mc_compressor #(.NB(1), .NA(3), .HAS_CIN(1'b1)) u_s1_u4 (
    .b({p[7][3]}), .a({p[7][2], p[6][3], p[5][4]}), .cin(u3_co),
    .sum(u4_sum), .carry(u4_car), .cout(u4_co));

  half_adder u_s1_h3 (.x(p[1][2]), .y(p[0][3]), .s(h3_sum), .c(h3_car));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b1)) u_s1_l4 (
    .b({p[2][3], p[1][4], p[0][5]}), .a({p[2][2], p[1][3], p[0][4]}), .cin(h3_car),
    .sum(l4_sum), .carry(l4_car), .cout(l4_co));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b1)) u_s1_l6 (
    .b({p[2][5], p[1][6], p[0][7]}), .a({p[2][4], p[1][5], p[0][6]}), .cin(l4_co),
    .sum(l6_sum), .carry(l6_car), .cout(l6_co));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b1)) u_s1_l8 (
    .b({p[4][5], p[3][6], p[2][7]}), .a({p[3][5], p[2][6], p[1][7]}), .cin(l6_co),
    .sum(l8_sum), .carry(l8_car), .cout(l8_co));

  exact_4to2 u_s1_x10 (.x({p[6][4], p[5][5], p[4][6], p[3][7]}), .cin(l8_co),
                       .s(x10_s), .c(x10_c), .cout(x10_co));
  exact_4to2 u_s1_x11 (.x({p[7][4], p[6][5], p[5][6], p[4][7]}), .cin(x10_co),
                       .s(x11_s), .c(x11_c), .cout(x11_co));
  exact_4to2 u_s1_x12 (.x({p[7][5], p[6][6], p[5][7], 1'b0}),    .cin(x11_co),
                       .s(x12_s), .c(x12_c), .cout(x12_co));
  full_adder u_s1_x13 (.x(p[7][6]), .y(p[6][7]), .z(x12_co), .s(x13_s), .c(x13_c));

  // ------------------------------------------------------------ stage 2
  logic v1_co, v3_co, v5_co, v7_co;

  assign f[0] = p[0][0];

  mc_compressor #(.NB(3), .NA(2), .HAS_CIN(1'b0)) u_s2_v1 (
    .b({p[0][2], p[1][1], p[2][0]}), .a({p[0][1], p[1][0]}), .cin(1'b0),
    .sum(f[1]), .carry(f[2]), .cout(v1_co));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b1)) u_s2_v3 (
    .b({l4_sum, p[4][0], p[3][1]}), .a({h3_sum, p[3][0], p[2][1]}), .cin(v1_co),
    .sum(f[3]), .carry(f[4]), .cout(v3_co));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b1)) u_s2_v5 (
    .b({u2_car, l6_sum, p[6][0]}), .a({u2_sum, l4_car, p[5][0]}), .cin(v3_co),
    .sum(f[5]), .carry(f[6]), .cout(v5_co));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b1)) u_s2_v7 (
    .b({u1_car, u3_car, l8_sum}), .a({u1_sum, u3_sum, l6_car}), .cin(v5_co),
    .sum(f[7]), .carry(f[8]), .cout(v7_co));

  // columns 9..14: two bits each, exact ripple-carry addition
  rca #(.W(6)) u_s2_rca (
    .x  ({x13_c,   x12_c, x11_c, x10_c, u4_car, u4_sum}),   // bit i = column 9+i
    .y  ({p[7][7], x13_s, x12_s, x11_s, x10_s,  l8_car}),
    .cin(v7_co),
    .s  (f[14:9]),
    .cout(f[15]));
endmodule : approx_mult_d1
