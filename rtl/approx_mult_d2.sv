// approx_mult_d2: 8x8 unsigned approximate multiplier, "Design #2".
//
// Design #1 with its six low-order columns truncated. Columns 0-6 keep a
// single partial product each, which is passed straight to the product bit
// (F_k = a_k & b_0); all other partial products of those columns are never
// formed. Only columns 7-14 are compressed, again in two stages:
//
//  Stage 1 (at most three bits per column afterwards):
//   * Upper group: 1,2:2 without Cin at columns 8,7;
//                  3,3:2 without Cin at 8,7 --Cout--> 1,3:2 at 10,9.
//   * Lower group: exact FA (col 7) --carry--> 3,3:2 at 9,8 --Cout-->
//                  exact 4:2 (col 10) --> exact 4:2 (col 11)
//                  --> exact 4:2 with three inputs (col 12) --> exact FA (col 13)
//  Stage 2: 3,3:2 without Cin at columns 8,7 -> F7, F8
//           --Cout--> 6-bit ripple-carry adder over columns 9-14 -> F9..F14, F15
//
// The placement is that of the paper's Design #2. The partial products are
// identified with the dots of the paper's diagram by the same convention as
// in Design #1 (column c stacked at the bottom, b-index j increasing
// downwards); the bit kept in a truncated column is its top dot, a_k & b_0.
// Each instance lists the bits it takes. Over all 65536 operand pairs this
// gives a mean error distance of 428.5 and an error rate of 94.45%. The
// product never exceeds the exact product.
//
// Interface: a, b unsigned 8-bit; f unsigned 16-bit. Purely combinational:
// no clock, no reset. Partial products of the truncated columns other than
// a_k & b_0 are left unused and disappear in synthesis.
module approx_mult_d2
  import approx_mult_pkg::*;
(
  input  operand_t a,
  input  operand_t b,
  output product_t f
);
  pp_array_t p;   // p[i][j] = a[i] & b[j], weight 2^(i+j)

  pp_gen #(.N(OPW)) u_pp (.a(a), .b(b), .pp(p));

  // ------------------------------------------------ truncated columns 0..6
  for (genvar k = 0; k < 7; k++) begin : g_trunc
    assign f[k] = p[k][0];
  end

  // ------------------------------------------------------------ stage 1
  logic u1_sum, u1_car, u1_co;             // 1,2:2 w/o Cin, k = 7 (u1_co is 0)
  logic u3_sum, u3_car, u3_co;             // 3,3:2 w/o Cin, k = 7
  logic u4_sum, u4_car, u4_co;             // 1,3:2,         k = 9 (u4_co is 0)
  logic f7_sum, f7_car;                    // exact FA, column 7
  logic l8_sum, l8_car, l8_co;             // 3,3:2, k = 8
  logic x10_s, x10_c, x10_co;              // exact 4:2, column 10
  logic x11_s, x11_c, x11_co;              // exact 4:2, column 11
  logic x12_s, x12_c, x12_co;              // exact 4:2 (3 inputs), column 12
  logic x13_s, x13_c;                      // exact FA, column 13

  mc_compressor #(.NB(1), .NA(2), .HAS_CIN(1'b0)) u_s1_u1 (
    .b({p[7][1]}), .a({p[7][0], p[6][1]}), .cin(1'b0),
    .sum(u1_sum), .carry(u1_car), .cout(u1_co));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b0)) u_s1_u3 (
    .b({p[6][2], p[5][3], p[4][4]}), .a({p[5][2], p[4][3], p[3][4]}), .cin(1'b0),
    .sum(u3_sum), .carry(u3_car), .cout(u3_co));

  mc_compressor #(.NB(1), .NA(3), .HAS_CIN(1'b1)) u_s1_u4 (
    .b({p[7][3]}), .a({p[7][2], p[6][3], p[5][4]}), .cin(u3_co),
    .sum(u4_sum), .carry(u4_car), .cout(u4_co));

  full_adder u_s1_f7 (.x(p[2][5]), .y(p[1][6]), .z(p[0][7]), .s(f7_sum), .c(f7_car));

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b1)) u_s1_l8 (
    .b({p[4][5], p[3][6], p[2][7]}), .a({p[3][5], p[2][6], p[1][7]}), .cin(f7_car),
    .sum(l8_sum), .carry(l8_car), .cout(l8_co));

  exact_4to2 u_s1_x10 (.x({p[6][4], p[5][5], p[4][6], p[3][7]}), .cin(l8_co),
                       .s(x10_s), .c(x10_c), .cout(x10_co));
  exact_4to2 u_s1_x11 (.x({p[7][4], p[6][5], p[5][6], p[4][7]}), .cin(x10_co),
                       .s(x11_s), .c(x11_c), .cout(x11_co));
  exact_4to2 u_s1_x12 (.x({p[7][5], p[6][6], p[5][7], 1'b0}),    .cin(x11_co),
                       .s(x12_s), .c(x12_c), .cout(x12_co));
  full_adder u_s1_x13 (.x(p[7][6]), .y(p[6][7]), .z(x12_co), .s(x13_s), .c(x13_c));

  // ------------------------------------------------------------ stage 2
  logic v7_co;

  mc_compressor #(.NB(3), .NA(3), .HAS_CIN(1'b0)) u_s2_v7 (
    .b({u1_car, u3_car, l8_sum}), .a({u1_sum, u3_sum, f7_sum}), .cin(1'b0),
    .sum(f[7]), .carry(f[8]), .cout(v7_co));

  rca #(.W(6)) u_s2_rca (
    .x  ({x13_c,   x12_c, x11_c, x10_c, u4_car, u4_sum}),   // bit i = column 9+i
    .y  ({p[7][7], x13_s, x12_s, x11_s, x10_s,  l8_car}),
    .cin(v7_co),
    .s  (f[14:9]),
    .cout(f[15]));
endmodule : approx_mult_d2
