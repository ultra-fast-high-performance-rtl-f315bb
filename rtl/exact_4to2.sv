// exact_4to2: exact 4:2 compressor, x[0]+x[1]+x[2]+x[3]+cin = s + 2*(c + cout).
//
// Two full adders: the first adds x[0..2] and produces cout, the second adds
// its sum, x[3] and cin to give s and c. Because cout depends only on x[0..2],
// a row of these cells (cout of column k into cin of column k+1) has no
// rippling carry. The multipliers use a chain of them as the precise cells in
// columns 10-12 of stage 1; in column 12 only three partial products exist and
// x[3] is tied to 0 by the instantiating module.
//
// The two-full-adder construction is the common textbook cell; the
// multiplier description only names "exact 4:2 compressor".
// Purely combinational.
module exact_4to2 (
  input  logic [3:0] x,     // four bits of weight 2^k
  input  logic       cin,   // weight 2^k, from the cell in column k-1
  output logic       s,     // weight 2^k
  output logic       c,     // weight 2^(k+1), to the next reduction stage
  output logic       cout   // weight 2^(k+1), to the cell in column k+1
);
  logic s1;

  full_adder u_fa0 (.x(x[0]), .y(x[1]), .z(x[2]), .s(s1), .c(cout));
  full_adder u_fa1 (.x(s1),   .y(x[3]), .z(cin),  .s(s),  .c(c));
endmodule : exact_4to2
