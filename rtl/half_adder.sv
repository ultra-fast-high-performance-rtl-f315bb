// half_adder: exact half adder, 2*c + s = x + y.
//
// Used inside the multicolumn inexact compressors (where a side has two
// inputs, and to merge Cin) and as a precise cell in the least significant
// columns of the multipliers. Purely combinational.
module half_adder (
  input  logic x,
  input  logic y,
  output logic s,   // weight 2^k
  output logic c    // weight 2^(k+1)
);
  assign s = x ^ y;
  assign c = x & y;
endmodule : half_adder
