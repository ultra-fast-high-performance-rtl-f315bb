// full_adder: exact full adder, 2*c + s = x + y + z.
//
// Used inside the multicolumn inexact compressors (where a side has three
// inputs), in the exact 4:2 cells, as a precise stage-1 cell, and as the bit
// cell of the stage-2 ripple-carry adder. Purely combinational.
module full_adder (
  input  logic x,
  input  logic y,
  input  logic z,
  output logic s,   // weight 2^k
  output logic c    // weight 2^(k+1)
);
  assign s = x ^ y ^ z;
  assign c = (x & y) | (x & z) | (y & z);
endmodule : full_adder
