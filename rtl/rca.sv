// rca: W-bit ripple-carry adder, {cout, s} = x + y + cin.
//
// A row of full adders with the carry passed from bit i to bit i+1. In the
// multipliers it is the exact part of the last reduction stage: columns 9-14
// hold two bits each, the carry-in is the Cout of the inexact compressor in
// columns 8,7 and the carry-out is product bit 15. The delay grows linearly
// with W. Purely combinational.
module rca #(
  parameter int unsigned W = 6
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  logic [W:0] c;

  assign c[0] = cin;
  for (genvar i = 0; i < W; i++) begin : g_bit
    full_adder u_fa (.x(x[i]), .y(y[i]), .z(c[i]), .s(s[i]), .c(c[i+1]));
  end
  assign cout = c[W];
endmodule : rca
