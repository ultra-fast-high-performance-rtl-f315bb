// approx_mult_top: the two proposed 8x8 approximate multipliers side by side.
//
// One unsigned operand pair (a, b) drives both multipliers: f_d1 is the
// product of Design #1 (accurate high-order columns, no truncation) and f_d2
// that of Design #2 (the same high-order structure with the six low-order
// columns truncated, smaller and faster but less accurate). The paper
// presents the two as separate alternatives; putting both behind one pair of
// operand ports is this design's choice, so that one top holds every block.
// A system needing only one of them instantiates approx_mult_d1 or
// approx_mult_d2 directly.
//
// Interface: a, b unsigned 8-bit; f_d1, f_d2 unsigned 16-bit.
// Timing: purely combinational, two compressor stages deep; no clock, no reset.
module approx_mult_top
  import approx_mult_pkg::*;
(
  input  operand_t a,
  input  operand_t b,
  output product_t f_d1,
  output product_t f_d2
);
  approx_mult_d1 u_d1 (.a(a), .b(b), .f(f_d1));
  approx_mult_d2 u_d2 (.a(a), .b(b), .f(f_d2));
endmodule : approx_mult_top
