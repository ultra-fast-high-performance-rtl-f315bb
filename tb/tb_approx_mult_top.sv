// tb_approx_mult_top: end-to-end test of the top level at its default (and
// only) configuration.
//
// Every one of the 65536 operand pairs drives both multipliers. For each
// output the testbench accumulates a position-sensitive hash
// h = h*31 + f (mod 2^32, a outer loop, b inner loop) and compares it with the
// value computed by an independent bit-level model; it also checks that no
// product exceeds a*b and that products of 0 are 0.
//
// It counts how often each mechanism of the design is exercised and fails if
// any of them never happens:
//   d1_error    - the inexact compressors make Design #1's product wrong
//   truncation  - Design #2 (truncated low columns) differs from Design #1
//   mc_chain    - a multicolumn compressor passes Cout to the next one's Cin
//                 (Design #1, columns 9,8 into the exact 4:2 cell)
//   exact_chain - the exact 4:2 chain carries from column 12 into column 13
//   rca_cin     - the stage-2 compressor at 8,7 carries into the adder (both)
//   d2_fa_carry - Design #2's column-7 full adder carries into columns 9,8
//   msb         - product bit 15 is set
module tb_approx_mult_top;
  import approx_mult_pkg::*;

  localparam logic [31:0] REF_HASH_D1 = 32'he5014200;
  localparam logic [31:0] REF_HASH_D2 = 32'h0d6b7000;
  localparam int          REF_D1_NE_D2 = 61440;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  operand_t a, b;
  product_t f_d1, f_d2;
  int unsigned checks = 0, failures = 0;

  // accumulators are initialised at their declaration
  logic [31:0] h1 = 0, h2 = 0;
  int d1_error = 0, truncation = 0, mc_chain = 0, exact_chain = 0;
  int rca_cin = 0, d2_fa_carry = 0, msb = 0, over = 0, zero_bad = 0;

  approx_mult_top dut (.a(a), .b(b), .f_d1(f_d1), .f_d2(f_d2));

  initial begin : watchdog
    repeat (70000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int x = 0; x < 256; x++) begin
      for (int y = 0; y < 256; y++) begin
        @(negedge clk);
        a = operand_t'(x);
        b = operand_t'(y);
        @(posedge clk);
        h1 = h1 * 32'd31 + 32'(f_d1);
        h2 = h2 * 32'd31 + 32'(f_d2);
        if (int'(f_d1) > x * y || int'(f_d2) > x * y) over++;
        if ((x == 0 || y == 0) && (f_d1 != '0 || f_d2 != '0)) zero_bad++;
        if (int'(f_d1) != x * y) d1_error++;
        if (f_d2 != f_d1) truncation++;
        if (dut.u_d1.l8_co) mc_chain++;
        if (dut.u_d1.x12_co || dut.u_d2.x12_co) exact_chain++;
        if (dut.u_d1.v7_co || dut.u_d2.v7_co) rca_cin++;
        if (dut.u_d2.f7_car) d2_fa_carry++;
        if (f_d1[15] || f_d2[15]) msb++;
      end
    end
    $display("mechanisms: d1_error=%0d truncation=%0d mc_chain=%0d exact_chain=%0d rca_cin=%0d d2_fa_carry=%0d msb=%0d",
             d1_error, truncation, mc_chain, exact_chain, rca_cin, d2_fa_carry, msb);
    check(h1 == REF_HASH_D1, $sformatf("Design #1 hash %h, expected %h", h1, REF_HASH_D1));
    check(h2 == REF_HASH_D2, $sformatf("Design #2 hash %h, expected %h", h2, REF_HASH_D2));
    check(truncation == REF_D1_NE_D2, $sformatf("designs differ on %0d pairs, expected %0d", truncation, REF_D1_NE_D2));
    check(over == 0, $sformatf("%0d products exceed the exact product", over));
    check(zero_bad == 0, $sformatf("%0d products of zero are not zero", zero_bad));
    check(d1_error    > 0, "inexact-compressor error never happened");
    check(truncation  > 0, "truncation never changed a product");
    check(mc_chain    > 0, "compressor Cout->Cin chain never carried");
    check(exact_chain > 0, "exact 4:2 chain never carried into column 13");
    check(rca_cin     > 0, "ripple-carry adder never got a carry-in");
    check(d2_fa_carry > 0, "column-7 full adder of Design #2 never carried");
    check(msb         > 0, "product bit 15 never set");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_approx_mult_top
