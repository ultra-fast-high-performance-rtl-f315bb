// tb_approx_mult_d2: exhaustive check of approx_mult_d2 (Design #2).
//
// All 65536 operand pairs are applied. Reference values were computed by an
// independent bit-level model of the same compressor placement and are
// compared as totals over the whole operand space:
//   * sum of |exact - approximate|, number of erroneous products, sum of all
//     products, the largest error distance, and a position-sensitive hash
//     h = h*31 + f (mod 2^32) with a as the outer and b as the inner loop;
//   * the product must never exceed a*b (compressors and truncation only
//     lose value);
//   * the error rate must be within one percentage point, and the mean error
//     distance within 25%, of the figures published for this design
//     (the partial-product-to-input assignment, which is not published,
//     moves the MED by roughly that much);
//   * a few operand pairs with known products.
module tb_approx_mult_d2;
  import approx_mult_pkg::*;

  // reference totals over all 65536 operand pairs
  localparam longint REF_SUM_ABS_ED = 64'd28084224;
  localparam int     REF_ERRORS     = 61896;
  localparam longint REF_SUM_F      = 64'd1037285376;
  localparam int     REF_MAX_ED     = 4226;
  localparam logic [31:0] REF_HASH  = 32'h0d6b7000;
  // published figures for this design
  localparam real    PUB_MED        = 409.7;
  localparam real    PUB_ER_PCT     = 94.5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  operand_t a, b;
  product_t f;
  int unsigned checks = 0, failures = 0;
  longint      sum_abs = 0, sum_f = 0;   // initialised here, not in the loop process
  int          errors = 0, max_ed = 0, ed;
  logic [31:0] h = 0;
  real         med, er_pct;

  approx_mult_d2 dut (.a(a), .b(b), .f(f));

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
        ed = x * y - int'(f);
        if (ed < 0) begin
          checks++;
          failures++;
          if (failures < 10) $display("FAIL %0d * %0d -> %0d exceeds exact product", x, y, f);
        end
        sum_abs += longint'(ed < 0 ? -ed : ed);
        sum_f   += longint'(f);
        if (ed != 0) errors++;
        if (ed > max_ed) max_ed = ed;
        h = h * 32'd31 + 32'(f);
        if (x == 255 && y == 255) check(f == 16'd60799, $sformatf("255 * 255 -> %0d, expected 60799", f));
        if (x == 200 && y == 100) check(f == 16'd19968, $sformatf("200 * 100 -> %0d, expected 19968", f));
        if (x == 17 && y == 33) check(f == 16'd529, $sformatf("17 * 33 -> %0d, expected 529", f));
        if (x == 1 && y == 1) check(f == 16'd1, $sformatf("1 * 1 -> %0d, expected 1", f));
        if (x == 128 && y == 128) check(f == 16'd16384, $sformatf("128 * 128 -> %0d, expected 16384", f));
        if (x == 37 && y == 201) check(f == 16'd7333, $sformatf("37 * 201 -> %0d, expected 7333", f));
        if (x == 0 && y == 173) check(f == 16'd0, $sformatf("0 * 173 -> %0d, expected 0", f));
        if (x == 91 && y == 0) check(f == 16'd0, $sformatf("91 * 0 -> %0d, expected 0", f));
      end
    end
    med    = real'(sum_abs) / 65536.0;
    er_pct = 100.0 * real'(errors) / 65536.0;
    $display("MED=%f NED=%e ER=%f%% max ED=%0d (published MED %f, ER %f%%)",
             med, med / 65025.0, er_pct, max_ed, PUB_MED, PUB_ER_PCT);
    check(sum_abs == REF_SUM_ABS_ED, $sformatf("sum |ED| %0d, expected %0d", sum_abs, REF_SUM_ABS_ED));
    check(errors  == REF_ERRORS,     $sformatf("errors %0d, expected %0d", errors, REF_ERRORS));
    check(sum_f   == REF_SUM_F,      $sformatf("sum F %0d, expected %0d", sum_f, REF_SUM_F));
    check(max_ed  == REF_MAX_ED,     $sformatf("max ED %0d, expected %0d", max_ed, REF_MAX_ED));
    check(h       == REF_HASH,       $sformatf("hash %h, expected %h", h, REF_HASH));
    check(er_pct - PUB_ER_PCT < 1.0 && PUB_ER_PCT - er_pct < 1.0, "error rate far from published value");
    check(med < 1.25 * PUB_MED && med > 0.75 * PUB_MED, "MED far from published value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_approx_mult_d2
