// tb_sharpen: image-sharpening workload on both approximate multipliers.
//
// A 384 x 284 8-bit test image (a gradient with a block pattern and a little
// texture, generated by the img() function below) is sharpened with
//   B = (1/273) * sum over the 5x5 window of G * I      (Gaussian blur)
//   S = I + 1.5 * (I - B)                                 (unsharp masking)
// where G is the 5x5 kernel 1 4 7 4 1 / 4 16 26 16 4 / 7 26 41 26 7 / ...
// Every pixel-by-coefficient product is taken three times: exactly, from
// Design #1 and from Design #2 (pixel on operand a, coefficient on operand b).
// The sum and the sharpening are done in double precision and rounded to an
// 8-bit pixel clamped to 0..255. Only pixels whose whole window lies inside
// the image are sharpened (380 x 280).
//
// One product is formed per clock cycle by a clocked walk over pixels and
// window taps (2,660,000 cycles). The testbench then compares the sum of
// squared differences between the approximate and the exact sharpened image,
// and a checksum of the exact image, with values from an independent model,
// checks that Design #1 gives the higher PSNR, and prints both PSNRs.
module tb_sharpen;
  import approx_mult_pkg::*;

  localparam int IW = 384, IH = 284;
  localparam int G [5][5] = '{'{1, 4, 7, 4, 1}, '{4, 16, 26, 16, 4}, '{7, 26, 41, 26, 7},
                              '{4, 16, 26, 16, 4}, '{1, 4, 7, 4, 1}};
  localparam longint REF_SSE_D1   = 64'd14466984;
  localparam longint REF_SSE_D2   = 64'd36120036;
  localparam longint REF_CHECKSUM = 64'd1692027814;
  localparam int     CYCLES       = (IW - 4) * (IH - 4) * 25;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  function automatic int img(int x, int y);
    return (2 * x + y + 60 * (((x / 32) + (y / 32)) % 2) + ((x * y) % 7)) & 255;
  endfunction

  function automatic int sharpen(int p, longint s);
    real bl, sv;
    bl = real'(s) / 273.0;
    sv = real'(p) + 1.5 * (real'(p) - bl);
    if (sv < 0.0) return 0;
    if (sv > 255.0) return 255;
    return int'($floor(sv + 0.5));
  endfunction

  // walk state: pixel (px, py), tap (ti, tj)
  int px = 2, py = 2, ti = 0, tj = 0;
  longint s_ex = 0, s_d1 = 0, s_d2 = 0;
  longint sse_d1 = 0, sse_d2 = 0, checksum = 0;
  bit done = 1'b0;

  operand_t a, b;
  product_t f_d1, f_d2;

  always_comb begin
    a = operand_t'(img(px + tj - 2, py + ti - 2));
    b = operand_t'(G[ti][tj]);
  end

  approx_mult_top dut (.a(a), .b(b), .f_d1(f_d1), .f_d2(f_d2));

  always @(posedge clk) begin
    longint t_ex, t_d1, t_d2;
    int o_ex, o_d1, o_d2, p;
    if (!done) begin
      t_ex = s_ex + longint'(int'(a) * int'(b));
      t_d1 = s_d1 + longint'(f_d1);
      t_d2 = s_d2 + longint'(f_d2);
      if (ti == 4 && tj == 4) begin
        p    = img(px, py);
        o_ex = sharpen(p, t_ex);
        o_d1 = sharpen(p, t_d1);
        o_d2 = sharpen(p, t_d2);
        sse_d1   <= sse_d1 + longint'((o_d1 - o_ex) * (o_d1 - o_ex));
        sse_d2   <= sse_d2 + longint'((o_d2 - o_ex) * (o_d2 - o_ex));
        checksum <= checksum + longint'(o_ex) * longint'((px + py * IW) % 65521);
        s_ex <= 0; s_d1 <= 0; s_d2 <= 0;
        ti <= 0; tj <= 0;
        if (px == IW - 3) begin
          px <= 2;
          if (py == IH - 3) done <= 1'b1;
          else py <= py + 1;
        end else px <= px + 1;
      end else begin
        s_ex <= t_ex; s_d1 <= t_d1; s_d2 <= t_d2;
        if (tj == 4) begin
          tj <= 0;
          ti <= ti + 1;
        end else tj <= tj + 1;
      end
    end
  end

  initial begin : watchdog
    repeat (CYCLES + 1000) @(posedge clk);
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
    int  n;
    real psnr1, psnr2;
    wait (done);
    @(posedge clk);
    n     = (IW - 4) * (IH - 4);
    psnr1 = 10.0 * $log10(255.0 * 255.0 * real'(n) / real'(sse_d1));
    psnr2 = 10.0 * $log10(255.0 * 255.0 * real'(n) / real'(sse_d2));
    $display("sharpening %0dx%0d: PSNR Design #1 = %f dB, Design #2 = %f dB", IW, IH, psnr1, psnr2);
    check(sse_d1 == REF_SSE_D1, $sformatf("Design #1 SSE %0d, expected %0d", sse_d1, REF_SSE_D1));
    check(sse_d2 == REF_SSE_D2, $sformatf("Design #2 SSE %0d, expected %0d", sse_d2, REF_SSE_D2));
    check((checksum % (64'd1 << 32)) == REF_CHECKSUM,
          $sformatf("exact image checksum %0d, expected %0d", checksum % (64'd1 << 32), REF_CHECKSUM));
    check(psnr1 > psnr2, "Design #1 should sharpen more accurately than Design #2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_sharpen
