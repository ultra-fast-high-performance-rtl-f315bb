// tb_pp_gen: checks the partial-product array for all 65536 operand pairs.
// Every bit pp[i][j] is compared with bit i of a times bit j of b, and the
// weighted sum of all bits, sum pp[i][j] * 2^(i+j), with the product a * b.
module tb_pp_gen;
  localparam int unsigned N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]        a, b;
  logic [N-1:0][N-1:0] pp;
  int unsigned checks = 0, failures = 0;

  pp_gen #(.N(N)) dut (.a(a), .b(b), .pp(pp));

  initial begin : watchdog
    repeat (70000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned wsum;
    bit          bits_ok;
    for (int v = 0; v < (1 << (2 * N)); v++) begin
      @(negedge clk);
      {a, b} = (2 * N)'(v);
      @(posedge clk);
      wsum    = 0;
      bits_ok = 1'b1;
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) begin
          wsum += int'(pp[i][j]) << (i + j);
          if (pp[i][j] != (((a >> i) & 1) != 0 && ((b >> j) & 1) != 0)) bits_ok = 1'b0;
        end
      end
      checks += 2;
      if (!bits_ok) begin
        failures++;
        if (failures < 10) $display("FAIL bit pattern a=%0d b=%0d", a, b);
      end
      if (wsum != int'(a) * int'(b)) begin
        failures++;
        if (failures < 10) $display("FAIL weighted sum a=%0d b=%0d -> %0d", a, b, wsum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_pp_gen
