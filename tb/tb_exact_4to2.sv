// tb_exact_4to2: exhaustive check of the exact 4:2 compressor.
// For all 32 input patterns, s + 2*(c + cout) must equal the number of ones
// among x[3:0] and cin. It also checks that cout does not change when only
// cin changes, the property that keeps a chain of these cells from rippling.
module tb_exact_4to2;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] x;
  logic       cin, s, c, cout;
  logic       cout_cin0;
  int unsigned checks = 0, failures = 0;

  exact_4to2 dut (.x(x), .cin(cin), .s(s), .c(c), .cout(cout));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cout_cin0 = 1'b0;
    for (int v = 0; v < 32; v++) begin
      @(negedge clk);
      {x, cin} = 5'(v);
      @(posedge clk);
      checks++;
      if (int'(s) + 2 * (int'(c) + int'(cout)) != $countones(x) + int'(cin)) begin
        failures++;
        $display("FAIL x=%b cin=%b -> s=%b c=%b cout=%b", x, cin, s, c, cout);
      end
      if (cin == 1'b0) cout_cin0 = cout;
      else begin
        checks++;
        if (cout != cout_cin0) begin
          failures++;
          $display("FAIL cout depends on cin for x=%b", x);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_exact_4to2
