// tb_rca: exhaustive check of the 6-bit ripple-carry adder.
// All 2^13 combinations of x, y and cin are applied; {cout, s} must equal
// x + y + cin.
module tb_rca;
  localparam int unsigned W = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [W-1:0] x, y, s;
  logic         cin, cout;
  int unsigned checks = 0, failures = 0;

  rca #(.W(W)) dut (.x(x), .y(y), .cin(cin), .s(s), .cout(cout));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << (2 * W + 1)); v++) begin
      @(negedge clk);
      {x, y, cin} = (2 * W + 1)'(v);
      @(posedge clk);
      checks++;
      if (int'({cout, s}) != int'(x) + int'(y) + int'(cin)) begin
        failures++;
        if (failures < 10) $display("FAIL %0d + %0d + %0d -> %0d", x, y, cin, {cout, s});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_rca
