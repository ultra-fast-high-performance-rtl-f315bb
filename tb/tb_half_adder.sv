// tb_half_adder: exhaustive check of the exact half adder.
// All four input pairs are applied; 2*c + s must equal x + y.
// A watchdog ends the run with a failure if the stimulus does not finish.
module tb_half_adder;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic x, y, s, c;
  int unsigned checks = 0, failures = 0;

  half_adder dut (.x(x), .y(y), .s(s), .c(c));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      @(negedge clk);
      {x, y} = 2'(v);
      @(posedge clk);
      checks++;
      if (2 * int'(c) + int'(s) != int'(x) + int'(y)) begin
        failures++;
        $display("FAIL x=%0b y=%0b -> c=%0b s=%0b", x, y, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_half_adder
