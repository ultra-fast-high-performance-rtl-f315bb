// tb_full_adder: exhaustive check of the exact full adder.
// All eight input triples are applied; 2*c + s must equal x + y + z.
module tb_full_adder;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic x, y, z, s, c;
  int unsigned checks = 0, failures = 0;

  full_adder dut (.x(x), .y(y), .z(z), .s(s), .c(c));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      @(negedge clk);
      {x, y, z} = 3'(v);
      @(posedge clk);
      checks++;
      if (2 * int'(c) + int'(s) != int'(x) + int'(y) + int'(z)) begin
        failures++;
        $display("FAIL x=%0b y=%0b z=%0b -> c=%0b s=%0b", x, y, z, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_full_adder
