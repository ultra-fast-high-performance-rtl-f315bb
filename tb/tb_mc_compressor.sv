// tb_mc_compressor: checks the multicolumn inexact compressor and all of its
// derivatives against the published characterisation.
//
// Eight instances cover the 3,3:2 compressor and the seven derivatives used
// by the multipliers (NB,NA = bits from column k+1, bits from column k).
// All 128 patterns of {b[2:0], a[2:0], cin} are applied; an instance sees only
// the bits it has. Checks:
//  * 3,3:2: each pattern against the truth table of the 3,3:2 compressor,
//    which lists {Cout, Carry, Sum} for every (sum of b, sum of a, Cin), and
//    the number of wrong patterns must be 48 out of 128;
//  * every instance: the output value 4*Cout + 2*Carry + Sum is never above
//    the exact input sum 2*|b| + |a| + Cin and falls short by 0, 2 or 4 only;
//  * every instance: its normalised error distance, mean |ED| over all
//    patterns divided by the largest possible sum (NA + 2*NB + Cin), must
//    match the value published for that compressor to within 6e-4.
module tb_mc_compressor;
  localparam int NV = 8;
  localparam int          VNB  [NV] = '{3, 3, 3, 2, 2, 1, 1, 1};
  localparam int          VNA  [NV] = '{3, 3, 2, 3, 2, 3, 2, 2};
  localparam bit          VCIN [NV] = '{1, 0, 0, 1, 1, 1, 1, 0};
  // published NED of each variant
  localparam real         VNED [NV] = '{0.08125, 0.0555, 0.03125, 0.10156,
                                        0.07143, 0.13542, 0.1, 0.0625};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0] b, a;
  logic       cin;
  logic [NV-1:0] sum_v, carry_v, cout_v;
  int unsigned checks = 0, failures = 0;

  for (genvar v = 0; v < NV; v++) begin : g_dut
    mc_compressor #(.NB(VNB[v]), .NA(VNA[v]), .HAS_CIN(VCIN[v])) dut (
      .b(b[VNB[v]-1:0]), .a(a[VNA[v]-1:0]), .cin(cin),
      .sum(sum_v[v]), .carry(carry_v[v]), .cout(cout_v[v]));
  end

  // Truth table of the 3,3:2 compressor: {Cout, Carry, Sum} indexed by
  // {sum of b (2 bits), sum of a (2 bits), Cin}.
  localparam logic [2:0] TT [32] = '{
    3'b000, 3'b001, 3'b001, 3'b010, 3'b010, 3'b011, 3'b011, 3'b010,   // sum b = 0
    3'b010, 3'b011, 3'b011, 3'b010, 3'b010, 3'b011, 3'b011, 3'b010,   // sum b = 1
    3'b100, 3'b101, 3'b101, 3'b110, 3'b110, 3'b111, 3'b111, 3'b110,   // sum b = 2
    3'b110, 3'b111, 3'b111, 3'b110, 3'b110, 3'b111, 3'b111, 3'b110    // sum b = 3
  };

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int abs_ed [NV];
    int wrong332;
    int exact, got, nb1, na1, idx;
    real med, ned;
    wrong332 = 0;
    for (int v = 0; v < NV; v++) abs_ed[v] = 0;

    for (int p = 0; p < 128; p++) begin
      @(negedge clk);
      {b, a, cin} = 7'(p);
      @(posedge clk);
      // 3,3:2 against the truth table
      idx = $countones(b) * 8 + $countones(a) * 2 + int'(cin);
      checks++;
      if ({cout_v[0], carry_v[0], sum_v[0]} != TT[idx]) begin
        failures++;
        $display("FAIL 3,3:2 b=%b a=%b cin=%b -> %b, table %b", b, a, cin,
                 {cout_v[0], carry_v[0], sum_v[0]}, TT[idx]);
      end
      // every variant: value never above the exact sum, shortfall 0/2/4
      for (int v = 0; v < NV; v++) begin
        nb1   = $countones(b & 3'((1 << VNB[v]) - 1));
        na1   = $countones(a & 3'((1 << VNA[v]) - 1));
        exact = 2 * nb1 + na1 + (VCIN[v] ? int'(cin) : 0);
        got   = 4 * int'(cout_v[v]) + 2 * int'(carry_v[v]) + int'(sum_v[v]);
        checks++;
        if (!(exact - got inside {0, 2, 4})) begin
          failures++;
          $display("FAIL variant %0d b=%b a=%b cin=%b: exact %0d got %0d", v, b, a, cin, exact, got);
        end
        abs_ed[v] += exact - got;
        if (v == 0 && exact != got) wrong332++;
      end
    end

    checks++;
    if (wrong332 != 48) begin
      failures++;
      $display("FAIL 3,3:2 is wrong in %0d of 128 patterns, expected 48", wrong332);
    end

    // NED: every used-input pattern appears equally often among the 128
    for (int v = 0; v < NV; v++) begin
      med = real'(abs_ed[v]) / 128.0;
      ned = med / real'(VNA[v] + 2 * VNB[v] + int'(VCIN[v]));
      $display("variant %0d,%0d:2 cin=%0d  MED=%f NED=%f (published %f)",
               VNB[v], VNA[v], VCIN[v], med, ned, VNED[v]);
      checks++;
      if (ned - VNED[v] > 6e-4 || VNED[v] - ned > 6e-4) begin
        failures++;
        $display("FAIL NED of variant %0d", v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_mc_compressor
