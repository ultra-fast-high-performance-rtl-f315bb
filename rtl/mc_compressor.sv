// mc_compressor: multicolumn NB,NA:2 inexact compressor and its derivatives.
//
// Takes NB equally weighted bits b of column k+1 and NA bits a of column k,
// plus an optional carry-in cin of weight 2^k, and returns three bits:
//   sum   (2^k)    - sum bit of the column-k adder, merged with cin by a HA
//   carry (2^(k+1))- OR of the three weight-2^(k+1) signals: the sum of the
//                    column-(k+1) adder, the carry of the column-k adder and
//                    the carry of the cin half adder
//   cout  (2^(k+2))- carry of the column-(k+1) adder; it never depends on cin,
//                    so compressors chained through cout/cin do not ripple.
// Each side is a full adder for three inputs, a half adder for two and a
// plain wire for one (then its carry is 0). With HAS_CIN = 0 the cin half
// adder is left out and cin is not used.
//
// NB=3, NA=3, HAS_CIN=1 is the 3,3:2 compressor. Because the three 2^(k+1)
// signals are ORed instead of added, the output is 2 or 4 below the exact
// input sum in 48 of the 128 input patterns (never above). Replacing full
// adders by half adders gives the 2,2:2 derivative; the other settings give
// the 3,3:2 and 3,2:2 without Cin, 2,3:2, 1,3:2, 1,2:2 and 1,2:2 without Cin.
// The inner structure and the derivation rule follow the paper; the OR for
// the carry output is fixed by its truth table (the gate is only drawn).
// Purely combinational.
module mc_compressor #(
  parameter int unsigned NB      = 3,     // bits from column k+1 (1..3)
  parameter int unsigned NA      = 3,     // bits from column k   (1..3)
  parameter bit          HAS_CIN = 1'b1   // 0: "without Cin" derivative
) (
  input  logic [NB-1:0] b,      // b1..b3, weight 2^(k+1)
  input  logic [NA-1:0] a,      // a1..a3, weight 2^k
  input  logic          cin,    // weight 2^k, unused when HAS_CIN = 0
  output logic          sum,    // weight 2^k
  output logic          carry,  // weight 2^(k+1)
  output logic          cout    // weight 2^(k+2)
);
  logic sb, cb;   // column k+1 adder: sum (2^(k+1)), carry (2^(k+2))
  logic sa, ca;   // column k adder:   sum (2^k),     carry (2^(k+1))
  logic c3;       // carry of the cin half adder (2^(k+1))

  if (NB < 1 || NB > 3) begin : g_bad_nb
    $error("mc_compressor: NB must be 1..3");
  end
  if (NA < 1 || NA > 3) begin : g_bad_na
    $error("mc_compressor: NA must be 1..3");
  end

  // column k+1
  if (NB == 3) begin : g_b_fa
    full_adder u_add_b (.x(b[0]), .y(b[1]), .z(b[2]), .s(sb), .c(cb));
  end else if (NB == 2) begin : g_b_ha
    half_adder u_add_b (.x(b[0]), .y(b[1]), .s(sb), .c(cb));
  end else begin : g_b_wire
    assign sb = b[0];
    assign cb = 1'b0;
  end

  // column k
  if (NA == 3) begin : g_a_fa
    full_adder u_add_a (.x(a[0]), .y(a[1]), .z(a[2]), .s(sa), .c(ca));
  end else if (NA == 2) begin : g_a_ha
    half_adder u_add_a (.x(a[0]), .y(a[1]), .s(sa), .c(ca));
  end else begin : g_a_wire
    assign sa = a[0];
    assign ca = 1'b0;
  end

  // carry-in
  if (HAS_CIN) begin : g_cin
    half_adder u_add_cin (.x(sa), .y(cin), .s(sum), .c(c3));
  end else begin : g_no_cin
    assign sum = sa;
    assign c3  = 1'b0;
  end

  assign carry = sb | ca | c3;
  assign cout  = cb;
endmodule : mc_compressor
