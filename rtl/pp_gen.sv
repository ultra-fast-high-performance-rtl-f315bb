// pp_gen: partial-product generation, the first phase of the multiplier.
//
// pp[i][j] = a[i] & b[j] has weight 2^(i+j); column c of the multiplier's
// dot diagram holds every pp[i][j] with i + j = c. One AND gate per bit,
// purely combinational. Partial products that a truncated multiplier leaves
// unused are removed by synthesis.
module pp_gen #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]         a,
  input  logic [N-1:0]         b,
  output logic [N-1:0][N-1:0]  pp   // [i][j] = a[i] & b[j]
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        pp[i][j] = a[i] & b[j];
      end
    end
  end
endmodule : pp_gen
