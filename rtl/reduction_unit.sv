// reduction_unit: reduces one FP16 vector of N values to a scalar, by sum or by max.
//
// A binary tree of FP16 adders (or max selectors), log2(N) levels deep. Used for the
// row-wise max and sum of online softmax; the result goes to the scalar unit's FP
// registers. Summation order is the tree order, so results can differ in the last bit
// from a sequential sum. Combinational. op: 0 = sum, 1 = max.
module reduction_unit import plena_pkg::*; #(
  parameter int N = 2048
) (
  input  logic               op,
  input  logic [N-1:0][15:0] v,
  output logic [15:0]        y
);
  localparam int L = $clog2(N);
  logic [15:0] t [L+1][N];

  always_comb begin
    for (int l = 0; l <= L; l++) for (int k = 0; k < N; k++) t[l][k] = '0;
    for (int k = 0; k < N; k++) t[0][k] = v[k];
    for (int l = 1; l <= L; l++)
      for (int k = 0; k < (N >> l); k++)
        t[l][k] = op ? fp_max(t[l-1][2*k], t[l-1][2*k+1]) : fp_add(t[l-1][2*k], t[l-1][2*k+1]);
    y = t[L][0];
  end
endmodule
