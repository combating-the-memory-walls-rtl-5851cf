// hadamard_transform: online Hadamard rotation of an FP16 vector.
//
// The vector is cut into blocks of HAD_N values; each block is multiplied by the
// normalised Hadamard matrix H/sqrt(HAD_N) using the fast Walsh-Hadamard butterfly
// (log2(HAD_N) stages of add/subtract pairs) followed by one exact power-of-two scaling.
// This rotation spreads outliers before activations or K/V are quantized to MX, and
// the normalised matrix is its own inverse, so the same block also undoes it. The
// block size HAD_N is this implementation's choice (a power of four, so 1/sqrt(HAD_N)
// is exact). Combinational.
module hadamard_transform import plena_pkg::*; #(
  parameter int N     = 2048,
  parameter int HAD_N = 16
) (
  input  logic [N-1:0][15:0] v,
  output logic [N-1:0][15:0] y
);
  localparam int L = $clog2(HAD_N);
  // 1/sqrt(HAD_N) = 2^(-L/2) as FP16
  localparam logic [15:0] NORM = {1'b0, 5'(15 - L / 2), 10'd0};

  logic [15:0] st [L+1][N];

  always_comb begin
    for (int k = 0; k < N; k++) st[0][k] = v[k];
    for (int l = 1; l <= L; l++)
      for (int k = 0; k < N; k++) begin
        int h;
        h = 1 << (l - 1);
        if ((k & h) == 0) st[l][k] = fp_add(st[l-1][k], st[l-1][k + h]);
        else              st[l][k] = fp_sub(st[l-1][k - h], st[l-1][k]);
      end
    for (int k = 0; k < N; k++) y[k] = fp_mul(st[L][k], NORM);
  end
endmodule
