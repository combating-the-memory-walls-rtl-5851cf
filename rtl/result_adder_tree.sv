// result_adder_tree: cross-sub-array reduction of the flattened systolic array.
//
// Each sub-array holds partial sums over its own slice of the reduction dimension; a
// complete result needs the sum over all NSUB = MLEN/BLEN sub-arrays. This block adds
// NSUB signed accumulators with a binary tree of integer adders. In head mode the
// array works as MLEN/HLEN independent per-head cores (HLEN/BLEN sub-arrays each), and
// the block returns one sum per head group instead of the total; grouping the tree
// this way is this implementation's reading of the per-head partitioning.
//
// Interface: acc_in[q] from sub-array q; sum[g] is group g's sum in head mode; in
// normal mode sum[0] is the total and the other entries are zero. Combinational.
module result_adder_tree #(
  parameter int NSUB  = 64,     // MLEN / BLEN
  parameter int GSUB  = 4,      // HLEN / BLEN sub-arrays per head
  parameter int IN_W  = 48,
  parameter int OUT_W = IN_W + $clog2(NSUB)
) (
  input  logic                                head_mode,
  input  logic signed [IN_W-1:0]              acc_in [NSUB],
  output logic signed [OUT_W-1:0]             sum    [NSUB/GSUB]
);
  localparam int NG  = NSUB / GSUB;
  localparam int LG  = $clog2(GSUB);
  localparam int LT  = $clog2(NG);

  // level 0..LG inside each group, then LT levels across groups
  logic signed [OUT_W-1:0] gl [LG+1][NSUB];
  logic signed [OUT_W-1:0] tl [LT+1][NG];

  always_comb begin
    for (int l = 0; l <= LG; l++) for (int q = 0; q < NSUB; q++) gl[l][q] = '0;
    for (int l = 0; l <= LT; l++) for (int g = 0; g < NG; g++) tl[l][g] = '0;
    for (int q = 0; q < NSUB; q++) gl[0][q] = OUT_W'(acc_in[q]);
    for (int l = 1; l <= LG; l++)
      for (int q = 0; q < (NSUB >> l); q++)
        gl[l][q] = gl[l-1][2*q] + gl[l-1][2*q+1];
    for (int g = 0; g < NG; g++) tl[0][g] = gl[LG][g];
    for (int l = 1; l <= LT; l++)
      for (int g = 0; g < (NG >> l); g++)
        tl[l][g] = tl[l-1][2*g] + tl[l-1][2*g+1];
    if (head_mode) begin
      for (int g = 0; g < NG; g++) sum[g] = tl[0][g];
    end else begin
      for (int g = 0; g < NG; g++) sum[g] = '0;
      sum[0] = tl[LT][0];
    end
  end
endmodule
