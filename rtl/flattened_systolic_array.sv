// flattened_systolic_array: the matrix unit's compute core, a BLEN x MLEN array built
// from NSUB = MLEN/BLEN square BLEN x BLEN sub-arrays placed side by side.
//
// Each cycle the array takes two MLEN-wide operand vectors. Both are cut into NSUB
// sub-vectors of width BLEN; sub-vector q goes to sub-array q from the left and from
// the top. The caller arranges the vectors so that sub-array q sees the q-th BLEN-long
// slice of the reduction dimension: then the sub-arrays together compute a
// (BLEN, MLEN) x (MLEN, BLEN) product, each holding partial sums of its slice. The
// result adder tree adds the partial sums across sub-arrays. It is shared by the BLEN
// columns of one output row and the caller steps sum_row through the BLEN rows, one
// per cycle (this time-multiplexing is this implementation's choice).
//
// Interface: left_in[q*BLEN+i] feeds row i of sub-array q, top_in[q*BLEN+j] column j.
// sum_out[g][j] is output (sum_row, j) of head group g (head_mode) or, for g = 0, of
// the whole array (normal mode); combinational from the accumulators. clr clears all.
module flattened_systolic_array #(
  parameter int BLEN        = 32,
  parameter int MLEN        = 2048,
  parameter int HLEN        = 128,
  parameter int ELEM_W      = 4,
  parameter int SCALE_W     = 8,
  parameter int ACC_W       = 48,
  parameter int ACC_LSB_EXP = -24,
  parameter int NSUB        = MLEN / BLEN,
  parameter int NG          = MLEN / HLEN,
  parameter int SUM_W       = ACC_W + $clog2(NSUB)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   clr,
  input  logic [ELEM_W+SCALE_W-1:0]             left_in [MLEN],
  input  logic [ELEM_W+SCALE_W-1:0]             top_in  [MLEN],
  input  logic                                   head_mode,
  input  logic [$clog2(BLEN)-1:0]                sum_row,
  output logic signed [SUM_W-1:0]               sum_out [NG][BLEN]
);
  logic signed [ACC_W-1:0] acc [NSUB][BLEN][BLEN];

  for (genvar q = 0; q < NSUB; q++) begin : g_sub
    logic [ELEM_W+SCALE_W-1:0] l_sub [BLEN];
    logic [ELEM_W+SCALE_W-1:0] t_sub [BLEN];
    always_comb
      for (int i = 0; i < BLEN; i++) begin
        l_sub[i] = left_in[q*BLEN + i];
        t_sub[i] = top_in[q*BLEN + i];
      end
    fsa_subarray #(.BLEN(BLEN), .ELEM_W(ELEM_W), .SCALE_W(SCALE_W), .ACC_W(ACC_W),
                   .ACC_LSB_EXP(ACC_LSB_EXP)) u_sub (
      .clk     (clk),
      .rst_n   (rst_n),
      .clr     (clr),
      .left_in (l_sub),
      .top_in  (t_sub),
      .acc     (acc[q])
    );
  end

  for (genvar j = 0; j < BLEN; j++) begin : g_tree
    logic signed [ACC_W-1:0] col [NSUB];
    logic signed [SUM_W-1:0] s   [NG];
    always_comb
      for (int q = 0; q < NSUB; q++) col[q] = acc[q][sum_row][j];
    result_adder_tree #(.NSUB(NSUB), .GSUB(HLEN / BLEN), .IN_W(ACC_W), .OUT_W(SUM_W)) u_tree (
      .head_mode (head_mode),
      .acc_in    (col),
      .sum       (s)
    );
    always_comb
      for (int g = 0; g < NG; g++) sum_out[g][j] = s[g];
  end
endmodule
