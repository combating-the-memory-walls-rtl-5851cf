// fsa_subarray: one BLEN x BLEN square sub-array of the flattened systolic array.
//
// A grid of mx_pe elements in output-stationary dataflow: row i of the grid receives
// one MX operand per cycle on left_in[i], column j receives one on top_in[j], operands
// travel right and down through the PE registers, and PE (i,j) accumulates the dot
// product of left stream i and top stream j. The edge inputs are skewed here (row i
// delayed by i cycles, column j by j cycles) so that the caller can present a whole
// column of X and a whole row of W in the same cycle, as the architecture's "Left Data
// In" / "Top Data In" buffers do. The skew registers are this implementation's choice.
//
// Timing: if operand k is presented in cycle t, it has been accumulated by every PE
// by cycle t + 2*(BLEN-1) + 1 (BLEN-1 skew registers, BLEN-1 PE hops, one
// accumulate). acc is the "PE data collector" view of all PEs.
module fsa_subarray #(
  parameter int BLEN        = 32,
  parameter int ELEM_W      = 4,
  parameter int SCALE_W     = 8,
  parameter int ACC_W       = 48,
  parameter int ACC_LSB_EXP = -24
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clr,
  input  logic [ELEM_W+SCALE_W-1:0]      left_in [BLEN],
  input  logic [ELEM_W+SCALE_W-1:0]      top_in  [BLEN],
  output logic signed [ACC_W-1:0]        acc     [BLEN][BLEN]   // [row][col]
);
  localparam int OW = ELEM_W + SCALE_W;

  // skew lines: entry [i][d] holds the value delayed by d+1 cycles
  logic [OW-1:0] skl [BLEN][BLEN];
  logic [OW-1:0] skt [BLEN][BLEN];
  logic [OW-1:0] l_edge [BLEN];
  logic [OW-1:0] t_edge [BLEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < BLEN; i++)
        for (int d = 0; d < BLEN; d++) begin
          skl[i][d] <= '0;
          skt[i][d] <= '0;
        end
    end else begin
      for (int i = 0; i < BLEN; i++) begin
        skl[i][0] <= left_in[i];
        skt[i][0] <= top_in[i];
        for (int d = 1; d < BLEN; d++) begin
          skl[i][d] <= skl[i][d-1];
          skt[i][d] <= skt[i][d-1];
        end
      end
    end
  end

  always_comb begin
    l_edge[0] = left_in[0];
    t_edge[0] = top_in[0];
    for (int i = 1; i < BLEN; i++) begin
      l_edge[i] = skl[i][i-1];
      t_edge[i] = skt[i][i-1];
    end
  end

  logic [OW-1:0] h [BLEN][BLEN];   // PE outputs to the right
  logic [OW-1:0] v [BLEN][BLEN];   // PE outputs downwards

  for (genvar i = 0; i < BLEN; i++) begin : g_row
    for (genvar j = 0; j < BLEN; j++) begin : g_col
      mx_pe #(.ELEM_W(ELEM_W), .SCALE_W(SCALE_W), .ACC_W(ACC_W), .ACC_LSB_EXP(ACC_LSB_EXP)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (clr),
        .in_l  ((j == 0) ? l_edge[i] : h[i][(j == 0) ? 0 : j-1]),
        .in_t  ((i == 0) ? t_edge[j] : v[(i == 0) ? 0 : i-1][j]),
        .out_r (h[i][j]),
        .out_b (v[i][j]),
        .acc   (acc[i][j])
      );
    end
  end
endmodule
