// mx_dequantizer: MXINT (elements plus per-block E8M0 scales) to FP16.
//
// Each element is a signed integer; its value is element * 2^(scale-127), which FP16
// represents exactly for 4-bit elements unless it falls outside FP16's range (then it
// flushes to zero or saturates to infinity). Used by the HBM controller when vectors
// are loaded into the FP16 Vector SRAM. Combinational.
module mx_dequantizer import plena_pkg::*; #(
  parameter int N        = 2048,
  parameter int ELEM_W   = 4,
  parameter int SCALE_W  = 8,
  parameter int MX_BLOCK = 16
) (
  input  logic [N-1:0][ELEM_W-1:0]           elem,
  input  logic [N/MX_BLOCK-1:0][SCALE_W-1:0] scale,
  output logic [N-1:0][15:0]                 out_fp
);
  localparam int BIAS = (1 << (SCALE_W - 1)) - 1;
  always_comb
    for (int k = 0; k < N; k++)
      out_fp[k] = fp_from_int(longint'($signed(elem[k])), int'(scale[k / MX_BLOCK]) - BIAS);
endmodule
