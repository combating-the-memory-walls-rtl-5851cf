// mx_quantizer: FP16 vector to MXINT (elements plus one shared E8M0 scale per block).
//
// For each block of MX_BLOCK values the largest magnitude m is found; the shared scale
// is the smallest power of two 2^X with (2^(ELEM_W-1)-1) * 2^X >= m, and each element is
// round(v / 2^X) clipped to +-(2^(ELEM_W-1)-1). This is the max-based symmetric
// scaling of the architecture (scale = max|w| / max_int, zero point 0), with the scale
// rounded up to a power of two because MX scales are E8M0; the rounding direction is
// this implementation's choice. Used on activations entering the matrix unit and on
// vectors stored to HBM. Combinational.
module mx_quantizer import plena_pkg::*; #(
  parameter int N        = 2048,
  parameter int ELEM_W   = 4,
  parameter int SCALE_W  = 8,
  parameter int MX_BLOCK = 16
) (
  input  logic [N-1:0][15:0]                 in_fp,
  output logic [N-1:0][ELEM_W-1:0]           elem,
  output logic [N/MX_BLOCK-1:0][SCALE_W-1:0] scale
);
  always_comb begin
    for (int b = 0; b < N / MX_BLOCK; b++) begin
      fp16_t mx;
      mx = '0;
      for (int k = 0; k < MX_BLOCK; k++)
        if (in_fp[b*MX_BLOCK+k][14:0] > mx[14:0]) mx = {1'b0, in_fp[b*MX_BLOCK+k][14:0]};
      scale[b] = SCALE_W'(mx_shared_scale(mx, ELEM_W));
      for (int k = 0; k < MX_BLOCK; k++)
        elem[b*MX_BLOCK+k] = ELEM_W'(mx_quant_elem(in_fp[b*MX_BLOCK+k], 8'(scale[b]), ELEM_W));
    end
  end
endmodule
