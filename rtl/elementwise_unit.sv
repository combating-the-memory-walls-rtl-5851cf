// elementwise_unit: VLEN parallel FP16 lanes for the vector unit.
//
// Each lane applies the same operation to a[k] and b[k]: add, subtract, multiply, max,
// e^a, 1/a, or pass a through. The second operand is either a vector row or a scalar
// broadcast to every lane by the vector unit. These are the element-wise operations
// online softmax needs (max, exp, sums, division as reciprocal then multiply). The
// arithmetic is the FP16 arithmetic of plena_pkg (exp through a 64-entry 2^x table with
// linear interpolation). The op set is this implementation's choice. Combinational.
module elementwise_unit import plena_pkg::*; #(
  parameter int N = 2048
) (
  input  ew_op_e            op,
  input  logic [N-1:0][15:0] a,
  input  logic [N-1:0][15:0] b,
  output logic [N-1:0][15:0] y
);
  always_comb begin
    for (int k = 0; k < N; k++) begin
      unique case (op)
        EW_ADD:  y[k] = fp_add(a[k], b[k]);
        EW_SUB:  y[k] = fp_sub(a[k], b[k]);
        EW_MUL:  y[k] = fp_mul(a[k], b[k]);
        EW_MAX:  y[k] = fp_max(a[k], b[k]);
        EW_EXP:  y[k] = fp_exp(a[k]);
        EW_RECI: y[k] = fp_recip(a[k]);
        default: y[k] = a[k];
      endcase
    end
  end
endmodule
