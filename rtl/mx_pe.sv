// mx_pe: one processing element of the flattened systolic array.
//
// Output-stationary multiply-accumulate on MX operands. Each cycle the PE takes an
// element and its block scale from the left and from the top, multiplies the two
// integer elements, adds the two scale exponents, and adds the product, shifted to a
// common fixed-point grid, into an integer accumulator. The operands are registered
// and passed on to the PE on the right and the PE below. This structure (element
// multiply, scale add, INT accumulate, pass right and down) follows the architecture;
// the fixed-point grid of the accumulator (LSB weight 2^ACC_LSB_EXP, ACC_W bits) is a
// choice of this implementation. Shifts past the top of the accumulator are clamped,
// shifts below its LSB truncate.
//
// Timing: acc updates on the clock edge after the operands are presented; out_r/out_b
// are the inputs delayed by one cycle. clr clears acc (and wins over accumulation).
// A zero element contributes nothing, so idle cycles simply carry zeros.
module mx_pe #(
  parameter int ELEM_W      = 4,
  parameter int SCALE_W     = 8,
  parameter int ACC_W       = 48,
  parameter int ACC_LSB_EXP = -24
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clr,
  input  logic [ELEM_W+SCALE_W-1:0]       in_l,   // {element, scale}
  input  logic [ELEM_W+SCALE_W-1:0]       in_t,
  output logic [ELEM_W+SCALE_W-1:0]       out_r,
  output logic [ELEM_W+SCALE_W-1:0]       out_b,
  output logic signed [ACC_W-1:0]         acc
);
  localparam int BIAS   = (1 << (SCALE_W - 1)) - 1;
  localparam int PROD_W = 2 * ELEM_W;
  localparam int SH_MAX = ACC_W - PROD_W - 1;

  logic signed [ELEM_W-1:0]  el, et;
  logic        [SCALE_W-1:0] sl, st;
  logic signed [PROD_W-1:0]  prod;
  logic signed [ACC_W-1:0]   addend;
  int                        sh;

  assign el = in_l[ELEM_W+SCALE_W-1:SCALE_W];
  assign sl = in_l[SCALE_W-1:0];
  assign et = in_t[ELEM_W+SCALE_W-1:SCALE_W];
  assign st = in_t[SCALE_W-1:0];

  always_comb begin
    prod = el * et;
    sh   = int'(sl) + int'(st) - 2 * BIAS - ACC_LSB_EXP;
    if (sh >= 0) begin
      if (sh > SH_MAX) sh = SH_MAX;
      addend = ACC_W'(prod) <<< sh;
    end else if (sh > -PROD_W) begin
      addend = ACC_W'(prod) >>> (-sh);
    end else begin
      addend = prod[PROD_W-1] ? '1 : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      out_r <= '0;
      out_b <= '0;
    end else begin
      out_r <= in_l;
      out_b <= in_t;
      if (clr) acc <= '0;
      else     acc <= acc + addend;
    end
  end
endmodule
