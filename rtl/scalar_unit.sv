// scalar_unit: integer unit, FP unit and their register files (the scalar buffer).
//
// Integer registers x0..x31 (32 bits, x0 reads as zero) hold the addresses that
// vector, matrix and HBM instructions use: address arithmetic is done by scalar
// instructions. FP registers f0..f31 (FP16) hold softmax running values (max, sum,
// scale factors) and receive the results of vector reductions. The integer unit does
// add, subtract, multiply, divide, add-immediate and load-upper-immediate; the FP unit
// does add, subtract, multiply, divide, e^x, 1/x, sqrt, max and load-immediate, with
// the FP16 arithmetic of plena_pkg (e^x uses its 2^x table). The operation groups
// follow the architecture; register counts, the op list and the encoding are this
// implementation's.
//
// Timing: an operation presented with ex_valid is written at the next clock edge. The
// three integer read ports and the FP read port are combinational, for the decoder.
// The FP write port from the vector unit (reductions) has priority over nothing: the
// decoder never issues an FP write in the same cycle (it waits for pending
// reductions), so both writes never collide.
module scalar_unit import plena_pkg::*; (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ex_valid,
  input  instr_t      ex_instr,
  // decoder read ports
  input  logic [4:0]  ra0, ra1, ra2,
  output logic [31:0] rd0, rd1, rd2,
  input  logic [4:0]  fra,
  output logic [15:0] frd,
  // FP write from the vector unit
  input  logic        vfp_we,
  input  logic [4:0]  vfp_wa,
  input  logic [15:0] vfp_wd,
  output logic [31:0] stat_ops
);
  logic [31:0] xr [32];
  logic [15:0] fr [32];

  logic [31:0] a, b, ires;
  logic [15:0] fa, fb, fres;
  logic        iwe, fwe;

  always_comb begin
    a = xr[ex_instr.rs1];
    b = xr[ex_instr.rs2];
    fa = fr[ex_instr.rs1];
    fb = fr[ex_instr.rs2];
    ires = '0;
    fres = '0;
    iwe  = 1'b0;
    fwe  = 1'b0;
    unique case (opcode_e'(ex_instr.op))
      S_ADD:   begin iwe = 1'b1; ires = a + b; end
      S_SUB:   begin iwe = 1'b1; ires = a - b; end
      S_MUL:   begin iwe = 1'b1; ires = a * b; end
      S_DIV:   begin iwe = 1'b1; ires = (b == 0) ? '1 : a / b; end
      S_ADDI:  begin iwe = 1'b1; ires = a + {{21{ex_instr.imm[10]}}, ex_instr.imm}; end
      S_LUI:   begin iwe = 1'b1; ires = {ex_instr.rs1, ex_instr.rs2, ex_instr.imm, 11'd0}; end
      S_FADD:  begin fwe = 1'b1; fres = fp_add(fa, fb); end
      S_FSUB:  begin fwe = 1'b1; fres = fp_sub(fa, fb); end
      S_FMUL:  begin fwe = 1'b1; fres = fp_mul(fa, fb); end
      S_FDIV:  begin fwe = 1'b1; fres = fp_div(fa, fb); end
      S_FEXP:  begin fwe = 1'b1; fres = fp_exp(fa); end
      S_FRECI: begin fwe = 1'b1; fres = fp_recip(fa); end
      S_FSQRT: begin fwe = 1'b1; fres = fp_sqrt(fa); end
      S_FMAX:  begin fwe = 1'b1; fres = fp_max(fa, fb); end
      S_FLI:   begin fwe = 1'b1; fres = {ex_instr.rs2, ex_instr.imm}; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) begin
        xr[i] <= '0;
        fr[i] <= '0;
      end
      stat_ops <= '0;
    end else begin
      if (ex_valid) stat_ops <= stat_ops + 1;
      if (ex_valid && iwe && ex_instr.rd != 5'd0) xr[ex_instr.rd] <= ires;
      if (ex_valid && fwe) fr[ex_instr.rd] <= fres;
      if (vfp_we) fr[vfp_wa] <= vfp_wd;
    end
  end

  assign rd0 = xr[ra0];
  assign rd1 = xr[ra1];
  assign rd2 = xr[ra2];
  assign frd = fr[fra];
endmodule
