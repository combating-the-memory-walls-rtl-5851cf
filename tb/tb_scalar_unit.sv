// tb_scalar_unit: self-checking testbench for the scalar unit.
//
// Loads the integer and FP register files (S_ADDI / S_LUI, S_FLI), then issues random
// integer (add, sub, mul, div, addi) and FP (add, sub, mul, max, div, reciprocal,
// sqrt, exp) instructions, one per cycle, against a register model. Every instruction
// is checked through the read ports in the following cycle, i.e. a result is usable
// one cycle after issue. Integer results and FP add / sub / mul / max are bit exact;
// div, reciprocal and sqrt are checked to 2^-10 relative, exp to 2^-8. Also checks that
// x0 stays zero and that a vector-unit FP write lands in the register file.
module tb_scalar_unit;
  import plena_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, ex_valid = 0;
  instr_t ex_instr = '0;
  logic [4:0] ra0 = 0, ra1 = 0, ra2 = 0, fra = 0;
  logic [31:0] rd0, rd1, rd2, stat_ops;
  logic [15:0] frd;
  logic vfp_we = 0; logic [4:0] vfp_wa = 0; logic [15:0] vfp_wd = 0;
  logic [31:0] xm [32];
  logic [15:0] fm [32];
  int checks = 0, failures = 0, issued = 0;

  scalar_unit dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input logic [5:0] op, input int rd, input int rs1, input int rs2, input int imm);
    @(negedge clk);
    ex_valid = 1;
    ex_instr = '{op: op, rd: 5'(rd), rs1: 5'(rs1), rs2: 5'(rs2), imm: 11'(imm)};
    @(negedge clk);
    ex_valid = 0;
    issued++;
  endtask

  function automatic bit near(input logic [15:0] got, input real r, input real tol);
    real g = h2r(got);
    real m = (r < 0.0) ? -r : r;
    return g >= r - m * tol && g <= r + m * tol;
  endfunction

  initial begin
    logic [5:0] op;
    int d, s1, s2, imm;
    real a, b;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) begin xm[i] = 0; fm[i] = 0; end
    for (int i = 1; i < 32; i++) begin
      imm = int'($urandom_range(0, 2047));
      issue(S_LUI, i, i % 32, (i * 7) % 32, imm);
      xm[i] = {5'(i % 32), 5'((i * 7) % 32), 11'(imm), 11'd0};
      issue(S_ADDI, i, i, 0, imm);
      xm[i] = xm[i] + {{21{imm[10]}}, 11'(imm)};
    end
    for (int i = 0; i < 32; i++) begin
      logic [15:0] h = rnd_h(10, 20);
      issue(S_FLI, i, 0, int'(h[15:11]), int'(h[10:0]));
      fm[i] = h;
    end
    for (int n = 0; n < 1500; n++) begin
      d = int'($urandom_range(0, 31)); s1 = int'($urandom_range(0, 31)); s2 = int'($urandom_range(0, 31));
      imm = int'($urandom_range(0, 2047));
      case ($urandom_range(0, 12))
        0: begin op = S_ADD;  if (d != 0) xm[d] = xm[s1] + xm[s2]; end
        1: begin op = S_SUB;  if (d != 0) xm[d] = xm[s1] - xm[s2]; end
        2: begin op = S_MUL;  if (d != 0) xm[d] = xm[s1] * xm[s2]; end
        3: begin op = S_DIV;  if (d != 0) xm[d] = (xm[s2] == 0) ? '1 : xm[s1] / xm[s2]; end
        4: begin op = S_ADDI; if (d != 0) xm[d] = xm[s1] + {{21{imm[10]}}, 11'(imm)}; end
        5: op = S_FADD;  6: op = S_FSUB;  7: op = S_FMUL;  8: op = S_FMAX;
        9: op = S_FDIV;  10: op = S_FRECI; 11: op = S_FSQRT; default: op = S_FEXP;
      endcase
      a = h2r(fm[s1]); b = h2r(fm[s2]);
      if (op == S_FEXP && (a > 10.0 || a < -10.0)) op = S_FMAX;
      issue(op, d, s1, s2, imm);
      ra0 = 5'(d); fra = 5'(d); #1;
      if (op < 6'h20) check(rd0 == xm[d], $sformatf("int op %h x%0d=%h ref %h", op, d, rd0, xm[d]));
      else begin
        unique case (op)
          S_FADD: begin check(frd == r2h(a + b), "fadd"); fm[d] = frd; end
          S_FSUB: begin check(frd == r2h(a - b) || (a == b && frd[14:0] == 0), "fsub"); fm[d] = frd; end
          S_FMUL: begin check(frd == r2h(a * b), "fmul"); fm[d] = frd; end
          S_FMAX: begin check(frd == (a >= b ? fm[s1] : fm[s2]), "fmax"); fm[d] = frd; end
          S_FDIV: begin check(near(frd, a / b, 1.0 / 1024.0), $sformatf("fdiv %f/%f=%f", a, b, h2r(frd))); fm[d] = frd; end
          S_FRECI: begin check(near(frd, 1.0 / a, 1.0 / 1024.0), "freci"); fm[d] = frd; end
          S_FSQRT: begin
            if (a >= 0.0) check(near(frd, $sqrt(a), 1.0 / 1024.0), $sformatf("fsqrt %f=%f", a, h2r(frd)));
            fm[d] = frd;
          end
          default: begin check(near(frd, $exp(a), 1.0 / 256.0), $sformatf("fexp %f=%f", a, h2r(frd))); fm[d] = frd; end
        endcase
        // keep the FP values in a moderate range
        if (fm[d][14:10] > 5'd22 || fm[d][14:10] < 5'd8) begin
          logic [15:0] h = rnd_h(10, 20);
          issue(S_FLI, d, 0, int'(h[15:11]), int'(h[10:0]));
          fm[d] = h;
        end
      end
    end
    ra0 = 0; #1; check(rd0 == 0, "x0 reads zero");
    @(negedge clk); vfp_we = 1; vfp_wa = 5'd9; vfp_wd = 16'h3C00;
    @(negedge clk); vfp_we = 0; fra = 5'd9; #1; check(frd == 16'h3C00, "vector unit FP write");
    check(stat_ops == 32'(issued), "instruction counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
