// tb_vector_unit: self-checking testbench for the vector unit.
//
// VLEN = 16, 16 SRAM rows modelled in the testbench behind ports A and B; the grants
// are random in the first phase (requests must be held until granted) and immediate
// in the second. Random instructions cover VV and VF element-wise ops, exp, the two
// reductions (result to an FP register) and the Hadamard transform; each result row or
// FP register write is compared with a reference computed from fp_ref_pkg (bit exact
// for add / sub / mul / max / reductions / Hadamard, tolerance for exp). With
// immediate grants an element-wise instruction must take 5 cycles from acceptance to
// the next ready and a reduction 4 (cycle-count check).
module tb_vector_unit;
  import plena_pkg::*;
  import fp_ref_pkg::*;
  localparam int V = 16, AW = 4, D = 16;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  vu_cmd_t cmd;
  logic a_req, a_we, a_gnt, b_req, b_gnt;
  logic [AW-1:0] a_addr, b_addr;
  logic [V-1:0][15:0] a_wdata, a_rdata, b_rdata;
  logic fp_we; logic [4:0] fp_wa; logic [15:0] fp_wd;
  logic busy, wr_pend, rd_pend, fp_pend; logic [31:0] wr_row, rd_row1, rd_row2, stat_ops;
  logic [4:0] fp_pend_reg;
  logic [V-1:0][15:0] mem [D];
  bit rand_gnt = 1;
  int checks = 0, failures = 0;

  vector_unit #(.VLEN(V), .VS_AW(AW), .HAD_N(16)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // SRAM model: grant when asked (randomly held off), data one cycle after a read grant
  logic gnt_a_ok = 0, gnt_b_ok = 0;
  assign a_gnt = a_req && (!rand_gnt || gnt_a_ok);
  assign b_gnt = b_req && (!rand_gnt || gnt_b_ok);
  always @(negedge clk) begin gnt_a_ok <= 1'($urandom_range(0, 2) != 0); gnt_b_ok <= 1'($urandom_range(0, 2) != 0); end
  always @(posedge clk) begin
    if (a_gnt && a_we) mem[a_addr] <= a_wdata;
    if (a_gnt && !a_we) a_rdata <= mem[a_addr];
    if (b_gnt) b_rdata <= mem[b_addr];
  end

  function automatic logic [V-1:0][15:0] ref_row(input vu_cmd_t c, input logic [V-1:0][15:0] x,
                                                 input logic [V-1:0][15:0] y);
    logic [V-1:0][15:0] r;
    logic [15:0] s [V];
    for (int k = 0; k < V; k++) begin
      unique case (c.op)
        V_ADD_VV: r[k] = r2h(h2r(x[k]) + h2r(y[k]));
        V_SUB_VV: r[k] = r2h(h2r(x[k]) - h2r(y[k]));
        V_MUL_VV: r[k] = r2h(h2r(x[k]) * h2r(y[k]));
        V_MAX_VV: r[k] = (h2r(x[k]) >= h2r(y[k])) ? x[k] : y[k];
        V_ADD_VF: r[k] = r2h(h2r(x[k]) + h2r(c.scalar));
        V_MUL_VF: r[k] = r2h(h2r(x[k]) * h2r(c.scalar));
        default:  r[k] = x[k];
      endcase
    end
    if (c.op == V_HAD) begin
      for (int k = 0; k < V; k++) s[k] = x[k];
      for (int l = 0; l < 4; l++) begin
        logic [15:0] nx [V];
        for (int k = 0; k < V; k++)
          nx[k] = ((k & (1 << l)) == 0) ? r2h(h2r(s[k]) + h2r(s[k + (1 << l)]))
                                        : r2h(h2r(s[k - (1 << l)]) - h2r(s[k]));
        s = nx;
      end
      for (int k = 0; k < V; k++) r[k] = r2h(h2r(s[k]) / 4.0);
    end
    return r;
  endfunction

  function automatic logic [15:0] ref_red(input bit is_max, input logic [V-1:0][15:0] x);
    logic [15:0] t [V];
    for (int k = 0; k < V; k++) t[k] = x[k];
    for (int w = V / 2; w >= 1; w /= 2)
      for (int k = 0; k < w; k++)
        t[k] = is_max ? ((h2r(t[2*k]) >= h2r(t[2*k+1])) ? t[2*k] : t[2*k+1]) : r2h(h2r(t[2*k]) + h2r(t[2*k+1]));
    return t[0];
  endfunction

  task automatic run_one(input int n);
    vu_cmd_t c;
    logic [V-1:0][15:0] x, y, exp_row;
    logic [15:0] exp_fp;
    int cyc;
    bit red, got_fp;
    logic [5:0] ops [10] = '{V_ADD_VV, V_SUB_VV, V_MUL_VV, V_MAX_VV, V_ADD_VF, V_MUL_VF,
                             V_EXP_V, V_RED_SUM, V_RED_MAX, V_HAD};
    c = '0;
    c.op = ops[$urandom_range(0, 9)];
    c.src1 = 32'($urandom_range(0, D - 1));
    c.src2 = 32'($urandom_range(0, D - 1));
    c.dst  = 32'($urandom_range(0, D - 1));
    c.scalar = rnd_h(12, 17);
    c.fd = 5'($urandom);
    if (c.op == V_EXP_V) for (int k = 0; k < V; k++) mem[c.src1][k] = rnd_h(5, 16);
    x = mem[c.src1]; y = mem[c.src2];
    red = (c.op == V_RED_SUM || c.op == V_RED_MAX);
    exp_row = ref_row(c, x, y);
    exp_fp  = ref_red(c.op == V_RED_MAX, x);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    cyc = 1; got_fp = 0;
    while (!cmd_ready) begin
      if (fp_we) begin got_fp = 1; check(fp_wa == c.fd && fp_wd == exp_fp, $sformatf("reduction %h ref %h", fp_wd, exp_fp)); end
      @(negedge clk); cyc++;
    end
    if (red && !got_fp) begin
      check(fp_we, "reduction writes its FP register");
      if (fp_we) check(fp_wa == c.fd && fp_wd == exp_fp, $sformatf("reduction %h ref %h", fp_wd, exp_fp));
    end
    if (!rand_gnt) check(cyc == (red ? 4 : 5), $sformatf("op %h took %0d cycles", c.op, cyc));
    if (!red) begin
      for (int k = 0; k < V; k++) begin
        if (c.op == V_EXP_V) begin
          real r, g; r = $exp(h2r(x[k])); g = h2r(mem[c.dst][k]);
          check(g >= r * (1.0 - 1.0 / 256.0) && g <= r * (1.0 + 1.0 / 256.0), "exp lane");
        end else check(mem[c.dst][k] == exp_row[k],
                       $sformatf("n%0d op %h lane %0d: %h ref %h", n, c.op, k, mem[c.dst][k], exp_row[k]));
      end
    end
  endtask

  initial begin
    for (int r = 0; r < D; r++) for (int k = 0; k < V; k++) mem[r][k] = rnd_h(12, 17);
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) run_one(n);
    rand_gnt = 0;
    for (int n = 0; n < 150; n++) run_one(n);
    check(stat_ops == 300, "operation counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
