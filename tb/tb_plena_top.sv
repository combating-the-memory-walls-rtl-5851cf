// tb_plena_top: end-to-end testbench of the accelerator core running a small program.
//
// Configuration BLEN = 4, MLEN = VLEN = 32, HLEN = 16 (two heads), 64 Vector SRAM rows,
// 16-entry instruction buffer. The testbench models the HBM (random back-pressure and
// latency, in-order responses) and pushes the program through the instruction port,
// which back-pressures when the buffer is full. The program:
//   1. sets up scalar registers and the HBM control registers;
//   2. H_LOAD_V: 4 MX rows of X into Vector SRAM rows 0..3; H_LOAD_M: tile 0;
//   3. M_MM on W columns 0..3 and 4..7 with two M_SUMs, the second flushing rows 8..11;
//      meanwhile H_LOAD_M prefetches tile 1;
//   4. M_TMM against rows 0..3 of tile 1 (mode switch), flush to rows 12..15;
//   5. M_HTMM against the same rows (head mode, mode switch), flush to rows 16..19;
//   5b. M_TMM with the inverse Hadamard transform (mode switch) against rows 4..7 of
//      tile 1, which hold Hadamard-rotated rows; flush to rows 24..27;
//   6. softmax of row 8 on the vector and scalar units: V_RED_MAX, V_SUB_VF, V_EXP_V,
//      V_RED_SUM, S_FRECI, V_MUL_VF into row 20;
//   7. H_STORE_V rows 20..23 to HBM, C_FENCE, C_HALT.
// Checks: every product element against a real-number reference built from the MX
// values in HBM (bit exact after FP16 rounding); the softmax row to 2%; the stored MX
// row against the softmax row to half a quantization step; and the mechanism counters:
// hazard stalls (RAW on loaded rows and on the FP register of a reduction), busy
// stalls (second H_LOAD_M behind the first), instruction-buffer back-pressure, three
// mode switches, five tile streams of BLEN cycles each (cycle count), five M_SUMs,
// five vector instructions and the HBM beat counts. A watchdog ends a hung run.
module tb_plena_top;
  import plena_pkg::*;
  import fp_ref_pkg::*;
  localparam int B = 4, M = 32, H = 16, EW = 4, SW = 8, BLK = 16, NB = M / BLK, BW = M * EW;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready;
  logic [31:0] instr_data = '0;
  logic hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rsp_valid, hbm_rsp_ready;
  logic [31:0] hbm_req_addr;
  logic [BW-1:0] hbm_req_wdata, hbm_rsp_rdata;
  logic halted;
  logic [31:0] stat_issued, stat_stall_hazard, stat_stall_busy, stat_stall_fence, stat_mode_switch,
               stat_stream_cycles, stat_tiles, stat_sums, stat_vec_ops, stat_scalar_ops,
               stat_hbm_rd_beats, stat_hbm_wr_beats;
  int checks = 0, failures = 0, backpressure = 0, cycles = 0;

  plena_top #(.BLEN(B), .MLEN(M), .HLEN(H), .VS_DEPTH(64), .IB_DEPTH(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin #20000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- HBM model
  logic [BW-1:0] hbm [logic [31:0]];
  typedef struct { logic [BW-1:0] d; int due; } rsp_t;
  rsp_t rq [$];
  int now = 0;
  logic rr = 0;
  always @(negedge clk) rr <= 1'($urandom_range(0, 3) != 0);
  assign hbm_req_ready = rr;
  always_comb begin
    hbm_rsp_valid = 1'b0;
    hbm_rsp_rdata = '0;
    if (rq.size() > 0) begin
      hbm_rsp_valid = rq[0].due <= now;
      hbm_rsp_rdata = rq[0].d;
    end
  end
  always @(posedge clk) begin
    now <= now + 1;
    if (hbm_rsp_valid && hbm_rsp_ready) void'(rq.pop_front());
    if (hbm_req_valid && hbm_req_ready) begin
      if (hbm_req_we) hbm[hbm_req_addr] = hbm_req_wdata;
      else rq.push_back('{d: hbm.exists(hbm_req_addr) ? hbm[hbm_req_addr] : '0,
                          due: now + 3 + int'($urandom_range(0, 5))});
    end
  end

  // MX row i of a matrix stored at element base ea / scale base sa (stride 1)
  real xv [B][M];        // X rows (dequantized)
  real t0 [M][M];        // tile 0, [row][col]
  real t1 [M][M];        // tile 1
  task automatic put_mx(input int ea, input int sa, input int rows, output real v [M][M]);
    logic [M-1:0][EW-1:0] e;
    logic [NB-1:0][SW-1:0] s;
    for (int r = 0; r < rows; r++) begin
      for (int k = 0; k < M; k++) e[k] = EW'(int'($urandom_range(0, 14)) - 7);   // -7..7
      for (int b = 0; b < NB; b++) s[b] = SW'(127 - 3 - int'($urandom_range(0, 1)));
      hbm[ea + r] = e;
      hbm[sa + r] = BW'(s);
      for (int k = 0; k < M; k++) v[r][k] = real'(int'($signed(e[k]))) * p2(int'(s[k / BLK]) - 127);
    end
  endtask

  // ---------------------------------------------------------------- program
  logic [31:0] prog [$];
  function automatic logic [31:0] enc(input logic [5:0] op, input int rd, input int rs1,
                                      input int rs2, input int imm);
    return {op, 5'(rd), 5'(rs1), 5'(rs2), 11'(imm)};
  endfunction
  task automatic li(input int r, input int v);
    prog.push_back(enc(S_ADDI, r, 0, 0, v));
  endtask

  initial begin
    real xm [M][M];
    real ref_v, mx, sum, v, sm [M], s;
    logic [M-1:0][EW-1:0] se;
    logic [NB-1:0][SW-1:0] ss;
    put_mx(200, 700, B, xm);
    for (int i = 0; i < B; i++) for (int k = 0; k < M; k++) xv[i][k] = xm[i][k];
    put_mx(0, 500, M, t0);
    put_mx(100, 600, M, t1);
    // rows 4..7 of tile 1 hold Hadamard-rotated K rows: each block of the unrotated row
    // is one impulse of value 4 * 2^-3 at lane p; rotated, every lane is +-2^-3, stored
    // as elements +-4 with scale 2^-5
    for (int r = 4; r < 8; r++) begin
      for (int b = 0; b < NB; b++) begin
        int p;
        p = (3 * r + 5 * b) % BLK;
        for (int c = 0; c < BLK; c++) begin
          se[b*BLK + c] = EW'(($countones(c & p) % 2) ? -4 : 4);
          t1[r][b*BLK + c] = (c == p) ? 0.5 : 0.0;
        end
        ss[b] = SW'(122);
      end
      hbm[100 + r] = se;
      hbm[600 + r] = BW'(ss);
    end

    li(1, 0); li(2, 200); li(3, 700); li(4, 4); li(5, 32); li(6, 1); li(7, 500);
    li(8, 32); li(9, 100); li(10, 600); li(11, 8); li(12, 4); li(13, 12); li(14, 16);
    li(15, 800); li(16, 300); li(18, 20); li(19, 36); li(20, 24);
    prog.push_back(enc(C_SET_ADDR, 0, 0, 0, 0));
    prog.push_back(enc(C_SET_SCALE, 0, 0, 0, 0));
    prog.push_back(enc(C_SET_STRIDE, 0, 6, 0, 0));
    prog.push_back(enc(C_SET_MLOAD, 0, 5, 0, 0));
    prog.push_back(enc(C_SET_VLOAD, 0, 4, 0, 0));
    prog.push_back(enc(C_SET_VWRITE, 0, 4, 0, 0));
    prog.push_back(enc(H_LOAD_V, 1, 2, 3, 0));        // X -> rows 0..3
    prog.push_back(enc(H_LOAD_M, 0, 0, 7, 0));        // tile 0 (busy stall: HBM busy)
    prog.push_back(enc(M_MM, 1, 0, 0, 0));            // cols 0..3 (hazard: tile 0 loading)
    prog.push_back(enc(H_LOAD_M, 8, 9, 10, 0));       // prefetch tile 1
    prog.push_back(enc(M_SUM, 11, 0, 0, 0));
    prog.push_back(enc(M_MM, 1, 12, 0, 0));           // cols 4..7
    prog.push_back(enc(M_SUM, 11, 0, 0, 1024 + 1));   // flush rows 8..11
    prog.push_back(enc(M_TMM, 1, 8, 0, 0));           // rows 0..3 of tile 1
    prog.push_back(enc(M_SUM, 13, 0, 0, 1024));
    prog.push_back(enc(M_HTMM, 1, 8, 0, 0));
    prog.push_back(enc(M_SUM, 14, 0, 0, 1024));
    prog.push_back(enc(M_TMM, 1, 19, 0, 1));           // rows 4..7 of tile 1, inverse Hadamard
    prog.push_back(enc(M_SUM, 20, 0, 0, 1024));       // flush rows 24..27
    prog.push_back(enc(V_RED_MAX, 1, 11, 0, 0));      // f1 = max(row 8)
    prog.push_back(enc(V_SUB_VF, 18, 11, 1, 0));      // row 20 = row 8 - f1
    prog.push_back(enc(V_EXP_V, 18, 18, 0, 0));
    prog.push_back(enc(V_RED_SUM, 2, 18, 0, 0));      // f2 = sum
    prog.push_back(enc(S_FRECI, 3, 2, 0, 0));         // f3 = 1/f2
    prog.push_back(enc(V_MUL_VF, 18, 18, 3, 0));
    prog.push_back(enc(H_STORE_V, 18, 16, 15, 0));    // rows 20..23 -> HBM 300.., 800..
    prog.push_back(enc(C_FENCE, 0, 0, 0, 0));
    prog.push_back(enc(C_HALT, 0, 0, 0, 0));

    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (prog[n]) begin
      @(negedge clk);
      instr_valid = 1; instr_data = prog[n];
      @(posedge clk);
      while (!instr_ready) begin backpressure++; @(posedge clk); end
    end
    @(negedge clk); instr_valid = 0;
    while (!halted) @(negedge clk);
    $display("program finished in %0d cycles", cycles);

    // ---- M_MM: rows 8..11, columns 0..7 = X * tile0[:, 0..7]
    for (int i = 0; i < B; i++)
      for (int j = 0; j < 2 * B; j++) begin
        ref_v = 0.0;
        for (int k = 0; k < M; k++) ref_v += xv[i][k] * t0[k][j];
        check(dut.u_vsram.mem[8 + i][j] == r2h(ref_v),
              $sformatf("M_MM (%0d,%0d): %f ref %f", i, j, h2r(dut.u_vsram.mem[8 + i][j]), ref_v));
      end
    // ---- M_TMM: rows 12..15, columns 0..3 = X * tile1[0..3, :]^T
    for (int i = 0; i < B; i++)
      for (int j = 0; j < B; j++) begin
        ref_v = 0.0;
        for (int k = 0; k < M; k++) ref_v += xv[i][k] * t1[j][k];
        check(dut.u_vsram.mem[12 + i][j] == r2h(ref_v),
              $sformatf("M_TMM (%0d,%0d): %f ref %f", i, j, h2r(dut.u_vsram.mem[12 + i][j]), ref_v));
      end
    // ---- M_HTMM: rows 16..19, head g in columns g*B .. g*B+3
    for (int i = 0; i < B; i++)
      for (int g = 0; g < M / H; g++)
        for (int j = 0; j < B; j++) begin
          ref_v = 0.0;
          for (int k = g * H; k < (g + 1) * H; k++) ref_v += xv[i][k] * t1[j][k];
          check(dut.u_vsram.mem[16 + i][g * B + j] == r2h(ref_v),
                $sformatf("M_HTMM head %0d (%0d,%0d): %f ref %f", g, i, j, h2r(dut.u_vsram.mem[16 + i][g * B + j]), ref_v));
        end
    // ---- M_TMM with inverse Hadamard: rows 24..27 = X * unrotated(tile1[4..7, :])^T
    for (int i = 0; i < B; i++)
      for (int j = 0; j < B; j++) begin
        ref_v = 0.0;
        for (int k = 0; k < M; k++) ref_v += xv[i][k] * t1[4 + j][k];
        check(dut.u_vsram.mem[24 + i][j] == r2h(ref_v),
              $sformatf("M_TMM inverse Hadamard (%0d,%0d): %f ref %f", i, j, h2r(dut.u_vsram.mem[24 + i][j]), ref_v));
      end
    // ---- softmax of row 8
    mx = -1.0e30; sum = 0.0;
    for (int k = 0; k < M; k++) if (h2r(dut.u_vsram.mem[8][k]) > mx) mx = h2r(dut.u_vsram.mem[8][k]);
    for (int k = 0; k < M; k++) begin sm[k] = $exp(h2r(dut.u_vsram.mem[8][k]) - mx); sum += sm[k]; end
    for (int k = 0; k < M; k++) begin
      sm[k] = sm[k] / sum;
      v = h2r(dut.u_vsram.mem[20][k]);
      check(v >= sm[k] * 0.98 - 1e-4 && v <= sm[k] * 1.02 + 1e-4, $sformatf("softmax lane %0d: %f ref %f", k, v, sm[k]));
    end
    // ---- stored MX row 20 in HBM
    check(hbm.exists(300) && hbm.exists(800), "H_STORE_V wrote row 20");
    se = hbm[300]; ss = hbm[800][NB*SW-1:0];
    for (int k = 0; k < M; k++) begin
      s = p2(int'(ss[k / BLK]) - 127);
      v = real'(int'($signed(se[k]))) * s - h2r(dut.u_vsram.mem[20][k]);
      check(v <= s / 2.0 && -v <= s / 2.0, $sformatf("stored lane %0d off by %f (step %f)", k, v, s));
    end
    // ---- mechanisms
    $display("issued=%0d hazard=%0d busy=%0d fence=%0d modesw=%0d stream=%0d tiles=%0d sums=%0d vec=%0d scalar=%0d rd=%0d wr=%0d backpressure=%0d",
             stat_issued, stat_stall_hazard, stat_stall_busy, stat_stall_fence, stat_mode_switch,
             stat_stream_cycles, stat_tiles, stat_sums, stat_vec_ops, stat_scalar_ops,
             stat_hbm_rd_beats, stat_hbm_wr_beats, backpressure);
    check(stat_issued == 32'(prog.size()), "every instruction issued");
    check(stat_stall_hazard > 0, "hazard stalls occurred");
    check(stat_stall_busy > 0, "busy-unit stalls occurred");
    check(stat_stall_fence > 0, "fence waited");
    check(backpressure > 0, "instruction buffer back-pressure");
    check(stat_mode_switch == 3, "three matrix mode switches");
    check(stat_tiles == 5 && stat_stream_cycles == 5 * B, "five tile streams of BLEN cycles");
    check(stat_sums == 5, "five M_SUMs");
    check(stat_vec_ops == 5, "five vector instructions");
    check(stat_scalar_ops == 20, "scalar instructions");
    check(stat_hbm_rd_beats == 2 * (B + M + M), "HBM read beats");
    check(stat_hbm_wr_beats == 2 * 4, "HBM write beats");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
