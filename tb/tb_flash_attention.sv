// tb_flash_attention: one attention tile of a decode step run end to end on the core.
//
// Configuration BLEN = 4, MLEN = VLEN = 32 (head dimension 32 here, a single head), 64
// Vector SRAM rows. Four queries (a batch of BLEN) attend to 32 cached tokens. The
// program follows the FlashAttention tile loop as the instruction set expresses it:
//   1. H_LOAD_V the queries Q (4 MX rows) and H_LOAD_M the key tile K (tokens x head dim)
//      into Matrix SRAM tile 0 and the value tile V into tile 1 (prefetch while Q.K^T runs);
//   2. S = Q K^T: eight M_TMM over K rows 4c..4c+3, each followed by an M_SUM into column
//      block c of the accumulate buffer, the last one flushing S to Vector SRAM;
//   3. per query row: V_RED_MAX, V_SUB_VF, V_EXP_V, V_RED_SUM, S_FRECI, V_MUL_VF, i.e.
//      P = softmax(S) with the running max and sum kept in FP registers;
//   4. O = P V: eight M_MM over V columns 4c..4c+3 (transpose-on-read), M_SUMs, flush;
//   5. H_STORE_V of O, C_FENCE, C_HALT.
// References: S bit exact against real arithmetic on the MX inputs; P within 2% of the
// softmax of the computed S; O against P quantized to MXINT4 (as the X buffer does, by
// the testbench's own rule) times V, to within one FP16 rounding step; the stored MX
// rows of O to half a quantization step. Counters: 16 tile streams of BLEN cycles, 16
// M_SUMs, 24 vector instructions, hazard stalls. A watchdog ends a hung run.
module tb_flash_attention;
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

  // MX quantization of one FP16 row in real arithmetic (max-based power-of-two scale)
  task automatic mx_q(input real v [M], output real q [M]);
    for (int b = 0; b < NB; b++) begin
      real m, st, a;
      int x;
      m = 0.0;
      for (int k = b * BLK; k < (b + 1) * BLK; k++) if ((v[k] < 0 ? -v[k] : v[k]) > m) m = v[k] < 0 ? -v[k] : v[k];
      x = -60;
      while (7.0 * p2(x) < m) x++;
      st = p2(x);
      for (int k = b * BLK; k < (b + 1) * BLK; k++) begin
        a = $floor((v[k] < 0 ? -v[k] : v[k]) / st + 0.5);
        if (a > 7.0) a = 7.0;
        q[k] = (v[k] < 0 ? -a : a) * (m == 0.0 ? 0.0 : st);
      end
    end
  endtask

  initial begin
    real qv [M][M], kt [M][M], vt [M][M];
    real ref_v, mx, sum, v, sm [M], pr [M], pq [M], s, d;
    logic [M-1:0][EW-1:0] se;
    logic [NB-1:0][SW-1:0] ss;
    put_mx(200, 700, B, qv);
    put_mx(0, 500, M, kt);
    put_mx(100, 600, M, vt);

    li(2, 200); li(3, 700); li(4, 4); li(5, 32); li(6, 1); li(7, 500);
    li(8, 32); li(9, 100); li(10, 600); li(12, 8); li(15, 16); li(16, 24);
    li(17, 300); li(18, 800);
    prog.push_back(enc(C_SET_ADDR, 0, 0, 0, 0));
    prog.push_back(enc(C_SET_SCALE, 0, 0, 0, 0));
    prog.push_back(enc(C_SET_STRIDE, 0, 6, 0, 0));
    prog.push_back(enc(C_SET_MLOAD, 0, 5, 0, 0));
    prog.push_back(enc(C_SET_VLOAD, 0, 4, 0, 0));
    prog.push_back(enc(C_SET_VWRITE, 0, 4, 0, 0));
    prog.push_back(enc(H_LOAD_V, 0, 2, 3, 0));        // Q -> rows 0..3
    prog.push_back(enc(H_LOAD_M, 0, 0, 7, 0));        // K -> tile 0
    prog.push_back(enc(H_LOAD_M, 8, 9, 10, 0));       // V -> tile 1 (prefetch)
    for (int c = 0; c < M / B; c++) begin             // S = Q K^T -> rows 8..11
      li(11, B * c);
      prog.push_back(enc(M_TMM, 0, 11, 0, 0));
      prog.push_back(enc(M_SUM, 12, 0, 0, c + (c == M / B - 1 ? 1024 : 0)));
    end
    for (int r = 0; r < B; r++) begin                 // P = softmax(S) -> rows 16..19
      li(13, 8 + r); li(14, 16 + r);
      prog.push_back(enc(V_RED_MAX, 1, 13, 0, 0));
      prog.push_back(enc(V_SUB_VF, 14, 13, 1, 0));
      prog.push_back(enc(V_EXP_V, 14, 14, 0, 0));
      prog.push_back(enc(V_RED_SUM, 2, 14, 0, 0));
      prog.push_back(enc(S_FRECI, 3, 2, 0, 0));
      prog.push_back(enc(V_MUL_VF, 14, 14, 3, 0));
    end
    for (int c = 0; c < M / B; c++) begin             // O = P V -> rows 24..27
      li(11, M + B * c);
      prog.push_back(enc(M_MM, 15, 11, 0, 0));
      prog.push_back(enc(M_SUM, 16, 0, 0, c + (c == M / B - 1 ? 1024 : 0)));
    end
    prog.push_back(enc(H_STORE_V, 16, 17, 18, 0));    // O -> HBM 300.., 800..
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
    $display("attention tile finished in %0d cycles", cycles);

    for (int i = 0; i < B; i++) begin
      // S row
      for (int j = 0; j < M; j++) begin
        ref_v = 0.0;
        for (int k = 0; k < M; k++) ref_v += qv[i][k] * kt[j][k];
        check(dut.u_vsram.mem[8 + i][j] == r2h(ref_v),
              $sformatf("S (%0d,%0d): %f ref %f", i, j, h2r(dut.u_vsram.mem[8 + i][j]), ref_v));
      end
      // P row
      mx = -1.0e30; sum = 0.0;
      for (int k = 0; k < M; k++) if (h2r(dut.u_vsram.mem[8 + i][k]) > mx) mx = h2r(dut.u_vsram.mem[8 + i][k]);
      for (int k = 0; k < M; k++) begin sm[k] = $exp(h2r(dut.u_vsram.mem[8 + i][k]) - mx); sum += sm[k]; end
      for (int k = 0; k < M; k++) begin
        v = h2r(dut.u_vsram.mem[16 + i][k]);
        check(v >= sm[k] / sum * 0.98 - 1e-4 && v <= sm[k] / sum * 1.02 + 1e-4,
              $sformatf("P (%0d,%0d): %f ref %f", i, k, v, sm[k] / sum));
        pr[k] = v;
      end
      // O row = MX(P) V
      mx_q(pr, pq);
      for (int j = 0; j < M; j++) begin
        ref_v = 0.0;
        for (int k = 0; k < M; k++) ref_v += pq[k] * vt[k][j];
        v = h2r(dut.u_vsram.mem[24 + i][j]);
        d = v - ref_v; if (d < 0) d = -d;
        check(d <= (ref_v < 0 ? -ref_v : ref_v) * p2(-10) + p2(-14),
              $sformatf("O (%0d,%0d): %f ref %f", i, j, v, ref_v));
      end
    end
    // stored O rows
    for (int i = 0; i < B; i++) begin
      check(hbm.exists(300 + i) && hbm.exists(800 + i), "H_STORE_V wrote O");
      se = hbm[300 + i]; ss = hbm[800 + i][NB*SW-1:0];
      for (int k = 0; k < M; k++) begin
        s = p2(int'(ss[k / BLK]) - 127);
        v = real'(int'($signed(se[k]))) * s - h2r(dut.u_vsram.mem[24 + i][k]);
        check(v <= s / 2.0 && -v <= s / 2.0, $sformatf("stored O (%0d,%0d) off by %f (step %f)", i, k, v, s));
      end
    end
    $display("issued=%0d hazard=%0d busy=%0d fence=%0d modesw=%0d stream=%0d tiles=%0d sums=%0d vec=%0d scalar=%0d rd=%0d wr=%0d",
             stat_issued, stat_stall_hazard, stat_stall_busy, stat_stall_fence, stat_mode_switch,
             stat_stream_cycles, stat_tiles, stat_sums, stat_vec_ops, stat_scalar_ops,
             stat_hbm_rd_beats, stat_hbm_wr_beats);
    check(stat_issued == 32'(prog.size()), "every instruction issued");
    check(stat_stall_hazard > 0, "hazard stalls occurred");
    check(stat_tiles == 16 && stat_stream_cycles == 16 * B, "16 tile streams of BLEN cycles");
    check(stat_sums == 16, "16 M_SUMs");
    check(stat_vec_ops == 5 * B, "vector instructions");
    check(stat_mode_switch == 1, "one mode switch (M_TMM to M_MM)");
    check(stat_hbm_rd_beats == 2 * (B + M + M) && stat_hbm_wr_beats == 2 * B, "HBM beats");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
