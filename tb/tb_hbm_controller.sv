// tb_hbm_controller: self-checking testbench for the HBM load / store engines.
//
// MLEN = 32 (beats of 128 bits, two MX blocks of 16 per row). The testbench models the
// HBM (random request back-pressure, in-order responses after a random latency of 2..6
// cycles), the Matrix SRAM write port and a Vector SRAM with random grants. Checks:
//   * H_LOAD_M copies element and scale beats unchanged into Matrix SRAM rows;
//   * H_LOAD_V writes dequantized FP16 rows (elem * 2^(scale-127)) into Vector SRAM;
//   * H_STORE_V writes quantized rows and their scales to HBM at the strided
//     addresses; loading them back gives the quantized values of the original rows;
//   * with no back-pressure and latency 2, an R-row H_LOAD_M finishes within
//     2R + 5 cycles (one beat per cycle, latency hidden) - cycle-count check.
module tb_hbm_controller;
  import plena_pkg::*;
  import fp_ref_pkg::*;
  localparam int M = 32, EW = 4, SW = 8, BLK = 16, AW = 4, MSAW = 6, BW = M * EW, NB = M / BLK;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready;
  hb_cmd_t cmd;
  logic hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rsp_valid, hbm_rsp_ready;
  logic [31:0] hbm_req_addr;
  logic [BW-1:0] hbm_req_wdata, hbm_rsp_rdata;
  logic ms_wr_en; logic [MSAW-1:0] ms_wr_row;
  logic [M-1:0][EW-1:0] ms_wr_elem; logic [NB-1:0][SW-1:0] ms_wr_scale;
  logic vs_req, vs_we, vs_gnt; logic [AW-1:0] vs_addr;
  logic [M-1:0][15:0] vs_wdata, vs_rdata;
  logic busy; hb_kind_e busy_kind; logic [31:0] busy_row; logic [15:0] busy_rows;
  logic [31:0] stat_rd_beats, stat_wr_beats;
  int checks = 0, failures = 0;

  hbm_controller #(.MLEN(M), .ELEM_W(EW), .SCALE_W(SW), .MX_BLOCK(BLK), .VS_AW(AW), .MS_AW(MSAW)) dut (.*);

  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- HBM model
  logic [BW-1:0] hbm [logic [31:0]];
  bit stress = 1;
  int lat_min = 2;
  typedef struct { logic [BW-1:0] d; int due; } rsp_t;
  rsp_t rq [$];
  int now = 0;
  logic rr = 0;
  always @(negedge clk) rr <= stress ? 1'($urandom_range(0, 3) != 0) : 1'b1;
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
                          due: now + lat_min + (stress ? int'($urandom_range(0, 4)) : 0)});
    end
  end

  // ---- SRAM models
  logic [M-1:0][EW-1:0] ms_e [2*M];
  logic [NB-1:0][SW-1:0] ms_s [2*M];
  logic [M-1:0][15:0] vs [16];
  logic vg = 0;
  always @(negedge clk) vg <= stress ? 1'($urandom) : 1'b1;
  assign vs_gnt = vs_req && vg;
  always @(posedge clk) begin
    if (ms_wr_en) begin ms_e[ms_wr_row] <= ms_wr_elem; ms_s[ms_wr_row] <= ms_wr_scale; end
    if (vs_gnt && vs_we) vs[vs_addr] <= vs_wdata;
    if (vs_gnt && !vs_we) vs_rdata <= vs[vs_addr];
  end

  task automatic send(input hb_kind_e k, input int row, input int ea, input int sa, input int stride, input int rows, output int cycles);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = '{kind: k, sram_row: 32'(row), elem_addr: 32'(ea), scale_addr: 32'(sa), stride: 32'(stride), rows: 16'(rows)};
    cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  function automatic logic [BW-1:0] rnd_beat();
    logic [BW-1:0] b;
    for (int i = 0; i < BW / 32; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  initial begin
    int cyc;
    logic [NB-1:0][SW-1:0] sc;
    logic [M-1:0][EW-1:0] el;
    logic [M-1:0][15:0] orig [4];
    real r;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      stress = (pass == 0);
      // HBM contents: rows at element base 100 + 3i, scales at 400 + 3i
      for (int i = 0; i < 8; i++) begin
        hbm[100 + 3*i] = rnd_beat();
        for (int b = 0; b < NB; b++) sc[b] = SW'(127 - 8 + int'($urandom_range(0, 10)));
        hbm[400 + 3*i] = BW'(sc);
      end
      // H_LOAD_M: 8 rows into Matrix SRAM rows 40..47
      send(HB_LOAD_M, 40, 100, 400, 3, 8, cyc);
      for (int i = 0; i < 8; i++)
        check(ms_e[40 + i] == hbm[100 + 3*i] && BW'(ms_s[40 + i]) == hbm[400 + 3*i], $sformatf("load_m row %0d", i));
      if (!stress) check(cyc <= 2 * 8 + 5, $sformatf("load_m of 8 rows took %0d cycles", cyc));
      // H_LOAD_V: 4 rows into Vector SRAM rows 2..5, dequantized
      send(HB_LOAD_V, 2, 100, 400, 3, 4, cyc);
      for (int i = 0; i < 4; i++) begin
        el = hbm[100 + 3*i]; sc = hbm[400 + 3*i][NB*SW-1:0];
        for (int k = 0; k < M; k++) begin
          r = real'(int'($signed(el[k]))) * p2(int'(sc[k / BLK]) - 127);
          check(h2r(vs[2 + i][k]) == r, $sformatf("load_v row %0d lane %0d", i, k));
        end
      end
      // H_STORE_V: 4 FP16 rows (10..13) to HBM 1000 + 2i / 2000 + 2i, then load back to 6..9
      for (int i = 0; i < 4; i++) begin
        for (int k = 0; k < M; k++) vs[10 + i][k] = rnd_h(10, 18);
        orig[i] = vs[10 + i];
      end
      send(HB_STORE_V, 10, 1000, 2000, 2, 4, cyc);
      send(HB_LOAD_V, 6, 1000, 2000, 2, 4, cyc);
      for (int i = 0; i < 4; i++)
        for (int b = 0; b < NB; b++) begin
          real mx, q, s;
          mx = 0.0;
          for (int k = b * BLK; k < (b + 1) * BLK; k++) if ($sqrt(h2r(orig[i][k]) ** 2) > mx) mx = $sqrt(h2r(orig[i][k]) ** 2);
          check(hbm.exists(1000 + 2*i) && hbm.exists(2000 + 2*i), "store wrote both beats");
          for (int k = b * BLK; k < (b + 1) * BLK; k++) begin
            s = p2(int'(hbm[2000 + 2*i][b*SW +: SW]) - 127);
            check(7.0 * s >= mx && 7.0 * s / 2.0 < mx, $sformatf("stored scale minimal: s=%f mx=%f", s, mx));
            q = $floor($sqrt(h2r(orig[i][k]) ** 2) / s + 0.5);
            if (q > 7.0) q = 7.0;
            if (h2r(orig[i][k]) < 0) q = -q;
            check(h2r(vs[6 + i][k]) == q * s, $sformatf("round trip row %0d lane %0d: %f ref %f", i, k, h2r(vs[6 + i][k]), q * s));
          end
        end
    end
    check(stat_wr_beats == 16, $sformatf("write beats %0d", stat_wr_beats));
    check(stat_rd_beats == 2 * 2 * (8 + 4 + 4), $sformatf("read beats %0d", stat_rd_beats));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
