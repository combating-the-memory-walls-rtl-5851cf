// plena_top: the PLENA accelerator core.
//
// Blocks: instruction buffer -> decoder -> {scalar unit, vector unit, matrix unit, HBM
// controller}; Vector SRAM (two ports, FP16 rows of VLEN = MLEN elements); Matrix SRAM
// (transposable, MX format, two tiles of MLEN rows). The host pushes 32-bit instructions
// (instr_valid/instr_ready) and the HBM model or controller sits on the hbm_* port (see
// hbm_controller for the protocol). `halted` rises when C_HALT has issued, i.e. after
// every unit has gone idle.
//
// Vector SRAM port sharing (this implementation's arbitration): port A serves the vector
// unit (src1 read, result write) and otherwise the HBM controller (H_LOAD_V writes,
// H_STORE_V reads); port B serves the vector unit (src2 read) and otherwise the matrix
// unit (X fills, M_SUM writes). Requests are held until granted, read data come back one
// cycle after the grant. The decoder's row-range hazard checks make the order of grants
// irrelevant to results. The Matrix SRAM has one write port (HBM controller) and one
// read port (matrix unit), as in the architecture.
//
// The stat_* outputs count the mechanisms: issued instructions, hazard / busy / fence
// stall cycles, matrix mode switches, systolic-array streaming cycles, tile products,
// M_SUMs, vector and scalar instructions and HBM beats read / written.
module plena_top import plena_pkg::*; #(
  parameter int BLEN        = 32,
  parameter int MLEN        = 2048,
  parameter int HLEN        = 128,
  parameter int ELEM_W      = 4,
  parameter int SCALE_W     = 8,
  parameter int MX_BLOCK    = 16,
  parameter int ACC_W       = 48,
  parameter int ACC_LSB_EXP = -24,
  parameter int VS_DEPTH    = 1024,
  parameter int IB_DEPTH    = 64,
  parameter int HAD_N       = 16,
  parameter int BEAT_W      = MLEN * ELEM_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // host instruction stream
  input  logic              instr_valid,
  input  logic [31:0]       instr_data,
  output logic              instr_ready,
  // HBM port
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output logic              hbm_req_we,
  output logic [31:0]       hbm_req_addr,
  output logic [BEAT_W-1:0] hbm_req_wdata,
  input  logic              hbm_rsp_valid,
  output logic              hbm_rsp_ready,
  input  logic [BEAT_W-1:0] hbm_rsp_rdata,
  // status
  output logic              halted,
  output logic [31:0]       stat_issued,
  output logic [31:0]       stat_stall_hazard,
  output logic [31:0]       stat_stall_busy,
  output logic [31:0]       stat_stall_fence,
  output logic [31:0]       stat_mode_switch,
  output logic [31:0]       stat_stream_cycles,
  output logic [31:0]       stat_tiles,
  output logic [31:0]       stat_sums,
  output logic [31:0]       stat_vec_ops,
  output logic [31:0]       stat_scalar_ops,
  output logic [31:0]       stat_hbm_rd_beats,
  output logic [31:0]       stat_hbm_wr_beats
);
  localparam int VLEN  = MLEN;
  localparam int VS_AW = $clog2(VS_DEPTH);
  localparam int MS_AW = $clog2(2 * MLEN);
  localparam int IB_AW = $clog2(IB_DEPTH);

  // ---------------------------------------------------------------- instruction buffer
  logic        ib_full, ib_empty, ib_pop;
  logic [31:0] ib_word;
  logic [IB_AW:0] ib_count;
  assign instr_ready = !ib_full;

  instruction_buffer #(.DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .rst_n, .push(instr_valid && !ib_full), .push_instr(instr_data), .full(ib_full),
    .pop(ib_pop), .instr(ib_word), .empty(ib_empty), .count(ib_count));

  // ---------------------------------------------------------------- decoder
  logic        ex_valid;
  instr_t      ex_instr;
  logic [4:0]  ra0, ra1, ra2, fra;
  logic [31:0] rd0, rd1, rd2;
  logic [15:0] frd;
  logic        vu_valid, vu_ready, vu_busy, vu_wr_pend, vu_rd_pend, vu_fp_pend;
  vu_cmd_t     vu_cmd;
  logic [31:0] vu_wr_row, vu_rd_row1, vu_rd_row2;
  logic [4:0]  vu_fp_reg;
  logic        mu_valid, mu_ready, mu_busy, mu_rd_active, mu_wr_active, mu_tile_active, mu_tile_idx;
  mu_cmd_t     mu_cmd;
  logic [31:0] mu_rd_lo, mu_wr_lo;
  logic        hb_valid, hb_ready, hb_busy;
  hb_cmd_t     hb_cmd;
  hb_kind_e    hb_kind;
  logic [31:0] hb_row;
  logic [15:0] hb_rows;

  decoder #(.BLEN(BLEN), .MLEN(MLEN)) u_dec (
    .clk, .rst_n, .ib_empty, .ib_instr(instr_t'(ib_word)), .ib_pop,
    .ex_valid, .ex_instr, .ra0, .ra1, .ra2, .rd0, .rd1, .rd2, .fra, .frd,
    .vu_valid, .vu_cmd, .vu_ready, .vu_busy, .vu_wr_pend, .vu_wr_row, .vu_rd_pend,
    .vu_rd_row1, .vu_rd_row2, .vu_fp_pend, .vu_fp_reg,
    .mu_valid, .mu_cmd, .mu_ready, .mu_busy, .mu_rd_active, .mu_rd_lo, .mu_wr_active,
    .mu_wr_lo, .mu_tile_active, .mu_tile_idx,
    .hb_valid, .hb_cmd, .hb_ready, .hb_busy, .hb_kind, .hb_row, .hb_rows,
    .halted, .stat_issued, .stat_stall_hazard, .stat_stall_busy, .stat_stall_fence,
    .stat_mode_switch);

  // ---------------------------------------------------------------- scalar unit
  logic        vfp_we;
  logic [4:0]  vfp_wa;
  logic [15:0] vfp_wd;

  scalar_unit u_scalar (
    .clk, .rst_n, .ex_valid, .ex_instr, .ra0, .ra1, .ra2, .rd0, .rd1, .rd2, .fra, .frd,
    .vfp_we, .vfp_wa, .vfp_wd, .stat_ops(stat_scalar_ops));

  // ---------------------------------------------------------------- Vector SRAM
  logic                   sa_en, sa_we, sb_en, sb_we;
  logic [VS_AW-1:0]       sa_addr, sb_addr;
  logic [VLEN-1:0][15:0]  sa_wdata, sb_wdata, sa_rdata, sb_rdata;

  vector_sram #(.VLEN(VLEN), .DEPTH(VS_DEPTH)) u_vsram (
    .clk, .a_en(sa_en), .a_we(sa_we), .a_addr(sa_addr), .a_wdata(sa_wdata), .a_rdata(sa_rdata),
    .b_en(sb_en), .b_we(sb_we), .b_addr(sb_addr), .b_wdata(sb_wdata), .b_rdata(sb_rdata));

  // vector unit
  logic                  va_req, va_we, va_gnt, vb_req, vb_gnt;
  logic [VS_AW-1:0]      va_addr, vb_addr;
  logic [VLEN-1:0][15:0] va_wdata;

  vector_unit #(.VLEN(VLEN), .VS_AW(VS_AW), .HAD_N(HAD_N)) u_vec (
    .clk, .rst_n, .cmd_valid(vu_valid), .cmd(vu_cmd), .cmd_ready(vu_ready),
    .a_req(va_req), .a_we(va_we), .a_addr(va_addr), .a_wdata(va_wdata), .a_gnt(va_gnt),
    .a_rdata(sa_rdata), .b_req(vb_req), .b_addr(vb_addr), .b_gnt(vb_gnt), .b_rdata(sb_rdata),
    .fp_we(vfp_we), .fp_wa(vfp_wa), .fp_wd(vfp_wd),
    .busy(vu_busy), .wr_pend(vu_wr_pend), .wr_row(vu_wr_row), .rd_pend(vu_rd_pend),
    .rd_row1(vu_rd_row1), .rd_row2(vu_rd_row2), .fp_pend(vu_fp_pend), .fp_pend_reg(vu_fp_reg),
    .stat_ops(stat_vec_ops));

  // matrix unit + Matrix SRAM
  logic                       mv_req, mv_we, mv_gnt;
  logic [VS_AW-1:0]           mv_addr;
  logic [MLEN-1:0][15:0]      mv_wdata;
  logic                       ms_rd_en, ms_rd_col;
  logic [MS_AW-1:0]           ms_rd_idx;
  logic [MLEN-1:0][ELEM_W-1:0]  ms_rd_elem;
  logic [MLEN-1:0][SCALE_W-1:0] ms_rd_scale;

  matrix_unit #(.BLEN(BLEN), .MLEN(MLEN), .HLEN(HLEN), .ELEM_W(ELEM_W), .SCALE_W(SCALE_W),
                .MX_BLOCK(MX_BLOCK), .ACC_W(ACC_W), .ACC_LSB_EXP(ACC_LSB_EXP),
                .VS_AW(VS_AW), .MS_AW(MS_AW)) u_mat (
    .clk, .rst_n, .cmd_valid(mu_valid), .cmd(mu_cmd), .cmd_ready(mu_ready),
    .vs_req(mv_req), .vs_we(mv_we), .vs_addr(mv_addr), .vs_wdata(mv_wdata), .vs_gnt(mv_gnt),
    .vs_rdata(sb_rdata), .ms_rd_en, .ms_rd_col, .ms_rd_idx, .ms_rd_elem, .ms_rd_scale,
    .busy(mu_busy), .rd_active(mu_rd_active), .rd_lo(mu_rd_lo), .wr_active(mu_wr_active),
    .wr_lo(mu_wr_lo), .tile_active(mu_tile_active), .tile_idx(mu_tile_idx),
    .stat_stream_cycles, .stat_tiles, .stat_sums);

  logic                                  ms_wr_en;
  logic [MS_AW-1:0]                      ms_wr_row;
  logic [MLEN-1:0][ELEM_W-1:0]           ms_wr_elem;
  logic [MLEN/MX_BLOCK-1:0][SCALE_W-1:0] ms_wr_scale;

  matrix_sram #(.MLEN(MLEN), .ELEM_W(ELEM_W), .SCALE_W(SCALE_W), .MX_BLOCK(MX_BLOCK),
                .TILES(2)) u_msram (
    .clk, .wr_en(ms_wr_en), .wr_row(ms_wr_row), .wr_elem(ms_wr_elem), .wr_scale(ms_wr_scale),
    .rd_en(ms_rd_en), .rd_col_mode(ms_rd_col), .rd_idx(ms_rd_idx), .rd_elem(ms_rd_elem),
    .rd_scale(ms_rd_scale));

  // HBM controller
  logic                  hv_req, hv_we, hv_gnt;
  logic [VS_AW-1:0]      hv_addr;
  logic [VLEN-1:0][15:0] hv_wdata;

  hbm_controller #(.MLEN(MLEN), .ELEM_W(ELEM_W), .SCALE_W(SCALE_W), .MX_BLOCK(MX_BLOCK),
                   .VS_AW(VS_AW), .MS_AW(MS_AW)) u_hbm (
    .clk, .rst_n, .cmd_valid(hb_valid), .cmd(hb_cmd), .cmd_ready(hb_ready),
    .hbm_req_valid, .hbm_req_ready, .hbm_req_we, .hbm_req_addr, .hbm_req_wdata,
    .hbm_rsp_valid, .hbm_rsp_ready, .hbm_rsp_rdata,
    .ms_wr_en, .ms_wr_row, .ms_wr_elem, .ms_wr_scale,
    .vs_req(hv_req), .vs_we(hv_we), .vs_addr(hv_addr), .vs_wdata(hv_wdata), .vs_gnt(hv_gnt),
    .vs_rdata(sa_rdata),
    .busy(hb_busy), .busy_kind(hb_kind), .busy_row(hb_row), .busy_rows(hb_rows),
    .stat_rd_beats(stat_hbm_rd_beats), .stat_wr_beats(stat_hbm_wr_beats));

  // ---------------------------------------------------------------- port arbitration
  assign va_gnt   = va_req;
  assign hv_gnt   = hv_req && !va_req;
  assign sa_en    = va_req || hv_req;
  assign sa_we    = va_req ? va_we    : hv_we;
  assign sa_addr  = va_req ? va_addr  : hv_addr;
  assign sa_wdata = va_req ? va_wdata : hv_wdata;

  assign vb_gnt   = vb_req;
  assign mv_gnt   = mv_req && !vb_req;
  assign sb_en    = vb_req || mv_req;
  assign sb_we    = vb_req ? 1'b0    : mv_we;
  assign sb_addr  = vb_req ? vb_addr : mv_addr;
  assign sb_wdata = mv_wdata;
endmodule
