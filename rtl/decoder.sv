// decoder: in-order instruction issue with hazard checks and stalls.
//
// Each cycle it looks at the instruction at the head of the instruction buffer, reads
// the scalar registers it names, forms the command for the target unit (scalar, vector,
// matrix or HBM controller) and issues it when the unit is ready and no hazard exists.
// Issue is in order, at most one instruction per cycle; the units then run
// concurrently, so an HBM load (prefetch) or a matrix tile runs while later vector and
// scalar instructions issue.
//
// Hazards are checked on ranges of SRAM rows, not on individual registers:
//   * Vector SRAM rows: a unit may not read rows another unit still has to write, nor
//     write rows another unit still has to read or write (vector unit: src/dst row;
//     matrix unit: BLEN X rows being filled, BLEN rows of an M_SUM flush; HBM
//     controller: the rows of the running H_LOAD_V / H_STORE_V);
//   * Matrix SRAM: H_LOAD_M may not overwrite the tile the matrix unit is reading and a
//     matrix command may not read the tile an H_LOAD_M is filling;
//   * FP registers: an instruction that reads or writes the FP register a vector
//     reduction is about to write waits for it.
// Scalar results are written at the end of the issue cycle, so the next instruction
// already sees them.
//
// Operand conventions (this implementation's encoding; the architecture only names the
// instruction classes): vector ops dst=x[rd], src1=x[rs1], src2=x[rs2], FP scalar f[rs2],
// reductions write f[rd]; M_MM/M_TMM/M_HTMM X row x[rd], Matrix SRAM index x[rs1];
// imm[0] of M_TMM/M_HTMM applies the inverse Hadamard transform to the W rows;
// M_SUM destination row x[rd], column block imm[9:0], flush imm[10]; H_* SRAM row x[rd],
// element offset x[rs1], scale offset x[rs2], relative to the C_SET_ADDR / C_SET_SCALE
// base registers; row counts come from C_SET_MLOAD / C_SET_VLOAD / C_SET_VWRITE and the
// row stride from C_SET_STRIDE (all taken from x[rs1]). C_FENCE waits until every unit
// is idle; C_HALT does the same and then stops issue.
//
// Counters: cycles stalled on a data hazard, on a busy unit, on a fence, issued
// instructions and matrix mode switches (M_MM / M_TMM / M_HTMM changes).
module decoder import plena_pkg::*; #(
  parameter int BLEN = 32,
  parameter int MLEN = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction buffer
  input  logic        ib_empty,
  input  instr_t      ib_instr,
  output logic        ib_pop,
  // scalar unit
  output logic        ex_valid,
  output instr_t      ex_instr,
  output logic [4:0]  ra0, ra1, ra2,
  input  logic [31:0] rd0, rd1, rd2,
  output logic [4:0]  fra,
  input  logic [15:0] frd,
  // vector unit
  output logic        vu_valid,
  output vu_cmd_t     vu_cmd,
  input  logic        vu_ready,
  input  logic        vu_busy,
  input  logic        vu_wr_pend,
  input  logic [31:0] vu_wr_row,
  input  logic        vu_rd_pend,
  input  logic [31:0] vu_rd_row1,
  input  logic [31:0] vu_rd_row2,
  input  logic        vu_fp_pend,
  input  logic [4:0]  vu_fp_reg,
  // matrix unit
  output logic        mu_valid,
  output mu_cmd_t     mu_cmd,
  input  logic        mu_ready,
  input  logic        mu_busy,
  input  logic        mu_rd_active,
  input  logic [31:0] mu_rd_lo,
  input  logic        mu_wr_active,
  input  logic [31:0] mu_wr_lo,
  input  logic        mu_tile_active,
  input  logic        mu_tile_idx,
  // HBM controller
  output logic        hb_valid,
  output hb_cmd_t     hb_cmd,
  input  logic        hb_ready,
  input  logic        hb_busy,
  input  hb_kind_e    hb_kind,
  input  logic [31:0] hb_row,
  input  logic [15:0] hb_rows,
  // status
  output logic        halted,
  output logic [31:0] stat_issued,
  output logic [31:0] stat_stall_hazard,
  output logic [31:0] stat_stall_busy,
  output logic [31:0] stat_stall_fence,
  output logic [31:0] stat_mode_switch
);
  localparam int LW = $clog2(MLEN);

  function automatic logic overlap(input logic [31:0] a, input logic [31:0] na,
                                   input logic [31:0] b, input logic [31:0] nb);
    return ({1'b0, a} < {1'b0, b} + {1'b0, nb}) && ({1'b0, b} < {1'b0, a} + {1'b0, na});
  endfunction

  // control registers
  logic [31:0] addr_base, scale_base, stride;
  logic [15:0] m_rows, v_rows, w_rows;
  mm_mode_e    last_mode;
  logic        mode_valid;

  instr_t i;
  assign i   = ib_instr;
  assign ra0 = i.rd;
  assign ra1 = i.rs1;
  assign ra2 = i.rs2;
  assign fra = i.rs2;

  // instruction class
  logic c_vec, c_vec2, c_vf, c_red, c_mat, c_sum, c_hbm, c_sfp, c_scl;
  always_comb begin
    c_vec = 1'b0; c_vec2 = 1'b0; c_vf = 1'b0; c_red = 1'b0; c_mat = 1'b0; c_sum = 1'b0;
    c_hbm = 1'b0; c_sfp = 1'b0; c_scl = 1'b0;
    unique case (i.op)
      V_ADD_VV, V_SUB_VV, V_MUL_VV, V_MAX_VV: begin c_vec = 1'b1; c_vec2 = 1'b1; end
      V_ADD_VF, V_SUB_VF, V_MUL_VF:               begin c_vec = 1'b1; c_vf = 1'b1; end
      V_EXP_V, V_RECI_V, V_HAD:                   c_vec = 1'b1;
      V_RED_SUM, V_RED_MAX:                          begin c_vec = 1'b1; c_red = 1'b1; end
      M_MM, M_TMM, M_HTMM:                        c_mat = 1'b1;
      M_SUM:                                            c_sum = 1'b1;
      H_LOAD_M, H_LOAD_V, H_STORE_V:              c_hbm = 1'b1;
      S_FADD, S_FSUB, S_FMUL, S_FDIV, S_FEXP, S_FRECI, S_FSQRT,
      S_FMAX, S_FLI:                                 begin c_scl = 1'b1; c_sfp = 1'b1; end
      S_ADD, S_SUB, S_MUL, S_DIV, S_ADDI, S_LUI: c_scl = 1'b1;
      default: ;
    endcase
  end

  // commands
  mm_mode_e mode;
  always_comb begin
    unique case (i.op)
      M_TMM:  mode = MM_ROW;
      M_HTMM: mode = MM_HEAD;
      default:   mode = MM_COL;
    endcase
    vu_cmd        = '0;
    vu_cmd.op     = i.op;
    vu_cmd.dst    = rd0;
    vu_cmd.src1   = rd1;
    vu_cmd.src2   = rd2;
    vu_cmd.scalar = frd;
    vu_cmd.fd     = i.rd;
    mu_cmd         = '0;
    mu_cmd.is_sum  = c_sum;
    mu_cmd.mode    = mode;
    mu_cmd.vs_row  = rd0;
    mu_cmd.ms_idx  = rd1;
    mu_cmd.col_blk = i.imm[9:0];
    mu_cmd.flush   = i.imm[10];
    mu_cmd.ihad    = i.imm[0] && (mode != MM_COL);
    hb_cmd            = '0;
    hb_cmd.sram_row   = rd0;
    hb_cmd.elem_addr  = addr_base + rd1;
    hb_cmd.scale_addr = scale_base + rd2;
    hb_cmd.stride     = stride;
    unique case (i.op)
      H_LOAD_M: begin hb_cmd.kind = HB_LOAD_M;  hb_cmd.rows = m_rows; end
      H_LOAD_V: begin hb_cmd.kind = HB_LOAD_V;  hb_cmd.rows = v_rows; end
      default:     begin hb_cmd.kind = HB_STORE_V; hb_cmd.rows = w_rows; end
    endcase
  end

  // rows in flight in the other units
  logic hb_vwr, hb_mwr;             // HBM writes Vector SRAM / Matrix SRAM
  assign hb_vwr = hb_busy && hb_kind == HB_LOAD_V;
  assign hb_mwr = hb_busy && hb_kind == HB_LOAD_M;

  // does row range [r, r+n) overlap a pending write of the vector unit (vw), the matrix
  // unit (mw, BLEN rows) or the HBM controller (hw)?
  function automatic logic rd_conflict(input logic [31:0] r, input logic [31:0] n,
      input logic vw, input logic [31:0] vwr, input logic mw, input logic [31:0] mwl,
      input logic hw, input logic [31:0] hr, input logic [15:0] hn);
    return (vw && overlap(r, n, vwr, 1)) || (mw && overlap(r, n, mwl, BLEN)) ||
           (hw && overlap(r, n, hr, 32'(hn)));
  endfunction

  logic hz_rd_vec, hz_wr_vec;   // vector op source / destination conflicts
  logic hazard, unit_ready, fence_wait, all_idle;
  always_comb begin
    hazard     = 1'b0;
    unit_ready = 1'b1;
    fence_wait = 1'b0;
    hz_rd_vec  = 1'b0;
    hz_wr_vec  = 1'b0;
    all_idle   = !vu_busy && !mu_busy && !hb_busy;
    if (c_vec) begin
      unit_ready = vu_ready;
      // sources must not be pending writes elsewhere
      hz_rd_vec = rd_conflict(rd1, 1, 1'b0, '0, mu_wr_active, mu_wr_lo, hb_vwr, hb_row, hb_rows) ||
                  (c_vec2 && rd_conflict(rd2, 1, 1'b0, '0, mu_wr_active, mu_wr_lo,
                                         hb_vwr, hb_row, hb_rows));
      // destination must not be read or written elsewhere
      hz_wr_vec = !c_red && (
                  rd_conflict(rd0, 1, 1'b0, '0, mu_wr_active, mu_wr_lo, hb_busy, hb_row, hb_rows) ||
                  (mu_rd_active && overlap(rd0, 1, mu_rd_lo, BLEN)));
      hazard = hz_rd_vec || hz_wr_vec ||
               (vu_fp_pend && ((c_vf && vu_fp_reg == i.rs2) || (c_red && vu_fp_reg == i.rd)));
    end else if (c_mat) begin
      unit_ready = mu_ready;
      hazard = rd_conflict(rd0, BLEN, vu_wr_pend, vu_wr_row, 1'b0, '0,
                           hb_vwr, hb_row, hb_rows) ||
               (hb_mwr && (hb_row[LW] == rd1[LW]));
    end else if (c_sum) begin
      unit_ready = mu_ready;
      if (i.imm[10]) begin
        hazard = (vu_wr_pend && overlap(rd0, BLEN, vu_wr_row, 1)) ||
                 (vu_rd_pend && (overlap(rd0, BLEN, vu_rd_row1, 1) ||
                                 overlap(rd0, BLEN, vu_rd_row2, 1))) ||
                 (hb_busy && hb_kind != HB_LOAD_M && overlap(rd0, BLEN, hb_row, 32'(hb_rows)));
      end
    end else if (c_hbm) begin
      unit_ready = hb_ready;
      unique case (i.op)
        H_LOAD_M: hazard = mu_tile_active && (mu_tile_idx == rd0[LW]);
        H_LOAD_V: hazard = (vu_wr_pend && overlap(rd0, 32'(v_rows), vu_wr_row, 1)) ||
                              (vu_rd_pend && (overlap(rd0, 32'(v_rows), vu_rd_row1, 1) ||
                                              overlap(rd0, 32'(v_rows), vu_rd_row2, 1))) ||
                              (mu_rd_active && overlap(rd0, 32'(v_rows), mu_rd_lo, BLEN)) ||
                              (mu_wr_active && overlap(rd0, 32'(v_rows), mu_wr_lo, BLEN));
        default:     hazard = (vu_wr_pend && overlap(rd0, 32'(w_rows), vu_wr_row, 1)) ||
                              (mu_wr_active && overlap(rd0, 32'(w_rows), mu_wr_lo, BLEN));
      endcase
    end else if (c_scl) begin
      hazard = c_sfp && vu_fp_pend &&
               (vu_fp_reg == i.rd || vu_fp_reg == i.rs1 || vu_fp_reg == i.rs2);
    end else if (i.op == C_FENCE || i.op == C_HALT) begin
      fence_wait = !all_idle;
    end
  end

  logic go;
  assign go       = !halted && !ib_empty && !hazard && unit_ready && !fence_wait;
  assign ib_pop   = go;
  assign ex_valid = go && c_scl;
  assign ex_instr = i;
  assign vu_valid = go && c_vec;
  assign mu_valid = go && (c_mat || c_sum);
  assign hb_valid = go && c_hbm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_base <= '0; scale_base <= '0; stride <= 32'd1;
      m_rows <= '0; v_rows <= '0; w_rows <= '0;
      last_mode <= MM_COL; mode_valid <= 1'b0; halted <= 1'b0;
      stat_issued <= '0; stat_stall_hazard <= '0; stat_stall_busy <= '0;
      stat_stall_fence <= '0; stat_mode_switch <= '0;
    end else begin
      if (go) begin
        stat_issued <= stat_issued + 1;
        unique case (i.op)
          C_SET_ADDR:   addr_base  <= rd1;
          C_SET_SCALE:  scale_base <= rd1;
          C_SET_STRIDE: stride     <= rd1;
          C_SET_MLOAD:  m_rows     <= rd1[15:0];
          C_SET_VLOAD:  v_rows     <= rd1[15:0];
          C_SET_VWRITE: w_rows     <= rd1[15:0];
          C_HALT:       halted     <= 1'b1;
          default: ;
        endcase
        if (c_mat) begin
          if (mode_valid && mode != last_mode) stat_mode_switch <= stat_mode_switch + 1;
          last_mode  <= mode;
          mode_valid <= 1'b1;
        end
      end else if (!halted && !ib_empty) begin
        if (fence_wait)       stat_stall_fence  <= stat_stall_fence + 1;
        else if (hazard)      stat_stall_hazard <= stat_stall_hazard + 1;
        else if (!unit_ready) stat_stall_busy   <= stat_stall_busy + 1;
      end
    end
  end
endmodule
