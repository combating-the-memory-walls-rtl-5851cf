// hbm_controller: background data movement between HBM and the two on-chip SRAMs.
//
// It contains the architecture's two HBM engines, used one at a time and sharing one
// HBM port:
//   * matrix read unit, H_LOAD_M: copies `rows` MX rows from HBM into Matrix SRAM rows
//     sram_row.. unchanged (weights and K/V stay in MX format on chip);
//   * vector read/write unit, H_LOAD_V: loads MX rows, converts them to FP16
//     (mx_dequantizer) and writes Vector SRAM rows sram_row..; H_STORE_V reads Vector
//     SRAM rows, quantizes them to MX (mx_quantizer) and writes them to HBM, e.g. to
//     append new K/V vectors to the cache.
// In HBM the elements of a row and its scales live in separate, separately aligned
// regions: row i has its element beat at elem_addr + i*stride and its scale beat at
// scale_addr + i*stride. A beat is one MLEN-element row (MLEN*ELEM_W bits); a scale beat
// carries MLEN/MX_BLOCK scales in its low bits. The separate layout follows the
// architecture; the beat format, the stride rule and the port protocol are this
// implementation's (the HBM link itself is outside this design).
//
// HBM port: requests use valid/ready (we=1: write wdata to addr; we=0: read addr).
// Read responses come back in request order with valid/ready. Loads keep issuing read
// requests without waiting for data, so HBM latency is hidden behind the stream of
// requests, and the engine runs while the rest of the accelerator executes other
// instructions (prefetch). The decoder learns from busy/kind/row range which SRAM rows
// or which Matrix SRAM tile are in flight.
module hbm_controller import plena_pkg::*; #(
  parameter int MLEN     = 2048,
  parameter int ELEM_W   = 4,
  parameter int SCALE_W  = 8,
  parameter int MX_BLOCK = 16,
  parameter int VS_AW    = 10,
  parameter int MS_AW    = $clog2(2 * MLEN),
  parameter int BEAT_W   = MLEN * ELEM_W
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  cmd_valid,
  input  hb_cmd_t                               cmd,
  output logic                                  cmd_ready,
  // HBM port
  output logic                                  hbm_req_valid,
  input  logic                                  hbm_req_ready,
  output logic                                  hbm_req_we,
  output logic [31:0]                           hbm_req_addr,
  output logic [BEAT_W-1:0]                     hbm_req_wdata,
  input  logic                                  hbm_rsp_valid,
  output logic                                  hbm_rsp_ready,
  input  logic [BEAT_W-1:0]                     hbm_rsp_rdata,
  // Matrix SRAM write port
  output logic                                  ms_wr_en,
  output logic [MS_AW-1:0]                      ms_wr_row,
  output logic [MLEN-1:0][ELEM_W-1:0]           ms_wr_elem,
  output logic [MLEN/MX_BLOCK-1:0][SCALE_W-1:0] ms_wr_scale,
  // Vector SRAM port
  output logic                                  vs_req,
  output logic                                  vs_we,
  output logic [VS_AW-1:0]                      vs_addr,
  output logic [MLEN-1:0][15:0]                 vs_wdata,
  input  logic                                  vs_gnt,
  input  logic [MLEN-1:0][15:0]                 vs_rdata,
  // status
  output logic                                  busy,
  output hb_kind_e                              busy_kind,
  output logic [31:0]                           busy_row,
  output logic [15:0]                           busy_rows,
  output logic [31:0]                           stat_rd_beats,
  output logic [31:0]                           stat_wr_beats
);
  localparam int NB = MLEN / MX_BLOCK;
  localparam int SB = NB * SCALE_W;

  hb_cmd_t     c;
  logic        active;
  logic [16:0] rq;          // read requests issued (two per row)
  logic [16:0] rs;          // read responses taken
  logic [15:0] wrow;        // store: current row
  logic [BEAT_W-1:0] ebeat; // element beat waiting for its scale beat

  typedef enum logic [2:0] { W_RD, W_DATA, W_ELEM, W_SCALE } w_state_e;
  w_state_e ws;
  logic [MLEN-1:0][ELEM_W-1:0] st_elem;
  logic [NB-1:0][SCALE_W-1:0]  st_scale;

  logic is_load, is_store;
  assign is_load  = active && (c.kind != HB_STORE_V);
  assign is_store = active && (c.kind == HB_STORE_V);

  // format conversion
  logic [MLEN-1:0][ELEM_W-1:0]  rsp_elem;
  logic [NB-1:0][SCALE_W-1:0]   rsp_scale;
  logic [MLEN-1:0][15:0]        deq;
  logic [MLEN-1:0][ELEM_W-1:0]  q_elem;
  logic [NB-1:0][SCALE_W-1:0]   q_scale;
  assign rsp_elem  = ebeat;
  assign rsp_scale = hbm_rsp_rdata[SB-1:0];

  mx_dequantizer #(.N(MLEN), .ELEM_W(ELEM_W), .SCALE_W(SCALE_W), .MX_BLOCK(MX_BLOCK)) u_deq (
    .elem (rsp_elem), .scale (rsp_scale), .out_fp (deq));
  mx_quantizer #(.N(MLEN), .ELEM_W(ELEM_W), .SCALE_W(SCALE_W), .MX_BLOCK(MX_BLOCK)) u_q (
    .in_fp (vs_rdata), .elem (q_elem), .scale (q_scale));

  logic scale_beat;       // the next response is a scale beat (odd response)
  assign scale_beat = rs[0];

  always_comb begin
    cmd_ready     = !active;
    hbm_req_valid = 1'b0;
    hbm_req_we    = 1'b0;
    hbm_req_addr  = '0;
    hbm_req_wdata = '0;
    hbm_rsp_ready = 1'b0;
    ms_wr_en      = 1'b0;
    ms_wr_row     = MS_AW'(c.sram_row + 32'(rs[16:1]));
    ms_wr_elem    = rsp_elem;
    ms_wr_scale   = rsp_scale;
    vs_req        = 1'b0;
    vs_we         = 1'b0;
    vs_addr       = '0;
    vs_wdata      = deq;
    if (is_load) begin
      if (rq < {c.rows, 1'b0}) begin
        hbm_req_valid = 1'b1;
        hbm_req_addr  = (rq[0] ? c.scale_addr : c.elem_addr) + 32'(rq[16:1]) * c.stride;
      end
      if (hbm_rsp_valid) begin
        if (!scale_beat) begin
          hbm_rsp_ready = 1'b1;                 // element beat: hold it
        end else if (c.kind == HB_LOAD_M) begin
          hbm_rsp_ready = 1'b1;
          ms_wr_en      = 1'b1;
        end else begin
          vs_req        = 1'b1;
          vs_we         = 1'b1;
          vs_addr       = VS_AW'(c.sram_row + 32'(rs[16:1]));
          hbm_rsp_ready = vs_gnt;
        end
      end
    end else if (is_store) begin
      unique case (ws)
        W_RD: begin
          vs_req  = 1'b1;
          vs_addr = VS_AW'(c.sram_row + 32'(wrow));
        end
        W_ELEM: begin
          hbm_req_valid = 1'b1;
          hbm_req_we    = 1'b1;
          hbm_req_addr  = c.elem_addr + 32'(wrow) * c.stride;
          hbm_req_wdata = st_elem;
        end
        W_SCALE: begin
          hbm_req_valid = 1'b1;
          hbm_req_we    = 1'b1;
          hbm_req_addr  = c.scale_addr + 32'(wrow) * c.stride;
          hbm_req_wdata = BEAT_W'(st_scale);
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; active <= 1'b0; rq <= '0; rs <= '0; wrow <= '0; ebeat <= '0; ws <= W_RD;
      st_elem <= '0; st_scale <= '0; stat_rd_beats <= '0; stat_wr_beats <= '0;
    end else begin
      if (cmd_valid && cmd_ready) begin
        c      <= cmd;
        active <= (cmd.rows != 0);
        rq     <= '0;
        rs     <= '0;
        wrow   <= '0;
        ws     <= W_RD;
      end
      if (hbm_req_valid && hbm_req_ready) begin
        if (hbm_req_we) stat_wr_beats <= stat_wr_beats + 1;
        else            rq <= rq + 1'b1;
      end
      if (hbm_rsp_valid && hbm_rsp_ready) begin
        stat_rd_beats <= stat_rd_beats + 1;
        rs <= rs + 1'b1;
        if (!scale_beat) ebeat <= hbm_rsp_rdata;
        if (scale_beat && rs[16:1] == c.rows - 1'b1) active <= 1'b0;
      end
      if (is_store) begin
        unique case (ws)
          W_RD:    if (vs_gnt) ws <= W_DATA;
          W_DATA:  begin st_elem <= q_elem; st_scale <= q_scale; ws <= W_ELEM; end
          W_ELEM:  if (hbm_req_ready) ws <= W_SCALE;
          W_SCALE: if (hbm_req_ready) begin
            ws   <= W_RD;
            wrow <= wrow + 1'b1;
            if (wrow == c.rows - 1'b1) active <= 1'b0;
          end
          default: ws <= W_RD;
        endcase
      end
    end
  end

  assign busy      = active;
  assign busy_kind = c.kind;
  assign busy_row  = c.sram_row;
  assign busy_rows = c.rows;
endmodule
