// matrix_unit: GEMM engine built around the flattened systolic array.
//
// It executes two kinds of command from the decoder.
//
// Stream (M_MM, M_TMM, M_HTMM): one (BLEN, MLEN) x (MLEN, BLEN) tile product. The fill
// engine reads BLEN rows of X from the Vector SRAM (rows vs_row .. vs_row+BLEN-1, each
// MLEN FP16 values along the reduction dimension K), quantizes each row to MXINT on the
// way in, and reads BLEN W vectors from the Matrix SRAM in the same cycles: columns
// ms_idx .. ms_idx+BLEN-1 for M_MM (W stored K-major, transpose-on-read) or rows for
// M_TMM / M_HTMM (W stored N-major, e.g. K in Q*K^T). The stream engine then replays the
// buffered data over BLEN cycles: in cycle k, sub-array q receives X[i][q*BLEN+k] on
// left row i and W[q*BLEN+k][j] on top column j, so sub-array q reduces over its own
// BLEN slice of K. The X and W buffers are double-buffered: the next command fills one
// bank while the other streams, so consecutive tile products keep the array busy every
// cycle. Successive stream commands accumulate into the same PE accumulators, which is
// how a long K (e.g. a hidden size of 8192) is covered.
//
// Sum (M_SUM): after the last operand has drained through the array, the result adder
// tree adds the sub-arrays' partial sums, one output row per cycle; each integer sum is
// converted to FP16 and placed in the accumulate buffer (BLEN rows of MLEN values) at
// column col_blk*BLEN. If the last stream command was M_HTMM, the tree sums per head
// group and MLEN/HLEN results of BLEN columns each are placed side by side. The
// accumulators are then cleared. With flush set, the BLEN buffer rows are written to
// Vector SRAM rows vs_row .. vs_row+BLEN-1.
//
// W rows of M_TMM / M_HTMM with cmd.ihad set pass through inverse_hadamard_mx on the way
// into the W buffer, undoing the Hadamard rotation applied to K/V before they were
// quantized into the KV cache; weights and M_MM columns bypass it.
//
// The buffer / array / adder tree / accumulate buffer structure follows the
// architecture. The command format, the quantization point of X (at buffer fill), the
// time-multiplexed adder tree and the drain wait are this implementation's choices.
//
// Timing: a fill takes BLEN granted Vector SRAM reads; a stream takes BLEN cycles; an
// M_SUM takes the drain (3*BLEN cycles after the last stream), BLEN row cycles, one clear
// cycle and, with flush, BLEN granted writes. Vector SRAM data return one cycle after a
// grant; Matrix SRAM data one cycle after ms_rd_en.
module matrix_unit import plena_pkg::*; #(
  parameter int BLEN        = 32,
  parameter int MLEN        = 2048,
  parameter int HLEN        = 128,
  parameter int ELEM_W      = 4,
  parameter int SCALE_W     = 8,
  parameter int MX_BLOCK    = 16,
  parameter int ACC_W       = 48,
  parameter int ACC_LSB_EXP = -24,
  parameter int VS_AW       = 10,
  parameter int MS_AW       = $clog2(2 * MLEN)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // command
  input  logic                          cmd_valid,
  input  mu_cmd_t                       cmd,
  output logic                          cmd_ready,
  // Vector SRAM port
  output logic                          vs_req,
  output logic                          vs_we,
  output logic [VS_AW-1:0]              vs_addr,
  output logic [MLEN-1:0][15:0]         vs_wdata,
  input  logic                          vs_gnt,
  input  logic [MLEN-1:0][15:0]         vs_rdata,
  // Matrix SRAM read port
  output logic                          ms_rd_en,
  output logic                          ms_rd_col,
  output logic [MS_AW-1:0]              ms_rd_idx,
  input  logic [MLEN-1:0][ELEM_W-1:0]   ms_rd_elem,
  input  logic [MLEN-1:0][SCALE_W-1:0]  ms_rd_scale,
  // hazard information for the decoder
  output logic                          busy,
  output logic                          rd_active,     // reading Vector SRAM rows rd_lo..+BLEN
  output logic [31:0]                   rd_lo,
  output logic                          wr_active,     // will write rows wr_lo..+BLEN
  output logic [31:0]                   wr_lo,
  output logic                          tile_active,   // reading Matrix SRAM tile tile_idx
  output logic                          tile_idx,
  // statistics
  output logic [31:0]                   stat_stream_cycles,
  output logic [31:0]                   stat_tiles,
  output logic [31:0]                   stat_sums
);
  localparam int OW    = ELEM_W + SCALE_W;
  localparam int NSUB  = MLEN / BLEN;
  localparam int NG    = MLEN / HLEN;
  localparam int SUM_W = ACC_W + $clog2(NSUB);
  localparam int BW    = $clog2(BLEN);
  localparam int LW    = $clog2(MLEN);
  localparam int DRAIN = 3 * BLEN;

  // ------------------------------------------------------------ buffers
  logic [OW-1:0] xbuf [2][BLEN][MLEN];   // [bank][row i][k]
  logic [OW-1:0] wbuf [2][BLEN][MLEN];   // [bank][column j][k]
  logic [1:0]    full;
  mm_mode_e      bmode [2];

  // ------------------------------------------------------------ fill engine
  logic            f_busy, f_bank;
  logic [BW:0]     f_req;
  mm_mode_e        f_mode;
  logic [31:0]     f_vs, f_ms;
  logic            f_ihad;
  logic            d_valid;
  logic [BW-1:0]   d_idx;

  logic [MLEN-1:0][ELEM_W-1:0]           q_elem;

  // W path: inverse Hadamard rotation of rotated K/V rows (bypassed for weights)
  logic [MLEN-1:0][ELEM_W-1:0]           w_elem;
  logic [MLEN-1:0][SCALE_W-1:0]          w_scale;
  inverse_hadamard_mx #(.N(MLEN), .ELEM_W(ELEM_W), .SCALE_W(SCALE_W), .HAD_N(MX_BLOCK)) u_ihad (
    .en (f_ihad), .elem (ms_rd_elem), .scale (ms_rd_scale), .elem_o (w_elem), .scale_o (w_scale));
  logic [MLEN/MX_BLOCK-1:0][SCALE_W-1:0] q_scale;

  mx_quantizer #(.N(MLEN), .ELEM_W(ELEM_W), .SCALE_W(SCALE_W), .MX_BLOCK(MX_BLOCK)) u_xq (
    .in_fp (vs_rdata),
    .elem  (q_elem),
    .scale (q_scale)
  );

  // ------------------------------------------------------------ stream engine
  logic          st_busy, st_bank;
  logic [BW-1:0] st_k;
  logic [$clog2(DRAIN+1)-1:0] drain;
  logic          acc_head;

  // ------------------------------------------------------------ sum engine
  typedef enum logic [2:0] { S_IDLE, S_WAIT, S_ROWS, S_CLR, S_FLUSH } s_state_e;
  s_state_e      s_state;
  logic [BW-1:0] s_row;
  logic [31:0]   s_dst;
  logic [9:0]    s_col;
  logic          s_flush;
  logic [15:0]   abuf [BLEN][MLEN];

  // ------------------------------------------------------------ array
  logic [OW-1:0]           left_in [MLEN];
  logic [OW-1:0]           top_in  [MLEN];
  logic signed [SUM_W-1:0] sum_out [NG][BLEN];
  logic                    arr_clr;

  flattened_systolic_array #(.BLEN(BLEN), .MLEN(MLEN), .HLEN(HLEN), .ELEM_W(ELEM_W),
                             .SCALE_W(SCALE_W), .ACC_W(ACC_W), .ACC_LSB_EXP(ACC_LSB_EXP)) u_fsa (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (arr_clr),
    .left_in   (left_in),
    .top_in    (top_in),
    .head_mode (acc_head),
    .sum_row   (s_row),
    .sum_out   (sum_out)
  );

  always_comb begin
    for (int q = 0; q < NSUB; q++)
      for (int i = 0; i < BLEN; i++) begin
        left_in[q*BLEN + i] = st_busy ? xbuf[st_bank][i][q*BLEN + int'(st_k)] : '0;
        top_in[q*BLEN + i]  = st_busy ? wbuf[st_bank][i][q*BLEN + int'(st_k)] : '0;
      end
  end

  // ------------------------------------------------------------ command accept
  logic s_idle;
  assign s_idle = (s_state == S_IDLE);
  always_comb begin
    if (cmd.is_sum) cmd_ready = s_idle && !f_busy && (full == 2'b00) && !st_busy;
    else            cmd_ready = s_idle && !f_busy && !full[f_bank];
  end
  logic acc_stream, acc_sum;
  assign acc_stream = cmd_valid && cmd_ready && !cmd.is_sum;
  assign acc_sum    = cmd_valid && cmd_ready &&  cmd.is_sum;

  // Vector SRAM / Matrix SRAM requests
  always_comb begin
    vs_req    = 1'b0;
    vs_we     = 1'b0;
    vs_addr   = '0;
    vs_wdata  = '0;
    if (f_busy && f_req < (BW+1)'(BLEN)) begin
      vs_req  = 1'b1;
      vs_addr = VS_AW'(f_vs + 32'(f_req));
    end else if (s_state == S_FLUSH) begin
      vs_req  = 1'b1;
      vs_we   = 1'b1;
      vs_addr = VS_AW'(s_dst + 32'(s_row));
      for (int k = 0; k < MLEN; k++) vs_wdata[k] = abuf[s_row][k];
    end
    ms_rd_en  = f_busy && (f_req < (BW+1)'(BLEN)) && vs_gnt;
    ms_rd_col = (f_mode == MM_COL);
    ms_rd_idx = MS_AW'(f_ms + 32'(f_req));
  end

  always_ff @(posedge clk or negedge rst_n) begin : p_seq
    logic [1:0] full_set, full_clr;
    if (!rst_n) begin
      f_busy <= 1'b0; f_bank <= 1'b0; f_req <= '0; f_mode <= MM_COL; f_vs <= '0; f_ms <= '0; f_ihad <= 1'b0;
      d_valid <= 1'b0; d_idx <= '0;
      full <= 2'b00; bmode[0] <= MM_COL; bmode[1] <= MM_COL;
      st_busy <= 1'b0; st_bank <= 1'b0; st_k <= '0; drain <= '0; acc_head <= 1'b0;
      s_state <= S_IDLE; s_row <= '0; s_dst <= '0; s_col <= '0; s_flush <= 1'b0;
      stat_stream_cycles <= '0; stat_tiles <= '0; stat_sums <= '0;
    end else begin
      full_set = 2'b00;
      full_clr = 2'b00;
      // ---- fill
      if (acc_stream) begin
        f_busy <= 1'b1;
        f_req  <= '0;
        f_mode <= cmd.mode;
        f_vs   <= cmd.vs_row;
        f_ms   <= cmd.ms_idx;
        f_ihad <= cmd.ihad;
      end
      d_valid <= 1'b0;
      if (f_busy && f_req < (BW+1)'(BLEN) && vs_gnt) begin
        f_req   <= f_req + 1'b1;
        d_valid <= 1'b1;
        d_idx   <= f_req[BW-1:0];
      end
      if (d_valid) begin
        for (int k = 0; k < MLEN; k++) begin
          xbuf[f_bank][d_idx][k] <= {q_elem[k], q_scale[k / MX_BLOCK]};
          wbuf[f_bank][d_idx][k] <= {w_elem[k], w_scale[k]};
        end
        if (d_idx == BW'(BLEN - 1)) begin
          full_set[f_bank] = 1'b1;
          bmode[f_bank]    <= f_mode;
          f_bank           <= ~f_bank;
          f_busy           <= 1'b0;
        end
      end
      // ---- stream
      if (st_busy) begin
        stat_stream_cycles <= stat_stream_cycles + 1;
        if (st_k == BW'(BLEN - 1)) begin
          full_clr[st_bank] = 1'b1;
          stat_tiles <= stat_tiles + 1;
          st_k       <= '0;
          st_bank    <= ~st_bank;
          drain      <= ($clog2(DRAIN+1))'(DRAIN);
          if (full[~st_bank] || full_set[~st_bank]) begin
            acc_head <= (bmode[~st_bank] == MM_HEAD) || (full_set[~st_bank] && f_mode == MM_HEAD);
          end else begin
            st_busy <= 1'b0;
          end
        end else begin
          st_k <= st_k + 1'b1;
        end
      end else begin
        if (drain != 0) drain <= drain - 1'b1;
        if (full[st_bank]) begin
          st_busy  <= 1'b1;
          st_k     <= '0;
          acc_head <= (bmode[st_bank] == MM_HEAD);
        end
      end
      full <= (full | full_set) & ~full_clr;
      // ---- sum
      case (s_state)
        S_IDLE: if (acc_sum) begin
          s_state <= S_WAIT;
          s_dst   <= cmd.vs_row;
          s_col   <= cmd.col_blk;
          s_flush <= cmd.flush;
          s_row   <= '0;
        end
        S_WAIT: if (!st_busy && drain == 0) s_state <= S_ROWS;
        S_ROWS: begin
          for (int g = 0; g < NG; g++)
            for (int j = 0; j < BLEN; j++)
              if ((acc_head || g == 0) && (int'(s_col) * BLEN + g * BLEN + j) < MLEN)
                abuf[s_row][int'(s_col) * BLEN + g * BLEN + j] <= fp_from_int(longint'(sum_out[g][j]), ACC_LSB_EXP);
          s_row <= s_row + 1'b1;
          if (s_row == BW'(BLEN - 1)) s_state <= S_CLR;
        end
        S_CLR: begin
          stat_sums <= stat_sums + 1;
          s_row     <= '0;
          s_state   <= s_flush ? S_FLUSH : S_IDLE;
        end
        S_FLUSH: if (vs_gnt) begin
          s_row <= s_row + 1'b1;
          if (s_row == BW'(BLEN - 1)) s_state <= S_IDLE;
        end
        default: s_state <= S_IDLE;
      endcase
    end
  end

  assign arr_clr     = (s_state == S_CLR);
  assign busy        = f_busy || (full != 2'b00) || st_busy || (drain != 0) || !s_idle;
  assign rd_active   = f_busy;
  assign rd_lo       = f_vs;
  assign wr_active   = !s_idle && s_flush;
  assign wr_lo       = s_dst;
  assign tile_active = f_busy;
  assign tile_idx    = f_ms[LW];

  // A stream command must not cross a Matrix SRAM tile boundary.
  a_tile: assert property (@(posedge clk)
                           acc_stream |-> (int'(cmd.ms_idx[LW-1:0]) + BLEN <= MLEN))
    else $error("matrix_unit: W block crosses a tile boundary");
endmodule
