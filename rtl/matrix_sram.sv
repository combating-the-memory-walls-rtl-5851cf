// matrix_sram: transposable MX tile store feeding the W side of the systolic array.
//
// Holds TILES tiles of MLEN x MLEN MXINT elements. The memory is split into MLEN
// narrow sub-SRAMs (banks), one element wide. Element (r, c) of a tile (row r, column
// c) is stored in bank (c - r) mod MLEN at address r. A row read then touches every
// bank at the same address, and a column read touches every bank once, bank b at
// address (c - b) mod MLEN, so both directions deliver MLEN elements per cycle without
// conflicts or any data movement. This skewed mapping is the one the architecture
// describes; the number of tiles is this implementation's choice (two, so one tile can
// be prefetched from HBM while the other is used).
//
// Scales are kept apart from the elements, one E8M0 scale per MX_BLOCK elements of a
// row. They are banked by row, so a row read touches one scale bank and a column read
// touches every scale bank once; on a column read each element comes with the scale
// of the row it belongs to. Outputs carry one scale per element.
//
// Ports: one write port (a whole row per cycle, from the HBM matrix read unit) and one
// read port (a row or a column per cycle, to the matrix unit). Read data appear one
// cycle after rd_en. Row index = tile*MLEN + row; column index = tile*MLEN + column.
module matrix_sram #(
  parameter int MLEN     = 2048,
  parameter int ELEM_W   = 4,
  parameter int SCALE_W  = 8,
  parameter int MX_BLOCK = 16,
  parameter int TILES    = 2,
  parameter int AW       = $clog2(TILES * MLEN)
) (
  input  logic                                  clk,
  input  logic                                  wr_en,
  input  logic [AW-1:0]                         wr_row,
  input  logic [MLEN-1:0][ELEM_W-1:0]           wr_elem,
  input  logic [MLEN/MX_BLOCK-1:0][SCALE_W-1:0] wr_scale,
  input  logic                                  rd_en,
  input  logic                                  rd_col_mode,
  input  logic [AW-1:0]                         rd_idx,
  output logic [MLEN-1:0][ELEM_W-1:0]           rd_elem,
  output logic [MLEN-1:0][SCALE_W-1:0]          rd_scale
);
  localparam int LW  = $clog2(MLEN);
  localparam int NB  = MLEN / MX_BLOCK;
  localparam int TW  = (TILES > 1) ? $clog2(TILES) : 1;

  logic [ELEM_W-1:0]          bank  [MLEN][TILES*MLEN];
  logic [NB-1:0][SCALE_W-1:0] sbank [MLEN][TILES];

  logic [LW-1:0] wr_r, rd_i;
  logic [TW-1:0] wr_t, rd_t;
  assign wr_r = wr_row[LW-1:0];
  assign wr_t = TW'(wr_row >> LW);
  assign rd_i = rd_idx[LW-1:0];
  assign rd_t = TW'(rd_idx >> LW);

  logic [MLEN-1:0][ELEM_W-1:0]  bank_q;      // raw bank outputs
  logic [MLEN-1:0][NB-1:0][SCALE_W-1:0] sbank_q;
  logic                         q_col;
  logic [LW-1:0]                q_i;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < MLEN; b++)
        bank[b][wr_row] <= wr_elem[LW'(b + int'(wr_r))];
      sbank[wr_r][wr_t] <= wr_scale;
    end
    if (rd_en) begin
      q_col <= rd_col_mode;
      q_i   <= rd_i;
      for (int b = 0; b < MLEN; b++) begin
        if (rd_col_mode) bank_q[b] <= bank[b][AW'({rd_t, LW'(int'(rd_i) - b)})];
        else             bank_q[b] <= bank[b][rd_idx];
      end
      for (int r = 0; r < MLEN; r++)
        if (rd_col_mode || r == int'(rd_i)) sbank_q[r] <= sbank[r][rd_t];
    end
  end

  // Undo the skew: output element k is in bank (k - r) for a row read and in bank
  // (c - k) for a column read (k is the row index there).
  always_comb begin
    for (int k = 0; k < MLEN; k++) begin
      if (q_col) begin
        rd_elem[k]  = bank_q[LW'(int'(q_i) - k)];
        rd_scale[k] = sbank_q[k][int'(q_i) / MX_BLOCK];
      end else begin
        rd_elem[k]  = bank_q[LW'(k - int'(q_i))];
        rd_scale[k] = sbank_q[q_i][k / MX_BLOCK];
      end
    end
  end
endmodule
