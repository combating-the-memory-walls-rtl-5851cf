// tb_matrix_sram: self-checking testbench for the transposable Matrix SRAM.
//
// MLEN = 16, MX_BLOCK = 4, two tiles. Writes random rows (elements and block scales) to
// both tiles, then reads every row and every column of both tiles and compares with a
// reference matrix, element by element, including the scale delivered with each
// element (row read: the scale of the element's block; column read: the scale of the
// block of that column in each row). Read data must appear exactly one cycle after
// rd_en. A second round overwrites some rows with reads interleaved.
module tb_matrix_sram;
  localparam int M = 16, EW = 4, SW = 8, BLK = 4, T = 2, AW = 5;
  logic clk = 0, wr_en = 0, rd_en = 0, rd_col_mode = 0;
  logic [AW-1:0] wr_row = '0, rd_idx = '0;
  logic [M-1:0][EW-1:0] wr_elem = '0, rd_elem;
  logic [M/BLK-1:0][SW-1:0] wr_scale = '0;
  logic [M-1:0][SW-1:0] rd_scale;
  int checks = 0, failures = 0;
  logic [EW-1:0] e_ref [T*M][M];
  logic [SW-1:0] s_ref [T*M][M/BLK];

  matrix_sram #(.MLEN(M), .ELEM_W(EW), .SCALE_W(SW), .MX_BLOCK(BLK), .TILES(T)) dut (.*);

  always #5 clk = ~clk;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_row(input int r);
    @(negedge clk);
    wr_en = 1; wr_row = AW'(r);
    for (int c = 0; c < M; c++) begin e_ref[r][c] = EW'($urandom); wr_elem[c] = e_ref[r][c]; end
    for (int b = 0; b < M / BLK; b++) begin s_ref[r][b] = SW'($urandom); wr_scale[b] = s_ref[r][b]; end
    @(posedge clk); #1; wr_en = 0;
  endtask

  task automatic read(input bit col, input int idx);
    int t, k0;
    @(negedge clk);
    rd_en = 1; rd_col_mode = col; rd_idx = AW'(idx);
    @(posedge clk); #1; rd_en = 0;
    t = idx / M;
    for (int k = 0; k < M; k++) begin
      if (!col) begin
        check(rd_elem[k] == e_ref[idx][k] && rd_scale[k] == s_ref[idx][k / BLK],
              $sformatf("row %0d elem %0d: %h/%h ref %h/%h", idx, k, rd_elem[k], rd_scale[k], e_ref[idx][k], s_ref[idx][k / BLK]));
      end else begin
        k0 = t * M + k;   // element k of column idx is row k of the tile
        check(rd_elem[k] == e_ref[k0][idx % M] && rd_scale[k] == s_ref[k0][(idx % M) / BLK],
              $sformatf("col %0d elem %0d: %h/%h ref %h/%h", idx, k, rd_elem[k], rd_scale[k], e_ref[k0][idx % M], s_ref[k0][(idx % M) / BLK]));
      end
    end
  endtask

  initial begin
    for (int r = 0; r < T * M; r++) write_row(r);
    for (int i = 0; i < T * M; i++) begin read(0, i); read(1, i); end
    for (int n = 0; n < 200; n++) begin
      if ($urandom_range(0, 2) == 0) write_row(int'($urandom_range(0, T * M - 1)));
      else read(1'($urandom), int'($urandom_range(0, T * M - 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
