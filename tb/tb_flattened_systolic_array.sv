// tb_flattened_systolic_array: self-checking testbench for the flattened systolic array.
//
// Small configuration BLEN = 4, MLEN = 16, HLEN = 8: four sub-arrays, two head groups.
// Streams a (BLEN, MLEN) x (MLEN, BLEN) product over BLEN cycles (in cycle k sub-array q
// receives X[i][q*BLEN+k] and W[q*BLEN+k][j]), waits for the array to drain and reads
// all BLEN output rows through the adder tree. Normal mode must give the full dot
// products over MLEN; head mode the per-head partial products over each HLEN slice.
// Also checks that a second product accumulates on top of the first until clr, and
// that the drain completes within 2*(BLEN-1)+1 cycles of the last operand.
module tb_flattened_systolic_array;
  localparam int B = 4, M = 16, H = 8, EW = 4, SW = 8, AW = 48, LSB = -24, BIAS = 127;
  localparam int NG = M / H, SUMW = AW + 2;
  logic clk = 0, rst_n = 0, clr = 0, head_mode = 0;
  logic [EW+SW-1:0] left_in [M], top_in [M];
  logic [1:0] sum_row = 0;
  logic signed [SUMW-1:0] sum_out [NG][B];
  int checks = 0, failures = 0;
  int x [B][M], w [M][B];
  longint ref_acc [B][B][NG];

  flattened_systolic_array #(.BLEN(B), .MLEN(M), .HLEN(H), .ELEM_W(EW), .SCALE_W(SW),
                             .ACC_W(AW), .ACC_LSB_EXP(LSB)) dut (.*);

  always #5 clk = ~clk;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stream one product; scales fixed at BIAS so each product is weighted 2^-LSB
  task automatic stream();
    for (int i = 0; i < B; i++)
      for (int k = 0; k < M; k++) begin
        x[i][k] = int'($urandom_range(0, 15)) - 8;
        w[k][i] = int'($urandom_range(0, 15)) - 8;
      end
    for (int i = 0; i < B; i++)
      for (int j = 0; j < B; j++)
        for (int k = 0; k < M; k++)
          ref_acc[i][j][k / H] += longint'(x[i][k] * w[k][j]) <<< (-LSB);
    for (int k = 0; k < B; k++) begin
      @(negedge clk);
      for (int q = 0; q < M / B; q++)
        for (int i = 0; i < B; i++) begin
          left_in[q*B + i] = {EW'(x[i][q*B + k]), SW'(BIAS)};
          top_in[q*B + i]  = {EW'(w[q*B + k][i]), SW'(BIAS)};
        end
    end
    @(negedge clk);
    for (int q = 0; q < M; q++) begin left_in[q] = '0; top_in[q] = '0; end
    repeat (2 * (B - 1)) @(posedge clk);
    #1;
  endtask

  task automatic read_check(input string tag);
    longint r;
    for (int hm = 0; hm < 2; hm++) begin
      head_mode = hm[0];
      for (int i = 0; i < B; i++) begin
        sum_row = 2'(i);
        #1;
        for (int j = 0; j < B; j++) begin
          if (hm == 1) begin
            for (int g = 0; g < NG; g++)
              check(sum_out[g][j] == SUMW'(ref_acc[i][j][g]),
                    $sformatf("%s head row %0d col %0d g %0d: %0d ref %0d", tag, i, j, g, sum_out[g][j], ref_acc[i][j][g]));
          end else begin
            r = 0;
            for (int g = 0; g < NG; g++) r += ref_acc[i][j][g];
            check(sum_out[0][j] == SUMW'(r), $sformatf("%s row %0d col %0d: %0d ref %0d", tag, i, j, sum_out[0][j], r));
          end
        end
      end
    end
  endtask

  initial begin
    for (int q = 0; q < M; q++) begin left_in[q] = '0; top_in[q] = '0; end
    for (int i = 0; i < B; i++) for (int j = 0; j < B; j++) for (int g = 0; g < NG; g++) ref_acc[i][j][g] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    stream();
    read_check("first");
    stream();
    read_check("accumulated");
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int i = 0; i < B; i++) for (int j = 0; j < B; j++) for (int g = 0; g < NG; g++) ref_acc[i][j][g] = 0;
    read_check("cleared");
    stream();
    read_check("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
