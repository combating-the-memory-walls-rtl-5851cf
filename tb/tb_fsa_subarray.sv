// tb_fsa_subarray: self-checking testbench for one BLEN x BLEN systolic sub-array.
//
// Feeds K unskewed operand vectors (row i of X on left_in[i], column j of W on
// top_in[j], one reduction index per cycle; the sub-array skews them itself), then
// checks every accumulator against an integer reference sum_k X[i][k]*W[k][j] scaled by
// the MX scales. The documented latency is checked: the last operand (fed in cycle t)
// is fully accumulated at cycle t + 2*(BLEN-1) + 1 and the corner PE is still
// incomplete one cycle earlier. Runs two products with a clear between them.
module tb_fsa_subarray;
  localparam int B = 4, EW = 4, SW = 8, AW = 48, LSB = -24, BIAS = 127, K = 12;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [EW+SW-1:0] left_in [B], top_in [B];
  logic signed [AW-1:0] acc [B][B];
  int checks = 0, failures = 0;
  int x [B][K], w [K][B], sx [B], sw [B];

  fsa_subarray #(.BLEN(B), .ELEM_W(EW), .SCALE_W(SW), .ACC_W(AW), .ACC_LSB_EXP(LSB)) dut (.*);

  always #5 clk = ~clk;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_product(input int trial);
    longint r;
    for (int i = 0; i < B; i++) begin
      sx[i] = BIAS + int'($urandom_range(0, 3));
      sw[i] = BIAS - int'($urandom_range(0, 3));
      for (int k = 0; k < K; k++) begin
        x[i][k] = int'($urandom_range(0, 15)) - 8;
        w[k][i] = int'($urandom_range(0, 15)) - 8;
      end
    end
    w[K-1][B-1] = 5; x[B-1][K-1] = 3;   // corner product of the last step is non-zero
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      for (int i = 0; i < B; i++) begin
        left_in[i] = {EW'(x[i][k]), SW'(sx[i])};
        top_in[i]  = {EW'(w[k][i]), SW'(sw[i])};
      end
    end
    @(negedge clk);
    for (int i = 0; i < B; i++) begin left_in[i] = '0; top_in[i] = '0; end
    // one edge has consumed the last operand; it is complete 2*(B-1)+1 edges after it
    // was presented (B-1 skew registers, B-1 PE hops, one accumulate)
    repeat (2 * (B - 1) - 1) @(posedge clk);
    #1;
    r = 0;
    for (int k = 0; k < K; k++) r += longint'(x[B-1][k] * w[k][B-1]) <<< (sx[B-1] + sw[B-1] - 2 * BIAS - LSB);
    check(acc[B-1][B-1] != AW'(r), $sformatf("trial %0d: corner complete one cycle early", trial));
    @(posedge clk); #1;
    for (int i = 0; i < B; i++)
      for (int j = 0; j < B; j++) begin
        r = 0;
        for (int k = 0; k < K; k++) r += longint'(x[i][k] * w[k][j]) <<< (sx[i] + sw[j] - 2 * BIAS - LSB);
        check(acc[i][j] == AW'(r), $sformatf("trial %0d acc[%0d][%0d]=%0d ref %0d", trial, i, j, acc[i][j], r));
      end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int i = 0; i < B; i++) for (int j = 0; j < B; j++) check(acc[i][j] == 0, "clear");
  endtask

  initial begin
    for (int i = 0; i < B; i++) begin left_in[i] = '0; top_in[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) run_product(t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
