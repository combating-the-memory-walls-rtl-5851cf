// tb_mx_quantizer: self-checking testbench for the FP16 -> MXINT4 quantizer.
//
// N = 64 values in four blocks of 16. Each block gets random FP16 values whose
// exponents span a block-specific window (so blocks need different shared scales), and
// some blocks are all zero or contain a single large value. A real-number reference in
// the testbench checks, per block, that the shared scale X (E8M0, bias 127) is the
// smallest with 7 * 2^X >= max|v|, and per element that elem = round-half-away(v / 2^X)
// exactly, with |elem| <= 7. The quantizer is combinational.
module tb_mx_quantizer;
  localparam int N = 64, EW = 4, SW = 8, BLK = 16, NB = N / BLK;
  logic [N-1:0][15:0] in_fp;
  logic [N-1:0][EW-1:0] elem;
  logic [NB-1:0][SW-1:0] scale;
  int checks = 0, failures = 0;

  mx_quantizer #(.N(N), .ELEM_W(EW), .SCALE_W(SW), .MX_BLOCK(BLK)) dut (.*);

  initial begin #100000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real p2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real m;
    if (h[14:10] == 0) return 0.0;
    m = (1024.0 + real'(h[9:0])) / 1024.0 * (p2(int'(h[14:10]) - 15));
    return h[15] ? -m : m;
  endfunction

  initial begin
    real mx, v, q;
    int x, e, lo;
    for (int t = 0; t < 300; t++) begin
      for (int b = 0; b < NB; b++) begin
        lo = int'($urandom_range(1, 24));
        for (int k = 0; k < BLK; k++) begin
          if (t % 7 == 3 && b == 1) in_fp[b*BLK+k] = (k == 5) ? 16'h7BFF : 16'h0;   // max + zeros
          else if (t % 5 == 2 && b == 2) in_fp[b*BLK+k] = 16'h0;                    // zero block
          else begin
            e = lo + int'($urandom_range(0, 5));
            in_fp[b*BLK+k] = {1'($urandom), 5'(e), 10'($urandom)};
          end
        end
      end
      #1;
      for (int b = 0; b < NB; b++) begin
        mx = 0.0;
        for (int k = 0; k < BLK; k++) begin
          v = h2r(in_fp[b*BLK+k]);
          if (v < 0) v = -v;
          if (v > mx) mx = v;
        end
        x = int'(scale[b]) - 127;
        if (mx > 0.0)
          check(7.0 * p2(x) >= mx && 7.0 * p2(x - 1) < mx,
                $sformatf("t%0d block %0d: scale %0d not minimal for max %f", t, b, x, mx));
        for (int k = 0; k < BLK; k++) begin
          v = h2r(in_fp[b*BLK+k]);
          q = $floor((v < 0 ? -v : v) / p2(x) + 0.5);
          if (q > 7.0) q = 7.0;
          if (v < 0) q = -q;
          check(int'($signed(elem[b*BLK+k])) == int'(q),
                $sformatf("t%0d elem %0d: %0d ref %0d (v=%f X=%0d)", t, b*BLK+k, $signed(elem[b*BLK+k]), int'(q), v, x));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
