// tb_hadamard_transform: self-checking testbench for the blockwise Hadamard transform.
//
// N = 64 lanes, HAD_N = 16: four independent 16-point orthonormal transforms. The
// reference runs the same in-place butterflies in real arithmetic with FP16 rounding
// at every stage (bit-exact check), and separately checks against the exact real
// product H16 * x / 4 (H[i][j] = (-1)^popcount(i&j)) to 1% of the block's largest
// magnitude. Applying the transform twice must return the input (H is its own inverse
// when normalised) to the same tolerance.
module tb_hadamard_transform;
  import fp_ref_pkg::*;
  localparam int N = 64, HN = 16;
  logic [N-1:0][15:0] v, y, y2;
  int checks = 0, failures = 0;

  hadamard_transform #(.N(N), .HAD_N(HN)) dut  (.v(v), .y(y));
  hadamard_transform #(.N(N), .HAD_N(HN)) dut2 (.v(y), .y(y2));

  initial begin #100000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] s [N];
    real ex, tol, mx;
    int h;
    for (int n = 0; n < 200; n++) begin
      for (int k = 0; k < N; k++) v[k] = rnd_h(12, 17);
      if (n % 5 == 1) v[3] = 16'h5C00;   // outlier, the case rotation is meant for
      #1;
      for (int k = 0; k < N; k++) s[k] = v[k];
      for (int l = 0; l < 4; l++) begin
        logic [15:0] nx [N];
        h = 1 << l;
        for (int k = 0; k < N; k++)
          nx[k] = ((k & h) == 0) ? r2h(h2r(s[k]) + h2r(s[k + h])) : r2h(h2r(s[k - h]) - h2r(s[k]));
        s = nx;
      end
      for (int k = 0; k < N; k++) begin
        check(y[k] == r2h(h2r(s[k]) / 4.0), $sformatf("lane %0d: %h ref %h", k, y[k], r2h(h2r(s[k]) / 4.0)));
      end
      for (int b = 0; b < N / HN; b++) begin
        mx = 0.0;
        for (int j = 0; j < HN; j++) if ($sqrt(h2r(v[b*HN+j]) ** 2) > mx) mx = $sqrt(h2r(v[b*HN+j]) ** 2);
        tol = mx * 0.01;
        for (int i = 0; i < HN; i++) begin
          ex = 0.0;
          for (int j = 0; j < HN; j++) ex += ($countones(i & j) % 2 ? -1.0 : 1.0) * h2r(v[b*HN+j]);
          ex = ex / 4.0;
          check(h2r(y[b*HN+i]) - ex <= tol && ex - h2r(y[b*HN+i]) <= tol, "close to exact H*x/4");
          check(h2r(y2[b*HN+i]) - h2r(v[b*HN+i]) <= tol && h2r(v[b*HN+i]) - h2r(y2[b*HN+i]) <= tol,
                "transform twice returns the input");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
