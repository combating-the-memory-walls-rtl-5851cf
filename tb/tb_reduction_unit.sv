// tb_reduction_unit: self-checking testbench for the vector reduction tree.
//
// N = 32 lanes. Sum: the reference adds pairs level by level in the same tree order as
// the hardware (lane 2k with lane 2k+1), rounding every partial sum to FP16 with
// fp_ref_pkg::r2h, so the result must match bit for bit; it is also checked to be
// within 1% of the exact real sum for same-sign data. Max: must equal the largest
// input exactly. Includes vectors with one dominant element and all-zero vectors.
module tb_reduction_unit;
  import fp_ref_pkg::*;
  localparam int N = 32;
  logic op;
  logic [N-1:0][15:0] v;
  logic [15:0] y;
  int checks = 0, failures = 0;

  reduction_unit #(.N(N)) dut (.*);

  initial begin #100000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] t [N];
    real mx, exact;
    bit same_sign;
    for (int n = 0; n < 600; n++) begin
      op = n[0];
      same_sign = (n % 4 < 2);
      for (int k = 0; k < N; k++) begin
        v[k] = rnd_h(10, 18);
        if (same_sign) v[k][15] = 1'b0;
      end
      if (n % 10 == 5) v[7] = 16'h5800;
      if (n % 50 == 9) v = '0;
      #1;
      if (!op) begin
        exact = 0.0;
        for (int k = 0; k < N; k++) begin t[k] = v[k]; exact += h2r(v[k]); end
        for (int w = N / 2; w >= 1; w /= 2)
          for (int k = 0; k < w; k++) t[k] = r2h(h2r(t[2*k]) + h2r(t[2*k+1]));
        check(y == t[0], $sformatf("sum %h ref %h", y, t[0]));
        if (same_sign)
          check(h2r(y) >= exact * 0.99 && h2r(y) <= exact * 1.01 + 1e-6, "sum close to exact");
      end else begin
        mx = -1.0e31;
        for (int k = 0; k < N; k++) if (h2r(v[k]) > mx) mx = h2r(v[k]);
        check(h2r(y) == mx, $sformatf("max %f ref %f", h2r(y), mx));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
