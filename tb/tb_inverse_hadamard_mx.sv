// tb_inverse_hadamard_mx: self-checking testbench for the inverse Hadamard rotation of
// MX vectors.
//
// N = 64 (four blocks of 16). For random MXINT4 rows the reference computes, in real
// arithmetic, y = H16 * (e * 2^(s-127)) / 4 per block. Checks:
//   * every output value is within half an output quantization step of y, the step
//     being the smallest power of two that covers max|y| with 7 levels;
//   * that step is minimal (the output scale is not larger than needed);
//   * rotating a row forward (applying the block twice) returns the original row
//     exactly when the first output needs no rounding, e.g. a block of one impulse;
//   * en = 0 passes elements and scales through unchanged.
// The block is combinational; the watchdog guards the loop.
module tb_inverse_hadamard_mx;
  import fp_ref_pkg::*;
  localparam int N = 64, EW = 4, SW = 8, HN = 16;
  logic en;
  logic [N-1:0][EW-1:0] elem, elem_o, e2;
  logic [N-1:0][SW-1:0] scale, scale_o, s2;
  int checks = 0, failures = 0;

  inverse_hadamard_mx #(.N(N), .ELEM_W(EW), .SCALE_W(SW), .HAD_N(HN)) dut (.*);
  inverse_hadamard_mx #(.N(N), .ELEM_W(EW), .SCALE_W(SW), .HAD_N(HN)) dut2 (
    .en (1'b1), .elem (elem_o), .scale (scale_o), .elem_o (e2), .scale_o (s2));

  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int hsign(input int r, input int c);   // H16[r][c] = (-1)^popcount(r&c)
    return ($countones(r & c) % 2) ? -1 : 1;
  endfunction

  initial begin
    real y [HN], m, step, got;
    for (int trial = 0; trial < 200; trial++) begin
      for (int i = 0; i < N; i++) elem[i] = EW'($urandom_range(0, 14) - 7 + 16);
      for (int b = 0; b < N / HN; b++) begin
        logic [SW-1:0] s;
        s = SW'(120 + $urandom_range(0, 10));
        for (int i = 0; i < HN; i++) scale[b*HN + i] = s;
      end
      if (trial % 20 == 0) begin                      // impulse rows: exact round trip
        elem = '0;
        for (int b = 0; b < N / HN; b++) elem[b*HN + (trial / 20) % HN] = EW'(4);
      end
      en = 1'b1;
      #1;
      for (int b = 0; b < N / HN; b++) begin
        m = 0.0;
        for (int r = 0; r < HN; r++) begin
          y[r] = 0.0;
          for (int c = 0; c < HN; c++)
            y[r] += hsign(r, c) * real'(int'($signed(elem[b*HN + c]))) * p2(int'(scale[b*HN]) - 127);
          y[r] = y[r] / 4.0;
          if ((y[r] < 0 ? -y[r] : y[r]) > m) m = y[r] < 0 ? -y[r] : y[r];
        end
        step = p2(int'(scale_o[b*HN]) - 127);
        check(m == 0.0 || (7.0 * step >= m * 0.999999 && (7.0 * step / 2.0 < m || int'(scale_o[b*HN]) == int'(scale[b*HN]) - 2)),
              $sformatf("trial %0d block %0d: step %g for max %g", trial, b, step, m));
        for (int r = 0; r < HN; r++) begin
          got = real'(int'($signed(elem_o[b*HN + r]))) * step;
          check((got - y[r] <= step / 2.0 + 1e-12) && (y[r] - got <= step / 2.0 + 1e-12),
                $sformatf("trial %0d block %0d lane %0d: %g ref %g", trial, b, r, got, y[r]));
          check(scale_o[b*HN + r] == scale_o[b*HN], "one scale per block");
        end
      end
      if (trial % 20 == 0)
        for (int i = 0; i < N; i++)
          check(real'(int'($signed(e2[i]))) * p2(int'(s2[i]) - 127) ==
                real'(int'($signed(elem[i]))) * p2(int'(scale[i]) - 127), $sformatf("round trip lane %0d", i));
      en = 1'b0;
      #1;
      check(elem_o == elem && scale_o == scale, "bypass");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
