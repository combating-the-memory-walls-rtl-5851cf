// tb_elementwise_unit: self-checking testbench for the FP16 element-wise unit.
//
// N = 16 lanes. For add, subtract, multiply and max the reference is computed in real
// arithmetic and rounded with the design's rule (fp_ref_pkg::r2h), so results must
// match bit for bit. exp and reciprocal are approximations in hardware; they are
// checked against real exp / 1/x to a relative error of 2^-8 (exp over |x| < 8) and
// 2^-10 (reciprocal). Also checks the pass-through op and overflow to infinity.
module tb_elementwise_unit;
  import plena_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 16;
  ew_op_e op;
  logic [N-1:0][15:0] a, b, y;
  int checks = 0, failures = 0;

  elementwise_unit #(.N(N)) dut (.*);

  initial begin #100000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    real ra, rb, r, got;
    logic [15:0] e;
    for (int t = 0; t < 400; t++) begin
      op = ew_op_e'(t % 7);
      for (int k = 0; k < N; k++) begin
        a[k] = rnd_h(8, 22);
        b[k] = (k == 3) ? {~a[k][15], a[k][14:0]} : rnd_h(8, 22);   // exact cancellation lane
        if (op == EW_EXP) a[k] = rnd_h(5, 17);
      end
      #1;
      for (int k = 0; k < N; k++) begin
        ra = h2r(a[k]); rb = h2r(b[k]);
        unique case (op)
          EW_ADD:  check(y[k] == r2h(ra + rb), $sformatf("add %h+%h=%h ref %h", a[k], b[k], y[k], r2h(ra + rb)));
          EW_SUB:  check(y[k] == r2h(ra - rb) || (ra == rb && y[k][14:0] == 0),
                         $sformatf("sub %h-%h=%h ref %h", a[k], b[k], y[k], r2h(ra - rb)));
          EW_MUL:  check(y[k] == r2h(ra * rb), $sformatf("mul %h*%h=%h ref %h", a[k], b[k], y[k], r2h(ra * rb)));
          EW_MAX:  check(y[k] == (ra >= rb ? a[k] : b[k]), "max");
          EW_EXP: begin
            r = $exp(ra); got = h2r(y[k]);
            check(got >= r * (1.0 - 1.0 / 256.0) && got <= r * (1.0 + 1.0 / 256.0),
                  $sformatf("exp(%f)=%f ref %f", ra, got, r));
          end
          EW_RECI: begin
            r = 1.0 / ra; got = h2r(y[k]);
            check(got >= r - (r < 0.0 ? -r : r) / 1024.0 && got <= r + (r < 0.0 ? -r : r) / 1024.0,
                  $sformatf("1/%f=%f ref %f", ra, got, r));
          end
          default: check(y[k] == a[k], "pass");
        endcase
      end
    end
    op = EW_MUL; a = '0; b = '0; a[0] = 16'h7800; b[0] = 16'h7800; // 32768*32768
    #1; check(y[0] == 16'h7C00, "overflow to +inf");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
