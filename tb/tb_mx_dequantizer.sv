// tb_mx_dequantizer: self-checking testbench for the MXINT4 -> FP16 dequantizer.
//
// Random signed elements (all 16 codes) with random block scales: per block the output
// must equal elem * 2^(scale-127) exactly (the chosen scales keep every value inside
// the normal FP16 range, where the conversion is exact), with zero mapping to +0. Also
// checks that scales far above the FP16 range saturate to infinity of the right sign.
module tb_mx_dequantizer;
  localparam int N = 64, EW = 4, SW = 8, BLK = 16, NB = N / BLK;
  logic [N-1:0][EW-1:0] elem;
  logic [NB-1:0][SW-1:0] scale;
  logic [N-1:0][15:0] out_fp;
  int checks = 0, failures = 0;

  mx_dequantizer #(.N(N), .ELEM_W(EW), .SCALE_W(SW), .MX_BLOCK(BLK)) dut (.*);

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
    if (h[14:10] == 31) return h[15] ? -1.0e30 : 1.0e30;
    m = (1024.0 + real'(h[9:0])) / 1024.0 * (p2(int'(h[14:10]) - 15));
    return h[15] ? -m : m;
  endfunction

  initial begin
    real r;
    for (int t = 0; t < 300; t++) begin
      for (int b = 0; b < NB; b++) scale[b] = SW'(127 - 12 + int'($urandom_range(0, 24)));
      for (int k = 0; k < N; k++) elem[k] = EW'($urandom);
      #1;
      for (int k = 0; k < N; k++) begin
        r = real'(int'($signed(elem[k]))) * p2(int'(scale[k / BLK]) - 127);
        check(h2r(out_fp[k]) == r, $sformatf("t%0d k%0d: %h ref %f", t, k, out_fp[k], r));
        if (elem[k] == 0) check(out_fp[k] == 16'h0000, "zero encodes as +0");
      end
    end
    scale[0] = 8'd200; elem[0] = 4'd3; elem[1] = 4'hC;
    #1;
    check(out_fp[0] == 16'h7C00 && out_fp[1] == 16'hFC00, "overflow saturates to +/-inf");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
