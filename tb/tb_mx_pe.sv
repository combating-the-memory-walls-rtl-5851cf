// tb_mx_pe: self-checking testbench for the MX processing element.
//
// Drives random signed 4-bit elements with E8M0 scales near the bias on both inputs and
// keeps a reference accumulator in the testbench: acc += a*b*2^(sa+sb-2*bias-ACC_LSB_EXP)
// (all shifts chosen non-negative, so the reference is exact). Checks every cycle that
// the accumulator matches, that the operands are forwarded right and down with one
// cycle of delay, and that clr empties the accumulator. Also checks a product whose
// shift is far below the accumulator LSB adds nothing (positive) or -1 LSB (negative,
// arithmetic shift). Prints TB_RESULT at the end; a watchdog stops a hung run.
module tb_mx_pe;
  localparam int EW = 4, SW = 8, AW = 48, LSB = -24, BIAS = 127;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [EW+SW-1:0] in_l = '0, in_t = '0, out_r, out_b;
  logic signed [AW-1:0] acc;
  int checks = 0, failures = 0;
  longint ref_acc = 0;

  mx_pe #(.ELEM_W(EW), .SCALE_W(SW), .ACC_W(AW), .ACC_LSB_EXP(LSB)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int a, b, sa, sb;
    logic [EW+SW-1:0] pl, pt;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      a  = int'($urandom_range(0, 15)) - 8;
      b  = int'($urandom_range(0, 15)) - 8;
      sa = BIAS - 12 + int'($urandom_range(0, 8));
      sb = BIAS - 12 + int'($urandom_range(0, 8));
      pl = {EW'(a), SW'(sa)};
      pt = {EW'(b), SW'(sb)};
      clr = (n % 97 == 50);
      @(negedge clk);
      in_l = pl; in_t = pt;
      @(posedge clk); #1;
      if (clr) ref_acc = 0;
      else     ref_acc += longint'(a * b) <<< (sa + sb - 2 * BIAS - LSB);
      check(acc == AW'(ref_acc), $sformatf("acc %0d != ref %0d at n=%0d", acc, ref_acc, n));
      check(out_r == pl && out_b == pt, "forwarding");
    end
    // tiny products: shift far below the LSB
    @(negedge clk); clr = 1; @(posedge clk); #1; clr = 0;
    check(acc == 0, "clear");
    @(negedge clk); in_l = {4'd3, 8'd100}; in_t = {4'd3, 8'd100};
    @(posedge clk); #1; check(acc == 0, "underflow positive adds 0");
    @(negedge clk); in_l = {4'hD, 8'd100};
    @(posedge clk); #1; check(acc == -1, "underflow negative adds -1 LSB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
