// tb_result_adder_tree: self-checking testbench for the cross-sub-array adder tree.
//
// NSUB = 8 inputs, GSUB = 2 inputs per head group (4 groups). Random signed inputs
// (including large magnitudes near the input width) are applied in both modes: normal
// mode must give the total in sum[0] and zero elsewhere, head mode one sum per group.
// The tree is combinational; values are checked after a #1 settle.
module tb_result_adder_tree;
  localparam int N = 8, G = 2, IW = 20, OW = IW + 3;
  logic head_mode;
  logic signed [IW-1:0] acc_in [N];
  logic signed [OW-1:0] sum [N/G];
  int checks = 0, failures = 0;

  result_adder_tree #(.NSUB(N), .GSUB(G), .IN_W(IW), .OUT_W(OW)) dut (.*);

  initial begin #100000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    longint tot, gs;
    for (int t = 0; t < 200; t++) begin
      head_mode = t[0];
      for (int q = 0; q < N; q++)
        acc_in[q] = (t % 10 == 3) ? IW'(-(1 << (IW - 1))) : IW'($urandom);
      #1;
      tot = 0;
      for (int q = 0; q < N; q++) tot += longint'(acc_in[q]);
      if (!head_mode) begin
        check(sum[0] == OW'(tot), $sformatf("total %0d ref %0d", sum[0], tot));
        for (int g = 1; g < N / G; g++) check(sum[g] == 0, "unused group outputs zero");
      end else begin
        for (int g = 0; g < N / G; g++) begin
          gs = 0;
          for (int q = g * G; q < (g + 1) * G; q++) gs += longint'(acc_in[q]);
          check(sum[g] == OW'(gs), $sformatf("group %0d sum %0d ref %0d", g, sum[g], gs));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
