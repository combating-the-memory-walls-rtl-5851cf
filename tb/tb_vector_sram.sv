// tb_vector_sram: self-checking testbench for the two-port Vector SRAM.
//
// VLEN = 8 lanes, 16 rows. Random reads and writes on both ports every cycle against a
// reference memory: read data must be the row's value before the same-cycle writes and
// appear exactly one cycle after the request; when both ports write the same row in one
// cycle, port A's data must win. Read outputs must hold when a port is idle.
module tb_vector_sram;
  localparam int V = 8, D = 16, AW = 4;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [V-1:0][15:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  logic [V-1:0][15:0] ref_mem [D];
  logic [V-1:0][15:0] exp_a, exp_b;
  int checks = 0, failures = 0;

  vector_sram #(.VLEN(V), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    // initialise every row through port A
    for (int r = 0; r < D; r++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(r);
      for (int l = 0; l < V; l++) a_wdata[l] = 16'($urandom);
      ref_mem[r] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    exp_a = a_rdata; exp_b = b_rdata;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = AW'($urandom);
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = (n % 9 == 0) ? a_addr : AW'($urandom);
      for (int l = 0; l < V; l++) begin a_wdata[l] = 16'($urandom); b_wdata[l] = 16'($urandom); end
      if (a_en && !a_we) exp_a = ref_mem[a_addr];
      if (b_en && !b_we) exp_b = ref_mem[b_addr];
      if (b_en && b_we) ref_mem[b_addr] = b_wdata;
      if (a_en && a_we) ref_mem[a_addr] = a_wdata;
      @(posedge clk); #1;
      check(a_rdata == exp_a, $sformatf("port A read n=%0d", n));
      check(b_rdata == exp_b, $sformatf("port B read n=%0d", n));
    end
    @(negedge clk); a_en = 0; b_en = 0;
    for (int r = 0; r < D; r++) begin
      @(negedge clk); a_en = 1; a_we = 0; a_addr = AW'(r);
      @(posedge clk); #1;
      check(a_rdata == ref_mem[r], $sformatf("final row %0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
