// tb_instruction_buffer: self-checking testbench for the instruction FIFO.
//
// DEPTH = 8. Random push / pop traffic (never pushing when full, as the top level
// guarantees) against a queue model: the head word, full, empty and count are checked
// every cycle, and a fill-to-full / drain-to-empty sequence checks the boundaries.
module tb_instruction_buffer;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [31:0] push_instr = '0, instr;
  logic [3:0] count;
  logic [31:0] q [$];
  int checks = 0, failures = 0;

  instruction_buffer #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic step(input bit do_push, input bit do_pop);
    @(negedge clk);
    push = do_push && !full;
    pop  = do_pop;
    push_instr = $urandom;
    @(posedge clk);
    if (pop && q.size() > 0) void'(q.pop_front());
    if (push) q.push_back(push_instr);
    #1;
    check(int'(count) == q.size(), $sformatf("count %0d ref %0d", count, q.size()));
    check(full == (q.size() == D) && empty == (q.size() == 0), "full/empty");
    if (q.size() > 0) check(instr == q[0], "head word");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 12; n++) step(1, 0);     // fill (extra pushes are held off)
    check(full, "full after fill");
    for (int n = 0; n < 12; n++) step(0, 1);     // drain
    check(empty, "empty after drain");
    for (int n = 0; n < 2000; n++) step(1'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
