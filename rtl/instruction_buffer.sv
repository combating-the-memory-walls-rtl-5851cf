// instruction_buffer: FIFO between the host link and the decoder.
//
// The host pushes 32-bit instructions (push when !full); the decoder sees the oldest
// one on instr whenever !empty and removes it with pop. DEPTH entries, a power of two.
// A push and a pop may happen in the same cycle. The depth is this implementation's
// choice.
module instruction_buffer #(
  parameter int DEPTH = 64,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  logic [31:0] push_instr,
  output logic        full,
  input  logic        pop,
  output logic [31:0] instr,
  output logic        empty,
  output logic [AW:0] count
);
  logic [31:0] mem [DEPTH];
  logic [AW:0] wp, rp;

  assign count = wp - rp;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign instr = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) begin
        mem[wp[AW-1:0]] <= push_instr;
        wp <= wp + 1'b1;
      end
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) !(push && full))
    else $error("instruction_buffer: push while full");
endmodule
