// vector_sram: the FP16 scratchpad of the accelerator (activations, softmax
// intermediates, results of the matrix unit).
//
// DEPTH rows of VLEN FP16 values, with two independent read/write ports (2RW), as the
// architecture specifies. Values are kept in FP16; conversion from and to MX happens
// in the HBM controller. Depth is this implementation's choice. Each port: en selects
// the port, we makes it a write, addr selects the row; read data appear on rdata one
// cycle after a read. If both ports write the same row in one cycle, port A wins.
module vector_sram #(
  parameter int VLEN  = 2048,
  parameter int DEPTH = 1024,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   a_en,
  input  logic                   a_we,
  input  logic [AW-1:0]          a_addr,
  input  logic [VLEN-1:0][15:0]  a_wdata,
  output logic [VLEN-1:0][15:0]  a_rdata,
  input  logic                   b_en,
  input  logic                   b_we,
  input  logic [AW-1:0]          b_addr,
  input  logic [VLEN-1:0][15:0]  b_wdata,
  output logic [VLEN-1:0][15:0]  b_rdata
);
  logic [VLEN-1:0][15:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (b_en && b_we && !(a_en && a_we && a_addr == b_addr)) mem[b_addr] <= b_wdata;
    if (a_en && a_we) mem[a_addr] <= a_wdata;
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
  end
endmodule
