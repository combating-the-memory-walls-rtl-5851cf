// vector_unit: executes one vector instruction at a time on VLEN-wide FP16 rows.
//
// Sequence: read the source row(s) from the Vector SRAM (src1 on port A, src2 on port
// B, each held until granted), compute in the elementwise unit, the reduction unit or
// the Hadamard transform, then either write the result row to dst through port A or,
// for a reduction, write the scalar to FP register fd of the scalar unit. For the _VF
// forms the decoder supplies an FP scalar, which is broadcast to every lane. The
// result register stands for the architecture's vector buffer. The block structure
// (broadcast, reduction unit, elementwise unit, Hadamard transform) follows the
// architecture; the op set and the state machine are this implementation's.
//
// Timing: with immediate grants an element-wise instruction takes 5 cycles from
// acceptance (request, data, compute, write, idle) and a reduction 4; cmd_ready is high only
// when idle. busy/wr_row/fp_pend tell the decoder what is still outstanding.
module vector_unit import plena_pkg::*; #(
  parameter int VLEN  = 2048,
  parameter int VS_AW = 10,
  parameter int HAD_N = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  input  vu_cmd_t                cmd,
  output logic                   cmd_ready,
  // Vector SRAM port A (read src1, write dst)
  output logic                   a_req,
  output logic                   a_we,
  output logic [VS_AW-1:0]       a_addr,
  output logic [VLEN-1:0][15:0]  a_wdata,
  input  logic                   a_gnt,
  input  logic [VLEN-1:0][15:0]  a_rdata,
  // Vector SRAM port B (read src2)
  output logic                   b_req,
  output logic [VS_AW-1:0]       b_addr,
  input  logic                   b_gnt,
  input  logic [VLEN-1:0][15:0]  b_rdata,
  // FP register write (reductions)
  output logic                   fp_we,
  output logic [4:0]             fp_wa,
  output logic [15:0]            fp_wd,
  // status
  output logic                   busy,
  output logic                   wr_pend,
  output logic [31:0]            wr_row,
  output logic                   rd_pend,
  output logic [31:0]            rd_row1,
  output logic [31:0]            rd_row2,
  output logic                   fp_pend,
  output logic [4:0]             fp_pend_reg,
  output logic [31:0]            stat_ops
);
  typedef enum logic [2:0] { V_IDLE, V_READ, V_DATA, V_EXEC, V_WRITE } v_state_e;
  v_state_e st;
  vu_cmd_t  c;
  logic     need_b, got_a, got_b, cap_a, cap_b;
  logic [VLEN-1:0][15:0] opa, opb, res, ew_b, ew_y, had_y;
  logic [15:0] red_y;
  ew_op_e ew_op;
  logic   is_red, is_had, is_vf;

  always_comb begin
    is_red = (c.op == V_RED_SUM) || (c.op == V_RED_MAX);
    is_had = (c.op == V_HAD);
    is_vf  = (c.op == V_ADD_VF) || (c.op == V_SUB_VF) || (c.op == V_MUL_VF);
    need_b = (c.op == V_ADD_VV) || (c.op == V_SUB_VV) || (c.op == V_MUL_VV) || (c.op == V_MAX_VV);
    unique case (c.op)
      V_ADD_VV, V_ADD_VF: ew_op = EW_ADD;
      V_SUB_VV, V_SUB_VF: ew_op = EW_SUB;
      V_MUL_VV, V_MUL_VF: ew_op = EW_MUL;
      V_MAX_VV:           ew_op = EW_MAX;
      V_EXP_V:            ew_op = EW_EXP;
      V_RECI_V:           ew_op = EW_RECI;
      default:            ew_op = EW_PASS;
    endcase
    for (int k = 0; k < VLEN; k++) ew_b[k] = is_vf ? c.scalar : opb[k];   // broadcast
  end

  elementwise_unit #(.N(VLEN)) u_ew (.op(ew_op), .a(opa), .b(ew_b), .y(ew_y));
  reduction_unit   #(.N(VLEN)) u_red (.op(c.op == V_RED_MAX), .v(opa), .y(red_y));
  hadamard_transform #(.N(VLEN), .HAD_N(HAD_N)) u_had (.v(opa), .y(had_y));

  assign cmd_ready = (st == V_IDLE);
  assign a_req   = (st == V_READ && !got_a) || (st == V_WRITE);
  assign a_we    = (st == V_WRITE);
  assign a_addr  = (st == V_WRITE) ? VS_AW'(c.dst) : VS_AW'(c.src1);
  assign a_wdata = res;
  assign b_req   = (st == V_READ) && need_b && !got_b;
  assign b_addr  = VS_AW'(c.src2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= V_IDLE; c <= '0; got_a <= 1'b0; got_b <= 1'b0; cap_a <= 1'b0; cap_b <= 1'b0;
      opa <= '0; opb <= '0; res <= '0; fp_we <= 1'b0; fp_wa <= '0; fp_wd <= '0; stat_ops <= '0;
    end else begin
      fp_we <= 1'b0;
      cap_a <= 1'b0;
      cap_b <= 1'b0;
      if (cap_a) opa <= a_rdata;
      if (cap_b) opb <= b_rdata;
      unique case (st)
        V_IDLE: if (cmd_valid) begin
          c     <= cmd;
          got_a <= 1'b0;
          got_b <= 1'b0;
          st    <= V_READ;
        end
        V_READ: begin
          if (a_req && a_gnt) begin got_a <= 1'b1; cap_a <= 1'b1; end
          if (b_req && b_gnt) begin got_b <= 1'b1; cap_b <= 1'b1; end
          if ((got_a || (a_req && a_gnt)) && (!need_b || got_b || (b_req && b_gnt))) st <= V_DATA;
        end
        V_DATA: st <= V_EXEC;   // the last operand is captured in this cycle
        V_EXEC: begin
          stat_ops <= stat_ops + 1;
          if (is_red) begin
            fp_we <= 1'b1;
            fp_wa <= c.fd;
            fp_wd <= red_y;
            st    <= V_IDLE;
          end else begin
            res <= is_had ? had_y : ew_y;
            st  <= V_WRITE;
          end
        end
        V_WRITE: if (a_gnt) st <= V_IDLE;
        default: st <= V_IDLE;
      endcase
    end
  end

  assign busy        = (st != V_IDLE) || fp_we;
  assign wr_pend     = (st != V_IDLE) && !is_red;
  assign wr_row      = c.dst;
  assign rd_pend     = (st == V_READ);
  assign rd_row1     = c.src1;
  assign rd_row2     = c.src2;
  assign fp_pend     = ((st != V_IDLE) && is_red) || fp_we;
  assign fp_pend_reg = (st != V_IDLE) ? c.fd : fp_wa;
endmodule
