// plena_pkg: types, constants and arithmetic shared by the PLENA accelerator RTL.
//
// Number formats. The vector side (Vector SRAM, vector unit, scalar FP unit) works on
// 16-bit floating point (IEEE binary16 layout: 1 sign, 5 exponent, 10 mantissa bits).
// The arithmetic here flushes subnormals to zero, rounds to nearest with ties away from
// zero and turns overflow into infinity; these are choices of this implementation.
// The matrix side works on MXINT: a block of MX_BLOCK two's-complement integer elements
// that share one E8M0 scale, value = element * 2^(scale-127).
//
// Every FP operation is written as: compute an exact (or truncated-with-sticky) integer
// magnitude and a binary exponent, then pass both to fp_pack(), which normalises and
// rounds. This keeps all operators consistent with one rounding rule.
//
// Instruction word (this design's own encoding; the architecture only fixes 32 bits):
//   [31:26] opcode  [25:21] rd  [20:16] rs1  [15:11] rs2  [10:0] imm
package plena_pkg;

  // ---------------------------------------------------------------- FP16
  typedef logic [15:0] fp16_t;
  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;
  localparam fp16_t FP16_NINF = 16'hFC00;

  localparam int MAG_W = 64;

  // Normalise and round sign * mag * 2^e into FP16.
  function automatic fp16_t fp_pack(input logic s, input logic [MAG_W-1:0] mag, input int e);
    int p;
    int be;
    logic [MAG_W-1:0] m;
    logic [12:0] r13;
    logic [9:0] man;
    p = -1;
    for (int i = 0; i < MAG_W; i++) if (mag[i]) p = i;
    if (p < 0) return {s, 15'd0};
    be = p + e + 15;
    if (p > 10) begin
      m   = mag >> (p - 11);             // hidden bit, 10 mantissa bits, round bit
      r13 = {1'b0, m[11:0]} + 13'd1;     // round half away from zero
      if (r13[12]) begin
        be  = be + 1;
        man = 10'd0;
      end else begin
        man = r13[10:1];
      end
    end else begin
      m   = mag << (10 - p);
      man = m[9:0];
    end
    if (be >= 31) return {s, 15'h7C00};
    if (be <= 0)  return {s, 15'd0};
    return {s, be[4:0], man};
  endfunction

  // Unpack to (sign, 11-bit magnitude with hidden bit, exponent of the LSB). Zero and
  // subnormal inputs give mag = 0.
  function automatic void fp_unpack(input fp16_t a, output logic s, output logic [10:0] mag, output int e);
    s = a[15];
    if (a[14:10] == 5'd0) begin
      mag = '0; e = 0;
    end else begin
      mag = {1'b1, a[9:0]};
      e = int'(a[14:10]) - 25;
    end
  endfunction

  function automatic logic fp_is_inf(input fp16_t a);
    return a[14:10] == 5'h1F;
  endfunction

  function automatic fp16_t fp_mul(input fp16_t a, input fp16_t b);
    logic sa, sb; logic [10:0] ma, mb; int ea, eb;
    fp_unpack(a, sa, ma, ea);
    fp_unpack(b, sb, mb, eb);
    if (fp_is_inf(a) || fp_is_inf(b)) return {sa ^ sb, 15'h7C00};
    return fp_pack(sa ^ sb, MAG_W'(ma) * MAG_W'(mb), ea + eb);
  endfunction

  function automatic fp16_t fp_add(input fp16_t a, input fp16_t b);
    logic sa, sb; logic [10:0] ma, mb; int ea, eb;
    logic [MAG_W-1:0] xa, xb, r; int d, e;
    logic sr;
    fp_unpack(a, sa, ma, ea);
    fp_unpack(b, sb, mb, eb);
    if (fp_is_inf(a)) return a;
    if (fp_is_inf(b)) return b;
    if (ma == 0) return (mb == 0) ? FP16_ZERO : b;
    if (mb == 0) return a;
    // Put both on a grid 16 bits below the larger LSB exponent; anything shifted out
    // further becomes a sticky bit, which keeps round-to-nearest correct.
    if (ea >= eb) begin
      e = ea - 16; xa = MAG_W'(ma) << 16; d = ea - eb;
      xb = (d > 16) ? ((d > 27) ? 64'd1 : ((MAG_W'(mb) << 16) >> d) | 64'd1) : MAG_W'(mb) << (16 - d);
    end else begin
      e = eb - 16; xb = MAG_W'(mb) << 16; d = eb - ea;
      xa = (d > 16) ? ((d > 27) ? 64'd1 : ((MAG_W'(ma) << 16) >> d) | 64'd1) : MAG_W'(ma) << (16 - d);
    end
    if (sa == sb) begin
      r = xa + xb; sr = sa;
    end else if (xa >= xb) begin
      r = xa - xb; sr = sa;
    end else begin
      r = xb - xa; sr = sb;
    end
    if (r == 0) return FP16_ZERO;
    return fp_pack(sr, r, e);
  endfunction

  function automatic fp16_t fp_sub(input fp16_t a, input fp16_t b);
    return fp_add(a, {~b[15], b[14:0]});
  endfunction

  // Signed magnitude comparison; returns the larger operand.
  function automatic fp16_t fp_max(input fp16_t a, input fp16_t b);
    logic a_gt;
    if (a[15] != b[15]) a_gt = b[15];
    else if (!a[15])    a_gt = a[14:0] >= b[14:0];
    else                a_gt = a[14:0] <= b[14:0];
    return a_gt ? a : b;
  endfunction

  function automatic fp16_t fp_div(input fp16_t a, input fp16_t b);
    logic sa, sb; logic [10:0] ma, mb; int ea, eb;
    logic [MAG_W-1:0] q;
    fp_unpack(a, sa, ma, ea);
    fp_unpack(b, sb, mb, eb);
    if (mb == 0 || fp_is_inf(a)) return {sa ^ sb, 15'h7C00};
    if (fp_is_inf(b) || ma == 0) return {sa ^ sb, 15'd0};
    q = (MAG_W'(ma) << 24) / MAG_W'(mb);
    q = q | MAG_W'((((MAG_W'(ma) << 24) % MAG_W'(mb)) != 0) ? 1 : 0);   // sticky
    return fp_pack(sa ^ sb, q, ea - eb - 24);
  endfunction

  function automatic fp16_t fp_recip(input fp16_t a);
    return fp_div(FP16_ONE, a);
  endfunction

  // Square root by integer square root of the mantissa scaled to an even exponent.
  function automatic fp16_t fp_sqrt(input fp16_t a);
    logic s; logic [10:0] ma; int ea;
    logic [MAG_W-1:0] x, r, bit_v;
    fp_unpack(a, s, ma, ea);
    if (ma == 0) return FP16_ZERO;
    if (s) return 16'h7E00;                       // negative input: NaN
    if (fp_is_inf(a)) return FP16_INF;
    x = MAG_W'(ma) << 24;
    ea = ea - 24;
    if (ea % 2 != 0) begin x = x << 1; ea = ea - 1; end
    r = 0;
    bit_v = 64'd1 << 62;
    while (bit_v > x) bit_v = bit_v >> 2;
    while (bit_v != 0) begin
      if (x >= r + bit_v) begin x = x - (r + bit_v); r = (r >> 1) + bit_v; end
      else r = r >> 1;
      bit_v = bit_v >> 2;
    end
    if (x != 0) r = (r << 1) | 64'd1; else r = r << 1;          // sticky below the root
    return fp_pack(1'b0, r, ea / 2 - 1);
  endfunction

  // 2^(k/64) for k = 0..63 in 1.15 fixed point: round(2^(k/64) * 32768).
  function automatic logic [16:0] exp2_lut(input logic [5:0] k);
    case (k)
      6'd0: return 17'd32768;  6'd1: return 17'd33125;  6'd2: return 17'd33486;  6'd3: return 17'd33850;
      6'd4: return 17'd34219;  6'd5: return 17'd34591;  6'd6: return 17'd34968;  6'd7: return 17'd35349;
      6'd8: return 17'd35734;  6'd9: return 17'd36123;  6'd10: return 17'd36516; 6'd11: return 17'd36914;
      6'd12: return 17'd37316; 6'd13: return 17'd37722; 6'd14: return 17'd38133; 6'd15: return 17'd38548;
      6'd16: return 17'd38968; 6'd17: return 17'd39392; 6'd18: return 17'd39821; 6'd19: return 17'd40255;
      6'd20: return 17'd40693; 6'd21: return 17'd41136; 6'd22: return 17'd41584; 6'd23: return 17'd42037;
      6'd24: return 17'd42495; 6'd25: return 17'd42958; 6'd26: return 17'd43425; 6'd27: return 17'd43898;
      6'd28: return 17'd44376; 6'd29: return 17'd44859; 6'd30: return 17'd45348; 6'd31: return 17'd45842;
      6'd32: return 17'd46341; 6'd33: return 17'd46846; 6'd34: return 17'd47356; 6'd35: return 17'd47871;
      6'd36: return 17'd48393; 6'd37: return 17'd48920; 6'd38: return 17'd49452; 6'd39: return 17'd49991;
      6'd40: return 17'd50535; 6'd41: return 17'd51085; 6'd42: return 17'd51642; 6'd43: return 17'd52204;
      6'd44: return 17'd52773; 6'd45: return 17'd53347; 6'd46: return 17'd53928; 6'd47: return 17'd54515;
      6'd48: return 17'd55109; 6'd49: return 17'd55709; 6'd50: return 17'd56316; 6'd51: return 17'd56929;
      6'd52: return 17'd57549; 6'd53: return 17'd58176; 6'd54: return 17'd58809; 6'd55: return 17'd59449;
      6'd56: return 17'd60097; 6'd57: return 17'd60751; 6'd58: return 17'd61413; 6'd59: return 17'd62081;
      6'd60: return 17'd62757; 6'd61: return 17'd63441; 6'd62: return 17'd64132; 6'd63: return 17'd64830;
      default: return 17'd32768;
    endcase
  endfunction

  // e^x = 2^(x * log2 e). The product is turned into fixed point with 12 fraction bits;
  // the top 6 fraction bits index the table above, the remaining 6 interpolate linearly.
  function automatic fp16_t fp_exp(input fp16_t a);
    logic s; logic [10:0] ma; int ea;
    logic [MAG_W-1:0] prod;
    longint fx;       // x*log2(e) in signed fixed point, 12 fraction bits
    longint ip;
    logic [11:0] fr;
    logic [16:0] t0, t1;
    logic [MAG_W-1:0] mant;
    fp_unpack(a, s, ma, ea);
    if (ma == 0) return FP16_ONE;
    if (fp_is_inf(a)) return s ? FP16_ZERO : FP16_INF;
    // log2(e) = 1.4426950 ~ 23637 / 2^14
    prod = MAG_W'(ma) * 64'd23637;                // value = prod * 2^(ea-14)
    if (ea - 14 + 12 >= 0) begin
      if (ea - 2 > 20) return s ? FP16_ZERO : FP16_INF;
      fx = longint'(prod << (ea - 2));
    end else begin
      if (2 - ea > 63) fx = 0;
      else fx = longint'(prod >> (2 - ea));
    end
    if (fx > (longint'(40) <<< 12)) return s ? FP16_ZERO : FP16_INF;
    if (s) fx = -fx;
    ip = fx >>> 12;
    fr = fx[11:0];
    t0 = exp2_lut(fr[11:6]);
    t1 = (fr[11:6] == 6'd63) ? 17'd65536 : exp2_lut(fr[11:6] + 6'd1);
    mant = (MAG_W'(t0) << 6) + MAG_W'(t1 - t0) * MAG_W'(fr[5:0]);   // 1.21 fixed point
    return fp_pack(1'b0, mant, int'(ip) - 21);
  endfunction

  // Signed integer times a power of two, to FP16.
  function automatic fp16_t fp_from_int(input longint v, input int e);
    logic s;
    logic [MAG_W-1:0] m;
    s = v < 0;
    m = s ? MAG_W'(-v) : MAG_W'(v);
    return fp_pack(s, m, e);
  endfunction

  // ---------------------------------------------------------------- MX
  localparam int MX_BIAS = 127;

  // Shared exponent X for a block whose largest magnitude is max_abs, for signed
  // integer elements of width ew (largest element 2^(ew-1)-1): the smallest X with
  // (2^(ew-1)-1) * 2^X >= max_abs. Returned biased (E8M0).
  function automatic logic [7:0] mx_shared_scale(input fp16_t max_abs, input int ew);
    logic s; logic [10:0] m; int e; int x;
    fp_unpack(max_abs, s, m, e);
    if (m == 0) return 8'(MX_BIAS);
    // max_abs = m * 2^e, with m in [1024, 2047]; exponent of its leading bit is e+10.
    if (int'(m) <= 2048 - (1 << (12 - ew))) x = e + 10 - ew + 2;
    else x = e + 10 - ew + 3;
    return 8'(x + MX_BIAS);
  endfunction

  // Element = clip(round(v / 2^(scale-127)), -(2^(ew-1)-1), 2^(ew-1)-1).
  function automatic int mx_quant_elem(input fp16_t v, input logic [7:0] scale, input int ew);
    logic s; logic [10:0] m; int e; int sh; longint q; int lim;
    fp_unpack(v, s, m, e);
    lim = (1 << (ew - 1)) - 1;
    if (m == 0) return 0;
    sh = int'(scale) - MX_BIAS - e;      // v / 2^X = m * 2^-sh
    if (sh <= 0) q = (-sh > 20) ? longint'(lim) : (longint'(m) <<< (-sh));
    else if (sh > 12) q = 0;
    else q = (longint'(m) + (longint'(1) <<< (sh - 1))) >>> sh;
    if (q > longint'(lim)) q = longint'(lim);
    return s ? -int'(q) : int'(q);
  endfunction

  // ---------------------------------------------------------------- ISA
  typedef enum logic [5:0] {
    OP_NOP      = 6'h00,
    // matrix
    M_MM        = 6'h01,  // X (BLEN vsram rows) x W columns of a Matrix SRAM tile
    M_TMM       = 6'h02,  // X x W^T: W rows of a Matrix SRAM tile
    M_HTMM      = 6'h03,  // per-head X x W^T (head-grouped reduction)
    M_SUM       = 6'h04,  // cross-array sum, to accumulate buffer, optional flush
    // vector
    V_ADD_VV    = 6'h08,
    V_SUB_VV    = 6'h09,
    V_MUL_VV    = 6'h0A,
    V_MAX_VV    = 6'h0B,
    V_ADD_VF    = 6'h0C,
    V_SUB_VF    = 6'h0D,
    V_MUL_VF    = 6'h0E,
    V_EXP_V     = 6'h0F,
    V_RECI_V    = 6'h10,
    V_RED_SUM   = 6'h11,
    V_RED_MAX   = 6'h12,
    V_HAD       = 6'h13,
    // scalar integer
    S_ADD       = 6'h18,
    S_SUB       = 6'h19,
    S_MUL       = 6'h1A,
    S_DIV       = 6'h1B,
    S_ADDI      = 6'h1C,
    S_LUI       = 6'h1D,
    // scalar FP
    S_FADD      = 6'h20,
    S_FSUB      = 6'h21,
    S_FMUL      = 6'h22,
    S_FDIV      = 6'h23,
    S_FEXP      = 6'h24,
    S_FRECI     = 6'h25,
    S_FSQRT     = 6'h26,
    S_FMAX      = 6'h27,
    S_FLI       = 6'h28,  // load a 16-bit FP immediate (rs2/imm bits)
    // HBM
    H_LOAD_M    = 6'h30,
    H_LOAD_V    = 6'h31,
    H_STORE_V   = 6'h32,
    // control
    C_SET_ADDR  = 6'h38,  // HBM element base
    C_SET_SCALE = 6'h39,  // HBM scale base
    C_SET_STRIDE= 6'h3A,
    C_SET_MLOAD = 6'h3B,
    C_SET_VLOAD = 6'h3C,
    C_SET_VWRITE= 6'h3D,
    C_FENCE     = 6'h3E,  // wait until every unit is idle
    C_HALT      = 6'h3F
  } opcode_e;

  typedef struct packed {
    logic [5:0]  op;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [10:0] imm;
  } instr_t;

  typedef enum logic [3:0] {
    EW_ADD, EW_SUB, EW_MUL, EW_MAX, EW_EXP, EW_RECI, EW_PASS
  } ew_op_e;

  typedef enum logic [1:0] { MM_COL = 2'd0, MM_ROW = 2'd1, MM_HEAD = 2'd2 } mm_mode_e;

  // Command from the decoder to the matrix unit.
  typedef struct packed {
    logic        is_sum;     // 1: M_SUM, 0: stream a tile
    mm_mode_e    mode;
    logic [31:0] vs_row;     // X base row (stream) or destination row (M_SUM flush)
    logic [31:0] ms_idx;     // Matrix SRAM row or column (tile-relative in low bits)
    logic [9:0]  col_blk;    // M_SUM: column offset in units of BLEN
    logic        flush;      // M_SUM: write the accumulate buffer to Vector SRAM
    logic        ihad;       // M_TMM / M_HTMM: undo the Hadamard rotation of the W rows
  } mu_cmd_t;

  // Command from the decoder to the vector unit.
  typedef struct packed {
    logic [5:0]  op;
    logic [31:0] dst;        // destination row
    logic [31:0] src1;
    logic [31:0] src2;
    fp16_t       scalar;     // broadcast operand
    logic [4:0]  fd;         // FP register for reductions
  } vu_cmd_t;

  typedef enum logic [1:0] { HB_LOAD_M = 2'd0, HB_LOAD_V = 2'd1, HB_STORE_V = 2'd2 } hb_kind_e;

  // Command from the decoder to the HBM controller.
  typedef struct packed {
    hb_kind_e    kind;
    logic [31:0] sram_row;   // first SRAM row
    logic [31:0] elem_addr;  // HBM beat address of the first element row
    logic [31:0] scale_addr; // HBM beat address of the first scale row
    logic [31:0] stride;     // beats between consecutive rows
    logic [15:0] rows;       // number of rows
  } hb_cmd_t;

endpackage
