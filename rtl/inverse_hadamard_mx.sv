// inverse_hadamard_mx: inverse Hadamard rotation of an MX vector on its way from the
// Matrix SRAM to the systolic array.
//
// K and V vectors are rotated by a normalised Hadamard matrix before they are quantized
// into the KV cache, which spreads outliers over a block and makes 4-bit quantization
// more accurate. Before such a vector is used as the W operand, the rotation is undone.
// The normalised Hadamard matrix is its own inverse, so the block applies the same
// transform: y = H * e / sqrt(HAD_N) on each block of HAD_N elements.
//
// How it works: HAD_N equals the MX block size, so every block has one shared scale
// and the transform runs on the small integer elements alone. A fast Walsh-Hadamard
// butterfly network (log2 HAD_N stages of add/subtract, no multipliers) gives the
// unnormalised integer result y. The 1/sqrt(HAD_N) factor is a power of two
// (HAD_N = 4^n) and goes into the scale. y is then re-quantized to ELEM_W bits: the
// smallest shift k with QMAX * 2^k >= max|y| is chosen, the elements become
// round(y / 2^k) (half away from zero) and the block scale becomes
// scale - log2(HAD_N)/2 + k. This re-quantization is the only rounding; it is this
// design's choice, as are the butterfly network and the place of the block (applied to
// rows of a tile, i.e. M_TMM / M_HTMM, where a K vector lies along a row).
// With en = 0 the data pass through unchanged (weights are not rotated).
//
// Interface: elem/scale are one Matrix SRAM read (one scale per element; within a
// block all are equal for a row read, the block's first one is used). Combinational.
module inverse_hadamard_mx #(
  parameter int N        = 2048,
  parameter int ELEM_W   = 4,
  parameter int SCALE_W  = 8,
  parameter int HAD_N    = 16
) (
  input  logic                        en,
  input  logic [N-1:0][ELEM_W-1:0]    elem,
  input  logic [N-1:0][SCALE_W-1:0]   scale,
  output logic [N-1:0][ELEM_W-1:0]    elem_o,
  output logic [N-1:0][SCALE_W-1:0]   scale_o
);
  localparam int L    = $clog2(HAD_N);
  localparam int YW   = ELEM_W + L;               // width of the unnormalised result
  localparam int QMAX = (1 << (ELEM_W - 1)) - 1;
  localparam int NBLK = N / HAD_N;

  initial begin
    assert (HAD_N == (1 << L) && L % 2 == 0) else $error("HAD_N must be a power of 4");
    assert (N % HAD_N == 0) else $error("N must be a multiple of HAD_N");
  end

  logic [N-1:0][ELEM_W-1:0]  t_elem;
  logic [N-1:0][SCALE_W-1:0] t_scale;
  logic signed [YW-1:0] y [HAD_N];
  logic signed [YW-1:0] t0, t1;
  logic [YW-1:0] mag, m;
  int k, s;
  logic [YW:0] r;

  assign elem_o  = en ? t_elem  : elem;
  assign scale_o = en ? t_scale : scale;

  always_comb begin
    t0 = '0; t1 = '0; mag = '0; m = '0; k = 0; s = 0; r = '0;
    for (int i = 0; i < HAD_N; i++) y[i] = '0;
    begin
      for (int b = 0; b < NBLK; b++) begin
        for (int i = 0; i < HAD_N; i++) y[i] = YW'($signed(elem[b*HAD_N + i]));
        // butterflies: stage h pairs element i with i + h
        for (int h = 1; h < HAD_N; h = h * 2)
          for (int i = 0; i < HAD_N; i++)
            if ((i & h) == 0) begin
              t0 = y[i]; t1 = y[i + h];
              y[i]     = t0 + t1;
              y[i + h] = t0 - t1;
            end
        m = '0;
        for (int i = 0; i < HAD_N; i++) begin
          mag = y[i][YW-1] ? YW'(-y[i]) : YW'(y[i]);
          if (mag > m) m = mag;
        end
        k = 0;
        for (int j = L; j >= 0; j--) if ((QMAX << j) >= int'(m)) k = j;
        for (int i = 0; i < HAD_N; i++) begin
          mag = y[i][YW-1] ? YW'(-y[i]) : YW'(y[i]);
          r   = (k == 0) ? {1'b0, mag} : (({1'b0, mag} + ((YW+1)'(1) << (k - 1))) >> k);
          t_elem[b*HAD_N + i] = y[i][YW-1] ? ELEM_W'(-int'(r)) : ELEM_W'(r);
        end
        s = int'(scale[b*HAD_N]) - L / 2 + k;
        if (s < 0) s = 0;
        if (s > (1 << SCALE_W) - 1) s = (1 << SCALE_W) - 1;
        for (int i = 0; i < HAD_N; i++) t_scale[b*HAD_N + i] = SCALE_W'(s);
      end
    end
  end
endmodule
