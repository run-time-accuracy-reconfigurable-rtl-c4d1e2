// arsc_pkg: constants, types and the DCT coefficient table shared by the
// accuracy-reconfigurable stochastic computing (ARSC) DCT/IDCT engine.
//
// Data words are M-bit signed-magnitude numbers: bit M-1 is the sign, bits
// M-2..0 the magnitude (M = 10, so 9 magnitude bits).  The accuracy selection
// signal SEL (3 bits) picks how many of those bits take part in the stochastic
// multiplication: SEL = 0..4 selects 10..6 bits, i.e. SEL least significant
// magnitude bits are dropped.  Codes 5..7 are not used by the encoding and are
// treated here like 4 (6 bits), a choice of this design.
//
// DCT coefficients are CQ+1-bit signed-magnitude fractions: a sign bit and a
// CQ-bit magnitude meaning mag / 2^CQ.  The table is computed at elaboration
// from the orthonormal DCT-II definition
//     C[u][x] = a(u) * cos((2x+1) u pi / 2N),  a(0) = sqrt(1/N), a(u>0) = sqrt(2/N)
// rounded to the nearest multiple of 2^-CQ.  The forward 1D transform is
// f[u] = sum_x C[u][x] a[x]; the inverse is a[x] = sum_u C[u][x] f[u].
package arsc_pkg;

  localparam int N_DEF    = 8;   // DCT size N (N-point DCT, N x N tiles)
  localparam int M_DEF    = 10;  // data width m, signed-magnitude
  localparam int SELW     = 3;   // width x of the accuracy selection signal
  localparam int MIN_BITS = 6;   // narrowest configuration (SEL = 4)
  localparam int CQ_DEF   = 9;   // coefficient magnitude bits (fraction of 1)
  localparam int PIX_W    = 8;   // image pixel width

  typedef logic [SELW-1:0] sel_t;

  // Number of magnitude bits dropped for a SEL code (codes above the last
  // defined one saturate to the narrowest configuration).
  function automatic int unsigned sel_shift(sel_t sel, int unsigned m);
    int unsigned lim;
    lim = m - MIN_BITS;
    return (int'(sel) > lim) ? lim : int'(sel);
  endfunction

  // Coefficient C[u][x] as {sign, magnitude[cq-1:0]} in the low cq+1 bits.
  function automatic logic [31:0] dct_coef(int n, int cq, int u, int x);
    real a, c, v;
    int unsigned mag;
    a = (u == 0) ? $sqrt(1.0 / n) : $sqrt(2.0 / n);
    c = $cos((2.0 * x + 1.0) * u * 3.14159265358979323846 / (2.0 * n));
    v = a * c * (2.0 ** cq);
    if (v < 0.0) begin
      mag = $rtoi(-v + 0.5);
      return (32'(1) << cq) | 32'(mag);
    end
    mag = $rtoi(v + 0.5);
    return 32'(mag);
  endfunction

endpackage
