// arsc_ref_pkg: bit-true reference model of the ARSC datapath, written
// independently of the RTL for the testbenches (N = 8, M = 10, CQ = 9).
//
// - Coefficients: round(2^9 * a(u) * cos((2x+1) u pi / 16)), signed-magnitude.
// - Counter-based multiplication of a 9-bit fraction c by an integer w counts
//   the ones in the first w bits of the deterministic stream, in closed form:
//   bit b of c sits at the stream positions k (1-based) whose number of
//   trailing zeros is 8-b, and there are floor(w/2^s) - floor(w/2^(s+1)) such
//   positions k <= w, s = 8-b.
// - A MAC output is the signed sum of those counts, shifted left by the number
//   of truncated bits, scaled by 2^-oshift on the magnitude, saturated to 511.
package arsc_ref_pkg;

  localparam int N  = 8;
  localparam int M  = 10;
  localparam int CQ = 9;

  typedef int vec_t [N];                // signed integer values
  typedef int tile_t [N][N];

  function automatic int coef(int u, int x);  // signed integer, scale 2^-9
    real a, v;
    a = (u == 0) ? $sqrt(1.0 / N) : $sqrt(2.0 / N);
    v = a * $cos((2 * x + 1) * u * 3.14159265358979323846 / (2.0 * N)) * 512.0;
    return (v < 0.0) ? -$rtoi(-v + 0.5) : $rtoi(v + 0.5);
  endfunction

  function automatic int sel_shift(int sel);
    return (sel > 4) ? 4 : sel;
  endfunction

  function automatic int sc_count(int c, int w, int q);
    int s, n;
    n = 0;
    for (int b = 0; b < q; b++) begin
      s = q - 1 - b;
      if ((c >> b) & 1) n += (w >> s) - (w >> (s + 1));
    end
    return n;
  endfunction

  // Scale and saturate a signed sum of counts; returns a signed integer.
  function automatic int finish(int acc, int shift, int oshift);
    int mag;
    mag = (acc < 0) ? -acc : acc;
    mag = mag << shift;
    if (oshift > 0) mag = mag >> oshift;
    else            mag = mag << (-oshift);
    if (mag > 511) mag = 511;
    return (acc < 0) ? -mag : mag;
  endfunction

  // Output j of a 1D transform of x (signed ints, |x| <= 511).
  function automatic int mac_out(vec_t x, int sel, bit inverse, int oshift, int j);
    int acc, c, w, sh, p;
    sh  = sel_shift(sel);
    acc = 0;
    for (int i = 0; i < N; i++) begin
      c = inverse ? coef(i, j) : coef(j, i);
      w = ((x[i] < 0) ? -x[i] : x[i]) >> sh;
      p = sc_count((c < 0) ? -c : c, w, CQ);
      if ((c < 0) != (x[i] < 0)) acc -= p;
      else                       acc += p;
    end
    return finish(acc, sh, oshift);
  endfunction

  // Largest truncated magnitude of a vector: the length of one MAC round.
  function automatic int max_w(vec_t x, int sel);
    int m, w;
    m = 0;
    for (int i = 0; i < N; i++) begin
      w = ((x[i] < 0) ? -x[i] : x[i]) >> sel_shift(sel);
      if (w > m) m = w;
    end
    return m;
  endfunction

  // 2D block: lines in -> result[q][p] = second-pass output p of line q.
  function automatic tile_t block2d(tile_t lines, int sel, bit inverse);
    tile_t mid, res;
    vec_t v;
    int osh;
    osh = inverse ? -1 : 1;
    for (int l = 0; l < N; l++) begin
      v = lines[l];
      for (int j = 0; j < N; j++) mid[l][j] = mac_out(v, sel, inverse, osh, j);
    end
    for (int q = 0; q < N; q++) begin
      for (int l = 0; l < N; l++) v[l] = mid[l][q];
      for (int p = 0; p < N; p++) res[q][p] = mac_out(v, sel, inverse, osh, p);
    end
    return res;
  endfunction

  // Signed-magnitude encoding of a signed integer (10 bits).
  function automatic logic [M-1:0] to_sm(int v);
    return (v < 0) ? {1'b1, 9'(-v)} : {1'b0, 9'(v)};
  endfunction

  function automatic int from_sm(logic [M-1:0] w);
    return w[M-1] ? -int'(w[M-2:0]) : int'(w[M-2:0]);
  endfunction

endpackage
