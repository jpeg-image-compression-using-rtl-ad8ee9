// tb_ref_pkg: reference models for the codec testbenches.
//
// Everything here is computed independently of the RTL: the DCT and IDCT
// straight from the cosine sums in double precision, the zigzag order from
// the standard JPEG table written out, and run-length coding with plain
// loops. Single-precision words are converted to and from real by their
// sign/exponent/fraction fields.
package tb_ref_pkg;

  typedef real rmat_t [8][8];
  typedef int  imat_i [8][8];

  // Standard JPEG zigzag order: scan position -> row*8 + column.
  function automatic int zz_tab(input int i);
    int t [64];
    t = '{ 0,  1,  8, 16,  9,  2,  3, 10,
          17, 24, 32, 25, 18, 11,  4,  5,
          12, 19, 26, 33, 40, 48, 41, 34,
          27, 20, 13,  6,  7, 14, 21, 28,
          35, 42, 49, 56, 57, 50, 43, 36,
          29, 22, 15, 23, 30, 37, 44, 51,
          58, 59, 52, 45, 38, 31, 39, 46,
          53, 60, 61, 54, 47, 55, 62, 63};
    return t[i];
  endfunction

  function automatic int q50_ref(input int r, input int c);
    int t [64];
    t = '{16, 11, 10, 16, 24, 40, 51, 61,
          12, 12, 14, 19, 26, 58, 60, 55,
          14, 13, 16, 24, 40, 57, 69, 56,
          14, 17, 22, 29, 51, 87, 80, 62,
          18, 22, 37, 56, 68,109,103, 77,
          24, 35, 55, 64, 81,104,113, 92,
          49, 64, 78, 87,103,121,120,101,
          72, 92, 95, 98,112,100,103, 99};
    return t[r*8 + c];
  endfunction

  // Quantization table entry for quality n (real arithmetic, round half up).
  function automatic int qn_ref(input int r, input int c, input int n);
    real v;
    int  k;
    if (n < 1) n = 1;
    if (n > 100) n = 100;
    if (n >= 50) v = q50_ref(r, c) * (100.0 - n) / 50.0;
    else         v = q50_ref(r, c) * 50.0 / n;
    k = int'($floor(v + 0.5));
    return (k < 1) ? 1 : k;
  endfunction

  function automatic real pow2(input int e);
    real p;
    p = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++)  p = p * 2.0;
    else        for (int i = 0; i < -e; i++) p = p / 2.0;
    return p;
  endfunction

  // single-precision word to real (normal numbers and zero)
  function automatic real fbits2r(input logic [31:0] b);
    real m;
    if (b[30:23] == 8'd0) return 0.0;
    m = (1.0 + real'(b[22:0]) / 8388608.0) * pow2(int'(b[30:23]) - 127);
    return b[31] ? -m : m;
  endfunction

  // real to single-precision word, round to nearest
  function automatic logic [31:0] r2fbits(input real r);
    real a;
    int  e;
    longint m;
    logic s;
    if (r == 0.0) return 32'd0;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = longint'($floor((a - 1.0) * 8388608.0 + 0.5));
    if (m == 64'd8388608) begin m = 0; e++; end
    return {s, 8'(e + 127), 23'(m)};
  endfunction

  function automatic real cu(input int u);
    return (u == 0) ? $sqrt(1.0/8.0) : $sqrt(2.0/8.0);
  endfunction

  function automatic rmat_t ref_dct(input rmat_t p);
    rmat_t d;
    real   pi;
    pi = 3.14159265358979323846;
    for (int u = 0; u < 8; u++)
      for (int v = 0; v < 8; v++) begin
        real s;
        s = 0.0;
        for (int x = 0; x < 8; x++)
          for (int y = 0; y < 8; y++)
            s += p[x][y] * $cos((2*x+1)*u*pi/16.0) * $cos((2*y+1)*v*pi/16.0);
        d[u][v] = cu(u) * cu(v) * s;
      end
    return d;
  endfunction

  function automatic rmat_t ref_idct(input rmat_t d);
    rmat_t p;
    real   pi;
    pi = 3.14159265358979323846;
    for (int x = 0; x < 8; x++)
      for (int y = 0; y < 8; y++) begin
        real s;
        s = 0.0;
        for (int u = 0; u < 8; u++)
          for (int v = 0; v < 8; v++)
            s += cu(u) * cu(v) * d[u][v] * $cos((2*x+1)*u*pi/16.0) * $cos((2*y+1)*v*pi/16.0);
        p[x][y] = s;
      end
    return p;
  endfunction

  // round half away from zero
  function automatic int rnd(input real r);
    return (r < 0.0) ? -int'($floor(-r + 0.5)) : int'($floor(r + 0.5));
  endfunction

  // distance of |r| from the nearest .5 boundary (small means a rounding tie)
  function automatic real tie_dist(input real r);
    real a, f;
    a = (r < 0.0) ? -r : r;
    f = a - $floor(a);
    return (f > 0.5) ? f - 0.5 : 0.5 - f;
  endfunction

  function automatic int clip8(input int v);
    return (v < 0) ? 0 : (v > 255 ? 255 : v);
  endfunction

  // Run-length coding of zero runs: value, or (0, run length).
  function automatic void rle_enc(input int z [64], output int r [96], output int len);
    int run;
    len = 0;
    run = 0;
    for (int i = 0; i < 96; i++) r[i] = 0;
    for (int i = 0; i < 64; i++) begin
      if (z[i] == 0) run++;
      else begin
        if (run > 0) begin r[len] = 0; r[len+1] = run; len += 2; run = 0; end
        r[len] = z[i]; len++;
      end
    end
    if (run > 0) begin r[len] = 0; r[len+1] = run; len += 2; end
  endfunction

  function automatic void rle_dec(input int r [96], input int len, output int z [64]);
    int w, i;
    for (int k = 0; k < 64; k++) z[k] = 0;
    w = 0;
    i = 0;
    while (i < len && w < 64) begin
      if (r[i] == 0) begin
        w += (i + 1 < 96) ? r[i+1] : 0;
        i += 2;
      end else begin
        z[w] = r[i];
        w++;
        i++;
      end
    end
  endfunction

endpackage
