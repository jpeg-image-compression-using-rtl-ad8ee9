// jpeg_pkg: types and constants shared by the floating-point JPEG codec.
//
// The codec works on 8x8 blocks. The pixel side is 8-bit unsigned. The
// transform side uses IEEE-754 single precision (sign bit 31, exponent bits
// 30:23, fraction bits 22:0). The entropy side uses signed integer
// coefficients. The package holds:
//   * ieee754_t, the single-precision word as a packed struct;
//   * fmat_t / imat_t, 8x8 blocks of floats and of coefficients;
//   * the standard JPEG luminance table Q50;
//   * dct_coef(u,v), the orthonormal 8-point DCT matrix entry
//       C(0,v) = sqrt(1/8),  C(u,v) = sqrt(2/8) * cos((2v+1) u pi / 16),
//     built from the eight values sqrt(2/8)*cos(k pi/16), k = 0..7, and
//     the quadrant symmetry of the cosine;
//   * zz_row/zz_col, the zigzag scan order, computed by walking the
//     anti-diagonals of the block rather than from a stored table.
package jpeg_pkg;

  localparam int N        = 8;          // block edge
  localparam int NN       = N * N;      // 64 samples per block
  localparam int PIX_W    = 8;          // pixel width
  localparam int COEF_W   = 12;         // quantized coefficient width (signed)
  localparam int Q_W      = 13;         // quantization table entry width
  localparam int RLE_LEN  = 96;         // run-length output vector length
  localparam int RLE_CNT_W = 7;         // 0..96

  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;
    logic [22:0] frac;
  } ieee754_t;

  typedef ieee754_t                  fmat_t [N][N];
  typedef logic signed [COEF_W-1:0]  coef_t;
  typedef coef_t                     imat_t [N][N];
  typedef coef_t                     zvec_t [NN];
  typedef coef_t                     rvec_t [RLE_LEN];
  typedef logic [Q_W-1:0]            qent_t;
  typedef qent_t                     qmat_t [N][N];
  typedef logic [PIX_W-1:0]          pixel_t;
  typedef pixel_t                    pmat_t [N][N];

  // Standard luminance quantization table for quality 50.
  function automatic int unsigned q50(input int unsigned r, input int unsigned c);
    int unsigned t [NN];
    t = '{16, 11, 10, 16, 24, 40, 51, 61,
          12, 12, 14, 19, 26, 58, 60, 55,
          14, 13, 16, 24, 40, 57, 69, 56,
          14, 17, 22, 29, 51, 87, 80, 62,
          18, 22, 37, 56, 68,109,103, 77,
          24, 35, 55, 64, 81,104,113, 92,
          49, 64, 78, 87,103,121,120,101,
          72, 92, 95, 98,112,100,103, 99};
    return t[r*N + c];
  endfunction

  // sqrt(2/8) * cos(k*pi/16) as single-precision words, k = 0..7.
  function automatic logic [31:0] cos_tab(input int unsigned k);
    case (k)
      0: return 32'h3f000000;
      1: return 32'h3efb14be;
      2: return 32'h3eec835e;
      3: return 32'h3ed4db31;
      4: return 32'h3eb504f3;
      5: return 32'h3e8e39da;
      6: return 32'h3e43ef15;
      default: return 32'h3dc7c5c2;
    endcase
  endfunction

  // Entry (u,v) of the DCT matrix C (row u = frequency, column v = sample).
  function automatic ieee754_t dct_coef(input int unsigned u, input int unsigned v);
    int unsigned k;
    logic [31:0] w;
    if (u == 0) return ieee754_t'(32'h3eb504f3);   // sqrt(1/8)
    k = ((2*v + 1) * u) % 32;
    if (k <= 8)       w = cos_tab(k);
    else if (k <= 16) w = cos_tab(16 - k) | 32'h80000000;
    else if (k <= 24) w = cos_tab(k - 16) | 32'h80000000;
    else              w = cos_tab(32 - k);
    return ieee754_t'(w);
  endfunction

  // Zigzag order: position i of the scan visits row zz_row(i), column zz_col(i).
  // Anti-diagonal d = r + c; odd diagonals run top-right to bottom-left,
  // even diagonals bottom-left to top-right.
  function automatic int unsigned zz_pos(input int unsigned i, input bit want_row);
    int unsigned idx;
    idx = 0;
    for (int unsigned d = 0; d < 2*N - 1; d++) begin
      for (int unsigned s = 0; s < N; s++) begin
        int unsigned r, c;
        int unsigned lo;
        lo = (d < N) ? 0 : d - (N - 1);
        if (s + lo < N && s + lo <= d && d - (s + lo) < N) begin
          if (d % 2 == 1) begin r = s + lo; c = d - r; end
          else            begin c = s + lo; r = d - c; end
          if (idx == i) return want_row ? r : c;
          idx++;
        end
      end
    end
    return 0;
  endfunction

  function automatic int unsigned zz_row(input int unsigned i);
    return zz_pos(i, 1'b1);
  endfunction

  function automatic int unsigned zz_col(input int unsigned i);
    return zz_pos(i, 1'b0);
  endfunction

endpackage
