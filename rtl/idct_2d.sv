// idct_2d: inverse 2-D DCT of an 8x8 block with level shift and clipping.
//
// The transform P' = C^T * X * C runs on the DCT engine (dct_2d built with
// INVERSE = 1: the same two passes through the two-matrix multiplier, with
// C and C^T swapped). Each single-precision result is then rounded to the
// nearest integer (half away from zero), 128 is added to return to the
// unsigned pixel range, and values outside [0, 255] are clipped. The
// rounding is done exactly on a fixed-point copy with one fraction bit:
// round(|v|) = floor((floor(2|v|) + 1) / 2).
//
// Interface and timing: in_ready is high while the engine is idle; a block
// is accepted on in_valid && in_ready. out_valid pulses LATENCY = 14 clock
// edges after the accepting edge (13 for the transform, one for the
// level-shift register); y holds until the next block.
module idct_2d
  import jpeg_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  fmat_t x,
  output logic  out_valid,
  output pmat_t y
);
  localparam int LATENCY = 14;

  logic  t_valid;
  fmat_t t;

  dct_2d #(.INVERSE(1'b1)) u_core (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_ready (in_ready),
    .x        (x),
    .out_valid(t_valid),
    .y        (t)
  );

  function automatic pixel_t to_pixel(input ieee754_t f);
    logic [13:0] mag2;     // floor(2|v|), |v| < 2^12 before saturation
    logic [13:0] r;
    int          sh;
    int          v;
    sh = int'(f.exp) - 127 - 23 + 1;
    if (f.exp == 8'd0)                 mag2 = '0;
    else if (int'(f.exp) - 127 >= 12)  mag2 = '1;
    else if (sh >= 0)                  mag2 = 14'({1'b1, f.frac} << sh);
    else if (sh > -24)                 mag2 = 14'({1'b1, f.frac} >> (-sh));
    else                               mag2 = '0;
    r = (mag2 + 14'd1) >> 1;
    v = f.sign ? 128 - int'(r) : 128 + int'(r);
    if (v < 0)   v = 0;
    if (v > 255) v = 255;
    return pixel_t'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          y[i][j] <= '0;
    end else begin
      out_valid <= t_valid;
      if (t_valid)
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++)
            y[i][j] <= to_pixel(t[i][j]);
    end
  end
endmodule
