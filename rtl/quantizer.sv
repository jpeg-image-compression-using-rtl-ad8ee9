// quantizer: element-wise quantization of an 8x8 block of DCT coefficients,
//   Qdct(u,v) = round( DCT(u,v) / Q(u,v) ),
// a scalar division of each coefficient by the matching table entry.
//
// Each single-precision coefficient is first turned into a fixed-point
// magnitude with FRAC fraction bits (truncated), then divided by Q(u,v)
// with round-half-away-from-zero:
//   |Qdct| = floor( (mag + Q * 2^(FRAC-1)) / (Q * 2^FRAC) ).
// Because the rounding threshold is itself a multiple of 2^-FRAC, the
// truncation never changes the result: the output equals the exactly
// rounded quotient of the floating-point input. Results are saturated to
// the signed COEF_W-bit coefficient range; magnitudes of 2^INT_W or more
// saturate before division. The fixed-point route and the saturation are
// this design's choices; the 64 dividers work in parallel.
//
// Timing: x and q are sampled when in_valid is high; out_valid pulses and y
// is valid one clock edge later (LATENCY = 1) and holds.
module quantizer
  import jpeg_pkg::*;
#(
  parameter int FRAC  = 8,
  parameter int INT_W = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fmat_t x,
  input  qmat_t q,
  output logic  out_valid,
  output imat_t y
);
  localparam int LATENCY = 1;
  localparam int MW = INT_W + FRAC;
  localparam logic [MW+Q_W:0] QMAX = (1 << (COEF_W - 1)) - 1;

  function automatic coef_t quant1(input ieee754_t f, input qent_t qe);
    logic [MW-1:0]    mag;
    logic [MW+Q_W:0]  num, den, quo;
    int               sh;
    qent_t            qq;
    qq = (qe == '0) ? qent_t'(1) : qe;
    sh = int'(f.exp) - 127 - 23 + FRAC;   // left shift of the 24-bit mantissa
    if (f.exp == 8'd0)
      mag = '0;
    else if (int'(f.exp) - 127 >= INT_W)
      mag = '1;
    else if (sh >= 0)
      mag = MW'({1'b1, f.frac}) << sh;
    else if (sh > -24)
      mag = MW'({1'b1, f.frac} >> (-sh));
    else
      mag = '0;
    den = (MW+Q_W+1)'(qq) << FRAC;
    num = (MW+Q_W+1)'(mag) + (den >> 1);
    quo = num / den;
    if (quo > QMAX) quo = QMAX;
    return f.sign ? -coef_t'(quo) : coef_t'(quo);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          y[i][j] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++)
            y[i][j] <= quant1(x[i][j], q[i][j]);
    end
  end
endmodule
