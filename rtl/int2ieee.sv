// int2ieee: one integer-to-IEEE converter (combinational).
//
// Converts a signed two's-complement integer of W bits to an IEEE-754
// single-precision word: sign from the top bit, magnitude, leading-one
// search, exponent = 127 + position of the leading one, fraction = the bits
// below the leading one, left-aligned. Zero gives +0. Exact for W <= 25;
// wider magnitudes are truncated to 24 significant bits.
module int2ieee
  import jpeg_pkg::*;
#(
  parameter int W = 16
) (
  input  logic signed [W-1:0] a,
  output ieee754_t            y
);
  always_comb begin
    logic [W-1:0] mag;
    logic [W+22:0] norm;
    int p;
    mag  = a[W-1] ? W'(-a) : W'(a);
    norm = '0;
    p = -1;
    for (int i = 0; i < W; i++)
      if (mag[i]) p = i;
    y = '0;
    if (p >= 0) begin
      norm   = {mag, 23'd0} >> p;      // leading one lands on bit 23
      y.sign = a[W-1];
      y.exp  = 8'(127 + p);
      y.frac = norm[22:0];
    end
  end
endmodule
