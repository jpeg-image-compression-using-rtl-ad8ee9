// quant_table: builds the 8x8 quantization matrix for quality level n.
//
// Starting from the standard quality-50 luminance table Q50, entry (u,v) is
//   Q_n = Q50 * (100 - n) / 50   for n >= 50
//   Q_n = Q50 * 50 / n           for n <  50
// Rounding to the nearest integer, the lower clamp to 1 (so that n = 100
// gives the finest table, all ones, instead of zeros) and reading n = 0 as
// n = 1 are this design's choices. The 64 entries are computed in parallel
// and registered.
//
// Timing: q follows quality one clock edge later and holds while quality is
// steady. The codec treats quality as a quasi-static setting.
module quant_table
  import jpeg_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [6:0] quality,
  output qmat_t      q
);
  function automatic qent_t qn(input int unsigned base, input int unsigned n);
    int unsigned v;
    if (n >= 50) v = (base * (100 - n) * 2 + 50) / 100;
    else         v = (base * 100 + n) / (2 * n);
    if (v < 1) v = 1;
    return qent_t'(v);
  endfunction

  int unsigned n_eff;
  assign n_eff = (quality == 7'd0) ? 1 : (quality > 7'd100 ? 100 : int'(quality));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          q[i][j] <= qent_t'(q50(i, j));
    end else begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          q[i][j] <= qn(q50(i, j), n_eff);
    end
  end
endmodule
