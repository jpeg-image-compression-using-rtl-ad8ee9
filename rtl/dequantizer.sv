// dequantizer: element-wise inverse quantization of an 8x8 block,
//   DCT'(u,v) = Qdct(u,v) * Q(u,v),
// with the same quantization table that the compressor used. The product
// is exact: a COEF_W-bit signed coefficient times a Q_W-bit table entry
// gives DEQ_W = COEF_W + Q_W bits.
//
// Timing: x and q are sampled when in_valid is high; out_valid pulses and y
// is valid one clock edge later (LATENCY = 1) and holds.
module dequantizer
  import jpeg_pkg::*;
#(
  parameter int DEQ_W = COEF_W + Q_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  imat_t                  x,
  input  qmat_t                  q,
  output logic                   out_valid,
  output logic [DEQ_W-1:0]       y [N][N]
);
  localparam int LATENCY = 1;

  logic signed [DEQ_W-1:0] prod [N][N];
  always_comb
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        prod[i][j] = $signed(x[i][j]) * $signed({1'b0, q[i][j]});

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
            y[i][j] <= prod[i][j];
    end
  end
endmodule
