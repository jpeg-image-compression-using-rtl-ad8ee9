// int_to_ieee: 8x8 block of integers to 8x8 block of IEEE-754 singles.
//
// An input register captures the block; 64 integer-to-IEEE converters
// (int2ieee) work on the 64 elements in parallel; an output register holds
// the converted block. The input is IN_W bits wide, read as signed when
// IN_SIGNED is set and as unsigned otherwise, and LEVEL_SHIFT is subtracted
// before conversion. The compressor uses it with 8-bit unsigned pixels and
// LEVEL_SHIFT = 128, which is the "subtract 128" step applied to every
// pixel before the DCT; the decompressor uses it on signed dequantized
// coefficients with LEVEL_SHIFT = 0. Where the level shift is performed is
// this design's choice.
//
// Timing: x is sampled when in_valid is high; out_valid pulses and y is
// valid LATENCY = 2 clock edges later; y holds until the next block.
// Fully pipelined.
module int_to_ieee
  import jpeg_pkg::*;
#(
  parameter int IN_W        = PIX_W,
  parameter bit IN_SIGNED   = 1'b0,
  parameter int LEVEL_SHIFT = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [IN_W-1:0]   x [N][N],
  output logic              out_valid,
  output fmat_t             y
);
  localparam int LATENCY = 2;
  localparam int CW = IN_W + 2;

  logic [IN_W-1:0] x_q [N][N];
  logic            v_q;
  ieee754_t        conv [N][N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          x_q[i][j] <= '0;
    end else begin
      v_q <= in_valid;
      if (in_valid) x_q <= x;
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < N; j++) begin : g_c
      logic signed [CW-1:0] v;
      assign v = (IN_SIGNED ? CW'($signed(x_q[i][j])) : CW'($unsigned(x_q[i][j])))
               - CW'(LEVEL_SHIFT);
      int2ieee #(.W(CW)) u_cv (.a(v), .y(conv[i][j]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          y[i][j] <= '0;
    end else begin
      out_valid <= v_q;
      if (v_q) y <= conv;
    end
  end

endmodule
