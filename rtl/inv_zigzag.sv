// inv_zigzag: rebuilds an 8x8 coefficient block from a 1x64 vector in
// zigzag order; the inverse of the zigzag address translation.
//
// Vector element i is wired to block element (zz_row(i), zz_col(i)). The
// block is registered.
//
// Timing: x is sampled when in_valid is high; out_valid pulses and y is
// valid one clock edge later (LATENCY = 1) and holds.
module inv_zigzag
  import jpeg_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  zvec_t x,
  output logic  out_valid,
  output imat_t y
);
  localparam int LATENCY = 1;

  imat_t blk;
  for (genvar i = 0; i < NN; i++) begin : g_zz
    localparam int unsigned R = zz_row(i);
    localparam int unsigned C = zz_col(i);
    assign blk[R][C] = x[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          y[i][j] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= blk;
    end
  end
endmodule
