// zigzag: address translation from an 8x8 coefficient block to a 1x64
// vector in zigzag order (the scan that walks the anti-diagonals from the
// top-left, low-frequency corner to the bottom-right corner).
//
// The mapping is fixed wiring: output i takes block element
// (zz_row(i), zz_col(i)), both computed at elaboration from the scan rule in
// jpeg_pkg. The vector is registered.
//
// Timing: x is sampled when in_valid is high; out_valid pulses and y is
// valid one clock edge later (LATENCY = 1) and holds.
module zigzag
  import jpeg_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  imat_t x,
  output logic  out_valid,
  output zvec_t y
);
  localparam int LATENCY = 1;

  zvec_t scan;
  for (genvar i = 0; i < NN; i++) begin : g_zz
    localparam int unsigned R = zz_row(i);
    localparam int unsigned C = zz_col(i);
    assign scan[i] = x[R][C];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < NN; i++) y[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= scan;
    end
  end
endmodule
