// two_matrix_mult: 8x8 by 8x8 single-precision matrix product Y = A * B.
//
// The multiplier matrix A and the multiplicand matrix B are captured in the
// multiplier and multiplicand registers. 64 row-column multipliers run in
// parallel; unit (i*8 + j) gets row i of A and column j of B and produces
// Y[i][j]. Their results are captured in the output register. This is the
// fully parallel arrangement of the two-matrix multiplication: 512
// single-precision multipliers in all.
//
// Timing: A and B are sampled on the cycle in_valid is high. out_valid
// pulses and y is valid LATENCY = 6 clock edges later (input registers,
// four row-column multiplier stages, output register); y then holds until
// the next result. Fully pipelined: a new matrix pair may enter every cycle.
module two_matrix_mult
  import jpeg_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fmat_t a,
  input  fmat_t b,
  output logic  out_valid,
  output fmat_t y
);
  localparam int LATENCY = 6;

  fmat_t a_q, b_q;
  logic  v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a_q[i][j] <= '0;
          b_q[i][j] <= '0;
        end
    end else begin
      v_q <= in_valid;
      if (in_valid) begin
        a_q <= a;
        b_q <= b;
      end
    end
  end

  ieee754_t r   [N][N];
  logic     rv  [N][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      ieee754_t col_j [N];
      for (genvar k = 0; k < N; k++) begin : g_k
        assign col_j[k] = b_q[k][j];
      end
      row_col_mult u_rcm (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_valid (v_q),
        .row      (a_q[i]),
        .col      (col_j),
        .out_valid(rv[i][j]),
        .y        (r[i][j])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          y[i][j] <= '0;
    end else begin
      out_valid <= rv[0][0];
      if (rv[0][0]) y <= r;
    end
  end

endmodule
