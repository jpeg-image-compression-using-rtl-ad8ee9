// dct_2d: two-dimensional 8x8 DCT (or IDCT) by two matrix products on one
// two-matrix multiplier.
//
// The forward transform is DCT = C * P * C^T, with C the orthonormal DCT
// matrix (row-column decomposition: the first product transforms the
// columns of P, the second the rows). The block holds a C register, a CT
// register and an input register. Two multiplexer pairs, switched by the
// "second mult" control, choose the operands of the single two-matrix
// multiplier:
//   first pass:   multiplier = C register,    multiplicand = input register
//   second pass:  multiplier = DCT out reg.,  multiplicand = CT register
// The DCT out register is the output register of the two-matrix multiplier;
// its first-pass result is fed back as the multiplier of the second pass.
// Built with INVERSE = 1 the C and CT registers hold C^T and C, so the same
// sequence computes the inverse transform P = C^T * X * C (C is orthogonal,
// so C^-1 = C^T).
// The operand selection above follows the matrix equation; the drawing of
// the multiplexers does not print which input goes to which operand. The
// C and CT registers are constant and are written as constants.
//
// Interface: in_ready is high while idle. A block x is accepted on a cycle
// with in_valid && in_ready. out_valid pulses LATENCY = 13 cycles after the
// accepting edge (input register, 6 + 6 cycles for the two passes) and y
// holds the result until the next block's first pass completes.
module dct_2d
  import jpeg_pkg::*;
#(
  parameter bit INVERSE = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  fmat_t x,
  output logic  out_valid,
  output fmat_t y
);
  localparam int LATENCY = 13;

  typedef enum logic [1:0] {S_IDLE, S_PASS1, S_PASS2} state_t;
  state_t state_q;

  fmat_t c_reg, ct_reg;
  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        c_reg[i][j]  = INVERSE ? dct_coef(j, i) : dct_coef(i, j);
        ct_reg[i][j] = INVERSE ? dct_coef(i, j) : dct_coef(j, i);
      end
  end

  fmat_t in_q;
  logic  launch_q;
  logic  second_mult;
  logic  mm_in_valid, mm_out_valid;
  fmat_t mm_a, mm_b, dct_out;

  assign in_ready    = (state_q == S_IDLE);
  assign second_mult = (state_q == S_PASS1) && mm_out_valid;
  assign mm_in_valid = launch_q || second_mult;
  assign mm_a        = second_mult ? dct_out : c_reg;
  assign mm_b        = second_mult ? ct_reg  : in_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      launch_q <= 1'b0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          in_q[i][j] <= '0;
    end else begin
      launch_q <= 1'b0;
      case (state_q)
        S_IDLE: if (in_valid) begin
          in_q     <= x;
          launch_q <= 1'b1;
          state_q  <= S_PASS1;
        end
        S_PASS1: if (mm_out_valid) state_q <= S_PASS2;
        S_PASS2: if (mm_out_valid) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  two_matrix_mult u_mm (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (mm_in_valid),
    .a        (mm_a),
    .b        (mm_b),
    .out_valid(mm_out_valid),
    .y        (dct_out)
  );

  assign out_valid = (state_q == S_PASS2) && mm_out_valid;
  assign y         = dct_out;

endmodule
