// fp_mul: IEEE-754 single-precision multiplier ("mantissa multiplier").
//
// Structure, as drawn for the mantissa multiplier: each operand is split
// into an 8-bit exponent register and a 24-bit mantissa register that holds
// the 23 stored fraction bits with the hidden '1' put in front. The two
// exponents are added and the bias is subtracted; the sign is the XOR of the
// two sign bits; the mantissas go to a 24x24 multiplier. The result word is
// assembled as sign (bit 31), exponent (30:23) and mantissa (22:0).
//
// Choices of this design where the drawing is incomplete or inconsistent:
//   * The drawing prints the constant 125 for the bias subtraction and the
//     product slice "48-25". Those give wrong results for IEEE-754 operands,
//     so the bias is 127 and the 48-bit product is normalised: if bit 47 is
//     set the fraction is product[46:24] and the exponent is incremented,
//     otherwise the fraction is product[45:23]. Low bits are truncated.
//   * The output uses the standard 1/8/23 split also used at the inputs
//     (the prose speaks of 7 exponent and 24 mantissa bits, the figure
//     feeds 8 exponent and 23 fraction bits).
//   * An operand with exponent 0 is treated as zero and gives +/-0; a
//     result exponent below 1 flushes to zero, one above 254 saturates to
//     the largest finite value. NaN/Inf inputs are not handled.
//   * The product is written with '*', which synthesis maps to its own
//     multiplier architecture (the drawing names a Booth multiplier).
//
// Timing: operands are registered on the cycle in_valid is high; the result
// and out_valid appear two clock edges after the operands were presented
// (LATENCY = 2). Fully pipelined: a new operand pair may enter every cycle.
module fp_mul
  import jpeg_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  ieee754_t a,
  input  ieee754_t b,
  output logic     out_valid,
  output ieee754_t y
);
  localparam int LATENCY = 2;

  // Stage 1: exponent and mantissa registers, sign bits.
  logic [7:0]  exp_a_q, exp_b_q;
  logic [23:0] man_a_q, man_b_q;
  logic        sgn_a_q, sgn_b_q;
  logic        zero_q;
  logic        v1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0;
      exp_a_q <= '0; exp_b_q <= '0;
      man_a_q <= '0; man_b_q <= '0;
      sgn_a_q <= 1'b0; sgn_b_q <= 1'b0;
      zero_q  <= 1'b1;
    end else begin
      v1_q    <= in_valid;
      exp_a_q <= a.exp;
      exp_b_q <= b.exp;
      man_a_q <= {1'b1, a.frac};
      man_b_q <= {1'b1, b.frac};
      sgn_a_q <= a.sign;
      sgn_b_q <= b.sign;
      zero_q  <= (a.exp == 8'd0) || (b.exp == 8'd0);
    end
  end

  // Stage 2: adder, bias subtract, XOR, multiplier, normalisation.
  logic [47:0]       prod;
  logic signed [10:0] exp_sum;
  logic signed [10:0] exp_res;
  logic [22:0]       frac_res;
  ieee754_t          y_d;

  always_comb begin
    prod    = man_a_q * man_b_q;
    exp_sum = $signed({3'b000, exp_a_q}) + $signed({3'b000, exp_b_q}) - 11'sd127;
    if (prod[47]) begin
      exp_res  = exp_sum + 11'sd1;
      frac_res = prod[46:24];
    end else begin
      exp_res  = exp_sum;
      frac_res = prod[45:23];
    end
    y_d.sign = sgn_a_q ^ sgn_b_q;
    if (zero_q || exp_res < 11'sd1) begin
      y_d.exp  = 8'd0;
      y_d.frac = '0;
    end else if (exp_res > 11'sd254) begin
      y_d.exp  = 8'd254;
      y_d.frac = '1;
    end else begin
      y_d.exp  = exp_res[7:0];
      y_d.frac = frac_res;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= v1_q;
      y         <= y_d;
    end
  end

endmodule
