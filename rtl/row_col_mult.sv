// row_col_mult: floating-point dot product of one matrix row and one matrix
// column, eight elements each (one "row-column multiplier").
//
// Datapath, in the order drawn for the row-column multiplier:
//   AR/BR registers  hold the eight row elements and eight column elements;
//   8 x fp_mul       the mantissa multipliers, one per element pair;
//   AR               adder reduction: the eight products are aligned to the
//                    largest exponent and reduced by a tree of 3:2
//                    carry-save adders to a sum vector and a carry vector;
//   CPA input reg    holds the two vectors and the common exponent;
//   CPA              carry-propagate adder gives the exact two's-complement
//                    sum of the aligned products;
//   IEEE formatter   sign/magnitude, leading-one search and rounding by
//                    truncation back to a single-precision word.
// How the products are summed (the inside of "AR", the alignment and the
// formatter) is this design's choice; the drawing only names the stages.
// Each aligned product keeps GUARD extra bits below its 24-bit mantissa, so
// the sum is exact up to the bits shifted out by alignment.
//
// Timing: in_valid with row/col presented on the same cycle; out_valid and
// y follow LATENCY = 4 clock edges later (AR/BR register, two fp_mul stages,
// CPA input register). y is combinational from the CPA input register, so a
// consumer should register it. Fully pipelined.
module row_col_mult
  import jpeg_pkg::*;
#(
  parameter int GUARD = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  ieee754_t row [N],
  input  ieee754_t col [N],
  output logic     out_valid,
  output ieee754_t y
);
  localparam int LATENCY = 4;
  localparam int W = 24 + GUARD + 4;   // sign + 3 bits of growth for 8 terms

  // AR / BR registers.
  ieee754_t ar_q [N];
  ieee754_t br_q [N];
  logic     vr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vr_q <= 1'b0;
      for (int i = 0; i < N; i++) begin
        ar_q[i] <= '0;
        br_q[i] <= '0;
      end
    end else begin
      vr_q <= in_valid;
      ar_q <= row;
      br_q <= col;
    end
  end

  // Mantissa multipliers.
  ieee754_t prod [N];
  logic     pv   [N];

  for (genvar i = 0; i < N; i++) begin : g_mul
    fp_mul u_mul (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (vr_q),
      .a        (ar_q[i]),
      .b        (br_q[i]),
      .out_valid(pv[i]),
      .y        (prod[i])
    );
  end

  // AR: alignment to the largest exponent and carry-save reduction.
  logic [7:0]         emax;
  logic signed [W-1:0] term [N];
  logic [W-1:0]       sum_v, car_v;

  function automatic void csa(input logic [W-1:0] x, input logic [W-1:0] y1,
                              input logic [W-1:0] z, output logic [W-1:0] s,
                              output logic [W-1:0] c);
    s = x ^ y1 ^ z;
    c = ((x & y1) | (x & z) | (y1 & z)) << 1;
  endfunction

  always_comb begin
    logic [W-1:0] s0, c0, s1, c1, s2, c2, s3, c3, s4, c4;
    logic [W-1:0] mag;
    logic [7:0]   sh;
    emax = 8'd0;
    for (int i = 0; i < N; i++)
      if (prod[i].exp > emax) emax = prod[i].exp;
    for (int i = 0; i < N; i++) begin
      sh  = emax - prod[i].exp;
      if (prod[i].exp == 8'd0 || sh >= 8'(24 + GUARD))
        mag = '0;
      else
        mag = ({{(W-24-GUARD){1'b0}}, 1'b1, prod[i].frac, {GUARD{1'b0}}}) >> sh;
      term[i] = prod[i].sign ? -$signed(mag) : $signed(mag);
    end
    csa(term[0], term[1], term[2], s0, c0);
    csa(term[3], term[4], term[5], s1, c1);
    csa(s0, c0, s1, s2, c2);
    csa(c1, term[6], term[7], s3, c3);
    csa(s2, c2, s3, s4, c4);
    csa(s4, c4, c3, sum_v, car_v);
  end

  // CPA input register.
  logic [W-1:0] sum_q, car_q;
  logic [7:0]   emax_q;
  logic         vc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vc_q   <= 1'b0;
      sum_q  <= '0;
      car_q  <= '0;
      emax_q <= '0;
    end else begin
      vc_q   <= pv[0];
      sum_q  <= sum_v;
      car_q  <= car_v;
      emax_q <= emax;
    end
  end

  // CPA and IEEE formatter.
  always_comb begin
    logic signed [W-1:0] total;
    logic [W-1:0]        absv;
    logic [W-1:0]        norm;
    int                  p;
    int                  e;
    total = $signed(sum_q + car_q);
    absv  = total[W-1] ? W'(-total) : W'(total);
    norm  = '0;
    e     = 0;
    p = -1;
    for (int i = 0; i < W; i++)
      if (absv[i]) p = i;
    y = '0;
    if (p >= 0) begin
      e = int'(emax_q) - 23 - GUARD + p;
      if (p >= 23) norm = absv >> (p - 23);
      else         norm = absv << (23 - p);
      y.sign = total[W-1];
      if (e > 254) begin
        y.exp  = 8'd254;
        y.frac = '1;
      end else if (e >= 1) begin
        y.exp  = 8'(e);
        y.frac = norm[22:0];
      end
    end
  end

  assign out_valid = vc_q;

endmodule
