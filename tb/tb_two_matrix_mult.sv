// tb_two_matrix_mult: random 8x8 float matrix pairs, back to back, through
// the two-matrix multiplier; every element is compared with the
// double-precision product (tolerance 2^-20 of the sum of magnitudes) and
// the six-cycle latency is checked. An identity multiplicand must return
// the multiplier exactly.
`timescale 1ns/1ps
module tb_two_matrix_mult;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fmat_t a, b, y;
  int checks = 0, failures = 0, cycle = 0;

  two_matrix_mult dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { real e [N][N]; real t [N][N]; int c; } exp_t;
  exp_t q [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t x;
    x = q.pop_front();
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        real g;
        g = fbits2r(y[i][j]);
        checks++;
        if (g - x.e[i][j] > x.t[i][j] || x.e[i][j] - g > x.t[i][j]) begin
          failures++;
          $display("FAIL y[%0d][%0d] got %g expected %g", i, j, g, x.e[i][j]);
        end
      end
    checks++;
    if (cycle - x.c != 6) begin failures++; $display("FAIL latency %0d", cycle - x.c); end
  end

  task automatic drive(input bit ident);
    exp_t x;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        a[i][j] = ieee754_t'(r2fbits((real'($urandom_range(0, 20000)) - 10000.0) / 50.0));
        b[i][j] = ident ? ieee754_t'(r2fbits(i == j ? 1.0 : 0.0))
                        : ieee754_t'(r2fbits((real'($urandom_range(0, 20000)) - 10000.0) / 20000.0));
      end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        real s, m;
        s = 0.0; m = 0.0;
        for (int k = 0; k < N; k++) begin
          real p;
          p = fbits2r(a[i][k]) * fbits2r(b[k][j]);
          s += p; m += (p < 0) ? -p : p;
        end
        x.e[i][j] = s; x.t[i][j] = ident ? 0.0 : m * pow2(-20);
      end
    x.c = cycle;
    q.push_back(x);
    in_valid = 1;
    @(posedge clk); #1;
  endtask

  initial begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin a[i][j] = '0; b[i][j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    drive(1'b1);
    for (int k = 0; k < 20; k++) drive(1'b0);
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
