// tb_quantizer: random DCT-range coefficients and random table entries,
// plus exact rounding ties (k + 0.5) * Q of both signs and saturating
// values, against round-half-away-from-zero of the real quotient.
`timescale 1ns/1ps
module tb_quantizer;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fmat_t x;
  qmat_t q;
  imat_t y;
  int checks = 0, failures = 0;

  quantizer dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int blk = 0; blk < 60; blk++) begin
      int e [N][N];
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          real v, r;
          int  qq;
          qq = (blk % 3 == 0) ? qn_ref(i, j, 50) : int'($urandom_range(1, 255));
          case ($urandom_range(0, 3))
            0: v = real'(int'($urandom_range(0, 40)) - 20) * qq + ((blk % 2) ? 0.5 : -0.5) * qq;
            1: v = (real'($urandom_range(0, 2000000)) - 1000000.0) / 1000.0;
            2: v = (real'($urandom_range(0, 2000)) - 1000.0) / 100.0;
            default: v = (blk == 5) ? 9000.0 : (real'($urandom_range(0, 200)) - 100.0) / 7.0;
          endcase
          x[i][j] = ieee754_t'(r2fbits(v));
          q[i][j] = qent_t'(qq);
          r = fbits2r(x[i][j]) / qq;
          e[i][j] = rnd(r);
          if (e[i][j] > 2047) e[i][j] = 2047;
          if (e[i][j] < -2047) e[i][j] = -2047;
        end
      in_valid = 1;
      @(posedge clk); #1; in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (int'(y[i][j]) != e[i][j]) begin
            failures++;
            $display("FAIL %g / %0d = %0d expected %0d", fbits2r(x[i][j]), q[i][j], y[i][j], e[i][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
