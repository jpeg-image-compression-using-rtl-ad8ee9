// tb_idct_2d: DCT coefficients of random pixel blocks (computed in double
// precision, rounded to single) must come back as the exact pixels; blocks
// whose inverse transform leaves [0, 255] must be clipped. Latency 14.
`timescale 1ns/1ps
module tb_idct_2d;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  fmat_t x;
  pmat_t y;
  int checks = 0, failures = 0, cycle = 0;

  idct_2d dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rmat_t p, d, r;
    int t0, clipped;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) x[i][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    clipped = 0;
    for (int blk = 0; blk < 20; blk++) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          p[i][j] = real'($urandom_range(0, 255)) - 128.0;
      d = ref_dct(p);
      if (blk == 1) d[0][0] = 1400.0;          // pushes pixels above 255
      if (blk == 2) d[0][0] = -1400.0;         // and below 0
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) x[i][j] = ieee754_t'(r2fbits(d[i][j]));
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) d[i][j] = fbits2r(x[i][j]);
      r = ref_idct(d);
      in_valid = 1; t0 = cycle;
      @(posedge clk); #1; in_valid = 0;
      while (!out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != 14) begin failures++; $display("FAIL latency %0d", cycle - t0); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          int e;
          e = clip8(rnd(r[i][j]) + 128);
          if (e == 0 || e == 255) clipped++;
          checks++;
          if (int'(y[i][j]) != e) begin
            failures++;
            $display("FAIL blk %0d [%0d][%0d] got %0d expected %0d (%g)", blk, i, j, y[i][j], e, r[i][j]);
          end
        end
    end
    checks++;
    if (clipped < 64) begin failures++; $display("FAIL clipping not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
