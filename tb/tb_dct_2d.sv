// tb_dct_2d: random level-shifted pixel blocks through the forward DCT
// engine, compared with the double-precision cosine-sum DCT (tolerance
// 2e-3 absolute). The result is then fed to an inverse engine
// (INVERSE = 1), which must give back the pixels within 2e-3. Checks the
// 13-cycle latency and that in_ready is low while a block is in progress.
`timescale 1ns/1ps
module tb_dct_2d;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic f_in_valid = 0, f_in_ready, f_out_valid;
  logic i_in_valid = 0, i_in_ready, i_out_valid;
  fmat_t f_x, f_y, i_x, i_y;
  int checks = 0, failures = 0, cycle = 0;

  dct_2d #(.INVERSE(1'b0)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(f_in_valid), .in_ready(f_in_ready), .x(f_x),
    .out_valid(f_out_valid), .y(f_y));
  dct_2d #(.INVERSE(1'b1)) dut_inv (
    .clk(clk), .rst_n(rst_n), .in_valid(i_in_valid), .in_ready(i_in_ready), .x(i_x),
    .out_valid(i_out_valid), .y(i_y));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void cmp(input fmat_t g, input rmat_t e, input string what);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        real d;
        d = fbits2r(g[i][j]) - e[i][j];
        checks++;
        if (d > 2e-3 || d < -2e-3) begin
          failures++;
          $display("FAIL %s[%0d][%0d] got %g expected %g", what, i, j, fbits2r(g[i][j]), e[i][j]);
        end
      end
  endfunction

  initial begin
    rmat_t p, d;
    int t0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin f_x[i][j] = '0; i_x[i][j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int blk = 0; blk < 12; blk++) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          p[i][j] = (blk == 0) ? -128.0 : (blk == 1) ? 127.0 : real'($urandom_range(0, 255)) - 128.0;
          f_x[i][j] = ieee754_t'(r2fbits(p[i][j]));
        end
      d = ref_dct(p);
      checks++;
      if (!f_in_ready) begin failures++; $display("FAIL not ready"); end
      f_in_valid = 1; t0 = cycle;
      @(posedge clk); #1; f_in_valid = 0;
      checks++;
      if (f_in_ready) begin failures++; $display("FAIL ready while busy"); end
      while (!f_out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != 13) begin failures++; $display("FAIL forward latency %0d", cycle - t0); end
      cmp(f_y, d, "dct");
      i_x = f_y;
      i_in_valid = 1; t0 = cycle;
      @(posedge clk); #1; i_in_valid = 0;
      while (!i_out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != 13) begin failures++; $display("FAIL inverse latency %0d", cycle - t0); end
      cmp(i_y, p, "idct");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
