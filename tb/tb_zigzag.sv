// tb_zigzag: random blocks and a block holding each element's own index;
// every output position must hold the element named by the standard JPEG
// zigzag table; latency one cycle.
`timescale 1ns/1ps
module tb_zigzag;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  imat_t x;
  zvec_t y;
  int checks = 0, failures = 0;

  zigzag dut (.*);

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
    for (int blk = 0; blk < 20; blk++) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          x[i][j] = (blk == 0) ? coef_t'(i * 8 + j) : coef_t'($urandom);
      in_valid = 1;
      @(posedge clk); #1; in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int k = 0; k < NN; k++) begin
        checks++;
        if (y[k] != x[zz_tab(k) / 8][zz_tab(k) % 8]) begin
          failures++;
          $display("FAIL position %0d got %0d", k, y[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
