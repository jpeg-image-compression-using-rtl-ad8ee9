// tb_inv_zigzag: random vectors and a vector holding its own positions;
// every block element must come from the vector position given by the JPEG
// zigzag table; latency one cycle.
`timescale 1ns/1ps
module tb_inv_zigzag;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  zvec_t x;
  imat_t y;
  int checks = 0, failures = 0;

  inv_zigzag dut (.*);

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
      for (int k = 0; k < NN; k++)
        x[k] = (blk == 0) ? coef_t'(k) : coef_t'($urandom);
      in_valid = 1;
      @(posedge clk); #1; in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int k = 0; k < NN; k++) begin
        checks++;
        if (y[zz_tab(k) / 8][zz_tab(k) % 8] != x[k]) begin
          failures++;
          $display("FAIL position %0d", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
