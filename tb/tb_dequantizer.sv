// tb_dequantizer: random signed coefficients (full 12-bit range) times
// random table entries (full 13-bit range) and the quality-50 table; the
// products must be exact; latency one cycle.
`timescale 1ns/1ps
module tb_dequantizer;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  imat_t x;
  qmat_t q;
  logic [COEF_W+Q_W-1:0] y [N][N];
  int checks = 0, failures = 0;

  dequantizer dut (.*);

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
    for (int blk = 0; blk < 30; blk++) begin
      int a [N][N], b [N][N];
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a[i][j] = int'($urandom_range(0, 4094)) - 2047;
          b[i][j] = (blk % 2) ? qn_ref(i, j, 50) : int'($urandom_range(1, 8191));
          x[i][j] = coef_t'(a[i][j]);
          q[i][j] = qent_t'(b[i][j]);
        end
      in_valid = 1;
      @(posedge clk); #1; in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if ($signed(y[i][j]) != a[i][j] * b[i][j]) begin
            failures++;
            $display("FAIL %0d * %0d = %0d", a[i][j], b[i][j], $signed(y[i][j]));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
