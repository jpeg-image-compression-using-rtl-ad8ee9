// tb_int_to_ieee: the pixel configuration (8-bit unsigned, minus 128) and a
// signed 25-bit configuration. Every converted word must equal, bit for
// bit, the single-precision encoding of the integer; latency two cycles.
`timescale 1ns/1ps
module tb_int_to_ieee;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, s_out_valid;
  logic [7:0]  px [N][N];
  logic [24:0] sx [N][N];
  fmat_t y, sy;
  int checks = 0, failures = 0, cycle = 0;

  int_to_ieee dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(px),
                   .out_valid(out_valid), .y(y));
  int_to_ieee #(.IN_W(25), .IN_SIGNED(1'b1), .LEVEL_SHIFT(0)) dut_s (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(sx), .out_valid(s_out_valid), .y(sy));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int blk = 0; blk < 40; blk++) begin
      int ps [N][N];
      int ss [N][N];
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          ps[i][j] = (blk == 0) ? i * 8 + j + 96 : int'($urandom_range(0, 255));
          ss[i][j] = (blk == 1) ? ((i * 8 + j) % 2 ? -(1 << (i + 8)) : (1 << 24) - 1 - j)
                                : int'($urandom_range(0, 1 << 22)) - (1 << 21);
          px[i][j] = 8'(ps[i][j]);
          sx[i][j] = 25'(ss[i][j]);
        end
      in_valid = 1; t0 = cycle;
      @(posedge clk); #1; in_valid = 0;
      while (!out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != 2 || !s_out_valid) begin failures++; $display("FAIL latency %0d", cycle - t0); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          checks += 2;
          if (y[i][j] != ieee754_t'(r2fbits(real'(ps[i][j] - 128)))) begin
            failures++;
            $display("FAIL pixel %0d -> %h", ps[i][j], y[i][j]);
          end
          if (sy[i][j] != ieee754_t'(r2fbits(real'(ss[i][j])))) begin
            failures++;
            $display("FAIL signed %0d -> %h", ss[i][j], sy[i][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
