// tb_run_length_enc: the worked example of zero-run coding, an all-zero
// block, the worst case (96 entries), a block with no zeros and random
// sparse blocks, against a loop-based model; checks the 65-cycle latency,
// in_ready while busy, and that the output holds after out_valid.
`timescale 1ns/1ps
module tb_run_length_enc;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  zvec_t x;
  rvec_t y;
  logic [RLE_CNT_W-1:0] len;
  int checks = 0, failures = 0, cycle = 0;

  run_length_enc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int z [64]);
    int r [96];
    int l, t0;
    rle_enc(z, r, l);
    for (int k = 0; k < NN; k++) x[k] = coef_t'(z[k]);
    while (!in_ready) begin @(posedge clk); #1; end
    in_valid = 1; t0 = cycle;
    @(posedge clk); #1; in_valid = 0;
    checks++;
    if (in_ready) begin failures++; $display("FAIL ready while busy"); end
    while (!out_valid) begin @(posedge clk); #1; end
    checks++;
    if (cycle - t0 != 65) begin failures++; $display("FAIL latency %0d", cycle - t0); end
    repeat (2) @(posedge clk); #1;
    checks++;
    if (int'(len) != l) begin failures++; $display("FAIL len %0d expected %0d", len, l); end
    for (int k = 0; k < RLE_LEN; k++) begin
      checks++;
      if (int'(y[k]) != r[k]) begin failures++; $display("FAIL entry %0d got %0d expected %0d", k, y[k], r[k]); end
    end
  endtask

  initial begin
    int z [64];
    int ex [23] = '{4, 0, 0, 0, 9, 0, 0, 0, 0, 1, 1, 0, 0, 7, 5, 0, 0, 0, 0, 0, 0, 0, 32};
    int eo [15] = '{4, 0, 3, 9, 0, 4, 1, 1, 0, 2, 7, 5, 0, 7, 32};
    for (int k = 0; k < NN; k++) x[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // worked example, padded with 41 non-zero values so it ends as printed
    for (int k = 0; k < 64; k++) z[k] = (k < 23) ? ex[k] : -(k);
    run(z);
    for (int k = 0; k < 15; k++) begin
      checks++;
      if (int'(y[k]) != eo[k]) begin failures++; $display("FAIL example entry %0d", k); end
    end
    for (int k = 0; k < 64; k++) z[k] = 0;
    run(z);
    for (int k = 0; k < 64; k++) z[k] = (k % 2) ? 0 : k + 1;
    run(z);
    checks++;
    if (len != 7'd96) begin failures++; $display("FAIL worst case length %0d", len); end
    for (int k = 0; k < 64; k++) z[k] = k - 100;
    run(z);
    for (int b = 0; b < 40; b++) begin
      for (int k = 0; k < 64; k++)
        z[k] = ($urandom_range(0, 99) < 30 + b) ? 0 : int'($urandom_range(0, 400)) - 200;
      if (z[63] == 0 && b % 2) z[63] = 5;
      run(z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
