// tb_run_length_dec: the worked example of zero-run decoding, an all-zero
// block, the 96-entry worst case and random sparse blocks encoded by a
// loop-based model; the decoded vector must equal the original, and the
// latency must be the number of tokens plus two cycles.
`timescale 1ns/1ps
module tb_run_length_dec;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  rvec_t x;
  logic [RLE_CNT_W-1:0] len;
  zvec_t y;
  int checks = 0, failures = 0, cycle = 0;

  run_length_dec dut (.*);

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
    int l, t0, tokens;
    rle_enc(z, r, l);
    tokens = 0;
    for (int k = 0; k < l; k++) begin
      tokens++;
      if (r[k] == 0) k++;
    end
    for (int k = 0; k < RLE_LEN; k++) x[k] = coef_t'(r[k]);
    len = 7'(l);
    while (!in_ready) begin @(posedge clk); #1; end
    in_valid = 1; t0 = cycle;
    @(posedge clk); #1; in_valid = 0;
    while (!out_valid) begin @(posedge clk); #1; end
    checks++;
    if (cycle - t0 != tokens + 2) begin failures++; $display("FAIL latency %0d tokens %0d", cycle - t0, tokens); end
    for (int k = 0; k < NN; k++) begin
      checks++;
      if (int'(y[k]) != z[k]) begin failures++; $display("FAIL pos %0d got %0d expected %0d", k, y[k], z[k]); end
    end
  endtask

  initial begin
    int z [64];
    int ex [23] = '{4, 0, 0, 0, 9, 0, 0, 0, 0, 1, 1, 0, 0, 7, 5, 0, 0, 0, 0, 0, 0, 0, 32};
    for (int k = 0; k < RLE_LEN; k++) x[k] = '0;
    len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int k = 0; k < 64; k++) z[k] = (k < 23) ? ex[k] : 0;
    run(z);
    for (int k = 0; k < 64; k++) z[k] = 0;
    run(z);
    for (int k = 0; k < 64; k++) z[k] = (k % 2) ? 0 : -(k + 1);
    run(z);
    for (int b = 0; b < 60; b++) begin
      for (int k = 0; k < 64; k++)
        z[k] = ($urandom_range(0, 99) < 20 + b) ? 0 : int'($urandom_range(0, 2000)) - 1000;
      run(z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
