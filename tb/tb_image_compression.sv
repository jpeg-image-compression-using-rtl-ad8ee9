// tb_image_compression: blocks of smooth and of noisy pixels pushed back to
// back at qualities 50, 75 and 20. For every block the run-length output is
// expanded and compared, coefficient by coefficient, with a double-precision
// DCT quantized by the real-arithmetic table (a difference of one is
// accepted only where the exact quotient lies within 1e-3 of a rounding
// tie); the run-length vector must also be the canonical coding of those
// coefficients. Checks the 82-cycle latency and that input stalls occur.
`timescale 1ns/1ps
module tb_image_compression;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic [6:0] quality = 7'd50;
  pmat_t pix_in;
  rvec_t rle_out;
  logic [RLE_CNT_W-1:0] rle_len;
  int checks = 0, failures = 0, cycle = 0, stalls = 0, pending = 0;

  image_compression dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid && !in_ready) stalls++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int c [64]; real t [64]; int cyc; } exp_t;
  exp_t q [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    int r [96];
    int z [64];
    int r2 [96];
    int l2;
    e = q.pop_front();
    pending--;
    for (int k = 0; k < 96; k++) r[k] = int'(rle_out[k]);
    rle_dec(r, int'(rle_len), z);
    rle_enc(z, r2, l2);
    checks++;
    if (l2 != int'(rle_len)) begin failures++; $display("FAIL rle length %0d vs %0d", rle_len, l2); end
    for (int k = 0; k < 96; k++) begin
      checks++;
      if (r2[k] != r[k]) begin failures++; $display("FAIL rle entry %0d", k); end
    end
    for (int k = 0; k < 64; k++) begin
      int d;
      d = z[k] - e.c[k];
      checks++;
      if (!(d == 0 || ((d == 1 || d == -1) && e.t[k] < 1e-3))) begin
        failures++;
        $display("FAIL coef %0d got %0d expected %0d", k, z[k], e.c[k]);
      end
    end
    checks++;
    if (cycle - e.cyc != 82) begin failures++; $display("FAIL latency %0d", cycle - e.cyc); end
  end

  task automatic send(input int kind, input int n);
    rmat_t p, d;
    exp_t e;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        int v;
        v = (kind == 0) ? 60 + 10 * i + 5 * j + int'($urandom_range(0, 6))
          : (kind == 1) ? int'($urandom_range(0, 255))
          : 255 * ((i + j) % 2);
        pix_in[i][j] = 8'(v);
        p[i][j] = real'(v) - 128.0;
      end
    d = ref_dct(p);
    for (int k = 0; k < 64; k++) begin
      int r, c;
      real x;
      r = zz_tab(k) / 8; c = zz_tab(k) % 8;
      x = d[r][c] / qn_ref(r, c, n);
      e.c[k] = rnd(x);
      e.t[k] = tie_dist(x);
    end
    in_valid = 1;
    while (!in_ready) begin @(posedge clk); #1; end
    e.cyc = cycle;
    q.push_back(e);
    pending++;
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  initial begin
    int levels [3] = '{50, 75, 20};
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) pix_in[i][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    foreach (levels[l]) begin
      quality = 7'(levels[l]);
      repeat (2) @(posedge clk); #1;
      for (int b = 0; b < 6; b++) send(b % 3, levels[l]);
      while (pending > 0) @(posedge clk);
      #1;
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no input stall seen"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
