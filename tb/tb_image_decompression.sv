// tb_image_decompression: pixel blocks are transformed, quantized, zigzag
// ordered and run-length coded by the double-precision reference model and
// fed to the decompressor at qualities 50, 75 and 20. The reconstructed
// pixels are compared with a double-precision IDCT of the dequantized
// coefficients, rounded, shifted by 128 and clipped (a difference of one is
// accepted only next to a rounding tie). Checks the latency of
// tokens + 20 cycles and that input stalls occur.
`timescale 1ns/1ps
module tb_image_decompression;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic [6:0] quality = 7'd50;
  rvec_t rle_in;
  logic [RLE_CNT_W-1:0] rle_len;
  pmat_t pix_out;
  int checks = 0, failures = 0, cycle = 0, stalls = 0, pending = 0, clips = 0;

  image_decompression dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid && !in_ready) stalls++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { real p [8][8]; int cyc; int lat; } exp_t;
  exp_t q [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    e = q.pop_front();
    pending--;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        int x, d;
        x = clip8(rnd(e.p[i][j]) + 128);
        if (x == 0 || x == 255) clips++;
        d = int'(pix_out[i][j]) - x;
        checks++;
        if (!(d == 0 || ((d == 1 || d == -1) && tie_dist(e.p[i][j]) < 1e-3))) begin
          failures++;
          $display("FAIL pixel [%0d][%0d] got %0d expected %0d", i, j, pix_out[i][j], x);
        end
      end
    checks++;
    if (cycle - e.cyc != e.lat) begin failures++; $display("FAIL latency %0d vs %0d", cycle - e.cyc, e.lat); end
  end

  task automatic send(input int kind, input int n);
    rmat_t p, d, dq;
    exp_t e;
    int z [64];
    int r [96];
    int l, tokens;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        int v;
        v = (kind == 0) ? 60 + 10 * i + 5 * j + int'($urandom_range(0, 6))
          : (kind == 1) ? int'($urandom_range(0, 255))
          : 255 * ((i + j) % 2);
        p[i][j] = real'(v) - 128.0;
      end
    d = ref_dct(p);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        dq[i][j] = real'(rnd(d[i][j] / qn_ref(i, j, n)) * qn_ref(i, j, n));
    for (int k = 0; k < 64; k++) z[k] = rnd(d[zz_tab(k) / 8][zz_tab(k) % 8] / qn_ref(zz_tab(k) / 8, zz_tab(k) % 8, n));
    rle_enc(z, r, l);
    tokens = 0;
    for (int k = 0; k < l; k++) begin tokens++; if (r[k] == 0) k++; end
    for (int k = 0; k < RLE_LEN; k++) rle_in[k] = coef_t'(r[k]);
    rle_len = 7'(l);
    e.p = ref_idct(dq);
    e.lat = tokens + 20;
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
    for (int k = 0; k < RLE_LEN; k++) rle_in[k] = '0;
    rle_len = '0;
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
    $display("stalls=%0d clipped pixels=%0d", stalls, clips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
