// tb_image_band: the codec on a strip of a 1024x768 image, streamed the way
// a host would feed it.
//
// The image is generated: smooth horizontal and vertical gradients, a
// slow sinusoidal pattern, a few sharp vertical edges and a little noise,
// so that blocks range from nearly flat to busy. One band of 8 pixel rows
// across the full 1024-pixel width (128 blocks of one channel) is
// compressed at quality 75 with the compressor fed back to back, and every
// compressed block is decompressed as soon as it appears.
//
// Checks:
//   * every compressed block against the double-precision reference
//     (DCT, round(D/Q75), zigzag, run-length coding), with a +/-1 allowance
//     only where the exact quotient sits within 1e-3 of a rounding tie;
//   * every reconstructed pixel against the reference IDCT of the
//     coefficients actually produced (same allowance at ties);
//   * the compressor throughput: with a block always waiting, consecutive
//     blocks are accepted exactly 65 cycles apart;
//   * the reconstruction quality of the band: PSNR above 30 dB.
// It also prints the number of run-length entries against the 64 per block
// of the input as a rough compression figure (before any Huffman coding).
`timescale 1ns/1ps
module tb_image_band;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  localparam int WIDTH   = 1024;
  localparam int NBLK    = WIDTH / 8;
  localparam int QUALITY = 75;

  logic clk = 0, rst_n = 0;
  logic [6:0] enc_quality = 7'(QUALITY), dec_quality = 7'(QUALITY);
  logic enc_in_valid = 0, enc_in_ready, enc_out_valid;
  logic dec_in_valid = 0, dec_in_ready, dec_out_valid;
  pmat_t enc_pix_in, dec_pix_out;
  rvec_t enc_rle_out, dec_rle_in;
  logic [RLE_CNT_W-1:0] enc_rle_len, dec_rle_len;
  int checks = 0, failures = 0;
  int cycle = 0, last_accept = -1;
  int n_done = 0, rle_entries = 0;
  real sq_err = 0.0;

  jpeg_codec dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pixel(input int x, input int y);
    real v;
    v = 50.0 + 0.08 * x + 0.2 * y
        + 40.0 * $sin(x * 0.045) * $cos(y * 0.3) + 15.0 * $sin(x * 0.9 + y * 0.7)
        + ((x % 256) > 200 ? 70.0 : 0.0)
        + real'($urandom_range(0, 6));
    return clip8(int'(v));
  endfunction

  typedef struct { int c [64]; real t [64]; int orig [8][8]; } enc_exp_t;
  typedef struct { int r [96]; int l; real p [8][8]; int orig [8][8]; } dec_job_t;
  enc_exp_t enc_q [$];
  dec_job_t dec_q [$];
  dec_job_t dec_exp [$];

  // throughput: while the driver always has a block waiting, accepts are 65 apart
  always @(posedge clk) if (rst_n && enc_in_valid && enc_in_ready) begin
    if (last_accept >= 0) begin
      checks++;
      if (cycle - last_accept != 65) begin
        failures++;
        $display("FAIL accept interval %0d", cycle - last_accept);
      end
    end
    last_accept = cycle;
  end

  always @(posedge clk) if (rst_n && enc_out_valid) begin
    enc_exp_t e;
    dec_job_t j;
    int z [64];
    int r2 [96];
    int l2;
    rmat_t dq;
    e = enc_q.pop_front();
    for (int k = 0; k < 96; k++) j.r[k] = int'(enc_rle_out[k]);
    j.l = int'(enc_rle_len);
    rle_entries += j.l;
    rle_dec(j.r, j.l, z);
    rle_enc(z, r2, l2);
    checks++;
    if (l2 != j.l) begin failures++; $display("FAIL rle length"); end
    for (int k = 0; k < 96; k++) begin
      checks++;
      if (r2[k] != j.r[k]) begin failures++; $display("FAIL rle entry %0d", k); end
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
    for (int k = 0; k < 64; k++)
      dq[zz_tab(k) / 8][zz_tab(k) % 8] = real'(z[k] * qn_ref(zz_tab(k) / 8, zz_tab(k) % 8, QUALITY));
    j.p = ref_idct(dq);
    j.orig = e.orig;
    dec_q.push_back(j);
  end

  always @(posedge clk) if (rst_n && dec_out_valid) begin
    dec_job_t j;
    j = dec_exp.pop_front();
    n_done++;
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++) begin
        int x, d;
        x = clip8(rnd(j.p[i][k]) + 128);
        d = int'(dec_pix_out[i][k]) - x;
        checks++;
        if (!(d == 0 || ((d == 1 || d == -1) && tie_dist(j.p[i][k]) < 1e-3))) begin
          failures++;
          $display("FAIL pixel [%0d][%0d] got %0d expected %0d", i, k, dec_pix_out[i][k], x);
        end
        sq_err += real'((int'(dec_pix_out[i][k]) - j.orig[i][k]) ** 2);
      end
  end

  // decompressor driver
  initial begin
    dec_job_t j;
    for (int k = 0; k < RLE_LEN; k++) dec_rle_in[k] = '0;
    dec_rle_len = '0;
    forever begin
      @(posedge clk); #1;
      if (dec_q.size() > 0) begin
        j = dec_q.pop_front();
        for (int k = 0; k < RLE_LEN; k++) dec_rle_in[k] = coef_t'(j.r[k]);
        dec_rle_len = 7'(j.l);
        dec_in_valid = 1;
        while (!dec_in_ready) begin @(posedge clk); #1; end
        dec_exp.push_back(j);
        @(posedge clk); #1;
        dec_in_valid = 0;
      end
    end
  end

  // compressor driver: block bx of the band, presented until accepted
  task automatic send(input int bx);
    rmat_t p, d;
    enc_exp_t e;
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++) begin
        int v;
        v = pixel(bx * 8 + k, 200 + i);
        enc_pix_in[i][k] = 8'(v);
        e.orig[i][k] = v;
        p[i][k] = real'(v) - 128.0;
      end
    d = ref_dct(p);
    for (int k = 0; k < 64; k++) begin
      real x;
      x = d[zz_tab(k) / 8][zz_tab(k) % 8] / qn_ref(zz_tab(k) / 8, zz_tab(k) % 8, QUALITY);
      e.c[k] = rnd(x);
      e.t[k] = tie_dist(x);
    end
    enc_in_valid = 1;
    while (!enc_in_ready) begin @(posedge clk); #1; end
    enc_q.push_back(e);
    @(posedge clk); #1;
  endtask

  initial begin
    real mse, psnr;
    for (int i = 0; i < N; i++) for (int k = 0; k < N; k++) enc_pix_in[i][k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int b = 0; b < NBLK; b++) send(b);
    enc_in_valid = 0;
    while (n_done < NBLK) @(posedge clk);
    mse  = sq_err / real'(NBLK * 64);
    psnr = (mse > 0.0) ? 10.0 * $ln(255.0 * 255.0 / mse) / $ln(10.0) : 99.0;
    $display("band %0dx8, quality %0d: %0d blocks, %0d run-length entries for %0d samples, PSNR %0.2f dB",
             WIDTH, QUALITY, NBLK, rle_entries, NBLK * 64, psnr);
    checks++;
    if (psnr < 30.0) begin failures++; $display("FAIL PSNR %0.2f dB", psnr); end
    checks++;
    if (rle_entries >= NBLK * 64) begin failures++; $display("FAIL no compression"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
