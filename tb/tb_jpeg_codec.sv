// tb_jpeg_codec: end-to-end test of the codec at its default (and only)
// sizes. Pixel blocks are compressed; every compressed block is checked
// against a double-precision reference (DCT, quantization, zigzag,
// run-length coding) and is then fed to the decompressor while the
// compressor keeps working on the next blocks. Every reconstructed block is
// checked against a double-precision IDCT of the coefficients the
// compressor produced, with rounding, +128 and clipping. Qualities 50, 75
// (n >= 50 branch of the table rule) and 20, 5 (n < 50 branch) are used.
// The test counts how often each mechanism happened and fails if one never
// did: compressor input stall, decompressor input stall, a zero run inside
// a block, a zero run that reaches the end of a block, both branches of the
// table rule, clipping at 0 and at 255 in the reconstruction, and a
// block moving through both chains at the same time as another.
`timescale 1ns/1ps
module tb_jpeg_codec;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [6:0] enc_quality = 7'd50, dec_quality = 7'd50;
  logic enc_in_valid = 0, enc_in_ready, enc_out_valid;
  logic dec_in_valid = 0, dec_in_ready, dec_out_valid;
  pmat_t enc_pix_in, dec_pix_out;
  rvec_t enc_rle_out, dec_rle_in;
  logic [RLE_CNT_W-1:0] enc_rle_len, dec_rle_len;
  int checks = 0, failures = 0;

  int n_enc_stall = 0, n_dec_stall = 0, n_inner_run = 0, n_tail_run = 0;
  int n_hi_q = 0, n_lo_q = 0, n_clip0 = 0, n_clip255 = 0, n_overlap = 0;
  int enc_pending = 0, dec_pending = 0;
  int cur_q = 50;

  jpeg_codec dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (enc_in_valid && !enc_in_ready) n_enc_stall++;
    if (dec_in_valid && !dec_in_ready) n_dec_stall++;
    if (dec_in_valid && dec_in_ready && enc_pending > 0) n_overlap++;
  end

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int c [64]; real t [64]; } enc_exp_t;
  typedef struct { int r [96]; int l; real p [8][8]; } dec_job_t;
  enc_exp_t enc_q [$];
  dec_job_t dec_q [$];
  dec_job_t dec_exp [$];

  // compressed block: check, then queue it for the decompressor
  always @(posedge clk) if (rst_n && enc_out_valid) begin
    enc_exp_t e;
    dec_job_t j;
    int z [64];
    int r2 [96];
    int l2;
    rmat_t dq;
    e = enc_q.pop_front();
    enc_pending--;
    for (int k = 0; k < 96; k++) j.r[k] = int'(enc_rle_out[k]);
    j.l = int'(enc_rle_len);
    rle_dec(j.r, j.l, z);
    rle_enc(z, r2, l2);
    checks++;
    if (l2 != j.l) begin failures++; $display("FAIL rle length"); end
    for (int k = 0; k < 96; k++) begin
      checks++;
      if (r2[k] != j.r[k]) begin failures++; $display("FAIL rle entry %0d", k); end
    end
    for (int k = 0; k < j.l; k++)
      if (j.r[k] == 0) begin
        if (k + 2 < j.l) n_inner_run++; else n_tail_run++;
        k++;
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
      dq[zz_tab(k) / 8][zz_tab(k) % 8] = real'(z[k] * qn_ref(zz_tab(k) / 8, zz_tab(k) % 8, cur_q));
    j.p = ref_idct(dq);
    dec_q.push_back(j);
  end

  // reconstructed block
  always @(posedge clk) if (rst_n && dec_out_valid) begin
    dec_job_t j;
    j = dec_exp.pop_front();
    dec_pending--;
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++) begin
        int x, d;
        x = clip8(rnd(j.p[i][k]) + 128);
        if (rnd(j.p[i][k]) + 128 < 0)   n_clip0++;
        if (rnd(j.p[i][k]) + 128 > 255) n_clip255++;
        d = int'(dec_pix_out[i][k]) - x;
        checks++;
        if (!(d == 0 || ((d == 1 || d == -1) && tie_dist(j.p[i][k]) < 1e-3))) begin
          failures++;
          $display("FAIL pixel [%0d][%0d] got %0d expected %0d", i, k, dec_pix_out[i][k], x);
        end
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
        dec_pending++;
        @(posedge clk); #1;
        dec_in_valid = 0;
      end
    end
  end

  task automatic send(input int kind, input int n);
    rmat_t p, d;
    enc_exp_t e;
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++) begin
        int v;
        case (kind)
          0: v = 40 + 12 * i + 6 * k + int'($urandom_range(0, 8));
          1: v = int'($urandom_range(0, 255));
          2: v = 255 * ((i + k) % 2);
          default: v = (i < 4) ? 0 : 255;
        endcase
        enc_pix_in[i][k] = 8'(v);
        p[i][k] = real'(v) - 128.0;
      end
    d = ref_dct(p);
    for (int k = 0; k < 64; k++) begin
      real x;
      x = d[zz_tab(k) / 8][zz_tab(k) % 8] / qn_ref(zz_tab(k) / 8, zz_tab(k) % 8, n);
      e.c[k] = rnd(x);
      e.t[k] = tie_dist(x);
    end
    enc_in_valid = 1;
    while (!enc_in_ready) begin @(posedge clk); #1; end
    enc_q.push_back(e);
    enc_pending++;
    @(posedge clk); #1;
    enc_in_valid = 0;
  endtask

  initial begin
    int levels [4] = '{50, 75, 20, 5};
    for (int i = 0; i < N; i++) for (int k = 0; k < N; k++) enc_pix_in[i][k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    foreach (levels[l]) begin
      cur_q = levels[l];
      enc_quality = 7'(levels[l]);
      dec_quality = 7'(levels[l]);
      if (levels[l] >= 50) n_hi_q++; else n_lo_q++;
      repeat (2) @(posedge clk); #1;
      for (int b = 0; b < 8; b++) send(b % 4, levels[l]);
      while (enc_pending > 0 || dec_pending > 0 || dec_q.size() > 0) @(posedge clk);
      #1;
    end
    $display("mechanisms: enc_stall=%0d dec_stall=%0d inner_run=%0d tail_run=%0d q>=50=%0d q<50=%0d clip0=%0d clip255=%0d overlap=%0d",
             n_enc_stall, n_dec_stall, n_inner_run, n_tail_run, n_hi_q, n_lo_q, n_clip0, n_clip255, n_overlap);
    checks++; if (n_enc_stall == 0) begin failures++; $display("FAIL never: compressor stall"); end
    checks++; if (n_dec_stall == 0) begin failures++; $display("FAIL never: decompressor stall"); end
    checks++; if (n_inner_run == 0) begin failures++; $display("FAIL never: inner zero run"); end
    checks++; if (n_tail_run == 0)  begin failures++; $display("FAIL never: trailing zero run"); end
    checks++; if (n_hi_q == 0 || n_lo_q == 0) begin failures++; $display("FAIL never: both table branches"); end
    checks++; if (n_clip0 == 0)     begin failures++; $display("FAIL never: clip at 0"); end
    checks++; if (n_clip255 == 0)   begin failures++; $display("FAIL never: clip at 255"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("FAIL never: both chains busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
