// jpeg_codec: top level of the floating-point DCT JPEG codec.
//
// The compressor turns an 8x8 block of 8-bit pixels into a run-length coded
// vector of quantized DCT coefficients in zigzag order (up to 96 entries
// plus a length). The decompressor turns such a vector back into an 8x8
// pixel block. The two chains are independent and may run at the same
// time; connecting enc_rle_out/enc_rle_len to dec_rle_in/dec_rle_len gives
// a compress-decompress round trip. Splitting an image into 8x8 blocks and
// converting pixels to and from image files is left to the host.
//
// Each side has its own valid/ready pair (a transfer happens when both are
// high in the same cycle) and its own quality setting (1..100). See
// image_compression and image_decompression for the timing.
module jpeg_codec
  import jpeg_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // compression side
  input  logic [6:0]           enc_quality,
  input  logic                 enc_in_valid,
  output logic                 enc_in_ready,
  input  pmat_t                enc_pix_in,
  output logic                 enc_out_valid,
  output rvec_t                enc_rle_out,
  output logic [RLE_CNT_W-1:0] enc_rle_len,
  // decompression side
  input  logic [6:0]           dec_quality,
  input  logic                 dec_in_valid,
  output logic                 dec_in_ready,
  input  rvec_t                dec_rle_in,
  input  logic [RLE_CNT_W-1:0] dec_rle_len,
  output logic                 dec_out_valid,
  output pmat_t                dec_pix_out
);
  image_compression u_enc (
    .clk(clk), .rst_n(rst_n), .quality(enc_quality),
    .in_valid(enc_in_valid), .in_ready(enc_in_ready), .pix_in(enc_pix_in),
    .out_valid(enc_out_valid), .rle_out(enc_rle_out), .rle_len(enc_rle_len)
  );

  image_decompression u_dec (
    .clk(clk), .rst_n(rst_n), .quality(dec_quality),
    .in_valid(dec_in_valid), .in_ready(dec_in_ready),
    .rle_in(dec_rle_in), .rle_len(dec_rle_len),
    .out_valid(dec_out_valid), .pix_out(dec_pix_out)
  );
endmodule
