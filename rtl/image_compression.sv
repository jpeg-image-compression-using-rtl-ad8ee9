// image_compression: the compression chain for one 8x8 block at a time.
//
//   pixels --> int_to_ieee (-128 level shift, to single precision)
//          --> dct_2d       (C * P * C^T)
//          --> quantizer    (round(DCT / Q_n), Q_n from quant_table)
//          --> zigzag       (8x8 to 1x64)
//          --> run_length_enc (1x64 to 1x96 with length)
//
// The stages pass a block along with one-cycle valid pulses. All stage
// latencies are fixed, so the controller is a single admission counter:
// the slowest stage is the run-length encoder, busy 65 cycles per block,
// and a new block is admitted no sooner than INTERVAL = 65 cycles after the
// previous one. in_ready is low in between (an input stall); blocks
// presented then are not taken. Up to two blocks are in flight (one in the
// transform/quantize front end, one in the encoder).
//
// Timing: a block is accepted on in_valid && in_ready; out_valid pulses
// LATENCY = 82 clock edges later (2 + 13 + 1 + 1 + 65) with rle_out and
// rle_len, which hold until the next block's result. quality selects the
// quantization table (1..100, 50 = standard table) and should be steady
// while blocks are in flight.
module image_compression
  import jpeg_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [6:0]           quality,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  pmat_t                pix_in,
  output logic                 out_valid,
  output rvec_t                rle_out,
  output logic [RLE_CNT_W-1:0] rle_len
);
  localparam int INTERVAL = NN + 1;
  localparam int LATENCY  = 2 + 13 + 1 + 1 + INTERVAL;

  // admission controller
  logic [6:0] cool_q;
  logic       accept;
  logic       dct_ready;
  assign in_ready = (cool_q == '0) && dct_ready;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          cool_q <= '0;
    else if (accept)     cool_q <= 7'(INTERVAL - 1);
    else if (cool_q != 0) cool_q <= cool_q - 7'd1;
  end

  qmat_t qtab;
  quant_table u_qtab (.clk(clk), .rst_n(rst_n), .quality(quality), .q(qtab));

  logic  cv_valid;
  fmat_t cv_y;
  int_to_ieee #(.IN_W(PIX_W), .IN_SIGNED(1'b0), .LEVEL_SHIFT(128)) u_conv (
    .clk(clk), .rst_n(rst_n), .in_valid(accept), .x(pix_in),
    .out_valid(cv_valid), .y(cv_y)
  );

  logic  dct_valid;
  fmat_t dct_y;
  dct_2d #(.INVERSE(1'b0)) u_dct (
    .clk(clk), .rst_n(rst_n), .in_valid(cv_valid), .in_ready(dct_ready), .x(cv_y),
    .out_valid(dct_valid), .y(dct_y)
  );

  logic  qz_valid;
  imat_t qz_y;
  quantizer u_quant (
    .clk(clk), .rst_n(rst_n), .in_valid(dct_valid), .x(dct_y), .q(qtab),
    .out_valid(qz_valid), .y(qz_y)
  );

  logic  zz_valid;
  zvec_t zz_y;
  zigzag u_zz (
    .clk(clk), .rst_n(rst_n), .in_valid(qz_valid), .x(qz_y),
    .out_valid(zz_valid), .y(zz_y)
  );

  logic rle_ready;
  run_length_enc u_rle (
    .clk(clk), .rst_n(rst_n), .in_valid(zz_valid), .in_ready(rle_ready), .x(zz_y),
    .out_valid(out_valid), .y(rle_out), .len(rle_len)
  );

  // The admission interval guarantees that no stage is offered a block
  // while it is busy.
  a_dct_free: assert property (@(posedge clk) disable iff (!rst_n) cv_valid |-> dct_ready);
  a_rle_free: assert property (@(posedge clk) disable iff (!rst_n) zz_valid |-> rle_ready);

endmodule
