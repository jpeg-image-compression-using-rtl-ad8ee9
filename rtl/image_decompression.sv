// image_decompression: the reconstruction chain for one 8x8 block at a time.
//
//   rle_in --> run_length_dec (1x96 with length to 1x64)
//          --> inv_zigzag     (1x64 to 8x8)
//          --> dequantizer    (times Q_n, Q_n from quant_table)
//          --> int_to_ieee    (signed integers to single precision)
//          --> idct_2d        (C^T * X * C, round, +128, clip to [0,255])
//
// The run-length decoder takes a data-dependent number of cycles, so the
// controller admits one block at a time: in_ready drops when a block is
// accepted and rises again when its pixels leave the inverse transform.
//
// Timing: a block is accepted on in_valid && in_ready; out_valid pulses
// T + 2 + 1 + 1 + 2 + 14 clock edges later (T = tokens in the block, at
// most 64) with pix_out, which holds until the next result. quality must
// match the value used for compression.
module image_decompression
  import jpeg_pkg::*;
#(
  parameter int DEQ_W = COEF_W + Q_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [6:0]           quality,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  rvec_t                rle_in,
  input  logic [RLE_CNT_W-1:0] rle_len,
  output logic                 out_valid,
  output pmat_t                pix_out
);
  logic busy_q;
  logic rld_ready;
  logic accept;
  assign in_ready = !busy_q && rld_ready;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         busy_q <= 1'b0;
    else if (accept)    busy_q <= 1'b1;
    else if (out_valid) busy_q <= 1'b0;
  end

  qmat_t qtab;
  quant_table u_qtab (.clk(clk), .rst_n(rst_n), .quality(quality), .q(qtab));

  logic  rld_valid;
  zvec_t rld_y;
  run_length_dec u_rld (
    .clk(clk), .rst_n(rst_n), .in_valid(accept), .in_ready(rld_ready),
    .x(rle_in), .len(rle_len), .out_valid(rld_valid), .y(rld_y)
  );

  logic  iz_valid;
  imat_t iz_y;
  inv_zigzag u_izz (
    .clk(clk), .rst_n(rst_n), .in_valid(rld_valid), .x(rld_y),
    .out_valid(iz_valid), .y(iz_y)
  );

  logic             dq_valid;
  logic [DEQ_W-1:0] dq_y [N][N];
  dequantizer #(.DEQ_W(DEQ_W)) u_deq (
    .clk(clk), .rst_n(rst_n), .in_valid(iz_valid), .x(iz_y), .q(qtab),
    .out_valid(dq_valid), .y(dq_y)
  );

  logic  cv_valid;
  fmat_t cv_y;
  int_to_ieee #(.IN_W(DEQ_W), .IN_SIGNED(1'b1), .LEVEL_SHIFT(0)) u_conv (
    .clk(clk), .rst_n(rst_n), .in_valid(dq_valid), .x(dq_y),
    .out_valid(cv_valid), .y(cv_y)
  );

  logic idct_ready;
  idct_2d u_idct (
    .clk(clk), .rst_n(rst_n), .in_valid(cv_valid), .in_ready(idct_ready), .x(cv_y),
    .out_valid(out_valid), .y(pix_out)
  );

  a_idct_free: assert property (@(posedge clk) disable iff (!rst_n) cv_valid |-> idct_ready);

endmodule
