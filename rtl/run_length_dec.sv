// run_length_dec: expands a run-length coded vector back into the 1x64
// zigzag vector; the inverse of run_length_enc.
//
// A non-zero entry is copied to the next output position. A zero entry is
// a marker: the entry after it is a run length, and that many zeros are
// emitted. Example:
//   in : 4 0 3 9 0 4 1 1 0 2 7 5 0 7 32
//   out: 4 0 0 0 9 0 0 0 0 1 1 0 0 7 5 0 0 0 0 0 0 0 32
// The decoder reads one token per clock (a value, or a marker with its
// count). The working vector is cleared when a block is accepted, so a run
// is emitted simply by advancing the write pointer. Decoding stops when
// len entries are consumed or 64 outputs are written; excess input is
// ignored. Output positions not reached stay 0. The finished vector is
// copied to the output register, which holds it until the next block
// finishes. The serial walk and the length input are this design's
// choices.
//
// Timing: in_ready is low while a block is being decoded. A block is
// accepted on in_valid && in_ready; out_valid pulses T + 2 clock edges
// later, where T is the number of tokens (at most 64).
module run_length_dec
  import jpeg_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  rvec_t                x,
  input  logic [RLE_CNT_W-1:0] len,
  output logic                 out_valid,
  output zvec_t                y
);
  rvec_t                x_q;
  logic [RLE_CNT_W-1:0] len_q;
  zvec_t                work_q;
  logic                 busy_q;
  logic [7:0]           rp_q;   // read pointer into x_q
  logic [7:0]           wp_q;   // write pointer into work_q

  assign in_ready = !busy_q;

  logic  finish;
  coef_t tok, cnt;
  assign finish = (rp_q >= 8'(len_q)) || (wp_q >= 8'(NN));
  assign tok    = (rp_q < 8'(RLE_LEN))       ? x_q[rp_q[6:0]]        : '0;
  assign cnt    = (rp_q + 8'd1 < 8'(RLE_LEN)) ? x_q[7'(rp_q + 8'd1)] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q    <= 1'b0;
      rp_q      <= '0;
      wp_q      <= '0;
      len_q     <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < RLE_LEN; i++) x_q[i] <= '0;
      for (int i = 0; i < NN; i++) begin
        work_q[i] <= '0;
        y[i]      <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (!busy_q) begin
        if (in_valid) begin
          x_q    <= x;
          len_q  <= (len > RLE_CNT_W'(RLE_LEN)) ? RLE_CNT_W'(RLE_LEN) : len;
          busy_q <= 1'b1;
          rp_q   <= '0;
          wp_q   <= '0;
          for (int i = 0; i < NN; i++) work_q[i] <= '0;
        end
      end else if (finish) begin
        busy_q    <= 1'b0;
        out_valid <= 1'b1;
        y         <= work_q;
      end else if (tok == '0) begin
        // zero marker: skip over the run, the vector is already zero there
        wp_q <= (cnt[COEF_W-1] || (wp_q + 8'(cnt[7:0]) > 8'(NN))) ? 8'(NN)
              : wp_q + 8'(cnt[7:0]);
        rp_q <= rp_q + 8'd2;
      end else begin
        work_q[wp_q[5:0]] <= tok;
        wp_q <= wp_q + 8'd1;
        rp_q <= rp_q + 8'd1;
      end
    end
  end
endmodule
