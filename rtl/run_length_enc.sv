// run_length_enc: run-length coding of zero runs in a 1x64 zigzag vector.
//
// Non-zero values are copied to the output vector. Every maximal run of
// zeros is replaced by the pair (0, run length). Example:
//   in : 4 0 0 0 9 0 0 0 0 1 1 0 0 7 5 0 0 0 0 0 0 0 32
//   out: 4 0 3 9 0 4 1 1 0 2 7 5 0 7 32
// The worst case is a zero after every non-zero value, 32 values and 32
// pairs, so the output vector has 96 entries; len gives how many are used
// and the rest are 0.
//
// The encoder walks the captured input vector one element per clock into
// a working vector. A non-zero element that ends a run writes up to three
// entries in its cycle (0, run, value); a run that reaches the last
// element is flushed in the same cycle. The finished vector is copied to
// the output register, which holds it until the next block finishes. The
// serial walk and the length output are this design's choices.
//
// Timing: in_ready is low while a block is being encoded. A block is
// accepted on in_valid && in_ready; out_valid pulses LATENCY = 65 clock
// edges after the accepting edge (64 scan cycles, then the output
// register). A new block can be accepted in the cycle out_valid is high.
module run_length_enc
  import jpeg_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  zvec_t                x,
  output logic                 out_valid,
  output rvec_t                y,
  output logic [RLE_CNT_W-1:0] len
);
  localparam int LATENCY = NN + 1;

  zvec_t                x_q;
  rvec_t                work_q;
  logic                 busy_q;
  logic [5:0]           idx_q;
  logic [6:0]           run_q;
  logic [RLE_CNT_W-1:0] wlen_q;

  assign in_ready = !busy_q;

  // One scan step: the next working vector, run and length.
  rvec_t                work_d;
  logic [6:0]           run_d;
  logic [RLE_CNT_W-1:0] wlen_d;

  always_comb begin
    coef_t v;
    logic  last;
    work_d = work_q;
    run_d  = run_q;
    wlen_d = wlen_q;
    v      = x_q[idx_q];
    last   = (idx_q == 6'(NN - 1));
    if (v == '0) begin
      run_d = run_q + 7'd1;
      if (last) begin
        work_d[wlen_d]        = '0;
        work_d[wlen_d + 7'd1] = coef_t'(run_d);
        wlen_d                = wlen_d + 7'd2;
      end
    end else begin
      if (run_q != 7'd0) begin
        work_d[wlen_d]        = '0;
        work_d[wlen_d + 7'd1] = coef_t'(run_q);
        wlen_d                = wlen_d + 7'd2;
      end
      work_d[wlen_d] = v;
      wlen_d         = wlen_d + 7'd1;
      run_d          = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q    <= 1'b0;
      idx_q     <= '0;
      run_q     <= '0;
      wlen_q    <= '0;
      out_valid <= 1'b0;
      len       <= '0;
      for (int i = 0; i < NN; i++) x_q[i] <= '0;
      for (int i = 0; i < RLE_LEN; i++) begin
        work_q[i] <= '0;
        y[i]      <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (!busy_q) begin
        if (in_valid) begin
          x_q    <= x;
          busy_q <= 1'b1;
          idx_q  <= '0;
          run_q  <= '0;
          wlen_q <= '0;
          for (int i = 0; i < RLE_LEN; i++) work_q[i] <= '0;
        end
      end else begin
        work_q <= work_d;
        run_q  <= run_d;
        wlen_q <= wlen_d;
        idx_q  <= idx_q + 6'd1;
        if (idx_q == 6'(NN - 1)) begin
          busy_q    <= 1'b0;
          out_valid <= 1'b1;
          y         <= work_d;
          len       <= wlen_d;
        end
      end
    end
  end
endmodule
