// tb_row_col_mult: random row/column pairs through the floating-point dot
// product, one pair per cycle, compared with the double-precision sum of
// products (tolerance 2^-20 of the sum of magnitudes, which covers the
// truncations of the multipliers and the formatter). Also checks an exact
// case, cancellation to zero and the four-cycle latency.
`timescale 1ns/1ps
module tb_row_col_mult;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  ieee754_t row [N], col [N], y;
  int checks = 0, failures = 0, cycle = 0;

  row_col_mult dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real exp_q [$], tol_q [$];
  int  cyc_q [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    real e, g, t;
    int  c0;
    e = exp_q.pop_front(); t = tol_q.pop_front(); c0 = cyc_q.pop_front();
    g = fbits2r(y);
    checks++;
    if ((g - e > t) || (e - g > t)) begin
      failures++;
      $display("FAIL dot: got %g expected %g", g, e);
    end
    checks++;
    if (cycle - c0 != 4) begin failures++; $display("FAIL latency %0d", cycle - c0); end
  end

  task automatic drive(input real ra [N], input real rb [N]);
    real s, m;
    s = 0.0; m = 0.0;
    for (int i = 0; i < N; i++) begin
      row[i] = ieee754_t'(r2fbits(ra[i]));
      col[i] = ieee754_t'(r2fbits(rb[i]));
      s += fbits2r(row[i]) * fbits2r(col[i]);
      m += (fbits2r(row[i]) * fbits2r(col[i]) < 0) ? -fbits2r(row[i]) * fbits2r(col[i])
                                                   :  fbits2r(row[i]) * fbits2r(col[i]);
    end
    in_valid = 1;
    exp_q.push_back(s); tol_q.push_back(m * pow2(-20)); cyc_q.push_back(cycle);
    @(posedge clk); #1;
  endtask

  initial begin
    real ra [N], rb [N];
    for (int i = 0; i < N; i++) begin row[i] = '0; col[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // exact: 1*1 + 2*2 + ... + 8*8 = 204
    for (int i = 0; i < N; i++) begin ra[i] = i + 1; rb[i] = i + 1; end
    drive(ra, rb);
    // cancellation: +x and -x
    for (int i = 0; i < N; i++) begin ra[i] = (i % 2) ? -3.25 : 3.25; rb[i] = 1.5; end
    drive(ra, rb);
    for (int k = 0; k < 1000; k++) begin
      for (int i = 0; i < N; i++) begin
        ra[i] = (real'($urandom_range(0, 200000)) - 100000.0) / 1000.0;
        rb[i] = (real'($urandom_range(0, 200000)) - 100000.0) / 100000.0;
        if ($urandom_range(0, 9) == 0) ra[i] = 0.0;
      end
      drive(ra, rb);
    end
    in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
