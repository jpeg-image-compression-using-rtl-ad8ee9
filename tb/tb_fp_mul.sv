// tb_fp_mul: checks the single-precision multiplier against double-precision
// products of random operands (truncation allows an error below 2^-22 of the
// result), exact small cases, zero operands and the two-cycle latency with
// one operand pair entering every cycle.
`timescale 1ns/1ps
module tb_fp_mul;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  ieee754_t a, b, y;
  int checks = 0, failures = 0, cycle = 0;

  fp_mul dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real exp_q [$];
  int  cyc_q [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    real e, g, tol;
    int  c0;
    e  = exp_q.pop_front();
    c0 = cyc_q.pop_front();
    g  = fbits2r(y);
    tol = (e < 0 ? -e : e) * pow2(-22);
    checks++;
    if ((g - e > tol) || (e - g > tol)) begin
      failures++;
      $display("FAIL product: got %g expected %g", g, e);
    end
    checks++;
    if (cycle - c0 != 2) begin
      failures++;
      $display("FAIL latency %0d", cycle - c0);
    end
  end

  task automatic drive(input logic [31:0] x, input logic [31:0] z);
    a = ieee754_t'(x); b = ieee754_t'(z); in_valid = 1;
    exp_q.push_back(fbits2r(x) * fbits2r(z));
    cyc_q.push_back(cycle);
    @(posedge clk); #1;
  endtask

  initial begin
    a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    drive(r2fbits(1.5), r2fbits(2.0));
    drive(r2fbits(-3.0), r2fbits(0.25));
    drive(r2fbits(0.0), r2fbits(7.0));
    drive(r2fbits(1.999999), r2fbits(1.999999));
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] x, z;
      x = {$urandom_range(0,1) == 1, 8'($urandom_range(100, 150)), 23'($urandom)};
      z = {$urandom_range(0,1) == 1, 8'($urandom_range(100, 150)), 23'($urandom)};
      drive(x, z);
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    // exact bit pattern of a small case
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL leftover results"); end
    drive(r2fbits(1.5), r2fbits(-2.5));
    in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (y != ieee754_t'(r2fbits(-3.75))) begin failures++; $display("FAIL 1.5*-2.5 = %h", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
