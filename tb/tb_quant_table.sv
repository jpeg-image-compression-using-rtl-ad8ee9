// tb_quant_table: the table after reset and for several quality levels on
// both branches of the scaling rule (n >= 50 and n < 50), including 50
// (the standard table), 100 (all ones) and 1, against a real-arithmetic
// model.
`timescale 1ns/1ps
module tb_quant_table;
  import jpeg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [6:0] quality = 7'd50;
  qmat_t q;
  int checks = 0, failures = 0;

  quant_table dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int n);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'(q[i][j]) != qn_ref(i, j, n)) begin
          failures++;
          $display("FAIL n=%0d q[%0d][%0d]=%0d expected %0d", n, i, j, q[i][j], qn_ref(i, j, n));
        end
      end
  endtask

  initial begin
    int levels [10] = '{50, 75, 90, 100, 60, 49, 25, 10, 3, 1};
    repeat (2) @(posedge clk);
    #1 check(50);        // reset value
    rst_n = 1;
    foreach (levels[k]) begin
      quality = 7'(levels[k]);
      @(posedge clk); #1;
      check(levels[k]);
    end
    // the standard table itself
    quality = 7'd50; @(posedge clk); #1;
    checks++;
    if (q[0][0] != 16 || q[7][7] != 99 || q[6][5] != 121) begin failures++; $display("FAIL Q50"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
