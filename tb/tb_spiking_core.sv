// tb_spiking_core: feeds the 64-PE array shared spike rows and per-filter
// weight rows and compares all 64 sums with an integer reference after each
// complete filter of 3*C rows (C random, up to 64).
module tb_spiking_core;
  import bsnn_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [2:0] x = '0;
  wt_t w [3][64];
  acc_t acc [64];
  int checks = 0, failures = 0;

  spiking_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_sum [64];
    for (int k = 0; k < 3; k++) for (int f = 0; f < 64; f++) w[k][f] = W_POS;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      int rows;
      rows = 3 * $urandom_range(1, 64);
      for (int f = 0; f < 64; f++) ref_sum[f] = 0;
      for (int r = 0; r < rows; r++) begin
        @(negedge clk);
        en = 1; clear = (r == 0);
        x = 3'($urandom);
        for (int k = 0; k < 3; k++)
          for (int f = 0; f < 64; f++) begin
            w[k][f] = $urandom_range(0, 1) ? W_POS : W_NEG;
            if (x[k]) ref_sum[f] += int'(w[k][f]);
          end
      end
      @(posedge clk); #1;
      en = 0;
      for (int f = 0; f < 64; f++) begin
        checks++;
        if (int'(acc[f]) != ref_sum[f]) begin
          failures++;
          if (failures < 10) $display("FAIL f %0d acc=%0d exp=%0d", f, acc[f], ref_sum[f]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
