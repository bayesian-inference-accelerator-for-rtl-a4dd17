// tb_pe: drives one PE with random spikes and +/-1 weights and compares the
// accumulator with an integer reference. A 3x3 filter (three rows) must be
// complete three clocks after the first row; longer sums (3*C rows) and a
// held accumulator (en low) are checked as well.
module tb_pe;
  import bsnn_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [2:0] x = '0;
  wt_t w [3];
  acc_t acc;
  int checks = 0, failures = 0;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int exp, string tag);
    checks++;
    if (int'(acc) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s acc=%0d exp=%0d", tag, acc, exp);
    end
  endtask

  initial begin
    int ref_sum;
    for (int k = 0; k < 3; k++) w[k] = W_POS;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(0, "reset");
    for (int trial = 0; trial < 400; trial++) begin
      int rows;
      int cyc;
      rows = (trial % 2) ? 3 : 3 * $urandom_range(1, 64);
      ref_sum = 0;
      cyc = 0;
      for (int r = 0; r < rows; r++) begin
        @(negedge clk);
        en = 1; clear = (r == 0);
        x = 3'($urandom);
        for (int k = 0; k < 3; k++) begin
          w[k] = $urandom_range(0, 1) ? W_POS : W_NEG;
          if (x[k]) ref_sum += int'(w[k]);
        end
        @(posedge clk); cyc++;
        #1 chk(ref_sum, "row");
      end
      // 3x3 filter: all MACs done in 3 clocks
      if (rows == 3) begin checks++; if (cyc != 3) failures++; end
      // hold
      @(negedge clk); en = 0; clear = 0; x = 3'b111;
      repeat (2) @(posedge clk);
      #1 chk(ref_sum, "hold");
      // clear without en must not disturb
      @(negedge clk); clear = 1;
      @(posedge clk); #1 chk(ref_sum, "clear-only");
      @(negedge clk); clear = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
