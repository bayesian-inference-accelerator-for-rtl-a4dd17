// tb_weight_memory: writes sampled weights one kernel position at a time
// (bank kx, word row) and reads whole rows back, checking the three banks
// against a reference array and the one-clock read latency.
module tb_weight_memory;
  import bsnn_pkg::*;
  localparam int ROWS = 96;

  logic clk = 0;
  logic we = 0;
  logic [6:0] wrow = '0, raddr = '0;
  logic [1:0] wkx = '0;
  wt_t wdata [64];
  wt_t rdata [3][64];
  int checks = 0, failures = 0;

  weight_memory #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  logic [1:0] model [ROWS][3][64];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every position
    for (int r = 0; r < ROWS; r++)
      for (int kx = 0; kx < 3; kx++) begin
        @(negedge clk);
        we = 1; wrow = 7'(r); wkx = 2'(kx);
        for (int f = 0; f < 64; f++) begin
          wdata[f] = $urandom_range(0, 1) ? W_POS : W_NEG;
          model[r][kx][f] = wdata[f];
        end
      end
    @(negedge clk); we = 0;
    // random overwrites mixed with reads
    for (int t = 0; t < 600; t++) begin
      int rr;
      @(negedge clk);
      rr = $urandom_range(0, ROWS - 1);
      raddr = 7'(rr);
      we = $urandom_range(0, 1);
      wrow = 7'($urandom_range(0, ROWS - 1)); wkx = 2'($urandom_range(0, 2));
      if (wrow == raddr) we = 0;
      for (int f = 0; f < 64; f++) wdata[f] = $urandom_range(0, 1) ? W_POS : W_NEG;
      @(posedge clk);
      if (we) for (int f = 0; f < 64; f++) model[wrow][wkx][f] = wdata[f];
      #1;
      for (int kx = 0; kx < 3; kx++)
        for (int f = 0; f < 64; f++) begin
          checks++;
          if (rdata[kx][f] !== model[rr][kx][f]) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d kx %0d f %0d", rr, kx, f);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
