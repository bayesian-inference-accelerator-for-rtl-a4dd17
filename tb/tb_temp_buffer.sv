// tb_temp_buffer: loads 64 random sums, reads all 16 groups of four, and
// checks that the buffer holds its contents while its input changes.
module tb_temp_buffer;
  import bsnn_pkg::*;

  logic clk = 0, rst_n = 0, load = 0;
  acc_t din [64];
  logic [3:0] grp = '0;
  acc_t dout [4];
  int checks = 0, failures = 0;

  temp_buffer dut (.*);
  always #5 clk = ~clk;

  acc_t model [64];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      load = 1;
      for (int f = 0; f < 64; f++) begin din[f] = acc_t'($urandom); model[f] = din[f]; end
      @(negedge clk);
      load = 0;
      for (int f = 0; f < 64; f++) din[f] = acc_t'($urandom);   // must be ignored
      for (int g = 0; g < 16; g++) begin
        grp = 4'(g);
        #1;
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (dout[j] !== model[4*g+j]) begin
            failures++;
            if (failures < 10) $display("FAIL g %0d j %0d", g, j);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
