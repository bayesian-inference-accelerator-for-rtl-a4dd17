// tb_neuron_state_memory: full-size (64 kB) state store. Writes random
// potentials with random bank enables, reads them back one clock later and
// checks that each bank keeps its own word.
module tb_neuron_state_memory;
  import bsnn_pkg::*;

  logic clk = 0;
  logic [13:0] raddr = '0, waddr = '0;
  logic [7:0] rdata [4], wdata [4];
  logic [3:0] we = '0;
  int checks = 0, failures = 0;

  neuron_state_memory dut (.*);
  always #5 clk = ~clk;

  logic [7:0] model [16384][4];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16384; a++) begin
      @(negedge clk);
      we = 4'hF; waddr = 14'(a);
      for (int b = 0; b < 4; b++) begin wdata[b] = 8'($urandom); model[a][b] = wdata[b]; end
    end
    for (int t = 0; t < 20000; t++) begin
      int ra;
      @(negedge clk);
      ra = $urandom_range(0, 16383);
      raddr = 14'(ra);
      we = 4'($urandom);
      waddr = 14'($urandom_range(0, 16383));
      if (waddr == raddr) we = '0;
      for (int b = 0; b < 4; b++) wdata[b] = 8'($urandom);
      @(posedge clk);
      for (int b = 0; b < 4; b++) if (we[b]) model[waddr][b] = wdata[b];
      #1;
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (rdata[b] !== model[ra][b]) begin
          failures++;
          if (failures < 10) $display("FAIL addr %0d bank %0d", ra, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
