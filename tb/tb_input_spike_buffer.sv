// tb_input_spike_buffer: writes a receptive field of spike rows and reads it
// back in order and at random, checking data and the one-clock latency.
module tb_input_spike_buffer;
  import bsnn_pkg::*;

  logic clk = 0, we = 0;
  logic [10:0] waddr = '0, raddr = '0;
  logic [2:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  input_spike_buffer dut (.*);
  always #5 clk = ~clk;

  logic [2:0] model [1536];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 1536; r++) begin
      @(negedge clk);
      we = 1; waddr = 11'(r); wdata = 3'($urandom); model[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      int rr;
      @(negedge clk);
      rr = (t < 1536) ? t : $urandom_range(0, 1535);
      raddr = 11'(rr);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[rr]) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d got %b exp %b", rr, rdata, model[rr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
