// tb_prng_unit: checks the LFSR bank against a bit-level reference model.
//
// The reference steps each 32-bit register bit by bit (Galois form of
// x^32+x^22+x^2+x+1) and compares all 64 output bytes every clock, with
// 'advance' toggled at random, so both the one-step-per-clock rate (64 fresh
// numbers each advancing clock) and the hold behaviour are checked. Seed
// loading, the zero-seed guard and the mean of the bytes are checked too.
module tb_prng_unit;
  import bsnn_pkg::*;

  logic clk = 0, rst_n = 0;
  logic seed_we = 0, advance = 0;
  logic [3:0] seed_idx = '0;
  logic [31:0] seed = '0;
  rn_t rn [64];
  int checks = 0, failures = 0;

  prng_unit dut (.*);

  always #5 clk = ~clk;

  logic [31:0] model [16];
  localparam logic [31:0] TAPMASK = 32'h8020_0003;

  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] n;
    for (int b = 0; b < 32; b++) begin
      n[b] = (b == 31) ? 1'b0 : s[b+1];
      if (TAPMASK[b]) n[b] = n[b] ^ s[0];
    end
    return n;
  endfunction

  task automatic compare(string tag);
    for (int i = 0; i < 16; i++)
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (rn[4*i+b] !== model[i][8*b +: 8]) begin
          failures++;
          if (failures < 10) $display("FAIL %s lfsr %0d byte %0d: %h vs %h", tag, i, b, rn[4*i+b], model[i][8*b +: 8]);
        end
      end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sum = 0; longint nsum = 0;

  initial begin
    for (int i = 0; i < 16; i++) begin
      model[i] = 32'hACE1_2468 ^ (32'(i) * 32'h9E37_79B9);
      if (model[i] == 0) model[i] = 1;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk); compare("reset");
    // random advance pattern
    for (int t = 0; t < 3000; t++) begin
      advance = $urandom_range(0, 3) != 0;
      @(posedge clk);
      if (advance) for (int i = 0; i < 16; i++) model[i] = step(model[i]);
      #1 compare("run");
      for (int k = 0; k < 64; k++) begin sum += rn[k]; nsum++; end
      @(negedge clk);
    end
    advance = 0;
    // mean of uniform 8-bit numbers should be near 127.5
    checks++;
    if (sum / nsum < 120 || sum / nsum > 135) begin failures++; $display("FAIL mean %0d", sum / nsum); end
    // seed loading, including the zero guard
    for (int i = 0; i < 16; i++) begin
      seed_we = 1; seed_idx = 4'(i); seed = (i == 5) ? 32'h0 : $urandom;
      @(posedge clk);
      model[i] = (seed == 0) ? 32'h1 : seed;
      @(negedge clk);
    end
    seed_we = 0;
    compare("seed");
    // seed and advance together: seed wins for that register
    advance = 1; seed_we = 1; seed_idx = 4'd3; seed = 32'h1234_5678;
    @(posedge clk);
    for (int i = 0; i < 16; i++) model[i] = (i == 3) ? 32'h1234_5678 : step(model[i]);
    @(negedge clk); seed_we = 0; advance = 0;
    compare("seed+adv");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
