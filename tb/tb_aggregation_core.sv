// tb_aggregation_core: the four shared neurons over 64 buffered sums, with a
// behavioural 1024-neuron state memory. Several passes over different neuron bases and
// timesteps are checked against an integer model (BN, saturating IF,
// reset-by-subtraction): output spikes, stored potentials, and the schedule
// of 16 groups of four (done 17 clocks after the start clock).
module tb_aggregation_core;
  import bsnn_pkg::*;
  localparam int NNR = 1024;

  logic clk = 0, rst_n = 0;
  logic start = 0, first = 0, busy, done;
  logic [9:0] nbase = '0;
  mem_t theta = 8'sd20;
  logic [63:0] spikes;
  logic bn_we = 0;
  logic [5:0] bn_idx = '0;
  bn_coef_t bn_coef;
  logic [3:0] grp;
  acc_t sums [4];
  logic [7:0] st_raddr, st_waddr;
  logic [7:0] st_rdata [4], st_wdata [4];
  logic [3:0] st_we;
  int checks = 0, failures = 0;

  aggregation_core #(.NNR(NNR)) dut (.*);
  // behavioural state memory: neuron n in bank n%4, word n/4, one-clock read
  logic [7:0] mem [NNR];
  always @(posedge clk) begin
    for (int b = 0; b < 4; b++) begin
      if (st_we[b]) mem[4*st_waddr + b] <= st_wdata[b];
      st_rdata[b] <= mem[4*st_raddr + b];
    end
  end
  always #5 clk = ~clk;

  acc_t buf_sums [64];
  always_comb for (int j = 0; j < 4; j++) sums[j] = buf_sums[4*grp + j];

  bn_coef_t bn_model [64];
  int u_model [NNR];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nstep(int acc, bn_coef_t c, int u, bit fst, int th, output bit spk);
    int s;
    s = (fst ? 0 : u) + ((int'(c.a) * acc) >>> 4) + int'(c.b);
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    spk = (s >= th);
    return spk ? s - th : s;
  endfunction

  int n_spk = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < 64; f++) begin
      @(negedge clk);
      bn_we = 1; bn_idx = 6'(f);
      bn_coef.a = bn_t'($urandom_range(8, 40));
      bn_coef.b = bn_t'($urandom_range(0, 20)) - bn_t'(10);
      bn_model[f] = bn_coef;
    end
    @(negedge clk); bn_we = 0;
    for (int pass = 0; pass < 48; pass++) begin
      int base, cyc;
      bit fst;
      logic [63:0] exp_spk;
      base = 64 * (pass % 16);
      fst  = (pass < 16);          // first visit of each base starts from zero
      theta = mem_t'($urandom_range(10, 60));
      for (int f = 0; f < 64; f++) buf_sums[f] = acc_t'($urandom_range(0, 80)) - acc_t'(30);
      for (int f = 0; f < 64; f++) begin
        bit s;
        u_model[base+f] = nstep(int'(buf_sums[f]), bn_model[f], u_model[base+f], fst, int'(theta), s);
        exp_spk[f] = s;
      end
      @(negedge clk);
      start = 1; nbase = 10'(base); first = fst;
      @(posedge clk); #1 start = 0;
      cyc = 0;
      while (!done) begin @(posedge clk); #1 cyc++; if (cyc > 100) break; end
      checks++;
      if (cyc != 17) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++;
      if (spikes !== exp_spk) begin
        failures++;
        if (failures < 10) $display("FAIL pass %0d spikes %h exp %h", pass, spikes, exp_spk);
      end
      for (int f = 0; f < 64; f++) n_spk += exp_spk[f];
    end
    // stored potentials
    for (int n = 0; n < NNR; n++) begin
      checks++;
      if (int'(mem_t'(mem[n])) != u_model[n]) begin
        failures++;
        if (failures < 10) $display("FAIL state %0d", n);
      end
    end
    checks++; if (n_spk == 0) failures++;
    $display("spikes seen %0d", n_spk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
