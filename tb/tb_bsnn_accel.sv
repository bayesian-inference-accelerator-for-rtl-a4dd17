// tb_bsnn_accel: end-to-end test of the accelerator at its default size,
// with the testbench acting as the host processor.
//
// One Bayesian layer of 64 filters over 512 input channels (3x3 kernels) is
// run as an ensemble in time: for each of N_MC Monte-Carlo samples the host
// streams all 4608 kernel positions of Bernoulli parameters (one per clock,
// so 64 weights are sampled per clock), then for T timesteps it writes the
// receptive field of each of the output positions and runs a pass. Output
// positions use neuron bases 0 and 65472, the first and last 64 neurons of
// the 64 kB state memory. Every output spike is compared with a reference
// model written here independently (bit-level LFSR, comparator sampling,
// integer convolution, BN, saturating IF with reset-by-subtraction), and so is
// the pass latency (3*C + 21 clocks). The mechanisms of the design are
// counted and each must occur: +1 and -1 weights, re-sampling between MC
// samples, output spikes, reset-by-subtraction leaving a positive residue,
// saturation, first-timestep restart, a host seed load and a run request
// ignored while busy. The spike counts per filter summed over timesteps and
// samples (what the host would pass to its softmax) are printed.
module tb_bsnn_accel;
  import bsnn_pkg::*;

  localparam int C     = 512;
  localparam int ROWS  = C * 3;
  localparam int N_MC  = 2;
  localparam int T     = 4;
  localparam int NPOS  = 2;
  localparam int BASES [NPOS] = '{0, 65472};

  logic clk = 0, rst_n = 0;
  logic seed_we = 0;
  logic [3:0] seed_idx = '0;
  logic [31:0] seed = '0;
  logic p_we = 0;
  logic [10:0] p_row = '0;
  logic [1:0] p_kx = '0;
  rn_t p [64];
  logic spk_we = 0;
  logic [10:0] spk_row = '0;
  logic [2:0] spk_data = '0;
  logic bn_we = 0;
  logic [5:0] bn_idx = '0;
  bn_coef_t bn_coef = '0;
  logic run = 0;
  logic [9:0] n_cin = '0;
  logic [15:0] nbase = '0;
  logic first = 0;
  mem_t theta = '0;
  logic busy, done;
  logic [63:0] spikes;

  bsnn_accel dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_wpos = 0, n_wneg = 0, n_resample = 0, n_spk = 0, n_residue = 0,
      n_sat = 0, n_first = 0, n_seed = 0, n_ignored = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  logic [31:0] lfsr [16];
  byte unsigned pmem [ROWS][3][64];     // Bernoulli parameters
  bit  wpos [ROWS][3][64];              // sampled weight is +1
  bit  wprev [ROWS][3][64];
  bit  xin [ROWS][3];
  bn_coef_t bnm [64];
  int  u_model [NPOS][64];
  int  counts [NPOS][64];

  function automatic logic [31:0] lstep(input logic [31:0] s);
    logic [31:0] n;
    for (int b = 0; b < 32; b++) begin
      n[b] = (b == 31) ? 1'b0 : s[b+1];
      if (b == 31 || b == 21 || b == 1 || b == 0) n[b] = n[b] ^ s[0];
    end
    return n;
  endfunction

  task automatic chk(bit ok, string tag);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", tag); end
  endtask

  task automatic stream_weights(int mc);
    for (int r = 0; r < ROWS; r++)
      for (int kx = 0; kx < 3; kx++) begin
        @(negedge clk);
        p_we = 1; p_row = 11'(r); p_kx = 2'(kx);
        for (int f = 0; f < 64; f++) begin
          byte unsigned rn;
          p[f] = pmem[r][kx][f];
          rn = lfsr[f / 4][8*(f % 4) +: 8];
          wprev[r][kx][f] = wpos[r][kx][f];
          wpos[r][kx][f] = (p[f] > rn);
          if (wpos[r][kx][f]) n_wpos++; else n_wneg++;
          if (mc > 0 && wpos[r][kx][f] != wprev[r][kx][f]) n_resample++;
        end
        @(posedge clk);
        for (int i = 0; i < 16; i++) lfsr[i] = lstep(lfsr[i]);
      end
    @(negedge clk); p_we = 0;
  endtask

  task automatic pass(int pos, bit fst, mem_t th);
    logic [63:0] exp_spk;
    int cyc;
    // host writes the receptive field
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      spk_we = 1; spk_row = 11'(r);
      for (int k = 0; k < 3; k++) begin
        xin[r][k] = ($urandom_range(0, 99) < 30);
        spk_data[k] = xin[r][k];
      end
    end
    @(negedge clk); spk_we = 0;
    // model
    for (int f = 0; f < 64; f++) begin
      int acc, s;
      acc = 0;
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < 3; k++)
          if (xin[r][k]) acc += wpos[r][k][f] ? 1 : -1;
      s = (fst ? 0 : u_model[pos][f]) + ((int'(bnm[f].a) * acc) >>> 4) + int'(bnm[f].b);
      if (s > 127) begin s = 127; n_sat++; end
      if (s < -128) begin s = -128; n_sat++; end
      exp_spk[f] = (s >= int'(th));
      if (exp_spk[f]) begin
        s -= int'(th); n_spk++; counts[pos][f]++;
        if (s > 0) n_residue++;
      end
      u_model[pos][f] = s;
    end
    if (fst) n_first++;
    // run the pass
    run = 1; n_cin = 10'(C); nbase = 16'(BASES[pos]); first = fst; theta = th;
    @(posedge clk); #1 run = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin
      @(posedge clk); #1 cyc++;
      if (cyc == 10) begin
        run = 1; n_cin = 10'd1;       // must be ignored: busy
        @(posedge clk); #1 cyc++; run = 0;
        if (busy) n_ignored++;
      end
    end
    chk(cyc == 3 * C + 21, $sformatf("latency %0d", cyc));
    chk(spikes === exp_spk, $sformatf("pos %0d spikes %h exp %h", pos, spikes, exp_spk));
  endtask

  initial begin
    for (int i = 0; i < 16; i++) begin
      lfsr[i] = 32'hACE1_2468 ^ (32'(i) * 32'h9E37_79B9);
      if (lfsr[i] == 0) lfsr[i] = 1;
    end
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 3; k++)
        for (int f = 0; f < 64; f++) begin
          pmem[r][k][f] = 8'($urandom);
          wpos[r][k][f] = 0;
        end
    for (int i = 0; i < NPOS; i++) for (int f = 0; f < 64; f++) counts[i][f] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // host reseeds LFSR 7
    @(negedge clk); seed_we = 1; seed_idx = 4'd7; seed = 32'hC0FF_EE01;
    @(posedge clk); lfsr[7] = 32'hC0FF_EE01; n_seed++;
    @(negedge clk); seed_we = 0;
    // BN coefficients: scale near 1.0 (16/16), small offsets
    for (int f = 0; f < 64; f++) begin
      @(negedge clk);
      bn_we = 1; bn_idx = 6'(f);
      bn_coef.a = bn_t'($urandom_range(12, 40));
      bn_coef.b = bn_t'($urandom_range(0, 16)) - bn_t'(8);
      bnm[f] = bn_coef;
    end
    @(negedge clk); bn_we = 0;
    for (int mc = 0; mc < N_MC; mc++) begin
      stream_weights(mc);
      for (int t = 0; t < T; t++)
        for (int pos = 0; pos < NPOS; pos++)
          pass(pos, t == 0, mem_t'(24));
    end
    // each mechanism must have happened
    chk(n_wpos > 0,     "no +1 weight sampled");
    chk(n_wneg > 0,     "no -1 weight sampled");
    chk(n_resample > 0, "no weight changed between MC samples");
    chk(n_spk > 0,      "no output spike");
    chk(n_residue > 0,  "no reset-by-subtraction residue");
    chk(n_sat > 0,      "no saturation");
    chk(n_first > 0,    "no first-timestep restart");
    chk(n_seed > 0,     "no seed load");
    chk(n_ignored > 0,  "no run ignored while busy");
    $display("mechanisms: w+1=%0d w-1=%0d resampled=%0d spikes=%0d residue=%0d saturated=%0d first=%0d seed=%0d ignored_run=%0d",
             n_wpos, n_wneg, n_resample, n_spk, n_residue, n_sat, n_first, n_seed, n_ignored);
    for (int pos = 0; pos < NPOS; pos++) begin
      string line;
      line = "";
      for (int f = 0; f < 16; f++) line = {line, $sformatf(" %0d", counts[pos][f])};
      $display("spike counts over %0d samples x %0d steps, position %0d, filters 0-15:%s", N_MC, T, pos, line);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
