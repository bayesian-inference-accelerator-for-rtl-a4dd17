// tb_resnet_workload: two chained 3x3 convolution layers of a CIFAR-style
// ResNet-18 first stage (64 -> 64 -> 64 channels), run as a Bayesian SNN with
// n_MC = 10 Monte-Carlo samples and T = 4 timesteps, the operating point of
// the evaluated network. The spatial extent is cut to a 6x6 input patch
// (4x4 outputs from layer A, 2x2 from layer B) to keep simulation short.
//
// The testbench acts as the host. For each sample it streams layer A's
// Bernoulli parameters (sampled into weights by the accelerator), runs all
// output positions for all timesteps (layer-major, so neuron states persist
// across timesteps), keeps A's output spike maps, then streams layer B's
// parameters and runs B on A's spikes. Every pass's spikes are compared with
// an independent model; layer B's spike counts summed over timesteps and
// samples, which the host would feed to a softmax, are printed.
module tb_resnet_workload;
  import bsnn_pkg::*;

  localparam int C = 64, ROWS = C * 3, N_MC = 10, T = 4;
  localparam int HA = 6, OA = 4, OB = 2;

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

  int checks = 0, failures = 0, n_spk_a = 0, n_spk_b = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host data and reference model ----------------
  logic [31:0] lfsr [16];
  byte unsigned pA [ROWS][3][64], pB [ROWS][3][64];
  bn_coef_t bnA [64], bnB [64];
  bit  wpos [ROWS][3][64];
  byte unsigned intensity [C][HA][HA];   // rate code of the input patch
  bit  inA [T][C][HA][HA];               // input spikes per timestep
  bit  outA [T][C][OA][OA];              // layer A output spikes
  int  u_model [OA*OA][64];
  int  counts [OB*OB][64];
  localparam mem_t TH_A = 8'sd16, TH_B = 8'sd16;

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

  task automatic load_bn(bit layer_b);
    for (int f = 0; f < 64; f++) begin
      @(negedge clk);
      bn_we = 1; bn_idx = 6'(f); bn_coef = layer_b ? bnB[f] : bnA[f];
    end
    @(negedge clk); bn_we = 0;
  endtask

  task automatic stream_weights(bit layer_b);
    for (int r = 0; r < ROWS; r++)
      for (int kx = 0; kx < 3; kx++) begin
        @(negedge clk);
        p_we = 1; p_row = 11'(r); p_kx = 2'(kx);
        for (int f = 0; f < 64; f++) begin
          p[f] = layer_b ? pB[r][kx][f] : pA[r][kx][f];
          wpos[r][kx][f] = (p[f] > lfsr[f / 4][8*(f % 4) +: 8]);
        end
        @(posedge clk);
        for (int i = 0; i < 16; i++) lfsr[i] = lstep(lfsr[i]);
      end
    @(negedge clk); p_we = 0;
  endtask

  // one pass: field[r][kx] are the receptive-field spikes
  task automatic do_pass(bit field [ROWS][3], int npos, bit fst, mem_t th,
                         bn_coef_t bn [64], output logic [63:0] got);
    logic [63:0] exp_spk;
    int cyc;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      spk_we = 1; spk_row = 11'(r);
      for (int k = 0; k < 3; k++) spk_data[k] = field[r][k];
    end
    @(negedge clk); spk_we = 0;
    for (int f = 0; f < 64; f++) begin
      int acc, s;
      acc = 0;
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < 3; k++)
          if (field[r][k]) acc += wpos[r][k][f] ? 1 : -1;
      s = (fst ? 0 : u_model[npos][f]) + ((int'(bn[f].a) * acc) >>> 4) + int'(bn[f].b);
      if (s > 127) s = 127;
      if (s < -128) s = -128;
      exp_spk[f] = (s >= int'(th));
      if (exp_spk[f]) s -= int'(th);
      u_model[npos][f] = s;
    end
    run = 1; n_cin = 10'(C); nbase = 16'(64 * npos); first = fst; theta = th;
    @(posedge clk); #1 run = 0;
    cyc = 0;
    while (!done && cyc < 2000) begin @(posedge clk); #1 cyc++; end
    chk(cyc == 3 * C + 21, $sformatf("latency %0d", cyc));
    chk(spikes === exp_spk, $sformatf("pos %0d spikes %h exp %h", npos, spikes, exp_spk));
    got = spikes;
  endtask

  initial begin
    bit field [ROWS][3];
    logic [63:0] got;
    for (int i = 0; i < 16; i++) begin
      lfsr[i] = 32'hACE1_2468 ^ (32'(i) * 32'h9E37_79B9);
      if (lfsr[i] == 0) lfsr[i] = 1;
    end
    // trained-looking parameters: mostly confident p near 0 or 255
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 3; k++)
        for (int f = 0; f < 64; f++) begin
          pA[r][k][f] = ($urandom_range(0, 3) == 0) ? 8'($urandom) : ($urandom_range(0, 1) ? 8'd240 : 8'd16);
          pB[r][k][f] = ($urandom_range(0, 3) == 0) ? 8'($urandom) : ($urandom_range(0, 1) ? 8'd240 : 8'd16);
        end
    for (int f = 0; f < 64; f++) begin
      bnA[f].a = bn_t'($urandom_range(16, 48)); bnA[f].b = bn_t'($urandom_range(0, 12));
      bnB[f].a = bn_t'($urandom_range(16, 48)); bnB[f].b = bn_t'($urandom_range(0, 12));
    end
    for (int c = 0; c < C; c++)
      for (int y = 0; y < HA; y++)
        for (int x = 0; x < HA; x++) begin
          intensity[c][y][x] = 8'($urandom_range(0, 255));
          for (int t = 0; t < T; t++) inA[t][c][y][x] = ($urandom_range(0, 255) < intensity[c][y][x]);
        end
    for (int i = 0; i < OB*OB; i++) for (int f = 0; f < 64; f++) counts[i][f] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    for (int mc = 0; mc < N_MC; mc++) begin
      // ---- layer A: 6x6x64 input spikes -> 4x4x64 output spikes ----
      load_bn(0);
      stream_weights(0);
      for (int t = 0; t < T; t++)
        for (int oy = 0; oy < OA; oy++)
          for (int ox = 0; ox < OA; ox++) begin
            for (int c = 0; c < C; c++)
              for (int ky = 0; ky < 3; ky++)
                for (int kx = 0; kx < 3; kx++)
                  field[c*3+ky][kx] = inA[t][c][oy+ky][ox+kx];
            do_pass(field, oy*OA + ox, t == 0, TH_A, bnA, got);
            for (int f = 0; f < 64; f++) begin
              outA[t][f][oy][ox] = got[f];
              n_spk_a += got[f];
            end
          end
      // ---- layer B: 4x4x64 spikes of layer A -> 2x2x64 ----
      load_bn(1);
      stream_weights(1);
      for (int t = 0; t < T; t++)
        for (int oy = 0; oy < OB; oy++)
          for (int ox = 0; ox < OB; ox++) begin
            for (int c = 0; c < C; c++)
              for (int ky = 0; ky < 3; ky++)
                for (int kx = 0; kx < 3; kx++)
                  field[c*3+ky][kx] = outA[t][c][oy+ky][ox+kx];
            do_pass(field, oy*OB + ox, t == 0, TH_B, bnB, got);
            for (int f = 0; f < 64; f++) begin
              counts[oy*OB + ox][f] += got[f];
              n_spk_b += got[f];
            end
          end
    end
    chk(n_spk_a > 0, "layer A never spiked");
    chk(n_spk_b > 0, "layer B never spiked");
    $display("layer A spikes %0d, layer B spikes %0d over %0d samples x %0d steps", n_spk_a, n_spk_b, N_MC, T);
    begin
      string line;
      line = "";
      for (int f = 0; f < 16; f++) line = {line, $sformatf(" %0d", counts[0][f])};
      $display("layer B position (0,0), filters 0-15, spike counts out of %0d:%s", N_MC * T, line);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
