// bsnn_accel: programmable-logic part of the Bayesian binary SNN accelerator.
//
// A Bayesian network with Bernoulli weights is run as an ensemble in time:
// for each Monte-Carlo sample the host streams the 8-bit Bernoulli parameters
// p of the current 64 filters; on the way into the weight memory each group
// of 64 parameters is compared with 64 fresh 8-bit random numbers from the
// LFSR bank (prng_unit, bernoulli_sampler), so the stored two-bit weights are
// a new sample of the network. The host then slides the receptive field over
// the input: for each output position it writes the field's spikes into the
// input spike buffer and starts a pass. The 64 multiplier-less PEs
// (spiking_core) accumulate one filter row per clock, the sums move to the
// temporary buffer, and four neuron units (aggregation_core) apply BN and
// integrate-and-fire against the 64 kB neuron state memory and return 64
// output spikes. Repeating the passes for T timesteps and n_MC samples, and
// summing the output spikes, is the host's job.
//
// Host interface (all synchronous to clk, active-high strobes):
//   seed_*  load an LFSR seed;
//   p_*     one kernel position (row = c*3+ky, column kx) of 64 parameters,
//           sampled and stored in the same clock;
//   spk_*   one row of three input spikes;
//   bn_*    BN coefficients (a, b) of one of the 64 filters;
//   run     start a pass with n_cin input channels, neuron base index nbase
//           (multiple of 4; filter f updates neuron nbase+f), first-timestep
//           flag and threshold; busy/done/spikes report it.
// The host must not write p_* or spk_* while busy.
// The block split follows the paper's architecture figure; the host protocol
// is this design's own.
module bsnn_accel
  import bsnn_pkg::*;
#(
  parameter int unsigned NF   = N_PE,
  parameter int unsigned MAXC = MAX_CIN,
  parameter int unsigned NNR  = N_NEURONS,
  localparam int unsigned RAW = $clog2(MAXC * K),
  localparam int unsigned CW  = $clog2(MAXC + 1),
  localparam int unsigned NIW = $clog2(NNR),
  localparam int unsigned NL  = NF / 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // PRNG seeding
  input  logic                  seed_we,
  input  logic [$clog2(NL)-1:0] seed_idx,
  input  logic [LFSR_W-1:0]     seed,
  // Bernoulli parameters -> sampled weights
  input  logic                  p_we,
  input  logic [RAW-1:0]        p_row,
  input  logic [1:0]            p_kx,
  input  rn_t                   p [NF],
  // input spikes
  input  logic                  spk_we,
  input  logic [RAW-1:0]        spk_row,
  input  logic [K-1:0]          spk_data,
  // BN coefficients
  input  logic                  bn_we,
  input  logic [$clog2(NF)-1:0] bn_idx,
  input  bn_coef_t              bn_coef,
  // pass control
  input  logic                  run,
  input  logic [CW-1:0]         n_cin,
  input  logic [NIW-1:0]        nbase,
  input  logic                  first,
  input  mem_t                  theta,
  output logic                  busy,
  output logic                  done,
  output logic [NF-1:0]         spikes
);

  localparam int unsigned GW  = $clog2(NF / N_NEU);
  localparam int unsigned SAW = $clog2(NNR / N_NEU);

  rn_t            rn [NF];
  wt_t            w_sampled [NF];
  wt_t            w_row [K][NF];
  logic [K-1:0]   x_row;
  acc_t           pe_acc [NF];
  acc_t           grp_sums [N_NEU];
  logic [GW-1:0]  grp;
  logic [RAW-1:0] rd_addr;
  logic           pe_clear, pe_en, tb_load, agg_start, agg_done, agg_busy;
  logic [SAW-1:0] st_raddr, st_waddr;
  logic [U_W-1:0] st_rdata [N_NEU];
  logic [U_W-1:0] st_wdata [N_NEU];
  logic [N_NEU-1:0] st_we;
  mem_t           theta_q;
  logic [NIW-1:0] nbase_q;
  logic           first_q;

  // Pass configuration, latched with 'run'.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      theta_q <= '0;
      nbase_q <= '0;
      first_q <= 1'b0;
    end else if (run && !busy) begin
      theta_q <= theta;
      nbase_q <= nbase;
      first_q <= first;
    end
  end

  controller #(.MAXC(MAXC)) u_ctrl (
    .clk, .rst_n, .run, .n_cin, .busy, .done,
    .rd_addr, .pe_clear, .pe_en, .tb_load, .agg_start, .agg_done
  );

  prng_unit #(.N(NL)) u_prng (
    .clk, .rst_n, .seed_we, .seed_idx, .seed,
    .advance(p_we),
    .rn
  );

  bernoulli_sampler #(.N(NF)) u_sampler (
    .p, .r(rn), .w(w_sampled)
  );

  weight_memory #(.NF(NF), .ROWS(MAXC * K)) u_wmem (
    .clk,
    .we   (p_we),
    .wrow (p_row),
    .wkx  (p_kx),
    .wdata(w_sampled),
    .raddr(rd_addr),
    .rdata(w_row)
  );

  input_spike_buffer #(.ROWS(MAXC * K)) u_ibuf (
    .clk,
    .we   (spk_we),
    .waddr(spk_row),
    .wdata(spk_data),
    .raddr(rd_addr),
    .rdata(x_row)
  );

  spiking_core #(.NF(NF)) u_core (
    .clk, .rst_n,
    .clear(pe_clear),
    .en   (pe_en),
    .x    (x_row),
    .w    (w_row),
    .acc  (pe_acc)
  );

  temp_buffer #(.NF(NF)) u_tbuf (
    .clk, .rst_n,
    .load(tb_load),
    .din (pe_acc),
    .grp,
    .dout(grp_sums)
  );

  aggregation_core #(.NF(NF), .NNR(NNR)) u_agg (
    .clk, .rst_n,
    .start (agg_start),
    .nbase (nbase_q),
    .first (first_q),
    .theta (theta_q),
    .busy  (agg_busy),
    .done  (agg_done),
    .spikes,
    .bn_we, .bn_idx, .bn_coef,
    .grp,
    .sums  (grp_sums),
    .st_raddr, .st_rdata, .st_we, .st_waddr, .st_wdata
  );

  neuron_state_memory #(.NN(NNR)) u_state (
    .clk,
    .raddr(st_raddr),
    .rdata(st_rdata),
    .we   (st_we),
    .waddr(st_waddr),
    .wdata(st_wdata)
  );

  // Host writes into the buffers the pass is reading are not allowed.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !p_we && !spk_we);
  assert property (@(posedge clk) disable iff (!rst_n) agg_busy |-> busy);

endmodule
