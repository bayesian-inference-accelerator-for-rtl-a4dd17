// aggregation_core: the four shared neuron units and their schedule.
//
// After a convolution pass the N_PE sums sit in the temporary buffer. On
// 'start' this core walks through them in NF/NN groups of NN (16 groups of 4):
// in the cycle it issues group g it reads the sums of filters NN*g..NN*g+NN-1
// from the temporary buffer ('grp') and the stored potentials of the same
// neurons from the neuron state memory (word nbase/NN + g); one clock later
// the NN neuron units apply BN and IF, write the new potentials back and
// record the NN output spikes. 64 sums take 17 clocks; 'done' pulses in the
// clock after the last write, when 'spikes' holds all 64 output spikes.
//
// The BN coefficients of the current 64 filters are kept in a register file
// the host writes through bn_we/bn_idx/bn_coef. 'nbase' (the neuron index of
// filter 0, a multiple of NN), 'first' and 'theta' are sampled on 'start'.
// Sharing four neurons among the PEs follows the paper; the schedule and the
// coefficient store are this design's choices.
module aggregation_core
  import bsnn_pkg::*;
#(
  parameter int unsigned NF  = N_PE,
  parameter int unsigned NN  = N_NEU,
  parameter int unsigned NNR = N_NEURONS,
  localparam int unsigned NG  = NF / NN,
  localparam int unsigned GW  = $clog2(NG),
  localparam int unsigned SAW = $clog2(NNR / NN),
  localparam int unsigned NIW = $clog2(NNR)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // pass control
  input  logic                  start,
  input  logic [NIW-1:0]        nbase,
  input  logic                  first,
  input  mem_t                  theta,
  output logic                  busy,
  output logic                  done,
  output logic [NF-1:0]         spikes,
  // BN coefficient writes from the host
  input  logic                  bn_we,
  input  logic [$clog2(NF)-1:0] bn_idx,
  input  bn_coef_t              bn_coef,
  // temporary buffer read
  output logic [GW-1:0]         grp,
  input  acc_t                  sums [NN],
  // neuron state memory
  output logic [SAW-1:0]        st_raddr,
  input  logic [U_W-1:0]        st_rdata [NN],
  output logic [NN-1:0]         st_we,
  output logic [SAW-1:0]        st_waddr,
  output logic [U_W-1:0]        st_wdata [NN]
);

  bn_coef_t        bn_q [NF];
  logic [SAW-1:0]  base_q;
  logic            first_q;
  mem_t            theta_q;
  logic [GW-1:0]   cnt;
  logic            s1_valid;
  logic [GW-1:0]   s1_grp;
  acc_t            s1_sums [NN];
  mem_t            u_new [NN];
  logic            spk   [NN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < NF; f++) bn_q[f] <= '0;
    end else if (bn_we) begin
      bn_q[bn_idx] <= bn_coef;
    end
  end

  // Issue stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      cnt     <= '0;
      base_q  <= '0;
      first_q <= 1'b0;
      theta_q <= '0;
    end else if (start && !busy) begin
      busy    <= 1'b1;
      cnt     <= '0;
      base_q  <= SAW'(nbase >> $clog2(NN));
      first_q <= first;
      theta_q <= theta;
    end else if (busy) begin
      cnt <= cnt + 1'b1;
      if (cnt == GW'(NG - 1)) busy <= 1'b0;
    end
  end

  assign grp      = cnt;
  assign st_raddr = base_q + SAW'(cnt);

  // Update stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_grp   <= '0;
      for (int j = 0; j < NN; j++) s1_sums[j] <= '0;
      done     <= 1'b0;
      spikes   <= '0;
    end else begin
      s1_valid <= busy;
      s1_grp   <= cnt;
      for (int j = 0; j < NN; j++) s1_sums[j] <= sums[j];
      done     <= s1_valid && (s1_grp == GW'(NG - 1));
      if (s1_valid)
        for (int j = 0; j < NN; j++) spikes[NN*s1_grp + j] <= spk[j];
    end
  end

  for (genvar j = 0; j < NN; j++) begin : g_neu
    neuron u_neuron (
      .acc  (s1_sums[j]),
      .bn   (bn_q[NN*s1_grp + j]),
      .theta(theta_q),
      .u_in (mem_t'(st_rdata[j])),
      .first(first_q),
      .u_out(u_new[j]),
      .spike(spk[j])
    );
    assign st_wdata[j] = u_new[j];
  end

  assign st_we    = {NN{s1_valid}};
  assign st_waddr = base_q + SAW'(s1_grp);

  // A new pass may only start when the previous one is over.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy && !s1_valid);

endmodule
