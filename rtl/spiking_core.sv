// spiking_core: N_PE processing elements working in parallel, one per filter.
//
// All PEs see the same K input spikes each clock (the shared receptive field)
// and each its own filter row of K two-bit weights; after K*C clocks PE f
// holds the convolution sum of filter f. 'clear' and 'en' go to every PE
// alike. The 64-PE array follows the paper.
module spiking_core
  import bsnn_pkg::*;
#(
  parameter int unsigned NF = N_PE
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   en,
  input  logic [K-1:0] x,
  input  wt_t    w [K][NF],
  output acc_t   acc [NF]
);

  for (genvar f = 0; f < NF; f++) begin : g_pe
    wt_t wf [K];
    for (genvar k = 0; k < K; k++) begin : g_w
      assign wf[k] = w[k][f];
    end
    pe u_pe (
      .clk, .rst_n, .clear, .en, .x,
      .w  (wf),
      .acc(acc[f])
    );
  end

endmodule
