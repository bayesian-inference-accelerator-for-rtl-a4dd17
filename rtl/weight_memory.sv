// weight_memory: store of the sampled two-bit weights of the N_PE filters.
//
// The store is split into K banks, one per kernel column kx. A filter row is
// addressed by row = c*K + ky (input channel c, kernel row ky). Writing: each
// clock the sampler delivers one kernel position (row, kx) for all N_PE
// filters, which goes into bank kx at word 'row'. Reading: one address returns
// the K weights of that row for every filter, which is what a processing
// element consumes per clock. Read data appears one clock after 'raddr'.
// The weight memory itself is named in the paper; the banking and the depth
// (MAX_CIN*K rows, enough for 512 input channels) are this design's choice.
module weight_memory
  import bsnn_pkg::*;
#(
  parameter int unsigned NF   = N_PE,
  parameter int unsigned ROWS = MAX_CIN * K,
  localparam int unsigned RAW = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [RAW-1:0]       wrow,
  input  logic [1:0]           wkx,
  input  wt_t                  wdata [NF],
  input  logic [RAW-1:0]       raddr,
  output wt_t                  rdata [K][NF]
);

  logic [2*NF-1:0] wpacked;
  logic [2*NF-1:0] rpacked [K];

  always_comb begin
    for (int f = 0; f < NF; f++) wpacked[2*f +: 2] = wdata[f];
  end

  for (genvar kx = 0; kx < K; kx++) begin : g_bank
    ram_1r1w #(.W(2*NF), .DEPTH(ROWS)) u_bank (
      .clk  (clk),
      .we   (we && wkx == 2'(kx)),
      .waddr(wrow),
      .wdata(wpacked),
      .raddr(raddr),
      .rdata(rpacked[kx])
    );
  end

  always_comb begin
    for (int kx = 0; kx < K; kx++)
      for (int f = 0; f < NF; f++)
        rdata[kx][f] = wt_t'(rpacked[kx][2*f +: 2]);
  end

endmodule
