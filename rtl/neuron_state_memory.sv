// neuron_state_memory: the membrane potentials of up to N_NEURONS neurons.
//
// 64 kB by default: 65536 eight-bit potentials, enough for a 64-channel 32x32
// feature map. The store is split into NB banks so the NB shared neuron units
// each read and write one potential per clock: neuron n lives in bank n mod NB
// at word n div NB, and one word address serves all banks. Reads return data
// one clock after 'raddr'; writes take per-bank enables. The 64 kB size and
// the four neuron units come from the paper; the banking is this design's
// choice.
module neuron_state_memory
  import bsnn_pkg::*;
#(
  parameter int unsigned NN   = N_NEURONS,
  parameter int unsigned NB   = N_NEU,
  parameter int unsigned UW   = U_W,
  localparam int unsigned DEPTH = NN / NB,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output logic [UW-1:0] rdata [NB],
  input  logic [NB-1:0] we,
  input  logic [AW-1:0] waddr,
  input  logic [UW-1:0] wdata [NB]
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    ram_1r1w #(.W(UW), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we   (we[b]),
      .waddr(waddr),
      .wdata(wdata[b]),
      .raddr(raddr),
      .rdata(rdata[b])
    );
  end

endmodule
