// temp_buffer: holds the N_PE convolution sums of a finished pass.
//
// 'load' captures all N_PE PE sums at once, freeing the PEs; the aggregation
// core then takes them N_NEU at a time: 'dout' is the group 'grp' (filters
// N_NEU*grp .. N_NEU*grp+N_NEU-1), read combinationally. The paper says PE
// results go to temporary buffer memories before neuron processing; building
// them as a register file with a four-word read is this design's choice.
module temp_buffer
  import bsnn_pkg::*;
#(
  parameter int unsigned NF = N_PE,
  parameter int unsigned NN = N_NEU,
  localparam int unsigned GW = $clog2(NF / NN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  acc_t          din  [NF],
  input  logic [GW-1:0] grp,
  output acc_t          dout [NN]
);

  acc_t buf_q [NF];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < NF; f++) buf_q[f] <= '0;
    end else if (load) begin
      for (int f = 0; f < NF; f++) buf_q[f] <= din[f];
    end
  end

  always_comb begin
    for (int j = 0; j < NN; j++) dout[j] = buf_q[NN*grp + j];
  end

endmodule
