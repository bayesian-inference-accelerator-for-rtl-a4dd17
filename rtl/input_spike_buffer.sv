// input_spike_buffer: the input spikes of the current receptive field.
//
// The host slides the window over the input feature map and writes the
// C_in x K x K spikes of one output position here, one filter row (K spikes,
// bit kx = column kx) per write, at row = c*K + ky. The convolution pass reads
// one row per clock; read data appears one clock after 'raddr'. The paper has
// the host do the image sliding; this buffer's form is this design's choice.
module input_spike_buffer
  import bsnn_pkg::*;
#(
  parameter int unsigned ROWS = MAX_CIN * K,
  localparam int unsigned RAW = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [RAW-1:0]  waddr,
  input  logic [K-1:0]    wdata,
  input  logic [RAW-1:0]  raddr,
  output logic [K-1:0]    rdata
);

  ram_1r1w #(.W(K), .DEPTH(ROWS)) u_ram (
    .clk, .we, .waddr, .wdata, .raddr, .rdata
  );

endmodule
