// ram_1r1w: simple dual-port RAM, one synchronous write port and one
// synchronous read port (read data one clock after the address), as an FPGA
// block RAM provides. Reading an address in the cycle it is written returns the
// old contents. Contents are not reset; users write before they read.
module ram_1r1w #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
