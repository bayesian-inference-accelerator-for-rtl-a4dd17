// pe: multiplier-less processing element for one filter.
//
// With binary spike inputs the product x*w is either w or 0, so each of the K
// multipliers is a 2:1 multiplexer whose select is the input spike x[k] and
// whose data inputs are 0 and the two-bit weight w[k] (+1 = 2'b01,
// -1 = 2'b11). An adder sums the K mux outputs y[k] with its own fed-back
// output. Per clock the PE takes one filter row (K weights and K spikes), so a
// K x K x C filter takes K*C clocks; the paper gives this structure and the
// 3-clock 3x3 rate.
//
// Timing: with 'en' high the row's sum is added at the clock edge; 'clear'
// together with 'en' starts a new sum with this row's products. 'acc' is the
// registered sum. Accumulator width is this design's choice (ACC_W bits,
// 16 by default, enough for 9*512 products).
module pe
  import bsnn_pkg::*;
#(
  parameter int unsigned KW = K,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 en,
  input  logic [KW-1:0]        x,
  input  wt_t                  w [KW],
  output logic signed [AW-1:0] acc
);

  wt_t y [KW];
  logic signed [AW-1:0] row_sum;

  always_comb begin
    row_sum = '0;
    for (int k = 0; k < KW; k++) begin
      y[k]    = x[k] ? w[k] : 2'sb00;
      row_sum = row_sum + AW'(y[k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (en)     acc <= (clear ? '0 : acc) + row_sum;
  end

endmodule
