// neuron: batch normalisation followed by an integrate-and-fire update.
//
// The BN step uses two coefficients per filter, v = ((a * acc) >>> SHIFT) + b,
// with a and b 8-bit signed and SHIFT fractional bits in a. The IF step adds v
// to the membrane potential (taken as 0 when 'first' marks the first timestep
// of a new input), saturates to U_W bits, fires when the result reaches the
// threshold (U >= theta) and then subtracts theta (reset-by-subtraction).
// BN folded to two parameters, IF neurons and reset-by-subtraction follow the
// paper; the fixed-point form, the saturation and the >= convention are this
// design's choices. Purely combinational; 'theta' is expected positive.
module neuron
  import bsnn_pkg::*;
#(
  parameter int unsigned AW    = ACC_W,
  parameter int unsigned UW    = U_W,
  parameter int unsigned SHIFT = BN_SHIFT
) (
  input  logic signed [AW-1:0] acc,
  input  bn_coef_t             bn,
  input  logic signed [UW-1:0] theta,
  input  logic signed [UW-1:0] u_in,
  input  logic                 first,
  output logic signed [UW-1:0] u_out,
  output logic                 spike
);

  localparam int unsigned PW = AW + BN_W;
  localparam logic signed [PW+1:0] UMAX = (PW+2)'((1 << (UW-1)) - 1);
  localparam logic signed [PW+1:0] UMIN = -(PW+2)'(1 << (UW-1));

  logic signed [PW-1:0]  prod;
  logic signed [PW+1:0]  v, u_sum;
  logic signed [UW-1:0]  u_sat;

  always_comb begin
    prod  = PW'(bn.a) * PW'(acc);
    v     = (PW+2)'(prod >>> SHIFT) + (PW+2)'(bn.b);
    u_sum = v + (first ? (PW+2)'(0) : (PW+2)'(u_in));
    if (u_sum > UMAX)      u_sat = UW'(UMAX);
    else if (u_sum < UMIN) u_sat = UW'(UMIN);
    else                   u_sat = UW'(u_sum);
    spike = (u_sat >= theta);
    u_out = spike ? u_sat - theta : u_sat;
  end

endmodule
