// bernoulli_sampler: turns Bernoulli parameters into sampled binary weights.
//
// For each of the N lanes an 8-bit comparator checks the quantized Bernoulli
// parameter p (from the host) against a uniform 8-bit random number r (from
// the PRNG bank); the comparison selects the weight: +1 when p > r, otherwise
// -1, so that Pr(w = +1) = p/256. The weight leaves in the two-bit signed code
// the processing elements use (2'b01 = +1, 2'b11 = -1). The comparator and the
// select follow the paper; the direction of the comparison follows its
// equation w = +1 if r < p. Purely combinational, all N lanes in one clock.
module bernoulli_sampler
  import bsnn_pkg::*;
#(
  parameter int unsigned N = N_PE
) (
  input  rn_t p [N],
  input  rn_t r [N],
  output wt_t w [N]
);

  always_comb begin
    for (int i = 0; i < N; i++)
      w[i] = (p[i] > r[i]) ? W_POS : W_NEG;
  end

endmodule
