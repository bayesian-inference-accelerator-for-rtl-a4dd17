// prng_unit: bank of 32-bit LFSRs whose every byte is used as a random number.
//
// Each of the N_LFSR registers is a Galois LFSR. All four bytes of a register
// are tapped, so the bank delivers 4*N_LFSR = 64 eight-bit random numbers per
// clock: rn[4*i+b] is byte b (bits 8b+7..8b) of LFSR i. Reusing all bytes of
// one register, and 16 registers for 64 numbers, follow the paper; the
// feedback polynomial (x^32+x^22+x^2+x+1, mask TAPS) and the seeds are this
// design's choice, as the paper names neither.
//
// Interface: 'advance' steps every LFSR by one; the numbers on 'rn' are the
// registers' current contents, so a consumer samples them in the same cycle it
// raises 'advance' and sees fresh numbers on the next. 'seed_we' loads one
// register (a zero seed is replaced by 1, as zero is the LFSR's stuck state).
// Reset loads SEED0 ^ (i * SEED_STEP) into register i.
module prng_unit
  import bsnn_pkg::*;
#(
  parameter int unsigned         N       = N_LFSR,
  parameter logic [LFSR_W-1:0]   TAPS    = 32'h8020_0003,
  parameter logic [LFSR_W-1:0]   SEED0   = 32'hACE1_2468,
  parameter logic [LFSR_W-1:0]   SEED_STEP = 32'h9E37_79B9
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   seed_we,
  input  logic [$clog2(N)-1:0]   seed_idx,
  input  logic [LFSR_W-1:0]      seed,
  input  logic                   advance,
  output rn_t                    rn [4*N]
);

  logic [LFSR_W-1:0] state [N];

  function automatic logic [LFSR_W-1:0] lfsr_next(input logic [LFSR_W-1:0] s);
    return (s >> 1) ^ (s[0] ? TAPS : '0);
  endfunction

  function automatic logic [LFSR_W-1:0] nonzero(input logic [LFSR_W-1:0] s);
    return (s == '0) ? LFSR_W'(1) : s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        state[i] <= nonzero(SEED0 ^ (LFSR_W'(i) * SEED_STEP));
    end else begin
      for (int i = 0; i < N; i++) begin
        if (seed_we && seed_idx == i[$clog2(N)-1:0])
          state[i] <= nonzero(seed);
        else if (advance)
          state[i] <= lfsr_next(state[i]);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++)
      for (int b = 0; b < 4; b++)
        rn[4*i+b] = state[i][8*b +: 8];
  end

  // An LFSR must never hold zero.
  for (genvar i = 0; i < N; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) state[i] != '0);
  end

endmodule
