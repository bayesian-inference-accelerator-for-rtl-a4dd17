// bsnn_pkg: constants and types shared by the Bayesian binary SNN accelerator.
//
// The numbers marked "paper" are the design's published configuration: 64
// processing elements (one per filter), 16 LFSRs of 32 bits each giving four
// 8-bit random numbers, 8-bit Bernoulli parameters, four shared neuron units
// and a 64 kB membrane-state store. The rest (accumulator width, BN shift,
// largest channel count) are this implementation's choices.
package bsnn_pkg;

  // --- paper ---
  localparam int unsigned N_PE      = 64;     // PEs / filters processed in parallel
  localparam int unsigned N_LFSR    = 16;     // LFSRs in the PRNG bank
  localparam int unsigned LFSR_W    = 32;     // LFSR length
  localparam int unsigned RN_W      = 8;      // random number / Bernoulli parameter width
  localparam int unsigned K         = 3;      // filter size (3x3)
  localparam int unsigned N_NEU     = 4;      // neuron units shared by the 64 PEs
  localparam int unsigned U_W       = 8;      // membrane potential width (8-bit model)
  localparam int unsigned N_NEURONS = 65536;  // 64 kB of 8-bit states

  // --- implementation choices ---
  localparam int unsigned MAX_CIN   = 512;    // largest input-channel count (ResNet-18)
  localparam int unsigned ACC_W     = 16;     // PE accumulator width
  localparam int unsigned BN_W      = 8;      // BN coefficient width
  localparam int unsigned BN_SHIFT  = 4;      // fractional bits of the BN scale

  // Two-bit signed weight / product code: 2'b01 = +1, 2'b11 = -1, 2'b00 = 0.
  typedef logic signed [1:0] wt_t;
  localparam wt_t W_POS = 2'sb01;
  localparam wt_t W_NEG = 2'sb11;

  typedef logic [RN_W-1:0]        rn_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [U_W-1:0]   mem_t;
  typedef logic signed [BN_W-1:0]  bn_t;

  // One filter's two BN coefficients: v = ((a * acc) >>> BN_SHIFT) + b.
  typedef struct packed {
    bn_t a;
    bn_t b;
  } bn_coef_t;

endpackage
