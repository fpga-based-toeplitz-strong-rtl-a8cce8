// tse_pkg: sizes and helpers shared by the Toeplitz post-processing core.
//
// The numbers below are the main configuration of the design: a raw sample of
// 800,000 bits (100,000 bytes from an 8-bit ADC), cut into batches of K = 40
// blocks of bs = 1000 bits, i.e. L = 40,000 bits per batch and 20 batches.
// The 25-bit LFSR with two seed bits forced to one and its tap stages also
// follow the published description. The leftover-hash-lemma penalty
// 2*log2(1/eps) = 25 comes from eps = 2^-12.5. Chosen here: the largest
// output length M_MAX = 800 (the highest extraction ratio, 0.8, of the
// evaluated set), the 16 fractional bits of the fixed-point logarithm, and
// the position of the two fixed seed ones (stages 25 and 1).
package tse_pkg;

  // Raw sample and batching.
  localparam int unsigned SAMPLE_W  = 8;        // ADC bits per sample
  localparam int unsigned S_BITS    = 800_000;  // sample size S in bits
  localparam int unsigned BS        = 1000;     // block size bs
  localparam int unsigned K_BLOCKS  = 40;       // parallel blocks per batch
  localparam int unsigned L_BITS    = K_BLOCKS * BS;   // batch size L
  localparam int unsigned N_BATCH   = S_BITS / L_BITS; // batches per sample
  localparam int unsigned N_SAMPLES = S_BITS / SAMPLE_W;

  // Output length.
  localparam int unsigned M_MAX     = 800;      // largest supported m
  localparam int unsigned EPS_PEN   = 25;       // 2*log2(1/eps), eps = 2^-12.5
  localparam int unsigned LOG_F     = 16;       // fractional bits of log2

  // LFSR: 25 stages, feedback = stage1 ^ stage2 ^ stage17 ^ stage23 into
  // stage 25, output from stage 1. Stage n is bit n-1 of the state.
  localparam int unsigned LFSR_W    = 25;
  localparam int unsigned SEED_RAW  = 23;       // seed bits taken from raw data
  localparam logic [LFSR_W-1:0] LFSR_TAPS = 25'h0_41_0003; // bits 22,16,1,0

  // Fixed-point log2 of a positive integer with f fractional bits, by the
  // same squaring method as log2_fixed. Used for constants at elaboration.
  function automatic longint unsigned log2_q(input longint unsigned x,
                                             input int unsigned f);
    longint unsigned y, r;
    int unsigned p;
    p = 0;
    for (int i = 0; i < 63; i++) if (x >> i != 0) p = i;
    // mantissa in Q1.30
    if (p <= 30) y = x << (30 - p);
    else         y = x >> (p - 30);
    r = longint'(p);
    for (int i = 0; i < int'(f); i++) begin
      y = (y * y) >> 30;
      r = r << 1;
      if (y >= (longint'(2) << 30)) begin
        r = r | 1;
        y = y >> 1;
      end
    end
    return r;
  endfunction

endpackage
