// lfsr_prng: 25-bit linear feedback shift register that makes the seed bits
// of the Toeplitz matrix, one bit per clock.
//
// Following the published design, the register has 25 stages numbered 25
// (left) to 1 (right). Each clock the contents move one stage towards stage
// 1, the bit leaving stage 1 is the PRNG output, and stage 25 receives
// stage1 ^ stage2 ^ stage17 ^ stage23. The seed is 23 bits of raw QRNG data
// with two further bits fixed to one so that the state can never be all
// zero. Which two stages hold the ones, and that the raw bits fill the
// remaining stages in order, are this design's choices: stages 25 and 1 are
// the ones, raw_seed[0] goes to stage 2 and raw_seed[22] to stage 24.
//
// Interface: load (one cycle) sets the state from raw_seed; each cycle with
// step high shifts once. prng_out is stage 1, the bit that the next step
// emits. state is visible for testing.
module lfsr_prng #(
  parameter int unsigned W        = tse_pkg::LFSR_W,
  parameter int unsigned SEED_RAW = tse_pkg::SEED_RAW,
  parameter logic [W-1:0] TAPS    = tse_pkg::LFSR_TAPS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [SEED_RAW-1:0] raw_seed,
  input  logic                step,
  output logic                prng_out,
  output logic [W-1:0]        state
);
  logic fb;

  initial assert (SEED_RAW + 2 == W) else $error("seed must leave two fixed ones");

  assign fb       = ^(state & TAPS);
  assign prng_out = state[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= {1'b1, {(W-2){1'b0}}, 1'b1};
    else if (load)  state <= {1'b1, raw_seed, 1'b1};
    else if (step)  state <= {fb, state[W-1:1]};
  end

  // The two fixed ones keep the state away from the all-zero lock-up.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state != '0);
endmodule
