// toeplitz_string_gen: builds the Toeplitz string ts of length bs+m-1.
//
// The string defines the bs-column, m-row Toeplitz matrix shared by every
// block. On start the LFSR is seeded from raw data; then one PRNG bit is
// produced per clock and the bits are concatenated, the first bit becoming
// ts[0], until bs+m-1 bits exist. That one bit per clock is published; the
// bit order within ts (first bit at index 0) is this design's choice. Bits
// of the ts register above bs+m-2 are left at zero and are never used.
//
// Interface: pulse start with raw_seed and m valid. Timing: the seed is
// loaded in the start cycle, bits are written in the next BS+m-1 cycles, and
// done pulses in the cycle after the last write, so done comes BS+m cycles
// after start. ts and ts_len hold until the next start.
module toeplitz_string_gen #(
  parameter int unsigned BS       = tse_pkg::BS,
  parameter int unsigned M_MAX    = tse_pkg::M_MAX,
  parameter int unsigned SEED_RAW = tse_pkg::SEED_RAW
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [SEED_RAW-1:0]               raw_seed,
  input  logic [$clog2(M_MAX+1)-1:0]        m,
  output logic                              busy,
  output logic                              done,
  output logic [BS+M_MAX-2:0]               ts,
  output logic [$clog2(BS+M_MAX)-1:0]       ts_len
);
  localparam int unsigned TSW = BS + M_MAX - 1;
  localparam int unsigned NW  = $clog2(BS + M_MAX);

  logic [NW-1:0] idx_q;
  logic          bit_out;
  logic          step;
  logic [tse_pkg::LFSR_W-1:0] lfsr_state;

  assign step = busy;

  lfsr_prng #(.SEED_RAW(SEED_RAW)) u_lfsr (
    .clk, .rst_n,
    .load    (start),
    .raw_seed(raw_seed),
    .step    (step),
    .prng_out(bit_out),
    .state   (lfsr_state)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      ts     <= '0;
      ts_len <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        idx_q  <= '0;
        busy   <= 1'b1;
        ts     <= '0;
        ts_len <= NW'(BS) + NW'(m) - 1'b1;
      end else if (busy) begin
        ts[idx_q] <= bit_out;
        idx_q     <= idx_q + 1'b1;
        if (idx_q == ts_len - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                               busy |-> idx_q < NW'(TSW));
  a_lfsr_live: assert property (@(posedge clk) disable iff (!rst_n) busy |-> lfsr_state != '0);
endmodule
