// min_entropy_eval: min-entropy per ADC sample of the raw QRNG data.
//
// The raw sample is N 8-bit ADC values. The unit builds a histogram of the
// values (one counter per possible value), keeps the largest count cmax as
// it goes, and then returns Hmin = -log2(cmax/N) = log2(N) - log2(cmax)
// bits per sample in unsigned fixed point with F fractional bits. log2(N) is
// a constant worked out at elaboration; log2(cmax) comes from log2_fixed.
// The published description states only that the min-entropy is evaluated
// (2.6 bits per 8 bits for its data); the most-probable-value estimator,
// the running maximum and the fixed-point format are this design's choices.
//
// Interface: pulse start to clear the histogram, then present N samples on
// smp_valid/smp_data (any number of idle cycles between them). Timing: the
// histogram takes one cycle per sample; done pulses F+3 cycles after the
// last sample, with hmin and cmax held until the next start.
module min_entropy_eval #(
  parameter int unsigned SW        = tse_pkg::SAMPLE_W,
  parameter int unsigned N_SAMPLES = tse_pkg::N_SAMPLES,
  parameter int unsigned F         = tse_pkg::LOG_F
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic                            smp_valid,
  input  logic [SW-1:0]                   smp_data,
  output logic                            busy,
  output logic                            done,
  output logic [$clog2(N_SAMPLES+1)-1:0]  cmax,
  output logic [$clog2(SW+1)+F-1:0]       hmin
);
  localparam int unsigned CW   = $clog2(N_SAMPLES + 1);
  localparam int unsigned NBIN = 1 << SW;
  localparam int unsigned HW   = $clog2(SW + 1) + F;
  localparam int unsigned LW   = $clog2(CW) + F;
  localparam longint unsigned LOG2N = tse_pkg::log2_q(longint'(N_SAMPLES), F);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_LOG, S_WAIT} state_t;
  state_t state_q;

  logic [CW-1:0] hist_q [NBIN];
  logic [CW-1:0] cnt_q;
  logic [CW-1:0] inc;
  logic          lg_start, lg_busy, lg_done;
  logic [LW-1:0] lg_res;

  assign inc = hist_q[smp_data] + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
      cmax    <= '0;
      hmin    <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      for (int i = 0; i < int'(NBIN); i++) hist_q[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: ;
        S_ACC: if (smp_valid) begin
          hist_q[smp_data] <= inc;
          if (inc > cmax) cmax <= inc;
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(N_SAMPLES - 1)) state_q <= S_LOG;
        end
        S_LOG:  state_q <= S_WAIT;
        S_WAIT: if (lg_done) begin
          hmin    <= HW'(LOG2N - longint'(lg_res));
          busy    <= 1'b0;
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
      if (start) begin
        for (int i = 0; i < int'(NBIN); i++) hist_q[i] <= '0;
        cnt_q   <= '0;
        cmax    <= '0;
        busy    <= 1'b1;
        state_q <= S_ACC;
      end
    end
  end

  assign lg_start = (state_q == S_LOG);

  a_log_idle: assert property (@(posedge clk) disable iff (!rst_n) lg_start |-> !lg_busy);

  log2_fixed #(.IN_W(CW), .F(F), .MW(CW + 8)) u_log2 (
    .clk, .rst_n,
    .start (lg_start),
    .x     (cmax),
    .busy  (lg_busy),
    .done  (lg_done),
    .result(lg_res)
  );
endmodule
