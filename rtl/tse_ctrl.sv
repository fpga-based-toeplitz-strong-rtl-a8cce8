// tse_ctrl: sequencer of the post-processing flow.
//
// After start the controller runs the one-time steps in order: it streams
// every byte of the sample memory into the min-entropy unit (one byte per
// clock), has the output length m computed, then has the Toeplitz string of
// bs+m-1 bits generated. It then runs the batch loop: for each of the
// S/L batches one load cycle (the batch word is read from the sample memory
// and the Toeplitz string is copied into the extractor's shift register)
// is followed by m compute cycles, each producing K output bits that are
// written to the output buffer one cycle later. One final cycle writes the
// last word. Extraction therefore takes N_BATCH*(m+1)+1 clocks, which for
// 20 batches is 20*m+21 (6021 clocks at m = 300), the count the published
// design reports. The order of the steps and the batch loop follow the
// published flow; the state encoding, the seed taken from the first 23 raw
// bits and the m_force override (used to run chosen extraction ratios) are
// this design's choices.
//
// Interface: start is a one-cycle pulse, ignored while busy. m_force = 0
// uses the computed m, otherwise m_force (clamped to M_MAX) is used. done
// pulses once when the last output word is written; out_words then holds
// the number of valid output-buffer words (N_BATCH*m).
module tse_ctrl #(
  parameter int unsigned S_BITS   = tse_pkg::S_BITS,
  parameter int unsigned L        = tse_pkg::L_BITS,
  parameter int unsigned SW       = tse_pkg::SAMPLE_W,
  parameter int unsigned M_MAX    = tse_pkg::M_MAX,
  parameter int unsigned SEED_RAW = tse_pkg::SEED_RAW
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic [$clog2(M_MAX+1)-1:0]           m_force,
  output logic                                 busy,
  output logic                                 done,
  output tse_ctrl_pkg::phase_t                 phase,
  // sample memory, byte read (min-entropy) and batch read
  output logic                                 brd_en,
  output logic [$clog2(S_BITS/L)-1:0]          brd_word,
  output logic [$clog2(L/SW)-1:0]              brd_byte,
  input  logic [SW-1:0]                        brd_data,
  output logic                                 wrd_en,
  output logic [$clog2(S_BITS/L)-1:0]          wrd_word,
  // min-entropy evaluation
  output logic                                 me_start,
  output logic                                 me_valid,
  output logic [SW-1:0]                        me_data,
  input  logic                                 me_done,
  // output length
  output logic                                 ol_start,
  input  logic                                 ol_done,
  input  logic [$clog2(M_MAX+1)-1:0]           ol_m,
  // Toeplitz string generation
  output logic                                 tg_start,
  output logic [SEED_RAW-1:0]                  raw_seed,
  output logic [$clog2(M_MAX+1)-1:0]           m_sel,
  input  logic                                 tg_done,
  // extractor array and output buffer
  output logic                                 arr_load,
  output logic                                 arr_shift,
  input  logic                                 arr_valid,
  output logic                                 ob_we,
  output logic [$clog2(S_BITS/L*M_MAX)-1:0]    ob_waddr,
  output logic [$clog2(S_BITS/L*M_MAX+1)-1:0]  out_words
);
  import tse_ctrl_pkg::*;

  localparam int unsigned NW   = S_BITS / L;
  localparam int unsigned NBY  = L / SW;
  localparam int unsigned WW   = $clog2(NW);
  localparam int unsigned BYW  = $clog2(NBY);
  localparam int unsigned MW   = $clog2(M_MAX + 1);
  localparam int unsigned OAW  = $clog2(NW * M_MAX);
  localparam int unsigned SEEDB = (SEED_RAW + SW - 1) / SW;  // bytes to capture

  phase_t          phase_q;
  logic [WW-1:0]   word_q;      // byte-stream word / batch index
  logic [BYW-1:0]  byte_q;
  logic            rd_last_q;   // the last byte read has been issued
  logic [MW-1:0]   j_q;         // compute cycle within the batch
  logic [OAW-1:0]  wptr_q;      // output word of the current compute cycle
  logic [$clog2(SEEDB+1)-1:0] seedn_q;
  logic [SEEDB*SW-1:0]        seed_sr_q;

  assign phase = phase_q;
  assign busy  = (phase_q != PH_IDLE);

  // Byte read stream for the min-entropy unit.
  assign brd_en   = (phase_q == PH_ENTROPY) && !rd_last_q;
  assign brd_word = word_q;
  assign brd_byte = byte_q;

  // The read data arrives one cycle after the enable.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) me_valid <= 1'b0;
    else        me_valid <= brd_en;
  end
  assign me_data  = brd_data;
  assign me_start = start && !busy;

  assign raw_seed = seed_sr_q[SEED_RAW-1:0];

  assign wrd_en    = (phase_q == PH_LOAD);
  assign wrd_word  = word_q;
  assign arr_load  = (phase_q == PH_LOAD);
  assign arr_shift = (phase_q == PH_COMPUTE);
  assign ob_we     = arr_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q   <= PH_IDLE;
      word_q    <= '0;
      byte_q    <= '0;
      rd_last_q <= 1'b0;
      j_q       <= '0;
      wptr_q    <= '0;
      ob_waddr  <= '0;
      seedn_q   <= '0;
      seed_sr_q <= '0;
      m_sel     <= '0;
      out_words <= '0;
      ol_start  <= 1'b0;
      tg_start  <= 1'b0;
      done      <= 1'b0;
    end else begin
      ol_start <= 1'b0;
      tg_start <= 1'b0;
      done     <= 1'b0;
      // The first raw bytes of the sample form the LFSR seed.
      if (me_valid && seedn_q != $bits(seedn_q)'(SEEDB)) begin
        seed_sr_q <= {me_data, seed_sr_q[SEEDB*SW-1:SW]};
        seedn_q   <= seedn_q + 1'b1;
      end
      // Output word address, one cycle behind the compute cycle.
      if (arr_shift) begin
        ob_waddr <= wptr_q;
        wptr_q   <= wptr_q + 1'b1;
      end
      unique case (phase_q)
        PH_IDLE: if (start) begin
          word_q    <= '0;
          byte_q    <= '0;
          rd_last_q <= 1'b0;
          seedn_q   <= '0;
          phase_q   <= PH_ENTROPY;
        end
        PH_ENTROPY: begin
          if (!rd_last_q) begin
            if (byte_q == BYW'(NBY - 1)) begin
              byte_q <= '0;
              if (word_q == WW'(NW - 1)) rd_last_q <= 1'b1;
              else                       word_q    <= word_q + 1'b1;
            end else begin
              byte_q <= byte_q + 1'b1;
            end
          end
          if (me_done) begin
            ol_start <= 1'b1;
            phase_q  <= PH_LENGTH;
          end
        end
        PH_LENGTH: if (ol_done) begin
          if (m_force != '0) m_sel <= (m_force > MW'(M_MAX)) ? MW'(M_MAX) : m_force;
          else               m_sel <= ol_m;
          tg_start <= 1'b1;
          phase_q  <= PH_TSGEN;
        end
        PH_TSGEN: if (tg_done) begin
          word_q    <= '0;
          wptr_q    <= '0;
          out_words <= '0;
          phase_q   <= (m_sel == '0) ? PH_FINAL : PH_LOAD;
        end
        PH_LOAD: begin
          j_q     <= '0;
          phase_q <= PH_COMPUTE;
        end
        PH_COMPUTE: begin
          j_q <= j_q + 1'b1;
          if (j_q == m_sel - 1'b1) begin
            // Batches done?
            if (word_q == WW'(NW - 1)) phase_q <= PH_FINAL;
            else begin
              word_q  <= word_q + 1'b1;
              phase_q <= PH_LOAD;
            end
          end
        end
        PH_FINAL: begin
          out_words <= $bits(out_words)'(NW) * $bits(out_words)'(m_sel);
          done      <= 1'b1;
          phase_q   <= PH_IDLE;
        end
        default: phase_q <= PH_IDLE;
      endcase
    end
  end

  a_shift_in_batch: assert property (@(posedge clk) disable iff (!rst_n)
                                     arr_shift |-> j_q < m_sel);
endmodule
