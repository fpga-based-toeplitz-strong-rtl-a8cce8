// tse_top: Toeplitz strong extractor post-processing core for a QRNG.
//
// Raw 8-bit ADC samples stream in and fill the sample memory (S bits). When
// the memory is full, processing starts on its own: the min-entropy of the
// sample is evaluated, the output length m follows from the leftover hash
// lemma, a 25-bit LFSR seeded from the raw data generates the Toeplitz
// string of bs+m-1 bits, and the sample is extracted batch by batch, K
// blocks of bs bits in parallel, one output bit per block per clock. The
// extracted bits land in the output buffer, which is read through a plain
// read port. With the default sizes (S = 800,000, bs = 1000, K = 40) and
// m = 300, extraction takes 6021 clocks. The flow and the sizes follow the
// published design; the ports, the automatic start when the memory is full
// and the m_force override are this design's choices. The ADC, the host
// link and the QRNG itself are outside this core.
//
// Interface:
//   raw_valid/raw_data/raw_ready  byte stream from the ADC (valid/ready);
//                                 ready is low while a sample is processed
//   m_force                       0: use the computed m; else this m
//   busy, done, phase             status; done pulses at the end
//   hmin                          min-entropy per sample, F fractional bits
//   cmax                          count of the most frequent sample value
//   m, out_words                  output length and valid output words
//   out_re/out_raddr/out_rdata    output buffer read port (1 cycle latency)
module tse_top #(
  parameter int unsigned S_BITS = tse_pkg::S_BITS,
  parameter int unsigned BS     = tse_pkg::BS,
  parameter int unsigned K      = tse_pkg::K_BLOCKS,
  parameter int unsigned M_MAX  = tse_pkg::M_MAX,
  parameter int unsigned SW     = tse_pkg::SAMPLE_W,
  parameter int unsigned F      = tse_pkg::LOG_F
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  raw_valid,
  input  logic [SW-1:0]                         raw_data,
  output logic                                  raw_ready,
  input  logic [$clog2(M_MAX+1)-1:0]            m_force,
  output logic                                  busy,
  output logic                                  done,
  output tse_ctrl_pkg::phase_t                  phase,
  output logic [$clog2(SW+1)+F-1:0]             hmin,
  output logic [$clog2(S_BITS/SW+1)-1:0]        cmax,
  output logic [$clog2(M_MAX+1)-1:0]            m,
  output logic [$clog2(S_BITS/(K*BS)*M_MAX+1)-1:0] out_words,
  input  logic                                  out_re,
  input  logic [$clog2(S_BITS/(K*BS)*M_MAX)-1:0]   out_raddr,
  output logic [K-1:0]                          out_rdata
);
  localparam int unsigned L    = K * BS;
  localparam int unsigned NW   = S_BITS / L;
  localparam int unsigned NBY  = L / SW;
  localparam int unsigned NSMP = S_BITS / SW;
  localparam int unsigned WW   = $clog2(NW);
  localparam int unsigned BYW  = $clog2(NBY);
  localparam int unsigned MW   = $clog2(M_MAX + 1);
  localparam int unsigned DEPTH = NW * M_MAX;
  localparam int unsigned SEED_RAW = tse_pkg::SEED_RAW;

  initial assert (NW * L == S_BITS) else $error("S_BITS must be a multiple of K*BS");

  // ---- sample loading ------------------------------------------------
  logic [WW-1:0]  ld_word_q;
  logic [BYW-1:0] ld_byte_q;
  logic           wr_en, start;

  assign raw_ready = !busy && !start;
  assign wr_en     = raw_valid && raw_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_word_q <= '0;
      ld_byte_q <= '0;
      start     <= 1'b0;
    end else begin
      start <= 1'b0;
      if (wr_en) begin
        if (ld_byte_q == BYW'(NBY - 1)) begin
          ld_byte_q <= '0;
          if (ld_word_q == WW'(NW - 1)) begin
            ld_word_q <= '0;
            start     <= 1'b1;     // sample memory full
          end else begin
            ld_word_q <= ld_word_q + 1'b1;
          end
        end else begin
          ld_byte_q <= ld_byte_q + 1'b1;
        end
      end
    end
  end

  // ---- blocks ----------------------------------------------------------
  logic                 brd_en, wrd_en;
  logic [WW-1:0]        brd_word, wrd_word;
  logic [BYW-1:0]       brd_byte;
  logic [SW-1:0]        brd_data;
  logic [L-1:0]         batch;
  logic                 me_start, me_valid, me_busy, me_done;
  logic [SW-1:0]        me_data;
  logic                 ol_start, ol_done;
  logic [MW-1:0]        ol_m, m_sel;
  logic                 tg_start, tg_busy, tg_done;
  logic [SEED_RAW-1:0]  raw_seed;
  logic [BS+M_MAX-2:0]  ts;
  logic [$clog2(BS+M_MAX)-1:0] ts_len;
  logic                 arr_load, arr_shift, arr_valid;
  logic [K-1:0]         arr_bits;
  logic                 ob_we;
  logic [$clog2(DEPTH)-1:0] ob_waddr;

  sample_mem #(.S_BITS(S_BITS), .L(L), .SW(SW)) u_mem (
    .clk,
    .wr_en   (wr_en),
    .wr_word (ld_word_q),
    .wr_byte (ld_byte_q),
    .wr_data (raw_data),
    .brd_en, .brd_word, .brd_byte, .brd_data,
    .wrd_en, .wrd_word,
    .wrd_data(batch)
  );

  min_entropy_eval #(.SW(SW), .N_SAMPLES(NSMP), .F(F)) u_me (
    .clk, .rst_n,
    .start    (me_start),
    .smp_valid(me_valid),
    .smp_data (me_data),
    .busy     (me_busy),
    .done     (me_done),
    .cmax     (cmax),
    .hmin     (hmin)
  );

  output_length_calc #(.BS(BS), .SW(SW), .F(F), .M_MAX(M_MAX)) u_ol (
    .clk, .rst_n,
    .start(ol_start),
    .hmin (hmin),
    .done (ol_done),
    .m    (ol_m)
  );

  toeplitz_string_gen #(.BS(BS), .M_MAX(M_MAX)) u_tg (
    .clk, .rst_n,
    .start   (tg_start),
    .raw_seed(raw_seed),
    .m       (m_sel),
    .busy    (tg_busy),
    .done    (tg_done),
    .ts      (ts),
    .ts_len  (ts_len)
  );

  tse_array #(.K(K), .BS(BS), .M_MAX(M_MAX)) u_arr (
    .clk, .rst_n,
    .load      (arr_load),
    .shift     (arr_shift),
    .ts        (ts),
    .batch     (batch),
    .bits      (arr_bits),
    .bits_valid(arr_valid)
  );

  output_buffer #(.K(K), .DEPTH(DEPTH)) u_ob (
    .clk,
    .we   (ob_we),
    .waddr(ob_waddr),
    .wdata(arr_bits),
    .re   (out_re),
    .raddr(out_raddr),
    .rdata(out_rdata)
  );

  tse_ctrl #(.S_BITS(S_BITS), .L(L), .SW(SW), .M_MAX(M_MAX)) u_ctrl (
    .clk, .rst_n,
    .start, .m_force, .busy, .done, .phase,
    .brd_en, .brd_word, .brd_byte, .brd_data,
    .wrd_en, .wrd_word,
    .me_start, .me_valid, .me_data, .me_done,
    .ol_start, .ol_done, .ol_m,
    .tg_start, .raw_seed, .m_sel, .tg_done,
    .arr_load, .arr_shift, .arr_valid,
    .ob_we, .ob_waddr, .out_words
  );

  assign m = m_sel;

  // The one-time units run one after the other, and the generated string
  // always has bs+m-1 bits.
  a_serial: assert property (@(posedge clk) disable iff (!rst_n) !(me_busy && tg_busy));
  a_ts_len: assert property (@(posedge clk) disable iff (!rst_n)
                             tg_done |-> 32'(ts_len) == BS + 32'(m_sel) - 1);
endmodule
