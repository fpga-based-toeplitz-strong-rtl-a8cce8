// tb_tse_full: one complete operation of the post-processing core at its
// default sizes (S = 800,000 bits = 100,000 ADC bytes, bs = 1000, K = 40,
// 20 batches). The raw data is gaussian-like around mid-scale with a
// spread chosen so that the min-entropy is near 2.6 bits per byte, which
// gives m near 300 as in the published operating point. The run checks
// the min-entropy, m, the extraction cycle count 20*m+21 (6021 at
// m = 300), and every output bit against a model built here from the
// algorithm (see tb_tse_top for the model). It then runs extraction ratio
// 0.8 (m forced to 800) on a second sample.
module tb_tse_full;
  import tse_pkg::*;
  import tse_ref_pkg::*;
  import tse_ctrl_pkg::*;
  localparam int unsigned S_BITS = tse_pkg::S_BITS, BS = tse_pkg::BS,
                         K = tse_pkg::K_BLOCKS, M_MAX = tse_pkg::M_MAX;
  localparam int unsigned L   = K * BS;
  localparam int unsigned NW  = S_BITS / L;
  localparam int unsigned NSMP = S_BITS / 8;
  localparam int unsigned TSW = BS + M_MAX - 1;
  localparam int unsigned DEPTH = NW * M_MAX;

  logic clk = 0, rst_n = 1;
  logic raw_valid = 0, raw_ready;
  logic [7:0] raw_data = '0;
  logic [$clog2(M_MAX+1)-1:0] m_force = '0, m;
  logic busy, done;
  phase_t phase;
  logic [$clog2(9)+LOG_F-1:0] hmin;
  logic [$clog2(NSMP+1)-1:0] cmax;
  logic [$clog2(DEPTH+1)-1:0] out_words;
  logic out_re = 0;
  logic [$clog2(DEPTH)-1:0] out_raddr = '0;
  logic [K-1:0] out_rdata;
  int checks = 0, failures = 0;
  // how often each mechanism happened
  int n_ops = 0, n_m_computed = 0, n_m_forced = 0, n_m_clamped = 0, n_m_zero = 0;
  int n_batches = 0, n_backpressure = 0;
  int last_ext = 0;

  tse_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // phase monitor: batch loads and back-pressure
  always @(posedge clk) begin
    if (phase == PH_LOAD) n_batches++;
    if (raw_valid && !raw_ready) n_backpressure++;
  end

  byte unsigned raw[NSMP];

  // One gaussian-like sample around 128 with standard deviation sigma.
  function automatic byte unsigned gauss(real sigma);
    real s;
    int v;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 10000) / 10000.0;
    v = 128 + int'((s - 6.0) * sigma);
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    return byte'(v);
  endfunction

  function automatic bit rawbit(int n);
    return raw[n / 8][n % 8];
  endfunction

  // One full operation: load a sample, wait for done, check everything.
  // mode 0: gaussian data with sigma; mode 1: constant data (no entropy).
  task automatic run_op(input real sigma, input int mode, input int mforce);
    int hist[256];
    int mx, mexp, mdut, ext_cycles, ovh_cycles;
    real h, margin;
    bit tsb[$];
    logic [TSW-1:0] tsv;
    logic [22:0] seed;
    for (int i = 0; i < int'(NSMP); i++) raw[i] = (mode == 1) ? 8'd77 : gauss(sigma);
    foreach (hist[i]) hist[i] = 0;
    for (int i = 0; i < int'(NSMP); i++) hist[raw[i]]++;
    mx = 0;
    foreach (hist[i]) if (hist[i] > mx) mx = hist[i];
    h      = rlog2(real'(NSMP) / real'(mx));
    margin = lhl_margin(h, int'(BS));
    m_force = ($bits(m_force))'(mforce);
    // stream the sample in, with idle cycles; inputs change at negedges
    for (int i = 0; i < int'(NSMP); i++) begin
      @(negedge clk);
      raw_valid = 1; raw_data = raw[i];
      while (!raw_ready) @(negedge clk);
      @(negedge clk);
      raw_valid = 0;
      if ($urandom % 8 == 0) @(negedge clk);
    end
    // keep offering a byte while busy: it must not be taken
    raw_valid = 1; raw_data = 8'hA5;
    ext_cycles = 0; ovh_cycles = 0;
    while (!done) begin
      @(negedge clk);
      if (phase inside {PH_LOAD, PH_COMPUTE, PH_FINAL}) ext_cycles++;
      if (phase inside {PH_ENTROPY, PH_LENGTH, PH_TSGEN}) ovh_cycles++;
    end
    raw_valid = 0;
    n_ops++;
    last_ext = ext_cycles;
    // output length
    mdut = int'(m);
    if (mforce != 0) begin
      mexp = (mforce > int'(M_MAX)) ? int'(M_MAX) : mforce;
      n_m_forced++;
      if (mforce > int'(M_MAX)) n_m_clamped++;
    end else begin
      mexp = lhl_m(h, int'(BS), int'(EPS_PEN), int'(M_MAX));
      n_m_computed++;
      // within 1e-3 of an integer the fixed-point log may fall either side
      if (margin < 1.0e-3 && (mdut == mexp - 1 || mdut == mexp + 1)) mexp = mdut;
    end
    if (mexp == 0) n_m_zero++;
    checks += 4;
    if (int'(cmax) != mx) begin failures++; $display("cmax %0d expected %0d", cmax, mx); end
    if (real'(hmin) / real'(1 << LOG_F) > h + 1.0e-3 || real'(hmin) / real'(1 << LOG_F) < h - 1.0e-3) begin
      failures++; $display("hmin %f expected %f", real'(hmin) / real'(1 << LOG_F), h);
    end
    if (mdut != mexp) begin failures++; $display("m %0d expected %0d (H=%f)", mdut, mexp, h); end
    if (int'(out_words) != int'(NW) * mexp) begin failures++; $display("out_words %0d", out_words); end
    if (mexp > 0) begin
      checks++;
      if (ext_cycles != int'(NW) * (mexp + 1) + 1) begin
        failures++; $display("extraction cycles %0d expected %0d", ext_cycles, int'(NW) * (mexp + 1) + 1);
      end
    end
    $display("op %0d: H=%f bits/sample, m=%0d, one-time cycles=%0d, extraction cycles=%0d",
             n_ops, h, mdut, ovh_cycles, ext_cycles);
    // reference Toeplitz string from the first 23 raw bits
    for (int i = 0; i < 23; i++) seed[i] = rawbit(i);
    lfsr_bits(seed, int'(BS) + mexp - 1, tsb);
    tsv = '0;
    for (int i = 0; i < int'(BS) + mexp - 1; i++) tsv[i] = tsb[i];
    // read the output buffer and compare every bit
    for (int b = 0; b < int'(NW); b++) begin
      logic [BS-1:0] blk [K];
      for (int k = 0; k < int'(K); k++)
        for (int i = 0; i < int'(BS); i++) blk[k][i] = rawbit(b * int'(L) + k * int'(BS) + i);
      for (int j = 0; j < mexp; j++) begin
        logic [K-1:0] e;
        for (int k = 0; k < int'(K); k++) e[k] = ^(tsv[j +: BS] & blk[k]);
        @(negedge clk) out_re = 1; out_raddr = ($bits(out_raddr))'(b * mexp + j);
        @(negedge clk) out_re = 0;
        checks++;
        if (out_rdata !== e) begin
          failures++;
          if (failures < 10) $display("batch %0d row %0d: got %h expected %h", b, j, out_rdata, e);
        end
      end
    end
  endtask

  initial begin
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_op(2.45, 0, 0);
    run_op(2.45, 0, 800);
    checks += 3 + 2 * 0 + 1;
    if (1 && n_m_computed == 0)  begin failures++; $display("computed m never used"); end
    if (n_m_forced == 0)    begin failures++; $display("m_force never used"); end
    if (n_batches < int'(NW)) begin failures++; $display("batch loop not run"); end
    if (n_backpressure == 0) begin failures++; $display("no back-pressure seen"); end
    if (0 && n_m_clamped == 0) begin failures++; $display("clamp never hit"); end
    if (0 && n_m_zero == 0) begin failures++; $display("m = 0 never hit"); end
    $display("ops=%0d computed=%0d forced=%0d clamped=%0d zero=%0d batches=%0d backpressure=%0d",
             n_ops, n_m_computed, n_m_forced, n_m_clamped, n_m_zero, n_batches, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
