# Toeplitz strong extractor for QRNG post-processing

The raw output of a quantum random number generator (QRNG) is not uniform.
Classical noise and correlations in the detector and the ADC bias it. A
*randomness extractor* compresses a raw block of `bs` bits into `m < bs` bits
that are close to uniform. The ratio `m/bs` is set by how much min-entropy the
raw data holds. The extractor used here is a Toeplitz hash. The output is
`y = T · x` over GF(2), where `x` is the raw block and `T` is an `m × bs`
Toeplitz matrix. Every descending diagonal of `T` is constant, so a string of
`bs + m − 1` seed bits defines the whole matrix. Each row of `T` is a window of
that string, shifted by one bit from the row before.

This RTL implements the whole post-processing flow for one raw sample, in
hardware that could sit on a large FPGA:

1. Store a sample of `S = 800,000` raw bits (100,000 bytes from an 8-bit ADC).
2. Estimate its min-entropy per byte, `Hmin = −log2(pmax)`.
3. Derive the output length `m` from the leftover hash lemma.
4. Generate the `bs + m − 1` Toeplitz seed bits with a 25-bit LFSR seeded from the raw data.
5. Extract the sample in 20 batches. Each batch holds `K = 40` blocks of
   `bs = 1000` bits, and all 40 blocks are hashed in parallel. Each clock
   produces one output bit per block.
6. Collect the output bits in an output buffer.

At the default sizes with `m = 300` (extraction ratio 0.3), extraction takes
6021 clocks. At 200 MHz that is 800,000 raw bits in 30.1 µs, an input
throughput of 26.57 Gbit/s.

## Block diagram

```
 raw_valid/raw_data ──► sample_mem ──byte port──► min_entropy_eval ──Hmin──► output_length_calc
   (ADC bytes)          (20 × 40,000 b)            (histogram, log2_fixed)       │ m
                            │                                                    ▼
                            │ first 23 raw bits ─────────────────────► toeplitz_string_gen
                            │                                            (lfsr_prng, ts register)
                            │ batch port (40,000 b/cycle)                        │ ts (bs+m−1 b)
                            ▼                                                    ▼
                        tse_array: 40 × tse_block, shared ts shift register (window = ts[j+bs−1 : j])
                            │ 40 bits / clock
                            ▼
                        output_buffer (16,000 × 40 b) ──► out_raddr/out_rdata
 tse_ctrl sequences all of the above; tse_top wires them and fills the sample memory.
```

## The extraction datapath (`tse_array`, `tse_block`)

This is the core of the design and the part that sets the throughput.

Output bit `j` of a block `x` is

    y[j] = XOR over i = 0..bs−1 of ( ts[j + i] AND x[i] ),   j = 0..m−1

Row `j` of the Toeplitz matrix is therefore the `bs`-bit window `ts[j+bs−1 : j]`.
Row 0 is `ts[bs−1:0]` and row `m−1` is `ts[m+bs−2 : m−1]`.

- **The window.** `tse_array` keeps one copy of `ts` in a shift register. At the
  start of a batch it reloads the register from the generator. It shifts right
  by one bit on every compute clock. Bits `[bs−1:0]` of the register are the
  current row.
- **The blocks.** All 40 blocks of a batch use the same matrix, so they all read
  this one window. Each `tse_block` ANDs the window with its 1000-bit block and
  XOR-reduces the result to one bit. The bit is registered.
- **Per clock.** One compute clock gives one matrix row for all 40 blocks, which
  is 40 output bits. A batch needs `m` compute clocks.
- **Cost.** The logic is 40 AND/XOR-reduction trees of 1000 inputs each. There
  is also one `bs + M_MAX − 1` = 1799-bit shift register. The whole 40,000-bit
  batch stays in place for the `m` clocks.

The batch comes from `sample_mem`. That memory has one 40,000-bit word per
batch, so a batch is read in a single clock. The read is registered, and the
registered output feeds the blocks directly.

### Cycle budget

`tse_ctrl` runs each batch as one **load** clock followed by `m` **compute**
clocks:

- The load clock reads the batch word and reloads the window register.
- Each compute clock shifts the window.
- Each row's 40 bits are written to the output buffer one clock later.
- The last write happens in the next batch's load clock. For the final batch it
  happens in one extra **final** clock.

The extraction time for `N_BATCH = S/(K·bs) = 20` batches is

    N_BATCH · (m + 1) + 1 = 20·m + 21 clocks

| extraction ratio | m   | clocks | input Gbit/s at 200 MHz |
|------------------|-----|--------|-------------------------|
| 0.3              | 300 | 6021   | 26.57                   |
| 0.5              | 500 | 10021  | 15.97                   |
| 0.6              | 600 | 12021  | 13.31                   |
| 0.8              | 800 | 16021  | 9.99                    |

These are the counts this RTL produces in simulation (`tb_tse_ratios`). They
equal the clock counts published for the original FPGA implementation. The
published material gives only the totals, not how the 21 extra clocks arise.
The split into one load clock per batch plus one final clock is this design's
reconstruction.

## One-time work before extraction

Before extraction, the core does some work once per sample.

**Min-entropy (`min_entropy_eval`, `log2_fixed`).** The sample memory streams
all 100,000 bytes through its byte port, one per clock. The unit keeps a
256-bin histogram with 17-bit counters and a running maximum `cmax`. It then
computes

    Hmin = log2(N) − log2(cmax)        (bits per 8-bit sample)

- The result is unsigned fixed point with `F = 16` fractional bits.
- `log2(N)` is a constant, worked out at elaboration by `tse_pkg::log2_q`.
- `log2(cmax)` is computed by `log2_fixed` in `F + 1` clocks. It finds the
  leading one, normalises the input to [1, 2), and then produces one fractional
  bit per clock by squaring. If the square is ≥ 2, the bit is 1 and the square
  is halved.
- The estimator is the most-probable-value (min-entropy) estimate on the ADC
  codes. It is this design's choice, because no estimator is specified.

**Output length (`output_length_calc`).** The leftover hash lemma gives

    m = floor( bs · Hmin / 8 − 2·log2(1/ε) )

- Here ε = 2^−12.5, so the penalty is 25 bits.
- For Hmin = 2.6 bits per byte this is `325 − 25 = 300`, the published
  operating point. The formula was reconstructed from those numbers.
- The result is clamped to `[0, M_MAX]` with `M_MAX = 800`.
- The input `m_force` can replace the computed `m`. A non-zero `m_force` is
  used instead, clamped to `M_MAX`. This is how the fixed extraction ratios in
  the table are run. It is an addition of this design.
- If `m = 0`, the core skips extraction and finishes with no output words.

**Toeplitz string (`toeplitz_string_gen`, `lfsr_prng`).** The LFSR has 25
stages, numbered 25 (input end) to 1 (output end).

- Each clock, the contents move one stage towards stage 1.
- Stage 1 is the output bit.
- Stage 25 receives `stage1 ^ stage2 ^ stage17 ^ stage23`.
- The seed is 23 raw bits plus two bits fixed at 1, which keeps the state from
  ever being all zero.

In this design the two fixed ones sit in stages 25 and 1. The 23 raw bits are
the first 23 bits of the sample, in stages 2 to 24. Both are local choices: the
original only says the bits are "selected" from the raw data. One bit is
generated per clock. Bit `i` becomes `ts[i]`, and generation stops after
`bs + m − 1` bits.

A side effect of this choice: stage 1 is a fixed one, so `ts[0]` is always 1.
That is harmless for the hash but visible in the output. Moving the fixed ones
is a one-line change in `lfsr_prng`.

With `m = 300`, the one-time phase takes about 101,300 clocks:

- 100,000 for the histogram
- about 20 for the logarithm and `m`
- `bs + m` = 1300 for the Toeplitz string

The original reports 100,274 clocks for the same steps. The difference is
probably that its string generation overlaps other work. Nothing published says
how, so this design runs the steps one after another.

## Data layout

- **Raw bits.** Raw bit `n` of the sample is bit `n % 8` of byte `n / 8`, and
  bytes are stored in arrival order. Batch `b` is raw bits
  `[b·40000, (b+1)·40000)`. Block `k` of a batch is bits `[k·1000, (k+1)·1000)`
  of that batch.
- **Output buffer.** Word `w = b·m + j` holds row `j` of batch `b`, and bit `k`
  of the word comes from block `k`. After `done`, `out_words = 20·m` words are
  valid.
- **Concatenated output.** The output is the bit string formed batch by batch,
  block by block, with the `m` bits of each block in row order. Bit
  `(b·K + k)·m + j` of that string is bit `k` of word `b·m + j`. Reading the
  buffer in that order is left to whatever drains it.

## Interface and timing (`tse_top`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `raw_valid`, `raw_data[7:0]`, `raw_ready` | in/in/out | ADC byte stream. A byte is taken on a clock edge where valid and ready are both high. Ready is low while a sample is processed. |
| `m_force` | in | 0 uses the computed `m`; otherwise this value, clamped to `M_MAX` |
| `busy`, `done`, `phase` | out | status; `done` pulses once per sample; `phase` is the sequencer state (`tse_ctrl_pkg::phase_t`) |
| `hmin`, `cmax` | out | min-entropy per byte (Q4.16) and the largest histogram count |
| `m`, `out_words` | out | output length used; number of valid output words |
| `out_re`, `out_raddr`, `out_rdata[K-1:0]` | in/in/out | output-buffer read port, data one clock after `out_re` |

Processing starts by itself in the clock after the last byte of a sample is
written. A new sample can be loaded once `done` has pulsed. The new sample
overwrites the old one, and the output buffer keeps the old results until the
new extraction overwrites them.

## Parameters

The defaults are set in `tse_pkg` and can be overridden on `tse_top`.

- `S_BITS = 800000`
- `BS = 1000`
- `K = 40`
- `M_MAX = 800`
- `SW = 8`
- `F = 16`

`S_BITS` must be a multiple of `K·BS`, and the number of batches
`S_BITS/(K·BS)` must be at least 2 so that the batch index has a bit.

The storage at the defaults is:

- a 0.8 Mbit sample memory
- a 0.64 Mbit output buffer
- a 1799-bit Toeplitz string register and its 1799-bit working copy

On an FPGA, the 40,000-bit read port of the sample memory would be built from
many block RAMs side by side.

## What is outside this RTL

These parts are not modelled. Their signals appear at the top ports.

- The QRNG optics.
- The ADC.
- Any FIFO or link that feeds the raw bytes.
- The host interface that drains the output buffer, such as USB 3.0, Gigabit
  Ethernet or PCI Express.

The statistical tests of the output (NIST SP 800-22) are software and are not
part of the hardware. The 200 MHz clock is the target of the original board;
this RTL makes no timing claim.

## Where this design departs from the original or fills gaps

- **Local choices.** The original does not specify any of the following, so
  each was chosen here:
  - the memory organisation and the raw bit order
  - the min-entropy estimator and its fixed-point arithmetic
  - the positions of the fixed seed ones and of the 23 seed bits
  - the bit order of `ts`
  - which raw bit meets which window bit (`x[i]` with `ts[j+i]`)
  - the output word layout
  - the valid/ready input, the automatic start and the `m_force` override
- **`M_MAX = 800`.** This is the largest extraction ratio the original
  evaluates. Larger `m` would need a bigger string register and buffer.
- **One-time clock count.** This design takes about 101,300 clocks against the
  published 100,274 (see above). The extraction clock counts match exactly.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The reference models
are in `tb/tse_ref_pkg.sv`. They are written from the algorithm, not from the
RTL:

- the LFSR is modelled stage by stage
- logarithms use real arithmetic
- the Toeplitz product is computed row by row

| testbench | what it covers |
|-----------|----------------|
| `tb_log2_fixed` | log2 accuracy against real arithmetic; `F+1` latency |
| `tb_min_entropy_eval` | histogram maximum and Hmin for three distributions; latency; re-run clears the histogram |
| `tb_output_length_calc` | the LHL formula, the published 2.6 → 300 point, clamps |
| `tb_lfsr_prng` | output stream against the stage model, with stalls |
| `tb_toeplitz_string_gen` | `ts` contents, `ts_len`, `bs+m` latency |
| `tb_tse_block` | AND/XOR row product at bs = 1000; hold when disabled |
| `tb_tse_array` | every lane bit of every row against the Toeplitz product |
| `tb_sample_mem`, `tb_output_buffer` | byte and word ports; read latency |
| `tb_tse_ctrl` | read order, seed capture, `m` selection and clamp, write order, `N_BATCH·(m+1)+1` extraction clocks, `m = 0` |
| `tb_tse_top` | six complete operations at reduced size, with every output bit checked. It counts computed `m`, forced `m`, clamp, `m = 0`, the batch loop and input back-pressure, and fails if any of them never happened. |
| `tb_tse_full` | one complete operation at the default sizes, with data of about 2.6 bits/byte min-entropy (gives m ≈ 300, every bit checked), then `m = 800` |
| `tb_tse_ratios` | extraction ratios 0.3/0.5/0.6/0.8 at the default sizes, checked against 6021/10021/12021/16021 clocks |

To run a testbench with plain Verilator, name the packages and the testbench.
Let `-y` find the modules. For example, the full-size run (about 30 s to
build, about 1 s to run):

    verilator --binary --timing --assert -Wno-fatal --top-module tb_tse_full \
        -y rtl -y tb +libext+.sv \
        rtl/tse_pkg.sv rtl/tse_ctrl_pkg.sv tb/tse_ref_pkg.sv tb/tb_tse_full.sv
    ./obj_dir/Vtb_tse_full

The same command works for any other testbench in `tb/` if you change the
module and file name. `-Wno-fatal` keeps lint warnings (unused status outputs,
for example) from stopping the build.
