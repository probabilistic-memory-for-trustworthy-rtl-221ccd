# p-MEM: a memory whose loads can return Gaussian samples

Probabilistic algorithms such as Bayesian neural networks (BNNs), differential
privacy (DP) and probabilistic embeddings spend much of their time drawing
Gaussian random numbers: a BNN resamples every weight on every forward pass,
and DP adds fresh noise to every released element. On a CPU or GPU each draw
is a call into a random-number routine followed by a multiply-add, so the
sampling costs far more instructions and time than the load of the weight
itself.

A *probabilistic memory* (p-MEM) moves the sampling into the memory. A
Gaussian value `w ~ N(mu, sigma^2)` is stored as its two parameters and
rewritten on every read as

    w = mu + eps * sigma,      eps ~ N(0, 1) generated next to the array.

Every stored word carries a mode bit. A *deterministic* word is returned as
stored; a *probabilistic* word is returned as a fresh sample. Both are read
with the same ordinary load, so a host loop such as

    for (i = 0; i < 128; i++) out[i] = in[i] * p_w[i];

needs no random-number call at all: `p_w[i]` is simply loaded. A word with
`sigma = 0` reads back exactly `mu`, so deterministic data is the
zero-variance special case of probabilistic data.

This repository holds synthesizable SystemVerilog for such a memory (SRAM-style
subarrays, column multiplexing, per-word mode bits, a near-memory CLT Gaussian
generator with a multiplier on the read path), a behavioural model of the
analog noise-based alternative, and self-checking testbenches. The design
follows the p-MEM architecture of "Probabilistic Memory for Trustworthy Edge
Intelligence" (Pei et al., DAC 2026). That work specifies the architecture at
block level and studies area, latency and energy; the bit-level formats,
interface and timing here are this implementation's own choices and are listed
in "Departures and choices" below.

## Organisation

The default instance is the "4-4-2kB" organisation: four *mats*, each with
four *subarrays*, each subarray a 128 x 128 bit cell array (2 kB). That is
32 KiB in all.

    pmem_top ── 4 x pmem_mat ── 4 x pmem_subarray
                                     ├─ row_decoder     7-bit row  -> 128 word lines
                                     ├─ bit_array       128 x 128 cells
                                     ├─ col_mux         MUX ratio 8: 128 columns -> 16-bit word
                                     ├─ mode_reg        1 mode bit per word (1024 bits)
                                     ├─ clt_grng        12 x lfsr16, adder, quantiser -> eps
                                     │  sigma_eps_mult  sigma * eps, rounded
                                     │    (or analog_rng_adc when ANALOG = 1)
                                     └─ sample_unit     mode mux and mu + noise adder

Each subarray has its own noise generator. With the MUX ratio of 8 a read
senses 16 bit lines, i.e. four 4-bit units. These four units form one word,
and one generator and one multiplier serve them. The original design shares
one RNG among "four columns"/"four probabilistic cells". This implementation
reads that as the four 4-bit units of one word.

Address map (14 bits, word addressed, 16384 words):

| bits   | field              | selects                            |
|--------|--------------------|------------------------------------|
| 13:12  | mat                | one of `N_MATS` = 4                |
| 11:10  | subarray           | one of `N_SUB` = 4                 |
| 9:3    | row                | one of 128 word lines              |
| 2:0    | column select      | one of the 8 columns behind each sense channel |

In every subarray, channel `b` of the column multiplexer serves the adjacent
columns `8b .. 8b+7`, and bit `b` of the word is stored in column
`8b + column_select`.

## Word formats

All words are 16 bits wide.

* Deterministic word: any 16-bit value. A read returns it unchanged.
* Probabilistic word:

      bit  15..12     11..4            3..0
           reserved   mu (8-bit, 2's   sigma (4-bit unsigned,
           (ignored)  complement)      in units of one mu LSB)

  A read returns `mu + round(sigma * eps)` as a sign-extended 16-bit
  integer. With the default 16-level `sigma` and `|eps| < 8`, the result
  lies within -248 .. +246.

The 8-bit mean / 4-bit standard deviation precision is the one the
architecture is evaluated with. At that precision, BNN and embedding accuracy
are unchanged (a 4-bit `sigma` is the smallest "probabilistic unit"). The
package `pmem_pkg` defines the layout as the packed struct `prob_word_t` and
the helper `pack_prob(mu, sigma)`.

The mode of a word is set by the write that stores it (`req_prob`), so any
address can hold either kind of data and can switch kind with an ordinary
write. Reset makes every word deterministic. The cell contents themselves are
not reset, as in a real SRAM.

## The read path and its timing

```
 cycle k (request)                                        edge k+1     cycle k+1
 addr ─> row_decoder ─> bit_array ─> col_mux ─> word ─┬─> sample_unit ─> [rdata reg] ─> rsp_data
                         mode_reg ────────> mode ─────┤        ^
                                                      │ sigma  │ noise
                                                      └─> sigma_eps_mult <─ eps <─ clt_grng
```

* One request per cycle, no back-pressure. A read issued in cycle `k` is
  answered in cycle `k+1` with `rsp_valid`. `rsp_prob` says whether the word
  was sampled. A write gives no response.
* Both modes have the same one-cycle latency. The sampling adds an adder and
  a multiplier to the combinational read path, not a pipeline stage. This
  keeps deterministic reads exactly as fast as in plain memory, which the
  architecture requires. The cost is a longer critical path in
  probabilistic designs. The original evaluation finds the digital
  generator's read about 2x slower than the analog one because of this
  multiplier.
* The generator of a subarray advances only when that subarray serves a
  probabilistic read. A deterministic read does not consume randomness.
  Back-to-back probabilistic reads of one subarray each get a new `eps`.
* The `eps` used by a read is the one the generator holds in that cycle; the
  read makes the generator step at the same clock edge.

## Digital noise generation (CLT-12)

`clt_grng` uses the central limit theorem. It sums `CLT_N = 12` independent
16-bit uniform values. The sum of twelve values uniform on `[0, 2^16)` has
mean `12 * 2^15` and variance `12 * (2^16)^2 / 12 = (2^16)^2`. Its standard
deviation is therefore exactly `2^16`, and no scaling multiplier is needed.
The quantiser only removes the mean, rounds and shifts:

    eps_q = clamp( round( (sum - 12 * 2^15) / 2^12 ), -128, 127 )

`eps_q` is `eps` in units of 1/16 (4 fractional bits), with a range of about
+-8 standard deviations. Twelve terms were chosen because, in the
original statistical comparison (Kolmogorov-Smirnov and chi-square tests),
CLT depths of 12 to 16 match analog noise sources, while shallower sums fail
the chi-square test. Other depths are a parameter, but then the standard
deviation of `eps` becomes `sqrt(CLT_N / 12)`, not 1.

Each uniform source is an `lfsr16`. It is a Galois LFSR with the
maximal-length polynomial x^16 + x^14 + x^13 + x^11 + 1 (mask `16'hB400`,
period 65535). A plain LFSR shifted once per draw would give successive
values that share 15 bits. Each draw therefore advances the register 16
positions, unrolled into one cycle, so consecutive outputs are 16 shifts
apart and share no bits. The twelve LFSRs of a generator, and the
generators of the sixteen subarrays, start from different seeds. Those seeds
are derived at elaboration time from a per-subarray `SEED_BASE` and a
multiplicative hash of the source index. Asserting `seed_we` with a 16-bit
`seed` reseeds every LFSR in the memory with `seed XOR` its own constant.
Everything stays reproducible, which the testbenches rely on.

`sigma_eps_mult` multiplies the 4-bit `sigma` by `eps_q` and rounds the
product to the nearest `mu` LSB:

    noise = floor( (sigma * eps_q + 8) / 16 )

The measured statistics of the generator are a mean of -0.02 and a variance
of 0.99 over 20000 draws. For a stored `N(10, 6^2)`, 4000 reads give a mean
of 10.15 and a deviation of 6.02.

This is a pseudo-random generator. It is good enough for the uncertainty
estimates of BNNs and embeddings. It is not a source of cryptographic or
privacy-grade entropy: a DP deployment would need a true entropy source to
seed it, or the analog flavour.

## Analog flavour (behavioural)

The alternative generator samples supply-voltage noise. The noise passes
low- and high-pass filters, is amplified, held on a capacitor and turned
into a pulse by an inverter. The pulse modulates how far the selected cell
discharges its bit line, and a shared 4-bit ADC digitises the result. A
small register keeps the sign. None of this is logic, so `analog_rng_adc`
is a behavioural model of its digital effect only: every strobe draws
`eps ~ N(0,1)` (a 12-term sum of `$urandom`), and the outputs are

    adc_code = min(round(sigma * |eps| / 4), 15),  noise = +-4 * adc_code

The 4-mu-LSB ADC step, which makes the ADC full scale cover `sigma = 15` at
`|eps| = 4`, is this model's choice. Other resolutions of the ADC sweep (2 to 6 bits) are
set with `ADC_BITS` and `ADC_LSB_LOG2`. Setting `ANALOG = 1` on `pmem_top` puts
the model in every subarray in place of the CLT generator and multiplier. The
rest of the memory is unchanged. This flavour is for simulation only: it
cannot be synthesized, and its output is not reproducible.

## Host interface (`pmem_top`)

| port          | dir | width | meaning |
|---------------|-----|-------|---------|
| `clk`, `rst_n`| in  | 1     | clock; asynchronous active-low reset |
| `req_valid`   | in  | 1     | a request this cycle |
| `req_we`      | in  | 1     | 1 = write, 0 = read |
| `req_prob`    | in  | 1     | for writes: store as probabilistic (mu, sigma) word |
| `req_addr`    | in  | 14    | word address (map above) |
| `req_wdata`   | in  | 16    | write data |
| `seed_we`     | in  | 1     | reseed all generators (do not combine with a read) |
| `seed`        | in  | 16    | seed value |
| `rsp_valid`   | out | 1     | read data valid (exactly one cycle after each read) |
| `rsp_prob`    | out | 1     | the word read was probabilistic |
| `rsp_data`    | out | 16    | read data or sample |

Parameters: `N_MATS` (4), `N_SUB` (4), `ROWS` (128), `COLS` (128), `MUX` (8,
with `COLS / MUX` required to be 16), `CLT_N` (12), `ANALOG` (0), and for
the analog flavour `ADC_BITS` (4) and `ADC_LSB_LOG2` (2). Two
concurrent assertions in `pmem_top` state the response rule. A third, in
`pmem_mat`, states that at most one subarray answers.

Only one access per cycle is served across the whole memory; mats do not
operate in parallel. The original system study quotes throughput per area of
an array, not a port structure. A wider host port, with one request per mat
per cycle, would be a straightforward extension.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Each also has a watchdog. The models they
compare against are in `tb/pmem_ref_pkg.sv`. These are an integer
restatement of the LFSR, the seed derivation, the quantiser and the rounding,
so the digital memory is checked bit-exactly, sample by sample.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_lfsr16` | leap-ahead sequence vs bit-serial model, hold, seed load, zero-seed guard, no repeat in 4096 outputs |
| `tb_clt_grng` | 20000 draws vs reference (across a reseed); mean and variance of eps; a CLT-4 instance with variance 1/3 |
| `tb_sigma_eps_mult` | all 4096 sigma x eps pairs vs real-arithmetic rounding |
| `tb_sample_unit`, `tb_row_decoder`, `tb_col_mux`, `tb_bit_array`, `tb_mode_reg` | function of each datapath piece against shadow models |
| `tb_analog_rng_adc` | code/sign/noise consistency, monotonic in sigma, hold, noise statistics, for a 4-bit and a 6-bit ADC |
| `tb_pmem_subarray` | random traffic vs shadow memory + reference RNG; latency; RNG not advanced by deterministic reads; N(10, 36) statistics |
| `tb_pmem_mat` | back-to-back traffic over four subarrays, each with its own reference RNG |
| `tb_pmem_top` | the full-size memory end to end: 16384-word fill, 40000 random requests, a reseed. It counts and requires every mechanism (both modes read and written, mode switches both ways, sigma = 0 words, back-to-back sampling, every subarray) |
| `tb_pmem_top_analog` | the analog flavour: ADC-step noise, bounds set by sigma, sigma = 0, N(5, 64) statistics |
| `tb_pmem_workloads` | host kernels on the full-size memory: BNN 128-element product (5 passes), DP release of 128 elements (20 releases, noise N(0, 49) checked), PCME 1024-d pair with 10 Monte Carlo samples; streamed loads return one per cycle |

Running one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/pmem_pkg.sv tb/pmem_ref_pkg.sv tb/tb_pmem_top.sv \
        --top-module tb_pmem_top -Mdir obj -o sim
    ./obj/sim

The other modules are found through `-Irtl`. Every testbench runs in well
under a minute. The full-size `tb_pmem_top` and `tb_pmem_workloads` each take
about 20 s. Simulators with two-state variables start uninitialised cells at
random values, and the testbenches write every word before they read it.

The workload sizes fit easily. The BNN and DP kernels use 256 words each.
The PCME pair uses 2048 words of 16384. A whole MobileNet BNN (about 3.2 M
weights, about 6.4 MB as (mu, sigma) words) or a whole 2000-embedding
retrieval gallery (about 4 MB) does not fit in 32 KiB. They would be streamed
through the memory, or held in a larger instance. The original PCME study
used 16 mats of four 32 kB subarrays, for example `N_MATS = 16`,
`ROWS = COLS = 512`, `MUX = 32`.

## Departures and choices

What follows the original architecture:

* the `w = mu + eps * sigma` decomposition
* per-word deterministic/probabilistic mode set by ordinary writes, and
  identical loads for both kinds of data
* 8-bit `mu` and 4-bit `sigma`
* 128 x 128 subarrays with a MUX ratio of 8, in four mats of four subarrays
* a CLT generator of twelve 16-bit LFSRs with an adder and quantiser
* a local multiplier for `sigma * eps`
* the analog alternative with a 4-bit ADC and a sign register

What is this implementation's own, because the architecture leaves it open:

* the 16-bit word, the bit layout of the probabilistic word and its
  two's-complement mean
* one mode bit per word rather than per cell
* the `eps` fixed-point format, the quantiser rounding and the
  multiplier rounding
* the LFSR polynomial, the 16-step leap-ahead, the seeding scheme and the
  reseed port
* one generator per subarray read channel, advanced only by probabilistic
  reads
* the one-cycle, single-port host protocol and the address map
* the adjacent-column multiplexer interleave
* the ADC step of the analog model

Wider formats built from several 4-bit units (for example an 8-bit `sigma`)
are possible in the architecture but not in this RTL, whose word layout is
fixed at 8-bit `mu` and 4-bit `sigma`.

Not modelled: the bit-cell circuits (6T SRAM, RRAM and FeRAM behave
identically at this level), sense amplifiers, prechargers, write drivers and
level shifters. These have no logic function beyond the cell read and write
modelled in `bit_array`. The physical noise source of the analog flavour is
also not modelled. The area, latency and energy figures of the original
study come from its own circuit-level simulator. They cannot be reproduced
from this RTL.
