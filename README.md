# Tri-channel real-time Toeplitz post-processor for a parallel quantum RNG

A continuous-variable quantum random number generator measures vacuum
fluctuations with a balanced homodyne detector. The digitised noise is
truly random, but it is not uniform. Classical electronic noise also
leaks into it. Before the bits can be used they must be compressed by a
*randomness extractor*. The extractor here is a Toeplitz hash: an m x n
binary matrix multiplied, in GF(2), by n raw bits to give m nearly
uniform bits. The ratio m/n follows from the measured min-entropy of the
source and the security parameter (the leftover hash lemma).

This RTL implements the post-processor of a *parallel* generator. Three
independent sideband modes of one detector, centred at 200 MHz, 600 MHz
and 1 GHz, are mixed down, filtered and sampled by three 16-bit ADCs.
All three ADCs and this logic share one 240 MHz clock. Parallelism comes
at two levels:

* **Outer layer:** one extractor per mode, all running at once. Each is
  sized to its mode's min-entropy: 519 x 768, 548 x 768 and 581 x 768.
* **Inner layer:** each extractor is a three-stage pipeline. It takes one
  16-bit sample per clock and never falls behind the ADC. It does this by
  cutting the 768-column matrix into 48 sub-matrices of m x 16 and
  handling one sub-matrix per clock.

Every 48 clocks the three channels together produce 519 + 548 + 581 =
1648 bits. At 240 MHz that is **8.24 Gbit/s**. The extracted bits of the
three channels are interleaved into one word stream for the host link
(PCI Express in the original FPGA build).

The design follows the publication *Parallel and Real-Time
Post-Processing for Quantum Random Number Generators* (X. Guo et al.).
The publication describes an implementation on a Xilinx Kintex-7
(xc7k325t) FPGA. The sections below say which parts follow that
description and which are this RTL's own choices.

## The Toeplitz product and how it is split

This indexing is the part most worth getting right. It fixes which seed
bit meets which raw bit, so any mistake changes every output bit.

### Seed

An m x n Toeplitz matrix is constant along its diagonals. It is fixed by
m+n-1 seed bits s_1 .. s_{m+n-1}. In the RTL, `seed[0]` holds s_1.

Rows are numbered from the **bottom**:

* The bottom row is s_1, s_2, .., s_n.
* The top row is s_m, .., s_{m+n-1}.
* Column c (1-based), read from the bottom up, is s_c .. s_{c+m-1}.

With 0-based indices, output bit b (row b from the bottom) is

    hash[b] = XOR over c = 0 .. n-1 of ( d[c] AND seed[c + b] )

The `out_hash` vector has the bottom row in bit 0 and the top row in bit
m-1. In the usual notation a_1 .. a_m, with a_1 at the top, `out_hash[0]`
is a_m and `out_hash[m-1]` is a_1.

### Raw bits

Raw bit d[c] is bit c mod 16 of the (c div 16)-th sample of a block,
counted from 0. Within a sample the bits are taken LSB first. The
publication does not state this bit order; it is this design's choice.

### Splitting into sub-matrices

The product is split into n/k = 48 sub-products, one per clock. Step i
(0-based) uses sample i and the seed bits

    window = seed[i*k .. i*k + m + k - 2]      (m + k - 1 bits)

Column j of that sub-matrix is `window[j +: m]`.

The publication states this range in two ways. Its flow chart
and the matrix equation agree with the formula above. One sentence of its
text gives the end as "m+i-1", which would be too short to fill the
sub-matrix. The RTL follows the flow chart.

### Why the split is exact

Matrix multiplication over GF(2) is linear. So the full product is the
XOR of the 48 sub-products, and no bit is lost by splitting.

A useful consequence: the lowest m' output bits of an m-row extractor are
exactly the hash of an m'-row Toeplitz matrix with the same seed prefix.
So a bigger channel can stand in for a smaller one.

## The extractor pipeline (`toeplitz_extractor`)

The pipeline has three stages, as in the publication. Each stage is a
separate module.

| Stage | Module | What it does | Register at its output |
|---|---|---|---|
| matrix construction | `toeplitz_matgen` | stores the seed; selects the current window | window, sample, first/last flags |
| sub-matrix multiplication | `toeplitz_submul` | ANDs each column with its raw bit (array `temp`); adds the 16 columns in a cascade of XORs | `sum_reg` |
| vector accumulation | `toeplitz_accum` | XORs the 48 values of `sum_reg` of one block | `out_hash` |

### How the window is produced

The publication produces the window with a "shift register with
feedback". In the RTL this is a copy of the seed that rotates right by k
bits on every accepted sample. Its lowest m+k-1 bits are always the
current window.

At step 0 of each block two things happen:

* the window is taken straight from the seed store;
* the rotating copy is reloaded from the seed store.

So every block starts from the stored seed. The reload is this design's
way of closing the loop; the publication does not say how its register
returns to the start.

### Accumulation

The publication describes keeping all 48 partial vectors and XORing them
at the end. The RTL XORs each partial vector into a running accumulator
as it arrives. The result is identical and needs one m-bit register
instead of 48.

### Timing

With `in_valid` high on every clock:

* a hash appears every 48 clocks;
* `out_valid` pulses two clocks after the edge that takes the last sample
  of the block (one clock per register stage after the first);
* `out_hash` then holds until the next block completes.

When `in_valid` is low, the whole pipeline holds. Block boundaries are
counted in accepted samples, not clocks, so gaps from the ADC interface
do no harm.

### Data flow of one channel

    sample i ──► [matgen: window_i, d_i] ──► [submul: sum_reg = M_i · d_i] ──► [accum: acc ^= sum_reg]
                    ▲ seed store / rotating copy                                   └─► out_hash every 48

## Getting the bits out: packing and mixing

The publication says only that the three channels' random numbers are
"alternately mixed" and sent to the host. The blocks below are this
design's simplest reading of that sentence.

### `rng_packer` (one per channel)

* Appends each m-bit hash, bit 0 first, to a buffer of m+64 bits.
* Offers the lowest 64 bits as a word whenever at least 64 bits are
  buffered.
* Uses a valid/ready handshake for the words.
* A channel's stream is the exact concatenation of its hashes, with no
  padding. Hashes do not line up with word boundaries, because 519, 548
  and 581 are not multiples of 64.

### `rng_mixer`

* Chooses among the channels that have a word ready with a round-robin
  arbiter. With all three busy the order is 0, 1, 2, 0, ...
* Registers the chosen word together with a 2-bit channel tag `out_ch`.
  The host can separate the channels by the tag, or use the mixed stream
  as it is.

### Back-pressure and overflow

The host link needs 34.3 bits per clock on average. The 64-bit stream can
carry up to 64 bits per clock.

If the host stops taking words, a packer keeps what it already holds. A
new hash that does not fit is **dropped whole**. When that happens:

* `drop[c]` pulses for one clock;
* `overflow[c]` is set and stays set until reset.

Data is never corrupted silently, and the output stream never contains a
partial hash.

## Loading the seed

Each channel's seed is written as 16-bit words:

* `seed_ch` selects the channel;
* `seed_addr` selects the word (bits `seed_addr*16 .. +15`);
* `seed_we` performs the write.

Each seed is 1286, 1315 or 1348 bits long, i.e. 81, 83 or 85 words. Bits
past the seed length are ignored. Seeds reset to zero, which makes every
hash zero until a seed is written.

Write a seed while its channel is idle. A write during a block can mix
old and new seed bits in that block. The window switches cleanly only at
block boundaries.

The publication stores the seed inside the FPGA but does not say how it
gets there. This port is this design's choice.

## Top level (`qrng_postproc_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | common clock (240 MHz originally); asynchronous active-low reset |
| `adc_valid` | in | 3 | sample valid, one per ADC |
| `adc_data` | in | 3 x 16 | raw samples of ADC 1..3 |
| `seed_we`, `seed_ch`, `seed_addr`, `seed_wdata` | in | 1, 2, 7, 16 | seed write port |
| `out_valid`, `out_data`, `out_ch` | out | 1, 64, 2 | mixed output word and its channel |
| `out_ready` | in | 1 | host link takes the word |
| `drop`, `overflow` | out | 3, 3 | per channel: hash dropped (pulse), sticky overflow |

### Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `K` | 16 | sub-matrix width, equal to the ADC resolution |
| `N` | 768 | columns of every matrix; must be a multiple of `K` |
| `M0`, `M1`, `M2` | 519, 548, 581 | rows of channels 0, 1, 2 |
| `W` | 64 | output word width (this design's choice) |
| `AW` | 7 | seed word address width, derived from the largest channel |

The constants live in `qrng_pkg`. Channel 0/1/2 are matched to the
200 MHz / 600 MHz / 1 GHz modes in the order the publication lists them.
It does not state that pairing explicitly.

### Cost

Logic grows as m x k per channel: m x 16 AND gates and XOR inputs in the
multiplier. Registers grow as m + n per channel, for the seed and its
rotating copy. A generic synthesis of the default top gives about 16,600
flip-flops.

The original build used about 61% of the FPGA's 203,800 LUTs for the
three extractors. Its PCI-E, ADC and other interface logic used about 28%.

## What is not in this RTL

* **Analog front end, ADCs and board clock.** The optics, homodyne
  detector, RF mixers, filters and ADC chips have no logic function. The
  RTL starts at the ADC sample bus (`adc_valid`/`adc_data`). The FPGA
  logic that captures the ADC data depends on the board and is not
  described in the publication.
* **PCI Express interface.** This is vendor IP. The RTL ends at a
  valid/ready word stream meant to feed it.
* **Global clock buffers.** The original design routes the clock through
  several global buffers, one per module. This cut the clock fanout from
  about 7.6 million loads and reduced the timing score. It is a matter of
  FPGA clock-tree placement, not of behaviour. Here the RTL has one `clk`
  input; insert buffers in the target's flow.
* **DDR3 and trigger-mode logic.** These appear in the original resource
  table but were unused there.

## Departures from the original, in one place

* The accumulator keeps a running XOR instead of storing 48 partial
  vectors. The result is the same.
* The rotating seed copy is reloaded from the seed store at every block
  start.
* `sum_reg` is the output register of the multiplication stage. This is
  where the original flow chart places it; the original text describes
  it with the third stage.
* The following are this design's own choices:
  * the `in_valid` sample qualifier;
  * asynchronous reset;
  * the seed write port;
  * the LSB-first raw-bit order;
  * the bit-0-first output order;
  * the 64-bit word packer with drop-on-overflow;
  * the round-robin mixer with channel tag.

## Verification

Every module has a self-checking testbench in `tb/`. Each computes the
expected values independently: Toeplitz products come straight from the
formula `hash[b] = XOR_c d[c] & seed[c+b]`. Each prints one line
`TB_RESULT checks=N failures=F`.

| Testbench | What it checks |
|---|---|
| `tb_toeplitz_matgen` | windows, samples and first/last flags for every step, with gaps in `in_valid` and a seed rewrite |
| `tb_toeplitz_submul` | the sub-matrix product, bit by bit, including all-zero and all-one samples |
| `tb_toeplitz_accum` | XOR of blocks of 1 to 48 vectors, with gaps; the output pulse and the hold behaviour |
| `tb_toeplitz_extractor` | full 581 x 768 hashes against the formula; one hash per 48 clocks; two-clock latency; gaps; reseeding |
| `tb_rng_packer` | gap-free concatenation under random back-pressure; word out and hash in on the same clock; drop and overflow |
| `tb_rng_mixer` | order within each channel, channel tags, strict alternation when all channels are busy, words held while stalled |
| `tb_qrng_postproc_top` | the whole chip at default sizes (see below) |
| `tb_workload_stats` | a longer full-rate run at default sizes (see below) |
| `tb_workload_sweep` | three builds with all channels at 192, 384 or 576 rows, the sizes of the original resource study; hashes, rate, word counts |

`tb_qrng_postproc_top` runs the whole chip at its default sizes in three
phases:

1. Full rate: it checks one hash per 48 clocks per channel.
2. Random ADC gaps and random host back-pressure, with new seeds.
3. The host stops: every channel must drop hashes and raise `overflow`.

In every phase, the bit stream rebuilt per channel from the mixed output
is compared with the reference hashes. The testbench also counts that
each mechanism actually occurred: seed writes, ADC gaps, host stalls,
channel alternation and drops.

`tb_workload_stats` drives all three channels at full rate for 250 blocks
(12,000 clocks, 412,000 output bits). The input is Gaussian-distributed
samples with a min-entropy of about 13 bits per sample, close to that of
the real modes. The run checks:

* every output bit against the reference;
* the throughput: 34.33 bits per clock, which is 8.24 Gbit/s at 240 MHz;
* that each channel, and the mixed stream, pass the NIST SP 800-22
  frequency and runs tests at significance 0.01.

The original evaluation ran the full NIST suite on 1000 sequences of
1 Mbit and made ten-hour stability runs on real hardware. Those are far
beyond simulation. The streaming design has no length limit that would
stop it from producing that much data.

`tb_workload_sweep` builds the top three times, with every channel at 192,
384 or 576 rows. These are the sub-matrix sizes (192 x 16, 384 x 16,
576 x 16) at which the original logic use and timing were measured. All
three builds get the same seed prefix and the same samples. Each is
compared with the lowest 192, 384 or 576 bits of one reference hash, which
also confirms that a taller extractor can stand in for a shorter one.

### Running a testbench with Verilator

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
        rtl/qrng_pkg.sv tb/tb_qrng_postproc_top.sv --top-module tb_qrng_postproc_top
    ./obj_dir/Vtb_qrng_postproc_top

Every testbench finishes in seconds. Verilator is a two-state simulator,
so every register that is read is reset. The testbenches drive `rst_n`
high and then low at time 1 so the asynchronous reset sees an edge.

### Changing sizes

* Set `M0`..`M2`, `N` and `K` on `qrng_postproc_top`. `N` must be a
  multiple of `K`.
* If `K` differs from the ADC width, a sample-width adapter is needed in
  front.
* Raising `K` cuts the clocks per block (n/k), and so raises the rate per
  clock. It also multiplies the AND/XOR array of each channel by the same
  factor. The original design chose `K` = 16 to match one ADC sample per
  clock.
* To add channels, widen `qrng_pkg::NCH` and `ch_id_t`, and extend the
  per-channel size selection in the top.
