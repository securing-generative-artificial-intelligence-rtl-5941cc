# A parallel MTJ true random number generator for generative-model latent codes

A magnetic tunnel junction (MTJ) has two stable states: parallel (P, low
resistance, read as 1) and antiparallel (AP, high resistance, read as 0). Start
from AP. A current pulse that is just strong enough to flip it then does so only
about half the time, and thermal noise decides which half. Repeat
"reset to AP, perturb, read" on many cells at once and you have a true random
number generator (TRNG) whose throughput grows with the number of cells.

This RTL is the digital side of such a generator. It is built around a
prototype with 16 MTJs. A 16-channel DAC drives the cells and a 16-channel ADC
reads them, and both talk SPI to an FPGA. The cycle runs at 100 kHz, so the
array gives 16 bits every 10 µs (1.6 Mbit/s). The logic does four things:

* It runs the reset–perturb–sample cycle on all 16 cells in parallel.
* It turns the sampled voltages into bits.
* It cleans the bits up, either with a cheap XOR of three raw bits or with
  Toeplitz hashing. Raw MTJ bits are biased and slightly correlated.
* It packs the bits into the input vector ("latent code") of a class-conditional
  generative adversarial network (GAN): 100 single-precision numbers in [-1, 1]
  plus 10 class numbers.

A true random latent code breaks the fixed chain from a user-chosen seed to the
generated image. An attacker who probes the model through a seeded
pseudo-random generator relies on that chain.

The MTJs, the DAC, the ADC and the GAN are outside this RTL. The testbenches
contain behavioural models of the first three.

## Signal chain

```
             SPI (dac_*)                      SPI (adc_*)
   +-----------------------+         +-----------------------------+
   |                       v         |                             |
   |   16-ch DAC --Vdd--> MTJ --Vout--> 16-ch ADC                  |
   |                      |                                        |
   |                      R (sense resistor to ground)             |
   |                                                               |
 mtj_sequencer  <----------------------------------------------------+
   |  (threshold_binarizer inside)          raw_valid/raw_word tap
   |                                        --> switch_prob_monitor
   v 16 bits per 10 us                          (ones per cell in 1000 cycles)
 raw_fifo (1024 x 16, drop-and-count when full)
   |
   +--> pp_mode = RAW ----------------------------+
   +--> xor3_combiner   (w0 ^ w1 ^ w2) -----------+
   +--> toeplitz_extractor (256 -> 128 bits) -----+
                                                  v
                                   word_packer (2 x 16 -> 32 bits)
                                                  |   rnd_valid/rnd_word tap
                                                  v
                                   latent_gen (100 x float32 + 10 one-hot)
                                                  |
                                                  v lat_* stream to the host
```

`mtj_trng_top` wires this chain together. The only state it adds is one
register that detects a change of `pp_mode`.

`switch_prob_monitor` listens to the raw tap. After `prob_start` it counts the
ones of each cell over the next 1000 raw words. The host uses the counts to
trim `perturb_code[i]` to each cell's 50 % point, as in the published
amplitude sweeps. The monitor does not stop the generator.

## The reset–perturb–sample cycle

This is the part that needs the most care. Everything here is timed against
analog devices that cannot be paused.

**What each cycle must do.**
1. Drive every cell with a fixed negative voltage. This resets it to AP.
2. Drive every cell with its own positive perturb amplitude. The amplitude is
   trimmed per cell so that the cell switches with 50 % probability. Cells
   differ, so each one has its own 50 % point.
3. Sample each cell's output voltage, the voltage across the sense resistor.
4. Compare each sample with that cell's threshold.

A cell in P has a low resistance, so more current flows and its sample is
higher. Since the devices are non-volatile, every bit needs its own reset.

**How it is laid out in time.** The design assumes a 100 MHz clock. Both SPI
clocks run at clk/2, and both buses use SPI mode 0 with the MSB first.

| step | bus | frame | what the cells see |
|---|---|---|---|
| once, after `enable` rises or on `reload` | DAC | 16 × "write input register n = perturb_code[n]" | nothing, outputs unchanged |
| cycle start (every `CYCLE_CLKS` = 1000 clocks) | DAC | "all outputs = reset_code" | reset pulse begins |
| wait `RESET_HOLD` | | | |
| | DAC | "update all outputs from input registers" | all 16 perturb pulses start together |
| wait `PULSE_HOLD` | | | |
| | DAC | "all outputs = read_code" | perturb ends; small read bias |
| | ADC | 17 frames: request ch 0..15, results return one frame later | sampled |
| end | | `raw_valid` pulse, 16-bit `raw_word` | |

The perturb amplitudes sit in the DAC input registers. A single "update all"
command therefore starts all 16 perturb pulses on the same edge. Reset and read
levels are the same for all cells and go out as broadcast writes. Each cycle
needs only three DAC frames.

Pulse widths at the default settings:

* The reset pulse lasts `RESET_HOLD + 52` = 92 clocks (0.92 µs).
* The perturb pulse lasts `PULSE_HOLD + 52` = 202 clocks (2.02 µs). The 52
  clocks are one 24-bit frame at clk/2 (48 clocks), the 2-clock chip-select gap
  and 2 clocks of handover.

All the work in a cycle takes about 950 of the 1000 clocks. The cycle timer runs
freely, so raw words come out exactly 1000 clocks apart. If a cycle is due while
the previous one is still running (only possible with other settings), it is
skipped and counted in `overrun_count`.

**ADC pipelining.** In the ADC's manual mode, the channel requested in frame k
is converted when chip select rises and returned in frame k+1 as
`{chan_id[3:0], result[11:0]}`. So 16 channels take 17 frames. The controller
checks every returned channel tag and counts mismatches in `id_error_count`.

**Pulse width against cycle rate.** The device data behind this design were
characterised with 5 µs pulses, and the system is quoted at 100 kHz. Both
cannot hold at once when the 16 ADC channels are read one after another over
SPI: that alone takes about 6 µs of the 10 µs cycle. The design keeps the
100 kHz rate and uses a 2 µs perturb pulse. For a longer pulse, raise
`PULSE_HOLD` together with `CYCLE_CLKS`. The 50 % amplitudes must then be
trimmed again, because the switching probability depends on both amplitude and
width.

**Converter frame formats.** The DAC takes 24-bit frames
`{cmd[3:0], addr[3:0], code[15:0]}`. The codes are two's-complement and bipolar.
The commands are in `mtj_trng_pkg`: `DAC_WR_INPUT` = 1, `DAC_UPDATE_ALL` = 2,
`DAC_WR_ALL_OUT` = 9. The ADC command word is
`{0, 0001 (manual), ch[3:0], 0000, 1 (tag results), 00}`. These follow the usual
style of 16-channel SPI converters, but they are not copied from any one data
sheet. Check them against the parts you fit, and change `dac_frame`, `adc_cmd`
and the enum in the package if they differ. The sequencer does not depend on
the encodings.

## From voltages to bits

`threshold_binarizer` sets bit i to `sample[i] > vth[i]`: strictly greater, one
threshold per cell. Bit i belongs to cell i+1. How to choose the operating
point:

* **`vth[i]`**: midway between the cell's P and AP readings at the read bias.
* **`perturb_code[i]`**: the amplitude at which the cell switches half the time.
  Find it by sweeping the amplitude and counting ones. The published cells have
  their 50 % points spread over roughly 0.75–1.0 V.
* **`reset_code`**: a negative level, comfortably past the AP switching
  threshold.
* **`read_code`**: small enough never to switch a cell.

## Raw store

`raw_fifo` holds 1024 raw words (16 kbit). The MTJ cycle cannot stall, so the
write side has no ready signal. A word that arrives while the store is full is
dropped and counted in `overflow_count`. Long recordings (10⁸ bits, say) should
be taken from the `raw_word` tap, or drained continuously from the read side
into off-chip memory.

## Cleaning up the raw bits

`pp_mode` selects one of three schemes:

* **Raw (`PP_RAW`).** The bits pass through unchanged. This is useful for
  characterisation, but raw bits fail standard statistical tests.
* **XOR of three (`PP_XOR`, `xor3_combiner`).** Three consecutive raw words are
  XORed bitwise. Each output bit is therefore the XOR of one cell's bits from
  three consecutive cycles. If each bit has bias ε, the XOR has bias 4ε³. The
  rate drops to one third, 533 kbit/s. This scheme is cheap enough to do in the
  memory array itself. The original "three raw bits" could also have been
  grouped some other way; this grouping is a choice of this design.
* **Toeplitz hashing (`PP_TOEPLITZ`, `toeplitz_extractor`).** This is a
  universal-hash extractor, y = T·x over GF(2). T is an N_OUT × N_IN Toeplitz
  matrix set by an (N_IN+N_OUT−1)-bit seed: `T[i][j] = seed[i−j+N_IN−1]`. The
  default is 256 bits in and 128 bits out, so the rate is 800 kbit/s. Software
  usually computes this product with an FFT. In logic a direct product is
  cheaper: for each input bit x_j = 1, the column `seed[N_IN−1−j +: N_OUT]` is
  XORed into the result. The extractor keeps a copy of the seed shifted left
  16 bits per absorbed word, which turns that moving window into fixed wiring.
  So 16 input bits are absorbed per clock (about 2,100 word-level cells at the
  default size). While the 8 output words drain, no input is taken. Choose the
  sizes and the seed for your entropy estimate. The seed must be random and
  independent of the MTJ bits; it is sampled at the start of every block.

Changing `pp_mode` flushes every partly built group, word and latent code in the
chain. The words already in the raw store are kept. To get clean boundaries,
change the scheme while `enable` is low and the store is empty.

## From bits to latent codes

`word_packer` joins two 16-bit words into one 32-bit word, the first word in the
upper half. `latent_gen` turns each 32-bit word w into the single-precision
value of 2w/(2³²−1) − 1, which lies in [−1, 1].

The logic actually computes (w − 2³¹)/2³¹. This differs from the exact value by
less than 2⁻³¹, far below single-precision resolution. It converts the signed
32-bit integer with round-to-nearest-even and lowers the exponent by 31. For
example, w = 3,937,735,687 gives 0x3F556A28 = 0.8336511.

One latent code is 110 values:

* elements 0–99: random values, which use 3,200 random bits per code;
* elements 100–109: a one-hot class code, 1.0 at `class_idx` and 0.0
  elsewhere.

`lat_index` numbers the elements and `lat_last` marks element 109. The output is
a valid/ready stream, one value per clock when data is available.

Throughput at the default settings, for one latent code:

| scheme | time per code | codes per second |
|---|---|---|
| raw | 2 ms | 500 |
| XOR | 6 ms | ~167 |
| Toeplitz | 4 ms | 250 |

At these rates, 10,000 images need 20, 60 and 40 s of generation respectively.

## Top-level interface (`mtj_trng_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock (100 MHz assumed), asynchronous active-low reset |
| `enable`, `reload` | in | run the generator; rewrite perturb codes into the DAC |
| `perturb_code[16]`, `vth[16]`, `reset_code`, `read_code` | in | cell operating points (static while running) |
| `pp_mode`, `toeplitz_seed`, `class_idx` | in | scheme, extractor seed, class of the codes |
| `dac_sclk/mosi/cs_n`, `adc_sclk/mosi/miso/cs_n` | out/in | the two SPI buses |
| `raw_valid`, `raw_word` | out | raw word tap (one pulse per cycle) |
| `rnd_valid`, `rnd_word` | out | post-processed 32-bit words as they enter `latent_gen` |
| `prob_start` / `prob_busy`, `prob_done`, `prob_count[16]` | in / out | switching-probability window: ones per cell over 1000 cycles (10 bits each) |
| `lat_valid/ready/data/index/last` | out/in | latent-code stream |
| `running`, `overrun_count`, `id_error_count`, `overflow_count`, `fifo_level` | out | status |

Parameters and their defaults:

* `CYCLE_CLKS` = 1000
* `RESET_HOLD` = 40
* `PULSE_HOLD` = 150
* `FIFO_DEPTH` = 1024
* `TOEP_N_IN` = 256, `TOEP_N_OUT` = 128

At the defaults the top synthesises to about 2,660 word-level cells, 1,220
flip-flop bits and the 16 kbit store.

## What comes from the published prototype and what is this design's own

From the prototype:

* 16 cells read in parallel;
* 16-channel DAC and ADC on SPI;
* a 100 kHz reset–perturb cycle and 1.6 Mbit/s;
* a negative reset then a positive per-cell perturb pulse;
* a per-cell threshold with "above means 1";
* raw bits stored in the FPGA;
* XOR of three raw bits, and Toeplitz hashing, as the two clean-up schemes;
* 32-bit words normalised to [−1, 1] as single-precision numbers;
* latent codes of 100 random plus 10 class numbers.

This design's own choices:

* the 100 MHz clock and all SPI timing;
* the converter frame formats and command codes;
* preloading the perturb codes and starting all pulses with one update command;
* the read bias during sampling;
* the 2 µs perturb and 0.9 µs reset pulses;
* the 1024-word store and its drop policy;
* grouping "three raw bits" as one cell over three cycles;
* the Toeplitz size, seed port and direct (non-FFT) evaluation;
* the bit order in words;
* the one-hot class code;
* the on-chip switching-probability counter (1000-cycle window);
* run-time scheme selection with flushing;
* doing the latent-code conversion in logic rather than in host software.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block's
outputs with values the testbench computes itself and ends with a
`TB_RESULT checks=… failures=…` line.

* `tb_spi_master`: loop-back slave; frames in both directions, chip-select
  length, frame time.
* `tb_threshold_binarizer`: random samples, including samples equal to their
  threshold.
* `tb_mtj_sequencer`: runs against the three device models. Checks:
  * the preload and the reload;
  * one reset and one perturb per word;
  * every word against that cycle's ADC samples and thresholds;
  * reset and perturb pulse widths in clocks;
  * words exactly 1000 clocks apart;
  * cells driven far from their 50 % point give constant bits, and the others
    give 35–65 % ones.
* `tb_raw_fifo`: random traffic against a queue model, then forced overflow
  with an exact drop count.
* `tb_xor3_combiner`, `tb_word_packer`: random traffic with stalls on both
  sides, plus a flush.
* `tb_toeplitz_extractor`: random seeds and blocks against a direct matrix
  product; rate.
* `tb_latent_gen`: bit-exact comparison with a float conversion done in real
  arithmetic, including the example above, ±1 and 0, class codes, indices and
  stalls.
* `tb_switch_prob_monitor`: random words at random intervals against per-cell
  counts; words outside a window are ignored and a new start clears the counts.
* `tb_mtj_trng_top`: the whole design at its default parameters, about
  2.4 million clocks. It runs:
  * two codes in raw mode with random output stalls and a mid-run reload;
  * one XOR code and one Toeplitz code;
  * a phase with the output held off until the store overflows, during which
    the probability window runs. The cell that was reloaded far below its 50 %
    point must count 0 ones; the others must count 350–650.

  Every output value and every post-processed word is compared with a reference
  built from the raw tap. It also counts each mechanism (three schemes, scheme
  changes, stalls, reload, overflow) and fails if one never happened.

The behavioural models in `tb/` are not synthesisable and are only as good as
their assumptions:

* `dac_model`: the frame format above.
* `mtj_cell_model`: linear switching probability around a per-cell 50 % point,
  two output levels plus noise.
* `adc_model`: one-frame-late results with channel tags.

They check the controller's sequencing, not the physics.

`tb_workload_latent_batch` is a scaled-down run of the intended workloads. It
drives every model cell at its 55 % point, so the raw bits carry a bias of 0.05.
For each scheme it runs 1,500 cycles (24,000 raw bits) at the default
parameters, with the class index stepping 0..9 between codes. It checks:

* the monobit frequency statistic s = |ones − zeros| / √n of the bits that
  reach `latent_gen`: raw must clearly fail (s > 8), XOR and Toeplitz must pass
  with margin (s < 4);
* XOR cuts the measured bias to under a third of the raw bias;
* the bit count of each scheme matches its rate;
* all latent values lie in [−1, 1], and after clean-up their mean is within
  five standard errors of 0;
* every class part is one-hot at the code's class index;
* a 16-bin histogram of the 32-bit words, binned by their top four bits. This
  is a small version of the usual word histogram. For XOR and Toeplitz its
  chi-square (15 degrees of freedom) must stay below 44.3, i.e. p > 1e-4;
* the runs test on the same bit sequence (each word MSB first). For XOR and
  Toeplitz, the number of runs V must satisfy
  |V − 2nπ(1−π)| / (2√(2n)·π(1−π)) < 4, where π is the ones fraction.

In one run the frequency statistics were raw 14.3, XOR 1.07 and Toeplitz 2.44.
The histogram chi-squares were 41.2, 19.2 and 17.1, and the runs statistics 0.02,
1.10 and 0.51. The model cells are independent, so raw bits pass the runs test.
Only their bias makes them fail. Real cells also show correlations. This run takes
about 4.5 million clocks (under a minute).

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mtj_trng_pkg.sv tb/tb_mtj_trng_top.sv --top-module tb_mtj_trng_top
./obj_dir/Vtb_mtj_trng_top
```

Replace the testbench name to run any other one. The full-design run takes well
under a minute.

## Limits

* The converter protocols must be checked against real parts before hardware
  use. The models were written to the same assumptions as the RTL, so agreement
  between them proves consistency, not compatibility.
* No clock-domain crossing is modelled. Everything runs on one clock, and the
  SPI clocks are derived from it.
* The configuration inputs are assumed static while `enable` is high. The only
  exception is the perturb codes, which are picked up on `reload`.
* There is no on-line health test of the entropy source, such as a
  repetition-count or adaptive-proportion test. A stuck cell shows up only when
  the host runs a probability window: its count is 0 or 1000. In raw mode it
  also shows up as a constant bit on the raw tap.
* The GAN itself, and scaling to far larger arrays, are outside this RTL.
  `N_MTJ` is a package constant tied to the 16-channel converters.
* The 32-bit LFSR that serves as the pseudo-random baseline in the published
  comparison is not included. Its polynomial and seeding are not given, and it
  is not part of the generator.
