# Mixture-of-Gaussian Bayesian compute-in-memory tile

A Bayesian neural network does not hold one value per weight but a
distribution, and it answers a question by running the same input several
times with freshly drawn weights: the spread of the answers says how much the
answer can be trusted. For a screening device that decides whether a skin
lesion needs a doctor, that spread is what allows an uncertain case to be
deferred instead of being silently misclassified.

Most hardware for such networks gives every weight a single Gaussian,
`w = mu + sigma * eps` with `eps ~ N(0,1)`. The design described here lets every
weight be a **mixture of K Gaussians** (K = 1 to 16, chosen after fabrication)
and draws from it inside the memory array:

1. pick one of the K components at random, with probabilities pi_1..pi_K;
2. scale a standard-normal sample with that component's sigma and add its mu.

Both steps happen in the words of a 64 x 8 compute-in-memory (CIM) tile, so a
whole matrix-vector product with a freshly sampled weight matrix takes one
clock. The standard-normal samples come from small in-word generators that
turn the static mismatch between transistors into zero-mean Gaussian time
pulses, which means they need no per-cell offset calibration.

This RTL is a reconstruction of a published 65 nm prototype (a 64 x 8-word
tile driven by a RISC-V core, run at 74.1 MHz). The digital parts are written
as synthesizable SystemVerilog. The analog parts (bitline discharge, current
DACs, ADC comparators, and the mismatch-based random generator) are
behavioural models with integer arithmetic, so the whole tile simulates with
plain Verilator. The section *Departures and open points* lists what is this
design's own choice rather than something the published design fixes.

## Block structure

```
 RISC-V core (not included) ── register bus ──► tile_controller ──► cim_tile
                                                (register map,       │
                                                 run sequencer,      │
                                                 result buffer)      │
   cim_tile                                                          ▼
   ┌────────────┐  r (4 b)  ┌─────────────────────────────────────────────┐
   │ mog_lfsr   ├──────────►│ 64 x 8 words                                 │
   │ (global,   │           │   dist_selector per word → alpha (wordline)  │
   │  12 bit)   ├─► grng_ctrl ─ Sel+/Sel- ─► grng_cell per 2 words → eps   │
   └────────────┘           │   cim_column per column: mu, sigma SRAM,     │
   input_buffer ── x (4 b) ─►   BL+/BL- discharge                          │
                            └──────────────┬──────────────────────────────┘
                                 2 x sar_adc per column (6 b)
                                           ▼
                                  adc_cal_reduce → y[8] (signed)
```

| module | kind | what it is |
|---|---|---|
| `mog_pkg` | package | sizes, `word_cfg_t`, `grng_sel_t`, the pulse-gate function, register map |
| `mog_lfsr` | RTL | the single 12-bit LFSR of the tile |
| `dist_selector` | RTL | per-word mixture-component selector |
| `grng_ctrl` | RTL | LFSR bits → one-hot entropy-bank device selects |
| `grng_cell` | model | mismatch-based Gaussian generator, two samples per clock |
| `input_buffer` | RTL | 64 x 4-bit input register file |
| `cim_column` | model | 64 words of mu/sigma storage and the bitline discharge |
| `sar_adc` | model | 6-bit SAR conversion with a static offset |
| `adc_cal_reduce` | RTL | offset capture and BL+/BL- reduction |
| `cim_tile` | RTL (contains models) | the tile |
| `tile_controller` | RTL | register interface and run sequencer |
| `mog_bnn_engine` | RTL (top) | controller + tile |

## Choosing a mixture component: the distribution selectors

Every word has its own selector with two flip-flop fields: a 4-bit code `c`
and a flag `F`. A weight with K components takes K adjacent rows of one
column; the first of them has `F = 1`, the others `F = 0`. Every sample the
LFSR broadcasts one uniform 4-bit value `r` to all selectors, and each word
computes

```
b_i     = (r <= c_i)
alpha_i = F_i ? b_i : b_i XOR b_(i-1)      (b_(i-1) from the row above)
```

`c_i` is the **cumulative** ratio of the group up to and including component
i, in 1/16 steps minus one, and the last word of a group holds 15. The `b`
values of a group therefore read 0...0 1...1 down the group, and the XOR
with the row above leaves exactly one `alpha = 1`: the word where the run of
ones starts. Component i is chosen with probability `(c_i - c_(i-1)) / 16`.
`alpha` gates the word's wordline, so only the chosen component discharges
the bitlines. The unselected components cost storage but almost no energy.

Programming examples (codes written top to bottom of the group):

| K | mixing ratios | codes c | F |
|---|---|---|---|
| 1 | 1 | 15 | 1 |
| 2 | 0.625, 0.375 | 9, 15 | 1, 0 |
| 3 | 5/16, 6/16, 5/16 | 4, 10, 15 | 1, 0, 0 |
| 16 | 1/16 each | 0, 1, ..., 15 | 1, 0, ..., 0 |

A column holds `floor(64/K)` weights; rows left over can be made K=1 words
with `mu = 0`. After reset every word is a K=1 group (`c = 15`, `F = 1`).

All selectors of the tile see the same `r`, so in a given sample every group
in the tile picks the component with the same cumulative position. That is
intended: the components of a mixture are trained as whole networks and are
meant to be drawn together, and one LFSR per tile is much cheaper than one per
word. Over many samples each weight still follows its own mixture.

## The Gaussian generator (`grng_cell`)

Each cell holds four banks of seven transistors: two PMOS banks for a charge
cycle and two NMOS banks for a discharge cycle. For each sample one device
from each "+" bank and one from each "-" bank is biased (the same indices in
every cell, from `grng_ctrl`). In the charge cycle the two chosen PMOS devices
charge two equal 1 fF capacitors; the side whose device is stronger crosses
the inverter threshold first. Inverters turn the two crossings into edges P
and N, and four three-input gates make the pulses

| pulse | gate inputs | active when |
|---|---|---|
| eps_C+ | CLK-bar, P, N-bar | charge cycle, P has risen, N not yet |
| eps_C- | CLK-bar, P-bar, N | charge cycle, N has risen, P not yet |
| eps_D+ | CLK, P-bar, N | discharge cycle, P has fallen, N not yet |
| eps_D- | CLK, P, N-bar | discharge cycle, N has fallen, P not yet |

The pulse width is the difference of the two crossing times. Both banks come
from the same process distribution, so the difference has zero mean without
any per-cell trim; it is Gaussian because it is set by many small independent
device deviations. Each cell gives one sample per clock phase, so one cell
serves two words: the charge sample goes to the word in column 2c and the
discharge sample to the word in column 2c+1 of the same row. With 7 x 7 device
pairs a cell has 49 possible values per phase, and different cells have
different values.

The model (`rtl/grng_cell.sv`) fixes each device's crossing time at
elaboration from the instance's `SEED` (27 ticks of 1/8 ns plus a sum of four
pseudo-random integers 0..9, minus 18). That gives a pulse-width SD of about
8 ticks = 1 ns, the operating point of the published chip. The 27-tick base is
close to the chip's measured average generator latency of 3.4 ns at 1 V. Over
32 model cells the normal Q-Q correlation of a cell's 49 values averages
0.986 (lowest 0.943); the silicon measurement was 0.977 on average with 90 %
of cells above 0.95, so the model is slightly more Gaussian than the chip. The output is the
signed width in ticks, `eps = width(+) - width(-)`, clipped to a half clock
period (54 ticks at 74.1 MHz). The function `mog_pkg::grng_gates` holds the
four gates, and the cell's testbench simulates them tick by tick as the
reference.

## One sample in a column

A word with `alpha = 1` discharges its column's differential bitline pair:

```
x * |mu| * 8      onto BL+ if mu >= 0, else BL-
x * sigma * |eps| onto BL+ if eps > 0, else BL-
```

`x` is the row's 4-bit input, `mu` is sign-magnitude (sign bit 7, magnitude
bits 6:0), `sigma` is 4-bit unsigned, and `eps` is in 1/8 ns ticks. The factor
8 makes one mu step equal to one standard deviation of `sigma*eps` at
sigma = 1, so a word stands for the weight `mu + sigma * N(0,1)`. Each bitline
has its own 6-bit SAR ADC with an LSB of 64 units. That is the largest power
of two that still lets the smallest input (x = 1) times the largest sigma over
one eps standard deviation (15 * 8 = 120 units) show as at least one LSB.
Codes saturate at 63.

`adc_cal_reduce` turns the two codes into one signed result
`y = (code+ - off+) - (code- - off-)`, in steps of 64 units
(8 mu-steps at x = 1). The offsets `off` are the codes read during a
calibration cycle, in which `input_buffer` turns every row off. The model
gives each ADC a static offset of 0 to 3 LSB to stand in for a real die.

## Timing

* One sample per clock. `mvm` starts a sample; within the same clock the
  selectors, generators, bitlines and ADCs settle, and `y` is registered at
  the clock edge, so `y_valid` follows `mvm` by one clock. Back-to-back `mvm`
  gives one result per clock. The LFSR advances four shifts per sample, so
  every sample has a new `r` and new device pairs.
* A run of R samples started through the controller takes R + 2 clocks from
  the clock that takes the start write to `done_irq` (R = 20: 22 clocks).
* Word, input and seed writes take one bus cycle each.

## Register map (`tile_controller`)

A bus request lasts one clock with `bus_valid = 1`. Read data comes back the
next clock with `bus_rvalid = 1`. Addresses are word addresses.

| address | access | content |
|---|---|---|
| `0x0000` | W | bit 0: start a run of R samples, bit 1: calibrate, bits 15:8: R (0 → 1, above 32 → 32) |
| `0x0000` | R | bit 0 busy, bit 1 done, bit 2 error (sticky: a write arrived during a run and was refused), bits 15:8 R of the last run |
| `0x0001` | W | LFSR seed (bits 11:0; 0 becomes 1) |
| `0x1000 + row*8 + col` | W | word: bit 16 F, bits 15:12 cumulative code, bits 11:8 sigma, bits 7:0 mu |
| `0x2000 + row` | W | input x (bits 3:0) |
| `0x3000 + s*8 + col` | R | result of sample s, column col, sign-extended |

Layers larger than the tile are run by reprogramming it (tile reuse). The core
adds up partial results and computes the mean and variance of the R samples.

## Sizes and what fits

The defaults are the prototype's: 64 rows x 8 columns, 4-bit inputs, 8-bit
mu, 4-bit sigma, 4-bit ratio codes, 6-bit ADCs, 12-bit LFSR, seven devices per
entropy bank. The result buffer holds R_MAX = 32 samples (the published
evaluation uses 20).

* One 64 x 8 MVM at K = 1 uses all 512 words: 512 multiply-accumulates per
  clock.
* K = 1..16: a column holds floor(64/K) mixture weights.
* The published skin-lesion classifier has fully connected layers
  2048-512-64-7 with K = 3 and 20 samples per input: 1,081,792 weights, i.e.
  3.2 million words. It does not fit in one tile. It runs by tile reuse,
  driven by the core's software, which is not part of this RTL. A load holds
  21 inputs (rows) by 8 outputs (columns), so a layer with I inputs and O
  outputs needs ceil(I/21) * O/8 loads (rounding O/8 up): 6,272 + 200 + 4 =
  6,476 loads per input image, each followed by a run of 20 samples. With
  one-clock register accesses a load costs about 760 clocks (576 word and
  input writes, seed and start, the 22-clock run, 160 result reads), about
  66 ms per image at 74.1 MHz; the published chip measured 72.15 ms for the
  same network including its core's overhead.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert rtl/mog_pkg.sv tb/tb_cim_tile.sv -y rtl \
          --top-module tb_cim_tile -Mdir obj_tile
./obj_tile/Vtb_cim_tile
```

Replace the testbench name for any other block. `tb_mog_bnn_engine` runs the
whole engine at its full default size through the register bus. It runs
calibration, a K = 1 run with exact expected values, a switch to K = 3
mixtures with a check of the drawn proportions, a GRNG-only run, seed
repeatability, R clamping and a refused write. It counts every one of these
mechanisms. It builds in under a minute and runs in well under a second.
`tb_cim_tile` covers the same mechanisms at 8 x 4 words.

`tb_fc3_workload` runs the classifier's last layer (64 inputs, 7 classes,
K = 3, R = 20) on the full-size engine as the core would: four tile loads of
21, 21, 21 and 1 inputs, each with its own seed and a 20-sample run, with the
partial sums of each sample added across loads. Every weight has its own
mixing ratios. The testbench predicts every partial result exactly from its
own LFSR model and the selection rule (sigma = 0 so that the results are
deterministic), then compares the per-class mean, variance and the predicted
class of each sample. The two larger layers differ only in the number of loads.
The same testbench then sweeps the mixture order over K = 1, 2, 4, 8 and 16
(equal ratios, floor(64/K) groups per column) and checks every sample of a
20-sample run against a row-by-row reference of the selection rule.

## Departures and open points

The following are this design's choices where the published description is
silent or gives only a name:

* **LFSR**: the polynomial (x^12 + x^6 + x^4 + x + 1), four shifts per sample,
  `r = state[3:0]`, the reset seed and the seed register.
* **GRNG device selection**: which LFSR bits choose which device, and the
  mod-7 mapping of a 3-bit field (device 0 is chosen twice as often as the
  others).
* **Selector code**: the flip-flops hold the cumulative ratio and the test is
  `r <= c`. The published equation uses `<=`, its figure prints `<`, and its
  text also calls the stored value "the mixing ratio". An adder chain would be
  needed to store pi_i itself.
* **mu format**: sign-magnitude with 7 magnitude bits (8 bits in total). The
  published circuit figure draws eight 8T cells plus a separate sign cell.
* **GRNG pairing**: the two words one cell serves are horizontal neighbours.
* **ADCs**: two per column (one per bitline), with ideal binary weighting of
  the stored bits and an ideal linear discharge. The published design does
  not say how the bit lines of a word's individual bits are combined before
  conversion. The ADC control and the exact SAR sequence are not modelled.
* **ADC calibration and reduction** and the **controller** are only named in
  the published description. The offset capture, the signed difference, the
  register map, the result buffer and the busy-write refusal are this
  design's own.
* **Analog effects** are not modelled: bias voltages V_BC/V_BD and their
  tuning, supply and temperature dependence, thermal noise, aging, and
  bitline non-linearity. The generator's statistics are fixed at the 1 V /
  1 ns operating point.
* **Not included**: the RISC-V core, its instruction/data memory, the SPI
  link and the ResNet-50 feature extractor (an off-chip NPU). The core's
  connection is the top's register bus. The published core needs three clocks per
  read or write of its own memory; the register bus here takes one request
  per clock and returns read data one clock later.

## Synthesis notes

`grng_cell`, `cim_column` and `sar_adc` are behavioural models. They are
written in synthesizable style, but they stand for analog circuits, and what a
synthesis tool makes of them (multipliers and constant tables) is not the
circuit. A real implementation replaces them with the analog macros and keeps
`mog_lfsr`, `dist_selector`, `grng_ctrl`, `input_buffer`, `adc_cal_reduce`
and `tile_controller`. The concurrent assertions (LFSR never zero, no
calibration during a sample, no more results than samples) use
`disable iff (!rst_n)` next to asynchronous resets. Lint therefore reports
`rst_n` as used both synchronously and asynchronously; this affects only the
assertions.
