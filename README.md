# A hardware genetic algorithm for focusing light through scattering media

Light sent into a scattering medium (tissue, a diffuser) comes out as a
random speckle pattern. You can still make it converge on one spot by
shaping the incoming wavefront. This design does that with a digital
micromirror device (DMD). Each mirror is either on or off, so a wavefront is
a binary mask. A photodetector behind the medium reports how much light
reaches the target spot. A genetic algorithm (GA) then searches for the mask
that maximises that intensity.

The GA tolerates noise well, but on a PC it runs slowly. A round trip
through the PC, the DMD and the camera for every candidate mask takes
minutes for a whole run. Here the complete loop runs on one FPGA: random
numbers, crossover and mutation, the DMD stream, photodetector sampling,
ranking and mask storage. The only outside parts are memory and
peripherals. The RTL is SystemVerilog 2017 and targets a single 200 MHz
clock domain. The original system ran on a Virtex-5 board with DDR2 memory,
a 10-bit ADC and a DLPC410-class DMD controller.

## The algorithm as the hardware runs it

* **Masks and modes.** The DMD has 1024 × 768 mirrors. They are grouped into
  64 × 64 = 4096 *modes* of 16 × 12 mirrors each, and every mirror in a mode
  has the same state. In memory a mask is 6144 words of 128 bits, stored row
  by row with 8 words per row. A word is 8 modes wide, and each mode covers
  16 bits of it.
* **Population.** There are 16 parents. Every iteration makes 16 offspring.
  For each offspring:
  * Two parents of different rank are drawn from the better half of the
    population.
  * Each mode is taken from one of the two parents at random (uniform
    crossover).
  * Each mode is then inverted with probability R(k) (mutation).
* **Mutation rate.** R(k) falls linearly with the iteration k:
  `R(k) = (2000 − 12·(k−1)) / 2^15`. It starts at 0.061 and stops falling at
  0.012 (numerator 393), which it reaches at iteration 135. A high early
  rate explores widely and a low late rate fine-tunes, so the GA converges
  quickly.
* **Fitness.** Each offspring is shown on the DMD. While it is on screen,
  the photodetector is sampled with 10-bit resolution every 2.3 µs for
  31 µs, and the sum of the samples is the mask's fitness.
* **Replacement.** When all 16 offspring are measured, the better 8
  offspring replace the worse 8 parents. After 2000 iterations the best mask
  is shown and `done` rises. In the *repeat mode*, used for media that keep
  changing, `restart_every` (for example 500) starts the GA again from a
  fresh random population after that many iterations.

## Blocks

| module | job |
|---|---|
| `ga_top` | Top level. It instantiates everything below, makes the 50 MHz clock enable and multiplexes port A of the mask buffer. |
| `top_fsm` | Sequencer at 50 MHz. For each mask it runs GEN → SHOW (DMD load and DDR store together) → ADC → RANK (10 µs wait). It then merges and handles the final copy, the display and the restarts. |
| `ga_engine` | Builds one mask word by word into the mask buffer: random, evolved (crossover and mutation) or a copy of the best parent. |
| `trivium_prng` | Trivium stream generator, unrolled to 128 output bits per cycle. Seeded by an 80-bit key and an 80-bit IV. |
| `mutation_rate` | Turns the iteration number into the mutation threshold of the formula above. |
| `ga_ranker` | Keeps the parent and offspring lists sorted by fitness, together with their DDR slot numbers, and performs the replacement. |
| `mask_bram` | The 6144 × 128 on-chip mask buffer. Port A is read/write and port B is read-only. Both have 1-cycle latency. |
| `ddr_interface` | Reads parent words for the engine and stores a finished mask into its DDR slot, through a generic request/ready application port. |
| `dmd_interface` | Streams the mask buffer to the DMD controller with row numbers, then pulses `dmd_show`. |
| `adc_interface` | Triggers the ADC, synchronises its data-ready signal, and sums the samples in the measurement window. |
| `ga_pkg` | Shared constants and types. |

The following parts are not RTL here, and their signals are ports of
`ga_top`:

* the PLL, replaced by a clock enable;
* the DDR2 memory and its controller;
* the ADC chip;
* the DMD and its controller.

The testbench folder has behavioural models of the memory, the ADC and a
scattering medium.

## How a mask is built (the hardest part)

A mode is 16 columns wide, and 16 bits of a 128-bit word hold 16 columns.
So one random 128-bit vector decides all 8 modes of a word. For mode j:

* bits `[16j +: 15]` are compared with the mutation threshold;
* bit `16j+15` picks parent A or parent B. In random mode, this bit is the
  mode's value.

A mode is also 12 rows tall. The decisions are drawn only on the first DMD
row of each 12-row band and kept in an 8-word line buffer. The other 11 rows
reuse them, which keeps every mode uniform.

For an offspring word, the engine asks `ddr_interface` for the word of
parent A and then for the same word of parent B. It mixes the two with the
stored decisions and writes the result to the mask buffer. DDR read commands
may issue only in a 50 MHz slot, so each parent read takes 8 cycles and each
word takes 16 cycles (80 ns).

After the engine finishes, the mask buffer is read twice at the same time:

* port B feeds the DMD;
* port A feeds the DDR store into the offspring's slot.

There are 32 slots: 16 for parents and 16 for offspring. The ranker keeps a
free list, so the replacement itself moves no data. It only relabels slots.

The 128-bit datapath, a DDR controller working at 50 MHz, and one random
vector per word come from the paper. This design chose the following:

* the bit layout of the random vector;
* the line buffer;
* the two distinct parent ranks;
* uniform crossover;
* the slot bookkeeping.

## Timing at the default parameters (200 MHz)

| step | cycles | time | paper |
|---|---|---|---|
| random mask (initial population) | 6 144 + 9 warm-up | 31 µs | — |
| offspring mask (2 × 6144 parent reads) | 98 308 | 491.5 µs | 80 ns per word (Fig. 10); 420 µs per mask (text) |
| DMD load + DDR store | 6 147 | 31 µs | 31 µs |
| ADC window (13–14 samples of 2.3 µs) | 6 200 | 31 µs | 2.3 µs / 31 µs |
| ranking wait | 2 000 | 10 µs | 10 µs |
| one iteration (16 offspring + merge) | 1 804 820 | 9.02 ms | about 8 ms; 2000 iterations in about 14 s |
| initial population ranked | 328 264 | 1.64 ms | 43 µs |

Where these numbers differ from the paper:

* **Offspring build time.** The paper gives 80 ns per 128-bit word. Over
  6144 words that makes 491.5 µs, not the 420 µs the paper states for a
  mask. This design follows the per-word figure.
* **Whole run.** 2000 iterations take about 18 s here, against about 14 s
  in the paper.
* **Initial population.** The paper's 43 µs is not reached. Sixteen masks
  that are each shown and measured for 31 µs cannot fit in 43 µs. Here every
  initial mask goes through the same show, measure and rank steps as an
  offspring.

## Departures from the paper and open choices

* **Clocking.** The board derives 200 MHz and 50 MHz clocks from one PLL.
  Here the 50 MHz rate is a clock enable (`ce50`, one cycle in four) inside
  the 200 MHz domain.
* **Interfaces.** The DDR, ADC and DMD interfaces use simple generic
  handshakes, not vendor protocols:
  * DDR: `app_en`, `app_cmd`, `app_addr`, `app_rdy`, `app_rd_valid`;
  * ADC: a `cnv` pulse and `drdy` with the data held;
  * DMD: `dvalid`, `row`, `row_start` and `show`.
* **Fitness.** The fitness is the sum of the samples, not their mean. Only
  the ranking order matters, and the sum gives the same order.
* **Ties.** In the ranking, a tie places the newcomer behind the equal
  entries already in the list.
* **Mutation floor.** The floor numerator 393 is 0.012 · 2^15, rounded down.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. For example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ga_pkg.sv tb/tb_ga_top.sv --top-module tb_ga_top -o sim
./obj_dir/sim
```

* `tb_ga_top` runs the whole loop at reduced size: 24 DMD rows and 25
  iterations, with short windows. The optics model computes the focal
  intensity of each shown mask from random complex transmission
  coefficients. The test checks several things:
  * every DDR store and every DMD frame against the mask buffer;
  * the mutation threshold;
  * that the best fitness never falls;
  * that the GA actually focuses.

  * that the final mask shown is the best parent.

  It counts each mechanism and fails if one never happens: random masks,
  offspring, crossover, mutation, the mutation-rate floor, 50 MHz-paced DDR
  reads, mask stores, DMD frames, ADC windows, parent and offspring
  ranking, merges and restarts.
* `tb_ga_top_full` runs `ga_top` at its default parameters through the
  initial population and one complete iteration. That is 2.1 million
  cycles, which takes a few seconds.
* `tb_ga_workload` runs the repeated-focusing mode at the default size. It
  makes two passes of 5 iterations each, restarting after each pass. The
  real mode restarts every 500 iterations. The test checks:
  * the mutation threshold and the time of every iteration;
  * that the best fitness never falls and that it rises in each pass;
  * the restart;
  * the final display of the best mask.

  It takes about 20 million cycles, or half a minute.

To change the geometry, override `ROWS`, `WPR`, `SEGR`, `MPIX` and `NPOP` on
`ga_top`. For example, `MPIX=32, SEGR=24` gives 32 × 32 modes.
