# A 64×64 correlator chip with on-chip DRAM for large antenna arrays

A radio telescope with N dual-polarised antennas has to correlate 2N signals with each other:
every pair, every sample. This chip does that for any N from 32 up to a few thousand by
holding a whole integration period of input data in 8 MB of on-chip DRAM, and streaming it past a
fixed 64×64 array of complex multiply-accumulate (CMAC) cells many times. Each pass produces one
*sub-integration* (SI): the 4096 cross products between one group of 64 "row" signals and one group
of 64 "column" signals. With w = 2N/64 groups, a full integration needs w²/2 SIs, and the memory
replays the data for each one.

The SystemVerilog here follows the architecture, widths, timing rules and pin set of the published
design. Where the published description stops (register map, word layout, refresh scheduling,
clock crossing), this implementation makes its own choices. Those choices are listed at the end.

## Data flow

```
 CLKIN domain             sysclk domain                                  outclk domain
 DATAIN[31:0] ─► input_if ─► addr_gen ─► corr_memory ─► dram_buffer ─► cmac_array ─► output_if ─► DATAOUT[15:0]
 INTEGRATE        (packs      (write/read/   (2 × 512b×64K   (4 words →      (64×64       (8192 words    SYNCOUT
                  32 words,   refresh        DRAM macros)     4 CMAC          CMACs)        per SI)       CLKOUT
                  async FIFO) sequencing)                     samples)
 SPI ─► spi_control (12 × 20 b registers) ─► addr_gen, clock_gen, status
 CLKIN ─► clock_gen (PLL + two dividers, or USROUTCLK) ─► sysclk, outclk
```

* **Input (`input_if`).** Each CLKIN cycle brings four 8-bit complex samples (4 b real, 4 b
  imaginary, two's complement, range −7..7) of four signals at the same time. Thirty-two cycles
  fill one 1024-bit memory word: 128 samples, which is 64 signals at times t and t+1. INTEGRATE marks
  the first word of an integration. It restarts packing, and the word carries a tag. Words cross
  into sysclk through a 4-entry Gray-coded asynchronous FIFO.
* **Memory (`corr_memory`, `dram_macro`).** The memory is 65536 words of 1024 b, built from two
  512-bit DRAM macros. The bank is the 5 low address bits. The macro imposes two rules:
  * the same bank may not be addressed on two successive cycles;
  * every cycle names a *concurrent refresh bank*. It must differ from the previous, current and
    next access banks, and from the previous, current and next refresh banks.

  The model checks both rules with assertions.
* **Address generator (`addr_gen`).** This is the heart of the chip.
* **Buffer (`dram_buffer`).** Memory words arrive as sets of four: row word a, row word a+1,
  column word b, column word b+1. Each set holds two time samples of the 64 row signals and two of
  the 64 column signals. The buffer holds one set while the next is read, and feeds the array one
  time sample per read cycle. So four reads give four CMAC cycles.
* **CMAC array (`cmac_array`, `cmac`).** Cell (r,c) accumulates row[r]·conj(col[c]):
  * the product is 8b+8b and the accumulator 20b+20b;
  * the 64 diagonal cells have 21-bit accumulators.

  At the first sample of the next SI, *sync* rounds the accumulator into a 16b+16b read-out
  register and restarts it with the new product. Rounding drops 4 LSBs, with the midpoint going
  away from zero so the result is unbiased. Overflow saturates and stays saturated until the SI
  ends.
* **Output (`output_if`).** A toggle crossing tells the outclk domain a new SI is ready. 8192
  outclk cycles then send the 4096 results, real half then imaginary half, in row-major order.
  SYNCOUT marks the first word.
* **Control (`spi_control`).** This is a 25-bit SPI frame: 4 address bits, a write-enable bit and
  20 data bits. The addressed register is always returned on MISO.
* **Clocks (`clock_gen`, `pll_macro`, `clk_divider`).** A PLL model runs an oscillator at
  f_i·R/M, nominally 3–6 GHz. Two integer dividers make sysclk and outclk. Outclk can be taken
  from the USROUTCLK pin instead.

## The address sequence

One SI of length T (T CMAC cycles) reads T/2 row words and T/2 column words. Both groups of reads
are done twice, in the sets of four shown above, so an SI takes T read cycles. Meanwhile new input
arrives at 2 words per w sets. The generator therefore runs in *groups*: 2 write cycles, then w/2
read sets. Cycles with nothing to do are refresh-only.

* Consecutive reads are always to adjacent addresses a, a+1 (or from row to column block). All
  start addresses are forced even. Bank numbers therefore alternate and never repeat on successive
  cycles.
* The refresh bank is chosen round-robin from up to five candidates. The first candidate that
  avoids the banks of the previous, current and next access, and the previous refresh bank, is used.
  Of 32 banks at most six are excluded, so a candidate always exists.
* The chip does not know about integrations. During each SI the host writes three registers over
  SPI: the next SI's row start address (with the split-mode bit in bit 16), column start address
  and write start address. The generator latches them when the SI ends. The host's schedule gives
  the half-matrix of SIs (see below).
* Timing: sysclk must keep up with writes plus reads. Per group of n/2 = 32 input CLKIN cycles,
  the generator needs 2 + 2w cycles. Hence

  **f_s ≥ (w + 1)·f_i / (n/2)**.

  This gives 78.1 MHz for N = 128 (w = 4) at f_i = 500 MHz. (The original publication prints this inequality
  with the ratio inverted; the form above is the one consistent with its own 78.125 MHz figure.)
* For w = 4, an integration is w²/2 = 8 SIs. The first results of an integration appear at
  output 6 after INTEGRATE, and the integration occupies outputs 6–13.

### Split mode

In an SI on the diagonal of the half-matrix, the row and column groups are the same signals, so
half of the array would duplicate the other half. In split mode:

* the row set and the column set are two *different* groups;
* the lower triangle of the array correlates the row group with itself;
* the upper triangle correlates the column group with itself;
* each diagonal cell holds |x|² in its real part and |y|² in its imaginary part, both unsigned
  with 21 bits, rounded by 5 bits.

This pairs two diagonal SIs into one.

### Memory bypass (N = 32)

With mode bit 0 set, memory is skipped. Each 1024-bit input word is 64 signals at one time for the
row set (low half) and 64 more for the column set (high half). The array runs in split mode on
every word: the two halves are the two polarisations' 64 signals each. This gives all products of
N = 32 dual-polarised antennas in one SI.

## Register map (20 bits each)

| addr | name | contents | reset |
|---|---|---|---|
| 0 | ROWADDR | [15:0] row start word, [16] split mode for the next SI | 0 |
| 1 | COLADDR | column start word | 0 |
| 2 | WRADDR | write start word | 0 |
| 3 | NGROUP | w = 2N/64 | 4 |
| 4 | TLEN | T, CMAC cycles per SI | 1032 |
| 5 | MODE | [0] memory bypass, [1] outclk from USROUTCLK | 0 |
| 6 | PLL | [9:0] R, [19:10] M | R=10, M=1 |
| 7 | SYSDIV | sysclk = oscillator / SYSDIV | 22 |
| 8 | OUTDIV | outclk = oscillator / OUTDIV | 10 |
| 9 | STATUS | read-only, cleared on read: [0] INTEGRATE not at SI start, [1] input FIFO overrun | 0 |
| 10, 11 | spare | general purpose | 0 |

The defaults are the N = 128, T = 1032 scenario: CLKIN 500 MHz, oscillator 5 GHz, sysclk
227.3 MHz, outclk 500 MHz. The register map itself is this implementation's. The published design
has twelve 20-bit registers and a 25-bit frame but does not list the fields.

## Capacity

* Accumulator width limits T. A cross product is at most 7·7+7·7 = 98 in magnitude, so a 20-bit
  signed accumulator holds T ≤ 5349. The unsigned 21-bit diagonal holds 4× that.
* Memory limits w·T: one integration needs w·T/2 words, and the next integration is written while
  the current one is read.
  * N = 128 (w = 4), T = 1032: 2064 words.
  * N = 4096 (w = 128): T up to about 512.

## Simulating

Everything is plain SystemVerilog 2017. The package `rtl/corr_pkg.sv` must come first:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl +libext+.sv \
  rtl/corr_pkg.sv tb/tb_correlator_chip.sv --top-module tb_correlator_chip
```

There are two testbenches.

* `tb_cmac` tests one normal cell and one diagonal cell:
  * random SIs;
  * exact half-way rounding cases;
  * positive and negative saturation;
  * split mode, including unsigned overflow;
  * that the read-out register holds between syncs.
* `tb_correlator_chip` runs the whole chip at full size (64×64 array, 65536-word memory). It
  configures the chip over SPI.
  * **Memory mode:** w = 4, T = 128. It streams two integrations through DATAIN, writing the
    three address registers after every SYNCOUT. The eight SIs of the first integration (normal
    and split) are checked word for word against a software correlator. It also checks that each
    SI lasts exactly T CMAC cycles.
  * **Bypass mode, with outclk from USROUTCLK:**
    * a random SI;
    * a 5400-sample SI of constant data that saturates every cell;
    * an INTEGRATE in mid-SI, which must raise the status bit;
    * a status read that must clear that bit.

  Each of these mechanisms is counted, and one that never happened is a failure. The full run
  takes several minutes of simulation.

The per-block modules are exercised only through the top-level test. There is no separate unit
test for the buffer, address generator, interfaces or SPI block.

## Models and what is not logic

`dram_macro` and `pll_macro` are behavioural stand-ins for foundry macros:

* The DRAM model has an assumed read latency of 2 cycles and checks the bank and refresh rules.
* The PLL model measures the reference period with real-valued time and oscillates at R/M times
  it.

Pads and clock trees are not modelled.

## Departures and choices

These choices are this implementation's; the published description is silent on them:

* word layout (low half time t, high half time t+1, signal s in byte s);
* the buffer's size;
* refresh-bank selection;
* the SPI mode (0, MSB first);
* the register map;
* the FIFO depth;
* the output word order;
* the 5-bit rounding of split-mode results;
* the direction of conjugation (row × conj(column)).

The mid-SI INTEGRATE error and the FIFO overrun flag are additions.

The inverted clock-rate inequality noted above is corrected here.
