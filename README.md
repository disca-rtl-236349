# DISCA: matrix multiplication inside SRAM with 8-bit Bent-Pyramid codes

DISCA (Digital In-SRAM Stochastic Computing Architecture) multiplies matrices
inside an ordinary 6T SRAM array. Matrix elements are stored as short,
fixed (non-random) stochastic code words. A product of two elements is then a
bitwise AND. An SRAM computes that AND for free when two wordlines are raised
together and the bitline is sensed single-ended. A small digital block next
to the array counts the ones of the result and sums them. Its output is one
element of the product matrix per clock and per subarray. The SRAM needs no
second row decoder, no microcontroller and no multi-cycle micro-programs.

This repository holds synthesizable SystemVerilog for the digital part of a
128 KB DISCA engine: the split row decoder with its address latch, the
SC-to-binary accumulator, and the SRAM core with bitline computing, the core
modelled at the logic level. Each has a self-checking testbench. The engine
simulates end to end at full size with Verilator.

## 1. The number format: compressed Bent-Pyramid (BP8)

A unipolar stochastic number is a bit string whose fraction of ones is the
value. Two such strings multiply by a bitwise AND, provided their ones are
placed so that they overlap in proportion. The Bent-Pyramid format does that
placement deterministically. A value 0.0 ... 0.9 (a decimal digit *d*) has
two complementary 10-bit codes, each holding *d* ones:

* a **right-biased** code, used for the multiplier (the weight matrix *U*);
* a **left-biased** code, used for the multiplicand (the input matrix *L*).

The AND of a left-biased code for *a* and a right-biased code for *b* holds
about *a·b/10* ones. Its population count is therefore the product in units
of 0.1.

In the 10-bit codes the right-biased set always has a 0 in its leftmost bit,
and the left-biased set always has a 0 in its rightmost bit. The AND of those
two end bits is therefore always 0, and both can be dropped without changing
any product. The result is the 8-bit format BP8, stored in the array. The
tables (bit 7 = leftmost) are in `rtl/disca_pkg.sv` (`bp8_right`,
`bp8_left`):

| d | 0.d | right-biased (U) | left-biased (L) |
|---|-----|------------------|-----------------|
| 0 | 0.0 | 00000000 | 00000000 |
| 1 | 0.1 | 00001000 | 00010000 |
| 2 | 0.2 | 00001100 | 00110000 |
| 3 | 0.3 | 00001110 | 01110000 |
| 4 | 0.4 | 00011110 | 01111000 |
| 5 | 0.5 | 00011111 | 11111000 |
| 6 | 0.6 | 00111111 | 11111100 |
| 7 | 0.7 | 00111111 | 11111100 |
| 8 | 0.8 | 01111111 | 11111110 |
| 9 | 0.9 | 11111111 | 11111111 |

Codes 6 and 7 are identical in 8 bits; they differed only in a dropped bit.
The products are approximate but deterministic: the same inputs always give
the same result. In the end-to-end test (random digits, 32-term dot products)
the mean absolute difference from the exact sum of *a·b/10* is about 2.7
units of 0.1. The exact products themselves average about 65 units.

## 2. Data layout in a subarray

A subarray is 256 columns × 128 rows (4 KB). Each row holds 32 BP8 codes;
code *k* sits in bits `[8k+7:8k]`.

| rows | content | coding |
|------|---------|--------|
| 0 … 63 | weight matrix *U*: row *j* holds **column** *j* of *U* (32 values) | right-biased |
| 64 … 127 | input matrix *L*: row 64+*i* holds **row** *i* of *L* (32 values) | left-biased |

One subarray therefore holds *L* up to 64×32 and *U* up to 32×64, and
produces *O = L·U* up to 64×64. *O(i,j)* is the dot product of wordline 64+*i*
with wordline *j*.

## 3. The split decoder and the address latch (`disca_decoder`)

This part matters most for using the design. A full 7-to-128 decoder is split
into two 6-to-64 decoders:

* **Decoder-1** drives the *U* half (rows 0–63) straight from the 6-bit
  address bus.
* **Decoder-2** drives the *L* half (rows 64–127) from the **same** bus, but
  through an address latch.

When `latch_en` is 1 the latch is transparent: Decoder-2 follows the bus, and
the address is kept. When `latch_en` is 0 Decoder-2 keeps the last *L* row.
An SC-MUL command therefore raises `U.Row(addr)` and the held `L.Row`
together.

This decides the command order of a matrix product. For each *L* row *i*:

1. `SCMUL addr=i latch_en=1` loads *L* row *i* into the latch and, in the
   same clock, multiplies it with *U* row *i*. The result is *O(i,i)*.
2. `SCMUL addr=j latch_en=0` for every other *j* gives *O(i,j)*, one per
   clock, with *L* row *i* held.

Commands (one per clock on `op`, `half`, `latch_en`, `addr`):

| op | half | wordlines raised | note |
|----|------|------------------|------|
| `OP_NOP` | – | none | |
| `OP_WRITE` / `OP_READ` | `HALF_U` | row `addr` | |
| `OP_WRITE` / `OP_READ` | `HALF_L` | row 64 + latched address | `latch_en` must be 1 (assertion) |
| `OP_SCMUL` | – | row `addr` and row 64 + latched address | |

Reading or writing an *L* row loads the latch, because it goes through the
same path.

In this RTL the latch is a hold register with a bypass, not a level-sensitive
latch. The decoded wordlines are registered, so they reach the array one
clock after the command.

## 4. Bitline computing in the SRAM core (`disca_sram_slice`, `disca_sram_core`)

The core is tiled from 32 slices of 8 columns × 128 rows. In silicon each
slice holds the bitcells, precharge, write drivers and one sense amplifier
per column. The sense amplifier can be configured:

* **differential** (`SA_DIFF`): BL against BLb, an ordinary read of one
  wordline;
* **single-ended** (`SA_SINGLE`): BL against a reference. Two wordlines are
  raised. BL stays high only if both cells hold 1, so the sensed bit is the
  AND of the two rows.

The RTL models this at the logic level. The bitline is a wired-AND over every
active row. A write stores `wdata` into the active row. On a clock edge with
`sense_en` high, the sensed value is latched into `rdata`, which holds it
until the next sensing edge. Assertions check the following:

* a differential read has exactly one active wordline;
* single-ended sensing has one or two;
* a write has exactly one.

The transistor-level circuits (bitcell, precharge, write driver, sense
amplifier) are not modelled. The storage array has no reset.

The slice testbench uses the 8×8 data set of the original post-layout
simulation and its printed expected SC-MUL results (WL0&WL1, WL2&WL3,
WL4&WL5, WL6&WL7). That simulation put *U* and *L* on even and odd wordlines
rather than in two halves. The slice does not care which rows are paired, so
the test applies the same pairs.

## 5. SC-to-binary accumulator (`disca_sc2bin_acc`)

Each subarray has one accumulator for its 256 sensed bits:

* **stage 1:** 32 parallel counters (`disca_parallel_counter`), one per 8-bit
  product, each giving 0–8; then a register;
* **stage 2:** an adder tree (`disca_adder_tree`, a heap of two-input adders)
  over the 32 counts; then the output register.

The 9-bit result (0–256) is the dot product of the two rows in units of 0.1.
Stochastic-to-binary conversion and accumulation happen in the same pass.
The accumulator takes a new wordline every clock, with 2 clocks of latency.

The 256 bits could also be grouped as *n* products of *m* bits (*n·m* = 256).
The total over the wordline does not depend on that grouping. `SEG` (default
8) only sets the width of the counters.

## 6. Subarray, bank, engine

* `disca_subarray`: core plus accumulator. It takes the registered wordlines
  and operation from a decoder. Its write data is given with the command and
  delayed by one register inside the subarray.
* `disca_bank`: four subarrays and two decoders. Decoder *d* drives
  subarrays 2*d* and 2*d*+1 with the same wordlines. That is enough because
  the matrix product runs the same address sequence everywhere. Each
  subarray has its own data.
* `disca_engine` (top): 8 banks, so 32 subarrays (1 Mbit), 16 decoder command
  ports and 32 data ports. Decoder command port *d* serves subarrays 2*d* and
  2*d*+1; subarrays are numbered bank-major.

Top-level ports (`disca_engine`, defaults):

| port | dir | shape | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset of control state |
| `op` | in | `op_e [16]` | operation per decoder |
| `half` | in | `half_e [16]` | U/L half for reads and writes |
| `latch_en` | in | `[16]` | open the decoder's *L* address latch |
| `addr` | in | `[5:0] [16]` | row address within a half |
| `wdata` | in | `[255:0] [32]` | row to write, given with the command |
| `rdata`, `rd_valid` | out | `[255:0] [32]`, `[32]` | read row or raw SC-MUL bits |
| `dot`, `dot_valid` | out | `[8:0] [32]`, `[32]` | dot product *O(i,j)* |

### Timing

Cycle 0 is the clock edge that takes the command:

| event | clock edge |
|-------|------------|
| decoder registers wordlines and operation | 0 |
| row written / row or AND sensed, `rdata`, `rd_valid` valid | 1 |
| counters registered | 2 |
| `dot`, `dot_valid` valid | 3 |

All stages accept a new command every clock. At full rate each subarray
produces one 32-term dot product per clock. The engine produces 32 of them,
i.e. 1024 BP8 multiply-accumulates or 8192 bit-level ANDs, per clock. At the
original 500 MHz this is 8.2·10¹² bit operations per second, or 1.02·10¹²
BP8 operations per second, counting two per MAC. The original reports 7.9
and 0.988 for the same engine.

## 7. Where this RTL departs from the original description

* **Decoder clock.** The original decoder runs at twice the memory rate, so
  decoding takes half a memory cycle. Here decoding is one registered stage
  on the single clock. This adds one clock of latency, but the rate is the
  same.
* **Latch.** Modelled as a register with a bypass; see section 3.
* **Command interface, valid flags, write-data register and port layout.**
  The original does not describe these. They are choices of this design. Who
  issues the commands (the matrix-product loop) is outside the engine, as
  the original removes the microcontroller without naming a replacement. The
  testbenches play that role.
* **Dot-product length.** Each result covers one wordline, so a dot product
  has at most 32 BP8 terms. Longer inner dimensions must be split across
  rows or subarrays, and the partial sums added outside the engine. The
  original describes no accumulation across clocks.
* **U/L placement.** The array halves hold *U* and *L*, as in the
  architecture description. The transistor-level simulation of the original
  used even and odd wordlines instead; see section 4.
* **Analog parts.** The bitcells, precharge, write drivers and sense
  amplifiers appear only through their logic effect. Energy and power figures
  cannot be derived from this RTL.

## 8. Files

| file | content |
|------|---------|
| `rtl/disca_pkg.sv` | operation/half/sense-mode enums, BP8 code tables |
| `rtl/disca_decoder.sv` | split decoder with *L* address latch |
| `rtl/disca_sram_slice.sv` | 8 × 128 slice with AND sensing |
| `rtl/disca_sram_core.sv` | 256 × 128 core of 32 slices |
| `rtl/disca_parallel_counter.sv` | popcount of one product |
| `rtl/disca_adder_tree.sv` | adder tree |
| `rtl/disca_sc2bin_acc.sv` | two-stage SC-to-binary accumulator |
| `rtl/disca_subarray.sv` | 4 KB subarray: core + accumulator |
| `rtl/disca_bank.sv` | 4 subarrays, 2 shared decoders |
| `rtl/disca_engine.sv` | 128 KB engine, top |
| `tb/tb_<module>.sv` | self-checking testbench of each module |

## 9. Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/disca_pkg.sv \
    tb/tb_disca_engine.sv --top-module tb_disca_engine -Mdir obj_engine
./obj_engine/Vtb_disca_engine
```

Replace `engine` by any other module name for its unit test. The package must
come first on the command line; the other modules are found through `-Irtl`.

`tb_disca_engine` runs the top at its default size. It does the following:

* loads 64 *U* rows and 64 *L* rows of random BP8 digits into all 32
  subarrays;
* reads rows back;
* runs the full 64×32 · 32×64 product on every subarray in the command order
  of section 3, with the decoders on different addresses;
* checks each of the 131 072 dot products and its latency;
* checks the BP8 tables against the 10-bit Bent-Pyramid tables.

It also counts, and requires at least once, each of these:

* U and L row writes;
* reads;
* latch loads;
* SC-MULs with a held *L* row;
* a decoder serving both of its subarrays in one clock;
* results on consecutive clocks.

It takes about a minute.

The unit testbenches cover the following:

* parallel counter: exhaustive;
* adder tree: random and corner cases, including an unbalanced tree;
* accumulator: random stream, exact 2-clock latency;
* slice: the published 8×8 data set, plus random data;
* core: random rows across all slices;
* decoder: random commands against a latch model;
* subarray: BP8 rows, back-to-back SC-MULs;
* bank: two decoders running different sequences.

## 10. What has been checked, and what has not

The RTL passes Verilator lint and the slang front end of Yosys. All the
testbenches above pass.

Not checked:

* timing closure at 500 MHz;
* gate-level results.

Not modelled:

* analog behaviour such as bitline discharge margins and the sense-amplifier
  reference.

The logic-level slice treats two active wordlines as a perfect AND. The
original establishes that by transistor-level simulation, not by anything in
this code.
