# STAR: a state-aware data randomizer for QLC NAND, in SystemVerilog

## The problem and the idea

In 3D charge-trap NAND the charge stored in one cell slowly spreads along
the shared trap layer into its vertical neighbours (lateral charge
spreading). A cell at a high threshold-voltage state sitting between
neighbours in the erased state loses charge fastest, and some states are
much more error-prone than others. In QLC (4 bits per cell, states P0..P15)
the lowest and highest states, P0, P1, P14 and P15, are the weak ones.

A conventional SSD controller XORs all write data with an LFSR key stream,
so every state becomes equally likely. STAR keeps that randomizer and adds a
second step: it cuts each wordline into groups of 128 cells and, for each
group, tries all 16 ways of inverting some of the four page bits of every
cell. Inverting a page bit moves each cell to a different state. For each
way it adds up how much the expected error of the group would change, using
a per-state error table, and keeps the way that lowers it most. Four Flip
Indicator Bits (FIB) per group, one per page, record the choice. They go to
the pages' spare areas, so a read can undo the inversion before
de-randomizing. Fewer cells end up in error-prone states, so fewer weak
neighbour patterns form. No pattern has to be detected, and the NAND chip
needs no change.

This RTL implements that write datapath for one QLC wordline at a time,
plus the read path for one page. The defaults are 16 KiB pages, 128-cell
groups and a 64-bit datapath.

## Cells, states and bit-flip operations

Each cell stores one bit of each of the four pages of its wordline: LSB,
CSB, MSB and TSB. In this RTL a cell's bits are always packed as
`{TSB,MSB,CSB,LSB}`. A bit-flip operation `f(b_TSB,b_MSB,b_CSB,b_LSB)` uses
the same packing, so applying it is `bits ^ f`. `f = 4'b0000` changes
nothing and `f = 4'b1111` inverts all four bits.

The state of a cell follows from its bits through the QLC Gray code below
(`star_pkg::state_of_bits`). Adjacent states differ in one bit.

| state | P0 | P1 | P2 | P3 | P4 | P5 | P6 | P7 | P8 | P9 | P10 | P11 | P12 | P13 | P14 | P15 |
|-------|----|----|----|----|----|----|----|----|----|----|-----|-----|-----|-----|-----|-----|
| LSB   | 1  | 1  | 1  | 1  | 1  | 1  | 0  | 0  | 1  | 1  | 0   | 0   | 0   | 0   | 0   | 0   |
| CSB   | 1  | 1  | 1  | 0  | 0  | 0  | 0  | 0  | 0  | 1  | 1   | 1   | 0   | 0   | 1   | 1   |
| MSB   | 1  | 1  | 0  | 0  | 1  | 1  | 1  | 0  | 0  | 0  | 0   | 0   | 0   | 1   | 1   | 1   |
| TSB   | 1  | 0  | 0  | 0  | 0  | 1  | 1  | 1  | 1  | 1  | 1   | 0   | 0   | 0   | 0   | 1   |

For example, `f(0,1,1,0)` inverts CSB and MSB. It turns P15 into P7, P2 into
P4 and P13 into P11.

Two parts of the source description disagree about this table. It gives an
example flip of "only the CSB" taking P0 to P9 and P14 to P11. Under the
table above, those two pairs differ in the MSB, not the CSB. This RTL
follows the table and the `f(b_TSB,b_MSB,b_CSB,b_LSB)` notation, which also
agree with a worked example in the same source. If your NAND part uses a
different Gray code, change `state_of_bits` and `bits_of_state` in
`star_pkg`. Nothing else depends on it.

## Group error and the choice of f*

With `e_k` the error probability of state Pk, the change in a group's
error when `f` is applied is

    Delta E(f) = sum over the 128 cells i of ( e[f(s_i)] - e[s_i] )

The chosen flip is `f* = argmin_f Delta E(f)`. `Delta E(0) = 0`, so no flip
is chosen unless one lowers the error. Ties go to the lowest `f`.

The hardware never handles `e_k` directly. `star_error_lut` holds the 256
differences `lut[s][f] = e[state_of(bits_of(s) ^ f)] - e[s]` as 16-bit
signed numbers in any fixed unit. Firmware computes and writes them, one
entry per cycle. The source gives no values, only that they come from
offline characterisation of real chips. The table therefore resets to all
zeros. With a zero table `f* = 0` for every group, and the design behaves as
a plain LFSR randomizer until the table is loaded. Loading a new table
between wordlines is allowed. Write `lut[s][0] = 0` for every `s`.

## Zig-zag order: why a wordline buffer is needed

The estimator needs all four bits of a cell at once, but a host sends a
wordline page by page. `star_zigzag_sched` reads the four pages from
`star_wl_buffer` in group order instead. It sends the two 64-bit words of
group 0's LSB chunk, then CSB, MSB and TSB, then group 1, and so on.
Beat `n` of a wordline is word `2g+b` of page `p`, where `g = n/8`,
`p = (n/2)%4` and `b = n%2`. This is why the buffer must hold a whole
wordline (64 KiB): the TSB bits of group 0 are needed before the LSB bits
of group 1. Every beat carries a side-band `beat_meta_t`: its page, whether
it is the last beat of its group (`glast`), and whether it is the last of
the wordline (`wlast`).

The data leaves STAR in the same zig-zag order, tagged with its page. The
controller's ECC and page assembly, which are not part of this RTL, must
gather the beats of each page.

## The group-level pipeline

```
 wl_buffer -> zigzag_sched -> randomizer -> eg_estimator -> bit_flipper -> out_fifo -> out_*
                               (4 LFSRs)    fill | scan     (f*, FIB)
                                            16 units+LUT        |
                                                            fib_buffer -> fibo_*
```

- **Randomizer** (`star_randomizer`, `star_lfsr`). It keeps one 32-bit LFSR
  per page (x^32+x^22+x^2+x+1, 64 key bits per beat). Only the LFSR of the
  beat's page steps on. Each page is therefore scrambled with exactly the
  sequence it would get alone, so any single page can be de-randomized on
  its own. The stage has one register and passes one beat per cycle.
- **E_G estimator** (`star_eg_estimator`, with `star_flip_unit` x16 and
  `star_argmin`). It is double-buffered. A fill buffer collects the 8 beats
  of group N+1 while a scan buffer holds group N. Sixteen units, one per
  `f`, each take 16 cells per cycle. Each maps the cells to states, looks up
  `lut[s][f]` and accumulates. Scanning 128 cells takes 8 cycles, the same
  time it takes to receive a group, so the stage never stalls the stream.
  In the cycle of the last slice, `star_argmin` reads the final sums and the
  group moves on with `f*` and its `Delta E`.
- **Bit flipper** (`star_bit_flipper`). It sends the group out as 8 beats
  again, inverting every beat of page `p` when `f*[p] = 1`. Inverting page
  bit `p` of every cell is exactly `bits ^ f*`. With the last beat it pulses
  the FIB (`= f*`) to `star_fib_buffer`.
- **Output buffer** (`star_out_fifo`). A 16-entry FIFO, two groups deep,
  that takes up short stalls from the consumer.
- **FIB buffer** (`star_fib_buffer`). It stores FIB bit `p` of group `g` as
  bit `g` of page `p`'s 1024-bit vector (128 B per 16 KiB page, 0.7 % of a
  16 KiB + 2 KiB page). After the last group it sends the vectors as 64
  words of 64 bits on `fibo_*`: 16 words per page, LSB page first. Word `w`
  of a page holds groups `64w..64w+63`, the lowest group in bit 0.

While these run, the three STAR stages hold three consecutive groups: the
randomizer group N+1, the estimator group N and the flipper group N-1.

**Timing at the defaults.** `wl_start` is taken on a rising edge. The first
output beat is on `out_*` 21 cycles later. If `out_ready` stays high, all
8192 beats then follow on consecutive cycles (64 bits per cycle), and the
64 FIB words come right after. `wl_busy` falls with the last FIB word
(`wl_done`). The source states an added latency under 100 ns and gives no
clock. 21 cycles meets that limit at 210 MHz or faster. Back-pressure on
`out_ready` travels back through every stage to the buffer read port
without losing data. Back-pressure on `fibo_ready` only delays the end of
the wordline.

## Read path

`star_derandomizer` restores one page. Pulse `rd_start` with that page's
seed. Then send its 16 FIB words on `rd_fib_*`, then its 2048 stored words
in address order on `rd_in_*`. Each word comes out one cycle later on
`rd_out_*` as `stored ^ {64{FIB bit of its group}} ^ key`. The order is the
one the source requires: first undo the flip, then undo the randomization.
Because flips are per page bit, reading a page needs only that page's FIB
vector.

## Top-level interface (`star_top`)

| group | signals | use |
|-------|---------|-----|
| host buffer | `hw_we`, `hw_addr`, `hw_wdata` | write the wordline: page `p`, word `w` at address `p*2048+w` |
| firmware | `lut_we`, `lut_state`, `lut_flip`, `lut_wdata` | load the error-change table |
| firmware | `wl_start`, `wl_seeds[4]`, `wl_busy`, `wl_done` | start a wordline (ignored while busy) |
| to ECC / flash | `out_valid/ready/data/meta` | flipped, randomized beats in zig-zag order |
| spare area | `fibo_valid/ready/data/page/last` | FIB words after the data |
| read path | `rd_*` | de-randomize one page |

Do not write the wordline buffer while `wl_busy` is high. The host PCIe
interface, the embedded CPU, the LDPC ECC and the NAND chip are outside this
RTL. Their connections are these ports.

## Parameters

| parameter | default | where it comes from |
|-----------|---------|---------------------|
| `DATA_W` | 64 | datapath width; the source allows 32 or 64, and both are tested |
| `PAGE_BYTES` | 16384 | 16 KiB QLC page |
| `GROUP_CELLS` | 128 | group size, chosen in the source for its 0.7 % FIB overhead |
| `LUT_W` | 16 | this design's choice |
| `OFIFO_DEPTH` | 16 | two groups; this design's choice |

`GROUP_CELLS` must be a multiple of `DATA_W`. The estimator takes
`DATA_W/4` cells per cycle per unit, so that a group is scanned in the time
it arrives. Only QLC is built: 4 bits per cell and 16 flips are fixed in
`star_pkg`. A TLC version would need 3 pages, 8 flips and the TLC Gray code.

## What follows the source and what was chosen here

Taken from the source: the three stages (LFSR, group error estimator with
16 parallel units fed by an error-change LUT, bit flipper); Eq. 3/4 for the
group error and the choice of `f*`; the zig-zag order; the group-level
pipelining; the 128-cell group, 16 KiB page and 32/64-bit datapath; the
FIB, one bit per page per group, kept in the spare area; the QLC state
table; undoing the flip before de-randomization on reads.

Chosen here, because the source does not say: the LFSR polynomial, one LFSR
per page, and the handling of a zero seed (replaced by 1); the LUT width,
unit and zero reset value; ties in the argmin; the scan rate and the double
buffering; all handshakes (valid/ready, active-low asynchronous reset); the
FIB word layout, and sending FIB words after the data; the wordline buffer
and output FIFO sizes; the read-path interface. The source's hardware
figures (44.8 K gates, 15.3 mW and 0.036 mm² in 45 nm) were not
reproduced. This RTL holds three 512-bit group registers and a 4096-bit FIB
store in flip-flops, and was not sized for area.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against a
model written separately from the RTL (`tb/tb_star_ref_pkg.sv`), and each
ends with a `TB_RESULT checks=N failures=M` line. The model keeps the state
table as bit strings, steps the LFSR one bit at a time, and sums
`e[f(s)]-e[s]` straight from a per-state error profile, with no LUT. The
tests are:

| testbench | what it checks |
|-----------|----------------|
| `tb_star_randomizer` | `star_lfsr` key stream per page under random stalls; one beat per cycle |
| `tb_star_error_lut` | reset to zero; random writes |
| `tb_star_eg_estimator` | `f*` and `Delta E` for 200 groups (random, constant, two-state); a group every 8 cycles; valid 9 cycles after the last beat in; LUT change |
| `tb_star_bit_flipper` | inversion per page, side-band, FIB pulse; no gaps |
| `tb_star_fib_buffer` | FIB word layout, order, `last`/`done`, two wordlines |
| `tb_star_out_fifo` | queue model; full and empty |
| `tb_star_wl_buffer` | read latency and hold |
| `tb_star_zigzag_sched` | full-size address order and flags; one beat per cycle |
| `tb_star_derandomizer` | three full pages restored from their stored form |
| `tb_star_top` | two full wordlines at default sizes, checked beat by beat, then five pages read back |
| `tb_star_weak_patterns` | seven builds (32- and 64-bit datapath, groups of 32 to 1024 cells), eight wordlines each, checked beat by beat; weak-pattern counts with and without STAR |

`tb_star_top` also counts the mechanisms of the design and fails if any
never happens: output stalls, stalls reaching the scheduler, three groups in
the three stages at once, a non-trivial `f*`, `f* = 0`, a LUT reload, FIB
dumps, an ignored start and the read-backs. It prints how many cells land in
P0/P1/P14/P15 after plain randomization and after STAR. Its test error
profile is stimulus only, not measured data. With it, about 17 % fewer cells
land in those states on random data. The source reports 30 to 40 % per
state with its measured profile.

`tb_star_weak_patterns` repeats the evaluation of weak patterns against
group size. It builds the whole top seven times, on the 64-bit datapath with
groups of 64 to 1024 cells and on the 32-bit datapath with groups of 32 and
128 cells. Each build (`tb/tb_star_wp_run.sv`) stores eight wordlines of
random data, checks every beat and the one-beat-per-cycle rate, and counts
vertical weak patterns: a victim cell and its two neighbours on the same
bitline, one wordline above and one below. The ten patterns counted are the
ones the source ranks worst for QLC, written upper-victim-lower: 0-15-0,
0-14-0, 0-15-1, 0-14-1, 0-13-0, 0-15-2, 1-15-1, 1-15-2, 1-14-1 and 1-14-2,
taken in either order. With the test profile it prints:

| datapath | group | FIB cost | top-10 STAR/LFSR | E-P15-E STAR/LFSR |
|----------|-------|----------|------------------|-------------------|
| 64 | 64   | 1.56 % | 49 % | 34 % |
| 64 | 128  | 0.78 % | 65 % | 47 % |
| 64 | 256  | 0.39 % | 69 % | 53 % |
| 64 | 512  | 0.20 % | 83 % | 61 % |
| 64 | 1024 | 0.10 % | 86 % | 81 % |
| 32 | 32   | 3.12 % | 34 % | 26 % |
| 32 | 128  | 0.78 % | 64 % | 49 % |

The FIB cost is one FIB cell (4 bits) per group of data cells, so
1/GROUP_CELLS. The trend is the source's: smaller groups remove more weak
patterns and cost more spare area. The numbers depend on the made-up
profile, so they show the mechanism at work, not the source's measured
results. The source also sweeps 16-cell groups. Those are narrower than a
32-bit beat, so this datapath cannot build them.

Run a test with plain Verilator (5.x), for example:

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
      rtl/star_pkg.sv tb/tb_star_ref_pkg.sv tb/tb_star_top.sv \
      -y rtl -y tb +libext+.sv --top-module tb_star_top -o sim
    ./obj_dir/sim

The full-size end-to-end test takes about 15 s, the group-size sweep about
50 s. The simulator used has no X state, so every register that is read is reset. The only registers left
without reset are memory contents: the wordline buffer and the FIFO
storage.

What is not covered: no gate-level or timing results, and no check against
real NAND error data.
