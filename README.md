# A mod-4 matrix multiplier for exponentiating large matrices

Deciding which of four related linear recurring sequences modulo a power of
two is uniformly distributed comes down to one test: raise the sequence's
companion matrix `M(u)` to the power `2^(d+1) - 2` modulo 4 and see whether the
result is the identity. For recurrences of degree in the hundreds this means
many multiplications of large matrices over `Z_4`, the integers mod 4.

This RTL multiplies two 896 x 896 matrices over `Z_4`. It exploits two facts.
An element of `Z_4` is two bits, so one multiply-accumulate step
`c = a*b + s mod 4` has six input bits and fits two 6-input LUTs; a chain of
28 such steps computes a 28-element dot product combinationally within one
100 MHz clock. And since the matrix sizes are fixed, the compute time is a
known constant, so the whole memory traffic can be scheduled to run in its
shadow. With the default parameters one multiplication keeps a 20 x 20 array
of dot-product chains busy for exactly `32 * 45^2 = 64800` clocks (0.65 ms at
100 MHz); memory is never waited for once the first tiles are loaded.

The exponentiation itself (the sequence of squarings and multiplications) is
the host's job: the hardware performs one product `C = A x B` per run.

## Arithmetic: from one LUT pair to a 20 x 20 tile

**MA unit** (`ma_lut`). `c = a*b + s mod 4` for two-bit `a, b, s`. The low bit
of the result depends only on the low bits of the inputs (`c0 = a0 b0 xor s0`),
so it is a 3-input table; the high bit needs all six bits. Both are written as
the literal truth tables a 6-LUT would hold, one row per `(a, b)` pair.

**Dot-product chain** (`dot_mult`, parameter `N`, default 28). `N` MA units,
the output of each feeding the sum input of the next:
`w = s_in + sum u[i] v[i] mod 4`. It is purely combinational; 28 is the longest
chain that ran error-free at 100 MHz on a Virtex-5 LX110T (see *Self-test*).

**Row multiplier** (`row_mult`): ten chains sharing one row vector, giving ten
neighbouring elements of one output row. **`mult_10x10`**: ten row multipliers.
**`mult_20x20`**: a 2 x 2 grid of `mult_10x10`, i.e. 400 chains, producing a
20 x 20 tile of `C` from twenty row vectors of `A` and twenty column vectors
of `B`, `N` elements each.

Rows longer than `N` are handled by feedback. Every chain output is stored in a
two-bit accumulator that is fed back to the chain's sum input. An *iteration*
is `D` consecutive *activations*; the first one (`first` high) uses a zero sum
input. After `D` activations the accumulators hold the complete tile for rows
and columns of length `k = N*D = 896`. The tile stays in the accumulators until
the next activation with `first` set, which gives the write-back one full
iteration to take it.

## Containers: rows and columns as shift registers

A row of `A` (or column of `B`) of 896 elements is cut into `D = 32` vectors of
`N = 28` elements. `vec_container` (`t_n^d`) holds one such row as a
32-deep shift register of 56-bit vectors: exactly one SRL32 LUT per bit on the
target FPGA. Each activation presents the next vector at `q` and moves the
others one place. The vector leaving the head re-enters at the tail, so after
32 activations the row is back in its starting position and can be used again.
Loading shifts new vectors in at the tail instead.

`tile_store` (`T_20n^d`) is twenty containers side by side: twenty rows of `A`
(a *row-store*) or twenty columns of `B` (a *column-store*). An activation
advances all twenty together, and `q` is then exactly the input `mult_20x20`
needs for one step. Loading has a strobe per container, so several rows can be
filled in the same clock.

The design has twelve stores: `Z = 10` row-stores and two column-stores.

## The schedule: hiding the memory behind the computation

This is the part that needs the most explanation; it lives in `matmul_ctrl`.

Think of `A`, `B` and `C` as `kappa x kappa` grids of 20 x 20 tiles,
`kappa = ceil(896/20) = 45` (the last four rows and columns are zero padding).
Computing one tile of `C` is one iteration (32 clocks). Loading a 20-row tile
from memory takes far longer than that, so the design keeps `Z - 1 = 9` row
tiles on chip and uses each column tile nine times:

* A **phase** uses one column tile `j` and runs 9 iterations, one per active
  row-store: tiles `(i, j)` for nine consecutive row tiles `i`. That is
  `9 * 32 = 288` clocks.
* During the phase, the idle column-store is filled with column tile `j + 1`,
  and the one idle row-store receives `20 * 9 / 45 = 4` rows of the next row
  tile, and the tiles finished in the phase are written back.
* Every `45 / 9 = 5` phases the idle row-store is complete. It becomes active,
  and the store holding the lowest row tile retires and starts loading the
  next one. Over a full pass through the 45 column tiles, the set of active
  row tiles has moved on by 9, so the computed band moves diagonally through
  `C`.
* Row-tile indices are taken mod 45. The band therefore wraps round: the row
  tiles at the top are read a second time at the end, for the column tiles
  they missed at the start. After `45^2 / 9 = 225` phases every tile of `C`
  has been computed exactly once.

Worked out for the defaults, one phase needs 160 words for the column tile,
32 words for the four rows and 9 x 4 = 36 words of write-back. That is 228
memory clocks against 288 compute clocks, so the multiplier never waits.
Before phase 0 a prologue loads nine row tiles and the first column tile
(1600 words). The simulated full-size run shows exactly 64800 clocks from the
first activation to the last.

The controller consists of four small engines working side by side:

* **Compute sequencer**: counts phase, iteration and activation, and selects the
  active row-store `(floor(p/5) + q) mod 10` and column-store `p mod 2`. A phase
  may begin only when all the loads meant for it have arrived (*load stall*
  otherwise). An iteration may end only if the write-back buffer can take the
  finished tile (*write-back stall* otherwise).
* **Issuer**: issues the read commands of *job set* `js`, which is everything
  phase `js` needs that is not already loaded. Job set 0 is the prologue. Job
  set `js >= 1` is column tile `js mod 45`, then four rows (one row group) of
  the next row tile. It is issued while phase `js - 1` runs and may start only
  once that phase has begun, because only then are its target stores idle.
  Row groups of a tile that would only become active after the last phase are
  skipped.
* **Response router**: read data return in order. A 32-entry tag FIFO records,
  for each outstanding read, which store and which row group the word goes to.
  The last word of a job set is flagged, and its arrival releases the phase.
* **Writer**: copies a finished tile into a one-tile buffer and writes it as
  four words. Writes take priority over reads.

## Memory layout and port

The memory port follows the two-FIFO user interface of a DDR2 controller:

* A command channel carries `{write, address}` with valid/ready.
* A write-data channel carries the data and a byte mask with valid/ready. A
  mask bit of 1 means the byte is not written.
* Read data come back in order on `rd_valid`/`rd_data` and are always accepted.

A write is offered on both channels at once. It moves only in a clock where
both are ready.

One word is 256 bits, the amount a 64-bit DDR2 bus at 200 MHz delivers per
100 MHz clock. Addresses count words.

| data | layout |
|---|---|
| tile `t` of A (rows `20t..20t+19`) | 160 words at `a_base + 160 t`, arranged as below |
| tile `t` of B (columns `20t..20t+19`) | same, at `b_base + 160 t`, with column `c` of B in place of row `r` of A |
| tile `(i, j)` of C | 4 words at `c_base + 4 (45 i + j)`; element `(r, c)` at bit `2 (20 r + c)` of the 1024-bit concatenation, upper 224 bits zero |

Within an A or B tile, word `32 g + v` holds vector `v` (elements
`28v .. 28v+27`) of the four rows `4g .. 4g+3`. Row `4g + r` occupies bits
`[56 r +: 56]`, and element `e` of the vector occupies bits `[2e +: 2]` within
those 56. The top 32 bits are unused. B is stored by columns, so the host has to
transpose a result before using it as the right-hand operand of the next
product.

## Self-test: the chain-length experiment

`timing_tester` rebuilds the experiment that fixed `N = 28`. A *Subject* chain
must answer a new question every clock. Ten *Examiner* chains each keep their
question for ten clocks. A counter `p` runs 0..9, and in each clock:

* the Subject's answer is compared with Examiner `E_p`'s;
* the Subject takes over the question `E_{p+1}` is working on;
* `E_{p-1}` gets a fresh question.

So the Subject is always checked on the question `E_p` received nine clocks
earlier. Questions come from `test_data_gen`, which uses the recurrence
`D_i = D_{i-1} + D_{i-2} + 2 D_{i-4} + D_{i-5} (mod 4)` with
`D_0..D_3 = 0, D_4 = 1`, unrolled to produce 56 terms per clock. On silicon, a
chain too slow for the clock makes the Subject disagree. In RTL simulation the
two always agree.

The tester sits in the top as an independent self-test unit (`selftest_en`,
`selftest_err` and counters). It shares nothing with the datapath.

## Parameters

| parameter | default | meaning | constraints |
|---|---|---|---|
| `N` | 28 | MA units per chain, elements per vector | `4 * 2N <= 256` |
| `D` | 32 | container depth, activations per iteration | `D >= 4` |
| `KAPPA` | `ceil(N*D/20)` = 45 | tiles per matrix edge | `(Z-1)` divides `KAPPA`; `20*(Z-1)/KAPPA` a multiple of 4 |
| `Z` | 10 | row-stores | see above |
| `VPW` | 4 | vectors per memory word | divides 20 and the rows per phase |

The matrix size is `k = N*D`. The memory traffic stays hidden when
`(Z-1)*D >= 20*D/VPW + (rows per phase)*D/VPW + 4*(Z-1)`. At the defaults this
is 288 >= 228. Smaller test configurations are memory-bound and stall, but the
results are still exact.

## Simulating

All files are SystemVerilog-2017; `rtl/matmul_pkg.sv` must be compiled first.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/matmul_pkg.sv tb/tb_mat_mult_full.sv --top-module tb_mat_mult_full
./obj_dir/Vtb_mat_mult_full
```

Each testbench prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_ma_lut` | all 64 input combinations against `(a*b+s) mod 4` |
| `tb_dot_mult`, `tb_row_mult`, `tb_mult_10x10` | random vectors against integer dot products |
| `tb_mult_20x20` | three accumulated iterations, one with a gap, against `A x B mod 4` |
| `tb_vec_container`, `tb_tile_store` | fill order, activation order, recirculation, partial reload |
| `tb_test_data_gen`, `tb_timing_tester` | the recurrence, and that the Subject is checked against the question issued nine clocks earlier |
| `tb_matmul_ctrl` | the schedule, with stores and multiplier replaced by bookkeeping: loads land in idle stores in order, activations only on complete stores at rest, every tile computed and written exactly once |
| `tb_mat_mult_top` | the whole design at `N=8, D=25, Z=3` (k = 200): two random products compared element by element, with and without memory stalls; fails if a load stall, write-back stall, row-store swap, index wrap or self-test comparison never happened |
| `tb_mat_mult_full` | the same at the defaults (k = 896, 2025 tiles): also checks that the computation takes exactly 64800 clocks |

`tb/ddr_model.sv` is a behavioural memory with fixed read latency. It can drop
its ready signals at random, and it can hold the write-data FIFO full for long
windows. The full-size test takes about 5 minutes to compile and about
15 seconds to run.

## Where this RTL departs from the original description

* **Container reuse.** Described as a queue that is empty after `d`
  activations, the containers here recirculate instead. The schedule needs this,
  since it reuses a column-store for nine iterations and a row-store for several
  column tiles.
* **Memory packing.** Four 56-bit vectors are packed per 256-bit word, leaving
  32 bits unused, so filling one store takes 160 memory clocks instead of 140.
  The memory still has 60 idle clocks per phase.
* **Rows read twice at the wrap.** Because the band of computed tiles wraps
  round, the first eight row tiles are loaded again near the end. A is read
  53/45 times, which is 8480 row words per product. The original cost estimate
  counts A once: 270 store fills against 278 here. In total one product reads
  44480 words and writes 8100.
* **Write-back.** Each tile is written during the iteration after it, rather
  than in batches of nine.
* **Choices the source leaves open.** The memory layout, the handshake of the
  memory channels, the ordering of work inside a phase, reset, the start/done
  interface and the event counters are all this design's own. So are the
  recurrence modulus and the split of its terms into two vectors in the test
  generator.
* **Not included.** The DDR2 controller, which is vendor IP, and the DDR2 module
  itself are not included. Neither is the PC link: RS-232 is named without a
  protocol, and PCI Express is only mentioned. The host-side sequencing of an
  exponentiation is also left out. The Strassen-based scheme for larger
  matrices was only proposed, so it is not built.
* **Verification limit.** The 28-element chain is checked to be functionally
  correct. Whether it closes timing at 100 MHz depends on the FPGA and was not
  checked.
