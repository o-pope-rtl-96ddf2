# O-POPE: an outer-product GEMM engine that buffers in its FPU pipelines

An outer-product matrix engine gets a lot of reuse out of its inputs. Each
processing element (PE) sits at one point of the output tile. It takes one
element of an A column and one element of a B row per step and adds their
product to the output element it holds. The difficulty is the floating-point
adder. At a high clock frequency the fused multiply-add (FMA) needs several
pipeline stages. A PE that adds into the same output element every cycle would
then stall until the previous result comes back. The usual fixes are a slow,
shallow FPU or large buffers around the array.

This design uses another fix. **Each PE owns four output elements instead of
one: a 2 x 2 block.** The FMA has four pipeline stages, and the PE issues the
four updates of its block in four consecutive cycles. So the partial sum of an
element leaves the pipeline in the very cycle its next update is issued. The
four running sums live *inside the FPU pipeline registers*. No result buffer is
needed during accumulation. Because each PE needs only one A element and one B
element per cycle, every input element is used twice. A mesh of p x p PEs
therefore computes a 2p x 2p output tile and reads only 2p A elements and 2p B
elements every four cycles.

The only extra storage is four output registers per PE, the *accumulators*.
They hold the next tile's initial values going in and the last tile's results
coming out. The hand-over between pipeline and accumulators happens in the
first four cycles of a tile, at full speed. So the FMAs stall only while the
first tile loads and while the last tile drains.

The RTL describes the accelerator as a memory-mapped engine. It has a
configuration port and one wide port to a shared L1 scratchpad. It computes
`D = C + A * B` in IEEE binary16 with p = 16, which gives 256 FMAs and a 512-bit
memory port.

## The processing element (`opope_pe`)

A PE holds three things:

- an FMA with `NUM_PIPE` = 4 stages;
- four q-bit accumulators, `acc[s][r]`, organised as two lanes `s`, each two
  registers deep;
- a few multiplexers.

A 2-bit slot number `{r, s}` cycles 0, 1, 2, 3. In slot `{r, s}` the PE
computes `c[r][s] += a_r * b_s`. Here `a_r` and `b_s` are the two A and two B
elements that belong to this PE, so the order is c00, c01, c10, c11. The FMA's
addend normally comes from its own output, `fma_c = fma_d`. This closes a
four-slot ring through the pipeline.

**Coupling.** This is the one moment when pipeline and accumulators meet. It
covers the four slots of `k = 0` of every tile. In each slot:

- the addend is `acc[s][r]`, which holds this tile's initial value of `c[r][s]`;
- in the same cycle, `acc[s][r]` is overwritten with `fma_d`. That is the
  *previous* tile's final `c[r][s]`, leaving the pipeline.

After four slots the pipeline carries the new tile's sums, and the
accumulators hold the old tile's results. Each of the four accumulators is
swapped exactly once. This is the "double buffer": pipeline and accumulators
take turns. After the last tile the engine runs one more coupled group with
`valid = 0` to drain the final results into the accumulators.

**Decoupled.** For the rest of the tile (`k = 1 .. K-1`), the accumulators do
not touch the FMA. They act as a shift chain, `acc[s][1] -> acc[s][0] -> c_o[s]`,
fed from `c_i[s]`. While the FMA works, the accumulators move the old results
out and the next initial values in.

`en_i` advances the FMA pipeline. When the engine runs short of inputs, it
lowers `en_i` on every PE at once. The ring then freezes and stays aligned.

## The mesh and the C path (`opope_engine`)

PE (i, j) owns output rows 2i, 2i+1 and columns 2j, 2j+1 of the tile:

- the A buffer sends element `2i + r` along PE row i;
- the B buffer sends element `2j + s` down PE column j;
- the slot bits choose which element of each pair is sent.

These are broadcast wires, with no systolic skew. Every PE works on the same k
and slot in the same cycle.

The accumulators of one PE column form a chain. Two q-bit lanes run from the C
input at the bottom (PE row p-1) to the C output at the top (PE row 0). One
shift moves a whole 2p-element tile row: each PE column passes two elements,
one per lane. Four registers per PE times p rows gives 2p rows per column, so a
tile needs 2p shifts to go in and 2p shifts to come out. When a tile is fully
loaded, PE (i, j) holds `c[2i+r][2j+s]` in `acc[s][r]`. So the rows leave in
the order they came in.

### Timeline of a job

| phase | FMAs | accumulators |
|---|---|---|
| preload | idle | shift in the initial C of tile 0 (2p shifts) |
| tile t, k = 0 | take tile t's initial values | take tile t-1's results (coupled) |
| tile t, k >= 1 | accumulate tile t | shift out tile t-1 (2p), then shift in tile t+1 (2p) |
| drain | one coupled group with valid = 0 | take the last tile's results |
| write-back | idle | shift out the last tile |

A tile takes 4K issue cycles. The accumulators need 4p shift cycles, so the
accumulator traffic is hidden when K >= p. In practice it is hidden at K >= 2p,
because the memory port is shared (see below). When K is smaller, the next
tile's coupled group waits until its initial values are in place. Results are
still correct, but utilisation drops.

The sequencer tracks the accumulators as FREE, LOADING, INIT (initial values
in place) or RESULT (results waiting to leave). Its rules:

- it starts a tile's coupled group only in state INIT;
- it stores before it loads;
- it stalls the whole mesh (`en` low) whenever the next A/B vector pair has not
  arrived.

The A and B vectors are captured in the input buffers at the start of a group,
one pair per k. The next pair is accepted in slot 3, so groups follow each
other without a gap.

## Feeding the engine (`opope_streamer`, `opope_fifo`)

All data moves through **one** memory port, 2p x q = 512 bits wide. Each
request carries one 2p-element vector. The port uses:

- a request/grant handshake for each request;
- in-order read data marked by `rvalid`;
- posted writes, with one byte enable per byte.

Four channels share the port through a round-robin arbiter:

| channel | vector | memory layout |
|---|---|---|
| A | 2p rows of column k of A | A stored transposed, K x M row-major |
| B | 2p columns of row k of B | K x N row-major |
| C in | one row of the tile's initial C | M x N row-major |
| D out | one row of the result | M x N row-major, may equal C |

Each channel has a three-level address generator. Tiles are visited with the
tile row (tm) outermost. The engine consumes one A and one B vector every four
cycles, which is half the port. The C-in and D-out rows need 4p transfers per
tile, which is the other half when K = 2p. This is why 2p x q bits is the
smallest port that keeps the FMAs busy.

A read channel may issue only if its FIFO has a free slot that no outstanding
read has reserved (`count + outstanding < DEPTH`). So read data always has room
when it arrives, and the FIFOs (depth 4) absorb memory stalls.

**Partial tiles.** When M or N is not a multiple of 2p, elements outside the
matrix are loaded as zeros, and their byte enables are cleared on stores. Any
M, N, K of at least 1 works. A partial tile costs as much time as a full one.

## Programming it (`opope_ctrl`)

The configuration port has 32-bit words, word addresses, a grant in the same
cycle and read data one cycle later.

| word | name | access | meaning |
|---|---|---|---|
| 0 | TRIGGER | write | start the programmed job |
| 1 | STATUS | read | bit 0: busy |
| 2-5 | A_ADDR, B_ADDR, C_ADDR, D_ADDR | read/write | byte base addresses |
| 6-8 | M, N, K | read/write | matrix sizes, 16 bits each |
| 9 | CYCLES | read | cycles taken by the last job |
| 10 | MACS | read | MAC issue slots of the last job |

The job starts two cycles after the TRIGGER write. `evt_o` pulses for one cycle
once the last result has been written. A trigger is ignored while busy or when
any of M, N or K is zero. MACS / CYCLES is the job's utilisation. To process a
large layer, software cuts it into jobs that fit the scratchpad. To split K,
it sets D_ADDR = C_ADDR, so each job adds to the previous partial sums.

## The FMA (`opope_fma`)

The FMA is an exact fused multiply-add with one rounding step.

- The product and the addend are aligned into a single fixed-point number: 82
  bits for binary16. Its LSB is the weight of the smallest subnormal product,
  so the sum is exact.
- The sum is rounded once, to nearest even.
- Subnormals are supported in full.
- NaN inputs, inf x 0 and inf - inf give the quiet NaN 0x7E00. Overflow gives
  infinity. No exception flags are produced.

The result passes through `NUM_PIPE` enable-gated registers. In a real
implementation, retiming would spread the logic over them. The format is a
parameter (`EXP_BITS`, `MAN_BITS`), but only binary16 has been simulated.

## Where this RTL departs from the published design

**The FPU.** The published engine wraps an existing open-source FPU, configured
with four pipeline registers. `opope_fma` replaces it with its own FMA. The two
agree on latency and on IEEE results in round-to-nearest-even mode. They differ
in these ways:

- `opope_fma` has no other rounding modes and no exception flags;
- it has no SIMD packing, such as two FP8 products for an FP16 result;
- it has no widening formats (FP8 to FP16, FP16 to FP32);
- FP32 has not been simulated.

**The memory port.** Memory is reached through one port that moves a whole
vector per request. The published engine sits behind the cluster's multi-port
streamer, which splits a transfer into 32-bit bank accesses. Bandwidth per
cycle is the same: the published text gives 2 x p x q bits, even though one
figure is labelled 256 bits.

**Layout and limits.** These are this design's own choices:

- A must be stored transposed;
- rows must be 4-byte aligned;
- sizes are limited to 16 bits.

**Not included.** The surrounding cluster is not part of this RTL:

- RISC-V cores;
- the 128 KiB multi-bank scratchpad and its interconnect;
- DMA, instruction cache and AXI;
- the host.

The accelerator's memory and configuration ports are brought out as top-level
ports. The testbenches use a behavioural memory with random grant stalls.

**Register map and event timing.** These are this design's own.

## Measured behaviour

| mesh | GEMM M x K x N | memory | cycles | MAC slots | utilisation |
|---|---|---|---|---|---|
| 4 x 4 | 64 x 256 x 128 | no stalls | 131 108 | 131 072 | 99.973 % |
| 16 x 16 | 64 x 128 x 128 (D over C) | 5 % grant stalls | 4 184 | 4 096 | 97.9 % |
| 16 x 16 | 32 x 32 x 64 | 5 % grant stalls | 343 | 256 | 74.6 % |
| 16 x 16 | 32 x 8 x 40 (partial tile, K < 2p) | 5 % grant stalls | 183 | 64 | 35.0 % |

The overhead is the tile-0 preload and the last tile's write-back, so long-K
jobs approach 100 %. Small K or small jobs are dominated by those two phases,
as the architecture predicts.

## Files

Package:

- `rtl/opope_pkg.sv`: default parameters, job and performance structs, register
  map.

Modules:

- `rtl/opope_fma.sv`: pipelined binary16 FMA.
- `rtl/opope_pe.sv`: PE with its FMA and four accumulators.
- `rtl/opope_engine.sv`: p x p mesh, input buffers, sequencer.
- `rtl/opope_fifo.sv`: fall-through vector FIFO.
- `rtl/opope_agen.sv`: three-level address generator.
- `rtl/opope_streamer.sv`: memory port, arbiter, address generation, padding and
  masking.
- `rtl/opope_ctrl.sv`: registers, job FSM, counters.
- `rtl/opope_top.sv`: the accelerator.

Testbenches in `tb/` are self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>`. They compare against a reference FMA and a
reference GEMM written in plain SystemVerilog reals (`opope_fp_ref.sv`):

- one testbench per module (`tb_opope_fma`, `tb_opope_pe`, `tb_opope_engine`,
  `tb_opope_fifo`, `tb_opope_streamer`, `tb_opope_ctrl`);
- `tb_opope_top`: a 2 x 2 mesh on four jobs covering:
  - memory stalls;
  - partial tiles;
  - K < 2p;
  - K = 1.
  It counts each mechanism and fails if one never happens.
- `tb_opope_full`: the default 16 x 16 configuration;
- `tb_opope_util4`: the 4 x 4 utilisation case above.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  tb/opope_fp_ref.sv rtl/opope_pkg.sv tb/tb_opope_full.sv --top-module tb_opope_full
./obj_dir/Vtb_opope_full
```

For other testbenches, replace the last file and the top module name. The
other `rtl/` files are found through `-Irtl`. The full-size test takes about a
minute to build and under a second to run.

To change the mesh size, set `P` on `opope_top`. It must be a power of two; the
port becomes 2P x 16 bits.
