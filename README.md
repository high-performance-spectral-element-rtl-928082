# A streaming double-precision Poisson operator for spectral elements

Spectral-element solvers for incompressible flow spend most of their time
applying the Laplace (Poisson) operator to a field. The operator is never
stored as a matrix. It is applied element by element from three small
ingredients:

* the field values `u` on the element's `NX^3` Gauss–Lobatto–Legendre points
  (`NX = N + 1` for polynomial degree `N`);
* six geometric factors `g0..g5` per point, which make up the symmetric 3×3
  metric tensor of the element;
* one `NX × NX` derivative matrix `dx` (and its transpose `dxt`), which is
  the same for every element.

This RTL applies `w = A u` to a stream of elements held in external DDR
memory. It runs in IEEE double precision, one element after another, and
keeps `T` points per clock busy. At the default `N = 7` and `T = 4`, one
element of 512 points leaves every 128 cycles. Each such element costs
about 12 kFLOP.

## The computation

Points inside an element are numbered `p = i + j·NX + k·NX²`. For each
element the design computes two phases.

**Phase 1: gradient, then metric.** Each point first gets its three
reference-space derivatives. Each is a dot product of length `NX` along one
grid line:

```
r(i,j,k) = Σ_l dxt[l + i·NX] · u(l,j,k)
s(i,j,k) = Σ_l dxt[l + j·NX] · u(i,l,k)
t(i,j,k) = Σ_l dxt[l + k·NX] · u(i,j,l)
```

These are multiplied by the point's metric tensor:

```
shur = g0·r + g1·s + g2·t
shus = g1·r + g3·s + g4·t
shut = g2·r + g4·s + g5·t
```

**Phase 2: weighted divergence.** Each output point sums over the three
grid lines that pass through it:

```
w(i,j,k) = Σ_l ( dx[l + i·NX]·shur(l,j,k) + dx[l + j·NX]·shus(i,l,k) + dx[l + k·NX]·shut(i,j,l) )
```

Phase 2 needs `shur`, `shus` and `shut` of whole lines through the element.
It cannot start on an element until phase 1 has finished that element. This
dependence sets the shape of the design: the two phases are separate
pipeline stages, and an element-sized memory sits between them.

## Four stages, one element each

```
  bank 0 ──┐                 u, g0..g5               shur, shus, shut              w
  bank 1 ──┼─► sem_loader ─────────────► sem_grad ─────────────────► sem_div ─────────► sem_writer ─► bank 0
  bank 2 ──┤   (dx, dxt kept           (phase 1)                    (phase 2)
  bank 3 ──┘    in registers)
```

Each arrow is a set of element memories (`sem_lbuf`), and each stage works on
a different element. While the writer streams element `e` out, the
divergence stage computes `e+1`, the gradient stage computes `e+2`, and the
loader fetches `e+3`. Each stage sustains `T` points per cycle, so the whole
chain runs at the rate of its slowest stage. The loader moves one 512-bit
word (8 doubles) per bank per cycle. That is exactly the rate needed.
Banks 1–3 deliver two arrays each, `2·NX³/8 = 128` words per element. Bank 0
delivers 64 words of u and takes 64 words of w.

### Slots and hand-over

An element memory has `NSLOT = 3` slots of `NX³` doubles. A small controller
(`sem_pp_ctrl`) tracks each slot through the states
free → being filled → full → being read → free:

* The producer may *acquire* a free slot, writes into it, and *commits* it
  once its last write has really landed. For a compute stage, that means
  after its pipeline has drained.
* The consumer *acquires* the oldest full slot and *releases* it after
  issuing its last read.

A third slot is needed because of pipeline latency. The gradient stage
issues its last read of an element at cycle 128, but its last result lands
20 cycles later. With only two slots, the next stage would wait those 20
cycles for every element. Measured in simulation, that gave a period of 150
cycles instead of 128. The third slot lets a stage start the next element
while the previous one drains. The loader's u and g0..g5 memories, the
gradient results and the w memory all share one slot controller per
boundary. All seven memories at the loader boundary (u and g0..g5) change
slot together.

### The loader (`sem_loader`)

At start, the loader first reads `dx` and `dxt` (`NX²` doubles each, 8 words
apiece at `N = 7`) into registers. Then it streams elements. Each bank has
its own read master, which issues one read per cycle while the bank allows
it. Responses are written straight into the current slot: a word of 8
doubles goes to 8 consecutive points. The loader commits a slot once every
bank has returned all of its words for that element. Up to `NSLOT` elements
may be in flight, so a slow bank only delays the commit and never reorders
data.

### Phase 1 (`sem_grad`)

Points are issued in groups of `T` consecutive `i` values: the same `(j, k)`,
with `i = i0 … i0+T-1`. All `T` lanes of a group need:

* the same row `u(·, j, k)`, which is `NX` values shared by all lanes for `r`;
* for each lane, the column `u(i, ·, k)` for `s` and the pillar `u(i, j, ·)`
  for `t`, which is `2·NX` values per lane.

So the u memory has `NX·(2T+1) = 72` read ports at the defaults. Each lane
has three length-`NX` dot products with `dxt` (8 multipliers, then a 3-level
adder tree). After those come the metric products: three length-3 dot
products with the six `g` values of that point. The `g` values are read in
the same cycle as `u` and delayed to meet the derivatives. The stage latency
is `1 + (2 + 3·3) + (2 + 2·3) = 20` cycles: one cycle of memory read, the
derivative dot product, then the metric dot product. One group is issued per
cycle, with no bubbles, including across element boundaries.

### Phase 2 (`sem_div`)

This stage has the same issue order and the same slot handling. Each lane
reads `NX` values from each of `shur` (along `i`), `shus` (along `j`) and
`shut` (along `k`). The lanes share the `shur` row. Each lane forms one
length-`3·NX` dot product (24 multipliers and a 5-level tree) with the
matching rows of `dx`. Latency is `1 + 2 + 5·3 = 18` cycles.

### The writer and bank 0 (`sem_writer`, `sem_bank_arb`)

The writer reads 8 doubles from the w memory per cycle and issues one write
per cycle. It prefetches its read address, so it issues back-to-back words
and continues straight into the next element. Bank 0 carries both the u
reads and these writes. A round-robin arbiter (`sem_bank_arb`) alternates
the two masters when both ask. Each bank carries `2·NX³/8` words per element.
With `T = 4` that is one word per cycle, so all four banks are fully busy at
full rate. Every cycle of `waitrequest` therefore lengthens the element
period, and the slots only absorb short-term jitter.

## Memory layout

Every array is a region of 512-bit words, and addresses count words. The
first double of a word is in bits `63:0`. Element `e` of a per-element array
starts at `base + e·NX³/8`. Arrays are not padded; `NX³` is a multiple of 8
for every odd `N`.

| bank | holds |
|------|-------|
| 0 | `dx`, `dxt`, `u`, `w` |
| 1 | `g0`, `g1` |
| 2 | `g2`, `g3` |
| 3 | `g4`, `g5` |

Each base address is a port of `sem_ax_top`, so the host can place the
regions anywhere in their bank. There are eight data regions, each read or
written once per element: `u`, six `g`, and `w`.

Each bank port is an Avalon-MM pipelined master without bursts:

* Request fields: `read`, `write`, `address`, `writedata`.
* Response fields: `waitrequest`, `readdatavalid`, `readdata`.

Both are packed structs in `sem_pkg`. Reset is synchronous and active high. Hold it for longer than the banks' read latency: a read issued from the power-up state before the first clock edge must return while reset is still high, or it would be taken for data. A request stays on the port until a
cycle with `waitrequest` low accepts it. Read data return in order, with any
latency.

## Arithmetic

The floating-point units are in `fp64_mul`, `fp64_add` and `fp64_sum_tree`.
They are written in plain logic and use no vendor IP.

* `fp64_mul`: 2-stage pipeline. Significand product, then normalise and
  round to nearest even.
* `fp64_add`: 3-stage pipeline. Swap and align with guard, round and sticky
  bits; then add or subtract and normalise by leading-zero count; then round
  and pack.
* `fp64_sum_tree`: a balanced binary tree of adders. An odd leftover operand
  goes through an equal-latency delay line. A tree over `n` inputs has
  latency `3·⌈log2 n⌉`.
* Subnormal inputs and results are flushed to zero. Any NaN result is the
  quiet NaN `0x7FF8000000000000`. Infinities propagate as IEEE defines.
  Apart from flushing subnormals, products and single sums are bit-exact to
  IEEE binary64 (tested against the simulator's `real` arithmetic).
* Multiplications and additions are separate, rounded operations. Sums are
  evaluated as balanced trees, not left to right. The result therefore
  differs from a sequential C loop in the last bits, and the end-to-end
  tests compare within a tolerance scaled by the sum of absolute terms.

## Rates and latencies

| quantity (N = 7, T = 4) | value |
|---|---|
| points per cycle, steady state | 4 (one element per 128 cycles) |
| phase-1 latency, read to result | 20 cycles |
| phase-2 latency, read to result | 18 cycles |
| bank words per element | 64 per array; bank 0 carries 128, banks 1–3 carry 128 |
| double multipliers / adders | 4·(3·8+3·3) + 4·24 = 228 multipliers, about the same number of adders |
| on-chip element storage | 11 arrays × 3 slots × 512 doubles ≈ 1.08 Mbit |

The reference design this follows measured 3.58 points per cycle at `N = 7`
on a Stratix 10 board. This RTL reaches the model's ideal of `T = 4` in
simulation with memory that never stalls. Bank stalls add to the period.

## Parameters

`sem_ax_top #(N = 7, T = 4, NSLOT = 3)`

* `N` is the polynomial degree. Each degree is its own build, because `NX`
  fixes the grid, the port counts and the tree sizes.
* `T` must be a power of two that divides `N + 1`, and must be at most 4.
  This makes the lanes cover whole rows and keeps read ports free of
  conflicts. Use `T = 4` for `N = 3, 7, 11, 15` and `T = 2` for
  `N = 1, 5, 9, 13`.
* `NSLOT` may be 2 to 4. Full rate needs each stage's fill time plus its
  pipeline latency to fit within `NSLOT − 1` element periods. Three slots
  are enough at `N = 7`, where an element takes 128 cycles. At `N = 3` an
  element takes only 16 cycles, less than the 17-cycle gradient latency, so
  `N = 3` needs `NSLOT = 4`. With three slots it runs at 19 cycles per
  element, and `tb_sem_ax_top_n3` shows the full rate with four.
  `NSLOT = 2` works, but every element then pays each stage's latency.
* `N` must be odd so that an element is a whole number of 512-bit words.

Lower-level parameters: `MUL_LAT`, `ADD_LAT` and the memory word width are
in `sem_pkg`. The pipeline depths in the stages are computed from them.

## Simulating

Each block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=… failures=…`. For example, the whole accelerator at its
default parameters:

```
verilator --binary --timing -Wno-fatal -j 4 -y rtl -y tb \
    --top-module tb_sem_ax_top rtl/sem_pkg.sv tb/tb_sem_ax_top.sv
./obj_dir/Vtb_sem_ax_top
```

This takes about a minute to build and under a second to run.
`tb_sem_ax_top` loads random elements into four behavioural memory banks
(`tb/avm_mem_model.sv`) and runs two launches:

* The first launch uses 10 elements with no stalls. It checks that the
  worst element-to-element interval is `NX³/T` cycles.
* The second launch uses 4 elements with 20% random `waitrequest`.

Every w value is compared with a reference computed in `real` arithmetic.
The test also counts these events and fails if any of them never happened:

* bank-0 arbitration conflicts;
* memory stalls;
* a stage blocked by a full slot;
* overlap of the two phases;
* back-to-back launches.

`tb_sem_ax_top_n3` runs the same test on a build for `N = 3` (16 cycles
per element).

The other testbenches cover the arithmetic units against `real` arithmetic,
the element memory, the arbiter, the loader (commit period 128), the writer
(384 words in 386 cycles), and each compute stage (latency and one result
group per cycle).

## Where this departs from the reference design

* The reference design was written in OpenCL and compiled by a high-level
  synthesis tool, which chose its own memories, pipeline depths and
  arithmetic. This RTL fixes those choices explicitly. The points below are
  this design's own choices.
* **Three-slot element memories.** This is how full rate is kept across the
  stage latencies.
* **Wide multi-ported arrays.** The element memories are modelled as arrays
  with many read ports, up to 72 for u. On an FPGA they become replicated
  block RAMs, as an HLS tool would also build them.
* **No fused multiply-add.** Subnormals are flushed to zero, and sums are
  tree-ordered.
* **Fixed bank assignment.** Bank 0 holds `dx`, `dxt`, `u` and `w`. Banks 1–3
  each hold two geometric-factor arrays.
* **Controllers, host side and padding are not here.** This RTL does not
  contain the DDR4 controllers, the host runtime that moves data into the
  banks, or any padding of the arrays. The testbench stands in for them with
  simple memory models.
* **Two degrees verified.** `N = 7, T = 4` (the default) and
  `N = 3, T = 4, NSLOT = 4` have been simulated end to end. The other
  degrees have not been simulated, so that they build from the parameters
  is expected but not shown.
* **No timing closure.** No clock frequency is claimed. The reference build
  reached 274 MHz at `N = 7`. The deep arithmetic here is not retimed for any
  device.
