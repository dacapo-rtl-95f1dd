# A row-partitionable MX systolic array for continuous learning at the edge

An autonomous system that analyses video with a small "student" network must keep
that network accurate while the scene drifts. It does that by running three kernels at
once: student **inference** on every frame, **labeling** of sampled frames by a
large "teacher" network, and **retraining** of the student on those labels. This
accelerator runs all three on one chip. It rests on two ideas:

1. **One systolic array that splits by rows into two independent sub-accelerators.**
   The 16x16 array of dot-product engines (DPEs) is cut at a programmable row `r_tsa`.
   Rows `0..r_tsa-1` form the *top sub-accelerator* (T-SA). It takes weights from
   buffers above the array and drains results upward. The remaining rows form the
   *bottom sub-accelerator* (B-SA). It takes weights from below and drains downward.
   Each DPE has a weight channel and a result channel in both vertical directions, so
   the two halves never share a wire. The intended use is B-SA for the real-time
   inference and T-SA alternating between labeling and retraining.
2. **Block floating point with three precisions on the same multipliers.** Operands
   use the MX ("micro-exponent") format. A DPE's MAC tree is made of sixteen 2-bit
   multipliers. It uses them as 16 MX4, 4 MX6 or 1 MX9 multiplication per cycle. Each
   sub-accelerator picks its own precision. Inference can use MX6 while retraining
   uses MX9, for example.

Results leave the array in FP32. A precision-conversion unit (PCU) at each edge turns
them back into MX. For retraining it also produces the transposed (column-major)
blocks that back-propagation needs.

## The MX format

A block holds 16 values. They share an 8-bit exponent `E`, which uses the FP32 bias
of 127. Each pair of values (sub-block) shares one micro-exponent bit `mu`. Each value
keeps a sign and an `M`-bit magnitude mantissa:

| mode | M | cycles per block dot product | products per cycle |
|------|---|------------------------------|--------------------|
| MX4  | 2 | 1                            | 16                 |
| MX6  | 4 | 4                            | 4                  |
| MX9  | 7 | 16                           | 1                  |

The value of element `i` is `(-1)^s * m * 2^(E - 127 - mu - (M-1))`. The top mantissa
bit therefore weighs `2^(E-127-mu)`, and `mu = 1` gives a pair one extra bit of range
below the shared exponent.

In memory a block is packed as follows (`dacapo_pkg`):

- bits `[7:0]` hold `E`;
- bits `[15:8]` hold the eight `mu` bits;
- element `i` sits at `[16 + i*(M+1) +: M+1]` as `{sign, mantissa}`.

That makes 64, 96 or 144 bits per block. The bit layout is this design's own; the
field sizes come from the format.

## Inside a DPE

### Lane words: how mantissas reach the 2-bit multipliers

Each cycle a DPE gets one *lane word* per operand. A lane word is the shared exponent
plus 16 lanes `{sign, mu, 2-bit slice}`. `dacapo_pkg::lane_pack` builds them, and it
is the one place that fixes which slice goes where:

- **MX4.** Lane `l` carries element `l`. One block takes one cycle.
- **MX6.** Step `s` (0..3) carries elements `4s..4s+3`. Element `4s+q` goes to 4-bit
  multiplier `q`. Its four 2-bit multipliers `r = 0..3` get the slice pairs
  (a_hi,b_hi), (a_hi,b_lo), (a_lo,b_hi), (a_lo,b_lo): the activation takes its high
  slice when `r < 2`, and the weight when `r` is even.
- **MX9.** Step `s` (0..15) carries element `s`. Its 7-bit mantissa is extended to 8
  bits. Nibbles go to 4-bit multiplier `q` by the same rule, and then 2-bit slices go
  to lane `r` within each nibble.

The sign and `mu` of the element are copied into every lane that carries part of it.

### The MAC tree (`mul2b`, `mul4b`, `mac_tree`)

- **`mul2b`** computes `±((a.m * b.m) << 2) >> (a.mu + b.mu)`. The two guard bits
  make the right shift by the micro-exponents exact. The sign is the XOR of the two
  operand signs, so each partial product is already signed.
- **`mul4b`** combines four of those: `y = ((p0<<2)+p1)<<2 + ((p2<<2)+p3)` when
  fused, and `p0+p1+p2+p3` when not. Muxes bypass the shifts.
- **`mac_tree`** repeats the same pattern one level up, with 4-bit shifts. In MX9 the
  whole tree is a single 8x8 multiplier. In MX6 it is four 4x4 multipliers whose
  products add. In MX4 it is sixteen 2x2 products that add.

The tree is linear, so doing the signs and micro-exponents at the leaves gives the
exact signed sum. The sum has `2(M-1)+2` fraction bits (`frac_bits`).

### FP32 generator and accumulator (`fp32_gen`, `fp32_add`)

`fp32_gen` adds the MAC-tree outputs of one block: 1, 4 or 16 cycles, marked by a
`last` tag. It then converts the integer sum to IEEE single precision with the
exponent `E_a + E_b - 127 - frac_bits + msb`. The conversion is exact, because a block
sum needs at most 21 magnitude bits. A result below the normal range flushes to zero,
and one above it saturates to infinity. The result appears one cycle after `last`.

`fp32_add` is the accumulator adder. It is combinational, rounds to nearest-even,
handles normal numbers only (no denormals, no NaN) and saturates to infinity.
Rounding is the only inexact step in the whole datapath.

### Tags, weights and drain (`dpe`)

Activations travel west to east with three tags:

- `valid`;
- `first`: this block begins a new output, so the sum replaces the accumulator instead
  of adding to it;
- `last`: the last cycle of a block.

Weights travel in two registered channels: one moving south (T-SA) and one moving
north (B-SA). A mux picks the channel by the row's `bsa` bit. Results also move
vertically when `drain` is high:

- each accumulator loads its neighbour on the far side from its own SA's output
  buffers;
- the row farthest from those buffers (`far_edge`) loads zero.

So after `R` drain cycles all `R` result rows have come out of the array edge in order,
and the array is clean.

## Partitioning and skew (`dpe_array`, `sa_ctrl`)

`dpe_array` computes two signals per row from `r_tsa`: `bsa = (r >= r_tsa)`, and
`far_edge`, which is true for the last T-SA row and for the first B-SA row. It also
routes `mode_t`/`mode_b` and `t_drain`/`b_drain` to the rows of each SA. Row 0's
accumulators are the top output edge (`o_top`). Row `ROWS-1`'s are the bottom edge
(`o_bot`).

Each SA has a sequencer, `sa_ctrl`. Its logical row `i` is physical row `i` in the
T-SA and physical row `ROWS-1-i` in the B-SA. Logical row 0 is therefore always next
to the SA's weight and output buffers, and the two controllers are the same RTL with
a `BOTTOM` parameter. A run computes `R x 16` outputs, each a sum over `nblk` MX
blocks:

| phase | length (cycles) | what happens |
|-------|-----------------|--------------|
| FEED  | `nblk*S + R + COLS` | at cycle `t`, logical row `i` reads its I buffer at `i_base + t - i`, and column `c` reads its W buffer at `w_base + t - c`, inside the window `[0, nblk*S)`; this classic skew makes operand `k` of row `i` and column `c` meet in DPE `(i,c)`; tags go out one cycle later, aligned with the registered read data |
| DRAIN | `R` | result row `d` leaves the array edge; it is written to the 16 O buffers at `o_base + d` and handed to the PCU |
| FIN   | 1 | `done` and `pcu_flush` pulse |

From the `start` cycle to `done` takes `nblk*S + 2R + COLS + 2` cycles.

Two run options split a reduction longer than one buffer fill into several runs:

- `accumulate=1` keeps the accumulators from the previous run, so `first` is not set;
- `drain_en=0` skips DRAIN, so the sums stay in the array for the next run.

`r_tsa` may only change while both SAs are idle.

## Precision conversion (`mx_quantizer`, `pcu`)

`mx_quantizer` converts 16 FP32 values to one MX block in one combinational pass:

1. A max tree over the FP32 exponents. Its leaf level gives the maximum of each pair;
   the root gives the shared exponent `E`.
2. `mu = 1` for a pair whose maximum is below `E`.
3. Each element's significand (with the hidden 1) is shifted right by
   `E - mu - e_i + 24 - M` and truncated to `M` bits.
4. An element that truncates to zero loses its sign.

Truncation, not rounding, is used, as in the format's description.

`pcu` always emits one row-major block per drained row. With `col_major=1` it also
collects the rows in a 16x16 FP32 tile. When the 16th row arrives, or at `pcu_flush`
for a shorter tile, it emits the 16 columns, one per cycle, with `col_idx`. Rows that
never arrived count as zero. `busy` is high while columns go out. The top checks, by
assertion, that a new drain does not start during that time.

## Memory side (`mem_if`, `sram_buf`)

The buffers follow the array's floor plan:

| buffers | count | size each | port |
|---------|-------|-----------|------|
| I (one per row) | 16 | 192 x 72 bit | |
| W, top and bottom (one per column) | 16 + 16 | 192 x 72 bit | |
| O, top and bottom | 16 + 16 | 128 x 32 bit | read back through `vout_*` |

Together that is 97 KB. The buffers are plain 1-write/1-read arrays with registered
read (`sram_buf`).

`mem_if` is the programmable memory interface. It takes one packed MX block per
command, with a valid/ready handshake. It decodes the block (`mx_unpack`), cuts it
into 1, 4 or 16 lane words (`lane_pack`) and writes them to consecutive addresses.
The target depends on the command:

- an activation for SA row `i` goes to the I buffer of the physical row (flipped for
  the B-SA);
- a weight for column `c` goes to the top or bottom W buffer.

Activations are packed as the activation operand and weights as the weight operand
(see the `is_w` rule above). `cmd_ready` is low while a block is being written out. A
testbench that feeds commands sees this as back-pressure.

## Using the top (`dacapo_top`)

1. Set `cfg_r_tsa`, the MX modes and `cfg_col_major_*`.
2. Load activations and weights through the `cmd_*` port.
3. Pulse `t_start` or `b_start` with `nblk` and the buffer base addresses.
4. Wait for `*_done`.
5. Read the FP32 results from the O buffers through `vout_*`, or take the MX blocks
   from `*_row_*` / `*_col_*`.

The two SAs can run at the same time. Off-chip DRAM would sit behind the `cmd_*`
port. Vector units would sit behind `vout_*`.

## Testbenches

Each block has a self-checking testbench in `tb/`. It compares against references
computed with `real` arithmetic in `tb_fp_pkg`, prints
`TB_RESULT checks=N failures=M`, and has a watchdog.

`tb_dacapo_top` runs the full 16x16 design with default parameters. It goes through
three configurations:

- 12/4 rows, MX9/MX6, with column-major output;
- 6/10 rows, MX6/MX4;
- 14/2 rows, MX9/MX6, with a reduction split over two runs.

Both SAs run concurrently. It checks every output against a reference. It also
checks the `done` latency and counts repartitioning, drains, column-major tiles,
memory back-pressure, split reductions and use of all three modes.

Simulation with plain Verilator (about two minutes for the top):

    verilator --binary --timing --assert -y rtl -y tb rtl/dacapo_pkg.sv \
        tb/tb_fp_pkg.sv tb/tb_dacapo_top.sv --top-module tb_dacapo_top
    obj_dir/Vtb_dacapo_top

Replace `tb_dacapo_top` with any other testbench name.

## Departures and limits

- **Not built:**
  - the vector processing units drawn beside the PCUs, whose function is not
    described;
  - the off-chip LPDDR5 memory and its controller/PHY;
  - the offline performance estimator and the spatial and temporal resource
    allocators. Those are software: they only set `cfg_r_tsa`, pick the modes and
    issue runs.
- **The memory interface starts at packed MX blocks.** DRAM address generation and
  tensor reshaping beyond the per-SA buffer layout are not modelled.
- **The exact bit-level choices are this design's own:**
  - lane placement;
  - the packed block layout;
  - two guard bits in the 2-bit multipliers;
  - FP32 rounding: exact conversion, RNE accumulation, flush-to-zero, no NaN;
  - buffer depths.
- **Control is this design's own.** The sequencing, the tag protocol, the drain
  scheme and the PCU tile buffer are not specified at that level of detail.
- **Capacity.** One run holds at most 192 lane words per row: 12 MX9, 48 MX6 or 192
  MX4 blocks. Longer reductions use `accumulate`/`drain_en`. Whole networks do not fit
  on chip; weights stream from DRAM tile by tile.
- **No timing or area claims.** The target of 500 MHz in 28 nm has not been checked.
  `fp32_add` and `mx_quantizer` are single-cycle combinational blocks that would
  likely need pipelining at that clock.
