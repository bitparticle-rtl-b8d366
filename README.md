# BitParticle: a dual-factor bit-sparsity MAC array in SystemVerilog

Quantized DNN operands are mostly zero bits. A bit-serial multiplier can skip
the zero bits of one operand only. BitParticle skips zero bit-pairs of
**both** operands. It also keeps the number of partial products per product at
seven or fewer, the same as a conventional 7-bit multiplier. A product of two
8-bit sign-magnitude numbers then takes 1 to 4 cycles, depending on the data.
An array of such units needs a way to keep running when every PE takes a
different time per step. Here that is the *quasi-synchronous* scheme: short
operand queues let PEs inside a column drift, and a small weight buffer lets
whole columns drift against each other.

This RTL implements the scheme as described in "BitParticle: Partializing
Sparse Dual-Factors to Build Quasi-Synchronizing MAC Arrays for
Energy-efficient DNNs" (Qiaoyuan et al.). It has the MAC unit, the operand
queues, the weight buffer, the 16 x 32 array, the three banked caches and a
stream sequencer. Where that description stops, this design makes its own
choices. Each one is named below and in the header comment of each file.

## 1. The particlization MAC unit (`bp_mac`)

### Particles and intermediate results

An operand is `{sign, mag[6:0]}`. The magnitude is cut into four *particles*:

| particle | bits      | LSB weight |
|----------|-----------|------------|
| 3        | `mag[6]`  | 6          |
| 2        | `mag[5:4]`| 4          |
| 1        | `mag[3:2]`| 2          |
| 0        | `mag[1:0]`| 0          |

Each activation particle `ia` multiplies each weight particle `iw`. This gives
16 *intermediate results* (IRs) with id `4*ia + iw`. IR 15 is the product of
the two top particles; IR 0 is the product of the two bottom ones. IR `id`
has LSB weight `2*(ia+iw)`, so all IRs on one anti-diagonal share a weight.
These anti-diagonals are the seven **groups**:

| set | group       | LSB weight | IR width | field in the partial product |
|-----|-------------|-----------:|---------:|------------------------------|
| 0   | 15          | 12         | 1        | PP0[12]                      |
| 0   | 7-10-13     | 8          | 4        | PP0[11:8]                    |
| 0   | 2-5-8       | 4          | 4        | PP0[7:4]                     |
| 0   | 0           | 0          | 4        | PP0[3:0]                     |
| 1   | 11-14       | 10         | 2        | PP1[11:10]                   |
| 1   | 3-6-9-12    | 6          | 4        | PP1[9:6]                     |
| 1   | 1-4         | 2          | 4        | PP1[5:2]                     |

PP0 and PP1 are 13 bits wide. PP1 has `1'b0` at bit 12 and `2'b00` at bits
1:0. The groups of one set never overlap in bit position. So if each group of
a set gives one IR, the IRs are simply **concatenated** into one partial
product, with no adder and no shifter. Each cycle the unit builds one PP from
each set and adds the two.

A group with k non-zero IRs needs k cycles. The largest group has 4 IRs, so a
product needs 1 to 4 cycles. Seven PPs (4 + 3) is the worst case.

Worked example (magnitudes W = 92, A = 67): W's particles, from particle 3
down, are 1, 01, 11, 00 and A's are 1, 00, 00, 11. The non-zero IRs are 15,
14, 13, 3, 2 and 1, and no group has more than one of them, so the product
takes one cycle. PP0 = `1_0011_0011_0000` (4912) and
PP1 = `0_01_0011_1001_00` (1252). They add to 6164 = 92 x 67. The sign of the
product is the XOR of the two operand signs.

### Cycle by cycle

* **Load cycle.** W and A are written into the operand buffers. Each particle
  is OR-reduced to a non-zero flag. A 4x4 cross-AND of the two flag vectors
  gives the 16-bit *non-zero vector*, which goes into the non-zero register.
* **Compute cycles.** The buffered particles drive sixteen 2-bit multipliers
  (`bp_ir_mul`). In each group a priority picker chooses the lowest-id IR
  whose non-zero bit is still set. That one-hot select drives an AND-OR
  multiplexer. The two PPs are concatenated and added in a 14-bit sum. The
  sum is negated when `sign(W) xor sign(A)` is set, then added to the 32-bit
  two's-complement accumulator. The selected bits are cleared from the
  non-zero register.
* **Completion.** The product ends in the cycle after which no non-zero bit is
  left. The next operands are loaded in that same cycle, so back-to-back
  products have an initiation interval equal to their cycle count (1 to 4).
  A product with no non-zero IR (a zero operand) still takes one cycle. Zero
  operands are better removed in front of the unit (section 2).

**3-bit IR encoding.** A 2-bit by 2-bit product is one of 0, 1, 2, 3, 4, 6 or
9. The value 9 is written as `3'b111`, which keeps every IR at 3 bits through
the multiplexers. The encoding reduces to
`ir3 = {x1&y1, x1&y0 | x0&y1, x0&y0}`. The function `bp_pkg::ir_dec` turns
the code back into 4 bits after selection. It is needed only for the five
groups whose IRs are 2x2-bit products.

**Accumulation boundaries.** Each operation carries a `last` tag. When a
tagged operation completes, the accumulator value moves to an output register
(`out_valid`/`out_ready`) and the accumulator restarts at zero. The unit holds
if the previous result has not been taken yet.

**Approximate variant (`APPROX=1`).** IRs of groups 1-4 and 0 are never
marked non-zero, so those low-weight products are dropped from every sum. The
reference model in `tb_bp_mac` computes the same truncated sum. The default
(`APPROX=0`) is exact.

## 2. Operand queue and zero-value filter (`bp_operand_queue`, `bp_pe`)

Each PE is an operand queue followed by a MAC unit. The queue holds `Q=2`
pending operations. An operation counts as *accepted* by the PE as soon as the
queue takes it. The MAC unit then drains the queue at its own 1-4 cycle pace.

With `FILTER=1`, an operation whose weight or activation magnitude is zero is
accepted but never stored, so it costs the MAC unit nothing. One exception is
this design's choice: a zero operation tagged `last` is stored anyway. It ends
an output, and the MAC unit must see it to emit the sum.

## 3. Quasi-synchronous array (`bp_mac_array`, `bp_weight_buffer`)

The array is `ROWS x COLS = 16 x 32` PEs.

* **Weights** are shared along a row. Entry *s* of the weight buffer holds one
  weight per row: the 16 weights of group step *s*.
* **Activations** enter each column at the top. On every step of that column
  they move one row down, so the PE in row r uses the activation that entered
  r steps earlier.
* **Group step (intra-group elasticity).** Each column is one group. A column
  steps only when all 16 of its PEs accept their operation in the same cycle
  (queued or filtered). A slow product therefore holds back its column only
  when its queue is full, not on every cycle it takes.
* **Column drift (inter-group elasticity).** Columns step independently. The
  weight buffer keeps the E+1 = 4 most recent entries. Each column has a lag
  register `d[c]`: the number of its steps beyond the oldest entry. The lag
  is the select of the per-PE weight multiplexer, so a PE in row r of column
  c uses lane r of entry `d[c]`. A column may step only while its entry is
  present (`d[c] < count`). Once every column has moved past entry 0, that
  entry is dropped and all lags drop by one. The slowest and fastest columns
  therefore never use entries more than E = 3 steps apart.
* **Results.** A finished sum stays in its PE's output register until the
  column's result port takes it. When several PEs of a column finish
  together, the lowest row goes first.

The step signal of a column depends combinationally on its activation lane and
on the `in_ready` of its 16 queues. `in_ready` does not depend on `in_valid`,
so this path has no combinational loop.

## 4. Caches and the run sequencer (`bp_cache`, `bp_sequencer`)

| cache      | banks | words x width | size   | one bank per |
|------------|------:|---------------|--------|--------------|
| weight     | 16    | 4096 x 8      | 64 KB  | PE row       |
| activation | 32    | 4096 x 8      | 128 KB | PE column    |
| result     | 32    | 1024 x 32     | 128 KB | PE column    |

Each bank is a RAM with one write port and one read port. A read returns its
data one cycle later. The caches work as software-managed scratchpads: the
host fills and drains them through the top-level ports. Tags and DRAM refill
are not modelled.

A **run** computes `NTILE` outputs in every PE, each the sum of `NRED`
products. Let L = NRED x NTILE. Bank r of the weight cache must hold row r's
L weights from `cfg_w_base`. Bank c of the activation cache must hold column
c's L activations from `cfg_a_base`. The sequencer then:

1. Pushes S = L + 15 weight entries. At step s, row r carries weight `s-r`
   (valid when `0 <= s-r < L`). This skew matches the activations moving down
   one row per step. `last` is set on the final product of each output.
2. Feeds each column its L activations, then 15 bubbles that drain the skew.
   Each column has its own counter, so columns run ahead or behind freely.
3. Reads each cache through a 2-entry prefetch FIFO. A read is issued only
   when its word is sure to find room one cycle later. This sustains one step
   per cycle per column.
4. Writes PE (r, c)'s t-th sum to result bank c at `cfg_r_base + 16*t + r`.
   With `cfg_accum` set, it reads the old word first and writes old + new one
   cycle later. A reduction that does not fit one run can be split into
   several runs this way: C is split into C1 x C0 and the partial sums add up
   in the result cache.
5. Pulses `done` once every column has written its 16 x NTILE results.

**Dataflows.** Each column can hold a different output pixel (dataflow (a),
OX_u x OY_u = 32 as 32x1, 16x2 or 8x4) or a different batch element (dataflow
(b), B_u = 32). Each row is a different output channel (K_u = 16). In this
RTL the hardware is the same for both dataflows. They differ only in what
the host writes into the activation banks: the im2col stream of the pixel or
batch element that the column computes. A run covers one tile. The host runs
the outer tiling loops and reloads the caches between runs.

## 5. Top level (`bitparticle_top`)

| port group | signals | use |
|---|---|---|
| weight fill | `host_w_we, host_w_bank[3:0], host_w_addr[11:0], host_w_data[7:0]` | one weight per cycle into one bank |
| activation fill | `host_a_we, host_a_bank[4:0], host_a_addr[11:0], host_a_data[7:0]` | one activation per cycle |
| result read | `host_r_re, host_r_bank[4:0], host_r_addr[9:0]` -> `host_r_rdata[31:0]` | data one cycle after `host_r_re` |
| run | `start, cfg_nred, cfg_ntile, cfg_w_base, cfg_a_base, cfg_r_base, cfg_accum` -> `busy, done` | `start` is taken while `busy` is low |

All operands are 8-bit sign-magnitude: bit 7 is the sign and bits 6:0 the
magnitude. Results are 32-bit two's complement. Reset is synchronous and
active low (`rst_n`). Top-level parameters: `ROWS, COLS, Q, E, FILTER,
APPROX, WDEPTH, ADEPTH, RDEPTH`. Their defaults are the sizes above.

## 6. Simulation

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_bp_ir_mul` | all 16 particle products, code and decoded value |
| `tb_bp_mac` | exact and approximate units against integer sums at 50-90% bit sparsity; the initiation interval of every product equals max(1, largest group count); result hold |
| `tb_bp_operand_queue` | capacity Q, order, zero-value filtering, zero `last` operations kept |
| `tb_bp_weight_buffer` | weight select per column lag, availability rule, at most E+1 entries |
| `tb_bp_mac_array` | 4x6 array with random gaps per column; all sums; stalls, drift, filtering and multi-cycle products all occur |
| `tb_bp_cache` | banked read/write and read latency |
| `tb_bp_sequencer` | skewed weight entries, activation streams and bubbles, result addresses, partial-sum accumulation, one step per cycle |
| `tb_bitparticle_top` | 4x8 core through its ports only: four runs (one accumulating), every result word, run-time bounds, every mechanism occurs |
| `tb_bitparticle_top_full` | the same at full size (16x32, full caches) with no parameter changed, one run of 3 outputs x 9 products per PE |

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/bp_pkg.sv tb/tb_bitparticle_top.sv --top-module tb_bitparticle_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. The full-size testbench takes
several minutes to compile, because the design has 512 PEs.

## 7. How far to trust it, and where it departs from the source description

Follows the source description:

* particles, IR ids, groups, the PP bit fields and the 3-bit IR code
* one-hot selection with a non-zero register that is cleared as IRs are used
* the 1-4 cycle schedule with overlapped load
* SM-to-two's-complement before accumulation
* the approximate variant's dropped groups
* Q = 2 operand queues with zero-value filtering
* columns as groups that step only when all their PEs accept
* an E+1 = 4 entry weight buffer with a per-MAC weight multiplexer
* the 16 x 32 array with row-shared weights and activations moving down the
  columns
* cache sizes and banking

This design's own choices:

* priority order inside a group (lowest id first)
* the 32-bit accumulator and result width
* the `last` tag that marks the end of an output, and keeping zero `last`
  operations in the queue
* the lag-register form of the weight buffer
* the fill/drain skew with bubble lanes
* lowest-row-first result arbitration
* the stream-order cache layout and the result address formula
* partial-sum accumulation through a read-modify-write of the result cache
* host ports in place of a DRAM interface
* synchronous active-low reset

Not built:

* **DRAM interface.** Only named in the source, with no protocol given.
* **Convolution address generation.** No im2col, and no tiling loops for
  OX/OY/B. The source leaves mapping to an external mapper (ZigZag), so here
  the host lays out the streams.
* **Frequency.** 500 MHz at 45 nm is a synthesis target. Nothing in the RTL
  is tuned for it. The longest path is likely the column step, an AND over
  16 queue-ready signals that feeds the weight-buffer pop and lag update.

The testbenches show that the arithmetic is exact (or exactly the intended
truncation), that no operation is lost or duplicated under random stalls, and
that the per-product cycle count matches the schedule. They do not show the
utilisation or energy figures of the source. Those need a cycle-accurate
workload simulation and a synthesis flow, which are outside this RTL.
