# Bit-serial spatial multiplier for a fixed sparse matrix

Reservoir computing (echo state networks) multiplies a state vector by a very
large, sparse, random matrix that never changes. This design does not store that
matrix anywhere. The matrix is compiled into the circuit. Every weight bit that is
1 becomes a wire into a bit-serial adder, and every weight bit that is 0 costs
nothing. With bit-serial arithmetic each adder is one full adder and two
flip-flops, so a 1024 x 1024 matrix of 8-bit weights fits in the fabric. One
vector-matrix product `y = x^T V` then takes a few dozen clock cycles, and no
indexing, tiling or weight movement is needed.

The hardware cost grows with the number of one bits in the matrix, not with its
dimensions. Two tricks reduce that count further:

* Signed weights are split into two unsigned matrices, `V = P - N`, and the two
  results are subtracted at the end.
* The split can use canonical-signed-digit (CSD) recoding. A run of ones such as
  `0111 1100` becomes `+1000 0000 - 0000 0100`, which has fewer one bits in total.

The RTL follows the architecture of Denton and Schmit, "Direct Spatial
Implementation of Sparse Matrix Multipliers for Reservoir Computing". This README
notes where the RTL goes beyond that description or departs from it.

## 1. Arithmetic, from one adder to the full array

### Bit-serial adder (`bs_add`)

A bit-serial adder is a full adder. Its sum output is registered and its carry is
fed back through a flip-flop. The two operands arrive least significant bit
(LSb) first, one bit per clock. The sum leaves one cycle later, also LSb first.
For example, 3 + 7 proceeds as follows (`s` is the bit shown one cycle after its
inputs):

| cycle | carry in | a | b | s | carry out |
|------:|:--------:|:-:|:-:|:-:|:---------:|
| 0     | 0        | 1 | 1 | 0 | 1         |
| 1     | 1        | 1 | 1 | 1 | 1         |
| 2     | 1        | 0 | 1 | 0 | 1         |
| 3     | 1        | 0 | 0 | 1 | 0         |

The result is `1010` = 10. A subtractor inverts `b` and starts the carry at 1.

The carry is restarted in the cycle that carries bit 0. That cycle is marked by a
`first` signal travelling with the data, so a new operation can follow the last
bit of the previous one with no idle cycle.

One `bs_add` instance holds `N` independent lanes. Two elaboration-time masks,
`A_USED` and `B_USED`, say which lanes have a real operand:

| operands present | what the lane becomes |
|------------------|-----------------------|
| both             | full adder with a carry flip-flop |
| one              | a plain D flip-flop (adding 0 only delays) |
| none             | constant 0, no logic |

This rule is the design's central optimisation. Because the masks are
parameters, any synthesis tool removes the unused logic by plain constant
propagation.

### Column dot product (`bs_column`)

One column computes `y_c = sum_r x_r * V[r][c]`:

1. **Leaves.** Each weight bit ANDs one input bit. A weight of 1 makes the AND a
   wire and a weight of 0 makes it constant 0, so no gate is left.
2. **Plane trees.** Each sign (P, N) and each weight bit position k (a "plane")
   gets its own balanced tree of registered bit-serial adders over the rows. The
   tree is `log2(R)` levels deep.
3. **Plane chain.** The plane sums are combined by a chain of adders. The chain
   starts at the most significant plane, added to 0. Each link adds the next
   lower plane to the running sum. The running sum is one cycle late at each
   link, and a one-cycle delay of a bit-serial number multiplies it by 2.
   Plane k therefore comes out weighted by `2^k`.
4. **Subtractor.** A final bit-serial subtractor produces `P-sum - N-sum`.

**Leaf layout.** The leaf vector is row-major. Bit `r*G + g` belongs to row `r`
and group `g`, where `G = 2*NPL` and `NPL` is the number of planes per sign.
Group `g = k` is plane k of P, and group `g = NPL + k` is plane k of N.

**Tree pairing.** At each level, node `j` is paired with node `j + K/2`, where K
is the number of nodes in the level. In other words, the upper half of the level
vector is added to the lower half. The tree is still balanced, but a whole level,
for all planes at once, becomes one vector of adder lanes. Drawn pictures of such
trees usually pair neighbouring rows instead. The sum is the same either way.

**Row padding.** Row counts that are not a power of two (the classic reservoir
has 800 rows) are padded with zero rows. The padding costs no logic.

**Timing.** Suppose bit t of every input is present in cycle t. Then bit t of the
result appears in cycle `t + log2(RP) + 2`, where `RP` is the padded row count.
The delay is one cycle per tree level, one for the last chain link and one for
the subtractor.

**Result width.** All arithmetic is modulo `2^OUT_W`, where `OUT_W` is the
number of bits streamed per vector. The result is exact once `OUT_W` covers the
full product width. To make that work for signed inputs, the input stream keeps
repeating each input's sign bit after its MSb, for the whole `OUT_W` cycles.

### Array (`bs_matvec`)

Every input bit stream is broadcast to all columns. The array holds one
`bs_column` per matrix column. The weights of each column are computed at
elaboration and passed to it as a constant parameter.

## 2. The fixed matrix

The matrix is part of the hardware, so it has to be defined in the RTL. Package
`rc_pkg` defines it element by element:

```
z        = splitmix64(seed, col, row)          64 pseudo-random bits
nonzero  = z[7:0] < DENSITY                    probability DENSITY/256
V[r][c]  = nonzero ? signed(z[8 +: BW_W]) : 0  uniform over all BW_W-bit values
```

Nonzero elements are uniform over all signed `BW_W`-bit values, and elements
are zero with probability `1 - DENSITY/256`. The default `DENSITY = 5` gives
98.0 % element sparsity.

`split_weight()` turns each element into its P and N magnitudes.

* **`ENC_PN`:** positive elements go to P, and the magnitudes of negative
  elements go to N. This needs `BW_W` planes per sign.
* **`ENC_CSD`** (default): the magnitude is recoded one run of ones at a time.
  * A run of length 1 is kept.
  * A run of length 3 or more, from bit s to bit i-1, becomes `+2^i - 2^s`.
  * A run of length 2 gains nothing from recoding, so it is recoded only when a
    pseudo-random coin (`z[40 + s]`) is 1. This balances the P and N matrices.

  For a positive element the positive digits go to P and the negative digits
  go to N. For a negative element the roles swap. CSD needs one extra plane,
  `BW_W + 1` per sign.

The testbenches compute every expected result from `elem_value()` alone, never
from the P/N split. So a passing test also shows that the PN and CSD splits
reproduce the matrix exactly.

**Using your own matrix.** Replace the body of `rc_pkg::elem_value` (and the
coin source, if you use CSD). Nothing else depends on how the matrix is
generated. The generator is evaluated at elaboration for all R·C elements. At
the default size this takes a few minutes in each tool. Keep the per-element
function cheap: only nonzero elements run the CSD loop.

## 3. Wrapper: memory, sequencer, shift registers (`rc_top`)

```
host port ─┐
           ▼
        rc_sram ──word──► in_sreg ──xb[R]──► bs_matvec ──yb[C]──► out_sreg ──word──► rc_sram
           ▲    (parallel load,         (broadcast, trees,       (serial in,
           │     LSb-first, sign-ext.)   chain, P−N)              y_next)
        rc_ctrl: read, load, first, shift, write timing
```

**Memory (`rc_sram`).** Each memory word holds one whole vector:

* Input word: element r of the input sits at bits `[r*BW_I +: BW_I]`.
* Result word: element c of the result sits at bits `[c*OUT_W +: OUT_W]`.

The memory has one synchronous read port and one synchronous write port.
Reading the next input and writing the previous result therefore never collide.
The default depth is 128 words, enough for a batch of 64 inputs plus their 64
results.

**Command.** While `busy` is low, the host reads and writes the memory through
the `h_*` port. A command is started with a one-cycle `start` pulse carrying:

* `src`: address of the first input vector;
* `dst`: address of the first result vector;
* `count`: the number of vectors.

A `count` of 0 is ignored. `done` pulses once after the last result has been
written.

**Timing per vector.** Cycle numbers below are relative to the edge that loads
the input shift registers.

| cycle | event |
|-------|-------|
| −1 | memory read of the vector (data returns in cycle 0) |
| 0 | `load`: the input registers capture the word |
| 1 … OUT_W | input bits 0 … OUT_W−1 on the stream (`first` in cycle 1) |
| 1+LAT … OUT_W+LAT | result bits shifted into `out_sreg` (`LAT = log2(RP)+2`) |
| OUT_W+LAT | result word written, using `y_next` so that its last bit is included |

The next vector is read in stream cycle `OUT_W-2` and loaded right after the last
bit of the current one. A batch of n vectors therefore streams back to back and
takes `2 + n*OUT_W + LAT` cycles from `start` to `done`.

## 4. Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `R`, `C` | 1024, 1024 | matrix rows (input length) and columns (output length) |
| `BW_I` | 8 | input element width, two's complement if `SIGNED` |
| `BW_W` | 8 | weight width, two's complement (at most 31) |
| `OUT_W` | `BW_I+BW_W+log2 R` = 26 | result bits streamed per vector |
| `ENC` | `ENC_CSD` | `ENC_PN` or `ENC_CSD` split of V into P − N |
| `SEED`, `DENSITY` | 1, 5 | the fixed matrix (density in 1/256) |
| `SIGNED` | 1 | sign-extend inputs (0: zero-extend) |
| `DEPTH` | 128 | words in the vector memory |

**Latency and output width.**

* With the default `OUT_W = 26`, one vector takes 26 + 10 + 2 = 38 cycles,
  counted from its first input bit to its last result bit.
* The paper quotes `BW_i + BW_w + log2 R + 2` = 28 cycles for this size. That is
  the same pipeline with only 16 result bits streamed out. Set `OUT_W = 16` to
  get exactly that latency; results are then kept modulo 2^16.
* The default streams the exact product width instead, so no result can wrap.

## 5. How far the RTL follows the source, and where it does not

These parts follow the paper's description:

* the bit-serial adder and subtractor;
* AND-gate leaves that become wires or disappear;
* trees of registered bit-serial adders, one per weight bit plane;
* a chain that starts at the MSb plane with a 0 operand;
* P/N split with one final subtractor;
* the CSD recoding rule, including the coin flip for runs of two;
* input sign extension from the shift register;
* input broadcast to every column;
* the pipeline depth of `log2 R + 2`.

These are choices of this design, not given in the source:

* carry restart with a travelling `first` marker, which allows back-to-back
  vectors;
* tree pairing of node j with j + K/2;
* zero-row padding;
* the pseudo-random matrix generator and the 1/256 density steps;
* the result width (see above);
* the whole wrapper: vector-per-word memory, separate read and write ports, the
  command interface and host port.

The source only says that inputs are fed from, and results captured in, one
SRAM.

Not built:

* **Timing-closure registers.** The source names two FPGA problems: the large
  fanout of the input broadcast and signals crossing between FPGA dies. It
  suggests pipeline registers for both but did not use them. They are not here
  either, so the broadcast is a single-cycle net, as in the source.
* **The rest of the reservoir.** The nonlinearity `f`, the input matrix `W_in`
  and the trained read-out `W_out` are outside the accelerated product.
  Results leave through the memory host port.
* **FPGA-specific mapping.** LUTs, LUTRAM and place-and-route are left to
  synthesis.

Two matrix families from the source's experiments are not reproduced by the
generator:

* bit-sparsity sweeps, where each weight *bit* is drawn independently;
* 32-bit weights.

The datapath handles both. Only `elem_value` would need changing.

## 6. Files

| file | content |
|------|---------|
| `rtl/rc_pkg.sv` | defaults, `enc_e`, matrix definition, PN/CSD split |
| `rtl/bs_add.sv` | lanes of bit-serial adders/subtractors with culling masks |
| `rtl/bs_column.sv` | one column: leaves, plane trees, chain, subtractor |
| `rtl/bs_matvec.sv` | broadcast and one column per matrix column; builds the weight constants |
| `rtl/in_sreg.sv`, `rtl/out_sreg.sv` | input and result shift registers |
| `rtl/rc_sram.sv`, `rtl/rc_ctrl.sv` | vector memory and sequencer |
| `rtl/rc_top.sv` | the wrapped multiplier |
| `tb/tb_*.sv` | self-checking testbench per module |
| `tb/tb_rc_top_256.sv` | one batch on a 256 x 256, 98 % sparse matrix |
| `tb/tb_rc_batch.sv` | batch sweep 1..64 on a 64 x 64, 95 % sparse matrix |

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`.
Each one compares results with integer arithmetic computed independently of the
RTL, and checks cycle counts where they are defined. For example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/rc_pkg.sv tb/tb_rc_top.sv \
          --top-module tb_rc_top -Mdir obj_top -o sim && obj_top/sim
```

Use the same command with `tb_bs_add`, `tb_bs_column`, `tb_bs_matvec`,
`tb_in_sreg`, `tb_out_sreg`, `tb_rc_sram`, `tb_rc_ctrl`, `tb_rc_batch` or `tb_rc_top_256` in
place of `tb_rc_top`.

What each testbench covers:

* **`tb_rc_top`** runs two 12 x 6 multipliers, one CSD and one PN, through a
  batch of six vectors and a single vector. It checks the results, the batch
  and single-vector cycle counts, and that back-to-back streaming, negative
  inputs, mixed-sign CSD weights, zero weights and host accesses all occurred.
* **`tb_rc_top_256`** runs a 256 x 256 design (98 % sparse, CSD, 8-bit
  weights and inputs, 24-bit results) through a batch of two vectors, one
  random and one of extreme input values, and checks all 512 results and the
  cycle count `2 + 2*24 + 10`. This is the largest size simulated end to end.
  The same testbench with `R` and `C` set to 1024 runs the default design, but
  its C++ build alone takes more than 25 minutes.
* **`tb_rc_batch`** multiplies batches of 1, 2, 4, ..., 64 vectors by a
  64 x 64 matrix at 95 % element sparsity and checks every result and the
  cycle count `2 + 22n + 8` of each batch. The cycles per vector fall from 32
  for a single vector to 22.1 for 64, the 22-cycle streaming interval.

**Tool cost at the default size.** Expect several minutes of elaboration in each
tool, because the whole matrix is generated and folded into about 20 000
distinct adder instances. The C++ build of a full-size simulation takes more
than 25 minutes. Smaller `R`/`C` make every step fast.
