# EN-T: a tensor engine that encodes each weight once, outside the array

A multiplier spends part of its logic on recoding one operand before it forms
its partial products. A tensor computing unit (TCU) with S x S multipliers
recodes the same weight in every PE it passes through. EN-T moves that
recoding out of the array. One encoder per array column recodes each weight as
it leaves the weight buffer. The encoded form flows or is broadcast through the
array instead of the raw weight, and every PE keeps only the partial-product
selection and the adders.

There is a catch. Radix-4 Booth recoding spends 3 control bits per 2 bits of
operand, so an 8-bit weight becomes 12 wires. Putting that into the array would
widen every weight path by half. EN-T therefore uses a different recoding. It
turns an n-bit number into n + 1 bits: a sign and n/2 two-bit digits. An INT8
weight travels as 9 bits.

This RTL implements:

- the encoder;
- the encoder-less multiplier;
- five TCU organisations built from that multiplier;
- a small NPU around the TCU: buffers, a 32-lane encoder bank, a controller and
  a SIMD post-processing engine.

It is written in SystemVerilog (IEEE 1800-2017). It lints cleanly with
Verilator 5 and elaborates with the slang front end of Yosys.

## 1. The encoding

Split the magnitude |A| of an n-bit weight into radix-4 digits
a_i ∈ {0,1,2,3}, so that |A| = Σ a_i·4^i. A digit of 3 cannot be formed by
shifting, so it is rewritten as 4 − 1. Each digit absorbs the carry from the
digit below:

```
a'_i = a_i + c_i                              (c_0 = 0)
w_i  = a'_i       , c_(i+1) = 0   if a'_i ∈ {0,1,2}
w_i  = a'_i − 4   , c_(i+1) = 1   if a'_i ∈ {3,4}
```

so w_i ∈ {0, 1, 2, −1}. The digit codes are 00, 01, 10 and 11. In bits, one
digit encoder is

```
Encode(w_i) = a_i + c_i            (2-bit sum, carry discarded)
c_(i+1)     = a_i[1]·a_i[0] + a_i[1]·c_i
```

The lowest digit never receives a carry, so it passes through unchanged. An
8-bit weight therefore needs 3 digit encoders in a ripple chain.

- The encoded word is `{sign, w_3, w_2, w_1, w_0}`.
- A negative weight is encoded through its magnitude. Its sign bit tells the
  multiplier to use −B instead of B.
- Example: 78 = 0b01_00_11_10 encodes to `{0, 1, 1, −1, 2}`, i.e.
  `9'b0_01_01_11_10`, because 64 + 16 − 4 + 2 = 78.
- The carry out of the top digit is always zero. The largest magnitude is
  128 = 2·4³, so the top digit is at most 2.

The chain is slower than Booth recoding, which is fully parallel. That does not
matter here because `encoder_bank` registers the encoder outputs before they
enter the array.

RTL: `rtl/en_t_encoder.sv` (combinational, parameter `N`) and
`rtl/encoder_bank.sv` (32 encoders with a register stage and a valid bit).

## 2. Multiplying with an encoded weight

`ent_mult` takes the 9-bit code and a raw INT8 activation B. It works in three
steps:

1. It forms Bs = B, or −B when the sign bit is set.
2. Digit i selects 0, Bs, 2·Bs or −Bs, shifted left by 2i.
3. It adds the four rows to give the 16-bit signed product.

The adder structure is left to synthesis. The RTL writes the rows as one sum.

`ent_pe` adds a 16 + log2(S)-bit accumulator (21 bits for S = 32) with clear
and enable. The output-stationary arrays use it.

## 3. The five TCU organisations

All five use S x S multipliers (1024 for S = 32), take encoded weights from
outside and output one row of C = X·W (S accumulator values) per cycle. They
differ in how operands move. Two interface styles exist:

- **Step-wise** (`in_valid`, `x_vec`, `w_row`). Step k carries activation
  column X[·][k] and encoded weight row W[k][·]. After S steps the unit
  outputs the S rows of C. The first step of a tile clears the sums. A new
  tile must not start before the last row has left.
- **Weight-stationary** (`w_valid`/`w_row`, then `x_valid`/`x_vec`). S
  weight rows are written first, by row index (0 … S−1, wrapping). Then
  activation rows X[i][·] stream in, one per cycle. Each one gives output row
  i.

| module | organisation | style | operand movement | latency (clock edges) |
|---|---|---|---|---|
| `tcu_matrix2d` | 2D Matrix | step-wise | x broadcast along rows, encoded w broadcast down columns, PE accumulates | first row 1 edge after the last step |
| `tcu_systolic_os` | systolic, output stationary | step-wise | x moves right, encoded w moves down, one cell per cycle; edge skew of i cycles | first row 2S edges after the last step |
| `tcu_cube3d` | 3D Cube, two 8³ cubes | step-wise | staged tile, block schedule (below) | first row (S/8)³/2 + 1 = 33 edges after the last step |
| `tcu_systolic_ws` | systolic, weight stationary | weight-stationary | encoded w held in the cells, x moves right, partial sums move down; input skew and output de-skew | row i 2S − 2 edges after the edge that takes activation row i |
| `tcu_array1d2d` | 1D/2D Array | weight-stationary | per output column: S multipliers into a balanced adder tree, no PE registers | output register loaded by the edge that takes the row |

In the two systolic arrays the 9-bit encoded weight, not the 8-bit raw one, is
what the PE-to-PE registers carry. That is the cost EN-T accepts in exchange
for removing S² encoders. With Booth codes the same registers would be 12 bits
wide.

**The cube.** Two `cube_core` instances each multiply an 8x8 activation block
by an 8x8 weight block per cycle. Together they have 1024 multipliers, like a
32 x 32 array. The cube cannot be fed from 32-wide buffer ports at full rate
(it would need 256 operands per cycle). So `tcu_cube3d` works in three phases:

1. It loads the whole 32x32x32 tile in 32 steps.
2. It runs 32 compute cycles. In cycle t, cube c works on output block
   (t/4)·2 + c and k-block t mod 4. It accumulates and writes the finished
   8x8 block into the result registers after the fourth k-block.
3. It reads the results out row by row.

The staging registers and the schedule are this design's own.

## 4. The NPU around the array

```
 ext port ─► global buffer 256 KB ─LOAD_ACT─► activation buffer 32 KB ──(reg)──────────┐
             ▲                     ─LOAD_WGT─► weight buffer 32 KB ─► encoder bank (reg) ─┤
             │                                                                          ▼
             └──────────────── SIMD engine, 32 lanes ◄──────────────────────────── TCU (ARCH)
```

`ent_soc` is the top. Its parameters are `ARCH` (one of `ent_pkg::tcu_arch_e`,
default `ARCH_SYS_WS`) and `S` (default 32). All SRAMs have 256-bit words, one
byte per array lane. Each is a single array with one read port and one write
port and a one-cycle read latency: `ent_sram`, 8192 x 256 for the global
buffer and 1024 x 256 for the other two.

**External port.** Off-chip memory is not modelled. The global buffer's
`ext_*` port takes its place and may be used only while `busy` is low (this is
asserted).

**Instructions.** `instr_t` in `ent_pkg` arrives with a valid/ready handshake.
One instruction runs at a time.

| op | effect |
|---|---|
| `OP_LOAD_ACT` / `OP_LOAD_WGT` | copy `len` words from `gb_addr` to `act_addr` / `wgt_addr`. Takes len + 2 cycles. |
| `OP_GEMM` | one S x S x S tile: weights from `wgt_addr`, activations from `act_addr`. SIMD results go to `gb_addr` onward (S rows, or S/2 rows with pooling). |

**Data layout.**

- Weight word k is W[k][0..S−1].
- Activation word k is an activation *column* X[0..S−1][k] for the step-wise
  TCUs, and an activation *row* X[k][0..S−1] for the weight-stationary ones.
  The layout in memory follows the dataflow.
- Result word r is the INT8 row r.

**Timing inside a GEMM.**

1. The controller issues a buffer read in cycle t. The data arrive at t + 1.
2. The encoder bank registers the weights. A matching register delays the
   activations, so both reach the TCU at t + 2.
3. Step-wise TCUs receive S steps on S consecutive cycles.
4. Weight-stationary TCUs first receive S weight rows, then S activation rows
   on consecutive cycles.

In both cases the array does S² multiply-accumulates per cycle while it
streams. That is 1024 MAC per cycle, or 1024 GOPS at 500 MHz.

**SIMD engine.** Each of the 32 lanes takes one 21-bit accumulator value and
applies three steps in order:

1. adds `scalar`;
2. applies ReLU when `relu` is set;
3. shifts arithmetically right by `shift` and saturates to INT8.

With `pool` set, rows are paired and the lane-wise maximum of each pair is
written (2x1 max pooling).

## 5. Where this departs from the paper, and what is missing

- **SIMD lanes.** These are integer fixed point. The original engine uses TF32
  ALUs.
- **SIMD operations.** Pooling and activation are reduced to 2x1 max and ReLU.
  The exact operation set was never defined.
- **Tile depth.** A GEMM reduces over exactly K = S = 32. Results are
  re-quantised per tile, and nothing accumulates partial sums across tiles.
  So a convolution or fully-connected layer with K > 32 cannot be computed
  exactly. None of the evaluated networks (ResNet, DenseNet, Inception, VGG)
  can run end to end on this RTL.
- **Not included:**
  - the img2col unit of the controller;
  - the 16 KB instruction cache (instructions come in through a port);
  - off-chip DRAM.
- **Instruction set, handshakes, layouts, timing.** The instruction set, the
  valid/ready handshake, the buffer word width, the data layouts, the weight
  loading by row index and all control timing are choices made here.
- **Register stages.** The PE-level register stages are the minimum needed for
  each dataflow. No further pipelining was added inside the PEs or adder
  trees.
- **The encoder's magnitude step.** The encoder first forms |A| with a
  two's-complement negation. Only the sign-and-magnitude form of the encoded
  word is specified, not how the magnitude is obtained. This negation sits
  outside the array, in the 32 encoders.
- **Counters.** S must be a power of two because the row and step counters
  wrap. The cube needs S to be a multiple of 16 with the default two 8³
  cubes.

## 6. Simulating

Every testbench in `tb/` checks itself. Each prints
`TB_RESULT checks=N failures=M` and stops by itself, with a watchdog. Build
any of them with Verilator, for example:

```
verilator --binary --timing --assert -Irtl rtl/ent_pkg.sv tb/tb_ent_ref_pkg.sv \
    tb/tb_ent_soc.sv -y rtl -y tb --top-module tb_ent_soc -o sim
./obj_dir/sim
```

| testbench | what it shows |
|---|---|
| `tb_en_t_encoder` | all 256 INT8 values decode back exactly and match the reference recursion; 78 → `0_01_01_11_10`; random 16-bit values |
| `tb_ent_mult` | all 512 codes × 256 activations |
| `tb_ent_pe`, `tb_encoder_bank`, `tb_ent_sram`, `tb_simd_engine`, `tb_controller` | the unit against a model, cycle by cycle |
| `tb_tcu_*` | three 32x32x32 tiles each (random, all −128, random), with exact latencies and consecutive output rows |
| `tb_ent_soc` | all five architectures end to end (S = 8, cube S = 16): loads, GEMM with ReLU and with pooling, buffer reloads. It counts negative and −1-digit weights, −128 operands, ReLU clamps, saturations and pooled rows, and fails if any never happened. |
| `tb_ent_soc_full` | the same program on the default 32x32 weight-stationary NPU (about 2.5 minutes to build and run) |

`tb/tb_ent_ref_pkg.sv` holds the reference models. They are written from the
arithmetic, not from the RTL.

## 7. Files

- `rtl/ent_pkg.sv`: widths, buffer sizes, digit codes, TCU selector, SIMD
  configuration, instruction format.
- `rtl/en_t_encoder.sv`, `rtl/encoder_bank.sv`: the encoding.
- `rtl/ent_mult.sv`, `rtl/ent_pe.sv`: the encoder-less multiplier and PE.
- `rtl/tcu_*.sv`, `rtl/cube_core.sv`, `rtl/adder_tree.sv`: the five TCUs.
- `rtl/ent_sram.sv`, `rtl/simd_engine.sv`, `rtl/controller.sv`,
  `rtl/ent_soc.sv`: the NPU.
