# TiM-DNN: a ternary in-memory DNN accelerator in SystemVerilog

Deep networks whose weights are restricted to {-1, 0, +1} lose little
accuracy but need no multipliers. Their dot products reduce to counting:
how many products are +1 and how many are -1. This design does that
counting inside the memory that holds the weights.

A 256 x 256 array of ternary cells is split into 16 blocks of 16 rows.
When a block is read with a 16-element ternary input vector, every column
produces one 16-term dot product in a single access:

- each cell pulls one of the column's two bitlines down by a step if its
  product is +1 (BL) or -1 (BLB);
- peripheral converters read the two bitline voltages back as counts n and
  k;
- the result is `n - k`, or a scaled form of it for networks whose ternary
  levels are not symmetric.

Thirty-two such tiles are grouped into four banks. Each bank adds buffers, a
reduce unit, a small special-function unit and a scheduler, and runs a
program of vector-matrix, activation-function and quantisation instructions.

The RTL is synthesizable SystemVerilog-2017, apart from three behavioural
models of analogue parts (bitline, sample-and-hold, flash ADC). It was
simulated with Verilator 5 and read by Yosys through the slang front end.

## 1. Numbers and encodings

| quantity | default | parameter |
|---|---|---|
| rows per block (L, rows read at once) | 16 | `L` |
| blocks per tile (K) | 16 | `K` |
| columns per tile (N) | 256 | `N` |
| PCUs per tile (M, columns digitised per cycle) | 32 | `M` |
| largest count one bitline resolves (n_max) | 8 | `NMAX` |
| partial-sum width | 12 bits | `tim_pkg::PSUM_W` |
| tiles per bank × banks | 8 × 4 = 32 | `TILES`, `NUM_BANKS` |
| activation buffer / psum buffer per bank | 16 KB / 8 KB | `ACT_BYTES`, `PSUM_BYTES` |
| instruction memory per bank | 128 × 48 bits | `IMEM_DEPTH` |
| SFU | 64 ReLU, 8 vector PEs × 4 lanes, 20 special-function PEs, 32 quantisers | `tim_sfu` parameters |

**Ternary codes.** A ternary value on a wire is 2 bits, and it is also the
read-wordline drive of a cell:

- `2'b01` = +1 (drive WL_R1);
- `2'b10` = -1 (drive WL_R2);
- `2'b00` = 0 (neither);
- `2'b11` is never produced and reads as 0.

The types and the shared functions are in `tim_pkg`.

**Stored weight.** A cell holds two bits, A and B:

| A | B | weight |
|---|---|---|
| 0 | x | 0 |
| 1 | 0 | +1 |
| 1 | 1 | -1 |

The column drivers translate a ternary code into these bits on a write.

## 2. The ternary processing cell and one column

`tim_tpc` is the cell's read path as logic:

```
dis_bl  = A & (~B & WL_R1 | B & WL_R2)   // product +1
dis_blb = A & ( B & WL_R1 | ~B & WL_R2)  // product -1
```

A weight of 0 (A = 0) or an input of 0 (no wordline) discharges nothing.

A column's 16 cells share BL and BLB. Both are precharged to 1 V. `tim_bitline`
maps the number of cells that discharged a line to its settled voltage, as a
table of the simulated levels:

| cells discharged | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | ≥10 |
|---|---|---|---|---|---|---|---|---|---|---|---|
| voltage (mV) | 1000 | 890 | 780 | 680 | 580 | 490 | 400 | 320 | 240 | 180 | 120 |

The steps shrink as the line discharges: the more cells pull down, the less
each one contributes. This is why the converter only resolves counts up to
n_max = 8.

## 3. Converting a column: S/H, column mux, ADC, PCU

This is the part that needs the most care.

**Sample-and-hold (`tim_sample_hold`).** It captures all 256 × 2 bitline
voltages at the end of the access cycle. From then on the array is free for
the next access.

**Column mux (`tim_col_mux`).** There are only 32 PCUs for 256 columns. The
mux hands the held voltages to the PCUs in 8 groups: group g covers columns
32g to 32g+31.

**ADC (`tim_adc`).** This is a flash converter. Its thresholds sit halfway
between adjacent levels of the table above, and its output is the count n
(or k), from 0 to 8. A line that discharged more than 8 cells reads as 8.

The published text calls the converters "3-bit" but also states n_max = 8,
which needs 9 codes. This design follows n_max = 8, so the ADC output is 4
bits wide. Narrowing it to 3 bits would clip at 7.

**PCU (`tim_pcu`).** Each PCU computes:

```
psum_out = ((W1*n - W2*k) * I_alpha) << isb  +  psum_in      (12-bit, wraps)
I_alpha  = alpha ? -I2 : I1
```

What the terms do:

- **W1 and W2** scale the weight levels, giving weights in {-W2, 0, +W1}.
- **I_alpha** scales the input level of the current step, giving inputs in
  {-I2, 0, +I1}.
- **isb** is the significance of the input bit, used for multi-bit
  activations.
- **psum_in** lets a previous partial sum be added without another adder.

W1, W2, I1 and I2 are 4-bit registers in `tim_scale_regs`. They reset to 1,
which gives plain ternary arithmetic.

**Asymmetric inputs.** Inputs whose two non-zero levels differ cannot be
applied in one access, because the array only sees a sign. The scheduler
instead runs two accesses and accumulates them:

1. Apply the positions that hold +I1 as +1 (`alpha = 0`).
2. Apply the positions that hold -I2 as +1 (`alpha = 1`).

**Multi-bit activations.** An unsigned activation is split into {0, 1} bit
planes. Each plane is one access with its own `isb`. The partial sums are
accumulated through psum_in.

## 4. The tile and its timing (`tim_tile`)

Inside a tile:

- the row decoder and column drivers write one 256-weight row per cycle;
- the block decoder and the read-wordline drivers (`tim_block_decoder`,
  `tim_rwd`) put the input vector on the addressed block;
- 32 PCUs digitise the held voltages.

The array and the PCUs form a two-stage pipeline:

```
cycle      t        t+1     t+2   ...   t+8
array    access i   .       .           access i+1
PCUs       -      group 0  group 1 ...  group 7 of i
```

An access accepted in cycle t (`rd_en` while `rd_ready`) returns group g on
`psum_out` in cycle t+1+g, with `out_valid` and `out_group` set. The next
access is accepted in the cycle of the last group. One access therefore
completes every 8 cycles, and the converters are never idle.

`psum_in` is combinational and must hold the partial sums for `out_group`
in the cycle they are used.

**Simulation shortcut.** The weights are stored as two bit-arrays. Only the
16 rows of the addressed block drive an L × N plane of `tim_tpc` read paths.
This is functionally the same as giving every cell its own read path,
because only one block's wordlines are ever active. It keeps the model
small.

## 5. A bank (`tim_bank`)

**Input channel.** For a COMPUTE, tile t receives the 16-element half-word
`aaddr + t` of the activation buffer (`tim_act_buffer`). The tiles of one
instruction therefore cover consecutive 16-input slices of one long input
vector.

**Output channel and reduce unit.** The selected tiles run in lock step. In
each output cycle, the reduce unit (`tim_reduce_unit`) adds their 32 lanes
across tiles. The sum is written to psum-buffer entry `paddr + group`.

**Accumulation.** With the `acc` flag set, the entry about to be overwritten
is read and fed to psum_in of the lowest selected tile. In this way the PCUs
add up, without extra passes:

- several blocks,
- the two steps of asymmetric inputs,
- several input bits,
- several COMPUTE instructions (layers larger than the tiles).

**Special-function unit (`tim_sfu`).** It works on whole 32-lane psum
entries:

| operation | result |
|---|---|
| ReLU | ReLU of the entry |
| MAX (pooling) | element-wise maximum of two entries |
| ADD | element-wise sum of two entries (residual) |
| TANH | hard-tanh: clamp to ±1.0 |
| SIGM | hard-sigmoid: x/4 + 0.5, clamped to [0, 1] |
| QUANT | +1 if x > thr, -1 if x < -thr, 0 otherwise |

TANH and SIGM use 4 fraction bits. QUANT turns an entry into 32 ternary
activations, written back to the activation buffer as the next layer's
input.

SFU timing:

- Most operations finish 2 cycles after `start`.
- TANH and SIGM take 3 cycles: 20 special-function PEs need two passes for
  32 lanes.

**Scheduler (`tim_scheduler`).** The scheduler reads a 48-bit instruction
from `tim_instr_mem` and waits if needed:

- a COMPUTE waits until all tiles can accept an access;
- every other instruction waits until the tiles have drained.

`stall` shows the waiting. `done` pulses when the scheduler reaches HALT.

Instruction format (`tim_pkg::instr_t`):

| bits | field | meaning |
|---|---|---|
| 47:44 | op | HALT 0, SETSF 1, COMPUTE 2, RELU 3, MAX 4, ADD 5, TANH 6, SIGM 7, QUANT 8 |
| 43:36 | tmask | tiles taking part (COMPUTE, SETSF) |
| 35:32 | blk | block address; for SETSF the value written |
| 31:30 | isb | input-bit significance; for SETSF the register (0 W1, 1 W2, 2 I1, 3 I2) |
| 29 | alpha | 0: scale by I1, 1: scale by -I2 |
| 28 | acc | accumulate onto the psum entry |
| 27:16 | aaddr | activation half-word (COMPUTE); entry to write (QUANT) |
| 15:9 | paddr | psum base (COMPUTE) or first source (SFU) |
| 8:2 | paddr2 | SFU destination and second source; threshold for QUANT |

**Bus-side ports.** The host uses these ports to:

- load instructions (`im_*`);
- read and write activation entries (`act_*`);
- write weight rows into any tile (`wt_*`);
- read psum entries (`ps_*`);
- run the program (`start`, `busy`, `done`, `stall`).

The host must write only while the bank is idle; an assertion checks this.
Layers larger than the 2 M weights of the chip run over time: the host
reloads weights between programs.

## 6. The top (`tim_dnn`)

The top holds `NUM_BANKS` independent banks. Every bus-side signal of
`tim_bank` appears as a packed array indexed by bank. The system bus and the
off-chip memory are not part of the RTL.

## 7. Where this design departs from the published description

These are choices made here where the description is silent:

- 4 banks of 8 tiles;
- the instruction set and its format;
- the pipeline timing;
- buffer organisation (activation entries of 32 ternary values, psum
  entries of 32 × 12 bits);
- the SFU function shapes and their 4 fraction bits;
- the quantiser rule;
- 4-bit scale-factor registers.

These are outright differences from the description:

- **ADC width.** The ADC is 4 bits, not the stated 3 bits; see section 3.
- **Reduce unit.** The reduce unit described has 256 adders. A sum over 8
  tiles of 32 lanes needs 224; this design builds the lane-wise sum and
  leaves the count to synthesis.
- **Activations written before QUANT.** ReLU and the other activation
  functions leave their result in the psum buffer. QUANT is the only way
  back to the activation buffer.
- **Missing operations.** The SFU has no normalisation and no element-wise
  multiply. LSTM and GRU gate products, and batch normalisation, are
  therefore not covered.
- **Analogue parts.** The bitline, S/H and ADC are behavioural, with ideal
  levels taken from the published simulation. They model neither noise nor
  variation.
- **Partial-sum overflow.** Partial sums are 12 bits and wrap. A long
  multi-bit dot product can overflow; the published instance has the same
  width.

## 8. Verifying and simulating

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Each prints `TB_RESULT checks=N failures=F`.

Build and run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tim_pkg.sv tb/tb_tim_bank.sv \
          --top-module tb_tim_bank -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

- **`tb_tim_tile`** runs a full-size tile against a reference model. It
  also checks the pipeline latency (group g in cycle t+1+g) and the
  8-cycle access interval, and exercises bitline saturation.
- **`tb_tim_bank`** runs one full-size bank through a real program:
  - an asymmetric-ternary layer over 4 tiles × 2 blocks × 2 steps;
  - a bit-serial 2-bit-activation layer;
  - all six SFU operations.

  It compares every result with a reference computed from the weights and
  inputs, including the n_max clipping. It also requires that each
  mechanism (stall, accumulation, second step, bit shift, SFU, quantise)
  actually happened.
- **`tb_tim_dnn`** is the end-to-end test of the top. Its banks run
  different random data at the same time, and it adds a layer that reads
  back quantised activations.

**Test size.** `tb_tim_dnn` builds the top with 2 banks of 4 full-size
tiles. There is no regression test of the top at its default size
(4 × 8 tiles). Verilator needs well over 15 minutes just to compile all 32
tiles, each of which models 4096 cell read paths and 32 PCUs. The
full-size parts are still covered:

- a single full-size bank (8 tiles) is tested by `tb_tim_bank`, which
  builds in about 3 minutes;
- the banks are identical and independent of each other.

To simulate the default top, change the `B` and `TILES` localparams at the
top of `tb_tim_dnn` to 4 and 8, and allow time to compile.
