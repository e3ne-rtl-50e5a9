# E3NE spiking-network accelerator in SystemVerilog

This is a reconfigurable accelerator for spiking neural networks (SNNs) that
use *radix encoding*. An activation is a spike train of T binary spikes. The
spike at time step t counts 2^t, so a T-bit spike train is simply the binary
form of an integer, least significant step first.

With this encoding, a layer needs no multipliers. Every spike adds its weight
into a partial sum, scaled by a power of two for its time step. A requantizing
shift then turns the sum back into a T-step spike train for the next layer.

The RTL is configured for LeNet-5 on 32x32 MNIST images:
- 3-bit weights and T = 4 time steps;
- four convolution modules;
- all 61,470 weights and all activations held on chip.

A small processor sequences the whole network. It runs a compiled stream of
32-bit instructions that configure the hardware blocks, move data between
them and start their computations.

## Structure

```
                 +-------------------+
   host load --->|  instr_mem        |
                 +---------+---------+
                           |
                 +---------v---------+   WAIT handshake (busy flags)
                 |  instr_decoder    |<-------------------------------+
                 +---------+---------+                                |
                           | one command per instruction              |
     +---------------------+-----------------------------+            |
     |                     |                             |            |
+----v----+  KERL   +------v------+  ACTL rows  +--------v--------+   |
| weight  |-------->| pm2d conv   |<------------| ping2d / pong2d |   |
| mem x5  |         |  x N_CONV   |------------>| (2D buffers)    |   |
| (+KERD  |         +-------------+  ACTS rows  +--------+--------+   |
|  from   |         | pm2d pool   |<--------------->     | ACTS words |
|  DRAM)  |-------->+-------------+                      v            |
|         |         | pm_linear   |<----------->| ping1d / pong1d |   |
+---------+         +-------------+             | (1D buffers)    |---+
```

| File | Role |
|------|------|
| `rtl/e3ne_pkg.sv` | Instruction word, opcodes, module ids, configuration indices, requantization function |
| `rtl/instr_mem.sv` | Instruction RAM |
| `rtl/instr_decoder.sv` | Scalar, non-pipelined controller |
| `rtl/pm2d.sv` | Two-dimensional processing module (convolution or pooling) |
| `rtl/pm_linear.sv` | Fully-connected processing module |
| `rtl/act_buffer.sv` | Ping/pong activation buffer |
| `rtl/weight_mem.sv` | Per-layer weight memory |
| `rtl/e3ne_top.sv` | Top level: wiring, command routing, buffer and weight multiplexing |

## The two-dimensional processing module

This module does most of the work, and it is the hardest part to follow.

### Shape and schedule

A `pm2d` has Y rows, equal to the kernel size K, and X columns.

The module walks a feature map one input row at a time. Each row is the binary
spikes of one input channel at one time step. For each PROC command, it applies
all Y kernel rows and all X output columns in parallel. Only the K kernel
columns are processed one after another.

PROC keeps the module busy for K+3 cycles, which is 8 cycles for K = 5:

| Cycles | Step |
|--------|------|
| 1 | Build the *extended row*. Work out which output rows this input row feeds. |
| K | Accumulate one kernel column per cycle. Each spike adds its signed 3-bit weight. |
| 1 | Weight the row's sums by 2^t for the current time step. |
| 1 | Add the row's sums into the partial-sum memory. |

Input row r contributes to output row o through kernel row ky when
r + pad - ky = o * stride. Rows that fall in the padding border produce nothing
and cost no command.

### Intra-module parallelism

Small feature maps would leave most columns idle. To avoid this, up to P output
channels share the module, placed side by side. Window p starts at column
S_p = floor(p * (D_in + pad) / stride) and ends at S_p + D_out - 1.

The input row is copied P times into the extended row, with period D_in + pad
and zeros in the padding positions. Column x then computes the output whose
leftmost input sits at extended position x * stride. Each column reads the
kernel of the window that it belongs to.

For LeNet-5 (X = 28) this rule gives 1, 2 and 6 parallel channels for the three
convolution layers, and 1 and 2 for the two pooling layers. The windows line up
with whole output columns only when D_in + pad is a multiple of the stride.

### Pooling

Pooling uses the same module with `IS_POOL = 1`: Y = 2, X = 14, stride 2. It is
*average* pooling. The kernel is all ones, and the division by K*K is folded
into the requantization shift.

In pooling mode, each window holds a *different* channel. The ACTL commands
before a PROC fill one input slot per window, in order.

### Partial sums and the store transfer

The partial-sum memory holds D_MAX x X signed sums of `PSUM_W` bits. These sums
accumulate over all input channels and all time steps of a group of output
channels.

ACTS then streams out the requantized results, one buffer word per clock:
- **2D destination:** one spike row per (channel, time step, row), i.e.
  P * T * D_out words. Bit t of the requantized value goes to time step t.
- **1D destination:** one T-bit spike train per (channel, row, column), i.e.
  P * D_out^2 words. This is how the last convolution layer is flattened for
  the fully-connected layers.

The partial sums are cleared at the end of the transfer.

## Requantization

`requant(psum, shift)` does three things:
1. shifts the signed sum arithmetically right by the layer's shift;
2. adds back the last bit shifted out, which rounds to nearest;
3. clamps the result to [0, 2^T - 1].

The shift per layer comes from the compiler. In effect it moves the binary
point of the sum to the scale of the next layer's activations.

## Fully-connected module

`pm_linear` computes P_LIN = 12 output features at a time. Each clock it
handles one input feature:
- it reads that feature's T-bit spike train from a 1D buffer;
- it reads one weight-memory row holding the weights of all 12 lanes;
- each lane adds its weight once for every spike, shifted by the spike's time
  step.

When all inputs are done, the 12 results are requantized and written one per
clock. The module then moves on to the next group of 12 outputs.

A layer takes groups * (N_in + 1 + P) cycles, minus the lanes that are skipped
in the last group. The CONF parameters set:
- the input and output counts;
- the requantization shift;
- the buffer direction (ping to pong, or pong to ping);
- the weight memory and its first row.

## Instructions

Each word is 32 bits, with the published field widths:
- opcode in bits 31:28;
- a 5-bit module or parameter field in bits 27:23;
- a 23-bit value or address in bits 22:0.

WAIT carries its condition in bits 22:21.

| Op | Code | Field / value | Effect |
|----|------|---------------|--------|
| ENA  | 0  | value = mask | Enables modules: bit i = convolution module i, bit 16 = pool, bit 17 = linear |
| CONF | 1  | parameter / value | Written into every enabled module |
| PROC | 2  | – | Starts every enabled 2D module on its loaded row |
| LIN  | 3  | – | Runs the whole fully-connected layer |
| RST  | 4  | – | Resets the enabled modules' row counters and the kernel-load pointer |
| END  | 5  | – | Halts the decoder and raises `done` |
| KERL | 6  | memory / row | Reads a kernel; it is delivered to the next (module, window) slot |
| KERD | 7  | memory / row | Copies one row from external DRAM into a weight memory |
| ACTL | 8  | buffer / row | Sends a 2D buffer row to every enabled 2D module one clock later |
| ACTS | 9  | buffer / base | Starts the store transfer of the lowest-numbered enabled 2D module |
| WAIT | 10 | module / cond | Stalls until that module is done processing (cond 0) or transferring (cond 1) |

Module ids:
- 0–15: convolution modules;
- 16: pool;
- 17: linear;
- 20–23: ping2d, pong2d, ping1d, pong1d;
- 24–28: weight memories.

CONF parameter indices:
- 0: stride;
- 1: padding;
- 2: D_in or N_in;
- 3: D_out or N_out;
- 4: parallel channels;
- 5: shift;
- 6: time step;
- 7: linear direction;
- 8: linear weight memory;
- 9: linear weight base.

The decoder spends two clocks per instruction: a fetch and an execute. It does
not pipeline, so 0.5 instructions per clock is the peak rate. WAIT stalls the
decoder while a module works.

### How a convolution layer is programmed

Loops over output-channel groups, time steps and input channels are ordered so
that partial sums accumulate in the module. For each input channel, the
program:
1. issues RST;
2. loads the kernels with KERL;
3. loads the first row with ACTL;
4. then for every row: PROC, followed by the ACTL of the next row, then WAIT.

The two-cycle ACTL overlaps with the eight-cycle processing.

When all input channels and time steps are done, ACTS writes the outputs to the
other buffer. With several convolution modules, each one takes a different
output-channel group, and their ACTS transfers run one after another.

## Memories and the LeNet-5 sizes

The buffer sizes come from tracing the network's feature-map sizes. Each buffer
alternates between source and destination from layer to layer.

| Buffer | Word | Depth | Contents |
|--------|------|-------|----------|
| ping2d | 32 bits | 336 | input image (1x4x32 rows), pool-1 output (6x4x14) |
| pong2d | 28 bits | 672 | conv-1 output (6x4x28), conv-2 output (16x4x10) |
| ping1d | 4 bits | 120 | conv-3 output (120 trains), FC-2 output |
| pong1d | 4 bits | 84 | FC-1 output (84 trains) |

The 2D address of (channel c, time step t, row y) is c*T*D + t*D + y.

There is one weight memory per layer. A convolution row holds one 5x5 kernel of
3-bit values, 75 bits wide. A linear row holds the 12 lane weights, 36 bits
wide.

| Memory | Layer | Width | Depth |
|--------|-------|-------|-------|
| 0 | conv 1 | 75 bits | 6 |
| 1 | conv 2 | 75 bits | 96 |
| 2 | conv 3 | 75 bits | 1920 |
| 3 | FC 1 | 36 bits | 840 |
| 4 | FC 2 | 36 bits | 84 |

## Top-level interface

While the accelerator is idle, a host loads three things:
- instructions (`imem_*`);
- weights (`wm_*`, selected by memory index);
- input spike rows (`act_*`, selected by buffer id).

It then pulses `start` and waits for `done`, and reads the results through
`hrd_*`, which has a one-clock latency.

`dram_req`/`dram_addr` and `dram_rvalid`/`dram_rdata` form the external-memory
port for KERD. Each request is answered by one row, after any latency.

`instr_count`, `cycle_count` and `wait_cycles` report the executed
instructions, the elapsed clocks and the stall clocks of the last run.

## Testbenches

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| Testbench | What it does |
|-----------|--------------|
| `tb_e3ne_top` | Runs the complete LeNet-5 at the default parameters (see below). |
| `tb_pm2d` | Three tests: padded stride-2 convolution with three windows into a 2D store; stride-1 convolution with a flattened 1D store; average pooling of two channels. Also checks the 8-cycle PROC and the transfer length. |
| `tb_pm_linear` | Several output groups with a partial last group, in both buffer directions, against an integer reference. Checks the cycle count and that clamping is exercised. |
| `tb_instr_decoder` | A random program with random WAIT delays. Checks command order, fields, stalls, END and the counters. |
| `tb_instr_mem`, `tb_act_buffer`, `tb_weight_mem` | Full-size read/write checks. |

`tb_e3ne_top` works as follows:
- It builds a random LeNet-5 with 3-bit weights and a random 32x32 4-step image.
- It computes an integer reference.
- It compiles the instruction stream itself: about 19,700 instructions.
- It loads conv-1's kernels through KERD from a DRAM model.
- It runs the whole network.
- It checks every store against the reference, plus the final 10 outputs,
  the 8-cycle PROC, the instruction count and the IPC.

It also counts each mechanism and reports one as a failure if it never
happens:
- processor stalls;
- ACTL overlapped with processing;
- intra-module parallelism;
- inter-module parallelism;
- stride-2 pooling;
- flattening into 1D;
- linear output groups;
- DRAM kernel loads;
- requantization clamping.

It runs in under a second of simulation and takes 57,400 clocks. At 200 MHz
that is 287 us, against a published 294 us for this configuration. The measured
rate is 0.34 instructions per clock.

To build and run one testbench:

```
verilator --binary --timing --assert -Irtl rtl/e3ne_pkg.sv tb/tb_e3ne_top.sv \
          --top-module tb_e3ne_top -Mdir obj && ./obj/Vtb_e3ne_top
```

## Where this design departs from, or fills in, the published description

The published description names the blocks, the instruction set and the sizing
rules. It does not give the exact encodings or the internal timing. These are
this design's own choices:

- **Instruction encoding.** The field split, opcode numbers, module ids,
  parameter indices and command semantics are this design's, including the
  ENA mask, the KERL pointer and ACTS from the lowest enabled module.
- **Convolution module width.** The module is 28 columns wide, the largest
  LeNet-5 output map, following the sizing rule. A width of 31 is quoted
  elsewhere, but the stated rule and the published parallelism of 1/2/6 both
  point to 28.
- **Pooling** is assumed to be average pooling.
- **Sizes not given.** Partial sums are 18 bits. The fully-connected module has
  12 lanes. The instruction memory holds 32768 words.
- **Timing.** The cycle breakdown of PROC (K+3), the two-cycle decoder and the
  transfer orders were chosen to match the published 8-cycle processing and
  2-cycle activation load.
- **DRAM.** External DRAM is not part of the RTL; only its port is.
- **Fixed at build time.** Kernel size, module widths and memory sizes are fixed
  for LeNet-5. Other networks need new parameters: a K = 3 module, larger
  buffers and more weight memories. This is also true of the published
  framework, which generates the hardware per network. Only stride, padding,
  feature-map size, parallelism, shift and time step can change at run time.
