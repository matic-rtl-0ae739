# SNNAC with in-situ canary voltage control

Most of the energy in a small fully-connected neural network accelerator goes
to the SRAM that holds the weights. An SRAM could run at a far lower supply
than its rating if it were not for read-stability failures. This design rests
on two facts about those failures:

* **They are stable.** Random device mismatch gives every 6T bit-cell a
  *preferred state*. Below its own `Vmin,read`, a cell that stores the other
  value flips to the preferred one when it is read, and then stays there. A
  voltage-overscaled SRAM therefore has a fixed error pattern that can be
  profiled, not random noise. A network trained with that pattern injected into
  its weights (memory-adaptive training, done offline) learns around it.
* **The most fragile cells can serve as sensors.** The few weight cells that
  fail first can act as *canaries*. As long as they read back correctly, the
  cells the network depends on are safe. A small control loop lowers the SRAM
  supply one step at a time and checks the canaries after each step. When one
  fails, it goes back up, rewrites the canary words and stops. This replaces a
  static voltage margin, and it follows temperature and ageing at run time.

This repository holds synthesizable SystemVerilog for the accelerator, SNNAC:
an 8-PE systolic neural processing unit with per-PE weight SRAMs. It also
holds a hardware version of the canary voltage control loop, and a behavioural
model of the voltage-scalable SRAM that reproduces read-disturb failures. The
design follows the MATIC paper ("MATIC: Learning Around Errors for Efficient
Low-Voltage Neural Network Accelerators") where the paper gives details. Many
details it does not give; those are this design's own choices, and each is
pointed out below.

## Block structure

```
                 +------------------------------- npu -------------------------------+
 uc_* bus ──┬──> | npu_imem ──> npu_ctrl ──(loads, issue, drain)                       |
            │    |                                                                    |
            │    |  bus (DMEM or AFU_OUT) ─> activations of PE0..PE7                   |
            │    |  bias SRAM / ACCUM ─> PE0 ─> PE1 ─> ... ─> PE7 ─┬─> afu ─> AFU_OUT ─┼─> next layer / DMEM
            │    |      (pe_array: 9 x weight_sram)   ACCUM FIFO <─┘ (not last chunk)  |
            │    +--------------------------------------------------------------------+
            │            ^ SRAM port mux: (1) NPU control  (2) canary ctrl / uC
            ├──> canary_ctrl ──> vreg_mv (to the external regulator)
            └──> mem_arbiter ──> shared_dmem  <── NPU loads and write-back
```

| file | role |
|---|---|
| `rtl/snnac_pkg.sv` | widths, number formats, `instr_t` (microcode) and `tag_t` (pipeline tag) |
| `rtl/weight_sram.sv` | behavioural model of a 1 KB voltage-scalable SRAM macro with read-disturb failures |
| `rtl/pe.sv` | one PE: weight SRAM, multiplier, product register, adder |
| `rtl/pe_array.sv` | the ring of 8 PEs, PE0's bias SRAM and the bias/ACCUM multiplexer |
| `rtl/afu.sv` | piecewise-linear activation unit with two programmable LUT banks |
| `rtl/sync_fifo.sv` | show-ahead FIFO, used for AFU_OUT and ACCUM |
| `rtl/npu_imem.sv` | 16-entry microcode memory |
| `rtl/npu_ctrl.sv` | control core: chunking, loads, issue, accumulation, write-back |
| `rtl/npu.sv` | the NPU assembled |
| `rtl/shared_dmem.sv`, `rtl/mem_arbiter.sv` | 2 KB data memory shared with the microcontroller, and its arbiter |
| `rtl/canary_ctrl.sv` | in-situ canary voltage control loop |
| `rtl/snnac_top.sv` | the chip: everything above, the SRAM port multiplexer and the microcontroller address map |

The microcontroller (an OpenMSP430 on the fabricated chip), its UART and GPIO,
the programmable SRAM regulator and the pads are not included. The
microcontroller's memory bus is the `uc_*` port of `snnac_top`. The regulator
appears as two ports: `vreg_mv`, the voltage requested, and `sram_vdd_mv`, the
voltage actually on the SRAM rail.

## How a layer runs on the ring

This part takes the most care to follow. A layer computes
`y[n] = f(b[n] + sum_i w[n][i] * x[i])` for `n < n_out`, `i < n_in`. The 8
PEs split the inputs, not the outputs. PE `k` holds one input activation and
contributes `w[n][k] * x[k]` to every output neuron. The partial sum of neuron
`n` walks down the ring, gaining one product per PE.

**Chunks.** A layer wider than 8 inputs is cut into `ceil(n_in/8)` chunks of 8
inputs. Each chunk has a load phase and an issue phase:

1. *Load.* The control puts inputs `8c .. 8c+7` on the broadcast bus, one per
   cycle, and PE `k` latches input `8c+k`. The inputs come from the shared data
   memory (through the arbiter, one read in flight per cycle) or from the
   AFU_OUT FIFO for a layer fed by the previous one. Inputs at or beyond `n_in`
   load 0, which pads a partial last chunk.
2. *Issue.* One item per output neuron enters PE0, one per cycle. The item's
   partial sum starts at neuron `n`'s bias (first chunk) or at the running sum
   that the previous chunk left in the ACCUM FIFO (later chunks). After PE7 it
   goes back into the ACCUM FIFO, or, for the last chunk, into the AFU, whose
   output is pushed into the AFU_OUT FIFO.

So for `n_in > 8` the ACCUM FIFO holds `n_out` partial sums between chunks.
Before the first item of a later chunk is issued, the control waits until the
FIFO holds all of them. For narrow outputs this wait is real: the ring is 10
cycles deep and a FIFO-fed load takes 8.

**Activation double buffering.** Each PE has a shadow activation register,
written during the load phase, and a working register. The shadow is copied
into the working register when the item tagged `first` (neuron 0 of a chunk)
passes that PE. The next chunk can therefore be loaded while the tail of the
current chunk is still in the ring, with no drain between chunks.

**Pipeline timing.** Two pipelines run side by side, and the address pipeline
is one cycle ahead of the sum pipeline:

```
cycle  t     t+1            t+2                       t+3
PE k   read  product reg    psum_in + product -> reg  (next PE adds)
       w[a]  <= w * x
```

An item issued in cycle `t` has its SRAM read in PE0 at `t`, in PE `k` at
`t+k`. The bias SRAM is read at `t`; the bias, or the ACCUM head popped at
`t+1`, enters PE0's adder at `t+2`. The finished sum leaves PE7 at `t+10` and
the AFU output is ready at `t+11`. In steady state the ring finishes one
neuron-chunk, that is 8 multiply-accumulates, per cycle.

**Weight layout.** With one microcode instruction per layer, the weights of
PE `k` for the layer sit at `w_base + c*n_out + n` and hold `w[n][8c+k]`,
with 0 for padded inputs. A layer uses `ceil(n_in/8)*n_out` words of every PE
SRAM. Biases sit at `b_base + n` in PE0's second SRAM.

**Between layers** the control waits until the ring and the AFU are empty and,
for a layer that writes to memory, until the AFU_OUT FIFO has been written
back. The next layer may read its inputs straight out of that FIFO. The FIFOs
are 64 deep, so a layer may have at most 64 outputs.

Measured at default size with a busy microcontroller bus, the whole network
takes about 80 cycles for 2-16-2 and 6-16-1, about 1040 for 400-8-1 and
about 684 for 100-32-10. Most of the overhead beyond one cycle per
neuron-chunk is the 8-cycle load per chunk.

## Number formats

The chip's PEs use 8 to 22 bit fixed-point operands. Here:

| quantity | format |
|---|---|
| weights, biases, activations | 8-bit signed, 6 fraction bits (Q1.6, range [-2, 2)) |
| products | 16-bit, 12 fraction bits |
| partial sums, ACCUM | 22-bit signed, 12 fraction bits, wrapping |
| AFU slope/offset | Q1.6 |
| supply voltages | millivolts, 10 bits |

Biases are shifted left by 6 to line up with the partial sums.

## Activation function unit

The AFU computes `y = offset[seg] + slope[seg] * x`. It clamps `x` to
[-8, 8), takes `seg = floor(x) + 8` (16 unit-wide segments) and saturates `y`
to the 8-bit activation range. There are two LUT banks; each instruction picks
one. Sigmoid is loaded as the chord of each segment, which is within 3 LSB of
the true sigmoid. ReLU is slope 0 below zero and slope 1 above.

## Microcode

One 64-bit `instr_t` per layer, executed from IMEM address 0 until an
instruction with `last` set:

| bits | field | meaning |
|---|---|---|
| 63 | `last` | stop after this layer |
| 62 | `src_fifo` | inputs from AFU_OUT (else from data memory at `in_addr`) |
| 61 | `dst_dmem` | write outputs to data memory at `out_addr` (else leave them in AFU_OUT) |
| 60 | `act` | AFU LUT bank |
| 59:51 | `n_in` | inputs, 1..511 |
| 50:42 | `n_out` | outputs, 1..64 |
| 41:32 | `w_base` | first weight word |
| 31:22 | `b_base` | first bias word |
| 21:11 | `in_addr` | data memory address of input 0 |
| 10:0 | `out_addr` | data memory address of output 0 |

## Microcontroller view

The NPU's input and output buffers live in the shared data memory, which is
mapped into the microcontroller's data space. The arbiter gives the
microcontroller fixed priority; the NPU simply stalls. Address map of the
`uc_*` port (reads return data in the next cycle):

| address | access |
|---|---|
| `0x0000-0x07FF` | shared data memory, one byte per address |
| `0x1000 + 4*entry + piece` | microcode, 16 bits per write, piece 0 = bits 15:0 |
| `0x1100 + 16*bank + seg` | AFU LUT, `wdata = {slope, offset}` |
| `0x1300` | canary staging: `wdata[11]` enable, `[10:8]` bit, `[7:0]` correct word |
| `0x1200 + 8*sram + slot` | commit canary slot, `wdata[9:0]` = word address |
| `0x1400` | write bit 0: start NPU, bit 1: start canary control; read `{canary busy, NPU busy}` |
| `0x1402` | V0, safe starting SRAM voltage in mV |
| `0x1404-0x1412` | status: last good canary voltage, arbiter stalls, 0, ACCUM waits, canary steps down, canary failures, ACCUM pushes, arbiter conflicts |
| `0x8000 + 1024*sram + word` | SRAM word (sram 0-7: PE weights, 8: bias SRAM), only while the NPU and the canary control are idle |

The NPU and the canary control exclude each other. A start of either one is
ignored while the other runs, because the canary control takes over every
SRAM port.

## Canary voltage control

`canary_ctrl` runs this loop when started, between inferences:

```
set SRAM supply to V0; v = V0
repeat
    set supply to v - dv; wait for it to settle
    read every enabled canary bit
    if any differs from its stored value:
        set supply to v + dv; wait; rewrite every canary word; stop
    else v = v - dv
```

The loop itself, the eight canaries per SRAM and the use of weight cells as
canaries are taken from the paper. On the chip the loop runs as
microcontroller firmware; here it is a state machine, which the paper names as
an alternative. The following are this design's own choices:

- `dv` = 10 mV;
- a settle wait of 16 cycles after each change;
- a floor of 300 mV;
- a table entry holds the canary's whole correct word, so that a restore can
  rewrite it.

After a failure the loop leaves the supply at two steps above the voltage that
failed. Note that `v` is not lowered on failure before being raised, exactly as
in the algorithm.

Choosing canaries is done off chip, from a failure map. Profiling writes
each word, reads it at a series of lowered supplies and records which bits
flip and from which voltage. A canary must be a cell that fails at the
highest voltage *and* stores the complement of its preferred state, since a
cell that already holds its preferred value cannot show a failure. The
testbenches do this profiling over the bus against the SRAM model.

## The SRAM model

`weight_sram` is a behavioural model of the SRAM macro, not logic to
synthesize. Each cell's `Vmin,read` and preferred state come from a fixed hash
of (seed, address, bit). `Vmin,read` is uniform between 400 mV and 530 mV, the
measured first failure and the point where all reads fail. A read below a
cell's `Vmin,read` flips that cell to its preferred state, persistently.
Writes always succeed. The model ignores access-time failures, the
temperature dependence and the shape of the measured failure curve. To
emulate temperature, shift the rail against the requested voltage, as the
testbenches do. Below the temperature inversion point, a colder cell needs
more voltage. The canary-control testbench models this as the rail sitting
(25 - T) x 1 mV below the request. The 1 mV/C is an arbitrary choice. Over a
sweep from 25 C down to -15 C and up to 90 C, the settled supply moves from
580 mV at the cold end to 480 mV at the hot end.

## Where this design departs from, or adds to, the paper

- The bias SRAM: the second SRAM of PE0 feeds the mux in front of the adder
  chain, next to ACCUM. Its use for biases is an interpretation.
- The 1 KB macro size and the 8-bit weights come from 9 KB of SRAM spread over
  9 macros.
- The chunked load/issue schedule, activation double buffering, the weight
  layout, the waits at chunk and layer boundaries, the instruction format, the
  IMEM depth, the FIFO depths, the data memory size and the address map are
  all unspecified in the paper.
- The canary loop is hardware rather than firmware.
- Memory-adaptive training, profiling and canary selection are software flows
  and are not part of the RTL. The testbenches contain a profiling procedure
  and a canary selection procedure only to exercise the hardware.

## Simulating

Every testbench in `tb/` is self-checking. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/snnac_pkg.sv tb/snnac_tb_pkg.sv tb/tb_snnac_top.sv --top-module tb_snnac_top
./obj_dir/Vtb_snnac_top
```

Use the same command with another `tb_*` name for a block testbench.
`tb/snnac_tb_pkg.sv` holds the reference models: the PWL activation, a sigmoid
table built from the real sigmoid, and a pseudo-random value generator.

| testbench | what it shows |
|---|---|
| `tb_weight_sram` | nominal reads, preferred state below 400 mV, flips only toward the preferred state, persistence, no flips above 530 mV |
| `tb_pe` | product timing (3 cycles), double-buffered activations |
| `tb_pe_array` | two-chunk layer with bias and ACCUM starts, 10-cycle latency, one item per cycle |
| `tb_afu` | ReLU exact, sigmoid within 3 LSB, both banks |
| `tb_sync_fifo`, `tb_npu_imem`, `tb_shared_dmem`, `tb_mem_arbiter` | storage and arbitration against models |
| `tb_npu_ctrl` | bus loads, zero padding, addresses and tags, write-back |
| `tb_npu` | 20-12-3 network with random arbiter refusals, cycle budget |
| `tb_canary_ctrl` | profiling, canary selection, settling point, restore, a 30 mV shift tracked, and a temperature sweep from -15 C to 90 C (applied as a rail offset) that the supply follows |
| `tb_snnac_top` | the four benchmark topologies at full size, canary control with profiling over the bus, and an overscaled run (480 mV) whose outputs must match the weights as flipped |

The networks use pseudo-random weights, not trained models, so the tests
check arithmetic, control and the failure mechanism, not classification
accuracy. Concretely: the weights after a low-voltage run really are what the
hardware computed with. The accuracy recovered by memory-adaptive training
depends on the training software, which is outside this repository.
