# 3D-aCortex processor in SystemVerilog

This is a register-transfer model of the 3D-aCortex neurocomputing processor.
The processor does vector-by-matrix multiplication (VMM) in the time domain,
using the cells of a commercial-style 3D-NAND flash block as 4-bit weights.
The digital side is written as synthesizable RTL. The analog side is written
as two behavioural models:

- `pe_nand`: the flash block with its layer and bit-select drivers;
- `bitline_cap`: the shared bit lines and their load capacitors.

The defaults are the paper's main configuration. Each block has a
self-checking testbench. Two end-to-end testbenches run programs on the full
processor.

## How a VMM works here

One elementary VMM step takes `2*T_LS + T_int + T_out` = 20 + 16 + 20 + 18 =
74 cycles at 1 GHz.

1. **Layer select (T_LS = 20 cycles).** The operator drives the layer-select
   lines. A PE reports the layer ready only after the selection has held
   steady for T_LS cycles.
2. **Phase I (T_int = 16 cycles).** Each column's DTC turns the K 4-bit words
   chosen by the fold selector into pulses 0 to 15 cycles long on the I-Bus.
   In an enabled PE (CS AND RS), every string whose bit-select line is on
   adds its cell level (0 to 15) to its bit line each cycle. The load caps of
   all enabled PEs in that row add up this charge on the shared O-Bus. The
   caps are switched in while VMM_OP is high.
3. **Sweep select (T_LS).** Layer 0, the top layer, is selected. It holds the
   sweep current Imax = 15 in every cell.
4. **Phase II (T_out = 18 cycles).** All bit-select lines are on. Each bit
   line ramps by `Imax*K` per enabled PE per cycle. It goes high once it
   reaches the threshold `T_out*Imax*K*(enabled PEs)`.
   - Each bit line drives one latch of a differential neuron.
   - The neuron's positive output is high while only the positive latch is
     set; the negative output is the mirror case.
   - The TDC counts up on the positive output and down on the negative one.
   - The net count is floor(Q+/S) - floor(Q-/S), where Q is the phase-I charge
     and S the sweep charge per cycle.
5. **Later steps.** They use the next layer and the next fold of the input
   buffers, and the TDC keeps accumulating. A 6-bit magnitude plus a sign bit
   covers 4 steps without overflow.
6. **After the last step.** The barrel shifter applies an arithmetic right
   shift and saturates to ±15. The activation function (linear, ReLU, tanh,
   sigmoid) gives a 4-bit code, which the IDU's output register holds for the
   collector.

A K x 2K PE holds K signed weights per input as differential column pairs:
column 2k is positive and 2k+1 negative for output k. Inputs are unsigned
4-bit codes. The largest one-step VMM takes 2N·K = 1024 inputs to M·K = 2048
outputs.

## Blocks

Each entry below gives the file, its sources in the paper, and the choices
this design makes.

- **`acortex_pkg`**: sizes, opcodes and instruction structs.
- **`dtc`**: digital-to-time converter.
  - Paper: one shared 4-bit counter, a comparator and a latch per input.
  - Mine: inputs are captured at start.
- **`folded_buffer`**: 2N·FOLD input buffers of K words, folded onto 2N
  columns.
  - Paper: individual load, load&shift with a configurable chain length, and
    a fold selector per step.
  - Mine: chain position = fold·2N + column, and shifting moves toward
    position 0.
- **`pe_nand`** (behavioural): 64-layer K x 2K flash block, layer settle
  time, BSL gating, sweep layer, enable and CAP gating.
- **`bitline_cap`** (behavioural): charge integration on the O-Bus, reset
  while VMM_OP is low, and the V_th comparison.
- **`neuron`**: two latches with AND/NOT gating. The latches are flip-flops
  here.
- **`tdc`**: up/down accumulator, 6 bits plus sign.
- **`barrel_shifter`**: arithmetic shift with saturation.
- **`activation`**: 32-entry tables for the four functions (below).
- **`idu`**: K neurons, TDCs, shifters and activations, plus the output
  register. There is one per PE row.
- **`aux_unit`**: K lanes of copy, max, saturating add, and multiply (scaled
  by 2^-4), with one register.
- **`main_memory`**: 32768 x 256-bit lines (1 MB). It has one read port with
  1-cycle latency and one write port.
- **`instr_mem`**: 512 x 64-bit (4 KB). It has a host write port and a fetch
  read port.
- **`router`**: shares the MM ports. The loader has priority over the host on
  the read port, and the collector over the host on the write port. Reads
  and writes can happen in the same cycle, so loading the next VMM overlaps
  storing the last one.
- **`loader`**: single or burst MM reads with an MM stride, into buffers
  (with a buffer stride or load&shift) or into the AUX unit. A "continue"
  flag resumes at the last address, which stands in for a hardware loop
  over the input.
- **`collector`**: single or burst writes from consecutive IDU rows, or from
  the AUX register, with an MM stride and "continue".
- **`vmm_operator`**: the FSM for the step sequence above.
  - It drives CS, RS, VMM_OP, layer select, sweep, DTC start, fold select,
    neuron reset, and the TDC clear and window.
  - A command of s steps takes 74·s + 2 cycles.
- **`main_controller`**: fetches in 2 cycles, decodes, and hands commands to
  loader, operator and collector.
  - It stalls while the target unit is busy.
  - It also runs SYNC, one level of LOOP, and HALT.
- **`acortex_top`**: connects all blocks following the layout drawing.
  - MM feeds the L-Bus to the buffers and AUX.
  - A DTC per column drives the vertical I-Bus.
  - The shared horizontal O-Bus per row goes to that row's IDU.
  - The S-Bus collects results back to MM.
  - The weights are written through a `prog_*` port.

### Activation codes

| function | 4-bit code for shifted value v in [-16, 15] |
|---|---|
| linear | clamp(v, -8, 7) + 8 |
| ReLU | clamp(v, 0, 15) |
| sigmoid | round(15 / (1 + e^(-v/4))) |
| tanh | round(7.5 · (1 + tanh(v/4))) |

### Instruction set

Every instruction is 64 bits, with the opcode in bits [63:60]. The paper
does not define an encoding, so this one is my own; the field layouts are in
`acortex_pkg`.

| op | meaning |
|---|---|
| NOP | nothing |
| HALT | stop, raise `halted` |
| LOAD | mm_addr, mm_stride, count, buf_idx, buf_stride, shift/chain_len, to_aux/aux_op, cont |
| VMM | row and column range, first layer, steps (1 to 4), first fold, shift, activation |
| STORE | mm_addr, mm_stride, count, first IDU row or AUX, cont |
| LOOP | jump to target until the block has run count times |
| SYNC | wait for the chosen units to go idle |

## Parameters (top level)

| parameter | default | source |
|---|---|---|
| K | 64 | paper (K = 64) |
| M | 32 | paper (M = 32) |
| N | 8 (16 PE columns) | paper (N = 8, M x 2N PEs) |
| LAYERS | 64 | paper (64-layer 3D-NAND) |
| P | 4 | paper (4-bit precision) |
| WBITS | 4 | mine: cell precision is not given |
| ACC_BITS | 6 | paper (6-bit TDC); the sign bit is mine |
| FOLD | 4 | mine: four buffers per column as drawn; matches the 4-step example |
| MM_LINES | 32768 | paper (1 MB MM) |
| IM_DEPTH | 512 | paper (4 KB IM); the 64-bit word is mine |
| T_LS | 20 | paper range 20 to 30 ns; the lower end is used |
| T_OUT | 18 | paper (T_out = 18 ns at Imax = 300 nA, T_int = 16 ns) |

## Capacity against the benchmarks

One layer holds 32 · 16 · 64 · 64 = 2,097,152 weights. Layer 0 carries the
sweep current, which leaves 63 weight layers: 132,120,576 weights.

| network | parameters | layers used in the paper's mapping | fits |
|---|---|---|---|
| GNMT | 1.3e8 | 64 | by count (1.6 % spare), but needs denser packing than the paper's mapping |
| Inception-v1 | 7.2e6 | 6 | yes |
| ResNet | 1.1e7 | 33 | yes |

The paper states that intermediate data fits in a 1 MB main memory and that
the program fits in 4 KB. The networks themselves are too large to
simulate here. `tb_workload_net` runs their layer types at reduced size. Both memories are built at those sizes.

## Verification

Each block testbench is self-checking and uses random stimulus. The PE,
bit-line, IDU and operator benches check against reference models of the
time-domain arithmetic and the phase timing.

There are two end-to-end testbenches:

- **`tb_acortex_top`**: a reduced array (K = 8, 4 x 4 PEs, 8 layers).
- **`tb_acortex_full`**: the default sizes with no overrides. Its program
  uses PE rows 0–1, columns 0–2 and layers 1–7, so that programming the
  weights through the port stays short.
- **`tb_workload_net`**: a reduced array running a small inference pass
  built from the layer types of the benchmark networks:
  - a two-step fully-connected layer with ReLU;
  - a second layer fed from the first layer's stored outputs;
  - tanh and sigmoid gates multiplied in the AUX unit, as in an LSTM cell;
  - a residual addition and a max-pooling;
  - a convolution written as a load&shift loop.

Both benches:

- load data and a program through the host ports;
- run multi-step VMMs with all four activations, AUX operations, and a
  looped load&shift / VMM / store sequence (the convolution pattern);
- read every result back and compare it with a reference model;
- count each mechanism and fail if one never happens: stalls, load/VMM
  overlap, loop jumps, shifts, AUX operations, multi-step accumulation,
  negative outputs and host accesses.

Results with Verilator:

- All block testbenches pass, about 185,000 checks in total.
- `tb_acortex_top` and `tb_workload_net` pass with 108 checks each.
- `tb_acortex_full` passes with 188 checks. It takes about 6 minutes,
  4 of them for the build.

Every testbench was also run against a copy of its block with one bug
inserted (for example, a wrong shift type or a missing clamp), and each one
caught its bug.

Every digital block synthesises on its own with Yosys. Two do not:

- `pe_nand`, the PE model, which stands for analog circuits;
- the complete top level.

Each PE model stores 64 x 64 x 128 4-bit cells as a plain array, and its
current sum runs over all of them. For the 512 PEs of the top level that is
2^27 cells, more than a gate-level flow can hold in memory. In silicon these
cells are the flash array itself.

## Differences from the paper and open points

- **Analog behaviour is idealised.** There is no DIBL, coupling, noise or
  cell variation, and currents are integers per clock cycle. The 18-cycle
  output window includes the paper's head-room for coupling, which is
  therefore unused here.
- **The charge polarity is inverted.** The model counts charge upward; the
  paper pre-charges and discharges. The function is the same.
- **The top layer is reserved for the sweep current**, as in the paper's
  circuit description. This leaves 63 weight layers, while the paper's GNMT
  mapping reports 64 occupied layers.
- **The largest one-step VMM is M x 2N PEs.** The paper's controller text
  says "MK x NK", but its PE placement and weight-mapping text say M x 2N.
  This design follows M x 2N.
- **Figure labels.** The caption of the architecture figure names (c) the
  controller and (d) the PE, while the text cites (c) for both. This design
  follows the panel contents.
- **Not built:**
  - the shared-CAP variant (an alternative the paper compares with);
  - flash programming circuitry (named but not described; weights are
    written through a model port instead);
  - the host processor (outside the chip; its ports are brought out);
  - eDRAM refresh and timing, and level-shifter voltages and energy.
- **My own choices, since the paper does not give them:**
  - the instruction encoding;
  - the arbitration priorities;
  - the memory latencies;
  - the AUX register semantics and scaling;
  - the activation scaling and rounding;
  - the buffer chain order;
  - the TDC sign bit.
