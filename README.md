# StruM DPU: a structured mixed-precision INT8 / power-of-two PE array

Most of the power of a CNN accelerator goes into its INT8 multipliers. Many
weights of a trained, INT8-quantised network lose almost nothing when they are
rounded to a signed power of two, and multiplying by a power of two is just a
shift. In **structured mixed precision (StruM)** the weights of each layer are
cut into small blocks of 16 input channels. In every block a *fixed* number of
weights stays 8-bit and the rest become powers of two (the MIP2Q
quantisation, "mixed integer and power-of-two"). The choice of which weights to
round is made offline, without retraining. Because the split is the same in
every block, a processing element (PE) can swap half of its INT8 multipliers
for barrel shifters. It still processes every block in a fixed number of
cycles, so no PE in the array waits for a slower one.

This repository holds synthesizable SystemVerilog for the compute tile of such
an accelerator:

- a 16 x 16 array of StruM PEs;
- each PE has 8 product lanes: 4 INT8 multipliers and 4 barrel shifters;
- one column buffer per column drains the results.

A second PE build makes each lane's role programmable at run time.

## 1. The weight block format

A block of 16 weights (one output channel, 16 consecutive input channels) is
stored as a 16-bit **mask header** followed by a packed **payload**:

| mask bit | element kind                 | payload bits | meaning                                |
|----------|------------------------------|--------------|----------------------------------------|
| 1        | high precision (INT8)        | 8            | two's-complement weight                |
| 0        | low precision (power of two) | q            | code `{s, k}`: weight = (-1)^s * 2^k    |

- Element `i` uses header bit `i`.
- Payload fields follow each other in element order, with element 0 in the
  least significant bits. The offset of element `i` is therefore the summed
  width of elements `0..i-1`.
- The low-precision code has a sign bit `s` (the top bit) and a shift `k` in
  the lower `q-1` bits.
- `L` is the largest shift the hardware supports, and `q = ceil(log2(L+1)) + 1`.
  `L = 7` (the full range of an INT8 weight) and `L = 5` both give `q = 4`.
  A shift code above `L` saturates at `L`.

With half of the weights in each kind (`p = 0.5`) and `q = 4`, a block is
16 + 8·8 + 8·4 = 112 bits instead of 128: a compression ratio of
`r = (p(q-8)+9)/8 = 7/8`.

The FL (weight) register file of a PE holds the payload, one block per
16-byte line. The FL bitmap register file holds the header. The accelerator
this design builds on has a sparsity bitmap register file, and it is reused
here for the precision mask.

Encoding weights (choosing which of them become powers of two) is
compiler-side work and is not in the RTL. MIP2Q picks the split that
minimises the L2 error of the block. `tb/strum_tb_pkg.sv` holds a reference
encoder that packs a given split, and `tb/tb_strum_dpu_layer.sv` holds a model
of the split itself. Because the block error is a sum of per-element errors,
the best split with a fixed number of INT8 weights is simple: round every
weight to its nearest signed power of two, then keep as INT8 the `(1-p)·16`
weights whose rounding error is largest.

## 2. How a PE computes a block

```
 IF RF (4 x 16 INT8) ─────────────┐
                                  ▼
 FL RF (4 x payload) ─► weight ─► per-lane operand select ─► 8 lanes ─► adder ─► + ─► OF RF
 FL bitmap RF (4 x 16b)  decoder   ▲                          (x or <<)  tree      ▲   (16 x 32b)
        │                          │                                               │
        └──────────────► find-first precision selector              OF[of_idx] ───┘
```

A **command** `{if_idx, fl_idx, of_idx, clear}` asks the PE for the dot
product of activation line `if_idx` with weight line `fl_idx` (16 channels).
The result is added to OF entry `of_idx`; with `clear` set, it starts from
zero instead.

1. `strum_weight_decoder` unpacks the FL line into 16 fields using prefix sums
   over the mask (combinational).
2. `strum_precision_select` keeps a *pending* set of elements that are not yet
   computed. Each cycle it gives the first pending INT8 elements to the
   multiplier lanes and the first pending power-of-two elements to the
   shifter lanes, in element order. This is the "find-first" logic that the
   underlying accelerator uses for sparse operands, now driven by the
   precision mask.
3. Each lane (`strum_mac_lane`) picks its activation and weight field by
   element index and multiplies or shifts (`strum_barrel_shifter`).
4. `strum_adder_tree` sums the 8 products. The sum is added to the OF entry
   at the clock edge.

The selector works over the whole 16-element block, not over two fixed halves
of 8. The cycle count per command is therefore

    cycles = max( ceil(#INT8 elements / #multiplier lanes),
                  ceil(#power-of-two elements / #shifter lanes) )

| block                    | static PE (4 x + 4 <<) | configurable PE          |
|--------------------------|------------------------|--------------------------|
| p = 0.5 (8 + 8)          | 2                      | 2 (Config. 1)            |
| p = 0.75 (4 + 12)        | 3                      | 2 (Config. 2: 2 x + 6 <<)|
| p = 0.25 (12 + 4)        | 3                      | 3 (Config. 1)            |
| dense INT8 (16 + 0)      | 4 (half rate)          | 2 (all lanes multiply)   |

This is the guarantee StruM gives. Every block of a `p = 0.5` layer holds
exactly 8 power-of-two weights, so every PE finishes every block in 2
cycles. That is the rate of 8 full INT8 multipliers, reached with 4 of them.
Layers that must stay INT8 still run, at half rate: the static PE spends 4
cycles per block on its 4 multipliers.

**Timing of a PE.**
- `cmd_ready` is high when the PE is idle and in the last cycle of a command,
  so commands run back to back with no bubble.
- `done` pulses in that last cycle.
- The OF entry holds the new value from the next cycle, and a following
  command that reads the same entry sees it.
- Register file writes take effect at the clock edge.
- The OF RF has a combinational read port for the drain.
- Reset is synchronous and active low. It clears the OF RF, the sequencer and
  the enable register. The IF and FL RFs are not reset.

Two rules are checked only in simulation, not by the hardware:
- Do not rewrite an IF or FL line that a running command is using.
- Do not start a drain while commands run. An assertion in `strum_dpu` checks
  this.

## 3. Static and configurable PEs

`strum_pe` has two builds:

- **Static** (`CONFIGURABLE = 0`, the default). Lanes whose bit in
  `SHIFT_LANES` is set hold only a barrel shifter; the others hold only an
  INT8 multiplier. The default `8'hF0` makes lanes 0-3 multipliers and lanes
  4-7 shifters. This is the area-saving build.
- **Configurable** (`CONFIGURABLE = 1`). Every lane holds both units. An
  8-bit *barrel shifter enable register*, written through `cfg_we` /
  `cfg_wdata` before a layer runs, picks each lane's role. Bit `j` = 1 makes
  lane `j` a shifter, and its multiplier enable is the inverse of that bit.
  Its reset value is `SHIFT_LANES`. This build costs area but can fall back
  to full-rate INT8 (`8'h00`) when a layer needs full accuracy, or run 6
  shifters (`8'hFC`) for a `p = 0.75` layer.

A real implementation gates the clock of an idle multiplier. Clock-gating
cells are library cells, so here the unused unit of a lane instead has its
operands held at zero (operand isolation). The unit computes the same result
and does not toggle.

If the enable register leaves no lane for one kind of element, the selector
retires those elements without a product. For example, all lanes multiply
while the block still holds power-of-two weights. The PE then raises
`orphan`, and a simulation warning fires, so that the PE never hangs.

## 4. Array, columns and drain

- `strum_pe_column` has 16 PEs that share one output channel. The column's
  weight line and mask are written into all of them at once. Each row gets
  its own activations (one output pixel per row). All PEs of a column see the
  same mask, so they finish together.
- `strum_pe_array` has 16 columns. A row's activations are broadcast across
  all columns. Each column has its own weights, so columns may carry
  different precision patterns. A command goes to all 256 PEs and is accepted
  only when all of them are ready: the array runs in lock step. A single
  column with a slower block (for example dense INT8) holds up the whole
  array. This is the "slowest PE" effect that the fixed structure avoids.
- `strum_column_buffer` is one per column. On `drain_start` it walks rows 0
  to 15 of its column, one per cycle, and reads the named OF entry over the
  column's OF bus. The values go into a 16-deep FIFO with a valid/ready
  output towards the central drain. If the FIFO is full, the walk pauses.
  The first value appears two cycles after `drain_start`. With a ready
  consumer, `drain_ready` returns 17 cycles after it.
- `strum_dpu` is the top. It connects the array and the column buffers, and
  it counts:
  - accepted commands;
  - busy cycles;
  - cycles in which a command waited;
  - multiplier and shifter operations of PE (0,0).

### Using the top (`strum_dpu`)

1. **Load activations.** `if_we[r]` writes IF line `if_waddr` of every PE in
   row `r`. Channel `i` of a line is in bits `[8i+7:8i]`.
2. **Load weights.** `fl_we[c]` writes FL line `fl_waddr` of every PE in
   column `c`: the payload goes on `fl_wdata[c]` and the mask on
   `fl_wmask[c]`.
3. **Configure the lanes** (configurable build only) with `cfg_we` /
   `cfg_wdata`.
4. **Issue commands** with `cmd_valid` / `cmd_ready` / `cmd`.
5. **Drain.** When `idle` is high, pulse `drain_start` with `drain_of_idx`.
   Each column streams 16 values on `out_valid[c]` / `out_ready[c]` /
   `out_data[c]` / `out_row[c]`.

For a 1x1 convolution with 64 input channels: load 4 IF lines and 4 FL lines,
then issue 4 commands (clear, then accumulate three times). This produces 16
pixels x 16 output channels in 8 cycles at `p = 0.5`.

## 5. Parameters

| parameter      | default | meaning                                              |
|----------------|---------|------------------------------------------------------|
| `ROWS`, `COLS` | 16, 16  | array size (PEs per column, columns)                 |
| `CONFIGURABLE` | 0       | 0: static PE, 1: run-time configurable PE            |
| `SHIFT_LANES`  | 8'hF0   | shifter lanes (static) / enable reset value          |
| `L`            | 7       | largest shift; 5 gives the reduced-range shifter     |

The following sizes are fixed in `strum_pkg`:
- block of 16 elements;
- 8 lanes;
- IF RF 4 x 16 B;
- FL RF 4 x 16 B, plus a 4 x 2 B bitmap;
- OF RF 16 x 4 B;
- 16-bit lane products and 32-bit accumulators.

All defaults are the evaluated configuration: 256 PEs and 2048 lanes.

## 6. What is not here, and where this RTL makes its own choices

The compute tile sits inside a larger accelerator. These parts of it are not
described in enough detail to build, and appear only as ports of `strum_dpu`:
- the banked 1.5 MB SRAM;
- the schedule-aware tensor distribution (load) unit and its descriptors;
- the central drain with its post-processing engines and sparsity encoders.

Also not built:
- the FP16/BF16 MAC path;
- U8 activations (activations are signed INT8 here);
- activation sparsity: the tile runs in dense mode, so the activation bitmap
  register file is left out;
- the INT4 x INT8 alternative (DLIQ), which is only a point of comparison.

Choices made here where the description is silent or ambiguous:
- **Power-of-two code.** The code is `{sign, shift}`, so a weight is ±2^k
  with 0 ≤ k ≤ L. The shift range is also described as "[-L, L]". It is read
  here as the signed range of weights, not as right shifts, which this
  design does not support.
- **Bit order.** Element 0 is in header bit 0 and at payload bit 0. The
  order of fields is as described; the bit order is this design's choice.
- **Selector scope.** The find-first selector works over the full
  16-element block. This makes a `p = 0.5` block take 2 cycles however its
  8 + 8 elements are placed. It also matches the 4-of-8 per-cycle split
  described for the PE.
- **Configurable PE lanes.** Every lane of the configurable PE has both
  units, which Config. 2 (6 shifters) needs. The description also mentions
  shifters in only half of the lanes, which would rule out Config. 2.
- **One adder tree.** The drawing of the PE shows the INT8 products and the
  shifted products summed as two sets. Here all 8 lane products go into one
  tree. The sum added to the OF entry is the same.
- **Register file line width.** Lines are 16 B, as the stated sizes give. A
  4 B line appears in an overview drawing of the underlying accelerator.
- **Interfaces, cycle schedule and resets.** The command format, the
  lock-step issue, the column buffer's walk and FIFO, the drain handshake,
  the counters, the orphan rule and all reset behaviour are this design's
  own.

## 7. Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Shared reference models (block encoder,
expected products) are in `tb/strum_tb_pkg.sv`.

| testbench                   | what it covers                                                        |
|-----------------------------|-----------------------------------------------------------------------|
| `tb_strum_barrel_shifter`   | every activation x every code, L = 7 and L = 5                        |
| `tb_strum_mac_lane`         | multiplier-only, shifter-only and dual lanes, idle lanes              |
| `tb_strum_weight_decoder`   | random masks with 0..16 INT8 elements, payload length                  |
| `tb_strum_precision_select` | routing against an ordered-list model, orphan rule                     |
| `tb_strum_adder_tree`       | random and extreme sums                                               |
| `tb_strum_pe`               | static and configurable PE: results, cycle counts, back-to-back rate  |
| `tb_strum_pe_column`        | 16-PE column, per-row results over the OF bus                         |
| `tb_strum_pe_array`         | 4 x 4 array, lock-step stall behind a dense column                    |
| `tb_strum_column_buffer`    | walk order, back-pressure, FIFO-full pause, latency                   |
| `tb_strum_dpu`              | full 16 x 16 DPU at default parameters, 1x1 conv tile end to end       |
| `tb_strum_dpu_cfg`          | configurable 4 x 4 DPU, L = 5, switching Config. 1 / 2 / all-INT8     |
| `tb_strum_dpu_layer`        | full 16 x 16 DPU, MIP2Q-encoded weights at p = 0.25, 0.5, 0.75         |

The tools are plain Verilator 5 with `--timing`. For example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/strum_pkg.sv tb/strum_tb_pkg.sv rtl/*.sv tb/tb_strum_dpu.sv \
  --top-module tb_strum_dpu -Mdir obj_dpu -o sim
./obj_dpu/sim
```

The full-size DPU test takes about two minutes, mostly for compilation. It
runs four phases:
- two phases of `p = 0.5` weights (2 cycles per block);
- one phase where a single dense column slows the whole array to 4 cycles
  per block;
- one phase of all-dense INT8 weights.

All 1024 outputs are then drained under random back-pressure and checked. The
test also requires each mechanism to have occurred at least once:
- mixed-precision commands;
- dense INT8 fallback;
- a slow column holding up the array;
- command stalls;
- accumulation;
- a column buffer paused on a full FIFO.

`tb_strum_dpu_layer` runs a 1x1 convolution tile (64 input channels, 32
output channels, 16 pixels) with bell-shaped random INT8 weights encoded at
`p = 0.25`, `0.5` and `0.75`. It checks every output and the cycles per
block: 3, 2 and 3 on the static 4 + 4 PE. It also prints the mean relative
output error against the unencoded INT8 weights. With random weights this is
about 1 %, 4 % and 7 %.

The testbenches check against integer models of the same arithmetic. They
cannot show that a trained network keeps its accuracy.
