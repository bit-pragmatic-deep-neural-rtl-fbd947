# Bit-pragmatic DNN accelerator (PRA) in SystemVerilog

This is a synthesizable model of the convolutional-layer accelerator described in
*Bit-pragmatic Deep Neural Network Computing*. It builds the configuration that
design calls its best one: 2-stage shifting with L = 2, per-column
synchronization and one synapse set register (PRA_2b^1R). All defaults are at
full size:

- 16 tiles, each with a 16 x 16 array of inner-product units;
- a 2 MB synapse buffer per tile;
- a 4 MB central neuron memory.

## The idea

A bit-parallel convolution engine multiplies every 16-bit input neuron by a
16-bit synapse. Most neuron bits are zero, and each zero bit adds nothing to
the product. This design skips them:

- Each neuron is turned on the fly into its list of **oneffsets**. An oneffset
  is the position (0..15) of one set bit, plus an end-of-neuron flag.
- Each cycle, every inner-product unit adds one term `synapse << pos` per lane.
- A neuron therefore costs as many cycles as it has 1 bits. It no longer costs
  16 cycles.

Neurons arrive serially and synapses in parallel. Sixteen windows and sixteen
filters are handled side by side, so the wide, regular synapse reads of a
bit-parallel design are kept.

### Terms used

| term | meaning |
|------|---------|
| brick | 16 consecutive-channel values at one (x, y) position |
| window | the input region that produces one output position |
| pallet | the 16 bricks (one per window) used together in one step; also the group of 16 windows processed at once |
| step | one brick position (fy, fx, channel brick) inside the filter; a layer has K = Fx*Fy*C/16 steps |
| synapse set | the 16 filters x 16 synapses that one step needs in one tile (one SB row) |
| PIP | pragmatic inner-product unit: one (window, filter) pair |
| NM / SB / NBout | neuron memory / synapse buffer / output neuron buffer |
| SSR | synapse set register between SB and the PIP columns |

## Block diagram

```
 host ports ──► neuron_memory (NM) ◄──── drain (output bricks) ◄──────┐
                   │ row reads                                        │
                   ▼                                                  │
               dispatcher  (2-pallet buffer, one brick per column)    │
                   │ 16 bricks                                        │
                   ▼                                                  │
   window_column x16: 16 oneffset_gen + column_ctrl                   │
                   │ fire / neg / k_shift / c_shift  (broadcast)      │
       ┌───────────┼──────────── ... 16 tiles ...                     │
       ▼                                                              │
  pra_tile: synapse_buffer ─► SSR ─► per-column SR ─► 16x16 pip ─► nbout ─► output_unit
                                                                      
  pra_controller: pallet loop, SB reads, SSR counters, column loads, NBout write and drain
```

## Modules (rtl/)

| file | what it does |
|------|--------------|
| `pra_pkg.sv` | widths (16-bit neurons and synapses, 4-bit pow, 48-bit accumulators), the `oneffset_t` type and the layer descriptor `layer_cfg_t` |
| `oneffset_gen.sv` | holds one neuron and presents its oneffsets one per cycle, highest bit first, using a leading-one detector; works on the magnitude and reports the sign |
| `column_ctrl.sv` | 2-stage shift control shared by a column of PIPs (see below) |
| `window_column.sv` | one window lane: 16 oneffset generators and one `column_ctrl`; reports `last` (brick ends this cycle) and `idle` |
| `pip.sv` | inner-product unit: negate, AND gate, 1st-stage shift (0..3), adder tree, common 2nd-stage shift, accumulator, first-cycle load of a partial sum, max unit |
| `synapse_buffer.sv` | per-tile SB: one synapse set (4096 bits) per row, 4096 rows, one registered read port |
| `nbout.sv` | per-tile registers for the 16 x 16 accumulators of a pallet; feeds them back to the PIPs and is drained one window at a time |
| `output_unit.sv` | ReLU, arithmetic right shift to the output fixed-point format, saturation to 16 bits, then an AND mask that keeps bits `keep_lsb..keep_msb` (precision trimming) |
| `neuron_memory.sv` | central NM: 8192 rows of 16 bricks, brick-granular writes, whole-row reads with one cycle latency |
| `dispatcher.sv` | fetches each step's 16 strided bricks from NM into a two-pallet buffer, ahead of the columns |
| `pra_controller.sv` | sequences the layer |
| `pra_tile.sv` | one tile: SB, SSRs, a synapse register per column, the PIP array, NBout and output unit |
| `pra_chip.sv` | top level: NM, dispatcher, 16 window columns, controller, 16 tiles, host ports |

### 2-stage shifting (column_ctrl, pip)

A full 0..15 shifter per lane is large, so the shift is split into two stages:

1. The column picks the smallest pending oneffset among its 16 lanes. This is
   the common shift C.
2. A lane whose oneffset `pos` satisfies `pos - C < 4` fires this cycle. Its
   synapse is shifted by `pos - C` (2 bits) before the adder tree.
3. Lanes further away stall. They add zero and keep their oneffset.
4. The adder-tree sum is shifted by C once and added to the accumulator.

Terms are therefore only 20 bits wide. The formula would give 19; one bit is
added so that negating -32768 does not overflow. All 16 PIPs in a column share
C and the per-lane shifts, because they see the same neurons.

### Per-column synchronization (pra_controller, pra_tile)

Each window column moves to its next brick as soon as all 16 of its neurons are
done. Columns therefore drift apart. Every step's synapse set is still read
from the SB only once per pallet:

- An SB read puts the set into an SSR (one SSR by default).
- A down counter starts at the number of active columns.
- Each column copies the set into its own synapse register when it loads the
  matching brick, and the counter drops.
- The SSR is freed when the counter reaches zero.

A column that needs a set not yet in an SSR waits. The SB has one port, so
only one set is read per cycle.

### Neuron supply (dispatcher)

The dispatcher holds bricks for two pallets of steps. Each cycle it reads the
NM row that holds the lowest-numbered missing brick. It then captures every
missing brick present in the returned row. With unit stride a step's 16 bricks
usually share one or two rows. Larger strides take more reads, and these
overlap with processing.

## Data layout and the layer descriptor

Neurons are stored channel-brick fastest. Brick `b` of position (x, y) is at
brick address `base + (y*Nx + x)*IB + b`, with `IB = C/16`. NM row
`addr / 16` holds it in slot `addr % 16`. Output neurons use the same layout,
so one layer's output can be the next layer's input. The output row pitch is
Ox, and output channels are ordered filter group, then tile.

SB row `fg*K + k` of tile t holds synapse set k for filters
`(fg*16 + t)*16 .. +15`. Step k counts channel bricks
fastest, then fx, then fy.

`layer_cfg_t` fields:

| field | meaning |
|-------|---------|
| `nx`, `fx`, `fy`, `ib`, `stride` | input width, filter size, input channels / 16, stride |
| `ox`, `oy` | output width and height |
| `ng` | number of 256-filter groups (16 tiles x 16 filters) |
| `in_base`, `out_base` | brick addresses in NM |
| `out_shift` | right shift from accumulator to output format |
| `keep_msb`, `keep_lsb` | precision trimming mask |
| `relu` | apply ReLU |
| `acc_in` | start each output from the value already in NBout instead of zero |
| `max_out` | output max(accumulator, NBout) |

The controller visits pallets in this order: filter group, then output row,
then 16 windows at a time along x. The last pallet of a row may be partial.

## Interface and timing (pra_chip)

- One clock, `clk`, and an asynchronous active-low reset, `rst_n`.
- While `busy` is low, the host owns the NM port:
  - `host_nm_we` writes one brick (`host_nm_addr` row, `host_nm_slot`).
  - `host_nm_rd` reads a row onto `nm_rdata` one cycle later.
- While `busy` is low, the host can also write SB rows through `host_sb_*`.
- To run a layer, set `cfg` and pulse `go` for one cycle. Keep `cfg` stable
  while `busy` is high.
- `done` pulses once every output brick is in NM.
- A pallet takes roughly as many cycles as the column with the most essential
  bits needs, summed over its K steps. The bit-parallel time would be 16 cycles
  per step.
- Draining NBout (TILES x 16 bricks, one per free NM cycle) overlaps the next
  pallet. For very shallow layers the drain becomes the limit.

## What follows the source design and what is this design's own

**Taken from the source design:**

- oneffset representation with a leading-one detector;
- bit-serial neurons with bit-parallel synapses;
- the PIP structure: negate, AND, shifters, adder tree, accumulator, first-cycle
  partial-sum input, max;
- 2-stage shifting with L = 2;
- per-column synchronization with SSRs, down counters, one SB port and a
  two-pallet dispatcher buffer;
- the 16 / 16 / 16 array sizes and the 2 MB / 4 MB memory sizes;
- trimming outputs with AND masks before they are written.

**This design's own choices:**

- The highest bit is processed first. The source's text and its worked example
  do this; its figure goes from the lowest bit. Results do not depend on the
  order.
- Negative neurons are handled as a sign plus a magnitude.
- Accumulator width (48 bits).
- ReLU as the activation.
- The output shift and saturation.
- The mask encoding.
- The NM and SB layouts.
- The fetch algorithm of the dispatcher.
- The loop order, the drain scheme and the layer descriptor.
- The oneffset generators act as the shared input buffer and broadcast to all
  tiles. No per-tile copy is kept.

## Not implemented

- **Off-chip memory and the host.** Ports on NM and SB replace them.
- **The eDRAM macros themselves.** SB and NM are plain memory arrays.
- **Pooling, LRN and fully connected layers.** The `max_out` and `acc_in`
  options are only the PIP-level hooks. The source's results also cover
  convolutional layers only.
- **The single-stage shifter, pallet-level synchronization and more than one
  SSR.** These were evaluated in the source but are not built. The SSR count is
  a parameter, but only 1 was tested.
- **8-bit quantized operation.**
- **Channel concatenation when writing outputs** (as in inception modules).
  Inputs must have a multiple of 16 channels; pad with zeros, which cost no
  cycles.

## Fit of common networks (convolutional layers)

| network | fits | limiting figure |
|---------|------|-----------------|
| AlexNet | yes | conv1 needs 2.13 MB of NM; 991 SB rows per tile |
| NiN | yes | 2.07 MB NM; 2075 SB rows |
| GoogLeNet | no | memory fits (3.15 MB, 2783 rows), but inception concatenation is not supported |
| VGG_M, VGG_S | yes | conv1 needs 3.71 MB of the 4 MB NM |
| VGG_19 | no | conv1_2 needs 12.4 MB of NM |

Layer shapes come from the published network definitions, not from the source
paper. Per-layer precisions are set through the trim mask.

## Verification (tb/)

Every module has a self-checking testbench `tb_<module>.sv` with random stimulus
and a watchdog. Each ends by printing the number of checks and failures.

- The unit tests compare against reference arithmetic. The column and window
  tests include the source's worked 2-stage example: three neurons finish in
  4 cycles, with shifts (1, 0, 4) in the first cycle.
- `tb_pra_chip` runs a reduced chip (2 tiles, 4 columns) on two layers. Every
  output neuron is checked against a direct convolution with ReLU, shift and
  trimming. The layers are:
  - 10x10x32, 3x3, stride 1;
  - 11x11x16, 3x3, stride 2, with partial pallets and trimming.

  The test also counts each mechanism and fails if any of them never happens:
  - lane stalls in 2-stage shifting;
  - SSR waits;
  - dispatcher waits;
  - columns out of step;
  - multi-row fetches;
  - negative neurons;
  - partial pallets;
  - trimmed bits.
- `tb_pra_chip_full` uses the full-size chip with default parameters. It runs a
  19x19x64, 3x3 layer with 256 filters (34 pallets) and checks all
  17 x 17 x 256 outputs. It takes about 10 seconds in Verilator.
