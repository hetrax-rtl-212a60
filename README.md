# The ReRAM feed-forward tier of HeTraX

HeTraX is a 3D-stacked accelerator for transformer inference. It splits
each transformer block by the kind of data its matrix products use:

* **Multi-head attention** multiplies activations by activations (Q·Kᵀ, S·V).
  These operands change with every input, so they run on GPU-style streaming
  multiprocessors (SMs) and memory controllers (MCs) on three CMOS tiers.
* **The feed-forward network** (FF-1: `X¹ = GeLU(M·W_F1)`, FF-2:
  `X² = GeLU(X¹·W_F2)`) multiplies activations by learned weights that stay
  fixed during inference. This is about two thirds of all multiply work. It
  runs in one tier of ReRAM processing-in-memory cores. There the weights sit
  in resistive crossbars and each product is an analog column current.

The tiers are joined by TSV vertical links. ReRAM writes are slow and wear out
the cells, so weights are rewritten only once per layer. The rewrite of the
next layer's weights overlaps other work, which hides its latency. The stack
order comes from an offline thermal and noise optimisation. It puts the
ReRAM tier next to the heat sink, because ReRAM conductance noise grows with
temperature.

This repository gives RTL for the **ReRAM tier**, the part of the
architecture that is specified down to its arithmetic units. The SMs (a Volta
SM), the MCs with their L2 cache, the DFI DRAM interface, the DRAM and the
TSVs are existing parts and are not modelled. Their traffic enters this RTL as
commands on the top's vertical-link ports.

## Sizes

| level | count | holds |
|---|---|---|
| tier (`hetrax_top`) | 16 cores (4x4 grid) | 16 x 1536x2048 weight blocks |
| core (`reram_core`) | 16 tiles + 2 eDRAM buffers | 1536x2048 block of 16-bit weights |
| tile (`reram_tile`) | 96 crossbars, 96 ADCs, IR, OR, S+A | 1536x128 block |
| crossbar (`reram_crossbar`) | 128x128 cells, 2 bits per cell | 2 bits of 128x128 weights |

Operands are 16 bits. Each cell stores 2 bits, so a weight spans 8
crossbars. The 96 crossbars of a tile form 12 groups of 8, with
12 x 128 x 8 one-bit row drivers (DACs) and one 8-bit ADC per crossbar.

## How a tile multiplies

The hardest part to follow is the bit-level arithmetic inside a tile.

1. **Weight encoding.** A cell can only hold a non-negative conductance.
   A signed weight `w` is therefore stored as `u = w + 2^15` (0..65535). Bit
   pair `2s+1:2s` of `u` goes into crossbar `s` (s = 0..7) of the weight's
   group. An unprogrammed cell holds the encoding of `w = 0`.
2. **Bit-serial inputs.** The input register holds 1536 activations, 128 per
   group. For input bit `b = 0..15` the 1-bit DACs drive row `r` of group `g`
   with bit `b` of activation `128g + r`.
3. **Column read.** For each column `c = 0..127` in turn, every crossbar
   forms `Σ_r bit·cell`, a value from 0 to 384. Its ADC turns that into an
   8-bit code.
4. **Shift and add.** The S+A unit computes
   `term = ±2^b · Σ_g Σ_s code[g][s]·4^s`. The minus sign applies to the
   sign bit `b = 15`, since inputs are two's complement. It adds `term` to
   output register `OR[c]`.
5. **Offset removal.** When a run starts, `OR[c]` is preset to
   `−2^15 · Σ x`. This cancels the `2^15` offset of every weight exactly.
   The tile updates `Σ x` on every input-register write.

The result is `OR[c] = Σ_g Σ_r x[128g+r] · W_g[r][c]`, accumulated at 48 bits.
A run takes 16 x 128 = 2048 issue cycles plus a four-stage pipeline
(crossbar, ADC, S+A, OR). `done` rises 2053 cycles after `start`.

**ADC range.** The column sum of a 128-row crossbar with 2-bit cells and
1-bit inputs needs 9 bits, but the ADC has 8. This RTL clips sums above 255
and reports each clip on `sat_event`. The product is exact when no more than
85 rows of any group have a 1 in the same input bit. Dense negative inputs
have many high bits set and do clip. Handling the ninth bit (for example with
per-column inverted storage) would be a refinement. It is not part of this
design.

## How a core and the tier run an FF layer

A core shares one 1536-entry input vector among its 16 tiles. Each tile
holds a different 128-column block, so a core computes a 1536x2048
matrix-vector product. A run (`start`) has three phases:

| phase | cycles | action |
|---|---|---|
| LOAD | 1537 | input eDRAM → input registers of all tiles |
| COMPUTE | 2054 | all tiles run in parallel |
| GATHER | 2049 | output registers (+ previous core's results) → output eDRAM |

That is 5641 cycles per run at full size.

The FF weights are partitioned over the cores. Activations flow one way,
from core *i* to core *i+1*, in two ways:

* **Partial-sum chain** (`CMD_RUN` with `acc_prev`). Core *i+1* adds core
  *i*'s 48-bit results while it gathers. A weight matrix with more than 1536
  rows, such as FF-2 (4d x d), is split over a chain of cores this way.
* **Forward** (`CMD_FWD`). Core *i* writes `sat16(y >>> shift)` for outputs
  0..1535 into core *i+1*'s input buffer. This is the next layer's input.

As an example, BERT-Large (d = 1024) needs 2 cores for FF-1 (1024x4096) and
a chain of 3 for FF-2 (4096x1024). That is 5 of the 16 cores per layer.

**GeLU and layer normalisation are not applied in this RTL.** The
architecture does not say which unit computes them. The forward path only
rescales and saturates.

## The vertical-link interface (`hetrax_top`)

The top has `NUM_VL = 2` vertical links: one from the SM-MC tier and one
from the DRAM side. Each link carries one command per flit
(`hetrax_pkg::cmd_t`):

| op | fields | action |
|---|---|---|
| `CMD_WEIGHT` | core, tile, group, row, index (column), data | program one weight (8 cells) |
| `CMD_INPUT` | core, index, data | write one activation into a core's input buffer |
| `CMD_RUN` | core, acc_prev | run the core |
| `CMD_FWD` | core, shift | forward results to core+1 |
| `CMD_READ` | core, index | read one 48-bit result; it returns on the link that asked |

A router with input FIFOs (`noc_router`, valid/ready flow control,
round-robin) merges the links into one command decoder. A second router
returns read data to the link that asked. The decoder issues commands in
order. It issues a command as soon as the cores it touches are idle, so a
link can program the next layer's weights into idle cores while other cores
compute. A command for a busy core waits, and the link FIFOs then fill and
push back. The exact issue rules are in the header of `rtl/hetrax_top.sv`.

## Where this RTL departs from or adds to the architecture

Taken from the architecture description:

* crossbar, tile, core and tier sizes
* 2-bit cells, 1-bit DACs, 8-bit ADCs and 16-bit precision
* the IR, OR, S+A, ADC and eDRAM blocks
* weight-stationary FF on ReRAM, with one-way activation flow between cores
* weight rewrites overlapped with computation
* FIFO flow control in the NoC

This design's own choices:

* the offset weight encoding
* the group-summed tile dataflow
* one column per ADC per cycle, and clipping at 255
* the shared core input and the partial-sum and forward chain
* requantisation by shift and saturation
* the command set and in-order issue
* two vertical links
* router routing, arbitration and depth

Not modelled:

* the crossbar clock rate, write latency, thermal noise and eDRAM refresh
* the SM-MC tiers, the DRAM and the DFI interface
* the irregular multi-router NoC topology, which comes from an offline
  optimisation and is not given
* the 4x4 placement, since the cores form a logical chain 0..15
* GeLU, layer normalisation and softmax

The crossbar and the ADC are behavioural models. Their real parts are analog.
The crossbar returns the column current as an exact integer.

## Files

`rtl/`:

* `hetrax_pkg.sv`: sizes and command types
* `reram_crossbar.sv`, `reram_adc.sv`: behavioural models
* `shift_add.sv`, `reram_tile.sv`, `edram_buffer.sv`, `reram_core.sv`,
  `noc_router.sv`, `hetrax_top.sv`: synthesizable RTL

`tb/`: one self-checking testbench per module, `tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`.

* The tile and core testbenches run at full size. They compare with plain
  integer products, or with a bit-level clipping model where inputs are dense.
  They also check the 2053- and 5641-cycle latencies.
* `tb_hetrax_top` runs the whole tier end to end through three chained cores.
  It programs weights over one link while the other loads inputs, then runs,
  forwards, chains and reads back over both links. It counts each mechanism
  and fails if one never happens: link arbitration, back-pressure, weight
  writes during a run, forward, partial-sum chain, ADC clipping, and
  responses on both links. It runs at `N_CORES = 3` and `N_TILES = 2`. A
  simulation build of the full 16 x 16-tile tier (24,576 crossbars) is too
  large to be practical. The largest simulated configuration is one full
  16-tile core (`tb_reram_core`).

To simulate, for example the core:

```
verilator --binary --timing --assert -Irtl rtl/hetrax_pkg.sv tb/tb_reram_core.sv \
          --top-module tb_reram_core -o sim && ./obj_dir/sim
```

Verilator is two-state. The testbenches reset or write everything they
read. The eDRAM contents are not reset.
