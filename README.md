# ADEPT in SystemVerilog: an electro-photonic DNN accelerator

ADEPT speeds up neural-network inference by doing the matrix multiplications
(GEMMs) in light and everything else in conventional digital logic. A mesh of
Mach-Zehnder interferometers (MZIs) is programmed with a 128 x 128 weight tile.
An input vector is then encoded onto 128 optical channels, and the mesh returns
the matrix-vector product at the photodetectors. This happens once per cycle
of a 10 GHz clock. Around the photonic core sit:

- converters: 10-bit input DACs, 12-bit weight DACs and 8-bit ADCs;
- two large SRAMs: 100 MB for activations and 300 MB for weights;
- a weight buffer that hides tile loading behind computation;
- a digital accumulator that sums the partial products of a long dot product
  across tiles;
- a 128-lane vector unit that runs the non-GEMM layers (activation functions,
  normalisation, softmax steps, element-wise operations);
- a DMA engine that moves data between the memories and the host.

This RTL covers the digital side completely and the photonic core as a
cycle-level behavioural model. The design was derived from the published
description of ADEPT ("An Electro-Photonic System for Accelerating Deep Neural
Networks"), but it is not the authors' code. That description gives the
architecture, sizes and rates, but not the micro-architecture of the control
logic. Everything below marked as a choice of this design fills that gap.

## Block diagram

```
 host/PCIe stream ──► dma_engine ──┬──────────────► weight_sram (300 MB, 12-bit codes)
                     ▲             │                      │ one row (M weights) per cycle
                     │             ▼                      ▼
                     │        act_sram (100 MB)     weight_buffer (two tiles:
                     │    ┌──► photo-core port         staging + programming)
                     │    │        │                      │ ceil(M²/ZETA) DAC samples / cycle
                     │    │        ▼                      ▼
 gemm_controller ────┼────┴── input vectors ────► photo_core (behavioural)
   (tiles, loads,    │                                     │ 8-bit ADC codes + tag
    programming,     │                                     ▼
    vector stream)   │                             psum_accumulator ──► act_sram
                     │                                     │ vectors finished (gemm_cnt)
                     │        act_sram vector port         ▼
                     └────────────────────────────► vpu: vpu_scheduler + M x vpu_lane
                                                         (6 arith_units + 64 KB RF each)
```

`adept_top` wires these together. The host side is brought out as plain
ports:

- instruction-memory and register-file loads for the vector unit;
- a GEMM command, a vector-unit command and a DMA command, each with a
  valid/ready handshake and a `done` pulse;
- the host row streams of the DMA engine;
- statistics counters.

## Numbers

| Quantity | Default | Origin |
|---|---|---|
| Photo-core size M (also the number of vector lanes) | 128 | paper |
| Clock | 10 GHz (one clock for everything) | paper: 10 GHz photo-core; one clock domain is this design's choice |
| Input / weight / ADC resolution | 10 / 12 / 8 bits | paper (see below on the ADC) |
| Weights per weight DAC, ZETA | 100, so 164 DACs and 100 cycles (10 ns) per tile | paper |
| Register file per lane | 64 KB = 16384 words | paper |
| Activation / weight SRAM | 100 MB (204,800 rows of 128 x 32 bit) / 300 MB (1,747,626 rows of 128 x 12 bit) | paper |
| Copies per arithmetic unit, N_WAY | 5 (10 GHz / 2 GHz) | derived from the paper's 2 GHz limit |
| Accumulator depth | 1024 vectors | this design |
| Word format | 32-bit Q16.16 fixed point, saturating | this design (the paper says only "32-bit") |
| Photo-core latency | 3 cycles | this design |

The paper states two ADC resolutions. The architecture section says 8-bit
ADCs; the power estimate uses 10-bit ADCs. The RTL follows 8 bits, the
precision the architecture section asks for.

## The GEMM dataflow

### Weight-stationary tiling

A layer computes `Y = W X`, where W is (MT·M) x (KT·M) and X holds NVEC column
vectors. W is cut into MT x KT tiles of M x M. The controller runs this loop:

```
for i in 0..MT-1            output tile
  for k in 0..KT-1          input tile
    program tile (i,k)      ZETA cycles, core unusable
    for n in 0..NVEC-1      one vector per cycle
      code = ADC(W[i,k] · x[k][n])
      acc[n] (+)= code      first k loads, later k add, last k writes Y
```

The host places the data in the activation SRAM as follows:

- input `x[k][n]` at row `in_base + k·NVEC + n`;
- output `y[i][n]` at row `out_base + i·NVEC + n`;
- tile row r of tile (i,k) at weight row `w_base + (i·KT + k)·M + r`.

These layouts are this design's choice. The paper does not give one.

### Programming through shared DACs

Giving each of the M² = 16,384 weights its own DAC would be too costly, so ADEPT
time-shares: ceil(M²/ZETA) weight DACs each set ZETA MZIs, one per cycle. In
`weight_buffer`, DAC d sends flat weight index `d·ZETA + s` in slot s (row-major:
index `r·M + c` multiplies input c into output r). A full tile is therefore
programmed in ZETA cycles. The core may not take an input during programming,
and an assertion in `photo_core` enforces this. The controller holds the core
for ZETA + 2 cycles per tile (start handshake, register, ZETA slots). This is
reported as `st_prog`.

### Hiding the tile load

The weight SRAM delivers one row of M weights per cycle, so loading a tile
takes M cycles. The weight buffer therefore has two tile registers:

- the *staging* tile, filled row by row from the SRAM;
- the *programming* tile, copied from staging when programming starts, then
  streamed to the DACs.

In `gemm_controller` two engines run concurrently:

- the **loader** reads the next tile into staging while the current tile is
  being used;
- the **streamer** waits for a full staging tile, programs it, and then
  streams the vectors.

If a tile is used for fewer than about M vectors, the loader cannot keep up.
The core then sits idle, and those cycles are counted as `st_tile_wait`. With
many vectors per tile the load is completely hidden, which is the paper's
argument for the buffer.

### Accumulation and chunking

Each vector carries a tag through the photonic core:

- its accumulator slot;
- "first K tile" and "last K tile" flags;
- the SRAM row for the result.

`psum_accumulator` uses the tag in one of three ways:

- on the first K tile it loads the ADC codes;
- on the middle tiles it adds them;
- on the last tile it writes `sat(sum << 16)` to the activation SRAM, so a
  code sum s is stored as the Q16.16 value s.0.

The accumulator holds ACC_DEPTH vectors. A GEMM with more vectors is run as
chunks of ACC_DEPTH vectors, each going through the whole (i,k) loop. Tiles are
then reprogrammed once per chunk.

### Conversions in the core model

The conversions are this design's choice; the paper gives only the bit widths.

- An input word x (Q16.16) becomes the 10-bit code `sat(x >>> 7)`. Inputs in
  [-1, 1) therefore use the whole code range.
- Weights are the 12-bit two's-complement codes as stored.
- The ADC returns `sat(round(Σ w·x >>> ADC_SHIFT))` in 8 bits, with
  `ADC_SHIFT = 9 + 11 + log2(M) − 7` (20 at M = 128). This sets the ADC's full
  scale to the largest possible dot product.

Each ADC step is therefore the same unit in every tile. Summing codes across K
tiles is exact in that unit, and each tile contributes half an LSB of rounding
error.

The model is noiseless. The real mesh holds MZI phases derived by the host
from a singular-value decomposition of each tile. The model stores the weight
codes those phases stand for and multiplies with them directly.

## The vector unit

### Lanes and arithmetic units

Each of the M lanes (`vpu_lane`) has six 32-bit units: multiply, add, divide,
max, square root and exponential. Each unit input has a multiplexer that
picks one of four sources:

- the lane's element of the activation row;
- the last result of any unit (forwarding);
- the lane's register file, which holds constants or intermediates;
- zero.

This matches the paper's three sources, with zero added by this design.

A digital unit cannot run at 10 GHz. Following the paper, `arith_unit`
instantiates N_WAY = 5 copies. Each copy accepts an operation every fifth
cycle and has five cycles to finish it (a multicycle path). Successive
operations go to successive copies, so the unit as a whole takes one operation
per cycle, with latency N_WAY + 1 = 6 cycles. The arithmetic is this design's
choice:

- Q16.16 with saturation throughout;
- division and square root by restoring (digit-by-digit) iteration;
- `exp` computed as 2^(x·log2 e), with a small polynomial for the fraction;
- `exp` within 2e-4 relative error plus 4 LSB, and the other units within
  1 LSB, checked against a floating-point reference in `tb_arith_unit`.

### Scheduler and micro-instructions

All lanes run in lock step under one `vpu_scheduler`. A command names a
kernel in the instruction memory and a range of vectors. The scheduler steps
every instruction of the kernel over each vector. An instruction (`instr_t` in
`adept_pkg`) contains:

- the unit;
- the two operand sources;
- register addresses;
- whether to write the result to the register file and/or to the output row.

Instructions issue in order. A scoreboard stalls an instruction until any unit
result or register it reads has been written; these cycles are counted in
`st_vpu_dep`. Issue goes through two stages (address, then operands), and the
result comes back N_WAY + 1 cycles later.

### Pipelining behind the GEMM

In *follow* mode, vector v is started only once the accumulator has written
more than v GEMM results. The non-GEMM layer therefore overlaps the GEMM
instead of waiting for it, which is the paper's pipelining of GEMM and
non-GEMM work. Cycles spent waiting are counted in `st_vpu_wait`. The
accumulator's count restarts when a GEMM is accepted, so a follow-mode command
must be issued after the GEMM command it follows.

## Memories and DMA

`act_sram` has separate read and write ports for three users:

- the photo-core side (GEMM input reads, accumulator writes);
- the vector unit;
- the DMA engine.

The paper gives the first two. Each port moves one M-element row per cycle
with one cycle of read latency.

`weight_sram` has a read port for the weight buffer and a read/write port for
DMA. Both memories are plain arrays. The paper builds them from 64 KB
sub-arrays with about 1 ns access, interleaved. That banking is physical and
is not modelled.

`dma_engine` moves whole rows. It supports six operations:

| op | transfer |
|---|---|
| 0 | host → activation |
| 1 | activation → host |
| 2 | host → weight |
| 3 | weight → host |
| 4 | activation → weight |
| 5 | weight → activation |

A weight keeps the low 12 bits of a word and is sign-extended when read back.
The host side is a valid/ready row stream in each direction, and both
handshakes are respected. The engine counts rows moved while the GEMM or
vector unit was busy (`st_dma_overlap`). Loading the next batch during
computation is the basis of the paper's buffering scheme. The schedule itself
is host software.

## Interfaces and timing

- One clock and an asynchronous active-low reset `rst_n`. Control state is
  reset; memories are not.
- Commands use valid/ready. A command is taken in the cycle where both are
  high; `done` pulses for one cycle at the end.
- All SRAM reads return data on the next cycle.
- Photo-core latency is PC_LAT = 3 cycles; arithmetic units take N_WAY + 1.
- Assertions check:
  - no input while programming;
  - no tile load into the weight buffer while it is programming;
  - no two writes to one activation row in the same cycle;
  - non-zero command lengths.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=F`, and each has a watchdog. Most testbenches run
at reduced sizes (M = 4, ZETA = 4, small memories) so that they finish in
seconds. For example:

```
verilator --binary --timing --assert -Irtl --top-module tb_adept_top \
    rtl/adept_pkg.sv rtl/*.sv tb/tb_adept_top.sv && ./obj_dir/Vtb_adept_top
```

- `tb_adept_top` runs two layers end to end at the reduced size. It loads
  weights and inputs by DMA and runs the GEMM, the vector unit in follow mode
  (`y = max(0.5·x, 0)`) and an unrelated DMA transfer together. It then reads
  the results back and checks them against an integer model. It fails if any
  of these mechanisms never happens:
  - tile programming;
  - waiting for a tile load;
  - accumulation over K;
  - chunking;
  - the vector unit starting before the GEMM is done;
  - the vector unit waiting for the GEMM;
  - dependency stalls;
  - DMA overlap.
- The largest size simulated end to end is the reduced one above: M = 4,
  ZETA = 4, a 4-vector accumulator, 64-word register files and 256-row
  memories. At the default size (M = 128, ZETA = 100, 64 KB register files,
  100 MB and 300 MB memories) the simulator's C++ build of the whole top did
  not finish within ten minutes, so no full-size run has been made. The
  blocks are parameterised the same way at every size; `tb_photo_core` and
  `tb_weight_buffer` check the size-dependent parts (DAC count, slot
  mapping, ADC scaling) at reduced M.

## Where this departs from the paper, and what is missing

- **Photonic core.** It is a noiseless behavioural model on weight codes, not
  on MZI phases. There is no laser, no optical loss and no calibration.
- **Converters.** The input DACs, weight DACs and ADCs are folded into the
  core model as quantisation steps.
- **Omitted analog and external parts.** The die-to-die link, PCIe, host and
  DRAM are omitted. Their digital side appears as top-level ports.
- **Single clock.** The clock is 10 GHz throughout. The slower digital units
  are multicycle paths, not a second clock domain.
- **One photo-core.** There is one photo-core with one vector unit. The
  paper's data-parallel configurations with several photo-cores are not
  built.
- **Own micro-architecture.** The number format, the instruction format, the
  conversion scales, the memory layout, the accumulator depth, and the order
  in which DACs program MZIs are all this design's own choices.
- **Workload fit.** The weights of ResNet-50 and RNN-T fit the 300 MB weight
  memory as 12-bit codes. BERT-large's roughly 300 M encoder weights do not
  (about 450 MB). The paper's largest batch sizes for the 100 MB activation
  memory (58, 88 and 50) imply activations narrower than this design's 32-bit
  words.
