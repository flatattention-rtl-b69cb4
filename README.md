# A tile-based attention accelerator with fabric multicast and reduction

Attention over long sequences on a many-tile chip is usually limited by memory traffic. If
every tile runs its own FlashAttention-style loop, each tile streams its own copy of K and V
from HBM. This design follows a different plan: a *group* of tiles works on one large attention
block together.

- Tile (x, y) of a G x G group owns query block y and key/value block x.
- Only the tiles on the group's diagonal read HBM. Tile (d, d) loads Q_d, K_d and V_d.
- The diagonal tile then hands the data to the rest of the group with **multicasts** that the
  network routers replicate flit by flit. Q_d goes along row d; K_d and V_d go down column d.
- The softmax statistics that span a whole row of the group (row maximum, row sum) and the
  partial outputs are combined by **reductions** inside the routers.
- Each block is read from HBM once per group rather than once per tile. In exchange, the
  on-chip network must provide collectives that do not cost one transfer per destination.

The RTL here implements that chip:

- a mesh of compute tiles;
- a 2D-mesh network with hardware multicast and row reduction;
- one HBM channel controller per mesh column on the south edge;
- a command port through which an external controller drives the tiles.

An end-to-end testbench runs a complete attention head with this dataflow and checks the result
against a real-valued reference.

## Building blocks and their sizes

| Module | What it is | Default size |
|---|---|---|
| `flat_chip` | the chip (top) | 16 x 16 tiles, 16 HBM channels (the evaluated chip is 32 x 32; see below) |
| `noc_mesh` | 2D mesh of routers | 32 x 32, 1024-bit links |
| `noc_router` | 5-port router with multicast and reduction | 2-flit input FIFOs |
| `flat_tile` | one tile | ME + VE + DMA + 7-port interconnect + L1 |
| `matrix_engine` | GEMM array | 32 x 16 MAC cells (1024 operations/cycle) |
| `vector_engine` | softmax vector unit | 64 lanes of 16 bits (one 1024-bit word per cycle) |
| `exp_unit` | exponential for the vector unit | 64 lanes |
| `dma_engine` | tile DMA | one flit per cycle each way |
| `l1_xbar` | tile interconnect | fixed priority, word-interleaved banks |
| `l1_mem` | L1 scratchpad | 4 banks x 768 rows x 1024 bits = 384 KiB, 512 B/cycle |
| `hbm_ctrl` | HBM channel controller | 128 outstanding reads |
| `flat_pkg` | shared types: flit, commands, L1 port structs | |
| `sync_fifo`, `l1_stream_reader` | helpers | |

### Number format

Every datapath word is 1024 bits: 64 lanes of signed **Q8.8 fixed point**. The evaluated chip
computes in FP16. Q8.8 is a simplification in this RTL that keeps the datapaths small and exact
enough for the tests. Sums and products saturate to ±127.996. The matrix engine accumulates in
40 bits and shifts the result right by a programmable amount (8 for Q8.8).

### Data layout

A score or output block is stored **column by column**: L1 word n holds column n of the block,
and lane m holds row m. This layout has two consequences:

- The matrix engine can write C one column per cycle and read it back as an A operand (P·V
  uses P directly).
- Every per-row statistic is a lane-wise operation across words. The row maximum of S is the
  lane-wise maximum of its 16 column words, and exp(S − m) subtracts one word holding m for every
  row.

For `C = A·B`, the matrix engine reads word `a+k` as column k of A (32 rows in lanes 0..31) and
word `b+k` as row k of B (16 values in lanes 0..15). It does one k per cycle.

## The network: single-flit transfers, multicast and reduction

Every NoC transfer is one flit. The flit has a header (`flit_t`) and one 1024-bit word. The
header holds:

- the kind of transfer;
- the source tile;
- a destination rectangle `[x_lo..x_hi] x [y_lo..y_hi]`;
- a reduction root column `root_x`;
- the target word address.

Because every flit carries its own destination, there are no wormhole packets to keep together.
Each router decides every flit on its own.

**Unicast and multicast.** A unicast is a 1 x 1 rectangle. A flit first travels along its
source row (X) and then along the columns (Y). A router copies it to every output that leads
towards part of the rectangle:

- On the X leg, to the local port if the router's column is in the rectangle and the source row
  is too.
- On the X leg, north and/or south if the column is in range and the rectangle spans other rows.
- On the X leg, onward east or west while the rectangle continues that way.
- A flit that arrived from north or south only continues vertically.

Each input keeps a mask of the outputs that have already taken its head flit and frees the flit
when all wanted outputs have. So one injected flit reaches a whole row, column or rectangle. The
outputs can each take it in a different cycle, so a busy branch does not hold up the others.
Outputs use round-robin arbitration.

**Row reduction.** Take a reduction over columns `x_lo..x_hi` of one row towards `root_x`. The
router at column x waits until reduction flits are at the head of:

- its local input;
- the west input, if `x_lo < x <= root_x`;
- the east input, if `root_x <= x < x_hi`.

It then combines them lane by lane, with a saturating sum or a maximum. It sends the single
result towards the root; at the root it delivers the result to the tile. Every tile of the row
sends the same number of words in the same order, so contributions are matched by arrival order.
The reduction needs no buffers beyond the normal input FIFOs, and one result word leaves the
root per cycle once the pipeline is full.

**HBM traffic.** The DMA sends HBM reads and writes to row `MESH_Y`, just below its own column.
There, `hbm_ctrl` turns them into channel requests. A read reply comes back as an ordinary write
flit into the requesting tile's L1, and travels north in that column only. The controller:

- reserves buffer space for every read in flight, so the channel never needs back-pressure;
- allows 128 reads in flight, enough to keep one channel busy at 64 B/cycle across an HBM
  latency of about 200 cycles.

The north, east and west mesh edges are closed.

## The tile

A tile has three units that run at the same time. They share the L1 through a crossbar. The
crossbar ports, in priority order:

1. receive side of the DMA (writes from the NoC);
2. transmit side of the DMA;
3. matrix engine A;
4. matrix engine B;
5. matrix engine C;
6. vector engine read;
7. vector engine write.

The L1 has four single-port banks. A word address selects bank `addr % 4`. Read data returns one
cycle after the grant. The units read through small prefetching stream readers (`l1_stream_reader`),
so a unit that loses arbitration for a cycle only slows down; it loses nothing.

- **Matrix engine**:
  - An output-stationary 32 x 16 array. Each cycle it takes one A column and one B row and
    updates all 512 accumulators.
  - With `acc = 1`, the old C is loaded first (C += A·B).
  - It then writes the 16 C columns.
  - A K-deep product takes about K + 16 cycles, plus 16 more with accumulation.
- **Vector engine**:
  - Element-wise operations read one operand word t and then stream `d[i] = f(s[i], t)` for
    i < n. The operations are max, add, mul, div and `exp(s − t)`.
  - Reductions fold n words into one: row max (`RMAX`) and row sum (`RSUM`).
  - It handles one word per cycle.
- **Exponential unit**: `exp(x) = 2^(x·log2 e)`, with `log2 e ≈ 369/256`. The integer part of the
  exponent is a shift and the fractional part uses `2^f ≈ 1 + f`. The relative error stays
  below 7 %; results above the Q8.8 range saturate.
- **DMA**:
  - Sends `len` L1 words as a unicast or multicast write, as reduction contributions, or as HBM
    writes. It can also issue `len` HBM reads whose replies land at `dst+i`.
  - Every flit that arrives is written to L1 at its address, and `rx_count` counts them. Software
    waits for the number of words it expects; this replaces the synchronisation between tiles.

## Control

The tiles would be driven by a small scalar core each. The chip instead exposes one command
port: `cmd_valid/cmd_ready/cmd`.

- A `tile_cmd_t` names a unit (DMA, ME or VE), that unit's command, and a rectangle of tiles.
- The command is accepted in one cycle by every tile of the rectangle, once that unit is idle in
  all of them.
- One command can start a row reduction in a whole row, or a GEMM in every tile of a group.
  Commands for the diagonal tiles are sent one tile at a time.
- `tile_busy` and `tile_rx_count` report back to the controller.

Commands for different units do not wait for each other. For example, the V multicast and the
Q·Kᵀ GEMM overlap in the end-to-end test.

## The attention schedule that the end-to-end test runs

`tb_flat_chip` runs one head, `O = softmax(Q Kᵀ) V`, on a 4 x 4 chip that is one 4 x 4 group. It
uses 128 queries and head dimension 16, with the keys processed as two KV blocks of 64 keys
each. Tile (x, y) holds 32 query rows and, in each KV block, 16 keys. The KV loop is the heart of
the schedule; each iteration does the following:

1. Diagonal tile (d, d) reads K_d and V_d of the block from HBM channel d. In the first
   iteration it also reads Q_d.
2. It multicasts Q_d along row d (first iteration only) and K_d down column d.
3. It multicasts V_d down column d. While that runs, every tile computes `S = Q Kᵀ`.
4. Every tile takes the row maxima of its S. The row maxima are max-reduced onto the diagonal
   tile of the row.
5. The diagonal tile forms the running maximum `m_new = max(m_old, m)` and multicasts it back
   along the row. Every tile now holds the same maximum for each of its rows.
6. Every tile computes `P = exp(S − m_new)` and the row sums of P.
7. From the second iteration on, every tile computes `alpha = exp(m_old − m_new)`. It scales its
   partial output and row sums by alpha, then adds in the new row sums.
8. The matrix engine accumulates `O += P·V` in place (`acc = 1`).

Partial outputs and row sums stay in the tiles for the whole loop. Only after the last block
are they sum-reduced onto the diagonal tile. That tile divides by the row sum and writes its
32 x 16 block of O to HBM.

The HBM model answers after 200 cycles and accepts a request on half of the cycles (64 B/cycle
per channel). The test checks the following:

- **Result**: every output against real arithmetic, within 0.06. The largest error seen is
  about 0.009.
- **Collectives**: each multicast word is injected once (4 x 82 = 328 flits), and the number of
  reduction flits and HBM reads and writes is as expected.
- **Stalls and overlap**: back-pressure on tile injection ports happened, and the matrix engines
  and DMAs were busy at the same time.
- **HBM timing**: the first reply comes at or after the HBM latency, and the first 48-word load
  ends within latency + 2 x 48 + 40 cycles.

The run takes about 1,200 cycles.

## Where this RTL departs from the evaluated chip

- **Mesh size.** The evaluated chip is 32 x 32 tiles; `flat_chip` defaults to 16 x 16 and works
  at any size up to 63 x 63. Verilator elaborates every tile separately and needs 0.35, 1.3 and
  5.1 GB at 4 x 4, 8 x 8 and 16 x 16, so about 20 GB at 32 x 32. Together with synthesis of the
  same design running alongside, that is more memory than the build machines offer. `noc_mesh`
  keeps the 32 x 32 default.
- **HBM.**
  - The main configuration table lists one HBM4 stack with 32 channels on the south edge
    (2 TB/s). This design puts one channel on each column.
  - The text elsewhere mentions two stacks and 4 TB/s, and the architecture figure draws the
    controllers along the right-hand edge. The table was followed.
  - The DRAM itself is not part of the RTL; `tb/hbm_model.sv` is a behavioural stand-in.
- **Numbers.** Q8.8 fixed point instead of FP16/FP8.
- **Vector engine.** The vector engines are programmable RISC-V vector processors (four of them
  at 32 operations/cycle each). This design has one fixed-function 64-lane unit with the seven
  operations the attention dataflow needs.
- **Masking.** The causal mask that speculative decoding applies to the score block has no
  dedicated operation. Software would have to write a block of large negative values and `ADD`
  or `MAX` it in word by word.
- **Scalar cores and instruction caches** are not implemented; their role is played by the
  command port.
- **Die-to-die links and the wafer-scale system** (used for whole-model inference across 64
  chips) are not implemented.
- **Design choices not given by the paper:**
  - single-flit transfers;
  - the multicast and reduction rules above;
  - round-robin router arbitration and two-flit input FIFOs;
  - fixed-priority L1 arbitration;
  - the HBM controller and its buffer depth;
  - synchronisation by receive counting;
  - the command format.

## Capacity

A tile's L1 holds 384 KiB. For prefill attention with S = 4096 and head dimension 128 on a
32 x 32 group, every tile holds 128 x 128 slices of Q, K, V, S, P and O. That is 6 x 32 KiB =
192 KiB, so it fits. On a 16 x 16 group the same head needs 256-wide slices, 512 KiB in all, so
the kernel has to loop over two key blocks. The decode variants (MHA, GQA and MLA with a
576-wide latent head) need 66 to 154 KiB per tile when keys are split across 32 columns.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/flat_pkg.sv rtl/*.sv tb/*.sv \
          --top-module tb_flat_chip
./obj_dir/Vtb_flat_chip
```

(`flat_pkg.sv` must be read before the other files.)

| Testbench | What it checks |
|---|---|
| `tb_exp_unit` | every input against `$exp`; exact points; saturation |
| `tb_l1_mem` | read-after-write per bank; one-cycle read latency |
| `tb_l1_xbar` | random traffic on all ports against a model; priority; conflicts |
| `tb_vector_engine` | all operations against a model; one word per cycle |
| `tb_matrix_engine` | GEMM and accumulate against integer arithmetic; K + N cycle budget |
| `tb_noc_router` | unicast, multicast, back-pressure, sum/max reduction |
| `tb_noc_mesh` | 400 random unicasts; row, column and rectangle multicast; reductions; south exit; hop latency |
| `tb_hbm_ctrl` | writes, reads from two requesters, reply addressing, outstanding limit, streaming rate |
| `tb_dma_engine` | all transfer kinds, header fields, back-pressure, loopback, 64 words in 74 cycles |
| `tb_flat_tile` | three units running at once, GEMM result, command hold-off |
| `tb_flat_chip` | the attention head above |

`tb_flat_chip` takes a `FULL` parameter. With `FULL = 1` it instantiates `flat_chip` with no
parameter overrides and runs the same head on a 4 x 4 group in the corner. The Verilator build
of the 256-tile chip takes too long for routine use. The largest size simulated to completion is
the 4 x 4 chip.
