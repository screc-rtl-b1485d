# SCRec accelerator cores in SystemVerilog

SCRec serves deep-learning recommendation models (DLRMs) whose embedding
tables are far too large for DRAM. It uses a cluster of SmartSSDs: each one
is an SSD with an FPGA and 4 GB of DDR4 behind a PCIe switch. Each table is
split by row access frequency across three tiers:

- **FPGA DRAM** holds the hottest rows;
- **on-chip memory** holds a large group of warm rows, compressed in
  tensor-train (TT) format;
- **the SSD** holds the cold rest.

Each SmartSSD's FPGA is programmed with one of two engines:

- an **EMB core**, which gathers and pools embedding rows from the three
  tiers;
- an **MLP core**, which runs the dense bottom and top MLPs.

An offline cost model decides the row split per table and the number of
devices of each kind. This repository gives RTL for both cores and for a
cluster top that instantiates several of each. The design follows the SCRec
proposal (Sec. III-E and Fig. 7 of the SCRec paper, *"SCRec: A Scalable
Computational Storage System with Statistical Sharding and Tensor-train
Decomposition for Recommendation Models"*). The authors did not publish RTL.
Everything below the block level, such as word formats, handshakes,
sequencing and memory depths, is this implementation's own choice. Each
`rtl/` file says in its opening comment which parts come from the published
design.

All arithmetic is IEEE-754 single precision with these conventions:

- round to nearest, ties to even;
- subnormals are flushed to zero;
- a NaN result is 0x7fc00000.

The arithmetic units (`fp32_mul`, `fp32_add`, `fp32_div`) stand in for the
vendor floating-point IP used in the original FPGA build.

## Remapped lookups: one address, three tiers

The host turns every sparse-feature index into a 32-bit *remapped address*,
`{device_id[1:0], emb_idx[29:0]}` (`screc_pkg::remap_addr_t`). The device
codes are:

| device_id | tier | row fetched by |
|---|---|---|
| 0 | FPGA DRAM | DMA read channel; `emb_idx` is the row number in the DRAM region |
| 1 | on-chip, TT format | TT computation unit; `emb_idx` is the row of the TT-compressed sub-table |
| 2 | SSD (peer-to-peer) | DMA read channel; `emb_idx` is the row number in the SSD region |
| 3 | unused | dropped and counted in `stat_err` |

`emb_top_ctrl` reads one bag at a time. A bag is all lookups of one sparse
feature of one sample, and its last lookup carries `lk_last`. The controller
hands each lookup to its tier. The three tiers run concurrently, each with
one row in flight. If a lookup's tier is still busy, the stream stalls:
`lk_ready` goes low and `stat_stall` counts the cycle. This is how the slow
SSD hides behind DRAM and TT work within a bag.

After the last lookup, the controller does the following in order:

1. waits until all three tiers are idle;
2. starts post-pooling;
3. clears the pools;
4. accepts the next bag.

Bags never overlap.

## TT reconstruction on the 16 x 32 array (`tt_cu`)

This is the least obvious part of the design.

A table of `I = I1*I2*I3` rows and dimension `J = J1*J2*J3` is stored as
three TT-cores with rank `R = 4`:

- `G1[i1]` is a `J1 x R` matrix;
- `G2[i2]` is an `R x (J2*R)` matrix;
- `G3[i3]` is an `R x J3` matrix.

Row `i` is rebuilt as follows:

1. split the row index: `i = (i1*I2 + i2)*I3 + i3`;
2. compute `T1 = G1[i1] x G2[i2]`, a `J1 x (J2*R)` matrix;
3. reshape `T1` row-major to `(J1*J2) x R`;
4. compute `T2 = reshaped T1 x G3[i3]`, a `(J1*J2) x J3` matrix;
5. read `T2` row-major as the `J`-element row.

The inner dimension of both products is the rank, so each product needs only
four feed cycles per output tile.

**Array and tiling.** `pe_array` is an output-stationary systolic array of
`pe` cells, 16 rows by 32 columns. A-operands enter from the left, one per
row. B-operands enter from the top, one per column. The array skews them
internally, and each PE keeps its own partial sum. `tt_array_ctrl` cuts each
product into 16 x 32 output tiles. Each tile goes through four phases:

1. clear;
2. `R` = 4 feed cycles;
3. a drain of `ROWS + COLS - 1` = 47 cycles;
4. the reshaper writes the tile out, one row per cycle.

Tiles run one after another. The drain of one tile does not overlap the feed
of the next. This is the main simplification against a pipelined
implementation.

**Why the reshape is free.** `tt_bmem` stores the intermediate product
row-major with `R` columns, so element `(m, k)` sits at flat index `m*R + k`.
A row-major reshape does not change flat order. The reshaper therefore writes
tile row `m`, columns `n0..n0+31`, to flat indices `m*N + n0 + l`. The next
step then reads the same storage as an `R`-column matrix:
`rdata[r] = flat[(row + r)*R + k]`. The memory has two banks, matching the
"dual channel" TT_BMem of the published design. Step `s` reads one bank while
its tiles are written into the other.

**Memory word layouts.** These are loaded once through the EMB DMA's TT
loader.

- **TT_AMem** (`tt_wide_mem`, 16 lanes): word `i1*R*MT + k*MT + mt` holds
  column `k` of `G1[i1]`, rows `mt*16 .. mt*16+15`. `MT = ceil(J1/16)`, and
  the controller supports `J1 <= 16`, so `MT = 1`.
- **TT_CMem** (`tt_wide_mem`, 32 lanes, 36864 words = 4.5 MiB): core `c`
  (1 or 2) starts at `cfg_cbase[c]`. Word `cbase + i*R*NT + r*NT + nt` holds
  row `r` of that core's slice `i`, flattened columns `nt*32 .. nt*32+31`.
  For `G2` the flattened column `n` is `j2*R + r'`; for `G3` it is `j3`.

**Interface and timing of one lookup.** Pulse `req_valid` with `req_row`.
The unit then does the following:

1. divides the row index (about 60 cycles of restoring division);
2. runs the tiles of the two steps;
3. emits the row as 32-lane beats (`out_base`, `out_data`, `out_mask`,
   `out_last`) straight into the TT pool.

One row is in flight at a time.

## Vector pooling (`vpu`, `vpu_pool`, `post_pool`)

**Pools.** There are three independent pools, one per tier. Each pool adds
incoming beats into a `DIM` = 512-element fp32 accumulator and counts
vectors:

- the DRAM and SSD pools take 16-lane beats (one 512-bit memory word);
- the TT pool takes 32-lane beats.

**Post-pooling.** When a bag is complete, `post_pool` does the following:

1. adds the three partial sums element by element, as `(dram + ssd) + tt`;
2. in average mode, divides each element by the number of pooled vectors,
   using 16 multi-cycle dividers in parallel;
3. emits 16-element beats.

Each divider takes 28 cycles, or 1 cycle for zero, infinite or NaN operands.
The stage waits for all 16 lanes of a beat before emitting it. An empty bag
(only invalid lookups) gives a zero vector.

`emb_dma` then writes the pooled vector to
`cfg_out_base + bag * ceil(dim/16) * 64 + element * 4`.

## EMB DMA and external memory ports (`emb_dma`, `emb_rd_chan`)

Each read channel (DRAM and SSD) turns a row index into one request. The
request is `ceil(dim/16)` 64-byte words at
`base + idx * ceil(dim/16) * 64`, so rows are padded to whole words. Every
returned word is forwarded to its pool. The request side is valid/ready. The
response side is valid only and is always accepted.

The FPGA DRAM and the SSD themselves are outside the FPGA. Their ports are
brought out of `emb_core` and `screc_top`.

## MLP core: four 8 x 16 units and two interconnect modes

`mlp_core` holds four `mlp_cu` units. Each unit has the following parts:

- an 8 x 16 PE array;
- a bias adder;
- a ReLU.

The units share three memories (`mlp_shared_mem`):

- IOMem: 32768 words x 16 lanes (2 MiB);
- WMem: 147456 words x 8 lanes (4.5 MiB);
- BMem: 4096 words x 8 lanes.

A CU computes one output tile: 8 neurons x 16 samples. Each cycle it takes
one WMem word (8 weights of input feature `k`) on the array rows and one
IOMem word (feature `k` of 16 samples) on the columns. After `in_dim` cycles
and a drain, it adds the bias and applies ReLU row by row. It writes each
neuron's 16 results back to IOMem as one word.

The data layout is:

- input of batch tile `bt`: IOMem words `x_base + bt*in_dim + k`;
- output: words `y_base + bt*out_dim + n`.

A layer's output is therefore already in the right layout to be the next
layer's input.

`mlp_top_ctrl` takes one layer descriptor (`screc_pkg::mlp_layer_t`) at a
time and issues rounds of up to four tiles. The interconnect
(`mlp_interconnect`) serves a round in one of two modes, which are the two
data distributions of the published MLP core:

- **latency mode:** the four CUs take four neuron tiles of the same batch
  tile. One IOMem read is broadcast to all CUs, and each CU reads its own
  weights.
- **throughput mode:** the four CUs take four batch tiles of the same neuron
  tile. Each CU reads its own IOMem word, and one WMem read is broadcast.

The mode is latched when a layer is accepted, so it can change from layer to
layer. Write-back to IOMem goes through one port shared by round-robin
arbitration. `mlp_dma` moves bursts between the host and any of the three
memories. For WMem and BMem, only lanes 0..7 of a write word are used.

## The cluster top (`screc_top`)

`screc_top` instantiates `N_EMB = 5` EMB cores and `N_MLP = 3` MLP cores,
which is the allocation SCRec chose for its smallest model on eight
SmartSSDs. The cores do not connect to each other. In SCRec, the host moves
pooled vectors to the MLP devices. So every device's host-side ports, DRAM
port and SSD port appear on the top as arrays indexed by device (`e_*` and
`m_*`).

## Sizes and what limits them

| parameter | default | where it comes from |
|---|---|---|
| TT array | 16 x 32 | published EMB core |
| MLP array | 8 x 16 per CU, 4 CUs | published MLP core |
| TT rank, TT cores | 4, 3 | evaluated configuration |
| `DIM` (largest pooled vector) | 512 | largest evaluated embedding dimension |
| TT_CMem | 36864 x 32 x fp32 = 4.5 MiB | size of the device's UltraRAM (this design's split) |
| TT_AMem / TT_BMem | 2048 x 16 / 2 x 2048 | own choice |
| IOMem / WMem / BMem | 2 MiB / 4.5 MiB / 128 KiB | own split of the on-chip RAM |

Some limits follow from these sizes:

- The whole model's MLP weights must fit in WMem (1,179,648 values).
- The Criteo models RM0 and RM1 fit at every embedding dimension up to 256.
- RM2 and RM3 fit at dimension 64.
- RM2 and RM3 do not fit at dimension 256. Their first top layer alone has
  `27*256*256` or `27*256*512` weights. Running them needs the host to
  reload WMem between layers, which the DMA supports but no controller
  automates.
- The TT unit handles tables with `J1 <= 16`.
- The TT unit handles intermediate products up to 2048 values.

## Departures and simplifications

- Floating-point operators are combinational (one cycle at the array), not
  the pipelined vendor cores.
- TT tiles are not pipelined against each other.
- Each tier has one row in flight.
- Bags do not overlap.
- The host remapping table, the offline cost model and placement, the FPGA
  DRAM, the SSD and the PCIe switch are outside the RTL. The top's ports
  stand in for them.

## Simulating

Every testbench in `tb/` checks itself. Each one ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. To build one with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/screc_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/tb_emb_core.sv --top-module tb_emb_core
./obj_dir/Vtb_emb_core
```

Testbench data is generated in simulation, so there are no data files. Table
words come from a fixed hash of the address (`tb_fp_pkg::table_word`).
Embedding values and TT-core entries are multiples of 1/8. This keeps every
pooled sum and every TT reconstruction exact, so the expected values do not
depend on summation order.

| testbench | what it covers |
|---|---|
| `tb_fp32_mul`, `tb_fp32_add`, `tb_fp32_div` | operators against correctly rounded references; divider latency |
| `tb_pe`, `tb_pe_array` | MAC cell and systolic tile timing |
| `tb_tt_wide_mem`, `tb_tt_bmem` | TT memories, including the rank-column read |
| `tb_tt_cu` | full TT reconstruction for three table shapes, with back-pressure (also covers the reshaper and array controller) |
| `tb_vpu_pool` | one pool, masks, clear |
| `tb_post_pool` | combining the three pools in sum and average mode, including an empty bag, lanes whose divider finishes early, and output back-pressure |
| `tb_emb_top_ctrl` | address decode into the four tiers with random tier stalls, invalid codes, pool clearing, post-pooling start and statistics |
| `tb_emb_core` | one EMB core at full size: random bags over all tiers, sum and average, stalls, invalid codes, statistics (also covers DMA, controller and pooling) |
| `tb_mlp_bias_adder`, `tb_mlp_relu` | element-wise units |
| `tb_mlp_cu` | one computation unit: random tiles, partial row counts, ReLU on/off, write back-pressure, tile latency |
| `tb_mlp_dma` | host write bursts into IOMem, WMem and BMem and read bursts from IOMem, with random stream gaps |
| `tb_mlp_core` | three chained layers in both modes, with partial tiles (also covers CU, interconnect, controller, DMA, shared memory) |
| `tb_screc_top` | the whole cluster at its default size: 5 EMB devices pool 48 bags each, the host gathers the vectors into the 3 MLP devices, and two layers run in each. It counts stalls, each tier, invalid codes, averaging, mode switches and ReLU clipping, and fails if any of them never happened. |

`tb_screc_top` takes several minutes to compile because it holds eight
full-size cores. `tb_emb_mem_model` is the behavioural DRAM/SSD model used
by the EMB testbenches.
