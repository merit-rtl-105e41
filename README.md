# MERIT-z: a vision processor that feeds its lanes through tensor transforms

Many vision kernels look different but move data the same way. Convolutions, dilated and
strided convolutions, pixel shuffles, correlation layers, block-matching motion estimation,
bilateral filters and matrix products all do two things. They copy a window of a large
tensor close to the arithmetic units. Then they present that window to many units at once,
often with each element used by several units.

The MERIT idea is to describe both steps as one affine index transform, with no
kernel-specific code:

- **Tiling.** A tile is a box of rows and planes in memory.
- **Expansion.** A lane's element is a base address, plus loop strides times the loop
  indices, plus lane strides times the bits of the lane number:

      A_n = A_0 + Σ_j k_j·s_j + Σ_i c_i·b(n,i)

  where `b(n,i)` is bit `i` of the lane number `n`.

The hardware then needs only:

- a tile cache built from plain single-port SRAM banks;
- an address generator for the formula above;
- a butterfly network that routes (and copies) bank words onto the lanes;
- a SIMD array whose program is split into "first iteration / every iteration / last
  iteration" pieces. This is the *ranged inner product*: every kernel above is an
  accumulation loop with a prologue and an epilogue.

MERIT-z is that processor. This RTL builds it in its main configuration:

- 4 Tile Accumulation Units (TAUs) of 32 lanes, 128 ALUs in total;
- 16-bit fixed-point data;
- a 16 KB and an 8 KB read buffer per TAU;
- a 5 KB partial-sum memory per TAU.

## Structure

```
             control writes        jobs (rp0_base, rp1_base, out_base)
                   |                    |
             +-----v--------------------v-----+
             |  dispatcher: program, LUT,     |
             |  kernel + RP registers,        |  round-robin job issue
             +--+--------+--------+--------+--+
                |        |        |        |
             +--v--+  +--v--+  +--v--+  +--v--+
             | TAU |  | TAU |  | TAU |  | TAU |   (NTAU = 4)
             +--+--+  +--+--+  +--+--+  +--+--+
                +--------+---+----+--------+
                      mem_arbiter (8 read ports, 4 write ports)
                             |
                DRAM line interface (valid/ready, tagged reads)

 TAU:   job queues --> RP0 (16 KB) --vec0--+
                  --> RP1 ( 8 KB) --vec1--+--> Compute Pipeline --out--> Write Pipeline
                  --> output base ---------------------------------------------^
```

- `merit_z`: the top level. It contains the dispatcher, the TAUs and the memory arbiter.
- `tau`: two Read Pipelines (RP0, RP1), a Compute Pipeline (CP) and a Write Pipeline (WP).
  - A job is three DRAM addresses: the RP0 tile, the RP1 tile and the first output line.
  - Each address enters its own 4-deep queue.
  - The RPs can therefore prefetch the next tiles while the CP works on the current ones.
- `read_pipeline`: one tile cache with its expansion network. See the next section.
- `compute_pipeline`:
  - the program memory, which holds the pieces of the ranged program back to back;
  - the `range_selector`;
  - 8 registers per lane;
  - 32 `simd_alu` lanes;
  - the partial-sum SRAM, 80 entries of 32×16 bits.
- `write_pipeline`: it stores nothing. It tags output vector `i` of a job with the address
  `out_base + i·out_pitch` and passes it to the write channel. It stalls only while that
  channel is not ready.
- `mem_arbiter`: round-robin arbitration on the read-request channel and on the write
  channel. Read responses return in request order. They carry the requesting port's
  number as a tag, which routes them back to that port.

## The Read Pipeline: tile caching and expansion

Read this section first if you change anything. Everything else is conventional.

### Buffer as a ring of tiles (`tile_fifo`)

The 32 banks of an RP together form one circular buffer of `N·DEPTH` words:

- 8192 words in RP0, 4096 in RP1.
- Buffer word `w` lives in row `w / 32`, at position `w mod 32`.
- A job's tile takes `planes · rows · row_len` consecutive buffer words at the tail.
- Allocation waits while the space is not free. This is the **buffer-full stall**, reported
  on `full_stall`.
- A tile becomes *ready* when its last DRAM line has been written.
- It is *freed* when the Compute Pipeline has consumed its last vector.
- Up to 8 tiles can be in flight.

### Filling (`tile_dma` ×2 and `collector`)

Two copies of the same tile walker step through the tile's DRAM footprint one aligned
32-word line at a time:

- The first copy issues the line read requests.
- The second copy steps as the lines return. It tells the `collector` which words of the
  line belong to the tile (offset, count) and where the first of them goes in the buffer.

The collector places each word in two stages:

1. A 5-stage `butterfly_net` rotates the line so that each word sits at its buffer
   position. A rotation never conflicts in this network.
2. The `bank_hash` permutation `(X, R)` sends each position to its bank.

A line whose words straddle two buffer rows is written in two cycles. Bank reads for the
Compute Pipeline have priority over collector writes, because the banks are single-port.

### Bank hash `(X, R)`

For a buffer address `a`:

1. The XOR hash gives bank bit `h_i = a_i XOR (x_i AND a_{i+1})`.
   - Each bank bit takes at most one extra term, the next address bit.
   - For the top bit that extra term is the lowest row bit, which swizzles every other row.
2. The bits are then rotated left by `rot` places.

`xmask` and `rot` are per-RP configuration values, and both are zero by default. For any
fixed row the map is a bijection, so a row always fills 32 different banks.

### Expanding (`addr_gen` and the expansion network)

For each step of the loop nest, the address generator does the following:

- It evaluates `A_n` for all 32 lanes.
  - `A_0 = tile_base + o + Σ_j k_j·s_j`.
  - There are three loops. `idx[2]` is the innermost.
- It finds each lane's bank and row.
- It raises a bank conflict when two lanes need different rows of one bank.
- It emits the loop indices with their first and last flags.

Each step then proceeds as follows:

1. Every bank that is needed reads one row.
2. The bank words are put back at their word positions, which undoes `(X, R)`.
3. The 5-stage butterfly gathers and copies positions onto lanes. Lane `n` takes position
   `A_n mod 32`.

The butterfly works in gather form. At stage `s`, node `m` either keeps its own word or
takes the word of node `m XOR 2^s`. The select bit of the node that lane `n` passes
through is `src[n][s] XOR n[s]`. Two lanes that need different words at the same node are
a routing conflict. The same network also carries the source tags, and a mismatching tag
is detected and flagged.

Useful patterns and what they cost:

| pattern | lane strides `c_0..c_4` | result |
|---|---|---|
| 32 consecutive words | 1, 2, 4, 8, 16 | a rotation: always conflict-free |
| broadcast of one word (weights, templates) | all 0 | conflict-free |
| 2-D block, e.g. 8 × 4 lanes over a row pitch P | 1, 2, 4, P, 2P | depends on P mod 32 (not simulated); watch `conflict` |
| strides of 2 or more on consecutive lanes | e.g. 4, 8, 16, 32, 64 | several rows of one bank: flagged |

A flagged step is **not** replayed. Mapping a kernel so that none occurs is the job of
whoever writes the configuration. For example, lanes can run over output channels instead
of strided pixels.

### Timing

| operation | cycles |
|---|---|
| one vector | 2: bank read, then present; it is held until `vec_ready` |
| one DRAM line into the buffer | 1, or 2 if it straddles two rows (plus any cycles lost to reads) |
| a tile | requested as soon as the previous tile of this RP is fully requested and space is free |

## The ranged program and the ISA

### Range selection

A kernel is a loop nest of three accumulation loops around one step. Its program is the
concatenation `[PreLoop | Loop body | PostLoop]`, up to 64 instructions. Two small tables
choose the slice that runs at each step:

- `f` = the number of innermost loops whose index is at its first value;
  `pc_start = start_tab[3 - f]`.
- `l` = the number of innermost loops whose index is at its last value;
  `pc_end = end_tab[l]`.

For a dot product with ReLU:

```
0: r0  = 0                     start_tab = {0, 1, 1, 1}
1: r0 += RP0 * RP1             end_tab   = {2, 2, 2, 3}
2: OUT = max(r0, 0)
```

- The first step runs [0, 2).
- The middle steps run [1, 2).
- The last step runs [1, 3).

Tables with one entry per loop level let the prologue and epilogue sit at any level. For
example, partial sums can be reset once per output channel and emitted once per row.

### Compute Pipeline timing

- One instruction per cycle on all lanes.
- An instruction that reads the partial-sum SRAM spends one more cycle.
- An instruction that writes `OUT` waits for the Write Pipeline to be ready.
- `job_done` pulses after the final step's slice.

### Instruction word (32 bits)

| bits | field | meaning |
|---|---|---|
| 31:28 | op | ADD `a+((b+c)>>>s)`, SUB `a+((b-c)>>>s)`, ABS `a+(\|b-c\|>>>s)`, MAC `a+((b·c)>>>s)`, MAX, MIN, SEL `a?b:c`, AND, OR, XOR, IDX, LUT |
| 27:24 | dst | 0-7 register, 8 partial sum `PS[imm]`, 9 output vector, 15 none |
| 23:20, 19:16, 15:12 | a, b, c | 0-7 register, 8 RP0 vector, 9 RP1 vector, 10 `PS[imm]`, 11 `imm` (sign-extended), 12 zero |
| 11:8 | s | right shift of the product or sum (signed) |
| 7:0 | imm | immediate / partial-sum entry / IDX selector |

- IDX loads loop index `imm[1:0]`, or the lane number when `imm[1:0]` is 3.
- LUT interpolates linearly over 16 segments:
  - `b[15:12]` selects the segment;
  - `b[11:0]` is the fraction between entries `e` and `e+1` of a 17-entry table.

## Programming interface (`merit_z` ports)

Configuration is written through `cfg_we/cfg_addr/cfg_wdata`. All TAUs share it, so change
it only while `idle`.

| cfg_addr | contents |
|---|---|
| 0x000-0x03F | program words |
| 0x040-0x050 | LUT entries (low 16 bits) |
| 0x060-0x062 | loop counts, outer to inner |
| 0x063 | `start_tab`, four 7-bit fields, entry `e` at bits `7e+6:7e` |
| 0x064 | `end_tab`, same layout |
| 0x065 | bit 0: the kernel reads RP1 |
| 0x066 | `out_pitch`: DRAM words between the output vectors of one job |
| 0x067-0x06F | RP0 registers, see below |
| 0x070-0x078 | RP1 registers, same layout |

RP register `q`, at base + q:

| q | contents |
|---|---|
| 0 | `row_len \| rows<<16` |
| 1 | `planes \| o<<16` |
| 2 | row pitch |
| 3 | plane pitch |
| 4 | `c0 \| c1<<16` |
| 5 | `c2 \| c3<<16` |
| 6 | `c4 \| xmask<<16 \| rot<<21` |
| 7 | `s0 \| s1<<16` |
| 8 | `s2` |

Other ports:

- A job is a `job_t` on `job_valid/job_ready`. It is accepted when some TAU's queues have
  room, and TAUs are chosen round-robin.
- Memory:
  - reads are line requests of 32 words (`m_rd_req_*`, with a 3-bit tag);
  - responses come back in request order with the same tag;
  - writes are whole lines (`m_wr_*`).
- Status:
  - `idle`;
  - `full_stall[t]`, a buffer-full stall in TAU `t`;
  - `conflict`, a bank or butterfly conflict anywhere;
  - `job_done[t]`.

## What is the paper's and what is this design's

**Taken from the paper:**

- the processor's organisation (dispatcher, TAUs of two RPs, one CP and one WP, a shared
  memory bus);
- 32 lanes per TAU and 4 TAUs;
- 16-bit data and a 32-bit instruction;
- 16 KB / 8 KB RP buffers and the 5 KB single-port partial-sum SRAM;
- single-port SRAM banks;
- the RP's parts: two tile DMAs, a controller, the collector, the banks, the address
  generator and a butterfly;
- 5-stage butterflies on both sides of the banks;
- the `(X, R)` bank permutation in its restricted form;
- the circular tile buffer that stalls when full;
- the address formula `A_n`;
- the ranged inner product with start/end tables chosen by first/last-index scans;
- the instruction classes;
- the WP that assembles lines and stores nothing.

**Chosen here** (the paper does not fix them):

- the instruction encoding and the control register map;
- the number of registers (8);
- 3 loop levels;
- the valid/ready handshakes and the tagged, in-order memory interface;
- aligned 32-word DRAM lines;
- the job format;
- round-robin arbitration everywhere;
- all cycle timings;
- the flagging rather than replaying of conflicts.

**Departures from the paper:**

- The read side puts bank words back at their positions, undoing `(X, R)`, before its
  butterfly. The paper mentions only a butterfly there. This selector is needed for hashed
  layouts to be readable at all.
- The collector's `(X, R)` stage is written as a per-bank selector computed from the hash
  rather than as a 3-stage omega network. The function is the same.
- The paper's simulator places a 1 KB L1 cache in front of DRAM to absorb misaligned
  accesses. Here the tile DMAs read aligned lines and discard the words they do not need.
- Pooling fused into a convolution, as in the paper's CONV+Pool layers, needs a fourth loop
  level. With three loops, pooling is a separate pass.
- The Write Pipeline only generates addresses (one whole 32-word line per output vector, at
  `out_base + i·out_pitch`). The paper's WP also shuffles the lanes of output vectors and
  assembles them into aligned DRAM lines. That shuffle, and any line buffer it needs, is not
  built, so outputs such as pixel shuffle must be laid out by the input-side transforms
  instead.
- Strided lane patterns that overload a bank are flagged, not resolved. The paper argues
  that valid mappings do not produce them. For example, stride-4 convolution must be mapped
  with lanes over output channels.

**Not built:**

- the DRAM itself; the testbenches use a behavioural model, `tb/dram_model.sv`;
- the L1 cache.

## Verification

Every module has a self-checking testbench in `tb/` that compares against an independent
model. Run one with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/merit_pkg.sv tb/tb_compute_pipeline.sv \
          --top-module tb_compute_pipeline -Mdir build && build/Vtb_compute_pipeline
```

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_butterfly_net` | random source maps vs. a software model of routability; routes every routable map correctly and flags the rest |
| `tb_bank_hash` | the formula above; bijection per row |
| `tb_tile_fifo` | allocation, commit and free against a queue model; full stalls |
| `tb_tile_dma` | line walks and word counts of random tile shapes |
| `tb_collector` | every buffer word after random lines, offsets, hashes and write-grant gaps |
| `tb_addr_gen` | `A_n`, banks, rows, loop order and flags |
| `tb_read_pipeline` | every lane of every vector against the DRAM contents for random tile shapes, strides and job streams; buffer-full stalls; broadcast; hashed layouts give right data or a flag |
| `tb_range_selector` | exhaustive check including the worked example of a 2-loop nest |
| `tb_simd_alu` | every operation against a reference |
| `tb_compute_pipeline` | 60 random programs and range tables against an interpreter: output stalls, partial-sum reads, register file |
| `tb_write_pipeline` | output addresses and data under back-pressure |
| `tb_mem_arbiter` | per-port response order and data; write contents |
| `tb_dispatcher` | decoding of the register map; round robin |
| `tb_sync_fifo` | the job-queue FIFO |
| `tb_tau` | sum-of-absolute-differences kernel with partial sums on one TAU |
| `tb_merit_z` | the full-size processor at its default parameters |

`tb_merit_z` runs a 48-channel 3×3 convolution with ReLU:

- 4 output channels, 4 rows of 64 outputs, 32 jobs;
- every output word is compared with a reference;
- it counts buffer-full stalls, prefetch overlapping compute, write back-pressure, several
  TAUs busy at once, read-bus contention and broadcast vectors, and fails if any of them
  never happened;
- it fails on any conflict;
- it runs in well under a minute.
