# Tile-based adaptive stationary (TAS) matrix engine

Most of the arithmetic in a transformer layer is in its linear projections.
Each one is a matrix product OUT[M][K] = IN[M][N] x W[N][K]. Here M is the
number of tokens, N the input width and K the output width. For large models
neither operand fits on chip, so the energy cost is dominated by external
memory access (EMA), not by the multiplications.

An accelerator that works on small square tiles can cut EMA by keeping one
operand tile on chip while many partner tiles pass it:

- **input stationary (IS):** keep the input tile. The input matrix is then
  read about once, MN elements.
- **weight stationary (WS):** keep the weight tile. The weight matrix is then
  read about once, NK elements.

Which of the two saves more depends only on which matrix is larger:
MN - NK = N(M - K). So the rule is:

- **M < K:** use input stationary.
- **M >= K:** use weight stationary.

M is the sequence length, which changes from one input to the next. A speech
model, for example, sees anything from about a hundred to many thousands of
tokens. So the choice has to be made per multiplication, at run time. In
hardware it is a single comparator.

On its own, either scheme would have to keep a whole row (IS) or column (WS)
of partial sums on chip. The alternative is to spill partial sums to external
memory and read them back, which means reading and writing DRAM at the same
time. TAS avoids both. It combines the chosen scheme with output stationary:
a small, fixed number of output tiles stays on chip until the whole shared
dimension N has been summed. Partial sums never leave the chip, and every
output element is written once.

This repository holds synthesizable SystemVerilog for a complete tiled matrix
engine built around that scheme, with self-checking testbenches.

## The two loop orders

The engine works on TILE x TILE tiles (m = n = k = TILE = 8). PSUM_TILES
(4) is the number of output tiles kept on chip. In the notation of the
scheme, PSUM_TILES = k'/k in IS-OS order and m'/m in WS-OS order.

| level | IS-OS (M < K)                       | WS-OS (M >= K)                      |
|-------|-------------------------------------|-------------------------------------|
| (4)   | `mi` over M/m tile rows             | `ki` over K/k tile columns          |
| (3)   | block of PSUM_TILES columns `ki`    | block of PSUM_TILES rows `mi`       |
| (2)   | `ni` over N/n                       | `ni` over N/n                       |
| (1)   | `s` over the block: `ki = blk + s`  | `s` over the block: `mi = blk + s`  |

One iteration of the innermost loop is a **tile step**. It multiplies input
tile (mi, ni) by weight tile (ni, ki) and adds the product to the partial sums
of output tile (mi, ki), which live in on-chip slot `s`.

- **Loop (1): temporal reuse.** In IS-OS the input tile (mi, ni) stays put
  while PSUM_TILES weight tiles pass it. In WS-OS the weight tile (ni, ki)
  stays put while PSUM_TILES input tiles pass it.
- **Loop (2): spatial reuse of partial sums.** The PSUM_TILES output tiles of
  the block stay in their slots while N is walked. On the last `ni` each tile
  is final and is written out.
- **Loops (3) and (4)** move on to the next block and then to the next row
  (IS-OS) or column (WS-OS).

If the chunked dimension (K/k in IS-OS, M/m in WS-OS) is not a multiple of
PSUM_TILES, the last block of each pass is shorter.

The scheduler does not hard-code which tile is reused. For every step it
compares the input tile and the weight tile with those of the previous step.
It asks for a fetch only when a tile differs. This also catches reuse across
loop boundaries: with a single tile along N, for instance, the input tile of
an IS-OS row is fetched only once.

## External memory traffic

All counts below are in elements. The factors on the left are
the number of times each matrix is read.

IS-OS:

- input: ceil(K / (k·PSUM_TILES)) x MN
- weights: (M/m) x NK
- outputs: MK, written once

WS-OS:

- weights: ceil(M / (m·PSUM_TILES)) x NK
- input: (K/k) x MN
- outputs: MK, written once

Partial sums are never read back. These formulas assume N > n. The
testbenches check the read and write counts against them exactly.

The usual summary of IS-OS and WS-OS lists the stationary matrix as read
exactly once (MN or NK). That holds only when the on-chip partial-sum store
spans the whole of K (IS-OS) or M (WS-OS). With the default of 4 tiles the
stationary matrix is read once per block instead.

Example: the 1024 x 1024 projection for 120 tokens (IS-OS) reads 19.7 M
elements and writes 0.12 M. The untiled product would need 3·MNK = 377 M. The
engine therefore cuts that traffic by about 95 %. Raising PSUM_TILES raises
the reduction further, at a cost of 2 Kbit of registers per tile.

## Hardware organisation

```
            dim_m, dim_k                 dim_m/n/k >> log2(TILE)
                 |                                |
         tas_mode_select  --mode-->  tas_tile_scheduler
          (M < K ?)                        | tile steps (valid/ready)
                                           v
   external  <== single port ==>     tas_controller
   memory        req/we/addr               | strobes, indices
       | rdata                  +----------+---------------+
       +--> tas_tile_buffer (IF) --column l-->+            |
       +--> tas_tile_buffer (WP) --row l----->tas_pe_array |
                                              (TILE x TILE MACs)
                                                   | acc  ^ psum / 0
                                                   v      |
                                            tas_psum_buffer (PSUM_TILES tiles)
                                                   | row r
       external memory <== wdata ==================+
```

- **`tas_pkg`** holds the shared types: the scheme enum `tas_mode_e` and the
  tile-step struct `tas_step_t`. It also holds the default sizes.
- **`tas_mode_select`** is the M < K comparator. A tie goes to WS-OS.
- **`tas_tile_scheduler`** is a single nest of four counters. The mode only
  decides which counters drive `mi` and which drive `ki`. It presents one
  step at a time with valid/ready. A step carries:
  - the tile indices;
  - the slot number;
  - `first_n` and `last_n`;
  - the fetch flags `new_if` and `new_wp`.
- **`tas_controller`** is an eight-state FSM that runs one step.
- **`tas_tile_buffer`** holds one operand tile. There are two instances:
  - The input (IF) buffer is read one column per cycle.
  - The weight (WP) buffer is read one row per cycle.
- **`tas_pe_array`** is TILE x TILE processing elements, each with its own
  accumulator. In MAC cycle l it adds IF[i][l] · WP[l][j] into PE(i, j). So a
  tile product takes TILE cycles.
- **`tas_psum_buffer`** has PSUM_TILES slots of TILE x TILE accumulators. A
  whole tile is written or read in one cycle. A single row can be read for
  write-back.
- **`tas_accelerator`** is the top. It derives tile counts from the element
  sizes, instantiates and wires the blocks above, and reports busy/done.

## A tile step, cycle by cycle

For each step the controller walks these phases in order:

1. **IDLE.** Take the step from the scheduler.
2. **FETCH_IF.** Only if `new_if`. Issue TILE row reads and write the
   returning words into IF rows 0..TILE-1.
3. **FETCH_WP.** Only if `new_wp`. The same for the weight tile.
4. **LOAD.** Load the PE accumulators from the step's slot. On the first step
   along N (`first_n`) they are loaded with zero instead.
5. **MAC** for TILE cycles. Cycle l uses IF column l and WP row l.
6. **STORE.** Write the accumulators back to the slot.
7. **WB.** Only if `last_n`. Write the TILE rows of the slot to external
   memory.
8. **ACK.** Raise `step_ready` to the scheduler.

A step that needs no memory traffic takes TILE + 3 cycles from `step_valid`
to `step_ready`.

The phases do not overlap: there is no double buffering and no prefetch of
the next tile. In the 1024 x 1024 IS-OS run a step averages about 27 cycles,
so the PE array is busy about 30 % of the time. Overlapping fetch and compute
would change the cycle count, but not the amount of memory traffic.

The memory port is shared by reads and writes, like a DRAM interface. A write
is issued only once every outstanding read has returned. An assertion in the
controller checks this rule, and the testbench memory model counts any
violation.

## Interface

`tas_accelerator` has these parameters:

| parameter    | default | meaning                                         |
|--------------|---------|-------------------------------------------------|
| `TILE`       | 8       | tile edge m = n = k; PE array is TILE x TILE; power of two |
| `PSUM_TILES` | 4       | on-chip output tiles (k'/k in IS-OS, m'/m in WS-OS) |
| `DATA_W`     | 8       | signed operand width                            |
| `ACC_W`      | 32      | accumulator and output width                    |
| `ADDR_W`     | 32      | external word address width                     |

Sizes and tile indices are 16 bits (`tas_pkg::DIM_W`).

To start a job:

1. Put the sizes on `dim_m`, `dim_n` and `dim_k`. They are in elements,
   non-zero, and multiples of TILE; pad the token count if needed.
2. Put the word addresses on `if_base`, `wp_base` and `out_base`.
3. Pulse `start` while `busy` is low.

`mode` shows the scheme that was chosen. `done` pulses once the last output
word has been accepted by the memory. Keep the inputs stable while `busy` is
high.

Memory layout: one word is TILE consecutive elements of a matrix row, and
matrices are stored row-major.

| matrix  | address of row r, word c    | element j of a word is at bits |
|---------|-----------------------------|--------------------------------|
| input   | `if_base + r*(N/TILE) + c`  | `[j*DATA_W +: DATA_W]`         |
| weights | `wp_base + r*(K/TILE) + c`  | `[j*DATA_W +: DATA_W]`         |
| outputs | `out_base + r*(K/TILE) + c` | `[j*ACC_W +: ACC_W]`           |

The memory port signals:

- **`mem_req`, `mem_we`, `mem_addr`, `mem_wdata`:** a request. It is accepted
  in a cycle where `mem_ready` is also high.
- **`mem_rdata`, `mem_rvalid`:** read data. They come back in request order,
  after any latency.

## What comes from the scheme and what is this design's own

These parts follow the published TAS scheme:

- the M < K selection rule, with the tie going to WS-OS;
- both four-level loop orders;
- keeping PSUM_TILES output tiles on chip until N is done;
- never reading partial sums back;
- the 8 x 8 tile and PE array (8 x 8 and 16 x 16 are the sizes it names).

The scheme gives no hardware beyond that. These are choices made here:

- the number of on-chip partial-sum tiles (4);
- operand and accumulator widths;
- the PE organisation: rank-1 updates with output-stationary accumulators;
- register-array buffers;
- sequential fetch, compute and write-back;
- the memory port, word layout and job interface;
- shortening the last block when the chunked dimension is not a multiple of
  PSUM_TILES;
- detecting tile reuse by comparison with the previous step.

The scheme's own summary lists the stationary matrix as read once. As
explained above, this design reads it once per block. To match that summary,
size PSUM_TILES to K/k (IS-OS) or M/m (WS-OS).

## Workload sizes

The engine only ever holds two operand tiles and PSUM_TILES output tiles. So
any matrix size fits as long as:

- each dimension is at most 65 535, padded to a multiple of 8;
- the matrices fit in the 32-bit word address space.

| workload (projection)                     | M x N x K            | scheme | simulated |
|-------------------------------------------|----------------------|--------|-----------|
| Wav2Vec2.0-large, 115 tokens              | 120 x 1024 x 1024    | IS-OS  | full      |
| Wav2Vec2.0-large, 384 tokens              | 384 x 1024 x 1024    | IS-OS  | full      |
| Wav2Vec2.0-large, 1565 tokens             | 1568 x 1024 x 1024   | WS-OS  | full      |
| Wav2Vec2.0-large, 15000 tokens            | 15000 x 1024 x 64    | WS-OS  | 64-column slice |
| BERT-Base, 512 tokens                     | 512 x 768 x 768      | IS-OS  | full      |
| BERT-Base, 3072 tokens                    | 3072 x 768 x 768     | WS-OS  | 64-column slice |
| GPT-3 feed-forward, 2048 tokens           | 2048 x 12288 x 49152 | IS-OS  | no        |

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=F` at the end.

| testbench                | what it checks |
|--------------------------|----------------|
| `tb_tas_mode_select`     | The decision on the four speech token counts, on the tie, and on 2000 random sizes. |
| `tb_tas_tile_scheduler`  | The step stream against the loop nests written out as plain for-loops. Covers short blocks, random back-pressure, one step per cycle under full throughput, and zero sizes. |
| `tb_tas_tile_buffer`     | Row and column read-back. |
| `tb_tas_pe_array`        | psum + A x B in exactly TILE MAC cycles, with a stall cycle in the middle. |
| `tb_tas_psum_buffer`     | Slot writes, tile reads and row reads. |
| `tb_tas_controller`      | Exact read and write address sequences for every fetch and write-back combination, control strobes, and the TILE + 3 cycle compute-only step. Uses a stalling memory. |
| `tb_tas_accelerator`     | Six end-to-end jobs at default parameters, with a memory that stalls 15 % of the time. Details below. |
| `tb_tas_projection_workloads` | The workloads marked as simulated in the table above, about 190 M cycles and a little over 2 minutes. Details below. |

`tb_tas_accelerator` checks:

- every output element;
- the chosen scheme;
- exact read and write counts;
- no write during an outstanding read.

It also counts that each mechanism happened at least once: both schemes, the
M = K tie, input reuse, weight reuse, a short block, memory stalls and
write-back.

`tb_tas_projection_workloads` checks the scheme, the exact traffic counts and 512
sampled outputs per job.

`tb/tas_ext_mem_model.sv` is a behavioural memory used by the testbenches. It
is sparse, has a fixed latency and stalls at random when asked to. It is not
part of the design.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tas_pkg.sv \
          tb/tb_tas_accelerator.sv --top-module tb_tas_accelerator -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. Verilator finds the modules it
needs in `rtl/` and `tb/` by file name. Parameters can be changed on the
instances in the testbenches. The unit testbenches already do this, for
example PSUM_TILES = 3 in the scheduler test.
