# Tempus GEMM streaming engine — RTL

Tempus computes a large integer matrix product C = A x B on a compute block
of fixed size: 16 matrix-multiply kernels in 2 groups ("splits") of 8. The
matrix size never changes the hardware. Only the number of times the block is
run changes. A larger matrix is cut into fixed-size tiles. The tiles are
rearranged and replicated into streams, and the block runs one *graph
iteration* per pair of output tiles. Within a split, kernels pass partial sums
down a wide *cascade* chain, so that the reduction never goes back to memory.

The target system is an AI-Edge class SoC. In it, the kernels are vector
cores of an AI-engine array, and the data movement is programmable logic (PL)
between external DRAM and the array. This RTL writes every part of that data
path as synthesizable SystemVerilog, including a dedicated datapath that
stands in for each vector-core kernel. The host CPU, the network-on-chip and
the DRAM remain outside, as ports.

```
             row-major A, B (DRAM)                          row-major C (DRAM)
                    |                                              ^
              plio_tiler (TL_A, TL_B)                      plio_tiler (TL_DETILE)
                    v                                              |
        A image, B image (DRAM) --> dma_hls --> 8 A + 16 B streams | 2 C streams --> C image
                                                   |               ^
                                   +---------------v---------------+-------------+
                                   | aie_array                                   |
                                   |  A: axis_bcast x8  (one stream -> 2 splits) |
                                   |  B: pkt_switch x16 (header -> kernel)       |
                                   |  split 0: mmult_graph = 8 x mmult_core ---> C0
                                   |  split 1: mmult_graph = 8 x mmult_core ---> C1
                                   +---------------------------------------------+
```

## 1. Mapping a 3-D product onto a 2-D block

Names used throughout:

| name | meaning | default |
|---|---|---|
| `GEMM_A`, `GEMM_AB`, `GEMM_B` | M, K, N of C(MxN) = A(MxK) B(KxN) | 1024, 1024, 1024 |
| `DIM` | tile edge in M and N (`DIM_A = DIM_B = DIM`) | 64 |
| `SPLIT` | parallel kernel chains | 2 |
| `CASC_LN` | kernels per chain (cascade length) | 8 |
| `DIM_AB` | reduction slice per kernel = `GEMM_AB / CASC_LN` | 128 |
| `WRD_LN` | elements per 128-bit stream word = `128 / DATA_W` | 8 (INT16) |

The K dimension is spread along the cascade. Kernel k of a chain multiplies
the k-th `DIM_AB`-wide slice of an A row tile by the k-th slice of a B column
tile. It adds the partial sums from kernel k-1 and passes the result on. The
last kernel therefore emits a finished `DIM x DIM` tile of C. The two splits
work on two different C column tiles of the same row tile. This is why A can
be broadcast and B cannot.

One graph iteration produces `SPLIT` C tiles, so

    ITERS = GEMM_A * GEMM_B / (DIM * DIM * SPLIT)        (128 at the defaults)

The iterations are grouped into `SPLIT` *blocks*. Each block has
`RF_B = GEMM_A / (DIM*SPLIT)` row tiles and `RF_A = GEMM_B / (DIM*SPLIT)`
column tiles per split. Iteration n inside the run is decoded as

    n = (blk * RF_A + j) * RF_B + i
    row tile    = blk * RF_B + i
    column tile = s * RF_A + j        (for split s)

The streams must therefore *replicate* data:
- each A row tile of a block is sent once per column tile j, i.e. `RF_A` times;
- each B column tile is sent once for every row tile i of the block, i.e.
  `RF_B` times.

These replication factors are the whole trick that keeps the block fixed. The
price is that the stream images are larger than the matrices. At the defaults:
- the A image is 8x the size of A;
- the B image is 8x the size of B, plus packet headers.

Constraints (checked by elaboration-time assertions in the tiler and the kernel):
- `GEMM_A` and `GEMM_B` must be multiples of `DIM*SPLIT`;
- `GEMM_AB` must be a multiple of `4*CASC_LN`.

The tiler does not pad.

## 2. Stream formats and images

All streams are 128-bit words with a valid/ready handshake.

**Inside a tile.** A tile is cut into 4x4 *subtiles*. Subtiles are in
row-major order within the tile, and elements are row-major within a subtile.
One INT16 word holds two subtile rows; one subtile is 2 words.

**A stream c** (c = 0..7) carries, per iteration, the `DIM x DIM_AB` A tile
at (row tile, slice c): 1024 words at the defaults. The same stream feeds
cascade position c of both splits through `axis_bcast`.

**B stream (s, q)** carries, per iteration, one *packet* per kernel it serves.
A packet has:
- a header word, with `8'hA5` in bits [127:120] and the destination kernel
  (0..`CASC_LN/B_PORTS`-1) in bits [7:0];
- one `DIM_AB x DIM` B tile (1024 words).

With `B_PORTS = CASC_LN` (the default, one B stream per kernel) every packet
goes to destination 0, and the switch only checks the header. With fewer
ports, one stream is time-multiplexed over several kernels.

**C stream s** carries the C tile of split s as 4x4 subtiles in row-major
order. A subtile is one 512-bit cascade word: 16 lanes of 32 bits, lane
`r*4+c`, lowest lanes first. It leaves as four 128-bit words.

**Images in memory.** The data mover reads an image in address order and
hands word i to stream `i mod NUM_STREAMS`. The tiler therefore writes the
streams *interleaved*:
- A image word `x*8 + c` is word x of A stream c;
- B image word `x*16 + p` is word x of B stream p (p = s*B_PORTS + q);
- C image word w came from C stream `w mod 2`.

A consequence is that one slow stream stalls the distribution of all of
them. The 16-word FIFOs absorb the skew between kernels.

**Accumulation.** Products and sums are taken modulo 2^`ACC_W` with
`ACC_W = 2*DATA_W` (32 bits for INT16), with no shift or saturation. The
result matrix holds `ACC_W`-bit elements, 4 per word.

## 3. The kernel (`mmult_core`)

Each kernel holds two banks (ping/pong) of A and B tile memory. The next
iteration's tiles stream into one bank while the other is being multiplied.
At the defaults a bank pair is 2 x (64x128 + 128x64) x 16 bit = 64 KiB per
kernel, the size of one AI-engine tile's data memory.

The datapath does one 4x4x4 subtile product (64 multiply-adds) per clock,
with k innermost. One C subtile therefore takes `DIM_AB/4` clocks (32 at the
defaults), and an iteration takes `(DIM/4)^2 * DIM_AB/4` = 8192 clocks.

The pipeline is a synchronous buffer read followed by one multiply-accumulate
stage. When the last k step of a subtile completes, the kernel:
1. takes one cascade input word (the previous kernel's partial sums for the
   same subtile);
2. adds it;
3. offers the sum on its cascade output.

If either neighbour is not ready, the issue logic freezes. A stall in any
kernel therefore back-pressures the whole chain without losing a word. With
the chain running freely, every kernel issues once per clock (II = 1). The
tests count the steps to check this.

The first kernel of a chain (`HAS_CIN = 0`) adds zero. `mmult_graph` converts
the last kernel's cascade words into the C stream, 4 words each.

**Throughput limit.** A C subtile (4 words) is produced every 32 clocks.
C output is therefore never the limit at the defaults, although it is at the
small tile sizes used in some tests.

## 4. Switching (`axis_bcast`, `pkt_switch`)

`axis_bcast` forwards one word to all splits. Each receiver may accept in a
different clock: a per-receiver "taken" flag holds the word for the slower
one, and the source advances only when all have it.

`pkt_switch` is a two-state machine:
1. It reads a header word.
2. It steers exactly one tile's worth of words to that destination.

A header with a wrong marker or an out-of-range destination sets a sticky
`err` flag. The packet is then dropped whole, so the stream stays aligned.
The header costs one clock; body words pass through combinationally.

## 5. The data mover (`dma_hls`, `dma_rd_engine`, `axis_fifo`)

The data mover has three independent engines:
- **A reader:** reads the A image in bursts of up to 32 words, with up to 32
  bursts in flight, and distributes word i to A stream `i mod 8`.
- **B reader:** does the same for B, over the 16 B streams.
- **C writer:** interleaves the two C streams pairwise, word i from stream
  `i mod 2`, and writes them back in bursts.

Each stream passes through a 16-deep FIFO. A read beat is accepted only when
its FIFO has room, so back-pressure from a kernel stalls memory instead of
dropping data. The C writer does not wait for reading to finish, which keeps
the loop from deadlocking.

`done` is raised after the last C write response.

## 6. Tiling engine (`plio_tiler`)

The tiler makes one memory-to-memory pass per `start`. `mode` selects the
pass:

- `TL_A`: row-major A → A image.
- `TL_B`: row-major B → B image, headers included.
- `TL_DETILE`: C image → row-major C.

An address generator walks the output image word by word. For each output
word it computes which source rows it needs, and issues one single-beat read
per 4-element subtile row (none for a header). For each read it queues a
command: where the row goes within the output word, and where the word is
written. A packer consumes the commands in order, assembles the words and
writes them.

The pass is bound by its reads: about two reads per INT16 output word.

## 7. Top level (`tempus_top`)

A `start` pulse runs the phases in order:
1. `PH_TILE_A`
2. `PH_TILE_B`
3. `PH_COMPUTE` (data mover plus graph iterations)
4. `PH_DETILE`

`done` then pulses. `compute_cycles` records the length of the compute phase.
`iter_cnt` gives the iterations completed per split, and `pkt_err` reports a
malformed packet.

Six base addresses place the regions in memory:
- the row-major sources `a_src` and `b_src`;
- the three images `a_img`, `b_img` and `c_img`;
- the result `c_dst`.

All addresses are 128-bit word addresses.

Memory is reached through five simplified AXI4 masters:
- `tl_*`: tiler read and write;
- `da_*` and `db_*`: image reads;
- `dc_*`: C write.

These masters use word addresses and `len` = beats-1, with no id, size or
burst-type fields. An interconnect to the real NoC would add those.

**Measured at the defaults (1024^3 INT16)** in simulation, with a memory that
never stalls:
- 12.34 M clocks in total;
- of which 2.107 M clocks are the compute phase.

The compute phase is bound by the B image. It is read through one port at
one word per clock: 16 streams x 1025 words x 128 iterations = 2.099 M
words. The kernels themselves need only 8192 x 128 = 1.05 M clocks. The
tiling passes take the remaining ~10 M clocks.

## 8. Where this RTL departs from the source design

- **The kernel is not the vendor library kernel.** In the original system
  each kernel is a library matrix-multiply routine running on a vector core.
  Here it is a 64-MAC datapath with the same inputs and outputs and the same
  data order. Its timing (one subtile step per clock) is this design's own.
- **Reduction split.** `DIM_AB = GEMM_AB / CASC_LN`, so one iteration covers
  the whole K dimension. This follows the iteration-count formula. The prose
  description of the source design also speaks of processing K "through
  temporal iteration"; that is not done here.
- **Chosen details.** The packet header format, the image interleaving, the
  iteration order inside a block, the accumulator width and the wrap-around
  arithmetic are all chosen here.
- **Data-mover parameters.** The FIFO depth (16), burst length (32) and
  outstanding-burst count (32) are chosen here.
- **Tiling in the PL.** Tiling and de-tiling are separate PL passes through
  DRAM. The source design reports tiling as a separate overhead but does not
  describe its hardware.
- **One clock domain.** The original array runs in its own clock domain
  behind interface tiles; that crossing is not modelled.
- **Compile-time sizes.** The matrix size, `DIM` and `DATA_W` are
  elaboration-time parameters. Running another size means re-elaborating. The
  compute block (2 x 8 kernels, 26 streams) stays the same.
- **No padding.** Shapes with M or N below `DIM*SPLIT` (e.g. 8 x 1024 x 1024)
  would first have to be zero-padded in memory.
- **Smallest tile.** Each A and B tile must hold at least two 4x4 subtiles.
  The 8 x 32 x 8 attention head at `DIM` 4 on eight cascade kernels gives a
  4 x 4 slice per kernel, so it cannot be elaborated.

## 9. Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tempus_pkg.sv tb/<tb>.sv \
          --top-module <tb> -o sim && ./obj_dir/sim
```

| testbench | what it exercises |
|---|---|
| `tb_mmult_core` | one kernel, 8x16x8 tiles: every C element with random cascade input; one subtile per `DIM_AB/4` clocks; random stalls |
| `tb_mmult_graph` | a 3-kernel chain, the cascade sum, C stream order, iteration count |
| `tb_axis_bcast` | exactly-once delivery to stalling receivers; hold events; 1 word/clock |
| `tb_pkt_switch` | routing to 4 kernels, corrupted headers dropped and flagged; header costs 1 clock |
| `tb_aie_array` | 2 splits x 2 kernels with 2 packets per B stream; full C check |
| `tb_axis_fifo` | order, full/empty flags, occupancy, 1 word/clock |
| `tb_dma_hls` | modulo distribution, pairwise C collection, burst engine, FIFO back-pressure, 1 word/clock |
| `tb_plio_tiler` | all three passes against images built from the stream formats, with a stalling memory |
| `tb_tempus_top` | three complete runs, including the source design's 32x16x32 example on a 2x2 block, B packets shared by two kernels, a stalling memory, and INT32. It counts packet steering, broadcast holds, cascade stalls, load/compute overlap and FIFO-full back-pressure, and fails if any never happens |
| `tb_tempus_full` | 1024^3 INT16 at the default parameters: about 40 s of simulation |
| `tb_tempus_workloads` | evaluated shapes re-elaborated on the 2 x 8 block: 128^3 INT16 and 256^3 INT32 at `DIM` 64, and the 512 x 64 x 512 attention score matrix at `DIM` 128. The last one is paced by the C image write (8192 words per iteration), not by the kernels |

The testbenches use two behavioural helpers:
- `tb/axi_mem_model.sv` models external memory, with optional random stalls;
- `tb/tempus_harness.sv` runs one complete product on `tempus_top` and checks
  it.
