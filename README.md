# A Jacobi-1D tile accelerator with a packed, compressed MARS memory layout

An FPGA accelerator that works tile by tile spends much of its time moving
data to and from off-chip memory. Two things waste that bandwidth. The data a
tile needs is usually scattered, so it arrives in many short bursts. And
custom number formats rarely match the bus: an 18-bit value sent over a
32-bit bus wastes 14 bits per transfer.

This design removes both costs for the one-dimensional Jacobi stencil.

- **One burst per producer.** Each tile stores its results off chip as a few
  *MARS* (maximal atomic irredundant sets): blocks of values that are always
  read together, and each value is stored once. A consumer tile
  gets everything it needs from a neighbour with one burst.
- **Packed and compressed.** Each MARS is written as a differential code
  packed bit after bit across bus words, with no padding, so both the bus
  width and the similarity of neighbouring values are used.
- **Markers to find each MARS.** Compressed blocks have unpredictable lengths.
  A small on-chip *marker cache* therefore records, per tile, the bit where
  each block starts. A consumer seeks straight to the block it wants.

The RTL is written in SystemVerilog-2017 and can be synthesised. All
geometry tables are computed at elaboration from the tile size.

## 1. Tiles and their MARS

Jacobi-1D updates `c[t][i] = 0.33 * (c[t-1][i-1] + c[t-1][i] + c[t-1][i+1])`.
The design uses diamond tiles. They are easiest to handle in the skewed
coordinates

    u = t + i,   v = t - i

In those coordinates a tile of size T covers a T×T square. Only the points
with local coordinates `(ul, vl)` of equal parity exist, so a tile holds
T²/2 points (2048 for T = 64).

A point `(ul, vl)` reads three points: `(ul-2, vl)`, `(ul-1, vl-1)` and
`(ul, vl-2)`. A tile therefore needs values from three producer tiles:

| producer | tile position | what the consumer reads from it |
|---|---|---|
| SW | (a-1, b) | all its points with `ul ∈ {T-2, T-1}` |
| S | (a-1, b-1) | the single top point `(T-1, T-1)` |
| SE | (a, b-1) | all its points with `vl ∈ {T-2, T-1}` |

The tile grid is indexed `(a, b)` along `u` and `v`.

A tile's output consists of 2T-2 values, split into four MARS:

| MARS | points | words |
|---|---|---|
| O1 | `vl ∈ {T-2, T-1}`, `ul = 0 … T-3` | T-2 |
| O2 | `(T-1, T-1)` | 1 |
| O3 | `(T-2, T-2)` | 1 |
| O4 | `ul ∈ {T-2, T-1}`, `vl = 0 … T-3` | T-2 |

Inside O1 values are ordered by increasing `ul`. Inside O4 they are ordered
by increasing `vl`.

The tile writes its MARS in the order **O1, O3, O2, O4**. With that order,
each consumer's needs are contiguous in memory:

- SW consumer: O3, O2, O4 (markers 0 to 3)
- S consumer: O2 (markers 1 to 2)
- SE consumer: O1, O3, O2 (tile start to marker 2)

Reading one tile therefore takes exactly three bursts, 2T+1 values in all.

In an uncompressed stream, O3, O2 and O4 start at words T-2, T-1 and T
(62, 63, 64 for T = 64).

`mars_pkg` holds all of this geometry as constant functions:

- `out_addr`: scratchpad address of output word k
- `in_addr`: scratchpad address of input word k
- `plain_marker`: uncompressed marker positions
- `dep_seg_len`: MARS lengths inside each burst

## 2. Off-chip layout

Every tile owns one block of 2T-2 bus words. Its address is

    mars_base + (a * grid_b + b) * (2T - 2)

That is the size of the tile's output stored uncompressed. A compressed tile
uses only the front of its block. `grid_b` is a run-time register, so this
address needs a real multiplier.

A tile is stored in one of two modes, chosen by the host:

- **Plain**: one value per bus word, in the low DATA_W bits. Tiles that the
  host CPU computes are written this way, because compression would slow the
  software down.
- **Compressed**: the code of section 3, packed as described in section 4.

The host sets the mode for the tile itself (`self_comp`) and for each of its
three producers (`dep_comp`).

## 3. The differential code (`diff_encoder`, `decompressor`)

Each MARS is coded on its own, so a reader can start at any MARS.

- **First value of a MARS:** sent raw, in DATA_W bits.
- **Every later value w:** the coder forms the difference with the previous
  value p, `D = (w - p) mod 2^N`. Here N is DATA_W. It then counts L, the
  number of leading bits of D equal to D's sign bit. For example,
  `D = 0…0101` has L = N-3, and `D = 1…1010` also has L = N-3.

With `K = N - L`, the code for D is, LSB first:

    [ K : H bits ] [ sign : 1 bit ] [ bits K-2 … 0 of D : K-1 bits ]

- H = ⌊1 + log₂ N⌋. That is 5 bits for N = 18.
- Bit K-1 of D is not sent. It is always the inverse of the sign.
- All bits above K-1 equal the sign.
- A difference of 0 or -1 gives K = 0 and costs only H+1 bits.
- The longest code is N + H - 1 bits: 22 bits for 18-bit data.

The decoder rebuilds D as follows, then adds D to the previous value:

- bits 0 … K-2 come from the code
- bit K-1 is `~sign`
- every bit above is `sign`

Worked example, with N = 18, p = 100, w = 93, so D = -7 = `1…11001`:

- L = 15 and K = 3.
- The code is K = `00011` (5 bits), sign `1`, then the low bits `01`.
- The bits leave LSB first: `1,1,0,0,0` then `1` then `1,0`. That is 8 bits
  in place of 18.

`diff_encoder` is purely combinational. `compressor` puts a register for the
previous value in front of it and accepts one value per cycle.

## 4. Bit packing and markers (`bit_packer`, `compressor`, `marker_cache`)

`bit_packer` appends codes to an accumulator of BUS_W + code_max bits. It
emits a bus word whenever BUS_W bits are ready.

- Codes are placed bit-contiguously, LSB first.
- One MARS follows the previous one without any gap.
- After the last code of the tile, the final partial word is zero-filled and
  flagged `last`.
- It accepts one code per cycle unless the output is stalled.

`compressor` watches the bit position while it packs. At the first value of
O3, O2 and O4, and at the end of the tile, it pulses a marker carrying the
current bit count. These four bit positions are stored in the tile's
marker-cache slot:

- The upper bits of a position are the **coarse** part: which bus word.
- The low log₂(BUS_W) bits are the **fine** part: which bit in that word.

The fourth entry, the end of the tile, gives the length of O4. That length is
needed to size the SW consumer's burst.

For plain tiles no markers are stored. Their positions are the constants
(T-2, T-1, T, 2T-2) × BUS_W.

`marker_cache` is a synchronous-read RAM of META_SIZE slots, with four
positions per slot:

- write: one cycle
- read: data appears the cycle after `rd_en`

The host decides which slot each tile uses. A slot must not be reused before
every consumer of that tile has run.

## 5. Reading a tile (`mars_reader`, `decompressor`, `mars_dispatch`)

For each producer in the order SW, S, SE, `mars_reader` does the following:

1. It reads the producer's marker slot (compressed) or takes the constants
   (plain).
2. It turns the first and end positions into a burst, running from the word
   that holds the first bit to the word that holds the last bit.
3. It issues a read request for that burst. At the same time it passes a
   *job* to the decompressor: the fine offset, the mode, and the lengths of
   the one or three MARS inside the burst.

Words come back from memory into a small FIFO. The decompressor then works
through the burst:

- It drops the first `fine` bits of the burst.
- It decodes exactly the values of the job. It restarts the difference chain
  at each MARS boundary.
- It throws away the rest of the burst. That is at most the tail of the last
  word, or one word that holds only padding.

Because of this, a burst may carry up to one partly used word at each end.
That is the only data read that is not needed.

`mars_dispatch` counts the decoded values. It writes value k to the
scratchpad address in entry k of a 2T+1-entry table, which is the unrolled
list of input positions. The table is a localparam built from `in_addr`.

## 6. Executing and writing (`jacobi_engine`, `mars_collect`, `mars_writer`)

**Scratchpad.** `tile_buffer` is the tile's scratchpad: (T+2)² cells of
DATA_W bits at address `(ul+2)(T+2) + (vl+2)`.

- The two extra rows and columns hold the input halo.
- Cells of the wrong parity are never used.
- It has one write port and three asynchronous read ports, so it maps to
  logic or distributed RAM rather than block RAM.
- Because the phases never overlap, this one buffer holds both the inputs
  and the computed points. An overlapped design would need separate input
  and output buffers.

**Engine.** `jacobi_engine` computes one point per cycle:

- loop order: `ul` outer, `vl` inner, step 2
- this order reads every operand after it has been written
- 0.33 is applied as `(sum × 21627) >>> 16` on signed DATA_W-bit values
- a T = 64 tile takes 2048 cycles plus one

**Collect and compress.** `mars_collect` walks the 2T-2-entry output table
(O1, O3, O2, O4) and feeds the compressor one value per cycle. It flags the
first value of each MARS and the last value of the tile.

**Write.** `mars_writer` collects the packed words in a FIFO big enough for
an uncompressed tile. A burst's length must be known before the request, and
the compressed length is only known at the end. When the last word is in,
the writer:

1. stores the four markers (compressed tiles only),
2. issues one write request of exactly the packed length at the tile's block
   address,
3. streams the words out.

## 7. The top: `mars_accel`

    host regs ──► mars_reader ──► rd_req_*            (memory)
                     │ job            rd_* ──► sync_fifo ──► decompressor ──► sync_fifo
                     ▼ marker_cache ◄────────────────────────┐                  │
                                                             │            mars_dispatch
                                                             │                  ▼
                                          jacobi_engine ◄──► tile_buffer ◄──────┘
                                                             │
                                 mars_collect ──► compressor ──► mars_writer ──► wr_req_*, wr_*

**Control.** A pulse on `start` runs one tile through READ, then EXEC, then
WRITE. `busy` is high meanwhile, and `done` pulses at the end. The host
registers must hold steady from `start` until `done`:

- `tile_a`, `tile_b`, `grid_b`, `mars_base`
- `self_comp`, `self_meta`
- `dep_comp[3]`, `dep_meta[3]`

**Cycle counters.** `read_cycles`, `exec_cycles` and `write_cycles` report
how many cycles each phase of the last tile took.

**Sequential phases.** The phases do not overlap. A consumer's read depends
on marker-cache entries that its producer's write updates. Overlapping the
read of tile i+1 with the write of tile i would need a guarantee that the
host orders tiles so that they never touch the same slot. This design does
not build that.

**Memory port.** Requests and data are separate, for read and for write:

- request channel: `*_req_valid/ready/addr/len`, with a word address and a
  length in words
- data channel: valid/ready and `last`

To attach an AXI master, add an adapter. It must split bursts longer than
256 beats.

**Measured at the defaults** (T = 64, 18-bit data, 32-bit bus), with the
end-to-end test's memory stalls:

- READ: about 140 to 175 cycles for 129 values
- EXEC: 2049 cycles
- WRITE: about 190 to 210 cycles for a compressed tile, about 290 for a plain
  tile

The test's smooth data compresses a 126-word tile to 47 to 58 words.

## 8. Parameters

| parameter | default | meaning |
|---|---|---|
| `TILE` | 64 | tile size T. All tables and the scratchpad follow from it. |
| `DATA_W` | 18 | width of one value (fixed point) |
| `BUS_W` | 32 | memory word width |
| `META_SIZE` | 256 | marker-cache slots |
| `FIFO_DEPTH` | 16 | read-side FIFOs |
| `ADDR_W`, `COORD_W` | 32, 16 | address and tile-coordinate widths |

An elaboration-time check requires `DATA_W + H - 1 <= BUS_W`, so that a
compressed tile never outgrows its block. DATA_W = 24 and 28 satisfy it on a
32-bit bus. 64-bit values need `BUS_W = 128`.

## 9. Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. For example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/mars_pkg.sv tb/tb_mars_accel.sv --top-module tb_mars_accel -Mdir obj -o sim
    ./obj/sim +verilator+rand+reset+2

The block tests work out their expected values independently of the RTL:

- a bit-serial packing reference
- a straight reading of the code definition
- shadow memories
- the 6×6 example tile, with its input and output points listed by (i, t)

**`tb_mars_accel`** runs the top at its default parameters on a 4×4 tile
grid.

- Tiles in row 0 and column 0 stand in for host-computed tiles. The test
  gives their points smooth random values and writes their outputs plain.
- The accelerator then runs the other nine tiles. Their outputs are a mix of
  compressed and plain.
- The memory model (`tb/mem_model.sv`) adds random stalls.
- After every tile the test decodes the tile's memory block with its own
  decoder. It compares every value with a global Jacobi model, and checks
  the burst length and the four marker positions.
- It fails if any of these events never happens: compressed and plain
  writes and reads, a non-zero fine offset, a discarded word at the end of a
  burst, zero and negative differences, and read and write stalls.

The whole run takes well under a second.

**`tb_mars_workloads`** repeats the same end-to-end check (harness
`tb/mars_workload_run.sv`) on re-parameterised copies of the top, all running
in parallel. Each copy uses a 3×3 grid.

| tile size | data width | bus width |
|---|---|---|
| 6×6 | 18 bits | 32 bits |
| 200×200 | 18 bits | 32 bits |
| 64×64 | 12 bits | 32 bits |
| 64×64 | 24 bits | 32 bits |
| 64×64 | 28 bits | 32 bits |

## 10. How far to trust it, and where it departs from the description

**What the tests cover.**

- Every block and the top pass their self-checks, with several random seeds
  and random power-up state.
- Each testbench was shown to fail against a deliberately broken copy of its
  block.

**The parts this design chose itself:**

- the order of values inside O1 and O4
- LSB-first bit order
- the tile-block address formula
- the engine's schedule
- the 0.33 coefficient. The published update formula reads 1/3, but the
  reference C code, which this follows, multiplies by 0.33.

**Departures and gaps:**

- **No macro-pipeline.** Read, execute and write are sequential (section 7).
- **A fourth marker.** Each slot stores the end of the tile as well as the
  three MARS starts, so the last MARS's length is known.
- **Memory interface.** It is simplified (no AXI, no 4 KiB or 256-beat
  splitting).
- **Only Jacobi-1D.** Jacobi-2D and Seidel-2D would need their own geometry
  tables and engines.
- **Fixed point only.** Floating-point data is not supported by the engine,
  although the code and packing work for any width.
- **Host side not included.** The software that computes partial tiles,
  converts between layouts and assigns marker slots is not part of the RTL.
  The testbench plays that role.
- **Other sizes need re-elaboration.** Tiles of size 6 or 200, and other
  data widths, need new `TILE` and `DATA_W` values. `tb_mars_workloads`
  checks those builds.
