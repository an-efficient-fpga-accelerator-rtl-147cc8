# A matching-based accelerator for submanifold sparse 3D convolution

Voxelised point clouds are almost entirely empty. In the 192×192×192 grids
used for segmentation, fewer than one voxel in a hundred is occupied. A
*submanifold* sparse convolution (Sub-Conv) computes an output only where
the input is nonzero, and it uses only the nonzero neighbours of that voxel.
Dense convolution hardware wastes nearly all of its work on such data.

This RTL finds the useful products first and then computes only those.
For every nonzero voxel it gathers its nonzero neighbours in the 3×3×3
window, together with the kernel weights at those positions. The result is
a *match group*: the list of (activation, weight) pairs whose products sum
to that voxel's output. Each pair is a *match*.

A dense multiply-accumulate array then consumes the matches one per cycle.
It works on 16 input channels × 16 output channels, so it does 256 MACs per
match.

Two ideas make the gathering cheap:

* **Tile-level zero removal.** The grid is cut into 8×8×8 tiles, and a tile
  with no occupied voxel is skipped outright. In the datasets this
  accelerator targets, only about 0.3 % of the tiles survive.
* **Mask-driven addressing.** Inside a tile, a 1-bit occupancy mask is
  stored next to a compacted list of nonzero activations. Running counts of
  mask bits ("state indices") turn the mask directly into addresses in the
  compacted list, so no hash table or coordinate search is needed.

## Block structure

```
            load ports                                      read port
  mask ─────┬──────────────────────────────┐                   ▲
  act  ───┐ │                              │                   │
  wgt  ─┐ │ │   ┌──────────── sdmu ─────────────────────┐  output_buffer
        │ │ │   │ mask_buffer ─ mask_judger ─┐          │        ▲
        │ │ └──►│                            ▼          │        │
        │ └────►│ activation_buffer ◄── decoder ───┐    │  computing_core
        └──────►│ weight_buffer ◄────────┘  │      │    │  (computing_array
                │        │                  ▼      │    │   → accumulator)
                │        └──────────► fifo_group   │    │        ▲
                │                     (9 FIFOs)    ▼    │        │
                │                        └──► match_mux ├────────┘
                └───────────────────────────────────────┘
  tile_zero_detector ──► main_controller ──► sdmu start / cc drain
```

| module | role |
|---|---|
| `esca_top` | the whole on-chip design: load ports, controller, SDMU, computing core, output buffer |
| `main_controller` | skips empty tiles; runs one pass per channel-group pair |
| `tile_zero_detector` | flags whether the tile's interior holds any nonzero voxel |
| `sdmu` | sparse data matching unit: buffers, decoder, FIFO group, mux |
| `mask_buffer` | the tile's occupancy mask, one word per z-plane |
| `mask_judger` | assembles the 27 mask bits of a window and judges its centre |
| `decoder` | walks the windows, runs the three-step pipeline, issues fetches |
| `line_base_table` | finds where each mask line starts in its activation bank |
| `state_index_generator` | running counts A and B per column |
| `address_generator` | turns (A, B) and the window bits into bank addresses |
| `activation_buffer` | compacted nonzero activations, 9 banks plus a crossbar |
| `weight_buffer` | 16×16 weight blocks, 9 banks (one per kernel column) |
| `fifo_group` | 9 FIFOs of matches, one per kernel column (`sync_fifo` each) |
| `match_mux` | sends one match per cycle to the core, group by group |
| `computing_core` | `computing_array` (16 `computing_unit`s) and `accumulator` |
| `output_buffer` | 32-bit sums per output voxel and output-channel group |

The shared constants live in `esca_pkg`:

| constant | value |
|---|---|
| `K` | 3 |
| `TILE_N`, `TILE_M`, `TILE_L` | 8 |
| `IC_PAR`, `OC_PAR` | 16 |
| `ACT_W` | 16 |
| `WGT_W` | 8 |
| `ACC_W` | 32 |
| `MAX_ICG`, `MAX_OCG` | 8, so up to 128 input and 128 output channels |

## Tile storage

### The halo

A tile is stored with a one-voxel border taken from its neighbours.
Internally the tile is therefore 10×10×10 (`XD = YD = ZD = N+2`). Windows
centred on the tile's edge see their true neighbours. Outputs are produced
only for the 8×8×8 interior, and halo voxels never become window centres.
The load side must fill the halo from the adjacent tiles, or leave it zero
at the grid boundary.

### The mask

The mask is held as `ZD` planes of `XD·YD` bits. The bit for voxel
(x, y, z) is bit `x·YD + y` of plane z.

### Lines and columns

A *line* is the run of voxels (x, y, 0..ZD−1) along z. The 3×3×3 window
around a centre (x, y, z) cuts through nine lines (x+dx−1, y+dy−1). These
are the window's *columns*, numbered c = dx·3 + dy. In every column the
window covers the three depths z−1, z, z+1, called window rows r = 0, 1, 2.

### Activation banking

The nonzero activations are stored compacted, line by line. Line (x, y) goes
to bank `(x mod 3)·3 + (y mod 3)`, and within a bank the lines follow in
raster order. Within a line, the nonzero voxels are stored in increasing z.

Any nine lines around a centre have nine different (x mod 3, y mod 3) pairs,
so the nine columns of a window always read nine different banks in the
same cycle. A crossbar routes column c to its bank.

Each entry holds the 16 channels of one input-channel group. Address
`i·MAX_ICG + g` holds activation number i of the bank for channel group g.

A bank must hold up to 16 lines × 10 voxels = 160 activations per channel
group. The default depth is therefore 1280 entries of 256 bits per bank.

### Weights

Weights are stored per kernel column. Bank c holds, for each depth tap dz,
each input group g and each output group h, one 16×16 block at address
`(dz·MAX_ICG + g)·MAX_OCG + h`. Weight (output channel m, input channel n)
sits at bits `[(m·16 + n)·8 +: 8]`.

Because bank and column coincide, a match's weight is read in the same cycle
as its activation, using only the column and the window row. No separate
weight addressing is needed.

## The matching pipeline

This is the heart of the design. It lives in `decoder`, `mask_judger`,
`state_index_generator` and `address_generator`.

### Traversal

Every interior voxel is the centre of one window (a "sparse receptive
field", SRF), visited in the order x outer, y, z inner. Consecutive windows
of one line therefore slide down all nine columns by one voxel.

### Three steps per window

Each window passes three steps, and each step takes K = 3 cycles:

1. **Read and judge.** The three mask planes z−1, z, z+1 are read, one per
   cycle. The judger keeps the 3 bits of each of the 9 columns. The window is
   *active* if its centre bit is 1.
2. **State index.** For each column, two counts are updated:
   * A is the running count of ones in the column's line, offset by the
     line's start address in its bank. At the first window of a line, A is
     loaded with `base + popcount(window bits)`. After that, A grows by the
     window's leading (deepest) bit each time the window slides.
   * B is the number of ones inside the window if the window is active, and
     0 otherwise.

   So (A−B, A) is the half-open address range of the window's activations
   in that column's bank.
3. **Fetch.** Only for active windows. In cycle r of the step, each column
   whose window bit r is 1 reads address `(A−B) + (ones of the window below
   row r)` in its activation bank. It also reads weight tap (column, dz = r).
   The pair goes into the column's FIFO.

The three steps of successive windows overlap, so one window leaves the
pipeline every 3 cycles. A non-active window simply leaves no fetch behind.
A whole pass over the tile therefore takes:

    (ZD + XD·YD + 1)        line-base pre-pass, 111 cycles at the default size
  + K·(N·M·L + 2)           window pipeline, 1542 cycles at the default size
  + stall cycles + drain of the FIFOs and the core

### Line bases

Before the walk, `line_base_table` computes each line's start address in its
bank. It reads the 10 planes, counts the ones of all 100 lines in parallel,
and then assigns start addresses one line per cycle from a running counter
per bank.

### Stall

At the first cycle of a fetch step, the pipeline holds if either:

* some column's FIFO has fewer than B+1 free entries, or
* the descriptor queue is full.

The "+1" covers a write still in flight. The pipeline never drops or splits
a match group.

### Descriptors

For each active window, the decoder pushes a descriptor: the nine B counts
and the output index, which is the window's rank among active windows. This
descriptor is what later lets the mux know where a match group ends.

## From FIFOs to outputs

`match_mux` takes one descriptor and pops that group's matches column by
column, lowest column first. It sends one match per cycle, marking the first
and last match of the group. Loading a descriptor costs one idle cycle.

The computing array multiplies the 16 activations by the 16×16 weight block.
Every activation is broadcast to all 16 units, and unit m sums its 16
products in an adder tree. The sum is registered.

The accumulator loads on `first`, adds on later matches, and after `last`
emits the 16 sums of the output voxel. The core's latency is 2 cycles from
match to result.

The output buffer stores the sums at `out_idx·MAX_OCG + ocg`. Outputs are
packed in window order (x, y, z raster over the interior), for active
windows only. They are the next layer's nonzero activations in raster
order, and the load side regroups them into lines and banks for that layer.

### Channel groups

Layers wider than 16 channels run as several passes over the tile:

* output groups form the outer loop and input groups the inner loop;
* each pass handles one (input group, output group) pair;
* passes after the first for the same output group add into the output
  buffer rather than overwrite it.

The main controller starts each pass only after both the SDMU and the core
have drained.

## Rates

Peak compute is 256 MACs per cycle, reached whenever the core receives a
match every cycle. The decoder visits every window of the tile, active or
not, at one window per 3 cycles, so a pass costs at least 3·512 cycles. The
core needs one cycle per match. The core therefore becomes the bottleneck
only when a tile holds more than about three matches per window, which means
a densely occupied tile. Below that, the FIFOs absorb bursts and the walk
sets the time.

Examples. One default-size tile at about 8 % occupancy with 2×2 channel
groups (four passes) took 6641 cycles in simulation. It produced 332 matches
per pass and never stalled. Tiles crossed by a thin surface, typical of
object boundaries, gave 53 to 102 outputs and about 1000 matches each. They
took 1656 to 1706 cycles per tile with one channel group. A fully sparse
tile finishes within 3 cycles of `start`.

Default buffer sizes:

| buffer | size |
|---|---|
| activations | 9 × 1280 × 256 b ≈ 2.9 Mb |
| weights | 9 × 192 × 2048 b ≈ 3.5 Mb |
| outputs | 4096 × 512 b ≈ 2.1 Mb |
| FIFOs | 9 × 8 × 2304 b |

## Where this design departs from, or fills in, the published description

* **Step timing and traversal order.** The published pipeline figure shows
  three overlapped steps on a time axis marked 3, 6, 9. This design takes
  that as K cycles per step. The traversal order (z innermost) is this
  design's choice.
* **Addressing is this design's own.** The original names the state index
  (A, B) and the address fragment (A, A−B), but not how the nine columns
  reach one buffer in parallel. The following are all added here:
  * the halo;
  * the mod-3 line banking;
  * the line-base pre-pass;
  * the use of A as an absolute bank address.

  The worked 2D example of the state index is reproduced exactly by
  `tb_state_index_generator` and `tb_address_generator` when A starts from 0.
* **Channel loops.** The published loop nest places the input- and
  output-channel loops inside the loop over matches. Here they sit outside
  the whole tile pass, and the output buffer adds the input groups. The
  arithmetic is the same. The cost is that the mask walk repeats once per
  channel-group pair.
* **Where the selection lives.** The published text places the match
  selection "in the decoder's controller". Here it is the `match_mux`
  controller, driven by descriptors that the decoder pushes.
* **Computing unit width.** The published text says at one point that a
  unit sums "n" input channels, and elsewhere n+1. This design follows n+1
  (16 per unit), as the unit's drawing shows.
* **Output format.** Outputs are raw 32-bit sums. No requantisation, bias
  or activation function is applied, since none is described.
* **Not built.**
  * The DRAM and the bus to it. Their traffic is the top's load and read
    ports, and the order of those ports is up to the system around it.
  * Cutting the grid into tiles and filling the halos, which is expected
    off-chip.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
drives random stimulus (`$urandom`), compares the module's outputs against
an independent model, has a watchdog, and ends by printing
`TB_RESULT checks=… failures=…`.

`tb_esca_top` runs the whole design on 4×4×4 tiles with 4-channel groups. It
checks every output against a direct convolution of the tile and checks the
cycle count. Its test tiles are:

* a dense tile, which fills the FIFOs and makes the fetch stall;
* a tile with an empty interior, which exercises the skip;
* a sparse tile with 2×2 channel groups, which exercises the accumulating
  passes.

It counts four mechanisms (stalls, skipped windows, skipped tiles and
accumulating passes) and counts a failure for any that never happened.

`tb_esca_workload` streams six default-size tiles: three surface-shaped tiles
alternating with fully sparse ones.

`tb_esca_tile_sizes` builds the design for 12×12×12 and 16×16×16 tiles,
at 4-channel groups, and checks one surface tile on each build.
Simulated cycle counts:

| tile | cycles |
|---|---|
| 12×12×12 | 5404 |
| 16×16×16 | 12640 |

The cost of the window walk grows with the tile volume.

`tb_esca_full` runs one complete 8×8×8 tile at every default parameter. The
tile has 32 input and 32 output channels, so four passes. The shared
checking code is in `tb/esca_tb_body.svh`.

To run a testbench with Verilator 5:

    verilator --binary --assert -Irtl -Itb -y rtl -y tb --top-module tb_esca_top \
        rtl/esca_pkg.sv tb/tb_esca_top.sv
    ./obj_dir/Vtb_esca_top

Replace the top-module name and file to run another testbench. The
full-size build takes about a minute to compile.

Three assertions check the design's internal rules:

* `sync_fifo` checks that nothing is pushed into a full FIFO or popped from
  an empty one.
* `decoder` checks that a fetch is issued only for a column whose B is
  nonzero.
* `match_mux` checks that every descriptor holds at least one match.

Because the assertions are disabled during reset, lint reports `rst_n` as
used both synchronously and asynchronously. That warning is expected.

## Changing the design

* **Tile size.** `N`, `M` and `L` on `esca_top` set the interior size. The
  buffer depths follow from them.
* **Kernel size.** `K` sets the kernel size. The banking uses K·K banks with
  mod-K line placement.
* **Channel limits.** `MAX_ICG` and `MAX_OCG` bound the channel count, and
  they set the depth of the weight and output buffers.
* **FIFO depth.** `FIFO_DEPTH` trades FIFO area against stalls. It must be
  at least K+1.
