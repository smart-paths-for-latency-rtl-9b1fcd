# A ReRAM processing-in-memory CNN accelerator with SMART bypass paths

Resistive crossbars compute a dot product where the weights are stored: put
the input on the wordlines and each bitline current is the sum of
input × conductance over its column. One chip (a *node*) built from such
crossbars can hold all convolution layers of a large CNN at once, one layer
on each group of tiles, with pixels streaming from layer to layer. At that
point the cost is no longer the arithmetic but the movement of feature maps
between tiles. Every output pixel becomes packets that cross a 16 × 20 mesh.
This design makes those packets cheap with **SMART flow control**: a packet
claims a whole straight run of routers in advance and crosses them in one
clock, instead of being buffered hop by hop. On top of that, layers are
**pipelined**: a layer starts as soon as the part of the previous layer's
output that its first window needs has arrived. A layer also holds **one
image at a time**, so that several images of a batch can be in flight in
different layers.

The RTL here covers the whole node: the crossbar core with its analog front
end (as behavioural models), the tile, the SMART router, the mesh and the
inter-layer synchronisation.

## Hierarchy

```
node_top                     16 x 20 tiles + mesh, host configuration bus
 ├─ mesh_noc                 16 x 20 smart_router, neighbour wiring
 │   └─ smart_router         5 input FIFOs (flit_fifo), XY route, 4 x smart_bypass
 └─ tile (x320)              64 KB memory, 384-bit bus, sequencer
     ├─ core (x12)           8 crossbars, 8 ADCs, 4 shift&add, IR/OR
     │   ├─ reram_subarray   128 x 128 2-bit cells          (behavioural)
     │   ├─ sample_hold      holds 128 bitline values       (behavioural)
     │   ├─ adc              8-bit, one column per clock    (behavioural)
     │   ├─ core_shift_add   bit/slice weighting, bias removal
     │   └─ edram_buffer     output register
     ├─ edram_buffer         tile memory (4096 x 128 bit)
     ├─ tile_shift_add       sums partial sums of several crossbars
     ├─ sigmoid_unit (x2)    piecewise-linear sigmoid
     ├─ max_pool             running maximum of a 2 x 2 window
     └─ layer_sync           inter-layer / batch start condition
```

Shared types and constants are in `rtl/pim_pkg.sv`. All numbers are Q8.8
fixed point, 16 bits. Feature-map values are unsigned, because they are
sigmoid outputs. Weights are signed.

## The crossbar dot product

A cell stores 2 bits, so a 16-bit weight occupies 8 cells in 8 neighbouring
columns. Column `8j+k` holds bits `2k+1:2k` of weight j. A 128-column
crossbar therefore holds 16 weights per row, and 128 rows give 16 dot
products of length 128. The DACs are one bit wide, so the 16-bit input is
applied one bit per read, 16 reads in all. For input bit `t` the wordline of
row r is driven when bit t of input r is 1. Column c then yields the number
`S(t,c) = Σ_r bit_t(x_r) · cell(r,c)`.

The sample-and-hold captures all 128 column values at once. One 8-bit ADC
per crossbar then converts one column per clock, 128 clocks per input bit.
The clock of this design is that ADC sample clock.

Shift & add reassembles the result:
`psum_j = Σ_t Σ_k S(t, 8j+k) · 2^(2k+t)`.

**Signed weights.** Cells hold only non-negative values, so every weight is
stored with a bias, as `u = w + 2^15` (offset binary). The bias adds
`2^15 · Σ_r bit_t(x_r)` to each product sum. That amount is the number of
driven wordlines, which the core counts anyway when it drives them. Shift &
add removes it: with the slice-0 code of each bit it subtracts
`popcount_t << (15+t)`. The paper only says signed weights need "a trick"
inside one array. This offset scheme is this design's own choice.

**ADC range.** A 128-row column of 2-bit cells can sum to 384, which does not
fit in 8 bits. The paper does not say how it avoids this. The model
saturates at 255. Results are exact only while each column sum stays at or
below 255, which the testbenches respect.

**Timing of one core operation.** The 16 bit-reads are overlapped with
conversion. Bit t+1 is read while bit t is being converted, and
sample-and-hold takes the new values when the ADC finishes column 127.
`done` pulses 2181 clocks after `start`:
- 16 × 128 conversions;
- the pipeline fill;
- 128 clocks to write the 128 40-bit partial sums (8 crossbars × 16) into
  the output register.

The input register is stored as 16 bit-planes of 1024 bits, so that one read
drives all 8 crossbars' wordlines.

## The tile: one output pixel per operation

A layer whose kernel has `K` rows (e.g. 3·3·Cin) and `M` output channels
uses ⌈K/128⌉ × ⌈M/16⌉ crossbars. Inside a tile the crossbars are numbered
`q = core·8 + sub`, and *group* g of G consecutive slices produces outputs
`16g … 16g+15`. One tile operation produces one output pixel:

1. **LOAD**: each core's 1024-word input register is filled from tile
   memory. Starting at row `in_base[core] + p·stride` (p counts pixels), it
   moves 3 rows of 128 bits per clock over the 384-bit bus: 43 beats per
   core.
2. **COMPUTE**: all cores run one crossbar operation in parallel.
3. **REDUCE**: for each output, the tile shift & add sums the G partial
   sums of its group. The sum is scaled to Q8.8 (`>>> 8`, saturated to 16
   bits) and passed through a sigmoid unit (even outputs on unit 0, odd on
   unit 1). With pooling on, the result then goes through the max-pool unit
   against the running maximum held in the 2 KB output register.
4. **SEND**: the outputs are sent as 128-bit flits of 8 values each.
   - With pooling off, this happens after every pixel.
   - With pooling on, it happens after every fourth pixel. The four pixels of
     a 2 × 2 window must therefore be computed one after another; this design
     assumes that order.
   - Flit i of output pixel o goes to row `dest_row + o·⌈outputs/8⌉ + i` of
     the destination tile's memory.
   - Flits that arrive from the router are written straight into memory.

The sigmoid is the PLAN approximation: `y = |x|/4 + 0.5` below 1,
`|x|/8 + 0.625` below 2.375, `|x|/32 + 0.84375` below 5, else 1, mirrored
for negative x. Including Q8.8 rounding it stays within 0.025 of the true
sigmoid.

### Configuration interface

The host writes through `cfg_valid, cfg_tile, cfg_op, cfg_addr, cfg_data`:

| `cfg_op` | `cfg_addr` | effect |
|---|---|---|
| `CFG_REG` | 0–11 | `in_base[core]` (memory row) |
| | 16 | `{n_groups[14:8], G[6:0]}` |
| | 17 | `{auto[2], send[1], pool[0]}` |
| | 18 | destination `{row[21:10], y[9:5], x[4:0]}` |
| | 19 | `stride` in rows per pixel |
| | 20 | layer geometry `{l[23:20], h[19:10], w[9:0]}` |
| | 21 | `n`, values per pixel arriving from the previous layer |
| | 22 | clear pixel / window / image counters |
| `CFG_PROG` | `{core[13:10], sub[9:7], row[6:0]}` | one crossbar row: 128 cells × 2 bits of offset-binary weights |
| `CFG_MEM` | memory row | `cfg_data[127:0]` into tile memory |
| `CFG_START` | – | start one operation (manual mode) |

`rd_tile`/`rd_addr` read a tile's output register; data appears two clocks
later on `rd_data`. `tile_busy`/`tile_done` report each tile.

## Inter-layer and batch pipelining (`layer_sync`)

Take a layer with an l × l kernel, an input of width w, and n values per
input pixel. It moves across the image row by row, so its first window is
complete once `cyclesWait = w·(l−1) + l` input pixels, that is
`valuesWait = cyclesWait · n` values, have arrived. Each later pixel needs n
more values. In auto mode the tile counts the values (8 per flit) that land
in its memory and starts a pixel as soon as `layer_sync` allows it.

For batches, `layer_sync` works on one image at a time. After the `w·h`-th
pixel of an image has started, it removes that image's values from the count
and applies the same rule to the next image. Values of the next image that
arrive early are kept. Every clock spent waiting is reported (`ev_wait`).

Simplification: the rule decides *when* a pixel may start. *Which* memory
rows it reads is fixed by `in_base + p·stride`. Building the window of a
3 × 3 convolution (im2col) from the received rows is left to how the host
lays out memory and sets the stride. The paper does not describe that step.

## SMART flow control

Packets are single 128-bit flits. The header carries the destination x, y
(5 bits each) and a 12-bit memory row. Routing is XY: first along x, then
along y. A flit stops at its turn router and at its destination
(*SMART-1D*).

Every clock, each router's switch allocator picks one buffered flit per
output (round robin). For that flit it sends a **setup request (SSR)** along
the output link: the number of straight hops it wants, capped at
`HPC_MAX = 14`. Each link carries a vector of SSRs, where entry k comes from
the router k+1 hops upstream. For each direction, `smart_bypass` decides
everything in the same clock:

- **Nearest SSR wins.** Among the SSRs whose hop count reaches this router,
  the nearest sender's flit is the one that arrives.
- **Local beats bypass.** If this router's own allocator also wants that
  output, the arriving flit must stop here and is buffered. The local flit
  goes out.
- Otherwise a flit whose hop count goes beyond this router **bypasses** it
  through a multiplexer, without being buffered.
- The outgoing SSR vector carries this router's own SSR in entry 0. Entries
  shift by one, but only the SSR of a flit that bypasses is passed on. The
  SSR of a flit that stops is dropped, so routers further on do not reserve
  for it.
- An **accept** signal runs back along the path. A bypassing router passes
  its downstream answer on, and the stopping router answers with whether its
  buffer has room. The sender dequeues only when accepted, so no flit is
  lost.

A flit therefore covers up to 14 hops per clock, and the data path is
combinational across the bypassed routers. In the 8 × 8 testbench a lone
straight-line flit is delivered 2 clocks after injection, and one with a
turn after 3.

`mesh_noc` wires the routers through per-router signals in the generate
blocks. It exports `bypass_count`, the number of router bypasses.

## Where this design departs from the paper, or fills gaps

- **Behavioural parts.** The crossbar, sample-and-hold and ADC are
  behavioural models. The 1-bit DAC is just the wordline input. The host is
  not modelled; testbenches drive the configuration bus.
- **Analog behaviour.** The ADC saturates at 255, and column sums above that
  are not exact. The analog parts are ideal: no noise, no IR drop.
- **Own choices:**
  - offset-binary signed weights;
  - Q8.8 fixed point;
  - 40-bit partial sums;
  - the tile sequencer, memory layout and configuration map;
  - one-clock SSR setup and traversal;
  - the accept chain;
  - single-flit packets;
  - 4-entry input FIFOs.
- **Memories** are synchronous arrays: eDRAM refresh is not modelled.
- **Not built:** the paper's comparison points (wormhole flow control, an
  ideal NoC) and its simulators.
- **Mapping:** how layers are placed and replicated over tiles is left to
  the host.
- **Capacity.** The node holds 30720 crossbars of 2048 weights (62.9 M
  weights). The VGG-A…E convolution layers need 4508–9784 crossbars, and the
  rest can hold weight copies. Their fully connected layers (≈60 k crossbars)
  do not fit.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv -Irtl \
  rtl/pim_pkg.sv tb/tb_core.sv --top-module tb_core
./obj_dir/Vtb_core +verilator+rand+reset+2
```

`tb_core` runs a full-size core and checks the 2181-clock latency.
`tb_mesh_noc` runs an 8 × 8 mesh with random traffic.

`tb_node_top` is the end-to-end test. It runs a 4 × 2 mesh with 2 cores per
tile and a two-layer pipeline over two images:
- Tile (0,0) computes a 256→16 layer, pixel by pixel.
- It sends to tile (3,1): three bypassed hops east, a turn, one hop north.
- Tile (3,1) runs a 16→16 layer with 2 × 2 pooling in auto mode, through
  `layer_sync`.
- It sends the pooled pixels three hops west to tile (0,1).

The testbench checks the final memory contents against its own model of
both layers. It also requires every mechanism to have happened: bypasses,
waits for the previous layer, pooling windows held open, and finished
images.

Full size has not been simulated. That is 16 × 20 tiles of 12 cores: 30720
crossbars, about 1 Gbit of cell state. Verilator needs about 25 GB of memory
and more than a quarter of an hour just to elaborate it. The largest node
simulated is the 4 × 2 mesh above; the largest mesh is 8 × 8.
