# SteROI-D L2 processor: RTL for region-of-interest stereo depth

Stereo depth networks are expensive when they run on whole camera frames. The
SteROI-D system runs them only on regions of interest (ROIs): small trackers
next to the image sensors find the objects, and a central "L2" processor
computes depth for just those regions. The ROI size then changes from frame to
frame, from under a thousand pixels to a whole 384x1280 frame. A fixed
mapping of the network onto the chip cannot be good across that range. The L2
processor therefore keeps a small table of mappings, one per ROI-size bin. At
the start of every frame it looks up the bin of the current ROI and powers only
the tiles, PEs and SCUs that the bin's mapping uses. It then runs that
mapping, looping over the ROI in chunks through DRAM.

This repository holds synthesizable SystemVerilog for that L2 processor:

- processing elements (PEs) with a vector-matrix multiplier (VMM) and a
  shuffle buffer for depthwise convolution;
- one special compute unit (SCU) per tile, for the cost-volume work of stereo
  networks (difference, L1 norm, minimum, argmin);
- a two-level mesh network that carries *multipackets*: one word with a set of
  destinations, split only where the paths part;
- a DRAM I/O engine;
- the binned-mapping controller.

The sensors, the tracking processors, the DRAM chip and the power switches are
outside this RTL.

## Contents

- [Block map](#block-map)
- [Multipackets and the network](#multipackets-and-the-network)
- [Processing element](#processing-element)
- [Special compute unit](#special-compute-unit)
- [DRAM I/O](#dram-io)
- [Controller: bins, descriptors and programs](#controller-bins-descriptors-and-programs)
- [Sizes and what they are based on](#sizes-and-what-they-are-based-on)
- [Verification](#verification)
- [Simulating and changing the design](#simulating-and-changing-the-design)
- [Where this RTL departs from the paper or goes beyond it](#where-this-rtl-departs-from-the-paper-or-goes-beyond-it)

## Block map

```
               cfg / start / roi_size                     DRAM (external)
                        |                                     ^   |
                 +------v------+   dma_cmd_t   +-----------+  |   |
                 | controller  |-------------->|  dram_io  |--+   |
                 +-------------+  power enables+-----+-----+<-----+
                        |  pe_pwr_en / scu_pwr_en    | multipackets
                        v                            v
   +--------------------- tile 0 -------------------+   +---- tile 1 ---...
   |            PE(0,1)--PE(1,1)                     |   |
   |              |        |                         |   |
   |   [scu]    PE(0,0)--PE(1,0)                     |   |
   |     |SCU     |col 0   |col 1                    |   |
   |  tile router (ports: SCU, col 0, col 1, E, W)   |<->|  tile router
   +-------------------------------------------------+   +---
```

| File | Contents |
|---|---|
| `rtl/steroi_pkg.sv` | sizes, packet and micro-op types, route-mask functions |
| `rtl/steroi_l2.sv` | top: controller, DRAM I/O and a row of `N_TILES` tiles |
| `rtl/tile.sv` | tile router, 2x2 PE mesh with one router per PE, the SCU; each PE column has its own link to the tile router |
| `rtl/noc_router.sv` | multipacket router (used for both levels) |
| `rtl/pe.sv` | processing element |
| `rtl/vmm.sv`, `rtl/shuffle_buffer.sv`, `rtl/accum.sv` | PE datapath parts |
| `rtl/scu.sv` | special compute unit |
| `rtl/sram_sp.sv` | single-port SRAM (array) for all local memories |
| `rtl/dram_io.sv` | DRAM-to-network engine |
| `rtl/controller.sv` | bin lookup, descriptors, program sequencer, power enables |

## Multipackets and the network

Moving the same data to many compute units is common in these networks. One
feature map, for example, can feed several PEs that hold different filters.
With unicast packets the same word would cross the first links many times.
Here a packet carries a **destination set** instead: `dest_t`, one bit per
endpoint.

Endpoint numbering (`steroi_pkg`):

- PE *k* of tile *t* is endpoint `t*5 + k`, where `k = y*2 + x`.
- The SCU of tile *t* is endpoint `t*5 + 4`.
- The DRAM I/O is the last endpoint (`DRAM_EP = 10` at default size).

Each router has a constant table `ROUTE[p]`: the set of endpoints that lie
behind output port *p* under dimension-order routing. The functions
`tile_route` and `pe_route` in the package compute these tables:

- Between tiles, packets go east or west along the row.
- Inside a tile, they go X first, then Y.
- Anything that is not a PE of this tile goes straight south down its column.
  The bottom PE of each column is wired to its own port of the tile router.
- Coming in, the tile router splits a packet by column. So a copy enters only
  the columns that hold one of its destinations, and then climbs north.

A router sends a waiting packet to every port *p* whose mask overlaps `dest`.
The copy on port *p* carries only `dest & ROUTE[p]`. The masks of a router
are disjoint (checked by an assertion at elaboration time). So every
destination is reached by exactly one path, and a word crosses a link at most
once.

Router microarchitecture (`noc_router`):

- Packets are single flits. Every link is valid/ready; a word moves when both
  are high.
- Each input has a one-entry buffer.
- Each output has a register and a round-robin arbiter over the inputs that
  still owe it a copy.
- Copies to different ports leave independently. The input buffer frees when
  its last copy has gone.
- With no contention a hop takes two cycles.

Packet format (`pkt_t`, 278 bits at default size):

| Field | Bits | Meaning |
|---|---|---|
| `dest` | 11 | remaining destinations |
| `kind` | 2 | `PKT_WR` write, `PKT_EXEC` run a micro-op, `PKT_RD` read and reply |
| `sel` | 1 | which of the endpoint's two SRAMs |
| `addr` | 8 | SRAM word |
| `data` | 256 | payload: a data word, a micro-op, or an `rd_req_t` |

A read request's payload (`rd_req_t`) names where the answer goes: a
destination set, an SRAM and an address. The answer is a `PKT_WR` to that
destination set. So a result can be sent straight to another PE, to several
PEs, or to DRAM.

## Processing element

```
 Vector SRAM (256 x 64b) --> vector buffer ----------------+
                                                          v
 Matrix SRAM (256 x 256b) -+-> matrix buffer ---> mux --> VMM 4x4 --> accum (4 x 40b)
        ^                  +-> shuffle buffer -->/                     |
        +---------- ReLU / >>shift / saturate to 16b <-----------------+
```

A PE takes three kinds of packet:

- `PKT_WR` writes one SRAM word. `sel=0` selects the Vector SRAM (low 64
  bits); `sel=1` selects the Matrix SRAM.
- `PKT_RD` reads one SRAM word and sends it as described above.
- `PKT_EXEC` carries one micro-op (`pe_op_t`).

One micro-op does the following:

1. Read `vec_addr` and `mat_addr`.
2. Reload the vector buffer if `load_vec`. Reload the matrix buffer if
   `load_mat`, or the shuffle buffer instead if `depthwise`.
3. Compute `y = x · W` on the VMM. Add it to the accumulator, or load the
   accumulator with it if `acc_clear`.
4. If `wb`: write the four lanes back to Matrix SRAM word `wb_addr` (low 64
   bits). Each lane is arithmetic-shifted right by `shift`, passed through
   ReLU if `relu`, and saturated to 16 bits.

The PE is busy for 3 cycles from accepting the packet and takes the next
packet after that. The testbench checks this count.

The dataflows are settings of the micro-op, not separate hardware:

- **Weight stationary:** send ops with `load_mat=0`. The matrix buffer keeps
  its weights while new vectors arrive.
- **Input stationary:** send ops with `load_vec=0`. The vector buffer keeps
  its input while new weight matrices arrive.
- **Channel accumulation over time:** run several ops with `acc_clear=0`
  before the one with `wb=1`.
- **Channel accumulation across PEs:** each PE writes back its partial sum. A
  `PKT_RD` moves the partials to one PE. That PE adds them with a VMM op whose
  matrix is the identity and `acc_clear=0`. This addition happens after each
  partial sum has been shifted and saturated to 16 bits.

**Depthwise convolution.** The shuffle buffer captures a kernel vector `k`.
It presents the VMM with a matrix whose only non-zero entries are
`W[i][(i+lane_off) mod 4] = k[i]`. Each channel is then multiplied by its own
weight, and the product lands in output lane `i+lane_off`. So groups of
channels can be packed into chosen lanes.

**Power gating.** `pwr_en=0` holds the PE in reset. A gated PE still accepts
packets, so the network does not block, but it drops them. Its state is lost,
as it would be under real gating.

## Special compute unit

The SCU does the stereo-specific work that a VMM handles badly: comparing a
left feature vector with many right candidates and keeping the best one. Its
pipeline:

```
 SRAM 0 -> buffer A --+
                      +-> diff (a-b or a) -> sum of |d| or of d -> (negate) -> accum -> min/argmin
 SRAM 1 -> buffer B --+                                                          ("<", min reg, index reg)
    ^                                                                                 |
    +----------------------------- write-back ------------------------------------------+
```

Every stage has a bypass bit in the micro-op (`scu_op_t`):

| Bit | 0 | 1 |
|---|---|---|
| `sub` | d = a | d = a − b, lane-wise |
| `absval` | r = Σ d | r = Σ \|d\| (L1 norm) |
| `neg` | – | r = −r (a maximum becomes a minimum) |
| `acc_en` | v = r | v = running sum of r (`acc_clear` restarts it) |
| `min_en` | – | if `min_clear` or v < min: min ← v, argmin ← index |
| `wb` | – | write SRAM 1 word `wb_addr` |

The index counts `min_en` ops since the last `min_clear`, starting at 0. The
comparison is strict, so on a tie the earlier candidate wins. The written word
holds `{argmin[15:0], min[31:0]}` when `wb_min=1`, and `v[31:0]` otherwise.

Building the common operations from these bits:

- **Cost volume with disparity search:** one op per candidate disparity, with
  `sub=1, absval=1, min_en=1`. The first op also sets `min_clear`; the last
  sets `wb`.
- **Max-pooling:** `sub=0, neg=1, min_en=1`. The result is the negated
  maximum.
- **Summing (aggregation):** `sub=0, absval=0, acc_en=1`.

An op takes 4 busy cycles. Power gating works as in the PE.

## DRAM I/O

The DRAM I/O executes three commands from the controller (`dma_cmd_t`):

- `DMA_LOAD` reads `len` consecutive DRAM words from `dram_addr`. Each word
  *k* becomes one `PKT_WR` to the command's destination set at SRAM address
  `pkt.addr + k`. One DRAM read serves every destination: weights shared by
  eight PEs are fetched once, and the network splits them.
- `DMA_SEND` injects the command's packet unchanged. This is how micro-ops
  and read requests reach the PEs and SCUs.
- `DMA_WBASE` sets the store base. A `PKT_WR` that arrives at the DRAM I/O
  endpoint is written to DRAM at `wbase + {sel, addr}`.

"Buffering" an activation (loading it into SRAM once, ahead of use) and
"streaming" it (loading each chunk just before it is used) are the same
operation in hardware. A mapping picks one or the other through the order of
its program.

The DRAM port is a valid/ready request (`we`, `addr`, `wdata`) with in-order
read responses. One read is outstanding at a time. Stores from the network use
the port whenever a load is not using it.

## Controller: bins, descriptors and programs

**Tables.** Written through the `cfg_*` port, one entry per cycle:

- `CFG_BOUND`: 7 bin boundaries, in ascending order, in pixels.
- `CFG_DESC`: 8 descriptors (`desc_t`). Each has a 2-bit DRAM-mode tag, tile
  enables, PE enables, SCU enables and `prog_base`.
- `CFG_PROG`: a 64-entry program memory shared by all bins.

**Frame.** On `start`:

1. Latch `roi_size`.
2. Set the bin to the number of boundaries with `roi_size >= boundary`.
3. Drive the enables from the bin's descriptor. A PE is on only if both its
   own bit and its tile's bit are set.
4. Run the program from `prog_base`.
5. When the program ends, `done` pulses for one cycle.

**Program instructions (`prog_ins_t`):**

| op | effect |
|---|---|
| `CI_DMA` | hand `cmd` to the DRAM I/O. For `LOAD` and `WBASE` the DRAM address gets `iteration*step` added. |
| `CI_WAIT` | wait until the DRAM I/O is idle, then `cnt` cycles more |
| `CI_LOOP` | start a loop of `ceil(roi_size / 2^cnt)` iterations |
| `CI_ENDL` | end of loop body |
| `CI_END` | wait for the DRAM I/O to be idle, then finish the frame |

Loops do not nest.

**How the pieces split.** The descriptor is the high-level mapping: which
units are on, the DRAM mode, and which program. The ROI size shapes the
low-level mapping only through the loop count and the address steps. A
program therefore never changes with the ROI inside its bin, which is the
point of binning.

**Waiting for results.** `CI_WAIT` waits for the DRAM I/O to be idle and then
a fixed number of cycles. The program writer must choose `cnt` to cover the
compute latency of the last ops. The end-to-end testbench uses 20 to 40
cycles.

## Sizes and what they are based on

| Parameter | Default | Source |
|---|---|---|
| data width | 16 bit | the paper's evaluation uses 16-bit operations |
| SCUs per tile | 1 | stated in the paper |
| tiles | 2 | counts drawn in the paper's architecture figure |
| PE mesh per tile | 2x2 | counts drawn in the paper's architecture figure |
| VMM | 4x4 | own choice; the paper sets sizes by design-space exploration |
| accumulator | 40 bit | own choice |
| SRAM | 256 words per SRAM | own choice |
| bins | 8 | 7 boundaries drawn in the paper's per-ROI energy breakdown |
| program | 64 instructions | own choice |

All of these are in `steroi_pkg`. The paper's processors are far larger (up
to 100 mm² in 28 nm) and hold tens of MiB of SRAM.

At these defaults:

- On-chip SRAM is 88 KiB.
- The DRAM I/O addresses 32 MiB (2^20 words of 32 bytes).
- A full-frame HITNet (about 23 to 38 MiB of working memory, depending on how
  much goes to DRAM) cannot be held.
- The control path covers every ROI size up to 2^20−1 pixels.

The sizes are set by `N_TILES`, `PE_X`/`PE_Y`, `VEC_N`/`MAT_M` and `ADDR_W`
in the package. The route functions, the endpoint numbering, the router port
counts and the descriptor widths are all derived from them. Only the default
size has been simulated. `lane_off` and `shift` have
fixed widths sized for a 4-lane VMM.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_sram_sp` | random writes and reads against a model |
| `tb_vmm` | random signed products against a reference |
| `tb_shuffle_buffer` | all diagonal positions |
| `tb_accum` | clear, add and wrap |
| `tb_noc_router` | random multicast traffic with random back-pressure: every destination gets each word exactly once; two-cycle hop |
| `tb_pe` | dense, weight- and input-stationary, temporal accumulation, depthwise, ReLU/shift/saturation, 3-cycle latency, gating |
| `tb_scu` | cost volume with argmin, 4-cycle latency, accumulated L1, max-pool via negation, sum bypass, gating |
| `tb_tile` | multicast into the mesh, splitting at the tile boundary, SCU use, gating of selected PEs |
| `tb_dram_io` | loads and stores against a DRAM model with random stalls |
| `tb_controller` | every bin boundary, loop counts, address steps, waits, power enables |
| `tb_steroi_l2` | end to end at default size (below) |
| `tb_workload_layers` | network-layer slices at default size (below) |

`tb/dram_model.sv` is a behavioural DRAM with a fixed read latency and random
request stalls. It is used only by testbenches.

**End-to-end test (`tb_steroi_l2`).** The test generates weights, inputs and
stereo features in the DRAM model and programs 7 boundaries, 8 descriptors and
two programs. It then runs three frames:

- **ROI 21360 px (bin 2, all units on).**
  1. Eight different weight matrices are loaded once by a single multicast
     `DMA_LOAD`.
  2. Per 8192-pixel chunk, an input vector is multicast to all eight PEs.
     Every PE computes a dense layer step with ReLU and a shift, and the
     results are read back to DRAM.
  3. Both SCUs search 8 candidates for the best L1 match.
- **ROI 969 px (bin 0).** Only PE 0 is on. It runs a depthwise op, and a
  packet sent to a gated PE is dropped.
- **ROI 491520 px (bin 7).** The first program runs over 60 chunks.

All 500-odd DRAM results are compared with reference values computed in the
testbench. The test counts each mechanism and fails if any count is zero:

- multicast packets;
- packets split at the tile boundary;
- weight-stationary ops;
- depthwise ops;
- drops at a gated PE;
- bins visited;
- loop iterations (exactly 63);
- argmin updates;
- DRAM stalls;
- traffic on the second column link into a PE mesh.

It runs in well under a second of simulation time.

**Layer slices (`tb_workload_layers`).** This test runs small pieces of the
two network types the system targets, through the whole processor at default
size.

- **One output pixel of a convolution** with 8 input and 4 output channels,
  computed two ways:
  - *Channel first:* PEs 0 and 1 each take half of the input channels. PE 1's
    partial sum is sent PE to PE, and PE 0 adds it with an identity-matrix
    op.
  - *Channel last:* PE 2 accumulates both halves over time.
- **A stereo cost-volume search:** 6 pixels of a row, 8 disparities each,
  split across the two SCUs. Each match op reaches both SCUs as one
  multipacket.
- **A 2x2 max-pool window** on an SCU, found as the minimum of negated
  values, together with its position.

Every result is checked against a reference. The test also counts the
identity add, the PE-to-PE transfer, the temporal accumulation and the argmin
updates.

## Simulating and changing the design

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/steroi_pkg.sv tb/tb_steroi_l2.sv --top-module tb_steroi_l2 -Mdir obj_l2
./obj_l2/Vtb_steroi_l2 +verilator+rand+reset+2
```

Replace `tb_steroi_l2` with any other testbench name. The testbenches assume
a two-state simulator that starts with random values: everything they read is
reset or initialised first.

To write a new mapping:

1. Fill in the tables through the `cfg_*` port, as `tb_steroi_l2` does with
   its `put()`, `load()`, `send()` and `peop()` helpers.
2. Build packets with the endpoint numbering above.
3. Leave enough `CI_WAIT` cycles after the last compute op before reading
   results.

## Where this RTL departs from the paper or goes beyond it

- **Packet, micro-op and instruction formats, the handshakes, latencies,
  SRAM sizes and the VMM size are this design's own.** The paper describes
  the blocks and their roles, not their encodings.
- **Buffered and streamed DRAM modes share one mechanism.** The 2-bit DRAM
  mode in the descriptor is only reported on a port. The program carries the
  mode.
- **Per-layer dataflows and DRAM modes live in the bin's program.** There is
  no separate per-layer table.
- **There is no dedicated spatial-accumulation adder.** Channel accumulation
  across PEs goes through the network and an identity-matrix VMM op, at
  16-bit precision.
- **Warp and aggregate run as compositions.** The paper says the SCU also
  covers HITNet's warp and aggregate operations. Here they run as
  compositions of the SCU primitives plus PE ops. There is no interpolation
  hardware.
- **Power gating is modelled as a held reset of the PE or SCU.** Routers stay
  on so traffic can cross a tile whose compute is off. A tile-enable bit turns
  off all its PEs and its SCU.
- **The network has no end-to-end flow control for read replies.** Many simultaneous reads aimed at one busy endpoint, while that
  endpoint is itself sending, could in principle block each other. The
  programs used here issue reads one at a time through the DRAM I/O, which
  avoids this.
- **Sizes are small** (two tiles of 2x2 PEs). The chip sizes the paper
  evaluates come out of its design-space exploration and are not given as
  numbers.
