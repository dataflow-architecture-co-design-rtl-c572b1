# A wireless-distribution 2.5D DNN accelerator in SystemVerilog

Scaling a DNN accelerator out across many chiplets on an interposer is limited by how fast the
chiplets can be fed. Interposer links are narrow, since microbumps are large. A mesh also
delivers a broadcast hop by hop, so a tensor that every chiplet needs costs many link
traversals and arrives at different times. This design feeds the chiplets through a
**wireless plane** instead. A single transmitter next to the global SRAM sends one 32-byte word
per cycle, and that word reaches every chiplet's receiver in the same cycle. A broadcast
therefore costs the same as a unicast. The **wired mesh** on the interposer is kept only for
collecting results, which is not on the critical path.

Each layer is split across the chiplets in one of three ways, called *partitioning strategies*.
The strategy decides which tensor is unicast and which is broadcast. It can change from one
layer to the next.

| strategy | split across chiplets | split across PEs in a chiplet | filters are | inputs are | chiplet works as |
|---|---|---|---|---|---|
| KP-CP | output channels (filters) | input channels | unicast, one block per chiplet | broadcast | channel-parallel (NVDLA-like) |
| NP-CP | batch | input channels | broadcast | unicast, one block per chiplet | channel-parallel (NVDLA-like) |
| YP-XP | output rows | output columns | broadcast | unicast, one block per chiplet | output-stationary (Shidiannao-like) |

The system follows the published WIENNA architecture (Guirado, Kwon et al.) at its main
configuration:
- 256 chiplets with 64 PEs each, 16384 MACs in all;
- a 13 MiB global SRAM;
- the aggressive bandwidth points: 32 B/cycle wireless, 16 B/cycle per mesh link;
- one-byte operands.

That description is at block level. Everything below the block level here is this
implementation's own: formats, widths, handshakes, the local memory layout, and how one PE
array serves both chiplet styles. Section "Where this departs from or adds to the source"
lists these choices.

## System structure

```
             HBM port (hbm_wr_*, hbm_rd_*)
                     |
   +-----------------+------------------ memory chiplet ----------------+
   |  global_sram (13 MiB, 32 B read port, 32 B strobed write port)     |
   |      |  read                                     ^ write (16 B)    |
   |  dist_scheduler --frames--> wireless_tx          |                 |
   +-------------------------------|------------------|-----------------+
                                   v                  |
                          wireless_channel            |  north output of chiplet (0,0)
                (behavioural: same frame to all RX,   |
                      one clock later)                |
                                   |                  |
   chiplet (x,y), id = 16*y + x, 16 x 16 array        |
   +-----------------------------------------------------------------------+
   | wireless_rx -> local_memory (weights) --+                             |
   |            -> local_memory (inputs)  --+-> onchip_net -> 64 x pe      |
   |            -> layer config, start         (lanes /       (queues,     |
   |                    |                       broadcast,     mult, add,  |
   |               chiplet_ctrl (sequencer)     adder tree)    act)        |
   |                                                 |                     |
   |                   act_unit (tree output) -> out_packer -> nop_router --+--> west / north
   +-----------------------------------------------------------------------+
```

| module | role |
|---|---|
| `wienna_top` | Memory chiplet, wireless plane, chiplet array and collection mesh. |
| `global_sram` | The global buffer. The scheduler reads it, the mesh writes it, and the HBM port fills and drains it. |
| `dist_scheduler` | Runs one layer: configuration, filters, then per round the inputs, a start frame and a wait for the outputs. |
| `wireless_tx` | The single transmitter, with unicast/broadcast word counters. |
| `wireless_channel` | **Behavioural model** of the RF front ends, TSV antennas and in-package channel. |
| `wireless_rx` | Per-chiplet receiver. It keeps its own unicasts and the multicasts whose set includes it, writes local memory and decodes configuration and start frames. |
| `chiplet` | One accelerator chiplet. |
| `local_memory` | One bank of local memory: written in 32 B words, read as 64 B rows. |
| `chiplet_ctrl` | Sequencer of the intra-chiplet loop nest. |
| `onchip_net` | Local memory to PE distribution (lane-wise or broadcast) and the cross-PE adder tree. |
| `pe` | Input and weight queues, multiplier, adder with a partial-sum buffer, activation. |
| `act_unit` | ReLU, right shift and saturation to 0..127. |
| `out_packer` | Packs outputs into 16-byte collection flits addressed to the SRAM. |
| `nop_router` | Collection-mesh router. |
| `wienna_pkg` | Sizes, enums and structs shared by all modules. |

## How a layer runs

The host writes a `layer_desc_t` on `desc` and pulses `start`. The descriptor holds:
- the strategy;
- the number of active chiplets;
- `n_filt` filters and `n_vec` input vectors per chiplet per round;
- the reduction length `red_len`;
- the number of rounds and the output shift;
- three SRAM base addresses.

The scheduler then steps through these phases. One frame goes out per cycle, with no gaps.

1. **Configuration.** One broadcast frame carries a `chip_cfg_t` to every chiplet. It holds the
   mode, the sizes, the shift, the output base and the active-chiplet count. It also resets each
   chiplet's round counter.
2. **Filters (t0.0).** KP-CP unicasts each chiplet its own block of `w_words`, one chiplet after
   another. NP-CP and YP-XP broadcast one block.
3. For each round:
   - **Inputs (t0.1).** KP-CP broadcasts one block of `i_words`. NP-CP and YP-XP unicast a
     block to each chiplet in turn.
   - **Start (t0.2).** A start frame, multicast to the active chiplets, makes them compute.
     As a second guard, chiplets with `id >= n_active` ignore a start frame.
   - **Collection (t0.3).** The scheduler counts flits entering the SRAM until it has
     `n_active * out_words`. Then it starts the next round or pulses `done`.

Phases do not overlap. In round *r* the input bank is only rewritten after every output of round
*r-1* has reached the SRAM.

### Unicast, multicast and broadcast

A frame header has a multicast flag and a 10-bit `dst`:
- Flag clear: the frame is a unicast to chiplet `dst`.
- Flag set: the frame is a multicast to chiplets `0..dst`. With `dst` all ones, that is a
  broadcast to every chiplet.

The configuration frame is a broadcast. Replicated filters or inputs and the start frame are
multicast to `0..n_active-1`, so a layer that uses only part of the array leaves the other
receivers off. A set is always a prefix of the chip ids. That is enough for layers on fewer
chiplets. Arbitrary sets would need a wider header and are not built.

Each receiver keeps a frame only if it names the receiver's id or its set includes that id, and
drops the rest. In the counters and tables, "broadcast" covers every multicast word. `rx_on`
shows which receivers had to be awake for each frame. The multicast factor is words received,
summed over all chiplets, divided by words sent. It follows from `rx_on` and the transmitter's
counters.

### Sizes and SRAM layout

A *row* is 64 bytes, one per PE. A *word* is a 32-byte wireless word. A *flit* is a 16-byte
collection word. Sizes below are in words:

| quantity | channel-parallel (KP-CP, NP-CP) | output-stationary (YP-XP) |
|---|---|---|
| `w_words` per block | `n_filt * red_len * 2` | `ceil(n_filt * red_len / 32)` |
| `i_words` per block | `n_vec * red_len * 2` | `n_vec * red_len * 2` |
| output groups per round | `n_filt * n_vec`, 1 byte each | `n_filt * n_vec`, 64 bytes each |
| `out_words` (flits) per chiplet per round | `ceil(n_filt * n_vec / 16)` | `n_filt * n_vec * 4` |

The SRAM layout is as follows:
- **Weight region at `w_base`.** For KP-CP it holds the chiplets' blocks back to back, chiplet 0
  first. Otherwise it holds the single shared block.
- **Input region at `i_base`.** Blocks appear in the order they are sent. For KP-CP that is one
  block per round. Otherwise it is round-major and then chiplet order, so block
  `r * n_active + j` goes to chiplet `j`.
- **Outputs of chiplet `j`, round `r`.** They start at flit address
  `o_base + (r * n_active + j) * out_words`. Flit address `a` is the lower (`a` even) or upper
  half of SRAM word `a/2`.

Inside a block:
- **Channel-parallel mode.** Weight row `f*red_len + t` holds, for filter `f` and step `t`, the
  64 weights that PE 0..63 multiply. Input row `v*red_len + t` holds the matching 64 inputs of
  vector `v`.
- **Output-stationary mode.** The weight block is a plain byte string: byte `f*red_len + t` is
  the weight for filter `f`, step `t`. Input row `v*red_len + t` holds the input that each of
  the 64 output columns needs at step `t`.

Convolutions reach the chiplets as dot products. The host lays inputs out unrolled (im2col), so
`red_len` covers C·R·S. In channel-parallel mode that length is counted in rows of 64 channels.

## Inside a chiplet: one PE array, two dataflows

This is the least obvious part of the design. One homogeneous array of 64 PEs must act as an
NVDLA-like chiplet for KP-CP and NP-CP, and as a Shidiannao-like chiplet for YP-XP. It must
switch between the two at each layer.

`chiplet_ctrl` walks the same loop nest in both modes: `for v < n_vec, for f < n_filt, for
t < red_len`. Each iteration issues one read of a weight row and one read of an input row. The
local memory is synchronous, so the data and the `last` flag (`t == red_len-1`) reach the PEs
one cycle after the read. `onchip_net` then routes the data:

- **Channel-parallel** (`xp_mode=0`). PE *p* receives weight byte *p* and input byte *p*, so
  each PE handles its own slice of the channels. At `last` every PE holds a partial sum over
  its slice. The adder tree adds the 64 partial sums, and a single `act_unit` turns the total
  into one output byte for the pair (f, v).
- **Output-stationary** (`xp_mode=1`). Weight byte `e = f*red_len + t` is read from row
  `e / 64` at byte `e % 64` and broadcast to all PEs. PE *p* still takes input byte *p*, which
  belongs to output column *p*. At `last` each PE holds a complete output, and its own
  activation unit produces a byte. The group is 64 output bytes.

The PE follows the PE drawing of the source:
- **Queues.** An input queue and a weight queue, 4 entries each. The `last` flag travels
  alongside.
- **Multiplier and adder.** The multiplier takes the int8 × int8 product. The adder adds it to
  the partial-sum buffer, the third buffer, and writes the result back there.
- **Output.** On `last` the sum moves to an output register and the partial sum restarts at
  zero. The output register feeds the activation unit.

The PEs run in lock step. A group is complete when all 64 hold `out_valid`, and it is accepted
only when `out_packer` can take it. The packer can fall behind: in output-stationary mode each
group becomes 4 flits, and the mesh may be congested. When that happens the PE output registers
stay full and the next `last` operation cannot leave the queue. The queues fill and `op_ready`
drops. `chiplet_ctrl` issues a read only while every PE reports room for two more operations,
one of which may already be in flight. Nothing is dropped or overwritten, and the array runs at
one operation per cycle when the output path keeps up.

## Collection mesh

All collection traffic goes to one place: the SRAM, attached to the north side of chiplet (0,0).
Dimension-order routing toward it is therefore trivial. Flits go west to column 0, then north.
A `nop_router` has three inputs: its own chiplet, its east neighbour and its south neighbour (the
south input is used only in column 0). Each input has a 2-entry queue. A round-robin arbiter
chooses one head flit per cycle, and the single output leaves west, or north in column 0. Links
carry one 16-byte flit per cycle with valid/ready. The SRAM accepts a flit every cycle, so the
mesh's sink bandwidth is 16 B/cycle. Assertions in `wienna_top` check that no flit is ever sent
off the edge of the mesh.

## Timing summary

| path | cost |
|---|---|
| wireless word, unicast or broadcast | 1 cycle of transmitter time, any number of receivers |
| top `start` to first start frame | `4 +` filter words `+` first-round input words, in cycles (checked by the testbenches) |
| chiplet round, output path free | about `n_filt * n_vec * red_len` cycles plus a few of pipeline |
| collection hop | 1 cycle per router when the path is free |
| HBM read | data and `hbm_rd_data_valid` one cycle after `hbm_rd_valid`, only while no layer runs |

## Where this departs from or adds to the source

What follows the source:
- the memory-chiplet, chiplet-array and PE structure;
- the sizes and bandwidths listed above;
- wireless used for distribution only and the wired mesh for collection only;
- one transmitter and one receiver per chiplet, with no arbitration;
- the per-strategy choice of what to unicast and what to broadcast;
- the filters, inputs, compute, collect timeline;
- per-layer strategy switching;
- the PE's queues, multiplier, adder with a fed-back partial sum, and activation.

This implementation's own choices:
- **Arithmetic.** Signed int8 operands and int32 sums. The activation is ReLU, then a
  descriptor-controlled right shift, then saturation to 0..127, so outputs can be the next
  layer's inputs. The source does not give the activation function or the number format.
- **Chiplet style.** One PE array plus an adder tree serves both chiplet styles, as described
  above. The source names NVDLA-like and Shidiannao-like chiplets without their internals.
  Inter-PE forwarding of inputs, as Shidiannao does, is not built. Each PE reads its input from
  the local memory row instead.
- **Local memory.** Two banks of 256 rows × 64 B (16 KiB each); the source gives no size. A
  round must fit: `n_filt*red_len` weight rows and `n_vec*red_len` input rows, each ≤ 256.
- **Frames and descriptor.** A frame header carries the kind, a multicast flag, a 10-bit
  destination and a 16-bit local address. The source mentions multicast to a set of receivers.
  Here a set is a prefix range of chip ids, which is this design's encoding. The configuration
  and start frames, the layer descriptor and the SRAM layout are also this design's own.
- **Mesh.** A 16 × 16 layout with the SRAM at the corner and X-then-Y routing. The routers have
  collection-only ports; no general 5-port router is built.
- **Residual and up-convolution layers.** These reach the datapath as dot products prepared by
  the host. A residual addition is an output-stationary layer with `red_len = 2` and unit
  weights. No separate element-wise unit exists.
- **Wireless channel.** Modelled as error-free with one clock of latency. Optional bit flips
  come from `ERR_PER_MILLION`. Modulation, serialisation and power gating of idle receivers are
  not modelled.
- **Memories.** The global SRAM and local memories are plain arrays, not SRAM macros.
- **Outside the RTL.** The HBM is not modelled; its side of the SRAM is a port of the top.
  Clocking and reset are not described by the source: one clock and an active-low
  asynchronous reset are assumed.
- **Bandwidth points.** The wireless and mesh bandwidths are the source's *aggressive* points.
  The conservative points are 16 B/cycle wireless and 8 B/cycle per link. Using them means
  changing `WL_BYTES` and `NOP_BYTES` in `wienna_pkg`, with `PES` a multiple of both; this has
  not been simulated.

## Simulating

Every file starts with a description of its module. Each module `X` in `rtl/` has a
self-checking testbench `tb/tb_X.sv`. Each testbench prints one line,
`TB_RESULT checks=N failures=M`, and stops itself through a watchdog if the design hangs. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/wienna_pkg.sv tb/tb_pe.sv --top-module tb_pe
./obj_dir/Vtb_pe
```

The end-to-end tests:

- `tb_wienna_top` uses 6 chiplets in a 3 × 2 mesh, 64-row local memories and a 256 KiB SRAM.
  It runs KP-CP, NP-CP (on 5 of the 6 chiplets), YP-XP and KP-CP again.
  - Every output byte is checked against a reference model computed from the SRAM contents.
  - The wireless word counts are checked exactly against what each strategy implies.
  - The distribution time is checked against one word per cycle.
  - Each mechanism is counted and must occur at least once: unicasts, broadcasts, frames
    ignored by receivers, multicasts to a subset of the chiplets (each checked to reach exactly
    its set), idle chiplets, mesh contention and mode switches.
- `tb_wienna_full` runs the same checks on the design at its default size: 256 chiplets, 64 PEs
  each, 256-row local memories and a 13 MiB SRAM. It uses three small layers that involve every
  chiplet. It takes about 9 minutes in all on four cores. Most of that is Verilator's C++ build
  of the 16384 PEs; the simulation itself is a small part.

To scale the system, override `N_CHIPLETS`, `MESH_X`, `PES`, `ROWS` and `SRAM_BYTES` on
`wienna_top`. Keep `PES` a multiple of 32 and `N_CHIPLETS` ≤ 1024. Chip ids are 10 bits, and
flit addresses are 24 bits, which covers 256 MiB of SRAM in 16-byte words.

## Using a layer descriptor

Example: a 3×3 convolution with 128 input channels and 256 output channels on a 28×28 output,
run as KP-CP on all 256 chiplets.
- Each output needs a reduction of 3·3·128 = 1152 = 18 rows of 64 channels, so `red_len = 18`.
- Each chiplet takes one filter, so `n_filt = 1`.
- The 784 output pixels are im2col vectors. With `n_vec = 8` per round (8·18 = 144 input rows)
  the layer takes 98 rounds.
- Each round broadcasts `i_words = 8·18·2 = 288` words.
- Each chiplet returns `ceil(8/16) = 1` flit per round. The flit holds the 8 output bytes of
  its filter for the round's 8 pixels.
