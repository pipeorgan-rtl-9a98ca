# PipeOrgan: a PE array for flexible inter-layer pipelining, with an AMP network

Deep-network layers differ a lot in how much activation data they move compared with
weight data. When a layer produces much more activation data than it reads in weights,
it is cheaper to hand its output straight to the next layer inside the PE array than to
write it to a buffer and read it back. This is *inter-layer pipelining*. How many layers
to chain (the *depth*) and how much of the intermediate tensor passes at a time (the
*granularity*) both depend on the layer shapes and on skip connections. Where each layer
is placed on the PEs then decides how far, and over which links, the intermediate data
travels. That placement is the *spatial organization*:

* **blocked**: each layer owns a large rectangle of PEs;
* **striped**: layers alternate row by row or column by column;
* **checkerboard**: layers are interleaved PE by PE.

Fine-grained pipelining wants producer and consumer next to each other (striped or
checkerboard). Coarse-grained pipelining keeps blocked placements and sends data over
longer distances. To make those long paths cheap, the mesh gets extra links. The result
is **AMP** (augmented mesh for pipelining): every router has a second link in each
direction that skips `L = Round(sqrt(ROWS/2))` PEs, so `L = 4` for a 32 x 32 array.

This RTL is a hardware substrate that can carry any such placement. It has three parts:

* a 32 x 32 array of processing elements (PEs), each with an 8-wide int8 dot product and
  a small register file;
* one AMP router per PE;
* a 1 MB global buffer, split into one bank per row, on the west edge.

A compile-time mapper chooses the depth, granularity and spatial organization. Its output
reaches the chip only as configuration flits: which layer tile each PE runs and where
each PE sends its results. The hardware has no notion of "blocked" or "checkerboard".
It just moves vectors between PEs and the buffer as configured.

## Array organization

```
            column 0        1        2              31
 GB bank 0 ==[R]--------[R]------[R]---- ... ------[R]      R = AMP router + PE
 GB bank 1 ==[R]--------[R]------[R]---- ... ------[R]      --  one-hop mesh link
    ...        |  \____________________/ (4-hop long link, every router, every direction)
 GB bank 31==[R]--------[R]------[R]---- ... ------[R]
```

* Router `(x, y)` has nine ports:

  | port | direction |
  |------|-----------|
  | 0 | local, its PE |
  | 1..4 | mesh N, S, E, W |
  | 5..8 | long links N4, S4, E4, W4 |

  `x` is the column and grows to the east. `y` is the row and grows to the south.
* A long link joins `(x, y)` to `(x +/- L, y)` and `(x, y +/- L)` where that router
  exists. There is no wrap-around.
* The west port of the column-0 router of row `r` connects to global-buffer bank `r`.
  Flits enter the array there, and flits addressed to the buffer leave there.

All traffic uses one packet format: a single flit with a full header and an 8-byte
payload. The payload is one PE vector (8 lanes of 1 byte).

| field | bits | meaning |
|-------|------|---------|
| `to_gb` | 1 | deliver to the buffer port of row `dst_y` (the `dst_x` field is ignored) |
| `dst_x`, `dst_y` | 6 + 6 | destination PE |
| `ftype` | 2 | `F_CFG` configuration write, `F_WGT` weight write, `F_ACT` activation vector |
| `idx` | 12 | configuration register, weight address, input-chunk index, or buffer word address |
| `data` | 64 | payload |

## How a PE runs a layer tile

A PE computes output *vectors*. Each vector holds `NK <= 8` output channels of one output
position. Channel `k` is a temporal reduction over `CI <= 16` input *chunks*, and each chunk
is one 8-channel activation vector:

```
out[k] = requant( sum_{c < CI} dot8(act[c], W[c*8 + k]) )        dense mode
out[l] = requant( sum_{c < CI} act[c][l] * W[c*8][l] )           depthwise mode, l = lane
requant(a) = saturate_int8( relu?( a >>> shift ) )
```

One dot product runs per cycle. The *compute interval* (the time between successive
outputs of the PE) is therefore `CI * NK` cycles in dense mode and `CI` cycles in
depthwise mode. A new output starts in the cycle after the previous one finishes if its
inputs are already there.

An output vector is exactly one 8-channel chunk for the next layer. So the producer's
output-channel dimension K becomes the consumer's input-channel dimension C, which is the
pairing along which two layers can be fused at the finest granularity. Depthwise
(grouped) layers use the 8 lanes without reduction: one lane per channel, and the chunks
are the filter taps. A 3 x 3 depthwise filter therefore takes 9 chunks.

**Chunk indices and the two banks.** Each activation flit carries its chunk index. A PE
keeps two banks of `CI_MAX` vectors. An arriving chunk goes into the older bank that
still lacks its index, otherwise into the newer one. This has two consequences:

* One PE can take inputs from several producers. A layer that concatenates a skip
  connection with its direct input simply gives each producer its own chunk indices (in
  DenseNet-like blocks, several of them).
* Producers can run in any relative order, but only within one output of each other.

If both banks already hold the index, the flit waits at the head of the PE's input
queue. This is ordinary back-pressure while the older bank is only waiting for its
reduction. A mapping must not let one producer get two outputs ahead of a slower sibling:
the sibling's chunk could then be queued behind the waiting flit, and the PE would stop
for good. Allocating PEs to layers in proportion to their work keeps producers in step,
which is what the mapping is meant to do anyway.

**Destinations.** When a reduction finishes, the vector moves to an output stage. It is
sent to destination 0 and, if enabled, to destination 1, which is the skip-connection
copy. Each destination is one of:

* **a PE**: fine-grained pipelining through the network. The flit carries the chunk
  index configured for that consumer.
* **a buffer row**: coarse-grained pipelining, or the end of a pipeline segment. The
  flit carries a word address that starts at the configured base and increases by one
  per vector.

If the output stage is still busy when the next reduction finishes, the reduction waits
(an output stall). This is the congestion the paper describes for very short compute
intervals.

**Configuration registers**, written with `F_CFG` flits (`data` bits):

| reg | name | fields |
|-----|------|--------|
| 0 | `CFG_CTRL` | `[3:0]` CI-1, `[6:4]` NK-1, `[11:7]` shift, `[12]` relu, `[13]` depthwise |
| 1 | `CFG_DST0` | `[0]` valid, `[1]` to_gb, `[7:2]` x, `[13:8]` y, `[25:14]` chunk index or buffer base |
| 2 | `CFG_DST1` | as `CFG_DST0`, the skip-connection copy |

The exact layouts are the packed structs `pe_ctrl_t` and `pe_dst_t` in `rtl/po_pkg.sv`.
Weights are written with `F_WGT`, one vector per flit, to address `c*8 + k`. The weight
register file holds 128 vectors (1 KB) and the activation banks hold 2 x 16 vectors.

## The AMP network

**Routing** is dimension-ordered: first along x, then along y, then out of the local
port. Within a dimension, a flit takes the long link while at least `L` hops remain, and
the one-hop link otherwise.

* Example: from row 1 to row 19 in one column with `L = 4`, the path is
  1-5-9-13-17-18-19. That is six hops, where a plain mesh needs 18.
* A flit addressed to the buffer first travels west to column 0, then along column 0 to
  its row, then leaves through the west port.

Travel is monotonic in each dimension and there are no wrap links, so the channel
dependency graph has no cycles. The network is deadlock-free without virtual channels.

**Router micro-architecture.** Each of the nine inputs has a 2-entry queue. The flit at
the head of a queue is routed combinationally. Each output has a round-robin arbiter. A
flit crosses a router in the cycle it wins, so a route of `h` hops takes `h + 1` cycles
through an idle network. Back-pressure is valid/ready. The ready signal is the downstream
queue's not-full flag, which is a register, so no combinational path runs from router to
router.

Compared with a mesh, AMP adds at most one link per router and direction, so it has
under twice the mesh's links. No link spans the whole row, unlike a torus's wrap-around
links, and wire length grows only with the square root of the PE count.

## Global buffer

There are 32 banks of 4096 x 64-bit words (1 MB in total). Each bank has one write port
and one read port, and belongs to one PE row. Each bank has an engine with three jobs:

* **Stream** (`gb_cmd_t` on `cmd_*`). It reads `len` words from `addr` and sends them as
  flits of type `ftype` to PE `(dst_x, dst_y)`, one per cycle. The index field runs
  `idx0, idx0+1, ...` and wraps every `idx_mod` words. With `idx_mod = CI`, a stream of
  activations carries the right chunk index on every word. `cmd_ready` means the bank is
  idle.
* **Write-back.** Flits arriving from the array are written at their index field. This
  path is always ready, so outputs never block the array.
* **Host port** (`host_valid`, `host_ready`, `host_we`, `host_row`, `host_addr`, `host_wdata`). It reads or writes one word of any bank. Writes give way to
  write-back, and reads give way to streams. Read data appears in the cycle after the
  request is accepted. An off-chip DMA engine would attach here.

## Running a pipeline segment

A typical sequence:

1. The host writes configuration words, weights and the segment's input into the buffer.
2. The host starts streams: configuration and weights to every PE in use, then the
   input activations to the first layer's PEs.
3. Outputs flow PE to PE through the segment. The last layer writes its outputs back to
   the buffer.
4. A following segment, or a coarse-grained consumer, is fed from those buffer words by
   further streams.

Any spatial organization is just a choice of coordinates in step 2. For a striped
depth-2 pipeline, layer 1 goes on even rows with destinations one row south, and layer 2
goes on odd rows.

`tb/po_top_scenario.svh` is a worked example with five PEs:

* A feeds B, far away across the array, so the route uses the long links.
* A also feeds C directly, as a skip connection.
* C concatenates B's output with A's and writes to the buffer.
* D is a depthwise layer that reads C's outputs back from the buffer.
* E has a one-cycle compute interval and two buffer destinations, so its output stage
  saturates.

## Activity counters

`pipeorgan_top` counts events from reset:

| counter | counts |
|---------|--------|
| `cnt_pe_fwd` | vectors sent PE to PE, skip copies included |
| `cnt_pe_gb` | vectors written to the buffer |
| `cnt_skip` | second-destination copies |
| `cnt_pe_stall` | reductions waiting for the output stage |
| `cnt_pe_hold` | cycles an activation waited for a bank |
| `cnt_dw` | depthwise outputs |
| `cnt_long_hops` | flit traversals of long links |
| `cnt_mesh_hops` | flit traversals of one-hop links |
| `cnt_blocked` | cycles a router held a flit its PE could not take |
| `cnt_gb_rd`, `cnt_gb_wr` | buffer words streamed out and written back |

These counters are additions of this design, for observing the array.

## What follows the paper and what does not

Taken from the paper:

* the 32 x 32 PE array;
* 1-byte elements;
* 8-wide PE dot products, with no reduction for grouped convolutions;
* a 1 MB on-chip buffer;
* the AMP topology (mesh plus long links of `Round(sqrt(ROWS/2))` in every direction from
  every PE);
* long-link choice by remaining distance;
* forwarding intermediate data PE to PE for fine granularity and through the buffer for
  coarse granularity;
* skip connections that combine activations of several earlier layers.

Choices of this design, where the paper gives no detail:

* PE register-file sizes;
* the chunk and bank scheme;
* requantization;
* flit format, queue depths, arbitration and single-flit packets;
* a separate nine-port router rather than a mux on the mesh ports;
* one x-then-y routing for every pattern;
* the buffer's banking, stream engine and host port;
* configuration through flits;
* the counters.

Known limits:

* **No partial-sum path.** One PE output reduces at most 16 chunks (128 products per
  channel). A layer with a longer reduction, such as a 3 x 3 convolution over more than
  14 input channels, cannot be split across PEs, because vectors leave a PE already
  requantized to int8.
* **Off-chip memory is not modelled.** The evaluated configuration's 256 GB/s is not
  represented; the host port stands in for it.
* **For 64 x 64 arrays, set `LONG` by hand.** The long-link length is a parameter
  (default 4). Two statements about 64 x 64 arrays disagree: the formula gives 6, while
  the text elsewhere says 8.
* **No mapper.** The compile-time mapper (depth, loop order, granularity and placement
  heuristics) is software and is not part of this RTL.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares against a reference
model written in the testbench and ends with a `TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|-----------|----------------|
| `tb_pe_dot_product` | corner and random vectors against integer arithmetic |
| `tb_pe` | dense reduction with shuffled and early chunks; the `CI*NK` compute interval (12 cycles for 3 x 4), checked by cycle count; 9-tap depthwise; two destinations with incrementing buffer addresses; output stalls and bank holds |
| `tb_amp_router` | random traffic on all nine ports under back-pressure: every flit leaves once, at the port an independent model of the routing rule predicts, in order; buffer-bound routing in column 0; one-cycle traversal; round-robin fairness |
| `tb_amp_noc` | 32 rows x 8 columns with `L = 4`: idle-network latency equals hops + 1 for several routes, including 1-5-9-13-17-18-19; random all-to-all and buffer traffic arrives exactly once; the long-link traversal count equals the count predicted from every route |
| `tb_global_buffer` | host read/write; streams with index wrap at one word per cycle and under back-pressure; write-back colliding with host writes |
| `tb_pipeorgan_top` | the five-PE scenario above, end to end; every output word is compared with the reference, every counter is required to be non-zero, and the exactly predictable ones must match |

Simulated sizes:

* The end-to-end test runs the whole accelerator at 8 x 8 PEs with `L = 2` and 2048-word
  banks. That is the largest end-to-end size simulated.
* The network was simulated at 32 x 8 with `L = 4`.
* At the full default size (32 x 32, 1 MB), the top level lints cleanly and elaborates.
  A Verilator simulation build of it, however, produces about 1500 C++ files and was not
  completed.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/po_pkg.sv \
    tb/tb_pipeorgan_top.sv --top-module tb_pipeorgan_top -o sim && ./obj_dir/sim
```

To run a block test, replace the testbench and top-module names, for example
`tb/tb_pe.sv --top-module tb_pe`. `-y rtl` lets Verilator find the modules by name; the
package file must be named first. The array size, the
long-link length and the bank depth are parameters of `pipeorgan_top`. The PE
register-file sizes are `CI_MAX` and `NK_MAX`.

## Files

| file | contents |
|------|----------|
| `rtl/po_pkg.sv` | flit, configuration and command types; the routing function; requantization |
| `rtl/po_fifo.sv` | the small queue used everywhere |
| `rtl/pe_dot_product.sv` | the 8-lane dot product |
| `rtl/pe.sv` | the processing element |
| `rtl/amp_router.sv` | the router |
| `rtl/amp_noc.sv` | the AMP wiring of the routers |
| `rtl/gb_bank.sv` | a buffer bank |
| `rtl/gb_row_port.sv` | a bank's stream, write-back and host engine |
| `rtl/global_buffer.sv` | the 1 MB buffer |
| `rtl/pipeorgan_top.sv` | the accelerator |
| `tb/` | the testbenches and the shared end-to-end scenario |
