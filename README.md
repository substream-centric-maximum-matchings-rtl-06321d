# Substream-centric weighted matching accelerator

This is synthesizable SystemVerilog for an FPGA accelerator that helps compute an
approximate maximum weighted matching (MWM) of a large graph stored in host memory. It
follows the substream-centric design described in "Substream-Centric Maximum Matchings on
FPGA" (Besta et al.). The RTL here is an independent implementation of that architecture.
Where the paper leaves a detail open, this implementation makes its own choice, and each
choice is listed below.

## The idea: many cheap matchings instead of one expensive one

Exact MWM is expensive and hard to stream. The Crouch–Stubbs reduction replaces it with
L independent unweighted problems. With ε > 0, substream *i* (0 ≤ i < L) holds every
edge with weight w ≥ (1+ε)^i. A greedy **maximal** matching C_i is computed on each
substream. The host then walks C_{L-1}, …, C_0, from the heaviest class down, and keeps
every edge whose two endpoints are still free. The result is a (4+ε)-approximate MWM.

A greedy maximal matching needs one bit of state per vertex and substream ("is this vertex
already matched in C_i?"), and it decides each edge in constant time. So all L matchings
can be advanced together: the accelerator keeps an L-bit word per vertex. For each edge
(u, v, w) it computes

```
te[i] = w >= (1+eps)^i                 // edge belongs to substream i
m[i]  = te[i] & !MB[u][i] & !MB[v][i]  // edge joins matching C_i
MB[u] |= m ; MB[v] |= m
```

It then records the edge once, in the stream of the **highest** i with m[i] = 1. The host's
greedy pass only needs that copy. The L bits of a vertex are its *matching bits*. One edge
is processed per clock cycle.

The hard part is memory traffic. The graph has millions of vertices, so the matching bits
live in host DRAM, and a naive edge stream would need two random DRAM reads per edge. The
design avoids this by *blocking*: it reorders the edges so that one endpoint's bits sit
on chip and the other endpoint's bits are read sequentially.

## Blocking: epochs and lexicographic order

The vertices are cut into **epochs** of K consecutive rows (K = 32 by default). Edges are
processed in the lexicographic order (u / K, v, u):

* **u side.** During epoch e, every edge has its u in rows eK … eK+K-1. Those K words of
  matching bits sit in an on-chip buffer of K × L bits (`ubits_dbuf`). It is double
  buffered, so the next epoch's words are prefetched while the current epoch runs.
* **v side.** Within an epoch the edges are sorted by v, so v only increases. The v bits
  are read from DRAM in 512-bit chunks that hold 512/L vertices each (8 at L = 64). Each
  chunk is fetched once, and then every following edge whose v falls in it shares it.

The CSR input is sorted by u, not in this order. Part 1 of the accelerator produces the
order: it reads K rows at a time and merges them.

## Data in host memory

Every address is a 58-bit address of a 512-bit chunk. The host provides the following:

| region | layout |
|---|---|
| `pointer_data` at `ptr_base` | one 96-bit entry per row, 5 per chunk: `{count[95:64], offset[63:32], chunk[31:0]}`. `chunk` is relative to `graph_base`, `offset` is the slot (0–7) of the row's first edge. |
| `graph_data` at `graph_base` | 64-bit entries `{weight[63:32], column[31:0]}`, 8 per chunk, rows back to back, each row sorted by column. An undirected edge is stored in both rows. |
| matching bits at `mb_base` | vertex x uses bits `[(x mod 8)*L +: L]` of chunk `mb_base + x/8` (for L = 64). The host must zero this region. |
| output at `out_base` | stream i starts at chunk `out_base + i*out_stride`. It holds 128-bit records `{i, w, v, u}` (u in the low 32 bits), 4 per chunk, and ends with an all-zero record. |

Weights are unsigned and at least 1, because weight 0 is reserved internally. Vertex IDs
start at 0. The ID `0xFFFF_FFFF` is reserved.

## Part 1: edge reordering

```
pointer_requester -> pointer_receiver -> Q0..Q3 -> edge_requester -> edge_receiver -> K starting queues -> merger
```

**Row pointers.** `pointer_requester` reads `pointer_data` chunks in order.
`pointer_receiver` unpacks the entries one per cycle and labels each with its row u. It
puts each entry into one of four queues, chosen by (u mod K)/(K/4), so each queue covers a
quarter of the starting queues.

**Choosing which row to fetch (edge_requester).** This is the most delicate block of
Part 1. Its job is to keep the K starting queues of the merger balanced, so that the merge
tree never starves. It also has to make sure no starting queue can overflow, because read
data cannot be back-pressured. It keeps a pointer array BP with one entry per starting
queue. The entry holds the current row's pointer (remaining count, next chunk, slot offset)
and one spare pointer for the next row of the same queue. Each cycle it issues at most one
graph_data chunk read, chosen in one of two modes:

* **mode 1.** The pointer just taken from a queue goes into an empty BP entry. If its
  starting queue has room, its first chunk is requested immediately.
* **mode 2.** Otherwise, among the BP entries that have a pointer and room, it picks the
  one whose starting queue is predicted to be emptiest.

"Predicted occupancy" means the queue's current fill plus the edges already requested
but not yet inserted (in flight). A request is only allowed if this total plus the
chunk's valid edges fits in the queue depth (`SQ_DEPTH` = 32), so starting queues never
overflow. Chunk reads are also limited by credits (8) to the size of the receiver's chunk
buffer. With each request goes a notice to the receiver: row u, first valid slot, number
of valid slots. A row with no edges produces an *empty* notice and no read. After the last
row, one *end* notice follows.

**edge_receiver** matches notices to returned chunks in order. It inserts one edge per
cycle, as (u, v, w), into starting queue u mod K. For an empty row it inserts an
*artificial edge* (w = 0), so that the merge tree sees the row as present and does not
wait for it. For the end notice it puts an end marker into every starting queue.

**merger** is a binary tree of merging elements, K/2 at the leaves. Each element has two
input queues and forwards the smaller head by the key (u/K, v, u). When both heads are end
markers, it sends one end marker up. The root drops artificial edges. The output is the
edge stream in epoch order.

## Part 2: the L matchings

```
merger -> mb_requester -> Pending-Queue -> edge_processor -> edge_writer / mb_writer
             |                                  ^
             +--> v-bit reads -> Bit-Queue -----+        ubits_dbuf <- bram_mb_requester/receiver (prefetch)
```

**mb_requester** accepts only edges of the running epoch. When v's chunk number differs
from the previous edge's, it issues a chunk read and flags the edge as "new chunk"; all
other edges reuse the chunk. Edges wait in the Pending-Queue. Chunks arrive in the
Bit-Queue (`mb_receiver`), with credits sized to the queue. When the head of the stream
belongs to a later epoch, it raises `epoch_end`.

**edge_processor** is an 8-stage pipeline that accepts one edge per cycle:

1. Take an edge, and a chunk from the Bit-Queue if the edge is flagged. Classify v as
   belonging to the running epoch, the next epoch, or neither.
2. Present u mod K and v mod K to the u-bit buffer.
3. Wait for the buffer; the read latency is two cycles.
4. Register the buffer data and compare w against the L thresholds, which are constants
   at elaboration.
5. Choose the current bits of u and v and compute m[].
6. Write back the new bits of u (and of v if v is in this epoch). If v is in the next
   epoch, its bits are also written into the next buffer.
7. Find the highest set bit of m[].
8. Send the matched edge, with its index, to the edge writer.

Getting stage 5 right is the subtle part. It has to see every earlier edge's result:

* **Forwarding.** Results computed in stages 6–8 are not yet visible in the buffer data
  that stage 5 reads. Stage 5 compares addresses with those stages and takes the newest
  match.
* **Working chunk.** Bits of a v outside the running epoch come from the current 512-bit
  chunk, which stage 5 keeps in a register and updates in place. When a new chunk
  arrives, the old one is written back to DRAM. Because v only increases within an epoch,
  no chunk is read twice in an epoch, so DRAM is never stale when a chunk is read.
* **Next-epoch vertices.** When v belongs to the next epoch, its bits are updated in the
  working chunk and also in the *next* buffer. The prefetch of that buffer may have read
  DRAM before this update. A valid bit per entry makes the prefetcher skip entries that
  the processor already wrote.
* **Epoch end.** After the last edge of an epoch has left the pipeline, `flush` writes
  back the working chunk and then the K/(512/L) chunks of the current buffer. The next
  epoch does not start until every matching-bit write has been acknowledged. This
  prevents a later read from overtaking an earlier write.

New edges enter stage 1 only when both write queues have room for everything already in
the pipeline (`in_room`). The pipeline itself therefore never stalls.

**edge_writer** gathers matched edges per stream, four per chunk. It writes stream i's
chunks to `out_base + i*out_stride + j`. At the end it writes every stream's last
partial chunk with the unused slots zeroed.

## Sequencing and the memory ports

`state_controller` runs the epochs in this order:

1. Prefetch epoch 0 and swap the buffers.
2. For each epoch: start the prefetch of epoch e+1 and let the stream run until
   `epoch_end`, an empty Pending-Queue and an empty pipeline.
3. Flush.
4. Wait for the matching-bit acknowledgements and the prefetch, then swap.

After the last epoch it flushes the edge writer, waits for every write to be acknowledged,
and raises `done`.

Reads leave through `requester`. It has four small queues with fixed tags, served in a
fixed priority: v-bit chunk (tag 3), prefetch (4), graph_data (2), pointer_data (1). Read
data returns with its tag and is never back-pressured; every reader holds credits for its
buffer instead. Responses with the same tag must come back in request order. Writes leave
through `writer`, with matching bits (tag 5) ahead of output edges (tag 6).
`ack_receiver` counts acknowledgements per tag.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `K` | 32 | rows per epoch = starting queues = u-buffer entries (power of two, ≥ 4, multiple of 512/L) |
| `L` | 64 | number of substreams / matchings (512/L vertices per bit chunk; L must divide 512) |
| `EPS_Q16` | 6554 | ε in 16-bit fixed point (0.1) |

The paper's plotted results use K = 32, L = 64, ε = 0.1. It also reports builds with
K = 32, L = 512 and K = 256, L = 128; these need only parameter changes but have not been
simulated here. Internal depths (starting queues 32, inner merger queues 4, Pending-Queue
16, Bit-Queue 8, write queues 16) are this implementation's own choices.

At the defaults, the top level synthesises (generic Yosys) to about 12.7 k cells and
8.9 k flip-flop bits, plus 192 kbit of memory. On-chip state does not grow with the
graph: per-vertex and per-edge data all lives in host memory. So the graphs the paper
evaluates all fit. Examples are Kronecker graphs up to 2^21 vertices and about 48n edges,
and Orkut with 3.1 M vertices and 117 M edges. The limits are 32-bit vertex IDs and
2m < 2^32 directed edges.

## Where this implementation departs from or extends the paper

* The host-side greedy merge and the host memory framework (QPI endpoint, address
  translation) are not part of the RTL. The top level exposes plain read/write
  request/response ports with 8-bit tags in their place.
* The paper's description of stage 7 conflicts with itself: one place says to take the
  least significant set bit, the other the highest index. The pseudocode assigns the edge
  to the heaviest class, so this RTL takes the highest index.
* The paper does not spell out the following; they are this implementation's choices:
  the end-of-stream marker, the zero record that terminates each output stream, the
  flush-and-acknowledge protocol at epoch boundaries, the working-chunk register, and the
  credit counters.
* Updated v bits are written back once per 512-bit chunk, when the pipeline moves on to
  the next chunk or the epoch ends. The paper sends them to the writer from the last
  pipeline stage without saying how often. Writing per chunk needs fewer writes and
  gives the same memory contents.
* The paper keeps stage 5's results in registers for the next cycle. Here, forwarding
  covers the three stages 6 to 8, because the buffer data that stage 5 sees is that
  old.
* `graph_base` and `mb_base` are extra inputs. The matching-bit array must be zeroed by
  the host.
* BP and the u-bit buffers are written as register arrays; the paper implements them in
  BRAM. The u-bit buffer models a two-cycle BRAM read.
* The simpler non-blocked variant (SC-SIMPLE) and the CPU baselines are not built.

## Verification

Every block has a self-checking testbench in `tb/` that drives it against an independent
model and prints `TB_RESULT checks=… failures=…`. The edge processor test also checks the
pipeline's timing: one edge is taken per clock whenever the writers have room, and a
matched edge appears at the output 8 cycles after it was taken. Most use the default parameters; the
merger test uses K = 8. `tb/mwm_afu_tb.sv` runs the whole accelerator at its default
parameters against `tb/centaur_model.sv`, a memory model with random ready signals and
random in-order latency. The graph has 1000 vertices and 6000 undirected edges (12000
directed), including a high-degree hub, empty rows and many local edges, across 32 epochs.
The test compares against a reference that applies the matching rule in lexicographic
order. It checks every output stream record by record, the final matching bits of every
vertex in memory, and the edge count, and it checks that the host-side greedy merge gives
a valid matching. It also fails if any of these mechanisms never happened: mode-1 and
mode-2 fetches, dropped artificial edges, pipeline forwarding, v in the running epoch,
v in the next epoch, shared bit chunks, and multiple epochs. A run takes about 20 k cycles,
roughly 1.6 cycles per edge, including epoch switches.

To simulate with Verilator (5.x):

```
verilator --binary --timing -Irtl -Itb rtl/mwm_pkg.sv rtl/*.sv tb/centaur_model.sv \
          tb/mwm_afu_tb.sv --top-module mwm_afu_tb -Mdir obj && ./obj/Vmwm_afu_tb
```

A unit test needs `rtl/mwm_pkg.sv`, `rtl/sync_fifo.sv`, the block's own file(s) and its
testbench. For example, `edge_processor_tb` also needs `rtl/ubits_dbuf.sv`, and
`merger_tb` needs `rtl/merge_element.sv`.

Not verified: the large-K/L configurations, timing closure on a real FPGA, and
interaction with a real memory framework. The design expects responses with the same tag
to return in request order. The memory model used in the tests returns all responses in
order.
