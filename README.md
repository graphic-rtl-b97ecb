# GRAPHIC: a gather-and-scatter aggregation engine inside an SSD

Graph neural networks alternate two very different steps. *Aggregation* collects,
for each vertex, the features of its neighbours (sum, max, min) and needs
scattered, random access to a graph that may be terabytes large. *Combination*
is a dense multilayer perceptron that needs regular access and a lot of
arithmetic. When the graph lives on an SSD, moving every neighbour feature over
the SSD bus to an accelerator dominates the run time. GRAPHIC moves aggregation
into the SSD, so that only aggregated features cross the bus. The dense
combination step stays on a systolic accelerator on the host side.

The aggregation hardware replaces the SSD's SRAM cache with many small
*gather-and-scatter* (GAS) caches. Each cache pairs a content-addressable memory
(CAM) with a "FAST" SRAM in which every row can shift and compute on its own.
The CAM finds every stored edge that matches a vertex in one step. Its match
lines do not go through an address decoder: they directly enable the clock of
the matching SRAM rows. Those rows then all compute at once, bit-serially,
through a 1-bit ALU at the end of each row.

This repository holds synthesizable SystemVerilog for that engine: the CAM, the
FAST SRAM with its row ALUs, the 1-bit special function unit (SFU), the
per-cache controller, the input buffers that enable *idle-skip*, and a top level
that spreads requests over many caches and merges their results.

## One GAS cache

```
            key (SRC, DST, wildcards)        broadcast operand bit
                   │                               │
   ┌───────────────▼───────┐   match line   ┌──────▼───────────────────────┐
   │ CAM row i: SRC | DST  ├───────────────►│ FAST SRAM row i  ◄─ring─► ALU├──► bit i ─┐
   │   ... 128 rows ...    │  (row clock)   │   ... 128 rows x 16 bits ... │           │
   └───────────────────────┘                └──────────────────────────────┘   ┌───────▼──────┐
                                                                               │ 1-bit SFU    │
                                                                               │ sum/min/max/ │
                                                                               │ count        │
                                                                               └──────────────┘
```

* **CAM (`cam_array`)**: 128 rows. Each row holds the source and destination
  vertex of one edge (8 bits each, 16 bits per row) and a valid bit. A search
  compares a key against all rows. Either field may be a wildcard, so a search
  can ask for "all edges leaving vertex 1" or "all edges entering vertex 4". The
  output is one match line per row plus a `no_match` flag. There is no priority
  encoder. The CAM can also overwrite the SRC field of every matching row in one
  cycle, which the shortest-path algorithm uses.
* **FAST SRAM (`fast_sram`)**: 128 rows of 16 bits, next to the CAM rows. Row
  *i* holds the value that belongs to edge *i*: a weight, a path length or one
  feature element. Each row is a ring. On every cycle its clock is enabled, the
  row shifts one place: bit 0 leaves the last cell into the row's ALU, and the
  ALU result enters the first cell. After 16 enabled cycles every word is back
  in place, and each of its bits has passed through the ALU, least significant
  bit first. Rows whose clock is not enabled do not move. A normal decoded row
  port loads and reads whole words.
* **Row ALU (`bit_alu`)**: 1 bit wide, with one state bit. It can add the
  broadcast operand bit (state = carry), load it, or compare against it
  (state = "less than so far"). For min/max it can also drop the row from a
  candidate set (state = "still a candidate").
* **SFU (`sfu`)**: looks at the bit every active row presents in a cycle and
  reduces across rows:
  * **Sum.** Each cycle it adds the popcount of the active rows' bits (a 1-bit
    adder tree) to a carry register. It emits one result bit per cycle, and the
    carry holds the upper bits at the end. The sum of all matched rows is exact.
  * **Min/max.** One bit is decided per full rotation, most significant bit
    first. For the minimum: if any remaining candidate shows a 0 (an OR across
    rows), the result bit is 0, and every candidate that shows a 1 drops out.
    Because the ring only turns one way and a word must end each pass where it
    started, this takes 16 rotations (256 cycles).
  * **Count.** Counts the rows whose compare flag is set.

The controller (`gas_engine`) takes one request at a time. It holds the request
for one decode cycle, in which the CAM search runs. Then it either finishes, or
rotates the matched rows with the right ALU function and SFU mode.

### Requests and their cost

W = 16 (the row width). Costs are in clock cycles, from accepting a request to
being ready for the next one:

| request | effect | cycles |
|---|---|---|
| `WRITE` addr | CAM row ← {src,dst} (valid), SRAM row ← operand | 2 |
| `INVALIDATE` addr | CAM row marked empty | 2 |
| `READ` addr | returns the SRAM row | 2 + response |
| `ADD` key, operand | every matched row: val ← val + operand | 2 + W |
| `LOAD` key, operand | every matched row: val ← operand | 2 + W |
| `SET_SRC` key, v | every matched CAM row: SRC ← v | 2 |
| `SUM` key | returns the sum of the matched rows | 2 + W + response |
| `CMPLT` key, x | returns how many matched rows are < x | 2 + W + 1 + response |
| `MIN` / `MAX` key [upd] | returns min / max of the matched rows; with `upd`, writes it into all of them | 2 + W² (+ W) + response |
| `LOAD_BITMAP` chunk, bits | bitmap[chunk·W +: W] ← bits | 2 |
| `DENSE_ADD` operand | every row whose bitmap bit is set: val ← val + operand | 2 + W |

The cost of a search-based request does not depend on how many rows match.
That is where the parallelism comes from. If the search matches nothing, the
request ends after its decode cycle: this is **idle-skip**. A result-bearing
request still returns a response in that case, with `hit = 0`.

## Many caches, input buffers and idle-skip

An SSD-sized engine has many GAS caches, each holding a different slice of the
edge list (`graphic_ssd`, `NUM_CORES` of them).

```
req ─► global_alu ─┬─► input_buffer ─► gas_engine ─► response queue ─┐
                   ├─► input_buffer ─► gas_engine ─► response queue ─┤
                   └─►      ...                                      ├─► merge ─► rsp
```

* A request is issued into every cache's input buffer in the same cycle,
  whenever all buffers have room. Otherwise the issue side stalls.
* Each copy carries a `sel` bit. A broadcast request (`bcast = 1`) is selected
  in every cache. An addressed request (`bcast = 0`, `core = k`) is selected
  only in cache *k*, and the other caches pass it through in one cycle.
* Most requests match in only a few caches. A cache with no matching edge
  finishes in 2 cycles and moves on to its next buffered request, while the
  caches that matched take W cycles or more. Without buffers, every cache would
  wait for the slowest one on every request. With them, the caches drift apart
  and each works at its own pace. This is the idle-skip strategy.
* Every cache returns its responses in request order. The merge takes one
  response from every cache once all have one, and combines the caches with
  `hit = 1`: SUM and CMPLT add, MIN and MAX compare, READ takes the single
  addressed cache. Each reduction is associative, so the merged result equals
  what one very large array would have returned.

`skip[k]` pulses on each idle-skip, `busy[k]` shows activity, and `skip_count`
and `issued` count skips and accepted requests.

## How the graph algorithms map onto requests

Each edge (u → v) occupies one row, with its value in the SRAM. The host-side
controller runs the loops below; the engine does all the per-edge work.

* **Feature aggregation, sparse form.** A row holds the feature of the edge's
  source, so `SUM dst=v` gathers v's neighbours in one request. Repeat per
  feature element in different caches or rows. `MAX` gives max-aggregation.
* **Feature aggregation, dense form.** A column of the adjacency matrix is
  loaded as the row-enable bitmap (`LOAD_BITMAP`). `DENSE_ADD f_j` then adds
  vertex j's feature into every row that aggregates it, one column per request.
* **Single-source shortest path from vertex 0.** Rows start with edge weights.
  For each vertex v in order:
  1. `MIN src=0,dst=v upd` fixes dist(v) and writes it into all rows 0→v.
  2. `ADD src=v dist(v)` turns the edges leaving v into paths from 0.
  3. `SET_SRC src=v → 0` renames their source to 0.

  At the end, `MIN src=0,dst=v` returns each distance. The order of visits is a
  breadth-first walk, as in the paper's example. On the example graph
  (0→1:1, 0→2:5, 2→3:1, 2→4:4, 3→4:2) this returns 1, 5, 6, 8.
* **Connected components.** Each row carries a component label. Repeated
  `MIN dst=v upd` (find-and-update) makes all rows of a vertex agree on their
  smallest label, and `LOAD src=v` carries it to the vertex's outgoing rows.
* **Insertion sort.** Read the element at position i, and let `CMPLT x` count
  the rows smaller than it. That count is its final position. Swap it there,
  or advance i if it is already in place. Every element is placed in a constant
  number of requests, so n elements sort in O(n) requests.

## Sizes

| parameter | default | published value |
|---|---|---|
| rows per CAM / SRAM array (`ROWS`) | 128 | 128 (array 128×16) |
| bits per SRAM row (`WIDTH`) | 16 | 16 (16-bit additions) |
| CAM fields (SRC, DST) | 8 + 8 bits | 16-bit CAM row, split assumed |
| caches (`NUM_CORES`) | 256 | 4096 (a 1 MB engine of 256-byte arrays) |
| input buffer depth (`BUF_DEPTH`) | 4 | "much smaller than the SRAM" |

The cache count is reduced from 4096 because the memory needed to elaborate
and synthesize the top level grows linearly with it. A lint run needs about
12 GB at 1024 caches, so 4096 caches would need about 48 GB. Synthesis needs
more still. All per-array sizes are the published ones, and `NUM_CORES` can be
raised freely where memory allows.

At the defaults the engine holds 32,768 edges on chip (524,288 at 4096 caches). Every published graph
dataset is orders of magnitude larger (billions of edges), so those graphs are
processed as a stream of partitions loaded from flash. The 8-bit vertex fields
mean that vertex ids are renumbered within each partition. A GraphSAGE
neighbourhood of 50 sampled edges fits easily in one cache.

## What this RTL adds to, or leaves out of, the published design

The following are this design's own decisions. The published design describes
the arrays, their coupling and the algorithms, but not these:

* **Request set, timing and handshakes.** The request set and its encoding, the
  cycle schedule, and the valid/ready handshakes. Latencies were published only
  as nanoseconds per operation of the analog arrays.
* **Bit order.** LSB-first ring order (bit 0 in the last cell), so that an
  addition takes one rotation.
* **Min/max mechanism.** The one-bit-per-rotation candidate elimination; the
  SFU's internals were not published.
* **CAM details.** The row valid bit, the per-field wildcard, and the parallel
  SRC rewrite.
* **Multi-cache logic.** The response queues behind each cache, and the way
  results of several caches are merged.
* **Clock gating.** Row clock gating is modelled as a clock enable.

Not built:

* **Physical and analog parts.** The shiftable bit cell (an inverter loop in
  65 nm) and the CAM's match-line circuits are represented only by their logic.
* **Parts outside the engine.** The flash, the SSD controller and host
  interface, DRAM, and the systolic combination engine lie outside this design.
  The engine's `req` / `rsp` ports are where they would connect.
* **Multiplication and in-flash engines.** The row ALU's multiply, mentioned in
  passing, is not built. Neither are the per-flash-package engines drawn next to
  the controller-level one.

## Files

`rtl/` (one unit per file):

| file | contents |
|---|---|
| `gas_pkg.sv` | sizes, operation and ALU/SFU enums, request/response structs |
| `cam_array.sv` | CAM |
| `bit_alu.sv` | 1-bit row ALU |
| `fast_sram.sv` | FAST SRAM array with row rings and ALUs |
| `sfu.sv` | 1-bit special function unit |
| `gas_engine.sv` | one GAS cache and its controller |
| `input_buffer.sv` | FIFO (request buffer and response queue) |
| `global_alu.sv` | request issue and result merge |
| `graphic_ssd.sv` | top level |

`tb/` holds one self-checking testbench per unit, `tb_<unit>.sv`. Each predicts
its results with an independent reference model and prints
`TB_RESULT checks=N failures=M`. The testbenches cover:

* **`tb_gas_engine`**: the sample COO graph, the shortest-path example, the
  dense mode, 300 random requests, and the cycle cost of every kind of request.
* **`tb_graphic_ssd`** (4 caches): the whole engine end to end, covering
  aggregation over a random 64-vertex graph, shortest paths, connected
  components, insertion sort and the dense mode. It checks that idle-skip,
  issue stalls, multi-cache merges, find-and-update, addressed reads, dense
  adds and sort swaps all happen.
* **`tb_graphic_ssd_scale`**: one aggregation on 64 caches. This is the largest
  size simulated. The default of 256 caches lints cleanly, but was not
  simulated; a Verilator build takes about 2 minutes per 64 caches.

To simulate a unit with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/gas_pkg.sv tb/tb_gas_engine.sv --top-module tb_gas_engine -o sim
./obj_dir/sim
```

Verilator is a two-state simulator. Every register that is read is reset or
written first, except the memory contents, which the tests load before use.
