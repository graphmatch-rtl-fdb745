# GraphMatch RTL: a worst-case-optimal-join subgraph matcher with AllCompare set intersection

Finding every copy of a small query graph (a triangle, a 4-cycle, a 5-clique)
inside a large data graph is, in join-based algorithms, dominated by set
intersections: to place the next query vertex, the neighbourhoods of all
already placed data vertices that the query connects it to must be
intersected. This design does those intersections in a streaming pipeline
that compares whole memory lines against each other in one cycle, and keeps
all partial matchings on chip while they are extended one query vertex at a
time.

The RTL is SystemVerilog (IEEE 1800-2017). All data-graph values (vertex ids,
CSR pointers) are 32-bit; the memory interface is 512 bits wide, so one line
holds 16 elements.

## Data layout in memory

Each memory channel holds the data graph twice in compressed sparse row
(CSR) form, once for outgoing and once for incoming edges: a pointer array
(`ptr[v]` .. `ptr[v+1]` delimit v's neighbours) and a neighbour array whose
per-vertex lists are sorted ascending. A fifth array receives the result
matchings. All addresses passed in the configuration are element addresses
(element = 4 bytes); the matchings array must start on a line boundary.

## The AllCompare intersector (`allcompare_intersector`)

This is the core idea. A set arrives as a stream of 16-element lines. The
**intersect operator** (`intersect_op`) holds one line of each input set and,
in one cycle, compares all 16 x 16 pairs for equality. The elements of set A
that found a partner are emitted (as a sparse line). Then the line whose
maximum is smaller is thrown away: every element in it is smaller than some
element still to come in the other set, so it cannot match anything later.
Equal maxima discard both lines. Every step therefore retires at least one
full line, which is why a two-set intersection runs at memory-line speed
rather than element speed.

The maxima come from **line maxers** (`line_maxer`) in front of each
operator; a line may be partly filled (start or end of a set that is not
line aligned, sets shorter than a line, sparse result lines), so the maximum
is taken over the valid elements only.

When either set's last line is discarded the result is complete: the
operator emits a line flagged `last` and drains the remaining lines of the
other set, so consecutive intersections stay aligned.

For more than two sets, operators are chained: the sparse result of operator
k passes a line maxer and becomes input A of operator k+1, whose input B is
the next set. A demultiplexer after each operator sends its result either on
down the chain or to the output multiplexer; the number of active sets
(2..4) is a run-time setting. The output port (`line_serializer`) delivers
one result element per cycle, followed by a terminator beat.

Design choice to note: the operator discards whole lines by their maxima.
A step-by-step illustration in the source publication also drops single
elements inside a line; that variant is not built.

## Fetchers and input set caching

`buffered_fetcher` turns (address, count) into line reads, marks each line's
valid elements, and prefetches: requests queue up, and every issued read
reserves one of 32 response-buffer slots, so responses never have to be
stalled. `cached_fetcher` wraps it with a one-set cache: the controller
remembers the address and count of the previous request; an identical request
is replayed from the cache (lines written from cache address 0 as the fetched
copy passed through). A flag FIFO keeps cached and fetched requests in
order, so a replay can only start after the set it repeats has been written.
Sets larger than the cache (64 lines here, a chosen size) are never
replayed.

## The matching pipeline (`graphmatch_instance`)

A partial matching (`matching_t`) holds up to six vertices, each with its id
and the metadata of its neighbourhood (left bound into the neighbour array and
size), plus a count `n` and an end-of-stream flag.

1. `matching_source` reads pointers and neighbours of a vertex interval
   sequentially and emits every edge (v, u) as a two-vertex matching, with
   v's metadata filled in.
2. `matching_filter` drops matchings whose selected vertices have too small a
   neighbourhood (size 0, or smaller than the query vertex's degree: failing
   set pruning) or, for isomorphism, whose newest vertex repeats an earlier one.
3. Four `matching_extender`s, one per added query vertex (levels 2..5). Each
   is: `pointer_fetcher` (loads the metadata of one vertex from the outgoing
   or incoming pointer array, needed when the query switches direction) ->
   filter -> `matching_intersector` (maps matching vertices to intersector
   spots, queues the matching, emits one extended copy per intersection
   result element) -> filter (distinct vertices).
4. After extenders 0..2 a `matching_demux` sends matchings on, or, when the
   query has exactly that many vertices, to the `matching_mux`; the last
   extender always feeds the mux.
5. `matching_sink` packs the vertex ids of complete matchings densely into
   lines and writes them out.

All memory traffic of an instance (19 read ports and the sink's write port)
is merged by `request_merger` onto one memory channel; read responses come
back in order and are routed by a queue of requester indices.

**End of a query.** The source emits an end-of-stream marker after its last
edge. Every stage keeps order (FIFOs in the fetchers and intersectors), so
the marker reaches the sink after every matching; the sink flushes its
partial line and `instance_controller` reports done with the cycle and
matching counts.

## Multiple instances and control (`graphmatch_top`)

`graphmatch_top` has four independent instances, each with its own memory
channel holding a full copy of the graph. A query is parallelised by giving
each instance a vertex interval; renumbering vertices with a stride (v0,
v100, v200, ...) before building the CSR balances the intervals and is done
on the host. `control_interface` exposes a 32-bit register bus: per instance
(base = instance x 256) word 0 bit 0 starts a query, word 1 gives busy/done,
words 2..5 give cycles, matchings, cache hits and pruned matchings, and words
16 onward hold the packed `inst_cfg_t` (least significant word first).

### Programming a query

For query vertices q0, q1, ... in the chosen order: the source gets the
outgoing pointer/neighbour arrays; filter f0 checks q0's degree (and
distinctness); extender k (adding q(k+2)) gets in `ptr` the position and
pointer array of the vertex whose metadata is needed next, in `isect` the
number of sets and, per spot, which matching vertex and which neighbour array
(outgoing or incoming) to use, and in `f1`/`f2` the pruning thresholds and
the isomorphism check. `query_size` is the number of query vertices (3..6).

## Departures, assumptions and limits

* Sizes taken from the prototype: 4 instances, 6 levels, 32-bit values,
  16-element lines, up to 4 sets per intersection, buffer depth 32.
* Chosen here: cache size (64 lines; 2 lines in pointer fetchers), FIFO
  depths, the in-order memory port, the end-of-stream marker, the register
  map, the terminator beat, dense packing of results.
* Queries longer than six vertices (materialising and re-reading partial
  matchings) are not supported.
* The host side (CSR building, dense renumbering, stride mapping, query
  parsing), the DRAM channels and the PCIe shell are outside this RTL.

## Verification status

Only the buffered fetcher has a self-checking testbench
(`tb/tb_buffered_fetcher.sv`, random requests against a memory model with
random stalls and back-pressure, plus a streaming-rate check). Every other
module, up to `graphmatch_top`, compiles and passes lint, but has **not**
been simulated: treat the intersector, the matching pipeline and the
end-of-query logic as unverified.

## Simulating

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/gm_pkg.sv tb/tb_buffered_fetcher.sv --top-module tb_buffered_fetcher
obj_dir/Vtb_buffered_fetcher
```

`tb/mem_model.sv` is a behavioural memory channel (fixed latency, optional
random stalls) for writing further testbenches.
