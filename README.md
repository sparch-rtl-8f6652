# SpArch in SystemVerilog: an outer-product sparse matrix multiplier

This design computes C = A x B for sparse matrices stored in CSR. It does so as
a sum of outer products. Column k of A times row k of B gives one *partial
matrix*. All partial matrices are then merged into C. The difficulty of this
method is memory traffic. There can be thousands of partial matrices, and an
accelerator that writes them to DRAM and reads them back spends most of its
bandwidth doing so. The design attacks that traffic in four ways:

1. **Merge while multiplying.** A 64-leaf merge tree takes the products as they
   are made, so up to 64 partial matrices are merged on chip and never stored.
2. **Condensed columns.** Each row of A is pushed to the left. Condensed column
   k holds the k-th nonzero of every row. The number of partial matrices drops
   from the column count of A to the length of its longest row. In CSR this
   costs nothing: element `row_ptr[r] + k` is the entry of row r in condensed
   column k.
3. **Huffman scheduling.** When there are more condensed columns than tree
   leaves, merging takes several *rounds*. Each round merges up to 64 nodes into
   one result that goes to memory. Merging small nodes first keeps the traffic
   down, and the best order is a 64-ary Huffman tree over the sizes.
4. **A row buffer for B with look-ahead replacement.** Condensed columns make
   the rows of B needed in an irregular order. A look-ahead FIFO works out when
   each row is next needed. The buffer then evicts the line whose next use is
   furthest away, which is Belady's rule made possible by looking ahead.

Elements inside the machine are COO triples `{row, col, val}`: two 32-bit
indices and one IEEE double (`sparch_pkg::elem_t`, 128 bits). The sort key is
`{row, col}`.

## Data path of one round

```
 A (CSR) --> mata_column_fetcher --> distance_list_builder --> matb_row_prefetcher --> multiplier_array --+
                                      (8192-entry look-ahead)    (1024 x 48-element lines)  (2 x 8 fp64 mul) |
                                                                                                           v
 earlier results --> partial_matrix_fetcher -----------------------------------------------> merge_tree (64 leaves,
                                                                                            6 layers, 1 merger/layer)
                                                                                                           |
                                               memory <-- partial_matrix_writer (1024-element FIFO, COO or CSR) <--+
```

`sparch_top` holds all of this together with a round controller. The
`huffman_scheduler` gives the controller the members of each round. Member j
goes to tree leaf j:

- a condensed column of A is added to the fetcher's list and uses the leaf's
  multiplier input;
- the result of an earlier round is given to the partial matrix fetcher and
  uses the leaf's fetcher input.

When the writer has written the round's result, the controller records its
address and length for later rounds. The last round writes C as CSR.

## The merger: the part that needs the most care

### Comparator array (`comparator_array`)

This block merges two sorted lists of N elements in one combinational step.
Tile (i, j) compares left element i with top element j and holds `<` or `>=`.
A column of `<` is added on the right and a row of `>=` at the bottom.

The *boundary* tiles are:

- the top-left tile;
- the `>=` tiles of the first row;
- a `>=` tile below a `<` tile;
- a `<` tile to the right of a `>=` tile.

Group the tiles by anti-diagonal (i + j = k). Each group contains exactly one
boundary tile, and that tile's smaller input is element k of the merged list.
The array uses (N+1)^2 comparisons and has no carry chain. On equal keys the
top element comes out first.

### Streaming merger (`array_merger`)

Each firing looks at a window of up to N elements at the head of each input
stream. It merges the 2N elements and emits the N smallest. Those N are safe
to emit: every element not yet seen in a stream is at least as large as the
last element of that stream's window. Each input then advances by however many
of its elements were emitted.

This is a variant. The original design advances one window by N per cycle. Both
produce N elements per cycle.

After a register stage come two more steps:

- **Adder slice.** It adds each element to its right-hand neighbour when the
  two have the same coordinate, and empties the neighbour.
- **Zero eliminator** (`zero_eliminator`). It packs the remaining elements
  toward lane 0 in log2 N registered layers. Each lane first counts the empty
  lanes below it. Layer b then moves the lane down by 2^b when bit b of that
  count is set.

Total latency is 1 + log2 N = 5 cycles, and the merger is fully pipelined.

Two rules keep the adders simple:

- A coordinate appears at most once in each stream, so at most two equal
  elements can meet.
- If merged elements N-1 and N have the same coordinate, only N-1 are emitted,
  so a pair is never split between firings.

### Merge tree (`merge_tree`)

The tree is a heap of node FIFOs (`lane_fifo`), 64 entries each, with one
shared `array_merger` per layer. In each layer a round-robin selector picks a
node whose children are ready. A child is ready when it holds N elements or
will receive no more. The parent must also have room for N elements beyond
those already in the merger pipeline. Results return to the selected node
5 cycles later, identified by a tag.

**Known limitation.** A leaf can fill up while its sibling is starved and not
yet finished. The starved leaf's data sits behind the full leaf's in the A
stream, so the tree stalls for good. The end-to-end test avoids this with leaf
FIFOs deep enough to hold a whole partial matrix. A complete fix would let a merger fire on elements whose row is
below the row of A currently being multiplied, because no later product can
come before them. That rule is not built.

## Scheduling (`huffman_scheduler`)

The queue holds (weight, id) pairs sorted by weight. It is a shift-register
queue with one insertion per cycle. Leaves are loaded with ids 0..n-1.

- The first round takes k_init = (n - 2) mod 63 + 2 nodes, and every later
  round takes 64. With that first-round size the last round comes out full.
- Each round's result is a new node with the next free id. Its weight is the
  sum of the members' weights, an estimate of its size, and it is inserted
  back into the queue.
- The weight of a condensed column is its number of products. The host
  computes it.

For the standard 12-leaf example (weights 15 15 13 12 9 7 3 2 2 2 2 2), the
internal nodes sum to 270 with 2 ways and to 144 with 4 ways, and the test
checks both.

## Look-ahead and row buffer

**`distance_list_builder`** numbers each A element as it enters an
8192-deep FIFO. A direct-mapped table of 1024 entries, tagged with the B row,
remembers the latest element for each row. When a new element for the same
row arrives, that earlier element's next-use field gets the new sequence
number. Elements leave only when the FIFO is full or at the end of the round,
so each one has seen 8192 elements of the future. Two rows that collide in
the table only lose a link; the result stays correct.

**`matb_row_prefetcher`** splits each B row into 48-element lines and looks up
(row, line) against all 1024 tags.

- On a miss it evicts a line: an empty line first, otherwise the one with the
  largest next-use time. It never evicts a line of the row it is currently
  serving.
- Every line of that row gets the element's next-use time.
- It then sends the row to the multiplier array 16 elements per beat.

Hit and miss counters are exposed. The tag search compares all 1024 tags in
parallel, where a hash table would be cheaper; this is the design's own
choice.

## Memory layout and interface

Memory is word addressed with 128-bit words.

| Data | Word | Contents |
|---|---|---|
| Row pointers | `base + r` | `row_ptr[r]` in bits 31:0 |
| A, B, C nonzeros | `base + i` | element i as an `elem_t` |
| Partial results | consecutive words | COO elements, sorted |

The HBM itself is outside the design. The top has four in-order request and
response ports (A reads, B reads, partial-result reads, writes), which is where
the memory controller would attach.

To run a multiplication:

1. Drive the bases, the number of rows of A and the number of condensed
   columns of A (the length of its longest row).
2. Load one weight per condensed column through `w_valid_i` / `w_weight_i`.
3. Pulse `start_i`.
4. Wait for `done_o`.

## What follows the original design and what does not

**Follows:**

- condensed CSR reading of A;
- a 16-wide comparator-array merger with adder slice and log-latency zero
  eliminator;
- a 6-layer, 64-way merge tree with one merger per layer and a source
  multiplexer at each leaf;
- k-ary Huffman rounds with k_init;
- an 8192-element look-ahead FIFO;
- a 1024 x 48 row buffer with furthest-next-use, line-by-line spilling;
- 2 x 8 double multipliers;
- a 64-input partial matrix fetcher;
- a 1024-element writer FIFO with COO-to-CSR conversion.

**Own choices:**

- A flat 16x16 comparator array instead of the two-level (4x4 of 4x4)
  hierarchical merger. It has the same function but more comparators.
- The merger emits the N smallest elements per firing (see above).
- One sequential A fetcher instead of 64.
- One B fetcher with pipelined reads instead of 16.
- A tag search over all lines instead of a hash table.
- A round controller in place of the host software scheduler.
- Node FIFO depth of 64.
- Word-level memory ports instead of HBM channels.
- Combinational double arithmetic: round to nearest even, subnormals flushed
  to zero, a NaN for infinite inputs.

## Verifying and simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. Example:

```
verilator --binary --timing --assert -Wno-fatal rtl/sparch_pkg.sv tb/tb_array_merger.sv \
          -y rtl -y tb --top-module tb_array_merger
obj_dir/Vtb_array_merger
```

`tb/tb_mem.sv` is a behavioural word memory with random back-pressure and
latency. It stands in for the HBM.

**Reference values.** The double adder and multiplier are checked bit for bit
against the simulator's own double arithmetic. The merging blocks are checked
against sorted reference lists computed in the testbench. Values there are
multiples of 1/8, so sums do not depend on the order of addition.

**Reduced sizes.**

- `tb_merge_tree` uses a 3-layer tree, because building the full tree in
  Verilator takes about ten minutes.
- `tb_sparch_top` runs the whole machine at reduced size: 4-way tree, 4-line
  buffer, deep leaf FIFOs. It needs 5 Huffman rounds, re-reads partial
  results, spills buffer lines and merges equal coordinates, and it checks C
  against a reference product.

**Full size.** No simulation at the default parameters has been completed.
The Verilator build of the full design takes about 11 minutes. A run on an
80-condensed-column matrix did not finish within 400,000 cycles, and whether
that was a merge tree stall or only slowness was not established. The largest
configuration simulated end to end is the one in `tb_sparch_top`:

- 16-lane mergers;
- a 2-layer tree with 2048-entry leaf FIFOs;
- a 64-entry look-ahead FIFO;
- 4 lines of 48 elements;
- a 64-entry writer FIFO.

The full-size merge tree block was simulated on its own, with 64 leaves, and
passed.
