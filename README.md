# A sparse-matrix graph processor in SystemVerilog

Graph algorithms can be written as sparse linear algebra: a graph is an
adjacency matrix, and a breadth-first step, a shortest-path relaxation or a
triangle count become sparse matrix products and element-wise operations
with the usual `+` and `*` swapped for `min`, `max`, `and`, `or` and so on.
On a conventional processor this work is slow for two reasons. Most of the
effort goes into finding which elements meet (sorting and matching
indices), not into arithmetic. And the data moves between processors as
scattered single elements, which a network built for large messages
handles badly.

This design attacks both problems directly. Each node is a set of
streaming accelerators (a matrix reader, a sorter, an ALU, a matrix writer
and a communication unit), not a CPU with a cache. The accelerators are
chained into a pipeline that handles one matrix element per clock. The
sorter is a k-way merge sorter whose minimum search is a systolic array, so
it finds the smallest of k candidates every clock. Nodes exchange single
elements as small packets on a torus network. Each node sends its packets
in a pseudo-random order so that traffic spreads over the links.

The default build is an 8-node machine on a one-dimensional ring with
32-way sorters. The RTL is parametric in the torus dimension and radix. The
node address is 20 bits wide, enough for a million nodes.

## Elements and streams

Everything that moves is an *element* `elem_t = {row, col, val}` of three
32-bit fields (96 bits, `gp_pkg`). The element is also the word of node
memory.

Modules pass elements on valid/ready streams. A stream ends with an *end
token*: a beat with `last = 1` that carries no element. Every module passes
the end token on after its last result. This is how a pipeline of several
modules knows that an operation has finished.

## The node (`node_processor`)

A node holds one of each accelerator. A **stream switch** takes the place
of a shared bus. There are four sinks (ALU, sorter, communication transmit,
writer). Each sink takes its input from one of four sources (reader,
sorter, ALU, communication receive). The choice is made in register
`ROUTE`: for sink `s`, bits `[4s+1:4s]` give the source and bit `4s+2`
enables the sink. A module cannot feed itself. Setting the switch and the
other registers decides what operation the node performs:

| operation | pipeline |
|---|---|
| `C = A .+ B`, `A .- B` | reader (A then B) → sorter → ALU reduce (`ADD`/`SUB`) → writer |
| `C = A .* B`, `A ./ B` | the same with `match_only`, so only indices present in both survive |
| `C = op(k, A)` | reader → ALU map with the constant → writer |
| transpose / redistribute | reader → transmit … receive → sorter (by column) → writer CSC |
| SpGEMM phase 1 | reader (PAIR) → ALU map `MUL` → transmit; receive → sorter |
| SpGEMM phase 2 | sorter → ALU reduce `ADD` → writer CSR |

**Control bus.** `cb_sel`, `cb_we`, `cb_addr`, `cb_wdata`. When
`cb_addr[ADDR_W]` is 1 the access goes to node memory; when it is 0 it goes
to a register. Read data comes back one clock later with `cb_rvalid`. The
node controller, a plain microprocessor in the architecture, is not part of
this RTL. Whatever drives the control bus plays its part. In the
testbenches that is the testbench itself.

Register map (word addresses, from `gp_pkg`):

| addr | name | fields |
|---|---|---|
| 0 | CMD | pulses: b0 reader start, b1 writer start, b2 end receive stream |
| 1 | ROUTE | stream switch, see above |
| 2 | RD_FMT | [1:0] format (0 COO, 1 CSR, 2 CSC, 3 PAIR), [12:8] vshift, [16] no end token |
| 3–9 | RD_BASE_A, RD_PTR_A, RD_NNZ_A, RD_BASE_B, RD_PTR_B, RD_NNZ_B, RD_NVEC | reader addresses and sizes |
| 10 | ALU | [3:0] op, [4] reduce, [5] match_only, [6] use constant operand |
| 11 | ALU_CONST | constant operand |
| 12–15 | WR_FMT, WR_BASE, WR_PTR, WR_NVEC | writer format/vshift, addresses, vector count |
| 16 | MISC | [0] send by column index, [1] sort column-major |
| 20 | STATUS | b0 reader busy, b1 writer busy, b2 writer done, b3 sorter busy, b4 sorter overflow, b5 transmit pool empty, b6 writer range error |
| 21–26 | TX_COUNT, RX_COUNT, WR_NNZ, ECC_CORR, ECC_DROP, MATCHES | counters |

**Node memory** lies outside the node. In the prototype it is DDR3. The
node has two asynchronous read ports (elements, and pointers or control
reads) and one write port. The writer has priority on the write port. The
control bus reads through the pointer port, so it should only read while
the reader is idle.

## Storage formats: reader and writer

Matrices are stored in three formats. **COO** keeps one `{row,col,val}`
word per non-zero. **CSR** keeps the non-zeros row after row, plus a
pointer array with one entry per row giving the offset where that row
starts. **CSC** does the same by columns. There is one pointer per vector
and no terminating entry. The last vector ends at `nnz`. In the CSR and
CSC data words the compressed index field is unused and stored as zero.

`matrix_reader` rebuilds that index from the pointer array, so it always
emits complete coordinate elements. Global index `(k << vshift) + voffset`
is given to local vector `k`. This lets a node that holds every 8th row
report true row numbers (`vshift` = 3, `voffset` = node id).

**PAIR** mode forms the partial products of `A × B`. A is stored as CSC and
B as CSR. For each `k`, every element of column `k` of A is paired with
every element of row `k` of B. The reader emits `(i, j, a_ik)` and carries
`b_kj` on the side output `out_b` for the ALU.

`matrix_writer` does the reverse. It expects a stream sorted by the
compressed index. It writes the data array and fills in the pointer array
as the vectors go by, including pointers for empty vectors. Each pointer
write takes the single write port for one clock and stalls the input for
that clock. An element whose vector is outside `nvec` is skipped and sets
`range_err`.

## The k-way systolic merge sorter

This is the part that does most of the work, and the hardest to follow.

**The merge array** (`merge_array`) holds up to K entries `{key, run id,
payload}` in a row of cells, kept in ascending order; cell 0 holds the
smallest. Each clock it can *pop* the head, *insert* one entry, or do both.
The inserted value is broadcast to every cell. Each cell then looks only at
its own content, its two neighbours and the insert value to choose what to
hold next:

- on pop only, every cell shifts left;
- on insert only, cells right of the insertion point shift right;
- on both, cells up to the insertion point shift left and the new entry
  drops into the gap.

So the minimum of K candidates is always in cell 0, with no comparator
tree. Equal keys are ordered by run id. This makes the merge stable, which
the ALU relies on.

**The sorter** (`kway_sorter`) has two buffers of DEPTH elements used as a
ping-pong pair. A sort block is loaded in arrival order. The end token
then starts the passes. Pass `p` treats the buffer as runs of length
`K^p`, already sorted, and merges each group of K runs into one run in the
other buffer:

1. *Fill.* The first element of each non-empty run of the group is
   inserted into the merge array, one per clock.
2. *Merge.* Each clock the head is popped and written out. The next
   element of the same run (its run id says which) is inserted in the same
   clock, until that run is exhausted.

Passes continue until a single run covers the block (`log_K n` passes).
The sorted block then leaves on the output, followed by an end token.

One group with `r` non-empty runs and `s` elements costs
`r + (r<K) + s + 1` clocks. A pass over `n` elements therefore costs about
`n` clocks, and a whole sort about `n·log_K n` clocks: `K = 32` sorts 1024
elements in 2 passes, where a 2-way sort needs 10. Elements beyond DEPTH
are dropped and set the sticky `overflow` flag. The controller must split
larger jobs into blocks.

## The streaming ALU (`stream_alu`)

The ALU has two modes:

- **MAP** outputs `op(val, b)` for each element. The operand `b` comes with
  the element in PAIR mode, or from `ALU_CONST`.
- **REDUCE** expects elements sorted by index. It keeps one accumulator and
  combines each element with it while `{row,col}` stays the same. When the
  index changes, it emits the result. With `match_only`, runs made of a
  single element are discarded, which gives the intersection needed for
  element-wise multiply and divide.

The operators are `ADD SUB MUL DIV MIN MAX AND OR XOR FIRST SECOND` on
32-bit signed integers. Division by zero gives 0. The ALU accepts one
element per clock with one register stage.

## Communication module and packets (`comm_module`)

On the send side an element becomes a packet `{dest, row, col, val, ecc}`:
20 + 96 bits of message plus 8 check bits, 124 bits in all. The
destination is `(row or col) & dest_mask`, which spreads rows (or columns)
cyclically over a power-of-two number of nodes. The check bits are a
Hamming SECDED code: 7 Hamming bits over the 116 message bits, plus an
overall parity bit.

Packets are not sent in arrival order. They enter a pool of TX_SLOTS slots,
and a 16-bit LFSR picks which occupied slot goes next. A node working
through a sorted matrix would otherwise send long bursts to the same
destination. Random order turns these bursts into a mix of destinations
that loads the links evenly.

On receive the module decodes the check bits. A single-bit error is
corrected and counted. A double-bit error is dropped and counted. The
element then goes into the node as a stream. The receive stream has no
natural end, because packets from other nodes can come at any time. The
controller therefore pulses `CMD[2]` once it knows all traffic has arrived,
and the module appends an end token after the packets it holds.

## Torus network (`torus_router`, `torus_network`)

Each node has a router with a local port (0) and two ports per dimension
(`1+2d` for the + direction, `2+2d` for the − direction). Node address
digit `d` is `id[d·log2(RADIX) +: log2(RADIX)]`.

- **Routing** is dimension-ordered. The lowest differing dimension is
  corrected first, the shorter way round the ring. A tie at half the ring
  goes the + way.
- **Deadlock** on the rings is avoided with bubble flow control. A packet
  may enter a ring (from the local port, or when it turns into a new
  dimension) only if the next input FIFO has two free slots. A packet
  already travelling in that ring needs only one free slot.
- **Arbitration** is round-robin per output port.
- **Latency.** A lone packet takes `hops + 2` clocks from injection to
  ejection.

`torus_network` wires RADIX^NDIM routers into the torus. The links are
plain wires with the router FIFO as the only register.

## The system (`gp_system`) and a matrix multiply

The top is RADIX^NDIM nodes on the network plus a **global control bus**
(`gcb_*`). The bus addresses one node, or broadcasts writes to all nodes
(`gcb_bcast`). Node memories and router statistics are brought out as
arrays of ports.

`C = A +.* B` runs in two phases. Column `k` of A and row `k` of B are
stored on node `k mod N`, and row `i` of C is produced on node `i mod N`.

1. **Phase 1.** Each node reads its A columns and B rows in PAIR mode,
   multiplies in the ALU and sends each partial product to the owner of
   its row. Each receiving node sorts what arrives.
2. **Phase 2.** When the transmit and receive counts summed over all nodes
   agree and every transmit pool is empty, the controller ends the receive
   streams. Each node then sends its sorted partial products through the
   ALU (REDUCE, ADD) into the writer as CSR.

## Parameters

| parameter | default | where |
|---|---|---|
| `NDIM`, `RADIX` | 1, 8 | 8-node ring of the prototype; the architecture is a 6-D torus |
| `K` | 32 | merge ways |
| `SORT_DEPTH` | 1024 | elements per sort block (own choice) |
| `TX_SLOTS` | 16 | send pool (own choice) |
| `FIFO_DEPTH` | 4 | router input FIFO (own choice, ≥ 2 for the bubble rule) |
| `ADDR_W` | 32 | node memory word address |
| `NODE_W` | 20 | node address bits (`gp_pkg`) |

`K`, `SORT_DEPTH` and `RADIX` should be powers of two.

## Simulation

Each module in `rtl/` has a self-checking testbench `tb/<module>_tb.sv`.
Each prints `TB_RESULT checks=N failures=M` and stops through a watchdog if
it hangs. With Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module gp_system_tb -Irtl -y rtl \
    rtl/gp_pkg.sv tb/gp_system_tb.sv
./obj_dir/Vgp_system_tb
```

| testbench | what it shows |
|---|---|
| `merge_array_tb` | 4000 random pop/insert/both operations against a sorted-list model |
| `kway_sorter_tb` | random blocks on a 4-way/64-entry sorter and the default one, against a stable reference sort, row- and column-major, exact clock count of the formula above, overflow |
| `stream_alu_tb` | every operator in MAP at one element per clock; REDUCE with ADD, SUB, MIN, MAX, XOR, match_only, output back-pressure |
| `matrix_reader_tb` | the same small matrix in COO, CSR, CSC, empty vectors, vshift/voffset, PAIR products |
| `matrix_writer_tb` | the 4×4 example written as CSR and CSC, random matrices with empty rows as CSR and COO, pointer stalls |
| `comm_module_tb` | loopback with random 1- and 2-bit errors, corrections, drops, send order really shuffled |
| `torus_router_tb` | direction choice, bubble rule, round-robin fairness |
| `torus_network_tb` | random full-rate traffic with ejection stalls on a 4×4 2-D torus and the 8-ring: each packet arrives once at the right node, lone-packet latency, no deadlock |
| `torus_dest_order_tb` | 512-node 8×8×8 torus: the same 8192 packets sent in destination order and in random order; both delivered exactly once, random order must finish first (measured 1036 against 1174 clocks, 1.13×; builds slowly, several minutes) |
| `node_processor_tb` | one node: `.+ .- .* ./`, scaling, CSR→CSC through its own network port |
| `gp_system_tb` | 64×64 SpGEMM on the default 8-node system, with counters showing remote traffic, accumulation, multi-pass sorting, network back-pressure and empty rows |

The system test runs at the default parameters in about a minute.

## How far it follows the source architecture

It follows the architecture in these points:

- the node's module set;
- streaming one element per clock;
- the storage formats;
- k-way merge sorting with a systolic minimum search and `n·log_k n` cost;
- ALU accumulation only on matching indices;
- one-element messages with destination header and error correction;
- randomized send order;
- a torus network;
- the 8-node ring prototype.

The architecture describes these parts only by their function, so their
insides here are this design's own:

- the merge-array cell rule;
- the ping-pong sorter buffers and the sort block size;
- the stream switch and register map;
- the PAIR reader mode for outer products;
- the SECDED code;
- the LFSR send pool;
- the router (dimension order, bubble flow control, FIFO depth);
- the global control bus protocol.

Known gaps:

- Message priority in the packet header is not implemented.
- The node controller (a microprocessor) and the host are not included.
  Their sequencing is shown in the testbenches.
- Memory is modelled as asynchronous-read arrays. A real DDR3 controller
  would need a latency-tolerant read interface.
- Links are wires, not optical channels.
- On an 8×8×8 torus, random send order beats destination order by only
  about 1.13× in `torus_dest_order_tb`. The architecture reports a much
  larger gain, about 6×, from its own network simulation, whose traffic
  and router are not known.
- Arithmetic is integer only. The number format is not specified by the
  architecture.
- A sort block larger than `SORT_DEPTH` overflows. The controller must
  split the work.
