# SegFold in SystemVerilog

SegFold is an accelerator for sparse-times-sparse matrix multiplication,
C = A x B, built around the *Segment* dataflow. It never fixes the loop order
ahead of time. Every cycle a scheduler looks at a window of A's columns. It
picks a set of A elements (m,k), no two in the same row and as many as
possible in the same column. It then streams the B rows those elements need into a 2D
array of processing elements (PEs). Each PE row holds one row of C as a short
sorted list of (column, partial sum) entries. A B element entering that row
slides along the list until it finds its column, where it is accumulated, or
the gap where its column belongs, where a new entry is opened by shifting the
larger entries one place right. Entries that no longer fit into the row's 16
PEs are kept in a small per-row scratchpad.

This repository contains synthesizable RTL for that design at the paper's
main configuration: a 16 x 16 PE array, an active window of 32 columns of A,
and 4 B rows multicast in parallel. It includes self-checking testbenches for
every block and for the whole accelerator. It processes one *tile*: 16 rows of
A against the B rows of one slice of C's columns. The host loads the tile
into on-chip tables and reads back the finished C rows.

## 1. The work loop, end to end

```
 host writes tile ─► mem_ctrl ──(4 channels: B segment + row set)──► vec_multicast
                      │  active window (32 k)                              │
                      │  select_a: which (m,k) this cycle                  ▼ one segment per row
                      └► A value per PE row ─────────────────────►  16 x pe_row
                                                                    row_shifter ─► merge_row (16 PEs)
                                                                       ▲ ipm            │ spill / overflow
                                                                       └──────────── psum_spad
 host reads C rows  ◄──────────────────── drain, one entry per cycle per row ◄─────────┘
```

1. **Load.** The host writes the tile into `mem_ctrl`. A is stored by
   column. For every k there is a 16-bit mask of the rows that have a
   nonzero, and a pointer into a value array holding only the nonzeros.
   B is stored as *doubly compressed* sparse rows: a list of the non-empty
   rows, a pointer per listed row, then column indices and values. The host
   then pulses `start`.
2. **Window.** Slots of the active window are filled from B's row list, one
   per cycle, skipping every k whose A column has no nonzero in this tile.
   Such a k could never produce a product. A slot keeps the A mask of its k,
   with the bits of already dispatched elements cleared. When its mask is
   empty, the slot frees and the next k takes its place: the window slides
   over K.
3. **Selection** (`select_a`, one combinational pass per cycle). The slots
   are scanned in order. From each slot, every row m that is still unused in
   this cycle is taken. Taking all rows of one k at once is the point: one B
   row then feeds several PE rows (B reuse). A row m is never taken twice in
   a cycle, so two products for the same C row never race. Two hardware
   limits apply:
   - a row is eligible only if its PE row is not still receiving an earlier
     B row;
   - at most one k per free multicast channel is chosen (four channels).
4. **Streaming.** Each chosen k occupies one channel until its B row has been
   sent, SEG = 4 nonzeros per cycle. The channel carries the set of PE rows
   that want this B row. A segment moves only when all those rows can take
   it, so every row sees the same sequence. Each PE row is also sent the A
   value of its element. That value is looked up once, at selection, as
   `a_val[a_ptr[k] + (mask bits of column k below m)]`.
5. **Reduction** in the PE rows (sections 2 to 4).
6. **Drain.** When the scheduler is done and every PE row is idle, the top
   asks all rows to drain. Row m then emits its C entries on
   `c_valid[m]/c_col[m]/c_val[m]`:
   - first the PE entries, in increasing column order;
   - then the scratchpad entries, in slot order;
   - at most one entry per cycle. Empty slots take a cycle but produce
     nothing.
   The drain takes P + SPAD_N = 48 cycles. The rows then clear themselves,
   and `done` pulses for one cycle.

## 2. The merge network: how a PE row keeps C sorted

This is the part of the design that needs the most care. Each PE row is
built from:

- 16 **PEs**. Each holds one C entry (valid, column c, 32-bit partial sum),
  a FIFO of operand pairs waiting to be multiplied, and a multiply-accumulate
  unit that retires one pair per cycle.
- 16 **switches**. Each holds at most one travelling B element: its column b,
  its value, and the A value it must be multiplied with.

Invariant: valid entries fill positions 0, 1, 2, ... with no gap, and their
columns strictly increase to the right. In every cycle, at every position
holding an element, the PE compares b against c:

| comparison | action |
|---|---|
| b == c | match: the pair (a, b) is pushed into that PE's FIFO |
| b > c | forward: the element moves one position right, if that switch is free this cycle |
| b < c, or the PE is empty | request an insertion here |

Only one insertion per row per cycle is granted, to the leftmost
requester. An insertion at position y:

- writes a new entry with column b and a zero sum at y;
- moves every entry at y .. 15 one position right in the same cycle.

Each moved entry takes its sum and its waiting FIFO pairs with it. The
inserting element's own product enters the new entry's FIFO. Elements still
travelling stay correct: the new entry is smaller than every entry it
displaces, so an element that was legal at its position stays legal.

**Legality.** An element placed at position s must have a larger column than
every entry left of s. Otherwise it would walk right past its own column.
Position 0 is always legal, but starting every element there would make each
one walk the whole row. The Index-to-PE mapper finds a better start.

## 3. Finding the start position: IPM and row shifter

**IPM** (`ipm`). A binary search tree mirrors the row's columns. For 16
positions:

- the root compares against position 7;
- level 1 compares against positions 3 and 11;
- level 2 compares against positions 1, 5, 9 and 13;
- the leaves are the even positions 0, 2, ..., 14.

At each node the search goes right if the node holds a column and b is
larger; it goes left otherwise (smaller or equal, or an empty node). The leaf
reached is the answer. Its own column is not compared. Example: with column 9
at the root and empty nodes below, b = 11 goes right, left and left, and
lands on leaf 8. Each level has a pipeline register, so a lookup takes 3
cycles and one can start every cycle.

The IPM's tables are not rewritten at once when the row changes. The merge
row flags every position whose column changed, and the IPM copies one flagged
position per cycle into its table, round-robin. The table can therefore lag
behind the row. This is safe because a stored column only ever gets smaller
while a tile runs: entries move right, and what lands at a position is the
smaller entry from its left. A stale key is therefore larger than the true
one, or empty. Both can only send the search further left, to a position
that is still legal, just longer to walk.

**Row shifter** (`row_shifter`). Only the first element of a segment is
looked up. Element j of the segment is placed at s + j, clamped to the last
PE. This is legal: the elements of one B row have increasing columns, so if
the first clears every entry left of s, element j clears every entry left of
s + j.

Segments wait in a 4-deep queue while their lookups are in flight. The head
segment injects its elements in order, as many per cycle as there are free
switches. It stops at the first element whose switch is busy, so elements of
a segment never overtake each other. A new segment is accepted only when the
queue has room. That gives the row's back-pressure to the multicast channel.

## 4. When a row is longer than 16: the scratchpad

A C row can have more nonzero columns than a PE row has PEs. The per-row
scratchpad (`psum_spad`) holds up to 32 further entries, looked up by
column. Entries reach it in two ways:

- **Spill.** An insertion into a full row pushes the entry at position 15
  out. That entry, with its complete sum, is written to a free scratchpad
  slot. The insertion is granted only when the last PE's FIFO is empty and
  the scratchpad has room, so no pending product is lost.
- **Overflow element.** An element that must move right from position 15
  belongs to a column beyond the row. The scratchpad multiplies it and adds
  the product to the slot with that column, or opens a new slot.

The scratchpad has one port. A spill and an overflow element compete for it;
the spill wins, and the element waits. The PE row plus scratchpad hold 48
distinct columns of one C row. When a row's scratchpad is full, the top's
sticky `spad_overflow` flag rises. A row of exactly 48 columns still
completes correctly. A 49th column, however, finds no place: its element or
insertion waits forever, and the tile never finishes. The host must choose
column slices narrow enough that no C row exceeds 48 entries.

## 5. Timing summary

| step | latency / rate |
|---|---|
| window refill | one slot per cycle |
| selection | combinational, every cycle |
| channel | one segment of up to 4 nonzeros per cycle |
| IPM lookup | 3 cycles, fully pipelined |
| shifter injection | up to 4 elements per cycle, in order |
| merge network | one hop per cycle; one insertion per row per cycle |
| PE multiply-accumulate | one pair per cycle per PE |
| drain | 48 cycles (P + SPAD_N) |

`perf` counts events for inspection:

- cycles and (m,k) pairs;
- cycles with several k selected, and B rows multicast to several PE rows;
- window retirements;
- insertions with a shift, and appends;
- spills and scratchpad reductions;
- IPM offsets (a start right of 0);
- PE accumulations and forwards.

## 6. Number formats and interfaces

- **Numbers.** A and B values are 16-bit signed integers, C sums are 32-bit
  signed integers, and column indices are 16 bits (`segfold_pkg`). The paper
  does not fix a number format. Integers keep the arithmetic exact, so tests
  can compare results bit for bit. Changing `val_t`/`acc_t` in the package
  changes every datapath.
- **Reset.** Asynchronous reset, active low, for every register. The table
  memories are not reset; they are written before use.
- **Host write port.** `wr_sel` selects one of seven arrays: A mask, A
  pointer, A value, B row list, B row pointer, B column, B value. `wr_addr`
  is the index and `wr_data` the value.
  - B's pointer array has one more entry than the row list, marking the end
    of the last row.
  - `b_nrows` gives the length of the row list.
- **Capacities per tile.** K up to 32768 (`K_MAX`), 4096 A nonzeros,
  8192 B nonzeros, 48 C entries per row.

## 7. Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| R | 16 | PE rows (rows of A per tile) | paper |
| P | 16 | PEs per row | paper |
| W | 32 | active window slots | paper |
| BRL | 4 | B rows multicast in parallel | paper |
| R_MAX | 16 | pairs selected per cycle | limit named by the paper, value chosen here |
| SEG | 4 | nonzeros per segment and cycle | chosen here |
| FIFO_DEPTH | 2 | operand pairs per PE FIFO | chosen here |
| SPAD_N | 32 | scratchpad entries per row | chosen here |
| QDEPTH | 4 | segments queued per row shifter | chosen here |
| K_MAX, A_NNZ_MAX, B_NNZ_MAX | 32768, 4096, 8192 | tile table sizes | chosen here; K_MAX covers the largest K among the paper's test matrices |

## 8. Where this RTL departs from the paper

- **Spatial folding is not implemented.** In the paper a long C row can spill
  over into neighbouring PE rows: each router picks its first free neighbour
  in the order right, up, down, left. The paper does not say how matches,
  shifts, IPM lookups and drains then work across rows. Here a row only ever
  uses its own 16 PEs plus its scratchpad (temporal folding). The switches
  therefore only pass elements to the right, which is the paper's default
  direction.
- **Spills come from the row end.** The paper lets a PE spill its entry to
  the scratchpad in place. Here only the entry pushed off position 15 is
  spilled. Elements for columns beyond the row are reduced in the
  scratchpad.
- **Memory system.** The paper puts a 1.5 MiB cache, a request-coalescing
  unit and HBM2 behind the memory controller. Here the controller reads
  on-chip tables that the host fills before `start`. Tiling of whole
  matrices, along M and along C's columns, is left to the host, as in the
  paper, where tile sizes are also chosen in advance.
- **Added details.** The paper leaves these open; this design fixes them:
  - one insertion per row per cycle, to the leftmost requester;
  - the all-rows-ready handshake on a multicast channel;
  - the shifter queue and its in-order injection;
  - one IPM table write per cycle;
  - the drain order and timing;
  - the scratchpad size and its single port;
  - FIFOs that hold (a, b) pairs, because one PE can receive matches from
    B rows with different A values.

## 9. How big a problem fits

A tile is 16 rows of A against the B rows of a slice of C's columns. For
the paper's SuiteSparse matrices (1,098 to 23,133 rows and columns,
densities 3.5e-4 to 4.1e-3, with B = A^T), the tile tables fit at the
defaults on average:

- K is at most 23133, below `K_MAX`;
- an A tile has at most a few hundred nonzeros;
- with 48-column slices of C, the B tile stays below 8192 nonzeros and no C
  row can exceed 48 entries.

Synthetic square matrices of 256 to 1024 at densities 0.05 and 0.1 also
fit. Dense cases (density 1.0 at 512 and 1024) exceed the 4096 A nonzeros
of one tile. Real matrices are floating point, while this datapath is
integer.

## 10. Files

RTL (`rtl/`), bottom up:

| file | block |
|---|---|
| `segfold_pkg.sv` | widths, element and entry structs, merger result, host-write selector, event counters |
| `pe_fifo.sv` | operand FIFO of a PE |
| `pe.sv` | merger comparator, C entry, multiply-accumulate |
| `pe_switch.sv` | element register and move decision at one position |
| `merge_row.sv` | 16 PEs + switches, insertion arbitration, shifts, spill/overflow |
| `psum_spad.sv` | per-row scratchpad |
| `ipm.sv` | pipelined binary-search start-position mapper |
| `row_shifter.sv` | segment queue and aligned injection |
| `pe_row.sv` | one PE row with IPM, scratchpad, shifter and drain |
| `select_a.sv` | per-cycle (m,k) selection |
| `vec_multicast.sv` | channel-to-row crossbar |
| `mem_ctrl.sv` | tile tables, active window, channels, A value lookup |
| `segfold_top.sv` | the accelerator |

Testbenches (`tb/`): one per block, `tb_<block>.sv`. Each drives random
stimulus from `$urandom` and compares against a model computed inside the
testbench. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_segfold_top` runs the full-size accelerator on four random tiles. It
  checks every C entry against a dense product and that every mechanism
  above occurred.
- `tb_segfold_workloads` runs one full-size tile of each synthetic workload
  size the SegFold evaluation uses (256, 512 and 1024, at densities 0.05
  and 0.1). It checks the results and prints cycles per multiply-accumulate.
- `tb_pe_row` checks a single 16-PE row against a per-row dense product.
- `tb_mem_ctrl` checks that the scheduled products add up to A x B.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/segfold_pkg.sv tb/tb_segfold_top.sv --top-module tb_segfold_top
./obj_dir/Vtb_segfold_top +verilator+rand+reset+2
```

Assertions in the RTL check several rules:

- the row order and the no-gap invariant;
- that a switch never receives two elements;
- that the scratchpad is only written when it has room;
- that selected rows are free;
- that segments start with a valid element.

Verilator reports two kinds of lint warnings that are left as they are:

- **Unused bits.** Some are upper address or data bits. Others are status
  outputs of sub-blocks that the parent does not need.
- **rst_n as both asynchronous reset and synchronous input.** The second use
  is the `disable iff` of the assertions, which is not logic.
