# TCIM in SystemVerilog: triangle counting with AND and BitCount in computational STT-MRAM

This is a register-transfer-level model of the triangle-counting accelerator described in
"TCIM: Triangle Counting Acceleration With Processing-In-MRAM Architecture" (Wang et al.).
It is written from that publication and is not the authors' code. Where the publication gives
no detail, the choice made here is stated below and in the opening comment of each file.

## The idea

Counting triangles normally means intersecting neighbour lists or multiplying adjacency
matrices. Both need a lot of data movement. TCIM turns the count into two bitwise operations
that a memory array with modified sense amplifiers can do in place.

Store the graph as the upper triangle of its adjacency matrix `A`, so `A[i][j] = 1` only for an
edge with `i < j`. Call the row `R_i = A[i][*]` and the column `C_j = A[*][j]`. Then

    triangles = sum over all edges (i,j) of BitCount( AND(R_i, C_j) )

Bit `k` of `AND(R_i, C_j)` is 1 exactly when `i < k < j` and both `(i,k)` and `(k,j)` are edges.
So every triangle is found once, at its edge from the lowest to the highest vertex. The small
example used throughout the RTL and the testbenches has 4 vertices and the edges 0-1, 0-2, 1-2,
1-3 and 2-3. Its five edges give the BitCounts 0, 1, 0, 1, 0, so it has 2 triangles.

In the array, an AND is a read with two word lines on at once. The sense amplifier sees two
magnetic tunnel junctions (MTJs) in parallel. Its reference is placed between "both cells low
resistance" and "one low, one high". So it outputs 1 only when both cells hold 1. A bit counter
behind the sense amplifiers gives the BitCount.

## Slices: skipping the zeros

Real graphs are extremely sparse, so almost all of `R_i` and `C_j` is zero. Rows and columns
are therefore cut into slices of |S| = 64 bits. Slice `k` holds elements `64k .. 64k+63`, with
element `64k+b` in bit `b`. A slice with at least one 1 is *valid*. Only valid slices are
stored, each as a 32-bit slice index plus 64 bits of data. For an edge `(i,j)`, only the
indexes that are valid in both `R_i` and `C_j` are loaded and ANDed. Other slices cannot add to
the count. `data_slicer` does the cutting. It takes a vector as a stream of slices and emits
(index, data, entry number) for each valid slice, then a pointer record (first entry, count)
for the vector.

### Compressed graph in main memory

Main memory is outside the design and is reached through a simple read port. It holds 64-bit
words at word addresses. The layout is this design's own:

| region | address | word |
|---|---|---|
| row pointers | `cfg_row_ptr_base + i` | `{count[63:32], first_entry[31:0]}` of row `i` |
| column pointers | `cfg_col_ptr_base + j` | same, for column `j` |
| slice indexes | `cfg_idx_base + e` | slice index `k` of entry `e` in bits 31:0 |
| slice data | `cfg_data_base + e` | the 64 slice bits of entry `e` |

The entries of one vector are consecutive and sorted by slice index. A column slice's entry
number `e` is also its name in the storage status (see below).

## Architecture

```
             main memory (external: compressed graph)
                 ^ mem_req/addr      | mem_rvalid/rdata
                 |                   v
  data_slicer    +----------- tcim_ctrl -----------+
  (host stream)       |            |               |
                 data_buffer    lru_list       pim_array (computational STT-MRAM)
                 - row buffer   - recency      8 banks x 16 mats x 16384 rows x 64 bit
                 - slot status    list           = 16 MB
                 - operand tags                  mat: column driver, row driver with
                                                 multi-row activation, SA (READ/AND),
                                                 local data buffer, bit counter
```

| module | role |
|---|---|
| `tcim_top` | the accelerator; instantiates everything below |
| `tcim_ctrl` | controller state machine (the algorithm below) |
| `data_buffer` | row buffer, slot status, operand-row tags |
| `lru_list` | free-slot allocation and least-recently-used replacement |
| `pim_array`, `mram_bank`, `mram_mat` | the computational memory: banks, mats, periphery |
| `bit_counter` | BitCount: 8-bit look-up tables (256 entries) plus an adder |
| `data_slicer` | slicing and compression of rows and columns |
| `mtj_bitcell`, `mtj_sense_amp` | behavioural (non-synthesizable) models of the MTJ cell and the sense amplifier |
| `tcim_pkg` | shared types: mat command and LRU operation encodings, default slice width |

## How a count runs

`start` begins a count of `cfg_num_v` vertices. The controller does one thing at a time:
one memory read, one LRU operation or one mat command.

1. **Row fetch.** For row `i`, read its pointer record. Then read all of its valid slices
   (index and data) into the row buffer. A row is fetched from main memory only once.
2. **Edges.** The edges of row `i` are the 1-bits of its own slices, taken in ascending order.
   For edge `(i,j)`, read the pointer record of column `j`.
3. **Index merge.** Walk the sorted slice indexes of `R_i` (from the row buffer) and `C_j` (read
   one at a time from memory) together, like a merge. When one index is smaller, that slice is
   valid on one side only. It is skipped (`n_skips`).
4. **Reuse or exchange.** For a matching index `k`, look up whether `C_jS_k` is already in the
   array.
   - Hit (`n_hits`): tell the LRU unit that the slot was used again.
   - Miss (`n_misses`): ask the LRU unit for a slot. It gives a free slot while there is one.
     Otherwise it gives the least recently used slot, and the slice there is replaced
     (`n_exchanges`). The column slice is then read from memory and written into the slot.
5. **Operand row.** Both AND operands must sit on the same bit lines, so in the same mat.
   Local row 0 of every mat is kept for a row slice. The row slice `R_iS_k` is copied from the
   row buffer into that mat's row 0 only if the mat does not already hold it
   (`n_row_writes`).
6. **AND and BitCount.** Turn on row 0 and the slot's row together, and add the mat's bit
   count to `tc_count`.

A row with more valid slices than the row buffer holds (`ROW_DEPTH`) cannot be processed: it is
skipped and `error` is set, and the count then excludes the triangles whose lowest vertex is
that row. `done` pulses when all rows are processed. `tc_count` (64 bits) and the 32-bit event counters
are then final. Slot `s` lives in mat `s mod 128` at local row `s / 128 + 1`. That gives
128 x 16383 = 2,097,024 column-slice slots.

### Storage status without clearing

The status has to answer "is column slice `e` in the array, and where?" for up to 2^25 slices.
It also has to forget a slice as soon as that slice's slot is reused. `data_buffer` keeps two
tables and never clears either of them:

- `slot_of[e]`: the slot where slice `e` was last loaded;
- `owner[s]`: the slice last loaded into slot `s`.

Slice `e` is resident when `slot_of[e] < used` and `owner[slot_of[e]] == e`. Here `used` is the
number of slots the LRU unit has handed out. Loading a new slice into a slot overwrites its
owner, and that alone invalidates the old slice's record. At `start`, the controller pulses
`clear`. This sets `used` to 0 and drops the operand-row tags, so the stale contents of both
tables can never match.

### LRU in constant time

`lru_list` keeps the exact recency order of all slots as a doubly linked list, stored as two
pointer tables (`prev`, `next`) with a head (most recently used) and a tail (least recently
used). Using a slot again unlinks it and pushes it to the head. A miss takes the next free slot
while there is one; otherwise it takes the tail. Each operation takes the same few cycles
(unlink, push, done), whatever the number of slots.

## The memory array

`mram_mat` holds the cells as an array of 64-bit words, one slice per word, and one sense
amplifier per bit line. Its commands are:

- `MAT_WRITE`: the column driver writes `wdata` into `row_a`;
- `MAT_READ`: only `row_a` is turned on, and the READ reference is used;
- `MAT_AND`: `row_a` and `row_b` are turned on together, and the AND reference is used.

The sense amplifier output goes to a local data buffer, and the bit counter counts that buffer.
`mram_bank` adds the global row decoder, which enables one mat. It also adds a global data
buffer, which takes the result of the mat that was addressed. `pim_array` selects the bank.

Latencies (this design's choice): a write is done after 1 cycle in the mat, 2 at the bank and
array level. READ and AND are done after 2 cycles in the mat and 3 at the bank and array level.
Only one command may be in flight at a time.

The sense amplifier in the RTL works at logic level, with logic 1 meaning the low-resistance
(parallel) state. The two behavioural models show the analog rule behind this:

| quantity | value | origin |
|---|---|---|
| MTJ area | 40 nm x 40 nm | device parameters of the publication |
| RA product | 1e-12 ohm m^2 | same |
| TMR | 100 % | same |
| R_P | 625 ohm | RA / area |
| R_AP | 1250 ohm | R_P (1 + TMR) |
| R(P,P) and R(P,AP) | 312.5 ohm and 416.7 ohm | two cells in parallel |
| R_ref-READ | 937.5 ohm | middle of (R_P, R_AP), this model's choice |
| R_ref-AND | 364.6 ohm | middle of (R(P,P), R(P,AP)), this model's choice |

`mtj_sense_amp` latches `q = (r_bl < R_ref)` on the rising edge of `sen`. `mtj_bitcell` takes
its new state at the rising edge of a write pulse, if its word line is on. Neither model covers
the access transistor, the switching dynamics or timing.

## Parameters and sizes

| parameter | default | origin |
|---|---|---|
| `WIDTH` (slice size) | 64 | the publication's slice size |
| `BANKS` x `MATS` x `ROWS` | 8 x 16 x 16384 | 16 MB total, as in the publication; the split is this design's choice |
| `ROW_DEPTH` | 65536 | longest possible row of the largest graph considered (ceil(3,997,962 / 64) = 62,469 slices) |
| `ID_W` | 25 | 2^25 column-slice status entries (estimate below) |

Graphs the publication evaluates, with this design's defaults:

| graph | vertices | edges | estimated valid slices | fits |
|---|---|---|---|---|
| ego-facebook | 4,039 | 88,234 | 0.04 M | yes |
| email-enron | 36,692 | 183,831 | 0.68 M | yes |
| com-Amazon | 334,863 | 925,872 | 0.49 M | yes |
| com-DBLP | 317,080 | 1,049,866 | 1.13 M | yes |
| com-Youtube | 1,134,890 | 2,987,624 | 5.2 M | yes |
| roadNet-PA | 1,088,092 | 1,541,898 | 4.8 M | yes |
| roadNet-TX | 1,379,917 | 1,921,660 | 6.0 M | yes |
| roadNet-CA | 1,965,206 | 2,766,607 | 8.5 M | yes |
| com-LiveJournal | 3,997,962 | 34,681,189 | 30 M | yes (close to the 33.5 M limit) |

Only the smallest of these can be simulated in reasonable time. A generated graph with
ego-facebook's vertex and edge counts is counted correctly at the default size (see
Verification). The real edge lists are not used.

The slice estimate is 2 x |V| x ceil(|V| / 64) x (the published percentage of valid slices).
It is an estimate, not a measurement. For com-LiveJournal the hard upper bound with upper-
triangular storage is 2 x |E| = 69 M, which is above 2^25. A graph whose column-slice entry
numbers go beyond 2^25 needs a larger `ID_W`. Graphs larger than the 16 MB array still run:
slices are exchanged, so the array size affects speed, not correctness. The 32-bit event
counters may wrap on the largest graphs. The triangle count itself is 64 bits wide.

## Where this departs from the publication

- **Upper-triangular storage.** The publication describes the graph as undirected, but its
  worked example uses an upper-triangular matrix and counts each triangle once. That form is
  used here. With a symmetric matrix, the same sum would count each triangle 6 times.
- **Row loading.** The pseudo-code loads the row slice for every pair, while the text says a row
  is loaded only once. Here a row is fetched from main memory once into the row buffer. It is
  copied into a mat's operand row only when that mat does not hold it. Because consecutive
  column slices are spread over the mats, most pairs still need that copy (for example, about
  3,080 copies for 3,123 pairs in one 300-vertex test graph).
- **Controller.** In the publication, a CPU runs the algorithm. Here a hardware state machine
  runs it, strictly one step at a time. No bank- or mat-level parallelism is modelled.
- **Buffers and status tables.** The publication does not describe the data buffer contents,
  the status organisation, the LRU implementation, the memory layout, any latency or any reset
  behaviour. Everything on those points is this design's choice.
- **Bank structure.** The publication names sub-arrays and a global row buffer; its figure
  names a global data buffer. There is no separate sub-array level here, and the bank's output
  register is the global data buffer.
- **Not modelled.** The energy and timing of the array, the transistor-level sense amplifier,
  and the CPU and main memory themselves.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_bit_counter` | every 8-bit pattern in every byte position, random vectors, BitCount(0110) = 2 |
| `tb_mram_mat`, `tb_mram_bank`, `tb_pim_array` | READ and AND results, bit counts and latencies against a copy of the written data |
| `tb_lru_list` | returned slots and evictions against a reference recency queue, including `clear` |
| `tb_data_buffer` | row buffer, hit and miss after loads and replacements, operand tags |
| `tb_data_slicer` | the worked slicing example (valid indexes {0,3,5} and {2,3,5} at \|S\| = 4), random vectors |
| `tb_tcim_ctrl` | the 4-vertex example (2 triangles, 3 misses, 2 hits) and random graphs with 4 slots, at \|S\| = 4 |
| `tb_tcim_top` | end to end at \|S\| = 8 with 12 slots. Graphs go through the slicer into a memory model, then are counted. Every mechanism must occur: reuse, free-slot load, LRU exchange, operand write and reuse, one-sided skip, row-buffer overflow |
| `tb_tcim_full` | the whole design at its default size (16 MB array), with graphs of 4, 200 and 300 vertices |
| `tb_tcim_workload` | the default-size design on a generated graph with ego-facebook's size (4,039 vertices, 88,234 edges, mostly short-range edges). Triangles come from neighbour lists, and misses must equal the distinct column slices used. It reaches 7.8 % valid slices (7.0 % for the real graph) and needs 7.9 M cycles, about a minute of simulation |
| `tb_mtj_bitcell`, `tb_mtj_sense_amp` | cell resistances; READ and AND truth tables through the analog models |

Graph testbenches compare the triangle, edge and pair counts with references computed
directly from the adjacency matrix (`tb/tb_graph_pkg.sv`). Main memory is the behavioural model
`tb/graph_mem_model.sv`, which answers each read after a random 1 to 4 cycles.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/tcim_pkg.sv tb/tb_graph_pkg.sv tb/tb_tcim_top.sv --top-module tb_tcim_top -o sim
./obj_dir/sim
```

For testbenches that do not use the graph package, leave out `tb/tb_graph_pkg.sv`. The
full-size testbench builds in a few seconds and runs in about two seconds. It needs about
200 MB of memory.

To change the design's size, override the parameters of `tcim_top`. `BANKS` and `MATS` should
stay powers of two. `WIDTH` may be anything up to 64. The tests use 4 and 8 to get many slices
per row from small graphs.
