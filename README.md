# Memory slices: matrix products computed inside the memory system

A memory slice is a bank of DRAM that has a small, regular compute engine
beside it and a port into a network that joins it to every other slice.
Large matrix products, such as the layers of LSTMs and of convolutional
networks written as matrix products, are cut into partitions. Each
partition is multiplied in the slice whose memory already holds it, so
operands never cross a chip boundary. Only partial results travel. Each
partial result goes to the slice that owns that part of the output, where
it is added to what is already stored.

This repository holds synthesizable SystemVerilog for the slice and for a
system of slices on a 2D torus. It also holds self-checking testbenches for
every block. The design follows a published description of memory slices.
Where that description leaves something open, the choices made here are
listed in the last sections.

## 1. One slice at a glance

```
              host / other slices
                     |  128-bit torus links (router, rtl/icn_router.sv)
             +-------+---------+
             | network         |  packetize by destination, loop back local
             | interface       |  packets, unpack arrivals, configuration
             +--+-----------+--+
   result vector|           | elements (k, n, value, last, f)
   (one diagonal|           v
    of C)       |     aggregation engine -- read + add + f(x) + write back
      +---------+--+        |
      | 256 adder  |        |
      | trees      |        |
      +-----^------+        |
      | 256 x 8    |        |
      | multiplier |        |
      | array      |        |
      +-----^------+        |
   rows of A|  B preloaded  |
      +-----+------+        |
      | sequencer  |        |
      +-----+------+        |
            v               v
      programmable memory interface (mapping table, 3-client arbiter)
                     |
               DRAM bank (about 1 GiB, outside the RTL)
```

| Part | File | Role |
|---|---|---|
| compute unit | `rtl/compute_unit.sv` | Reg A (streamed operand, passed down), Reg B (preloaded operand), one fp16 multiplier |
| multiplier array | `rtl/multiplier_array.sv` | ROWS x COLS compute units (256 x 8) |
| fp16 multiplier | `rtl/fp16_mul.sv` | binary16 multiply, 3-stage pipeline |
| adder tree vector | `rtl/adder_tree_vector.sv`, `rtl/adder_tree.sv` | one 3-level tree per array row |
| fp16 adder | `rtl/fp16_add.sv` | combinational binary16 add |
| sequencer | `rtl/sequencer.sv` | small programmable controller that runs the slice |
| memory interface (PMI) | `rtl/pmi.sv` | maps (matrix, row, column) to DRAM word addresses |
| network interface | `rtl/network_interface.sv` | packetizes results, unpacks arriving packets |
| aggregation engine | `rtl/aggregation_engine.sv`, `rtl/activation_unit.sv` | read, add, optional f(x), write back |
| router, torus | `rtl/icn_router.sv`, `rtl/icn_torus.sv` | wormhole routers, XY routing, wrap-around links |
| slice, system | `rtl/memory_slice.sv`, `rtl/memory_slice_system.sv` | the slice, and NX x NY slices plus a host port |
| shared types | `rtl/ms_pkg.sv` | number format, packet, instruction and table layouts |
| helpers | `rtl/sync_fifo.sv`, `rtl/flit_merge.sv` | FIFO; packet-granular 2:1 merge for the host port |

## 2. How the array computes C = A x B

The array is weight-stationary. For one partition, column `k` of B (eight
consecutive reduction indices) sits in Reg B of array row `k`: column `c`
of that row holds `B[c][k]`. Rows of A enter at array row 0, one per shift,
and every shift moves all Reg A values one row down. When A row `n` has
reached array row `r`, the row's eight multipliers form
`A[n][c] * B[c][k0 + r]`. The row's adder tree sums them into one partial sum
of `C[n][k0 + r]`.

On any one step, array row `r` holds A row `n0 - r`, where `n0` is the row
that entered last. So the vector leaving the 256 trees is a diagonal of C:
row `r` of the vector is element `(n = n0 - r, k = k0 + r)`. This is the
property the network interface relies on. A run of consecutive rows bound
for one slice is described completely by the first element's `(k0, n0)` and
a count. The receiver rebuilds element `e` as `(k0 + e, n0 - e)`.

One STREAM pass of M rows of A through a partition of `nk` B columns takes
these shifts:

* M shifts carry rows of A in.
* `nk - 1` empty "drain" shifts push the last row of A past every used
  array row.
* A flush of 8 enabled cycles lets the products leave the 3-stage
  multipliers and the 3-level trees.

Rows at or beyond `nk` are masked and produce nothing.

The reduction dimension longer than 8 is handled by partitions. Each
partition is one PRELOAD of B and one STREAM of A, and yields one partial
sum per output element. The partial sums of all partitions of one element
are added in the memory of the slice that owns the element. The partition
flagged `last` also applies the output function.

Timing of one compute unit: Reg A loads on the shift edge. The product of
that value is valid three enabled clock edges later, matching the
three-cycle multiplier latency. The tree adds three more enabled edges.

## 3. Back-pressure without buffers

The array has no output buffer. When the trees produce a vector while the
network interface is still busy with the previous one, the slice lowers one
global enable. While it is low, every Reg A, every multiplier pipeline
stage and every tree register holds its value, and the sequencer neither
shifts nor counts flush cycles. The registers of the array are the buffer.
`stall` is the slice's output for this condition.

A row of A is shifted in only when its whole 128-bit word (eight operands)
has arrived, so the eight operands of a row always enter together. The
sequencer keeps up to four reads in flight.

## 4. Packets

Links are 128 bits wide. A flit is `{head, tail, data[127:0]}`. Every packet
starts with a head flit that holds `pkt_hdr_t` (see `rtl/ms_pkg.sv`):
destination and source coordinates (4 + 4 bits each), type, payload length
in flits, and type-specific fields.

| Type | Payload | Use |
|---|---|---|
| PSUM | ceil(count/8) flits of eight fp16 partial sums | a diagonal run: matrix, first `(k0, n0)`, count (up to 511), `last`, function |
| WRITE | `len` memory words | host writes consecutive DRAM words starting at a physical address |
| CFG | one record | write a PMI table entry, a destination-map entry or a program word, or start the sequencer (`index` = start address) |

The network interface takes one result vector at a time and cuts it into
runs. A run is a stretch of consecutive valid rows whose output columns fall
in one destination-map entry, or in a stretch of columns that no entry
covers. Each run becomes one PSUM packet. A map entry says "columns `k_lo`
to `k_hi` of matrix `m` belong to slice (x, y)". Columns that no entry covers
belong to this slice. A packet addressed to the slice itself never enters
the router: it goes straight to the receive side (the local loop-back).

On the receive side, whole packets are taken one at a time. At a packet
boundary the loop-back wins over the router. PSUM elements go to the
aggregation engine at one per cycle. WRITE words go to the memory
interface.

## 5. Memory interface and aggregation

The PMI has one table entry per matrix identifier (16 of them). Each entry
holds a base word address and a stride in words per matrix row. Element
`(r, c)` is lane `c mod 8` of word `base + r*stride + c/8`. A matrix stored
for PRELOAD is kept transposed (one row per column of B), so one read
fetches eight reduction indices of one B column.

Three clients share the DRAM port through a round-robin arbiter:

* the sequencer reads whole words;
* the aggregation engine reads and writes single elements, writing with
  byte enables;
* host WRITE packets write whole words.

Reads return in order. A tag FIFO routes each answer to its client.

The aggregation engine handles one element at a time, in four steps:

1. Read the stored value.
2. Add the partial sum in fp16.
3. If the packet was marked `last`, apply f(x).
4. Write back.

The functions are identity, ReLU, a piecewise-linear sigmoid
`clamp(x/4 + 1/2, 0, 1)` and a piecewise-linear tanh `clamp(x, -1, 1)`.
The engine counts write-backs in `agg_count`. The sequencer's WAIT
instruction waits for this count. That is how a slice holds back its `last`
partition until the partial sums of other slices have arrived. Without the
wait, f(x) could be applied before every contribution is in.

## 6. Programming a slice

A host programs a slice entirely with packets:

1. CFG packets write the PMI table (where A, B^T and C live).
2. CFG packets write the destination map (which output columns are remote).
3. WRITE packets store the operands.
4. CFG packets write the program.
5. A final CFG START packet starts the sequencer.

Program words are `seq_instr_t`, 128 bits each, 16 per slice:

| Op | Fields | Effect |
|---|---|---|
| PRELOAD | mat, row_base, nrows, col_word | rows of B^T into Reg B of array rows 0..nrows-1 |
| STREAM | mat, row_base, nrows, col_word, out_mat, k_base, nk, last, func | stream rows of A; results are elements of `out_mat` with column `k_base + r` |
| WAIT | wait_count | wait until `agg_count >= wait_count` |
| HALT | | stop, raise `done` |

In the system, the host port shares router (0,0)'s local input with slice 0.
A merge switches between them at packet boundaries, and the host has
priority.

Example (the system testbench): the system computes C = relu(A x B) with a
reduction dimension of 16, split into two partitions.

* Slice (0,0) runs PRELOAD, STREAM, HALT on partition 0. Its map sends all of
  C to slice (1,0).
* Slice (1,0) runs PRELOAD on partition 1, then WAIT until the 96 partial sums
  of slice (0,0) are in, then STREAM (last, ReLU), then HALT. Its own sums
  use the loop-back.

## 7. Number format

Operands, products and sums are IEEE binary16. Rounding is to nearest even.
Subnormal inputs and results are flushed to zero, overflow gives infinity,
and invalid operations give NaN 0x7e00. The multiplier has three pipeline
stages:

1. significand product;
2. normalise and round;
3. output register.

The adder is combinational, with guard, round and sticky bits. Each tree
level and the aggregation engine use one adder. The trees add in a fixed
pairwise order, so results are reproducible bit for bit. The testbench
reference (`tb/fp16_ref_pkg.sv`) computes in double precision and rounds
once per operation, in the same order.

## 8. Sizes

| Parameter | Default | Meaning |
|---|---|---|
| `ROWS`, `COLS` | 256, 8 | array shape (2048 multipliers, 256 adder trees) |
| link width | 128 | flit payload bits |
| slice memory | 2^26 words x 16 B | 1 GiB address space per slice |
| `NX`, `NY` (system) | 2, 2 | torus shape; the intended system is 16 x 16 |
| `NX`, `NY` (torus alone) | 16, 16 | |
| router FIFOs | 4 flits per input | |

The system default is a 2 x 2 torus of 4 full-size slices. The target of
256 slices has over half a million fp16 multipliers. Elaborating the design
for lint takes about 1 GB of memory per full-size slice, so 16 x 16 would
need about 240 GB, and 4 x 4 about 15 GB. The same RTL accepts `NX = NY = 16`. Coordinates are 4
bits each, so 16 x 16 is the maximum.

## 9. Throughput and its limits

At full rate the array takes one row of A per cycle. Each row is one 128-bit
memory word, so the array can use one memory word per cycle. Downstream,
this implementation is much slower than the array:

* The network interface turns a 256-element vector into packets at one flit
  per cycle. It takes the next vector only after the last flit has left, so
  a full vector costs at least about 33 cycles plus one per run.
* The aggregation engine spends at least four cycles and two memory accesses
  on every element.
* Local and remote partial sums are therefore the bottleneck. The array
  simply stalls (section 3), which keeps results correct.

Wider or multiple aggregation engines and a vector buffer in the network
interface would be the first things to add for speed.

## 10. Where this design departs from its source, or fills gaps

* **Operand width.** The source text mentions a 32-bit multiplier. Its array
  figure and parameter table give 16-bit registers. This design uses 16-bit
  (binary16) throughout.
* **Diagonal indexing.** The source's worked example lists the elements of
  one diagonal with an index order that disagrees with its own figures of
  the array. This design follows the figures: element `e` of a run is
  `(n0 - e, k0 + e)`.
* **Duplicated writes.** These are for convolutions written as matrix
  products, where the memory interface would store several copies of one
  output element. They are not implemented. The host must lay out the
  unrolled input matrix itself.
* **Deadlock.** The torus has no virtual channels. Wormhole packets can
  therefore deadlock on the wrap-around rings under heavy load. In the
  torus testbench, saturating random traffic from all 16 nodes of a 4 x 4
  torus did deadlock. Injection with random gaps of up to 24 cycles ran
  clean. The source relies on packet coalescing to keep injection rates
  low. A dateline with two virtual channels per link would remove the risk.
* **Invented formats.** The instruction set, packet formats, table layouts,
  the WAIT mechanism, the activation functions, the arbiter and all
  handshakes are this design's own. The source describes these units only
  by what they must achieve.
* **Outside the RTL.** The DRAM bank and the host are outside the RTL. The
  slice brings out a simple DRAM request/response port with byte enables
  and in-order read data. The testbenches use a behavioural model with
  fixed latency and a minimum request spacing (`tb/dram_model.sv`).
* **Slice count.** See section 8: the default system is 4 slices, not 256.

## 11. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. A plain verilator run looks like this:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb --top-module tb_memory_slice_system \
    rtl/ms_pkg.sv tb/fp16_ref_pkg.sv tb/ms_tb_pkg.sv tb/tb_memory_slice_system.sv tb/dram_model.sv
./obj_dir/Vtb_memory_slice_system
```

| Testbench | What it checks |
|---|---|
| `tb_fp16_mul`, `tb_fp16_add` | random and special operands against the reference; multiplier latency of 3 enabled cycles under random stalls |
| `tb_compute_unit` | pass-down of Reg A, product latency, row mask, clear |
| `tb_multiplier_array` | (6 x 4 array) every row's products and their row tags for a streamed A |
| `tb_adder_tree_vector` | sums against the reference tree, 3-cycle latency |
| `tb_sequencer` | read addresses, Reg B writes, shift counts including drain, output description, WAIT, flush length, HALT |
| `tb_pmi` | address mapping, byte-enable merges, concurrent clients, read latency |
| `tb_network_interface` | every result element delivered once, to the right slice or the loop-back; runs never cross map boundaries; receive side; configuration decoding |
| `tb_aggregation_engine` | read-add-write and f(x) against a reference store, `agg_count` |
| `tb_icn_router`, `tb_icn_torus` | routing, packet integrity and order, one-cycle-per-hop latency (4 x 4 torus) |
| `tb_memory_slice` | one slice with ROWS = 8, two partitions, ReLU, local and remote columns, back-pressure |
| `tb_memory_slice_system` | 2 x 2 system with ROWS = 8, the example of section 6; fails unless stall, loop-back, remote packet, drain, preload, wait, activation, host write and configuration all occurred |

No testbench runs the system at its default parameters. The largest
simulations are these:

* the 2 x 2 system with 8-row arrays;
* single slices with 8-row arrays;
* the multiplier array at 6 x 4;
* the torus at 4 x 4.

The full-size slice (256 x 8 array) and the default 2 x 2 system of
full-size slices compile with verilator's lint and with slang.
