# A Union-Find decoder block for the surface code, in SystemVerilog

A surface-code quantum computer measures parity checks ("syndromes") on its
qubits over and over. A decoder has to turn each batch of syndrome
measurements into a guess of which physical qubits were hit by X or Z errors.
It must do this fast enough to keep up: if it falls behind, errors build up
faster than they are corrected. This RTL implements a pipelined Union-Find
decoder. It is built from small memories and counters and is meant to sit next
to the qubits, one small block for every two logical qubits.

One *logical cycle* gives, for each logical qubit and each error type (X or
Z), `d` rounds of syndrome. Here `d` is the code distance, 11 by default.
Those bits are vertices of a 3-D *decoding graph*. Each edge of the graph is
one possible error:
- an edge inside one round is an error on a data qubit;
- an edge between two rounds is a measurement error.

A vertex with syndrome 1 is a *defect*. Decoding finds a set of edges whose
end points are exactly the defects, counting the open boundary of the lattice
as a place where a chain may end.

## Decoding graph and numbering

Each configuration (one qubit, one error type) has a graph of `R = d` rows,
`C = d-1` columns and `T = d` rounds.

- **Vertices.** Vertex `v = (t*R + r)*C + c`.
- **Edges.** Each vertex owns four edge slots, and edge id `e = 4*v + dir`:
  - `dir 0`: `+c`. In the last column this is the right boundary edge.
  - `dir 1`: `+r`.
  - `dir 2`: `+t`, a measurement edge.
  - `dir 3`: the left boundary edge, in column 0 only.
- **Boundary.** All boundary edges end on one virtual boundary vertex.
- **Data qubits.** Each data-qubit edge maps to one of the `d² + (d-1)²` data
  qubits: the `C+1` horizontal positions of each row first, then the vertical
  edges. Measurement edges map to no data qubit.

The package `uf_pkg` holds this arithmetic (`far_end`, `data_qubit`) and the
shared types. The X and Z graphs use the same numbering. This is a
simplification of this design: on a real chip the two lattices are rotated
with respect to each other, and the `data_qubit` map would differ by type.

## The pipeline

```
 tx_syn ─► syn_compressor ─► tx_* ══ link ══► in_* ─► syn_decompressor ─► gr_gen (qubit 0) ─┐
                                                                        ─► gr_gen (qubit 1) ─┴► dfs_engine
 dfs_engine ─► edge_stacks (two banks) ─► corr_engine ─► error_log (qubit 0) / error_log (qubit 1)
 uf_tables (root, size): one pair shared by both gr_gen through rr_arbiter; a second rr_arbiter picks the gr_gen served by dfs_engine
```

Each logical qubit has its own Graph Generator, which decodes the X
configuration and then the Z configuration. The DFS engine, the Correction
engine and one pair of root/size tables are shared through round-robin
arbiters. This is the "(4,2,1,1)" block:
- 4 configurations;
- 2 Graph Generators;
- 1 DFS engine;
- 1 Correction engine.

A full system would use one such block per two logical qubits, for example
500 blocks for 1000 qubits.

### Graph Generator (`gr_gen`): cluster growth

This is the hardest part. It works as follows.

1. **Loading.** The `d` rounds are loaded into the *Spanning Tree Memory*
   (STM). The STM has one word per vertex: the syndrome bit and 2 bits for
   each of its four edge slots (empty / half grown / fully grown). A *Zero
   Data Register* (ZDR) bit per STM row (one round, one row of `C` vertices)
   records whether the row holds anything. Scans skip rows whose ZDR bit is 0.
2. **Table init.** The Graph Generator asks for the root/size tables. It
   initialises them in one cycle: `root[i] = i`, and `size[i]` = the
   syndrome bit. So a cluster's size counts its defects. The parity register
   of each vertex starts as its syndrome bit.
3. **Growth round.** For each vertex of a non-zero row, a `Find()` walks the
   root table to the cluster's root. The vertices on the way are kept in
   tree-traversal registers (5). After the walk they are all pointed straight
   at the root (path compression). If the cluster is odd (parity 1) and does
   not touch the boundary, each of the vertex's edges (up to six, plus a boundary edge at the sides) grows by one
   half. An edge grown from both ends in one round becomes full at once.
   Growing into a new row sets that row's ZDR bit.
4. **Fusion.** Each edge that becomes full is pushed on the *Fusion Edge
   Stack* (FES). When the FES is full, the scan pauses and the FES is
   drained. After each round it is drained completely. Draining an edge:
   - `Find()` both of its ends;
   - if the roots differ, union by size: the smaller cluster's root points at
     the larger one's, and on a tie the root of the edge's owner vertex
     survives;
   - parity is XORed into the surviving root and the absorbed root is
     cleared;
   - the traversal paths of both ends are compressed to the surviving root.
   A full boundary edge sets a boundary bit on its root. That cluster then
   counts as neutral and stops growing.
5. **Done.** Rounds repeat until no cluster is active. The Graph Generator
   then raises `grown`, releases the tables and waits for the DFS engine.

Tables are read in the same cycle they are addressed. The original
architecture assumes a 4-cycle memory, so its cycle counts are not directly
comparable with these.

### DFS engine (`dfs_engine`): spanning trees

The DFS engine walks the fully grown edges of the STM and writes each
cluster's spanning tree onto an edge stack. It keeps a visited bit per
vertex and a pending-edge stack. It works in two phases:
- **Boundary phase.** Clusters that reached the boundary are walked first,
  from the boundary vertex. Each boundary edge starts its own tree.
- **Scan phase.** Every unvisited vertex of a non-zero row becomes the root
  of the tree of its cluster.

Each tree edge is pushed as `{edge id, direction, parent syndrome, child
syndrome}` when its child is first reached (pre-order). Popping it therefore
returns the leaves first, and the Correction engine never has to read the
STM.

**Two banks.** The edge stack has two banks (`edge_stacks`, `STACK_DEPTH` =
40 each) so that peeling of one cluster overlaps the search of the next.
- A cluster starts in a bank that the Correction engine does not hold.
- If that bank fills, the cluster continues in the other bank. If the other
  bank is busy, the DFS stalls until it is free.
- A cluster that fills both banks (more than 80 edges) is a *stack overflow
  failure*. It is walked to the end without pushing and is handed over with
  `drop = 1`. Dropping such rare large clusters is the reason 40 + 40
  entries are enough at `d = 11`, `p = 1e-3`.

### Correction engine (`corr_engine`): peeling

The Correction engine pops one edge per cycle. For each edge:
- If the child's current syndrome is 1, the edge is part of the correction.
  The child's syndrome is cleared and the parent's syndrome is flipped.
- Flipped syndromes are kept in a few associative *syndrome hold registers*
  (`HOLD_N` = 4), which override the syndrome bits that came with the stack
  entry. A register is freed when its vertex is popped as a child.
- Each corrected data-qubit edge toggles the X or Z bit of that qubit in the
  `error_log`. So a correction that repeats the previous cycle's correction
  cancels it back to I.

At the end of a tree, a syndrome left at the root (or in a hold register)
raises `ev_odd`. A full set of hold registers raises `ev_hold_ovf`.

### Syndrome compression (`syn_compressor`, `syn_decompressor`)

To cut the wiring between the qubit side and the decoder, each round (R × C
bits) is sent as the shortest of three codes:
- **sparse:** a flag bit, then the index of every 1, highest first;
- **DZC:** one "zero block" bit per block of `W` = 5 bits (1 = all zero),
  then the contents of the non-zero blocks;
- **Geo:** the same as DZC but over 2 × 2 squares of the lattice, so the two
  ends of a short error chain tend to share a block.

A raw fallback is used when nothing is shorter. The packet is
`{mode, len, pkt}`, and `pkt[len-1]` is the first bit sent. For example, the
6-bit round `000010` with 3-bit blocks is `10010` in DZC and `1001` in
sparse.

### Timeout

`cyc_start` opens a logical cycle. If the four configurations are not all
corrected within `TIMEOUT` cycles (1300 = 325 ns at 4 GHz), the block does
two things:
- it flushes every unit;
- it pulses `timeout_fail`.

Otherwise it pulses `cyc_done` with the cycle count in `cyc_cycles`.

## How far to trust it

**Checked.** Every unit has a self-checking testbench in `tb/`. Their checks
are against independent models: queues, array models, a bit-level decoder or
encoder, and peeling and cluster models written in the testbench. The checks
include:
- the worked growth example: a 3 × 3 lattice with defects at vertices 4 and
  5 ends with root table `[0 1 2 3 4 4 6 7 8]` and size 2 at vertex 4;
- the worked peeling example;
- the worked compression example.

**End-to-end test.** The block test (`tb_uf_decoder_block`, distance 5,
small stacks and FES, timeout 3500) runs 60 logical cycles. It checks that:
- every non-overflowed, non-timed-out correction has exactly the syndrome
  that was sent;
- the error logs match the XOR of all corrections.

It also requires each of these mechanisms to happen at least once:
- union;
- FES-full pause;
- boundary merge;
- alternate-bank use;
- DFS stall;
- stack-overflow drop;
- table-sharing wait;
- timeout;
- every compression mode.

**Not exercised end to end:** the hold-register overflow and the `ev_odd`
event. These are tested only in `tb_corr_engine`.

**Speed is the main departure.** Growth visits one vertex and one edge slot
per cycle, and DFS one edge per cycle. At the default size (`d = 11`) one
logical cycle takes:
- about 1100 cycles without errors;
- 5,000 to 29,000 cycles with one to four errors per thousand edges.

The 325 ns budget of the architecture is 1300 cycles. So at default
parameters most cycles that contain errors end in `timeout_fail`.
The full-size test `tb_uf_full` (all defaults) shows this: its error-free
cycle completes and is checked, and the others time out. Raising `TIMEOUT`
makes them complete correctly. The structure (units, memories, stacks,
sharing) follows the original design; the per-cycle parallelism does not.

**Other departures and choices:**
- Single-cycle memories.
- Left and right boundaries only.
- The same data-qubit numbering for X and Z.
- FES depth 16, pending-stack depth 32 and 4 hold registers, which are
  chosen, not given.
- Each Graph Generator decodes X before Z.
- DZC "zero block" bits are 1 for all-zero blocks.

## Top-level interface (`uf_decoder_block`)

- `tx_syn` → `tx_mode`, `tx_len`, `tx_pkt`: the qubit-side compressor of
  the link, combinational. It is part of the block so that both ends of the
  link come together. Its packet is what the qubit side sends.
- `cyc_start`: a one-cycle pulse that opens a logical cycle and starts the
  timeout counter.
- `in_valid` / `in_ready`: the handshake for one compressed round. It carries
  `in_cfg = {qubit, type}` (type 0 = X, 1 = Z), `in_layer`, `in_mode`,
  `in_len` and `in_pkt`. Rounds for a configuration that is not the one its
  Graph Generator is loading wait with `in_ready` low. Feed each qubit's X
  rounds before its Z rounds.
- `cyc_done` or `timeout_fail`: one of them pulses once per logical cycle.
  `cyc_cycles` then holds the cycle count.
- `cor_valid`, `cor_eid`, `cor_cfg`: every corrected edge, including
  measurement edges, one per cycle.
- `el_rd_q`, `el_rd_idx` → `el_rd_pauli`: a combinational read of the Pauli
  frame `{Z, X}` of one data qubit.
- `ev_*`: one-cycle event pulses (round, union, FES full, boundary, stack
  switch, DFS stall, stack overflow, hold overflow, odd tree, table wait) for
  counting.

Reset is asynchronous and active low. Memories inside the units are cleared
by their control logic, not by reset.

## Parameters (top `uf_decoder_block`)

| name | default | meaning |
|---|---|---|
| `D` | 11 | code distance (graph R = D, C = D-1, T = D) |
| `TIMEOUT` | 1300 | cycles per logical cycle before `timeout_fail` |
| `STACK_DEPTH` | 40 | entries per edge-stack bank |
| `FES_DEPTH` | 16 | Fusion Edge Stack entries |
| `PEND_DEPTH` | 32 | DFS pending-edge stack entries |
| `HOLD_N` | 4 | syndrome hold registers |
| `SHARED_TABLES` | 1 | 1: one root/size table pair for both Graph Generators; 0: one pair each |
| `W`, `GB` | 5, 2 | DZC block length, Geo square side |

## Files

`rtl/` has one module per file:
- `uf_pkg`
- `rr_arbiter`
- `uf_tables`
- `gr_gen`
- `edge_stacks`
- `dfs_engine`
- `corr_engine`
- `error_log`
- `syn_compressor`
- `syn_decompressor`
- `uf_decoder_block` (the top)

`tb/` has one testbench per module: `tb_<module>`, except that the
compressor's is `tb_syn_codec`. It also has `tb_uf_full`.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes by
itself. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/uf_pkg.sv tb/tb_uf_decoder_block.sv \
          -y rtl --top-module tb_uf_decoder_block -o sim
./obj_dir/sim
```

Replace the testbench name to run any other. The d = 5 block test runs in
under a second. `tb_uf_full` (d = 11) takes about 20 s to build and a few
seconds to run.
