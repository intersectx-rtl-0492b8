# IntersectX stream unit in SystemVerilog

Graph mining spends most of its time intersecting and subtracting sorted
neighbour lists: counting triangles is, vertex by vertex, the size of
N(v) ∩ N(u) for each neighbour u. On a general-purpose core each step of
such a merge is a compare, a data-dependent branch and two loads. This
design moves the whole merge into hardware. A sorted list of vertex IDs
becomes a *stream*: a start address and a length. The core names streams
by small stream IDs in a handful of new instructions. A stream unit next
to the core keeps the active streams in a small dedicated cache and runs
the merges in four intersection units, each making one key comparison per
cycle. The same machinery, with a value array attached to each key stream,
computes sparse dot products (multiply-accumulate, max or min).

The RTL covers the stream unit. The host out-of-order core, its L1 and L2
caches and DRAM stay outside: they appear as ports, and the testbenches
stand in for them with a behavioural memory.

## Stream instructions

All instructions carry up to four 32-bit register operands `r0..r3` and a
small immediate `imm` (`insn_t` in `ix_pkg`). A stream ID is a register
value; its low 8 bits are used.

| op | operands | effect / result |
|---|---|---|
| `S_READ` | r0 key address, r1 length, r2 ID | define a key stream |
| `S_VREAD` | as `S_READ`, r3 value address | define a (key,value) stream |
| `S_FREE` | r0 ID | release the stream |
| `S_FETCH` | r0 ID, r1 position | key at that position, or all ones past the end |
| `S_INTER` / `S_SUB` | r0 A, r1 B, r2 output ID, r3 bound | A∩B or A−B as a new stream; result: its length |
| `S_INTER.C` / `S_SUB.C` | r0 A, r1 B, r3 bound | number of result keys only |
| `S_VINTER` | r0 A, r1 B, imm 0/1/2 = MAC/MAX/MIN | Σ op(valA, valB) over common keys |
| `S_CSR` | r0 index, r1 edge list, r2 offset | load the graph-layout registers |
| `S_NESTINTER` | r0 ID of S | Σ over s in S of \|S ∩ N(s), keys < s\| |

A *bound* makes the unit stop once no further result key can be below it;
all ones (−1) means no bound. Keys are unsigned and every stream is sorted
in ascending order. Results come back through `res_valid/res_op/res_value`
in program order. `res_exc` flags an unknown stream ID, and also an
`S_VINTER` on a stream that has no values.

## Stream mapping: IDs, registers and the SMT

There are 16 stream registers. Each one holds valid, start key address,
start value address and length. Two more fields are added here: a
key/value flag and a maximum length. The stream mapping table
(`ix_smt`) has one entry per register, with the fields `sid | sreg | VD |
VA | s | p | pred0 | pred1`:

* **VD** ("defined") means the ID can still be named by new instructions.
  **VA** ("allocated") means the register is still in use by instructions
  in flight.
  - Defining a stream sets both.
  - Decoding `S_FREE` clears VD, so a later instruction using the ID gets
    an exception.
  - Retiring `S_FREE` clears VA, which frees the register.
* Rename stalls when no entry has VA = 0.
* Defining an ID that is still defined reuses its register. Rename waits
  until no instruction in the window still names that register.
* **p** ("produced") means the stream's data can be read.
  - A read stream normally sets p one cycle after it is defined.
  - The output of `S_INTER`/`S_SUB` sets p when its computation finishes.
* **s** ("start") is 1 when the S-Cache already holds the start of the
  stream.
* **pred0/pred1** handle one hazard. An `S_READ` might read memory that an
  output stream has not yet written back. The output's region is taken as
  its maximum possible length (the shorter input for ∩, the first input for
  −), which is conservative.
  - If the regions overlap, the output becomes a predecessor, and the read
    stream is produced only after it.
  - More than two such overlaps stall rename.

Output streams live in a spill region at
`spill_base + sreg * SPILL_KEYS * 4` (`SPILL_KEYS` = 32768 keys). This is
room for more than the highest degree (28754) of the graphs the
architecture was evaluated on.

## Window, dispatch and lanes

A 16-entry in-order window stands in for the stream instructions' entries
in the core's reorder buffer:

* Each cycle, the oldest entry whose input streams are produced and whose
  unit is free is dispatched. Computations go to one of four lanes,
  `S_FETCH` goes to the fetch unit, and `S_READ` goes to the S-Cache as a
  prefetch of its first 64 keys.
* Finished entries retire in order from the head.

A lane (`ix_lane`) is the chain **IU → VA_gen → load queue → vBuf → SVPU →
acc_reg**:

* **`ix_iu`** merges A and B. It reads them from the S-Cache in 4-key
  groups and keeps two groups of look-ahead per input, so transfers overlap
  the one-comparison-per-cycle merge.
  - Result keys are packed four at a time and written into the output
    stream's S-Cache slot.
  - For `S_VINTER` it passes each matched pair of positions to the VA_gen
    instead.
* **`ix_va_gen`** turns a matched pair into two value addresses
  (`value base + 4 × position`). It allocates a vBuf entry and sends both
  loads, tagged with lane, entry and which operand.
* **`ix_vbuf`** holds `v | val0 | r0 | val1 | r1` per entry (8 entries). An
  entry goes to the SVPU once both values are back, in any order, because
  accumulation is commutative.
* **`ix_svpu`** applies MAC, MAX or MIN and accumulates into acc_reg.
  Arithmetic is 32-bit and wraps.

`ix_load_queue` (32 entries) collects the loads of the four VA_gens and of
the nested translator:

* It issues them oldest-first to the L1 port.
* It accepts answers in any order, matched by entry number.
* It routes each answer back by its tag.

## Stream cache

`ix_scache` has one 64-key (256 B) slot per stream register, 4 KB in all.
Each slot is two 32-key sub-slots used as a double buffer. Chunk *c* of a
stream, meaning keys 32c to 32c+31, always lives in sub-slot *c* mod 2.
The sub-slot carries the chunk number as a tag, plus a dirty bit and a pin.

* **Reads.** Nine read ports: two per IU, plus one shared by `S_FETCH` and
  the nested translator.
  - Each cycle one port whose group is present is granted, round-robin.
    This gives 16 B per cycle.
  - Data appear the cycle after the grant.
* **Writes.** Four write ports, one per IU, for output streams. One write
  is accepted per cycle.
* **Fill engine.** A single engine serves misses, writes and prefetches, in
  this order:
  1. write claims;
  2. demand misses;
  3. the start of a newly read stream;
  4. the next chunk after one that a port is reading.

  A dirty sub-slot is written back to L2 only when it is about to be
  replaced. An output stream of up to 64 keys therefore never leaves the
  cache. A longer one keeps its latest 64 keys in the slot.
* **Pins.** A sub-slot filled on demand stays pinned until its port has read
  it. This guarantees progress when several IUs walk one stream at
  different positions.

The L2 port moves one 4-word beat per request. Read answers come back in
order.

## Nested intersection

`S_NESTINTER S` is triangle counting's inner loop in one instruction. The
CSR registers give three arrays:

* `index[v]`: where N(v) starts;
* the edge list;
* `offset[v]`: how many neighbours of v are smaller than v.

The translator (`ix_nest_translator`) handles each key s of S as follows:

1. It reads s through the S-Cache port.
2. It takes a translation-buffer entry and loads `index[s]` and
   `offset[s]` through the load queue.
3. When both loads are back, it sends three micro-ops to rename, ahead of
   any later instruction:
   - `S_READ edge + 4·index[s], offset[s], sid_s`;
   - `S_INTER.C S, sid_s, bound s`;
   - `S_FREE sid_s`.

The internal IDs `sid_s` have bit 8 set, so they never clash with program
IDs. The nested counts come back from the lanes and are added up in the
translator. A final micro-op stands in the window for the whole
instruction, and it retires with the sum. The buffer is an 8-entry FIFO,
with one entry per nested stream.

## Where this RTL departs from or adds to the architecture

* The window, the dispatch rule (oldest ready first), the handshakes, the
  spill-region layout, the tag/pin scheme of the S-Cache, the 8-entry vBuf
  and translation buffer, and all encodings are this design's own choices.
* The nested additions are folded into the translator instead of being
  separate add micro-ops. There is one translation-buffer entry per nested
  stream, not one per micro-op.
* Nested streams take stream registers under internal IDs. This follows
  the description of the three micro-ops. One passage instead suggests
  that nested intersections use no stream register.
* The bounded neighbour list of s is taken as the first `offset[s]`
  entries of N(s), which are the neighbours smaller than s.
* Precise exceptions with checkpoint and rollback of a partly executed
  `S_NESTINTER` are not built. Exceptions are only reported with the
  retired result.
* The output ID of `S_INTER`/`S_SUB` must differ from both input IDs.
* Only one stream unit is built. The evaluated system has eight cores, each
  with its own unit. Other IU counts and S-Cache widths need package
  constants changed and were not simulated.

## Files and parameters

* `rtl/ix_pkg.sv`: types and sizes, including `NSREG`=16, `SLOT_KEYS`=64,
  `SUB_KEYS`=32, `BEAT_KEYS`=4, `NIU`=4, `VB_N`=8 and `TB_N`=8.
* `rtl/intersectx.sv`: the top, with parameters `WIN`=16, `LQ_N`=32 and
  `SPILL_KEYS`=32768.
* The blocks: `ix_smt`, `ix_sreg_file`, `ix_csr_regs`, `ix_scache`,
  `ix_iu`, `ix_va_gen`, `ix_vbuf`, `ix_svpu`, `ix_load_queue`,
  `ix_nest_translator` and `ix_lane`.
* `tb/ix_mem_model.sv`: a behavioural L2/L1.
  - The L2 port has 10 cycles of latency, answers in order, and applies
    random back-pressure.
  - The L1 port has 4 to 7 cycles of latency and answers out of order.
* `tb/tb_<module>.sv`: one self-checking testbench per block.
* `tb/tb_intersectx.sv` runs the top at its default sizes on a 128-vertex
  random graph with eight dense hub vertices:
  - It issues stream programs covering every instruction and compares every
    result with a software model.
  - It also counts the mechanisms it must trigger: SMT full, window full,
    write-back, demand miss, dependence wait, overlap, register reuse,
    bound, several lanes busy, round-robin, translation buffer full, nested
    and value streams, and exceptions.

  It fails if any of these never happens.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/ix_pkg.sv \
  $(ls rtl/*.sv | grep -v ix_pkg) tb/ix_mem_model.sv tb/tb_intersectx.sv \
  --top-module tb_intersectx -o sim
./obj_dir/sim
```

Replace the last testbench file and top-module name to run a block's own testbench. Every testbench ends with a line `TB_RESULT checks=<n> failures=<m>`.

Lint warnings that remain are unused bits of wide structs and of loop
indices. There is also a note that `rst_n` is "also used synchronously".
That comes only from the `disable iff` of the assertions.
