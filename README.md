# CuCoTrack connection tracker in SystemVerilog

A switch that balances load or applies per-flow policy has to find, for
every packet, the entry of the TCP/UDP connection it belongs to. The
connection is named by its 5-tuple (104 bits for IPv4, 296 for IPv6), and
keeping millions of 5-tuples in on-chip memory costs too much space and too
much read bandwidth per lookup.

CuCoTrack, proposed by Reviriego, Pontarelli and Levy, exploits the fact
that a connection tracker is only ever asked about connections it holds:
new connections are recognised elsewhere (by the SYN flag) and inserted
explicitly. So the on-chip tables need not store the key. They store a
short fingerprint, and the only danger is that two stored connections in
the same buckets have the same fingerprint, so that a lookup cannot tell
them apart. CuCoTrack removes that danger when a connection is inserted by
giving each entry a small *adaptive* part of its fingerprint, computed with
one of several hash functions. The entry records which function it uses,
and the choice is made so that no lookup can confuse two stored connections.
A lookup then always finishes with one bucket read in each of two tables.

This repository is a register-transfer implementation of that scheme. The
tables, fingerprint format, addressing, adaptation rule and the use of a
full-key copy follow the published description. That description is a data
structure, not a circuit. The pipeline, handshakes, hash functions, widths
that the description leaves open, and the policy for insertions that fail
are choices of this implementation. They are listed in
[Departures and choices](#departures-and-choices).

## What an entry looks like

Each cell holds, in this order (most significant first):

| field | width (default) | meaning |
|---|---|---|
| valid | 1 | cell in use |
| f | `F_W` = 8 | fixed fingerprint, `f = hf(x)` |
| alpha | `ALPHA_W` = 5 | selector: which adaptive hash the entry uses |
| a | `A_W` = 3 | adaptive value, `a = h_alpha(x)` |
| v | `VAL_W` = 16 | value returned by a lookup |

A bucket is four cells, read or written as one memory word. There are two
tables of `2^IDX_W` = 512K buckets each, 4M cells in total. Connection `x` can
live only in

* bucket `p1 = h1(x)` of table 1, or
* bucket `p2 = h1(x) xor h2(f)` of table 2.

Both positions depend on `x` and `f` only, never on the selector. Changing
an entry's selector therefore never moves it. And since `p1 = p2 xor h2(f)`,
an entry can be moved to its other bucket using only what the table holds.
Cuckoo displacement relies on this.

Beside each fingerprint table sits a full-key table with the same geometry
(`cucotrack_full_table`). It holds the 5-tuple of the entry in the same
table, bucket and cell. Lookups never read it. Inserts read it to recompute
adaptive values of other entries and to move displaced entries. The scheme
allows it to be a larger, slower external memory. Here it is an on-chip
array.

## Why a lookup cannot be confused

Call a connection's *group* all stored connections that have the same `p1`
and the same `f`. Only they share both of its buckets and its fixed
fingerprint, so only they can be mistaken for it. A lookup of `x` reads both
buckets and reports a cell as a hit when

    valid  and  f == hf(x)  and  a == h_alpha(x), with alpha = the cell's own selector

So a lookup of `w` wrongly hits the cell of `m` exactly when
`h_{alpha_m}(w) == h_{alpha_m}(m)`. Hence the rule the design enforces:

> Under its own selector, every entry's adaptive value differs from the
> values that all other members of its group have under that same selector.

Each member's choice depends only on the set of members, not on the other
members' choices. A group fails only if some member has no usable selector
at all. The analysis of the scheme uses the same failure condition. For
example, take three colliding connections and four selectors, with values:

| selector | x | y | z |
|---|---|---|---|
| 0 | a | b | b |
| 1 | c | a | c |
| 2 | a | a | b |
| 3 | a | a | a |

Only selector 0 is usable for x. For y, selector 1 is the first usable one.
For z, only selector 2 is usable. The stored values are then a, a and b. Two
stored values are equal, yet no lookup is confused. The `alpha_select`
testbench checks this example.

`cucotrack_alpha_select` evaluates the rule for up to nine members at once:
two buckets of four cells plus the new connection. For each member and each
selector it compares 3-bit values with the other members' values. It keeps
a member's current selector when that selector is still usable, so that
entry need not be rewritten. Otherwise it takes the lowest usable selector.

## Operations

### Lookup (pipelined, one per cycle)

| cycle | action |
|---|---|
| 0 | request accepted (`req_valid && req_ready`) |
| 1 | `cucotrack_hash` computes p1, p2, f and all adaptive values; both fingerprint tables are read |
| 2 | `cucotrack_match` compares the 8 cells |
| 3 | `resp_valid`, with `resp_status` = `ST_OK` and `resp_value`, or `ST_NOT_FOUND` |

Each lookup reads two buckets, one per table. `resp_multi` would flag two
hits. The adaptation makes that impossible for stored connections. A lookup
of a connection that is *not* stored may return a false hit. The scheme
accepts this, because such lookups are not issued.

### Insert

The controller `cucotrack_ctrl` takes one update at a time. An insert goes
through these steps:

1. Read bucket p1 of table 1 and bucket p2 of table 2 from both the
   fingerprint and the full-key tables (1 cycle).
2. Find the group: valid cells with the same `f`. If the group is empty,
   the new entry takes selector 0.
3. Otherwise, recompute every cell's adaptive values from its full key, one
   cell per cycle (8 cycles). Then choose selectors for the whole group and
   the new connection (1 cycle). Members whose selector changes are
   rewritten in place.
   * If some member has no usable selector, the insert is refused with
     `ST_COLLISION` and the tables are left unchanged. The analysis calls
     this a non-removable collision.
4. Put the connection in the first free cell of p1 in table 1, else of p2
   in table 2.
   * If both buckets are full, a cell of p1 or p2 is taken over. An LFSR
     picks the bucket and the cell.
   * The displaced entry moves to `p xor h2(f)` in the other table. It
     keeps its selector and adaptive value, and its full key moves with it.
   * This repeats until an entry finds a free cell, or `MAX_KICKS` = 500
     moves have been made. In that case the response is `ST_FULL` and
     `resp_homeless_key/value` name the entry left out.

Displacement never creates a collision: an entry that moves keeps its own
two buckets and its own group.

The controller takes, from its start to `done`:

* 4 cycles for an insert with an empty group and a free cell;
* 9 more cycles (`2*CELLS+1`) when the group is not empty;
* 2 more cycles per displacement.

In the top, add 3 cycles for the front pipeline and the response register.

### Delete

Read both buckets and clear the one cell that matches, as a lookup would
(3 controller cycles). If no cell matches, the response is `ST_NOT_FOUND`.

### Reset

After `rst_n` the controller clears every bucket of both fingerprint tables,
one bucket per cycle. That takes 524,288 cycles at the default size.
`req_ready` stays low until it is done. The full-key tables are not
cleared; a key is used only where its cell is valid.

### Ordering

From the cycle after an insert or delete is accepted until its response,
`req_ready` stays low. Requests behind it stall, and a lookup issued right
after an insert sees the new connection. Responses come back in request
order.

## Interface of `cucotrack`

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `req_valid` / `req_ready` | in / out | 1 | request handshake |
| `req_op` | in | `op_e` | `OP_LOOKUP`, `OP_INSERT`, `OP_DELETE` |
| `req_key` | in | `KEY_W` | 5-tuple |
| `req_value` | in | `VAL_W` | value to store (insert) |
| `resp_valid` | out | 1 | one response per request |
| `resp_op`, `resp_status` | out | `op_e`, `status_e` | `ST_OK`, `ST_NOT_FOUND`, `ST_COLLISION`, `ST_FULL` |
| `resp_value`, `resp_multi` | out | `VAL_W`, 1 | lookup result |
| `resp_alpha`, `resp_readapted`, `resp_kicks` | out | | insert: selector given to the new entry, members re-adapted, displacements |
| `resp_homeless_key/value` | out | | insert with `ST_FULL`: the entry left out |

Parameters, with their defaults:

| parameter | default | origin |
|---|---|---|
| `KEY_W` | 104 | IPv4 5-tuple |
| `IDX_W` | 19 | 512K buckets per table, as in the evaluated configuration |
| `CELLS` | 4 | cells per bucket, as in the description |
| `F_W`, `A_W`, `ALPHA_W` | 8, 3, 5 | the 16-bit split the evaluation recommends |
| `VAL_W` | 16 | chosen here |
| `MAX_KICKS` | 500 | chosen here |

At the defaults the memories hold:

* 2 × 512K × 132 bits = 138 Mbit of fingerprint tables;
* 2 × 512K × 416 bits = 436 Mbit of full keys.

## Hash functions

Every hash is an H3 function: output bit `j` is the XOR of the key bits `i`
for which matrix bit `Q[i][j]` is set. Bits `64w..64w+63` of row `i` are

    SplitMix64(seed + i * 0x9E3779B97F4A7C15 + w * 0xD1B54A32D192ED03)

The matrix is computed during elaboration, so no table file is needed.

* `h1` (19 bits) and `hf` (8 bits) hash the key.
* `h2` (19 bits) hashes `f`.
* The adaptive family is one 96-bit hash of the key. Slice `alpha` (3 bits)
  is `h_alpha`.

The four seeds are in `cucotrack_pkg`. In hardware, each hash is a fixed
XOR tree.

## Departures and choices

Taken from the description:

* two tables, buckets of four cells;
* the cell fields f, alpha, a, v;
* `p1 = h1(x)`, `p2 = h1(x) xor h2(f)`;
* adaptation of all colliding entries using full keys kept cell for cell;
* displacement that leaves selectors untouched;
* lookup and delete as in a cuckoo filter;
* the 16-bit split and table size of the final experiment.

Chosen here, because the description says nothing about them:

* the hash functions (H3) and how the adaptive family is formed;
* the value width (16), the valid bit, and the IPv4 key width;
* how an unsolvable collision is handled: the insert is refused and nothing
  changes;
* displacement policy and limit: free cells of table 1 first, then a
  random victim from a random bucket, 500 moves.
  A failed chain drops one entry and reports it, with no stash;
* the pipeline, the handshake, the in-order stall, the reset-time table
  clear, and the one-cycle full-key table.

One interpretation: the description's insertion check speaks of stored
entries that "match" the new one, which on its own would only protect
lookups of the new connection. The rule above also protects lookups of the
stored connections against the new cell. It is the condition under which
the worked example succeeds, and the one the failure analysis counts.

Not detected: inserting a connection that is already stored. Its group can
never be separated, so it is refused with `ST_COLLISION`.

## Files

`rtl/`:

* `cucotrack_pkg.sv`: operation and status enums, hash seeds, the SplitMix64
  generator.
* `cucotrack_cell.svh`: the cell struct.
* `h3_hash.sv`: one H3 hash.
* `cucotrack_hash.sv`: the hash front end.
* `cucotrack_filter_table.sv` and `cucotrack_full_table.sv`: bucket memories.
* `cucotrack_match.sv`: 8-cell compare.
* `cucotrack_alpha_select.sv`: selector choice.
* `cucotrack_ctrl.sv`: insert, delete and clear.
* `cucotrack.sv`: top.

`tb/`: one self-checking testbench per module. `tb_ref_pkg.sv` is an
independent model of the hashes.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M`.

* `tb_cucotrack_hash`: all hash outputs against the reference model, at the
  default widths.
* `tb_cucotrack_filter_table`, `tb_cucotrack_full_table`: random masked
  writes and reads against a model array.
* `tb_cucotrack_match`: hit, group, free and multi-hit masks against a model
  of the rule.
* `tb_cucotrack_alpha_select`: the worked example, plus 3000 random groups
  against a model of the rule.
* `tb_cucotrack_ctrl` and `tb_cucotrack`: small tables (8 buckets, f = 3,
  a = 2, alpha = 2), where every case is frequent. After each update the
  whole table is compared with a model of the stored set: each stored key
  matches exactly one cell, with its value and full key. The testbenches
  also check:
  * every refused insert is truly unsolvable, and every solvable one is
    accepted;
  * lookup latency (3 cycles) and back-to-back lookups;
  * stalls behind updates, and lookups right after inserts.

  They require that adaptation, re-adaptation, refusal, displacement, full
  chains and not-found deletes all occur.
* `tb_cucotrack_full`: the top at its default size. It clears the tables,
  inserts 4,000 random 5-tuples, looks them all up at one per cycle,
  deletes half and looks up the rest.
* `tb_workload_f8a3s5`, `tb_workload_f8a2s4`, `tb_workload_f7a4s3`,
  `tb_workload_f6a3s3`, `tb_workload_f6a5s1`: the evaluation experiment at
  2 × 512 buckets with 104-bit keys. Each fills the tables to 95 % and then makes 20,000
  replacements (delete one, insert one). It counts refused inserts, prints
  the analytical expectation beside them, checks that each refusal is
  genuine, and finally looks up every stored connection.

  In one run, the 12-bit split f = 6, a = 5, alpha = 1 refused 6 inserts,
  against an estimate of 3.7. The 16-bit split refused none, against an
  estimate of 5·10⁻¹⁵. The 14-bit split f = 8, a = 2, alpha = 4 refused
  none, against an estimate of 1·10⁻⁴.

  At 95 % occupancy, some displacement chains reach the 500-move limit,
  and each such failure drops one entry. Per 20,000 replacements there were
  64 such failures for f = 8, 160 for f = 7 and about 300 for f = 6. While
  filling, f = 8 had none, f = 7 had 26 and f = 6 had 112. With a small `f`,
  `h2(f)` offers few alternative buckets, which is why the scheme asks for
  at least 6 fixed bits.

The default-size run simulates 4,000 connections, not the 4M-cell
experiment of the evaluation. That experiment is approximated by the
512-bucket workload runs.

Simulate with Verilator, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/cucotrack_pkg.sv tb/tb_ref_pkg.sv tb/tb_cucotrack.sv --top-module tb_cucotrack
    ./obj_dir/Vtb_cucotrack

Replace `tb_cucotrack` with any testbench name. `tb_ref_pkg.sv` is needed
only by the testbenches that import it.

The tables have no reset. Simulate with random initial values
(`+verilator+rand+reset+2`) to confirm that nothing depends on them.

The synthesizable modules use no vendor macros. The four bucket memories are
plain arrays with one read port and one write port with per-cell enables,
so a memory compiler or inference can map them. The fingerprint tables need
a whole-bucket read and a per-cell write in the same cycle.
