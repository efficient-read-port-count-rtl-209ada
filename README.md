# Eight shared read ports for a 17-operand integer register file

A wide out-of-order core with four ALUs, two load units, two store-address
units and one store-data unit can need 17 integer source operands per cycle.
Giving each operand its own read port on the centralized physical register file
(PRF) is expensive, because register-file area and power grow roughly with the
square of the port count. Often, though, many of those operands need no port:
an issue port has nothing to send, the operand is an immediate or comes from the
bypass network, or an x86 address has no index register.

This RTL implements the register-read stage of such a core with **only the
eight read ports of the ALUs**. Each ALU operand keeps its own port. The nine
operands of the memory units own no port: they borrow an ALU port that is idle
in that cycle, but only a port their wiring allows. The wiring is a small 0/1
matrix, the *connection scheme*. If a memory instruction cannot get every
operand it needs, its issue is cancelled and the scheduler retries it next cycle.

The design follows D. Los, "Efficient Read-Port-Count Reduction Schemes for
the Centralized Physical Register File in a Superscalar Microprocessor". That
paper gives the port counts, the priority rules, the selection matrix and the
connection schemes. The pipeline timing, the crossbar circuit and the
register-file timing are this implementation's own choices. They are listed
below.

## Operands, ports and the selection matrix S

| operand index | unit | operand | read port |
|---|---|---|---|
| 0-7 | ALU u = 0..3 | s1 = 2u, s2 = 2u+1 | its own port, 2u / 2u+1 |
| 8, 9 | load unit 4 | s1 (base), s2 (index) | shared |
| 10, 11 | load unit 5 | s1, s2 | shared |
| 12, 13 | store-address unit 6 | s1, s2 | shared |
| 14, 15 | store-address unit 7 | s1, s2 | shared |
| 16 | store-data unit 8 | s2 (its only operand) | shared |

In each cycle the scheduler presents two request vectors. `a[0..7]` (`alu_req`)
marks ALU operands that need the PRF. `k[0..8]` (`mem_req`) does the same for
memory operands 8..16. The arbiter answers with the selection matrix
`S[0..7][0..16]` (`sel`). Row p is one-hot or empty and names the operand that
read port p serves. ALU operand i can only ever appear in row i.

## Connection schemes

A scheme `CONN` has one 8-bit row per memory operand. Bit p set means that the
operand may borrow port p. `rprr_pkg` holds every scheme printed in the paper
as a constant (`SCHEME_FIG1` ... `SCHEME_FIG12`). A literal lists port 7 as the
most significant bit, and operand 8 (4s1) is the last element of the
concatenation.

The paper sorts schemes by their **masks**, the distinct rows of the matrix:

* In a *symmetric* scheme the masks are pairwise disjoint and together cover
  all eight ports. No port is then contended for by overlapping masks, and none
  sits unused.
* In a *uniform symmetric* scheme every mask also has the same number of ports:
  1, 2 or 4 (a divisor of 8).

The package functions `num_masks`, `is_symmetric` and `is_uniform_symmetric`
compute these properties.

The paper estimates the arbitration depth of a scheme: write each element of S
as a minimal sum-of-products or product-of-sums, map it onto 2-input AND/OR
gates, and take the deepest tree. Every uniform symmetric scheme with the same
connection count gets the same estimate. The paper's numbers, which this RTL
does not re-derive, are:

| scheme | connections per mask | depth estimate (2-input gate levels) | IPC change reported |
|---|---|---|---|
| `SCHEME_FIG5` (arbitrary) | 1 | 2 | -3.2 % |
| `SCHEME_FIG10` | 1 | 2 | -1.6 % |
| `SCHEME_FIG11` | 2 | 5 | -0.2 % |
| `SCHEME_FIG12` (**default**) | 4 | 9 | -0.1 % |

The "efficient" schemes (10-12) pick masks whose ports are lightly used by the
ALUs, and they spread the busiest memory operands over different masks. For
example, the two-port masks {1,2} and {5,6} carry the least ALU traffic
(14.8 % + 9.9 % = 24.7 %). They go to the load base operands, which are the
busiest memory operands. The default is the four-connection scheme, which
gives the smallest IPC loss. A designer who cannot afford its deeper logic
selects `SCHEME_FIG11`.

Default scheme (rows = memory operands, columns = read ports 0..7):

```
        0 1 2 3 4 5 6 7
4  s1   0 1 1 0 1 0 0 1
   s2   1 0 0 1 0 1 1 0
5  s1   1 0 0 1 0 1 1 0
   s2   0 1 1 0 1 0 0 1
6  s1   0 1 1 0 1 0 0 1
   s2   1 0 0 1 0 1 1 0
7  s1   1 0 0 1 0 1 1 0
   s2   0 1 1 0 1 0 0 1
8  s2   1 0 0 1 0 1 1 0
```

## How a port is assigned

Priorities are static. Memory operands never share a port that an ALU operand
has requested. Among memory operands the order is:

1. loads (4s1, 4s2, 5s1, 5s2);
2. store-address (6s1, 6s2, 7s1, 7s2);
3. store-data (8s2).

The paper fixes this order of the unit classes. The order inside a class
(lower unit first, s1 before s2) is this design's choice. Going down the list,
each requesting operand takes the **lowest-numbered connected port that is
still free**. `rprr_port_arbiter` writes the rule as a loop. Synthesis unrolls
the loop into one flat expression per element of S, so it is a single
combinational stage.

The paper's worked example (scheme of Fig. 1, in which operands 4s1 and 6s2 are
both wired to ports 1 and 4) shows what the rule implies:

* 4s1 alone takes port 1, or port 4 when ALU operand 1 holds port 1.
* 6s2 takes port 1 only when ALU operand 1 is idle and 4s1 does not ask.
* 6s2 takes port 4 when ALU operand 4 is idle and exactly one of these holds:
  4s1 took port 1, or port 1 is the ALU's and 4s1 is idle.
* Otherwise unit 6 is cancelled.

`tb_rprr_port_arbiter` checks each of these cases.

**Cancel.** `unit_cancel[u]` is set when any requested operand of memory unit
4+u got no port. A port already handed to the unit's other operand stays
assigned for that cycle, because handing it on would need a second pass through
the logic. Such a read is wasted and its value is marked invalid. ALU operands
are never cancelled.

## Pipeline timing

```
cycle N   (issue) a, k, tags in -> arbiter -> S, unit_cancel (combinational)
                  S -> address crossbar -> PRF read addresses
                  ---- clock edge: PRF reads, S and valid flags registered ----
cycle N+1 (read)  PRF data -> data crossbar (steered by S of cycle N)
                  -> alu_op_data/valid, mem_op_data/valid
```

* Operand data arrives one clock after issue.
* `mem_op_valid` drops every operand of a cancelled unit, including one that
  did get a port.
* `rst_n` is a synchronous active-low reset. It clears only the valid flags and
  the registered S. The register array has no reset.

## The register file (`rprr_int_prf`)

* 180 entries of 64 bits, 8 read ports and 10 write ports.
* Write ports 0-7 serve the ALUs and ports 8-9 the loads.
* Reads are synchronous and the output is registered. A disabled port holds its
  last value.
* A read and a write to the same entry in the same cycle return the old value.
  The newer value would come from the bypass network, which is outside this
  RTL.
* Two writes to one entry in the same cycle are illegal, since renaming
  prevents them. An assertion flags it.
* The 64-bit width is this design's choice; the core modelled is x86-64.

## Files

| file | content |
|---|---|
| `rtl/rprr_pkg.sv` | sizes, types, the printed schemes, mask functions |
| `rtl/rprr_port_arbiter.sv` | a, k -> S, grants, cancels (combinational) |
| `rtl/rprr_read_xbar.sv` | AND-OR crossbars: operand tags -> port addresses, port data -> operands |
| `rtl/rprr_int_prf.sv` | 180 x 64 PRF, 8R / 10W |
| `rtl/rprr_top.sv` | the read stage: arbiter + crossbar + PRF + pipeline register |
| `tb/tb_rprr_port_arbiter.sv` | worked example, 4,000 random vectors and a sweep of all 512 k vectors against a reference model, four schemes, scheme classification |
| `tb/tb_rprr_read_xbar.sv` | random legal S, address and data routing |
| `tb/tb_rprr_int_prf.sv` | shadow-model test of all ports, read-during-write |
| `tb/tb_rprr_top.sv` | end to end at the default sizes, with a scheduler model that retries cancelled instructions |
| `tb/tb_rprr_workload.sv` | conflict rates of four schemes under the measured operand traffic |

## Interface of `rprr_top`

| port | dir | width | cycle | meaning |
|---|---|---|---|---|
| `alu_req`, `alu_tag` | in | 8, 8 x 8 | N | vector a and ALU source registers |
| `mem_req`, `mem_tag` | in | 9, 9 x 8 | N | vector k and memory source registers |
| `sel` | out | 8 x 17 | N | matrix S |
| `unit_cancel` | out | 5 | N | memory units 4..8 not issued this cycle |
| `alu_op_valid`, `alu_op_data` | out | 8, 8 x 64 | N+1 | ALU operand values |
| `mem_op_valid`, `mem_op_data` | out | 9, 9 x 64 | N+1 | memory operand values |
| `wr_en`, `wr_tag`, `wr_data` | in | 10, 10 x 8, 10 x 64 | edge | write-back |

Parameters: `CONN` (scheme, default `SCHEME_FIG12`), `ENTRIES` (180) and `XW`
(64). With the default scheme, 92 bits of `sel` are constant zero. Those are
the ALU columns of other ports and the unconnected memory columns. They are
kept so that S has the paper's shape for every scheme.

## Results of the workload test

The paper's workloads (SPECrate CPU 2017 Integer) need a whole core. What the
read stage sees of them is how often each operand needs the PRF. The paper
measured these utilizations:

* ALU operands 0-7: 13.4, 14.8, 9.9, 11.9, 13.4, 14.8, 9.9, 11.9 %.
* Memory operands 4s1 ... 8s2: 21.0, 8.1, 21.1, 8.1, 11.6, 5.3, 11.6, 5.3,
  7.8 %.

`tb_rprr_workload` draws each request independently at these rates, which is
its own simplification. It runs 200,000 cycles and compares each operand's
conflict rate with the exact value, found by enumerating all 2^17 request
vectors. Mean conflict rate per memory-operand request:

| scheme | conflict rate |
|---|---|
| arbitrary 1-connection | about 13.0 % |
| efficient 1-connection | about 12.2 % |
| efficient 2-connection | about 2.8 % |
| efficient 4-connection | about 0.25 % |

The ranking matches the paper's IPC results. The absolute numbers are not IPC
and come from uncorrelated traffic, so they are not the paper's figures.

## Simulating

Any testbench builds with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-UNUSEDPARAM \
  rtl/rprr_pkg.sv rtl/rprr_port_arbiter.sv rtl/rprr_read_xbar.sv \
  rtl/rprr_int_prf.sv rtl/rprr_top.sv tb/tb_rprr_top.sv \
  --top-module tb_rprr_top -Mdir obj_top
./obj_top/Vtb_rprr_top
```

* Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
  watchdog ends any run that hangs.
* `tb_rprr_top` prints how often each mechanism occurred: ALU reads, memory
  reads on the first and on a fallback port, cancels, successful retries,
  wasted ports, read-during-write, all ports busy and back-to-back cancels.
  It fails if any of them never happened.
* Every testbench finishes in well under a second.

## Changing it

* **Another scheme:** instantiate `rprr_top #(.CONN(rprr_pkg::SCHEME_FIG11))`
  or pass your own 9 x 8 matrix. Check it first with `is_uniform_symmetric`.
* **Other priorities:** change the row order of the loop in
  `rprr_port_arbiter`. The reference models in the testbenches encode the same
  order and must change with it.
* **Other unit mixes:** the counts in `rprr_pkg` are written for 4 ALUs and
  9 memory operands. `mem_op_unit` assumes two operands per unit, with the last
  unit's single operand in its own row.

## Departures and limits

* Not present: the scheduler (reservation station) that forms a and k and
  retries cancelled instructions, the bypass network, and the functional
  units. The top's ports are where they would connect. The end-to-end
  testbench includes a simple scheduler model.
* Port assignment within a priority class, the handling of ports granted to a
  cancelled unit, the one-cycle read latency, read-old-on-write and the 64-bit
  width are this design's choices. The paper does not specify them.
* The paper's depth estimate is a design-time analysis. It is documented here
  but not implemented.
