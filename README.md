# NoM: a circuit-switched network between the banks of a 3D-stacked DRAM

Copying data from one DRAM bank to another normally costs a read and a write over the
processor's memory channel. Schemes such as RowClone copy inside the chip, but between
banks they use the one internal bus that all banks share. They therefore copy one block at a
time, and they cannot copy across the independently controlled vaults of a Hybrid Memory
Cube–style stack. Network-on-Memory (NoM) adds short point-to-point links between
neighbouring banks, forming a 3D mesh. It turns every bank into a tiny circuit-switched
router. A central unit in the stack's front-end controller sets up time-division-multiplexed
(TDM) circuits between banks. Many copies can then run at once, in parallel with normal
reads and writes, and each word moves one hop per clock with no buffering, arbitration or
flow control on the way.

This repository is a synthesizable SystemVerilog model of that scheme, following the NoM
publication (Rezaei et al.) in its evaluated configuration:

| quantity | value |
|---|---|
| mesh | 8 × 8 × 4 (x, y, DRAM layer) = 256 banks |
| vaults | 32, each the column of two adjacent banks over the 4 layers (8 banks) |
| bank | 16 MB = 2^21 words of 64 bits |
| links and datapaths | 64 bits |
| TDM window | 16 slots |
| router ports | N, S, E, W, U, D and L (local bank) |

The DRAM arrays, the HMC front-end crossbar and the host are not part of the RTL. The top
module brings out a port for each bank's array and one regular-request port per vault.

## Files

| file | block |
|---|---|
| `rtl/nom_pkg.sv` | sizes, port codes (`port_e`), flit, sideband and request structs |
| `rtl/nom_top.sv` | the stack: 256 routers, mesh wiring, 32 vault controllers, CCU |
| `rtl/nom_router.sv` | per-bank router: input latches, crossbar, eject buffer, bank write mux |
| `rtl/nom_slot_table.sv` | the router's TDM slot table |
| `rtl/nom_ccu.sv` | circuit control unit: request queue, allocation, sideband, copy scheduling |
| `rtl/nom_slot_alloc.sv` | slot-allocation accelerator: occupancy state, PE grid, traceback |
| `rtl/nom_alloc_pe.sv` | one processing element of the accelerator |
| `rtl/nom_vault_ctrl.sv` | vault controller with Copy Q and R/W Q |
| `rtl/nom_fifo.sv` | generic FIFO |
| `tb/*_tb.sv` | one self-checking testbench per module; `nom_dram_model.sv` models the bank arrays |

## Geometry and numbering

A bank is addressed by its coordinates: x and y in the layer, and z for the layer, with z = 0
nearest the logic die. Its node number is `(z*8 + y)*8 + x`. The ports point this way:

- E = +x, W = −x
- N = +y, S = −y
- U = +z, D = −z

An input port is named after the neighbour it receives from. So a word that leaves router A
on port S enters the next router on its port N.

A DRAM slice holds two banks, and the slices stacked above each other form a vault. Here the
two banks of a slice are the x-neighbours 2k and 2k+1. This gives `vault = y*4 + x/2` and
`bank-in-vault = 2*z + x[0]`. Each vault has its own controller and bank bus, and its own
sideband bus for programming slot tables.

## How one copy proceeds

The host offers a copy request (`copy_req_t`) with these fields:

- source bank and word address
- destination bank and word address
- length in 64-bit words
- a tag

Requests queue in the CCU and are served in order. Let *t* be the cycle in which the CCU
takes a request from its queue. The table below shows the timeline for a circuit of *h* hops
with start slot *s*.

| cycle | what happens |
|---|---|
| t | the accelerator searches all shortest paths and picks a start slot *s*; the occupancy of the chosen path is reserved at the end of the cycle |
| t+1 … | the CCU writes the slot-table entries along the path over the vault sideband buses |
| T−2 | CCU sends a flagged copy read for word 0 to the source vault controller |
| T−1 | the vault controller (Copy Q first) reads the source bank; the word lands in the bank's data register |
| T | slot *s*: the source router connects L → first output; the word crosses the first link |
| T+i | router *i* (slot *s+i*) connects its input to the next output |
| T+h | the destination router connects its input → L; the word is caught in its eject buffer; the CCU sends a flagged copy write |
| T+h+1 | the destination vault controller writes the eject buffer into the bank |
| T+h+2 | done pulse with the tag (last word only) |

Here T is the first cycle at or after t+3 whose slot number (`T mod 16`) equals *s*. A
request of *n* words keeps its circuit for *n* windows: word *w* follows the same schedule
shifted by 16·*w* cycles. After the last write, the circuit's slots are freed. On an idle
network the search picks T = t+3. A one-word request offered in cycle *c* is taken at
*c*+1 and reports done at *c* + 6 + *h*.

### Two slots per copy

A copy gains bandwidth by using two slots in each window. With `TWO_SLOT` = 1 (the
default) a request of *n* ≥ 2 words is served by two circuits found by two searches. The
first search carries words 0 … ⌈*n*/2⌉−1. The second search runs with the
first circuit's cells already reserved, so it finds a different slot or path, and carries the
remaining words. Each circuit follows the timeline above on its own part of the buffer, and
the done pulse comes once, when the later circuit ends. If the second search finds nothing,
the first circuit keeps the whole copy. The second search waits until the first circuit's
sideband writes are out, because both searches would write the same vaults' slot tables.
On an idle network with the worked example's four-hop path, a two-word copy offered at *c*
gets its second circuit searched at *c*+5, injected at *c*+8 and done at *c*+8+*h*+2,
instead of *c*+6+*h*+16 with one circuit. Longer copies take about half as many windows.
With `TWO_SLOT` = 0 every copy uses one circuit.

The read goes out two cycles before injection. The write is performed one cycle after
ejection. Several circuits can be live at once (up to `MAXC` = 8), and their reads and writes
interleave on the vault buses with regular traffic.

## Finding a circuit: the slot-allocation accelerator

This is the part of the design that is hardest to follow.

### Occupancy state

The CCU keeps, for every router, a 7 × 16 occupancy matrix `V[node][port][slot]`. A set bit
means that output port is already used in that slot of the window.

A circuit that uses slot *k* in one router must use slot *k+1* in the next, because a word
moves exactly one hop per cycle. A circuit is therefore feasible when it meets two
conditions:

- the chain of (router, output, slot) cells along some shortest path is free at slots
  *s, s+1, …, s+h*
- the destination's L output is free at *s+h*

### The search

`nom_slot_alloc` answers a search combinationally, in the same cycle. It uses a grid of
`nom_alloc_pe` processing elements, one per position in the box spanned by the source and
the destination. A 16-bit *busy* vector flows from the source PE towards the destination
PE.

In each PE:

1. The vectors arriving from its x, y and z predecessors are ANDed. A slot is usable if
   some path to this PE has it free.
2. The result is rotated by one slot (bit *k* → bit *k+1*). This maps "slot at the previous
   router" to "slot here".
3. It is ORed with the occupancy row of the output port that leads on in each direction.

At the destination, the PE's local output gives a vector indexed by ejection slot. Every
zero bit in it is a feasible circuit. The start slot is that ejection slot minus *h*. Among
the feasible starts, the one that begins earliest at or after *t*+3 is chosen.

PE (i, j, l) stands for the node at offset (i, j, l) from the source, stepping towards the
destination. This fixes the direction of propagation, so the array is loop-free whatever
the direction of the copy.

### Traceback and reservation

The path is recovered by walking back from the destination. At each step the walk picks an
upstream PE whose outgoing vector has the needed slot free, preferring z, then y, then x.
The result is a list of output ports, one per hop (`dirs`). It is stored with the circuit and
used again to release the slots.

For the example in the NoM description, a copy goes from (2,5,3) to (2,3,1) and is picked up
in slot 0. The circuit starts in slot 3 and runs S, S, D, D. It ejects in slot 7, exactly as
printed there: 3 L→S, 4 N→S, 5 N→D, 6 U→D, 7 U→L.

### Vault-bus slots

Each vault also has a 16-bit vector, VB, that reserves the bank-bus slot of every copy read
(one slot before injection) and copy write (one slot after ejection). The CCU thus never
sends a vault two copy commands in one cycle. The Copy Q never backs up, so the fixed
read-ahead of two cycles is always enough. This reservation is an addition of this model:
the published scheme says only that the vault controller is busy at those two steps.

## Programming the routers

Each router has a slot table (`nom_slot_table`) with one entry per slot and output port. The
entry names the input that drives that output in that slot, or `P_NONE`.

The CCU programs the tables over one sideband bus per vault. Each bus carries at most one
entry per cycle, with these fields:

- valid strobe
- bank in vault (3 bits)
- slot (4 bits)
- input (3 bits)
- output (3 bits)

After a successful search the entries go out in path order. Each vault takes the
lowest-numbered pending hop among its routers. An entry for hop *i* therefore leaves by
cycle *t*+1+*i* at the latest and is in place before slot *s+i* is used at T+*i* ≥ *t*+3+*i*.
The next request is searched only when all entries of the previous one are out.

Freed circuits leave their entries behind. Only a circuit that holds a (slot, output) ever
rewrites that entry, so a stale entry can only move data that no live circuit reads.

## The router

`nom_router` does all of its work in one cycle. Each of the six network inputs has a latch.
The crossbar output for a port is the latch, or the bank's data register for L, selected by
the slot table row of the active slot (`cur_slot`, broadcast by the CCU). Outputs go straight
onto the links and into the neighbours' latches at the next edge.

The local output fills an eject buffer. A multiplexer gives the bank its write data: the
eject buffer for copy writes, the vault bus otherwise. Each flit carries a valid bit
alongside the 64 data bits.

## Vault controller

`nom_vault_ctrl` has two queues:

- **Copy Q** holds requests flagged by the CCU. It is always served first.
- **R/W Q** holds regular requests. It has a valid/ready handshake and returns read data one
  cycle after service.

The controller serves one bank access per cycle. DRAM timing such as activation, precharge
and refresh is not modelled, so a bank access is a one-cycle register read or write. The
bank array must present the word of its last read on `bank_rdata` and hold it.

## Interface of `nom_top`

| port | direction | meaning |
|---|---|---|
| `req_vld`, `req`, `req_ready` | in, in, out | copy request, `copy_req_t` |
| `done_vld`, `done_tag` | out | one pulse per finished copy |
| `stall` | out | a queued request could not be started this cycle (table full, sideband busy, or no free circuit) |
| `active` | out | live circuits |
| `cur_slot` | out | active TDM slot |
| `rw_req[v]`, `rw_ready[v]` | in, out | regular request to vault *v* (`vreq_t`, `copy` = 0) |
| `resp_vld[v]`, `resp_data[v]` | out | regular read data of vault *v* |
| `bank_en/we/addr/wdata[n]` | out | access to the DRAM array of bank *n* |
| `bank_rdata[n]` | in | data register of bank *n* |

A copy's source and destination must be different banks. Copies inside one bank belong to
RowClone/LISA-style mechanisms outside NoM. The length must be non-zero.

## Departures from the published description, and choices made here

- **Seven ports, 13-bit sideband.** The text gives the sideband as 12 bits, yet lists
  3 + 4 + 6 = 13. It also speaks of six input and six output ports, while its example table
  uses the local port L. This model has seven ports with 3-bit codes (7 = idle) and
  13 sideband bits plus a strobe.
- **One entry per vault per cycle.** The text says a path is configured in one cycle and
  also that at most one entry per vault is written per cycle. The second rule is kept, with
  path-ordered scheduling, and the *t*+3 earliest start still holds.
- **AND merge and moving PE frame.** Converging paths are merged by AND, and each PE is tied
  to an offset from the source rather than to a fixed node.
- **Vault-bus reservation.** The VB vectors above are an addition of this model.
- **Command timing.** The read goes out at T−2 and the write at T+h. The published example
  only says "read at slot 3, write at slot 7".
- **Two circuits per copy, not more.** The published text allows several slots per copy
  when the search finds them. Here a copy uses at most two, split in halves, and the second
  is found by a second search a few cycles later rather than by the same search.
- **Not built.** The following are not built:
  - the NoM-Light variant, which sends vertical traffic over the existing TSV bus
  - links clocked slower than the logic layer

  Everything runs on one clock.
- **Own sizes.** `MAXC` = 8 live circuits, 8-entry queues, 16-bit copy length (up to
  65535 words = 512 KB per request), and one circuit released per cycle.
- **Reset.** Reset is asynchronous and active-low. All tables come out of reset idle and
  all occupancy clear.

## Size

The biggest state is the occupancy store of the allocator: 256 × 7 × 16 = 28,672 bits of V
plus 32 × 16 bits of VB. Each router has:

- 16 × 7 × 3 = 336 slot-table bits
- 6 × 65 latch bits
- a 65-bit eject buffer

The search is one combinational cone over the whole PE grid and the traceback chain of up
to 17 hops. It is the critical path of the design.

## Simulating

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and stops itself
after a fixed number of cycles (watchdog). With verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module nom_top_tb \
  rtl/nom_pkg.sv rtl/nom_fifo.sv rtl/nom_alloc_pe.sv rtl/nom_slot_alloc.sv \
  rtl/nom_slot_table.sv rtl/nom_router.sv rtl/nom_vault_ctrl.sv rtl/nom_ccu.sv \
  rtl/nom_top.sv tb/nom_dram_model.sv tb/nom_top_tb.sv
./obj_dir/Vnom_top_tb
```

The full-size build takes about a minute; the run takes well under a second. The testbenches
check the following:

- **`nom_top_tb`** runs the full 256-bank stack.
  - A one-word and a two-word copy on an idle network, shaped like the published example.
    It checks the data and the exact completion cycles: *c*+6+*h* for one word and
    *c*+8+*h*+2 for two words carried by two circuits.
  - Sixty random copies of 1–8 words, mixed with random regular reads and writes on all 32
    vaults. It checks every copied word and every read.
  - It counts that each mechanism occurred: concurrent circuits, stalled requests,
    multi-window circuits, two-slot copies, vertical paths, serialised sideband writes, copies overtaking
    queued regular requests, and regular reads served during copies.
- **`nom_ccu_tb`** checks the CCU on its own.
  - Each circuit's sideband entries form a contiguous shortest path.
  - No (router, output, slot) is shared by two live circuits.
  - The start is at least *t*+3.
  - Reads come at T−2+16w and writes at T+h+16w.
  - Done comes on time, once per copy, after both halves of a split copy.
  - Both split copies and copies whose second search failed occur.
- **`nom_slot_alloc_tb`** compares every search against a dynamic-programming reference,
  on a deliberately crowded corner of the mesh.
- **The remaining testbenches** check the PE rule, the slot table, the router datapath, the
  FIFO and the vault controller cycle by cycle against reference models.

To change the size, override `MX`, `MY`, `MZ`, `SLOTS` or `MAXC` on `nom_top`. `MX` must
be even, and the package's 3-bit bank-in-vault field limits `MZ` to 4. The node field
(`NODE_W` = 8) limits the mesh to 256 banks unless the package is widened.
