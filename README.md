# Flip: a data-centric CGRA for graph processing, in SystemVerilog

A coarse-grained reconfigurable array (CGRA) normally maps the *operations* of a loop
body onto its processing elements (PEs) and streams data through them from a
scratchpad. For graph algorithms on small edge devices (route planning, BFS, shortest
paths, connected components) that approach spends most of its operations on address
generation, loads and loop control. Flip turns the mapping around. The *vertices* of
the graph are placed on the PEs, up to four per PE. The *edges* become routes through
the mesh network that links the PEs.

When a vertex's value changes, it sends a packet along each of its out-edges. A packet
that arrives at the PE holding the destination vertex starts a short vertex program
there, for example `dist(v) = min(dist(v), dist(u) + w(u,v))`. If the value changes,
that vertex scatters in turn. The computation spreads through the array like a
wavefront. No central scheduler, frontier queue or address arithmetic is involved.

This repository holds synthesizable RTL for the data-centric mode of an 8×8 Flip
array, with its 16 KB scratchpad, plus self-checking testbenches.

## A query, end to end

1. **Configure.** The host writes each PE through a broadcast configuration bus
   (`cfg_t`). `cfg.x`/`cfg.y` select the PE and `cfg.tgt` selects the target:
   - the instruction memory (`CFG_IM`);
   - the vertex registers (`CFG_DRF`: vertex id and attribute);
   - the two routing tables (`CFG_INTER`, `CFG_INTRA`);
   - the Slice ID Register (`CFG_SLICE`).
2. **Start.** A `CFG_START` write to the PE that holds the source vertex does two
   things. It sets that vertex's attribute (for BFS, level 0) and it pushes the vertex
   into the PE's ALUout buffer, as if a program had scattered it.
3. **Spread.** The start vertex's packets travel to its neighbours. Each neighbour
   runs the program once per incoming edge. Those that improve their value scatter
   again.
4. **Finish.** The query is over when `busy` is low. At that point no buffer in any PE
   holds a packet and no program is running. A link writes a packet straight into the
   neighbour's input buffer, so nothing is ever in flight outside a buffer. The host
   then reads each vertex register back with `rd_x`/`rd_y`/`rd_idx`.

The same graph can be queried again from another source by re-initialising the
attributes. Routes and tables stay as they are.

## Packets and routing

A packet is 32 bits (`pkt_t`):

| bits  | field   | meaning |
|-------|---------|---------|
| 31:24 | `id`    | source vertex u |
| 23:20 | `x_off` | direction bit (1 = +x, east) and 3 hop bits |
| 19:16 | `y_off` | direction bit (1 = +y, north) and 3 hop bits |
| 15:8  | `attr`  | new attribute of u |
| 7:0   | `slice` | slice (sub-graph) that holds the destination vertex |

A route is never computed in the network. It is carried in the packet as a signed hop
count per dimension, up to 7 hops each way.

Each router is dimension-ordered, y first, then x:
- A packet with y hops left goes north or south, and its y hop count drops by one.
- Otherwise, a packet with x hops left goes east or west, and its x hop count drops
  by one.
- Otherwise it has arrived.

YX ordering on a mesh cannot form a cyclic channel dependency, so the network itself
does not deadlock. (See *Limits* for the PE-internal cycle.)

The router reads five inputs (the N, E, S, W input buffers and the local injection
port) and moves **one packet per cycle**. A round-robin arbiter picks the first input,
starting after the last winner, whose head can move:
- A head bound for a neighbour needs a **credit** for that output.
- A head that has arrived needs room in the ALUin buffer or the memory buffer,
  whichever its slice selects.

Credits work as follows:
- Each output keeps a credit counter (`flip_credit_counter`). It starts at the depth
  of the neighbour's input buffer.
- Sending a packet costs one credit.
- When the neighbour pops a packet from that buffer, a 1-bit credit wire returns the
  credit.

A head that is blocked raises `stall` for that cycle. It stays in its buffer.

The paper's PE drawing labels the inter-PE links 24 bits wide. The text, however,
lists four packet fields: an 8-bit id, two 4-bit offsets, an attribute, and an 8-bit
slice id. These cannot fit in 24 bits with an 8-bit attribute, so this design follows
the text and uses 32-bit links.

## Inside a PE

```
 N/E/S/W in ──► input buffers (4 × 8) ──┐            ┌──► N/E/S/W out (credits)
                                        ├─► router ──┤
 ALUout (16) ─► Inter-Table packer ─────┘            └──► arrived: slice check
      ▲                                                     │ match        │ miss
      │ scatter                                             ▼              ▼
 vertex engine ◄── ALUin buffer (8) ◄───────────────────────┘     memory buffer (4)
   │  ▲   ▲                                                             │
   │  │   └── Intra-Table (32, 8 hashed lists)                          ▼
   │  └────── Instruction Memory (32 × 32)                       memory bus → SPM
   └────────► DRF (4 vertex registers)
```

The following subsections describe each part of the diagram.

### Slice ID Register and memory buffer

A graph larger than the array is cut into *slices*. Only one slice is loaded at a
time. Every packet carries the slice of its destination.

At arrival, the router compares that slice with the PE's 8-bit Slice ID Register:
- If they match, the packet goes to the ALUin buffer.
- If not, the destination vertex is not on chip. The packet goes to the memory
  buffer, and from there over the memory bus into the scratchpad (see *SPM*).

### Inter-Table: where to send a scatter

The Inter-Table has one entry per out-edge *destination PE*. Each entry holds:

`{valid, src_id, x_off, y_off, slice, next}`

Entries of the same source vertex form a linked list. Entry *r* (r = 0..3) is the head
of the list for the vertex in register *r*, so no search is needed to find it. `next`
points to the next entry. The value 0 means "end of list", because entry 0 is always
a head and so can never be a successor.

The packer takes the head of the ALUout buffer and walks its list. It emits one packet
per cycle, one per entry. It pops the ALUout entry with the last packet.

If the head entry's `src_id` does not match the scattered vertex, the vertex has no
out-edges. The entry is then dropped at once.

### Intra-Table: which local vertices an arriving packet updates

The Intra-Table has one entry per in-edge. Each entry holds:

`{valid, src_id, reg_idx, weight, next}`

Lists are hashed by `src_id % 8`, and their eight heads occupy entries 0..7. A lookup
starts at the hash head. It then follows `next`, one entry per cycle, and reports a
hit for every entry whose `src_id` equals the packet's id.

A hit gives two things:
- the local register of the destination vertex;
- the weight of that edge.

One packet can hit several entries when u has edges to several vertices on this PE.
Each hit runs the program once.

### Vertex engine and the vertex program

The engine (`flip_vertex_engine`) has two states:

- **SEARCH** steps through the Intra-Table list of the ALUin head packet.
- **EXEC** runs one instruction per cycle.

A program starts on a hit, and only when the ALUout buffer has room. It starts with
these working registers:

| reg | content at program start |
|-----|--------------------------|
| r0  | u's attribute from the packet |
| r1  | edge weight w(u,v) from the Intra-Table |
| r2  | v's current attribute from the DRF |
| r3..r7 | 0 |

The program ends at `END`, at `SCAT`, at an `XEQ`/`XGE` whose condition holds, or at
the last instruction-memory entry. The search then continues with the next list
entry. The ALUin packet is popped when its list is exhausted.

Timing: one cycle per Intra-Table entry visited, plus one per executed instruction.

Instructions are 32 bits:
`op[31:28] rd[27:25] ra[24:22] rb[21:19] imm[7:0]`.

| op | effect |
|----|--------|
| `ADD`, `ADDI` | rd = ra + rb / ra + imm, saturating at 255 ("infinity") |
| `SUB` | rd = ra − rb, floored at 0 |
| `MIN`, `MAX`, `MOV` | as named |
| `XEQ`, `XGE` | leave the program if ra == rb / ra ≥ rb |
| `ST` | v.attr = ra (write the DRF) |
| `SCAT` | push (v, ra) to the ALUout buffer, then leave |
| `END` | leave |

The programs used by the testbenches:

```
BFS :  ADDI r3,r0,1 ; MIN r3,r3,r2 ; XEQ r3,r2 ; ST r3 ; SCAT r3
SSSP:  ADD  r3,r0,r1; MIN r3,r3,r2 ; XEQ r3,r2 ; ST r3 ; SCAT r3
WCC :  MIN  r3,r0,r2; XEQ r3,r2    ; ST r3     ; SCAT r3
```

A program that updates its vertex executes 5/5/4 instructions for BFS/SSSP/WCC. This
matches the counts the paper reports. A program that does not update leaves at the
`XEQ` after 3/3/2 instructions. The paper quotes 4/4/2 for that case, which suggests
a slightly different instruction set. The ISA itself is not specified there, so the
one above is this design's own.

## SPM and the packet log

The scratchpad (`flip_spm`) is 16 KB in 8 banks. Each bank is 512 words of 32 bits
with its own port, so all eight together give a 256-bit access. A read returns its
data one cycle after the request.

In the top level (`flip_top`) the SPM caches the packets that missed their slice. A
round-robin arbiter takes one memory-buffer packet per cycle from the 64 PEs. It
appends the packet to a log that runs through the SPM one word per packet,
consecutive words in consecutive banks. The packet has arrived, so its offsets are
zero. Those 8 bits are reused to record where the packet stopped:

`{id, 0, pe_x[2:0], 0, pe_y[2:0], attr, slice}`

`log_count` tells the host how many words are stored, and `log_clear` empties the log.

The host reaches every SPM word through `spm_en`/`spm_we`/`spm_addr`/`spm_wdata`/
`spm_rdata`. A host access wins over the log, so the memory bus waits for a cycle when
both need the same bank. The memory bus also waits while the log is full.

## Slice swapping

Slices are assigned per cluster of 2×2 PEs. A cluster can hold several slices, but only
one of them is loaded at a time. The swap controller (`flip_swap_ctrl`) decides when a
cluster should change slice and which slice it should load:

- It watches every packet that goes into the SPM log.
- For each of the 16 clusters it remembers the slice of the earliest packet cached for
  that cluster since the cluster's last swap. Later packets for the same cluster do
  not change that choice.
- Once all four PEs of a cluster are idle and the cluster has a remembered slice, it
  raises `swap_valid` with `swap_cluster` (numbered `(y/2)*4 + x/2`) and `swap_slice`.
  If several clusters are waiting, they are served round-robin.
- The host answers with `swap_ack`. That clears the cluster's request, and the next
  cached packet for the cluster picks its next slice.

The data movement is done by the host:
1. Save the outgoing slice's vertex registers.
2. Write the new slice's tables, registers and Slice ID Register through the
   configuration bus.
3. Replay the logged packets for the cluster.

The hardware provides the trigger and the choice of slice, which is "earliest cached
packet first". The transfers are left to the host.

## Parameters

| parameter | default | where |
|-----------|---------|-------|
| array size `X`×`Y` | 8×8 | `flip_top` |
| vertices per PE (DRF registers) | 4 | `flip_pkg::N_DRF` |
| instruction memory | 32 × 32 bit | `flip_pkg::IM_DEPTH`, `INSTR_W` |
| Inter-/Intra-Table entries | 32 each | `flip_pkg::TBL_DEPTH` |
| Intra-Table hash heads | 8 | `flip_pkg::INTRA_HEADS` |
| attribute, vertex id, slice id | 8 bits each | `flip_pkg` |
| input / ALUin / ALUout / memory buffer depth | 8 / 8 / 16 / 4 | `flip_pe` |
| SPM | 16 KB, 8 banks | `flip_spm` |

The array size, the four vertices per PE, the 32-entry instruction memory, the eight
hash heads, the 8-bit slice id, the 4-bit offsets and the SPM size are the paper's.

The table depth of 32 is derived from the paper's 260 bytes of distributed memory per
PE. Two 32-entry tables plus the register file come to about 232 bytes.

The buffer depths are estimates from the relative buffer areas the paper reports.
ALUout is deeper than that estimate suggests, to absorb bursts of scatters.

The resulting capacity:
- 256 vertices on chip.
- 2048 out-edge and 2048 in-edge entries, at most 32 of each per PE.

This is enough for the paper's small and large road networks, trees and synthetic
graphs, with up to 256 vertices and about 1800 directed edges, provided the mapping
spreads the edges evenly over the PEs. The 16k-vertex road network needs 64 slices.
The swap requests for it are built, but the transfers it needs are made by the host,
from an off-chip memory that is not part of this RTL.

## Limits and departures

- **Operation-centric mode is not implemented.** This is the classic mode, in which
  the array runs a statically mapped loop. The ISA, crossbar configuration and SPM
  access pattern for it are not described in enough detail to build.
- **Slice transfers are host-driven.** The hardware logs the missed packets and asks
  for the right slice when a cluster goes idle. Moving slice data between off-chip
  memory and the PEs, and replaying the cached packets, is the host's job.
- **Buffers are finite.** Inside a PE the path ALUin → program → ALUout → packer →
  router → own ALUin is a loop. A vertex that scatters to another vertex on the same
  PE uses it. If ALUin and ALUout both fill up with such traffic, the PE stops for
  good. The default depths carry the test graphs (up to 950 directed edges, heavy WCC
  traffic) without this, but they are not a proof for every graph.
- **Host writes assume an idle array**, except for `CFG_START`, which may be issued at
  any time. Starting several sources one after another works for min-based algorithms.
  For WCC the testbench starts vertices in descending id order, so that a start never
  overwrites a label that is already lower.
- **8-bit values.** Attributes saturate at 255, which also serves as "infinity". Vertex
  ids are 8 bits, which covers one slice of 256 vertices.

## Verification

Every module has a self-checking testbench in `tb/` that compares against an
independent model, as listed below. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_flip_fifo` | random push/pop, including push while full with pop, against a queue |
| `tb_flip_credit_counter` | random send/return against a counter |
| `tb_flip_alu` | every opcode on random operands |
| `tb_flip_imem` | random write/read |
| `tb_flip_drf` | write priorities and both read ports |
| `tb_flip_inter_table` | random linked lists; one packet per entry; pop timing |
| `tb_flip_intra_table` | random hashed lists; every hit found |
| `tb_flip_vertex_engine` | SSSP relaxations with real tables, IM and DRF; cycle counts |
| `tb_flip_router` | random traffic on all five inputs; YX hops, credits, slice split; no loss or duplication |
| `tb_flip_pe` | one PE from configuration to scatter, memory bus and credit return |
| `tb_flip_spm` | random traffic on all eight banks; read latency |
| `tb_flip_swap_ctrl` | random busy patterns, cached packets and acks against a model of the earliest-slice policy |
| `tb_flip_top` | the full 8×8 array at its default parameters |

`tb_flip_top` works as follows:
- It builds a 16×16 grid graph (256 vertices, 950 directed edges, random weights) and
  places 2×2 vertices on each PE.
- It runs BFS, SSSP and WCC and compares every vertex with a software reference.
- It reruns BFS with one PE holding a different slice, and checks that exactly the
  packets for that PE come back through the SPM log. It also checks that the PE's
  cluster then requests the missing slice.
- It checks that each mechanism happened at least once: router stall, arbitration,
  multi-hop delivery, local delivery, early program exit, memory-buffer diversion,
  multi-entry Inter-Table lists, several Intra-Table hits for one packet, and the
  memory bus waiting for a host SPM access, and a slice-swap request.

Typical results are BFS in about 420 cycles, SSSP in about 1250, and WCC in about
62 500 cycles. WCC is slow because the 256 starts are issued one at a time.

To run a testbench with plain Verilator (5.x), from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/flip_pkg.sv tb/tb_flip_top.sv \
          --top-module tb_flip_top -Mdir obj_top
./obj_top/Vtb_flip_top
```

Replace `tb_flip_top` with any other testbench name. Modules are found through `-Irtl`.
