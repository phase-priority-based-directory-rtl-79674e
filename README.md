# Phase-priority network for directory coherence

In a directory-based MESI protocol, a cache line's messages often meet in the
network in an awkward order. An invalidation can overtake the data of an
earlier read. A new request can queue ahead of the replies that would let the
directory finish the transaction already open on that line. Each such
reordering costs a transient state in an L1, or a stall at the directory.

The idea here is to label every coherence message with the *phase* of its
transaction. Every arbiter on the message's path (network interface, VC
allocator, switch allocator) then prefers the message whose transaction is
furthest along, and among messages of one line, the one that belongs to the
older transaction. The protocol itself is unchanged. Only the order in which
the network serves competing messages is different.

This repository holds the network side of the scheme as synthesizable
SystemVerilog:

- the phase identifier and the arbiter that ranks by it;
- the per-bank table that numbers transactions on a line;
- a 4-stage virtual-channel router and a network interface that both use
  that arbiter;
- a 16-tile mesh that ties them together.

The cores, the L1 and L2 cache controllers and the memory controllers are not
part of it. Their messages enter and leave through per-tile ports. The
end-to-end testbench plays them behaviourally.

## The phase identifier

Every message carries 8 bits (`phase_t` in `ppb_pkg`):

| bits | field | meaning |
|------|-------|---------|
| 7:6  | outer | 00 first phase, 01 second phase, 10 third phase |
| 5:0  | inner | number of the transaction on this line, counted at the home bank |

The outer phase follows from the message type (`outer_of`):

- **First phase:** requests to the directory and unblocks: `GETS`, `GETX`,
  `PUTX`, `UNBLOCK`. These are messages the directory may still have to
  stall, so they rank lowest.
- **Second phase:** messages of a transaction the directory has already
  ordered: forwards, invalidations, data, acks, writebacks.
- **Third phase:** messages to and from memory: `MEM_GETS`, `MEM_WB`,
  `MEM_DATA`. They are on the critical path of a miss, so they rank highest.

The inner phase only means something between second-phase messages of the
same line. The rule is that a larger inner phase is a later transaction and
loses. Second-phase messages the directory sends take the number of their
transaction. An L1 that answers a forward or an invalidation copies the
number from the message it answers. First- and third-phase messages carry
inner phase 0.

## Ranking: the phase-priority arbiter

`ppb_arbiter` is the one arbiter every stage uses. It compares, for every
requester, the 9-bit key

    { starved, outer, ~inner }

and grants the largest key. That gives three results:

- a larger outer phase always wins;
- at equal outer phase, the smaller inner phase wins;
- a request that has waited `THRESH` cycles (default 32) outranks everything
  not starved.

Equal keys are broken round-robin, starting after the last accepted grant. A
requester's wait counter counts the cycles it asks without being served. It
saturates at `THRESH`. It clears when the requester is served or stops asking.
The `accept` input tells the arbiter whether its grant was actually used, so a
grant that a later stage throws away neither resets the counter nor moves the
round-robin pointer.

The comparison is a plain unsigned compare of inner phases. When a line's
counter wraps from 63 to 0, the new transaction briefly looks older than the
previous one. The window is 64 transactions on one line, so this is accepted
rather than handled.

The arbiter also reports what decided each grant: `prio_win` (a request of
lower key lost), `tie_break` and `starve_win`. These are what the tests count.

## Numbering transactions: the inner phase buffer

Each home bank keeps a small table, `ppb_inner_phase_buffer`, of recently used
line addresses with the last inner phase handed out for each. It has 32
entries by default. It is fully associative with LRU replacement.

- A message that **opens** a new transaction (`bump`) gets the stored number
  plus one, modulo 64. A line not in the table starts at 0 and takes the
  least recently used entry.
- Any other second-phase message of the open transaction reads the current
  number. An example is the invalidations that go with a `DATA_EXCL`.

The lookup is combinational. The table is updated at the clock edge of the
access.

`ppb_phase_stamper` puts this table in front of the directory's output:

- it sets the outer phase from the message type;
- for second-phase messages it consults the buffer;
- it sets the inner phase of third-phase messages to 0.

The directory says which message opens a transaction with `in_new_txn`.
Which message opens a transaction is a protocol decision, so it stays with
the directory.

## Router

`ppb_router` is a 5-port (local, north, east, south, west) virtual-channel
router with 5 VCs per port and 128-bit flits.

- Each input VC is a 4-flit FIFO (`ppb_vc_fifo`).
- Routing is dimension-ordered, X then Y (`ppb_route_xy`).
- North is y-1 and east is x+1.
- Flow control is credit based.

It has four registered stages:

1. **RC:** the head flit's output port is computed and stored for the VC.
2. **VA:** `ppb_vc_alloc` has one phase arbiter per output port over all 25
   input VCs. Each cycle it grants one waiting head per output port the
   lowest free VC there.
3. **SA:** `ppb_sw_alloc` is separable, input first. Each input port picks
   among its VCs that have a flit and a downstream credit. Each output port
   then picks among the input winners. Both stages rank by phase. An
   input-stage grant counts as accepted only when the same request also wins
   its output.
4. **ST:** the crossbar, with a registered output link. One credit returns
   upstream for every flit that leaves an input VC.

A flit written into an input VC at the end of cycle *c* is on the output link
in cycle *c*+4. Body flits follow their head through the output VC the head
was given. The output VC is released with the tail, so packets never
interleave on a VC. The phase used by SA for body flits is the phase stored
from the head.

`ppb_link` carries flits one way and credits the other. Each passes through
two register stages, matching the 2-cycle link.

## Network interface

`ppb_ni` turns a message (`msg_t`) into a packet:

- a control message is one head-tail flit;
- a message with a 64-byte line is a head and four body flits, lowest
  128 bits first.

The head carries type, phase, source, destination, line address and an 8-bit
ack count.

There is one message slot per VC. New messages take the lowest free slot.
Each cycle a phase arbiter picks which slot sends its next flit, among slots
that hold a router credit. A high-phase message that arrives while a
low-phase data message is halfway out therefore overtakes it flit by flit.

On the ejection side:

- a 4-flit FIFO per VC accepts flits;
- one flit is popped per cycle and one credit returned;
- messages are rebuilt per VC;
- when several are complete, a second phase arbiter picks the one delivered
  first.

## Tile and mesh

`ppb_noc_top` is a 4 x 4 mesh. Tile *n* = *y*·4 + *x* holds a router, an NI and
a phase stamper with its inner phase buffer. Each tile has two sending ports:

- `l1_tx_*` for the L1 or memory controller. The outer phase is set from the
  message type. The inner phase is kept for second-phase replies and cleared
  otherwise.
- `dir_tx_*` for the directory, through the stamper.

A 2-input phase arbiter merges the two into the NI. One receive port,
`rx_*`, delivers all messages for the tile.

The `ev_*` outputs carry, per tile, one pulse for each of these events:

- a phase decision in VA, SA or the NI;
- a starvation grant;
- a flit held for lack of a credit;
- an inner phase buffer hit or eviction.

Zero-load latency of a control message is 2 + 4 + 6·*h* + 2 cycles for *h*
hops. That is 26 cycles for three hops, from the cycle the message is taken
on `l1_tx` to the cycle it is offered on `rx`.

## Where this departs from, or adds to, the source description

- **Mesh size.** The base system is described as 16 tiles and 16 cores with
  four memory controllers. Elsewhere it is called a "3X3 mesh" and a
  "14-node mesh". The RTL follows the 16 tiles: `MESH_X = MESH_Y = 4`.
- **Not specified, chosen here:**
  - the starvation threshold (32);
  - the VC buffer depth (4 flits);
  - credit flow control and its 2-cycle return;
  - the allocator structures;
  - the packet format;
  - the numeric outer-phase codes;
  - the buffer's associativity and LRU replacement;
  - the merge of L1 and directory traffic in a tile;
  - phase arbitration at ejection.
- **The message-type to outer-phase map** is read from the transaction
  diagrams. It is not given as a table.
- **Not built:** cores, L1 and L2 controllers with their MESI state machines,
  and memory controllers. The protocol is the standard one and is not
  described in enough detail to be this design's. The testbench models them
  behaviourally.

## Testbenches

Every module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_ppb_arbiter` | rules against a reference model; round-robin; starvation after exactly THRESH cycles |
| `tb_ppb_inner_phase_buffer` | +1 per transaction, wrap, LRU eviction against a reference list |
| `tb_ppb_phase_stamper` | outer phase per type, inner phase per line, pass-through |
| `tb_ppb_vc_fifo`, `tb_ppb_route_xy`, `tb_ppb_link` | FIFO model, exhaustive X-Y routes on 8 x 8, 2-cycle latency |
| `tb_ppb_vc_alloc`, `tb_ppb_sw_alloc` | grants against reference allocators |
| `tb_ppb_router` | 4-cycle zero-load latency, outer and inner order, credit stall, 600 random packets |
| `tb_ppb_ni` | flit format, loopback of 400 messages, third-phase overtaking first-phase |
| `tb_ppb_noc_top` | the full 16-tile mesh at default parameters (below) |

`tb_ppb_noc_top` runs at the default parameters in three parts:

1. It measures the zero-load latency across three hops.
2. It runs three transactions on one line with behavioural L1s, a
   directory and a memory controller:
   - a read miss that goes to memory;
   - a write to the shared line, with an invalidation and an ack;
   - a read of the modified line, with a forward, data from the owner and a
     writeback.

   Every message must arrive with the outer phase of its type. Every
   second-phase message must carry inner phase 0, 1 or 2 for its
   transaction.
3. It sends about 4000 random messages with random receive back-pressure.
   Each must arrive exactly once and unchanged.

The test counts every mechanism listed above and fails if any of them never
happened.

To run one, with verilator 5 from the repository root:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_ppb_noc_top -o sim \
        rtl/ppb_pkg.sv rtl/ppb_arbiter.sv rtl/ppb_inner_phase_buffer.sv \
        rtl/ppb_phase_stamper.sv rtl/ppb_vc_fifo.sv rtl/ppb_route_xy.sv \
        rtl/ppb_vc_alloc.sv rtl/ppb_sw_alloc.sv rtl/ppb_router.sv rtl/ppb_link.sv \
        rtl/ppb_ni.sv rtl/ppb_noc_top.sv tb/tb_ppb_noc_top.sv
    ./obj_dir/sim

The package goes first. For a block test, swap the top module and testbench, and leave out the files it does not use. The
full mesh takes a few minutes to build and well under a minute to run.
