# Remote Control: injection-controlled deadlock avoidance for chiplet SoCs

A modular SoC is built from several chiplets, each with its own
network-on-chip, stacked on an active interposer that has a network of its
own. Each network is deadlock free by itself. Put together, they can still
deadlock. Packets heading out of a chiplet fill the chiplet's virtual
channels (VCs) while they wait for the interposer. The interposer, in turn,
is full of packets that wait to enter those same chiplets. Neither side can
drain.

Remote Control (RC) breaks this cycle without changing any routing
algorithm. It rests on two rules:

1. Every packet that leaves a chiplet passes through a buffer in its
   boundary router (the router that connects to the interposer). This
   *RC buffer* can hold the whole packet, so an outbound packet never sits in
   the chiplet's VCs waiting for the interposer: it waits in the RC buffer.
2. A node may inject a packet bound for another chiplet only after it has
   reserved a whole-packet slot in that RC buffer. Reservations travel over a
   small side network of counters, the *OPIC tree* (Outbound Packet Injection
   Control). Packets that stay inside the chiplet are never held back.

Together the rules mean the RC buffer always has room for every outbound
packet that is already in the chiplet. Outbound traffic can therefore always
leave the chiplet's own VCs, and intra-chiplet traffic is never blocked behind
it.

This repository holds synthesizable SystemVerilog for all the logic RC adds:
- the OPIC tree;
- the injection control in each network interface (NI);
- the RC buffer and its VC allocator at each boundary router;
- a top level for the 68-node SoC used as the reference system.

The chiplet routers, the interposer routers and the memory system are
conventional designs that RC leaves unchanged. They are not part of this code
and connect through ports.

## The system and where the logic sits

The reference system (`rc_soc`) has:
- four GPU chiplets, each a 4x4 mesh;
- one CPU chiplet, a 2x2 mesh;
- a 4x4 interposer mesh, with DRAM on its edge routers.

Each GPU chiplet has four boundary routers. In row-major numbering these are
nodes 1, 2, 13 and 14. All four routers of the CPU chiplet are boundary
routers. That gives 68 nodes and 20 boundary routers.

```
            GPU chiplet (4x4), node numbers row by row; [B] = boundary
             0   [1]  [2]   3          OPIC trees:  1 <- 0, 4, 5
             4    5    6    7                       2 <- 3, 6, 7
             8    9   10   11                      13 <- 8, 9, 12
            12  [13] [14]  15                      14 <- 10, 11, 15

   core -> ni_inject_ctrl -> router ... router --crossbar--> rc_buffer -> rcva -> interposer
                 |  ^                                            |
            req  v  | grant                                      | slot freed
              opic_block (own node) -> ... -> opic_block (boundary, root) <-+
```

`rc_chiplet` holds the RC logic of one chiplet:
- one `opic_tree`;
- one `ni_inject_ctrl` per node;
- one `rc_buffer` plus `rcva` pair per boundary router.

`rc_soc` instantiates five of them, one per chiplet, each with its own
chiplet id. No signal passes between chiplets: each chiplet polices only its
own outbound traffic.

| file | what it is |
|---|---|
| `rtl/rc_pkg.sv` | flit format and shared constants |
| `rtl/sync_fifo.sv` | helper FIFO |
| `rtl/opic_block.sv` | one OPIC block (one per router) |
| `rtl/opic_tree.sv` | the OPIC forest of a chiplet, shape given by a parent table |
| `rtl/ni_inject_ctrl.sv` | NI injection queue with the permission check |
| `rtl/rc_buffer.sv` | RC buffer of a boundary router |
| `rtl/rcva.sv` | RC VC allocator: RC buffer to interposer link |
| `rtl/rc_chiplet.sv` | all RC logic of one chiplet |
| `rtl/rc_soc.sv` | top: four 4x4 GPU chiplets and one 2x2 CPU chiplet by default; 8x8 GPU and 4x4 CPU chiplets by parameter |

## Permissions: the OPIC tree

### Shape

Every router has an OPIC block. The blocks of a chiplet form one tree per
boundary router, and the boundary router is the root. Every other node
belongs to exactly one tree, and its outbound packets leave through that
tree's root. In `opic_tree` the shape is a table, `PARENT[i]`, where
`PARENT[i] == i` marks a root.

Each tree edge is a pair of 2-bit lines:
- REQ goes up and carries a count of 0..3 new requests;
- RESP goes down and carries a count of 0..3 permissions.

A block has one requester per child plus one for its own NI, so a block with
k children has k+1 requesters. The boundary node's own NI is also a
requester of the root block.

Two shapes are used:
- **The 4x4 chiplet (default).** Each boundary serves the three other nodes
  of its 2x2 quadrant directly, so every tree has a single level.
- **The 8x8 example tree rooted at node 2.** It has eight requesters at the
  root: its own NI plus children 0, 1, 3, 9, 10, 11 and 18. The deeper
  edges are:
  - 0 → 8, 16
  - 9 → 17, 25
  - 11 → 19, 27
  - 18 → 26
  - 25 → 24

### Inside an OPIC block

State:
- `REG[i]`: one register per requester, counting requests received and not
  yet granted.
- `PC` (permit counter): permissions held and not yet handed down. At the
  root it starts at the number of RC buffer slots (4). At every other block
  it starts at 0 and holds permissions that arrived from the parent.
- `S`: a round-robin pointer.
- `outstanding`: permissions already asked of the parent and not yet
  received.

Each cycle works as follows:

1. **Ring of compute modules (CMs), combinational.**
   - The CMs are visited in ring order, starting at requester `S`.
   - The first CM reads the PC. Each later CM reads the residue left by the
     CM before it.
   - Each CM grants `min(REG[i], residue, 3)` and drives that count on its
     RESP line.
   - What is left is the residue for the next CM.
2. **Register update, at the clock edge.**
   - `REG[i] += new requests - granted`.
   - `PC = residue + permissions from the parent`. At the root, "from the
     parent" means RC buffer slots freed this cycle.
   - `S` advances by one.
3. **Upward request.**
   - `deficit = (sum of REG + this cycle's NI request) - PC - outstanding`.
   - If the deficit is positive, up to 3 requests go to the parent on this
     cycle's REQ, and `outstanding` grows by that count.

Because `outstanding` is subtracted, a request goes up the tree only once,
however long it then waits. A request reserves a slot; it is never dropped
and never repeated.

### Timing

A request sent in cycle t is registered in the parent at t+1. A permission
sent down in cycle t is usable by the child at t+1. So each level costs one
cycle up and one cycle down:

| requester | permission after |
|---|---|
| boundary node's own NI | 1 cycle |
| direct child of the boundary (every node of a 4x4 chiplet) | 2 cycles |
| two levels down (8x8 example: nodes 8, 16, 17, 25, 19, 27, 26) | 4 cycles |
| three levels down (node 24) | 6 cycles |

The NI's own request is counted towards the block's upward request in the
cycle the NI raises it. A leaf's request therefore climbs one level per
cycle.

When a slot frees at the root in cycle T, the waiting child it is granted to
sees the permission at T+1. That child's own requester sees it at T+2.

### Safety argument

The root's PC starts at the number of slots. It only grows when a slot is
freed. Permissions are only ever moved down the tree, never created. So the
number of outbound packets that are reserved, in flight, or in the RC buffer
never exceeds the RC buffer's size. An assertion in `opic_block` checks this
bound at every root.

## Injection control in the NI (`ni_inject_ctrl`)

The NI's injection queue is a FIFO of flits (16 deep by default). A packet is
*outbound* when its destination chiplet differs from this chiplet's id.

When the packet at the head of the queue is outbound and the NI holds no
permission, the NI does three things:
- it raises a one-cycle request to its OPIC block, once per packet;
- it holds the whole queue;
- it sends the head flit in the cycle the permission pulse arrives, if the
  router is ready.

Body flits of a packet whose head has gone out follow without any check.
Intra-chiplet packets never ask. Because the queue is first-in first-out, a
waiting outbound packet also delays the packets queued behind it. This is the
queuing delay that makes a short OPIC latency matter.

## The RC buffer (`rc_buffer`)

The RC buffer sits on the boundary router's crossbar output that faces the
interposer. It holds four FIFOs, one per packet slot, each as deep as the
longest packet (8 flits).

- **Writes.** A head flit takes the lowest free FIFO. The buffer records
  which router input VC the packet came from (`in_src_i`). Body and tail
  flits are steered by that tag, so packets from different input VCs may
  interleave flit by flit on the crossbar output.
- **Order.** A small FIFO of slot numbers keeps the order in which packets
  were reserved. Packets are offered to the VC allocator oldest first.
- **Release.** When a tail flit is read out, its slot is freed. The slot is
  returned to the OPIC root on `free_o`, in the same cycle.

A flit written in cycle t can be read in cycle t+1. The OPIC tree guarantees
that a head flit always finds a free FIFO. This is checked by an assertion,
not handled by stalling.

## RC VC allocation (`rcva`)

The link from a boundary router to the interposer router is used only by the
RC buffer. RCVA does the VC allocation for that link after the crossbar
rather than before it.

1. RCVA takes the oldest packet from the RC buffer.
2. It gives that packet a downstream VC that no packet owns and whose
   credits have all come back. If several qualify, it takes the lowest. This
   takes one cycle.
3. It then sends one flit per cycle while that VC has credits.

When a tail leaves, the next packet can be allocated in the same cycle, so
back-to-back packets leave without a gap. Three 4-flit packets take 13 cycles
from arrival to the last flit. Credits come back one per cycle per link.

In the reference router, outbound packets skip the normal VC allocation
stage, so they reach the RC buffer whatever the state of the interposer.
That change belongs to the router's allocators, which are not part of this
code. The logic here assumes the router has made it.

## Flit format (`rc_pkg`)

Flits are 64 bits:

| bits | field |
|---|---|
| 63:62 | type: 01 head, 00 body, 10 tail, 11 single-flit packet |
| 61:58 | destination chiplet |
| 57:52 | destination node |
| 51:0 | payload |

Only the type and the destination chiplet matter to RC. The widths of the
id fields are this design's choice. They allow up to 16 chiplets of up to 64
nodes.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_GPU` (`rc_soc`) | 4 | number of GPU chiplets; one CPU chiplet is always added |
| `GPU_DIM`, `CPU_DIM` (`rc_soc`) | 4, 2 | mesh side of the GPU chiplets (4 or 8) and of the CPU chiplet (2, 4 or 8) |
| `RCB_PKTS` | 4 | RC buffer slots per boundary = permits per OPIC root |
| `PKT_FLITS` | 8 | longest packet, depth of each RC buffer FIFO |
| `NUM_VC`, `VC_DEPTH` | 2, 4 | interposer link VCs and their buffer depth (credits) |
| `NUM_SRC` | 10 | router input VCs that can feed the RC buffer (5 ports x 2 VCs) |
| `QDEPTH` | 16 | NI injection queue depth in flits |
| `NODES`, `NUM_BND`, `BND_NODE`, `PARENT` (`rc_chiplet`) | 4x4 chiplet | chiplet size, boundary nodes and OPIC tree shape |
| `CNT_W` | 6 | width of the OPIC counters |

The RC buffer size, packet length, VC count and depth, and the chiplet
counts and sizes are those of the reference configuration. `NUM_SRC`,
`QDEPTH`, `CNT_W` and the id widths are this design's choices.

`rc_soc` works out the boundary nodes and OPIC trees from the chiplet size:
- **2x2:** every node is a boundary and its own tree.
- **4x4:** boundaries 1, 2, 13 and 14. Each one serves its 2x2 quadrant.
- **8x8:** boundaries 2, 5, 58 and 61. The tree of node 2 is the
  three-level example tree. The other three trees are its mirror images, one
  per quadrant.

The larger systems of the evaluation are therefore parameter settings:
- `NUM_GPU=8` gives 132 nodes of 4x4 chiplets;
- `NUM_GPU=2, GPU_DIM=8` gives 132 nodes with two 8x8 chiplets;
- `GPU_DIM=8, CPU_DIM=4` gives 272 nodes.

An 8x8 chiplet with eight boundaries needs its own `PARENT` table in
`rc_chiplet`.

For size: at default parameters, synthesis of the 68-node `rc_soc` gives
about 12,600 generic cells. Most of the state is the RC buffer FIFOs, 20 x 4
x 8 flits.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog if
it hangs. All testbenches use `$urandom` for stimulus.

| testbench | what it checks |
|---|---|
| `tb_opic_block` | grant one cycle after a request is registered; never more grants than permits; freed permits granted the next cycle; grants rotate round-robin; inner block sends its NI request up the same cycle and a child's the next, never twice; random run keeps ≤ 4 reserved at the root |
| `tb_opic_tree` | 4x4 chiplet: every node answered in 2 cycles, boundary NI in 1; 8x8 example tree: 2/4/6 cycles by depth; 8 requests with 4 permits give exactly 4 grants; random stress on both trees |
| `tb_ni_inject_ctrl` | flit order; one request per outbound packet and none for intra packets; no outbound head before its permission; head leaves in the permission cycle; packets wait behind a blocked outbound packet |
| `tb_rc_buffer` | four interleaved packets from different input VCs come out whole, unmixed, oldest first; one slot release per packet, with its tail |
| `tb_rcva` | whole packets in order; head only to a free, fully credited VC; no downstream overflow; 3 x 4 flits in 13 cycles |
| `tb_rc_chiplet` | one 4x4 chiplet end to end, with router and interposer models and the interposer stopped for 400 cycles |
| `tb_rc_chiplet_rcb1`, `tb_rc_chiplet_rcb8` | the same 4x4 chiplet test at the corners of the buffer-size sweep: a 1-packet RC buffer with one interposer VC, and 8 packets with 8 VCs |
| `tb_rc_chiplet_8x8` | one 8x8 chiplet with four mirrored three-level trees, end to end; permissions at depths 1/2/3 after 2/4/6 cycles |
| `tb_rc_soc` | the whole 68-node SoC end to end at default parameters |
| `tb_rc_soc_132` | the 132-node SoC (eight 4x4 GPU chiplets) end to end |
| `tb_rc_soc_272` | the 272-node SoC (four 8x8 GPU chiplets, one 4x4 CPU chiplet) end to end, with the 2/4/6-cycle latency checks |

The end-to-end testbenches model the parts that are not here:
- **Chiplet routers:** intra-chiplet flits are delivered at once. Outbound
  flits reach their boundary's RC buffer in random interleavings.
- **Interposer routers:** two 4-flit VCs per link, drained at random, with
  credits sent back.

Part-way through the run the interposer stops completely. The test then
checks that every outbound flit in the chiplets is absorbed by the RC
buffers, so no chiplet VC stays occupied by outbound traffic. It also counts
each mechanism and fails if any never occurs:
- a wait for permission;
- an RC buffer fully reserved with requests queued;
- an intra-chiplet packet passing unchecked;
- interleaved RC buffer writes;
- an RCVA credit stall;
- slot release;
- a CPU-chiplet node reserving in its own router.

To run one, for example the SoC test:

```
verilator --binary --timing --assert -y rtl -y tb rtl/rc_pkg.sv tb/tb_rc_soc.sv \
          --top-module tb_rc_soc -o sim
./obj_dir/sim
```

Replace `tb_rc_soc` with any other testbench name. `rtl/rc_pkg.sv` must come
first on the command line. The SoC test takes well under a second.

## Departures from the reference design and open points

- **The boundary node's own NI.** One description of the NI changes says the
  NIs at boundary routers are left unchanged. The 8x8 example counts the
  boundary's own NI among the root's requesters (eight requesters for seven
  children). This design follows the example: boundary NIs also reserve RC
  buffer slots. This is needed for the buffer-capacity guarantee to cover
  their packets too.
- **Quadrant trees in the 4x4 chiplet.** A drawing of the 4x4 chiplet can be
  read as routing one node's OPIC link through a neighbour. The text states
  that each boundary has three requesters, all answered in 2 cycles. Here
  all three are direct children.
- **Upward request rule.** The description says a block sends its parent
  the difference between pending requests and its PC. Taken literally, that
  repeats the request every cycle until it is served. Here the count already
  asked for is also subtracted, so each request is sent once. It is also
  capped at 3 per cycle by the 2-bit line.
- **REQ/RESP encoding.** The 2-bit lines carry counts 0..3. The reference
  gives only their width.
- **RCVA and the router.** Letting outbound packets skip VC allocation inside
  the boundary router is not implemented, because the router is not here.
  Only RCVA's own allocation of the interposer link is.
- **Interleaving in the RC buffer.** Steering body flits by their input-VC
  tag is this design's way of keeping interleaved packets apart. The
  reference says only that a head flit reserves a FIFO for its packet.
- **VC classes.** Full-system runs of the reference use 1-flit control VCs
  and 4-flit data VCs. `rcva` treats all interposer VCs alike, with
  `VC_DEPTH` credits each.
- **Not provided:**
  - the chiplet and interposer routers;
  - the micro-bump/TSV links;
  - DRAM, memory controllers and directories;
  - CPU and GPU cores;
  - the NI's receive side, which RC does not change.

  The reference prints the 8x8 tree for one boundary only. The trees of the
  other three boundaries are mirror images of it; that is this design's
  choice. Placing eight boundaries in an 8x8 chiplet is not done here,
  because their positions and trees are not given.

## Tool notes

All files pass Verilator lint and a SystemVerilog elaborator. The remaining
lint warnings are benign:
- `rst_n` is used both as an asynchronous reset and inside the assertions'
  `disable iff`.
- The FIFO level output is unused inside the RC buffer.
- The `is_head`/`is_tail` helpers look at only two bits of the flit.
- At OPIC roots the upward-request wire has no reader.
