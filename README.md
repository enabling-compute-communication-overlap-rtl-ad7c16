# ACE: a collective-communication engine at the network endpoint

Data-parallel training ends every iteration with collective operations. The main one is an
all-reduce of the weight gradients across all accelerators (NPUs). The usual approach runs these
collectives on the NPU's own cores, so they take memory bandwidth and compute away from
training. Every packet is read from and written back to main memory at each step of the
algorithm.

ACE is a small engine placed next to the accelerator-fabric interface (AFI) of each NPU. It
takes over the collective and runs it from its own SRAM:

- It loads a chunk of the payload from main memory once.
- It runs every step of the ring algorithms on that chunk: it sends, reduces received data
  with local data, forwards, and stores.
- It writes the final result back once.

Many chunks are in flight at once, across all phases of a hierarchical algorithm. Network
latency is therefore hidden by other chunks' work, not by the NPU.

This repository holds synthesizable SystemVerilog for the engine:

- the SRAM;
- the reduction ALUs;
- the datapath between them;
- the per-link port buffers;
- the two DMA engines;
- the programmable state machines;
- the control unit that creates chunks, moves them from phase to phase and arbitrates the
  datapath.

The NPU, main memory, AFI and links are outside the design. They appear as ports.

## Data granularity

| unit    | size           | role |
|---------|----------------|------|
| chunk   | 64 KB (256 packets) | unit of pipelining; owns one slot in every SRAM partition |
| message | programmable, `msg_pkts` packets (8 KB = 32 packets in the reference setup) | unit the ring algorithm runs on; a group is one message per ring member |
| packet  | 256 B          | unit moved through the datapath and over a link, one per clock |
| bus word| 64 B           | width of each SRAM bank and each ALU unit |

A packet is spread over four 64-byte words, one word in each of the four SRAM banks. The datapath
therefore reads or writes a whole 256 B packet in one cycle. That matches the four 64-byte buses
between SRAM and the ALUs.

## SRAM partitions and slots

The 4 MB SRAM (`ace_sram`: 4 banks × 1 MB, one read and one write port each) is addressed in
packet rows: 16384 rows of 256 B.

Software divides it into P+1 partitions, one per phase of the collective plus a terminal
partition:

- Each partition is configured by `part_cfg[p] = {base, slot_pkts}`.
- Each partition has `NUM_SLOTS` (16) slots of `slot_pkts` rows. Chunk slot `s` of phase `p`
  is at row `base + s*slot_pkts`.
- A chunk keeps the same slot index in every partition. Its phase-p input is therefore at
  `part_row(p,s)` and its output for the next phase at `part_row(p+1,s)`.
- The terminal partition (index P) holds the final result, from which the RX DMA writes the
  chunk back.

How large each partition is, is software's choice. A reasonable rule is link bandwidth × chunk
share of that phase. A chunk is admitted only when a slot is free. This is the only admission
control, and it bounds the work in flight to 16 chunks.

## The life of a chunk

1. **Command.** The NPU issues `{coll, dtype, src_addr, dst_addr, num_chunks, tag}` on the
   `cmd` valid/ready port.
2. **Creation.** The control unit (`ace_control`) cuts the payload into 64 KB chunks. Each chunk
   gets:
   - a free slot;
   - a running sequence number;
   - its source and destination addresses.
3. **Load.** The chunk becomes a TX DMA job. `ace_tx_dma` reads it from memory packet by packet
   and writes it into the chunk's slot of partition 0 through the datapath.
4. **Phases.** When the load ends, the chunk is queued to an FSM programmed for phase 0. When
   that FSM has finished the chunk, it goes to an FSM of phase 1, and so on.
5. **Write-back.** After the last phase the chunk becomes an RX DMA job. `ace_rx_dma` reads the
   terminal slot and writes it to memory. On the last accepted write it frees the slot and
   raises `irq_valid` with `{tag, chunk index}`.

Each FSM has a queue of 4 chunk contexts and works on them in order. All 16 FSMs, the TX DMA and
the RX DMA compete for the datapath. Chunks therefore overlap within a phase (when a phase has
several FSMs) and across phases.

### Deterministic FSM assignment

A ring algorithm only works if every node runs chunk c on the FSM that its neighbours run chunk
c on. Otherwise packets of different chunks meet in the same receive queue. ACE therefore does
not pick "any free FSM".

The FSMs programmed for the same (collective, phase) form a group of K. The k-th member of the
group takes exactly the chunks whose sequence number is k mod K, in increasing order. Every node
has the same program and creates chunks in the same order, so every node makes the same
choice. The control unit keeps, per FSM, the next sequence number it expects
(`next_seq`). A chunk that is not yet the next one for its target waits in the previous stage.

## The state machines

An FSM (`ace_fsm`) is programmed with `fsm_prog_t`:

| field | meaning |
|-------|---------|
| `enable`, `coll`, `phase` | which collective and which of its phases it serves |
| `op` | `PH_REDUCE_SCATTER`, `PH_ALL_GATHER` or `PH_ALL_REDUCE` (ring) |
| `ring_n`, `rank` | size of the ring (≤ 31) and this node's position in it |
| `groups`, `msg_pkts` | messages per ring member × groups must cover the chunk share |
| `tx_port`, `rx_port` | the link towards the next node and the one from the previous node |

For one chunk the FSM runs `groups` groups. Each group is `ring_n` messages of `msg_pkts`
packets. With r = rank, n = ring size and blk(k) = (r − k) mod n, the ring steps are:

| step | reduce-scatter / all-reduce first half | all-gather / all-reduce second half |
|------|------------------------------------------|-------------------------------------|
| first | send own block blk(0) | send own reduced block |
| middle | receive, add to blk(s+1), store in place, forward | receive, store, forward |
| last | receive, add, store the reduced block to the next partition | receive, store |

The last reduce-scatter step of an all-reduce stores the sum and forwards it in the same
operation. This fuses the end of the reduce-scatter with the start of the all-gather. The output
of a reduce-scatter phase is compact: one block per group. An all-reduce or all-gather writes
the full layout.

**Packet-major order.** An FSM does not finish a whole step before the next. It takes packet i
of the group through every step before it starts packet i+1. As a result:

- The packets an FSM sends on a link arrive in exactly the order its neighbour's FSM consumes
  them.
- The receive side never has to reorder.
- The ring cannot deadlock even with one free receive entry. Packet (s,i) on a node depends
  only on packet (s−1,i) from the previous node, and so back to a send.

Chunks still overlap freely, because other FSMs take the issue slot whenever this one waits.

## One operation per clock: the datapath

Each FSM and DMA request is a `uop_t`. It names:

- an SRAM read row;
- whether to use the incoming packet;
- whether to reduce;
- an SRAM write row;
- an output port or the RX DMA;
- the data type;
- the FSM id.

The issue arbiter in the control unit grants one request per cycle, round-robin. It skips a
requester when:

- the packet it needs has not arrived (empty receive queue), or
- its output FIFO is full, counting the packet already in flight to it.

This is the **resource stall**. It is reported per FSM on `fsm_stall`.

`ace_datapath` runs the granted operation in two stages:

- **Stage 0** starts the SRAM read and captures the incoming packet. The incoming packet comes
  from the FSM's receive queue, or from the memory response for a TX DMA load.
- **Stage 1** selects what to use:
  - `sum`: the received packet plus the SRAM word, for a reduction;
  - the received packet, to store or forward it;
  - the SRAM word, to send it.

  It then writes the SRAM and pushes to the output FIFO of the link or to the RX DMA.

A packet can be reduced, stored and forwarded in one operation. The ALU (`ace_alu`) has four
units of 64 B. Each unit adds 16 FP32 or 32 FP16 values, so one 256 B packet is reduced per
clock. Addition is IEEE-754 with round-to-nearest-even, subnormals, and a canonical quiet NaN.

## Port buffers

`ace_port_buffers` has one output FIFO (8 packets) per link and, on the receive side, one queue
(4 packets) per FSM. Each packet on a link carries the sending FSM's id (`net_pkt_t.fsm`), which
is the same on both nodes because of the deterministic assignment.

An arriving packet is steered by that tag into its FSM's queue. Each FSM therefore has its own
back-pressure, and a slow chunk cannot block another. If two links target the same queue in one
cycle, the lower-numbered link wins. A link whose queue is full sees `link_in_ready` low.

## Programming a hierarchical all-reduce

On an L×V×H torus, the all-reduce runs in four phases:

1. reduce-scatter in the local ring of L;
2. all-reduce in the vertical ring of V, on the 1/L share;
3. all-reduce in the horizontal ring of H, on the 1/L share;
4. all-gather in the local ring.

The reference programming uses four FSMs per phase, alternating ring direction. This fills the
16 FSMs. A phase whose share is too small for 8 KB messages × ring size is programmed with
smaller messages. For example, a ring of 8 on a 16 KB share uses 2 KB messages.

## Where this design departs from the paper or goes beyond it

- **Not built: all-to-all.** The paper's direct all-to-all sends each block over an XYZ route,
  with transit packets forwarded by ACE. It is not implemented. DLRM's embedding exchange
  therefore cannot run.
- **Not built: plain DMA.** Transfers between memory and the AFI that bypass the collective
  engine are not built.
- **Message size.** The paper quotes both 4 KB and 8 KB as the message size. Here it is
  programmable per FSM.
- **Own choices.** The following are choices of this design and not given by the paper:
  - per-FSM receive queues and the FSM tag on each packet;
  - packet-major ordering;
  - the modulo rule for FSM assignment;
  - one slot index shared by all partitions;
  - the queue and FIFO depths;
  - the 16 chunk slots;
  - the two-stage datapath.
- **Not covered by the paper at all:**
  - The memory, NPU and link interfaces are simple valid/ready ports.
  - The clock frequency is not given anywhere.

## Module map

| file | block |
|------|-------|
| `rtl/ace_pkg.sv` | constants and types (packet, command, chunk context, FSM program, uop) |
| `rtl/ace_fifo.sv` | fall-through FIFO used by the queues and buffers |
| `rtl/ace_sram.sv` | 4 × 1 MB banks, 1R1W, registered read |
| `rtl/ace_fp_add.sv`, `rtl/ace_alu_unit.sv`, `rtl/ace_alu.sv` | FP adder, 64 B unit, 4-unit ALU |
| `rtl/ace_datapath.sv` | two-stage packet datapath (SRAM + ALU + output select) |
| `rtl/ace_port_buffers.sv` | per-link output FIFOs, per-FSM receive queues |
| `rtl/ace_fsm.sv` | one programmable ring state machine with its chunk queue |
| `rtl/ace_tx_dma.sv`, `rtl/ace_rx_dma.sv` | chunk load and write-back |
| `rtl/ace_control.sv` | chunk creation, slots, phase hand-off, FSM array, issue arbiter, interrupts |
| `rtl/ace_top.sv` | the engine |

## Simulation

Every testbench in `tb/` checks its results against a reference it computes on its own, and
prints `TB_RESULT checks=N failures=M`. Each one is built with plain Verilator, for example:

    verilator --binary --timing --assert -Irtl rtl/ace_pkg.sv tb/tb_ace_fsm.sv --top-module tb_ace_fsm
    ./obj_dir/Vtb_ace_fsm

What each testbench covers:

- **`tb_ace_alu`** compares every lane against a double-precision reference, including
  subnormals, infinities and NaN.
- **`tb_ace_fsm`** runs rings of up to four FSMs against an integer model of the datapath.
- **`tb_ace_top`** simulates eight complete engines at their default size. They form a 4×2×1
  torus and run a 20-chunk (1.25 MB) FP16 all-reduce:
  - reduce-scatter on the local ring, all-reduce on the vertical ring, all-gather on the
    local ring;
  - the inter-package links are slowed to a quarter rate;
  - memory writes are held back at first.

  It checks every result packet and every interrupt. It also counts each mechanism of the
  design and fails any that never happened:
  - resource stalls;
  - waits for an SRAM slot;
  - several chunks and several phases in flight;
  - reductions;
  - reduce-and-forward and store-and-forward;
  - link back-pressure;
  - completion interrupts.

  The full-size build takes several minutes to compile. The run takes seconds.
