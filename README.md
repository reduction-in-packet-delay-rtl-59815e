# A 4x4 NoC routing node with one packet buffer shared by all inputs

A router in a 2-D mesh network on chip usually gives each of its input
ports a private packet array. When traffic is uneven, one array overflows
and stalls its input while the others sit half empty. This design gives all
four input ports of the node **one common packet array of 128 packets**,
kept as virtual output queues whose lengths follow the traffic. Any queue
can grow until the whole array is full. In a node with private arrays of 32
packets per port it would stop at 32. With the space pooled, packets wait
less, both on average and under crowded traffic.

The RTL is synthesizable SystemVerilog (IEEE 1800-2017). It follows the
published description of such a node:

- four input ports and four output ports;
- 8-bit packets;
- a common array of 128 packets holding virtual output queues;
- an iSLIP scheduler;
- a crossbar;
- a latency of 2 + 4 + 4 = 10 clock cycles through an idle node.

The description gives the functions of these parts but hardly any of their
insides. The mechanisms below are therefore this design's own, and the
section "Where this design departs from, or adds to, the description" lists
each one.

## The node at a glance

```
            in_valid/in_data/address[4i+:4]           out_valid/out_data
                   |                                         ^
   +---------------v---------+                               |
   | input_module  x4 (InM)  |  phase 1: holding register    |
   +---------------+---------+                               |
                   | one copy per cycle, tagged with output  |
   +---------------v--------------------------------------+  |
   | common_buffer: 128 slots, 16 linked-list VOQs         |  |
   |   phase 2: write slot + link to queue tail            |  |
   +-----+--------------------------------------^---------+  |
         | voq_count[i][o]                      | deq_valid/deq_out
   +-----v--------------------------------------+---------+  |
   | islip_scheduler: G1 -> A1 -> G2 -> A2 (4 cycles)      |  |
   +-------------------------------------------------------+  |
         common_buffer read register (rd_*) ---> crossbar ----+
                                             (mux reg + 2 link regs)
```

| file | what it is |
|---|---|
| `rtl/noc_pkg.sv` | port count, packet width, array depth, latency budget |
| `rtl/input_module.sv` | one input port: holding register, multicast fan-out |
| `rtl/common_buffer.sv` | the shared packet array and its 16 virtual output queues |
| `rtl/islip_scheduler.sv` | pipelined two-iteration iSLIP scheduler |
| `rtl/crossbar.sv` | 4x4 crossbar with its output link registers |
| `rtl/router_node.sv` | the node: everything above wired together |

## Where the 10 cycles go

A packet that meets an idle node is seen on its output exactly 10 clock
edges after the edge at which its input takes it. At the 4 ns clock of the
original synthesis that is 40 ns.

| edges | stage | where |
|---|---|---|
| 1 | storage phase 1: packet captured in the input's holding register | `input_module` |
| 2 | storage phase 2: slot written, slot linked to its queue's tail | `common_buffer` |
| 3 | iSLIP iteration 1, request and grant (G1) | `islip_scheduler` |
| 4 | iSLIP iteration 1, accept (A1); pointers move | `islip_scheduler` |
| 5 | iSLIP iteration 2, grant (G2) | `islip_scheduler` |
| 6 | iSLIP iteration 2, accept (A2); matching registered | `islip_scheduler` |
| 7 | head of the queue read out of the array, slot freed | `common_buffer` |
| 8 | crossbar register | `crossbar` |
| 9, 10 | two link registers | `crossbar` |

The three terms (2, 4, 4) are constants in `noc_pkg`. The number of crossbar
stages is a parameter (`crossbar.STAGES`, default 3). The other terms are
fixed by the structure.

## The common packet array

`common_buffer` holds 128 slots of payload, plus a `next` pointer per slot.
There are 16 queues, one for each (input, output) pair. Queue (i,o) holds
the packets that came in on input i and leave on output o. Each queue is a
linked list through the slots and has a head pointer, a tail pointer and a
length.

- **Writing.** In one cycle each input may write one packet copy. The free
  slots are kept in a 128-bit bitmap. Each input takes the lowest free slot
  left after the inputs before it. The array takes either every copy
  offered in a cycle or none. It takes none when fewer slots are free than
  copies are offered. Near full, this keeps a low-numbered input from
  starving the others. A stored copy is linked to the tail of its queue at
  the same edge, and the queue length shows it in the next cycle.
- **Reading.** The scheduler dequeues at most one packet per input per
  cycle. The head slot is read into a register, the slot goes back to the
  bitmap, and the head moves on along the list. If a queue's last packet
  leaves in the same cycle a new one arrives, the new slot becomes the head
  directly.
- **Sharing.** Nothing limits one queue's length except the free space. The
  end-to-end test streams two inputs into one output. One queue then holds
  64 packets while the array is full. A private 32-packet array could not
  hold that.

The payload and link memories are plain arrays with no reset. They
synthesise as two memories of 128 x 8 and 128 x 7 bits.

## The scheduler: iSLIP, pipelined

The description chooses iSLIP: round-robin grant and accept arbiters,
iterated, with pointers moved only by first-iteration accepts. It allows
four cycles to reach a decision. Here those four cycles are two iterations,
each split into a grant stage and an accept stage:

- **G1.** Input i requests output o when queue (i,o) is non-empty (see the
  claim rule below). Each output grants the requesting input that comes
  next at or after its grant pointer.
- **A1.** Each input accepts the granting output that comes next at or after
  its accept pointer. For each accepted pair, the output's grant pointer
  moves to one past the input, and the input's accept pointer moves to one
  past the output.
- **G2.** Outputs still unmatched grant among requesting inputs still
  unmatched. The pointers are read but not moved.
- **A2.** Unmatched inputs accept. The complete matching is registered and
  drives `deq_valid`/`deq_out` in the next cycle. `iter2_add` marks the
  matches that only the second iteration found.

**A new matching starts every cycle,** so four are always in flight and an
output can send a packet every cycle. This is the subtle part of the design.
A matching in flight has not yet removed its packet from the queue length,
so the next matching could pick the same packet again. To prevent that,
input i requests output o only while the length of queue (i,o) is greater
than the number of matchings in flight that may still take it:

- the matching in A1, if it requested the pair;
- the matching in G2, if it matched the pair in iteration 1, or if both
  the input and the output are still free;
- the matching in A2, if it matched or granted the pair;
- the registered decision, whose packet leaves the queue only at the next
  edge.

This rule is conservative, so a queue is never dequeued more often than it
holds packets. An assertion in `common_buffer` checks this, and so does the
scheduler's own testbench. The price is a little throughput when queues are
shallow and contended. An input with one packet waiting may sit out a
matching or two while an earlier matching that cannot take that packet is
still in flight.

Consecutive matchings can read a grant pointer before the previous matching
has moved it. Under contention an input may therefore be served twice in a
row. The test bounds the difference between inputs' shares at two packets.
With every queue deep, the pointers spread out after a few cycles and every
cycle brings a full matching of four pairs. This is the 100 % throughput
iSLIP is known for under uniform traffic.

## Input ports, addresses and multicast

Each `input_module` captures a packet with a valid/ready handshake. The node
has one 16-bit `address` input: 4 bits per input port (input i in
`address[4*i +: 4]`), each bit naming one output. This is this design's
reading of the 16-bit address bus on the original node's waveform, which
shows values `16'h1113`, `16'h11DF` and `16'hFFFF`. A mask with several bits
set is a multicast. The input module hands the array one copy per cycle,
lowest output first. It takes the next packet in the cycle its last copy
is stored, so unicast traffic runs at one packet per cycle. A packet with an
empty mask is taken and dropped.

The packet is 8 bits with no header of its own. The node does no routing
computation: the destination comes with the packet on `address`.

## Interface of `router_node`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; active-low asynchronous reset |
| `in_valid[4]` | in | 1 each | input i offers a packet |
| `in_data[4]` | in | 8 each | the packet |
| `address` | in | 16 | destination masks, 4 bits per input |
| `in_ready[4]` | out | 1 each | the packet is taken at this edge |
| `out_valid[4]` | out | 1 each | output o carries a packet this cycle |
| `out_data[4]` | out | 8 each | the packet |
| `free_slots` | out | 8 | free slots in the common array |

`in_ready` is combinational from registered state (it does not depend on
`in_valid`). The outputs have no flow control: a downstream node must take
one packet per cycle per output. Packets of one (input, output) pair leave
in the order they came. Packets of different inputs to one output are
interleaved by the scheduler.

Parameters, with their defaults: `N = 4` ports, `DW = 8` bits, `DEPTH = 128`
slots. The destination field is `N` bits per input, so `address` is `N*N`
bits wide.

## Where this design departs from, or adds to, the description

- The two storage phases are taken as the input holding register and the
  array write. The four scheduling cycles are taken as two iSLIP iterations
  of grant and accept. The four travel cycles are taken as one buffer read,
  one crossbar register and two link registers. The description gives only
  the counts.
- The linked-list queues, the bitmap allocator and the all-or-nothing write
  rule are this design's own. The description says only that the queues
  share one array and grow with the traffic.
- The pipelined scheduler with its claim rule is this design's own. The
  description does not say how often a decision is made.
- The folded, area-saving form of iSLIP is mentioned in the description
  but not described, so it is not built.
- The meaning of `address` (one destination mask per input) and multicast
  are this design's own reading of the waveform. So are the valid/ready
  handshake on the inputs and the absence of backpressure on the outputs.
- Idle outputs show `out_valid = 0`. The original waveform shows a floating
  bus (`8'hZZ`).
- The node with private per-port arrays (4 x 32 packets), against which the
  common array is compared, is not part of this RTL. Neither are the network
  interface, the processing elements or the mesh around the node.
- The 4 ns clock period is a synthesis result of the original RTL. It has
  not been checked for this RTL.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops, with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_input_module` | each copy of random multicast packets is offered in order, none lost; unicast at 1 packet/cycle |
| `tb_common_buffer` | queue lengths, free count, all-or-nothing writes and every dequeued packet against a reference queue model; one queue grows past a quarter of the array |
| `tb_islip_scheduler` | lone request matched in exactly 4 cycles; a hand-worked case where iteration 2 adds a match; full matchings every cycle with deep queues; round-robin shares under contention; never dequeues an empty queue |
| `tb_crossbar` | random partial permutations arrive on the right output 3 cycles later |
| `tb_router_node` | the whole node at its default size; see below |
| `tb_router_load` | 50 000 packets at an offered load of 0.995 per input, uniform destinations |

`tb_router_node` tags every packet with its source port (bits 7:6) and a
sequence number (bits 5:0). Its scoreboard keeps one expected queue per
(source, destination) pair. It runs five phases:

1. One isolated packet on each of the 16 pairs. Each must take exactly 10
   cycles.
2. All inputs sending to one output at once.
3. Multicast, with the waveform's three address values.
4. Two inputs streaming into one output until the array refuses writes and
   inputs stall.
5. 50 000 unicast packets with random destinations and geometric
   (discrete exponential) gaps, at an offered load of 0.4 packets per
   cycle per input.

It counts each mechanism: 10-cycle packets, contended outputs, matches added
by iteration 2, multicast packets, input stalls, a full array, and the
longest queue. It fails if any of them never happened. In phase 5 the
average latency is 10.6 cycles, against 10 for an idle node. The whole test
runs in well under a second.

`tb_router_load` offers each input 0.995 packets per cycle, the traffic
intensity of the queuing analysis behind the design, with uniformly random
destinations. Latency is counted from the edge at which the node takes a
packet, so time spent waiting in front of a stalled input is not included.
In a typical run:

- the 50 000 packets take about 13 200 cycles, against 12 560 at the
  offered rate, so the node carries about 95 % of the offered load;
- the array fills now and then, and inputs stall in about 2 200 cycles;
- the longest queue reaches 43 packets;
- the average latency is about 37 cycles, with a maximum of about 170.

The shortfall has two possible sources. A 128-packet array fills now and
then at a load this close to 1, however well it is scheduled. The
conservative claim rule also costs throughput. The tests do not separate
the two. Letting each matching see the pointer moves of the one just ahead
(a combinational bypass) was tried and made the node slower, so the pointers
stay registered.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/noc_pkg.sv \
          tb/tb_router_node.sv --top-module tb_router_node -o sim
./obj_dir/sim
```

Replace `tb_router_node` with any other testbench name. The package is
named first because every module imports it. `-y rtl` lets Verilator find
the modules by file name.
