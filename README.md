# Out-of-order token dataflow overlay

This is a soft-processor fabric that evaluates large floating-point dataflow
graphs, such as those from sparse matrix factorization, on an FPGA. Every
processing element (PE) holds a few thousand graph nodes in its local block
RAM. A node fires when both of its operands have arrived as packets. The
result is then sent to the node's fanouts over a torus network.

A node's result may have many fanouts, and the network may be congested, so
many computed nodes can be waiting to be sent at any time. The usual design
keeps them in a FIFO in arrival order. That FIFO has to be sized for the worst
case, which costs block RAM, and arrival order has nothing to do with which
results the rest of the computation needs first.

This design drops the FIFO. Each node has a one-bit ready flag. A two-level
leading-ones detector finds a ready node among 4096 flags in a fixed two
cycles. Before loading, software places the nodes in each PE's memory in
decreasing order of criticality (the longest path from the node to the end of
the graph). The lowest-addressed ready node is therefore always the most
critical one. The flags take 256 of the 4096 memory words, about 6%.

The architecture follows the OLAF 2017 paper "Out-of-Order Dataflow
Scheduling for FPGA Overlays" (Siddhartha and Kapre). That paper describes
its processor at block level. This RTL fills in what the paper leaves open,
and the choices it makes are listed in the last section.

## Structure

```
tdp_overlay                NX x NY tiles (default 16 x 16 = 256), 2D torus
 └─ tile (x, y)
     ├─ hoplite_router     bufferless deflection router, 56-bit links
     └─ tdp_pe             processing element
         ├─ graph_mem      4096 x 40-bit local memory (8 x 512x40 BRAM), 4 ports
         ├─ tdp_alu        opcode select
         │   ├─ fp_add     binary32 adder, 1 pipeline stage
         │   └─ fp_mul     binary32 multiplier, 1 pipeline stage
         ├─ ooo_scheduler  RDY/SENT flags, summary vector, two-level search
         │   └─ lod (x2)   leading-ones detectors: 128-bit outer, 32-bit inner
         └─ packet_gen     fanout list -> packets, one per cycle
```

`tdp_pkg` holds the shared widths, the packet and memory-word structs and the
opcodes.

## Data formats

### Packet (56 bits)

| bits  | field | meaning                                    |
|-------|-------|--------------------------------------------|
| 55:52 | x     | destination column                         |
| 51:48 | y     | destination row                            |
| 47:36 | node  | address of the destination node's record   |
| 35    | slot  | which operand (0 or 1) this packet carries |
| 34:32 | -     | unused                                     |
| 31:0  | data  | binary32 value                             |

### Graph memory (4096 words of 40 bits per PE)

Words 0 to 255 are reserved for the flag vectors. Nodes use the addresses
from 256 up. A node is a run of consecutive words starting at its record
address N:

| word    | content                                                                  |
|---------|--------------------------------------------------------------------------|
| N       | header: fanout count in bits 11:0                                        |
| N+1     | state: bit 39 "operand waiting", bit 38 its slot, bits 37:36 opcode, bits 31:0 the waiting operand; after firing, the result |
| N+2 ... | one fanout edge per word: x in 39:36, y in 35:32, node in 31:20, slot in 19 |

Every node has two operands. There are two opcodes: 0 is ADD and 1 is MUL. A
source node is loaded with its value in the state word, and its ready flag is
set by the host. A node of f fanouts takes 2 + f words. One PE therefore holds
3840 words of nodes, about 960 two-input nodes if each node has two fanouts.

## Life of a token inside a PE

The PE accepts a packet from its router every cycle and never refuses one. The
four memory ports stand for the virtual ports that the paper gets by running
the BRAMs at several times the PE clock. They are assigned as follows:
0 is the receive read, 1 the receive write, 2 the ALU write-back or host
access, and 3 the packet-generation read.

| cycle | what happens |
|-------|--------------|
| 0 | A packet arrives. The state word of its node is read. |
| 1 | If no operand is waiting, the packet's value and slot are written to the state word. If one is waiting, the node fires: the opcode and both operands, ordered by slot, go to the ALU. |
| 2 | The result is written to the state word, and the node's RDY flag is set. |
| 3-4 | The scheduler runs its two-cycle pass (next section). |
| 5 | The picked node is handed to `packet_gen`, which reads the header. |
| 6 | `packet_gen` reads the result. |
| 7 ... | Edge words are read back to back. Each becomes a packet, one per cycle while the router accepts. |

An isolated node therefore emits its first packet 9 cycles after its second
operand arrives. The PE testbench checks this number.

Two packets for one node can arrive in consecutive cycles, for example when
both of its operands come from the same source. The second packet's read was
issued before the first packet's write landed, so it sees stale data. A
one-entry forwarding register holds what the previous cycle wrote to a state
word. Cycle 1 uses it instead of the memory data when the node addresses
match, so no stall is needed.

After the last fanout packet of a node has left, its SENT flag is set. The
host can read the SENT flags as a per-node completion flag.

## The scheduler

`ooo_scheduler` keeps one RDY bit for each of the 4096 memory addresses. Only
the bits at node-record addresses are ever set. The bits are grouped into 128
words of 32, and a 128-bit summary vector records which words are non-zero.
Address k is bit 31 - (k mod 32) of word k / 32, and word w is bit 127 - w of
the summary. With this order, the leading one (the most significant set bit)
is always the lowest address.

A pass takes two cycles:

1. The outer detector (`lod`, 128 bits) finds the first non-zero word, and
   that word is read into a register.
2. The inner detector (`lod`, 32 bits) finds the leading one in the word. The
   node address is {word index, bit position}. That RDY bit is cleared, and
   the summary bit is cleared too if the word is now empty. The address is
   offered on `pick_valid`/`pick_node`.

The output holds one picked node. The next pass runs while `packet_gen` is
still sending the previous node, so scheduling adds nothing to the time
between nodes under load.

A RDY bit that is set during a pass is not lost: the summary bit stays set and
the next pass finds it. Only the scheduler clears RDY bits, so a flag word
read in cycle 1 can be missing new bits but never holds one that was already
picked.

Placement decides which node wins. Software gives each node a criticality
(here, the longest path from it to a sink) and writes the nodes of each PE in
decreasing criticality from address 256 upwards. "Lowest ready address" then
means "most critical ready node", so the choice comes from the memory layout
with no priority logic. The test package `tdp_tb_pkg` contains such a
placement routine.

The paper keeps the 256 flag words in graph-memory BRAM. Here they are a
register array inside the scheduler, so bits can be set and cleared in a
single cycle without read-modify-write hazards. The 256 words are still
reserved at the bottom of graph memory, so node capacity is as in the paper.
In an FPGA this array costs 8192 flip-flops per PE. Putting it back into the
BRAM would need a read-modify-write pipeline on the flag port.

## The network

`hoplite_router` is a bufferless router on a unidirectional torus. Packets
travel east (x + 1) along a row until their column matches, then south
(y + 1) until their row matches, and then exit to the PE. Each cycle:

1. A packet from the north input takes the south output, or the exit if it
   has arrived.
2. A packet from the west input takes east. If it wants south or the exit and
   that output is already taken, it is deflected east and goes round the row
   again.
3. The PE injects only if the output it needs is still free. Otherwise
   `inj_ready` is low and `packet_gen` holds the packet. This is the
   congestion stall.

Outputs are registered, so a packet crossing h links arrives h + 1 cycles
after injection. No packet is ever dropped or buffered.

## Loading and running

While `run` is low, the host uses the port of `tdp_overlay`:

1. Select a PE with `ld_x`/`ld_y`. Write every word of its graph image with
   `ld_we`, `ld_addr` and `ld_wdata`, one word per cycle.
2. Pulse `ld_set_rdy` with `ld_addr` set to each source node's record address.
3. Raise `run`, then wait for `idle`. `idle` means no PE has work and no
   packet is on any link.
4. Read results back. `ld_rdata` gives the word at `ld_addr` of the selected
   PE one cycle later. `ld_sent` gives the SENT flag of `ld_addr` at once.

The `ev_*` outputs give one bit per tile per cycle for performance counting:
firings, forwarding, congestion stalls, completed nodes and router
deflections.

## Parameters and sizes

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `NX`, `NY` | 16, 16 | `tdp_overlay`, `hoplite_router` | array size (4-bit coordinates, so at most 16 x 16) |
| `BANKS`, `BANK_DEPTH` | 8, 512 | `graph_mem` | 8 BRAMs of 512 x 40 bits per PE |
| `NPORTS` | 4 | `graph_mem` | virtual memory ports |
| `N_NODES`, `INNER_W` | 4096, 32 | `ooo_scheduler` | flags and flags per word, giving a 128-bit outer detector |
| `W` | 32 | `lod` | detector width |

All defaults match the paper's configuration. At 256 PEs the overlay holds
983,040 words of nodes. That is enough for the paper's largest graphs
(about 110K nodes) and for its claim of about 500K nodes plus edges, provided
each PE's share stays under 3840 words.

## Simulation

Every testbench is self-checking. Each one ends by printing
`TB_RESULT checks=N failures=M`. Build and run one with Verilator 5. List the
packages first:

```
verilator --binary --timing --assert -Wno-fatal -j 4 \
    --top-module tdp_pe_tb -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/tdp_pkg.sv tb/tdp_tb_pkg.sv tb/tdp_pe_tb.sv
./obj_dir/Vtdp_pe_tb
```

| testbench | what it shows |
|-----------|---------------|
| `lod_tb` | leading-one position at 32 and 128 bits, against a reference scan |
| `ooo_scheduler_tb` | picks in increasing address order, every pick 2 cycles apart, each node exactly once when flags arrive while running, SENT flags |
| `graph_mem_tb` | 4-port random traffic against a model, including write collisions |
| `fp_add_tb`, `fp_mul_tb` | bit-exact results against the simulator's floating point, including rounding ties, and 1-cycle latency |
| `tdp_alu_tb` | opcode selection, tag and latency |
| `packet_gen_tb` | packet contents and order, 1 packet per cycle, no loss under random back-pressure |
| `hoplite_router_tb` | 4 x 4 torus: exact hop latency, and delivery exactly once under full random load with deflections |
| `tdp_pe_tb` | one PE runs a 264-node graph through a loop-back network; all results, all SENT flags, the forwarding case, the 9-cycle latency |
| `tdp_overlay_tb` | a 624-node graph on a 4 x 4 overlay, end to end |
| `tdp_overlay_full_tb` | a 3328-node graph on the default 16 x 16 overlay, end to end |
| `tdp_workload_tb` | a 31,024-node, 60,000-edge graph on the default overlay, about the graph size from which out-of-order scheduling pays off; about 4,400 cycles of computation |

The three overlay testbenches count each mechanism: firing, forwarding,
congestion stall, deflection and node completion. They fail if any of them
never happens. At 16 x 16, each takes about two minutes to compile. The
smaller graph then runs in a few seconds and the 31K-node graph in about a
minute, most of it spent loading and reading back through the
one-word-per-cycle host port.

The graphs are random layered graphs of ADD and MUL nodes. The paper's sparse
matrix factorization graphs are not available, so the testbenches do not
reproduce its speedup figures.

## How far to trust it, and where it departs from the paper

What the paper fixes and this RTL follows:

- one packet accepted per cycle;
- the firing rule, with the result written back to graph memory and flagged
  ready;
- RDY and SENT flag vectors over 4096 addresses, with 32 flags per word, 256
  flag words and a 128-bit summary vector;
- the 128-bit outer and 32-bit inner leading-ones detectors, with a fixed
  two-cycle pass;
- placement in decreasing criticality;
- an ADD and a MULTIPLY floating-point unit, each with one pipeline stage;
- one packet injected per cycle, subject to congestion;
- 56-bit links, a 2D torus, and 16 x 16 PEs.

The following are this design's own, because the paper leaves them open:

- Node record layout and packet field layout. The paper says only that the
  graph encoding is compact.
- Every node has exactly two operands, and the only opcodes are ADD and MUL.
- Four virtual memory ports, written as a plain multi-port array. The paper
  multi-pumps the BRAMs; no faster clock domain is modelled here.
- Flags held in registers rather than in BRAM words (see the scheduler
  section).
- How the SENT flags are used. The paper asks for them but does not say what
  reads them.
- The floating-point units are written as logic, not as vendor DSP macros.
  They are single precision, round to nearest even, flush subnormals to zero,
  and return NaN as 0x7FC00000.
- The router. The paper names Hoplite, a router from its authors' earlier
  work, but does not describe it. This router is a minimal deflection router
  of that kind, with a separate registered exit port. Its arbitration may
  differ from the original.
- The host load/readback port and the `run`/`idle` protocol.
- `packet_gen` spends two cycles per node on the header and result reads and
  does not overlap them with the previous node.

Neither timing nor area has been measured on an FPGA. The paper reports about
1.4K ALMs per PE and 258 MHz at 256 PEs.
