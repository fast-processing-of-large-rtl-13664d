# A graph processor built from self-timed Node Arithmetic Logic Engines

Large sparse graphs (road networks, social networks) are awkward for caches
and wide SIMD machines: a vertex's neighbours are scattered in memory, and the
work per vertex is small and uneven. This design attacks the problem with a
grid of small processing elements, the **NALEs** (Node Arithmetic Logic
Engines). Each graph vertex, or a cluster of vertices, is placed on one NALE.
A NALE computes its vertex's value from the values its neighbours send it,
then passes its own value on. There is no global schedule and no shared bus.
A NALE simply waits until the inputs it needs have arrived. Each link between
two NALEs is a handshake stage, so a NALE's pace is set by its own data
dependencies and not by the slowest element in the chip.

Around the grid sit a memory interface, a dispatch unit that scatters programs
and data from main memory into the NALEs, and an output unit that gathers
results back into main memory. A co-processor provides a scheduler and a
monitor. This repository gives synthesizable SystemVerilog for all of these
parts. It also gives a self-checking testbench for each part and one for the
whole system.

## System structure

```
           job_* (from the co-processor CPU)            status (to the CPU)
                 |                                           ^
             scheduler -------------------------------- monitor
                 |                                           ^  busy/stall/results
                 v                                           |
 main  <--> memory_interface --s_*--> dispatch_logic --x_*/start--> nale_array (ROWS x COLS)
 memory           ^                                                    |
 (mem_*)          +------------m_*------- output_logic <--res_*--------+
```

| Module | Role |
|---|---|
| `graph_processor` | Top level. Its ports go to the co-processor CPU (`job_*`, `status`) and to main memory (`mem_*`), plus `nale_ce`, one clock enable per NALE. |
| `memory_interface` | Runs batch reads of a load image into the dispatch stream, and writes the output stream to main memory. |
| `dispatch_logic` | Decodes the load stream into writes to NALE instruction and data memories, and into start commands. |
| `nale_array` | A `ROWS x COLS` mesh of `nale`. There is a `gasp_link` in each direction between neighbours, and one result link per NALE. |
| `nale` | The processing element. It contains two `local_mem`, two `nale_fifo`, a `nale_mac` and a `nale_comparator`. |
| `output_logic` | Collects results from all NALEs round-robin and encodes each one as a two-word record. |
| `scheduler`, `monitor` | The co-processor's job sequencing, completion detection and counters. |
| `gp_pkg` | Widths, the message type, opcodes, stream commands and instruction-builder functions. |

The defaults are a 4 x 6 array with 256 x 16-bit instruction memory and
256 x 32-bit data memory per NALE. The whole system has about 23.7k
flip-flop bits plus 305 kbit of local memory.

## The NALE

A NALE executes one 16-bit instruction per cycle from its local instruction
memory. Its state is as follows:

* **Neighbour FIFO** (4 entries). Messages from the four incoming links enter
  it through a round-robin merge, one per cycle. A message is a 32-bit value
  plus a 3-bit ID.
* **Internal FIFO** (8 entries). `SEND` to destination "self" writes into it.
  This is how one NALE runs several graph vertices: node-cluster mode. One
  vertex's result becomes the next vertex's input without leaving the NALE.
* **Neighbour registers**: two banks, A and B, of 8 x 32 bits. `RECV` moves
  the head of a FIFO into a register. With `use_id` set, the register index
  is taken from the message ID, so the sender decides which slot it fills.
* **MAC**: a 32 x 32 unsigned multiplier into Hi/Lo, and a 32-bit
  accumulator. The accumulator adds a selected operand (Lo, Hi, A[ra], B[rb],
  an immediate, or a data-memory word) to itself or to zero.
* **Comparator**: compares the accumulator with the same selected operand,
  unsigned. It gives less/equal/greater, encoded as a 2-bit flag (LT=01,
  EQ=10, GT=11). `CMP` with the *min* bit also replaces the accumulator when
  the operand is smaller. This gives the relax step of shortest paths, or the
  label step of connected components, in a single instruction.
* **Local data memory**, 256 x 32. Its second port is loaded and read from
  outside.

### Instruction set

The encoding is defined in `rtl/gp_pkg.sv`, which also provides builder
functions `i_recv`, `i_send`, and so on.

| op | mnemonic | fields | effect |
|---|---|---|---|
| 0 | NOP | | |
| 1 | RECV | `[11]src [10]bank [9:7]reg [6]use_id` | pop the neighbour FIFO (src=0) or the internal FIFO (src=1) into a register; **stalls while the FIFO is empty** |
| 2 | LD | `[11]bank [10:8]reg [7:0]addr` | register = dmem[addr] |
| 3 | ST | `[7:0]addr` | dmem[addr] = acc |
| 4 | MUL | `[5:3]ra [2:0]rb` | {Hi,Lo} = A[ra] * B[rb] |
| 5 | ACC | `[9]keep [8:6]sel [5:3]ra [2:0]rb` | acc = (keep ? acc : 0) + operand |
| 6 | CMP | `[9]min [8:6]sel ...` | flag = compare(acc, operand); with min, acc = operand if smaller |
| 7 | SEND | `[11:9]dest [8:6]id` | send acc with id: dest 0-3 = N/E/S/W, 4 = self, 5 = output logic; **stalls while that link or the internal FIFO is full** |
| 8 | BR | `[11:10]code [9]neg [7:0]target` | branch if (flag == code) xor neg |
| 9 | JMP | `[7:0]target` | |
| A | LDI | `[11:0]imm` | acc = zero-extended imm |
| B | ADDI | `[11:0]imm` | acc += sign-extended imm |
| F | HALT | | return to idle |

Operand select (`sel`): 0 Lo, 1 Hi, 2 A[ra], 3 B[rb], 4 the 6-bit immediate
`{ra,rb}`, 5 dmem[A[ra][7:0]].

Timing: a `start` pulse from the dispatch unit starts an idle NALE at address
0. A NALE that is running ignores `start`. Every instruction takes one cycle,
plus any stall cycles. Register and memory results are visible to the next
instruction. A `SEND` only waits until the link stage has accepted the
message, not until the receiver has consumed it. A NALE can therefore halt
while its last messages are still in flight.

## Links: the two-phase handshake stage

Neighbouring NALEs are joined by `gasp_link`, a one-place buffer that uses
two-phase (transition) signalling. A request or acknowledge is a change of
level, not a level. The stage has one flip-flop, whose output serves both as
the request to the receiver (`r_out`) and as the acknowledge to the sender
(`a_in`). It also has a data register.

* The sender has a message pending when `r_in != a_in`. It must hold `d_in`
  steady until then.
* The stage is empty when `r_out == a_out`.
* When a message is pending and the stage is empty, the stage captures
  `d_in` and toggles its flip-flop. That one transition acknowledges the
  sender and requests the receiver.
* The receiver takes the message and toggles `a_out`.

At the NALE these signals form its output bus. `out_req` is the Valid bit and
`out_msg` carries the 3-bit ID and 32 data bits. `in_ack` is the 4-bit
acknowledge, one bit per incoming direction. In this RTL the flip-flop and
the data register are clocked, and the whole array shares one clock.

Each NALE does have its own clock enable (`ce` on `nale`, `nale_ce` on the
top). A NALE executes an instruction, or takes a message into its neighbour
FIFO, only in a cycle where its enable is high. Driving an enable at a duty
cycle below one makes that NALE behave as if its own clock were slower. A
`start` pulse is taken even when the enable is low. Tie `nale_ce` to all ones
to run every NALE at the full clock rate.

The protocol itself does not depend on a common clock. A receiver that is
slow, or not yet started, simply leaves the stage full. The sender then stalls
at its next `SEND` on that link. A message reaches the receiver's FIFO two
cycles after the `SEND`: one cycle for the NALE's request register and one
for the link stage. A `SEND` towards the edge of the mesh, where there is no
neighbour, is acknowledged at once and discarded.

## Loading and running a job

The co-processor CPU hands the scheduler one job: `job_base`, `job_len` and
`job_out_base`. The job is a *load image* of `job_len` words in main memory,
which the memory interface streams to the dispatch unit. The stream is a
sequence of commands. Each command starts with a header word:

```
[31:28] cmd   [27:16] NALE index   [15:8] start address   [7:0] count
cmd 1: next `count` words -> instruction memory (low 16 bits), from start address up
cmd 2: next `count` words -> data memory, from start address up
cmd 3: start that NALE (index 0xFFF: all NALEs); no payload
```

The dispatch unit accepts one word per cycle. A command for a NALE index
beyond the array is consumed and ignored. Starts can be mixed with loads, so
some NALEs compute while others are still loading. Results go to main memory
from `job_out_base` upwards, as two-word records:

```
word 0: {8'hA5, 5'b0, id[2:0], NALE index[15:0]}     word 1: 32-bit value
```

Records from one NALE keep their order. Records from different NALEs are
interleaved, in round-robin order.

**Main-memory port.** A request (`mem_req`, `mem_we`, `mem_addr`,
`mem_wdata`) is taken in a cycle with `mem_gnt` high. Read data returns in
order, at any later cycle, with `mem_rvalid`. The memory interface keeps at
most `MAX_OUT` = 4 reads in flight or buffered. Back-pressure from the
dispatch stream therefore never loses data. Writes from the output logic take
the port ahead of reads.

**Completion.** The monitor arms on the first start after the job begins.
It declares the job done after 4 consecutive quiet cycles. A quiet cycle
needs three things: no NALE running, the output path empty, and the load
stream finished. The scheduler then pulses `job_done`. `status` reports run
cycles, cycles in which any NALE was stalled, result records, and NALE
halts. Two consequences follow:

* A job whose image never starts a NALE never finishes.
* A NALE that waits forever for a message that never comes keeps the job
  running. The CPU can see this in `status`.

## An example program: shortest paths on a grid

`tb/gp_tb_pkg.sv` holds a program builder. It produces, for each NALE, what
a graph compiler would emit for one vertex of a single-source shortest-path
problem on a directed acyclic grid. The program works in five steps:

1. Load the weights of the incoming edges into bank B.
2. `RECV` one value per incoming edge. Each sender uses, as the message ID,
   the port it arrives on, so each value lands in A[port].
3. Start from 0 (source) or 4095 (infinity). For each input compute
   A[p]+B[p] and keep the minimum with `CMP min`.
4. `SEND` the distance to each downstream neighbour. Then send two result
   records: the distance, and the distance times a per-NALE scale, which uses
   the multiplier.
5. Optionally, emulate a chain of further vertices in node-cluster mode. A
   counted loop passes the value to itself through the internal FIFO, adds
   the edge weight, and emits each vertex's distance.

This one program exercises waiting on inputs, the MAC, the comparator,
branches, the internal FIFO, and sends to neighbours and to the output logic.

## How the design relates to the original architecture

The original architecture fixes the following, and this design follows it:

* The system split: graph processor with memory interface, dispatch, output
  logic and NALE array; co-processor with scheduler and monitor; main memory.
* The NALE's units: two FIFOs, one of them internal for node-cluster mode;
  two neighbour-register banks; multiplier with Hi/Lo registers;
  accumulator; three-output comparator with encoder into the control unit;
  local data and instruction memories.
* The widths: 32-bit data, 64-bit product, 16-bit instructions, a 2-bit
  comparator code, and a Valid/3-bit ID/4-bit ACK output bus.
* The handshake stage: one flip-flop driving both the outgoing request and
  the incoming acknowledge, plus a data latch.

The following are this design's own choices, because the original does not
give them:

* The instruction set and its encoding.
* All memory, FIFO and register-file depths.
* The merge of four links into one FIFO, and the dropping of sends at the
  mesh edge.
* The firing rule of the link stage.
* Unsigned arithmetic.
* The dispatch stream and result record formats, the main-memory protocol,
  the scheduler's job sequence and the monitor's counters and completion rule.
* The 4 x 6 default size, which is the size of the original system drawing
  and not a stated prototype size.

Departures and gaps:

* **Not clockless.** The original proposes GasP self-timed circuits, so that
  each NALE can run at its own speed. Here the link stage is its clocked,
  synthesizable equivalent, and the whole array shares one clock. Each NALE's
  own speed is expressed as a clock enable instead. Giving each NALE a truly
  separate clock would need synchronisers on `r`/`a`, which are not
  included. The transistor-level GasP control is not modelled.
* **"Systolic array."** The array is a mesh of independent message-passing
  elements. There is no lock-step systolic rhythm.
* **The compilation flow** (profiling, clustering, dependency analysis,
  placement, code generation) is software and is not provided. The
  testbenches hand-build what it would produce.
* **The co-processor's CPU and caches, and main memory**, are outside the
  RTL. The testbenches use a simple behavioural memory
  (`tb/main_memory_model.sv`).
* The local data memory's external read port reaches the array boundary
  (`nale_array.x_rdata`), but the top level does not use it. Results leave
  through `SEND` to the output logic.

## Capacity against the benchmark graphs

The original evaluates SSSP, BFS, DFS, PageRank and connected components on
three graphs:

* California roads: 1.97 M vertices, 2.77 M edges.
* Facebook: 2.94 M vertices, 41.9 M edges.
* LiveJournal: 4.85 M vertices, 85.7 M edges.

None of them fits the default configuration as one job. The 24 NALEs hold
6,144 data words between them, and a job image is at most 65,535 words. With
one vertex per NALE, the road graph alone needs about 2 M NALEs. With node
clustering, each NALE would hold over 80 k vertices, against 256 words of
local data memory. The design scales by parameters (`ROWS`, `COLS`, memory
depths), but running such graphs also needs the partitioning into many jobs
that the missing compiler would do. What is simulated here is the mechanism,
on 24-vertex graphs that fit the array:

* shortest paths (`tb_graph_processor`);
* breadth-first levels, connected components by min-label propagation, and
  one PageRank-style weighted-sum step (`tb_graph_workloads`).

Depth-first search and minimal enclosing triangles are not simulated. DFS
needs a global visiting order. Triangle enumeration needs more than
nearest-neighbour values. Neither maps onto a program that one NALE runs per
vertex.

In the connected-components program, neighbouring NALEs can drift up to one
round apart. A NALE may then take a neighbour's next-round label early. This
does not change the result, because taking a minimum does not depend on the
order in which the labels arrive.

## Simulating

Everything is plain SystemVerilog-2017. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/gp_pkg.sv tb/gp_tb_pkg.sv tb/tb_graph_processor.sv --top-module tb_graph_processor
./obj_dir/Vtb_graph_processor
```

Any other testbench builds the same way: name its file and top module. Add
`tb/gp_tb_pkg.sv` for `tb_nale`, `tb_nale_array` and `tb_graph_processor`.
Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_nale_fifo` | random push/pop against a queue model; full/empty/count |
| `tb_gasp_link` | 200 messages with random sender/receiver delays; order, no overwrite, 1-cycle latency into an empty stage |
| `tb_nale_mac`, `tb_nale_comparator` | random operations against reference arithmetic |
| `tb_local_mem` | both ports, including same-address write collisions |
| `tb_nale` | weighted sum of four inputs (19 instructions in exactly 19 cycles); shortest-path node with late inputs, slow links, node-cluster loop, with the NALE's clock enable random |
| `tb_nale_array` | 3 x 4 mesh running grid shortest paths, including an off-edge send, with each NALE at a different random rate |
| `tb_dispatch_logic`, `tb_output_logic`, `tb_memory_interface`, `tb_scheduler`, `tb_monitor` | each against an event model: stream decoding, record format and round-robin bound, ordered batch reads under back-pressure with write priority, job sequencing, monitor counters and completion |
| `tb_graph_processor` | the full 4 x 6 system at default parameters: one job that loads 24 programs, overlaps loading with computing, and checks all 52 result records in main memory against a reference |
| `tb_graph_workloads` | the full system running three jobs back to back (BFS, connected components over 24 rounds, a PageRank step), each checked vertex by vertex, with every NALE at its own random rate |

`tb_graph_processor` also counts how often each mechanism occurs, and fails
if any never does:

* a RECV stall
* a SEND stall
* internal-FIFO use
* a min replacement
* a taken branch
* an edge drop
* output arbitration
* read throttling
* write priority

One job takes about 1,400 cycles and simulates in well under a second.
