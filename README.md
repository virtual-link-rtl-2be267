# Virtual-Link: a hardware message queue that routes cache lines between cores

Software queues between cores pay for coherence: every enqueue and dequeue
moves head and tail pointers and the data itself through the cache hierarchy,
and under contention those lines bounce between cores. Virtual-Link removes
the shared queue from memory altogether. A producer *pushes* a whole 64-byte
cache line to a small routing device on the coherence network. A consumer
*fetches* by registering the address of one of its own cache lines with the
device. The device pairs pushed lines with registered requests of the same
queue, in arrival order, and writes each line straight into the requesting
consumer's private cache. Any number of producers and consumers may share a
queue. No core polls a shared pointer, and a queue needs no memory of its own
beyond the device's buffers.

This repository holds synthesizable SystemVerilog for that routing device
(the VLRD, Virtual-Link Routing Device), for the per-core unit that
implements the three new instructions, and for a 16-core top level. It also
has a self-checking testbench for every block.

## The programming model in one paragraph

A queue is named by a *shared queue identifier* (SQI). System software gives
each endpoint a page of device memory whose physical address encodes the
SQI. A producer thread:

1. Fills a line of its own memory.
2. Executes `vl_select` on that line, which latches the line's physical
   address in a per-core register.
3. Executes `vl_push Rs, Rt`, with `Rt` pointing into its endpoint page.
   The line travels to the VLRD.
4. Reads the result in `Rs`. It is 0 on success, in which case the local
   copy is zeroed; otherwise the software retries later.

A consumer thread:

1. Executes `vl_select` on an empty line of its own buffer.
2. Executes `vl_fetch Rs, Rt`. This marks that line *pushable* in the
   core's private cache and sends the line's physical address to the VLRD
   as a request.
3. Some time later the VLRD injects a line into it. The consumer sees the
   data by inspecting the line's control bytes.

The last two bytes of every line are a control region. Bits 511:504 are
reserved, 503:502 give an element size and 501:496 a head pointer; bits
495:0 carry data.

## Address decoding

A device-memory physical address (52 bits) is split as follows:

| bits  | field                          | use here                        |
|-------|--------------------------------|---------------------------------|
| 51:28 | Virtual-Link region            | must equal `PA_SPACE` (0x20)    |
| 27:24 | VLRD id                        | must equal `VLRD_ID`            |
| 23:18 | SQI                            | selects the linkTab row         |
| 17:12 | endpoint page                  | decoded, not used for routing   |
| 11:0  | offset in the 4 KiB page       | ignored                         |

The SQI always starts at bit 18. Its width follows the number of queues, so
64 SQIs put it at 23:18, and the 4-bit device id sits just above it. The
worked example this layout comes from (16 queues with the SQI ending at bit
22) does not add up, because 16 queues need only four bits. The design keeps
the rule rather than the example. The region value 0x20 (8 GiB) is this
design's own choice.

## Inside the routing device


The VLRD (`vl_rd`) has three storage structures and one pipeline.

**linkTab** (`vl_link_tab`) has one row per SQI. Each row holds:

- `v`: set when software enables the queue.
- `prodHead`, `prodTail`: the first and last buffered *lines* of the queue
  that are still unmatched.
- `consHead`, `consTail`: the first and last buffered *requests* of the
  queue that are still unmatched.

A pointer is a valid bit plus a 6-bit slot index; a clear valid bit means
NULL.

**consBuf** (`vl_cons_buf`) has 64 slots of consumer requests. Each slot
holds the SQI, the target line address `consTgt` (PA[51:6]), the requesting
core, and two link fields:

- `nextIn` chains all requests in arrival order. CIHR is the head of that
  chain and CITR its tail. This is the input queue of the mapping pipeline.
- `nextL` chains the requests of *one* SQI that are waiting for data. Its
  head and tail are in that SQI's linkTab row.

**prodBuf** (`vl_prod_buf`) has 64 slots for pushed lines, in three
partitions that can all be accessed in the same cycle:

- **IN** holds the SQI, the line (bits 503:0) and `nextIn`. PIHR and PITR
  are the arrival-order chain.
- **LINK** holds `nextL`, which chains the unmatched lines of one SQI.
- **OUT** holds, for a line that has been matched, the consBuf slot it is
  `mapped` to, the consumer's target address and core, and `nextOut`.
  POHR and POTR chain these lines in match order, and POHR is the line
  being offered for injection.

Slots are shared by all queues, so each buffer is a pool of slots threaded by
linked lists, not a set of FIFOs. A free register (CIFR, PIFR) names the slot
the next packet will take. After each allocation it moves to the next free
slot below the one just taken. When it reaches the bottom it wraps to the
first free slot. The register is recomputed in the allocation cycle, so the
port can accept one packet in every cycle.

### The address-mapping pipeline

Every buffered request and every buffered line passes once through a
three-stage pipeline (`vl_map_pipe`), which accepts one entry per cycle:

| stage | work |
|-------|------|
| 1 | Pick an entry: a rejected line if one is waiting, else the CIHR or PIHR head (round-robin when both wait). Read its SQI's linkTab row. |
| 2 | Decide hit or miss. A request hits if `prodHead` is not NULL; a line hits if `consHead` is not NULL. On a hit, read the partner's `nextL` to advance the head; a line also reads the waiting request's `consTgt`. On a miss, append the entry to its own SQI list. Compute the new row. |
| 3 | Write the row and the one `nextL` field that changed. On a hit, append the line to the OUT list with its target and mapped slot. |

Back-to-back entries of the same SQI make this the subtle part of the
design. Three forwarding paths cover it:

- Stage 1 takes the row that stage 2 has just computed, if it is for the
  same SQI.
- Otherwise stage 1 takes the row that stage 3 is writing in this cycle.
- Stage 2 takes a `nextL` value that stage 3 is writing in the same cycle.

With these, no entry ever stalls, and each leaves stage 3 exactly two cycles
after it entered stage 1.

The pipeline testbench replays a six-entry example cycle by cycle:

- Two consumer requests miss on queues 1 and 0.
- A line for queue 1 hits the first request. Its stage-1 read needs the
  forward from stage 3.
- A line for queue 2 misses.
- A second line for queue 1 misses. It needs the `consHead = NULL` just
  computed by the hit.
- A second line for queue 2 appends behind the first through the forwarded
  tail.

When a list becomes empty, both its head and its tail become NULL. (An
illustration of the same state elsewhere leaves the tail pointing at the
consumed slot. That stale tail is never read, so the behaviour is the same.)

### Injection and rejection

The head of the OUT list is offered on `inj_valid` together with the target
core, the target line address and the line. The consumer's cache answers in
the same cycle:

- **`inj_ack`**: the line was still marked pushable and has been written.
  Both buffer slots are released.
- **`inj_nack`**: the pushable mark is gone. A context switch, a migration
  or an eviction clears it. The request is dropped and its consBuf slot
  released, because the consumer must issue `vl_fetch` again once it runs.
  The line is *not* lost. It moves to a one-entry retry register, which
  holds `inj_valid` low. It then re-enters stage 1 with priority:
  - If a request of its queue is waiting, it is matched to that request.
  - Otherwise it goes back to the *head* of its queue's line list, so it
    stays the oldest line.

The handshake and the retry path are this design's own choices. The
requirements behind them are only that a rejected line stays in the device,
and that data in use by a consumer is never overwritten.

### Timing at the port

One packet per cycle enters through `req_valid`/`req`. In the next cycle
`resp` returns the core id and a status:

- 0 OK
- 1 FULL: no free slot in the buffer the packet needs.
- 2 NOSQI: the address is outside the region, names another VLRD, or names
  a disabled SQI.

With an idle pipeline, a packet that finds its partner already buffered is
offered for injection four cycles after it appears on the port (buffer
write, then stages 1, 2 and 3). The time a packet takes to cross the network
is not modelled.

### A property of shared buffers worth knowing

The buffers are shared by all queues and nothing reserves space per queue.
A full buffer therefore blocks every queue. This can end in a state that
the device cannot leave by itself:

- prodBuf is full of lines for queues nobody is fetching, and
- consBuf is full of requests for other queues.

Every further push and fetch then returns FULL. Software that retries
cannot help unless some consumer fetches one of the buffered queues. The
random testbenches steer their traffic away from this state, and their
comments say so. The end-to-end test fills each buffer on purpose, once at a
time.

## The per-core instruction unit

`vl_isa_unit` implements the instruction semantics seen by one core.

- **`vl_select`** stores PA[51:6] of the chosen line in a selection
  register. `vl_push`, `vl_fetch` and `ctx_swap` all clear it.
- **`vl_push`** sends the line, which the core's L1 supplies with the
  instruction on `op_line`, to the device address.
- **`vl_fetch`** first raises `l1_pushable_valid` for the selected line and
  then sends a fetch whose payload is that line's physical address.
- **Without a selection**, both instructions return NOSEL (3) in the next
  cycle and send nothing.
- **Results**: the device's status becomes `Rs` one cycle after the
  response. A successful push raises `l1_zero_valid` so the L1 clears the
  pushed line.
- **Context swaps**: a counter of pushes in flight drives `no_swap`. The
  core must not swap contexts while it is high, and an assertion checks
  this.

The unit keeps one instruction outstanding (`op_ready` is low until the
result is back). That is the simplest behaviour that meets the semantics,
not a figure from a real core.

## The 16-core top level

`vl_top` instantiates 16 instruction units, one VLRD with 64 linkTab rows and
64 slots in each buffer, and `vl_req_arb`. The arbiter merges the cores'
packets round-robin into the single device port, standing in for the
coherence network. The responses are steered back by core id.

Some parts are outside this design, so their signals are ports of the top:

- The caches. They hold the pushable bit, answer injections and zero pushed
  lines. Their signals are `l1_*`, `inj_*` and `op_line`.
- The network.
- The software that enables SQIs (`cfg_we`, `cfg_sqi`, `cfg_v`).

Storage at the default size:

| structure | size                  |
|-----------|-----------------------|
| linkTab   | 64 × 29 bits          |
| consBuf   | 64 × 71 bits          |
| prodBuf   | 64 × 588 bits         |
| total     | 44 kbit, about 5.4 KiB |

## Files

| file | contents |
|------|----------|
| `rtl/vl_pkg.sv` | widths, pointer and row structs, packet structs, status and operation enums, free-slot search |
| `rtl/vl_addr_decode.sv` | PA field decoder |
| `rtl/vl_link_tab.sv` | linkTab |
| `rtl/vl_cons_buf.sv` | consBuf with CIFR/CIHR/CITR |
| `rtl/vl_prod_buf.sv` | prodBuf IN/LINK/OUT with PIFR/PIHR/PITR/POHR/POTR |
| `rtl/vl_map_pipe.sv` | 3-stage address-mapping pipeline |
| `rtl/vl_rd.sv` | the routing device, port, injection and retry |
| `rtl/vl_isa_unit.sv` | per-core instruction unit |
| `rtl/vl_req_arb.sv` | round-robin merge of core packets |
| `rtl/vl_top.sv` | 16 cores plus one VLRD |
| `tb/tb_<module>.sv` | one self-checking testbench per module; `tb_vl_top` covers the arbiter |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes; a
watchdog ends a hung run. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/vl_pkg.sv rtl/vl_*.sv \
          tb/tb_vl_top.sv --top-module tb_vl_top -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

Replace `vl_top` by any other module name to run its testbench. What each
one establishes:

- **`tb_vl_addr_decode`**: random addresses against the field layout.
- **`tb_vl_link_tab`**: random writes and set-ups against a reference copy.
- **`tb_vl_cons_buf`**: directed checks of free-slot order, wrap-around,
  pop plus append in one cycle, and `nextL`.
- **`tb_vl_prod_buf`**: a random mix of allocation, IN pop, OUT append,
  OUT pop and release against a reference model.
- **`tb_vl_map_pipe`**: the cycle-exact six-entry example above, then
  back-to-back hits on one queue.
- **`tb_vl_rd`**:
  - random traffic on eight queues with a per-queue order scoreboard;
  - the four-cycle latency;
  - FULL on both buffers and NOSQI;
  - the ordering of a rejected line.
- **`tb_vl_isa_unit`**: random instruction streams against the instruction
  semantics.
- **`tb_vl_top`**: the full-size system with 8 producer and 8 consumer
  threads. It models the consumers' caches, including evictions that force
  rejections.
  - It checks that every accepted line arrives exactly once, with its data,
    in a pushable line of a consumer of the same queue.
  - It uses only the top-level ports. After the drain it checks that every
    slot was released: 64 lines and 64 requests are accepted, the 65th of
    each gets FULL.
  - It counts each mechanism: push and fetch OK, producer and consumer hit
    and miss, FULL on each buffer, NOSEL, NOSQI, rejection and retry, port
    contention, incast traffic, and the context-swap clear. A mechanism that
    never occurred counts as a failure.
- **`tb_vl_workloads`**: the queue topologies of seven message-passing
  benchmarks on the full-size system, one SQI per channel. Each thread
  waits for its own message before sending the next. The runs check
  exactly-once delivery, FIFO order on one-to-one channels, and that each
  run finishes within its cycle budget.

  | workload  | channels (producers:consumers × count) | lines | cycles |
  |-----------|----------------------------------------|-------|--------|
  | ping-pong | (1:1) × 2                              | 100   | ≈500   |
  | halo      | (1:1) × 48, 4×4 grid                   | 384   | ≈800   |
  | incast    | (15:1) × 1                             | 150   | ≈1400  |
  | FIR       | (1:1) × 31, 32 stages on 16 cores      | 248   | ≈530   |
  | bitonic   | (1:15) + (15:1)                        | 120   | ≈620   |
  | pipeline  | (1:4) + (4:4) + (4:1) + (1:1)          | 168   | ≈480   |

  The sweep pattern has the same number and kind of channels as halo, so
  the halo run covers it.

  Because the network latency is not modelled, these cycle counts show only
  that the device sustains the patterns. They do not predict application
  run time. Incast is the slowest because all 15 producers share one
  consumer, which keeps one request outstanding.

The testbenches drive inputs on the falling clock edge and sample after the
rising edge. The simulator is two-state: every register that is read is
reset.

## Where this design goes beyond, or departs from, its source

- **The handshakes are this design's own**: packet and response formats,
  the status codes, the injection ack/nack, and one instruction
  outstanding per core.
- **A push is refused only when prodBuf is full.** One description also
  lists "no consumer demand" as a reason to refuse. The pipeline
  description, however, buffers lines that miss until a request arrives,
  and this design follows the pipeline description.
- **Retry path**: a rejected line goes back to the head of its queue's list.
- **Arbitration**: round-robin between request and line entries in the
  pipeline, and between cores at the port.
- **Not modelled**: network latency (about 14 cycles to the device in the
  original system), the caches, the cores and their MMUs, the shared L2 and
  DRAM, and the operating-system support for allocating SQIs and mapping
  endpoint pages.
- **Address map**: SQI width and bit positions as described in the
  address-decoding section above.
