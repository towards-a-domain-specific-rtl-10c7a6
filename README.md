# Service Resource Element: a hardware runtime for dataflow fragments

A 5G/6G baseband modem runs hundreds of small signal-processing kernels, such as
channel estimation, equalisation and demapping. Each slot of each user runs them
again, with sizes that change from slot to slot. The Service Resource Element
(SRE) takes that bookkeeping away from software.

The host sends the SRE a *dataflow fragment* (DFF). A DFF is a small graph of
kernels, called *microflows*, together with its input data. The SRE then:

1. decides whether the DFF fits next to the work already running;
2. maps its microflows onto a few identical *stages*;
3. starts each microflow on a compute engine as soon as all its input tokens are
   present;
4. passes tokens between microflows;
5. streams the DFF's output back to the host.

The compute engines (SHOC, a configurable datapath) are outside this RTL. The
SRE drives them through start/abort/done handshakes and pointers into a shared
data buffer.

This repository holds synthesizable SystemVerilog for one SRE. It has a packet
processor, a director, three stages, a control crossbar, a graph memory, an
ingress/egress buffer and a four-channel DMA. Each block has a self-checking
testbench, and an end-to-end testbench runs the whole element at full size.

```
                SoC network (noc_in / noc_out)
                           |
                  +------------------+      +---------------------+
                  | packet processor |<---->| ingress/egress      |<---- SHOC
                  |   (node 0)       |      | buffer 16384 x 32   |      read/write
                  +------------------+      +---------------------+      ports
                     |          |                  ^
                     |          +---- 4-ch DMA ----+ (results to host)
                     |
     ================ control crossbar (5 nodes, valid/ready) ================
        |                    |                |                |
  +------------+       +-----------+    +-----------+    +-----------+
  | director   |       | stage 0   |    | stage 1   |    | stage 2   |
  | (node 1)   |       | (node 2)  |    | (node 3)  |    | (node 4)  |
  | + graph mem|       | FCFS      |    | EDF       |    | FCFS      |
  +------------+       +-----------+    +-----------+    +-----------+
                          |  each stage: 4 SHOC compute elements, 13 memory units
```

## Terms

| Term | Meaning here |
|---|---|
| DFF | dataflow fragment: one instance of a graph of microflows, with its input data and a 16-bit *global tag* |
| container type | the 16-bit type of a DFF; selects a row of the container table (DCT) |
| microflow | one kernel of the graph; has a *local tag* (1..255) unique within its DFF |
| local tag 0 | the DFF itself: an arc from tag 0 is a DFF input, an arc to tag 0 is a DFF output port |
| token | "the output of microflow X for input port p of microflow Y is ready" |
| feature vector | the peak memory a container needs on each logical stage, plus a rotation onto physical stages |
| Tetris | the director's admission step: find a feature vector that fits next to the current load |

## How one DFF runs

All internal traffic is `ctrl_msg_t` messages on the control crossbar. The
fields are the source and destination node, the type, the global tag, `arg`,
`arg2`, `port`, a 64-bit time and a full microflow descriptor. The steps are:

1. **Request.** The host sends a control packet (`NK_CTRL`) with a global tag
   and a container type. The packet processor allocates one of its four
   *contexts* and sends `DCT_REQ` to the director. If no context is free, the
   host gets error 6.
2. **Descriptor.** The director looks the type up in its container table and
   answers with `DFF_DESC`: input words (`arg`), output words (`arg2`) and the
   number of DFF output ports (`port`). An unknown type gives error 1 instead.
   From now on, data packets (`NK_DATA`, one 32-bit word each) for this global
   tag are written into the context's input region. A data packet that arrives
   before the descriptor is discarded and gives error 2.
3. **Mapping.** The director spends `DIR_CC` = 100 cycles on the DFF and then
   runs Tetris (next section). On success it sends `MAPPING_RDY`. It then reads
   the container's microflow descriptors from graph memory, one per cycle, and
   rewrites each logical stage number into a physical one. Each descriptor goes
   as `MFLOW_DESC` to its stage, and `MFLOW_RDY` closes the list. If no vector
   fits, the result is error 5 and the DFF is dropped.
4. **Pointers.** On `MAPPING_RDY` the packet processor sends every stage a
   `PTR_DESC` with the buffer addresses of the DFF's input (`arg`) and output
   (`arg2`) regions.
5. **Input ready.** Two conditions must both hold: all input words are in, and
   `MFLOW_RDY` has arrived. The packet processor then sends `DFF_IN_RDY` with
   the current cycle count to every stage.
6. **Execution.** In each stage, every arc fed by the DFF input becomes ready.
   A microflow whose input arcs are all ready enters the ready queue, is
   scheduled, gets a compute element and memory, and runs. When it completes,
   each of its output arcs produces a token:
   - to a microflow on the same stage: an internal event, with no message;
   - to a microflow on another stage: a `TOKEN_RDY` message to that stage
     (`arg` = consumer local tag, `arg2` = producer local tag, `port` =
     consumer input port);
   - to local tag 0: a `DFF_OUT_RDY` message to the packet processor
     (`port` = DFF output port).
7. **Output.** When every DFF output port has been reported, the packet
   processor programs DMA channel *context mod 4*. The DMA streams the output
   region to the host as `NK_OUT` packets, and `last` marks the final word.
8. **Release.** When the DMA is done, the packet processor sends `DFF_RELEASE`
   to the director, which frees the DFF's memory reservation. It also sends it
   to every stage, which forgets the DFF's actors and pointers. The context
   becomes free.

Errors from the director or a stage (`ERROR`, code in `arg`) go to the packet
processor. It forwards them to the host as `NK_ERROR` packets and drops the
DFF: release is sent and the context is freed.

| Code | Meaning | Raised by |
|---|---|---|
| 0 | no error | |
| 1 | container type not in the DCT | director |
| 2 | data for a DFF whose descriptor is not ready | packet processor |
| 3 | token for a microflow that is not on this stage | stage |
| 4 | microflow ran past its timeout | stage (pool manager timer) |
| 5 | no feature vector fits the current load | director |
| 6 | queue or table overflow (no context, director queue full, actor list full, ready queue full) | any |

## Director and Tetris (`sre_director`, `sre_graph_mem`)

The director holds the container table (`NUM_CONT` = 4 rows, written through
`cfg_*`) and a request queue (`DQ_DEPTH` = 4). It works on one request at a
time. A container row gives:

- the input and output sizes and the number of output ports;
- where its microflow descriptors start in graph memory, and how many there are;
- two feature vectors.

A feature vector (`fvec_t`) lists, for each logical stage, how many memory units
the container needs there at peak. It also gives a rotation `shift`: logical
stage *l* runs on physical stage *(l + shift) mod NUM_STAGES*.

For each physical stage the director keeps the memory units reserved by the DFFs
in flight. Tetris takes the first vector whose rotated needs, added to those
reservations, stay within `STAGE_MEM` = 13 on every stage. Fewer than
`DFF_MAX_PAR` = 4 DFFs may be in flight. The chosen reservation is recorded
against the DFF's global tag and returned on `DFF_RELEASE`.

Two vectors with different rotations let two heavy DFFs share the element by
stacking their peaks on different stages, which is where the game gets its
name. This is an admission check only. The stages still allocate memory for
real at run time, and they wait when it is short.

The graph memory (64 descriptors) is read synchronously. Its data is valid one
cycle after `re`. A descriptor (`mflow_desc_t`) holds:

- the local tag, the kernel id and the logical stage;
- a timeout and a relative deadline;
- up to 4 input arcs (producer tag, producer port, token size, producer stage);
- up to 4 output arcs (consumer tag, consumer input port, DFF output port,
  token size, consumer stage).

## Stage (`sre_stage`, `sre_actor_table`, `sre_sched`, `sre_pool_mgr`)

Each stage is the hardest part of the design. It has three blocks and a manager
around them.

**Actor list and token table.** There is one entry per microflow (`NUM_ACTORS`
= 8). An entry holds:

- the DFF tag, local tag, kernel id and metadata;
- the number of inputs and outputs;
- three state bits: *Rdy*, *Scheduled* and *RUN*.

Beside each entry sits its token-table row: the full arc definitions and one
ready bit per input arc. Three events set ready bits:

- `DFF_IN_RDY` marks every arc whose producer is local tag 0;
- a token marks the arc `<gtag, consumer tag, input port>`;
- a token that matches no entry gives error 3.

`DFF_RELEASE` removes the DFF's entries. An entry that is already in the
ready queue, or running, keeps its slot until it completes, and that late
completion produces no tokens. A new DFF therefore never inherits a
half-finished slot.

A resolver looks at one entry per cycle, lowest slot first. An entry with all
its input arcs ready gets *Rdy* and goes to the ready queue. After the
microflow completes, *Rdy*, *Scheduled*, *RUN* and the arc bits are cleared.

**Ready queue and scheduler.** The queue holds 8 entries, each with an absolute
deadline (`now` + relative deadline). The scheduler picks one entry and spends
`SCHED_CC` = 123 cycles on it. It then offers it to the pool manager and holds
it there until it is taken. The pick rule is set per stage:

- FCFS picks the oldest entry;
- EDF picks the earliest deadline, with ties going to the older entry.

In `sre_top`, stage 1 runs EDF and stages 0 and 2 run FCFS (`STAGE_EDF`). A
push into a full queue is dropped and reported as error 6.

**Resource pool manager.** The pool has `NUM_CE` = 4 compute elements (SHOC
slots) and `MEM_UNITS` = 13 memory units. Any element or unit serves any
microflow. A microflow needs one element, plus the sum of its output token
sizes in memory units. If that is not free, the request waits (`alloc_wait`)
until a running microflow finishes.

Each element remembers the kernel it was last configured for:

- a free element that already holds the kernel is preferred, and starts one
  cycle after the request is accepted;
- otherwise a free element is reconfigured for `RECONF_CC` = 16 cycles and
  starts `RECONF_CC` + 1 cycles after acceptance.

Every running element has a cycle counter. If it reaches the microflow's
timeout (0 means no timeout), the pool manager pulses `shoc_abort`. The stage
then reports error 4 instead of producing tokens.

**Stage manager.** It takes one crossbar message per cycle. When a microflow
completes, it walks the microflow's output arcs one per cycle, producing the
local events, `TOKEN_RDY` and `DFF_OUT_RDY` messages described above. Then it
frees the pool resources. Outgoing messages wait in a 4-entry outbox, and
incoming messages stall only while the outbox is full. `PTR_DESC` pointers are
kept per DFF (4 entries) and handed to the SHOC with each start (`shoc_in_ptr`,
`shoc_out_ptr`).

## Packet processor, buffer and DMA (`sre_packet_proc`, `sre_ie_buffer`, `sre_dma`)

The ingress/egress buffer has 16384 words of 32 bits. It has two write ports
(packet processor, SHOC) and two read ports (DMA, SHOC), each with one-cycle
read latency. The packet processor gives each of its 4 contexts a fixed
4096-word region:

| Context *c* | Words |
|---|---|
| input | *c*·4096 … *c*·4096 + 2047 |
| output | *c*·4096 + 2048 … *c*·4096 + 4095 |

So a DFF may carry at most 2048 input words and 2048 output words. That is
enough for the largest channel-estimation case considered: 4032 bytes of
reference signal plus 674 bytes of metadata in (1177 words), and 8064 bytes
out (2016 words). The SHOC
compute engines read and write this buffer directly, using the pointers the
stage gives them.

The packet processor sends messages addressed to all stages one after another,
one per cycle, through a small send engine. Error packets to the host take
priority over the DMA stream on `noc_out`.

The DMA has 4 channels, each programmed with a source, a length and a tag. The
busy channels share the buffer's read port round-robin, at one word per cycle.
Each channel has a one-word output register, so back-pressure from the network
never loses a word. `done[ch]` pulses when the last word is accepted.

## Control crossbar (`sre_ctrl_xbar`)

This is a 5-node crossbar with one input and one output per node. Each
destination has a 4-deep FIFO and a round-robin arbiter over the senders. A
sender sees `in_ready` only in the cycle its message is taken. A message is
therefore never lost, and the handshake is the receiver's acknowledgement. A
message appears at the destination one cycle after it is taken. Assertions
check two rules:

- a message names an existing node;
- a sender holds its message until it is acknowledged.

## Timing summary

| Event | Cycles |
|---|---|
| crossbar transit (taken → `out_valid`) | 1 |
| `DFF_DESC` received by director → `MAPPING_RDY` sent | `DIR_CC` + 1 = 101 |
| push into an idle ready queue → offer to pool manager | `SCHED_CC` = 123 |
| successive microflows out of one scheduler, pool always free | 124 |
| accepted by pool → `shoc_start`, reusing a configured element | 1 |
| accepted by pool → `shoc_start`, reconfiguring | `RECONF_CC` + 1 = 17 |
| graph memory, I/E buffer reads | 1 |
| DMA | 1 word per cycle, shared by the channels |

## Top level (`sre_top`) and its ports

`sre_top` instantiates everything above and brings out what lies outside the
SRE:

- `noc_in` / `noc_out`: `noc_pkt_t` packets with a valid/ready handshake.
  - Inbound kinds: `NK_CTRL` and `NK_DATA`.
  - Outbound kinds: `NK_OUT` and `NK_ERROR`, with the code in `data`.
- `cfg_we/idx/data`: writes a container-table row. `gm_we/waddr/wdata` write
  the graph memory.
- `shoc_*`: arrays indexed `[stage][element]`.
  - Outputs: `start`, `abort`, `kernel`, `gtag`, `ltag`, `in_ptr`, `out_ptr`.
  - Input: `done`.
  - `shoc_buf_*` is the compute engines' write port and read port into the
    buffer.
- `ev_*`: one-cycle pulses for observation.
  - Element-wide: accept, reject, DCT miss, director overflow, discarded data
    packet, dropped DFF, completed DFF.
  - Per stage: allocation wait, reconfiguration, scheduler overflow, local
    token, remote token.

A 64-bit free-running counter (`now`) gives time stamps and deadlines.

The main parameters and their defaults:

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_STAGES` | 3 | stages |
| `NUM_CE` | 4 | compute elements per stage |
| `MEM_UNITS` | 13 | memory units per stage |
| `NUM_ACTORS` | 8 | actor-list entries per stage |
| `DIR_CC` | 100 | director processing per DFF |
| `SCHED_CC` | 123 | scheduling cycles per microflow |
| `RECONF_CC` | 16 | SHOC reconfiguration cycles |
| `NUM_CONT` | 4 | container-table rows |
| `NUM_CTX` | 4 | DFFs held by the packet processor |
| `NUM_DMA_CH` | 4 | DMA channels |
| `GM_DEPTH` | 64 | graph-memory descriptors |
| `STAGE_EDF` | `3'b010` | per-stage EDF (1) or FCFS (0) |

Widths and constants shared by all blocks are in `rtl/sre_pkg.sv`.

## Simulating

Every testbench is a module with no ports in `tb/`, and it prints
`TB_RESULT checks=N failures=M` at the end. Each has a watchdog that counts a
failure and stops the run if it hangs. With Verilator 5, the package must come
first. For example, for the whole element:

```sh
verilator --binary --timing -j 4 --top-module tb_sre_top \
    rtl/sre_pkg.sv rtl/sre_msg_fifo.sv rtl/sre_ctrl_xbar.sv rtl/sre_graph_mem.sv \
    rtl/sre_director.sv rtl/sre_actor_table.sv rtl/sre_sched.sv rtl/sre_pool_mgr.sv \
    rtl/sre_stage.sv rtl/sre_ie_buffer.sv rtl/sre_dma.sv rtl/sre_packet_proc.sv \
    rtl/sre_top.sv tb/tb_sre_top.sv
./obj_dir/Vtb_sre_top
```

Passing all `rtl/*.sv` files after `rtl/sre_pkg.sv` also works for every unit
testbench. Add `-Wno-fatal` if your Verilator version turns style warnings
into errors. The remaining warnings are unused signal bits, and
`SYNCASYNCNET` for reset used both as an asynchronous reset and in assertion
`disable iff`.

| Testbench | What it exercises |
|---|---|
| `tb_sre_graph_mem` | random writes and read-back, read latency, out-of-range reads |
| `tb_sre_ie_buffer` | both write and both read ports against a model memory |
| `tb_sre_dma` | 4 channels, random lengths including 0, random back-pressure |
| `tb_sre_ctrl_xbar` | random traffic and back-pressure: exactly-once, in-order delivery, 1-cycle transit |
| `tb_sre_sched` | 123-cycle latency, 124-cycle spacing, FCFS and EDF order, overflow |
| `tb_sre_pool_mgr` | allocation wait, memory wait, reconfiguration vs reuse start times, timeout abort |
| `tb_sre_actor_table` | readiness rule, tokens, unknown-microflow miss, bit life cycle, release, full list |
| `tb_sre_director` | message order, 101-cycle mapping latency, rotation, errors 5, 1 and 6 |
| `tb_sre_packet_proc` | the three message sequences of a DFF with a real buffer and DMA, errors 2 and 6 |
| `tb_sre_stage` | local and remote tokens, DFF output, timeout, error 3, full actor list |
| `tb_sre_top` | whole element at default parameters (next paragraphs) |
| `tb_sre_dff_stream` | whole element: a stream of 18 small DFFs from three sources (last paragraph of this section) |

`tb_sre_top` plays the host and the SHOC engines. Its workload is a
channel-estimation DFF of six microflows over three stages:

- 409 input words: a 960-byte reference-signal block, 4 bytes of L1 metadata and
  670 bytes of parameters;
- 480 output words: 1920 bytes;
- the last microflow computes `out[i] = in[i mod 409] + i`, and the testbench
  checks every output word.

A fourth phase reprograms one container-table row four times, and sends one
DFF each of the four channel-estimation sizes through the same graph:

| Scenario | Input words | Output words |
|---|---|---|
| 1 | 409 | 480 |
| 2 | 649 | 960 |
| 3 | 1177 | 2016 |
| 4 | 937 | 1536 |

Every output word is checked. The test runs 16 DFFs in four phases. On the
way it makes each mechanism happen and counts it:

- allocation wait and SHOC reconfiguration;
- local and remote tokens;
- FCFS and EDF scheduling;
- Tetris rejection (error 5);
- an early data packet (error 2);
- a 1750-cycle microflow timeout (error 4);
- an unknown container (error 1);
- context exhaustion (error 6).

It takes a few seconds to build and under a second to run.

`tb_sre_dff_stream` runs a load test at default parameters. Three sources
each send a DFF every 180–220 cycles. Each DFF has two kernels: one on stage
0, whose token feeds one on stage 1. Each kernel runs 200–300 cycles and
needs one compute element and three memory units.

The stream is far more than one element can hold. With 4 contexts, about 5
or 6 of the 18 DFFs complete, and the rest are refused with error 6. A
completed DFF takes about 900–1150 cycles from control packet to last output
word. The floor is 746 cycles: 100 (director), plus 2 × 123 (scheduling),
plus 2 × 200 (shortest runs). On top of that come the input and output
transfers and queueing behind other DFFs. The test checks that:

- every DFF ends exactly once, with its output or an error;
- no data packet is refused;
- no DFF beats the 746-cycle floor.

## Where this design departs from the source description

- **Crossbar protocol.** The source asks for a TileLink TL-UH based control
  crossbar. Here it is a plain valid/ready crossbar with per-destination FIFOs.
  The handshake serves as the acknowledgement, and TileLink's channels are not
  modelled.
- **Outside this RTL.** The SHOC compute engines, the RISC-V cores that run
  the packet processor and director firmware in the source, and the SoC
  network are not built. The packet processor and director are written here
  as fixed-function logic. The compute engines and network are reached through
  `sre_top`'s ports. The shared-buffer network between the SHOCs is not built.
- **Feature vectors.** The source describes feature vectors and a Tetris-like
  fit but gives no format. Here a vector is a memory need per logical stage
  plus a rotation, and the fit is first-fit on memory units only.
- **Memory units.** Memory units are abstract counts used for reservation
  (13 per stage). No address is allocated inside the SHOC memories.
- **Own error codes.** Codes 5 and 6 are additions. The source defines codes
  0–4 only.
- **Unreachable overflows.** The director queue and the stage ready queues have
  overflow checks, as the source asks, and their unit testbenches exercise
  them. In `sre_top` they cannot fire:
  - at most 4 DFFs can be admitted by the packet processor, against a director
    queue of 4 plus the one being processed;
  - a ready queue of 8 holds every actor of a stage.

  The end-to-end test therefore counts context exhaustion in the packet
  processor as its overflow case.
- **Buffer regions.** The source gives no buffer size. Here each of the 4
  DFF contexts has a fixed region of 2048 input and 2048 output words, sized
  for the largest channel-estimation case. A DFF larger than that, or more
  than 4 DFFs in flight, would need variable-size regions. Those are not
  built.
- **Direction of the DMA.** Input data arrives as word-per-packet writes by the
  packet processor. The DMA is used only to stream results out. Tokens
  between stages are not moved at all. A consumer's SHOC reads the producer's
  data in place through the shared buffer, so the stage manager prepares no
  DMA parameter lists.
- **Scheduling policies.** Only first-come-first-served and
  earliest-deadline-first are built, chosen per stage at elaboration time.
  The source also names round robin, but does not say among what. That policy
  is not built. The scheduler does not weigh the stage's load or the SHOCs'
  current configuration either. The pool manager alone takes the
  configuration into account, by preferring an element that already holds
  the kernel.
- **Scheduling cost.** The 123 scheduling cycles are charged once per
  microflow, when it leaves the ready queue. The source's queueing model also
  charges time when a microflow enters the queue.
- **Memory release.** Memory is released when a microflow completes, as in the
  source's pool model, not when its output tokens are consumed.
- **Other choices.** All widths, table sizes, encodings and the reconfiguration
  time of 16 cycles are this design's own.
