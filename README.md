# RidgeWalker RTL: graph random walks as a stream of stateless hops

A graph random walk starts at a vertex. At each step it picks one neighbour of
the current vertex and moves there. It stops after a fixed number of steps, at
a vertex with no neighbours, or (in personalised PageRank, PPR) at random with
probability alpha on every hop. Every hop costs two dependent random memory
reads: the vertex's row pointer, then one entry of its neighbour list. A
pipeline that follows one walk at a time therefore waits on memory latency
twice per hop.

This design cuts every walk into hops and treats each hop as an independent
task. A task carries everything the next hop needs: current vertex, query id
and step count. Once the neighbour list is known, it also carries the list
address, degree and channel. No pipeline keeps per-walk state, so any
pipeline can run any hop of any walk. While one hop waits for memory, others
fill the pipeline behind it, and the memory channels see a continuous stream
of independent reads. The RTL here is a synthesizable SystemVerilog model of
that architecture: 16 pipelines on 32 memory channels, a scheduler that keeps
every pipeline fed, and a router that sends each hop to the channel holding
its neighbour list.

## The loop

Tasks flow around a closed loop (module names in brackets):

```
host beats ─► loader ─► zero-bubble scheduler ─► Row Access[i] ─► router ─►
  [query_loader]        [zero_bubble_scheduler]  [row_access]   [task_router]
                                ▲
   Sampling[j] ─► Column Access[j] ─► writer[j] ─┬─► path records to host
   [sampling]     [column_access]    [query_writer] └─► unfinished hops back
                                                          to the scheduler
```

- **Row Access i** reads the row-pointer entry of the task's vertex through
  memory channel RA[i]. It may read any vertex's entry: the row-pointer array
  is visible from every row channel.
- **The router** moves the task to pipeline j, whose column channel CA[j]
  holds that vertex's neighbour list.
- **Sampling j** draws a neighbour index, or decides that the walk ends.
- **Column Access j** reads the chosen neighbour and advances the walk.
- **The writer** records the hop. If the walk is not finished, it hands the
  task back to the scheduler, which may start the next hop on any pipeline.

Every arrow is a valid/ready stream. The links between Row Access, router,
Sampling and Column Access are 32-entry FIFOs (`stream_fifo`), one LUT-RAM's
worth.

### Task and record formats (`rw_pkg`)

`task_t` is 129 bits, with fields from the top down:

| field | bits | meaning |
|---|---|---|
| v | 32 | current vertex |
| qid | 22 | query id (beat number × N + lane) |
| step | 8 | hops taken so far |
| chan | 8 | column channel of v's neighbour list (written by Row Access) |
| cl_addr | 32 | word address of v's list; the sampled neighbour's address after Sampling |
| deg | 24 | degree of v |
| stop | 1 | the sampler ended the walk |
| hop | 1 | this task's last step moved to a new vertex |
| done | 1 | the walk is finished |

A row-pointer entry is one 64-bit word at byte address 8·v:
`{chan[63:56], deg[55:32], list_addr[31:0]}`. A neighbour list is `deg`
consecutive 64-bit words on column channel `chan`, starting at word
`list_addr`, with the neighbour id in bits [31:0].

Each task leaving Column Access becomes one 64-bit path record
`{vertex[63:32], qid[31:10], step[9:2], hop[1], done[0]}`. The host rebuilds
each walk from its records with `hop` set, ordered by `step`. The record with
`done` set closes the walk. Records of one walk can arrive out of order across
write ports, because the hops of one walk may run on different pipelines.

## Zero-bubble scheduler

The scheduler joins new walks with returning hops and gives work to whichever
pipeline can take it. It never waits for a particular pipeline. It has three
stages:

1. A task balancer spreads the loader's new walks over N lanes.
2. One merger per lane combines the lane's new walks with the hops coming
   back from writer lane i. Returning hops have strict priority, so walks
   already in flight finish first and the loop drains.
3. A second task balancer hands ready tasks to the pipelines. A 65-entry FIFO
   in front of each pipeline absorbs the balancer's feedback delay.

### Dispatcher and merger

The balancer is built from two small units, each with a two-cycle latency and
one task per cycle.

**Dispatcher (`task_dispatcher`).** It has one input and two outputs, each
with a 2-entry FIFO. It reads a task into a holding register and picks an
output from the 3-bit code {out2_full, out1_full, last}, where `last` = 1
means out_2 was served last:

| code | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |
|---|---|---|---|---|---|---|---|---|
| output | 2 | 1 | 2 | 2 | 1 | 1 | 2 | 1 |

With both outputs free it alternates. With one output full it takes the other.
With both full it waits on the output it chose. This fair blocking is
deliberate: a slow consumer holds up its upstream partner, so congestion
spreads backwards instead of piling up in one place.

**Merger (`task_merger`).** It has two inputs and one output. It takes one
task per cycle from the code {in2_empty, in1_empty, last}:

| code | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |
|---|---|---|---|---|---|---|---|---|
| taken input | 2 | 1 | 2 | 2 | 1 | 1 | – | – |

The merger alternates when both inputs hold data. The parameter `PRIO_IN1`
turns this into strict priority for in_1; stage 2 of the scheduler uses it.

### Butterfly

`task_balancer` arranges N dispatchers and N mergers per stage in log2 N
stages. In stage s, row r's dispatcher feeds out_1 to the merger of its own
row and out_2 to the merger of row r xor 2^s. A task can therefore reach any
output, and the load crosses over at every stage. Latency is 2 cycles per unit,
4·log2 N in all (16 cycles at N = 16).

The paper is not consistent here. It gives each unit a fixed two-cycle
latency, but also bounds the whole balancer at 2·log N cycles ("eight cycles
for 16 pipelines"). The per-unit figure is followed.

Measured at N = 4 with one output accepting only 4 % of cycles:

- each input still moves about 0.76 tasks per cycle;
- the three healthy outputs each deliver 0.99 to 1.00 tasks per cycle.

The price of the fair blocking shows in the scheduler test. With one pipeline
slowed down, the other pipelines get 89–93 % of full rate, not 100 %.

## Task router

`task_router` uses the same butterfly wiring with a different switch. At stage
s, a task stays in its row if bit s of its destination (the low log2 N bits of
`chan`) equals bit s of the row number, and crosses otherwise. After log2 N
stages the row number is the destination.

Each stage has three parts:

1. a demultiplexer;
2. one 4-entry FIFO per demultiplexer output, so a task waiting to cross never
   blocks one that stays (and the reverse);
3. a balanced merger per row.

Latency is 3 cycles per stage, 3·log2 N in all. Under uniformly random
destinations this blocking butterfly is the main limit on throughput (see
"Measured behaviour").

## Asynchronous access engine

`async_access_engine` is the core of Row Access and Column Access. It lets up
to 128 reads be outstanding on one AXI read channel. It returns results in
request order, even though the memory returns them in any order across IDs.

- **Metadata queue.** The queue has 128 slots and is circular, with head and
  tail counters. A request takes the tail slot and stores its task there. The
  engine accepts a request only when a slot is free, so `r_ready` can be tied
  high.
- **Read numbering.** Reads get their own sequence number f, counted only
  over requests that actually read. The AXI ID is f mod 64. A table `slot_of`
  records which queue slot read f belongs to.
- **Matching responses.** AXI returns reads with the same ID in order. At most
  two reads per ID can be in flight, since 128 / 64 = 2. A counter of returns
  per ID therefore says whether a response answers the first or the second
  read on that ID. `{count parity, ID}` is the read's f mod 128, and
  `slot_of` gives its slot.
- **Reorder buffer.** The data goes into a reorder buffer at that slot. The
  head slot is released as soon as its data is present and the output is free.
- **No-fetch requests.** A request with `in_nofetch` set takes a slot but
  issues no read. Its slot is ready at once. Column Access uses this for walks
  that Sampling has already ended, so they keep their order and cost no memory
  bandwidth.

The AR output is registered. With memory ready and latency under about 100
cycles, the engine accepts a request every cycle. Above that, Little's law
applies: 128 outstanding reads at latency L give 128/L requests per cycle.

## Pipeline stages

**Row Access** (`row_access`). It reads word v of the row-pointer region and
fills in `chan`, `deg` and `cl_addr`.

**Sampling** (`sampling`). It has two stages and a 64-bit xorshift generator
per instance (seeded differently per pipeline):

- The index is `(r[31:0] × deg) >> 32`, a uniform pick without a divider. The
  task's `cl_addr` becomes the list address plus that index.
- The walk ends (`stop`) if `deg` = 0, or in PPR mode if `r[63:32] < alpha`.

**Column Access** (`column_access`). For a task that did not stop, it reads
the neighbour word. It then sets v to the neighbour, adds one to `step`, sets
`hop`, and sets `done` when `step` reaches the configured walk length. A
stopped task takes the no-fetch path and leaves with `done` set and `hop`
clear.

## Host side

**Query loader** (`query_loader`). Each host beat carries N start vertices
and a mask of valid lanes. Lane k of beat b becomes a step-0 task with query
id b·N + k. A beat is accepted only when:

- all lanes of the previous beat have been taken;
- the walks in flight plus the new ones stay within `MAX_INFLIGHT` (4096).

Finished walks return their credits through `done_cnt` from the writer.

**Query writer** (`query_writer`). It has one lane per pipeline:

- It packs eight 64-bit records into a 512-bit write beat on its own port.
- It sends a partial beat after 16 idle cycles (`wr_count` gives the number of
  valid records).
- It forwards unfinished tasks into a return FIFO of `MAX_INFLIGHT` entries.
- A task is taken only when both its record and its return entry fit.

**Why the loop cannot deadlock.** A closed loop of bounded FIFOs can fill
completely and lock. Here the loader never admits more walks than one return
FIFO can hold, so a hop that reaches the writer always has room to park.

**Control registers** (`ctrl_regs`). AXI4-Lite, 32-bit:

| offset | register | reset |
|---|---|---|
| 0x00 | mode, bit 0: 1 = PPR | 0 (uniform walk) |
| 0x04 | alpha, a 32-bit fraction | 0x26666666 (0.15) |
| 0x08 | walk length | 80 |
| 0x0C | completed walks, read-only | 0 |

## Top level

`ridgewalker_top` has these parameters:

| parameter | default | meaning |
|---|---|---|
| N | 16 | pipelines |
| LINK_DEPTH | 32 | link FIFO entries |
| MAX_INFLIGHT | 4096 | walks in flight |
| WRITE_GRAN | 8 | records per write beat |

Its ports:

- the host query stream (`q_*`);
- N row-pointer and N column-list read channels (`ra_*`, `ca_*`). These are
  single-beat 64-bit AXI reads with 40-bit byte addresses and 6-bit IDs.
- N write ports for path records (`wr_*`);
- the AXI4-Lite control slave (`s_*`);
- `inflight`.

Three things are outside the RTL: the memory channels themselves, the host
link and the DMA engines behind the write ports. The low 3 and top 5 address
bits are constant, because of word alignment and 32-bit word addresses at base
0.

## Measured behaviour

The end-to-end testbenches use a memory model with the following behaviour:

- random latency of 20–80 cycles;
- a 90 % ready rate;
- one response per cycle;
- out-of-order return across IDs.

Throughput is counted over every cycle in which at least half of the
in-flight limit is used, which is the steady state. On uniformly random
graphs:

| N | in-flight limit | steady-state hops per cycle per pipeline | limit set by |
|---|---|---|---|
| 16 | 4096 (defaults) | 0.75 | the model's memory ceiling of 0.9 |
| 4 | 512 | 0.60 | Little's law: 256–512 walks over a round trip of about 170 cycles |

At N = 16 the design keeps the memory channels 83 % busy relative to what
the model can serve.

The rate over a whole run is lower. The longest walks (80 hops of a round
trip each) drain alone at the end. Over one whole run at N = 16 the rate was
0.46 hops per cycle per pipeline. The router's split FIFOs raised that figure
from 0.40.

The remaining loss at N = 16 is mostly head-of-line blocking in the router
under random destinations.

A skewed RMAT graph was also run at the defaults: scale 12, edge factor 16,
Graph500 initiator. It has a maximum degree of 2339, and 27 % of its vertices
have no neighbours. Results:

- Steady state was 0.55 hops per cycle per pipeline.
- The hub vertices' channels receive far more column reads than the rest, so
  the rate is lower than on the uniform graph.
- The scheduler still spread the hops evenly: per-pipeline task counts
  differed by under 2 %.

## Where this follows the paper, and where it does not

Follows the paper:

- the stateless task format;
- the six-stage flow;
- the dispatcher and merger decision tables;
- the butterfly balancer and its 2-cycle units;
- strict priority for returning hops in the scheduler merger;
- the butterfly router;
- 128 outstanding reads with 64 IDs and a 128-entry metadata queue;
- 32-entry link FIFOs;
- 16 pipelines on 32 channels;
- walk length 80;
- AXI4-Lite configuration with a PPR mode bit and alpha.

The paper leaves these open, and this design chooses them:

- field widths;
- the row-pointer and list layouts;
- the ID assignment and response matching in the access engine;
- the no-fetch path;
- the xorshift generator, standing in for the paper's dedicated RNG;
- the multiply-shift sampling;
- the router's switch structure and split FIFOs;
- credits and return FIFO sizing;
- record format, write packing and flush timer;
- the register map.

Where the paper conflicts with itself:

- The metadata queue is given as both 128 entries and "up to 512"; 128 is
  used.
- The scheduler FIFO is given as both 65 entries and 1 + 4·log2 N; 65 is used.
- Balancer latency: two cycles per unit against 2·log N in total; two
  cycles per unit is used.
- The row pointers are drawn as shared memory but described as partitioned;
  shared is used.
- The scheduler merger is described both as preferring returning hops and, in
  its algorithm, as alternating. Returning hops get priority.

Not built:

- the alias, rejection and reservoir samplers behind DeepWalk, Node2Vec and
  MetaPath;
- weighted graphs;
- the wider row-pointer entry those samplers need;
- the host/PCIe side;
- the memory channels.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. Examples:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rw_pkg.sv tb/tb_task_balancer.sv --top-module tb_task_balancer
./obj_dir/Vtb_task_balancer
```

The end-to-end tests share `tb/rw_e2e.svh`:

- `tb_ridgewalker_top` runs at N = 4, walk length 20;
- `tb_ridgewalker_full` runs at the defaults (N = 16, 4096 in flight, walk
  length 80) in under a minute.
- `tb_ridgewalker_rmat` runs at the defaults on the RMAT graph described
  above.

Each end-to-end test:

- builds a random graph;
- loads it into `hbm_model` memories (a behavioural AXI read channel);
- runs a uniform phase with write back-pressure, then a PPR phase, then a
  throughput phase;
- checks that every walk is a chain of real neighbours with exactly one
  ending, and that each walk ended for a legal reason;
- counts that dead ends, length limits, PPR stops, router crossings, hop
  reassignment across pipelines, priority conflicts, back-pressure, flushes,
  credit stalls and out-of-order memory returns all happened.
