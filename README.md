# GraVF-M in SystemVerilog: vertex-centric graph processing across several FPGAs

When a graph is split across FPGAs, most of its edges cross partition boundaries.
A naive vertex-centric engine pays for this: it sends one message per edge over
the slow off-chip links. This design uses the fact that in a gather-apply-scatter
program the scatter step is a pure function of the *update* a vertex issues and the
edge it travels along. So it moves the scatter step to the receiving side:

* each active vertex issues **one update** per superstep;
* the update is **broadcast** to every processing element (PE) in the system,
  or to every FPGA that holds at least one neighbour;
* each receiving PE runs the scatter kernel over the edges of that vertex that
  end on the receiving PE, producing the messages locally.

Off-chip traffic therefore shrinks from one word per edge to at most one word per
vertex per FPGA. That is a reduction by roughly the graph's average degree. The
cost is an unusual edge layout. Every PE stores an index entry for **every
vertex of the system**, pointing to the (often empty) part of that vertex's edge
list that lands on the PE.

The RTL implements one FPGA of such a system (`gravfm_fpga`). It is instantiated
once per FPGA, and the copies are linked by point-to-point 128-bit streams. It is
specialised for weakly connected components (WCC): the three user kernels are
the WCC kernels (`wcc_*_kernel.sv`). The
surrounding framework does not depend on the algorithm beyond the struct
layouts in `gravfm_pkg.sv`.

## 1. Programming model in hardware terms

A run is a sequence of bulk-synchronous supersteps:

| step    | where             | what happens |
|---------|-------------------|--------------|
| scatter | receiving PE      | for an incoming update of vertex *u*, walk *u*'s local edge list; the scatter kernel turns (update, edge) into a message for the edge's destination |
| gather  | receiving PE      | fold each message into the destination vertex's state (WCC: keep the smaller label, mark the vertex active) |
| apply   | owning PE, once per superstep | visit every vertex; an active vertex issues an update (WCC: its label) and is made inactive |

Because apply runs once per vertex per superstep, a PE never has more than
`V_PER_PE` updates in flight. The update queue is therefore sized
`V_PER_PE + 1`, one entry per vertex plus the barrier. Messages, which scale
with the number of edges, are never stored. They are produced and consumed
inside a single PE.

WCC state is `{label[31:0], active}`. The update and message payload is
`{label[31:0]}`. The host initialises every vertex to `{label = own id, active = 1}`.
When the run terminates, every vertex holds the smallest id in its component.

## 2. Vertex numbering and memory layout

Vertex ids are dense and encode the owner:

    vid = ((fpga * N_PE + pe) * V_PER_PE) + slot      // = {global PE number, slot}

The host assigns ids after partitioning. Any partitioning can be expressed by
relabelling, because a PE may leave slots unused. Unused slots are loaded
inactive and never issue anything.

Each PE has three memories, all simple dual-port RAMs with a registered read
that holds its output while not read (`gravfm_ram`):

| memory | depth | entry |
|---|---|---|
| vertex storage | `V_PER_PE` | `vstate_t` of the PE's own vertices |
| index storage | `N_FPGA*N_PE*V_PER_PE` (every vertex of the system) | `{len, start}` of the part of that vertex's edge list whose destinations live on this PE |
| edgelist storage | `E_PER_PE` | destination **slot** on this PE (the PE is implied) |

Each FPGA also has a filter bitmap, with one row of `N_FPGA` bits for each of its own
vertices. Bit *f* is set when FPGA *f* holds a neighbour of that vertex.

The host port (`host_req_t` in `gravfm_pkg.sv`) writes all four memories while
the FPGA is idle (before `start`, or after `done`). It also reads vertex states back:
`host_rvalid`/`host_rdata` follow a read by one cycle. Index words are
`wdata = {len[31:0], start[31:0]}`. `bcast = 1` writes the same word into
every PE, which lets the host clear the large index storage quickly.

## 3. The PE pipeline (`gravfm_pe`)

    endpoint -> [scatter: index | iterator | edgelist | kernel] -> [gather: read/hazard | kernel | write]
                                                                        |  vertex storage  |
                                          network <- update queue <- [apply: read | kernel | write]

**Scatter** (`gravfm_scatter`). An update first looks up its sender's index
entry. It then enters the edge iterator, which issues one edgelist read per cycle.
The returned slot is joined with the PE number to form the neighbour's vertex id
and passed with the update through the scatter kernel's register. The iterator
needs one idle cycle between edge lists. An update with *n* local edges thus costs
*n* + 1 cycles, and an update with no local edges costs one cycle. A barrier passes
through as a single item behind the updates.

**Gather** (`gravfm_gather` + `gravfm_hazard`). The read stage reads the
destination state. One cycle later the gather kernel combines it with the message,
and the result is written back in the same cycle. If a message for the same vertex
follows immediately, its read would see the old state. The hazard unit holds the
addresses that have been read but not yet written back, and stalls the read stage
on a match. With the combinational WCC kernel this costs exactly one cycle.

The gather module's `in_ready` is the kernels' `message_ack`. It is asserted
whenever gather could take a message, whether or not one is offered, because the
scatter kernel only loads its register while acknowledged.

**Superstep switch.** When a barrier reaches gather, gather stops accepting
messages. It waits until the hazard unit is empty (the pipeline has drained),
then hands the vertex storage to apply. Messages of the next superstep may
already wait in the scatter pipeline. They stay there.

**Apply** (`gravfm_apply`). Apply visits slot 0 … `V_PER_PE-1` and then a
barrier item, one per cycle. Each vertex is read, passed through the apply
kernel and written back with `active = 0`. Updates and then the barrier are
pushed into the update queue. Apply stalls only when the queue is full. When the
barrier item leaves apply, the storage goes back to gather and the superstep
counter (`level`) advances.

A `start` pulse starts the first apply pass, which broadcasts every initially
active vertex.

## 4. Floating barrier, virtual channels and termination

No global barrier exists. Each PE's receive endpoint (`gravfm_rx_endpoint`)
decides on its own when a superstep is complete:

1. Every PE ends its superstep's update stream with a barrier. The network
   stamps that barrier with the number of updates the PE sent towards the
   receiver, and with an *active* bit (the PE sent at least one update).
2. The endpoint delivers updates of the current round to its PE and absorbs
   barriers. It counts the updates and sums the counts the barriers announce.
3. After `N_FPGA*N_PE` barriers, and once the received count equals the announced
   count, the round is complete. If any barrier was active, the endpoint hands a
   barrier to its PE and switches to the next round. Otherwise it raises
   `terminate` and passes nothing on.

Because of the count comparison, a barrier may overtake its updates: the
endpoint then waits (`ev_count_wait`). The on-chip network and the streams
built here deliver in order, so this case never arises in the system. It is
exercised in the endpoint's own testbench.

PEs may therefore be one superstep apart. Words of the next superstep must not
block the words of the current one, or the system can deadlock. Each endpoint
keeps **two channels**, one FIFO per superstep parity (`round`), of `RX_DEPTH`
words each, and reports free space per channel. Two channels suffice: a PE cannot
start superstep *s+1*'s apply before its endpoint has seen every barrier of
superstep *s*, so no word of superstep *s+2* can exist while *s* is still open.
`done` is the AND of all local `terminate` flags.

## 5. On-chip network (`gravfm_crossbar`)

The crossbar is a broadcast bus carrying one 99-bit word per cycle (`net_word_t`:
barrier, round, active, count, sender, payload). Its sources are the `N_PE`
update queues and the inbound streams from the other FPGAs. A source is eligible
only if all of the following hold:

* every local endpoint has room in the channel of the source's head word;
* for a local source, the outgoing endpoint currently accepts that round.

A round-robin arbiter grants one eligible source per cycle. The word is written
to all local endpoints at once. A word from a local PE also goes to the outgoing
endpoint. Words from remote FPGAs do not go out again.

Every local endpoint receives every local update, so the crossbar keeps one counter
per local PE. It stamps the PE's barrier with that count and with `active = (count != 0)`.
Remote barriers arrive already stamped by the sending FPGA.

Consequence: a single full receive channel stalls that channel for the whole
FPGA (`ev_blocked`). This is the price of a broadcast network. The other channel
keeps moving.

## 6. Off-chip endpoint and filter (`gravfm_tx_endpoint`, `gravfm_filter`)

The off-chip links carry no separate channels. Instead the outgoing endpoint
**sequentialises** them: it accepts words of one round only. It switches to the
other round after all `N_PE` local barriers of the current round have passed
(`ev_seq_block` counts cycles in which a word waited for this). Per update it
looks up the sender's filter row, which takes one cycle. It then writes the word
to exactly the remote FPGAs in that row (`ev_filtered`), in one cycle, once all
of those streams are ready.

The endpoint counts the updates it sent per (local PE, remote FPGA) pair. A PE's
barrier goes to every remote FPGA, carrying the count for that FPGA. Words are
padded to the 128-bit stream width.

Stream ports are arrays indexed by FPGA number, forming a full mesh. The entry
for the own FPGA is unused.

## 7. Parameters and capacity

| parameter | default | from |
|---|---|---|
| `N_FPGA` | 4 | the evaluated 4-FPGA system |
| `N_PE` | 9 | PEs per FPGA in the evaluation |
| `V_PER_PE` | 512 | this design's choice |
| `E_PER_PE` | 32768 | this design's choice |
| `HZ_DEPTH` | 4 | this design's choice |
| `RX_DEPTH` | 16 | this design's choice |

`V_PER_PE` must be a power of two, which the dense id encoding needs. The
defaults give 18,432 vertex slots and 1.18 M edge slots per system. That holds
the evaluation's 16,385-vertex synthetic graphs (about 1 M edges at degree 64)
if the edges are balanced across PEs. Memory per FPGA is dominated by the index
storage (9 × 18,432 × 31 bits) and the edgelists (9 × 32,768 × 9 bits).

Rates and latencies of the built pipeline:

* scatter: one edge per cycle, plus one cycle per edge list;
* gather: one message per cycle, plus one stall cycle for back-to-back messages
  to the same vertex;
* apply: `V_PER_PE + 1` cycles per pass when the queue does not back up;
* network: one word per cycle per FPGA.

The evaluated system measured about 676 cycles of synchronisation latency per
superstep, with HMC edge storage and PCIe links. This RTL is not calibrated
against that figure. Here every superstep costs at least one full apply pass
(513 cycles at the defaults), plus pipeline, arbitration and link latency.

## 8. Where this RTL departs from the published design

* **Edge storage** is on-chip RAM. The published system also supports edge lists in
  Hybrid Memory Cube, behind a vendor controller. That option is not built.
* **Off-chip links** are plain valid/ready FIFO streams. The vendor PCIe and stream
  framework, and its clock crossing, are outside this RTL. The design uses one clock.
* **Channels at the receiver.** Each endpoint buffers both channels and advertises
  space per channel. The published description has the receiver advertise the
  single channel it currently accepts. Both keep a later superstep from blocking
  an earlier one.
* **Filter bitmap** stores only the rows of the FPGA's own vertices, the only rows
  it ever looks up. The published description gives |V| × n_FPGA.
* **Kernels**: only WCC. BFS and PageRank were also evaluated; their kernels are
  not given in enough detail and are not included.
* Host loading, the bit layouts of words and memories, buffer depths, the
  arbitration policy and the one-word-per-cycle bus are choices of this
  design.

## 9. Files

| file | block |
|---|---|
| `gravfm_pkg.sv` | widths, `vstate_t`, `update_t`, `message_t`, `net_word_t`, host request |
| `wcc_gather_kernel.sv`, `wcc_apply_kernel.sv`, `wcc_scatter_kernel.sv` | user kernels |
| `gravfm_ram.sv`, `gravfm_fifo.sv`, `gravfm_rr_arbiter.sv` | primitives |
| `gravfm_edge_storage.sv`, `gravfm_scatter.sv` | scatter side |
| `gravfm_hazard.sv`, `gravfm_gather.sv`, `gravfm_vertex_storage.sv` | gather side |
| `gravfm_apply.sv`, `gravfm_update_queue.sv` | apply side |
| `gravfm_pe.sv` | one PE |
| `gravfm_rx_endpoint.sv`, `gravfm_crossbar.sv` | on-chip network, floating barrier |
| `gravfm_filter.sv`, `gravfm_tx_endpoint.sv` | off-chip endpoint |
| `gravfm_fpga.sv` | one FPGA (top) |

## 10. Verification and simulation

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The system testbenches share
`tb/tb_gravfm_sys_body.svh`. It builds a mesh of FPGAs joined by
`tb/gravfm_stream_model.sv` (a FIFO with latency and random stalls) and generates
a graph with planted components, isolated vertices and a hub. It loads the graph
through the host ports, runs to `done` and checks three things against an
independent bulk-synchronous WCC model:

* every final label;
* the exact number of gathered messages;
* the number of barriers.

The system testbenches also count how often each mechanism occurs, and count a
failure if one never does. The mechanisms are:

* hazard stall;
* update with an empty edge list;
* blocked crossbar;
* channel sequentialisation;
* filtered update;
* next-round word arriving early;
* off-chip transfer;
* stream backpressure.

* `tb_gravfm_fpga`: 2 FPGAs × 2 PEs × 16 vertices.
* `tb_gravfm_full`: 4 FPGAs at the default parameters (18,432 vertices,
  63,000 directed edges, 11 supersteps, about 89 k cycles; a few seconds of
  simulation).

To run one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/gravfm_pkg.sv tb/tb_gravfm_full.sv --top-module tb_gravfm_full
    ./obj_dir/Vtb_gravfm_full

Memories are not reset. The testbenches load everything they read, except the
`rd_data` registers of the RAMs, which are never consumed before a read.
