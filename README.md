# EDM in the Ethernet PHY: RTL of a memory fabric inside the PCS

Remote memory traffic is made of tiny messages: an 8-byte read request, a
64-byte read reply, a one-bit compare-and-swap result. Ordinary Ethernet
carries each one in a frame of at least 64 bytes, with a 12-byte gap between
frames, and behind whatever large frame is already on the wire. EDM avoids
this by moving the memory protocol down into the Physical Coding Sublayer
(PCS). There, everything is a stream of 66-bit blocks: a 2-bit sync header
plus a 64-bit payload. Memory messages become short runs of new block types.
These runs can be sent in any idle block slot, and even between two blocks of
a non-memory frame that is being sent. The switch does not queue memory
traffic. It runs a central scheduler that grants each sender a time slot, so
no two senders ever target the same destination at once.

This repository holds synthesizable SystemVerilog for the two EDM stacks
(host and switch) and for the switch's scheduler. A top module wires them up
as a three-device testbed: a compute node, a two-port switch and a memory
node. Each module has a self-checking testbench.

## Blocks on the wire

All types are in `rtl/edm_pkg.sv`.

| Block | Sync | Type byte | Use |
|---|---|---|---|
| /S/ /D/ /T/ /E/ | 01 / 10 | IEEE values (0x78, data, 0x87..0xFF, 0x1E) | ordinary Ethernet |
| /MS/ | 01 | 0x11 | start of a memory message, carries the header |
| /MD/ | 11 | – | 64 bits of memory data or an address |
| /MT/ | 01 | 0x22 | end of a memory message |
| /MST/ | 01 | 0x44 | a whole message in one block (compare-and-swap result) |
| /N/ | 01 | 0x5A | notification: "I want to send a write of `len` bytes to `peer`" |
| /G/ | 01 | 0xA5 | grant: "send the next `len`-byte chunk of message `id` now" |

The EDM type byte values, and the choice of sync header `11` for /MD/, are
choices of this design. Any values that Ethernet leaves unused would do.

Every EDM control block carries a 56-bit header (`mhdr_t`):

| Field | Bits | Contents |
|---|---|---|
| `mtype` | 2 | RREQ, WREQ, RMWREQ or RRES |
| `peer` | 9 | a port number (512 ports) |
| `id` | 8 | message id, counted per destination |
| `len` | 16 | message or chunk size in bytes |
| `op` | 4 | opcode (compare-and-swap) |
| `aux` | 17 | spare bits; bit 0 is the CAS success flag in /MST/ |

The messages:

- **RREQ**: `/MS/ /MD(address)/ /MT/`. Its `len` is the number of bytes to read.
- **RMWREQ** (compare-and-swap): `/MS/ /MD(address)/ /MD(compare)/ /MD(swap)/ /MT/`.
- **WREQ**: one `/N/`. Then, for each grant, a chunk of `/MS/ /MD(remote address of this chunk)/ /MD(data)/… /MT/`.
- **RRES**: for each grant, a chunk of `/MS/ /MD(data)/… /MT/`. A compare-and-swap is answered by one `/MST/`.

The `peer` field means different things on different hops:

- From a host towards the switch, `peer` is the destination.
- On a forwarded request or a chunk, `peer` is the sender. The receiving host uses it to find the message.

## The scheduler (`edm_scheduler`)

The scheduler sees every message before it uses the fabric:

- **Writes** are announced by /N/.
- **Reads** announce themselves. The RREQ states exactly how many bytes its reply will carry. The switch holds the RREQ back and treats it as the notification for that reply.

**Queues.** For every destination port there is a queue of at most X·N
entries: X active messages for each of the N source ports. Hosts enforce X.
A host does not send a new request to a destination that already has X
messages outstanding (`x_stall`). In hardware, each queue is N small in-order
lists of X slots, one list per source. This has two effects:

- All ports can insert in the same cycle.
- Messages between one pair of nodes can never overtake each other.

Each entry holds:

- the message type, id, address and arguments;
- the remaining byte count;
- the arrival time;
- a `first` bit for reads whose request has not yet been forwarded.

**Matching.** One iteration of priority-based Parallel Iterative Matching
takes three cycles (a free-running phase counter):

1. **REQ.** Every free destination looks at the heads of its lists whose source is free, and requests the source with the best priority.
2. **GRANT.** Every source that received requests accepts the one with the best priority.
3. **COMMIT.** For each accepted pair, the scheduler does the following:
   - It issues a grant for `min(CHUNK, remaining)` bytes and subtracts that from the remaining count. A message whose count reaches zero leaves its list.
   - It marks both ports busy for the number of blocks the chunk occupies on the link: header, address for a write, data words, tail.
   - When the busy time has passed, both ports can be matched again. Back-to-back chunks therefore fill the link.

**Priority.** The priority is either the remaining byte count (SRPT, the
default) or the arrival time (FCFS), set by `POLICY`. Ties go to the lower
port number. Priority only decides between different pairs. Within a pair,
the oldest message is always at the head of its list.

**Grants for reads.** A read's first grant is special. It tells the switch to
forward the buffered RREQ (or RMWREQ) to the memory node. The memory node
takes the arriving request itself as its grant for the first chunk of the
reply. Every later chunk of a long read is granted by a /G/. A 1 KB read is
therefore:

- the forwarded request, which carries the first 256 bytes of grant;
- then three /G/ blocks, for the remaining three chunks.

A compare-and-swap reply takes one block.

**How this differs from the published description.** That design keeps each
queue as a sorted list and picks with a priority encoder. Here, the same
one-cycle decisions come from comparing all candidates with each other. The
cost is O(N²) comparators per stage, which is cheap at the testbed's two ports
and workable at a few dozen. A port whose link has been found corrupt is
excluded with `port_disable`.

## Host stack (`edm_host_stack`)

The host stack is one module for both roles. `my_port` tells it which port it
is on.

**TX path.** The application places requests (`app_req_t`) in a 16-entry
message queue. The head request is sent at once:

- The message id is allocated.
- A state-table entry is written.
- The first block is built straight from the queue head.

The request reaches the link two cycles after it was accepted.

Grants take priority over new messages. A grant comes in through the grant
queue, a dual-clock FIFO with a 4-cycle crossing. The engine then:

1. reads the message state table (1 cycle);
2. reads the data buffer (1 cycle);
3. streams the chunk.

On a memory node, the grant for an RRES chunk waits until the memory
controller has returned the data for it.

**Message state table** (`edm_msg_state_table`). It is indexed by
`{role, peer, id}`. The role bit keeps a memory node's RRES entries apart from
the node's own requests. An entry holds:

- for a request or write it sent: the local address or data-buffer pointer;
- for an RRES it is serving: the buffer pointer, the byte offset reached, and whether the data has arrived.

**RX path.**

- /G/ blocks go to the grant queue: 1 cycle to parse, 1 to enqueue.
- At a memory node, an RREQ becomes word reads of memory. The data lands in the data buffer, and a grant-queue entry for the first reply chunk is queued.
- At a memory node, a WREQ chunk is written to memory at the address that follows its header.
- At a memory node, an RMWREQ goes to `edm_rmw_unit`. That unit reads, compares and conditionally writes, and lets no other memory request in between.
- At a compute node, RRES data is written to local memory through `lm_*`, at the address kept in the state table. The first word is written 3 cycles after the /MS/ arrives.
- Completions appear on `done_*`.

## Intra-frame preemption (`edm_tx_mux`, `edm_rx_demux`)

**TX side.** Non-memory blocks from the encoder wait in a 4-block buffer.
Idle blocks from the encoder are dropped, so any gap can carry memory blocks.
When both kinds of block are waiting, the mux alternates between them. This
is fair sharing; setting `STRICT_MEM` gives memory blocks strict priority
instead. `preempt` pulses for each memory block sent inside a frame.

**RX side.**

- EDM blocks are sorted out after one cycle.
- Non-memory blocks go into a frame buffer of 192 blocks, enough for one full-size frame.
- A frame is released to the decoder only once its /T/ has arrived, and then in consecutive cycles. The MAC therefore sees an ordinary frame.
- An idle follows every released frame.

## Switch stack (`edm_switch`)

Each port of the switch does the following:

1. It classifies incoming blocks (1 cycle).
2. It turns /N/ and captured RREQ/RMWREQ messages into scheduler notifications. Each request's address and arguments are kept in the notification until it is forwarded.
3. It forwards each chunk along the path set up by that source's last grant. A per-port FIFO of destinations, pushed at each grant, does this. A 1-stage clock-crossing FIFO per port carries the blocks, so forwarding takes 1 + 4 cycles.

On the egress side, the switch also emits /G/ blocks and forwarded requests.
Each egress port locks onto one ingress stream until that stream's /MT/
passes, so messages are never interleaved. Non-memory frames go through the
same preemption mux and frame buffer. The layer-2 switching of those frames is
not part of this design: they leave on `dec_blk` and enter on `enc_blk`.

## Latency, in 2.56 ns cycles (25 GbE PCS clock)

The cycles below were measured in the testbenches. They are compared with the
per-step budget the EDM design gives.

| Step | Published budget | This RTL |
|---|---|---|
| compute TX: queue → first RREQ or /N/ block | 2 | 2 |
| switch RX classify | 1 | 1 |
| switch: request or /N/ in → forwarded request or /G/ out | 1 + 5 | 6, plus 0–2 to align with the 3-cycle round |
| host: /G/ in → first chunk block out | 2 + 7 | 9 |
| switch forwarding of a chunk | 1 + 4 | 5 |
| compute RX: RRES /MS/ → first data word written | 3 | 3 |

The only step that varies is the wait for the next scheduling round.
Elsewhere the RTL matches the budget cycle for cycle.

## Top level (`edm_testbed_top`)

The top contains:

- a compute-node host stack on switch port 0;
- a memory-node host stack on switch port 1;
- the two-port switch.

The physical links below the PCS are not part of this design (gearbox,
PMA/PMD, SerDes). Every link end is therefore a port: `host_tx_blk`,
`sw_rx_blk`, `sw_tx_blk` and `host_rx_blk`. A testbench, or a real PHY,
connects them. The application interface, the memory-controller interface
(`mc_*`, a valid/ready request channel with in-order read data) and the
non-memory traffic of all four link ends are also ports. Every parameter
defaults to the published configuration (X = 3, chunk = 256 B, SRPT), with two
ports as in the FPGA testbed.

## Verification

Every module has a testbench `tb/tb_<module>.sv`. Each one checks the module
against a model written independently of it, and reports
`TB_RESULT checks=N failures=M`. A watchdog ends a testbench that hangs.
`tb/edm_mem_model.sv` is a behavioural stand-in for the DDR memory controller:
always ready, with an 8-cycle read latency.

`tb_edm_testbed_top` runs the whole testbed at its default parameters:

- a 64 B read and a 64 B write, checking every latency above;
- a 1 KB read (four chunks);
- a compare-and-swap that succeeds, and one that fails;
- a burst of reads and writes, more than X per destination, sent while a 120-block Ethernet frame goes through the compute node's link.

It counts each mechanism and fails if one never occurs: preemption, X-limit
stalls, /G/ grants, forwarded requests and /MST/ replies. It also checks that
the frame reaches the switch whole and in consecutive cycles.

`tb_edm_scheduler` uses four ports, with one instance for SRPT and one for
FCFS. It checks:

- that each policy orders messages as it should;
- that read grants are split correctly into chunks;
- under random traffic: that the grants form a matching, that no port is granted while busy, that chunk sizes are right, that each pair's messages stay in order, and that every message is granted in full.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_edm_testbed_top \
  rtl/edm_pkg.sv $(ls rtl/*.sv | grep -v edm_pkg) tb/edm_mem_model.sv tb/tb_edm_testbed_top.sv
./obj_dir/Vtb_edm_testbed_top
```

## Departures and limits

- **One clock.** One clock drives all three devices and both directions. The clock-crossing FIFOs are real dual-clock FIFOs and were tested with unrelated clocks, but the top has only one clock input.
- **Scheduler round alignment.** A notification waits up to two extra cycles for the next round.
- **Read timeout not built.** The published design suggests a per-read timer that answers with a zero-length response when it expires; it is not implemented.
- **Corruption detection not built.** Detecting corruption in the descrambler is not implemented. Only its result, disabling a port in the scheduler, is present.
- **Size.** The scheduler is parameterised in N. It has been simulated at N = 4 and synthesized in the two-port top. It has not been elaborated at the 144 ports of the rack-scale study or the 512 ports of the ASIC estimate.
- **Our own choices.** The message formats, header layout, block type values, table organisation and memory-controller interface above were all chosen for this design.
