# MF-Butterfly: a three-stage meta-flattened butterfly network-on-chip

A butterfly network links N processors to N destinations through log2(N) stages
of 2x2 switches. It is cheap, and it routes itself: each stage reads one bit of
the destination address. It also has exactly one path between any source and
any destination. When two messages need the same link, one of them waits, and
nothing can route around the conflict.

The meta-flattened (MF) butterfly keeps the first and the last stage of the
butterfly. It merges all the stages in between into a single stage of larger
routers. In that middle stage each router is linked to its neighbours, so a
message can move sideways until it reaches a router that feeds its
destination. There are fewer stages to cross, so there are fewer places where
messages can collide. Inside the middle stage a message can also take a second
path when its first choice is busy.

This RTL is a synthesizable SystemVerilog model of that network. It has
wormhole switching, input queues and adaptive routing in the middle stage. By
default it has 32 terminals, the size the network was evaluated at.

## Topology

N terminals (a power of two, N >= 8). Each stage has R = N/2 routers:

| stage  | routers | size | job |
|--------|---------|------|-----|
| first  | R | 2x2 | picks the half of the network that holds the destination (top address bit) |
| middle | R | 4x4 | moves the message along its half's chain to the right pair of routers, then leaves toward the right last-stage router |
| last   | R | 2x2 | delivers to one of its two terminals (address bit 0) |

Wiring, with G = N/4 middle routers per half:

* Terminal `2j+b` enters first-stage router `j` on port `b`. Destination `2L+b`
  leaves last-stage router `L` on port `b`.
* First-stage router `j`, output `h`, goes to middle router `(j mod G) + h*G`.
  These are the long crossings of a butterfly's first stage.
* Middle router `m`, output `b`, goes to last-stage router `(m & ~1) + b`. These
  are the short crossings of a butterfly's last stage. So middle routers `2p`
  and `2p+1` (pair `p`) both feed last-stage routers `2p` and `2p+1`.
* Within a half the middle routers form a chain. Port 3 of router `m` is linked
  to port 2 of router `m+1`, in both directions. At the two ends of a chain one
  side port is left unconnected: its input is never valid and its output is
  never ready. This keeps every middle router the same 4x4 design.

For N = 16 (the drawn example) the middle stage is routers 0..7, with side links
0-1, 1-2, 2-3 and 4-5, 5-6, 6-7:

```
 in 0,1  -[F0]-\                     /-[M0]=-\   /-[L0]- out 0,1
 in 2,3  -[F1]--\  long crossings   |  [M1]  |  |  [L1]- out 2,3
 in 4,5  -[F2]---> (span G routers) |  [M2]  |  |  [L2]- out 4,5
 in 6,7  -[F3]--/                   |  [M3]  | short   [L3]- out 6,7
 in 8,9  -[F4]-\                    |  [M4]  | crossings ...
   ...                               \-[M7]=-/   \-[L7]- out 14,15
                      M0-M1-M2-M3 and M4-M5-M6-M7: side-link chains
```

A message crosses exactly three routers plus any side links. A conventional
16-terminal butterfly has four stages.

## Routing

A head flit carries its destination `d`. Let `L = d >> 1` be its last-stage
router.

* **First stage:** output `d[n-1]`, the top address bit.
* **Middle stage**, at router `m` with local index `k = m mod G`:
  * The target pair is `p = (L mod G) >> 1`.
  * If `k`'s own pair is `p`, the *primary* output is `d[1]`, which leads to
    last-stage router `L`. The *alternative* is the side link to the partner
    router (`k^1`), which feeds the same two last-stage routers. The
    alternative is not offered when the message has just arrived from that
    partner.
  * Otherwise the only choice is one side link toward pair `p`: down the chain
    if `p` is larger, up if it is smaller.
* **Last stage:** output `d[0]`.

The allocator takes the primary output when it is free and its downstream queue
has room. Otherwise it takes the alternative on the same terms. Otherwise the
message waits. This is the adaptive part of the routing.

**Deadlock.** Wormhole routing lets one worm hold links in several routers at
once, so the routing rule must be free of cyclic waits. A message in the middle
stage moves only in one direction along its chain:

* It moves down toward a higher pair, or up toward a lower one.
* A sideways step inside the target pair is allowed only in the direction the
  message was already moving, or as the first side step of a message that came
  from the first stage.
* After that step the partner router must send the message out of the stage.

So the side links that go down and the ones that go up never wait on each
other. The exit links drain into the last stage and the terminals. The channel
dependency graph has no cycle.

**Latency.** Each router takes two cycles per flit when the network is empty:
one to write the flit into the input queue, and one to allocate the output. A
two-flit message that takes `s` side links has its head delivered
`2*(3+s) = 6+2s` clock edges after the edge that injected it. Its tail arrives
one edge later. `s` is at most `G-1`.

## The router (`mf_router`)

Each router is NP x NP; NP is 2 in the outer stages and 4 in the middle stage.

* **Input queue** (`flit_fifo`): a DEPTH-flit FIFO at each input, 4 flits by
  default. Its `in_ready` depends only on the fill level. So the ready signal
  between two routers is a register output, and no combinational path runs
  through the network.
* **Routing unit** (`mf_route`): one per input. It gives a primary and an
  alternative one-hot output mask for the flit at the front of the queue.
* **Allocator**: visits the inputs in round-robin order, starting after the
  input it granted last. An input that holds no output and has a head flit at
  its front gets the first output allowed by the rule above. A granted input
  *holds* its output. The output stays reserved until the tail flit has passed
  through it; no other message's flits can enter it in the meantime. This is
  wormhole switching.
* **Crossbar**: every held output carries the front flit of the input that
  holds it. A flit moves whenever the downstream queue has room.
* **Statistics**: `stat_alt` (an input was granted its alternative this cycle)
  and `stat_block` (a head flit waited). The network does not use them; the
  testbenches count them.

An assertion checks that a flit reaching the front of an idle input is a head
flit.

## Messages and flits

A flit (`mf_pkg::flit_t`) is `{head, tail, data[31:0]}`. The head flit carries
the destination in `data[7:0]` and the source in `data[15:8]`. The upper 16
bits and all later flits carry payload. Worms of any length are switched. A
message of length 1 is a single flit with both `head` and `tail` set. The
synthetic workloads use two-flit messages.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `mf_butterfly` | `N` | 32 | terminals (power of two, 8..256) |
| `mf_butterfly`, `mf_router`, `flit_fifo` | `DEPTH` | 4 | flits per input queue |
| `mf_router`, `mf_route` | `STAGE`, `J`, `NP` | - | stage, router index, port count (set by the network) |

## Files

| file | contents |
|---|---|
| `rtl/mf_pkg.sv` | flit type, stage enum, side-port numbers, head-flit helpers |
| `rtl/flit_fifo.sv` | input queue |
| `rtl/mf_route.sv` | routing rule of all three stages |
| `rtl/mf_router.sv` | wormhole router: queues, routing units, adaptive round-robin allocator, crossbar |
| `rtl/mf_butterfly.sv` | the network (top level) |
| `tb/tb_flit_fifo.sv` | queue against a reference model, full/empty, random traffic |
| `tb/tb_mf_route.sv` | every routing unit of a 32-terminal network, walked against the wiring |
| `tb/tb_mf_router.sv` | one middle router: latency, adaptive alternative, no bounce-back, random wormhole traffic |
| `tb/tb_mf_butterfly.sv` | 16-terminal network end to end: latencies, all-to-all traffic, every mechanism exercised |
| `tb/tb_mf_full.sv` | the same at the default 32 terminals, no parameter overridden |
| `tb/tb_mf_workloads.sv` | uniform, exponential and normal synthetic traffic at 32 terminals, latency and throughput |

## Simulating

Every testbench checks its own results. It prints
`TB_RESULT checks=<n> failures=<m>` and stops. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mf_full \
    -y rtl -y tb +libext+.sv rtl/mf_pkg.sv tb/tb_mf_full.sv
./obj_dir/Vtb_mf_full
```

Each testbench finishes in seconds. The end-to-end testbenches count how often
each mechanism happened, and fail if one never did:

* side-link transfers
* alternative grants
* head flits waiting for a busy output
* injection stalls on a full queue

`tb_mf_workloads` prints one line per workload and load. With default
parameters, it printed:

| workload | offered load (flits/cycle/terminal) | avg latency (cycles) | delivered (flits/cycle/terminal) |
|---|---|---|---|
| uniform | 0.1 | 14.7 | 0.099 |
| uniform | 0.3 | 885 | 0.140 |
| exponential | 0.1 | 14.8 | 0.098 |
| exponential | 0.3 | 840 | 0.144 |
| normal | 0.1 | 14.1 | 0.098 |
| normal | 0.3 | 859 | 0.144 |

The network saturates near 0.14 flits/cycle/terminal under uniform traffic. Two
things limit it:

* The chain's middle side links carry all the traffic between the two ends of
  a half.
* Each output sits idle for one allocation cycle between worms.

The latency figures include the time a message waits in its (unbounded) source
queue. The workload names give the distribution of the gap between two
messages of a source. Destinations are uniform over the other terminals.

## How closely this follows the original design

**Taken from the published description:**

* three stages
* unchanged 2x2 first and last butterfly stages
* one merged middle stage
* side links between neighbouring middle routers, as drawn for 16 terminals
* wormhole switching
* input queues
* adaptive routing in the MF network
* two-flit messages for synthetic traffic
* 32 terminals

**This design's own choices** (the description does not give them):

* the routing rule and its alternative output
* the extension of the side-link chain beyond 16 terminals (a chain of N/4
  routers per half)
* flit width and head-flit layout
* queue depth
* valid/ready flow control
* round-robin allocation and the two-cycle router timing
* asynchronous active-low reset

**Departures and open points:**

* The text says every middle router has the same number of inputs and outputs.
  The drawing shows side links only between neighbours, so the routers at the
  chain ends have one side link fewer. This design follows the drawing. It
  still builds every middle router as the same 4x4 router and leaves the spare
  port unconnected.
* The MF-Baseline variant is not included. Its side links are drawn as one-way
  arrows, and the endpoints cannot be determined from the description. The
  router here could be reused for it once the link pattern is known.
* The trace-driven workloads (FFT, Water-Nsquared, Water-Spatial) fit the
  32-terminal network but are not simulated, because the traces are not
  available.
* The published power, latency and throughput figures come from a
  gate-level/45 nm flow. They are not reproduced. The latencies above are this
  model's own, in clock cycles.
* The processors and memories that attach to the terminals are not modelled.
  The testbenches drive the injection ports and absorb deliveries.
