# MCENoC: a circuit-switched Beneš network-on-chip with fixed latency

Mixed-criticality embedded systems put tasks of different safety levels on
many cores that share one interconnect. To certify the critical tasks, every
message must take a known number of cycles, and a less critical task must never
be able to block or steal a critical task's path. MCENoC meets this with a
**circuit-switched Beneš (Clos) network** built from small identical switches:

* every source reaches every destination through the same number of stages,
  so all nodes are equidistant;
* a Beneš network can route any one-to-one permutation of the nodes without
  blocking, so a statically computed schedule never has to wait;
* circuits are set up **in band**: the source itself clocks a route header
  into the network, one bit per cycle, and each switch consumes the bits it
  needs. There is no central arbiter;
* once a switch output is claimed, nobody else can take it. A later claim is
  refused with an error, so circuits set up first (the critical ones) are
  protected.

This RTL follows the MCENoC architecture of Kerrison, May and Eder ("A Beneš
Based NoC Switching Architecture for Mixed Criticality Embedded Systems",
2016). It implements the switching element, the network and a receive buffer
for each node. Where the publication leaves a detail open, the choice made
here is stated below and at the top of each source file.

## The serial port

Every node owns one input port and one output port of the network. Input q
and output q belong to the same node. Each port is a 1-bit serial link with
five wires (types `fwd_t` and `bwd_t` in `mcenoc_pkg`):

| wire  | direction        | meaning |
|-------|------------------|---------|
| `clm` | source → dest    | claim: high for the whole life of a circuit |
| `act` | source → dest    | the `dat` bit is valid in this cycle |
| `dat` | source → dest    | one route-header or payload bit |
| `ack` | dest → source    | clear to send (flow control) |
| `err` | dest → source    | the circuit was refused or torn down |

The same five wires connect neighbouring switch stages, so one switch and the
whole network have the same interface.

## Setting up a circuit

A source raises `clm` and, with `act` high, sends the route header MSB first.
Then it sends the payload. A switch that takes `p` route bits has `2^p` ports.
Each switch in the path takes its `p` bits as the number of the output it
should connect to. It then forwards everything that follows, so the next
stage sees its own bits first. Only the payload reaches the destination.
Every stage needs its bits in the header, including the first-half stages
whose choice does not change where the circuit ends; no switch infers a
route on its own.

The header is the concatenation of the per-stage output numbers, input side
first. In a Beneš network the first half of the stages may choose any
sub-network. Those digits are free, and the choice between them is the
routing problem. The second half is fixed by the destination address `d`:

```
header = c_0 , ... , c_(H-1) , d >> (H*P) , digit_(H-1)(d) , ... , digit_0(d)
         free digits (P bits)   middle (M bits)  base-2^P digits of d, P bits each
```

Example (8 nodes, 2-port switches): source 0 to destination 1 is `1 0 0 0 1`.
The first bit chooses the lower sub-network and the last four bits spell the
destination. With 4-port outer switches and a 2-port middle stage, the same
route is `10 0 01`.

Routes are not computed in hardware. Permutations are meant to be computed
offline, for instance with the looping algorithm. Several permutations are then
time-multiplexed by the nodes. The simple family `d = s XOR K` is conflict free
when every free digit is taken from the source address (`c_k = digit_k(s)`).
The testbenches use this family.

## Inside a switching element (`mcenoc_switch`)

Each input port has four states:

| state    | meaning | `err` | `ack` |
|----------|---------|-------|-------|
| `WAIT`   | unconnected; collecting route bits | 0 | 1 |
| `ACCEPT` | connected to its output; forwarding | downstream's err raises ABORT | downstream's ack, 1 cycle late |
| `REJECT` | route refused (output busy, lost a tie, or `act` without `clm`) | 1 | 0 |
| `ABORT`  | connected, but the next stage reported an error | 1 | 0 |

Rules:

* **Claim.** On the cycle that brings the p-th route bit, the port asks for
  output `r`. The request is granted if no port in `ACCEPT`/`ABORT` owns `r`
  and `r`'s `err` input is low.
* **Ties.** If several inputs ask for the same free output in the same cycle,
  the lowest-numbered input wins and the others go to `REJECT`.
* **Forwarding.** In `ACCEPT`, `clm/act/dat` pass to output `r` through one
  register. This is a depth-one buffer, so each stage adds exactly one cycle.
* **Teardown from the source.** When `clm` drops, the drop is forwarded. The
  port returns to `WAIT` and frees `r`, and every later stage does the same
  one cycle after the one before it.
* **Teardown from the destination.** When `err` rises on output `r`, the port
  goes to `ABORT` and raises its own `err` on the next cycle. It clears output
  `r` one cycle later. It stays in `ABORT` until the source drops `clm`.
  `REJECT` is left the same way.
* **Idle.** The `idle` output is high when all ports are in `WAIT` and no
  `clm` is high. That is the condition under which the element could be
  clock-gated. No gating cell is included.

Two rules from the design's formal specification are included as concurrent
assertions: no two connected inputs share an output (`no_shared_direction`),
and the ABORT sequence (`reject_on_err`).

## Building the network (`mcenoc_network`)

For `N = 2^L` ports and switches of `P` route bits:

* there are `H = ceil(L/P) - 1` outer stages on each side;
* there is one middle stage of `2^M`-port switches, with `M = L - H*P`;
* there are `S = 2H + 1` stages in all;
* the header is `HB = 2HP + M` bits long.

| N  | P | stages (ports per switch) | switches | header bits |
|----|---|---------------------------|----------|-------------|
| 8  | 1 | 2-2-2-2-2                 | 20       | 5  |
| 8  | 2 | 4-2-4                     | 8        | 5  |
| 32 | 2 | 4-4-2-4-4 (**default**)   | 48       | 9  |
| 32 | 3 | 8-4-8                     | 16       | 8  |
| 64 | 2 | 4-4-4-4-4                 | 80       | 12 |

Neighbouring stages are joined by a closed-form rule (`mcenoc_pkg::connect`).
Number the stages outward from the middle, `n = 0, 1, ...`, and let
`B = 2^P`. Port `i` of inner stage `n` meets port `j` of the next stage out:

```
b_n = min(B^(2+n), N)        block size
o   = floor(i / b_n) * b_n   block base
k   = (i - o) * B
j   = ((k + floor(k / b_n)) mod b_n) + o
```

This is a perfect `B`-way shuffle inside each block. The stages before the
middle use the inverse mapping, so the network is symmetric. Every output of
a first-half switch leads into a different sub-network, and that is what makes
it a Beneš (Clos) network.

In the 32-port, 2-bit network the middle switches come out interleaved: the
first switch of stage 2 feeds middle switches 1, 3, 5 and 7. This relabels
the middle stage compared with a plain recursive construction. It changes
nothing about routing: the header of a route is the same either way.

## Timing

With one register per stage, and the first header bit sent in cycle 0 at one
bit per cycle:

| event | cycle | default (HB = 9, S = 5) |
|-------|-------|-------------------------|
| first payload bit at the destination port | HB + S | 14 |
| it can be read from the receive buffer | HB + S + 1 | 15 |
| a conflict in the last stage seen as `err` at the source (worst case) | HB + 2S − 2 | 17 |
| `ack` or a destination `err` reaches the source | S cycles after the destination drives it | 5 |

After setup, each port carries 1 bit per cycle. At the 364 MHz the publication
reports for FPGA, a 32-node network has a bisection bandwidth of
32 × 364 Mbit/s ≈ 11.6 Gbit/s.

The publication states both latencies in its own symbols. A route is
established in "p + s" cycles. Reading p as the header length and s as the
number of stages, that is 9 + 5 = 14, which is exactly what this RTL does. The
worst-case error latency is given as "2p + s" (23 cycles). This RTL stays
within that bound, at 17 cycles. The publication also says that, once set up,
an input crosses the network in p cycles. With one register per stage the
crossing here takes s cycles (5), not 9; read with p as the header length, that
sentence cannot hold for any design whose header is longer than its pipeline,
so this RTL follows the one-register-per-stage description instead. The
testbenches check the exact counts in the table.

## Flow control and the receive buffer (`mcenoc_rx_buffer`)

The switches never look at `ack`. It is an end-to-end agreement between
source and destination: `ack` is high by default while a route is being built,
and afterwards the destination drives it. A source must stop sending while
`ack` is low.

Each destination port ends in a bit FIFO of `RX_DEPTH` (32) bits. When fewer
than `RX_RESERVE` entries are free, the FIFO lowers `ack`. Bits already in
flight still fit, because `ack` needs S cycles to travel back and the bits in
flight need at most S cycles to arrive. That makes 2S bits, plus one for the
FIFO's own `ack` register, so the reserve is 2S + 1 = 11.

A source that ignores `ack` can overrun the FIFO. Excess bits are then
dropped, and a sticky `overflow` flag is set. Raising `dst_err` sends `err` back
and tears the circuit down.

## The top level (`mcenoc_top`)

`mcenoc_top` is the network with one receive buffer on each output. The nodes
(processors, memories, peripherals, bus bridges) and the TDM scheduler are not
part of this RTL. Their connections are plain ports:

* `src_fwd` and `src_bwd`: the source side of each node's port;
* `rd_en`, `rd_data` and `rd_valid`: the read side of each receive buffer;
* `dst_err`, `dst_connected` and `rx_overflow`: per destination;
* `idle`: the whole network is idle.

## Choices made here, and differences from the publication

* **`ack` is the publication's `cts`.** The port diagram labels the backward
  flow-control wire `ack`, while the text calls it `cts`. The diagram's name
  is used here.
* **Wiring formula.** The published connectivity formula is implemented as
  written. It was checked against the published drawings (32-port and 8-port)
  and the header examples.
* **Registered backward path.** `ack` and `err` are registered once per stage.
  The publication shows only the `err` timing, in its `reject_on_err`
  property, and not the timing of `ack`.
* **Busy output.** An output whose `err` input is still high counts as busy,
  so a new circuit is not set up into a stage that is still clearing an error.
* **Protocol violation.** The only violation detected is `act` high while
  `clm` is low, which gives `REJECT`. The publication mentions protocol
  violations without listing them.
* **Leaving ABORT.** A port leaves `ABORT` when `clm` drops, as it leaves
  `REJECT`.
* **Reset.** Reset is synchronous and active high.
* **Receive buffer.** The depth of 32, the reserve of 2S + 1, the overflow
  flag and the read port are own choices. The publication only asks for a
  buffer of at least 2s bits that lowers `cts` when less space than that is
  free.
* **Not built.** The following are not part of this RTL:
  * the nodes and their interface bridges;
  * clock gating (only the `idle` condition is provided);
  * the offline router and TDM scheduler;
  * the full set of formal properties (only two are reproduced as
    assertions).

## Files

| file | contents |
|------|----------|
| `rtl/mcenoc_pkg.sv` | port types, port states, network-shape functions, stage wiring |
| `rtl/mcenoc_switch.sv` | switching element (parameter `P`) |
| `rtl/mcenoc_network.sv` | N-port network (parameters `N`, `P`) |
| `rtl/mcenoc_rx_buffer.sv` | receive FIFO with clear-to-send |
| `rtl/mcenoc_top.sv` | network plus receive buffers (default N = 32, P = 2) |
| `tb/tb_mcenoc_switch.sv` | one 4-port switch: setup, conflicts, ties, abort, ack, random permutations |
| `tb/tb_mcenoc_network.sv`, `tb/tb_network_check.sv` | networks of 32/2, 8/1, 8/2 and 32/3: header examples, permutations, exact latencies |
| `tb/tb_mcenoc_rx_buffer.sv` | FIFO against a queue model, ack threshold, overflow |
| `tb/tb_mcenoc_top.sv` | the full 32-node design end to end, at its default parameters: permutations with stalled readers, a race for one destination, a later claim on an owned destination (the route made first keeps it), a refusal by the destination, an overflow and the return to idle |
| `tb/tb_mcenoc_tdm.sv` | all-to-all exchange as 32 TDM phases |

Each testbench checks its own results and ends with a line
`TB_RESULT checks=<n> failures=<m>`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/mcenoc_pkg.sv tb/tb_mcenoc_top.sv --top-module tb_mcenoc_top -o sim
./obj_dir/sim
```

To run another test, replace `tb_mcenoc_top` with the name of that
testbench. To try another network size, change `N` and `P` on `mcenoc_top`.
`N` must be a power of two. The network testbench's checker takes the same two
parameters.

## How far it is verified

Simulation only: no formal proof was run on this RTL. The testbenches cover:

* every port state and transition;
* tie-breaking and conflicts;
* teardown from either end;
* the exact latencies in the timing table;
* flow control under back-pressure, with no loss;
* overflow when `ack` is ignored;
* the 8-port header examples.

Each testbench has also been shown to fail against a deliberately broken
copy of its module. Synthesis has only been run as a generic yosys
elaboration. No clock rate has been measured for this RTL.
