# Asynchronous tree-based AER encoder (SystemVerilog)

A neuromorphic chip has many neurons or sensor pixels that fire rarely, but
sometimes in dense bursts. Address-Event Representation (AER) sends each
spike as the binary address of the neuron that fired, over one shared bus.
This design is the encoder at the head of such a bus. N event sources each
raise a request. The encoder picks them one at a time and puts the
log2(N)-bit address of the chosen source on one output channel.

The encoder has no clock. Every handshake is a local 4-phase request /
acknowledge exchange. Every storage element is an ordinary edge-triggered
flip-flop, clocked by a locally generated acknowledge. The only timing
elements are chains of buffers ("matched delays") in the handshake wires.
So the design is built from standard cells only, and an ordinary synthesis
and place-and-route flow can implement it. With no traffic, nothing toggles.

The RTL follows the architecture of *An Ultra-Low-Power Synthesizable
Asynchronous AER Encoder for Neuromorphic Edge Devices* (Wang, Peng, Shah).
That work fabricated an 8-event version in 65 nm CMOS. The gate structures
of the C-element, the micropipeline stage and the arbiter are taken from
its schematics. The places where this code had to choose something of its
own are listed under "Departures and own choices" below.

## The tree

```
 ev_req/ev_ack[0..7]
   |  |  |  |  |  |  |  |
  [E0]  [E1]  [E2]  [E3]      level 0: arbitered encoders, 1 address bit
   |     |     |     |
  [MP]  [MP]  [MP]  [MP]      micropipeline column (1-bit data)
     \   /       \   /
     [N0]        [N1]          level 1: arbitered encoder + 2:1 mux, 2 bits
      |           |
     [MP]        [MP]          micropipeline column (2-bit data)
         \       /
           [N2]                level 2 (root): encoder + mux, 3 bits
            |
         [delay]               output REQ delay
            |
   out_req / out_ack / out_addr[2:0]
```

Events enter in pairs at the level-0 arbitered encoders. Each encoder picks
one of its two requests and forwards it with a one-bit address: 0 for the
first input, 1 for the second. Above level 0, every node (`aer_node`) is the
same arbitered encoder plus a 2:1 multiplexer. The encoder's one-bit
decision selects which child's registered address goes on. The decision is
also prepended as the new most significant bit. After log2(N) levels the
address is complete, and it equals the number of the input that fired.

Every encoder output except the root's passes through one micropipeline
stage (`mp_stage`) before the next level. The stage holds the partial
address in a register and decouples the levels. For 8 inputs there are 3
encoder levels and 2 micropipeline columns, with up to 6 events in flight
at once. A losing request at a node simply waits, keeping its data in the
stage below. Nothing is dropped: an event source's acknowledge means the
event is stored in the tree.

## The arbitered encoder (`arb_encoder`)

This block is the core of the design. Its gates:

```
n1 = NAND(req1, n2)        n2 = NAND(req2, n1)       -- mutual exclusion
g1 = NOR(n1, ack2)         g2 = NOR(n2, ack1)        -- grants
ack1 = C(g1, ack_next)     ack2 = C(g2, ack_next)    -- C-elements
req_next = g1 | g2         addr = g2
```

The cross-coupled NAND pair is a set/reset latch. It can hold only one of
its outputs low. The first request to arrive pulls its side low and locks
out the other side. The NORs add an interlock: side 1 can be granted only
while `ack2` is low, so a new grant waits until the previous winner's
handshake has fully returned to zero. This also keeps `addr` stable for the
whole time `req_next` is high.

A complete exchange, with side 1 winning while side 2 waits:

1. `req1` rises. `n1` goes low, `g1` rises, and `req_next` rises with
   `addr = 0`.
2. The parent raises `ack_next`. `ack1 = C(g1, ack_next)` rises.
3. Source 1 lowers `req1`. `n1` goes high again. Because `req2` is high,
   `n2` now falls, but `g2` stays low while `ack1` is high. `g1` falls, so
   `req_next` falls.
4. The parent lowers `ack_next`. `ack1` falls, `g2` rises, and `req_next`
   rises again with `addr = 1`.

Two requests can rise in exactly the same instant. In silicon the NAND
latch then goes metastable, and device mismatch and noise decide the
winner at random. The original design relies on this as a cheap, fair
arbiter with no priority state. In a zero-delay RTL simulation the same
gates resolve the tie in a fixed way, set by the simulator's evaluation
order. The tests check that exactly one side wins a tie and that the other
side is served next. They cannot check randomness.

## The micropipeline stage (`mp_stage`)

This is a 4-phase, semi-decoupled latch controller. It has two C-elements,
and it uses a flip-flop where a classic micropipeline uses a transparent
latch:

```
req_dly  = delay_REQ(req_pre)
ack_loc  = C(req_dly, !req_next)
req_next = C(ack_loc, !ack_next)
ack_pre  = delay_ACK(ack_loc)            -- acknowledge to previous stage
data_out <= data_in  on posedge ack_pre  -- the register's clock
```

The inversions make the stage semi-decoupled. The input side acknowledges
as soon as the stage's own output request is low; it does not wait for the
next stage's acknowledge. The input handshake can then return to zero while
the next stage still holds the event. A second event is held off until
`req_next` has fallen, which happens once the next stage has taken the
first event. So each stage stores one event, and a burst spreads across the
tree instead of stalling at the inputs.

The register is clocked by the delayed local acknowledge, not by the
incoming request. It therefore captures only on the rising edge, which is
why a 4-phase protocol is used. The data has the whole REQ delay to settle
before it is captured. The multiplexer delay of the next level falls inside
the return-to-zero half of the handshake.

## Timing: what the delay lines must cover

All timing rests on the buffer chains in `delay_line`. Let D_R, D_A and D_O
be the REQ, ACK and output delays: `REQ_BUFS`, `ACK_BUFS` and `OUT_BUFS`
buffers of `BUF_PS` each. Consider a stage whose `req_next` rises at time T:

* its register captures at T + D_A, and its `data_out` is valid at
  T + D_A + t_clk-q;
* the parent node's multiplexer passes it on after t_mux;
* the parent stage captures at T + D_R + D_A, or later if it is busy.

Hence **D_R > t_clk-q + t_mux + t_setup** is the constraint for each stage.
The register clock uses the delayed acknowledge, so D_A appears on both
sides and cancels out.

At the output there is no register after the root. The root address is
valid D_A + t_clk-q + t_mux after the last stage's request, but the root
request is just an OR of the grants. The top level therefore delays
`out_req` by D_O, with **D_O > D_A + t_clk-q + t_mux**. The ACK delay
itself adds hold margin: the previous stage may change its output only
after the acknowledge, and the acknowledge comes D_A after the capture
decision.

The buffer counts are parameters. A silicon flow sets them iteratively:
synthesise, measure the handshake period in an SDF-annotated simulation,
constrain the datapath with `set_max_delay` to a fraction of that period,
and add buffers until timing is met. In synthesis the `#` delays in
`delay_line` are ignored. Each buffer must be kept as a real cell
(dont-touch), or the chain collapses to a wire.

Resulting behaviour at the defaults (8 events, D_R = 0.8 ns, D_A = 0.4 ns,
D_O = 0.8 ns, ideal gates), all checked by the testbenches:

| quantity | formula | default |
|---|---|---|
| `ev_req` to `ev_ack`, idle | D_R + D_A | 1.2 ns |
| `ev_req` to `out_req`, idle | (log2 N - 1) D_R + D_O | 2.4 ns |
| input handshake period, one busy source | 2 (D_R + D_A) + source reaction | 2.42 ns with a 10 ps source |
| the same under a 100 MHz clocked test controller | 2 clock periods | 20 ns (50 MEvent/s) |

The silicon prototype measured a 30 ns handshake (about 33 MEvent/s),
50 ns latency and 435 fJ per event. Those numbers come from real gate and
pad delays and from the FPGA test controller. This RTL does not model them,
and its delay defaults are not the prototype's.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `aer_encoder`, `aer_tree` | `N` | 8 | number of event inputs, a power of two of at least 2 |
| all with delays | `REQ_BUFS` | 8 | buffers in each stage's REQ delay |
| | `ACK_BUFS` | 4 | buffers in each stage's ACK delay |
| `aer_encoder` | `OUT_BUFS` | 8 | buffers in the output REQ delay |
| | `BUF_PS` | 100 | simulated delay of one buffer, ps |
| `mp_stage` | `W` | 1 | data width; the tree sets it per level |
| `aer_node` | `CW` | 1 | width of a child address |

The defaults live in `aer_pkg`. The 8-event size is the prototype's. The
delay values are this design's choice: they satisfy the two inequalities
above for any plausible standard-cell flop and mux.

## Files

| file | content |
|---|---|
| `rtl/aer_pkg.sv` | default sizes and delays |
| `rtl/c_element.sv` | Muller C-element as an Earle latch (3 AND + 1 OR with feedback) |
| `rtl/delay_line.sv` | matched delay: buffer chain, behavioural delay for simulation |
| `rtl/arb_encoder.sv` | arbitered encoder (NAND mutual exclusion, NOR interlock, C-elements) |
| `rtl/mp_stage.sv` | semi-decoupled micropipeline stage with flip-flop register |
| `rtl/aer_node.sv` | inner tree node: arbitered encoder + address multiplexer |
| `rtl/aer_tree.sv` | the tree, generated level by level for any power-of-two N |
| `rtl/aer_encoder.sv` | top level: tree + output REQ delay |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus `tb_aer_fullscan` |

The top-level ports are `rst_n`, `ev_req[N-1:0]`, `ev_ack[N-1:0]`,
`out_req`, `out_ack` and `out_addr[log2 N - 1:0]`. Every channel is 4-phase
and return-to-zero. Sources must hold a request high until it is
acknowledged, and must keep it low until the acknowledge has fallen. The
receiver must take `out_addr` while `out_req` is high and only then raise
`out_ack`.

## Simulating

All files carry `` `timescale 1ns/1ps ``. With Verilator 5, for example for
the top-level test:

```
verilator --binary --timing -Wno-fatal --top-module tb_aer_encoder \
    -y rtl -y tb +libext+.sv rtl/aer_pkg.sv tb/tb_aer_encoder.sv
./obj_dir/Vtb_aer_encoder
```

Every testbench ends with a line `TB_RESULT checks=<n> failures=<m>`, and
each has a watchdog. What they check:

* `tb_c_element`: random input and reset sequences against a reference
  model.
* `tb_delay_line`: exact delay of both edges, and that a zero-length line
  is a wire.
* `tb_arb_encoder`: random traffic, exact ties and a held loser. It checks
  that the address names a requesting side, that the acknowledge goes to
  the winner only, mutual exclusion, and that every request is served once.
* `tb_mp_stage`: in-order delivery of 200 random words, data valid one ACK
  delay after `req_next`, the exact REQ and ACK delays, input completion
  while the receiver stalls (semi-decoupling), and that a second word is
  held while the stage is full.
* `tb_aer_node`: the address merge `{bit, selected child address}` under
  random load and ties.
* `tb_aer_tree`: a 16-input tree (4 levels). It checks idle latency, random
  load from all 16 sources, and 16-way ties.
* `tb_aer_encoder`: the 8-input top at default parameters. It checks the
  exact idle latencies, the single-source throughput formula, full load
  with a random slow receiver, and 8-way ties. It also counts collisions,
  ties, back-pressure stalls, semi-decoupled completions and events in
  flight, and fails if any of them never happened.
* `tb_aer_fullscan`: a 100 MHz clocked controller scans the 8 inputs in
  order, 400 events in all. It checks scan-order delivery and the
  two-clock handshake.

Simulation notes:

* The C-elements and the NAND latch are combinational loops. Verilator
  reports them (`UNOPTFLAT`) and iterates them to a stable value; they are
  the state of an asynchronous circuit and are meant to be there.
* With a two-state simulator, pull `rst_n` from 1 to 0 and back after time
  0, as the testbenches do, so that the flip-flops see a real reset edge.
* In testbench stimulus, avoid `#0` waits between changes of a delay-line
  input. The testbenches use small non-zero steps instead.

## Departures and own choices

* **Reset.** The original design does not describe one. Here an active-low
  `rst_n` is ANDed into every C-element, and the stage registers reset
  asynchronously to 0.
* **Stage inversions.** The stage schematic shows the connections but no
  inversion bubbles. The inverted feedback of `req_next` and the inverted
  `ack_next` come from the standard semi-decoupled 4-phase controller. With
  them the stage produces the published handshake waveform.
* **Address polarity.** `addr = g2`, so the second input is bit value 1,
  and the new bit of each level is the MSB. Event i gets address i.
* **Output REQ delay.** This design adds it (`OUT_BUFS`) so that `out_req`
  never leads `out_addr`. The published tree shows the root encoder driving
  the output directly.
* **Tree depth.** There are log2(N) encoder levels and log2(N)-1
  micropipeline columns, as the tree drawing shows. The original also names
  "the number of pipeline stages" as a parameter of its own. Here it
  follows from N.
* **Arbiters at the inputs.** In the fabricated prototype, the first-level
  arbiters were placed in the FPGA that drove the chip. This RTL
  implements the architecture as described, with arbitered encoders at
  every node including the inputs.
* **Delays.** The delay defaults and the 100 ps buffer are assumed values.
  Gates have zero delay in simulation. The delays are therefore
  checked for logical ordering, not for a particular process.
* **Not included.** The downstream router and synaptic memory are shown
  only as context in the original. The pad ring and the analog parts of
  the test chip are also left out.
