# SAFE: an asynchronous FPGA fabric with balanced dual-rail routing

Dual-rail asynchronous logic encodes each bit on two wires. A `0` raises one
wire, a `1` raises the other, and between data items both wires go back to
zero. Every data item therefore makes exactly one rising and one falling
transition, whatever its value. In principle the power drawn does not depend
on the data, which is what a side-channel attacker (DPA, EMA) looks for.

The principle only holds if the two rails are physically alike. They must
have the same length, the same load, the same number of switches, and they
must radiate in the same way. An FPGA makes this hard: the router picks the
path of each rail. The SAFE fabric builds the balance into the architecture:

* Logic blocks built from equal LUTs whose inputs all carry the same load.
* Connection boxes where every pin-to-wire path has the same length.
* Switchboxes whose switch points line up into lines of equal delay. Two
  switchboxes also twist the rails of a bus when it turns, or at every box,
  so their radiation cancels.
* A clockless configuration chain that loads the bitstream with the same
  4-phase handshake that the user logic uses.

This repository holds synthesizable SystemVerilog for the whole fabric at the
size of the 3x3 prototype. It has:

* 9 logic blocks (PLBs).
* 8-track channels.
* 16 switchboxes.
* 12 I/O blocks with 3 pads each (36 pads).
* One configuration chain of 4610 stages.

There are also testbenches for every block, for the full chip, and for the
"hop mismatch" experiment done on that chip.

## How the asynchronous circuit is modelled

The real circuit has no clock. To make it simulate deterministically in
Verilator and synthesize as ordinary logic, the RTL uses a **unit gate-delay
model**:

* Every state-holding gate is a flip-flop on `clk`. These gates are the
  C-elements, the LUT outputs, the block P memory elements and the buffered
  switchbox outputs.
* Every other gate is combinational.

One `clk` edge is therefore one gate delay, called a *step* below. `clk` is
not a clock of the design. It is the simulation's time step, and a
self-timed circuit has to work with any such delays. The testbenches use the
step counts as latency and throughput figures of the model, not of silicon.

Signal encoding (1-out-of-2, 4-phase) is the same everywhere, on
`(rail1, rail0)`:

| rails | meaning |
|-------|---------|
| 00 | spacer (no data, "precharge") |
| 01 | data `0` |
| 10 | data `1` |
| 11 | forbidden |

A transfer goes: data arrives, the receiver lowers its acknowledge, the
sender returns to spacer, and the receiver raises its acknowledge. An
acknowledge of 1 means "ready / empty".

There is no reset signal anywhere. Registers come up at whatever value the
simulator gives them. Bringing the chip into a known state is the job of the
INIT procedure described next, and the testbenches run with random
power-up values (`+verilator+rand+reset+2`) to exercise it.

## Configuration chain and INIT

`config_chain` is the only way to set the chip's configuration. It is a
shift register of **full buffers** with no clock. Each stage
(`full_buffer_stage`) is two weak-conditioned half buffers:

```
 e0 --C--m0--C-- s0          a half buffer: one C-element per rail,
 e1 --C--m1--C-- s1          enabled by NOR of the next half's rails
        |       |
 e_ack = NOR(m0,m1)  en2 = s_ack   en1 = NOR(s0,s1)
```

Each stage behaves as follows:

* A token moves forward when the next half is empty.
* The stage's acknowledge to the previous stage is the NOR of its first
  half's rails.
* When the chain is full, every stage holds one token on its second half.
* The configuration bit of stage k is **rail 1 of its output**, `s1[k]`. In
  the prototype, the switches hang on rail 1 only.

The chain is written bit-parallel: bit k of each vector is stage k. This is
the same logic as N separate instances, but a 4610-stage chain then builds in
seconds instead of many minutes in Verilator.

**The initialisation cap** (`config_init_cap`) terminates the chain. It is
the acknowledge into the last stage:

```
ack_last = init | NOR(out0, out1)
```

It works in two phases:

* **INIT low.** Hold `init` and both configuration inputs at 0. The last
  stage is acknowledged only while it outputs the spacer. Any token, and any
  illegal `11` left from power-up, is held at the end until the zeros
  flowing in from the input overwrite it. The C-elements let a 00 through
  wherever the next half is empty, so the whole chain settles to spacers with
  all acknowledges at 1.
* **INIT high.** The cap acknowledges everything and the chain fills. The
  first token pushed ends up in the last stage. Loading therefore sends the
  bitstream from bit N-1 down to bit 0.
* **When full.** The chain stops acknowledging. A further token is refused,
  which is how the loader can tell that the count was right.

Erasing a configuration is another INIT.

Timing in the model:

* A token reaches the output of an empty stage in 2 steps.
* A stream of N tokens enters in 4N-1 steps: one token per full 4-phase
  cycle, which is 4 steps.
* Loading the full 3x3 chip takes about 18,500 steps.

INIT needs to run long enough for the zeros to pass the whole chain. The
testbenches hold it for 5 to 12 steps per stage.

## The programmable logic block (PLB)

A PLB (`plb`) has 12 inputs `I0..I5`, `J0..J5` and 7 outputs `O0..O6`. Its
parts are:

* **Four 6-input LUTs** (`lut6`). LUTs 0 and 1 read I, LUTs 2 and 3 read J.
  Each LUT is a one-hot decoder ANDed with the 64 stored bits, then ORed.
  Every input sees the same decoder load, and every stored bit is the same
  number of gates from the output.
* **Feedback multiplexers.** Inputs 0..3 of each LUT either take the PLB
  input of that index or the output `O_m` of LUT m. This is how a LUT holds
  its own state.
* **Block P.** The four LUT outputs A..D each pass an X block (`block_x`)
  that steers them towards output P or output Q. The inputs steered to P are
  XORed into P, those steered to Q into Q.
* **Block P memory elements.** P can instead come from a memory element on
  A, B (`m <= m ? B : A`), and Q likewise on C, D. With A = x·y and
  B = x+y, this element is a C-element.
* **Outputs.** `O0..O3` are the LUT outputs, `O4 = P`, `O5 = Q`, and
  `O6 = P xor Q`.

**Mapping a dual-rail gate with acknowledge.** A 4-phase gate z = f(x, y)
with rails x1 x0 y1 y0 and acknowledge-in `S` behaves like this:

* When both inputs are valid and S = 0, each output rail takes `f^r(x, y)`.
* When both inputs are spacers and S = 1, it returns to 0.
* Otherwise it holds.

That is a function of six variables per rail, including the rail itself, so
it fits one LUT with one feedback input:

```
O0 = LUT6(O0, S, x1, x0, y1, y0)        O1 = LUT6(S, O1, x1, x0, y1, y0)
```

Block P passes O0 to P and O1 to Q, so `O6` is the gate's acknowledge-out
(XOR of the rails, which equals OR on legal codes). A PLB thus holds one
such gate in its upper LUT pair, and another in its lower pair: half a PLB
per gate. `tb_plb` configures this mapping with a random f and runs
evaluate, hold and precharge phases. It also builds a C-element from the
lower LUTs and the Q memory element.

Configuration of a PLB is 278 bits:

| bits | content |
|------|---------|
| 64k .. 64k+63 | truth table of LUT k (address = its 6 inputs, input 5 most significant) |
| 256 + 4k + m | input m of LUT k takes feedback O_m (1) or the PLB input (0) |
| 272..275 | X selects for A..D (1 = towards P) |
| 276 / 277 | P / Q come from the memory element (1) or the XOR (0) |

## Routing: switchboxes and equal-delay lines

The fabric is an island-style mesh with W tracks per channel. The parts are
placed as follows:

* Switchbox (x, y) sits at grid point x = 0..NX, y = 0..NY.
* Horizontal segment `h[x][y]` joins boxes (x, y) and (x+1, y).
* Vertical segment `v[x][y]` joins boxes (x, y) and (x, y+1).
* Boxes inside the array have four sides (6 switches per track). Edge boxes
  have three (3 switches), corner boxes two (1 switch).
* Terminal t(s, i) is track i on side s. Sides are 0 left, 1 top, 2 right,
  3 bottom.

`switchbox` implements three switch patterns, selected by `STYLE`:

* **`SB_SUBSET`** (default). Switch point i joins t(0,i), t(2,i),
  t(1,W-1-i) and t(3,W-1-i). The switch points form a diagonal. Signals
  that leave one logic block on one such diagonal stay on lines of equal
  delay wherever they are routed. A horizontal track i becomes vertical
  track W-1-i at a turn.
* **`SB_TWIST_ON_TURN`**. Straight connections keep the track index.
  Top-to-right and bottom-to-left turns go to W-1-i. A bus that turns
  therefore comes out with its rails swapped, like a twisted pair.
* **`SB_TWIST_ALWAYS`**. As above, but straight connections also go to
  W-1-i, so the bus is twisted at every box. This suits any 1-out-of-n
  code.

**How a bidirectional switch is modelled.** The silicon switch is a
bidirectional pass switch on a buffered channel. The RTL has no tri-states.
Instead:

* Each switchbox terminal has an incoming value `t_in` and a value the box
  drives, `t_out`.
* A closed switch between terminals a and b ORs `t_in(b)` into `t_out(a)`,
  and `t_in(a)` into `t_out(b)`.
* In `safe_fpga`, each channel segment keeps three drivers: the box at one
  end, the box at the other end, and connection-box output pins.
* Each end sees only what the others drive. A signal therefore never comes
  back through the switch it came from.
* A block reading the segment sees the OR of all three drivers.
* Each box output is registered, so one box is one step of delay. This is
  the measure of "hops" used below.

This OR model is exact when only one driver per net is active, which is
what a legal routing gives. It does not show the analogue effects of a short
between two drivers.

**Switchbox configuration.** Bit `i*NPAIR + r` closes the r-th present side
pair of track i. Pairs are taken in the order [L,R], [T,B], [L,T], [T,R],
[R,B], [B,L], skipping pairs that touch a missing side.

### Single-driver variant

In a single-driver fabric every wire has exactly one driver, so each side
of a box has W wires coming in and W going out. `switchbox_sd` is the
subset box for such a fabric. It is a standalone variant: `safe_fpga` uses
the bidirectional box of the prototype.

* Each outgoing wire j of side s is driven by a multiplexer with four
  sources: the incoming wire of each of the other three sides that lies on
  the same switch point, and a logic-block output `lb_in[j]`.
* The switch-point rule is the same as in `SB_SUBSET`: point p is index p
  on the left and right sides, and W-1-p on the top and bottom sides.
* The selects are one-hot: 4 bits per outgoing wire, `cfg[(s*W+j)*4+k]`.
  Sources k = 0..2 are the other sides in increasing side order, and k = 3
  is the logic-block output.
* Each output is a registered buffer, so one box is one step of delay.

The select encoding and the logic-block hookup are this design's own
choices.

## Connection boxes and I/O

`conn_box` is a crossbar between a channel and a block's pins. One switch
per (pin, wire) crossing ORs the wire onto an input pin, or an output pin
onto the wire. In silicon, the crossbar is two superimposed balanced binary
trees, so every pin-to-wire path is the same length. That is a layout
property and does not appear in the logic.

* **PLB connection box.** Fc = 1. The 12 inputs read the horizontal
  channel above the PLB. The 7 outputs drive the vertical channel on its
  right. That makes (12+7)×8 = 152 bits.
* **I/O connection box.** Fc = 0.5: pin p reaches only the wires w with
  w mod 2 = p mod 2. Each of the 3 pads has one fabric-to-pad pin and one
  pad-to-fabric pin. That makes (3+3)×4 = 24 bits.
* **I/O block** (`iob`). One bit per pad. 1 makes the pad an output
  (`pad_oe`, `pad_out` driven from the fabric). 0 makes it an input, passed
  to the fabric.

I/O block k sits as follows. Its pads are `pad_*[3k+2:3k]`.

| k | side | channel segment |
|---|------|-----------------|
| 0..NX-1 | bottom | `h[k][0]` |
| NX..NX+NY-1 | right | `v[NX][k-NX]` |
| NX+NY..2NX+NY-1 | top | `h[k-NX-NY][NY]` |
| 2NX+NY..2NX+2NY-1 | left | `v[0][k-2NX-NY]` |

## Configuration bit layout

Bit 0 is the chain stage next to the input. The bitstream is sent bit N-1
first. The regions, in order:

| region | count (3x3, W=8) | order inside |
|--------|------------------|--------------|
| PLBs | 9 × 278 = 2502 | PLB k = y·NX + x |
| PLB connection boxes | 9 × 152 = 1368 | inputs pin-major, then outputs |
| I/O connection boxes | 12 × 24 = 288 | as above, per I/O block k |
| I/O direction bits | 12 × 3 = 36 | pad 0..2 |
| switchboxes | 4×48 + 8×24 + 4×8 = 416 | row by row, y outer |
| **total** | **4610** | |

All offsets are functions in `safe_pkg` (`ofs_plb`, `ofs_plb_cb`,
`ofs_iob_cb`, `ofs_iob`, `ofs_sb`, `cfg_total`). They work for any NX, NY
and W.

## Where this RTL departs from the published design

* **Bit count.** The prototype's bitstream has 4691 bits by its own table,
  and 4692 acknowledges are counted when loading it. This RTL has 4610. The
  difference is in the PLB: 287 bits are listed per PLB, but only the 278
  described above have a documented use, so the other 9 per PLB are left
  out. The table's connection-box count uses 7 PLB outputs, while its text
  says 3; this RTL follows the table. The prototype bitstream file therefore
  cannot be loaded unchanged.
* **Block P details.** The structure (X blocks, two combining gates,
  self-selecting memory multiplexers, output selects) follows the published
  drawing. The XOR type of the combining gates, the data order of the
  memory multiplexer and the select polarities are readings of it.
* **Own choices** (not published):
  * which channel sides the PLB pins use;
  * which wires an Fc = 0.5 pin reaches;
  * the meaning of the I/O bit;
  * the bit order inside every region.
* **The LUT storage bug.** In silicon, the LUT's stored bits were connected
  to its output through transmission gates. These shorted two memory points
  while the LUT inputs were changing during configuration. That corrupted
  the chain, so loading bitstreams containing 1s only worked at low speed.
  Here the LUT is an AND-OR of the stored bits, the fix the designers
  proposed. Nothing can write back into the chain.
* **Analogue properties are not modelled.** These include:
  * wire-length and capacitance balance;
  * the twisted-pair radiation cancellation;
  * the crossbar's binary trees;
  * configuration speed (about 1.6 GHz simulated for the real chain);
  * the power-balance ratio measured on the chip.

  The RTL only carries the logic and the switch sets that produce these
  properties in layout.
* **Single-driver routing** is only sketched in the published design. The
  subset box for it is built as `switchbox_sd` (see above). The twisted-pair
  single-driver box, and a single-driver version of the whole fabric, are
  not built.

## Simulating

Verilator 5 with `--timing` is enough. The package goes first and `-y rtl`
finds the modules, for example:

```
verilator --binary --timing --assert -y rtl -Irtl rtl/safe_pkg.sv tb/tb_safe_fpga.sv
./obj_dir/Vtb_safe_fpga +verilator+rand+reset+2
```

`verilator --lint-only -Wall` on `safe_fpga` reports a single UNUSEDSIGNAL
warning. It concerns the outputs of the missing sides of the edge and corner
switchboxes, which nothing reads.

Every testbench ends with `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. The testbenches:

* `tb_c_element`, `tb_full_buffer_stage`, `tb_config_init_cap`,
  `tb_config_chain`: handshake, state holding, INIT clearing of random and
  illegal states, and refusal when full. `tb_config_chain` also checks the
  4N-1 step loading rate.
* `tb_lut6`, `tb_block_x`, `tb_block_p`, `tb_plb`: the logic block against
  reference models. This includes the dual-rail gate mapping and the
  C-element.
* `tb_switchbox_sd`: every select of the single-driver box against the
  subset rule, plus a two-box route that checks the twist and the latency.
* `tb_switchbox`, `tb_conn_box`, `tb_iob`: every switch of every style and
  box size against a model built from the switch-set formulas.
* `tb_safe_fpga`: the full 3x3 chip. It runs INIT from random power-up,
  then loads 4610 bits, checking every acknowledge, the refusal of one more
  token, and the stored image. Then it maps a dual-rail gate into a PLB,
  routes it from pads to pads, and runs evaluate/hold/precharge at the pins.
  Finally it erases the chip by INIT. It prints a count of each mechanism
  exercised.
* `tb_hop_mismatch`: the chip's hop-mismatch experiment.
  * One dual-rail wire runs from the bottom-left I/O block to the top-right
    one.
  * Rail 1 always crosses 5 switchboxes. Rail 0 crosses 0, 1, 3, 5 or 7
    boxes more.
  * For each case, a small router in the testbench builds the bitstream
    from the subset switchbox rule, and the chip is configured through the
    chain.
  * Four pulses are sent per rail. Each rail must arrive only on its own
    pad, and the arrival difference must equal the hop mismatch.
  * The electrical imbalance this causes in silicon is what the experiment
    measured. The model shows only the timing skew behind it.

To change the array size or channel width, set `NX`, `NY`, `W` on
`safe_fpga`. The configuration length follows from `cfg_total`. Switchbox
style is `STYLE`.
