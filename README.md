# BNRO data concentrator

A triggerless data-acquisition system receives short words (typically 16 or
32 bits) from many front-end links and has to hand them to a wide output
interface such as a PCIe DMA engine, which takes 256- or 512-bit words per
clock. Only part of what the links carry is worth keeping: "DAQ words" (hit
data) are mixed with idle words, time markers and status words that should be
dropped. Giving each link a fixed slice of the output word would leave holes
wherever a link had nothing useful to send, wasting bandwidth and host memory.

This concentrator takes 2^N links, one word per link per clock, drops the
non-DAQ words and packs the DAQ words without holes into 2^N-word output
records, keeping their order: older cycles first, and within one cycle,
lower-numbered links first. It accepts a full word on every link in every
cycle, so at full load it emits one complete record per clock. With the
default 16 links of 32 bits that is a 512-bit word per clock: 128 Gb/s at
250 MHz.

The packing is done by routing, not by buffering or by a faster clock. A
multistage interconnection network of 2x2 switches (a *baseline network with
reversed outputs*, BNRO) moves the k-th DAQ word of the cycle straight to the
next free word of the output record. What makes the design scale is that the
switch settings follow from a one-bit comparison per layer. There is no
lookup table; for 16 inputs a table would need 2^20 entries.

## A concentration cycle

The design keeps two 2^N-word registers: the **output record**, in which the
next output word is assembled, and the **auxiliary record**, which holds the
words that did not fit.

Suppose the output record already holds `occ` words (positions `0..occ-1`) and
`cnt` inputs carry DAQ words in this cycle. The k-th of them, counting from
input 0, goes to position `(occ + k) mod 2^N`:

* if `occ + k < 2^N`, that position is in the output record;
* otherwise the position has wrapped around, and the word is stored at the
  same position of the auxiliary record.

If `occ + cnt >= 2^N`, the output record is now complete. In the next cycle
it is pushed into the output FIFO. In the same clock edge the output record
loads the auxiliary record, and the new words of that cycle land behind those
words. The new occupancy is `(occ + cnt) mod 2^N`.

Example with 8 inputs. The record holds 5 words and 6 DAQ words arrive.
Three of them fill positions 5..7 and complete the record. The other three
wrap to positions 0..2 and go into the auxiliary record. In the next cycle
the complete record leaves, positions 0..2 are reloaded from the auxiliary
record, and the new words start at position 3.

Because `cnt <= 2^N` and `occ < 2^N`, at most `2^N - 1` words ever overflow.
One auxiliary record is therefore always enough, and the concentrator never
has to stall its inputs.

## The network

### Switches and layers

A switch has inputs `in0`, `in1`, outputs `out0`, `out1` and one control bit:
0 is *bar* (straight through) and 1 is *cross* (swapped). An N-layer network
has N layers of 2^(N-1) switches.

The network is defined recursively. A network with N+1 layers is a new first
layer followed by two N-layer networks. Switch s of the new layer takes
network inputs 2s and 2s+1. Its `out0` feeds input s of the *upper*
sub-network and its `out1` feeds input s of the *lower* sub-network. The
upper sub-network serves the even network outputs and the lower one the odd
outputs: the switch output chosen in the first layer is bit 0 of the output
number, the output chosen in the next layer is bit 1, and so on.

If the last layer is drawn in plain order, this numbering shows up as a
bit-reversed order of the outputs. That is where the name comes from, and it
is why the RTL ends with a bit-reverse renumbering stage (`dout[m]` is taken
from last-layer position `bitrev(m)`).

### Flat wiring used in the RTL

`bnro_network` does not instantiate itself recursively. It numbers the wires
of each layer by *position*: switch r owns positions 2r and 2r+1. Take the
output position of layer l as `{a, b, j}`, where `a` has l bits, `b` has
N-1-l bits and `j` is the switch output. That wire enters layer l+1 at
position `{a, j, b}`, so the low N-l bits rotate right by one
(`bnro_pkg::next_pos`). Written out, this gives the switch numbering of the
usual drawings: input k, on its way to output m, passes in layer l through
switch

    r = { bitrev(m[l-1:0]), k[N-1:l+1] }       entering on its input k[l]
                                                and leaving on its output m[l]

### Routing rule

From the line above, an input leaves each layer on its output `m[l]`. The
switch that input k meets in layer l must therefore be in cross mode exactly
when `k[l] != m[l]`. Any single word can be routed this way.

A general permutation would fail, because two words meeting in one switch
can need the same output. For concentration this collision never happens.
The two words that can meet in a layer-l switch come from inputs less than
2^(l+1) apart. The outputs reachable from one output of that switch are at
least 2^(l+1) apart. Concentration only removes words, so two words of one
cycle never end up further apart than they started. Hence two words in the
same switch never need the same switch output.

The controller checks this in simulation: an assertion fires if a switch is
ever asked to be in both modes at once.

## The controller

`conc_controller` does all of its work in one combinational step from the
DAQ flags and the occupancy register:

1. **Count and assign.** A prefix count over the flags gives each active
   input its rank k. Its target is `(occ + k) mod 2^N`. The total count and
   `occ + cnt` follow from the same count.
2. **Set the switches.** For switch `r = {a, b}` of layer l, the only inputs
   that can reach it are `k = {b, c}` (2^(l+1) candidates). Among them, the
   ones whose target satisfies `bitrev(m[l-1:0]) == a` actually pass through
   it. The switch is set to cross if such an input has `k[l] != m[l]`.
   Switches that carry no DAQ word stay in bar mode. The whole setting is an
   OR of comparisons, with no table, and costs about
   2^(N-1) * (2^(N+1) - 2) comparator terms (240 for N = 4).
3. **Strobes.** Output-record word p gets a write strobe if
   `occ <= p < occ + cnt`. Auxiliary word p gets an assembly strobe if
   `p + 2^N < occ + cnt`. The record is complete if `occ + cnt >= 2^N`.
4. **Update.** `occ <= (occ + cnt) mod 2^N`.

The longest path is the prefix count feeding the target comparisons. It
grows roughly linearly with the number of inputs. That is the limit to watch
when scaling to 32 or 64 inputs.

## Pipelining and timing

Each layer can have its switch outputs registered (parameter `PIPE`, one bit
per layer, bit l = layer l). These registers shorten the combinational path
through the network. They do not change the behaviour, only the latency
`LAT = $countones(PIPE)`.

All switch controls are computed in the cycle in which the data is at the
network input. Each layer's register also registers the controls of the
layers after it, so every layer sees the controls issued together with its
own data. Inside the controller the record strobes pass through a
`LAT`-stage delay line, so that they meet the words at the network output.

| cycle | event |
|---|---|
| t | DAQ words and flags at `din`/`daq`; switches set; occupancy updated |
| t+LAT | words at network output; write/assembly strobes active; records load at the end of the cycle |
| t+LAT+1 | `out_stb`: the complete record is written into the FIFO; the output record loads the auxiliary record |
| t+LAT+2 | record visible at `dout`, `dout_valid` high (if the FIFO was empty) |

With the default `PIPE = 4'b1111` the latency from input to output word is 6
clocks. With `PIPE = 0` it is 2 clocks.

## Interface of `bnro_concentrator`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst` | in | 1 | synchronous reset, active high |
| `din` | in | 2^N x `data_t` | one word per link, sampled every cycle |
| `daq` | in | 2^N | 1 = DAQ word (keep), 0 = non-DAQ word (drop) |
| `rd_en` | in | 1 | pop the FIFO head |
| `dout` | out | 2^N * `$bits(data_t)` | FIFO head; word 0 (oldest) in the least significant bits |
| `dout_valid` | out | 1 | FIFO not empty |
| `overflow` | out | 1 | sticky: a complete record met a full FIFO and was lost |

There is no back-pressure towards the links. The consumer must keep up on
average, and the FIFO absorbs short pauses.

Words that are still in a partly filled output record stay there until later
DAQ words complete it. There is no flush.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `LAYERS` | 4 | network layers N; 2^N inputs and record words (16) |
| `data_t` | `logic [31:0]` | type of one word (any packed type, e.g. a struct of source ID and payload); output word is 2^N times its width (512 bits) |
| `PIPE` | all ones | bit l registers the switches of layer l |
| `FIFO_DEPTH_LOG2` | 4 | output FIFO holds 2^4 = 16 records |

The defaults are the 16-input, 32-bit, 512-bit configuration that was built in
FPGA hardware for this architecture. That hardware was tested both with all
layers registered and with none. The all-registered variant is the default
here because it was the one that reached 250 MHz on both boards used. Five
layers (32 inputs) is the other configuration that was evaluated, in
simulation only. Six layers (64 inputs, 1024-bit words) needs only
`LAYERS = 6` and passes the same order-and-density test in simulation.

## Modules

| file | module | role |
|---|---|---|
| `rtl/bnro_pkg.sv` | package | `bitrev`, `next_pos`, `switch_index` index functions |
| `rtl/bnro_switch.sv` | `bnro_switch` | 2x2 bar/cross switch, optional output register |
| `rtl/bnro_network.sv` | `bnro_network` | N-layer BNRO, per-layer registers, bit-reverse output stage |
| `rtl/conc_controller.sv` | `conc_controller` | counting, targets, switch settings, strobes, occupancy |
| `rtl/aux_record.sv` | `aux_record` | auxiliary record |
| `rtl/output_record.sv` | `output_record` | output record with copy from the auxiliary record |
| `rtl/output_fifo.sv` | `output_fifo` | first-word-fall-through FIFO with overflow flag |
| `rtl/bnro_concentrator.sv` | `bnro_concentrator` | top level |

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

* `tb_bnro_switch`: bar and cross, combinational and registered.
* `tb_bnro_network`: random and concentrating switch settings at latency
  0, 3 and 4, checked against `tb/bnro_ref.svh`. That reference traces each
  input through the recursive definition rather than the flat wiring. The
  switch numbering is also compared with labels of the standard 16-input
  drawing.
* `tb_conc_controller`: routing checked by tracing every active input with
  the controller's own settings. Strobes and record completion are checked
  against an occupancy model, at latency 0 and 2.
* `tb_aux_record`, `tb_output_record`, `tb_output_fifo`: register and queue
  models.
* `tb_bnro_concentrator`: end to end at the default parameters. DAQ words
  carry consecutive integers, so the output must be 0, 1, 2, ... with no gap.
  The test checks:
  - the latency of 6 cycles;
  - one record per cycle at full load;
  - random densities and a stalling reader;
  - exact delivery of every complete record;
  - the cycle in which the FIFO overflows.
* `tb_conc_example`: the classic 8-input, three-cycle example (record fill
  0 -> 5 -> 3 -> 1 words), checking every output- and auxiliary-record word
  after each cycle, with and without pipeline registers. Its words are
  structs of link number and payload.
* `tb_conc_workloads`: 4 and 5 layers, each with no, all and selected
  pipeline registers, plus one 6-layer instance, at DAQ-word probabilities
  from 5 % to 100 %.

To run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/bnro_pkg.sv tb/tb_bnro_concentrator.sv --top-module tb_bnro_concentrator
    ./obj_dir/Vtb_bnro_concentrator

## Where this RTL departs from, or adds to, the published design

The following follow the published description: the network topology and
switch numbering, the bit-compare routing rule, the counting and assignment
of consecutive positions, the output and auxiliary records, the output FIFO,
per-layer optional pipeline registers, the single-cycle controller, and a
word type chosen by parameter.

The original implementation is in VHDL and is not reproduced here. The
following are choices of this RTL:

* Pipeline registers sit at the switch outputs, and controls for later
  layers are registered alongside the data.
* Strobe timing: `out_stb` comes one cycle after the completing cycle, and
  the same strobe triggers the auxiliary-to-output copy.
* A switch that carries no DAQ word is set to bar.
* Reset is synchronous and active high, and applies only to the control
  state. Data registers are not reset.
* The FIFO is first-word fall-through, 16 entries deep, and drops records
  when full, with a sticky `overflow` flag. The original hardware test used a
  512-to-64-bit converting FIFO as part of its PCIe readout; that belongs to
  the test setup and is not part of this concentrator.
* There is no input register. The controller and the first network layer see
  `din`/`daq` in the same cycle.
* The board-level test harness (input FIFO, data source, AXI registers,
  PCIe bridge) is not included; the testbenches take its place.

No timing or resource figures were measured for this RTL. The published FPGA
results (about 3.3-3.4 k LUTs for the 16-input concentrator at 250 MHz) apply
to the original implementation only.
