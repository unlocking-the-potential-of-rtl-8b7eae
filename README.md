# MCC: a fully parallel network of two-point cells in SystemVerilog

A conventional "point" neuron adds up everything it receives and passes the
result on, whether or not it is useful. A *two-point* cell, modelled on layer-5
pyramidal neurons, has two sites of integration. The basal site sums the
feed-forward input into a **receptive field R**. The apical site sums
**context C** from other parts of the network. The cell's output depends on
whether R and C agree. When they do not, the output is zero: the cell stays
silent.

In hardware a silent cell is cheap, and this design is built around that. A
zero output feeds a zero into every synapse of the next layer. The
multiply-accumulate (MAC) engine skips a zero input: no memory read, no
multiply and no register toggles. A network in which most cells learn to stay
silent therefore uses much less dynamic energy. The energy estimate behind the
design counts 4 clocks x 10 ns x 2 mW = 0.08 nJ saved for each skipped synapse
in one inference.

This RTL implements the multisensory cooperative computing (MCC) network
described by Adeel et al. for an audio-visual speech enhancement task. It was
first prototyped on a Xilinx UltraScale+ MPSoC. There are two sensory streams,
audio and video. They have the same layer structure, and a cell in one stream
uses what the other stream computes as its context. Every cell is a separate
hardware unit with its own weight memory, and all cells of a layer work at the
same time.

## The network

```
            audio features (22)                    video features (50)
                   |                                       |
          input_buffer (sel 0)                    input_buffer (sel 1)
                   |                                       |
  layer 1   24 audio ccpu  <--- R_i <-> R_i --->   24 video ccpu          Cu = 0
                   |  \                                /   |
                   |   +--> working_memory M1 <-------+    |
                   |              | m1 (broadcast as Cu)   |
  layer 2   12 audio ccpu  <------+------------------> 12 video ccpu
                   |  \                                /   |
                   |   +--> working_memory M2 (m_prev = m1)|
  layer 3    6 audio ccpu  <------ m2 -------------->  6 video ccpu
                   |  \                                /   |
                   |   +--> working_memory M3 (m_prev = m2)|
  layer 4   22 audio ccpu  <------ m3 -------------->  22 video ccpu
                   |                                       |
                 y_a[22]                                 y_v[22]
```

The default sizes are those of the prototype's shallow model: audio
22:24:12:6:22 and video 50:24:12:6:22. That gives 128 processing units and 3
working memories. They are parameters of `mcc_top` (`N_IN_A`, `N_IN_V`,
`N1`..`N4`), but the audio and video hidden layers must have the same width,
because unit *i* of one stream is paired with unit *i* of the other.

| module | role |
|---|---|
| `mcc_pkg` | default word format (Q3.12), memory depth, activation enum |
| `fxp_add`, `fxp_mul` | saturating fixed-point adder/subtractor and multiplier |
| `activation_block` | ReLU6 (or identity), chosen at compile time |
| `weight_mem` | 1024 x 16 block RAM per unit: 1023 weights and a bias |
| `mac_unit` | MAC FSM, 4-stage multiply-accumulate pipeline, zero skipping |
| `context_integrator` | C = ReLU6(Cp + Cd + Cu) |
| `modulatory_block` | Y = ReLU6(2R² + R + R + 2C(1+\|R\|)) |
| `ccpu` | one two-point unit: the five blocks above plus its output register |
| `working_memory` | cross-modal memory, gives the universal context |
| `mcc_layer` | N audio + N video units, paired |
| `layer_sequencer` | runs the layers in order |
| `weight_load_mux`, `input_buffer` | loading of weights and inputs |
| `mcc_top` | the whole network |

## Number format

Every value (feature, weight, bias, context, output) is a 16-bit two's
complement Q3.12 number. It has 1 sign bit, 3 integer bits and 12 fraction
bits, covering -8.0 (`0x8000`) to 7.99976 (`0x7FFF`) in steps of 2⁻¹². All
arithmetic saturates. It never wraps.

The format is a parameter of the whole design. `mcc_top` and every datapath
module take `W` (word width, default 16) and `F` (fraction bits, default 12),
and derive the word type and the constants 0, 1.0 and 6.0 from them. Setting
`W = 11, F = 7` builds the network in the 11-bit Q3.7 format. That is the
reduced precision the original work reports for its deep-model hardware
estimate. The bit positions below are for the default format. In general,
the multiplier keeps bits [F+W-1:F].

* `fxp_add` forms the exact 17-bit sum or difference. If that does not fit 16
  bits, it returns `0x7FFF` or `0x8000` and raises `ovf`.
* `fxp_mul` forms the 32-bit Q6.24 product and keeps bits [27:12]. Those are
  the 16 bits of the Q3.12 result; the 12 low bits are dropped, which rounds
  toward minus infinity. If bits [31:27] are not all equal, the product is out
  of range: it saturates and `ovf` is set. The original text speaks of "the
  upper 16 bits" of the product. Taken literally that is bits [31:16], which
  would be a Q6.8 number and break the Q3.12 data path. This design keeps the
  format.

## The processing unit (`ccpu`)

### Receptive field: MAC FSM and pipeline

Each unit has its own `weight_mem`. For a unit with `N_IN` inputs, words
0..N_IN-1 hold the weights in input order and word N_IN holds the bias. The
bias is treated as a weight whose input is hard-wired to 1.0, fetched after all
the others:

    R = sat( ... sat(sat(0 + w0*x0) + w1*x1) ... + bias*1.0 )

The MAC FSM in `mac_unit` advances the address by one every clock. The same
index selects the input through a multiplexer in the unit. Each synapse then
goes through four stages, so a multiply-accumulate takes 4 clocks while a new
synapse enters every clock:

| clock | stage | what happens |
|---|---|---|
| 1 | issue | weight address and input index presented |
| 2 | operands | weight read data and input registered (`w_q`, `x_q`) |
| 3 | multiply | product registered (`p_q`) |
| 4 | accumulate | `acc <= acc + p_q` |

**Zero skipping.** If the selected input is zero, the FSM lowers the memory
read enable, and the stage-valid bit for that synapse stays low. The operand,
product and accumulator registers are clock-enabled by those valid bits, so
none of them changes. The skip does not change the result, since w·0 = 0 and
adding 0 changes nothing. `mac_used` counts the products actually computed.

**Timing.** `start` is sampled on a clock edge; `valid` rises `N_IN + 4` edges
later and `acc` holds the result until the next `start`. The sticky `ovf` flag
reports whether any product or partial sum saturated.

### Context

The apical side receives three contexts:

* **Cp (proximal):** the unit's own output from the previous inference. This is
  the unit's output register `y`, so it carries over from one inference to the
  next and is zero after reset.
* **Cd (distal):** the receptive field R of the partner unit, the unit with the
  same index in the same layer of the other stream. This is how the video
  stream informs the audio stream and the reverse. With `CD_ALL = 1` it is
  instead the saturating sum of the R values of all units of the other
  stream in the layer.
* **Cu (universal):** the value broadcast by the working memory of the
  previous layer. It is zero for the first layer.

`context_integrator` adds them with saturation and applies ReLU6:
C = ReLU6(sat(sat(Cp + Cd) + Cu)). So C lies between 0 and 6.

### Modulatory function

`modulatory_block` computes the output from R and C:

    Y = ReLU6( 2R² + R + R + 2C(1 + |R|) )

It uses two multipliers. The steps run in this order, each saturating:
`rr = R*R`, `t1 = rr+rr`, `t2 = R+R`, `|R|` (as 0-R when R < 0),
`t3 = 1+|R|`, `cm = C*t3`, `t4 = cm+cm`, `s = (t1+t2)+t4`, `Y = ReLU6(s)`.
The order matters only when a step saturates, and the testbench reference
follows the same order.

How the function behaves: 2R² + 2R is negative only for -1 < R < 0, and the
context term 2C(1+|R|) is never negative. So a unit is silent when its drive
is weakly negative and the context does not lift it. A strong context can make
a unit fire that would be silent without it. A strong R or C drives the output
into the clip at 6.0.

The unit registers Y into `y` when the sequencer pulses `mod_en`. At that point
R of both partners must be valid.

## Cross-modal working memory (`working_memory`)

After layer *l* has produced its outputs, a working memory condenses both
streams into one number:

    m_l = w0 * m_(l-1) + Σ wa_i * a_i + Σ wv_i * v_i + bias

Here a and v are the audio and video outputs of layer l, and m_(l-1) is the
previous memory (zero for the first). The weight memory holds, in order: the
weight of m_(l-1), the N audio weights, the N video weights, then the bias. The
unit reuses `weight_mem` and `mac_unit`, so silent cells cost it nothing
either. m_l has no activation. It is broadcast as Cu to every unit of layer
l+1. The layer 1 memory has 49 inputs (m_prev, which is always zero here,
plus 24 + 24 outputs).

The equation comes from the network's formulation of the universal context.
Keeping a single scalar m per layer boundary is this design's choice; the
source does not give the width of the memory.

## Inference schedule and latency

`layer_sequencer` handles one layer at a time:

1. `layer_start[l]` (one clock) starts all 2·N_l units of layer l. It also
   starts the working memory that reads layer l-1, which produces layer l's Cu.
2. The sequencer waits until all those MACs are valid.
3. `mod_en[l]` (one clock) registers every unit's output.

The next layer reads those registered outputs. Per layer this costs
(longest MAC in the layer) + 7 clocks. "Longest MAC" is the largest fan-in
among the layer's units and its working memory:

| layer | longest MAC | clocks |
|---|---|---|
| 1 | 50 (video units) | 57 |
| 2 | 49 (memory M1) | 56 |
| 3 | 25 (memory M2) | 32 |
| 4 | 13 (memory M3) | 20 |
| **total** | | **165** |

`done` is seen 165 clocks after the clock that samples `start`. That is
1.65 µs at the prototype's 100 MHz; the prototype reported 1.60 µs for its
shallow MCC model. The original text does not describe its layer schedule, so
this close match should not be read as cycle equivalence.

## Loading weights and inputs

After power-up a processor copies the weights and inputs from external memory,
and a DMA engine streams them into the logic. The target memories are attached
to the stream one at a time by `weight_load_mux`. The processor, the DMA
engine and the external DDR are not part of this RTL. Their stream and the
target select are ports of `mcc_top`:

* `sel` picks the target. Then `s_valid`/`s_data` deliver words, with `s_last`
  on the final word. `s_ready` is always 1.
* Word n of a burst goes to address n of the target. The address restarts at 0
  after `s_last` and whenever `sel` changes. Writes land one clock after the
  word is accepted.

Target numbers:

| sel | target | words |
|---|---|---|
| 0 | audio input buffer | 22 |
| 1 | video input buffer | 50 |
| 2, 3, 4 | working memories after layers 1, 2, 3 | 50, 26, 14 |
| 5 + i | layer 1 audio unit i (i < 24) | 23 |
| 29 + i | layer 1 video unit i | 51 |
| 53 + i / 65 + i | layer 2 audio / video unit i (i < 12) | 25 |
| 77 + i / 83 + i | layer 3 audio / video unit i (i < 6) | 13 |
| 89 + i / 111 + i | layer 4 audio / video unit i (i < 22) | 7 |

Between inferences only the two input buffers need reloading.

## Top-level interface (`mcc_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `sel`, `s_valid`, `s_data`, `s_last` / `s_ready` | in / out | loading stream |
| `start` | in | one-clock pulse: run one inference (ignored while `busy`) |
| `busy`, `done` | out | inference running; one-clock pulse at the end |
| `y_a[22]`, `y_v[22]` | out | `W`-bit (default Q3.12) outputs of the two streams, valid from `done` to the end of the next inference's last layer |
| `mac_used` | out | products computed in the last inference, the "used MACs" figure of merit |
| `n_fired` | out | number of the 128 units with non-zero output |
| `n_sat` | out | units and memories whose weighted sum saturated |

At the default sizes, coarse synthesis gives about 17.9 k flip-flops. The
131 weight memories hold 2.1 Mbit, of which the shallow model uses 2930 words.

## Verification

Every module has a self-checking testbench in `tb/`. Each one drives the module,
compares it with an integer reference model (`tb/mcc_ref_pkg.sv`, exact wide
integer arithmetic then clamping) and ends with a `TB_RESULT checks=N failures=M`
line. Where latency is specified, the testbenches check clock counts too.

`tb_mcc_top` runs the full-size network at its default parameters. It loads all
133 targets through the stream and runs four inferences with new inputs each
time, so the proximal context carries over. It checks all 44 outputs,
`mac_used`, `n_fired`, `n_sat` and the 165-clock latency of every inference. It
also requires each mechanism to occur at least once, and it reports how often
each did. In a typical run there are about 2200 skipped zero synapses,
70 silent units, 340 outputs clipped at 6, 150 saturated sums, 60 units that
fire only because of their context, 12 non-zero universal contexts and 330
non-zero proximal contexts.

`tb_mcc_top_variant` runs the same test on the full-size network built with
both build options: `W = 11, F = 7` (Q3.7) and `CD_ALL = 1` (all-to-all
distal context). The reference model is switched to match. Both testbenches
share their body, `tb/mcc_top_check.svh`. `tb_mcc_layer` checks a small layer
in both distal-context modes side by side.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mcc_pkg.sv tb/mcc_ref_pkg.sv tb/tb_mcc_top.sv --top-module tb_mcc_top
./obj_dir/Vtb_mcc_top
```

Replace `tb_mcc_top` with any other testbench name (`tb_ccpu`, `tb_mac_unit`,
...). Verilator finds the RTL modules in `rtl/` by file name through `-I`/`-y`;
add `-y rtl` if your version needs it. The full-size build takes about half a
minute and the simulation well under a second. Lint with
`verilator --lint-only -Wall -Irtl rtl/mcc_pkg.sv rtl/mcc_top.sv`. The
remaining warnings are unused parameters of the package and the unused
overflow flags of the context and modulation arithmetic, whose results simply
saturate.

## How far this follows the original design

Taken from the original description:

* the Q3.12 format, and the 11-bit Q3.7 format as a build option
* the saturating adder, with its limits 0x7FFF and 0x8000
* a 16-bit multiplier with an overflow flag
* a 1023-weight + bias memory per unit, with the bias stored after the weights
  and its input hard-coded to 1
* a MAC FSM that advances the address every clock, and 4 clocks per MAC
* skipping zero synapses so they cause no switching
* the modulatory function in the form 2R² + R + R + 2C(1+|R|) with ReLU6
* ReLU clipped at 6
* the integrated context as an adder plus a non-linearity
* the cross-modal working memory
* all units physically present and working in parallel
* loading by multiplexing memories onto a DMA stream
* the layer sizes

Interpretations and choices of this design:

* **Multiplier bits:** [27:12] rather than the literal "upper 16 bits" (see
  *Number format*). The product is truncated and saturates on overflow.
* **Modulatory function:** the theory defines the transfer function as
  p(R² + 2RC + C(1+|R|)), with p a half-Gaussian. The hardware description
  rewrites it as p(2R² + R + R + 2C(1+|R|)) with p = ReLU6. The two are not
  algebraically equal. This design follows the hardware form. The original
  also says the rewritten form needs "two multipliers and two adders". It does
  use two multipliers, but it needs more than two additions.
* **Context sources:** Cp is the unit's own previous output. The other source
  mentioned, a neighbouring cell of the same stream, is not specified closely
  enough to build. By default Cd comes from the single partner unit in the
  other stream, as drawn in the two-unit block diagram. The text also says
  each unit is connected to *all* units of the other stream in its layer.
  The build option `CD_ALL = 1` (on `mcc_top` and `mcc_layer`) provides
  that. Cd is then the saturating sum of all R values of the other stream,
  added in unit order, with no weights. The sum is one adder chain per
  stream, shared by all units of the other stream.
* **No context weights:** the integrated context has no weights, following the
  "simple adder" description. The mathematical formulation weights each
  context.
* **Context non-linearity:** ReLU6 is used; the source does not name one.
* **Working memory:** one scalar per layer boundary, with no activation. The
  first layer receives no universal context.
* **Outputs:** each stream ends in its own 22 outputs, as in the shallow
  model's description. A figure of the multi-layer network instead merges both
  streams into one output layer.
* **Protocols:** the layer-by-layer schedule, the start/valid/done handshakes,
  the stream protocol, the target numbering, the reset values and the
  `mac_used`/`n_fired`/`n_sat` counters are all this design's own.

Not included:

* the Arm control processor, the DMA engine and the DDR memory (external parts)
* the reconfigurable interconnect, the "dynamic coordination control" circuits
  and the distributed main memories. These are drawn as a system-level vision,
  but their behaviour is not specified.
* the iterative single-layer variant
* the deep convolutional models. These were only estimated, not built, and
  would need far more than 128 units and a convolution datapath. Their 11-bit
  Q3.7 word format is supported, as described under *Number format*.
* training: the hardware computes inference only.
