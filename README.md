# MERINDA: a streaming GRU accelerator for model recovery

Model recovery estimates the coefficients of a system's differential equations from its measured
input and output traces. Examples are a glucose–insulin model, a predator–prey model and a flight
controller. A common approach trains a network with a neural-ODE layer. That layer calls an
iterative ODE solver many times per forward pass, and each solver step depends on the previous
one, so it parallelises poorly on hardware. MERINDA replaces the neural-ODE layer with an
equivalent recurrent block: a GRU (gated recurrent unit) followed by a small dense layer. The
dense layer emits the model coefficients directly. A GRU step is a fixed amount of
matrix–vector arithmetic plus two table lookups per unit, and that maps well onto FPGA fabric.

This repository holds synthesizable SystemVerilog for the GRU forward pass and the dense output
layer. The data path follows the published accelerator:

- four pipeline stages that run concurrently, joined by FIFOs;
- multiply–accumulate lanes fed from on-chip RAM that is split into banks, so every lane gets a
  weight each clock;
- sigmoid and tanh evaluated by table lookup;
- an AXI4-Stream data path and an AXI4-Lite control port.

Everything is 16-bit fixed point. At the default size, 16 hidden units and 2 inputs per step, a
200-sample glucose–insulin trace takes about 35,800 clocks, including loading all weights.

## What one run computes

For every time step t = 1..T, with input vector x_t (X words) and hidden state h (H words):

```
r_t  = sigmoid(Wr x_t + Ur h_{t-1} + br)          reset gate
z_t  = sigmoid(Wz x_t + Uz h_{t-1} + bz)          update gate
h~_t = tanh  (Wh x_t + Uh (r_t .* h_{t-1}) + bh)  candidate
h_t  = (1 - z_t) .* h~_t + z_t .* h_{t-1}         interpolation
```

After the last step, the dense layer maps h_T to OUT = P + Q values:

```
y = Wy h_T + by,   y[j] = max(0, y[j]) for j < P (model coefficients),
                   y[j] unchanged       for j >= P (input-shift values)
```

Every h_t (H words per step) and then the OUT dense outputs are sent back on the output stream.
The host can therefore use either the whole hidden trajectory or only the coefficients.

### Number format

- Every word is signed 16-bit Q4.12: 4 integer bits, 12 fraction bits, range [-8, 8), resolution
  1/4096. Weights, biases, activations and states all use this format.
- Products are formed exactly (32 bits, Q8.24).
- A dot product is accumulated in 48-bit lane registers, the width of a DSP48 accumulator, so the
  sum never overflows.
- The result is then shifted right by 12 with an arithmetic shift, which truncates towards minus
  infinity, and saturated to 16 bits.
- The element-wise products in stages 2 and 4 are narrowed the same way.
- The sum in stage 4 saturates.

The testbenches' reference model (`tb/tb_ref_pkg.sv`) repeats these rules from the equations, so
results are compared bit for bit.

## The four-stage pipeline (`gru_core`)

```
          x_t, h_{t-1}                                   h_{t-1}
              │                                              │
   ┌──────────▼─────────┐  {r_pre,z_pre}  ┌────────────────┐ │   rh buffer
   │ 1 gate_stage       ├──── FIFO rz ───▶│ 2 sigmoid_stage├─┴──▶ r .* h ──┐
   │  two PE arrays     │                 │  2 sigmoid LUTs│               │
   └────────────────────┘                 └───────┬────────┘               │
                                                  │ z                      │ (whole vector)
                                               FIFO z                      ▼
   ┌────────────────────┐    h_t[i]        ┌──────▼─────────┐   ┌────────────────────┐
   │ state buffer h     │◀─────────────────┤ 4 interp_stage │◀──┤ 3 candidate_stage  │
   │ (updated in place) │   result words ◀─┤  (1-z)c + z h  │ c │  PE array + tanh   │
   └────────────────────┘                  └────────────────┘FIFO└──────────────────┘
```

Each stage takes one hidden unit per clock, and units flow from stage to stage as soon as they
are ready:

- stage 2 handles unit i while stage 1 is still computing unit i+1;
- stage 4 blends unit i as soon as both its z and its candidate have arrived.

Two waits remain, and both come from the equations, not from the hardware:

1. **Stage 3 needs the whole r .* h vector.** Each candidate row multiplies Uh with all H
   entries of r .* h. Stage 3 is therefore started one clock after stage 2 writes the last unit of
   the step.
2. **Step t+1 needs the whole h_t.** Its gate products use every unit of h_t. A step is
   launched only when the previous one has left stage 4. Meanwhile the next step's inputs are
   already collected into a second input buffer, so the launch happens on the very next clock.

With the default sizes, one step takes 173 clocks from launch to launch:

- 80 clocks for stage 1: 16 rows of 5 beats;
- 80 clocks for stage 3;
- about 13 clocks of pipeline fill and the hand-over between stages.

Stage 2 and stage 4 are hidden under stages 1 and 3. The end-to-end testbench checks this
interval.

The hidden state lives in registers and is updated in place by stage 4. Stages 1 and 3 of a
step have finished reading h before stage 4 writes it, so no second copy is needed. The
r .* h vector and the two input vectors are registers as well. The weights are in the banked
memories inside stages 1 and 3 and the dense layer.

The FIFOs are 256 words deep, in line with the published design. Within one step no FIFO holds
more than H words, so at the default size the depth is never reached. Back-pressure can still
reach the PE arrays if the output stream is not drained: each engine simply holds its state.

### Pipeline timing in more detail

| event (no back-pressure) | clocks after the step's launch (≈: within a few clocks) |
|---|---|
| first {r_pre, z_pre} pair leaves stage 1 | 5 + 3 = 8 |
| further pairs | every 5 clocks |
| r .* h of unit i written by stage 2 | pair i + 2 |
| stage 3 started | one clock after the last r .* h write, ≈ 86 |
| first candidate | stage-3 start + 9 (5 beats + 3 + 1 for the table) |
| h_t[i] written by stage 4 | candidate i + 1 |
| next launch (measured) | 173 |

## PE array and banked weight memory (`dot_engine`, `weight_bank_mem`, `mac_lane`)

A gate's input matrix W (H × X) and recurrent matrix U (H × H) are stored side by side as one
H × (X+H) array [W | U]. The operand vector is [x_t ; h_{t-1}], so each row is a single dot
product of X+H = 18 terms.

A PE array (`dot_engine`) has UNROLL = 4 multiply–accumulate lanes and works through one row at
a time. The row is split into NB = ceil(18/4) = 5 *beats* of four columns, and lane l takes
column 4·beat + l. At the end of a row the four lane sums and the bias (scaled to Q8.24) are
added, then narrowed to Q4.12. Columns past the end of the row contribute zero.

The memory behind the engine is split cyclically by column into BANKS banks. Column c lives in
bank c mod BANKS, at word row·ceil(COLS/BANKS) + c/BANKS. Each bank has two read ports, so
2·BANKS weights can be read per clock. A beat of UNROLL weights therefore takes

```
II = ceil(UNROLL / (2·BANKS)) clocks
```

| UNROLL | BANKS | read ports | clocks per beat | clocks per row (18 columns) |
|---|---|---|---|---|
| 4 | 1 | 2 | 2 | 10 |
| 4 | 2 | 4 | 1 | 5 |
| 4 | 4 | 8 | 1 | 5 |

The default is four banks per array. With four banks, lane l always reads bank l.

Stage 1 runs two engines side by side: one for r, one for z. Each has its own four-bank memory,
so the stage reads eight weights per clock. Each engine on its own needs only four per beat, so
two banks would already give one beat per clock. Four banks follow the published partition
factor and leave read ports spare for UNROLL = 8. `tb_dot_engine` runs the same product from memories of 1, 2 and 4 banks and checks these
intervals, and the latency to the first result, to the clock:

- first row: NB·II + 3 clocks after `start` (read, multiply–accumulate, reduce);
- later rows: one every NB·II clocks.

When the consumer does not take a result, the whole engine holds, including the RAM output
register.

The weight memories have a write port, so weights can be loaded from the input stream at run
time. Loading takes one word per clock and happens only while the engines are idle. The read
ports are registered, like a block RAM output.

## Activation tables (`sigmoid_lut`, `tanh_lut`)

Each nonlinearity is a 256-entry table with one clock of latency:

- The Q4.12 input is shifted right by 8, which gives a signed 8-bit index. Each entry covers
  1/16 of the input range.
- Entry k holds round(4096 · f((k + 0.5)/16)), the function at the middle of its interval.
- Worst-case error is about half an interval times the steepest slope. That is ≈ 0.008 for the
  sigmoid and ≈ 0.031 for tanh, at the origin.

The tables are computed during elaboration from this formula with `$exp`, so there is no data
file. For a finer table, raise `STEP_BITS`; the table then has 2^(4+STEP_BITS) entries.

## Dense output layer (`dense_relu`)

The dense layer is the same PE array and banked memory type, over an OUT × H matrix Wy with bias
by. It runs once, after the last step, on the final state h_T. The first P outputs pass through
ReLU; the last Q are linear. With P + Q = 8 outputs of 4 beats each, it takes 8·4 + 4 clocks.

## Streams and control (`mem_reader_writer`, `axil_ctrl`)

### Input stream

The input stream is AXI4-Stream with 128-bit beats of eight 16-bit words. Word 0 is in bits
15:0. Beat boundaries carry no meaning: a run is one continuous word sequence.

1. If CTRL.load_params is set, all parameters, in this order. Matrices are sent row by row,
   column 0 first, and a [W|U] row holds the X input weights, then the H recurrent weights.
   - [Wr|Ur] (H × (X+H))
   - [Wz|Uz] (H × (X+H))
   - [Wh|Uh] (H × (X+H))
   - br (H)
   - bz (H)
   - bh (H)
   - Wy (OUT × H)
   - by (OUT)

   At the default size that is 1048 words.
2. h_0: H words.
3. x_1 … x_T: X words per step.

Unused words in the last beat are ignored. Parameters stay loaded between runs, so later runs on
the same model send only h_0 and the inputs. The GRU starts as soon as h_0 is in, while the
inputs are still arriving. An input word is only taken when the core has room for it.

### Output stream

The output stream carries h_1 … h_T (H words each), then the OUT dense outputs, packed the same
way. The beat with the last word has `tlast` set, and its unused words are zero.

### Registers (AXI4-Lite, 32-bit)

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | W/R | bit 0: write 1 to start a run (ignored while busy); bit 1: load parameters first |
| 0x04 | STATUS | R | bit 0 busy, bit 1 done (set at the end of a run, cleared by the next start) |
| 0x08 | SEQ_LEN | W/R | number of time steps T (1 … 65535) |
| 0x0C | CYCLES | R | clocks the last run was busy |

A write needs address and data valid in the same clock. Responses are always OKAY. `irq_done`
pulses when the last output beat has been accepted.

### A run, step by step

1. Write SEQ_LEN.
2. Write CTRL = 3 for the first run, or 1 to reuse the loaded parameters.
3. Stream the words in.
4. Drain the output stream until `tlast`.
5. Poll STATUS.done, or wait for `irq_done`.

## Size at the default parameters

Coarse synthesis of `merinda_top` gives about:

- 2,060 word-level cells;
- 3,900 flip-flop bits;
- 46,000 memory bits: the banked weight arrays (17,400), three table instances (12,300) and the three FIFOs (16,400).

The multipliers are 16 lanes (four engines of four lanes: r, z, candidate, dense) plus three
element-wise multipliers (one in stage 2, two in stage 4). The RTL does not force a DSP or LUT mapping; that is left to synthesis.

## Where this design departs from the published accelerator

- **Time-step overlap.** The published description has each stage working on a different time
  step at once. The GRU recurrence rules that out for a single sequence: step t+1's gates need
  h_t. Here the stages overlap within a step, and the next step starts as soon as h_t is
  complete. Running several independent sequences interleaved would allow the cross-step
  overlap; that is not built.
- **Update equation.** Two forms of the state update appear in the source. The one used is the
  standard GRU form, h = (1−z)·h~ + z·h_prev, which matches the listed hardware stages.
- **Accumulator width.** The published accumulators are 12–16 bits. Here the lane sums are 48
  bits and results are narrowed afterwards. Narrow accumulators would overflow on 18-term dot
  products.
- **[W | U] concatenation.** Input and recurrent weights share one array and one dot product per
  row. The published design keeps them as separate arrays.
- **Bias storage.** Biases are in registers rather than RAM, and are added in the reduction
  step.
- **Interconnect.** The published block diagram connects the units through an AXI crossbar.
  Here they are wired point to point, through FIFOs and buffers, as the published dataflow
  description has it.
- **DSP / LUT mapping.** The RTL carries no vendor attributes. The multipliers of the MAC lanes
  and of stages 2 and 4 are plain `*` operators, which FPGA synthesis maps to DSP slices, and the
  activation tables are small ROMs, which it maps to LUTs or block RAM. The published sweep that
  moves whole stages between DSP and LUT logic is a synthesis setting and is not reproduced.
- **Nonlinearities.** Only plain lookup tables are built, not the piecewise-linear variant.
- **ARRAY_RESHAPE.** Wide-word weight packing is not built; cyclic banking alone reaches one
  beat per clock.
- **Dense layer.** It is one layer, applied to h_T only. The source names a multi-layer
  perceptron but gives no layer sizes.
- **Memory interface.** The memory reader/writer uses AXI4-Stream ports on both sides and relies
  on external DMA engines, rather than AXI master ports.
- **Sizes.** Hidden size H = 16, input width X = 2, P = 6 and Q = 2 are this design's choices;
  the source gives no numbers. The lane count, bank count, FIFO depth, stream width and
  word-size range are the published ones.
- **Published cycle counts.** They are for an unstated network size, so they cannot be compared
  with the 173 clocks per step measured here.
- **Not included.** The surrounding system: DDR, DMA engines, the AXI interconnect and the host
  processor. Also the training side of model recovery: sparsity dropout, the Runge–Kutta
  reconstruction, the loss and back-propagation.

## Fitting other problems

| problem | states / inputs | fits at defaults? |
|---|---|---|
| glucose–insulin trace, 200 samples | X = 2 | yes, T = 200 is the end-to-end test size |
| predator–prey (lynx–hare) | X = 2, 4 coefficients | yes |
| Lorenz system | X = 3, 7 coefficients | after setting X = 3, P = 7, Q = 0 |
| F8 aircraft | 3 states + 1 input, 20 coefficients | after setting X = 4, P = 20, Q = 1 |

Only parameters change. The stream layout, the register map and all timing formulas follow from
H, X, P, Q, UNROLL and BANKS. `tb_workload_sizes` builds the accelerator at the Lorenz and F8
sizes above and runs a 60-step sequence through each, checking every output word. Both keep the
173-clock step, because X + H still takes ceil((X + H) / 4) = 5 beats.

## Files

| file | role |
|---|---|
| `rtl/merinda_pkg.sv` | number format, parameter-write bus, fixed-point helpers |
| `rtl/merinda_top.sv` | top level: control, streams, GRU core, dense layer |
| `rtl/axil_ctrl.sv` | AXI4-Lite registers |
| `rtl/mem_reader_writer.sv` | stream unpacking/packing |
| `rtl/gru_core.sv` | the four stages, FIFOs, state buffers, step sequencing |
| `rtl/gate_stage.sv`, `sigmoid_stage.sv`, `candidate_stage.sv`, `interp_stage.sv` | stages 1–4 |
| `rtl/dense_relu.sv` | dense output layer |
| `rtl/dot_engine.sv`, `weight_bank_mem.sv`, `mac_lane.sv` | PE array, banked weights, MAC lane |
| `rtl/sigmoid_lut.sv`, `tanh_lut.sv` | activation tables |
| `rtl/stream_fifo.sv` | stage-to-stage FIFO |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_ref_pkg.sv` | independent fixed-point reference used by the testbenches |
| `tb/tb_workload_sizes.sv`, `tb/workload_run.sv` | whole runs at the Lorenz and F8 sizes |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. With Verilator 5, from the
repository root:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/merinda_pkg.sv tb/tb_ref_pkg.sv tb/tb_merinda_top.sv --top-module tb_merinda_top
./obj_dir/Vtb_merinda_top
```

Replace `tb_merinda_top` with any other `tb_<module>` to run a unit test.

`tb_merinda_top` runs the full design at its default parameters:

- Run 1 loads random parameters and a 200-step sequence. It stalls the input and output streams
  at random.
- Run 2 reuses the parameters for a 6-step sequence without stalls.

It compares every output word with the reference model and checks the status and cycle
registers. It also checks the 173-clock step interval. Finally it counts, and requires at least
once, each mechanism: the recurrence wait, stage 3 waiting for r .* h, output back-pressure,
FIFO backlog, input starvation, ReLU clamping and parameter reuse. It finishes in well under a
second.

The unit testbenches check their block against values computed in the testbench. Where the block
has a fixed rate, they also check the clock counts:

- the dot engine's II for 1, 2 and 4 banks;
- stage latencies;
- one pair per clock in stage 2;
- the step interval of the core.

## Changing the design

- **Hidden size, input width and output counts:** the H, X, P and Q parameters of `merinda_top`.
  The parameter stream grows accordingly.
- **Lanes and banks:** UNROLL and BANKS. The clocks per beat follow ceil(UNROLL/(2·BANKS)).
  More lanes than 2·BANKS read ports cost extra clocks per beat rather than failing.
- **Number format:** DATA_W and FRAC in `merinda_pkg`. The tables rebuild themselves. The
  testbench reference assumes Q4.12 and must be changed with them.
- **State width:** the state buffers are registers, fine for tens of units. Much larger H would
  call for moving h and r .* h into RAM with one read port per consumer.
