# A spiking-neural-network decision-feedback equaliser for PAM-4 optical links

A short-reach intensity-modulation / direct-detection (IM/DD) fibre link
distorts the signal in a way no linear filter can undo. Chromatic dispersion
spreads each symbol over its neighbours. The photodiode then squares the field,
which makes that inter-symbol interference nonlinear. A decision-feedback
equaliser (DFE) handles this well. It looks at the current and recent received
samples, and also at the symbols it has already decided. Here the nonlinear map
from those taps to a decision is a small recurrent spiking neural network
(SNN) of leaky-integrate-and-fire (LIF) neurons. Neurons pass 1-bit spikes to
each other, not multi-bit activations. So the recurrent layer needs no
multipliers: it only adds the weights of the neurons that fired.

This repository is synthesizable SystemVerilog for that equaliser. It uses the
optimised "SNN_72" network with 8-bit quantisation:

| quantity                               | value |
|----------------------------------------|-------|
| equaliser taps `n_tap`                 | 17 (current symbol + 8 past symbols + 8 past decisions) |
| modulation                             | PAM-4, 4 classes |
| input neurons `N_I`                    | 8·(8+1) + 4·8 = 104 |
| hidden LIF neurons `N_H`               | 72 |
| SNN time steps per symbol `T`          | 5 |
| weights, biases, voltage, current      | 8 bit |
| multiply-accumulates per symbol        | N_H·(N_I + 2·N_H + 4)·T = 90 720 |

The RTL is this design's own. The topology, its sizes, the 8-bit precision and
the shift-based LIF neuron come from the published description of the
equaliser. Many details were not published: number formats, degree of
parallelism, stream formats and parameter loading. These are marked below as
this design's choices.

## Data flow

```
 s_axis (encoded received symbol)
    |
 tap_buffer ── 104 inputs, step 0; zeros for steps 1..4
    |
 FC0  linear 104 -> 72 (+bias)       activations, 8 bit
    |
 FC1  linear 72 -> 72                input current, 8 bit
    |
 FC2 + LIF cells (lif_recurrent_layer)   72 spikes per step
    |      ^__ spikes of the previous step (recurrent FC2)
 FC3  linear 72 -> 4 (+bias)         4 scores per step
    |
 decision_unit ── sum over 5 steps, argmax
    |                         |
 m_axis (decided class)       '--> back into tap_buffer as the newest decision
```

Every stage is its own module. Stages are joined by valid/ready streams that
carry one whole vector per transfer, plus two tag bits: "first time step" and
"last time step". While a symbol is in flight, its five time steps overlap in
the pipeline: FC0 works on step 2 while FC1 works on step 1. The next symbol
cannot start until its taps include the decision for this one. So exactly one
symbol is in flight, and throughput is one symbol per latency. The published
measurements show the same thing: 1957 ns latency and 511 kBd throughput are
reciprocals.

## The taps and the feedback loop (`tap_buffer`)

The tap line keeps three things:

- the encoded current received symbol;
- the 8 previous received symbols;
- the 8 previous decisions, each one-hot over the 4 classes.

Each received symbol comes as 8 input-neuron values in {-1, 0, 1}. The host
computes them with a spike encoding that lies outside this RTL. Each value is
a 4-bit two's-complement number. The network input vector is, element 0 first:

```
[ rx(n)[0..7] | rx(n-1)[0..7] ... rx(n-8)[0..7] | est(n-1)[0..3] ... est(n-8)[0..3] ]
     0..7           8..15            64..71          72..75            100..103
```

Element k of `est(n-j)` is 1 if decision n−j was class k, and 0 otherwise.
After reset both histories are all zero, so there is no decision yet.

For each symbol the buffer sends this vector as time step 0, then four
all-zero vectors. The network is recurrent, so it keeps working on the symbol
through the later steps. The buffer then waits for the decision: `fb_valid`
is the output handshake of the top. It shifts that decision into the history
and only then accepts the next symbol. This wait makes the design a DFE, not a
feed-forward equaliser.

The set order in the vector, the one-hot code and the reset state are this
design's choices. If a trained network expects another order, change the
assembly loop in `tap_buffer.sv`, or permute the FC0 weight columns when
loading them.

## The LIF neuron and its fixed-point arithmetic (`lif_neuron`)

This is the part to read carefully when loading a trained network.

Each hidden neuron has a membrane voltage `v` and a synaptic current `i`. One
time step is the discrete LIF step with a 1 ms step size. Its order is that of
the Norse LIF cell the network is trained with:

```
v_dec = v + ((v_leak − v + i) >>> 3)        dt/τ_m = 1/8   (τ_m = 125)
i_dec = i − (i >>> 2)                       dt/τ_s = 1/4   (τ_s = 250)
z     = v_dec > v_th                        spike
v'    = z ? v_reset : v_dec
i'    = sat8(i_dec + i_ff + i_rec)          current jump
```

- `i_ff` is this step's FC1 output.
- `i_rec = (Σ_{k : z_prev[k]=1} V[n][k]) >>> 2` is the recurrent term: the
  FC2 weights of neurons that fired in the previous step.

Both time constants were moved from their usual values (100, 200) to 125 and
250. That turns both multiplications into shifts. So a neuron costs two
subtractions, two shifts, an add and a compare.

Some consequences are easy to miss:

- A spike is seen one step after it is caused. The current jumps at the end of
  the step, and the voltage only follows it in the next step. At step 0 no
  neuron can fire, so with T = 5 spikes occur in steps 1–4.
- The comparison is strict, `v_dec > v_th`. A voltage exactly at threshold
  does not fire.
- The shifts round toward minus infinity. A small negative current therefore
  decays to 0, not to −1: `-1 - (-1 >>> 2) = 0`.
- The neuron state is cleared at time step 0 of every symbol, so symbols do
  not carry state from one to the next.
- All arithmetic is done wide, and `v` and `i` are saturated to 8 bits.

Number formats (choices, in `snn_pkg`):

| signal                          | width | fraction bits | range |
|---------------------------------|-------|---------------|-------|
| input neuron values             | 4     | 0             | {-1,0,1} |
| weights and biases              | 8     | 6             | [-2, 2) |
| FC0 activations, `v`, `i`       | 8     | 4             | [-8, 8) |
| `v_th`                          |       |               | 1.0 (= 16) |
| `v_reset`, `v_leak`             |       |               | 0 |

So FC0 shifts its accumulator right by 2 and FC1 by 6, and the recurrent sum
is shifted by 2. FC3 does not requantise: its scores stay at weight scale.
Biases (FC0 and FC3 only) are added at accumulator scale. For both layers
that scale has 6 fraction bits, the weights' format. FC1 and FC2 have
no bias, as in the Norse recurrent LIF cell. To load a network trained with
other scales, change `W_FRAC` and `S_FRAC` in `snn_pkg`; the shifts follow
from them.

## Folding and timing (`linear_layer`, `lif_recurrent_layer`)

Each layer is folded like a FINN matrix-vector unit. `PE` output neurons each
take `SIMD` inputs per clock, so a vector takes `F = (rows/PE)·(cols/SIMD)`
clocks. The defaults are in `snn_pkg`:

| layer       | shape      | PE | SIMD | F (clocks per step) |
|-------------|------------|----|------|---------------------|
| FC0         | 104 → 72   | 8  | 8    | 117 |
| FC1         | 72 → 72    | 8  | 8    | 81  |
| FC2 + LIF   | 72 → 72    | 8  | 8    | 81  |
| FC3         | 72 → 4     | 4  | 8    | 9   |

FC0 multiplies 4-bit ternary inputs by 8-bit weights. FC1 multiplies 8 × 8
bits. FC2 and FC3 take spikes, so they only add or skip weights.

A stage takes an input vector, works for F clocks, and holds its result until
the next stage takes it. It can take a new input in that same clock. When FC0
is the slowest stage, the clocks from the input handshake on `s_axis` to
`m_axis_tvalid` are:

```
L = T·(F0+1) + (F1+1) + (F2+1) + (F3+1) + 1  =  765 clocks
```

One symbol takes L + 2 clocks when the output is never stalled. The published
latency is only given in nanoseconds, without a clock frequency, so no cycle
target can be derived from it. Reaching a given symbol rate is a matter of PE
and SIMD: raise them on FC0 first. Each PE/SIMD pair must divide its layer's
dimensions, and an elaboration-time check enforces this.

The LIF layer keeps two spike vectors. `z_prev` holds the previous step's
spikes and feeds FC2. `z_new` collects the current step's spikes group by
group. `z_prev` is replaced only when the whole step is done, so all 72
neurons of a step see the same previous spikes, as in the equations.

## Interfaces of `snn_dfe_top`

| port | meaning |
|------|---------|
| `clk`, `rst_n` | clock; asynchronous active-low reset (histories and state cleared, weights kept) |
| `s_axis_tvalid/tready/tdata[31:0]/tlast` | one encoded received symbol per beat, value k in `tdata[4k+3:4k]` |
| `m_axis_tvalid/tready/tdata[7:0]/tlast` | decided class 0..3 in `tdata[1:0]`, `tlast` copied from the input beat |
| `cfg_we, cfg_sel[2:0], cfg_row[7:0], cfg_col[7:0], cfg_data[7:0]` | write one weight or bias per clock |

Class k is PAM-4 amplitude level k, from low to high. Mapping classes to Gray
bits is left to the consumer.

`cfg_sel` values (`snn_pkg::cfg_sel_e`):

| value | target | row | col |
|-------|--------|-----|-----|
| 0 | FC0 weight | hidden neuron (0..71) | input (0..103) |
| 1 | FC0 bias   | hidden neuron | – |
| 2 | FC1 weight | hidden neuron | FC0 output (0..71) |
| 3 | FC2 (recurrent) weight | hidden neuron | neuron whose spike it weights |
| 4 | FC3 weight | class (0..3) | hidden neuron |
| 5 | FC3 bias   | class | – |

Load the network while no symbol is in flight. Weight memories are not reset.
They read without a clock, in LUT-RAM style, and hold 18 144 weights and 76
biases in all.

In the intended system, a processor encodes the received samples, places them
in shared memory, and streams them in and out through DMA over these two
AXI-Stream ports. Those parts are not included.

## Departures from and gaps in the published description

- The published LIF equation for the voltage has the sign of the current term
  reversed compared with its own text and plot. The RTL follows the text, the
  plot and the Norse model: current raises the voltage.
- The text says a neuron fires when the voltage *exceeds* the threshold, and a
  figure caption says *reaches*. The RTL uses "exceeds" (`>`).
- Not published, chosen here:
  - the fixed-point split of the 8 bits;
  - requantisation by shift and saturation;
  - bias scale;
  - PE/SIMD values;
  - tap order;
  - one-hot decisions;
  - state clearing per symbol;
  - tie-breaking (lowest class index);
  - stream word formats;
  - the parameter-loading port.
- The input encoding of received samples is not part of the RTL. It runs in
  software and is only referenced by the published description.
- Supported variants:
  - The 56-neuron variant ("SNN_56") runs on this hardware unchanged. Load its
    weights and leave the other 16 neurons' weights and biases at zero; they
    never fire and do not affect the outputs. Or set `NH = 56` with PE/SIMD
    values that divide 56.
  - 6-bit and 4-bit quantised variants need `STATE_W` and `WGT_W` changed if
    they are to be bit-exact.
  - The 41-tap, 80-neuron, 10-step reference network needs larger sizes
    (`N_I` = 248): change `N_TAP`, `N_H` and `T_STEPS` in `snn_pkg`.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the module
against an integer reference written separately, counts how often the
mechanism under test occurred, and fails if one never did:

| testbench | what it checks |
|-----------|----------------|
| `tb_lif_neuron` | all 65 536 (v, i) pairs with random inputs; threshold edge; saturation |
| `tb_weight_mem` | full 72×104 memory, every fold and lane; ignored out-of-range writes |
| `tb_linear_layer` | FC0 shape (signed, saturating, bias) and FC3 shape (spike inputs); random stalls; latency = 117 |
| `tb_lif_recurrent_layer` | 12 symbols × 5 steps; recurrent term, per-symbol clear, stalls; latency = 81 |
| `tb_tap_buffer` | tap vector layout, zero steps, tags, waiting for feedback, end-of-burst flag |
| `tb_decision_unit` | sums, argmax with ties, hold while stalled |
| `tb_workload_bursts` | two 1000-symbol bursts at the default size: a 72-neuron network, then a 56-neuron network zero-padded into the 72-neuron hardware and checked against a 56-neuron model |
| `tb_snn_dfe_top` | the whole equaliser at its default size: 96 symbols through a random network, every decision against a model of the full network and DFE loop, latency 765 per symbol, all 4 classes, spikes, saturations, stalls |

With plain Verilator (5.x), for example:

```
verilator --binary --timing --assert -y rtl rtl/snn_pkg.sv tb/tb_snn_dfe_top.sv \
          --top-module tb_snn_dfe_top
./obj_dir/Vtb_snn_dfe_top
```

Each testbench prints `TB_RESULT checks=N failures=M` at the end. The top-level
test runs at the default parameters in well under a second.

The tests use random weights, not a trained network, so they show that the
RTL computes the stated arithmetic exactly. They do not show bit-error-rate
performance on a channel. That needs trained weights, quantised to the
formats above.
