# Flow v_t anomaly trigger: a single-pass normalizing-flow score at 40 MHz

A Level-1 trigger at the LHC has to decide, within a few hundred nanoseconds and
for every bunch crossing (one every 25 ns), whether to keep an event. An
*anomaly* trigger keeps events simply because they look unlike ordinary
Standard-Model collisions, without targeting any particular new-physics signal.

This design computes such a decision with a **continuous normalizing flow**
trained by flow matching. The flow is a small neural network `v_t(x, t)` that
gives, for a point `x` and a time `t`, the velocity that carries data toward a
Gaussian. The textbook anomaly score, the Gaussian likelihood at the end of the
trajectory, needs an ODE solved over many network evaluations, which is far too
slow for a trigger. Here the score is instead the **squared length of the
velocity at the data point itself**, evaluated once at `t = 1`:

    score(x) = sum_i v_t(x, t=1)_i ^ 2

Background events sit where the flow was trained and need only a small push;
unusual events need a large one. One forward pass of a 58-16-16-57 network and a
sum of squares is all the hardware does, so it fits in a fully pipelined
datapath that accepts one event every clock.

## The event and its 58 network inputs

An event is a fixed-size table of 19 objects by 3 quantities (transverse
momentum pT, pseudorapidity eta, azimuth phi):

| rows  | object                          |
|-------|---------------------------------|
| 0-3   | muons                           |
| 4-7   | electrons                       |
| 8-17  | jets                            |
| 18    | missing transverse energy (MET) |

Slots for absent objects are zero. The MET has no eta; its eta slot is forced to
zero. `fad_preprocess` flattens the table row by row (input index =
`row*3 + column`, so MET eta is index 55). It scales each feature as
`(x - mean) >>> shift`: standard scaling with the standard deviation rounded to
a power of two. Then it appends the time input `t = 1.0` as word 57. Per-feature
`mean` and `shift` are run-time constants. Writing `mean = 0, shift = 0` turns
the scaling off if it is done upstream.

## Number formats

Every word is two's-complement fixed point. The total widths come from the
quantised network this design reproduces. The binary-point positions are this
design's own choice, and they are all in `fad_pkg`:

| quantity                  | width | format            | package constants |
|---------------------------|-------|-------------------|-------------------|
| features, activations     | 18    | Q8.10 (signed)    | `DW`, `DF`        |
| biases                    | 18    | Q8.10 (signed)    | `BW`              |
| weights                   | 12    | Q4.8 (signed)     | `WW`, `WF`        |
| anomaly score, threshold  | 23    | Q15.8 (unsigned)  | `SW`, `SF`        |
| scaling shift             | 4     | 0..15             | `SHW`             |

Inside a layer nothing is rounded. Products are 30 bits and are summed exactly
by the adder tree. The bias is shifted left by `WF` to line up with the products.
Only the final result is cast back to Q8.10. The cast drops `WF` bits by an
arithmetic shift, which rounds toward minus infinity, and it **saturates**
instead of wrapping. The score is also summed exactly: squares are 36 bits with
20 fractional bits. It is then cast to 23 bits by dropping 12 bits and
saturating at `2^23 - 1`. Saturating keeps a very anomalous event above any
threshold. A wrapped value could fall below the threshold and lose the event.

## Datapath

```
 feat[19][3] ─► fad_preprocess ─► z[58] ─► fad_dense 58→16 ─► fad_relu
   (1 cycle)                               (8 cycles)
           ─► fad_dense 16→16 ─► fad_relu ─► fad_dense 16→57 ─► v[57]
              (6 cycles)                     (6 cycles)
           ─► fad_sqnorm ─► fad_trigger ─► score, anomaly
              (8 cycles)    (1 cycle)
```

* **`fad_dense`** is a fully parallel layer. In its first stage every
  weight × input product is formed and registered: 928, 256 and 912 multipliers
  for the three layers. One pipelined adder tree per output neuron sums its row,
  with one register per tree level. The last stage adds the bias, casts and
  saturates. Its latency is `ceil(log2 N_IN) + 2` cycles.
* **`fad_adder_tree`** is the shared pipelined tree. An odd word at the end of a
  level passes through unchanged. The output is `ceil(log2 N)` bits wider than
  the input, so it never overflows.
* **`fad_relu`** is combinational. It sits between a dense layer's output
  register and the next layer's product stage.
* **`fad_sqnorm`** squares the 57 velocity components, sums them in a tree and
  casts the sum. Its latency is 8 cycles.
* **`fad_trigger`** raises `anomaly` when `score > thr`, with one register.
  The threshold sets the working point. Typically it is chosen so that a
  fraction 1e-5 of background events fire.
* **`fad_param_bank`** holds every constant in registers: 2,185 weights and
  biases, 57 means, 57 shifts and the threshold. All of them feed the
  datapath in parallel.

There is no back-pressure and no stall. The pipeline accepts a new event on
every clock with `in_valid` high. A valid bit travels alongside the data, and
`out_valid` rises exactly **30 cycles** after the event's `in_valid`. At a 5 ns
clock that is 150 ns. The velocity field `v` with its own `v_valid` comes out
21 cycles after input, for monitoring. The datapath registers have no reset.
Only the valid bits and the parameter bank are reset, asynchronously, by
`rst_n` (active low).

## Loading a network

Trained constants are written through a one-word-per-clock port: `cfg_we`,
a 12-bit `cfg_addr` and a 23-bit `cfg_wdata`. Each field takes the low bits it
needs. The map is defined in `fad_pkg`. Weights are stored row-major, at address
`base + out_neuron * n_inputs + input`.

| region | base (`fad_pkg`) | words | content                             |
|--------|------------------|-------|-------------------------------------|
| W1     | `A_W1`    = 0    | 928   | layer 1 weights, 16 × 58            |
| b1     | `A_B1`    = 928  | 16    | layer 1 biases                      |
| W2     | `A_W2`    = 944  | 256   | layer 2 weights, 16 × 16            |
| b2     | `A_B2`    = 1200 | 16    | layer 2 biases                      |
| W3     | `A_W3`    = 1216 | 912   | layer 3 weights, 57 × 16            |
| b3     | `A_B3`    = 2128 | 57    | layer 3 biases                      |
| mean   | `A_MEAN`  = 2185 | 57    | scaling offsets (Q8.10)             |
| shift  | `A_SHIFT` = 2242 | 57    | scaling right shifts                |
| thr    | `A_THR`   = 2299 | 1     | trigger threshold (Q15.8)           |

To convert a floating-point model, compute `w_int = floor(w * 2^8)` on 12 bits,
`b_int = floor(b * 2^10)` on 18 bits and `mean_int = floor(mu * 2^10)`. Take
`shift = round(log2 sigma)`. Note that the network must have been trained, or
fine-tuned, with the same scaling. An assertion flags writes outside the map.
Do not send events while the constants are being changed: an event in flight
would see a mix of old and new values.

## Where this departs from the published network

* **Constants are loaded at run time.** In the reference implementation the
  trained constants are compiled into the logic: HLS for the 18/12-bit version,
  and distributed-arithmetic constant multipliers for a per-weight-quantised
  version. The trained values are not available, so this RTL keeps the bit
  widths and loads the values at run time. A design with built-in constants
  would use far fewer resources. This one is a generic datapath for any network
  of this shape.
* **The per-weight-quantised version is not implemented.** That variant
  quantises each weight separately. Most weights are pruned to zero and the
  rest use 1 to 5 bits. Its hardware is an adder graph generated from the
  actual constants, so it cannot be written without them. Its weights do fit
  the 12-bit Q4.8 registers here, provided they have at most 8 fractional bits,
  so that network can run on this datapath, only without its savings.
* **Latency.** The published 18-bit implementation reports 230 ns (46 cycles
  at 5 ns) with an initiation interval of one clock. Here the stage split is
  this design's own, and the result is 30 cycles (150 ns) at the same
  interval.
* **Parameter count.** The layer sizes 58-16-16-57 give 2,185 weights and
  biases, and this design stores that many. The reference states 1,913
  trainable parameters, which does not match those layer sizes.
* **Casts.** The reference quantiser's defaults truncate and wrap on overflow.
  Here the casts truncate and saturate. The integer/fraction splits are
  assumed.
* **Scaling is included.** The reference leaves the standard scaling out of its
  resource count, since it could run upstream. Here it is in the pipeline, and
  it can be made transparent by loading `mean = 0, shift = 0`.
* **Flattening order.** The order (object-major, pT/eta/phi, MET last) and the
  position of `t` as the last input are assumed. A trained network must use
  the same order.

## Files

| file                        | content |
|-----------------------------|---------|
| `rtl/fad_pkg.sv`            | sizes, formats, types, address map |
| `rtl/fad_flow_vt_top.sv`    | top level: the whole trigger |
| `rtl/fad_param_bank.sv`     | constant registers and write port |
| `rtl/fad_preprocess.sv`     | flatten, scale, MET eta, time input |
| `rtl/fad_dense.sv`          | pipelined fully parallel dense layer |
| `rtl/fad_adder_tree.sv`     | pipelined adder tree |
| `rtl/fad_relu.sv`           | ReLU |
| `rtl/fad_sqnorm.sv`         | squared norm, the anomaly score |
| `rtl/fad_trigger.sv`        | threshold decision |
| `tb/tb_*.sv`                | one self-checking testbench per module |

## Simulating

Each testbench has its own fixed-point integer model of what it tests. It
checks every output word and the latency, counts checks and failures, and ends
with a line `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/fad_pkg.sv \
          tb/tb_fad_flow_vt_top.sv --top-module tb_fad_flow_vt_top
./obj_dir/Vtb_fad_flow_vt_top
```

Replace the testbench name to run another. `tb_fad_flow_vt_top` runs the full
design at its default sizes. It takes about 1.5 minutes to build, because the
2,096 parallel multipliers are all unrolled, and under a second to run. It
loads three random networks through the configuration port and streams 300
events for each, mostly back to back. The third network is sparse and low
precision, like a per-weight quantised one: 84 % of its weights are zero and
the rest are 1- to 5-bit integers with 6 fractional bits. About 10 % of the events are "hot", with
very large features. The threshold is placed at the median score, so about half
the events fire. Every velocity component, every score, every trigger bit and
the 30-cycle latency are compared with the model. The testbench also counts how
often each mechanism occurred and fails if any never did: reconfiguration, ReLU
clipping in both hidden layers, dense-layer saturation, score saturation,
trigger firing and quiet, MET eta zeroing, back-to-back events, idle gaps and the sparse network's non-zero weights.

The testbenches use random, not trained, networks, so they test the
arithmetic and the timing, not the physics performance of a trained flow.

## Changing it

The sizes and formats are `fad_pkg` constants and module parameters.
`fad_dense` and `fad_sqnorm` adapt their adder-tree depth and latency to
`N_IN`/`N`. The latency quoted in `fad_flow_vt_top` and the testbench's
`LATENCY` must be updated by hand if the shapes change. A different hidden
width changes `N_HID` and hence the address map, which is derived from it.
