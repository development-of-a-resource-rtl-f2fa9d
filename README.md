# A 39-cycle neural-network q/pT estimator for a barrel muon trigger

This is SystemVerilog RTL for a small fully connected regression network.
It estimates a muon candidate's charge over transverse momentum (q/pT) from
three numbers that the RPC trigger measures:

* the z position of the seed cluster in the middle RPC station, and
* the z residuals of the inner and outer station clusters to the straight
  line from the interaction point through that seed.

The network has 3 inputs, three hidden layers of 20 ReLU neurons, and one
linear output. All arithmetic is 16-bit fixed point. The structure follows
the resource-efficient HDL network of Ospanov, Feng et al., "Development of a
resource-efficient FPGA-based neural network regression model for the ATLAS
muon trigger upgrades". That design targets a 320 MHz clock, has a latency of
39 cycles (121.9 ns) and takes a new event every 8 cycles (25 ns, one LHC
bunch crossing). This RTL keeps those cycle counts. Parts that the source
leaves open are filled in here and marked as such below: the bus encoding,
the handshake, weight loading, biases and rounding.

## The main idea: three serial streams per layer

A fully parallel 20x20 layer would need 400 multipliers. A fully serial one
would need 20 cycles per event. This design takes the middle road:

* The 20 neurons of every hidden layer are split into three **neuron
  groups**: A = neurons 0-6, B = 7-13 and C = 14-19.
* Each group sends its values to the next layer as a **serial stream**: one
  value per cycle, 7 beats long. Group C has only six neurons, so its
  seventh beat is an empty slot (a "bubble").
* The three streams travel side by side on the **layer bus**.
* Every neuron of the next layer has three **processing elements (PEs)**,
  A, B and C. PE A multiplies stream A, and so on. All 20 neurons work at
  once, each PE does one multiply-accumulate per cycle, so a layer consumes
  its 20 inputs in 7 cycles.
* Per neuron, an **output block** adds the three PE partial sums as
  (A + B) + C and applies ReLU. It turns the group's results back into a
  serial stream for the next layer.

```
             layer bus (Data A/B/C, Neuron ID, Group ID)
  prev. ---> layer_input ---> 20 neurons x {PE A, PE B, PE C} ---> output_block A --> Data A'
  layer      (ready +          (RAM + MAC each)                 ---> output_block B --> Data B'
             distributor)                                       ---> output_block C --> Data C'
```

The layer types are:

| layer          | neurons | PEs per neuron | stream in               | ReLU | latency | deadtime | multipliers + adders |
|----------------|---------|----------------|-------------------------|------|---------|----------|----------------------|
| hidden 1       | 20      | 1              | X1, X2, X3 on one lane  | yes  | 7       | 5        | 20                   |
| hidden 2       | 20      | 3              | groups A, B, C          | yes  | 11      | 8        | 60 + 6               |
| hidden 3       | 20      | 3              | groups A, B, C          | yes  | 11      | 8        | 60 + 6               |
| output         | 1       | 3              | groups A, B, C          | no   | 10      | 8        | 3 + 2                |
| **network**    |         |                |                         |      | **39**  | **8**    | **157**              |

Latency is counted from the first beat into a layer to the first beat out
of it. The network latency is the sum of the layer latencies. The network
deadtime is the largest layer deadtime. The last column counts one DSP slice
per MAC and per output-block adder. Its total, 157, is the DSP count
reported for the original design.

## Cycle by cycle

Take a hidden layer whose input stream starts in cycle 0:

| cycle | what happens                                                                 |
|-------|------------------------------------------------------------------------------|
| 0..6  | beats 0..6 of streams A, B, C are on the layer bus and fan out to all PEs     |
| 1..7  | each PE: weight read and data register (preparation), then multiply-accumulate |
| 8     | all 60 partial sums are final; the output blocks take them (`snap`). Neuron 0 goes straight into the first adder; neurons 1..6 wait in the output buffer |
| 9     | stage 1: A + B, with C delayed one cycle                                      |
| 10    | stage 2: (A + B) + C                                                          |
| 11    | stage 3: ReLU; beat 0 of the outgoing streams is on the next layer bus        |
| 11..17| beats 0..6 of the outgoing streams                                            |

The PE counts as busy from cycle 0 to cycle 7, which is the 8-cycle
deadtime. A new stream may start in cycle 8. In that same cycle the output
blocks copy the old sums, so the old and new events never collide.

The output layer has no ReLU stage, so its one result leaves after 10
cycles.

Hidden layer 1 differs. Its single start beat carries X1, X2 and X3 in the
Data A/B/C fields. The input block turns them into a 3-beat stream on one
lane (cycles 0, 1, 2). The 20 single-PE neurons have their sums in cycle 4.
The output-block pipeline is kept at three stages, with the "adders" passing
the single sum through, so the first value leaves in cycle 7. The deadtime
is set to 5, the published figure. The logic itself could accept a new
event in cycle 4.

## Handshake and back-pressure

Neighbouring layers are linked by one `ready` line, plus the layer bus going
forward:

* A stream starts with a beat that has `valid` and `first` set. The
  receiving layer must have `in_ready` high in that cycle. The other beats
  follow on consecutive cycles without further handshaking. An assertion
  checks that there are no gaps.
* After a start, `in_ready` stays low for the deadtime. It also stays low
  while finished PE sums are waiting because the output blocks are still
  busy with the previous event.
* If the head of an outgoing stream reaches the end of the output-block
  pipeline while the next layer is not ready, the output blocks of the layer
  freeze (`hold`) until it is. Nothing is dropped.

Hidden layer 1 can take events every 5 cycles, but hidden layer 2 only every
8. The hold is what makes the chain settle to one event per 8 cycles when
events are offered every cycle. The end-to-end test shows this: the gaps
between accepted events are 5, 6, then 8 from then on.

`nn_top` accepts an event when `in_valid && in_ready`. It raises `out_valid`
for one cycle with the result. The result is never back-pressured.

## Number format and rounding

* Words are signed 16-bit with 10 fractional bits: sign, 5 integer bits and
  10 fraction bits, a range of about -32 to +32 in steps of 1/1024. The
  source picked 10 fractional bits after comparing 9, 10 and 11 against
  floating point.
* A MAC multiplies two words into a 32-bit product with 20 fractional bits.
  It sums the products in a 48-bit accumulator, like a DSP48 slice. The bias
  is pre-aligned by shifting it left by 10.
* The PE result is the accumulator shifted arithmetically right by 10, which
  rounds toward minus infinity, then saturated to 16 bits.
* The output-block adds saturate to 16 bits. ReLU maps negative words to
  zero.

The source does not describe rounding, saturation or biases. The choices
above are this implementation's own. A bit-exact software model must follow
them; `tb/tb_ref_pkg.sv` is one.

## Loading weights

Every PE has a 256 x 16 weight RAM. It is addressed by
`{Neuron ID[4:0], Group ID[2:0]}`: the layer-bus fields during inference, or
the load port during a write. During inference a PE of lane g sees:

* Neuron ID = k, the position of the beat in the stream (0..6);
* Group ID = the one-hot code of g, or 0 when the lane carries a bubble.

So the weight that neuron n of a layer applies to source neuron j of the
previous layer (j = 7g + k) sits at address `{k, 1 << g}` of PE g of
neuron n. In hidden layer 1 the lane is 0 and k is the input index (0..2).
The bias sits at Neuron ID 31 and is also copied into a bias register when
written. Write the real bias into PE A and 0 into PEs B and C, so that it is
counted once.

On `nn_top`, one word is written per cycle while the network is idle:

| port        | meaning                                              |
|-------------|------------------------------------------------------|
| `wl_we`     | write strobe                                         |
| `wl_layer`  | 0 = hidden 1, 1 = hidden 2, 2 = hidden 3, 3 = output |
| `wl_neuron` | neuron in that layer (0..19; 0 for the output layer) |
| `wl_lane`   | PE: 0 = A, 1 = B, 2 = C (hidden 1 has A only)        |
| `wl_src_id` | k as above, or 31 for the bias                       |
| `wl_weight` | the word                                             |

Most of the 256 words are unused: a PE needs at most 7 weights and a bias.
The address width copies the published PE drawing (Address[7:0]). The RAMs
are written as plain arrays with a synchronous read. They are not reset, so
load every weight that is used.

## Files

| file                   | contents                                                          |
|------------------------|-------------------------------------------------------------------|
| `rtl/nn_pkg.sv`        | widths, the layer-bus and load-request structs, saturation and ReLU helpers |
| `rtl/weight_ram.sv`    | PE weight RAM, 256 x 16, synchronous read                         |
| `rtl/mac_unit.sv`      | multiply-add-accumulate, 48-bit accumulator, 16-bit saturated output |
| `rtl/pe.sv`            | processing element: RAM, preparation register, MAC, bias register |
| `rtl/layer_input.sv`   | ready handshake, deadtime counter, distributor, layer-1 serialiser, load decode |
| `rtl/output_block.sv`  | output buffer, Adder/Delay, Adder, ReLU pipeline of one neuron group |
| `rtl/nn_layer.sv`      | one layer: input block, N x (1 or 3) PEs, one output block per group |
| `rtl/nn_top.sv`        | the four layers chained, event in/out and the weight-load port   |

`nn_top` has one parameter, `N_HIDDEN` (default 20). The three-group stream
format allows 15 to 21 neurons per hidden layer. `nn_layer` can be
configured for any of the four layer types, as in the table above.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints one line
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of
cycles if it hangs. They need Verilator 5 with `--timing`. For example, the
end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/nn_pkg.sv tb/tb_ref_pkg.sv tb/tb_nn_top.sv --top-module tb_nn_top
./obj_dir/Vtb_nn_top
```

The other testbenches are `tb_muon_workload`, `tb_weight_ram`, `tb_mac_unit`, `tb_pe`,
`tb_output_block`, `tb_layer_input` and `tb_nn_layer`. Build them the same
way. `tb_ref_pkg` is needed by those that compute sums.

What the tests establish:

* `tb_nn_top` runs the full-size network (default parameters) with a random
  set of weights and biases and 411 events. Every output is compared with a
  bit-exact reference model. It checks that:
  * at full input rate, the steady gap between accepted events is exactly
    8 cycles;
  * with events 8 cycles apart, every result arrives exactly 39 cycles after
    its event, and each layer's output appears 7, 11, 11 and 10 cycles after
    its input (layer 1, 2, 3, output layer).
  It also counts how often each mechanism occurs, and fails if any of them
  never does: input back-pressure, a layer-1 output-block hold, group-C
  bubbles, ReLU clipping and saturation.
* `tb_muon_workload` mirrors the hardware-versus-software comparison the
  design was validated with. It streams 200,000 muon candidates through the
  full-size network at full rate and compares every result with the
  bit-exact model. It uses a toy event generator (see the file's header)
  and a hand-made weight set, because the trained weights are not
  published. In that weight set, two neurons per layer carry a linear
  q/pT estimate and the other 18 run with random weights. Result: no
  mismatches, exactly 8 cycles per event, and the right charge sign for
  every muon below 10 GeV. It also evaluates the same network in floating
  point, as a software reference would. Every hardware result lies within
  4 LSB of it; the largest difference seen is 1 LSB. The spread (standard
  deviation) of the relative pT difference grows with pT, because the output
  is 1/pT with a fixed step of 1/1024:

  | pT (GeV) | events | spread of relative pT difference |
  |---|---|---|
  | 3-10  | 43,738 | 0.4 % |
  | 10-20 | 70,054 | 0.9 % |
  | 20-30 | 46,562 | 1.4 % |

  The run takes about 35 s.
* `tb_nn_layer` checks a hidden layer on its own: latency 11, streams
  accepted every 8 cycles, and correct results while the next layer randomly
  stalls.
* The unit tests check the RAM read timing, the MAC arithmetic including
  saturation, the PE's 8-cycle result timing and bubble handling, the
  output-block pipeline depth (3 cycles, or 2 without ReLU) and hold, and the
  ready/deadtime rules of the input block for both the 8-cycle and the
  layer-1 (5-cycle) configuration.

What they do not establish: the trained network weights are not published,
so no test reproduces the physics results (the efficiency curves or the
agreement with a floating-point model). Timing closure at 320 MHz and the
mapping onto DSP slices and distributed RAM have not been checked with an
FPGA tool.

## Where this RTL follows the source and where it does not

Taken from the source:

* the network shape (3-20-20-20-1, ReLU on hidden layers only);
* 16-bit words with 10 fractional bits;
* the neuron groups 0-6, 7-13 and 14-19;
* three PEs per neuron in hidden layers 2 and 3 and in the output layer;
* each PE made of a RAM unit and a MAC unit;
* the PE's one preparation cycle plus seven MAC cycles;
* the output block's Adder and Delay, then Adder, then ReLU;
* the per-layer latencies and deadtimes (7/5, 11/8, 11/8, 10/8);
* the network's 39-cycle latency, 8-cycle deadtime and 157 arithmetic units;
* the PE port names and widths: Data[15:0], Neuron ID[4:0], Group ID[2:0],
  Write/Read, Weight[15:0] and Address[7:0].

Chosen here, because the source is silent:

* the meaning of Neuron ID and Group ID on the bus (stream position, and a
  lane mask or one-hot code);
* the ready protocol and the hold mechanism;
* the weight-load port and how it selects a PE;
* neuron biases, and where they are stored;
* truncating then saturating, and the 48-bit accumulator;
* lowest-numbered neuron first in each stream (the published drawing lists
  the stream as "#6 ... #0" with no explicit order);
* how hidden layer 1 reaches 7 cycles;
* a synchronous reset of all control and data registers (the RAMs are not
  reset).

Departures and open points:

* The source says that in hidden layers the ReLU "is implemented using one
  DSP". But its per-layer DSP count (66 = 60 PEs + 6 adders) leaves no DSP
  for it. Here ReLU is a plain register stage, which matches the count.
* The source says that a PE takes 8 cycles. The 3-input PEs of hidden
  layer 1 need only 4 cycles. The published layer-1 deadtime of 5 is kept
  as a parameter, not derived.
* The linear normalisation of the three inputs happens before the network.
  The inputs to `nn_top` are expected to be already normalised Q5.10 words.
