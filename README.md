# A neural network computed as a state-space machine

A feed-forward neural network has no feedback. It can still be read as a
discrete-time dynamic system if the layer index is treated as time: the
outputs of layer *k* form the state vector **x**[k], and moving from one layer
to the next is a state update,

    x[k+1] = f( W[k] x[k] + b[k] ),        y = C x[last]

This is the same form as the next-state logic and state register of a finite
state machine. The hardware follows directly from that reading. One layer of
neurons is built, with all its nodes working in parallel. A bank of registers
holds the state vector. The layer is applied to its own output again and
again, each time with the next layer's weights, under an FSM that counts the
layers. The area is that of one layer; the time is one layer evaluation per
network layer.

This RTL implements that scheme for the multilayer perceptron used as the
case study in A.-H. Kiamarzi, P. Torabi and R. Sameni, *Hardware Synthesis of
State-Space Equations; Application to FPGA Implementation of Shallow and Deep
Neural Networks*. The network has 3 inputs, 4 hidden layers of 4 tanh
neurons and 2 linear outputs. Every size is a parameter, so the same RTL
also builds the deep networks shown with the authors' code generator, for
example 8 inputs, 31 hidden layers of 32 neurons and 8 outputs.

## The network and its schedule

With L inputs, N hidden layers of M nodes and P outputs (defaults 3, 4, 4, 2),
the shared layer is used N+1 times:

| pass k | weights            | state read                         | node function | result          |
|--------|--------------------|------------------------------------|---------------|-----------------|
| 0      | input matrix β     | u, zero-padded to M lanes          | tanh(· + b)   | hidden layer 1  |
| 1..N-1 | W¹ … W^(N-1)       | previous pass                      | tanh(· + b)   | hidden layer k+1 |
| N      | output matrix C    | last hidden layer                  | identity, no bias | y (nodes 0..P-1) |

The input vector enters through the same multiplexers as the feedback, so
the first pass is an ordinary layer evaluation on the zero-padded input.
Lanes i ≥ L load 0. This requires L ≤ M and P ≤ M, which elaboration
asserts.

## Datapath of the shared layer

```
      u[0..L-1]   0 (lanes >= L)
          |         |
   +------v---------v------+   sel: input / feedback
   |  M x 2:1 multiplexer  |<-------------------------+
   +-----------+-----------+                          |
               v                                      |
   +-----------------------+  state x[k] (M words)    |
   |   M state registers   |-----+----+----+          |
   +-----------------------+     |    |    |  (every node reads all M)
                                 v    v    v          |
       +----------+   +---------------------------+   |
       |weight ROM|-->| node i: MAC -> +b -> >>F  |   |
       |(layer k) |   |   -> saturate -> tanh ROM |---+--> node_x[i]
       +----------+   +---------------------------+         |
              (one ROM and one node per lane, M in all)     v
                                              output register y[0..P-1]
```

* **`nn_state_reg`**: the multiplexers and state registers. With
  `SEL_INPUT` lane i loads u_i (or 0). With `SEL_FEEDBACK` it loads node
  output x_i.
* **`nn_node`**: one neuron. It reads all M state words and its own weight
  ROM. It multiply-accumulates them, adds the bias aligned to the product
  scale, and shifts right by `FRAC_W`, rounding toward minus infinity. It then
  saturates the result to `DATA_W` bits and looks up tanh. On the output pass
  (`out_layer`) the bias and tanh are bypassed.
* **`nn_mac`**: `NUM_MULT` multipliers, an adder tree and a full-precision
  accumulator of `2*DATA_W + clog2(M+1) + 1` bits, so no intermediate
  rounding happens. A layer takes `CHUNKS = ceil(M / NUM_MULT)` MAC cycles,
  and cycle c uses state words `c*NUM_MULT ...`. With the default
  `NUM_MULT = M` a layer is one MAC cycle. Smaller values trade multipliers
  for cycles, as the authors' generator does.
* **`nn_weight_rom`**: one per node, addressed by the layer index. It returns
  the node's M incoming weights and its bias for that layer.
* **`nn_tanh_lut`**: the activation as a ROM. Its contents are computed when
  the design is elaborated.

## Control and timing

`nn_controller` is a three-state FSM: IDLE, MAC and ACT.

* **IDLE**: `in_ready` = 1. When `in_valid` is high, the input vector is loaded
  into the state registers and the layer counter is set to 0.
* **MAC**: lasts `CHUNKS` cycles. The nodes accumulate. The first cycle
  restarts the sum (`mac_clear`).
* **ACT**: lasts one cycle. The node outputs are combinational from the
  accumulators and are complete in this cycle. For k < N they are written
  back into the state registers and the layer counter advances. For k = N
  they are captured in the output register, and the FSM returns to IDLE.

`out_valid` is a one-cycle pulse (N+1)·(CHUNKS+1) cycles after the clock
edge that took the input. That is 10 cycles with the defaults. `y` holds its
value until the next result. A new input is accepted from the cycle in which
`out_valid` is high, so one vector takes (N+1)·(CHUNKS+1)+1 cycles. Vectors
are not overlapped. While a vector is in flight `in_ready` is low and
`in_valid` is ignored. The controller asserts that `out_valid` lasts one
cycle and that the layer and chunk counters stay in range.

The longest combinational path runs through the ACT cycle: accumulator,
bias add, shift and saturate, tanh ROM read, multiplexer, state register. To
raise the clock rate, pipeline this path first. It is the retiming step that
the state-space view makes easy, since the accumulator is a clean cut.
This RTL does not pipeline it.

## Number format and what limits accuracy

Inputs, weights, biases, states and outputs all share one two's-complement
format: `DATA_W` bits with `FRAC_W` fraction bits. The default is 24 bits with
16 fraction bits, Q8.16, range ±128. The format is fixed across layers
because one piece of hardware computes every layer. 24 bits is the top of the
20 to 24 bits reported as enough for this network. The integer/fraction split
is this design's choice.

Sums are kept at full precision until the node output. There they are
truncated (floor) to `FRAC_W` bits and saturated, so an overflow clips
instead of wrapping.

**The tanh table.** There are 2^`LUT_ADDR_W` entries (default 1024) covering
[−R, R) with R = 2^`LUT_RANGE_LOG2` = 4. Entry i holds tanh evaluated at the
centre of its interval:

    x_i  = -R + (i + 0.5) * 2R / 2^ADDR_W
    T[i] = round( tanh(x_i) * 2^FRAC_W )          (clipped to the word range)

The address is (z + R) shifted right by `FRAC_W + LUT_RANGE_LOG2 + 1 −
ADDR_W`. Inputs below −R read entry 0 and inputs at or above R read the last
entry. The table is never finer than the data resolution. The table error is
at most half a step, 1/256 with the defaults. It dominates the output error
at 24 bits: against a double-precision model of the same network, the
default build reaches about 42 dB SNR on both outputs. The word-length sweep
shows the same effect. SNR rises from 8 to 16 bits, where quantisation of the
words dominates, and is flat from 24 to 64 bits, where the table dominates.
The original study reports SNR still rising with word length, to 77.5 dB at
24 bits and 269 dB at 64 bits, with weights that are not published. A plain
look-up table cannot reach those figures, because a table accurate to 1e-13
would need about 2^45 entries. This RTL does not reproduce those figures.
Raising `LUT_ADDR_W` gains about 6 dB per bit; 14 gives about 66 dB at a cost
of 16384 words per node. Interpolating between table entries would be the
way to go further. That is not built here.

## Weight image

Each node's ROM is filled by `$readmemh` from `WEIGHT_FILE` (default
`rtl/nn_weights.hex`, read relative to the directory the simulator or
synthesis runs in). The file holds one `DATA_W`-bit hex word per line. Word

    (k*M + i)*(M+1) + j

is the weight from state lane j to node i in pass k for j < M, and the bias of
node i in pass k for j = M. That is (N+1)·M·(M+1) words, 100 for the
defaults. Pass-0 weights for padded lanes (j ≥ L), all output-pass biases
and the output-pass rows of nodes i ≥ P are unused. The shipped image keeps
them at zero. The other words are uniform random values in [−1, 1) rounded to
Q8.16. No trained weights come with the design. With an empty `WEIGHT_FILE`
nothing is loaded, and a testbench writes the ROM contents itself. The
large-network and word-length testbenches use this.

## Parameters (`nn_top`)

| parameter        | default | meaning |
|------------------|---------|---------|
| `L`              | 3       | network inputs (≤ M) |
| `N`              | 4       | hidden layers; the shared layer runs N+1 passes |
| `M`              | 4       | nodes per hidden layer = hardware nodes |
| `P`              | 2       | network outputs (≤ M) |
| `DATA_W`         | 24      | word length of all data (tested 8 to 64) |
| `FRAC_W`         | 16      | fraction bits |
| `NUM_MULT`       | 4       | multipliers per node; layer = ceil(M/NUM_MULT) MAC cycles |
| `LUT_ADDR_W`     | 10      | log2 of tanh table entries |
| `LUT_RANGE_LOG2` | 2       | table covers [−2^this, 2^this) |
| `WEIGHT_FILE`    | `rtl/nn_weights.hex` | weight image |

The defaults of L, N, M and P are the case-study network's. The other
defaults are this design's choices (see the next section).

Ports: `clk`, `rst_n` (asynchronous, active low, clears state, accumulators,
output and FSM), `in_valid`/`in_ready`, `u[L]`, `out_valid`, `y[P]`. The ports
are unpacked arrays of signed `DATA_W`-bit words.

## What follows the source and what is filled in

Taken from the source: layer-wise sharing (one layer of parallel nodes
reused for all layers). The input/feedback multiplexers, with a constant 0
on the lane that has no input. The register bank between multiplexers and
nodes. A ROM beside every node driven by the FSM control unit. Full fan-in
from every register to every node. tanh as a ROM look-up. MAC-based node
arithmetic with a configurable number of multipliers. One fixed word length
for all layers. Network sizes 3-4×4-2 and 8-{14,31}×32-8.

Filled in here, because the source does not specify it:

* The ROM next to each node is taken to hold that node's weights and bias,
  addressed by the layer index. The source only labels it "ROM", and it is
  fed by the control unit. The tanh table is a separate ROM inside the node.
* **Input layer.** The state equation as printed adds the weighted input
  *outside* the activation. The network drawing and the block diagram route
  the input through the first layer of neurons instead. This RTL follows the
  drawings: x[0] = tanh(β u + b).
* **Output layer.** It is linear with no bias, y = C x, as in the output
  equation. The description of the generator mentions a separate output
  activation without defining it. None is built.
* Word split Q8.16, floor rounding, saturation, the table size, range and
  sampling, the valid/ready handshake, the IDLE/MAC/ACT schedule, the reset,
  the weight file layout and `NUM_MULT = M`.
* Not built: C-slow retiming or pipelining. These are described only as
  optional later optimisations. Also not built: the clock-domain split between
  a data clock and a faster system clock that the generator offers. Here one
  clock runs everything, and `NUM_MULT` is the only speed/area knob. The code
  generator itself is software and is not part of this RTL.

## Verification

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. A watchdog stops a testbench that hangs.
`tb/tb_nn_ref_pkg.sv` is an independent reference model. It uses 128-bit
integer arithmetic and finds the tanh table address with real arithmetic
rather than bit shifts. It also has a double-precision model.

| testbench           | what it shows |
|---------------------|---------------|
| `tb_nn_state_reg`   | reset, input load with zero padding, feedback load, hold |
| `tb_nn_weight_rom`  | every word of every node/layer against the image; zero above layer N |
| `tb_nn_mac`         | 1000 cycles of clear/accumulate/hold with full-scale operands |
| `tb_nn_tanh_lut`    | every table interval, clamp edges, random inputs, error ≤ step + 1 LSB, odd symmetry |
| `tb_nn_node`        | two MAC cycles per layer, all passes incl. linear output; saturation and clamping occur |
| `tb_nn_controller`  | cycle-exact control sequence, busy stall, latency (N+1)(CHUNKS+1) |
| `tb_nn_top`         | default build end to end: 2000 vectors bit-exact, 10-cycle latency, stalls, saturation, clamping; SNR ≈ 42 dB |
| `tb_nn_wordlength`  | the case-study network at 8, 12, 16, 24, 32 and 64 bits, bit-exact, SNR per width |
| `tb_nn_deep`        | 8-14×32-8 with 32 multipliers per node and 8-31×32-8 with 8 per node, bit-exact, latency 30 and 160 cycles |

Running one, with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module tb_nn_top rtl/nn_pkg.sv tb/tb_nn_ref_pkg.sv tb/tb_nn_top.sv
    ./obj_dir/Vtb_nn_top

Every testbench builds in seconds. `tb_nn_deep` takes about a minute to build
because the 32-node tanh tables are computed at elaboration. Each runs in
under a second.

## Files

`rtl/nn_pkg.sv` (sizes, format and enums), `nn_state_reg`, `nn_mac`,
`nn_tanh_lut`, `nn_weight_rom`, `nn_node`, `nn_controller`, `nn_top`, and
`rtl/nn_weights.hex`. Testbenches and the reference model are in `tb/`.
