# A stochastic-computing Q-network for embedded deep reinforcement learning

A deep reinforcement learning (DRL) agent spends most of its time at run time on one job. At
every decision epoch it must estimate `Q(s,a)` for the current state `s` and every action `a`
it could take. It then picks the best action (epsilon-greedy) and updates its estimates. The
estimator is a small neural network that was trained offline. This RTL puts that network in
hardware. It is the 26-30-1 network of a residential smart-grid scheduler:

- 26 input words, holding the state and the action;
- 30 hidden neurons with a tanh-like activation;
- one linear output neuron that gives the Q value.

The main idea is **stochastic computing (SC)**. A number is not stored as a binary word. It is
carried by a bit-stream, and the fraction of ones in the stream sets the value. Each arithmetic
unit then shrinks to almost nothing:

- a multiplier is one XNOR gate;
- an adder is a small counter;
- the activation is a saturating counter.

All of these work on one bit per clock cycle. The clock therefore does not depend on precision.
Precision is set by the stream length `L` (256, 512 or 1024 bits), and it can change from one
request to the next without changing the hardware.

The agent itself (training, action selection, the Q-learning update) stays in software on an
embedded processor. That software writes the trained weights into the accelerator once. Then,
for every state-action pair, it writes 26 input words, asks for an inference, and reads back
`Q(s,a)`.

## Numbers as bit-streams

All values are **bipolar**. A stream whose bits are 1 with probability `p` stands for `2p - 1`,
a value in `[-1, 1]`. The paper's example: the 10-bit stream `1101001011` has six ones, so it
stands for `2*0.6 - 1 = 0.2`.

On the binary side, inputs and weights are `W = 10`-bit two's complement words `v`. A word
stands for `v / 512`, so the range is `[-1, 1)`. The 10-bit width is this design's choice. The
source gives no word width.

| quantity | binary form | stream form |
|---|---|---|
| input word `x_i`, weight `w_ji` | 10-bit signed, value `v/512` | bipolar stream, `P(1) = (v+512)/1023` |
| product `x_i * w_ji` | — | `x XNOR w` |
| neuron sum | 5-bit APC count `c` per cycle; bipolar sum of the cycle is `2c - N` | — |
| hidden output `h_j` | — | Btanh output stream |
| result | `q = sum over the stream of (2c - 30)`; `Q = q / L`, in `[-30, 30]` | — |

Why one XNOR multiplies: take two independent streams with `P(1)` equal to `p` and `r`. Their
XNOR is 1 with probability `pr + (1-p)(1-r)`. As a bipolar value, that is exactly
`(2p-1)(2r-1)`.

## The datapath of one neuron

Each neuron has three parts: N XNOR gates, an improved approximate parallel counter (APC), and
an activation. There are 26 inputs per hidden neuron and 30 for the output neuron.

### Improved approximate parallel counter (`apc`)

Every cycle the APC adds one bit from each of N product streams into a binary count. An exact
parallel counter is the biggest part of an SC neuron. The APC saves gates in two ways.

1. **Approximate unit.** Inputs `a[0..N-3]` are taken in pairs. Each pair becomes a single bit,
   through an AND gate for even pairs and an OR gate for odd pairs. Since
   `AND(a,b) + OR(a,b) = a + b`, one AND bit plus one OR bit carry, on average, the ones of
   their two pairs. So each bit from this unit is given weight 2. The result is an approximation:
   it is exact in expectation when the streams are statistically alike.
2. **Half adder for the last pair.** The last two inputs skip the approximate unit. They go into
   a half adder. Its sum is bit 0 of the result, and its carry joins the weight-2 bits. For odd
   counts this keeps the LSB exact.

This gives:

    cnt = 2 * (ones among the AU bits + HA carry) + HA sum          (5 bits for N <= 30)

The weight-2 bits are 14 AU bits plus the half-adder carry, 15 in all. An 11-cell full-adder tree
counts them, in columns of 4, 4 and 3 cells:

    column 1: FA1..FA4 add AU bits {0,1,2} {3,4,5} {7,8,9} {10,11,12}
    column 2: FA5 = sums of FA1,FA2 + AU bit 6     FA6 = carries of FA1,FA2 + carry of FA5
              FA7 = sums of FA3,FA4 + AU bit 13    FA8 = carries of FA3,FA4 + carry of FA7
    column 3: FA9  = sums of FA5,FA7 + HA carry  -> bit 1
              FA10 = sums of FA6,FA8 + carry FA9  -> bit 2
              FA11 = carries of FA6,FA8 + carry FA10 -> bits 3 and 4

Every cell is an **inverse mirror full adder** (`imfa`), which returns the *complemented* sum
and carry. A full adder is self-dual: complement all three inputs and both outputs are
complemented. So column 1 outputs represent the number of *zeros*. Column 2, fed with
complemented signals, produces true signals again, and column 3 complements once more. Where a
signal joins a column of the other polarity, it is inverted:

- AU bits 6 and 13 enter column 2 inverted;
- the in-column carries are inverted;
- the final outputs are inverted.

For N = 26, AU positions 12 and 13 are tied to zero.

### Btanh activation (`btanh`)

The activation is a K-state saturating up/down counter (K = 2N = 52 by default). Its states
S0..S(K-1) are the states of the classic stochastic tanh (Stanh) finite-state machine. The
output bit is 0 while the state is in the lower half and 1 in the upper half. Stanh moves one
state per input bit. Here the input is the APC count, so the state moves by the bipolar sum
`2c - N` of the cycle and saturates at both ends. With N = 1 this reduces exactly to Stanh. The
mean of the output stream is then roughly tanh of the neuron's weighted sum. Its steepness
grows with K.

The counter restarts from S(K/2) at the first bit of every inference.

### Output neuron and stochastic-to-binary conversion (`sc_output_layer`, `s2b_conv`)

The output neuron has no activation: Q values are not squashed. Its APC counts are not turned
back into a stream. `s2b_conv` adds the bipolar count `2c - 30` of every cycle over the whole
stream and gives the signed total `q`. The software divides by `L`.

## Stream generators (`b2s_conv`, `lfsr`)

Binary words become streams by comparing each word with a random number every cycle. The lane
bit is 1 when `r <= v + 512`, where `r` runs through 1..1023. Over a full LFSR period a lane
therefore produces exactly `v + 512` ones; the testbench checks this.

There are three random sources. Each is a 10-bit maximal-length LFSR (`x^10 + x^7 + 1`) with its
own seed:

- one for the 26 input words;
- one for the 780 first-layer weights;
- one for the 30 output weights.

Lane `i` of a generator uses the LFSR word rotated left by `i mod 10`. This decorrelates lanes
that share a source. Inputs and weights must come from different sources so that their XNOR is
a true product.

Every source restarts from its seed at the first bit of each inference. Results are therefore
deterministic and repeatable, which the bit-exact testbench relies on. The price is that every
inference sees the same random sequence.

## Pipeline and timing

The network is pipelined inside each layer. There is a register between the addition unit and
the activation, and another after the activation (the Btanh state and its output bit). Counted
from the cycle in which a stream bit is issued:

| cycle | stage |
|---|---|
| +0 | input/weight generators, 26x30 XNORs, 30 APCs (26 inputs each) |
| +1 | count registers → 30 Btanh counters |
| +2 | Btanh output bits (registered) → output-weight generator, 30 XNORs, 30-input APC |
| +3 | count register → S/B accumulator |
| +4 | `q`, `q_valid` |

Each issued bit carries a token `{valid, first, last}` (`sc_pkg::tok_t`) through the stages.
The Btanh counters, the output-weight LFSR and the accumulator each restart when a `first`
token reaches them. So the stream of the next inference can follow the previous one with no gap.

- **Latency:** `q_valid` rises at the (L+3)-th clock edge after the edge that accepted `start`.
- **Throughput:** one result every L cycles when requests are back to back. One stream bit per
  clock cycle is what the source's "delay = stream length × clock period" assumes. Its figure
  of 261.12 ns for L = 256 corresponds to 1.02 ns per bit.

## Programming interface (`sc_drl_dnn`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `wr_en`, `wr_addr`, `wr_data` | in | 1, 10, 10 | parameter write bus, one word per cycle |
| `start` | in | 1 | request Q for the current input words |
| `stream_len` | in | 11 | L for this request (0 is taken as 1) |
| `ready` | out | 1 | `start` is accepted in this cycle |
| `q` | out | 17 signed | `sum (2c-30)` over the stream; `Q = q / L` |
| `q_valid` | out | 1 | one-cycle pulse with a new `q` |

Address map (from `sc_pkg`):

- `0..25`: input words;
- `26 + 26*j + i`: weight from input `i` to hidden neuron `j`;
- `806 + j`: weight from hidden neuron `j` to the output.

Input words are written into a shadow copy. That copy is transferred to the generators when a
request is accepted, so the next state-action pair can be written while the current stream
runs. Weights are used directly and must be written while no stream is in the first two
pipeline stages. An assertion in the top level reports a violation. `ready` is
high when idle and in the cycle of the last bit of a running stream. A controller that keeps
`start` high therefore gets back-to-back streams.

A decision epoch, seen from the software:

1. Write the 22 state words once.
2. For each action, write the action words and raise `start`.
3. Collect one `q` per action. They arrive in request order.
4. Take the argmax with probability 1-ε, otherwise a random action.

## Where this RTL departs from, or adds to, the source

Taken from the source:

- the 26-30-1 network;
- bipolar coding;
- XNOR multipliers;
- the improved APC: AND/OR pairs, a half adder for the last pair, a 4+4+3 inverse-mirror
  full-adder tree, and a 5-bit output;
- Btanh activation built from a saturating up/down counter and the K-state FSM;
- two pipeline registers per layer;
- one bit per cycle.

This design's own choices, where the source is silent:

- **Word width** (10 bits), **LFSR polynomial, seeds, lane rotation and restart per
  inference.** The source only names "B/S conversion".
- **K = 2N.** No value is given.
- **Which AU pairs use AND and which use OR** (alternating), and **the exact wiring** of the
  adder tree. The figure shows the cell counts, not the connections.
- **How the saturating counter feeds the FSM.** Here they are one register that moves by `2c - N`
  per cycle, as in the Btanh design the source cites.
- **No activation on the output neuron**, and **S/B conversion by summing counts.** The source
  says only that the output layer "mainly includes a 30-input APC".
- **No bias inputs.** None are drawn or mentioned.
- **Parameter bus, address map, shadow inputs, request/ready protocol, run-time stream length,
  and the token-tagged pipeline.**
- **One XNOR per weight (26×30 in the first layer).** One sentence of the source speaks of "30
  XNOR gates" for that layer, which cannot multiply 780 products; the drawings show one
  multiplier per input of each neuron, and that is what is built.

Not built:

- The software controller.
- The non-pipelined variant and the binary-arithmetic implementation, which the source only
  compares against.
- Its OR-gate and multiplexer adders (alternatives to the APC).
- The transistor-level advantage of mirror adders. Area, power and clock period are properties
  of a synthesized netlist, not of this RTL.

## How far it has been checked

Every module has a self-checking testbench in `tb/` that ends with a `TB_RESULT` line. The
reference models in `tb/tb_ref_pkg.sv` are written from the arithmetic definitions, not copied
from the RTL.

- `tb_apc`:
  - compares the 30- and 26-input APCs with the reference count on 20 000 random vectors and
    the corner cases;
  - runs product-like random streams for both sizes at 256, 512 and 1024 bits. It measures the
    inaccuracy as |sum of counts − exact ones| / exact ones over a stream. Each stream must stay
    within 5 % and the mean of 8 streams within 2.5 %. The means come out at about 0.9–1.8 %.
    The source reports 0.55–0.63 % for its improved APC, but it does not define its metric or
    its input streams, so the two numbers cannot be compared directly.
- `tb_btanh` follows a reference state walk through both saturation limits and restarts.
- `tb_b2s_conv` checks every stream bit and the exact ones count over a full LFSR period.
- `tb_sc_hidden_layer` and `tb_sc_output_layer` check the pipeline alignment of data and tokens
  with reduced sizes.
- `tb_sc_drl_dnn` runs the full-size network with default parameters and compares every result
  bit-exactly with a complete reference model. It covers:
  - eight requests, at L = 256, 512 and 1024;
  - four back-to-back requests with input writes during the streams;
  - two networks whose Q sign is known;
  - the latency and the L-cycle spacing;
  - the greedy action chosen from the hardware Q values.

  It runs in well under a second of simulation time.

The statistical accuracy of the whole network against a floating-point tanh network is **not**
characterised here.

## Files

| file | contents |
|---|---|
| `rtl/sc_pkg.sv` | sizes, word width, address map, seeds, token type |
| `rtl/sc_drl_dnn.sv` | top level |
| `rtl/sc_seq.sv` | request handling and stream tokens |
| `rtl/dnn_param_regs.sv` | weight and input registers |
| `rtl/b2s_conv.sv`, `rtl/lfsr.sv` | binary-to-stream generators |
| `rtl/sc_hidden_layer.sv` | 30 neurons with Btanh |
| `rtl/sc_output_layer.sv` | output neuron and S/B conversion |
| `rtl/sc_neuron.sv` | XNORs + APC + pipeline register |
| `rtl/sc_mult.sv`, `rtl/apc.sv`, `rtl/imfa.sv`, `rtl/btanh.sv`, `rtl/s2b_conv.sv` | SC units |
| `tb/tb_*.sv` | one testbench per module; `tb/tb_ref_pkg.sv` holds the reference models |

## Simulating and changing it

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/sc_pkg.sv tb/tb_ref_pkg.sv tb/tb_sc_drl_dnn.sv --top-module tb_sc_drl_dnn -o sim
    ./obj_dir/sim

Any other testbench builds the same way; replace both `tb_sc_drl_dnn` names. The
top-level test prints the four Q values of its decision epoch and counts of the mechanisms it
exercised.

To change the network size, change `N_IN`/`N_HID` in `sc_pkg` (or the top's parameters).
`apc` accepts even input counts from 4 to 30, and `dnn_param_regs` needs `AW_ADDR` wide enough
for `N_IN + N_IN*N_HID + N_HID` words. `K` sets the steepness of the activation. `W` sets the
word width. `lfsr` has maximal taps for 3 to 16 bits, but the seeds in `sc_pkg` and the
testbench reference models are written for 10 bits.
