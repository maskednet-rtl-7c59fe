# Masked binarized neural network inference engine

This is a hardware engine for a binarized neural network (BNN). It is built
so that the power it draws does not reveal the network's weights. The
network classifies 28x28 8-bit images, such as MNIST handwritten digits. It
has three fully connected hidden layers of 1024 binary neurons and an output
layer of 10 neurons. An unprotected engine of this kind leaks its weights to
differential power analysis (DPA). The adder tree's pipeline registers hold
partial sums of weight-times-input products. An attacker who knows the
inputs can guess a few weight bits at a time and correlate each guess with
measured power.

The countermeasure is first-order **masking**. Every value that depends on
the weights is carried as two random shares. No single register ever holds
the plain value. The shares are combined only as the final class index. The
parts of the network that are not linear get their own masked circuits:

| network operation | masked circuit |
|---|---|
| weighted sum (adder tree) | arithmetic shares `a-r` and `r`, each summed in its own pass through the tree |
| sign bit of signed shares | dual-rail WDDL logic (hiding) inside every adder |
| sign activation | ripple chain of masked carry look-up tables |
| reuse of activations as next-layer inputs | Boolean-to-arithmetic conversion LUTs |
| arg-max of the output scores | share-crossing comparison through the masked sign chain |

The RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`. Each block has a
self-checking testbench in `tb/`.

## Data flow of one inference

1. **Input masking.** `input_masker` streams in the pixels, one per clock.
   For each pixel `a_i` it draws a fresh 8-bit random `r_i` and stores
   `r_i` and the 9-bit signed `a_i - r_i` in two `share_mem` instances.
2. **First hidden layer.** Each neuron `j` sends two beats, on consecutive
   clocks, through `tree_input_stage` and `wddl_adder_tree`:
   - phase 0 sums `w_ji ? (a_i-r_i) : -(a_i-r_i)` over all 784 inputs;
   - phase 1 sums `w_ji ? r_i : -r_i` over the same inputs.

   Weight bit 1 means +1 and weight bit 0 means -1.
3. **Pairing.** `tree_demux_buffer` adds the bias to the phase-0 sum and
   holds it for one clock. It then emits the pair (phase-0 sum + bias,
   phase-1 sum). These are two arithmetic shares of the neuron's
   pre-activation value.
4. **Activation.** `masked_activation` turns the pair into two Boolean
   shares `(a1, a2)` with `a1 ^ a2 = [sum >= 0]`. It never adds the two
   shares. `act_share_buffer` stores both shares of all 1024 activations.
5. **Later layers.** `xnor_logic` XNORs share 2 of each activation with the
   neuron's weight. This is the binary product. It is applied to one share
   only, because `(a1 ^ a2) XNOR w = a1 ^ (a2 XNOR w)`.
   `b2a_converter` takes activations in pairs and emits 512 arithmetic
   share pairs:
   - the mask `r` is 2-bit signed, in -2..+1;
   - the masked value `p0 + p1 - r` is 4-bit signed, in -3..+4.

   These enter the same adder tree: `a - r` in phase 0, `r` in phase 1.
   Steps 3 and 4 then repeat.
6. **Output layer.** The 10 score pairs go to `masked_output_logic`. It
   compares `best` with each candidate `cand` by testing
   `(best.s1 - cand.s2) + (best.s2 - cand.s1) >= 0`. Each bracket mixes
   shares of two different scores. The test runs in the same masked sign
   chain. The class index is the only value that leaves the engine
   unmasked.

`bnn_ctrl` sequences all of this. `masked_bnn_top` wires it together.
Three `prng` instances supply the randomness:
- 8 bits per clock for the input shares;
- 19 bits per clock for the activation LUTs;
- 1024 bits per clock for the converters.

## The hardened sign bit (wddl_adder)

Arithmetic masking over the integers has a flaw that modular masking does
not have. The share `a - r` of two uniform 8-bit numbers has a sign, and
that sign correlates with `a`. When `a > 128`, `a - r` is positive 75% of
the time. So every sign bit in the tree is computed with *hiding* instead of
masking.

Each `wddl_adder` has three parts:
- An ordinary W-bit adder produces the low W bits and the carry `c`.
- The new sign bit `s[W] = a[W-1] ^ b[W-1] ^ c` is written as a network of
  NAND gates (`wddl_msb_logic`):
  `s = NAND(NAND(~a,b,~c), NAND(a,~b,~c), NAND(a,b,c), NAND(~a,~b,c))`.
  Each NAND is replaced by its WDDL (wave dynamic differential logic)
  form. Every signal has a true rail and a false rail. The NAND's true rail
  is the OR of the input false rails, and its false rail is the AND of the
  input true rails.
- The dual-rail result is kept in a pair of flip-flops. NOR gates with the
  `precharge` signal sit at the inputs and outputs, so precharge drives
  every differential rail to 0.

Sign bits travel between tree levels as rail pairs `(s[W], s_n)`. The tree
input stage creates the first false rail. Precharge is a level input in
this RTL. `bnn_ctrl` holds it high while the engine is idle and low during
an inference. A real WDDL circuit precharges every half clock cycle. That
belongs to the physical implementation, where the balanced routing also has
to be ensured. RTL simulation checks only the logic function.

The tree has 784 leaves of 9 bits. It takes 10 register levels
(392, 196, ..., 2, 1 adders). The sums come out 19 bits wide. An element
left without a partner at an odd-sized level is added to zero.

## The masked sign chain (masked_activation)

The sign of `x = a + b` is the sign bit of the sum, so only the carries are
needed. LUT 0 computes the masked carry out of bit 0. The LUT output is
`(r0, r0 ^ carry)`, where `r0` is a fresh random bit. LUT k, for k = 1 to 17:
1. recovers the incoming carry from the previous pair `(r, m)` as
   `m ^ r`;
2. forms the majority of `a[k]`, `b[k]` and that carry;
3. masks the result with its own fresh bit and forwards the bit.

LUT 18 computes the masked complement of the sign bit, `r18 ^ ~(a18 ^ b18 ^ c18)`.
That output pair is the two Boolean shares of the activation. Each LUT output
pair is registered. The input words are captured once, and bit k is delayed k
clocks in a skew column. A new sum can therefore enter every clock. The
result appears 19 clocks later. In a real LUT-based device each LUT should map
to a single physical LUT, so that the unmasked carry exists only inside it.

The activation is 1 for `x >= 0` and 0 for `x < 0`. This is the convention
the sign bit gives. It matches the neuron diagram of the source design. The
printed equation there reads "0 for x <= 0, 1 for x > 1", which appears to
be a typo.

## Timing

One beat (one tree pass) enters the datapath per clock. The pipeline is:

| stage | clocks |
|---|---|
| weight row read | 1 |
| leaf register | 1 |
| adder tree | 10 |
| pair register | 1 |
| masked activation | 19 |

A full inference takes:
- 784 clocks to stream in the pixels;
- 2 x (3 x 1024 + 10) beats;
- a drain of about 32 clocks after each layer;
- 9 arg-max comparisons of 21 clocks each.

The testbench measures **7253 clocks** at the full size. The source reports
7248 clocks for its masked engine, and 3192 for the unprotected one. The
time does not depend on the data or on the random values: the testbench
checks this.

## Interface (masked_bnn_top)

| port | meaning |
|---|---|
| `w_we, w_row, w_word, w_data[63:0]` | load word `w_word` of weight row `w_row` |
| `b_we, b_addr, b_data[15:0]` | load the signed bias of neuron row `b_addr` |
| `seed[63:0], seed_load` | reseed the three generators |
| `prng_on` | 0 zeroes all randomness: the same datapath runs unmasked |
| `start`, then `pix_valid, pix[7:0]` | begin an inference and stream `N_IN` pixels (gaps allowed) |
| `busy, done, class_idx` | `done` stays high with the class until the next `start` |

Weight and bias rows are numbered the same way:
- rows `0..1023` are hidden layer 1, which uses weight bits `783..0`;
- rows `1024..2047` are hidden layer 2;
- rows `2048..3071` are hidden layer 3;
- rows `3072..3081` are the output layer.

Bit k of a row is the weight of input k. Parameters:
- `N_IN` defaults to 784;
- `N_HID` defaults to 1024;
- `N_HID_LAYERS` defaults to 3;
- `N_OUT` defaults to 10.

Smaller values work as long as `N_HID/2 <= N_IN`. The weight memory holds
3082 x 1024 bits. Of these, 2,910,208 bits are used by the published
network.

## Departures and choices not fixed by the source

- **PRNG.** The source only asks for a cryptographically secure generator.
  `prng` uses xorshift64 lanes, which are *not* secure. Its ports allow a
  drop-in replacement. The source buffers randomness at start-up; here it is
  generated every clock.
- **Phase order.** The two passes of a neuron are issued back to back.
  This keeps the tree-output buffer to one entry, and lets the converter
  keep its 512 masks for exactly one clock. The source does not say whether
  the passes are interleaved per neuron or grouped per layer.
- **Bias.** The bias is added to the phase-0 (`a - r`) sum, which is itself
  masked. Biases are 16-bit signed and stored unprotected. The source gives
  no bias width or protection.
- **Arg-max.** The search is a sequential running maximum, and ties go to
  the lower index. Each comparison bit is recombined to steer the search.
  The source does not specify these points.
- **Host interface, row layout and double-banked activation storage** are
  this design's own.
- **Hiding is not verifiable in RTL.** The dual-rail structure is present.
  Its power balance depends on placement and routing, and the RTL cannot
  show it.
- **LUT sharing.** The converter's RTL forms the product bits `s1 ^ x2` as
  named intermediate values. Each converter is meant to map to one
  6-input LUT. Synthesis for another technology could split it and expose
  those values.
- **Adder tree labels.** The source's tree figure labels the first-level
  registers up to index 396. The arithmetic (784/2 = 392) is followed here.

## Verification

Every block has a testbench `tb/tb_<block>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. There are two end-to-end
tests:
- `tb_masked_bnn_top` runs a 64-32-32-32-10 network.
- `tb_masked_bnn_full` runs the published 784-1024-1024-1024-10 network.

Both load random weights and biases and stream random images. They compare
results with an integer model of the unmasked network:
- the recombined last-hidden-layer activations;
- the recombined class scores;
- the class itself.

Both tests run with the PRNG on and off. They repeat an image with a
different seed, and they count each mechanism that must occur:
- precharge;
- each leaf source;
- bank swaps;
- arg-max updates.

The full-size test also checks the latency against 7248 clocks, within 5%.

To run the full-size test with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bnn_pkg.sv \
    tb/tb_masked_bnn_full.sv --top-module tb_masked_bnn_full -Mdir obj -o sim
./obj/sim
```

It builds in about 20 s and runs in about 5 s. Any other testbench runs the
same way: replace the file and top name.

The tests check the logic function and the timing only. The side-channel
claims need power measurements of an implemented device, so these tests do
not cover them:
- first-order security with the PRNG on;
- the leak with the PRNG off;
- the residual leak through the hidden sign bit.
