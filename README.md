# A fully Boolean-masked BNN inference engine

A neural network running on an edge device leaks its trained weights through
its power draw. Differential power analysis can recover them from a few
thousand measured inferences. This design blocks first-order power analysis
with *masking*. Every value that depends on a weight or a bias is split into
two random Boolean shares, `x = x0 ^ x1`. Each share on its own is uniformly
random. The circuit computes on the shares and never puts them back together.
The only value that leaves the chip is the class index, and it leaves as two
shares too.

The network is a binarized neural network (BNN) for 28x28 MNIST digits:
784 inputs, three hidden layers of 1010 nodes, and 10 outputs. Weights and
activations are single bits that stand for -1 and +1. The engine computes
every addition of the network, one at a time, on **one pipelined masked
adder**. Masking makes that adder 100 cycles deep. A register file keeps
**101 nodes in flight** so that the adder still accepts a new addition every
cycle. One inference takes 2,938,197 cycles. An unmasked engine with a
one-cycle adder would take about 2.84 million.

The architecture follows the BoMaNet design of Dubey, Cammarota and Aysu
(ICCAD 2020). This RTL is an independent implementation of that design.
"Departures from the published design" below lists every place where it had
to fill a gap or chose differently.

## 1. The arithmetic being protected

For each node of hidden layer 1, with pixel `p_i` (8-bit unsigned) and
weight bit `w_i` (1 = +1, 0 = -1):

    y = bias + sum_i (w_i ? +p_i : -p_i)          act = (y >= 0)

For the later layers, with activation bits `a_i`:

    y = bias' + sum_i XNOR(a_i, w_i)              act = (y >= 0)

The second sum is a count of ones (POPCOUNT). The true +/-1 dot product is
`2*count - N`. That correction is folded offline into the stored bias
`bias'`, so the hardware adds a stored constant exactly as it does in layer 1.
The output layer computes the same kind of sum for 10 nodes. The result is
the index of the largest sum. On ties, the lowest index wins.

All sums are 20-bit two's complement. The largest layer-1 magnitude is
784*255 = 199,920, which is below 2^19.

## 2. Masked building blocks

Linear operations (XOR, NOT) act on each share separately. Only AND needs
fresh randomness. Everything else is built from those two facts.

**Trichina AND gate** (`trichina_and`). Given shares of `a` and `b` and one
random bit `r`, the gate returns `c0 = r` and

    c1 = r ^ a0b0 ^ a0b1 ^ a1b0 ^ a1b1

The terms are XORed in that order. If the XORs were plain logic, a glitch
could briefly produce `a0b0 ^ a0b1 = a0 & b`, which exposes `b`. So each XOR
gets a register at its input, and every product is delayed until its own XOR
stage. The only exception is the first XOR, which joins `r` with one product.
The result is a four-stage pipeline: outputs appear 4 cycles after the
inputs, and the gate accepts a new operation every cycle.

**Masked full adder** (`masked_full_adder`). The sum `a^b^c` is linear, so
each share is computed on its own and passed through 5 registers. The carry
`ab ^ bc ^ ca` uses three Trichina gates:

| Gate      | Random bit | Output shares |
|-----------|------------|---------------|
| TG(a,b)   | r0         | d0, d1        |
| TG(b,c)   | r1         | e0, e1        |
| TG(c,a)   | r2         | f0, f1        |

The carry shares are then `C0 = d0^e0^f0` and `C1 = d1^e1^f1`, each through
one output register. Sum and carry both come out 5 cycles after the inputs.

**Pipelined masked adder/subtractor** (`masked_adder`). W full adders form a
ripple-carry chain. Bit n's full adder can start only when bit n-1's carry
comes out, which is 5n cycles after the operands arrive. So that a new
addition can enter every cycle, the inputs and outputs are aligned by delay
lines:

- Bit n's operand shares and its three random bits `r[3n+2:3n]` wait 5n
  cycles in a delay line.
- Bit n's sum shares wait another 5(W-1-n) cycles after its full adder.

At W = 20 the latency is exactly 100 cycles and the throughput is one
addition per cycle. With `sub` = 1 the adder computes `a - b`, which is
`a + ~b + 1`. It inverts only share 0 of `b` and XORs the 1 into carry-in
share 0. Both operations are linear and cost no randomness. The output logic
uses this subtract mode.

**Masked multiplexer** (`masked_mux`, `masked_lut`). In layer 1, the product
`w ? +p : -p` is a 9-bit multiplexer whose select is the secret weight. Each
bit is a 4-input, 2-output look-up:

    out1 = (w ? +p_i : -p_i) ^ r_i        out0 = r_i

The look-up is meant to map onto one FPGA LUT and is treated as atomic. The
two 9-bit shares are then sign-extended to 20 bits. Sign extension copies
bits, so it can be done on each share separately.

**Activation** (`masked_activation`). `act = NOT msb`. The activation
inverts share 0 of the MSB and passes share 1 unchanged.

**XNOR** (`masked_xnor`). `XNOR(a, w)` with a plain weight bit is linear. It
is applied to share 0 only. The product bit is then zero-extended into a
20-bit operand for the adder.

Weights and biases are stored unmasked. A weight acts only as a LUT select
or as an XOR into a random share. A bias is masked with 20 fresh bits
(`(r, bias ^ r)`) as it enters the adder.

## 3. Keeping a 100-cycle adder busy: the 101-slot schedule

Within one node the additions depend on each other: input i+1 needs the
partial sum after input i. With a 100-cycle adder, one node at a time would
cost 101 cycles per input. The engine instead interleaves 101 independent
nodes, each with its own slot `k` in the accumulator register file
(`acc_regfile`):

    cycle t        : issue  slot k:   acc[k] + operand(input i, node g*101+k)
    cycle t+100    : result leaves the adder -> written to acc[k] at the clock edge
    cycle t+101    : issue  slot k:   acc[k] + operand(input i+1, ...)

The loop is 100 cycles of adder plus one register, so it is exactly 101
cycles long. That is why the slot count is `SLOTS = 5*W + 1 = 101`, and why
the hidden layers have 1010 = 10*101 nodes. The register file has a
combinational read port, so a sum written at the end of cycle t+100 is the
adder's `a` operand in cycle t+101. There is no bypass and no stall.

`bnn_controller` runs the whole inference as four nested loops:

    for layer L = 0..3                     (3 = output layer)
      for group g of 101 nodes
        for round r = 0..fanin(L)          (the last round adds the bias)
          for slot k = 0..100              (one cycle each)
            issue (L, node g*101+k, input r) if that node exists

- **First round.** The accumulator operand is a masked zero `(r, r)`
  instead of the register file.
- **Bias round.** The result does not go back to the register file. It
  becomes activation shares (`~msb`), which are written to the activation
  memory bank of that layer.
- **Output layer.** It has only 10 nodes but still needs the 101-cycle loop,
  so its rounds run with 10 busy slots and 91 idle ones. Its bias-round
  results stay in register-file slots 0..9 for the output logic.

A control tag (`valid`, kind, layer, node, slot) travels beside the adder in
a 100-stage delay line. It tells the write-back logic what to do with each
result.

Cycle count at the default sizes:

| phase                              | rounds x 101 cycles         | cycles    |
|------------------------------------|-----------------------------|-----------|
| layer 1 (10 groups, 784+1 rounds)  | 10 x 785 x 101              |   792,850 |
| layers 2, 3 (10 groups, 1010+1)    | 2 x 10 x 1011 x 101         | 2,042,220 |
| output layer (1 group, 1010+1)     | 1011 x 101                  |   102,111 |
| drain, arg-max (9 x 101), control  |                             |     1,016 |
| **total (simulated)**              |                             | **2,938,197** |

The same network on an unmasked engine with one addition per cycle needs
784*1010 + 2*1010*1010 + 1010*10 = 2,842,140 cycles. Masking therefore adds
about 3.4 % (the published figure is 3.5 %), almost all of it from the
idle slots of the output layer.

## 4. Finding the class without unmasking: the output logic

`masked_output_logic` turns comparison into masked subtraction on the same
adder:

1. Load node 0's shares as the running maximum, and a masked 0 as the
   running index.
2. For j = 1..9:
   - Send `max - node_j` into the adder with `sub` = 1.
   - 100 cycles later, take the MSB shares of the difference. An MSB of 1
     means the difference is negative, so `node_j > max`.
   - Feed the MSB shares as the select of a masked multiplexer
     (`masked_sel_lut`, one per bit). It keeps the old maximum or takes
     `node_j`, re-masked with fresh bits. A second one does the same for
     the index shares. For the index, `j` enters masked as `(r, j ^ r)`.

The comparisons depend on each other, so each takes 101 cycles. `result` is
`{idx1, idx0}`: two 4-bit shares of the class. The host XORs them to get the
class.

## 5. Randomness

Fresh random bits are needed every cycle:

| consumer                                        | bits/cycle |
|-------------------------------------------------|-----------:|
| adder: 3 per full adder + carry-in mask         | 61         |
| pixel masked multiplexer                        | 9          |
| masked zero (first round)                       | 20         |
| bias masking                                    | 20         |
| output logic (max mux, index mux, index mask)   | 28         |
| **total**                                       | **138**    |

The bits come from three TRIVIUM stream generators (`trivium_prng`). Each is
unrolled to 64 keystream bits per clock. TRIVIUM's taps allow that without
changing the keystream.

- **Seeding.** All three cores share an 80-bit key. They get different IVs:
  core c uses `iv ^ c`.
- **Warm-up.** After `prng_load`, each core runs the 4*288-step warm-up in
  18 clocks, then raises `prng_ready`.
- **Re-seeding.** TRIVIUM should be re-seeded well before 2^64 output bits.
  At 192 bits per clock that is far beyond any practical run, but the host
  may re-seed between inferences.
- **Masking off.** `prng_en` = 0 forces every random bit to zero. The engine
  then computes the same result with trivially masked (that is, unmasked)
  values. This mode exists for leakage tests against an unprotected run.

## 6. Top level, memories and host interface

`bomanet_top` wires the datapath as a three-stage front end feeding the
adder:

| stage       | work                                                                                                   |
|-------------|--------------------------------------------------------------------------------------------------------|
| A           | the controller's descriptor addresses the pixel, weight, bias and activation memories (registered reads) |
| B           | the operand is formed: masked multiplexer (layer 1), masked XNOR (later layers) or masked bias (bias round) |
| C           | operand shares registered; adder `a` = register file slot, or masked zero in the first round           |
| C+100       | write-back to the register file or, via `~msb`, to the activation memory                               |

Memories:

| memory       | contents                                                                              | port    |
|--------------|---------------------------------------------------------------------------------------|---------|
| `pixel_mem`  | 784 x 8 bit                                                                           | host write |
| `weight_mem` | 2,842,140 x 1 bit. Layer by layer, input-major: `base(L) + input*nodes(L) + node`      | host write |
| `bias_mem`   | 3040 x 20 bit, address `L*1010 + node`                                                | host write |
| `act_mem`    | 3 banks x 1010 x 2 bits (shares). One bank per hidden layer, so no write-after-read hazards | internal |

`base(L)` is 0 for layer 0, 784*1010 for layer 1, and 784*1010 + 1010*1010
for layer 2. The output layer follows at 784*1010 + 2*1010*1010. `nodes(L)`
is 1010 for the hidden layers and 10 for the output layer.

Host protocol:

1. Write the model through `w_*` and `b_*`, and the image through `pix_*`.
   These are one-word-per-clock write ports.
2. Pulse `prng_load` with a key and IV, then wait for `prng_ready`.
3. Pulse `start`. It is accepted when the engine is idle, and the PRNG is
   ready or disabled.
4. `busy` stays high until `done` pulses. `result` then holds the index
   shares until the next start.

The image can be replaced between inferences without reloading the model.

## 7. Parameters

| parameter   | default | meaning                                                        |
|-------------|---------|----------------------------------------------------------------|
| `N_IN`      | 784     | inputs (pixels)                                                |
| `N_HID`     | 1010    | nodes per hidden layer (a multiple of 101 fills every slot)    |
| `N_HLAYERS` | 3       | hidden layers (at most 3 with the 2-bit layer field)           |
| `N_OUT`     | 10      | outputs                                                        |
| `W`         | 20      | adder width; latency 5W, slot count 5W+1                       |

Index fields are 10 bits wide (`NODE_W`) and slots 7 bits wide (`SLOT_W`),
as set in `bomanet_pkg`. Enlarge those before raising `N_HID` past 1023 or
`W` past 25.

## 8. Departures from the published design

- **Random bits per AND.** The text says one masked AND "uses 3 random
  bits". Its gate drawing and its full-adder drawings use one bit per gate,
  and that is what is built: 3 bits per full adder.
- **Sum delay depth.** The number of registers on the sum path of a full
  adder is not printed. Five registers make sum and carry leave together and
  give the published 100-cycle latency.
- **Memories.** The weight and bias memories are described as ROMs. Here
  they have write ports, because the trained model is an input. The
  published design uses block RAM; the arrays here are plain arrays that
  synthesis maps as it sees fit.
- **Folded bias.** The POPCOUNT correction (`-N`) is folded into the stored
  bias. The published design mentions doing the subtraction during the bias
  addition; it does not say how.
- **Start and bias masking.** The masked-zero start value of an accumulator
  and the masking of each bias with fresh bits are this design's choices.
  The published design does not say how these values enter the adder.
- **Output logic.** The masked multiplexer with a *masked* select is written
  as a 7-input atomic look-up. The published design gives only its
  function. On a 6-input-LUT FPGA this needs a balanced construction, and
  its leakage has not been assessed here. Loading node 0 first is this
  design's reading of the plain multiplexers in front of the max registers.
- **Randomness.** The published design names TRIVIUM and "PRNGs". The
  number of cores, the 64-bit unrolling, the IV split and the enable port
  are this design's.
- **Host interface.** The evaluation board's register protocol is not part
  of this RTL. The top exposes plain write, start and result ports instead.
- **Baseline.** The unmasked baseline engine used for comparison is not
  included.

## 9. How far to trust it

The functional behaviour is verified in simulation:

- every block against an independent model;
- the full 784-1010-1010-1010-10 network end to end against an integer
  reference;
- the 100-cycle adder latency, the 101-cycle loop and the total cycle count,
  all checked exactly.

Side-channel security is *not* verified by simulation. It depends on how the
design is mapped:

- Synthesis must keep the Trichina register stages and the per-share
  structure. The published implementation disabled optimisations such as
  LUT combining and register re-ordering for the masked parts, and used
  keep/don't-touch attributes. Those are tool-specific and are not in this
  RTL.
- Each `masked_lut` and `masked_sel_lut` must map to a single look-up.
- The delay lines must not be merged with logic that combines shares.

The masking is first-order only, as in the published design.

## 10. Files and simulation

`rtl/` contains one module or package per file:

| group              | files                                                                                   |
|--------------------|-----------------------------------------------------------------------------------------|
| package            | `bomanet_pkg`                                                                           |
| masking primitives | `trichina_and`, `masked_full_adder`, `masked_adder`, `masked_lut`, `masked_mux`, `masked_sel_lut`, `masked_activation`, `masked_xnor` |
| memories           | `pixel_mem`, `weight_mem`, `bias_mem`, `act_mem`, `acc_regfile`                         |
| control and output | `bnn_controller`, `masked_output_logic`                                                 |
| randomness         | `trivium_prng`                                                                          |
| helper             | `delay_line`                                                                            |
| top                | `bomanet_top`                                                                           |

`tb/` has a self-checking bench `<module>_tb.sv` for each block. Each bench
prints `TB_RESULT checks=N failures=M`. The two end-to-end benches are:

- `bomanet_top_tb`: a reduced network of 16 inputs, 202 hidden nodes and 10
  outputs, with the real 20-bit adder. It runs three inferences: masked,
  unmasked, and masked again after re-seeding. It takes a few seconds.
- `bomanet_full_tb`: one inference at the full size, with default
  parameters. It takes about a minute and a half of simulation.

To run a bench with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/bomanet_pkg.sv tb/bomanet_top_tb.sv --top-module bomanet_top_tb
    ./obj_dir/Vbomanet_top_tb

Replace `bomanet_top_tb` with any other bench name.

`trichina_x32_tb` rebuilds the set-up used to measure leakage from a single
masked AND: 32 gates that share the same masked inputs but each have their
own random bit. Besides checking every result, it computes a Hamming-weight
stand-in for power. The mean weight of one share class does not depend on
`a & b`, which is the first-order property. The covariance between the two
share classes flips sign with `a & b`, which is the expected second-order
leak of two-share masking.
