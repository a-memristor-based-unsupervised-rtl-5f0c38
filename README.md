# A memristor-crossbar GAN training accelerator in SystemVerilog

A generative adversarial network (GAN) trains two networks against each other. The
generator G turns noise into artificial samples. The discriminator D scores real and
artificial samples. Both are trained by backpropagation. This design trains both on
memristor crossbars. A crossbar computes a matrix-vector product in one step: the inputs
drive the word lines, the weights are the cell conductances, and each bit line sums
input x conductance.

The design rests on three ideas:

- **Memory-free layers.** Each layer keeps everything it needs in crossbars. No separate
  buffer holds weights or activations. Layer outputs are written straight into the crossbar
  that computes the weight update. The next layer's weights, transposed, are written straight
  into the crossbar that propagates the error. The updated weights are written straight back.
- **A diff block for the GAN loss.** Look-up tables turn D's scores into the gradients of
  log D(x) and log(1 - D(G(z))), and adders average them over the batch.
- **A cross-parallel pipeline.** D and G run at the same time whenever the data allows it.

The RTL is a cycle-level digital model of that architecture. The crossbars are behavioural
models with integer conductances.

## Architecture

`gan_top` contains four parts. The letters are the data-flow steps:

| step | from -> to | what moves |
|---|---|---|
| a | `real_in` -> Discriminator | real samples x |
| b | `noise_in` -> Generator | noise z |
| c | Generator -> Discriminator | artificial samples G(z) |
| d | Discriminator -> Diff block | scores D(x) and D(G(z)), one per clock |
| e | Diff -> Discriminator | Error_D, then D's backward pass |
| f | Diff -> Generator | Error_G, then G's backward pass |

The Discriminator and the Generator are two instances of `gan_block`. Only their
weights differ. `control_unit` sequences the steps, and `diff_block` computes the two
gradients.

### Data formats

- Activations, errors and weights are signed 8-bit. This matches 8-bit memristor states.
  Forward activations are 0..127, because the output stage applies a ReLU.
- A score is output 0 of D's last layer. Its 7 bits address the look-up tables, read as
  the probability D = (d + 0.5)/128.
- Gradients are 16-bit signed, with 4 fractional bits.

## The parallel memory-free block (`gan_block`)

A block has NL layers (5 by default). Each layer has three kinds of unit:

- **L_l** (`op_unit`): the forward layer. It is a 32x32 crossbar holding w_l, with one
  reshaped kernel per bit line, followed by integrate-and-fire (IFC) ReLU stages
  (`ifc_neuron`). There are S = 32 copies of each L_l, all with the same weights, so
  32 samples pass through side by side.
- **E_l** (`err_unit`, for l < NL): row c of its crossbar holds column c of L_{l+1}. So
  e_l = e_{l+1} x w^T_{l+1}.
- **W_l** (`wu_unit`): row s of its crossbar holds o_l of sample s. Driving its word lines
  with error column c across all samples gives the update of weight column c. An adder
  then forms w* = w + alpha * update.

One forward and one backward pass look like this, with P = max(S, N):

```
cycle 0          fwd_start: L_1 runs; L_l runs one cycle after L_{l-1}
cycle NL         out_valid: o_NL of all S samples, held until the next pass
cycles NL+1..    PROG, P cycles: W_l row s <- o_l[s]   and   E_l row c <- L_{l+1} column c
bwd_start        the 16-bit gradient >>> ERR_SHIFT, saturated to 8 bits, becomes e_NL
                 (the same value for every output and sample)
BWD_E            S+NL-1 cycles: the E units form e_l sample by sample, pipelined
                 (E_{l-1} takes sample s one cycle after E_l)
BWD_W            N+1 cycles: cycle c runs every W_l on error column c; the next cycle
                 writes the new column c into all S copies of L_l
bwd_done         S+N+NL+1 cycles after bwd_start
```

The update rule is the one stated for this architecture:
w*_l = alpha * e_l (x) o_l + w_l. It uses the layer's own output o_l, with the ReLU
derivative taken as o_l itself. A textbook update would use o_{l-1} and a 0/1 ReLU mask.
The RTL follows the architecture literally, and the testbenches check that rule.
The sign is "ascend the gradient": the update is added.

## The diff block

- **Real scores (d1).** LUT1 maps each real score to floor(2^4 / D). The result is written
  to M[i], the i-th of 64 entries.
- **Fake scores (d2).** LUT2 maps each fake score to -floor(2^4 / (1 - D)), and M[i] is
  read at the same time.
- **Adder 1** gives Error_G = (1/m) * sum LUT2.
- **Adder 2** gives Error_D = (1/m) * sum M + Error_G. It takes adder 1's result as an
  offset.

1/m is a right shift, so the batch size m must be a power of two (64 by default).
`err_valid` pulses two clocks after the last fake score. All real scores of a batch must
arrive before the fake ones; an assertion checks this.

## The cross-parallel pipeline (`control_unit`)

A batch of 64 is handled as P = 2 passes of S = 32 samples. One iteration runs like this:

1. **D, steps a and d1.** D runs its two real passes. After each pass, the control unit
   streams the pass's 32 scores into the diff block.
2. **G, step b.** In parallel, G generates pass 0. It holds its output until D has taken it.
3. **Wait.** If G is not ready, D sits idle.
4. **Steps c and d2.** D runs each generated pass as soon as it exists. G starts its next
   pass right after D has taken the previous one.
5. **Steps e and f.** After the 64th fake score, the gradients go to both blocks. Both
   update their weights at the same time.
6. **Next iteration.** D starts its next real passes as soon as its own update ends, even
   if G is still updating. The two meet again at the first step c.

A block never starts while busy. Beyond that, the only interlock is the data dependency
from G's output to D's fake pass. `stats` counts these events:

- cycles of a || b
- cycles of e || f
- cycles D waits for G
- asynchronous starts
- busy time of each block

## Files

Package:

- `gan_pkg`: types, default sizes, the saturate helper and the stats struct.

Blocks, bottom-up:

- `mem_crossbar`: the crossbar model.
- `ifc_neuron`: the IFC output stage.
- `op_unit`, `err_unit`, `wu_unit`: the three layer units.
- `gan_block`: one discriminator or generator.
- `diff_lut`, `diff_mem`, `diff_adder`: the parts of the diff block.
- `diff_block`: the diff block.
- `control_unit`: the pipeline sequencer.
- `gan_top`: the whole accelerator.

Each module opens with a comment on its function, interface and timing.

### Parameters

| parameter | default | origin |
|---|---|---|
| crossbar size N | 32 | design point (32x32 crossbars) |
| data width | 8 | design point (8-bit states) |
| layers NL_D, NL_G | 5, 5 | design point (5-layer CNN / DeCNN) |
| parallelism S | 32 | design point |
| batch M_BATCH | 64 | design point |
| O_SHIFT, E_SHIFT | 5, 5 | this implementation (IFC thresholds 2^shift) |
| ALPHA_SHIFT | 8 | this implementation (learning rate 2^-8) |
| ERR_SHIFT | 4 | this implementation (gradient to 8-bit error) |

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -y rtl rtl/gan_pkg.sv tb/tb_gan_top.sv --top tb_gan_top
obj_dir/Vtb_gan_top
```

Leaf blocks have their own tests. Each compares against values computed inside the test:

| test | what it checks |
|---|---|
| `tb_mem_crossbar` | dot products, read-back, hold |
| `tb_ifc_neuron` | shift, ReLU and saturation |
| `tb_op_unit`, `tb_err_unit`, `tb_wu_unit` | each unit's equation, one-clock latency |
| `tb_diff_lut` | every table entry against real arithmetic |
| `tb_diff_mem`, `tb_diff_adder` | memory and adder behaviour |
| `tb_diff_block` | both gradients and the two-clock latency |
| `tb_control_unit` | the sequencer, against timing models of the blocks (`tb_block_model`) |

`tb_gan_block` runs one block, with NL=3, S=4 and N=8, against a reference model. It checks
forward outputs, exact latencies, every updated weight, and a second pass with the new
weights.

`tb_gan_top` trains the whole accelerator for three iterations: D with 3 layers, G with
6, S=4, N=8 and batch 8. A reference model replays every step. The test checks:

- both gradients of each iteration;
- every final weight;
- the last generated samples;
- that each pipeline mechanism happened at least once.

The blocks have different depths in this test so that G's update outlasts D's. That is
what triggers the asynchronous start.

**Largest size simulated:** the reduced sizes above. The top at its defaults has 338
crossbars: 2 x 5 x 32 forward copies, 10 weight-updating units and 8 error units. It passes
lint and elaboration. Verilator, however, turns it into several hundred C++ files of about
1-2 MB each, and compiling them takes far longer than a practical simulation run. No
full-size simulation was run.

## How far this follows the architecture, and where it departs

**Followed:**

- the block structure and its wiring;
- the number of layers, crossbar size, precision, parallelism and batch;
- the LUT / memory / adder structure of the diff block;
- the update and error equations, with E_l holding w^T of layer l+1 as the unit diagrams show
  (one equation elsewhere writes w^T_l instead; the diagrams were followed);
- the order of the block's internal phases;
- the ordering rules of the cross-parallel pipeline.

**This design's own choices:**

- **Layers.** Each layer is a single 32x32 tile: a 32-input, 32-output layer. Large
  convolution layers tiled over many crossbars are not built, so real image networks (MNIST,
  CIFAR-10, ImageNet, LSUN sizes) do not fit.
- **Generator inputs.** The deconvolution input zero-padding and grouping scheme is not
  built. The generator takes its inputs already arranged.
- **Crossbar.** Analog behaviour is reduced to exact integer sums with one-cycle reads.
  Differential cells are assumed for signed weights. Resistance range, noise and
  programming energy are not modelled.
- **IFC stages.** These are a shift and a saturation.
- **LUT contents.** They are the derivative with respect to D of log D and of log(1 - D).
- **Error entry.** The scalar gradient is broadcast as the last layer's error.
- **Error latch.** The E units latch e_l of all samples so that W_l can read error columns.
  This is a small register array the architecture does not mention.
- **Weight-update samples.** W_l keeps only the last pass of S samples. With batch 64 the
  update uses 32 samples.
- **Learning rate and scaling** are fixed shifts.
- **Batch size.** Passes of S samples, the score stream and the handshakes are this
  design's own. The batch must be a power of two and a multiple of S.

Timings in this RTL are clock cycles of the digital model. They say nothing about the
seconds per iteration of the analog implementation.
