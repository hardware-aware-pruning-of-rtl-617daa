# Sparse fully connected layers with LFSR-generated weight positions

A pruned neural-network layer normally has to store three things: the
surviving weight values, where each of them sits in the weight matrix, and
pointers that say where each column starts. The positions and pointers can
take as much memory as the weights themselves.

This design stores only the weight values. Where each weight sits is not
stored. It is regenerated on chip, one weight per cycle, by two linear
feedback shift registers (LFSRs): one gives the row, which is the input
neuron, and one gives the column, which is the output neuron. The network
is pruned offline with the same LFSRs and seeds. The positions the LFSR
pair visits are the ones kept; every other connection is forced to zero and
dropped. At inference the same seeds reproduce the same positions, so weight
`k` in memory always meets the input and output neuron it was trained for.

The RTL is a single-MAC engine for one sparse fully connected layer:

```
                 +---------------------------+
  row_seed ----->| row LFSR  -> x n_in  -> MSBs|--- row_idx ----+
  col_seed ----->| col LFSR  -> x m_out -> MSBs|--- col_idx --+ |
                 +---------------------------+  (LFSR index   | |
                          lfsr_index_generator   generator)   | |
                                                              | v
  host ---> input_buffer [4096 x 8b] <------------------------+-row_idx
                 | x_i                                        |
  host ---> sparse_weight_memory [4096 x 8b] <-- k (0..K-1)   |
                 | S_k                                        |
                 v                                            v
              mac_unit:  sum = partial + x_i * S_k   <-- output_buffer [4096 x 32b]
                 |                                          ^   | (read at col_idx)
                 +------------ write back at col_idx -------+   |
                                                                v
                                                relu_unit --> neuron output
```

All sequencing comes from `sparse_fc_controller`. `lfsr_sparse_fc_top`
wires the blocks together.

## How a position is generated

**LFSR (`lfsr`).** Each LFSR is a W-bit Fibonacci register; the default is
W = 24. Every step it shifts one place towards bit 0. The new top bit is the
XOR of the bits selected by `TAPS`. Bit `i` of `TAPS` is the coefficient
`c_i` of the characteristic polynomial
`x^W + c_{W-1} x^{W-1} + ... + c_1 x + 1`. The default polynomial is
`x^24 + x^23 + x^22 + x^17 + 1` (`TAPS = 24'hC20001`). It is primitive, so
the state runs through all 16,777,215 non-zero values before it repeats. In
the testbench model the step is:

```
next = { s[0] ^ s[17] ^ s[22] ^ s[23], s[23:1] }
```

The width matters beyond index resolution. The pair of LFSRs repeats after
2^W-1 steps, and from then on the positions repeat too. A 16-bit pair would
already wrap inside a 784x300 layer at 70 % sparsity (70,560 weights).
24 bits cover the largest evaluated layer, 2048x2048 at 40 % sparsity
(2.5 M weights).

A zero seed would lock the register, so the module loads 1 instead.

**Scaling (`index_scaler`).** An LFSR value `v` lies in 1..2^W-1, but a
layer has only `len` neurons. Rejecting out-of-range values would waste
cycles. Instead, `v` is multiplied by `len` and only the bits above the low
W are kept:

```
index = floor(v * len / 2^W)          always in 0 .. len-1
```

The row LFSR is scaled by `n_in` and the column LFSR by `m_out`. Both
LFSRs use the same polynomial, differ in their seed and step together. So
weight `k` of a layer sits at:

```
row(k) = floor(R_k * n_in / 2^24),    col(k) = floor(C_k * m_out / 2^24)
R_0 = row_seed, C_0 = col_seed,       R_{k+1} = next(R_k), C_{k+1} = next(C_k)
```

This formula is all that offline training needs in order to place its
weights. Two weights can land on the same (row, column) pair; the hardware
simply adds both products. Storage order is the order of `k`.

## The datapath and its one hazard

The engine issues one stored weight per cycle. It needs two stages because
all three memories have synchronous reads:

| cycle | what happens for weight k |
|---|---|
| issue (t) | the LFSRs give `row_idx`, `col_idx`; the memories read the input buffer at `row_idx`, the weight memory at `k` and the output buffer at `col_idx`; both LFSRs step |
| execute (t+1) | the MAC forms `partial + x*w` (8-bit signed operands, 16-bit product sign-extended to 32 bits) and writes it back to the output buffer at the same column |

The column sequence is pseudo-random, so every weight costs one read and one
write of the output buffer. This extra traffic is the price of not storing
indices.

**Forwarding.** The output-buffer read for weight k+1 happens at the same
clock edge that writes the result of weight k. When the two weights belong
to the same output neuron, the read returns the value from before that
write. `mac_unit` keeps its last write (column and value). If the next
operation hits the same column in the very next cycle, it uses that saved
value in place of the memory data. Writes two or more cycles old are already
visible to the read, so one register is enough. The top counts these events
on `bypass_count`. They are frequent when `m_out` is small. Consecutive
states of a Fibonacci LFSR are shifted copies of each other, so consecutive
column indices are correlated, and the hit rate is not simply `1/m_out`.

## Running a layer

All host ports are plain signals; see the header of
`rtl/lfsr_sparse_fc_top.sv`.

1. Write the input vector into the input buffer (`in_we`, `in_waddr`,
   `in_wdata`). Write up to 4096 weights, in LFSR order, into the weight
   memory (`w_we`, `w_waddr`, `w_wdata`).
2. Set `n_in`, `m_out` and `k_count`, the number of weights in this pass.
   Set the seeds. Raise `start` for one cycle with `clear = 1` and
   `reseed = 1`.
3. The engine zeroes output neurons `0..m_out-1`, one per cycle. It then
   processes one weight per cycle, drains the pipeline and pulses `done`.
   From `start` to `done` takes exactly `k_count + 2` cycles, plus `m_out`
   when clearing.
4. If the layer has more than 4096 stored weights, load the next 4096 and
   start again with `clear = 0` and `reseed = 0`. The LFSRs carry on from
   where they stopped, and the sums carry on accumulating.
5. Read the outputs at `out_raddr`; `out_rdata` follows one cycle later.
   Leave `relu_en` at 1 for `max(0, z)`, or set it to 0 to get the raw sum,
   for instance for the last layer's logits.

Bias terms are not handled separately. Append a constant input (for example
`x[n_in-1] = 1`) and let its weights act as the bias.

The engine does not requantise its 32-bit outputs to 8 bits for the next
layer; the host does this. The workload testbench uses `min(127, a >> 6)`.

Assertions check the host rules: sizes must be in range when starting, no
start while busy, and no memory writes while busy.

## Sizes

| parameter | default | origin |
|---|---|---|
| datapath (activations, weights) | 8 bit | the published design |
| input buffer / weight memory / output buffer depth | 4096 entries each | chosen: the largest memory bank size (4 KB) listed for the design; smaller listed banks were 256 B, 512 B, 1 KB |
| accumulator | 32 bit | chosen; holds 4096 products of two 8-bit values without overflow |
| LFSR width / polynomial | 24 / `x^24+x^23+x^22+x^17+1` | chosen; the method only asks for a primitive polynomial; the period covers the largest evaluated layer |
| MAC lanes | 1 | the published block diagram draws one multiplier and one adder |
| target clock | 1 GHz, 65 nm | published; not checked here |

With the default sizes, yosys counts about 196 kbit of memory and under 200
flip-flops.

## Workloads

The method was evaluated on the fully connected layers of three networks;
only those layers are pruned. Against the default sizes:

* **LeNet-300-100** (784-300-100-10): fits. At 70 % sparsity the first
  layer has 70,560 stored weights, which run as 18 passes.
* **LeNet-5 fully connected part** (400-120-84-10): fits. At 40 % sparsity
  the first layer has 28,800 weights, which run as 8 passes.
* **Modified VGG-16 on 64x64 ImageNet** (fully connected layers of 2048,
  1000 classes): the 2048-to-2048 and 2048-to-1000 layers fit. The input
  length of the first fully connected layer is not known. If it is
  4x4x512 = 8192, it exceeds the 4096-entry input buffer.

Convolution layers are outside this engine.

## Departures and open points

* The method's description is inconsistent about what the LFSR positions
  mean. The training description calls them the connections that are
  regularised to zero and pruned. The hardware description uses them as the
  positions of the stored weights. This RTL follows the hardware reading:
  the LFSR pair gives the positions of the weights that are kept.
* Only the mapping from an LFSR value to an index is given, as multiply and
  keep the most significant bits. The LFSR structure (Fibonacci, shift
  direction), its width and polynomial, the rounding (truncation) and the
  equal polynomials for both LFSRs are choices made here.
* The controller, the clear phase, the multi-pass scheme for large layers,
  the forwarding register, the host interface, the number format (two's
  complement) and the place of the ReLU (on the read-out path) are not
  described in the source and are this design's own.
* Parallel MAC units are mentioned as a way to scale throughput but are not
  described, so only one lane is built.
* The 65 nm SRAM macros are written as plain synchronous arrays. Memory
  contents are not reset.
* The baseline it was compared with (weights plus 4- or 8-bit relative
  indices and column pointers) is not part of this design. Neither is the
  offline training: regularisation, pruning and retraining.

## Simulating

Every file in `rtl/` is one module or package; `lfsr_prune_pkg.sv` must be
read first. Each block has a self-checking testbench `tb/<module>_tb.sv`
that prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/lfsr_prune_pkg.sv tb/lfsr_sparse_fc_top_tb.sv \
    --top-module lfsr_sparse_fc_top_tb -o sim && obj_dir/sim
```

| testbench | what it shows |
|---|---|
| `lfsr_tb` | full period and every non-zero state visited, at 8 and 24 bits; the 8-bit output bits obey the polynomial recurrence; load and hold |
| `index_scaler_tb` | `floor(v*len/2^24)` against integer arithmetic; index always below `len` |
| `lfsr_index_generator_tb` | row and column streams against a model; reseeding repeats the stream |
| `input_buffer_tb`, `sparse_weight_memory_tb`, `output_buffer_tb` | one-cycle reads, read-before-write, random traffic |
| `mac_unit_tb` | exact sums against a model of the buffer, with back-to-back hits on one column |
| `relu_unit_tb` | `max(0,z)` and bypass |
| `sparse_fc_controller_tb` | address order, one `done`, latency `k+2(+m)`, zero-weight passes |
| `lfsr_sparse_fc_top_tb` | default sizes: 784x300 layer in two passes (clear, reseed, continue), then a 100x10 layer; every output raw and with ReLU; latency; each mechanism (clear, reseed, continued pass, bypass, ReLU clamp) must occur |
| `fc_workloads_tb` | the fully connected layers of LeNet-300-100 (70 % sparse), LeNet-5 (40 %) and two VGG-16 layers (95 %), chained with host requantisation, 110 passes, every output checked |

All of these run with the engine at its default parameters; only `lfsr_tb`
adds an 8-bit instance. Weights and inputs are random, because trained
weights are not available. The testbenches therefore check the arithmetic
and the position sequence, not a network's accuracy.
