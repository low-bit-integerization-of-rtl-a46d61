# Integerized self-attention head with operand reordering

This is synthesizable SystemVerilog for one self-attention head of a low-bit (3-bit) vision
transformer. The datapath keeps every matrix product in the integer domain.

In a conventional integerized transformer, each layer dequantizes its low-bit activations and
weights first and then multiplies. This design does the reverse: it does the low-bit
multiply-accumulates first and applies the quantization step sizes afterwards. The reordering
moves the step sizes out of the arrays. Each step size either becomes a single per-channel
multiplication after a linear layer, or is folded into the reference values of the next
quantizer. As a result, every systolic array in the design multiplies NBIT-bit codes, and no
full-precision matrix product is left.

The default configuration is the DeiT-S attention head:

| parameter | default | meaning |
|---|---|---|
| `N` | 198 | tokens per image |
| `I` | 384 | embedding width (input channels) |
| `O` | 64 | head width |
| `NBIT` | 3 | code width; codes are signed, -4..3 |

## Dataflow

```
x (Q8.8, I channels per token, one token per cycle)
 └─ X quantizer ─ skew ─┬─ linear Q ─ LayerNorm+quant ─ corner turn ─┐
                        ├─ linear K ─ LayerNorm+quant ─ corner turn ─┴─ QK^T + exp + softmax quant ─┐
                        └─ linear V ─ quantizer ─ reversing buffer ──────────────────────────────────┴─ PV + output quant ─ y
```

The three linear arrays are chained. The activations leave the right edge of the Q array and
enter the K array, then the V array, so one input stream feeds all three.

### Quantizers (`act_quantizer`)
A quantizer is a bank of `2^NBIT - 1` comparators against ascending references, followed by a
counter of how many references the input exceeds. The signed code is that count minus
`2^(NBIT-1)`. Quantizers never divide or round. Every step size, scale or offset is applied by
moving the references.

### Linear arrays (`linear_array`, `linear_pe`)
Each linear array is I×O processing elements and is weight-stationary. Input channel `i` of a
token enters row `i`, and the lanes are skewed by one cycle per row. Partial sums flow down each
column. Every column ends in two arithmetic stages:
- an adder for the integer bias `b / (dX·dW)`;
- a multiplier for the per-channel post-scale.

The post-scale is `dW` for Q and K: their common input step `dX` cancels in the LayerNorm that
follows. For V it is `dX·dW`.

Token `n` appears on column `o` at cycle `n + I + o + 2`.

### LayerNorm fused with its quantizer (`layernorm_q`, `ln_stats_pe`, `ln_compare`)
This is the least obvious part of the design. A row of O statistics PEs computes the mean and
the sum of squared deviations (`M2`) incrementally (Welford's update) while the skewed token
passes through. The normalized value is never formed. Instead, the test
"normalized value > reference s" is rewritten without a division or a square root. With
`d = x − mu`, `s' = (s − beta)/gamma` and `sigma² = M2/O`, the magnitude comparison is:

    cmp = O·d² > M2·s'²

The sign logic then gives:

    above = (d > 0 ∧ cmp) ∨ (s' < 0 ∧ ¬cmp)

The result is inverted when gamma is negative. `1/gamma` is supplied per channel as a
configuration input, so only multiplications remain.

A LayerNorm block delivers all O codes of token `n` at cycle `n + O + 1`.

### Corner turn (`transpose_delay`)
The LayerNorm produces Q and K one token per cycle, with all channels in parallel. The QK^T
array needs them the other way round: one lane per token, one channel per cycle. The corner
turn is an N×O buffer. It is written token by token and, once full, read channel by channel
with a one-cycle skew per lane. This buffer is the "delay" that the Q and K paths show in
front of the attention array.

### QK^T with embedded softmax (`qk_softmax_array`, `qk_pe`, `exp2_unit`, `softmax_quant`, `scan_chain`)
This is an N×N output-stationary array. Row `i` receives query token `i` and column `j`
receives key token `j`, one channel per cycle.

After O channels, each PE turns its integer dot product `a` into an exponential. It uses
`e^(s·a) = 2^z`, with the scaled exponent `z = a · qk_scale` where `qk_scale = s·log2(e)·dQ·dK`.
The exponential is approximated as:

    2^z ≈ (1 + frac(z)) << floor(z)

One shift and no multiplier. Exponentials below one LSB flush to zero.

An enable pulse travels along each row, one PE per cycle. As it passes, each PE adds its
exponential to a running row sum, so the complete sum `S_i` leaves the end of row `i`. A second
pulse, `sen`, loads the row's scan chain. The chain then shifts the exponentials out, last
column first. Softmax is never divided out: the softmax quantizer multiplies its references
`(k − ½)·d_attn` by `S_i` and compares them with the undivided exponential.

### Reversing buffer (`reverse_buffer`)
The scan chains emit the attention scores of a row in reverse key order (`j = N−1` first). V
must therefore be presented to the PV array in reverse token order too. The reversing buffer
is one N-deep LIFO per channel, read with the same skew the PV array expects.

### PV product (`pv_array`, `pv_pe`)
This is an N×O output-stationary array. It multiplies 3-bit attention codes by 3-bit value
codes. A second scan chain per row moves the O sums into that row's output quantizer. The
output quantizer's integer references absorb the attention, value and output step sizes.

## Number formats

| signal | format |
|---|---|
| input tokens, LayerNorm references, beta, 1/gamma | Q8.8, 16 bits |
| linear post-scale | 16 bits, 12 fraction bits |
| linear outputs | Q8.8, saturated, rounded toward −∞ |
| LayerNorm deviations and M2 | 16 fraction bits |
| exponent scale `qk_scale` | 16 bits, 12 fraction bits |
| exponentials and row sums | 24 bits, 8 fraction bits, saturating |
| softmax references | 16 bits, 12 fraction bits |
| integer accumulators | `2·NBIT + clog2(length) + 1` bits |

`sa_pkg` holds all of these. Changing a format there changes it everywhere.

## Top level and its protocol (`sa_top`)
1. **Load the weights.** While `w_we` is high, `wq/wk/wv_data[o]` are written to input row
   `w_row` of output channel `o`.
2. **Hold the configuration.** The references, biases, post-scales, `qk_scale` and
   softmax/output references must stay stable for the whole operation.
3. **Send the tokens.** Present the N tokens of an image with `x_valid`, one per cycle. Gaps
   are allowed.
4. **Sequencing.** When the K LayerNorm has delivered the last token, at cycle `T`, a small
   sequencer raises `busy` and runs the attention stage at fixed offsets:
   - the corner-turn reads start at `T`;
   - the QK enable pulse comes at `T+2+O`;
   - the QK scan pulse and the V replay both come at `T+2+N+O`;
   - the PV scan pulse comes at `T+3+2N+2O`.
5. **Results.** Row `i` (query token `i`) emits its O output codes on `y_out[i]`, channel
   `O−1` first, starting at cycle `T+5+2N+2O+i`, with `y_valid[i]` high.
6. **Done.** `done` pulses at `T+4+3N+3O` and `busy` falls. An assertion flags a token sent
   while `busy` is high.

## Where this RTL departs from the published description
- **Sign label in the comparator figure.** The figure of the LayerNorm comparator labels the
  second input of its OR gate `s' > 0`. Read literally, the output would be true for every
  positive `s'`. The RTL uses `s' < 0`, which makes the test exact. The testbench checks this
  against an exact reference.
- **Negative gamma.** Gamma may be negative. Dividing by a negative gamma flips the inequality,
  so the comparator output is inverted per channel. The published description does not treat
  this case.
- **Delay buffers.** The delays in front of the attention array are built as corner-turn
  buffers. A V reversing buffer is added because of the scan-chain order.
- **PV multipliers.** The PV PEs use plain NBIT×NBIT multipliers.
- **Designer's choices.** The following are not published and were chosen for this RTL: the
  sequencer, all latencies, the weight-load port, the number formats, and the range handling
  of the exponential.
- **Scope.** Only one attention head is built. The output projection, the MLP, the other heads
  and layers, and any host or memory interface are not part of this RTL.

## Verification and simulation
Every block has a self-checking testbench in `tb/`. Each one compares the block with an
independent behavioural model in `tb/sa_ref_pkg.sv`, bit-exactly and cycle-exactly, and ends
with a line of the form `TB_RESULT checks=… failures=…`.

`tb_sa_top` runs two back-to-back images through the whole head at `N=8`, `I=16`, `O=8` and
compares every output code and its cycle. It also counts how often these mechanisms occur:
- LayerNorm codes at both ends of the range;
- negative-gamma channels;
- exponential flush-to-zero;
- zero and nonzero attention codes;
- clipped output codes.

It fails if any of them never happens. That reduced size is the largest end-to-end simulation
that was run. At the default size, the design passes lint and elaboration, but a Verilator
simulation build of the full head (about 39 000 attention PEs and 74 000 linear PEs) takes
longer than is practical.

To run a block testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/sa_pkg.sv tb/sa_ref_pkg.sv \
        rtl/*.sv tb/tb_linear_array.sv --top-module tb_linear_array
    ./obj_dir/Vtb_linear_array

For `tb_sa_top`, use the same command with `tb/tb_sa_top.sv` and `--top-module tb_sa_top`.
`tb/tb_sa_top_body.svh` holds the body of that testbench. To simulate another size, copy
`tb_sa_top.sv` and change its localparams. Keep `N ≥ 8` so that every mechanism can occur.
