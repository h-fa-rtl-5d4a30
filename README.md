# H-FA: FlashAttention with a log-domain accumulator

This is synthesizable SystemVerilog for an attention accelerator that computes
`softmax(q K^T) V` for one query vector at a time. It follows the
FlashAttention-2 recurrence. Its main idea is to split the arithmetic between
two number systems:

* **Floating point (BFloat16)** for the dot products `s_i = q . k_i`, the
  running maximum `m_i` and the score differences `m_{i-1} - m_i` and
  `s_i - m_i`.
* **Fixed-point logarithms** for everything after that: the exponentials, the
  weighting of the value vectors, the running sums, the rescaling when the
  maximum changes, and the final division by the softmax denominator.

In the log domain a multiplication by `e^x` is an addition of `x*log2(e)`. The
final division is a subtraction. Addition of two numbers needs only a
comparison, a subtraction, a small `2^-x` table and an addition. The
accelerator therefore has no floating-point multiplier or divider and no
exponential unit outside the dot products.

The design is an implementation of the architecture in K. Alexandridis and
G. Dimitrakopoulos, *"H-FA: A Hybrid Floating-Point and Logarithmic Approach to
Hardware Accelerated FlashAttention"*. The paper gives the block diagrams and
equations. It does not give the RTL, the pipeline, the interfaces or the
table coefficients: those are this implementation's own. The section
"Departures and choices" below lists them.

## The recurrence

For one query and the key/value rows `i = 1..N`, FlashAttention-2 keeps three
pieces of state:

```
s_i = q . k_i
m_i = max(m_{i-1}, s_i)
l_i = l_{i-1} e^(m_{i-1}-m_i) + e^(s_i-m_i)           (sum of exponentials)
o_i = o_{i-1} e^(m_{i-1}-m_i) + v_i e^(s_i-m_i)       (weighted sum of values)
attn = o_N / l_N
```

`l` and `o` follow the same update, so they share one datapath. Write
`O = [l, o]` and `V = [1, v]`, both vectors of `D+1` elements. Then, per element,

```
O_i = O_{i-1} * 2^a + V_i * 2^b     with  a = (m_{i-1}-m_i) log2 e,  b = (s_i-m_i) log2 e
```

Both `a` and `b` are ≤ 0. Their factors `2^a` and `2^b` are positive and are
already in logarithmic form. The one conversion into the log domain is that of
the value vector. The one conversion out of it is that of the final result.

### Log-domain numbers

A number `x` is stored as a sign bit and `X = log2|x|`. `X` is signed fixed
point with 9 integer and 7 fraction bits (16 bits, the "9.7" format, type
`lns_t` in `hfa_pkg`). The most negative code, -256.0 (`16'h8000`), stands for
zero. All fixed-point additions saturate, so zero stays at the bottom of the
range.

### Adding two log-domain products (`hfa_lns_lane`)

```
A = log2|O_{i-1}| + a        B = log2|V_i| + b
log2|O_i| = max(A,B) + log2(1 ± 2^-|A-B|)  ≈  max(A,B) ± 2^-|A-B|
sign(O_i) = sign of the A term if A > B, else sign of the B term
```

The sign is `+` when the two terms have the same sign and `-` otherwise. The
step from `log2(1 ± y)` to `± y` is Mitchell's approximation. For
`y = 2^-|A-B|` the error is at most 0.086 in the log for an addition. For a
subtraction with nearly equal terms (`y` near 1) the error is large: the
exact result goes towards zero, but the approximation stops at `max - 1`. This
follows from the method. Attention workloads meet it only when value vectors
of opposite sign cancel.

`2^-|A-B|` (`hfa_pow2_pwl`) splits `|A-B|` into an integer `p` and a fraction
`f`. It takes `2^-f` from a piecewise-linear approximation with 8 uniform
segments, selected by the three top fraction bits, and shifts the result
right by `p`. The coefficients are least-squares fits of `2^-f` on each
segment `[k/8, (k+1)/8)`. They are scaled by 4096 and rounded, so
`2^-f ≈ (c0[k] - c1[k]*f) / 4096`. The line is evaluated with 12 fraction bits
and rounded to 7 after the shift. The largest error over all 65536 inputs is
0.0041.

### Scale terms (`hfa_score_diff`)

One unit per FAU or ACC computes `m_n = max(m_a, m_b)`. It forms the two BF16
differences `m_a - m_n` and `m_b - m_n` with `bf16_sub`. It then quantises
each one to 9.7 fixed point, clamped to `[-15, 0]`: below -15, `e^x` is
negligible. Each result is multiplied by `log2 e` with a constant
shift-and-add. The constant is `1.011100010101b` (= 5909/4096 = 1.44263): one
shifted copy of the operand for each set bit. The sum is shifted back to 7
fraction bits, rounding towards minus infinity. The same two scale terms serve
all `D+1` lanes.

### Into and out of the log domain

* `hfa_log2`: by Mitchell's approximation, `log2|v| ≈ (E - 127) + M`. The
  BF16 exponent and mantissa fields, read together as `E.M`, already form
  that number. One more integer bit makes it signed, then `127 << 7` is
  subtracted. No arithmetic is needed beyond that subtraction.
* `hfa_logdiv`: `L = log2|o_j| - log2|l|` is the log of the attention element.
  Split `L = I + F` (floor and fraction). The approximation
  `2^(I+F) ≈ 2^I (1+F)` makes `I + 127` the BF16 exponent and the 7 fraction
  bits of `F` the mantissa. The sign is `s_o XOR s_l`. An exponent below 1
  gives a signed zero, one above 254 gives the largest finite BF16, and a lane
  that holds the zero code gives zero.

## Organisation

```
           q (broadcast)
             |
  KV buf 0 --+--> FAU 0 --(m,s,log|O|)--> ACC 0 <-- identity
  KV buf 1 --+--> FAU 1 ----------------> ACC 1 <-- ACC 0
  KV buf 2 --+--> FAU 2 ----------------> ACC 2 <-- ACC 1
  KV buf 3 --+--> FAU 3 ----------------> ACC 3 <-- ACC 2
                                            |
                                         LogDiv --> attention vector (BF16)
```

The N key/value rows are split into `P` sub-blocks of `N/P` rows. Each
sub-block sits in its own buffer (`hfa_kv_buffer`). For one query, all `P`
FAUs stream their sub-blocks in parallel, one row per cycle each. Each FAU
ends with a partial triplet: the maximum `m`, and the sign and log magnitude
of each of the `D+1` elements of `O`. Two partial results merge with the same
arithmetic as one FAU step:

```
m_N = max(m_A, m_B),  O_N = O_A e^(m_A-m_N) + O_B e^(m_B-m_N)
```

The ACCs form a chain. ACC `j` merges the triplet of FAU `j` (its `A` side)
with the output of ACC `j-1` (its `B` side). ACC 0 receives the identity
triplet: maximum = most negative BF16, all elements zero. The last ACC feeds
LogDiv. A query over `N` rows thus takes `N/P` cycles of streaming instead of
`N`.

The default configuration is the one the paper evaluates in hardware: head
dimension `D = 64`, `P = 4` sub-blocks and `N = 1024` rows, so 256 rows per
buffer. Each buffer holds 256 x 64 keys and 256 x 64 values in BF16. In total
the buffers hold 2 Mbit.

## Modules

| module | role |
|---|---|
| `hfa_pkg` | BF16 and 9.7 types, constants, saturation helper |
| `bf16_sub` | BF16 subtraction, round to nearest even |
| `hfa_score_diff` | max, two differences, quantise to [-15,0], times log2 e |
| `hfa_log2` | BF16 to sign + log2 (Mitchell) |
| `hfa_pow2_pwl` | `2^-x`: 8-segment PWL plus shift |
| `hfa_lns_lane` | one element of `O*2^a + V*2^b` in the log domain |
| `hfa_dot` | BF16 dot product: exact products, one aligned multi-operand sum, one rounding; 2 pipeline stages |
| `hfa_fau` | block FAU: dot, score/max, `D` log converters, `D+1` lanes, state and output registers |
| `hfa_acc` | merge of two triplets, `D+1` lanes, registered output |
| `hfa_logdiv` | log subtraction and conversion to BF16 |
| `hfa_kv_buffer` | key/value buffer of one sub-block, synchronous read |
| `hfa_top` | buffers, FAUs, ACC chain, LogDiv, row sequencer |

## Interface and timing of `hfa_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `kv_we`, `kv_blk`, `kv_row`, `kv_k`, `kv_v` | in | write one key row and one value row into sub-block `kv_blk` |
| `rows` | in | valid rows per sub-block for the next query (1..N/P), read when the query is taken |
| `q_valid`, `q_ready`, `q` | in/out/in | query handshake, `D` BF16 elements |
| `o_valid`, `o_ready`, `o_attn`, `o_m` | out/in/out/out | result: attention vector (`D` BF16) and global maximum score |

* Load the buffers first. Rows `0..rows-1` of every sub-block take part in a
  query, so a sequence of `L` tokens is spread as `L/P` rows per sub-block.
* The first row of a query is read in the cycle the query is accepted. One
  row follows per cycle. The next query can be accepted as the last row of
  the previous one is read, so there is no gap between queries.
* The buffers have a one-cycle read. The FAU needs 3 cycles (products, score,
  state update). Each ACC adds one cycle. LogDiv is combinational. After the
  last row is taken, the result is valid `3 + P` cycles later: 7 cycles at
  the default `P = 4`.
* Every stage uses valid/ready. An ACC fires only when both of its inputs are
  valid and its output register is free. While `o_ready` is low, results back
  up the ACC chain. An FAU keeps streaming the next query while its finished
  triplet waits. It stalls (`in_ready = 0`) only when the next triplet is
  ready to be written over one not yet taken. All FAUs then stall together.

## Departures and choices

What follows the paper: the split between BF16 and 9.7 fixed point; the
merged `[l, o]` update; the quantisation of the score differences to
`[-15, 0]`; `log2 e` as constant shifts after the quantiser; Mitchell's
approximation in `log2 v`, in the log-domain addition and in the conversion
back; `2^-x` as shift plus an 8-segment PWL table; the sign rules; the
FAU/ACC/LogDiv organisation; and the default sizes.

What is this implementation's own:

* **PWL coefficients.** The paper fits them with a tool and does not print
  them. These are least-squares fits, as described above.
* **Dot product.** The paper uses a multi-operand floating-point adder from
  the literature. Here all products are aligned to the largest exponent with
  8 guard bits (bits below them are truncated), added, and rounded once. The
  result is BF16.
* **Zeros, subnormals and infinities.** Subnormal BF16 inputs are read as zero
  and subnormal results are flushed to zero. Inf and NaN are not treated
  specially. The log-domain zero is the saturating code -256.0. A BF16 zero
  in `v` becomes `log2 = -127`, i.e. 2^-127.
* **Initial state.** At the first row of a block the maximum starts at the
  most negative finite BF16 and `O` at zero.
* **Pipeline and latency.** The paper's HLS designs have a total latency of
  19-21 cycles. Here the latency is 3 + P cycles after the last row, plus
  one buffer read, at a clock frequency that has not been measured.
* **Controller.** The paper describes no controller. The row sequencer, the
  `rows` input and the load port are this design's own.
* **Single-FAU form.** The paper also draws an FAU with its own LogDiv, one
  per query and without sub-blocks. That form is `hfa_top` with `P = 1`: the
  one ACC then merges with the identity and changes nothing.
* **Not built.** The pure floating-point FlashAttention-2 baseline, which the
  paper compares against. The variant with several queries in parallel
  (datapath replicated, KV memory shared). The scaling of scores by `1/sqrt(d)`
  and masking, which the paper also leaves out.

## Accuracy to expect

The log-domain datapath is approximate by design. Measured by the testbenches
against real-arithmetic references:

* the log2 of each partial sum (`l`, and `o` for value vectors of one sign)
  after up to 40 rows came within 0.26 of exact. The testbench allows 0.35;
* end to end, with value elements of one sign per lane, the log2 of each
  attention element came within 0.16 of `softmax(q K^T) V` at the reduced
  size and 0.15 at the full size. That is a factor of about 1.12. The
  testbenches allow 0.5;
* if a lane mixes value signs, its result is only as good as Mitchell's
  subtraction allows (see above). The testbench then checks only the sign,
  and only where one sign dominates.

## Simulation

Every testbench is self-checking and ends by printing
`TB_RESULT checks=<n> failures=<n>`. The packages go first on the command
line, and `-y rtl` lets Verilator find the modules. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl +libext+.sv \
    --top-module tb_hfa_top rtl/hfa_pkg.sv tb/hfa_tb_pkg.sv tb/tb_hfa_top.sv
./obj_dir/Vtb_hfa_top
```

| testbench | covers |
|---|---|
| `tb_bf16_sub` | 20k random and corner operand pairs, bit-exact |
| `tb_hfa_log2` | all BF16 codes, exact code and Mitchell bound |
| `tb_hfa_pow2_pwl` | all 65536 inputs against `2^-x` |
| `tb_hfa_score_diff` | max and scale terms, clamping |
| `tb_hfa_lns_lane` | add and subtract paths, sign rule, saturation |
| `tb_hfa_dot` | D = 16 dot products against exact sums, latency, enable |
| `tb_hfa_fau` | D = 8 FAU against real FlashAttention, bubbles, back-pressure, latency |
| `tb_hfa_acc` | D = 4 merges, handshake rules |
| `tb_hfa_logdiv` | conversion, sign, zero/underflow/overflow |
| `tb_hfa_kv_buffer` | writes, reads, read latency, hold |
| `tb_hfa_top` | D = 8, P = 4, N = 64: three phases (plain, back-pressure, mixed signs). Checks one row per cycle, back-to-back queries and the 3+P latency. Counts stalls, new maxima, log-domain subtractions and ACC merges from both sides |
| `tb_hfa_top_full` | default size D = 64, P = 4, N = 1024: 1024 rows loaded, three queries back to back (two over all 1024 rows, one over 4 x 100 rows). About a minute of simulation |

`tb/hfa_tb_pkg.sv` holds the reference conversions between BF16 and real
numbers. The references in the testbenches are computed with `real`
arithmetic. They do not reuse any RTL.

To change the size, set the parameters `D`, `P` and `N` of `hfa_top`. `N/P`
sets the depth of each buffer. To use other table coefficients, change the
two case tables in `hfa_pow2_pwl`.
