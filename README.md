# Parallel hard-output decoder for G_N-coset codes

A G_N-coset code of length N = 2^n is any code whose codewords are
x = u · G_N, with G_N = F^{⊗n} and F = [1 0; 1 1]. Some of the positions
of u are frozen to zero and the rest carry data. Polar and Reed–Muller codes
are two such codes. When n is even, the transform splits into two halves:
G_N = G_NC ⊗ G_NC, with NC = √N. Write the N code bits as an NC × NC matrix.
Each column is then the output of a length-NC "inner" code, and so is each
row of an equivalent, stage-permuted encoding graph. There are NC inner codes
in each view, and they are independent of one another, so all NC of them can
be decoded at once.

This RTL decodes such a code by iterating between the two views:

* **odd iterations** decode the NC rows,
* **even iterations** decode the NC columns.

Each inner code is decoded by a cheap *hard-output* successive-cancellation
(SC) decoder. Only hard bits, plus one error flag per inner code, pass from
one iteration to the next. Two additions make up for the lost soft
information:

* an **error detector**: a syndrome check that skips SC decoding when the
  incoming bits already form a codeword;
* an **LLR generator**: it turns the last two hard decisions back into soft
  inputs, using per-iteration damping factors that were learned offline.

The default instance is the configuration with N = 16384 (a 128 × 128 bit
matrix), 128 component decoders of length 128, and up to 8 iterations.
With rows and columns both set to (128,119) polar codes, it decodes the rate
14161/16384 code (14161 = 119²).

## The bit matrix and the two graphs

Code bit k (0-based) is stored at row r = k / NC, column c = k mod NC.

| graph | component i owns | code bits | decoded in |
|---|---|---|---|
| G (Arıkan's graph) | column i | i, i+NC, i+2·NC, … | even iterations |
| G_π (stage-permuted) | row i | i·NC … i·NC+NC−1 | odd iterations (iteration 1 first) |

Position j of component i's vector is the row index in graph G and the column
index in graph G_π. Bit j of a column was produced, in the previous
iteration, by row decoder j, and the other way round. So the error flag that
goes with bit j of *every* component is simply flag j of the previous
iteration. This is why one NC-bit flag vector is enough.

`exchange_buffer` holds the following as flip-flop arrays:

* the channel LLRs;
* x1, the hard outputs of iteration t−1;
* x2, the hard outputs of iteration t−2;
* the flag vector.

It presents to decoder i either row i or column i, and writes results back
the same way. This transposing multiplexer is the whole interconnect between
the component decoders, and it carries one bit per code bit.

## One iteration

For iteration t, every component decoder i does the following in parallel:

1. **Detect.** Re-encode the incoming hard vector x1 with G_NC. G_NC is its
   own inverse over GF(2), so this yields the u that would have produced x1.
   The error flag is e = 1 if any frozen position of that u is 1.
2. **Bypass** if e = 0: the output is x1 unchanged, and the SC decoder stays
   idle.
3. **Regenerate LLRs** if e = 1. Per bit j, with s(x) = 1 − 2x:
   * the bit's producer had e = 1: L = Lch + A_t·s(x1) − B_t·s(x2)
   * the bit's producer had e = 0: L = Lch + C_t·s(x1)

   A_t, B_t and C_t are 2α_t/σ², 2β_t/σ² and 2γ_t/σ².
4. **SC-decode** L with the component's frozen mask. The output is the
   re-encoded codeword estimate.

When no decoder is busy, the controller commits all outputs at once:

* x2 takes the old x1;
* x1 takes the new hard outputs, in row or column order;
* the flag vector takes the new flags.

Decoding stops at the first iteration t ≥ 2 in which no component reports an
error, or after T_MAX iterations. When it stops early, the last outputs of
one graph were codewords (SC outputs always are), and the detectors have just
found the other graph's codes to be codewords too. The frame is therefore
consistent. Iteration 1 cannot stop early, because its inputs are raw channel
decisions that no decoder has checked.

Before iteration 1, x1 and x2 hold the hard decisions of the channel LLRs and
all flags are 0. Together with α_1 = β_1 = γ_1 = 0, the first iteration
therefore decodes the plain channel LLRs. Any row that is already a codeword
is bypassed.

## The component decoder (`component_decoder`)

The component decoder is the error detector (`error_detector`, which is
`polar_encoder` plus an AND-OR with the frozen mask), the LLR generator
(`llr_generator`) and the SC decoder (`sc_decoder`), followed by a 2:1
multiplexer. The registered flag e selects the multiplexer input. It also
leaves the block, because the next iteration's LLR generators need it.

Timing, from the cycle in which `start` is high:

* e is valid from the next cycle.
* With e = 0, `busy` never rises and `ho` = x1 at once.
* With e = 1, `busy` is high for 2·NC − 2 cycles. After that, `ho` holds the
  SC result until the next start.

Inputs must stay stable until `busy` falls. The exchange buffer guarantees
this, because it does not change between start and commit.

## The SC decoder schedule (`sc_decoder`)

The SC decoder is the one block whose inner structure is not prescribed, and
the hardest one to read.

It is a tree decoder that evaluates one depth of the SC tree per clock cycle:

* `alpha[d]` holds the LLRs of the active node at depth d (NC >> d values).
* `alpha[0]` holds the input LLRs.
* Each depth d has its own NC >> d min-sum units. These compute either
  * f(a, b) = sign(a)·sign(b)·min(|a|, |b|), for a left child, or
  * g(a, b, v) = b + (1 − 2v)·a, for a right child, where v is the partial sum
    of the left sibling.

With x = (v_L ⊕ v_R, v_R), the two halves of a node's LLR vector are (a, b)
as follows:

* the left child sees f(a_k, b_k);
* the right child sees g(a_k, b_k, v_L[k]).

Bit i of u is decided at the leaf (depth n = log2 NC). The decision is 0 if
position i is frozen, otherwise it is the sign of the leaf LLR. In the same
cycle the decision is combined upward through an XOR tree. The parent
partial sum is (left ⊕ right, right), and the stored left partial sum
`bl[d]` provides the left half. The walk goes up as long as the node is a
right child. The first left child met on the way up has just completed, so
its partial sum is stored in `bl[d]`. After bit NC − 1 the walk reaches the
root, and the root partial sum is the codeword estimate `x_hat`.

Bits i and i+1 share their path down to depth n − tz(i+1) − 1, where tz
counts trailing zeros. So bit i+1 restarts at depth n − tz(i+1) with one g
step, followed by f steps down to the leaf. Summed over all bits, this takes
exactly 2·NC − 2 cycles: 254 cycles for NC = 128.

The frozen mask is latched at `start`, together with the LLRs.

LLRs are 6-bit two's complement, saturated to the symmetric range [−31, 31].
The adders in g and in the LLR generator saturate.

## Damping factors (`damping_factors`)

| t | α_t | β_t | γ_t |
|---|---|---|---|
| 1 | 0 | 0 | 0 |
| 2 | 0.2680 | 0 | 1.9997 |
| 3 | 0.4236 | 0.2075 | 0.6695 |
| 4 | 0.5051 | 0.2542 | 0.8296 |
| 5 | 0.6147 | 0.3574 | 0.7598 |
| 6 | 1.2661 | 0.9922 | 0.7647 |
| 7 | 0.4054 | 0.2714 | 0.7851 |
| 8 | 0.5360 | 0.1566 | 0.8723 |

The factors were found offline by a genetic algorithm. The algorithm keeps a
population of 32 candidate tables. It repeatedly does the following:

* picks two parents, favouring better-ranked candidates;
* crosses them over factor by factor;
* mutates each factor, with probability 0.07, by adding Gaussian noise;
* inserts the offspring by its simulated SNR at the target block error rate.

That algorithm is not hardware, and is not part of this RTL.

The table is stored in unsigned Q2.8: round(v·256), so 1.9997 becomes 512.
It is multiplied by the input `noise_scale`, which is 2/σ² in LLR LSBs in
Q4.4 format. The three products are rounded to the nearest LSB, saturated
to 31, and broadcast to all component decoders for the current iteration.
The channel noise σ must be known, as it is for producing the channel LLRs
in the first place.

Example: Es/N0 = 7 dB with BPSK gives 2/σ² ≈ 20. If the LLR LSB is 2.0,
`noise_scale` = 10 · 16 = 160.

## Top level (`gn_coset_decoder`) and interface

Parameters:

* `N`: code length, an even power of two; default 16384.
* `T_MAX`: maximum number of iterations, 1…8; default 8.
* NC is derived as √N.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `noise_scale` | in | 8 | 2/σ² in LLR LSBs, Q4.4 |
| `frozen_row[i]` | in | NC × NC | frozen positions of row code i (1 = frozen) |
| `frozen_col[i]` | in | NC × NC | frozen positions of column code i |
| `in_valid` / `in_ready` | in/out | 1 | input row handshake |
| `in_llr[c]` | in | NC × 6 | channel LLR of bit r·NC + c; positive means 0 |
| `out_valid` / `out_ready` / `out_last` | out/in/out | 1 | output row handshake |
| `out_row[c]` | out | NC | decoded code bit r·NC + c |
| `frame_iters` | out | 4 | iterations used for the last frame |
| `frame_early_stop` | out | 1 | the last frame stopped on "no errors" |
| `frame_sc_activations` | out | 16 | SC decoders started for the last frame |

A frame is handled in three phases:

1. **Load.** NC input rows arrive, in order r = 0 … NC−1, one per accepted
   cycle.
2. **Decode.** `in_ready` is low. Each iteration takes 3 cycles (start,
   wait, commit), plus 2·NC − 2 cycles if any component runs its SC decoder.
   At full size, one frame takes at most 8 × 257 = 2056 cycles.
3. **Unload.** NC output rows leave in order. After the last one, the
   decoder accepts the next frame.

Frames are not overlapped.

The code construction is an input. The frozen masks are written per component
and per graph. This can express product codes, and any other construction
in which every inner code has a fixed frozen set. The masks must stay stable
while a frame is decoded.

`frame_sc_activations / (NC · frame_iters)` is the fraction of component
decodings that needed the SC decoder. This is the complexity measure used to
motivate the bypass: it falls as the SNR rises.

## What follows the original description and what is this design's own

These parts follow the description directly:

* the two alternating graphs and the row/column ownership of the bits;
* iteration 1 on the stage-permuted graph;
* the component decoder made of detector, LLR generator, SC decoder and
  multiplexer;
* the syndrome check built from the encoder;
* both LLR rules, with their inputs;
* the damping-factor values;
* N = 16384 and 8 iterations.

These are choices made here:

* all word lengths: 6-bit LLRs, Q2.8 damping factors, Q4.4 noise scale;
* min-sum f and g;
* the SC architecture (one tree depth per cycle) and hence all cycle counts;
* one shared bank of NC decoders for both graphs;
* frozen masks as run-time inputs;
* channel hard decisions as the hard outputs before iteration 1;
* the early-stop rule;
* the row-streaming interface;
* flip-flop storage for the matrices.

The implemented ASIC that the design comes from reports about 22 ns per
iteration. No clock frequency or SC micro-architecture was given for it, so
this RTL makes no attempt to match that latency.

## Verification

Each testbench in `tb/` prints `TB_RESULT checks=… failures=…`. All of them
compare against `tb_gn_ref_pkg`, which is written independently of the RTL:

* The encoder is built from the matrix definition of G_n.
* The SC reference walks from the root to every leaf. It re-encodes the
  already-decided bits of the left sibling, instead of using a partial-sum
  tree.
* The LLR rules and damping table are typed in again.
* `ref_decode` runs the whole iterative algorithm.

| testbench | what it checks |
|---|---|
| `tb_polar_encoder` | transform against the matrix definition at NC = 128 and 8; transform applied twice gives the input |
| `tb_error_detector` | codewords pass; single-bit errors are caught; random words agree with the reference |
| `tb_damping_factors` | every iteration and noise scale |
| `tb_llr_generator` | both rules, with saturation |
| `tb_sc_decoder` | bit-exact against the reference SC at NC = 8 and 128; busy lasts exactly 2·NC − 2 cycles |
| `tb_component_decoder` | bypass and decode paths, outputs and cycle counts; also the (128,119) component code at NC = 128 |
| `tb_exchange_buffer` | row and column views, transposed commits, x1 → x2 shift, read port |
| `tb_decoder_ctrl` | handshakes, graph alternation, stop rules, activation count, cycles per iteration |
| `tb_gn_coset_decoder` | N = 256, ten frames from clean to hopeless |
| `tb_gn_coset_decoder_n1024` | N = 1024, a (32,26)² product code, four frames |

`tb_gn_coset_decoder` uses a (16,11)² product code. Each frame is compared
bit for bit with `ref_decode`: decoded bits, iteration count, stop reason,
activation count and latency. Each mechanism must occur at least once:

* SC bypass;
* SC decoding;
* both LLR rules;
* early stop;
* the iteration limit;
* a correctly decoded frame.

`tb_gn_coset_decoder_n1024` makes the same comparisons as
`tb_gn_coset_decoder`, at N = 1024.

N = 1024 is the largest size simulated. It takes about 2 minutes to build
with Verilator and a fraction of a second to run.

The default size, N = 16384, passes Verilator lint and slang elaboration, but
it has not been simulated. Verilator flattens the 128 SC decoders and the
128 × 128 transposing buffer into about 150 MB of C++. Compiling that takes
hours on a single core, although the simulation itself would need only about
2000 cycles per frame. The default configuration is therefore verified by
parts:

* `tb_sc_decoder`, `tb_polar_encoder`, `tb_error_detector` and
  `tb_llr_generator` run at the full component length NC = 128.
* The two whole-decoder testbenches run the same RTL with only `N` reduced.

A ready-made default-size testbench would follow `tb_gn_coset_decoder`. It
would leave the top's parameters unset and use (128,119) row and column codes
with frozen positions 0, 1, 2, 3, 4, 8, 16, 32 and 64, so K = 14161. A
machine that can compile the C++ can run it.

To simulate a testbench with Verilator (the package files come first):

```
verilator --binary --timing --assert -Irtl -Itb rtl/gn_pkg.sv tb/tb_gn_ref_pkg.sv \
    --top-module tb_gn_coset_decoder tb/tb_gn_coset_decoder.sv -o sim
./obj_dir/sim
```

Replace the top module and file to run any other testbench. Modules are found
through `-I` by file name.
