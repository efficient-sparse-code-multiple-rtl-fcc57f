# Max-Log message-passing SCMA decoder

Sparse code multiple access (SCMA) lets six users share four subcarriers
("resources"). Each user maps 2 data bits onto one of 4 codewords. A codeword
is non-zero on only 2 of the 4 resources. Every resource therefore carries the
sum of exactly 3 users' codeword parts plus noise. The receiver sees four
complex samples per frame and must recover all six users' 2-bit symbols.

This RTL implements the deterministic message-passing decoder (DMPA) from
"Efficient Sparse Code Multiple Access Decoder Based on Deterministic Message
Passing Algorithm" (C. Yang et al.), in its Max-Log form. It includes the
extensions that paper proposes:

- cheap approximations of the initial probabilities;
- early termination when the messages stop changing;
- self-adaption, which extrapolates the messages along their trend;
- an initial noise-reduction step that undoes a "distributed matrix" spreading
  applied at the transmitter.

It also includes the paper's folded form of the initialization branch, as a
build option.

The decoder takes one frame of four 8-bit complex samples. It returns six
2-bit symbols after 8·I + 5 clock cycles, where I is the number of iterations
run (1 to 7, at most I_max).

## The factor graph and how it is wired

The system is the *regular* SCMA with K = 4 resources and N = 2 non-zero
dimensions. Its users are all C(4,2) = 6 pairs of resources. The paper's factor
graph matrix is

```
        u0 u1 u2 u3 u4 u5
  r0  [  1  1  1  0  0  0 ]
  r1  [  1  0  0  1  1  0 ]
  r2  [  0  1  0  1  0  1 ]
  r3  [  0  0  1  0  1  1 ]
```

so user u0 sits on (r0, r1), u1 on (r0, r2), and so on in lexicographic order.
There are 12 edges. Edge `e = 3k + s` is the s-th user (in column order) of
resource k. Each user owns two edges, one per resource. They are called
*partners*. All routing is derived from F in `scma_pkg` at elaboration time:

| table | meaning |
|---|---|
| `RES_USER` | the user on each edge |
| `RES_DIM` | which of that user's two dimensions the edge carries |
| `USER_EDGE` | the user's two edges |
| `PARTNER` | the other edge of the same user |

Nothing else in the RTL hard-codes the graph.

A message is a vector of four 16-bit log-domain beliefs, one per codeword
(`bvec_t`).

## One frame through the hardware

```
 in_y ─► noise_reduction ─► init_unit ─► P memory (4 x 64 beliefs)
                                              │
          ┌──────────── ln_to_rn_network ◄────┼──── ln_update_unit x12 ◄─┐
          ▼                                   ▼                           │
   rn_update_unit x12 ─► convergence_unit x12 ─► rn_to_ln_network ────────┘
                                                      │
                                                      ▼
                                           symbol_judge_unit x6 ─► out_sym
```

`decoder_ctrl` runs one frame at a time through these steps (cycles counted
from the input handshake):

| cycle | what happens |
|---|---|
| 0 | Handshake. Both message memories are cleared; the LN memory is cleared to 0, the uniform prior. |
| 1 | `noise_reduction` output registered. |
| 4 | `init_unit` has all 4 × 64 initial beliefs P_k(m0, m1, m2). The first resource-node pass starts. |
| +5 | The 12 `rn_update_unit`s deliver. The `convergence_unit`s compare the new message with the previous one in the RN memory, possibly rescale it, and it is written together with its stability bits. |
| +1 | Decide. If I = I_max, or early termination is enabled and every stability bit is 1, start judging. Otherwise start the layer-node pass. |
| +1 | `ln_update_unit`s write the LN memory. |
| +1 | Issue the next resource-node pass (back to the "+5" row). |
| +3 | Judging: `symbol_judge_unit`s add each user's two messages and pick the largest. `out_valid` pulses. |

One iteration is therefore 8 cycles. The frame takes 4 + 8·I + 1 = 8·I + 5
cycles. A new frame is accepted the cycle after `out_valid`. The last
layer-node pass of a frame is skipped because the judge reads the RN memory
directly.

### Resource-node update

For edge (k, s), with the two other users of resource k called a and b:

    I_R→L(m) = max over (ma, mb) of  P_k(m, ma, mb) + I_a→R(ma) + I_b→R(mb)

Each of the four outputs is the maximum of 16 sums. The unit forms all 64 sums
in one saturating adder stage. It then reduces them with a comparator tree
16→8→4→2→1, with registers after the first three levels (14 stored values per
output, 56 per unit, 672 for all 12 units) and at the output. That gives a
latency of 5 cycles. The operand index into the P table depends on the slot
s, so the module takes `SLOT` as a parameter.

### Layer-node update: normalization instead of division

In Max-Log message passing, a user with only two edges sends to each edge the
message that arrived on the other one. Here that exchange is done by the
routing (`to_ln_o[e] = RN memory[PARTNER[e]]`).

`ln_update_unit` then subtracts the vector's maximum, so that the best
codeword has belief 0. This is the log-domain equivalent of dividing by the
sum. It keeps the beliefs from drifting towards the saturation limits over
iterations, costs one cycle, and needs no divider.

### Symbol judgement

Q(m) = I_R→L from the first resource + I_R→L from the second. Two comparison
levels pick the largest; ties go to the lower codeword index. The codeword
index is the user's 2-bit symbol.

## Initial beliefs and their four variants

With residual d = y_k − (x_a + x_b + x_c) for a combination of the three
codewords on resource k, the unit computes one of four variants, selected at
run time by `approx_mode`:

| `approx_mode` | P_k | cost |
|---|---|---|
| `EXACT` | −(d_re² + d_im²) / N0 | squares and a multiplier |
| `APPROX1` | −(\|d_re\| + \|d_im\|) / N0 | multiplier |
| `APPROX2` | −(d_re² + d_im²) | squares |
| `APPROX3` | −(\|d_re\| + \|d_im\|) | adders only |

`APPROX3` is the variant the paper selects for its decoder. The complex
magnitude |d| of the approximations is taken as |d_re| + |d_im|, to stay free
of square roots. 1/N0 is an unsigned Q8.8 input. Results below −2¹⁵ saturate.
The unit is three register stages (residual, magnitude, scale) and computes
all 256 combinations in parallel.

### Noise reduction

If the transmitter spreads the four resource signals with the distributed
matrix D (the paper's example is D = 0.1·[1 4 3 2; 2 1 4 3; 3 2 1 4; 4 3 2 1]),
the receiver first computes y' = D⁻¹·y. `noise_reduction` does this with
signed Q3.12 coefficients supplied by the host, rounding and saturating back
to 8 bits, in one cycle. Loading the identity turns the step off.

## Early termination and self-adaption without division

The paper's tests use the ratio r = (V − V_t)/V_t between a belief's value in
this iteration and the last one. `convergence_unit` avoids the division. With
eps = 2^−eps_sh, and the comparisons flipped when V_t < 0:

- **stable:** |V − V_t| ≤ eps·|V_t|;
- **growing** (r ≥ eps, only with `en_adapt`): V ← α·V, where
  α = 1 + 2^−alpha_sh;
- **shrinking** (r ≤ −eps, only with `en_adapt`): V ← β·V, where
  β = 1 − 2^−beta_sh.

Both scalings are one shift and one add. Special cases:

- With self-adaption on, a belief that is neither grown nor shrunk counts as
  stable.
- V_t = 0 is stable only if V = 0, and is never scaled.
- In the first iteration of a frame nothing is stable.

The stability bits of all 12 × 4 beliefs are kept next to the messages in
the RN memory. Their AND is the "all-ones stability matrix" that ends the
iterations early. `out_early` reports that this happened. eps, α and β are
run-time settings because the paper gives no values.

## Folded initialization (build option)

The paper folds one initialization branch onto a single adder and a single
multiplier. The branch (one resource, one combination) has seven additions
and three multiplications, numbered 3–9 and 10–12; inputs are nodes 1 and 2.
The folding factor is 7.

`folded_init_branch` runs operation u of each set in slot u of a repeating
7-cycle period:

| slot | 0 | 1 | 2 | 3 | 4 | 5 | 6 |
|---|---|---|---|---|---|---|---|
| input | real (1) | imag (2) | | | | | |
| adder | y_re−x1 (3) | −x2 (4) | −x3 (5) | re²+im² (6) | y_im−x1 (7) | −x2 (8) | −x3 (9) |
| multiplier | re² (10) | ·1/N0 (11) | im² (12) | | | | |

The paper lists the number of delays every edge needs under this schedule:
D_F(3→4) = 7, (2→7) = 3, (5→10) = 4, (10→6) = 8, (12→6) = 6, and so on. All
eleven values follow from an adder with one pipeline register, a multiplier
with two, and one delay per internal edge of the unfolded branch. The module
builds exactly that. The adder output, the multiplier output and the input
bus each feed a tapped delay line, and an edge with D_F = d reads tap d.

A combination's real chain is spread over three periods (node 4 works on the
previous combination, node 5 on the one before). The branch therefore keeps
the last three combinations' codeword parts. It accepts one combination
every 7 cycles; each result appears 39 cycles after its input.

`folded_init_unit` puts one branch on each resource and walks the 64
combinations. It fills the same P memory as `init_unit` in 482–488 cycles
instead of 3.

Setting the top parameter `FOLDED_INIT = 1` selects it. That build computes
the exact Max-Log variant only, since the branch contains the squares and the
1/N0 multiplier.

## Interface of `scma_decoder`

| port | width | use |
|---|---|---|
| `cb_we`, `cb_addr`, `cb_wdata` | 1, 7, 8 | Load the 96 codebook words while idle. Word `((j·4 + m)·2 + d)·2 + ri` is the re (ri = 0) or im (ri = 1) part of user j's codeword m on its d-th resource (d = 0 is the lower-numbered one). |
| `inv_n0` | 16 | 1/N0, unsigned Q8.8 (EXACT, APPROX1) |
| `approx_mode` | 2 | `EXACT`, `APPROX1`, `APPROX2`, `APPROX3` |
| `dinv` | 4×4×16 | D⁻¹, signed Q3.12; identity = no noise reduction |
| `max_iter` | 3 | I_max; 0 is treated as 1 |
| `en_et`, `en_adapt` | 1, 1 | early termination, self-adaption |
| `alpha_sh`, `beta_sh`, `eps_sh` | 4 each | α = 1 + 2^−a, β = 1 − 2^−b, eps = 2^−e |
| `in_valid`, `in_ready`, `in_y` | 1, 1, 4×(8+8) | frame input, valid/ready handshake, signed samples |
| `out_valid`, `out_sym` | 1, 6×2 | one-cycle pulse; symbols held until the next frame |
| `out_iters`, `out_early` | 3, 1 | iterations run; whether early termination stopped the frame |

- Configuration inputs must be stable while a frame is in flight.
- A channel gain h_k is not a separate input: multiply it into the codebook
  (write h_k·x).
- Reset (`rst_n`) is asynchronous, active low.
- Assertions in the top check two rules:
  - the codebook is written only while idle;
  - all parallel units stay in lockstep.

Shared types and constants are in `scma_pkg`:

- `sample_t`, 8 bits;
- `belief_t`, 16 bits;
- `cplx_t`;
- `bvec_t`;
- `approx_e`;
- the sizes J = 6, K = 4, M = 4, DF = 3.

The sizes are the paper's and are not meant to be changed independently: the
routing tables assume the regular K = 4, N = 2 graph.

## Where this design departs from the paper

- **Layer-node normalization.** The paper gives each layer-node unit four
  16-bit dividers with a 28-clock delay. Its Max-Log equations, however, make
  the layer update a plain exchange. This design normalizes in the log domain,
  by subtracting the maximum: 1 cycle, no divider.
- **Approximation mode.** The paper's decoder uses Approximation 3, yet it
  also describes a multiplier and a 16-bit "due to multiplication" output in
  the initialization. All four variants are available at run time; Approximation
  3 is the recommended setting.
- **Complex magnitude.** |d| in Approximations 1 and 3 is |re| + |im| (L1).
  The paper does not say how it is formed.
- **Constants.** eps, α and β are powers of two, or one plus or minus a power
  of two. The paper gives no values.
- **Latency and throughput.** The paper's table reports, for 6 users and one
  iteration, 3.50 µs and 857 Mb/s at 500 MHz. This design takes 13 cycles
  (26 ns at 500 MHz) and decodes one frame at a time. The paper does not say
  how its numbers were obtained, so they are not reproduced. Frames are not
  overlapped in the pipeline; the paper's stage-level schedule suggests they
  could be.
- **Register placement.** The paper prints counts: 14 buffers per RN output,
  3 per judge unit. Where a count could not be matched exactly (a 16-input
  maximum needs four comparison levels, the paper says three), the last level
  shares the output register.
- **Symbol mapping.** The codeword index is emitted directly as the 2 data
  bits; the paper does not give the mapping.
- **Folded branch storage.** The folded branch uses 18 delay-line words. The
  paper's lifetime analysis brings the same schedule down to 8 registers.
  That allocation was not reproduced.
- **Folded unit cost.** `folded_init_unit` uses four branches: 4 adders and
  4 multipliers. The paper's cost table quotes 300 cycles, 4 adders and
  2 multipliers for its whole folded decoder, whose schedule beyond the single
  branch is not given.
- **System sizes.** Larger systems in the paper's tables (12/8 up to 192/128
  users/resources) are not built. If they are independent copies of the 6/4
  graph, they map to several instances of this decoder.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares against
values computed independently in the testbench or in `scma_ref_pkg`, checks
cycle counts, has a watchdog, and ends with a `TB_RESULT checks=… failures=…`
line. `scma_ref_pkg` is an integer model of the whole algorithm, built from the
matrix F and the documented fixed-point rules. It also provides a test
codebook and a channel model.

| testbench | what it covers |
|---|---|
| `tb_scma_decoder` | Full-size decoder, 400 frames. Random users, optional D spreading, noise from 0 to heavy. Rotates all four variants, I_max 1–5, early termination and self-adaption on/off, different eps/α/β. Checks every symbol, the iteration count, the early flag and the 8·I + 5 latency. Noise-free frames must return the sent symbols. Early stop, iteration cap, α and β scaling, noise reduction, back-pressure and every variant must each occur. |
| `tb_scma_decoder_folded` | The same with `FOLDED_INIT = 1`, exact mode, 40 frames, latency 8·I + 2 + (482…488). |
| `tb_init_unit`, `tb_folded_init_unit`, `tb_folded_init_branch` | All 256 beliefs per frame against the reference, back-to-back frames, saturation. The folded tests also check the 7-cycle acceptance slot and every start offset. |
| `tb_rn_update_unit` | All three slots, streaming one input per cycle, 5-cycle latency, saturation. |
| `tb_convergence_unit` | Directed corner cases, then random vectors. |
| `tb_decoder_ctrl` | The controller against a cycle model of the data path. |
| other unit testbenches | Routing derived from F, clearing, ties. |

To run one with plain Verilator (5.x), from the directory above `rtl/` and
`tb/`:

```
verilator --binary --timing --assert --top-module tb_scma_decoder \
  rtl/scma_pkg.sv tb/scma_ref_pkg.sv $(ls rtl/*.sv | grep -v scma_pkg) \
  tb/tb_scma_decoder.sv
./obj_dir/Vtb_scma_decoder
```

The package `scma_pkg.sv` must be read first, and only once. The full-size
end-to-end test builds without warnings and runs in well under a second.
It ends with `TB_RESULT checks=4090 failures=0`.

Known lint message: Verilator reports `SYNCASYNCNET` on `rst_n`, because the
top's assertions use it synchronously (`disable iff`) while the flip-flops use
it as an asynchronous reset. It concerns only the assertions.

## Files

- `rtl/scma_pkg.sv`: sizes, types, fixed-point helpers, the routing tables.
- `rtl/scma_decoder.sv`: the top.
- `rtl/decoder_ctrl.sv`: the frame sequencer.
- `rtl/codebook_mem.sv`, `rtl/noise_reduction.sv`, `rtl/init_unit.sv`,
  `rtl/rn_update_unit.sv`, `rtl/convergence_unit.sv`,
  `rtl/rn_to_ln_network.sv`, `rtl/ln_update_unit.sv`,
  `rtl/ln_to_rn_network.sv`, `rtl/symbol_judge_unit.sv`: the data path.
- `rtl/folded_init_branch.sv`, `rtl/folded_init_unit.sv`: the folded
  initialization.
- `tb/`: one testbench per module, the two end-to-end tests, and the reference
  model `scma_ref_pkg.sv`.
