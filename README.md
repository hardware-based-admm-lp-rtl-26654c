# ADMM-LP decoder for quasi-cyclic LDPC codes — SystemVerilog RTL

Linear-programming (LP) decoding treats error correction as an optimisation
problem. The decoder looks for the point x in [0,1]^n that minimises the
LLR-weighted cost γᵀx. The constraint is that, for every parity check, the
bits the check covers lie in the *parity polytope*: the convex hull of the
even-weight binary vectors of that length. Unlike belief propagation (BP),
LP decoding has an ML certificate, and it shows no error floor at high SNR.
Solved with the alternating direction method of multipliers (ADMM), it
becomes a message-passing algorithm that looks much like BP:

```
init: lambda_j = 0, m_{j->i} = 1/2 for every edge
repeat B times (or until the estimates are a codeword):
  for every variable i:   x_i = clip_[0,1]( (sum_j m_{j->i} - gamma_i) / deg(i) )
  for every check j:      v   = x_{N(j)} + lambda_j
                          z   = projection of v onto the parity polytope
                          lambda_j = v - z
                          m_{j->N(j)} = 2z - v
return x
```

This RTL is a fixed-point hardware form of that algorithm. It follows the
partially-parallel architecture of *Hardware-Based ADMM-LP Decoding*
(Wasson, Milicevic, Draper, Gulak). Each proto-column of a quasi-cyclic (QC)
code has one variable-node unit, and each proto-row has one check-node unit.
Each unit is pipelined and processes one node per clock. All messages pass
through block-RAM-style memories, one per circulant tile. The default build
is the [155,64,20] Tanner code. The same RTL, given other parameters,
decodes the [672,546] rate-13/16 IEEE 802.11ad (WiGig) code.

## How a QC code maps onto the hardware

A QC parity-check matrix is an R × S grid of p × p tiles. Each tile is
either all zeros or a cyclically shifted identity matrix. In this RTL the
code is described by `P`, `R`, `S` and a shift table `SHIFT[R][S]`. An entry
`NO_TILE` (8'hFF) marks a zero tile. A tile with shift s joins check k of its
proto-row to variable (k + s) mod p of its proto-column.

Because of this structure, all p variables of a proto-column see the same
pattern of tiles, and so do all p checks of a proto-row. The decoder
therefore has:

| unit | count | degree |
|---|---|---|
| variable node (`admm_var_node`) | S, one per proto-column | number of non-zero tiles in the column |
| check node (`admm_check_node`) | R, one per proto-row | number of non-zero tiles in the row |
| LLR memory (`admm_ram`) | S, depth p | – |
| estimate memory (`admm_estimate_mem`) | S, depth p | – |
| VN-to-CN, check-state and CN-to-VN memories (`admm_tile_mem`) | one of each per non-zero tile, depth p | – |

The routing problem is solved by addressing. Each variable node walks its
variables in the order i = 0..p−1, and each check node walks its checks in
the order k = 0..p−1. Each memory is laid out so that its *reader* uses the
plain index, and the *writer* rotates the address by the tile's shift:

* **VN-to-CN memory.** It is indexed by check. Variable i writes x_i at
  (i − s) mod p, and check k reads address k.
* **CN-to-VN memory.** It is indexed by variable. Check k writes its message
  at (k + s) mod p, and variable i reads address i.
* **Check-state memory.** It holds λ and is written and read only by the
  check node, at address k, with no rotation.

`admm_tile_mem` does this rotation with one constant-offset modular add on
its write port. It also holds the algorithm's initial values. During the
first iteration, a read returns 1/2 (CN-to-VN) or 0 (λ) instead of the
stored word. As a result, no clearing pass is needed between codewords.

## Schedule and timing

One iteration has two phases. Both are driven by `admm_controller`.

1. **VN phase.** For p cycles, address i goes to every LLR memory and every
   CN-to-VN memory. Each variable node gets γ_i and its incoming messages one
   cycle later. Its result x_i goes, after the node's pipeline, to the
   estimate memory and to the VN-to-CN memories of its column.
2. **CN phase.** For p cycles, address k goes to every VN-to-CN memory and
   every check-state memory. Each check node writes back λ and its messages
   after its pipeline.

After each phase, the controller waits until the deepest node of that kind
has written its last result (its pipeline depth + 2 cycles). Then it starts
the next phase. The phases never overlap, so there are no read/write hazards.
This is the flooding order of the algorithm above. One iteration takes

    2p + VN_LAT + CN_LAT + 5 cycles

That is 123 cycles for the Tanner code and 153 for the WiGig code. The node
pipeline depths are the ones reported for the published FPGA build:

| node | pipeline stages |
|---|---|
| VN degree 1 / 2 / 3 | 9 / 10 / 10 |
| CN degree 5 | 46 |
| CN degree 14 / 15 / 16 | 53 / 53 / 54 |

The working pipelines in this RTL are shorter: 4 stages for a variable node,
18 for a degree-5 check node and 23 for a degree-16 one. Each node pads its
output with a delay line up to the depth above. The defaults live in
`admm_pkg::vn_latency` / `cn_latency`. You can lower them through the
`LATENCY` parameter of a node to the working depth, which the node checks
at elaboration.

Decoding stops after `max_iter` iterations. If `early_term_en` is set, it
also stops after the first iteration in which the hard decisions
(x_i > 1/2) satisfy every parity check. Every check node computes the parity
of its inputs' hard decisions as they pass through. Early termination is
this design's choice of rule: the published design mentions an early
termination condition but does not say which one, and its reported results
use a fixed 500 iterations (`early_term_en = 0`, `max_iter = 500`).

## The check node and the parity-polytope projection

Most of the logic is in the check node (`admm_check_node`). Its core is
`admm_pp_project`, a fully pipelined Euclidean projection onto the parity
polytope PP_d. It uses a method that needs no iteration:

1. **Cut search.** Take the hard decisions f_i = (v_i > 1/2). If f has even
   weight, flip the one entry whose v_i is closest to 1/2. The odd-weight
   vector f now names the only facet of the polytope on which the projection
   can lie.
2. **Cube clip and facet test.** Let u = clip(v, 0, 1). If
   Σ_{f=1} u_i − Σ_{f=0} u_i ≤ |f| − 1, the clipped point is already inside
   the polytope, and z = u.
3. **Similarity transform.** Otherwise set w_i = 1 − v_i where f_i = 1 and
   w_i = v_i elsewhere. This maps the facet onto the probability simplex
   {w ≥ 0, Σw = 1}.
4. **Simplex projection.** Sort w in descending order (μ) and form the
   prefix sums S_k. Let ρ be the largest k with k·μ_k > S_k − 1, and let
   τ = (S_ρ − 1)/ρ. Then w'_i = max(w_i − τ, 0).
5. **Inverse transform.** z_i = 1 − w'_i where f_i = 1, and z_i = w'_i
   elsewhere.

In hardware, step 4 is a pipelined bitonic sorting network
(`admm_bitonic_sort`, ½·log₂N·(log₂N+1) layers) followed by a log-depth
prefix adder (`admm_prefix_sum`, log₂N layers). N is d rounded up to a
power of two, and the padding entries hold the most negative value. All
d support tests run in parallel. ρ is the highest index that passes. The
division by ρ is a multiplication by round(2¹⁶/ρ), chosen from a small
constant table. The whole unit takes one vector per clock. Its latency is
7 + ½·log₂N·(log₂N+1) + log₂N cycles: 16 for d = 5 and 21 for d = 16.

Around the projection, the check node adds λ to x at its input. At its
output it forms λ' = v − z and m = 2z − v.

## Number formats

All values are two's complement.

| quantity | bits | format | range |
|---|---|---|---|
| channel LLR γ | 8 | Q0.7 (sign, 0 integer, 7 fraction) | [−1, 1) |
| x: estimate and VN-to-CN message | 11 | Q1.9 | [0, 1] used |
| CN-to-VN message m, check state λ | 11 | Q3.7 | [−8, 8) |
| check-node internal v = x + λ | 14 | Q4.9 | exact |

These splits follow the published quantisation rules. Scaling the LLRs
does not change the LP solution, so the LLRs use all their bits for
fraction. The estimates lie in the unit cube, so they get one integer bit,
and the spare bits go to fraction. The CN-to-VN messages keep the LLR's
fraction bits, and their spare bits go to integer range, so that they can
overrule the channel. The check state uses the CN-to-VN format.

Every narrowing floors, that is, it truncates toward −∞. λ' and m saturate
at the 11-bit limits. In the variable node, the division by the degree is a
multiplication by round(2¹²/deg). For degrees 1 and 2 this is an exact
shift. For degree 3 it is about 2⁻¹² low, which is the "inexact
normalisation" that extra fraction bits make up for. Floor rounding favours
the all-zeros codeword slightly. The end-to-end tests therefore use random
high-weight codewords.

## Top-level interface (`admm_lp_decoder`)

| port | dir | meaning |
|---|---|---|
| `llr_we`, `llr_col`, `llr_addr`, `llr_data[7:0]` | in | write one LLR (proto-column, index within it) while idle |
| `start`, `max_iter[15:0]`, `early_term_en` | in | start decoding; `max_iter = 0` runs one iteration |
| `busy`, `done`, `iterations[15:0]`, `early_stop` | out | status; `done` is held until the next `start` |
| `est_re`, `est_col`, `est_addr` | in | read an estimate |
| `est_x[10:0]`, `est_bit` | out | the Q1.9 estimate and the decoded bit (x > 1/2), one clock after the read |
| `cn_flip_any`, `cn_facet_any` | out | monitor: a check result this cycle used the parity flip / the simplex path |

Reset (`rst_n`) is synchronous and active low. It clears the controller and
the valid pipelines only. The memories are not reset; the decoder never reads
a word before it has been written (first-iteration reads use the initial value instead).

Variable index j of the code is column j / p, address j mod p. The LLR sign
convention is γ = log p(y|0)/p(y|1): a positive LLR favours bit 0.

## Choosing a code

```systemverilog
admm_lp_decoder #(.P(admm_pkg::WIGIG_P), .R(admm_pkg::WIGIG_R),
                  .S(admm_pkg::WIGIG_S), .SHIFT(admm_pkg::WIGIG_SHIFT)) u_dec (...);
```

`admm_pkg` holds two shift tables. `TANNER_SHIFT` has shift
5^t·2^c mod 31 for tile (t,c), which is Tanner's construction.
`WIGIG_SHIFT` is the rate-13/16 matrix of IEEE 802.11ad. Neither table is
printed in the paper. They were entered from the codes' definitions. The
WiGig table's zero pattern gives exactly the node degrees the paper states:
fourteen degree-3, one degree-2 and one degree-1 variable nodes, and check
nodes of degree 14, 15 and 16. The testbenches check both tables against
the code dimension: rank 91 gives k = 64 for the Tanner code, and rank 126
gives k = 546 for WiGig. Any other QC code whose tiles are single shifts can be described in the
same way, as long as p ≤ 254 and every check degree is between 2 and 16. For degrees without a published pipeline depth, the
default depth is 10 (VN) or 54 (CN).

## Verification

Each testbench checks itself and ends with a `TB_RESULT checks=… failures=…`
line.

| testbench | what it checks |
|---|---|
| `tb_admm_ram` | random writes and reads against an array model, read-before-write |
| `tb_admm_tile_mem` | rotated write addresses for the three offsets; initial-value override |
| `tb_admm_estimate_mem` | stored estimates; hard decision at and around 1/2 |
| `tb_admm_var_node` | degree-3 and degree-1 nodes against a real-valued average (≤ 3 LSB); depth 10 / 9 |
| `tb_admm_pp_project` | d = 5 and d = 16 projections against a double-precision model (≤ 3 LSB); every path taken; depth 16 / 21 |
| `tb_admm_check_node` | λ' and m against double precision (≤ 1 LSB of Q3.7), hard-decision parity; depth 46 |
| `tb_admm_controller` | address sequences, iteration length, cap, early stop |
| `tb_admm_lp_decoder` | whole decoder at its default size (Tanner code): random codewords from a GF(2) row reduction of H, noisy LLRs with wrong-sign bits, correct decoding, exactly 123 cycles per iteration, cap and early stop, a 500-iteration run |
| `tb_admm_wigig` | the same for the WiGig configuration (153 cycles per iteration) |

`tb_admm_ref_pkg` holds the double-precision reference models. To run one
testbench with Verilator:

```sh
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/admm_pkg.sv tb/tb_admm_ref_pkg.sv tb/tb_admm_lp_decoder.sv \
    --top-module tb_admm_lp_decoder
./obj_dir/Vtb_admm_lp_decoder
```

Each full-decoder test runs in well under a second of simulation.

The published error-rate curves collect at least 100 frame errors per SNR
point. At the low error rates they reach, that takes far more decoded frames
than RTL simulation can run, so the curves are not reproduced here. The tests check that the decoder is functionally
correct, not what its error rate is.

## What follows the published design and what is this design's own

Taken from the paper:
* the architecture: memory types, per-tile message memories, shift-addressed
  writes, check-state memories without shifting, s VNs and r CNs working in
  parallel;
* the decoding algorithm and its initial values;
* the projection method (cut search, similarity transform, sort-based
  simplex projection with sorting networks and prefix sums);
* the 8-bit LLR and 11-bit message widths and the rules for splitting them;
* truncation toward −∞;
* the pipeline depths;
* the two evaluated codes' structure.

This design's own choices:
* the shift-direction convention and the shift tables themselves;
* the bitonic sorter and Hillis–Steele prefix sum;
* reciprocal-multiply division;
* internal widths of the projection;
* saturation of λ and m;
* the split of each pipeline into working stages plus padding;
* the first-iteration read override instead of clearing;
* the two-phase schedule with full drains;
* the early-termination rule;
* the host load and read interface;
* the 16-bit iteration counter;
* reset behaviour.

Tiles that are a sum of several shifted identities are not supported;
neither evaluated code has one.

Not included: the Gaussian channel emulator and the PC link of the FPGA test
platform. The paper names them but does not design them. The testbenches
generate the LLRs themselves.
