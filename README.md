# Relaxed Half-Stochastic LDPC decoder in SystemVerilog

A fully parallel LDPC decoder spends much of its area and wire delay on the
edges of the Tanner graph. The Relaxed Half-Stochastic (RHS) algorithm keeps
those edges as narrow as they can be. Every message between a variable node
(VN) and a check node (CN) is a short sequence of single bits, sent one bit
per clock on one wire. A check node is then only an XOR, and an XOR can be
split into pieces anywhere along its inputs. All the arithmetic stays inside
the variable nodes. Each VN turns the bits it receives back into soft values
with small "trackers", combines them as sum-product does in the LLR domain,
and makes its outgoing bits by comparing the result with random thresholds.

This RTL implements that decoder at the size of the IEEE 802.3an RS-LDPC
code: 2048 bits, 384 checks, variable degree 6, check degree 32, k = 2 bits
per message. Every VN and every CN is a hardware block of its own.

## One iteration, clock by clock

An iteration lasts `K` clock cycles, one for each message bit (`K = 2` by
default). In each of these cycles:

1. Each threshold generator presents a fresh random threshold `T`. One
   generator serves 64 consecutive VNs.
2. Each VN compares each of its extrinsic LLRs `Λ'_i` with `T`. It drives
   bit `X_i = 1` on edge `i` when `Λ'_i < T`. (`Λ = ln((1-p)/p)`, so a
   small LLR means a high probability of a 1.)
3. The check nodes XOR the bits. Each edge gets back `Y_i`, the XOR of all
   the *other* bits of its check.
4. Each VN edge counts the ones among the `Y_i` of the iteration.

All of this is combinational, from the registered trackers and thresholds
to the counters. In the last bit cycle, every tracker is updated with the
transfer function picked by its count `n` (0..K).

In the first cycle of the next iteration, the controller samples the
syndrome of the hard decisions. If the word is a codeword, decoding stops.
Otherwise that cycle is already the first bit period of the new iteration,
so no cycle is lost. A decode of `t` iterations raises `done` `K·t + 2`
cycles after the cycle in which `start` was taken. The end-to-end
testbenches check this latency on every frame.

## Number formats

Every LLR inside the decoder is a two's-complement number whose LSB is 1/4.
The quarter grid comes from the published rounded tracker example: it has
offsets of ±1/4 and a slope of 3/4.

| quantity | width | range | note |
|---|---|---|---|
| channel LLR `llr[v]` | 4 bits | −8 … 7 | LSB = 1 LLR unit (own choice) |
| prior Λ0 inside the VN | 10 bits | −32 … 28 (in 1/4) | channel value × 4 |
| tracker Λi | 7 bits | ±60 (±15.0) | Λ_L = 15 |
| VN output Λ'i | 7 bits | ±32 (±8.0) | Λ_cap = 8 |
| threshold T | 7 bits | 0, ±4 … ±32 | integer LLR × 4 |

## The variable node (`rhs_vn`)

Each edge has three parts, in this order:

- **Message estimator** (`rhs_msg_estimator`). It counts the ones among the
  `K` bits of an iteration. The count `n` stands for the sample mean
  `μ_n = n/K`, so no division is needed.
- **LLR tracker** (`rhs_llr_tracker`). This is the part that is hardest to
  understand.

  Ideally the tracker smooths the received messages in the probability
  domain: `p(t) = (1−β)·p(t−1) + β·m̂(t)`. Written in the LLR domain, this
  becomes a fixed non-linear map `f(Λ; μ_n)` for each possible message
  `μ_n`. Each map is replaced by a straight line with saturation.

  For `K = 2` and β = 0.15, the rounded lines are:
  - `n = 0`: `f = Λ + 1/4`, limited to [−7/4, 15];
  - `n = 1`: `f = 3/4·Λ`, limited to [−2.5, 2.5];
  - `n = 2`: the mirror image of `n = 0`. The symmetry
    `f(Λ; μ_n) = −f(−Λ; μ_{K−n})` covers every `n > K/2`, so only `n ≤ K/2`
    is stored.

  A function is a `trk_func_t` entry in `rhs_pkg`. It clamps the input,
  applies a slope made of shifted copies (1, 1/2, 1/4) to the magnitude,
  adds an offset and clamps the output. The 3/4 slope is therefore
  `|Λ|/2 + |Λ|/4`. It truncates towards zero, so the mirror symmetry holds
  exactly. A table holds two rows ("gears") so that the decoder can change
  functions partway through decoding (see β-sequences below).
- **Comparator.** It makes `X_i = (Λ'_i < T)`. All edges of a VN use the
  same threshold in a given bit cycle.

Shared by all the edges of the VN:

- **VAR** (`rhs_var_llr`). It computes `total = Λ0 + Σ Λ_j`. The extrinsic
  output of edge `i` is `total − Λ_i`, clamped to ±8. The hard decision is
  `total < 0`.
- **Harmonisation** (`rhs_vn_harmonize`). It is used in Phase II only, and
  is described below.

## Random thresholds (`rhs_threshold_gen`)

A threshold that is uniform in probability has a logistic distribution in
the LLR domain. The generator approximates it with a priority encoder
(`rhs_prio_enc`), which acts as a cheap base-2 logarithm.

The encoder's inputs `Z_1 … Z_9` are random bits with
`P(Z_1 = 1) = 1/4` and `P(Z_i = 1) = 1/2` for the others. `Z_1` is the AND
of two LFSR bits. The encoder outputs `W`, the number of zeros before the
first one. The threshold is `T = ±W`, with the sign taken from one more
random bit. If all nine bits are zero (`W = 9`), the magnitude 2 is used
instead.

So each threshold needs 11 fresh bits. `rhs_lfsr` is a 32-bit LFSR
(x³²+x²²+x²+x+1) that advances 11 positions per clock. Each generator has
its own seed.

## Check nodes (`rhs_check_node`)

Each output is the XOR of all other inputs. The node is built as two chains
that run in opposite directions past the `DC` variable nodes:

- a prefix XOR chain;
- a suffix XOR chain.

Output `i` is `prefix(i−1) XOR suffix(i+1)`. Neighbouring pieces are
linked by two wires, and each piece holds three XOR gates. In a layout,
each piece can be placed inside its variable node, so the check node
disappears as a block. The result is the same as a single XOR tree. Only
the placement changes.

## Stopping, β-sequences and Phase II (`rhs_ctrl`)

- **Early termination.** A separate XOR network (`rhs_syndrome`) checks the
  hard decisions against every parity check. It also gives the number of
  unsatisfied checks as an output.
- **β-sequences (gears).** Large β gives fast early progress and small β
  gives a better final error rate. The published RS-LDPC sequence is
  β = {0.5 for 5 iterations, then 0.25}. Each β value needs its own
  tracker table. The controller selects gear 0 for the first `GEAR_ITER`
  iterations (default 5) and gear 1 after that. Rounded tables have been
  published only for β = 0.15, so both default gears hold that table. To
  use a real sequence, pass a different `TABLE` parameter.
- **Phase II, VN harmonisation.** If Phase I ends after `L1` iterations
  (default 100) without a codeword, up to `L2` more iterations run
  (default 50). Decoding continues from the Phase-I tracker state, with
  gear 1.

  In every Phase-II iteration, after the tracker update, each VN looks at
  the signs of its six trackers. If exactly one differs from the other
  five, those five move by `d` toward the sign of the odd one. `d` is 0.3
  in the published algorithm and 1/4 here.

  Note that the published wording selects the *larger* of the two sign
  groups and acts when it has exactly one member. That can never happen
  with six inputs. This RTL uses the group of size one instead.

## The code graph (`rhs_code_pkg`)

The 802.3an parity-check matrix is defined by that standard and is not
included here. Instead, constant functions build a graph with the same
shape: 6 × 32 blocks of 64 × 64 permutations.

The construction uses lines over GF(64), with polynomial x⁶+x+1. Variable
`(j, x)` is connected in row block `i` to check `(i, x ⊕ i·j)`, where `i` and
`j` are read as field elements. Two variables share at most one check, so
the graph has no 4-cycles.

The same functions give smaller codes for simulation. Set `GF_S = 3`,
`DV = 3` and `DC = 8` to get a 64 × 24 code. To decode the real 802.3an code,
replace `vn_check` and `chk_vn` with the standard's matrix. Nothing else
depends on the graph.

## How far the RTL can be trusted

These points follow the published description closely:

- the binary messages and XOR check nodes;
- the prefix/suffix partitioning;
- the rounded k = 2 tracker functions;
- the 7-bit trackers, Λ_L = 15 and Λ_cap = 8;
- the priority-encoder thresholds (ψ1 = 1/4, then 1/2; sign bit; magnitude 2
  when no `Z` is one);
- one threshold generator per 64 VNs;
- the two-phase scheme and the gear switch.

These are this design's own choices:

- the code graph;
- the channel LSB;
- `q = 9`;
- the LFSR;
- one bit per clock with a purely combinational message path;
- the syndrome network;
- the start/done interface and the state kept across Phase II;
- the reading of the harmonisation rule;
- `d` rounded to 1/4;
- identical gear tables by default.

Not built:

- The saturating trackers with `s > 0`, together with their saturation
  indicators. The AR4JA results use them; the RS-LDPC configuration does
  not.
- Irregular codes and punctured bits.
- The channel quantizer.

`rhs_pkg` does include the published k = 4 (AR4JA) tracker table.

The default message path is long in one cycle: tracker, adder, comparator,
a 32-input XOR chain, then the counter. Registering `x` or `y` would add one
cycle per bit to the latency above.

## Simulating

Every module, package and testbench is a file of its own name. The packages
`rtl/rhs_pkg.sv` and `rtl/rhs_code_pkg.sv` must come first. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_rhs_decoder \
  rtl/rhs_pkg.sv rtl/rhs_code_pkg.sv rtl/*.sv tb/tb_rhs_decoder.sv
./obj_dir/Vtb_rhs_decoder
```

Each testbench prints `TB_RESULT checks=N failures=F` and stops itself
through a watchdog if something hangs.

- `tb_rhs_<block>` checks each block against values computed independently
  in the testbench: exhaustive, random, or a cycle model.
- `tb_rhs_decoder` runs the 64-bit code. It derives a code basis by Gaussian
  elimination, sends random codewords through an AWGN channel, and checks
  the latency, the syndrome and the decoded words. It also requires each
  mechanism to occur at least once: early stop, gear change, output
  capping, decoding failure, Phase II and harmonisation.
- `tb_rhs_decoder_dv6` runs the same checks on a 64-bit code with the
  default variable degree, d_v = 6 (48 checks, d_c = 8, dimension 39).

The largest configurations simulated are these two 64-variable codes. The
default 2048-bit decoder with d_v = 6 and d_c = 32 is linted and elaborated,
but it is not simulated. Verilator makes roughly 200 KB of C++ per variable
node from it, so the full-size C++ model takes hours to compile. An
event-driven simulator, or a model of a small slice of the graph, is the
practical way to go further.
