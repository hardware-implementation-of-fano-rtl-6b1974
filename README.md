# A Fano sequential decoder for PAC codes, in SystemVerilog

Polarization-adjusted convolutional (PAC) codes put a rate-1 convolutional
code in front of the polar transform. For short blocks they come close to the
finite-length limit, but only when they are decoded by a search through the
convolutional code tree, not by plain successive cancellation. This design
is a hardware decoder for that search. It runs the Fano algorithm, a
depth-first search with a moving threshold that backtracks when the path
metric drops. The Fano algorithm needs almost no memory, so it suits a small
chip. The price is a decoding time that depends on the noise: most frames
take a few hundred cycles, a few take very many, and a cycle budget bounds
the worst case.

The default configuration decodes a rate-1/2 code of length N = 128 (K = 64
data bits) with 7-bit LLRs and the generator c = (1,0,1,1,0,1,1). A frame
that needs no backtracking takes 5N-2 = 638 clock cycles. At Eb/N0 = 3.5 dB
the average is about 800 cycles per codeword.

The architecture follows a published brief on Fano decoding of PAC codes: the
block structure, the search rules, the branch metric table and its
comparator-free branch metric unit, the register sizes and the cycle budget
come from there. Where the brief is silent or ambiguous, this RTL makes its
own choices. They are listed in the section "Where this RTL makes its own
choices".

## The code

Encoding maps a K-bit message d to an N-bit codeword x in three steps:

1. **Data insertion.** d is placed into the carrier word v at the positions
   where the frozen map a has a_i = 1. All other positions are frozen to 0.
2. **Convolution.** u_i = XOR_{j=0..6} c_j v_{i-j}, with v_j = 0 for j < 0.
3. **Polar transform.** x = u F^{(x)n}, with F = [[1,0],[1,1]] and n = log2 N.
   Natural bit order is used throughout.

The receiver sees channel LLRs l (positive favours bit 0). The decoder
estimates v one bit at a time. Bit i of the polar-transformed channel, as
seen after the bits u_0..u_{i-1} are known, has the LLR z_i. This is the
successive-cancellation LLR. Here it is called "demapped", because it is only
an input to the tree search and no decision is taken on it.

The testbenches use the Reed-Muller choice of data positions: for N = 128
this is every index with at least four 1 bits, 64 positions. The bias vector
b is the hard-decided capacity of each bit channel. Both a and b are inputs
of the decoder.

## Block structure

```
 llr load ─► input_buffer ─► polar_demapper ──z[N]──► operand_mux ─► bmu ─► fcu ◄── delta
                                   ▲                     ▲   ▲        ▲      │
                                   └──────── ureg ◄──────┘   │  cs    │      ├─► cc_counter ◄── mc  ─► to
                                                             b, a   vreg ◄───┘
                                                                     └──► output_buffer ─► v_hat, cycles
```

| module | role |
|---|---|
| `input_buffer` | the N channel LLRs, loaded one per clock, read in parallel |
| `polar_demapper` | computes z_i on request and keeps every intermediate LLR (see below) |
| `pd_psum_network` | combinational partial sums for the demapper, recomputed from Ureg |
| `operand_mux` | picks z_i, z_{i-1}, b_i, b_{i-1}, a_i, a_{i-1} and u_{i-1} at the current depth i |
| `metric_calculator` | the two branch metrics gamma_i(0) and gamma_i(1) of one bit |
| `conv_encoder` | u_{i,0}: the convolution output if v_i = 0 |
| `bmu` | branch metric unit: M1, M23 and the chosen bits v_i, u_i |
| `fcu` | Fano control unit: the search state machine |
| `vreg` | N+6-bit bidirectional shift register of the decided v bits; its low 6 bits are the convolution state |
| `ureg` | N-bit register of the decided u bits, written by index |
| `cc_counter` | counts the cycles of a session and raises the timeout TO above MC |
| `output_buffer` | holds v_hat, the cycle count and TO after a session |
| `pac_fano_decoder` | the top level |
| `pac_pkg` | the shared constants, the rule enumeration and the LLR arithmetic |

## The branch metric without a comparator

The Fano metric of a branch of bit channel i is
gamma_i(u) = 1 - log2(1 + e^{-(1-2u) z_i}) - b_i.
The log term is replaced by 0 when u agrees with the sign s(z_i), and by
|z_i| otherwise. The bias b_i is restricted to 0 or 1. That leaves four cases:

| s(z_i) | b_i | gamma_i(0) | gamma_i(1) |
|---|---|---|---|
| 0 | 0 | 1 | 1-\|z_i\| |
| 0 | 1 | 0 | -\|z_i\| |
| 1 | 0 | 1-\|z_i\| | 1 |
| 1 | 1 | -\|z_i\| | 0 |

`metric_calculator` is exactly this table: one absolute value, one adder for
1-|z|, and two 4-way multiplexers selected by {s, b}. The table shows that the
branch that agrees with s(z_i) is always the better one. So the branch metric
unit (`bmu`) needs no comparator. The most likely branch is u_i = s(z_i), and
the least likely one is u_i = s(z_i) XOR 1. The control unit picks one of them
with t_i. At a frozen position (a_i = 0) the only branch is v_i = 0, so u_i is
forced to u_{i,0}. In every case v_i = u_i XOR u_{i,0}, because c_0 = 1. A
second metric calculator, fed with z_{i-1}, b_{i-1} and the stored u_{i-1},
gives M1, the metric of the branch that led to the current node.

|z| is clipped to 63, so all metrics fit in 7 signed bits.

## The search: Fano rules on relative metrics

The control unit never stores absolute path metrics. The current node N1 has
metric 0. M23 is the metric of the child being examined (N2 is the best child,
N3 the other one). M1 is the metric of the branch from the parent N4. The
threshold T is kept relative to N1. So moving to a child subtracts M23 from T,
and moving back adds M1. Psi = 1 marks a backward check: the search has just
returned to N1 and must decide whether to go back further.

| rule | when | action |
|---|---|---|
| 0 | Psi = 0, M23 >= T, first visit, M23 >= T + Delta | move to the child, T <- T + Delta - M23, examine its best child |
| 1 | Psi = 0, M23 >= T, otherwise | move to the child, T <- T - M23, examine its best child |
| 2 | cannot go forward (or Psi = 1), and N1 is the root or M1 + T > 0 | stay, T <- T - Delta, Psi <- 0, examine the best child |
| 3 | going back, N4 not frozen and N1 was N4's best child | move to N4, T <- T + M1, Psi <- 0, examine N4's other child |
| 4 | going back otherwise | move to N4, T <- T + M1, Psi <- 1 |

A first visit is recognised with the classic Fano test: the current node's
metric, 0, is below T + Delta. Whether N1 was N4's best child needs no stored
history: it is the case when u_{i-1} equals the sign of z_{i-1}, and both are
still in Ureg and in the demapper. Decoding ends when depth N is reached, or
when the cycle counter passes MC.

## The polar demapper and backtracking

This is the part that differs most from an ordinary SC decoder. An SC
decoder visits the bits once, in order. The Fano search asks for z_i at any
depth the search reaches, often for a bit it has already visited, after it
changes an earlier decision.

**Storage.** The demapper is a tree of n = 7 levels. Level k holds, for each
aligned block of 2^k bit positions, the 2^k LLRs of that sub-tree. Each level
is a full N-entry array, so every block has its own slot. In total the tree
keeps N log2 N = 896 LLRs, of which level 0 is the z vector itself. The z
vector is read through `operand_mux`. The channel LLRs in the input buffer are
the level above the top.

**Computation.** For bit index i, level k is computed from the parent block
at level k+1. If bit k of i is 0 the rule is f(a,b) = sign(a) sign(b)
min(|a|,|b|). If it is 1 the rule is g(a,b) = b + (1-2 beta) a, where beta is
the partial sum of the left sibling block. Level k has 2^k processing elements
and is computed in one cycle. All values saturate to +-63.

**Partial sums.** A bit-serial partial-sum register would have to be rewound
when the search backs up. Instead, `pd_psum_network` re-encodes the whole Ureg
with a combinational XOR butterfly. Stage k of the butterfly is the
F^{(x)k} encoding of every aligned 2^k block. Positions in Ureg beyond the
current depth hold stale bits, but no selected left-sibling block ever
contains one.

**What to recompute.** When the search moves forward to depth i, only the
levels 0..tz(i) are recomputed (tz is the number of trailing zeros; all levels
for i = 0). Those are exactly the levels whose block starts at i, so they are
the only ones that depend on the bit u_{i-1} just decided. Why is a stored
block at a higher level still valid? Its inputs are bits before the block's
start. If one of them had changed, the search would have had to back up below
the block's start and then pass the start again going forward, and that
recomputes the block. Each block has its own slot, so nothing else can
overwrite it.

After a move back (rules 3 and 4) or a threshold drop (rule 2), the z needed
is already stored, and the demapper is not started at all.

Over a frame without backtracking the demapper spends
sum over i of (tz(i)+1), plus n for i = 0, which is 2N-2 cycles.

## Timing

Each search iteration takes three cycles: BMU (the branch metric unit's
outputs are registered), RULE (the rule is chosen) and ACT (T, depth, Psi, t,
Vreg and Ureg are updated). After a forward move the demapper cycles come on
top. A frame without backtracking therefore takes (2N-2) + 3N = 5N-2 = 638
cycles. Each backtracking step costs 3 cycles plus the demapper's cycles on
the next forward move. The cycle counter counts every cycle from start to the
end of the session. `cycles` reports that count. After a timeout it is MC+2,
and v_hat is not valid.

## Interface of `pac_fano_decoder`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `llr_we`, `llr_addr`, `llr_data` | in | 1, 7, 7 | write one channel LLR into the input buffer (while idle) |
| `a` | in | N | frozen map, 1 = data position |
| `b` | in | N | bias bits |
| `delta` | in | 16 | threshold spacing Delta (2 in the evaluated configuration) |
| `mc` | in | 20 | cycle budget MC (2^14 ... 2^18 evaluated) |
| `start` | in | 1 | one-cycle pulse: decode the loaded frame |
| `busy` | out | 1 | decoding |
| `done` | out | 1 | one-cycle pulse: results are valid |
| `v_hat` | out | N | decoded carrier word, v_hat[j] = v_j; the data are v_hat at positions with a_j = 1 |
| `cycles` | out | 20 | cycles used by the session |
| `to` | out | 1 | the session hit the cycle budget |
| `rule`, `rule_valid` | out | 3, 1 | rule applied in each iteration, for monitoring |

Parameters: `N` (128), `Q` (7), `H` (6), `MW` (16), `CCW` (20). The generator
is `pac_pkg::C_POLY`. If H is changed, C_POLY has to be changed with it.

## Where this RTL makes its own choices

- **Rule 0.** The source defines a new node as one "visited for the first
  time" and tightens to T + Delta - M23 on every such visit. Read literally,
  the threshold would overshoot and have to drop (rule 2) even on a noise-free
  channel. That contradicts the 5N-2 cycle count the source gives for that
  case. This RTL uses the classic Fano first-visit test and tightens only when
  the result stays at or below the node's metric. With metrics of at most 1
  and Delta = 2, one Delta step is always enough.
- **Rule 4 under Psi = 1.** The source's condition repeats rule 3's "N1 is the
  most likely node". It is read as "least likely", which makes the two rules
  complementary.
- **Demapper.** The source builds on a cited FFT-like SC architecture, with
  the decision and partial-sum units replaced and natural output order. The
  per-level storage, the recompute schedule and the 2^k processing elements
  per level are this design's way to meet the stated requirements: keep all
  intermediate LLRs, follow backtracking, and spend 2N-2 cycles per frame.
- **Widths.** All demapper LLRs are Q bits with symmetric saturation. The
  metrics and T use 16 bits, and the cycle counter uses 20 bits.
- **Control details.** These are all this design's own: the initial threshold
  T = 0, the zero fill of Vreg, the serial LLR load port, the start/done
  handshake, and reporting the cycle count with the result.
- **Frozen parent.** a_{i-1} is used to recognise a frozen parent N4. That
  multiplexer output is not in the source's block diagram.

Not part of the RTL: the technology library and the FPGA on which the source
measured its results, and the host that generates frames. The testbenches play
the host's role.

Generic synthesis of the top level gives about 7,700 flip-flop bits. The
source reports 8,306 registers on its FPGA. Of the 7,700 bits, 6,272 are the
demapper's tree.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
by printing `TB_RESULT checks=<n> failures=<m>`, and each has a watchdog.

- `tb_pac_fano_decoder` runs the full-size decoder end to end. A behavioural
  transmitter produces the frames (random data, convolution, polar transform,
  BPSK, AWGN, LLRs rounded to integers). Each frame is checked against a
  reference model in the testbench. The model recomputes every z_i from
  scratch with a direct SC recursion, applies the metric table and the five
  rules on plain integers, and counts cycles from the schedule above. The
  decoder must match the model's decoded word, cycle count, timeout flag and
  the count of every rule on every frame. Noise-free frames must decode
  correctly in exactly 638 cycles. Noisy frames at 3.5, 2 and 1 dB, and a
  frame with a tiny MC, make every rule and the timeout occur.
- `tb_pac_workloads` samples the published operating points: 1.0 to 3.5 dB,
  with MC = 2^14 and 2^18, 60 frames each. It prints average cycles and frame
  errors. One run gave:

  | Eb/N0 (dB) | 1.0 | 1.5 | 2.0 | 2.5 | 3.0 | 3.5 |
  |---|---|---|---|---|---|---|
  | avg. cycles, MC = 2^18 | 28903 | 8382 | 2667 | 1433 | 1427 | 807 |
  | avg. cycles, MC = 2^14 | 8598 | 6384 | 2797 | 1377 | 1061 | 771 |

  The source's averages are about 15,000 cycles at 1 dB and 840 at 3.5 dB. At
  low SNR a 60-frame sample is dominated by a few very long frames.
- `tb_polar_demapper` drives the demapper like a backtracking search. It
  checks each z and each request's cycle count, and checks that all stored z
  values stay valid after jumps back.
- `tb_fcu` walks the control unit through every rule by hand, then a timeout,
  then a complete run.
- The remaining testbenches check the small blocks exhaustively or with
  random stimulus against direct models.

To simulate with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/pac_pkg.sv tb/tb_pac_fano_decoder.sv \
          --top-module tb_pac_fano_decoder
./obj_dir/Vtb_pac_fano_decoder
```

Any other testbench builds the same way: replace the file and the top-module
name. The testbenches use only `$urandom`, so a different seed
(`+verilator+seed+<n>`) gives different frames.
