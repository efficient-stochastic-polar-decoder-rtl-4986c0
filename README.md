# Correlated stochastic belief-propagation polar decoder

This is synthesizable SystemVerilog for a belief-propagation (BP) decoder for polar
codes. Every message in the decoder is a random bit stream instead of a multi-bit
number. The usual problem with stochastic decoders is correlation between streams,
which makes the gates compute the wrong function. This design goes the other way:
**every stream is drawn from one shared quasi-random number R(t)**, so all streams
are maximally (positively) correlated on purpose. Under that correlation an AND gate
computes the minimum of two values. That is exactly the `min` of the min-sum check-node
rule, so the check-node half of BP is one AND gate and one XOR gate. The variable-node
half (a sum) is done by a small *probability tracker*: a 6-bit register that follows
the running mean of the incoming bits and is turned back into a stream with one
comparator. The design has no message memory. The graph runs as one pipeline, with
one tracker update per clock, until a CRC check at either end of the graph passes.

The default configuration is a (256, 128) code with a 16-bit CRC: 7-bit channel
values, 6-bit R(t), 6-bit trackers and relaxation factor 2^-2. The decoder stops
after 800 clocks at most.

## Message format

A message bit is the packed struct `ecs_pkg::sbit_t`, which has two wires:

| `sn` | `sgn` | value |
|------|-------|-------|
| 0    | x     | 0     |
| 1    | 0     | +1    |
| 1    | 1     | -1    |

A message's value is the time average of its bits, in [-1, +1]. It stands for a
scaled log-likelihood ratio (LLR): positive means bit 0 is more likely. A stream is
made from a magnitude m in [0, 1] and a sign. In each cycle, `sn = (R(t) <= m)` for
positive values and `sn = (R(t) < m)` for negative ones, with R(t) a 6-bit number in
units of 1/64. Because R(t) is shared, a stream of magnitude a has its ones wherever
the stream of magnitude b >= a has them, and `sn_a & sn_b` has magnitude `min(a, b)`.
So the correlation is what makes the arithmetic work.

The frozen bits of the code enter the graph as the constant stream +1 (always
`sn = 1`, `sgn = 0`): a bit known to be 0, with the largest value a stream can hold.

## Arithmetic units

**F module (`ecs_fm`).** This is the min-sum check rule f(x, y) = sign(x) sign(y)
min(|x|, |y|). The magnitude bits go through an AND gate and the sign bits through an
XOR gate. It is purely combinational.

**G module (`ecs_gm`) and probability tracker (`ecs_pt`).** This is the sum rule
g(x, y) = x + y. The two input bits are added to give x~ in {-2, ..., 2}. The tracker
P follows the mean of x~:

    P(t) = P(t-1) - 2^-m * (P(t-1) - x~),   m = ALPHA_M = 2

P is a PT_W = 6 bit two's-complement number. Bit 5 is the sign and bit 4 has weight
1, so P covers [-2, 2) in steps of 1/16. The output stream takes its sign from P.
Its magnitude is |P| measured against R(t), with |P| >= 1 giving a magnitude bit of
1 every cycle. In other words, g saturates at +-1, the largest stream value.

The tracker has no adder for P - x~. Since x~ is an integer, subtracting it only
changes the three top bits of P (bits n+1, n and n-1, with n = PT_W-1). Each of those
bits is a small Boolean function of P[n] and P[n-1] for each value of x~. The lower
bits pass through. `ecs_pt` builds all five candidates P - x~ this way and shifts each
right by m. A multiplexer picks one according to x~, and one subtractor forms the new
P. Two details matter when you read or change this block:

* The shift is arithmetic, so it rounds towards minus infinity. As a result the
  tracker settles exactly on +1 for a constant +1 input, but only on -13/16 for a
  constant -1 input. This small bias towards positive values comes with the
  shift-based datapath. Changing the rounding changes the decoder's numbers.
* The subtractor saturates to the 6-bit range. Without saturation, P = 31/16 with
  x~ = +2 would wrap to -2.

The output of a G module is combinational from the tracker register, so a change at
its inputs shows at its output one clock later.

## The factor graph

The graph has n = log2 N stages of N/2 units, between n+1 columns of N nodes. Column 1 is the u (source bit) side and column n+1 the channel side. In
0-based RTL indices, unit j of stage s sits between column s and column s+1 and
connects

    left:  R[s][j], R[s][j+N/2]   and   L[s][j], L[s][j+N/2]
    right: L[s+1][2j], L[s+1][2j+1]  and  R[s+1][2j], R[s+1][2j+1]

All stages have the same shuffle, so the same wiring is used n times. The L messages
flow towards the u side and the R messages towards the channel side:

    L[s][j]       = f(L[s+1][2j],   g(L[s+1][2j+1], R[s][j+N/2]))
    L[s][j+N/2]   = g(f(R[s][j], L[s+1][2j]), L[s+1][2j+1])
    R[s+1][2j]    = f(R[s][j],      g(L[s+1][2j+1], R[s][j+N/2]))
    R[s+1][2j+1]  = g(f(R[s][j], L[s+1][2j]), R[s][j+N/2])

The encoder that matches this graph maps v[s+1][2j] = v[s][j] xor v[s][j+N/2] and
v[s+1][2j+1] = v[s][j+N/2], stage by stage from u to x. The same map, run backwards,
gives u from x; the testbenches and the x-side check use it. The graph's bit order is
therefore its own, not the natural order of a Kronecker-product generator matrix. The
frozen set must be given in this order.

**Computing units.** One unit (`ecs_cu`) has two F and two G modules and produces
one kind of message: `out1 = g(f(a, c), b)` and `out2 = f(g(d, b), c)`. An L unit
(`ecs_lcu`) and an R unit (`ecs_rcu`) are the same unit with the inputs mapped
differently:

| unit | a           | b            | c           | d            | out1          | out2         |
|------|-------------|--------------|-------------|--------------|---------------|--------------|
| LCU  | R[s][j]     | L[s+1][2j+1] | L[s+1][2j]  | R[s][j+N/2]  | L[s][j+N/2]   | L[s][j]      |
| RCU  | L[s+1][2j]  | R[s][j+N/2]  | R[s][j]     | L[s+1][2j+1] | R[s+1][2j+1]  | R[s+1][2j]   |

Both arrays update in every clock cycle. Each unit output goes through one register,
so a message moves one stage per clock. The register is this design's choice; it
keeps the longest path to tracker register, comparator, F gate and adder.

**Simplification around frozen bits.** A frozen R input is an infinitely reliable 0,
so f(inf, x) = x and g(x, inf) = inf, and parts of a unit vanish. Which parts vanish
depends only on the frozen flags of the unit's two left R inputs:

| type     | frozen R inputs       | LCU                                                   | RCU                                          |
|----------|-----------------------|-------------------------------------------------------|----------------------------------------------|
| Original | none                  | full unit                                             | full unit                                    |
| I        | R[s][j] and R[s][j+N/2] | L[s][j+N/2] = g(L[s+1][2j+1], L[s+1][2j]); L[s][j] = L[s+1][2j] | both outputs frozen (constant +1) |
| II       | R[s][j]               | L[s][j+N/2] = g(L[s+1][2j], L[s+1][2j+1]); L[s][j] as in the full unit | R[s+1][2j+1] = g(L[s+1][2j], R[s][j+N/2]); R[s+1][2j] = g(L[s+1][2j+1], R[s][j+N/2]) |
| III      | R[s][j+N/2]           | L[s][j+N/2] = g(f(R[s][j], L[s+1][2j]), L[s+1][2j+1]); L[s][j] = L[s+1][2j] | R[s+1][2j+1] frozen; R[s+1][2j] = R[s][j] |

Frozen-ness spreads rightwards: R[s+1][2j+1] is frozen if R[s][j+N/2] is, and
R[s+1][2j] is frozen if both are. `ecs_msg_update` works out every unit's type from
`FROZEN` at elaboration, so frozen outputs are constants and cost no logic. For the
default (256, 128) code, stage by stage, there are 704 Original, 192 Type I and
128 Type II units.

Type III never occurs with a frozen set built from channel reliabilities. In this
graph R[s][j+N/2] always belongs to the more reliable of the two combined bits, so it
is frozen only if R[s][j] is too. Type III appears only with a frozen set that breaks
this order, such as u1, u3, u5, u6 for N = 8 (the set the graph test uses). The unit
supports it all the same.

## From channel to streams

`ecs_bsg` stores the N channel values of a frame when `load` is high and turns each
into one stream bit per clock. The input is LLR' = N0 * LLR, which for BPSK over an
AWGN channel is 4y (y is the received sample). Multiplying by the noise density N0
removes the noise power from the LLR. LLR' must be quantised outside to a signed
7-bit number whose magnitude 64 means "certain". The quantisation scale is up to the
user. The testbench uses round(64 * y), limited to [-64, 63], so a noiseless symbol
is at full scale. Of the scales tried on the (64, 32) code at 3.5 dB, this one gave
the fewest frame errors: 9 % failed, against 29 % at half the scale.

`ecs_sobol_gen` is the only random source. It holds a 6-bit counter t and outputs
R(t) = bit-reverse(t xor (t >> 1)). That is the first dimension of a Sobol sequence
in Gray-code order: 0, 32, 48, 16, 24, 56, 40, 8, ... In every aligned window of 2^k
clocks it visits each 1/2^k slice of [0, 1) exactly once. So a tracker that averages
over a few clocks sees a much more even set of comparisons than it would with an LFSR.
`load` restarts the sequence, so every frame sees the same R(t).

## Stopping: the two CRC checks

The K information positions of u (ascending index) carry K-16 data bits followed by a
16-bit CRC: polynomial 0x1021, start value 0xFFFF, data shifted in MSB first, first
check bit = CRC MSB. The start value is not zero because the decoder starts with every
tracker at 0, i.e. every decision at "0". With a start value of zero, that all-zero
word would pass at once.

Two `ecs_early_term` instances check the word:

* **u side** (`FROM_X = 0`). A G module per information position forms g(L_1, R_1).
  Its tracker sign is the decision on u.
* **x side** (`FROM_X = 1`). A G module per position forms g(L_{n+1}, R_{n+1}), which
  gives a decision on the code bit x. The inverse graph transform turns x into u. The
  frozen positions of that u must be 0 as well as the CRC passing.

Whichever passes first ends the frame, and the u side wins a tie. The x side often
wins: at a good signal-to-noise ratio the channel's own hard decisions are right and
the check passes within 3 clocks. `ecs_control` otherwise stops the frame after
`MAX_CYCLES` = 800 clocks with `success = 0`.

## Interface and timing of the top (`ecs_pd`)

| port      | dir | width        | meaning |
|-----------|-----|--------------|---------|
| `clk`, `rst_n` | in | 1      | clock, asynchronous active-low reset |
| `start`   | in  | 1            | start a frame (taken while `busy` is low) |
| `y`       | in  | N x 7 signed | quantised LLR' per code bit, sampled on the `start` clock |
| `busy`    | out | 1            | frame running |
| `done`    | out | 1            | one-clock pulse at the end of a frame |
| `success` | out | 1            | a CRC check passed |
| `sel_r`   | out | 1            | the x-side check passed (and the u side did not) |
| `cycles`  | out | 10           | clocks the frame ran, 1 ... MAX_CYCLES |
| `u_hat`   | out | N            | decided u (frozen positions 0) |

The outputs from `success` on hold until the next `start`. The `start` clock is the
`load` clock: it captures `y`, restarts R(t) and clears every tracker and stage
register. The frame then runs one iteration per clock. An iteration is one update of
every tracker, with messages advancing one stage. A pass shows up two clocks after
the streams that cause it: one clock for the tracker and one for the registered check.
`done` follows one clock after that.

Parameters of `ecs_pd` (defaults in brackets): `N` [256], `FROZEN` [see below],
`CRC_W` [16], `CRC_POLY` [16'h1021], `CRC_INIT` [16'hFFFF], `MAX_CYCLES` [800],
`LLR_W` [7], `R_W` [6], `PT_W` [6], `ALPHA_M` [2]. K is N minus the number of ones in
`FROZEN`. Bit k of `FROZEN` set means u_{k+1} is frozen. The default is the (256, 128)
set from the Bhattacharyya bound at Eb/N0 = 3 dB, computed on this graph's own order:
starting from Z = exp(-R Eb/N0) at every channel node, the two u-side nodes of a pair
get Z_a + Z_b - Z_a Z_b (node j) and Z_a Z_b (node j+N/2). The K positions with the
smallest Z carry information. To use another code length or rate, give `N` and
`FROZEN` together; `N` must be a power of two.

Size after generic synthesis of the default configuration: about 137k word-level
cells and 30.5k flip-flops. Each unit output has a flip-flop, and every G module has
a 6-bit tracker.

## Where this design departs from, or adds to, the published description

Taken from the description: the stream format; the F module (AND + XOR); the G
module as adder, tracker and comparator; the tracker's bit-logic update for the top
three bits; the unit structure and the three simplified types; the architecture
(Sobol source, channel stream generator, L and R unit arrays, two CRC check blocks,
controller); and the numeric defaults N = 256, K = 128, 7-bit LLR, 6-bit R(t) and
tracker, alpha = 2^-2, CRC-16 and 800 clocks maximum latency.

Chosen here, because the description leaves them open:

* the bit order of the graph (read from its update equations) and the frozen-set
  construction (Bhattacharyya bound instead of the Tal-Vardy method);
* the scale between tracker value and R(t) (|P| = 1 means "always 1"), the rounding
  of the tracker shift, and saturation in the tracker;
* the sign-dependent `<=` / `<` rule in the G modules' comparators, copied from the
  channel stream rule (the published drawing shows one `>=`);
* one register per unit output;
* the CRC polynomial, start value and bit placement, and what the x-side check does;
* the frame handshake; the u side winning a tie;
* an iteration counted as one clock. The description reports an average of about
  109 iterations and 109 clocks at 3.5 dB, and a maximum latency of 800 clocks. Its
  error-rate simulations use at most 40 iterations, which would fit neither reading.
  800 clocks is used.
* The published Type II L-unit drawing feeds a G module from the frozen R input. The
  RTL follows the update equation instead.

Not covered: the timing and area of a real implementation. The published design
reports 1625 MHz in a 28 nm process. This RTL has not been through timing analysis,
and it is not claimed to reproduce the published error-rate curves. Those curves
also cover rates 2/3, 3/4 and 4/5 at N = 256. Each of them needs its own `FROZEN`
value: the rate is fixed when the design is built.

## Measured behaviour

End-to-end simulation (BPSK, AWGN, Eb/N0 = 3.5 dB, the input scale above):

* (64, 32) code, 16 data bits, 200 frames: 18 failed (9 %). The successful ones
  averaged 61 clocks; 156 of them ended through the x-side check and 28 through the
  u-side check.
* (256, 128) code, the default build with the default frozen set, 40 frames: 9 failed
  (22 %). The successful ones averaged 129 clocks (the published figure is 109); 27
  ended through the x-side check and 6 through the u-side check.

These are small samples; they show that the decoder converges and that both checks
work, not a frame-error-rate curve. The shipped end-to-end testbench runs the (64, 32)
code, because building the N = 256 simulation model takes longer than the simulation
is worth for routine checks. The N = 256 figures above come from that testbench switched to the default size
and run for more noisy frames, as its header comment describes.

Most successful frames end through the x-side check. Frames of channel values that
belong to no codeword always run the full 800 clocks and report `success = 0`.

## Files and testbenches

`rtl/` holds one module per file, and `ecs_pkg.sv` holds the shared types. `tb/`
holds one self-checking testbench per module, plus `tb_ecs_model_pkg.sv`, an integer
model of the tracker and stream rule that the testbenches share. Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and stops itself after a fixed number of clocks.

| testbench | what it checks |
|-----------|----------------|
| `tb_ecs_fm` | all input combinations of the F module |
| `tb_ecs_sobol_gen` | first Sobol points, stratification of every aligned window, period, restart |
| `tb_ecs_pt` | tracker against the integer model, clock by clock, random and constant inputs, clear |
| `tb_ecs_gm` | G module against the model with the real R(t); +1 and -1 settling |
| `tb_ecs_cu` | full unit against the model |
| `tb_ecs_lcu`, `tb_ecs_rcu` | all four types side by side against their models |
| `tb_ecs_msg_update` | whole graph (N = 16, every unit type present) against a cycle model |
| `tb_ecs_bsg` | channel stream rule per bit and the count of ones per Sobol period |
| `tb_ecs_early_term` | both checks on a (64, 32) code: pass on codewords, fail on one flipped bit and on a set frozen bit |
| `tb_ecs_control` | load, pass from either side, tie, timeout at exactly MAX_CYCLES |
| `tb_ecs_pd` | end to end on a (64, 32) code: clean, noisy and garbage frames; u-side, x-side and timeout stops must all occur |

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/ecs_pkg.sv tb/tb_ecs_model_pkg.sv tb/tb_ecs_pd.sv --top-module tb_ecs_pd
    ./obj_dir/Vtb_ecs_pd

`tb_ecs_pd` explains at its top how to switch it to the default N = 256. At that
size the C++ model takes several minutes to compile (about six minutes with eight
jobs); the simulation itself takes seconds.
