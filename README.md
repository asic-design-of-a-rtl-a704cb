# Fully parallel noisy gradient-descent bit-flip decoder for the 10GBASE-T LDPC code

10GBASE-T Ethernet protects its data with a (2048,1723) low-density parity-check
code: 2048 code bits, 384 parity checks, every bit in 6 checks and every check over
32 bits. Most decoders for it pass multi-bit soft messages (min-sum and its variants),
which costs area and wiring. This design decodes it with a bit-flipping algorithm
instead: every code bit keeps only a one-bit hard decision, every check sends back
only one bit, and the soft channel information never leaves the bit's own node. What
makes bit flipping competitive is a small random perturbation added to every node's
flip decision in every iteration (noisy gradient-descent bit flipping, NGDBF). The
noise lets the search escape the local optima where plain gradient-descent bit
flipping gets stuck.

The decoder is fully parallel: 2048 symbol nodes and 384 check nodes exist in
hardware, and one complete iteration (all checks, then all bits) takes one clock cycle.

## The decoding rule

With decisions x_k in {+1,-1}, channel samples y_k and bipolar syndromes
s_i = product of the decisions in check i (+1 when satisfied), each iteration

1. computes all syndromes; if all are +1 the decisions are a codeword and decoding ends;
2. computes for every bit the inversion function
   `E_k = x_k*y_k + w * sum_{i in checks of k} s_i + q_k`,
   with w = 1/6 and q_k a zero-mean Gaussian sample;
3. flips every bit with `E_k < theta`, theta = -0.55.

The frame source stops after a maximum number of iterations (600 in the reference
setting). The hardware evaluates the sign of `E_k - theta`; the terms `q_k - theta`
do not depend on the decoding state, so they are prepared before decoding starts.

## Number format

All arithmetic is sign-magnitude on 7 bits: one sign bit, two integer bits and four
fraction bits (steps of 1/16, range +/-3.9375). Channel samples arrive in this format,
already quantized with their magnitude limited to 2.95 (47/16). Stored noise values
drop the integer MSB and have 6 bits. A decision bit is 0 for +1 and 1 for -1, which is
also the sign bit of a sign-magnitude number, so `sign(y_k)` is simply bit 6 of y_k
and `x_k*y_k` is y_k with its sign bit XORed with the decision.

## Block structure

```
 Noisein, StdDev, Theta                       ChannelSamples      Enable, FirstFrame
        |                                           |                   |
   +---------+ 2048 x 6 bit  +---------------------------+  2048  +-------------+  384x32  +-----------------+
   |   NUU   |-------------->| SNU: 2048 symbol nodes    |------->| interleaver |--------->| CNU: 384 XOR-32 |
   | 2648-reg|               | (decision registers)      |<-------|  (wiring)   |<---------| check nodes     |
   |  ring   |               +---------------------------+ 2048x6 +-------------+   384    | + ETU (OR-384)  |
   +---------+                          |                                                 +-----------------+
                                    Decisions                                                     |
                                                                                               ChkOut
```

* **NUU** (`nuu`, `noise_shift_register`, `sm_multiplier`, `sm_adder`): noise update
  unit. Produces `q_k - theta` for every symbol node.
* **SNU** (`snu`, `symbol_node`, `scaled_syndrome_sum`, `sm_adder`, `sign_compute`):
  2048 symbol nodes; the decision registers are the only state of the decoding loop.
* **Interleaver** (`interleaver`): fixed wiring between symbol and check nodes.
* **CNU** (`cnu`, `check_node`, `etu`): 384 32-input XORs and the early-termination OR.

The whole loop is register -> interleaver -> 32-input XOR -> interleaver -> symbol
node arithmetic -> register, so the clock period is set by one check and one symbol
node in series, plus the long wires between them.

## The noise update unit: no Gaussian generator on chip

A Gaussian random generator per node, or even one shared generator, would dominate
the area of a bit-flipping decoder. The NUU instead takes externally supplied Gaussian
samples once, at start-up, and then reuses them:

* **Start-up phase** (`FirstFrame = 0`). One 7-bit unit-variance sample per clock
  arrives on `Noisein`. It is multiplied by `StdDev` (product truncated to 1/16,
  saturated), `Theta` is added, the integer MSB of the sum is dropped, and the 6-bit
  result is shifted into register 1 of a chain of 2648 registers. After exactly 2648
  cycles every register holds a sample; the first sample is in register 2648.
* **Decoding phase** (`FirstFrame = 1`). A multiplexer feeds register 2648 back into
  register 1, so the 2648 samples circulate by one position per clock. Registers
  1..2048 drive symbol nodes 1..2048, so each node sees a new sample in every iteration,
  and the sequence a node sees only repeats after 2648 iterations.

Two conventions matter when driving it:

* `Theta` is *added*. To obtain `q_k - theta` for theta = -0.55 the input must carry
  +0.5625 (`7'b0001001`).
* Dropping the integer MSB assumes `|q_k - theta| < 2`. Larger values wrap (bit 5 of the
  sum is simply removed), which the reference setting makes rare. The symbol node puts
  a 0 back in that bit position before use.

The ring shifts on every clock in both phases, including the cycle that loads a frame.

## The symbol node

Each symbol node computes, in one cycle,

```
xy      = {y[6] ^ x, y[5:0]}                       x_k * y_k
ssum    = table[ count of unsatisfied checks ]     w * sum(s_i)
partial = ssum + xy                                7-bit sign-magnitude add, saturating
flip    = sign(partial + {noise[5], 0, noise[4:0]}) only the sign is formed
x_next  = Enable ? y[6] : x ^ (FirstFrame & flip)
```

The syndrome count uses three full adders and a half adder (S0..S2 and S3..S5 in two
full adders, their sum bits in a half adder giving C0, the three carries in a third
full adder giving C1 and C2). The count maps to `(6 - 2*count)/6` truncated to 1/16:

| unsatisfied checks | 0 | 1 | 2 | 3 | 4 | 5 | 6 |
|---|---|---|---|---|---|---|---|
| w*sum(s_i) | +1 | +0.625 | +0.3125 | 0 | -0.3125 | -0.625 | -1 |
| bits | 0010000 | 0001010 | 0000101 | 0000000 | 1000101 | 1001010 | 1010000 |

`sign_compute` compares magnitudes instead of adding them. A sum of exactly zero
(`E_k = theta`) does not flip.

## Check nodes, early termination and the parity-check matrix

A check node is the XOR of its 32 decisions (1 = unsatisfied). `ChkOut` is the OR of
all 384 syndromes: it is 0 exactly when the current decisions form a codeword. Both
are combinational, so `ChkOut` describes the decisions currently on `Decisions`.

The 10GBASE-T matrix is an RS-based LDPC construction whose published table is not
reproduced here. The interleaver instead generates a matrix of the same construction
family at elaboration (`ngdbf_pkg::h_row`, `h_col`): with GF(64) built on
x^6 + x + 1 and alpha a root of it, column `64*j + beta` (block j = 0..31, beta in
GF(64)) belongs to row `64*i + (beta XOR alpha^(i+j))` for bundles i = 0..5. Every
column has one 1 per bundle (degree 6), every row one 1 per block (degree 32), and two
columns never share two rows (girth at least 6). **This is not the standard's
matrix**: frames encoded for real 10GBASE-T will not decode. To use the standard code,
replace `h_row`/`h_col` (or the interleaver's two assignments) with the standard's
connection table; nothing else depends on the matrix. A convenient property of the
generated matrix, used by the testbench: any even number of whole 64-bit blocks set to
1 is a codeword, since every check has exactly one bit in each block.

## Operating the decoder

| FirstFrame | Enable | operation |
|---|---|---|
| 0 | 0 | start-up phase: fill the noise ring from `Noisein` |
| 1 | 1 | load a frame: every decision becomes sign(y_k) |
| 1 | 0 | one decoding iteration per clock |

Sequence: hold `Reset` low (active low, asynchronous) for at least one clock; release
it; keep `FirstFrame` low for exactly 2648 clocks while supplying one sample per clock
on `Noisein`; raise `FirstFrame` together with `Enable` for one clock with the first
frame on `ChannelSamples`; lower `Enable`. From then on, in every cycle in which
`ChkOut` is 0, `Decisions` holds the decoded codeword and the next frame may be loaded
in that same cycle. If `ChkOut` stays 1 for the allowed number of iterations, load the
next frame anyway (decoding failure).

Things the frame source has to do, because the decoder does not:

* hold `ChannelSamples` stable for the whole frame: the symbol nodes read them in
  every iteration and do not store them;
* take `Decisions` in the cycle `ChkOut` is 0: the decisions keep being updated after
  convergence and the noise can still flip bits later;
* count iterations and enforce the limit;
* provide the Gaussian samples, `StdDev` (eta times the channel noise standard
  deviation) and `Theta`.

Throughput is `f * 2048 / (iterations + 1)` bits per second (one load cycle per
frame); at 133 MHz and 10-20 iterations this is 13-25 Gb/s.

## Parameters

`ngdbf_decoder` has `DC` (number of 64-column blocks, default 32 so N = 2048), `N`
(derived, 64*DC) and `NREG` (noise registers, default 2648). They exist so that small
instances can be built; the number of checks is fixed at 384 (six bundles of 64) and
the symbol node is built for six checks. All sizes in `ngdbf_pkg` are the code's.

## Choices made in this design

Where the description of the architecture leaves details open, this RTL chooses:

* the parity-check matrix (above);
* multiplier truncation, saturation of every 7-bit sign-magnitude result at 63/16 and
  the + sign for zero results;
* input 0 of the flip multiplexer is 0, so decisions hold during start-up;
* reset values of 0 for every register, so after reset the decisions (all +1) satisfy
  every check and `ChkOut` is 0 during the start-up phase. (The published timing
  diagram draws `ChkOut` high during start-up; with `ChkOut` defined as the OR of the
  syndromes, as it is here, that would need a reset state that violates some check.
  A frame source should ignore `ChkOut` until the first frame has been loaded.)
* the ring shifting in every cycle, frame-load cycles included;
* `Theta` carrying the negated threshold.

## Verification

Each module has a self-checking testbench in `tb/` that compares it against an
integer model (`tb/ngdbf_ref_pkg.sv`) written independently of the RTL:

| testbench | what it checks |
|---|---|
| `tb_sm_multiplier`, `tb_sm_adder`, `tb_sign_compute` | all 16384 operand pairs |
| `tb_scaled_syndrome_sum` | all 64 syndrome patterns |
| `tb_check_node`, `tb_etu`, `tb_cnu` | parity and OR over corner and random patterns |
| `tb_symbol_node`, `tb_snu` | decisions cycle by cycle through start-up, loads and decoding |
| `tb_noise_shift_register`, `tb_nuu` | chain contents, start-up arithmetic, ring rotation |
| `tb_interleaver` | every connection against a separate GF(64) model, degrees, no 4-cycles |
| `tb_ngdbf_decoder` | full-size decoder end to end |

`tb_ngdbf_decoder` runs the decoder at its default size. It fills the noise ring with
2648 Gaussian samples, then decodes 50 frames at Eb/N0 = 4.55 dB and 50 at 5.5 dB
(BPSK over AWGN, rate 0.841, `StdDev` = 0.4375, `Theta` = +0.5625) and three frames
of pure noise that run into the 600-iteration limit. Every cycle it compares the decisions,
`ChkOut` and all 2048 noise outputs with a model of the whole decoder, and it checks
that start-up, frame loads, flips, convergence, the iteration limit and a full
rotation of the noise ring all happen. Over the 50 frames per point the decoder needed
17.6 iterations on average at 4.55 dB and 6.4 at 5.5 dB, and every frame decoded to
the transmitted codeword. For comparison, the published ASIC of this architecture reports 14.6
and 36.4 Gb/s at 133.33 MHz for these two points, which corresponds to about 18.7
and 7.5 iterations per frame with the standard's matrix. Bit error rates down to 1e-7
need around 1e9 decoded bits and are out of reach of RTL simulation.

To run a testbench with Verilator (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_ngdbf_decoder \
    rtl/ngdbf_pkg.sv tb/ngdbf_ref_pkg.sv rtl/*.sv tb/tb_ngdbf_decoder.sv -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M`. The full-size build takes a few
minutes; the simulation itself takes seconds.

## Not included

* The frame source / controller that drives `FirstFrame`, `Enable` and `Noisein` and
  counts iterations (modelled in `tb_ngdbf_decoder`).
* The channel quantizer that limits samples to 2.95.
* Physical design: clock tree, placement and routing.
