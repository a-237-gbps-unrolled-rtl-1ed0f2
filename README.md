# Unrolled, deeply pipelined Fast-SSC polar decoder

A successive-cancellation polar decoder is sequential: every bit decision
depends on the ones before it, so a decoder that reuses one set of processing
units for a whole frame spends hundreds of clocks per frame. This design
takes the opposite route for one fixed code. The whole Fast-SSC decoder tree
of the code is laid out in hardware, each operation of the tree gets its own
unit and its own pipeline register, and register chains carry every message
until the stage that needs it. The result accepts a new frame of N channel
LLRs every clock and delivers an N-bit codeword estimate every clock, a fixed
number of clocks later. For the default (1024,512) code that is 1024 coded
bits per clock, about 236 Gbit/s at 231 MHz, with a latency of 560 clocks.

The architecture follows the letter "A 237 Gbps Unrolled Hardware Polar
Decoder" (Giard, Sarkis, Thibeault, Gross). The RTL here is an independent
implementation of it. The letter leaves the arithmetic, the code construction
and the interface open; the choices made here are listed in
[Where this RTL departs from or goes beyond the paper](#where-this-rtl-departs-from-or-goes-beyond-the-paper).

## From a code to a decoder tree

A polar code of length N = 2^n is fixed by its frozen set: the positions i of
the input vector u that are always 0. The codeword is x = u F^(x)n with F =
[[1,0],[1,1]], written recursively as

    x = [ enc(u_left) XOR enc(u_right) , enc(u_right) ]

where u_left and u_right are the two halves of u. Successive-cancellation
decoding follows the same recursion backwards, which makes a binary tree:
the root is the whole code, each node is a subcode of half its parent's
length, and the leaves are single bits. Fast-SSC prunes the tree. A subtree
whose subcode can be decoded directly becomes a leaf:

| node kind | subcode | decision | built as |
|-----------|---------|----------|----------|
| Rate-0 | every bit frozen | all zeros | no logic, no delay |
| Rate-1 | no bit frozen | hard decision on each LLR | `polar_rate1_stage`, any length |
| Repetition | only the last bit free, length <= 4 | sign of the LLR sum, on every bit | `polar_rep_stage` |
| SPC | only the first bit frozen, length <= 4 | hard decisions, least reliable bit flipped if parity is odd | `polar_spc_stage` |
| split | anything else | through the two halves | F, left subtree, G, right subtree, Comb |

The classification is tried in that order (`polar_pkg::node_kind`). The
length limit of 4 on repetition and SPC leaves is the paper's; Rate-0 and
Rate-1 leaves may be as long as the code.

A split node of length L with LLR vector alpha (halves a and b) works in three
steps:

* **F**: the left child gets `alpha_l[i] = sign(a_i) sign(b_i) min(|a_i|, |b_i|)`.
* **G**: once the left child has decided `beta_l`, the right child gets
  `alpha_r[i] = b_i + (1 - 2 beta_l[i]) a_i`.
* **Comb**: once the right child has decided `beta_r`, the node's estimate is
  `beta = [beta_l XOR beta_r, beta_r]`.

For the paper's (8,4) example (u0, u1, u2, u4 frozen) the root splits into a
left child with u0..u2 frozen and u3 free, a length-4 repetition code, and a
right child with only u4 frozen, a length-4 SPC code. Its decoder is five
operations long: F8, Rep4, G8, SPC4, Comb8.

## Unrolling and pipelining the tree

`polar_node` is one node of the tree. It receives its length and its slice of
the frozen mask as parameters, classifies itself at elaboration and either
instantiates a leaf decoder or instantiates the F, G and Comb stages and two
`polar_node` children. The recursion therefore generates the whole decoder
for whatever mask the top is given. Every operation is followed by a pipeline
register, so each operation is exactly one clock.

Because a new frame enters every clock, each stage works on a different frame
from its neighbours. A split node's G stage needs the node's own alpha and the
left child's beta_l for the same frame; Comb needs beta_l and beta_r for the
same frame. Two register chains make that true:

```
 alpha ──┬── F ──► left subtree ──► beta_l ──┬────── chain (1 + LAT_R) ──────┐
         │         (LAT_L clocks)            │                               ▼
         └── chain (1 + LAT_L) ──► alpha_d ──┴─► G ──► right subtree ──► Comb ──► beta
                                                        (LAT_R clocks)
```

The node's latency is therefore

    LAT(split) = 1 (F) + LAT_L + 1 (G) + LAT_R + 1 (Comb)
    LAT(Rate-0) = 0,  LAT(other leaves) = 1

When the left child is Rate-0 its decisions are known to be zero: the F unit
is not built, G adds a and b, and the F slot becomes one more clock of the
alpha chain. When the right child is Rate-0, the G unit is not built and
beta_r is zero. In both cases the three slots are kept, so the formula above
holds everywhere. (`polar_pkg::node_latency` evaluates it at elaboration and
every node sizes its chains from it.)

For the (8,4) code the pipeline is:

| clock after input | 1 | 2 | 3 | 4 | 5 |
|-------------------|---|---|---|---|---|
| operation | F8 | Rep4 | G8 | SPC4 | Comb8 |
| alpha chain (8 LLRs) | stage 1 | stage 2 | read by G8 | | |
| beta_l chain (4 bits) | | | stage 1 | stage 2 | read by Comb8 |

Frame i+1 runs through the same table one clock behind frame i, frame i+2 two
clocks behind, and so on.

Both the logic and the storage grow roughly as N^2 for a full tree: the
alpha chain at the root holds N LLRs for the whole latency of the left half
of the code. The design is practical only for moderate code lengths.

## Register chains

`polar_delay_line` is a fixed delay of DEPTH clocks on a W-bit word. A chain
shorter than `RAM_MIN_DEPTH` (4) is a shift register. A longer one is a
circular buffer of DEPTH-1 words, written and read at the same address every
clock, followed by an output register, which a synthesis tool can map to
block RAM; the original FPGA design also kept its chains in RAM blocks. Only
the address counter is reset. Chain contents are never reset, so a frame
slot is meaningful only when its valid bit is set.

## Numbers: LLRs and decisions

* LLRs are Q-bit two's-complement numbers, Q = 5 by default, positive
  meaning "0 is more likely". Every result is kept in the symmetric range
  -(2^(Q-1) - 1) .. 2^(Q-1) - 1 (+-15). F saturates a magnitude of 16, G
  saturates its sum. Repetition sums use Q + log2(L) bits and never saturate.
* Decisions are bits, 1 meaning the code bit is 1 (negative LLR).
* A zero repetition sum decides 0; in an SPC leaf the lowest index wins a tie
  for the smallest |LLR|.
* Bus order: word i of `alpha_c` is the LLR of code bit x_i and bit i of
  `beta_c` is the estimate of x_i, with x = u F^(x)n in natural order (no
  bit-reversal permutation). Stage i of F and G pairs LLR i with LLR i + L/2.

## The default code

The letter gives the code size, (1024,512), but not its frozen set.
`polar_pkg` holds the frozen masks used here. They are built by the
Bhattacharyya recursion: start with Z = z0 = 0.2; at each of the n levels,
reading the index from its most significant bit, a 0 bit maps Z to
2Z - Z^2 and a 1 bit maps Z to Z^2. The K positions with the smallest Z are
free; a tie goes to the higher index. This construction reproduces the
paper's (8,4) example. For N = 1024 it yields a tree of 559 clocks, which is
the latency the paper reports for its decoder. That match is why z0 = 0.2
was chosen, but it is only a consistency check: the paper's own frozen set
may differ. Masks of the same construction for N = 8 .. 256 (K = N/2) are
there for smaller tests.

| code | tree latency (clocks) | with input register |
|------|-----------------------|---------------------|
| (8,4) | 5 | 6 |
| (32,16) | 20 | 21 |
| (64,32) | 49 | 50 |
| (1024,512) | 559 | 560 |

## Top level: `polar_decoder`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous, active low; clears the valid pipeline and the chain address counters |
| `in_valid` | in | 1 | `alpha_c` holds a frame this clock |
| `alpha_c` | in | N x Q | channel LLRs, packed `[N-1:0][Q-1:0]` |
| `out_valid` | out | 1 | `beta_c` holds a decoded frame |
| `beta_c` | out | N | codeword estimate |

| parameter | default | meaning |
|-----------|---------|---------|
| `N` | 1024 | code length |
| `K` | 512 | information bits; checked against the mask at elaboration |
| `Q` | 5 | LLR width |
| `FROZEN` | `polar_pkg::FROZEN_1024_512` | bit i set = u_i frozen |
| `REP_MAX`, `SPC_MAX` | 4 | longest repetition / SPC leaf |
| `RAM_MIN_DEPTH` | 4 | shortest chain written as a RAM buffer |

The input LLRs are registered first. The tree follows, and `beta_c` is the
register of the root's Comb stage. A frame presented with `in_valid` at a
clock edge appears with `out_valid` exactly `1 + LAT(root)` edges later (560
for the default code). There is no back-pressure: the decoder takes a frame
every clock and idle clocks simply travel through as invalid slots. A reset
in the middle of a stream drops every frame in flight.

The output is the codeword estimate. With a systematic polar code the
information bits are read directly from `beta_c` at the free positions. With
a non-systematic code they are recovered by re-encoding `beta_c` (F^(x)n is its
own inverse) and reading the free positions of the result.

To decode a different code, pass its mask: `FROZEN` sets N - K bits and the
tree, its chains and `LATENCY` follow. The mask is limited to
`polar_pkg::NMAX` = 1024 bits.

## Files

| file | content |
|------|---------|
| `rtl/polar_pkg.sv` | node kinds, latency function, frozen masks |
| `rtl/polar_decoder.sv` | top: input register, valid pipeline, root node |
| `rtl/polar_node.sv` | recursive tree node |
| `rtl/polar_f_stage.sv`, `polar_g_stage.sv`, `polar_comb_stage.sv` | split-node operations |
| `rtl/polar_rep_stage.sv`, `polar_spc_stage.sv`, `polar_rate1_stage.sv` | leaf decoders |
| `rtl/polar_delay_line.sv` | register chain (shift register or RAM buffer) |
| `tb/polar_ref_pkg.sv` | encoder, AWGN channel, recursive reference decoder |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_polar_decoder_full` |

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself
with a watchdog if the design hangs.

* The stage testbenches compare each unit, one clock after its input, with
  the formula computed in integers; the SPC test finds the maximum-likelihood
  even-parity word by brute force. The chain test sends a numbered word every
  clock through chains of depth 0, 1, 3, 4, 7 and 33.
* `tb_polar_node` runs the (8,4) and (32,16) trees with a new frame every
  clock and compares each output with the reference decoder on the frame that
  entered exactly 5 (or 20) clocks before.
* `tb_polar_decoder` runs the (64,32) decoder end to end: random information
  words are encoded and sent over a BPSK/AWGN channel at several noise levels,
  with random idle clocks and a reset mid-stream. It checks every frame's
  latency, its bit-exact agreement with the reference decoder, and that
  noiseless frames come back as the transmitted codeword. It also counts, and
  fails if any is zero, back-to-back frames, idle clocks, SPC parity
  corrections, G saturations, channel errors that were corrected, frames
  dropped by the reset, and Rep, Rate-0 and Rate-1 leaves.
* `tb_polar_decoder_full` does the same at the default parameters, the
  (1024,512) code, and checks the 560-clock latency.

`polar_ref_pkg` decodes recursively, one frame at a time, from the algorithm
rather than from the RTL. It uses the same fixed-point rules, so agreement is
bit-exact. It is a check of the pipeline and of the arithmetic, not a
statement about the error-rate performance of 5-bit LLRs.

To simulate, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/polar_pkg.sv tb/polar_ref_pkg.sv rtl/*.sv tb/tb_polar_decoder.sv \
  --top-module tb_polar_decoder -o sim
./obj_dir/sim
```

Use `tb_polar_decoder_full` for the full-size run. Verilation and C++
compilation take about a minute, and the simulation takes a few seconds.
When `polar_node` is linted alone, Verilator reports `beta_l` and `beta_r`
as undriven. They are driven through the recursive child instance. The
report does not appear when the tree is elaborated under `polar_decoder`.

## Where this RTL departs from or goes beyond the paper

Taken from the paper: the unrolled Fast-SSC tree with F, G, Comb, repetition
and SPC units, each followed by a pipeline register; register chains without
logic to keep messages aligned, held in RAM; one frame in and one frame out
per clock; N-LLR input and N-bit output buses; repetition and SPC leaves
limited to length 4 and the other node types to the code length; the
(1024,512) code size; and the (8,4) example with its five-stage timing.

Chosen here, because the paper does not say:

* the frozen set of the (1024,512) code (see [The default code](#the-default-code));
* 5-bit LLRs with symmetric saturation, the min-sum F, and the G, Comb and
  leaf rules as usually defined for Fast-SSC;
* one clock for every Rate-1 leaf and three slots for every split node, even
  next to a Rate-0 child. This is what makes the latency 559;
* the natural-order bus convention and the pairing of i with i + L/2;
* the valid pipeline and the reset, which the paper does not show;
* the RAM-versus-shift-register threshold for the chains.

Not reproduced:

* **Storage.** The paper reports 285,120 RAM bits and about 152,000-158,000
  registers for its (1024,512) decoder. Built straightforwardly as above, the
  chains of this code come to about 2.9 million RAM bits plus about 45,000
  flip-flops: the root's alpha chain alone holds 1024 x 5 bits for the whole
  latency of the left half. The paper does not say how its chains are
  organised to need so much less, so this design does not try to match the
  figure.
* **Clock rate and LUT count.** The 206 and 231 MHz results depend on an
  FPGA place-and-route, and on the register duplication the paper used to
  reach 231 MHz. That duplication is a physical-design measure and is not
  modelled. Throughput per clock (N bits) and latency in clocks are what the
  RTL fixes.
* **Other node types.** Fast-SSC also has merged repetition-SPC nodes and
  longer specialised leaves. The paper's decoder limits its specialised
  leaves to length 4 and names no other types, so none are built.
