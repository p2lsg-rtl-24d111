# P2LSG: a low-discrepancy number source for stochastic computing, made of a counter and wires

Stochastic computing (SC) represents a value x in [0, 1) as a bit-stream in which
the fraction of 1s is x. Arithmetic then becomes very cheap: an AND gate
multiplies two independent streams, and a multiplexer whose select line is a
stream of probability s computes the weighted sum (1-s)a + sb. The expensive
part is making the streams. A *stochastic number generator* (SNG) compares the
binary value with a new random number every clock (`bit = x > R`). How accurate
an N-bit stream is depends on how evenly the random numbers R cover [0, 2^n).
Low-discrepancy (quasi-random) sequences cover it much more evenly than an LFSR,
so the error falls roughly as 1/N rather than 1/sqrt(N). Classic low-discrepancy
generators (Sobol, Halton) need direction-vector tables, priority encoders or
counters with a non-binary radix.

P2LSG (Powers-of-2 Low-discrepancy Sequence Generator) uses only part of that
family: the Van der Corput sequences whose base B is a power of two. A base-B
digit is then just a group of log2(B) bits. Reversing the digit order of a
binary counter is therefore a fixed rewiring of the counter's outputs, with no
gates. One counter can feed any number of such rewirings at once, giving
several different low-discrepancy sequences for the cost of the counter alone.

This repository holds synthesizable SystemVerilog for the generator, its SC
building blocks, and two image/video engines built on it: bilinear image
scaling and alpha-blended scene merging. It also holds self-checking
testbenches for all of them.

## 1. Van der Corput numbers from a binary counter

The base-B Van der Corput (VDC-B) value of an integer i is its radical inverse.
Write i in base B as digits d_0 (least significant), d_1, ..., then mirror the
digits about the radix point: `VDC_B(i) = d_0/B + d_1/B^2 + d_2/B^3 + ...`.
For example, 11 = (102) in base 3, so VDC_3(11) = 2/3 + 0/9 + 1/27 = 19/27.
Consecutive indices fill [0, 1) evenly at every prefix length.

When B = 2^L, the digits of the counter value are its bits taken L at a time,
starting at the LSB. `p2lsg_sig_inv` builds the W-bit random number as follows:

1. Cut the W-bit index into G = ceil(W/L) groups of L bits, starting at bit 0.
   If W is not a multiple of L, the top group is padded with 0s above the MSB.
2. Reverse the order of the groups: group 0 becomes the most significant one.
   Bits keep their order *inside* a group, because a group is one digit.
3. Keep the W most significant of the G*L bits and drop the rest.

The result equals `floor(2^W * VDC_B(i))`, which is the value the comparator
needs in [0, 2^W). For W = 8 (output written MSB first, b_k = counter bit k):

| base  | L | output bits (MSB ... LSB)      | note                          |
|-------|---|--------------------------------|-------------------------------|
| 2     | 1 | b0 b1 b2 b3 b4 b5 b6 b7        | plain bit reversal            |
| 4     | 2 | b1 b0 b3 b2 b5 b4 b7 b6        |                               |
| 8     | 3 | b2 b1 b0 b5 b4 b3 0 b7         | top digit is (0 b7 b6), b6 dropped |
| 16    | 4 | b3 b2 b1 b0 b7 b6 b5 b4        | nibble swap                   |
| 256   | 8 | b7 ... b0                      | the counter itself            |

Two properties matter for SC:

- When L divides W, one period of 2^W counts visits every W-bit value exactly
  once. An SNG fed by the sequence then produces exactly x ones in 2^W cycles,
  so a single stream is exact.
- Sequences of different bases taken from the *same* counter are different
  permutations of the counter value. They can serve as the "independent"
  sequences that SC multiplication and MUX select inputs need.
  VDC-2 (bit reversal) paired with VDC-2^W (the counter) is the
  classic exact pair. With a 2n-bit counter and the top n bits of each
  sequence, the AND of two n-bit streams over 2^(2n) cycles gives the exact
  product.

The counter is an ordinary synchronous binary up-counter (`p2lsg_up_counter`).
The published drawing shows a chain of T flip-flops with every T input high.
This RTL writes the same count order as a synchronous counter on one clock.

## 2. Several numbers per clock: parallel indexing

To produce PAR consecutive sequence elements per clock (PAR a power of two),
the low log2(PAR) bits of the index are not counted. Each of the PAR output
lanes hard-wires them to its own lane number p. Only the upper W - log2(PAR)
bits come from a counter, which is 6 bits for W = 8 and PAR = 4. Lane p
therefore carries the element with index `PAR*count + p`, and the PAR lanes
together cover the same 2^W indices in 2^W/PAR cycles. Each lane has its own
copy of the inversion wiring. For base 16 with PAR = 4, lane p outputs
`b3 b2 p1 p0 b7 b6 b5 b4`.

`p2lsg` implements both forms (PAR = 1 is the sequential generator). It has
NSEQ bases, given by the array parameter LOG2B, and all of them share one
counter:

```
p2lsg #(.W(8), .PAR(1), .NSEQ(2), .LOG2B('{2, 4})) gen (...);   // VDC-4 and VDC-16
rnd[s][p]  = element PAR*count + p of sequence s
last       = high while rnd holds the last elements of a period
clr / en   = restart at index 0 / advance by PAR elements
```

## 3. Stochastic arithmetic blocks

- `sng`: the SNG comparator, `bit = x > r`, unsigned unipolar encoding.
- `sc_mux`: an NIN-to-1 multiplexer of bit-streams, which acts as the SC
  scaled adder. The data inputs may be correlated with each other, since they
  can share one random number. The select streams must be independent of the
  data and of each other.
- `sc_ones_counter`: converts a stream back to binary by adding the popcount
  of the PAR bits of each cycle into a register.

## 4. The two case-study engines

Both engines compute one output pixel per pass. They share a small controller
(`sc_engine_ctrl`) with a valid/ready interface on each side:

```
edge 0        in_valid && in_ready: operands latched, generator and ones counter cleared
edges 1..T    run: T = 2^W / PAR cycles, one full generator period (256 or 64)
edge T        generator's `last` seen -> out_valid rises
edge T+1      earliest edge on which the result can be taken (out_ready)
edge T+2      earliest accept of the next pixel
```

A pixel therefore occupies an engine for 2^W/PAR + 2 cycles: 258 cycles at
PAR = 1 and 66 at PAR = 4. The result stays valid and unchanged until it is
taken, and an assertion checks this. Because every pass covers a whole period,
the result does not depend on where the sequence starts. Restarting at index 0
only makes the result reproducible.

### Bilinear interpolation (`sc_bilinear`, image scaling)

```
I(x,y) = (1-u)(1-v) I11 + (1-u)v I12 + u(1-v) I21 + uv I22
```

This is exactly a 4-to-1 MUX whose data inputs are the four neighbour streams
and whose two select bits are the streams of u and v. Select code
{su, sv} = 00, 01, 10, 11 picks I11, I12, I21, I22. The four pixel comparators
share one random number. The streams for u and v use two other sequences of the
same P2LSG. The default bases are VDC-2 for the pixels, VDC-256 for u and
VDC-64 for v. With three streams and only 256 cycles no choice is exact. The
reasoning is as follows. The pixel sequence (bit reversal) takes its most
significant bits from the counter's low bits. The u and v streams should
therefore decide on the counter's *high* bits. At u = v = 0.5, VDC-256 and
VDC-64 (output c5..c0 0 0) switch on counter bits 7 and 5. Each of the four
pixels then sees a sub-sequence in which only bits 0 and 2 of its random number
are fixed, a small loss of resolution. Measured
mean error is about 3.0 LSB for random u, v. For the half-pixel offsets
(u, v in {0, 0.5}) of 2x upscaling it is about 0.4 LSB (about 53 dB PSNR
against exact arithmetic). With u = v = 0 the output is exactly I11.

### Scene merging (`sc_scene_merge`, video compositing)

```
merged = background * (1 - alpha) + foreground * alpha
```

This is a 2-to-1 MUX: background on input 0, foreground on input 1, and the
alpha stream on the select line. The pixels use VDC-2 and alpha uses VDC-256.
Mean error is about 0.5 LSB. alpha = 0 returns the background exactly.

`p2lsg_sc_top` places one of each engine side by side. Their interfaces are
independent (`scale_*` and `merge_*` ports), and they share W and PAR. The
engines hold no image: pixel fetching, the neighbour and offset computation
for a given scale factor, and the alpha keying of a green-screen video all
belong outside. In the testbench these tasks are done by the stimulus code.

## 5. Accuracy reproduced

`tb_bench_mae` runs P2LSG generators with counters of 2 to 16 bits. It
measures the mean absolute error over all 65536 pairs of 8-bit inputs. For
multiplication it uses the AND of VDC-2 and VDC-N streams; for scaled
addition, a MUX with a 0.5 select drawn from VDC-N. N = 2^i is the stream
length, and random numbers from an i-bit counter are shifted to 8 bits. The
results agree with the published P2LSG figures to within one unit of the last
digit printed there:

| N    | multiplication MAE | scaled addition MAE |
|------|--------------------|---------------------|
| 2^2  |                    | 13.396 %            |
| 2^4  |                    | 3.241 %             |
| 2^6  | 1.759 %            | 0.708 %             |
| 2^8  | 0.391 %            | 0.098 %             |
| 2^9  | 0.171 %            | 0 (exact)           |
| 2^12 | 0.0122 %           |                     |
| 2^16 | 0 (exact)          |                     |

## 6. What follows the published design and what is added here

Taken from the published design: the counter feeding hard-wired digit
reversal, and the zero padding and truncation rules. Also taken: the shared
counter for several bases and the parallel lane indexing. The four 8-bit
wirings above are checked bit by bit against the published examples. The SNG
comparison `x > R`, the 4-to-1 MUX bilinear interpolator and the 2-to-1 MUX
scene merger come from the same source, at N = 256 with non-parallel and 4x
parallel forms.

Choices made here, where the source says nothing:

- a synchronous counter in place of the drawn T flip-flop chain;
- reset, clear, enable and the `last` flag of the generator;
- the valid/ready handshake, one pixel in flight per engine, the sequence
  restart per pixel, and the two extra cycles per pixel that this handshake
  costs;
- the bases of each engine's sequences, listed in section 4. The generator's
  own default pair, VDC-4 and VDC-16, is the pair used in the published
  hardware-cost comparison;
- the ones counter (popcount + accumulator, W+1 bits, saturating to 2^W-1);
- one top holding both engines. They were separate circuits in the original
  evaluation.

Not included: the Sobol and Halton generators that P2LSG is compared with,
image and frame storage, and the alpha keying of the video. No gate-level area,
power or timing figures are reproduced here.

## 7. Files

| file | contents |
|------|----------|
| `rtl/p2lsg_pkg.sv` | shared constant DATA_W = 8, engine state type, digit-count function |
| `rtl/p2lsg_up_counter.sv` | W-bit synchronous up-counter |
| `rtl/p2lsg_sig_inv.sv` | significance inversion wiring (one base) |
| `rtl/p2lsg.sv` | generator: counter + NSEQ inversions x PAR lanes |
| `rtl/sng.sv`, `rtl/sc_mux.sv`, `rtl/sc_ones_counter.sv` | SC arithmetic |
| `rtl/sc_engine_ctrl.sv` | per-pixel handshake controller |
| `rtl/sc_bilinear.sv`, `rtl/sc_scene_merge.sv` | the two engines |
| `rtl/p2lsg_sc_top.sv` | top |
| `tb/tb_ref_pkg.sv` | arithmetic reference model of VDC numbers and of both engines |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the benchmarks |

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. The
engine and top testbenches compare every result with the exact ones count
that the reference model predicts. They check the cycle count of each pixel,
check that results hold under back-pressure, and bound the error against exact
arithmetic. `tb_p2lsg_sc_top` runs the top at its default parameters: a 4x4
image upscaled to 8x8 and an 8x8 frame merged, in about 16,600 cycles. Both
outputs are compared with exact real arithmetic: about 53 dB PSNR for the
scaling and 54 dB for the merging.
`tb_p2lsg_sc_top_par4` runs the same with PAR = 4, in about 4,300 cycles.
`tb_workload_image` runs the image workloads at full size on the default
top. A generated 107x104 image is upscaled to 214x208, which is 44,512 pixels
and 11.5 million cycles, while a 214x208 frame is merged on the other engine.
Inputs arrive back to back, and every accept must follow the previous one by
exactly 258 cycles. Every pixel must equal the model. The measured PSNR is
57.2 dB for the scaling and 58.2 dB for the merging, and the run simulates in
about ten seconds.
`tb_workload_image_par4` repeats this run with PAR = 4. There the period is
66 cycles and the run takes 2.9 million cycles. The pixels are identical,
because the four lanes cover the same 256 indices per pixel.

## 8. Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/p2lsg_pkg.sv tb/tb_ref_pkg.sv tb/tb_p2lsg_sc_top.sv \
    --top-module tb_p2lsg_sc_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. `tb_bench_mae` takes about
ten seconds. To change the stream length, set W. N = 2^W, and the data and
random numbers are W bits wide. To change the throughput, set PAR to any power
of two below 2^W. To try other sequences, change the LOG2B_* parameters of an
engine; any value 1..W is legal. Lint runs with `-Wall` report only two kinds
of warning. First, `rst_n` is used both as the asynchronous reset of the
flip-flops and as the `disable iff` condition of the handshake assertions.
Second, when `sc_mux` or `sc_engine_ctrl` is linted on its own together with
the package, the package constant DATA_W is reported as unused there.
