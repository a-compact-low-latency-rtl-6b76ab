# A one-clock-per-pair (16,11) systematic polar decoder

Short polar codes are attractive as forward error correction for low-rate
visible light communication links, where Reed-Solomon RS(15,11) is the usual
choice: a (16,11) polar code has the same rate, and decoded with soft LLRs it
gains about 2 dB. The obstacle is latency. A successive cancellation (SC)
decoder decides the bits one after another, and a conventional tree
architecture spends one clock per stage of the tree, about 30 clocks for a
16-bit frame. The design here evaluates the whole tree, all four stages,
combinationally in one clock and takes two bits from its last stage at once,
so that a frame is decoded in **8 clocks** (one pair of bits per clock), with
frames following back to back. Throughput is not the goal; in a link that
runs at a few Mb/s the low clock rate this forces is acceptable, and the
circuit stays small: 15 processing elements, no memories.

The decoder is *systematic*: after SC decoding it re-encodes the decisions,
x_hat = u_hat * G, and the 11 information bits are read directly from x_hat.

## The code and its conventions

* Length N = 16, K = 11 information bits, n = log2 N = 4 stages.
* Generator G = F^(x)4 with the lower-triangular kernel F = [1 0; 1 1], in
  natural bit order: x_j is the XOR of all u_i whose index i covers j
  bitwise ((i & j) == j). Recursively, for a code of length M,
  x[k] = a[k] ^ b[k] and x[k + M/2] = b[k], where a and b encode the upper
  and lower halves of u.
* Frozen positions u_0, u_1, u_2, u_4, u_8 (`FROZEN_MASK = 16'h0117`), the
  five least reliable positions for N = 16 by the Bhattacharyya bound. The
  11 information positions are {3, 5, 6, 7, 9, 10, 11, 12, 13, 14, 15};
  `info[0]` is x_hat[3] and `info[10]` is x_hat[15].
* A systematic encoder (not part of this RTL) must produce a codeword whose
  bits at the information positions are the message. Any u with zeros at the
  frozen positions gives a valid codeword x = u * G, and the message is then
  x at the information positions; the testbenches build frames that way.

## Number format

Every LLR is a Q-bit sign-magnitude word, Q = 5 by default: bit Q-1 is the
sign (1 for a negative LLR, i.e. bit value 1), bits Q-2..0 the magnitude,
0..15. Sign-magnitude suits the datapath: the F function needs only the
smaller magnitude and an XOR of signs, and the G function one adder.

The channel front end delivers one such word per code bit. How it scales
the received sample is up to the system; min-sum decoding is independent of
a common scale factor, so only clipping matters. The testbenches use
round(4*y) clipped to +-15 for BPSK samples y = +-1 + noise.

## The processing element

Each PE (`sscd_pe`) takes two LLRs La and Lb, a partial-sum bit s and SEL:

| SEL | s | output |
|-----|---|--------|
| 0   | - | F = sign(La)*sign(Lb) * min(\|La\|, \|Lb\|) |
| 1   | 0 | G = Lb + La |
| 1   | 1 | G = Lb - La |

Inside, one comparator |La| > |Lb| drives two multiplexers that give max and
min of the magnitudes. F is {sign(La)^sign(Lb), min}. For G the XOR
s ^ sign(La) ^ sign(Lb) tells whether the two effective signs differ; if
they do, min is replaced by its two's complement, so the single adder forms
max + min or max - min. The sign of G is that of the larger operand:
sign(La)^s when |La| > |Lb|, else sign(Lb) (also when the magnitudes are
equal, which gives a zero with the sign of Lb). When max + min exceeds 15
the magnitude saturates at 15. All PEs are identical and keep Q bits.

`sscd_pe_last` is the same circuit with both F and G given out and no SEL
multiplexer; `sscd_pe` is `sscd_pe_last` plus that multiplexer.

## One pass through the tree per clock

`sscd_pe_tree` holds the tree:

```
 channel LLRs L[0..15]  (input register)
   stage 3:  8 PEs   PE k: La = L[k],   Lb = L[k+8]
   stage 2:  4 PEs   PE k: La = S3[k],  Lb = S3[k+4]
   stage 1:  2 PEs   PE k: La = S2[k],  Lb = S2[k+2]
   stage 0:  last PE on S1[0], S1[1]
               F -> DEC -> u_hat[2c]   ---+
               G (s = u_hat[2c]) <--------+
               G -> DEC -> u_hat[2c+1]
```

Everything between the input register and the decided pair is
combinational. The last-stage PE computes F, the DEC block turns it into
u_hat[2c] (sign bit, forced to 0 at a frozen position), and that bit is at
once the s input of the same PE's G function, which gives u_hat[2c+1]. The
critical path therefore runs through four comparator-adder PEs, one DEC and
one more G, which is what limits the clock rate.

In cycle c = 0..7 of a frame the decoder decides u_hat[2c] and
u_hat[2c+1]. Which half of each sub-code a stage works on follows from c:

| cycle c            | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|--------------------|---|---|---|---|---|---|---|---|
| stage 3 (SEL=c[2]) | F | F | F | F | G | G | G | G |
| stage 2 (SEL=c[1]) | F | F | G | G | F | F | G | G |
| stage 1 (SEL=c[0]) | F | G | F | G | F | G | F | G |
| stage 0            | F+G | F+G | F+G | F+G | F+G | F+G | F+G | F+G |
| bits decided       | u0,u1 | u2,u3 | u4,u5 | u6,u7 | u8,u9 | u10,u11 | u12,u13 | u14,u15 |

## Partial sums

A stage in G mode needs, for each of its PEs, the partial sum: the
re-encoding of the part of u_hat that the F half of the same sub-code has
already decided. For PE k of stage st the sub-code covers
u_hat[b .. b + 2^(st+1) - 1] with b = 2c rounded down to a multiple of
2^(st+1), and the partial sum is bit k of u_hat[b .. b + 2^st - 1] * F^(x)st.
Examples: in cycle 4 stage 3 needs the 8 bits of u_hat[0..7] * F^(x)3; in
cycle 3 stage 1 needs (u4 ^ u5, u5). `sscd_ctrl` forms all of them
combinationally from the decoded-bit register with small XOR butterflies and
hands them to the tree together with SEL. Bits decided in the current cycle
never enter a partial sum except at stage 0, where the direct
F-to-G connection supplies them.

## Registers, control and timing

* `sscd_regs`: the input register (16 x Q bits) loaded once per frame and
  read by the tree in all 8 cycles; the decoded-bit register, written two
  bits per clock; the output register (x_hat and info).
* `sscd_ctrl`: a two-state FSM (idle, decode) with a 3-bit cycle counter.
  It gives SEL of each stage (bit st-1 of the counter), the frozen flags of
  the pair, the partial sums, and the load/step/output-write strobes.
* `sscd_fn_transform`: x_hat = u_hat * G as 4 levels of 8 XORs, applied in
  the last cycle to the decoded-bit register with the final pair merged in,
  plus the selection of the 11 information positions.

Interface of `sscd_top`:

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset of the control |
| in_valid / in_ready | in / out | 1 | a frame is taken at a rising edge where both are 1 |
| llr_in[16] | in | Q each | LLR of code bit x_i, sign-magnitude |
| out_valid | out | 1 | one-cycle pulse, 8 edges after the edge that took the frame |
| x_hat | out | 16 | re-encoded codeword, held until the next frame ends |
| info | out | 11 | information bits, held like x_hat |
| u_hat | out | 16 | SC decisions, complete only in the out_valid cycle |

`in_ready` is 1 when idle and in the last decoding cycle, so a new frame can
be taken at the same edge that completes the previous one: one frame per 8
clocks sustained. There is no output back-pressure.

Frame timing, counted in rising clock edges:

| edge | what happens |
|------|--------------|
| E0 | in_valid and in_ready are 1: the LLRs are loaded, cycle 0 begins |
| E1 .. E7 | the pair of cycle 0 .. 6 is written to the decision register |
| E8 | the last pair and x_hat / info are written; a next frame may load here |
| after E8 | out_valid is 1 for one cycle |

## Word length and measured error rates

Q is a parameter of every module. At Q = 5 the fixed-point decoder is
close to a 10-bit one; at Q = 4 it loses noticeably. Measured
information-bit BER over BPSK/AWGN (10,000 frames per point in
`tb_sscd_workloads`; the quantiser is round(y * 2^(Q-3)) clipped, the hard
decision keeps only the sign):

| Eb/N0 | 3 dB | 4 dB | 5 dB | 6 dB |
|-------|------|------|------|------|
| soft, Q = 4 | 1.9e-2 | 7.3e-3 | 2.1e-3 | 3.0e-4 |
| soft, Q = 5 | 1.3e-2 | 4.6e-3 | 1.2e-3 | 3.5e-4 |
| soft, Q = 6 | 1.4e-2 | 3.7e-3 | 7.5e-4 | 1.0e-4 |
| soft, Q = 10 | 1.2e-2 | 3.9e-3 | 7.4e-4 | 4.5e-5 |
| hard decision (sign only) | 3.1e-2 | 1.5e-2 | 5.7e-3 | 1.8e-3 |

The 6 dB column rests on a few tens of bit errors and is rough.
These figures depend on the frozen set and the quantiser chosen here.

## Where this RTL departs from, or adds to, the published architecture

* **Kernel and order.** The published text writes the kernel as
  [1 1; 0 1], but its decoding diagram decides u_0 first through F
  functions only and uses the partial sums u0+u1+u2+u3, u2+u3, u1+u3, u3, and
  its PE table uses Lb +/- La. Those fit the lower-triangular kernel, which is
  what is built. The wiring order of the tree (PE k pairs L[k] with L[k+half])
  is this design's; the block diagram does not number the register.
* **Frozen set** {0,1,2,4,8}: not given in the description; chosen here.
* **Word length.** The PE diagram marks the magnitudes with width Q, while
  the reported register counts grow by 16 per extra bit of Q, i.e. 16 words
  of Q bits. Q is taken here as the whole word, sign included.
* **Saturation** of the G magnitude is this design's choice; the description
  shows only an adder.
* **Partial-sum generation** is described only as a task of the control
  FSM; the XOR butterflies on a decoded-bit register are this design's.
* **Output.** The block diagram draws x_hat_i and x_hat_(i+1) leaving per
  pair. With this code x_hat depends on later decisions, so the FN transform
  runs once, in the last cycle.
* **Registers.** 128 flip-flops at Q = 5 (80 LLR, 16 decisions, 16 x_hat,
  11 info, 5 control) against 101 reported: the published design evidently
  shares or omits some of these; how is not described.
* Handshake, reset and the two-state FSM are this design's.
* The error-rate plots of the description label the code (15,11) while the
  text and the architecture are (16,11); this RTL is (16,11).
* One block of the published schedule chart (cycles 25-30) shows stage 2 as
  F F G F F F, which breaks the pattern of the other blocks; the regular
  pattern is built.

## Files

`rtl/`:

| file | contents |
|------|----------|
| sscd_pkg.sv | N, K, Q, frozen mask, FSM state type |
| sscd_pe_last.sv | F and G of one PE, both outputs |
| sscd_pe.sv | PE with SEL output select |
| sscd_dec.sv | hard decision with frozen forcing |
| sscd_pe_tree.sv | 8+4+2 PEs, last PE, two DECs |
| sscd_ctrl.sv | FSM, SEL, partial sums, strobes |
| sscd_fn_transform.sv | x_hat = u_hat * G, information bits |
| sscd_regs.sv | input, decision and output registers |
| sscd_top.sv | the decoder |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), the
shared reference models `sscd_ref_pkg.sv` (integer F/G, a bit-by-bit SC
decoder that recomputes every stage for every bit, and an encoder written
from the generator matrix), `tb_sscd_workloads.sv` with its per-configuration
driver `sscd_wl_harness.sv`.

* `tb_sscd_pe`, `tb_sscd_pe_last`, `tb_sscd_dec`: exhaustive at Q = 5.
* `tb_sscd_fn_transform`: all 2^16 inputs.
* `tb_sscd_pe_tree`: 3,000 random frames, the schedule driven by the
  testbench, each pair against the SC reference.
* `tb_sscd_ctrl`, `tb_sscd_regs`: cycle-by-cycle models of the FSM and the
  registers, random traffic, latency and reset.
* `tb_sscd_top`: 12,000 frames at default parameters over a noiseless channel
  and 6 to 1 dB, random gaps and back-to-back frames; checks every output
  against the reference, noiseless frames against the message, 8-clock
  latency and spacing, and requires that saturation, frozen-bit forcing,
  error correction, back-to-back and after-idle frames all occur.
* `tb_sscd_workloads`: Q = 4, 5, 6, 10 and hard decision, 3..7 dB, BER/FER
  printed.

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. To run one with
Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/sscd_pkg.sv tb/sscd_ref_pkg.sv tb/tb_sscd_top.sv \
    --top-module tb_sscd_top -o sim
./obj_dir/sim
```

To change the word length set `Q` on `sscd_top`; to use another frozen set
set `FROZEN_MASK` and `K` together (the testbenches assume the default
set). N is a parameter too, and the tree, control and transform are written
for any power of two, but only N = 16 has been simulated.
