# Combinational SC decoder for multi-kernel polar codes

Polar codes built only from the 2x2 kernel have lengths that are powers of two.
Multi-kernel (MK) polar codes also use the 3x3 kernel, so any length
N = 2^n * 3^m is possible (48, 72, 81, 192, 324, 768, ...). This RTL is a
successive-cancellation (SC) decoder for such codes. The SC decoder is
written entirely as combinational logic: there are no registers and no
memories between the LLR input registers and the codeword output registers.
A whole frame is decoded in one long clock period, and a new frame can enter
every clock.

Each frame carries its own frozen-bit pattern, so the code rate can change
from one frame to the next without reconfiguring anything. The block length
and the kernel order are fixed at elaboration by two parameters. They replace
the code generator that would otherwise write one HDL tree per code.

The default build is N = 48 with kernel order {3,2,2,2,2} and 5-bit LLRs.
Every other code is a parameter change away. The testbenches run all the
codes listed in the section "Codes and their parameters" below, up to
N = 1024.

## 1. Codes, kernels and the order of the kernels

The generator matrix is a Kronecker product of kernels,
G = T(k0) x T(k1) x ... x T(k(D-1)), where each kernel T(k) is either T2 or
T3. Encoding is x = u G. The kernels in this RTL are:

    T2 = | 1 0 |        T3 = | 1 1 1 |
         | 1 1 |             | 1 0 1 |
                             | 0 1 1 |

T2 here is the lower-triangular form that the decoding equations of section
2 imply: left bit = l xor r, right bit = r. Written as [1 1; 1 0], it would
exchange the two rows, and the f/g/combine equations would then no longer
match the code. The testbench encoder multiplies by these matrices directly.

Kernel 0, the first factor, is the outermost one. In the decoder it is the
root stage: it splits the N LLRs into 2 or 3 interleaved groups with stride
N/2 or N/3. The last kernel is the innermost stage.

In the RTL a kernel sequence is the pair of parameters `(DEPTH, TERN)`:

* `DEPTH` is the number of kernels.
* Bit i of `TERN` is 1 when kernel i is T3.

For example, the default {3,2,2,2,2} is `DEPTH = 5`, `TERN = 'b00001`, and
N = 3*2*2*2*2 = 48. `mkpc_pkg::code_len(DEPTH, TERN)` computes N, and the
modules check that an `N` given explicitly matches it.

## 2. Arithmetic: the glue functions

LLRs are Q-bit sign-magnitude words. The MSB is the sign, where 1 means
negative, i.e. bit value 1 is more likely. Q = 5 by default, and channel and
internal LLRs use the same width. Sign-magnitude avoids conversions: a
multiplication by (1 - 2b) is an XOR on the sign bit, and a minimum is a
magnitude compare.

A binary stage works on a node of 2M LLRs a[0..2M-1] (module name in
brackets):

| function | per element i < M | module |
|---|---|---|
| f^b | sign = s(a[i]) xor s(a[i+M]), mag = min(&#124;a[i]&#124;, &#124;a[i+M]&#124;) | `fb_stage` |
| g^b | (1-2 c0[i]) a[i] + a[i+M], saturated | `gb_stage` |
| C^b | x[i] = c0[i] xor c1[i], x[i+M] = c1[i] | `cb_combine` |

A ternary stage works on a node of 3M LLRs:

| function | per element i < M | module |
|---|---|---|
| f^t | xor of the three signs, minimum of the three magnitudes | `ft_stage` |
| g1^t | (1-2 c0) a[i] + f^b(a[i+M], a[i+2M]), saturated | `g1t_stage` |
| g2^t | (1-2 c0) a[i+M] + (1-2 (c0 xor c1)) a[i+2M], saturated | `g2t_stage` |
| C^t | x[i] = c0^c1, x[i+M] = c0^c2, x[i+2M] = c0^c1^c2 | `ct_combine` |

In these tables, c0, c1 and c2 are the codewords that the first, second and
third child have already decided.

All additions go through `sm_add`. It widens both operands to Q+1-bit two's
complement, adds them, clips the magnitude to 2^(Q-1)-1, and writes a zero
result as +0. Nothing else in the datapath widens or rounds.

The combine functions are one layer of XOR gates. A stage does not re-encode
its children's decisions with a full encoder of size N/2. It only merges two
or three codewords that the children have already combined.

## 3. Building blocks: decisions without adders

The leaves of the tree never compute the last f and g values. They decide
bits from signs and magnitude comparisons alone.

**Size 2 (`bin_dec2`).**

    u0 = (s0 ^ s1) & a0
    u1 = (|a1| >= |a0| ? s1 : s0 ^ u0) & a1

Here a_k is the frozen indicator: 0 forces the bit to 0. The second line is
the sign of g = (1-2u0) a0 + a1. On a tie, the block takes s1.

**Size 3 (`ter_dec3` + `ter_ctrl`).**

    u0 = (s0 ^ s1 ^ s2) & a0
    u1 = (m0 ? s0 ^ u0 : s1 ^ s2) & a1
    u2 = (m1 ? s1 ^ u0 : s2 ^ u0 ^ u1) & a2

The two selects come from `ter_ctrl`:

* m0 = (|a0|>=|a1| and |a2|>=|a1|) or (|a0|>=|a2| and |a1|>=|a2|). In other
  words, |a0| is at least the smaller of |a1| and |a2|.
* m1 = |a1| >= |a2|.

`ter_ctrl` needs three comparators for this. The three lines of the size-3
block are the signs of f^t, g1^t and g2^t.

**Size 4 with pre-computation (`bin_pre4`).** This block is used when the
last two kernels are both T2.

1. f^b of the four LLRs feeds a size-2 decision, which gives the left pair.
   C^b of that pair gives v'.
2. At the same time, four copies of g^b compute the right-hand LLRs for each
   possible v' (00, 01, 10, 11). Each copy feeds its own size-2 decision.
3. A 4:1 multiplexer, selected by 2*v'[0] + v'[1], picks the right pair.
   C^b of that pair gives v''.

The block outputs {v'', v'}: the two size-2 codewords, not yet merged. The
parent applies the size-4 combine. The g adders are thereby moved off the
critical path after the left decision.

Which building block the tree uses depends on the tail of the kernel
sequence:

* size 4 if the last two kernels are T2;
* otherwise size 3 if the last kernel is T3;
* otherwise size 2. This only happens in sequences such as {3,2}, where a
  lone T2 comes last.

## 4. How the tree is laid out (`comb_decoder`)

The natural description is recursive: a decoder of size N is glue logic
plus two decoders of size N/2, or three of size N/3. `comb_decoder` writes
the same tree out flat, level by level. This keeps lint tools happy, because
no module instantiates itself.

* Level 0 has one node, the whole code.
* Level l has N / NL(l) nodes, each NL(l) = N / (k0 * ... * k(l-1)) LLRs
  wide.
* Node p on level l has children p*k ... p*k+k-1 on level l+1, where k is
  kernel l.

A node's generate scope `g_lvl[l].g_node[p]` holds two vectors, `llr` and
`cw`:

* **`llr`, its input LLRs.** The node computes these itself from its
  parent's `llr` and from the `cw` of its elder siblings:
  * child 0 uses f^b or f^t;
  * child 1 uses g^b or g1^t, with sibling 0's codeword;
  * child 2 of a ternary parent uses g2^t, with siblings 0 and 1.
* **`cw`, its codeword.** Inner nodes take the C^b/C^t merge of their
  children's `cw`. Bottom nodes take the output of their building block.
  Bottom node p reads the frozen indicators a[p*NL +: NL].

So data flows down the tree through `llr` and back up through `cw`, in the
left-to-right order of SC decoding. Because every node returns its own fully
combined codeword, that codeword is exactly the partial-sum vector that the
next g function needs. No separate partial-sum network exists.

The critical path runs through every g stage and every leaf decision in
order, so it grows roughly linearly with N and the clock period has to grow
with it. The output stays at N codeword bits per clock period, because one
frame is decoded every clock.

Logic size grows as O(N log N). For N = 48, a coarse generic synthesis
(word-level cells, so not comparable with FPGA LUTs) gives about 3000 cells
for `comb_decoder`.

## 5. Frame registers and timing (`frame_regs`, `mk_polar_decoder`)

The top level wraps the combinational decoder in three `frame_regs`
instances:

| instance | width | contents |
|---|---|---|
| `u_llr_regs` | N*Q | channel LLRs |
| `u_frozen_regs` | N | frozen pattern of the same frame |
| `u_out_regs` | N | estimated codeword |

Each instance is a pair of registers with a valid/ready handshake on both
sides: a load set followed by an active set.

* While the active input sets feed the decoder, the load sets already take
  the next frame and its frozen pattern.
* While the output's second set waits for the consumer, the first set
  captures the next codeword.
* The two input instances move in lock step. An assertion checks this.

Ports of `mk_polar_decoder`:

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (clears the valid flags only) |
| `in_valid` / `in_ready` | in / out | 1 | a frame is offered / accepted |
| `in_llr` | in | N x Q | LLR of code position i in `in_llr[i]`, sign-magnitude |
| `in_frozen` | in | N | 1 = information position, 0 = frozen (decided as 0) |
| `out_valid` / `out_ready` | out / in | 1 | a codeword is offered / taken |
| `out_x` | out | N | estimated codeword x = u G |

Timing with `out_ready` held high:

* A frame accepted at clock edge t moves into the active set at t+1.
* Its codeword is captured at t+2. This is the one-clock decode.
* The codeword is offered on `out_x` after t+3, so the handshake takes place
  four clocks after acceptance.
* One frame can be accepted every clock.

The output is the codeword x̂, not the message bits û. The information bits
are the entries of û = x̂ G^-1 at the positions where `in_frozen` = 1.
Recovering them needs only an encoder, since for these kernels G^-1 is again
a Kronecker product of small matrices.

The frozen pattern is an input, so the choice of information set (the code
design) is left to the producer of the frames.

## 6. Codes and their parameters

| code | kernel order (root first) | `DEPTH` | `TERN` |
|---|---|---|---|
| 32 ... 1024 (binary) | {2,...,2} | 5 ... 10 | 0 |
| 48 (default) | {3,2,2,2,2} | 5 | 'b00001 |
| 72 | {3,2,2,2,3} | 5 | 'b10001 |
| 81 | {3,3,3,3} | 4 | 'b1111 |
| 192 | {3,2,2,2,2,2,2} | 7 | 'b0000001 |
| 243 | {3,3,3,3,3} | 5 | 'b11111 |
| 324 | {2,2,3,3,3,3} | 6 | 'b111100 |
| 384 | {3,2,2,2,2,2,2,2} | 8 | 'b00000001 |
| 576 | {2,2,2,2,2,2,3,3} | 8 | 'b11000000 |
| 729 | {3,3,3,3,3,3} | 6 | 'b111111 |
| 768 | {2,2,3,2,2,2,2,2,2} | 9 | 'b000000100 |

`TERN` is 16 bits wide (`mkpc_pkg::KMAX`). That covers every sequence up to
N = 4096 = 2^12. `Q` can be changed as well, for example to 4 or 6. All
modules take it as a parameter.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=<n> failures=<n>`. All of them compare against
`mkpc_ref_pkg`, a behavioural model written from the decoding equations. The
model does not share structure with the RTL:

* It encodes with explicit Kronecker products of the kernel matrices.
* It decodes with a recursive SC function in integer arithmetic, with the
  same Q-bit saturation.
* It takes each leaf decision as the sign of the exact kernel LLR, with ties
  going to the term named in section 3.

The testbenches:

| testbench | what it checks |
|---|---|
| `tb_fb_stage` … `tb_ct_combine` | random vectors on the glue functions, including -0 and equal magnitudes |
| `tb_bin_dec2`, `tb_ter_dec3`, `tb_bin_pre4` | random LLRs and frozen masks on the building blocks |
| `tb_ter_ctrl` | all 4096 magnitude triples |
| `tb_comb_decoder` | five kernel sequences (48, 6, 81, 12, 32). Each covers one leaf type and one glue type. Every frame is compared with the model, and noiseless frames also with the sent codeword. |
| `tb_frame_regs` | order and integrity under random valid/ready; hold under back-pressure; one word per clock and two-clock latency when streaming |
| `tb_mk_polar_decoder` | end to end with N = 48, 81 and 6 side by side; counts rate changes, loads during decode, stalls and streamed frames, and fails if any count is 0 |
| `tb_mk_polar_full` | the unmodified default top; 600 frames |
| `tb_mk_polar_workloads_bin` / `_mk` | every code in the table of section 6, 8 frames each, with streaming and latency checks |

Frames mix three kinds of LLRs:

* noiseless BPSK;
* BPSK with approximately Gaussian noise, quantized to Q bits;
* arbitrary words.

Each frame has a random number of information bits at random positions.

To run a testbench with plain Verilator (5.x):

    verilator --binary --timing --assert --top-module tb_mk_polar_decoder \
        -y rtl -y tb +libext+.sv -Irtl -Itb \
        rtl/mkpc_pkg.sv tb/mkpc_ref_pkg.sv tb/tb_mk_polar_decoder.sv
    ./obj_dir/Vtb_mk_polar_decoder

The two workload testbenches take a few minutes to compile, because the
instances up to N = 1024 are large combinational netlists. The other
testbenches take seconds.

## 8. Where this RTL departs from, or fills in, the source description

* **T2 matrix.** The decoder follows the f/g/combine equations. They define
  T2 as [1 0; 1 1] (section 1).
* **Operand pairing in g^b.** The g^b equation in the description pairs
  a[2i] with a[2i+1]. The recursive decoder and its block diagram pair the
  two halves, a[i] with a[i+M], and that pairing is used here.
* **Size-4 block outputs.** The pre-computation diagram takes its outputs
  before the size-2 combine. The pseudo-code returns them after it. The
  pseudo-code is followed (section 3).
* **Ties and zero.** Ties in the leaf decisions follow the decision
  equations, which do not always agree with a plain sign of a zero g. A zero
  sum from g is +0.
* **Saturation.** Internal LLRs saturate at the channel width. The source
  specifies equal internal and channel widths, Q(5,5), but not the overflow
  rule.
* **Handshake.** The frame registers load a whole frame in parallel under
  valid/ready. The source says only that a second register set lets the next
  frame (and its frozen set) load while one decodes, and that the codeword
  can be offloaded during the next decode. The handshake, the reset
  behaviour and the four-clock port-to-port latency are this design's own.
* **Register count.** A single set of frame registers holds N x (Q+2)
  bits. With the second set on inputs and output, this design has
  2 x N x (Q+2) data bits plus six valid flags: 678 flip-flops for N = 48.
* **Code choice.** The decoder is configured per code by parameters, not by
  a generator program. Choosing a kernel order and an information set, i.e.
  code design, is outside the RTL.
* **Decoding algorithm.** Only SC decoding is implemented. Error-rate
  comparisons that use list decoding (L = 8) describe a different decoder.
* **Default code.** The source has no single "main" code. The default N = 48
  {3,2,2,2,2} is the first mixed-kernel code of its implementation table.
  It exercises ternary glue, binary glue and the size-4 block in one
  instance. The size-3 and size-2 leaves are used by other kernel orders
  (see `tb_comb_decoder`).
* **Verification scope.** Timing (clock frequency, throughput in Mb/s) and
  FPGA resource figures have not been reproduced. Only function and cycle
  behaviour are verified.
