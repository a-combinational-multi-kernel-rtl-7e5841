# A combinational multi-kernel SC polar decoder in SystemVerilog

Polar codes built only from Arikan's 2x2 kernel exist only at lengths that
are powers of two. Multi-kernel (MK) polar codes mix in a 3x3 kernel, which
gives lengths N = 2^n * 3^m (48, 96, 192, ...). This design is the decoder
side of that idea. It is a successive-cancellation (SC) decoder for binary
and binary-ternary codes, and it has **no storage inside the decoding tree**.
The channel LLRs go into a register. One combinational network then visits
every node of the SC tree, left to right, and the estimated codeword is
captured one clock later. So one whole codeword is decoded per clock cycle,
and the coded throughput is N x f_clk.

The RTL follows the architecture of H. Rezaei, N. Rajatheva and M. Latva-aho,
"A Combinational Multi-Kernel Decoder for Polar Codes". That paper's main
configuration is the default here: N = 48, kernel order {3,2,2,2,2},
5-bit LLRs. Where the paper is ambiguous or says nothing, the choice made
here is marked as such below. Other codes are set by parameters.

## 1. The codes

A code is a kernel sequence k_0, k_1, ..., k_(M-1), each kernel binary (T2)
or ternary (T3), with N = k_0 * k_1 * ... * k_(M-1). The generator matrix is
G = T_(k_0) (x) T_(k_1) (x) ... (x) T_(k_(M-1)). **The first kernel sits at
the root of the SC tree.** A root of kernel k splits the message u into k
contiguous sub-blocks. Each sub-block is encoded with the remaining kernels,
and the root kernel then mixes the k sub-codewords position by position. With
L = N/k, position i of every sub-codeword ends up at positions i, i+L, i+2L.

The two kernels act on the sub-codewords like this ("combine"):

| kernel | inputs | output positions i, i+L (, i+2L) |
|---|---|---|
| binary | bl, br | bl^br, br |
| ternary, T3 = [1 1 1; 1 0 1; 0 1 1] | bl, bc, br | bl^bc, bl^br, bl^bc^br |

A frozen pattern a[0..N-1] marks the information positions (1) and the
frozen ones (0, always decided as 0). The pattern is a register that can be
rewritten between any two codewords. Because of that the code rate K/N can
change at run time without rebuilding the hardware.

In the RTL the sequence is a bit mask `TERN`, with bit s = 1 where stage s
(counted from the root) is ternary, and a stage count `M`. For example,
{3,2,2,2,2} is `M = 5, TERN = 'b00001`, and {2,2,2,2,2,2} (N = 64) is
`M = 6, TERN = 0`. Any number of ternary stages is accepted anywhere except
the last. The last stage must be binary because the leaf decoder is binary
(section 3). Pure-ternary codes (odd N) are therefore not supported.

## 2. LLR arithmetic

Every LLR in the design, from the channel down to the leaves, is a Q-bit
**sign-magnitude** word: bit Q-1 is the sign (1 = negative, i.e. bit 1 is
more likely) and the low Q-1 bits are the magnitude. Q = 5 by default, so
magnitudes run from 0 to 15. Sign-magnitude needs no conversion in the
min-sum units, which only compare magnitudes and XOR signs.

The adders (`sm_add`) add two such words as signed numbers and **saturate**
the magnitude at 2^(Q-1)-1. An exact zero comes out as +0. The paper gives
the channel LLR width but no internal widths. Keeping every internal LLR at
Q bits with saturation is this design's choice.

## 3. The node functions

The functions below work on a node's LLR vector alpha of length N (L = N/2
for a binary node, L = N/3 for a ternary one). Each is a vector of L
identical lanes. beta_l and beta_c are the codewords already decided by the
left and middle children.

| module | lane i computes | goes to |
|---|---|---|
| `f_b` | sign(a[i]) ^ sign(a[i+L]), min(\|a[i]\|, \|a[i+L]\|) | left child of a binary node |
| `g_b` | (1-2 beta_l[i]) a[i] + a[i+L] | right child of a binary node |
| `f_t` | three-input min-sum of a[i], a[i+L], a[i+2L] | left child of a ternary node |
| `g1_t` | (1-2 beta_l[i]) a[i] + f(a[i+L], a[i+2L]) | middle child |
| `g2_t` | (1-2 beta_l[i]) a[i+L] + (1-2 (beta_l[i]^beta_c[i])) a[i+2L] | right child |
| `combine_b`, `combine_t` | the table in section 1 | the node's own codeword |

The three g units use **precomputation**. Every possible sign combination of
the terms is summed in parallel, while the earlier children are still
settling. The decided bits only drive the final multiplexer. So the path from
a child's decision to the next child's LLRs is one multiplexer, not an adder.

The ternary formulas follow from T3. Once u0 is known, u1 is seen directly at
x0 = u0^u1 and, jointly, at x1^x2 = u1; this is where the min-sum term in
`g1_t` comes from. Once u0 and u1 are known, u2 is seen at x1 = u0^u2 and at
x2 = u0^u1^u2.

**Leaf decoder (`decision_logic`).** Every tree ends in binary size-2 nodes.
They are decided in closed form, without building the g sum. For LLRs l0, l1
and frozen bits a0, a1:

    u0 = a0 & (s(l0) ^ s(l1))                    (sign of f)
    u1 = 0                 if a1 = 0
         s(l1)             if |l1| >= |l0|
         s(l0) ^ u0        otherwise

This takes one magnitude comparator for both leaves. At a tie |l1| = |l0|
with opposite effective signs, the exact g sum would be 0 (decided 0), but
this rule answers s(l1). The design follows the rule as published, and the
reference model used in verification does the same.

## 4. How the tree is put together

`mk_sc_node` is one recursive module that takes parameters `M` and `TERN`:

* **Binary stage** (the Arikan stage). `f_b` feeds the left sub-decoder of
  size N/2. Its codeword goes into `g_b`, whose output feeds the right
  sub-decoder. `combine_b` of the two sub-codewords is the node codeword.
* **Ternary stage.** `f_t` feeds the left sub-decoder of size N/3. `g1_t` uses
  the left codeword to feed the middle sub-decoder, and `g2_t` uses both
  codewords to feed the right sub-decoder. `combine_t` makes the node codeword.
* **Last stage**, N = 2: `decision_logic`.

The children are `mk_sc_node` instances with `M-1` and `TERN >> 1`. The
recursion unrolls at elaboration into a pure feed-forward network. Each node
also passes up its decided bits, in leaf order, so the root delivers both
the message estimate u and the codeword estimate x = u G.

Where the combine logic sits: the paper's block diagrams draw a "Combine"
after a sub-decoder, on the way to the next g unit. Here each sub-decoder
instead *ends* in the combine of its own kernel. The XOR gates are the same;
they sit one level lower in the hierarchy. The root's combine is the "output
stage" combine, and the first kernel decides whether it is binary or ternary.
Codewords that nothing reads, such as those of right-most children below the
root, are removed by synthesis.

For the default code {3,2,2,2,2}, the root is a ternary stage over three
pure-binary sub-decoders of size 16. Each of those is four binary stages
down to eight size-2 leaves.

## 5. The top level: `mk_polar_decoder`

```
             +-----------+   +------------------------+   +-----------+
 llr_i ----->| LLR regs  |-->|                        |-->| out regs  |--> cw_o (x_hat)
 (N x Q)     |  N x Q    |   |  mk_sc_node (pure      |-->|  2 x N    |--> u_o  (u_hat)
             +-----------+   |  combinational tree)   |   +-----------+
 info_i ---->| frozen    |-->|                        |
 (N)         | regs  N   |   +------------------------+
             +-----------+
```

| port | dir | width | meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | clock, asynchronous active-low reset |
| `llr_valid_i` | in | 1 | load `llr_i` into the input registers at this edge |
| `llr_i` | in | N x Q | channel LLRs, sign-magnitude, index = code position |
| `frz_we_i` | in | 1 | load `info_i` into the frozen-pattern registers |
| `info_i` | in | N | 1 = information bit, 0 = frozen |
| `dec_valid_o` | out | 1 | the output registers hold a new result |
| `cw_o` | out | N | estimated codeword |
| `u_o` | out | N | decided bits (message estimate; frozen positions are 0) |

Timing, edge by edge:

```
edge k   : llr_valid_i=1 sampled        -> LLR registers load word W
           (frz_we_i=1 in the same cycle -> W is decoded with the new pattern)
edge k+1 : output registers load decode(W); dec_valid_o=1 for this cycle
```

So the result appears one clock after the LLRs are in the input registers,
or two rising edges after they are presented. Words can be presented on
every cycle, and results then come back on every cycle, in order. Reset
clears both valid flags and the frozen pattern, which becomes "all frozen".
The data registers are not reset.

Register count at N = 48: 48 x 5 LLR bits + 48 pattern bits + 2 x 48 output
bits + 2 valid flags = 386 flip-flop bits. The paper counts N x (Q+2) = 336
bits (LLRs, pattern and one N-bit output), which its FPGA build places in
RAM. The extra 48 here are the registered `u_o` (section 6).

## 6. Where this RTL interprets or departs from the paper

* **Binary kernel orientation.** The paper writes T2 = [1 1; 1 0], but its
  combine rule [bl^br, br] and its f/g equations belong to [1 0; 1 1]. The
  design follows the equations.
* **Index pairing of g_b.** One equation of the paper pairs alpha[2i] with
  alpha[2i+1]. The other equations pair i with i+L. The design uses i / i+L
  throughout, which is the pairing that decodes the code the combine builds.
* **g1_t** is printed as f(a[i+L] + a[i+2L]). It is read as the two-input
  f(a[i+L], a[i+2L]), which is what T3 requires.
* **Left branch of a ternary node.** One description of the N = 6 decoder
  lists a binary f in its glue logic. Its block diagram and the general
  ternary-stage description both use the three-input f_t, and so does this
  design.
* **Output contents.** The text says the codeword estimate is written to the
  output registers, while the N = 6 block diagram labels the output u-hat.
  Both are registered here (`cw_o` and `u_o`).
* **Internal width and saturation.** These are this design's choice (section 2).
* **Strobes and reset** (`llr_valid_i`, `frz_we_i`, `dec_valid_o`) are this
  design's interface. The paper states only that the rate can be assigned
  online and that the latency is one clock.
* **Storage.** It is all flip-flops, with no RAM inference and none of the
  register duplication the paper used to meet its FPGA clock.
* **Not covered:** a ternary last stage (for example the paper's
  PC(72,36) with G = T3 x T2 x T2 x T2 x T3), pure-ternary codes, and code
  construction (choosing the frozen set and kernel order), which happens
  offline and only reaches the hardware as `info_i` and the parameters.
* **Not measured:** clock frequency and FPGA resources. The paper reports
  812.1 Mbps coded throughput at N = 48 on an FPGA, which is about 16.9 MHz.
  The RTL here has not been timed.

## 7. Parameters and other codes

| parameter | default | meaning |
|---|---|---|
| `Q` | 5 | LLR width, sign + Q-1 magnitude bits |
| `M` | 5 | number of kernel stages |
| `TERN` | `'b00001` | bit s = 1 where stage s from the root is ternary |
| `N` | 48 | derived: 2^(M - #ternary) * 3^(#ternary) |

Examples: N = 64 `M=6, TERN=0`; N = 96 `M=6, TERN=1`; N = 192 `M=7, TERN=1`;
N = 36 {3,2,3,2} `M=4, TERN='b0101`. For the one-ternary lengths
(96 ... 768), the paper's kernel orders are not given; the testbenches put
the ternary kernel at the root. Logic grows as about N log2 N. At N = 48,
yosys coarse synthesis gives about 3300 word-level cells.

## 8. Verification

All testbenches are self-checking and print `TB_RESULT checks=... failures=...`.
Expected values come from `tb/tb_polar_ref_pkg.sv`. That is an independent,
recursive, integer-arithmetic model of the SC decoder and of the encoder
x = u G. It does not share code with the RTL.

| testbench | what it does |
|---|---|
| `tb_f_b`, `tb_f_t`, `tb_g_b`, `tb_g1_t`, `tb_g2_t` | random lanes against the model; saturation and all select values are exercised |
| `tb_combine_b`, `tb_combine_t` | random bits; the ternary one against an explicit u x T3 product |
| `tb_decision_logic` | all 32 x 32 x 4 inputs; away from ties also against the sign of the exact g sum |
| `tb_mk_sc_node` | seven kernel sequences (N = 2, 4, 6 {3,2}, 12 {2,3,2}, 36 {3,2,3,2}, 48, 64), 400 vectors each, random frozen patterns |
| `tb_mk_polar_decoder` | default N = 48 top, no parameters changed: 600 codewords end to end |
| `tb_workloads` | the same end-to-end check for N = 64 {2^6}, 96 and 192 (ternary root) |

The node and top-level tests mix two kinds of words. **Noiseless words** are
random messages under random frozen patterns, encoded and sent with random
non-zero magnitudes. The decoder must return the exact message and codeword,
which checks it with no decoder model involved. **Random LLRs** over the
full code range must match the model bit for bit. The top-level test also
checks four things: the two-edge latency of every result, results in order,
back-to-back results during bursts (one codeword per clock), and rate
changes in idle cycles and in the same cycle as a codeword, including
all-frozen and rate-1 patterns. It fails if any of these mechanisms, or the
binary and ternary stages, saturation, and both branches of the leaf rule,
was never exercised. N = 384 and N = 768 were also run once through the same
checker and passed. They are left out of `tb_workloads` because they take
several minutes to compile.

Running a test with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/mk_polar_pkg.sv tb/tb_polar_ref_pkg.sv tb/tb_mk_polar_decoder.sv \
  --top-module tb_mk_polar_decoder -o sim && obj_dir/sim
```

Replace the last file and the top name to run another testbench.

Tool note: when Verilator 5.050 lints `mk_sc_node` with the module itself
as `--top-module`, it does not build the recursive child instances and then
reports undriven nets. When the module is instantiated from anywhere else
(the top level, a testbench), the full tree is built, as the tests show.

## 9. Files

`rtl/mk_polar_pkg.sv` holds the shared constants and the kernel-mask type.
`rtl/sm_add.sv` is the saturating sign-magnitude adder. The remaining
`rtl/*.sv` files are the blocks named above, one module per file, and
`rtl/mk_polar_decoder.sv` is the top. In `tb/`, besides the testbenches,
`tb_polar_ref_pkg.sv` is the reference model, and `sc_node_checker.sv` and
`dec_stream_check.sv` are the reusable stimulus and checker modules.
