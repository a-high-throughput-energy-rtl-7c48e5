# Combinational successive-cancellation decoder for polar codes

Successive-cancellation (SC) decoding of a length-N polar code is a fixed,
loop-free recursion: split the LLR vector in two, decode the first half-code,
re-encode its decisions into partial sums, use them to form the LLRs of the
second half-code, decode that. Because nothing in it iterates, the whole
decoder can be laid out as one block of combinational logic: comparators,
adders, multiplexers and XOR gates, with no memories, no controller and no
registers between the channel LLRs and the decisions. Such a decoder runs at
a low clock frequency (one clock period is its full propagation delay), but
it decodes an entire codeword per period. The result is throughput in the
Gb/s range at low dynamic power, independent of SNR. This RTL implements that
architecture, as published by O. Dizdar and E. Arıkan ("A High-Throughput
Energy-Efficient Implementation of Successive-Cancellation Decoder for Polar
Codes Using Combinational Logic"). It also implements the two variants built
from the same core:

* a **pipelined** combinational decoder, with one register cut between the
  two half-decoders. It still decodes one codeword per clock, but the clock
  can be about twice as fast;
* a **hybrid-logic** decoder. A clocked SC decoder handles the top stages of
  a long code, and one small combinational decoder is the accelerator for
  every length-N' component code near the decision level.

The default sizes are the reported ones: block length N = 1024, Q = 5
quantisation bits, and N' = 64 for the hybrid decoder.

## Number format and the two node operations

Every LLR is a Q-bit **sign-magnitude** word. Bit Q-1 is the sign, which is
also the hard decision s(l) (1 = negative). Bits Q-2:0 hold the magnitude,
at most 2^(Q-1)-1 = 15 for Q = 5.

* **f** (min-sum), `sc_f`. The output sign is the XOR of the two input
  signs. A comparator on the magnitudes drives a multiplexer that passes the
  smaller one. If that magnitude is zero, the XORed sign is kept (a negative
  zero is allowed), so the decision taken from an f output is always the XOR
  of the input signs.
* **g**, `sc_g`, computes g(l1, l2, v) = l2 + (1-2v)·l1 with
  *precomputation*. A sign-magnitude adder forms l2 + l1 and a subtractor
  forms l2 − l1, both in parallel. The partial sum v only selects between
  them. Seen from v, the node's delay is one multiplexer, and v is the signal
  that arrives late.
  * Like signs: the magnitudes add, saturate at 2^(Q-1)-1, and keep the sign.
  * Unlike signs: the smaller magnitude is subtracted from the larger, and
    the result takes the larger one's sign.
  * Equal magnitudes with unlike signs: the result is zero with the sign of
    l2.

  These rounding and sign rules are this implementation's own. The
  publication only says that all values are Q bits wide.

**Decisions.** An even-indexed bit is the XOR of the signs of its two
parent LLRs, ANDed with its frozen-bit indicator. An odd-indexed bit does not
wait for the final g adder; a comparator decides it instead:

```
u[2i+1] = 0                      if a[2i+1] = 0 (frozen)
        = s(lambda2)             if |lambda2| >= |lambda1|
        = s(lambda1) ^ u[2i]     otherwise
```

Here (lambda1, lambda2) are the two LLRs that would feed that g. With the tie
rule above, this gives exactly the sign of the saturated g result. As a
consequence, the RTL matches a plain bit-true SC decoder that uses these f
and g definitions.

**Frozen-bit indicators** use a[i] = 1 for a data bit and a[i] = 0 for a
frozen bit. Frozen bits are fixed to 0, and AND gates force their decisions
to 0. The vector is an input like the LLRs and may change with every
codeword. The decoder therefore handles any code rate at its block length
without reconfiguration.

## The recursion, and how vectors are ordered

`comb_dec` (length N) is the recursion below. It bottoms out in `comb_dec4`,
the hand-optimised length-4 cell:

```
l'  = f_{N/2}(l)            l'[k]  = f(l[2k], l[2k+1])          sc_f_layer
u'  = DECODE(l', a[0 .. N/2-1])
v   = ENCODE(u')                                              polar_enc
l'' = g_{N/2}(l, v)         l''[k] = g(l[2k], l[2k+1], v[k])    sc_g_layer
u'' = DECODE(l'', a[N/2 .. N-1])
u   = (u', u'')
```

LLRs are paired with their **neighbours**, (l[2k], l[2k+1]). For that reason
ENCODE, and hence the code itself, is the polar transform x = u·F^(⊗n),
F = [1 0; 1 1], **with its output in bit-reversed index order**:

```
x[2k] = ENCODE(u_first_half)[k] ^ ENCODE(u_second_half)[k]
x[2k+1] = ENCODE(u_second_half)[k]
```

For length 4 this gives (u0^u1^u2^u3, u2^u3, u1^u3, u3). To produce
codewords this decoder accepts, use `polar_enc` with M = N as the encoder.
Alternatively, encode in natural order and bit-reverse the LLR indices. Port
vectors are packed arrays whose element i is l_i (or u_i, or a_i).

`polar_enc` is an XOR network of depth log2(M), built as butterfly columns
plus bit-reversal wiring. `comb_dec` writes the recursion out level by level,
not as a module that instantiates itself. Level L holds 2^L nodes of length
N/2^L. Node j takes its LLRs from the f output of its parent (even j) or the
g output of its parent (odd j), and feeds the ENCODE of its own first child
into its own g layer. The circuit is the same as the recursive one. This form
lints in about 20 s at N = 1024. The self-instantiating form gave false
"undriven" reports in lint.

**Where the delay goes.** Each node's second half-decoder cannot settle until
the first half-decoder and ENCODE have. The critical path therefore visits
every length-4 cell in turn, and the delay grows linearly with N. This is why
the clock period halves each time N doubles. Dynamic power (∝ C·f) then stays
roughly constant with N, because the capacitance doubles as the frequency
halves.

## Architecture 1: combinational decoder between registers (`comb_dec_reg`)

`comb_dec_reg` wraps the decoder in three registers: an input register, a
bit-indicator register and an output register.

* A codeword presented with `in_valid` is captured at a rising edge.
* Its decisions enter the output register at the next rising edge, with
  `out_valid` high.
* A new codeword can enter at every edge.

Throughput is N bits per clock period, and the period must cover the whole
combinational delay D_N. The reported figures for 90 nm are about 2.5 MHz at
N = 1024, i.e. 2.56 Gb/s.

**Partial-sum gating (power).** While the first half-decoder settles, its
glitching outputs ripple through ENCODE into the second half-decoder and
waste energy. `ps_en` is ANDed into the partial sums of the outermost g
layer. Drive it low in the first half of the period and high in the second
half, and the second half-decoder only starts once the first half-decoder's
outputs are final. Tie it high to disable the measure. Only the outermost
level is gated here, although the same trick could be repeated inside.

## Architecture 2: single-stage pipeline (`pipe_comb_dec`)

The register cut sits where the first half-decoder's results are consumed.

```
 in regs ──► f_{N/2} ─► DECODE(N/2) ─► ENCODE ─► [v, N/2 x 1]  ─► g_{N/2} ─► DECODE(N/2) ─► out regs
         └──────────────────────────────────────► [l, N x Q]   ─┘                u'' ─┘
                                 u' ─────────────► [u', N/2]  ───────────────────────┘
                      a[N/2..N-1] ───────────────► [a'', N/2] ─► (second DECODE)
```

Stage A (f, first DECODE, ENCODE) works on codeword k+1 while stage B (g,
second DECODE) works on codeword k.

* The N×Q LLR register and the N/2 partial-sum register are the published
  cut.
* This design adds a register for the second-half frozen indicators a''.
  Without it, a'' would come from the next codeword, and the indicator
  vector could not change from one codeword to the next.
* This design also adds a register for u', so that both halves of a codeword
  reach the output register in the same cycle.

Timing: in_valid at edge t gives out_valid after edge t+2, and the decoder
accepts one codeword per clock. The longest path is roughly that of a
length-N/2 combinational decoder.

## Architecture 3: hybrid-logic decoder (`hl_decoder`, `hl_sync`)

For long codes, N is split into K = N/N' component codes, which are decoded
in order i = 0 … K-1.

1. **Synchronous part, `hl_sync`.** It walks the top log2(K) stages of the
   SC tree to produce the N' LLRs λ^(i) of component code i. Stage d keeps a
   register array of N/2^d LLRs. The stage is computed by f when bit
   (log2 K − d) of i is 0. When that bit is 1, it is computed by g, with
   partial sums that are the polar transform of the already decoded bits of
   the left sibling subtree. Only the stages below the branch point between
   i−1 and i are recomputed: all log2 K stages for i = 0, and tz(i)+1 stages
   otherwise, where tz is the number of trailing zeros. One stage takes one
   clock.
2. **Combinational part.** A single `comb_dec` of length N' decodes λ^(i)
   with the indicator slice a[i·N' +: N']. The synchronous side waits
   COMB_WAIT cycles, the combinational delay in clock cycles
   (⌈D_N'·f_c⌉), and then captures the N' decisions.
3. The decisions feed the partial sums of the next component code.

`start` loads a codeword while `busy` is low. `done` pulses once `u_out` is
valid. The latency from the start edge to `done` is

    sum over i of (1 + k_i + COMB_WAIT),   k_0 = log2 K,  k_i = tz(i) + 1

This is 16·(1+14) + 30 = 270 clocks at the defaults (N = 1024, N' = 64,
COMB_WAIT = 14). The default COMB_WAIT = 14 is ⌈75.3 ns × 173 MHz⌉, derived
from reported numbers: a length-64 combinational decoder at 0.85 Gb/s on an
FPGA, and a 173 MHz synchronous decoder. In hardware, the path from the
stage registers of `hl_sync` through the combinational decoder to the
decision register is a multicycle path of COMB_WAIT cycles, and it must be
constrained that way.

**This synchronous part is a stand-in.** The publication pairs the
accelerator with an existing semi-parallel SC decoder that has P processing
elements (P = 64 in its throughput estimates), and it does not design that
decoder. `hl_sync` is deliberately simple: one f/g unit per LLR of a stage,
and one stage per clock. It produces exactly the same LLRs, but not the
semi-parallel decoder's area or cycle counts. The published throughput gains
(×5.7 to ×7.3) are therefore not reproduced by this RTL's cycle count.

## Top level (`polar_sc_top`)

The three decoders sit side by side with their own ports (`cd_*`, `pd_*`,
`hl_*`). They share only the clock and the asynchronous active-low reset.
Parameters are N, NP (= N'), Q and COMB_WAIT.

## Files

| file | contents |
|---|---|
| `rtl/polar_pkg.sv` | default sizes |
| `rtl/sc_f.sv`, `rtl/sc_g.sv` | one f node, one precomputed g node |
| `rtl/sc_f_layer.sv`, `rtl/sc_g_layer.sv` | f_{N/2} and g_{N/2} blocks (g with partial-sum AND gates) |
| `rtl/polar_enc.sv` | ENCODE / polar encoder |
| `rtl/comb_dec4.sv` | length-4 cell with comparator-based odd decisions |
| `rtl/comb_dec.sv` | length-N combinational decoder |
| `rtl/comb_dec_reg.sv` | architecture 1 |
| `rtl/pipe_comb_dec.sv` | architecture 2 |
| `rtl/hl_sync.sv`, `rtl/hl_decoder.sv` | architecture 3 |
| `rtl/polar_sc_top.sv` | all three |
| `tb/polar_ref_pkg.sv` | bit-true reference: f, g, generator-matrix encoder, leaf-by-leaf SC decoder |
| `tb/tb_*.sv` | one self-checking testbench per module, plus end-to-end tests |

## Verification

Every testbench compares the RTL with `polar_ref_pkg`. That package is an
independent software model: a scalar f/g, an encoder built from the generator
matrix, and the classic leaf-by-leaf SC schedule. The testbenches use three
kinds of channel words:

* random LLRs, which exercise ties, zeros and saturation;
* noiseless codewords of random data, which must decode to the transmitted
  data exactly;
* codewords with a few sign flips.

Frozen-bit vectors are random and change with every codeword.

| testbench | what it checks |
|---|---|
| `tb_sc_f_layer`, `tb_sc_g_layer` | word-exact node outputs, gate open/closed, saturation |
| `tb_polar_enc` | M = 4 exhaustive against hand-written sums, M = 16 against the generator matrix |
| `tb_comb_dec4`, `tb_comb_dec` | decisions at N = 4, 8, 64 |
| `tb_comb_dec_reg`, `tb_pipe_comb_dec` | streaming at N = 32, exact latency 1 and 2, one codeword per clock |
| `tb_hl_sync` | component LLRs and stage count per component code |
| `tb_hl_decoder` | decisions and the latency formula (N = 64, N' = 8, COMB_WAIT = 3) |
| `tb_polar_sc_top` | all three decoders on one codeword stream (N = 32, N' = 8) |
| `tb_polar_sc_full` | the same at the default sizes (N = 1024, N' = 64), three codewords |

`tb_polar_sc_top` also counts how often each mechanism occurred, and fails if
one of them never did:

* partial-sum gating;
* two codewords in the pipeline at once;
* a change of the frozen-bit vector between consecutive pipelined codewords;
* activations of the hybrid decoder's combinational part;
* partial tree recomputation in the hybrid decoder;
* saturating g additions.

Run a testbench with plain Verilator from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/polar_pkg.sv tb/polar_ref_pkg.sv \
          tb/tb_comb_dec.sv --top-module tb_comb_dec -j 8
./obj_dir/Vtb_comb_dec
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. The
small testbenches build in seconds. `tb_polar_sc_full` (three N = 1024
decoders) takes about 2 minutes and 1.5 GB to build, and under a second to
run. Lint of the full-size top takes well under a minute.

## How far this follows the publication

Taken from the publication:

* the f/g definitions, sign-magnitude format and Q = 5;
* the recursion and its neighbour pairing;
* the length-4 cell: comparators, precomputed adder/subtractor pairs,
  XOR-of-signs even decisions, the comparator rule for odd decisions, and
  frozen-bit AND gates;
* the register arrangement of the combinational decoder;
* the placement of the pipeline registers;
* the AND-gating of partial sums;
* the hybrid schedule (synchronous stages, then the combinational decoder
  for each component code, waiting ⌈D·f_c⌉ cycles).

This implementation's own choices:

* sign-magnitude saturation and tie signs;
* the bit order of ENCODE, which follows from the neighbour pairing;
* valid/start/done handshakes and the reset;
* the a'' and u' registers in the pipelined decoder;
* gating only at the outermost level;
* the entire synchronous part of the hybrid decoder (see above);
* the COMB_WAIT default, derived from reported figures.

Not built:

* pipelines deeper than one stage. The publication describes them only as
  the same cut applied again inside each half-decoder, and gives no
  schedule or results for them;
* the semi-parallel synchronous decoder itself.

Size: generic synthesis at the defaults gives about 126,000 cells for
`comb_dec` alone, 129,000 cells and 13,800 flip-flop bits for
`pipe_comb_dec`, and 32,000 cells and 13,000 flip-flop bits for
`hl_decoder`. `polar_sc_top` holds all three, so its flat netlist is large;
synthesize the decoder you need on its own.

Timing, area and power depend on the target technology and cannot be checked
in simulation. In this RTL the combinational core's delay is only a
requirement on the clock period (or on COMB_WAIT).
