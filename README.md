# Knuth balanced and nearly-balanced bus codes in hardware

A single-ended parallel bus draws a supply current that depends on how many
of its lines are high. When that number jumps from one word to the next, the
package and board inductance turn the change into simultaneous switching noise
(SSN). Differential signalling removes the problem but doubles the wires. A
middle course is *zero-sum* (ZS) signalling: send every word as a codeword
with as many ones as zeros (a *balanced* code), or with a small, bounded
difference (a *nearly-balanced* code). The number of high lines then stays
nearly constant, and only a few extra wires are needed.

This repository holds synthesizable SystemVerilog for the encoder and decoder
of such a code. It uses the simplest of Knuth's balanced codes, the *Simple
Parallel* (SP) method, and its extension to a disparity bound of ±2 or ±4. The
encoder uses the parallel architecture, where every candidate codeword is
checked in the same clock cycle. The default build takes 32 data bits to a
40-bit balanced codeword.

## 1. The code

### 1.1 Balancing by inverting a prefix

Call the *disparity* of a word its number of ones minus its number of zeros.
Let `w^(k)` be the n-bit data word `w` with its first `k` bits inverted,
where "first" means counted from the MSB. Two facts give Knuth's method:

* each extra inverted bit changes the disparity by exactly +2 or −2;
* inverting all n bits negates the disparity.

The disparity therefore walks in steps of 2 from `v(w)` to `−v(w)` as k goes
from 0 to n. For even n it must hit 0 at some k with 0 ≤ k < n. The encoder
sends `w^(k)` for the smallest such k, together with a *parity word* that
tells the receiver k. The parity word is itself balanced, so the whole
codeword is balanced. There are n possible values of k, so the parity word
needs the smallest even width p with C(p, p/2) ≥ n. The decoder reads k from
the parity word and inverts the first k data bits again.

Worked example (n = 8, w = `10111011`, disparity +4):

| k | w^(k)    | disparity |
|---|----------|-----------|
| 0 | 10111011 | +4 |
| 1 | 00111011 | +2 |
| 2 | 01111011 | +4 |
| 3 | 01011011 | +2 |
| 4 | 01001011 | 0  ← first balanced |

The parity width is 6 (C(6,3) = 20 ≥ 8), and k = 4 maps to parity word
`010011`, so the codeword is `01001011 010011` (14 bits).

### 1.2 Nearly-balanced codes: keeping only some k

If the codeword may have disparity up to ±2d, the encoder does not need every
k. If a kept k lies within d steps of the balancing k, then `w^(k)` has
disparity at most 2d. Keeping every (2d+1)-th value is enough, so only

    N_u = ceil(n / (2d + 1))

values of k are kept, evenly spaced:

    k_j = floor( (2j+1)(n−1) / (2·N_u) + 1/2 ),   j = 0 .. N_u−1

For n = 8 this gives {1, 4, 6} for d = 1 (±2) and {2, 5} for d = 2 (±4). For
d = 0 it reduces to k_j = j. The encoder picks the smallest j whose `w^(k_j)`
is within ±2d. The parity word now names j, not k. It needs only
C(p, p/2) ≥ N_u, so it is narrower.

The same 8-bit word under the three bounds:

| bound | kept k     | chosen k | codeword (data, parity) |
|-------|------------|----------|-------------------------|
| ±0    | 0..7       | 4        | `01001011` `010011` |
| ±2    | 1, 4, 6    | 1        | `00111011` `0011`   |
| ±4    | 2, 5       | 2        | `01111011` `01`     |

### 1.3 Parity table

Step j is given the j-th p-bit word with p/2 ones, in increasing binary order:
`000111, 001011, 001101, 001110, 010011, ...` for p = 6, and
`00001111, 00010111, ...` for p = 8. The code only needs the assignment to be
one-to-one onto balanced words. `knuth_pkg::parity_word` computes the table
at elaboration time by ranking combinations, so no table file exists and any
width up to 16 works.

### 1.4 Code lengths

Codeword length n + p produced by the parameters (they agree with the
published SP code lengths for every even n from 4 to 72):

| n  | ±0 | ±2 | ±4 |
|----|----|----|----|
| 8  | 14 | 12 | 10 |
| 16 | 22 | 20 | 20 |
| 32 | 40 | 38 | 38 |
| 64 | 72 | 72 | 70 |

## 2. The parallel encoder (`sp_parallel_encoder`)

The encoder tests all kept k at once rather than one after another.

```
             +--> balance_calculator(word ^ mask(k_0))      --bal[0]------+
             +--> balance_calculator(word ^ mask(k_1))      --bal[1]------+
 word ------>+        ...                                                 |
             +--> balance_calculator(word ^ mask(k_{Nu-2})) --bal[Nu-2]---+
             |                                                            v
             +--> word_delay (L cycles) --> word_r --> {word_r ^ mask(k_j), parity_j}
                                                        j = 0..Nu-1 --> least_flip_mux
                                                                            |
                                                             output register
                                                                            v
                                                                      word_coded
```

* **Balance calculators.** There are N_u − 1 of them, one for each candidate
  except the last. The last needs none: if no earlier candidate is
  acceptable, the argument of section 1 guarantees that the last one is. At
  n = 32, ±0 that is 31 calculators for 32 candidates.
* **Word delay.** The calculators are pipelined, L = ceil(log2 n) + 1 cycles
  deep (6 at n = 32). The data word waits in a matching register chain, and
  the candidates sent out are rebuilt from the delayed copy. This keeps
  N_u × n bits of flipped words out of the pipeline registers.
* **Mux.** A priority selector takes the flagged candidate with the lowest j,
  which is the one with the fewest inverted bits. Several candidates are
  often balanced at once, and the code is defined by the first of them. If
  none is flagged, the mux takes the last candidate.
* **Output register** holds the codeword.

Timing: one word per clock. `word_coded` belongs to the word applied
ceil(log2 n) + 2 cycles earlier: 7 cycles at n = 32, 5 at n = 8, 8 at n = 64.
There is no valid/ready handshake. A word is taken every cycle. After reset
the output carries no data until the first word has passed through the
pipeline: it is zero, then for a few cycles a codeword built from the
cleared registers.

Bit order of `word_coded`: the flipped data word in the upper n bits, then
the parity word in the lower p bits. `flip_sel` gives the chosen step j and is
only a status output.

The encoder holds an assertion that every codeword after the pipeline has
filled has disparity within ±2D. It lives in the clocked process, so reset
switches it off.

### Cost

A calculator counts n bits and the number of calculators grows with n, so
the encoder grows roughly as n². At n = 32, ±0, generic synthesis gives about
1,500 word-level cells and 2,000 flip-flops. Nearly all of them are the 31
pipelined calculators and the 6 × 32-bit delay. With ±2 and ±4 the number of
calculators falls by about 3× and 5×.

## 3. Balance calculator (`balance_calculator`)

This block counts the ones of an n-bit word and flags it when the count c
lies in [n/2 − D, n/2 + D], which is the same as a disparity within ±2D. The
word is zero-padded to a power of two and summed in a binary adder tree with
a register after each level. One more registered stage does the window
compare. Latency is ceil(log2 n) + 1 cycles and throughput is one word per
cycle. Widths that are not a power of two (10, 12, 20, ...) work.

## 4. Decoder (`sp_decoder`)

The decoder splits the codeword into data and parity fields. It compares the
parity field with each of the N_u table entries and XORs the data field with
the matching constant mask (the first k_j bits set). The outputs are
registered, so latency is one cycle at one word per cycle. If the parity
field matches no table entry, `code_err` is set and the data field passes
through uninverted. The decoder is small: its size grows roughly linearly with n,
while the encoder grows quadratically.

## 5. The Optimized Parallel variant (`op_parallel_encoder`, `op_decoder`)

Knuth's *Optimized Parallel* (OP) method drops the rule that the parity word
must be balanced. Each step j now pairs a flip count k_j with a parity word
u_j. From one step to the next, either k grows by one or u gains a one, never
both. Each step therefore moves the disparity of the whole codeword by ±2.
Over the whole walk it changes sign, so some step balances the codeword.
Unbalanced parity words are more plentiful, so fewer parity bits are needed.
For 8 data bits, 4 parity bits are enough (12-bit code), where SP needs 6.

The step table used here is the published 8-bit one:

| j   | 0    | 1    | 2    | 3    | 4    | 5    | 6    | 7    | 8    | 9    |
|-----|------|------|------|------|------|------|------|------|------|------|
| k_j | 0    | 1    | 1    | 2    | 3    | 4    | 5    | 6    | 6    | 7    |
| u_j | 0100 | 1000 | 0011 | 0101 | 0110 | 1001 | 1010 | 1100 | 0111 | 1011 |

For example, `10111011` is balanced at step 1: `00111011` has disparity +2
and `1000` has −2, giving the codeword `00111011 1000`. The table balances all
256 data words, and the testbench checks every one.

The encoder has the same structure as the SP encoder. Nine balance
calculators each check a whole 12-bit candidate, data plus parity, and the
tenth step is the default. The word delay is 5 cycles and the encoder
latency 6. The decoder matches u against the ten table entries. Six of the
sixteen 4-bit values are unused, and they raise `code_err`.

Only this 8-bit balanced table is implemented. Building OP tables for other
widths, or for a ±2/±4 bound, needs a choice of parity-word disparity ranges
that is not specified here.

## 6. The link top (`zs_codec_top`)

`zs_codec_top` holds one encoder and one decoder of the same code. Parameter
`ALG` (type `knuth_pkg::alg_e`) selects it. `ALG_SP`, the default, selects
the SP code with `N` data bits and bound ±2`D`. `ALG_OP` selects the 8-bit OP
code, and then needs `N = 8, D = 0`.

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `tx_word` | in | N | data to send |
| `tx_code` | out | N+P | codeword to drive onto the bus |
| `tx_flip_sel` | out | ceil(log2 N_u) | step j the encoder chose |
| `rx_code` | in | N+P | codeword received from the bus |
| `rx_word` | out | N | decoded data, one cycle after `rx_code` |
| `rx_code_err` | out | 1 | received parity field is not in the table |

The bus drivers and receivers are analog and are not part of this RTL. In a
real link the two halves would sit on different chips. Wiring `tx_code` to
`rx_code` returns each word ceil(log2 N) + 3 cycles later: 8 at the
defaults, and 7 in OP mode.

Parameters: `N` (data bits, even, ≥ 4) and `D` (the disparity bound is ±2D;
0, 1, 2 are the studied cases). `P`, `N_u`, the k_j and the parity words are
derived in `knuth_pkg`.

## 7. What follows the published design and what is filled in

Taken from the published design:

* the SP code and its nearly-balanced extension;
* the parallel structure: n−1 calculators at ±0, a data delay matched to the
  calculators, a least-flips mux and an output register;
* MSB-first inversion;
* the 6-deep delay and 40-bit codewords at n = 32;
* the parity words for 0 and 1 inverted bits at n = 32 (`00001111`,
  `00010111`);
* the worked 8-bit examples above;
* the codeword lengths.

Filled in here, because the published description is silent or
inconsistent:

* **Selection formula.** The published formula for k_j has N_u where
  2·N_u is needed. As printed it gives k_0 = 2 for n = 8, ±2, while the
  worked example for that case uses {1, 4, 6}. The 2·N_u version reproduces
  both worked examples and all the code lengths.
* **Parity table order.** The increasing-binary order matches every parity
  word printed for the 8-bit examples and the first two of the 32-bit
  diagram. The 32-bit diagram prints `01101010` for 30 inverted bits and
  `01101100` for 31. In this table those are entries 29 and 30, so the
  published table must skip one word somewhere that cannot be identified.
  This RTL's 32-bit codewords for 2 to 31 inverted bits may therefore differ
  from the original circuit's. Both are valid codes, but they do not
  interoperate.
* **Codeword bit order.** The order data-then-parity follows the worked
  examples. The algebraic notation `u·w^(k)` would put the parity first.
* **Calculator insides.** The original cites a separate ones-counting
  algorithm. Here it is an adder tree, with register placement chosen to give
  6 stages at 32 bits.
* **Encoder latency.** One sentence of the description says the parallel
  encoder finishes "within one registered stage". The block diagram shows the
  6-deep delay plus an output register. The diagram is followed.
* **Reset, handshake and decoder error.** The asynchronous reset, the absence
  of a handshake, the one-cycle decoder register, `code_err` and `flip_sel`
  are all this design's choices.

* **OP encoder structure.** No hardware structure is given for the OP
  encoder. Here it reuses the parallel structure, with the calculators
  checking whole candidates.

Not built:

* the *Optimized Parallel* (OP) code for other widths, and its ±2 version.
  Their step tables are not specified. At 16 bits the OP ±2 code equals the
  SP ±2 code (`N=16, D=1`);
* the pipelined encoder architecture. It is a comparison point, larger and
  no faster, and produces the same SP ±2 code as the parallel encoder;
* the analog bus I/O.

## 8. Simulation

All testbenches are self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and ends with `$finish`. A
watchdog ends a run that hangs. The reference model `tb/knuth_ref_pkg.sv` is
written separately from `rtl/knuth_pkg.sv`: it uses real arithmetic for k_j,
brute-force enumeration for the parity table, and a sequential search for the
encoder.

| testbench | what it checks |
|-----------|----------------|
| `tb_balance_calculator` | 32-bit ±0/±4 and 12-bit ±2 calculators against a count, at their latency |
| `tb_word_delay` | 6-cycle delay and reset |
| `tb_least_flip_mux` | priority choice with none, one or many flags |
| `tb_sp_parallel_encoder` | 32-bit ±0, 8-bit ±0/±2/±4 and 12-bit ±2 encoders against the model; the three worked examples; every step used; latency |
| `tb_sp_decoder` | decoders at 32/±0, 8/±2, 16/±4 and 64/±2, valid and invalid codewords |
| `tb_zs_codec_top` | default 32-bit balanced link end to end, with parity corruption on the bus; counts each mechanism (several balanced candidates, last candidate, no flip, invalid parity) |
| `tb_op_parallel_encoder` | OP encoder on all 256 words against the model; the worked example; every step used |
| `tb_op_decoder` | OP decoder on all 256 codewords and on all unused parity values |
| `tb_op_codec` | link top in OP mode, end to end |
| `tb_sp_configs` | the 12 studied SP configurations (n = 8, 16, 32, 64 × ±0, ±2, ±4) end to end, with code lengths |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/knuth_pkg.sv tb/knuth_ref_pkg.sv tb/tb_zs_codec_top.sv \
    --top-module tb_zs_codec_top
./obj_dir/Vtb_zs_codec_top
```

Every testbench finishes in well under a second of simulation. The 64-bit
configurations take the longest to compile, about half a minute for
`tb_sp_configs`.

To build another size, set `N` and `D` on `zs_codec_top`,
`sp_parallel_encoder` or `sp_decoder`. Nothing else needs to change.
