# Soft-assisted iBDD-SR product decoder

This is a hard-decision product decoder for a 255 x 255-bit product code that also uses one
bit of soft information per received bit to avoid miscorrections. The rows and columns are
binary BCH(255,231) words. Each corrects up to three errors. A block holds 65,025 coded and
53,361 information bits, an overhead of 21.9 %. The decoder core works only on hard decisions,
so it keeps the speed and small size of a plain iterative bounded-distance decoder (iBDD).
One extra storage bit and one AND gate per code bit turn it into an iBDD-SR decoder. The
extra bit says whether the channel sample was *weak*, that is, whether its magnitude was below
a fixed threshold w (0.587 for a BPSK amplitude of 1). During the first iterations a component
decoder may flip only weak bits; it is never allowed to overturn a confident channel decision.
Two plain iBDD iterations follow and may flip any bit, which catches the few errors that
arrived looking confident.

At a 600 MHz clock and five iterations (three iBDD-SR plus two iBDD), one block passes every
32 cycles. That is 53.3 ns per block and 1.0 Tb/s of information throughput. Ten iterations
take 62 cycles: 103.3 ns and 516 Gb/s.

## Why masking a flip is the whole soft-decision step

In iBDD-SR the message a row decoder passes to the column decoders for bit (i,j) is the sign
of `w * mu + L`. Here `mu` is the row decoder's decision on the bit (+1 or -1, or 0 if
decoding failed) and `L` is the channel reliability. With w fixed, that sign is the decoder's
decision when |L| < w and the channel decision otherwise. So the decoder only needs to store,
per bit, whether |L| < w. It may apply a correction only where that bit is set. Everything
else is ordinary iBDD.

## Block structure

```
             +--------------------+          +-------------------------------+
 hd_in  ---->|    data_memory     |---rows-->| bch_syndrome x N (rows)       |--+
             |  N x N bits        |---cols-->| bch_syndrome x N (columns)    |--+
             |  bit ^= corr & allow|         +-------------------------------+  |
             +--------------------+                                             v
                ^          ^                 +-------------------------------------------+
                | allow    | corr[k]         | component_decoder x N (decoder k serves    |
 weak_in -->[reliability_memory]<-sr_mode    |   row k and column k)                      |
                           |                 |  mux -> [reg, en] -> bch_kes -> [reg, en]  |
                           +-----------------|   -> bch_chien -> bch_comp -> AND -> corr  |
                                             +-------------------------------------------+
                              decoder_ctrl: load, cap_syn, cap_elp, wr_corr, col_mode, sr_mode
```

* **data_memory**: the block's hard decisions, one flip-flop per bit. It is written when a
  block loads, and otherwise only in rows that receive a correction. Decoder k's error
  pattern goes to row k in a row half-iteration and to column k in a column half-iteration.
  There it is ANDed with the permission bit and XORed into the stored bit.
* **reliability_memory**: the weak bits, written only at load. Its output `allow` is the
  weak bit during iBDD-SR iterations and all ones during the clean-up iterations.
* **bch_syndrome**: S1, S3 and S5 of one word, plus a zero flag. There are two copies per
  lane, one wired to row k and one to column k. Each copy's inputs change only where the
  memory is corrected, which is the point of replicating them: few toggles, low power.
* **component_decoder**: the selected syndrome goes through the key-equation solver
  (**bch_kes**), the parallel Chien search (**bch_chien**) and the root-count check
  (**bch_comp**). The two pipeline registers load only behind a non-zero syndrome. A
  never-gated flag register follows the data down the pipeline and masks stale results. A
  clean word therefore costs almost no switching.
* **decoder_ctrl**: the block handshake and the iteration schedule.
* **product_decoder**: the top level, which wires N lanes around the two memories.

## The component decoder

The field is GF(2^8) with primitive polynomial x^8 + x^4 + x^3 + x^2 + 1. Bit j of a word is
the coefficient of x^j, and an error there has locator alpha^j.

*Key equation.* For t = 3 the Peterson equations have a closed form. Scaling the locator by
`D = S1^3 + S3` removes the division:

| condition | Lambda(x) |
|---|---|
| D != 0 | D + S1 D x + A x^2 + (D^2 + S1 A) x^3, with A = S1^2 S3 + S5 |
| D = 0, S1 != 0, S5 = S1^5 | 1 + S1 x (one error) |
| otherwise | 1 (no roots, so the word is left alone) |

*Chien search.* All N positions are evaluated at once. Each position is three constant
multipliers, by alpha^-j, alpha^-2j and alpha^-3j, followed by a zero test.

*Check.* A correction is applied only if the number of roots found equals the degree of
Lambda, which must be 1 to 3. Otherwise the word has more than three errors, or its errors
fall outside the N positions of a shortened code, and it is left unchanged. This check is
what keeps bounded-distance decoding from inventing a fourth error location.

## Schedule and timing

A half-iteration takes three cycles:

| phase | strobe | what happens |
|---|---|---|
| 0 | `cap_syn` | the syndromes of the current memory are captured (only non-zero ones) |
| 1 | `cap_elp` | the locators from the key-equation solver are captured |
| 2 | `wr_corr` | Chien search and check run; the masked corrections are written |

An iteration is a row half-iteration followed by a column half-iteration. With `cfg_iters = I`,
the first I-2 iterations use the mask and the last two do not. The top-level cycle count is:

* the load cycle (`in_valid && in_ready`)
* 6 I decoding cycles
* `out_valid`, held until `out_ready`
* one idle cycle before the next load

`out_valid` rises 6 I + 1 cycles after the load edge, and the block period is 6 I + 2 cycles
when `out_ready` stays high. There is no early stop: the throughput depends only on I.

| I | cycles | ns at 600 MHz | Gb/s (53,361 info bits) |
|---|---|---|---|
| 5 | 32 | 53.3 | 1000 |
| 6 | 38 | 63.3 | 842 |
| 7 | 44 | 73.3 | 728 |
| 8 | 50 | 83.3 | 640 |
| 9 | 56 | 93.3 | 572 |
| 10 | 62 | 103.3 | 516 |

These equal the published latency and throughput figures of this architecture. The
three-phase split and the one-cycle load and output steps were chosen to reproduce them,
because no cycle-level schedule was available.

## Interface

`product_decoder #(N = 255, ITER_W = 4, HD_ITERS = 2)`:

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| in_valid / in_ready | in / out | 1 | block handshake; the block loads when both are high |
| hd_in[N] | in | N | hard decisions, `hd_in[i][j]` = row i, column j |
| weak_in[N] | in | N | 1 = channel magnitude below w |
| cfg_iters | in | ITER_W | total iterations, sampled at load (0 acts as 1) |
| out_valid / out_ready | out / in | 1 | output handshake; `out_valid` is held until taken (checked by an assertion) |
| out_hd[N] | out | N | decoded block, parity included; the stored memory itself |

The whole block moves in parallel in one cycle in each direction. A real chip would put a
deserializer and a second block buffer in front of this. Those are not part of this design,
and the input must wait for `in_ready`. Information bits are wherever the encoder put them.
The testbenches' systematic encoder uses rows and columns 24..N-1.

`N` may be lowered to decode a shortened code: rows and columns of N bits in the same field,
24 parity bits each. The testbenches use this to keep most runs short.

## Where this design departs from, or goes beyond, its source

These follow the source description:

* the code and its size
* the iBDD-SR rule and its reduction to one stored bit and one AND per bit
* the two final iBDD iterations
* the replicated row and column syndrome units
* the syndrome and zero-flag multiplexers
* the enabled registers around the key-equation solver, and the sequential gating on a zero syndrome
* a memory clocked only at load and on correction
* a reliability memory written only at load
* the iteration range 5..10
* the latency and throughput

These are this design's own choices:

* the primitive polynomial and the bit-position convention
* the closed-form, division-free solver and the fully parallel Chien search
* reading the "COMP" block as the root-count check
* one decoder per row/column pair, N = 255 of them
* the three-cycle half-iteration and the one-cycle load and output steps
* rows before columns
* XOR as the flip operation
* the polarity of the weak bit
* parallel block I/O and valid/ready handshakes
* resets only on control and flag registers

Clock gating appears in the RTL as register enables: the per-row memory writes, the
reliability-memory load and the gated pipeline registers. Mapping these onto integrated
clock-gating cells is left to synthesis. No gating cells are instantiated.

Not covered by this RTL:

* the channel front end, that is, producing the hard-decision and weak bits from the
  samples (a testbench model is provided)
* the encoder (again, only a testbench model)
* the interleaving and framing around the block

## Verification

Every module has a self-checking testbench in `tb/` that compares it with independent
reference code in `tb/tb_bch_pkg.sv`. That package has:

* log-table GF arithmetic
* a systematic BCH encoder built from g(x) = m1 m3 m5
* a Peterson decoder with real divisions and Horner root search
* the iBDD-SR block schedule
* a BI-AWGN channel with Box-Muller noise

The testbenches are:

* `tb_product_decoder`: runs N = 63 blocks. It checks each output bit against the reference
  model and against the codeword where it must be clean. It also checks latency, block
  period and output back-pressure. It requires that each mechanism occurs: zero-syndrome
  gating, corrections, check vetoes, flips blocked by the mask, clean-up flips of bits marked
  reliable, and output stalls.
* `tb_product_decoder_full`: the full 255 x 255 decoder with default parameters. It decodes
  two blocks at Eb/N0 = 5.2 dB (input BER about 1e-2) with 5 and with 10 iterations. Both
  come out error-free and identical to the model, with the latency checked.
* `tb_ber_workload`: the full decoder at 4.2, 4.3, 4.4, 4.6 and 5.2 dB, with 3+2 and 8+2
  iterations, 3 blocks per point. One run gave:

  | Eb/N0 | input BER | output 3+2 | output 8+2 |
  |---|---|---|---|
  | 4.2 dB | 1.9e-2 | 8.3e-3 | 5.4e-3 |
  | 4.3 dB | 1.8e-2 | 9.6e-4 | 0 |
  | 4.4 dB and above | <= 1.7e-2 | 0 | 0 |

  The waterfall near 4.3 dB agrees with the published iBDD-SR curves. Three blocks say
  nothing about the error floor, and the net-coding-gain figures (10.3-10.4 dB,
  extrapolated to 1e-15) cannot be checked by simulation of this length.

The channel takes Eb/N0 with code rate (231/255)^2 and BPSK. A bit is weak when
|y| < 0.587, with no Eb/N0 scaling of the threshold.

To simulate, for example, the top-level test (Verilator 5):

```
verilator --binary --timing --assert -Irtl -Itb rtl/pd_pkg.sv tb/tb_bch_pkg.sv \
    tb/tb_product_decoder.sv --top-module tb_product_decoder -Mdir obj && obj/Vtb_product_decoder
```

The other testbenches build the same way. The full-size builds take a minute or two, then run
in seconds. Each testbench prints `TB_RESULT checks=<n> failures=<m>`.

## Size and power notes

At N = 255 the design has:

* 2 x 65,025 memory flip-flops
* 510 syndrome units
* 255 lanes, each with two pipeline registers, a solver, 255 Chien evaluators and a 255-input
  population count

Area, power and energy per bit depend on the standard-cell library and on switching
activity, so the RTL alone cannot reproduce them. For reference, the source reports
4.76 mm^2, 633 mW and 0.63 pJ/bit at five iterations on a 28-nm FD-SOI process. The gating
described above is what those power numbers rely on: a component decoder whose syndrome is
zero does not clock its pipeline.
