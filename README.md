# Two-stage LDPC decoder for CV-QKD reconciliation

In continuous-variable quantum key distribution (CV-QKD) with reverse
reconciliation, Bob sends the syndrome `s = u·Hᵀ` of his raw key `u`. Alice
then has to recover `u` from her noisy soft values `R` and `s`. The channel
SNR is far below 0 dB, so the code is a long, low-rate LDPC code. At such
SNRs a decoder that runs on fixed-point numbers gets stuck: a few bits stay
wrong however many iterations it runs, and the frame error rate stays high.

The design here follows the scheme of C. Zhou et al., *"Integrated
high-performance error correction for continuous-variable quantum key
distribution"*. Decoding runs in two stages:

1. **First stage (`sub_decoder`).** Layered belief propagation in W-bit fixed
   point (W = 10: 1 sign, 4 integer and 5 fraction bits) runs for a fixed
   t_max iterations. It corrects most errors.
2. **Second stage (`error_bits_erase`).** The bits that are still wrong almost
   always have a small reliability |LLR|. Every bit with |LLR| < Δ is marked
   *suspicious*. The stage then looks for check rows that hold exactly one
   suspicious bit. In such a row all the other bits are trusted, so the
   syndrome fixes the suspicious bit's value. The bit is set, becomes trusted,
   and the search repeats until no such row is left. This is a peeling
   decoder restricted to the suspicious set. It uses nothing beyond the
   syndrome Bob already sent.

Because the second stage cleans up what the first stage leaves, the first
stage can run fewer iterations, and fewer iterations mean more throughput.
Three first-stage decoders share one second stage (the source's
configuration). One second-stage frame costs about as much as a few
iterations, so one second stage keeps up with three decoders.

```
              +-------------+
   R, s  ---->| sub_decoder |--+
  (frames     +-------------+  |   posterior     +------------------+
   dealt in   +-------------+  |   LLRs + s      |                  |   u, ok
   turn)  --->| sub_decoder |--+---------------->| error_bits_erase |------->
              +-------------+  |  (taken in the  |                  |
              +-------------+  |   same order)   +------------------+
          --->| sub_decoder |--+
              +-------------+
```

## The code the hardware decodes

The MET-LDPC codes the source decodes are not published. Only their length
(N = 80000 for the rate-0.2 code) and their rates (0.2 and 0.1) are known.
This RTL therefore defines its own quasi-cyclic code, in `ldpc_pkg`:

* H is MB × NB blocks of Z × Z. Each block is zero or a cyclically shifted
  identity. In block row ("layer") i, a block with shift s in block column j
  connects check row r of the layer to variable `j·Z + (r+s) mod Z`.
* Every layer has DEG = 4 non-zero blocks:
  * k = 0 and k = 1 are two distinct information columns,
    `i mod KB` and `(i + 1 + (i div KB) mod (KB−1)) mod KB`;
  * k = 2 is parity column `KB+i` with shift 0;
  * k = 3 is parity column `KB + (i−1) mod MB`, a wrapped dual diagonal.
* Shifts are `(73·i + 151·k + (17·i²) mod Z + 29) mod Z`. The shift is 0 when
  k = 2.
* The defaults are Z = 1600, NB = 50, MB = 40. That gives N = 80000 and rate
  KB/NB = 10/50 = 0.2. For rate 0.1, take NB = 50 and MB = 45.

The code needs no encoder, because reverse reconciliation only ever computes
syndromes. This code is neither multi-edge-type nor optimised, so its frame
error rates are not the source's. The decoder logic does not depend on the
layout. Another QC code with four circulants per layer, each column at most
once per layer, only needs new `base_col` and `base_shift` functions. KB must
be at least 2.

## First stage: layered decoding in `sub_decoder`

All Z check rows of a layer are processed at once, one `minsum_lane` each. A
layer takes 2·DEG = 8 cycles:

* **Read, k = 0..3.** Read posterior block column `col(i,k)` and rotate it by
  the shift (`qc_rotate`) so that lane r holds the bit of row r. Subtract the
  row's old check message to get `Q = L − R`, and keep Q. Update the row's
  smallest |Q| (min1), second smallest (min2), the edge of min1, and the
  sign accumulator. The sign accumulator starts at the row's syndrome bit,
  so a row with `s = 1` flips all its message signs.
* **Write, k = 0..3.** Form `R' = ±⌊3/4 · (min over the other edges)⌋`. Take
  `L = Q + R'` with saturation, rotate it back, and store both.

The check-node rule is scaled min-sum, a choice of this design. The source
names only "layered BP" and does not give its check-node arithmetic.
Everything is W bits wide and saturates symmetrically at ±(2^(W−1) − 1).
Iteration 1 reads the old messages as zero, so the message memory needs no
clearing between frames.

Timing:

* one iteration takes D = 2·DEG·MB = 320 cycles;
* a frame occupies a decoder for NB load beats + t_max·D + NB output beats;
* there is no early stop.

The throughput formula T = f_c·N/(D·t_max) assumes the same, and the
second stage judges whether the frame decoded. `max_iter = 0` passes the
channel LLRs through unchanged, which lets the second stage be tested on its
own.

Storage per decoder:

* posteriors: NB words of Z·W bits;
* check messages: MB·DEG words of Z·W bits, 2.56 Mbit at the defaults;
* syndrome: MB words of Z bits;
* Q buffer: DEG words.

All of them are arrays with combinational read.

## Second stage: `error_bits_erase`

On load, `llr_classify` sets `u = 1` for `LLR ≤ 0` and marks the bit
suspicious if `|LLR| < Δ`. Δ is counted in LSBs of the fixed-point LLR.
Δ = 165 at W = 10 is 5.16, and Δ = 530 at W = 12 is 4.14, the values the
source uses.

A **pass** sweeps the layers exactly like an iteration and costs the same D
cycles. Each row (`erase_lane`) collects:

* the number of suspicious bits, saturating at "two or more";
* which edge holds the suspicious bit;
* `s_c` = syndrome bit XOR the parity of the row's trusted bits;
* the parity of all its bits XOR the syndrome bit, which is 0 when the row
  holds.

In the write half, a row with exactly one suspicious bit writes `s_c` into
that bit and clears its flag. Within a layer each variable belongs to one row
only, so writes never collide. A fix is visible to the later layers of the
same pass. This in-place order can finish in fewer passes than a strict
"compute everything, then fix" reading of the method. Peeling stops at the
same unsolvable set in any order, so when the trusted bits are right the
final word is the same.

The frame ends in one of three ways:

* **A pass fixes nothing.** That pass also checked every row, so
  `out_ok = 1` exactly when all checks hold.
* **MAX_PASS passes (8) still fix bits.** One more pass only checks.
* **First pass.** `out_stage1_ok` is set when every check held and no bit
  changed in the first pass, that is, when the first stage alone had
  succeeded.

The stage takes NB + passes·D + NB cycles per frame. A frame that the first
stage already solved needs 1 pass when no bit is suspicious. It needs 2
passes when some are: the first marks them trusted, and the second confirms.

## Pipeline and throughput

`two_stage_decoder` deals incoming frames to decoders 0, 1, 2, 0, … and
takes finished frames into the second stage in the same order, so frames
leave in arrival order. The input bus is shared, and only the selected
decoder accepts. A decoder that finishes while the second stage is busy
holds its frame and raises `s2_wait`. It accepts no new frame until the
frame is handed on.

At steady state the output rate is one frame every (2·NB + t_max·D)/3
cycles:

| configuration | cycles/frame | bits/cycle | f_c for the published throughput |
|---|---|---|---|
| rate 0.2, t_max = 15 | 1633 | 49.0 | 11.1 MHz for 544.03 Mbps |
| rate 0.1 (MB = 45, D = 360), t_max = 20 | 2433 | 32.9 | 12.0 MHz for 393.33 Mbps |
| rate 0.1, t_max = 35 | 4233 | 18.9 | 12.0 MHz for 226.37 Mbps |

The source gives neither its clock nor its D, so these rows say only what
clock this schedule would need. The second stage stays off the critical path
while passes·D + 2·NB < (2·NB + t_max·D)/3. At rate 0.2 with t_max = 15 that
allows up to 4 passes.

## Interfaces

All blocks use one clock and a synchronous active-low reset `rst_n`.

**Frame in** (`in_valid`, `in_ready`, `in_llr[Z][W]`, `in_syn[Z]`). A frame
is NB beats. Beat b carries LLR block column b (variables b·Z … b·Z+Z−1, lane
r = variable b·Z+r). For b < MB it also carries syndrome layer b (check rows
b·Z+r). The syndrome field is ignored on later beats. A beat moves when
`in_valid && in_ready`. `sub_decoder` passes frames on in the same format.

**Frame out** (`out_valid`, `out_ready`, `out_bits[Z]`, `out_last`). A frame
is NB beats of decided bits in the same order. `out_ok`, `out_stage1_ok` and
`out_passes` are valid during the beats.

**Configuration.** `max_iter` (t_max) is sampled by a decoder at the last
input beat of each frame. `delta` (Δ) is sampled by the second stage at the
first beat it takes. Change `delta` only while the decoder is empty.

**Status.** `dec_busy[3]` shows which decoders hold a frame. `s2_wait` shows
that a finished frame is waiting for the second stage.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `Z` | 1600 | circulant size, rows processed in parallel |
| `NB` | 50 | block columns (N = Z·NB = 80000) |
| `MB` | 40 | block rows (rate (NB−MB)/NB = 0.2) |
| `W` | 10 | LLR width; 12 for the rate-0.1 setting |
| `ITW` | 6 | width of `max_iter` (t_max ≤ 63) |
| `NDEC` | 3 | first-stage decoders |
| `MAX_PASS` | 8 | second-stage pass cap |
| `PW` | 4 | width of `out_passes` |

## What follows the source and what does not

These follow the source:

* the two-stage method;
* three first-stage decoders sharing one second stage;
* layered decoding for t_max iterations;
* fixed point with W = 10 (1.4.5), with W = 12 (1.4.7) as the alternative;
* syndrome-based reverse reconciliation;
* steps (a)–(d) of the correction method, including the rule u = 1 for
  LLR ≤ 0 and the meaning of Δ;
* N = 80000 at rate 0.2.

These are this design's own:

* the parity-check matrix;
* the scaled min-sum check node with its 3/4 factor;
* the 2·DEG-cycle layer schedule and so the value of D;
* memories with combinational read;
* the frame beat format;
* round-robin dealing and collecting;
* second-stage passes that update in place, the pass cap, and the status
  outputs;
* the t_max = 0 bypass;
* synchronous reset.

The source sends only failed frames to the second stage. Here every frame
goes through it, because its first pass is also the syndrome check that
decides whether the frame failed.

How far to trust it:

* Both stages match the reference model bit for bit on every frame tested,
  with the full 80000-bit, three-decoder configuration included.
* Throughput matches the formula above to within 5 %.
* FER and SNR figures from the source cannot be reproduced with this code.
* No timing closure or FPGA mapping was attempted. The barrel rotators are
  Z·W = 16000 bits wide, and at Z = 1600 the design is large.

## Simulation

The testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog. They use a
reference model, `tb/ldpc_ref_pkg.sv`, that walks H edge by edge with plain
integers. It shares only the code definition and the documented arithmetic
rules with the RTL.

| testbench | what it runs |
|---|---|
| `tb_sub_decoder` | small code (Z=16, N=160); five frames, t_max = 0…5, saturating inputs, random back-pressure; every posterior LLR is compared, and the latency must be t_max·D |
| `tb_error_bits_erase` | small code, MAX_PASS = 3; made-up posteriors with wrong and doubtful low-reliability bits; decided bits, flags and pass count are compared, and the latency must be passes·D; clean, repaired, unsolvable and pass-capped frames must all occur |
| `tb_two_stage_decoder` | whole decoder on the small code; mixed frames, then 9 frames at t_max = 15 whose spacing is checked against the three-decoder rate |
| `tb_two_stage_rate01` | the same at the rate-0.1 setting: W = 12, Δ = 530, t_max = 20, NB = 20, MB = 18 |
| `tb_two_stage_full` | the decoder at its default parameters, N = 80000; 12 mixed frames and 6 at t_max = 15 |

The end-to-end benches count these events and fail if any never happens:

* frames the first stage solved alone;
* frames the second stage repaired;
* undecodable frames;
* cycles with a finished frame waiting for the second stage;
* cycles with all three decoders busy;
* cycles of output back-pressure.

Frames reported decoded that differ from the key are counted but not
failed. On the 160-bit code a very noisy frame can land on another word with
the same syndrome.

To run one with Verilator 5 (from the folder above `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/ldpc_pkg.sv tb/ldpc_ref_pkg.sv tb/tb_two_stage_decoder.sv \
    --top-module tb_two_stage_decoder -o sim
./obj_dir/sim
```

Swap in another testbench name as needed. The small benches build and run in
seconds. `tb_two_stage_full` takes about three minutes to compile and a few
seconds to run.

## Files

* `rtl/ldpc_pkg.sv`: code layout (`base_col`, `base_shift`), defaults.
* `rtl/two_stage_decoder.sv`: top level, three decoders and the second stage.
* `rtl/sub_decoder.sv`, `rtl/minsum_lane.sv`: first stage and its per-row
  check node.
* `rtl/error_bits_erase.sv`, `rtl/erase_lane.sv`, `rtl/llr_classify.sv`:
  second stage, its per-row peeling logic and the threshold and hard
  decision.
* `rtl/qc_rotate.sv`: circulant lane rotation.
* `tb/`: the testbenches above, the shared environment `two_stage_env.sv`
  and the reference model.
