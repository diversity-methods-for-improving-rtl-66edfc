# QEC decoder emulator with diversity decoders

Estimating the logical error rate of a quantum error-correcting code and its decoder means
decoding a very large number of random error patterns: at physical error rates around
10^-3 a single logical failure can take millions of trials. This design moves that Monte Carlo
loop into hardware. Random error patterns are generated, turned into syndromes, decoded and
checked at full clock rate, and only counters (and the rare failing patterns) leave the chip.

The decoder under test is a belief-propagation (BP) decoder for quantum LDPC codes. Two
"diversity" decoders are built on top of it. Both rest on the same observation: BP decoders
that differ a little (in message quantization, in scaling factor, in update rule, in prior)
fail on different error patterns. Running them one after another, and stopping at the first
one whose estimate satisfies the syndrome, corrects more patterns than any one of them does.

* The **quantization-diversity decoder** chains four min-sum decoders with message formats
  q[7,4], q[8,4], q[4,2] and q[3,1] (q[W,F]: W-bit two's-complement messages, F fractional
  bits). It is the decoder under test inside the emulator.
* The **BP-diversity decoder** is a tree of five decoders: sum-product first, then two scaled
  min-sum decoders, then two more, each later stage with a prior modified by an earlier stage's
  hard decision. Its last decoder hands over to an ordered/localized statistics post-processor,
  which is not part of this RTL. This decoder is a standalone block.

## The code: bivariate bicycle codes generated from a formula

All blocks work on the H_X matrix of a bivariate bicycle (BB) code

    A = x^3 + y + y^2,   B = y^3 + x + x^2,   x = S_l (x) I_m,   y = I_l (x) S_m
    H_X = [A | B],       H_Z = [B^T | A^T]

where S_k is the k x k cyclic shift. The code has n = 2lm qubits and lm X-checks. Every check
has six edges and every qubit three, so the RTL never stores a matrix. Functions in
`qec_pkg` compute, for check c and edge k, the qubit it reaches (`bb_chk_var`), and the
inverse maps for the qubit side (`bb_var_chk`, `bb_var_pos`). All wiring is generated at
elaboration from these functions.

| BB_L x BB_M | code (n, k, d) |
|---|---|
| 6 x 6 | (72, 12, 6) |
| 9 x 6 | (108, 8, 10) |
| 12 x 6 (default) | (144, 12, 12) |

The decoders see H_X syndromes of Z-type errors only; one Pauli type per run, code-capacity
noise. Circuit-level noise (detector error models) is not generated.

## Emulator data path (`qec_emulator`)

```
 random_generator x NG -> comparators -> collection shift register -> noisy sequence register
                                                                        |           |
                                                         syndrome_unit (H_X e)      |
                                                                        |           |
                                                  quant_diversity_decoder           |
                                                                        |           |
                           error_checker: (e_hat xor e) -> logical operators -> counters
                                                                        |
                                                 failing_pattern_ram (pattern e on failure)
 control_layer: two FSMs (noise side / decoder side)    param_interface: register bus
```

### Noise generation (`random_generator`, `noise_source`)

There are NG = 40 generators. Each produces an 18-bit uniform fraction per cycle. A generator
is a 32-bit xorshift register whose top 18 bits are the output. Each output is compared with
the 18-bit error threshold (P(error) x 2^18); the comparison result is one error bit. The NG
bits of a cycle are shifted into a collection register, so a pattern of n bits takes
K = ceil(n/NG) cycles (4 for n = 144). When it is full, the pattern is copied into the noisy
sequence register. The generators then start on the next pattern while the decoder works on
this one. Generator g is seeded with seed + g x 0x9E3779B9; a zero state is replaced by a
constant.

Timing: `gen_start` → `full` after K+1 cycles (one comparator register, K shifts). Load
and the syndrome register follow, so a new syndrome is ready K+3 cycles after generation
starts.

### Syndrome (`syndrome_unit`)

This unit computes the XOR of each check's six bits and registers the result when `en` is high.
It has a latency of one cycle.

### The BP decoder core (`bp_decoder`)

This is the most involved block. It is fully parallel: one processing unit per check node and
one per qubit. The schedule is flooded, and one iteration takes two clock cycles.

* **CN cycle.** First, the hard decision is checked against the syndrome. If every check is
  satisfied, the decoder stops (converged). If `max_iter` iterations have run, it also stops
  (not converged). Otherwise each check computes, for each of its six edges, a message from
  the five other incoming messages:
  * The sign is the syndrome bit XOR the signs of the other inputs.
  * For min-sum (`SUM_PRODUCT = 0`), the magnitude is alpha x (smallest other magnitude).
    The two smallest magnitudes and the position of the smallest are found once per check.
    alpha = ALPHA_NUM/32 is applied with shifts and adds, then truncated.
  * For sum-product, the magnitude is phi(Σ phi(|Q_other|)), with
    phi(x) = ln((e^x+1)/(e^x-1)).
    * phi is a table of 2^(W-1) entries built at elaboration from that formula. Entry 0 is
      evaluated at half a step. Entries are rounded to q[W,F].
    * The sum of the six phi values is formed once per check, and each edge subtracts its own
      value.
    * The sum is kept 3 bits wider than a message and saturated before the second lookup.
* **VN cycle.** Each qubit adds its prior and its three incoming messages (W+3 bits). The
  outgoing message on each edge is that total minus the edge's own input, saturated to
  ±(2^(W-1)-1). The sign of the total is the new hard decision.

Priors are per-qubit LLRs, log(P(0)/P(1)), with 4 fractional bits. They are truncated and
saturated into q[W,F]. The emulator gives every qubit the same run-time value. The BP-diversity
decoder gives each qubit its own value.

Interface: `ready` while idle. A `start` pulse latches the syndrome, priors and `max_iter`.
`done` pulses once, 2 x iterations + 2 cycles after the start edge. `e_hat`, `converged` and
`iterations` then hold until the next start. A zero syndrome finishes with 0 iterations.

Where the quantization matters: saturation of messages, truncation of the scaled minimum, and
truncation of the prior. These are the "quantization noise" that the first diversity decoder
exploits.

### Quantization-diversity chain (`quant_diversity_decoder`)

There are NSTAGE = 4 `bp_decoder` instances (min-sum, alpha 0.75), with formats q[7,4], q[8,4],
q[4,2] and q[3,1], tried in that order. The most accurate format runs first, and the chain stops
at the first stage that converges. If none converges, the output is stage 0's estimate, with
`converged = 0`.

The `iterations` output is the sum over all stages run. `escalated` is set when more than
stage 0 ran. Latency: for each stage run, 2 x it + 2 cycles, plus one cycle per hand-over and
one for the result.

The chain with NSTAGE = 1, QW = '{7}, QF = '{3} is a single q[7,3] min-sum decoder, the
baseline configuration of the emulator.

### Result checking (`error_checker`)

For each decoded frame, the residual r = e_hat XOR e is formed and tested for nonzero
(physical error). It is then multiplied by the k logical operators. A nonzero product, or a
decoder that did not converge, is a logical error. The counters are:

* 16-bit physical errors;
* 16-bit logical errors;
* 80-bit frames;
* 88-bit total iterations;
* 32-bit escalations.

All counters saturate.

The logical operators are computed at elaboration from H_X and H_Z by GF(2) elimination. They
are a basis of ker(H_Z) taken modulo the row space of H_X, which gives k = 12 rows for the
(144,12,12) code. No operator table is stored.

### Failing-pattern memory (`failing_pattern_ram`)

This memory holds 2^16 words of n bits. Each frame that ends in a logical error writes its
injected pattern e at the current logical-error count. The host reads the memory through a
synchronous port with one cycle of latency. Since the run stops at a 16-bit target, every
failing pattern of a run fits.

### Control (`control_layer`)

Two state machines run the pipeline.

* **Noise FSM.** It starts a pattern (`gen_start`). When the pattern is complete, it loads the
  noisy sequence register, but only once the previous frame in that register has been checked.
  It then enables the syndrome register and raises `noise_ready`. Generation of the next pattern
  starts in the same cycle as the load.
* **Decoder FSM.** It starts the decoder when `noise_ready` is high and the decoder is ready.
  On `done`, it triggers the checker (end of decoding), which frees the register slot.

Two cases arise:

* Decoder slower than generation: the noise side waits. These cycles are counted in
  `noise_wait`.
* Decoder faster than generation: the decoder waits. These cycles are counted in `dec_wait`.

A run starts with the start command. Starting clears all counters and reseeds the generators.
The run ends on the stop command, or when the logical-error count reaches the target. Frames in
flight at that moment are discarded. `cycles` counts the clock cycles of the run.

### Register map (`param_interface`)

32-bit words on a simple write/read bus (we/waddr/wdata, raddr/rdata, combinational read).
Setting writes are ignored while a run is in progress.

| addr | name | meaning |
|---|---|---|
| 0x00 | CTRL | write: bit0 start (ignored while running), bit1 stop; read: bit0 running, bit1 ready |
| 0x01 | RATE | [17:0] threshold = P(error) x 2^18 |
| 0x02 | MAX_ITER | [7:0] iteration limit per decoder stage (reset 10) |
| 0x03 | TARGET | [15:0] stop after this many logical errors (reset 100) |
| 0x04 | SEED | [31:0] run seed (reset 1) |
| 0x05 | PRIOR | [11:0] signed prior LLR, 4 fractional bits |
| 0x06 / 0x07 | PHYS_ERR / LOG_ERR | 16-bit counters |
| 0x08-0x0A | FRAMES | 80 bits, low word first |
| 0x0B-0x0D | ITER_TOTAL | 88 bits; average iterations = ITER_TOTAL / FRAMES |
| 0x0E-0x0F | CYCLES | 64-bit run length in clock cycles |
| 0x10 / 0x11 | NOISE_WAIT / DEC_WAIT | waiting cycles on either side |
| 0x12 | ESCALATIONS | frames on which the diversity chain ran past its first decoder |

The top brings out this bus and the failing-pattern read port. In a complete system, a network
link to a host computer carries them. That link is not part of this RTL.

## BP-diversity decoder (`bp_diversity_decoder`)

This decoder was proposed for circuit-level noise. Here it is a standalone block with its own
testbench and is not wired into the emulator. It holds five `bp_decoder` instances, all
q[8,4]:

| stage | decoder | rule | alpha | iterations | prior |
|---|---|---|---|---|---|
| A | 0 | sum-product | – | 10 | y |
| B | 1 | min-sum | 29/32 (≈0.9) | 10 | 0.75·e'_A + 0.25·y |
| B | 2 | min-sum | 0.75 | 10 | 0.75·e'_A + 0.25·y |
| C | 3 | min-sum | 0.5 | 10 | 0.5·e'_2 + 0.5·y |
| C | 4 | min-sum, then post-processing | 0.75 | 2 | 0.5·e'_2 + 0.5·y |

Stage B runs only if A fails, and stage C only if both B decoders fail. The two decoders of a
stage run in parallel, and the stage ends when both are done. e'_A is the hard decision of the
failed sum-product decoder. e'_2 is the hard decision of the alpha-0.75 decoder.

The modified prior is y' = gamma·e' + (1−gamma)·y, where e' is the binary hard decision. It is
computed without a multiplier: (16−G)·y by shifts and adds, an arithmetic shift right by 4, then
+G where e' = 1, with gamma = G/16.

The result comes from the first converging decoder in the order 0, 1, 2, 3, 4, and `winner`
names it. Decoder 4 can end without converging. When it does, `pp_req` pulses, and `pp_prior`
and `pp_e_hat` present its inputs for a post-processor. This happens after 10 + 10 + 2 = 22 BP
iterations on the latency path. The worst-case BP latency is 30 iterations, which is
2·30 + 3 + 4 + 4 + 1 = 72 cycles.

## Where this RTL departs from, or adds to, the published design

* **Code.** The published emulator results use other QLDPC codes. Their matrices are not
  available, and this RTL generates only BB Tanner graphs. The (144,12,12) BB code is the
  default.
* **Random generator.** The algorithm is xorshift32. The published description calls the
  source Gaussian but uses it as a uniform value in [0,1) compared with a threshold, so a
  uniform source is used. All comparators share one threshold.
* **Error types.** There is one error type per run, not X/Y/Z.
* **Decoder core.**
  * Its insides are the simplest fully parallel version of the described behaviour.
  * alpha = 0.75 for the emulator decoder, since no value is given.
  * Two's-complement messages; truncation of the scaled minimum.
  * Convergence is tested at the start of each iteration.
  * The phi table is rounded.
* **Quantization chain.**
  * One instance per stage. The published design notes that pairs of decoders could share
    hardware, but does not say how.
  * Every stage uses the same alpha and `max_iter`.
  * Stage 0's estimate is output when every stage fails.
* **Checker.**
  * Non-converged frames count as logical errors.
  * Counters saturate.
  * The escalation counter is added.
* **Control.**
  * The state machines, the handshakes, the wait counters and the register map are this
    design's own.
* **BP-diversity decoder.**
  * The message format is q[8,4].
  * alpha 0.9 is approximated as 29/32.
  * alpha 0.75 is used for the 2-iteration decoder, since no value is given. With 0.5 it
    would repeat the first two iterations of decoder 3.
  * The gamma formula is taken literally, with e' as 0/1.
  * The priority inside a stage, and waiting for both decoders of a stage, are this design's
    choices.
  * There is no hardware sharing between the decoders.
  * There is no LSD/OSD post-processor.
* **Not built.**
  * The network interface (UDP/ARP/MAC/SGMII and the host protocol).
  * The post-processor.
  * Circuit-level noise and detector error models.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and includes a watchdog. Decoder testbenches compare
against a bit-accurate behavioural model in `tb/ms_model_pkg.sv`. The model is built from
explicit H matrices (not from the RTL index functions) and has explicit per-edge loops.
Example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/qec_pkg.sv tb/ms_model_pkg.sv tb/tb_bp_decoder.sv --top-module tb_bp_decoder
./obj_dir/Vtb_bp_decoder +verilator+rand+reset+2
```

| testbench | what it covers |
|---|---|
| tb_random_generator | xorshift sequence, seeding, zero-seed fix, enable, fraction below a threshold |
| tb_noise_source | patterns against a model of the generators and comparators, overlap, density, timing K+1 |
| tb_syndrome_unit | H_X e for the 144 code against explicit matrices |
| tb_bp_decoder | min-sum q[7,3] and sum-product q[8,4] vs the model, latency 2·it+2 |
| tb_quant_diversity_decoder | chain order, escalation, fall-back, latency |
| tb_bp_diversity_decoder | all five winners, prior modification, post-processing request, latency |
| tb_error_checker | k = 12, operators commute with H_Z, stabilizers vs logicals, saturation |
| tb_failing_pattern_ram | write/read, full address range |
| tb_param_interface | register map, lock while running, start/stop |
| tb_control_layer | both waiting cases, target stop, stop command |
| tb_qec_emulator | end to end on the 72 code at two error rates; counts each mechanism |
| tb_qec_full | end to end with every default (144 code, NG = 40, four-stage chain) |

The end-to-end testbenches check every frame against independent computations: the syndrome
is H_X e, a converged estimate reproduces it, and the logical-error decision is recomputed by a
rank test against H_Z. The counters read over the bus must equal the testbench's own counts,
and every stored failing pattern is read back. Each mechanism must occur, or a failure is
counted:
* noise-side waiting (run 1, high error rate);
* decoder-side waiting (run 2, low error rate);
* escalation in the chain;
* non-converged frames;
* logical errors stored in RAM;
* a stop at the target count;
* a stop command;
* settings locked while running.

## Limits

* Only bivariate bicycle codes of the form above, with one Pauli type, can be emulated. Other
  QLDPC families would need a new Tanner-graph generator in `qec_pkg`.
* The fully parallel decoder grows with n. The default four-stage chain for the 144 code has
  four complete decoders.
* The BP-diversity decoder stops at the post-processing request. Its LER benefit under
  circuit-level noise cannot be reproduced with the code-capacity noise source here.
