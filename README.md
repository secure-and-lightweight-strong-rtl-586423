# Keyed NLFSR challenge obfuscation for a strong PUF

An arbiter PUF answers a 56-bit challenge with one bit. Left unprotected, its
responses can be modelled by machine learning from a moderate number of
challenge-response pairs. This design hides the arbiter PUF behind a keyed,
non-linear challenge transformation. The external challenge is XORed with a
56-bit chip secret and loaded into a non-linear feedback shift register
(NLFSR). The NLFSR is clocked 112 times to warm up and 56 more times to flush.
Its state is then the challenge actually applied to the PUF. Each response bit
leaves the chip as it is: there is no error correction and no helper data.
Further response bits each take another 56 NLFSR steps.

The NLFSR needs no extra state registers, because a PUF needs a challenge
register anyway. The only additions are a handful of XOR gates and two AND
gates for the next-state logic. Because the transformation is keyed, it must
resist power analysis. Two protected variants are provided:

* `nlfsr_apuf`: the plain NLFSR, clocked by a randomized clock. The clock
  randomly skips edges, so power traces do not line up in time.
* `nlfsr_apuf_masked`: the NLFSR in two Boolean shares, plus the randomized
  clock and a PRNG that supplies fresh masks. This is the fully protected
  variant.

`knl_top` holds both variants side by side, the way a test chip would. The
arbiter PUFs, the key store (OTP flash or a weak PUF) and the non-volatile copy
of the seeding challenge are not RTL. They connect through ports.

## The NLFSR

The 56-bit state is two maximum-length NLFSRs: `a` with 29 bits and `b` with 27
bits. Both shift towards bit 0, and the new bit enters at the top. Each
register's feedback also takes in bit 0 of the other register. This couples
the two states, in the same way that Trivium couples its registers.

```
fa = a0^a3^a5^a6^a11^a12^a16^a19^a22^a23^a27 ^ (a28 & a20) ^ b0
fb = b0^b1^b2^b4^b8^b10^b11^b14^b17^b19^b21 ^ (b10 & b6)  ^ a0
a' = {fa, a[28:1]}     b' = {fb, b[26:1]}
state[55:0] = {a, b}
```

Without the coupling term, each register on its own runs through all
2^n - 1 non-zero states; an exhaustive run over all states confirms this for
both registers. The coupled 56-bit system has no known period, but it needs
none: it runs for only a few hundred steps per request. Both AND gates take
their inputs straight from flip-flops. That matters for the masked version,
because glitches on the inputs of a masked AND leak information.

`knl_pkg::nlfsr_step` is the single RTL definition of one step. The
testbenches use a second, table-driven reference model
(`tb/knl_ref_pkg.sv::ref_step`).

### What the warm-up buys

After 112 + 56 steps, flipping any one bit of the external challenge flips each
of the 56 obfuscated-challenge bits with probability close to one half.
`tb/avalanche_tb.sv` measures this on the RTL with one random key and 10 000
random challenges. Each challenge is run once as it is and once with each of its
56 bits toggled. For every toggled position, every output bit changes in between
48.2 % and 51.9 % of the runs. A linear register run for the same
number of steps would give exactly 0 % or 100 % for each bit. The 112-step
warm-up count was found empirically to give this result for these feedback
functions. Other feedback functions may need more or fewer steps.

## Evaluation sequence

`obf_ctrl` runs the sequence. It is clocked by the randomized core clock, so
every count below is in core-clock cycles. `PUF_LAT` is the wait between
triggering the PUF and sampling its output, and defaults to 2.

| step | unmasked (`MASKED=0`) | masked (`MASKED=1`) | cycles |
|---|---|---|---|
| load seeding challenge | state = unstable challenge | share 1 = unstable challenge, share 2 = 0 | 1 |
| seed PRNG | 8 PUF bits into the LFSR | 19 PUF bits into the CASR, then the LFSR | bits x (PUF_LAT+2) |
| enable clock randomizer | yes | yes | 1 |
| seed NLFSR | - | the same 56 PRNG bits shifted into both shares | 56 |
| key remask | - | share i ^= key share i | 1 |
| misalign | - | NLFSR steps | 128 |
| challenge | state = key ^ challenge | share 1 ^= challenge | 1 |
| warm-up | NLFSR steps | NLFSR steps | 112 |
| flush | NLFSR steps | NLFSR steps | 56 |
| evaluate | 7 PUF evaluations, majority vote | same, on the unmasked state | 7 x (PUF_LAT+1) |
| output | `resp_valid` for one cycle | same | 1 |

After the output step, the sequence returns to the flush step until `n_resp`
bits have been produced. A value of 0 is treated as 1.

Latency from the first busy cycle to the first `resp_valid`, with
`PUF_LAT = 2`:

* unmasked: 1 + 8·4 + 1 + 1 + 168 + 21 = **224** core cycles
* masked: 1 + 19·4 + 1 + 56 + 1 + 128 + 1 + 168 + 21 = **453** core cycles
* each further bit: 56 + 21 + 1 = **78** core cycles

While the clock randomizer runs, one core cycle lasts on average about 4
system cycles, against 2 with it disabled. The latency is fixed in core cycles
but not in system cycles. In one run of `knl_top_tb`, two masked requests
took 1659 and 1666 system cycles to the first bit, and two unmasked requests
took 833 and 835. The spread depends on the seeds drawn from the PUF. It stays
small because the skip pattern repeats every 255 system cycles, so every
window of 255 cycles holds the same number of skips.

In the masked variant, the NLFSR first holds the same random number R in both
shares, so its value is 0. XORing in the key shares k1 and k2 gives the
value k1 ^ k2, which is the key. The key is now carried under the fresh mask R.
The register is then stepped 128 times while the clock randomizer is active, so
the time at which the external challenge is mixed in differs from run to run.
The challenge enters share 1 only, because its second share is zero. The value
obtained is therefore F^168(F^128(key) ^ challenge), where F is one NLFSR step.
The unmasked variant obtains F^168(key ^ challenge). The two variants thus give
different challenges for the same key. That is intended: each is a separate
PUF instance.

## Masking

`masked_nlfsr56` keeps every state bit as two shares, `s1` and `s2`, whose XOR
is the value. Shifts and XORs act on each share separately. Each AND is
replaced by `masked_and`, the two-share AND

```
z1 = ((x1 & y1) ^ (x1 | ~y2)) ^ r
z2 = ((x2 & y1) ^ (x2 | ~y2)) ^ r        z1 ^ z2 = (x1^x2) & (y1^y2)
```

Each share costs one AND, one OR and the shared inverter. Both output shares
are XORed with the same fresh random bit `r` on every cycle. In the 29-bit
register, x is bit 28, y is bit 20 and the remask bit is `r1`. In the 27-bit
register, x is bit 10, y is bit 6 and the remask bit is `r2`.

The two shares are combined only at the output, by XOR. Both inputs of that XOR
are ANDed with `unmask_en`, which is high only while the PUF is being
evaluated. During warm-up the XOR therefore does not toggle with the secret
state. An assertion in `nlfsr_apuf_masked` checks that `puf_chal` is zero
whenever `unmask_en` is low.

## Randomness: PRNG and clock randomizer

Both blocks run on the system clock:

* `clock_randomizer` contains an 8-bit Fibonacci LFSR: taps 6, 5, 1 and 0,
  feedback into bit 7, period 255. Its bit 0 is the skip signal. A toggle
  flip-flop produces `rand_clk`: on each system clock edge it inverts, or holds
  when skip is high. The result is `sys_clk/2` with randomly stretched phases,
  and the skip pattern repeats every 255 system cycles, so authentication time
  stays predictable. While disabled, `rand_clk` is a plain `sys_clk/2`.
* `casr11` is an 11-cell null-boundary cellular automaton. Cell 1 follows
  rule 150 (left ^ self ^ right) and cells 2 to 11 follow rule 90
  (left ^ right). Its period is 2047, which is coprime to 255, so the combined
  sequence repeats only after 255 · 2047 ≈ 2^19 cycles.
* Output logic, with LFSR bits and CASR cells numbered from 1:
  `r2 = LFSR3 ^ CASR2` (27-bit AND), `r1 = LFSR7 ^ CASR4` (29-bit AND), and the
  NLFSR seed bit `LFSR5 ^ CASR10`. In RTL indices these are `lfsr[2]^casr[1]`,
  `lfsr[6]^casr[3]` and `lfsr[4]^casr[9]`.

The PRNG is seeded from the PUF itself. At enrollment, a challenge whose
response is unstable is chosen and stored, and it enters through `unst_chal`.
The controller loads this challenge, evaluates it once per seed bit, and shifts
each raw response bit serially in: CASR cell 1 → … → cell 11 → LFSR bit 7.
The masked variant takes 19 bits, the unmasked variant 8 bits (it has no CASR).
While seeding, both PRNG registers hold except on a shift. A shift happens on
the system edge that also raises `rand_clk` (`rclk_rise`), so exactly one bit
enters per core cycle that requests it. If every seed bit comes out 0, the
PRNG locks in the all-zero state. The design does not guard against that: the
enrolled challenge is assumed to be unstable enough.

### Clocking

The controller and NLFSR are clocked by `rand_clk`, which comes from a
flip-flop on `sys_clk`. On silicon this generated clock needs the usual
generated-clock constraints, and its insertion delay must be balanced against
`sys_clk`. Two paths cross between the domains:

* PRNG to NLFSR: the remask and seed bits. Their values only need to be fresh
  and random, not to arrive on a given cycle.
* Controller to PRNG: the seeding strobes. They are stable for a whole core
  cycle and are sampled on the edge that raises `rand_clk`.

In simulation, `rand_clk` behaves as a clock that lags `sys_clk` slightly.

## Interfaces

All request and PUF signals of a variant are timed by that variant's
`core_clk` output, which is `rand_clk`. Reset is asynchronous and active low.

| signal | dir | meaning |
|---|---|---|
| `start` | in | raise to request; hold high until `done`, then drop |
| `n_resp[7:0]` | in | number of response bits wanted |
| `key` / `key_s1`,`key_s2` | in | secret key, or its two shares (masked); hold stable while busy |
| `chal`, `unst_chal` | in | external challenge; enrolled unstable challenge |
| `busy`, `done` | out | request running; finished (held until `start` drops) |
| `resp_bit`, `resp_valid` | out | one response bit, valid for one core cycle |
| `puf_chal[55:0]` | out | challenge to the arbiter PUF (masked: zero outside evaluation) |
| `puf_trig` | out | one-cycle evaluation trigger |
| `puf_resp` | in | PUF output, sampled at the end of the `PUF_LAT`-th cycle after `puf_trig` |

`knl_top` prefixes the unmasked variant's ports with `u_` and the masked
variant's ports with `m_`. Only `sys_clk` and `rst_n` are shared.

Module hierarchy:

```
knl_top
├── nlfsr_apuf          (u_plain)
│   ├── clock_randomizer
│   ├── obf_ctrl #(MASKED=0)
│   └── nlfsr56
└── nlfsr_apuf_masked   (u_masked)
    ├── casr11
    ├── clock_randomizer
    ├── obf_ctrl #(MASKED=1)
    └── masked_nlfsr56
        └── masked_and x2
knl_pkg: widths, cycle counts, nl_op_e, feedback functions
```

Synthesized with a generic flow (yosys `synth -flatten`, its own gate
library), the top has 267 flip-flops. The masked variant holds 112 of them in
the NLFSR shares, 8 in the LFSR and 11 in the CASR. As a rough guide to
size, here are the generic cell counts next to the instance counts of the
published 65 nm layout. The two cell sets differ, so only the ratios between
blocks mean much:

| block | generic cells (flip-flops) | published instances |
|---|---|---|
| `nlfsr56` | 370 (56) | 186 |
| `masked_nlfsr56` | 1087 (112) | 494 |
| `clock_randomizer` | 17 (9) | 24 to 25 |
| `casr11` | 32 (11) | 65 |
| `obf_ctrl` (masked) | 324 (35) | part of the control logic row |
| `nlfsr_apuf` | 704 (100) | 717 with the APUF |
| `nlfsr_apuf_masked` | 1464 (167) | 1448 with the APUF |

Masking costs about 2.9 times the cells of the plain NLFSR here. The
published layout shows about 2.7 times.

## Simulation

Each testbench in `tb/` checks itself and ends with a
`TB_RESULT checks=N failures=M` line. Build and run one with, for example:

```
verilator --binary --timing --assert --top-module knl_top_tb -y rtl -y tb +libext+.sv \
    rtl/knl_pkg.sv tb/knl_ref_pkg.sv tb/knl_top_tb.sv
./obj_dir/Vknl_top_tb
```

| testbench | what it establishes |
|---|---|
| `masked_and_tb` | all 32 input combinations: z1^z2 = x&y, and `r` flips both shares |
| `nlfsr56_tb` | key^challenge load, 500 steps bit-exact against the reference, hold, unstable load |
| `masked_nlfsr56_tb` | full masked sequence with random remasks: seeding leaves value 0 with equal shares, key mix, 296 steps, challenge mix; gating; shares really masked |
| `clock_randomizer_tb` | LFSR sequence and period 255; `rand_clk` holds exactly when bit 0 is 1; `rclk_rise`; seeding |
| `casr11_tb` | CA rule, period 2047, serial seeding |
| `prng_tb` | LFSR and CASR wired as one generator: 19-bit serial seed chain, the three outputs over one whole combined period of 521 985 cycles, that period itself, and exactly 260 992 ones per output |
| `obf_ctrl_tb` | order and length of every NLFSR operation run, trigger counts, seed-bit order, majority vote, response spacing, latency, for both variants |
| `nlfsr_apuf_tb`, `nlfsr_apuf_masked_tb` | end to end with a behavioural PUF: every PUF challenge and response against the reference, latency, skipped clock edges, gating |
| `knl_top_tb` | both variants at once at default parameters; counts that each mechanism occurred (seeding, clock skips, NLFSR seeding, key remask, misalignment, warm-up, flush between bits, noise out-voted, gating); fixed core-cycle latency and varying system-cycle latency |
| `avalanche_tb` | the strict avalanche criterion on 10 000 challenges, all 56 toggled positions (see above); about 1 minute |

`tb/apuf_model.sv` is a behavioural arbiter PUF, not a circuit. Its response is
the sign of an additive delay model with fixed pseudo-random stage weights. It
flips the 2nd and the 5th of every run of evaluations of the same challenge, so
that the majority vote has errors to correct. For the unstable challenge it
returns random bits. Every testbench except `avalanche_tb` runs in a few seconds.

## How this RTL relates to the published design

Taken from the published description:

* the NLFSR taps, AND terms and cross coupling;
* the 56-bit width;
* the cycle counts 112, 56 and 128;
* both evaluation sequences;
* the two-share structure and the masked AND;
* remasking with r1 and r2;
* the gated unmasking XOR;
* the LFSR taps and the skip-driven clock divider;
* the CASR structure;
* the PRNG output taps and the 19-bit serial seeding from an unstable PUF
  challenge;
* 7 evaluations per response bit.

The tap readings are supported by simulation: each NLFSR register is
maximum-length, the LFSR period is 255 and the CASR period is 2047.

Choices of this RTL where the description is silent:

* the packing `{29-bit, 27-bit}` of the 56-bit state;
* the serial-seeding entry point (bit 55 of both shares);
* the direction of the seed chain (CASR first, then LFSR);
* the mapping of the 1-based PRNG output labels to bit indices;
* how the two masked-AND operands are assigned;
* the mux polarity of the clock divider (toggle on skip low) and its
  behaviour while disabled;
* reset values;
* combining the 7 evaluations by majority vote;
* the request handshake and the `PUF_LAT` PUF timing;
* seeding the PRNG at every request;
* seeding the unmasked variant's clock-randomizer LFSR from the PUF.

Any of these could differ from the fabricated chip. A different packing or
seeding entry point changes the obfuscated challenges, but not the design's
security argument.

Not included:

* the arbiter PUF, a full-custom delay chain;
* the key storage and its fault-injection countermeasures (error-correction
  data, repeated reads);
* the non-volatile copy of the seeding challenge;
* test logic;
* the LFSR-based baseline that the published design is compared against.
