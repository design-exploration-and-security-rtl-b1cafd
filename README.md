# PUF-on-PUF: a two-layer composite arbiter PUF core

A strong physical unclonable function (PUF) answers a challenge with a response
bit that depends on manufacturing variation, so no two chips answer alike. The
plain arbiter PUF (APUF) is cheap but is almost linear: a learning attack that
has seen enough challenge/response pairs predicts it. The PUF-on-PUF (POP)
composition hides the APUF's linearity behind a second APUF:

* a **first layer** of 64 small APUFs reads the 64-bit challenge through
  overlapping, wrap-around taps;
* their 64 response bits are the challenge of one 64-stage APUF, the
  **second layer**, whose output is the POP response;
* optionally the first layer is run several times (**rounds**), each round
  feeding its own 64 responses back as the next challenge;
* every single APUF output is cleaned by **temporal majority voting** (TMV):
  the APUF is fired N times and the more frequent answer is kept.

This repository holds SystemVerilog for a POP testchip core of that kind: six
complete first layers built from 2-, 4-, 6-, 8-, 12- and 24-stage APUFs (64
each, 384 in all), one 64-stage second-layer APUF, 65 TMV counters of 24 bits,
the challenge register, the round sequencer and a JTAG port through which
everything is configured and read. The delay circuits themselves are analog
custom cells; they are represented by a behavioural model (see below), so the
core simulates end to end but only its control, voting and interface logic is
synthesizable.

## Data flow of one evaluation

```
  JTAG CHALLENGE ──► challenge register (64) ◄──────────────┐ reload between rounds
                          │ wrap-around taps                │
          ┌───────────────┼──────── six first layers ───────┤
          │  64 × 2-APUF  64 × 4-APUF ... 64 × 24-APUF      │
          └───────────────┬──── layer select (mux) ─────────┘
                          ▼
                 64 TMV counters  ──► l1_resp (64, readable)
                                          │
                                          ▼
                                  64-stage APUF ──► 1 TMV counter ──► response
```

The sequencer (`round_ctrl`) runs, for R rounds and N votes:

| step | cycles | action |
|------|--------|--------|
| LOAD | 1 | challenge register ← JTAG challenge |
| per round: CLR | 1 | clear the 64 first-layer counters |
| per round: N × (EN, SMP) | 2N | launch the selected layer, then count its 64 responses |
| per round: END | 1 | store the 64 majorities in `l1_resp`; if rounds remain, reload the challenge register with them |
| L2: CLR, N × (EN, SMP), END | 2N + 2 | the same for the second-layer APUF on `l1_resp`; its majority is the response |

One evaluation therefore takes exactly `1 + (R + 1)(2N + 2)` core clock
cycles, e.g. 65 cycles for one round with 15 votes. `busy` is high for exactly
those cycles; `done` rises at the end and stays up until the next start.

## The arbiter PUF and how it is modelled

An APUF is two nominally identical delay paths. A rising edge on `en` enters
both; in stage *i* the challenge bit *c<sub>i</sub>* either passes the two edges
straight on or swaps them between the paths. Each stage is four tri-state
inverters, of which the challenge bit enables one pair. After the last stage a
latch of two cross-coupled NAND gates decides which edge came first; that is
the response.

The silicon cell is hand-laid-out and its behaviour comes from transistor
mismatch, so it cannot be written as logic. `rtl/apuf.sv` is a behavioural
model with the cell's ports (`en`, `c`, `r`):

* every inverter of every stage has a delay `10000 + m` (arbitrary units),
  where the mismatch `m` is a fixed pseudo-normal number in [−510, 510]
  (spread ≈ 148) derived from a hash of the instance seed, the stage and the
  inverter. Seeds are `CHIP_ID·65536 + layer·256 + index + 1`, so `CHIP_ID`
  selects a die and every instance on it differs;
* at each rising `en` the model walks the two arrival times through the
  stages (straight for *c<sub>i</sub>* = 0, crossed for 1) and sets
  `r = 1` when the top path wins, i.e. when
  `bottom − top + noise > 0`;
* the noise is drawn anew at each evaluation: a pseudo-normal number scaled by
  `NOISE_AMP/256`, never larger than `510·NOISE_AMP/256` in magnitude. A
  challenge whose delay difference exceeds that bound always yields the same
  answer, which is what lets the testbenches check noisy cores exactly on
  those challenges.

The same delay difference can be written in the additive form used to analyse
APUFs: Δ = Σ<sub>i</sub> s<sub>i</sub>·k<sub>i</sub>, where k<sub>i</sub> is
stage *i*'s straight or crossed delay difference and
s<sub>i</sub> = (−1)<sup>c<sub>i+1</sub> ⊕ … ⊕ c<sub>n−1</sub></sup> is the
parity of the swaps between stage *i* and the arbiter. The testbenches compute
responses this way, independently of the model's path walk.

What the model does not capture: temperature and supply dependence, a
calibrated noise level (the default `NOISE_AMP = 32` is arbitrary; the testchip
measured bit error rates of roughly 17–24 % over temperature), metastability of
the arbiter, and the real distribution of stage bias. Which inverter pair is
"straight" and which path winning reads as 1 are choices of the model; for a
PUF they only relabel responses.

## First-layer wiring

APUF *i* of a first layer of *n*-stage APUFs reads challenge bits
*i*, *i*+1, …, *i*+*n*−1, taken modulo 64, in stage order: APUF 62 of the
4-stage layer reads c62, c63, c0, c1. Every challenge bit thus reaches *n*
different APUFs, at a different stage in each, which defeats attacks that
solve the first-layer PUFs one by one from the bits they see alone. The
response of APUF *i* is first-layer output bit *i*; it becomes challenge bit
*i* of the next round and drives stage *i* of the second-layer APUF
(`rtl/pop_first_layer.sv`).

## Rounds

With R > 1 the 64 first-layer majorities are written back into the challenge
register and the same first layer is evaluated again, R times in all, before
the second layer sees the last round's word. Rounds are a cheap substitute for
more layers. Note the trade-off the testchip measurements showed: each extra
round compounds first-layer errors, and with very small APUFs (2 or 4 stages)
the rounds shrink rather than grow the set of words the second layer sees, so
they do not help against learning attacks. The round field is 4 bits (1–15;
0 is taken as 1).

## Temporal majority voting and counter sharing

Each `tmv_counter` counts the ones among the N evaluations of one APUF and
outputs 1 when 2·count > N (an even N with a tie reads 0). N comes from the
24-bit `tmv_n` field (0 is taken as 1; N = 1 is a plain single evaluation).
Voting over 15 evaluations is the sensible operating point; beyond that the
gain in stability is small.

There are 65 counters: 64 for the first layer and one for the second. The six
first layers share the 64 first-layer counters: only the layer chosen by
`layer_sel` receives launch pulses, and a multiplexer routes its 64 responses
to the counters. So voting is still done per APUF, but only one first layer
is active at a time. The counters are sized generously (24 bits), as on the
testchip; 5 bits would cover 31 votes.

## JTAG access

`rtl/jtag_tap.sv` is a standard IEEE 1149.1 TAP (16-state controller, TDO on
the falling TCK edge, reset by `trst_n` or five TMS-high cycles) with a 4-bit
instruction register. All data registers shift LSB first.

| IR | register | bits | use |
|----|----------|------|-----|
| 0x2 | CONFIG | 31 | `{layer_sel[2:0], rounds[3:0], tmv_n[23:0]}`; layer_sel 0..5 = 2, 4, 6, 8, 12, 24 stages. Reset value: 8 stages, 1 round, 15 votes |
| 0x3 | CHALLENGE | 64 | initial challenge |
| 0x4 | START | 1 | each Update-DR starts one evaluation |
| 0x5 | RESULT | 67 | `{l1_resp[63:0], response, done, busy}`, captured at Capture-DR |
| 0xF | BYPASS | 1 | also after reset and for any other code |

A host writes CONFIG and CHALLENGE while the core is idle, issues START, then
repeats the RESULT scan until `done` is set. `l1_resp` gives the first-layer
responses of the last round, so single first-layer APUFs can be characterised
directly (e.g. for stage-bias analysis, where every challenge of a 2-, 4- or
8-stage APUF can be enumerated).

Clock domains: the core runs on `clk`, the TAP on `tck`. START crosses as a
toggle through a two-flop synchroniser and an edge detector; `done` and `busy`
cross back through two-flop synchronisers; the response bits are read only
after `done` is seen, when they no longer change. CONFIG and CHALLENGE are
captured by the core at start and must not be written while `busy`.

## Parameters

| where | name | default | meaning |
|-------|------|---------|---------|
| `pop_pkg` | `CHAL_W` | 64 | challenge bits = first-layer APUFs = second-layer stages |
| `pop_pkg` | `L1_STAGES` | 2, 4, 6, 8, 12, 24 | the six first layers |
| `pop_pkg` | `TMV_CNT_W` | 24 | TMV counter and `tmv_n` width |
| `pop_pkg` | `ROUND_W`, `SEL_W` | 4, 3 | rounds and layer-select fields |
| `pop_top` | `CHIP_ID` | 0 | which die the APUF model represents |
| `pop_top` | `NOISE_AMP` | 32 | model noise; 0 makes the core deterministic |
| `apuf` | `N_STAGES`, `SEED`, `NOISE_AMP` | 64, 1, 32 | one APUF instance |

## What follows the testchip and what is this design's own

Taken from the testchip description: the 64-bit challenge; the six
first-layer sizes and the single 64-stage second layer; the wrap-around tap
wiring; rounds with reload of the challenge register from the first-layer
responses; TMV on every APUF with 65 counters of 24 bits; the APUF structure
of tri-state-inverter stages and a NAND-latch arbiter; a JTAG interface.

Own choices, where the description is silent: the delay and noise model of the
APUF and its polarity conventions; sharing the 64 first-layer counters through
a layer-select multiplexer; the two-cycle launch/sample evaluation and the
sequencer's handshake; the tie rule and saturation of the counters; the field
widths and reset values of the configuration; the whole JTAG register map and
the clock-domain crossing; the core's clock and reset pins. A layer select of
6 or 7 fires no APUF and returns zeros.

Not built: the pads and I/O cells, the silicon APUF cells themselves (only
their model), and anything of the test chip unrelated to the POP core.

## Verification

Each block has a self-checking testbench in `tb/` ending in a
`TB_RESULT checks=… failures=…` line:

| testbench | what it establishes |
|-----------|--------------------|
| `apuf_tb` | model equals the additive parity reference on all 256 challenges of an 8-stage and 300 of a 64-stage APUF; noisy responses beyond the bound never change, some inside it do |
| `tmv_counter_tb` | count and majority for N = 1, 7, 15, 31 and random N; tie rule; clear priority; saturation |
| `pop_first_layer_tb` | wrap-around wiring of a 4- and a 24-stage layer against separately wired reference APUFs |
| `challenge_register_tb` | load / reload / hold against a model |
| `round_ctrl_tb` | cycle count `1 + (R+1)(2N+2)`, pulse counts, reload contents, response, config capture, R or N = 0 |
| `jtag_tap_tb` | TAP state walk, IR capture, BYPASS, CONFIG/CHALLENGE write and read-back, START toggle, RESULT capture, async reset |
| `pop_top_tb` | three cores (noiseless, noisy, other die) through JTAG: first-layer word and response for all six layers and 1–8 rounds, cycle counts, split TMV votes, uniqueness between dies |
| `pop_top_full_tb` | the core at default parameters: one evaluation with the reset configuration and one with the 24-stage layer and 4 rounds |
| `pop_metrics_tb` | the measurement sweep: 100 challenges per size at 1, 7, 15, 31 votes; uniformity, uniqueness, bit error rate; first-layer distances between rounds and between challenges; uniformity and uniqueness for 1–4 rounds |
| `pop_stage_bias_tb` | stage-bias analysis from first-layer responses read through JTAG: all challenges of one 2-, 4- and 8-stage APUF, and the spread over all 64 instances of the 2-, 4-, 8- and 24-stage layers |

`tb/pop_ref_pkg.sv` holds the reference model (additive delay form, seeds,
wiring, noise bound) and `tb/jtag_host.sv` a bit-level JTAG master.

### What the model reproduces

The two workload benches run the analyses one would run on silicon, on the
model. Their results (seeded runs; a different seed moves them by a few
hundredths):

* Uniformity and uniqueness of the final response are 0.45–0.55 for every
  first-layer size at one round (100 challenges each). Over 1–4 rounds they
  stay between 0.48 and 0.67 for the 2- and 8-stage cores; that smaller sample
  has only 60 challenges, which explains most of the spread.
* **Stage bias.** For stage *j* and challenge-bit value *t*, the stage bias is
  the fraction of challenges with *c<sub>j</sub>* = *t* whose response equals
  1 ⊕ *p<sub>j</sub>*, with *p<sub>j</sub>* the parity of the bits after stage
  *j*. Over the 64 instances of each layer its standard deviation is 0.42,
  0.29, 0.20 and 0.12 for 2, 4, 8 and 24 stages: the smaller the APUF, the
  more single challenge bits dominate its response.
* **First-layer distance.** The normalised Hamming distance between first-layer
  words of two random challenges is near 0.49 for 24 stages at any round
  count, but for 2 stages it falls from 0.40 after one round to 0.31, 0.26 and
  0.25 after 2, 4 and 8 rounds. Between consecutive rounds of one challenge
  the 2-stage layer changes only 0.37–0.43 of its bits. Small first-layer
  APUFs thus confine the second layer to a small part of its challenge space,
  and rounds make it worse; this is why a POP built from 2- or 4-stage APUFs
  is easy to learn while 6 stages and more are not.
* **Voting.** With the bench's noise level the response error rate against a
  noiseless copy of the same die falls from 0.20–0.44 at one vote to
  0.11–0.24 at 31. These figures follow the uncalibrated `NOISE_AMP` and are
  not a prediction of silicon error rates.

## Simulating

With Verilator 5 (`--timing` is needed for the delays in the testbenches;
the RTL itself has none):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pop_pkg.sv tb/pop_ref_pkg.sv tb/pop_top_tb.sv --top-module pop_top_tb
./obj_dir/Vpop_top_tb +verilator+rand+reset+2
```

Replace `pop_top_tb` by any testbench name; for block testbenches that do not
import `pop_ref_pkg`, leave that file out. Every module in `rtl/` also lints
alone: `verilator --lint-only -Wall -Irtl -y rtl rtl/pop_pkg.sv rtl/<module>.sv`.
The APUF model uses `$urandom` for its noise and so does not synthesize;
`tmv_counter`, `challenge_register`, `round_ctrl`, `jtag_tap` and `sync_2ff`
are ordinary synthesizable RTL. To put the core on silicon, replace `apuf`
by the custom delay-chain cell with the same ports.

## Files

`rtl/`: `pop_pkg` (constants, configuration type), `apuf` (behavioural APUF),
`pop_first_layer`, `challenge_register`, `tmv_counter`, `round_ctrl`,
`jtag_tap`, `sync_2ff`, `pop_top`. `tb/`: the testbenches above,
`pop_ref_pkg`, `jtag_host`.
