# Arbiter PUF with random placement: RTL and simulation model

A strong physical unclonable function (PUF) answers challenges with responses
that depend on a chip's manufacturing variation. A plain arbiter PUF has a
weakness: its whole behaviour is described by about 65 delay parameters. An
attacker who collects a few thousand challenge/response pairs can learn them
and then imitate the chip in software.

This design avoids keeping a fixed PUF on the chip. An FPGA region of
84 x 17 = 1428 LUTs is reserved. To authenticate, the server sends a fresh
FPGA configuration (a "second challenge"). It places the LUTs of ten 64-stage
arbiter PUFs at random sites of that region. Until that configuration is
loaded, the PUF does not exist, so there is nothing to learn in advance. The
server then sends 100 "m-challenges", one per response bit. The 100 response
bits form the chip's "fingerprint". The server compares it with a template it
recorded from the same chip and configuration at enrolment. The chip passes if
no more than t = 12 bits differ. No error correction and no helper data are
used. The scheme works like biometrics: two fingerprints match if they are
close enough.

The RTL here covers the fabric side: the PUF chain, the arbiter, a measurement
sequencer and the verifier's comparison. It includes a timing model of the
FPGA routing, without which an arbiter PUF cannot be simulated. The processor,
configuration controller and server software are outside the RTL.

## The arbiter PUF (`arbiter_puf`, `puf_mux_stage`, `puf_arbiter`)

One rising edge is launched into two paths, "above" and "below". It passes:

1. A first stage with its select tied to straight.
2. 64 stages. Stage i passes the two paths straight when challenge bit
   `c[i-1]` is 0 and swaps them when it is 1.
3. An arbiter.

Each stage is two LUTs, one per output (`puf_mux_stage`). Each LUT has a
third input, `dc`, that forces the crossed setting. `dc` exists so that
synthesis cannot reduce a LUT to a wire; keep it at 0.

The arbiter is not a flip-flop. It is a single LUT with feedback:

    r = (below AND NOT above) OR (below AND r)

This is an SR latch. If `below` rises while `above` is still low, r becomes 1
and stays 1 while `below` is high. If `above` wins, r stays 0. When `below`
falls, r clears. So **r = 1 means the lower path was faster**.
(`puf_arbiter` writes this as `always_latch`.)

Port timing of `arbiter_puf`:

- `enable` 0 -> 1 launches both edges. `enable` 1 -> 0 sends falling edges
  that reset the chain and the arbiter.
- `ready` = `enable` AND both arbiter inputs high. It rises about one chain
  delay (60-100 ns in the model) after `enable`. From then on r is final.
- `r` and `ready` are asynchronous and must be synchronised by the reader.
- Between measurements, hold `enable` low for at least one chain delay.

## Where the randomness lives: placement and the delay model (`puf_pkg`, `fpga_routing`)

On an FPGA nearly all the delay of such a PUF is in the routing, not in the
LUTs. The balance between the two paths therefore depends on *where* the LUTs
are placed. That is why a random placement gives a new, unlearnable PUF.
`puf_pkg` models this as follows.

**Sites.** A configuration is a 32-bit `LAYOUT_SEED`. A keyed 4-round Feistel
permutation of 0..4095, with cycle walking into 0..1427, maps LUT number k to a
site (x = site mod 84, y = site / 84). PUF j of a configuration uses LUT numbers
132*j .. 132*j+131:

| LUT numbers | used for |
|---|---|
| 2 per stage (130) | the first stage and the 64 challenge stages |
| 1 | the arbiter |
| 1 | the launch cell |

Ten PUFs therefore use 1320 distinct sites of the 1428.

**Nets.** Every connection between two LUTs is a routed net. A stage's two
sources each feed both LUTs of the next stage, so there are four nets per
stage plus two into the arbiter: 262 nets per PUF. `puf_pkg::net_src`,
`net_dst` and `net_pin` give the exact numbering.

**Delay of a net.** The delay is

    250 ps + 30 ps x (Manhattan distance between the two sites)
           + m(output pin of the source) + m(input pin of the destination)

- The first two terms are the routing-induced delay. They are the same on
  every chip with this configuration.
- The m terms are the manufacturing-induced delay. Each is a fixed offset,
  uniform in +/-35 ps, per physical LUT pin of a chip. It is drawn from
  `CHIP_SEED` and the site, so it belongs to the silicon, not to the layout.

These constants are this design's choice. The published measurements are in
dimensionless units. They only show that routing effects are about 30 times
the manufacturing effects. The constants were picked to give that order.

**Simulation.** `fpga_routing` applies these delays as transport delays, one
forked event per edge. It adds 0..1 ps of fresh random jitter to each edge.
Challenges whose two paths are balanced to within a few ps then give noisy
responses, as metastable challenges do in silicon. `fpga_routing` is a
behavioural model and is not synthesizable. On a real FPGA this role is played
by the fabric's interconnect, and the whole placement is expressed in the
place-and-route constraints, not in RTL.

## Why m-challenges, and how the server picks them

Random placement has a cost. The routing imbalance between the two paths is
far larger than the manufacturing variation. Most challenges would give the
same response on every chip with the same layout, which is useless for
identifying a chip.

The fix is to use only challenges for which the routing imbalance happens to
be close to zero: "m-challenges" (m for metastable). The server finds them on
a reference chip that never leaves its lab, in one of two ways:

- It keeps challenges whose response flips when repeated.
- It fits a linear delay model to the reference chip and keeps challenges
  whose predicted delay difference is within a bound. The published bound is
  0.2 against a spread of 6.78, so the ratio is 0.2/6.78 = 0.03 of the spread.

On any other chip with the same layout, the response to an m-challenge is then
decided by that chip's own manufacturing variation.

`tb/puf_ref_pkg.sv` uses the second way. `select_mchallenges` sums the net
delays along both paths for random challenges and keeps those within 0.03 of
the spread. About 4% of random challenges qualify.

## Measuring a fingerprint (`fingerprint_sequencer`)

The host writes up to 100 challenges into a buffer. Then it pulses `start`
with `puf_sel`. For each challenge the sequencer runs one slot of
`T_RESP_CYC` = 1000 cycles:

| cycles | action |
|---|---|
| 0 | challenge onto `puf_c`, enable low |
| 4 .. 503 | `enable` of the selected PUF high |
| 503 | synchronised `r` stored as fingerprint bit k; a missing `ready` sets `err` |
| 504 .. 999 | enable low, chain clears |

`done` pulses 1 + 100 x 1000 cycles after `start`. At 100 MHz that is 10 us per
response and 1 ms per fingerprint, the published rates. The clock frequency
and the split of the slot are this design's choices. Assertions check that at
most one PUF is enabled and that the selection holds during a run.

## Verifying (`fingerprint_matcher`)

The matcher computes the Hamming distance between the template and the
fingerprint and accepts if it is **at most** 12. It registers its result, one
cycle after `valid_in`.

The source text says in prose that the distance must be "smaller than" t. Its
false-acceptance formula, however, sums distances 0..t. Only "at most" gives
the stated false-acceptance rate of 2.4e-5 for n = 100, p = 0.297 and t = 12,
so that reading is used.

In a real deployment this comparison runs on the server, which keeps the
templates secret. It is in the RTL so that a complete round can be simulated.

## Top level (`puf_auth_top`)

`puf_auth_top` holds:

- ten `arbiter_puf` instances, one configuration (`LAYOUT_SEED`), one chip
  (`CHIP_SEED`);
- the sequencer;
- the matcher, which is fed by the sequencer's `done`.

The ports take the place of the processor that relays challenges and
responses: `ch_*`, `start`, `puf_sel`, `fingerprint`. The server's template
enters on `template_fp`. Reconfiguring the FPGA corresponds to elaborating
with another `LAYOUT_SEED`.

## Where this departs from the source design

- **Response polarity.** The prose says the response is 1 when the *upper*
  signal arrives first, and gives the arbiter function as
  "(U AND L) OR (U AND R)". The VHDL listing gives the latch above (1 when
  the *lower* edge wins). The RTL follows the VHDL. The prose expression would
  not arbitrate at all.
- **`ready`.** The VHDL raises ready on the first change of r, which never
  happens when r stays 0. Here ready means "both edges have arrived".
- **Extra LUTs.** The first stage (select tied to 0), the arbiter LUT and the
  launch cell are placed in the region too: 132 sites per PUF, against the
  128 stage LUTs the text counts.
- **Delay numbers, jitter and clock** are this design's own (see above).
  Temperature is not modelled.
- **Sequencer and matcher** implement the described behaviour, but their
  structure, buffer and handshakes are not from the source. There the loop
  runs on the processor and the matching on a server.

## Simulating

All files use `` `timescale 1ps/1fs ``. The testbenches need Verilator 5 with
`--timing`. Example, end-to-end test:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/puf_pkg.sv tb/puf_ref_pkg.sv tb/tb_puf_auth_top.sv --top-module tb_puf_auth_top
    ./obj_dir/Vtb_puf_auth_top

Each testbench prints `TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_puf_mux_stage`, `tb_puf_arbiter` | exhaustive and sequence checks of the stage and the latch |
| `tb_fpga_routing` | per-net delay to 1 fs, jitter range, transport of short pulses |
| `tb_arbiter_puf` | 300+ random challenges on two PUFs: response and the exact time `ready` rises, both against the summed-delay model; also `dc` and reset |
| `tb_fingerprint_sequencer` | fingerprint bits, 100 001-cycle run length, 500-cycle enables, `err` for a dead PUF |
| `tb_fingerprint_matcher` | distance and the 12/13 boundary |
| `tb_puf_auth_full` | the top at its default parameters: enrol and verify all ten PUFs of one chip (about 20 s) |
| `tb_puf_auth_top` | four chips (reference A, enrolled B, impostor C, B with another configuration) over all ten PUFs (about 3 min) |
| `tb_puf_metastability` | 40 repeated fingerprints of one PUF on three chips: fraction of ones per m-challenge, metastable count and noise figure N (about 3 min) |

In the four-chip run the enrolled chip is accepted on all ten PUFs, with a mean
distance of 0.8 bits. The impostor differs by 30.1 bits on average (24-36) and
is rejected, and so is the other configuration. About 50% of the bits are
ones. A few m-challenges flip between repeated measurements on the reference
chip. The published measurements were a mean distance of 1.28 within a chip
and 29.7 between chips.

In the repeated-measurement run, 5 of the 100 m-challenges are metastable on
the reference chip and 1 each on the two other chips, with a noise of 14-19%
per metastable bit. Far fewer of the m-challenges are metastable on the
reference chip than in the published table. There, the m-challenges were found
by repeating challenges on the reference chip. Here they are picked by the
model bound, whose window (about 0.03 of the spread) is much wider than the
jitter.

To change the design:

- `puf_pkg` holds the sizes and the delay model.
- The top's parameters choose the configuration (`LAYOUT_SEED`), the chip
  (`CHIP_SEED`), the jitter and the slot timing.
- `N_PUFS * (2*N_STAGES + 4)` must not exceed 1428. An assertion checks this.
