# iRDVS AES-256: an encryption pipeline on independently, randomly scaled voltage islands

A power side-channel attack recovers a key by lining up many power traces of
the same operation and looking for a correlation with guessed key bits.
Dynamic voltage scaling (DVS) disturbs that in two ways. It changes the
amplitude of the power, which goes roughly as V², and it changes the timing,
because gates slow down at low voltage. But a single random supply can be
estimated and undone, and an attacker can sort traces into groups that saw
the same voltage. *Island-based random DVS* (iRDVS) splits the logic into
islands and feeds them from several independent, randomly set supplies. The
power seen at the pins is then a sum of pieces, each scaled and stretched
differently, and the number of voltage combinations grows combinatorially.
An analysis of the approach (Chen, Goins, Waugaman, Dimou and Beerel) found
that clustering traces by voltage still breaks one to three independent
voltages, but not four.

This repository holds synthesizable SystemVerilog for the AES-256 iRDVS core
of that work's test chip. It also holds a behavioural model of how supply
voltage sets island delay, and self-checking testbenches.

## The pipeline

AES-256 has 14 rounds. In this core, every round is one voltage island:

```
 pt ──► ⊕ rk0 ─► [stage 0: R1 R2] ─► [stage 1: R3 R4] ─► … ─► [stage 6: R13 R14*] ─► ct
                      ▲  ▲               ▲  ▲                        ▲  ▲
                 island 0 1          island 2 3                 island 12 13
                      │                  │                           │
             domain select (island_domain_map) ── 4 power domains (V0..V3)
```

A plain round pipeline would put a register after every round. Here every
other register is transparent, so the core has **seven stages of two rounds
each**. Each stage carries two islands. `R14*` is the last round, which has
no MixColumns. The plaintext is XORed with round key 0 on entry.

Several encryptions are in the pipeline at once, up to seven, in different
rounds and usually on different supplies. That is the point of the design.
If encryptions ran one at a time, only one island would draw power at a time,
and the islands could not hide one another.

## Flow control: why the stages need handshakes

If the voltages of the islands are random, a stage's delay is random too. A
globally clocked pipeline would have to be timed for the slowest case. The
silicon instead uses asynchronous logic, with handshake channels between
stages. This RTL models those channels as **valid/ready channels** in one
clock domain:

* A word moves from one stage to the next at a clock edge where `valid` and
  `ready` are both high.
* A stage that has taken a word is *busy* for `max(delay,1)` clock edges.
  `delay` is the stage's completion time, sampled when the word is taken.
  The stage then shows the result as valid.
* If the next stage cannot take the result, the stage *stalls*. It holds the
  result, unchanged, until the next stage takes it. Assertions in
  `irdvs_stage` check this rule on both sides of the stage.
* A stage takes its next word in the same cycle as it hands its result on.
  Its best throughput is therefore one word every `delay + 1` cycles. The
  slowest stage sets the pace of the whole pipeline, and faster stages stall
  behind it.

With an empty pipeline and no backpressure, the ciphertext becomes valid
`Σ_s max(d_s,1) + 6` edges after the edge that took the plaintext. The `+6`
is the six hand-offs between the seven stages.

The busy counter stands in for asynchronous completion detection. It is
where this RTL departs furthest from the silicon. What it keeps is the
property that matters for the design: stages finish at different,
voltage-dependent times, and the flow control absorbs the difference.

## Voltage islands, domains and configurations

There are 14 islands but only **four power domains**. `island_domain_map`
chooses which domain feeds each island. Island *i* computes round *i+1*.

| `cfg_i` | meaning | island → domain |
|---|---|---|
| `CFG_CONSTANT` (0) | one supply, fixed at 0.8 V | all → 0 |
| `CFG_DVS` (1) | one supply, random 0.6–0.8 V per batch | all → 0 |
| `CFG_ADJACENT` (2) | four random supplies, neighbours share one | `floor(4i/14)`: groups of 4, 3, 4, 3 |
| `CFG_ALTERNATING` (3) | four random supplies, interleaved | `i mod 4` |

These four cases are the ones that were measured on the chip. The exact
island groupings for *adjacent* and *alternating* are not documented. The
ones above are this design's reading of the names.

The supply voltages come from outside the core (`dom_vcode_i`, one 3-bit
code per domain, V = 0.6 V + 0.1 V × code, codes 0–4). The same holds on the
test chip: on-die voltage generation and a true random number generator were
left for future work.

### The delay model

Delay depends on voltage through an analog effect, so `island_delay_model`
is a **behavioural model**, not chip logic. It uses the Sakurai–Newton
alpha-power law, τ ∝ V / (V − V_T)^α with α = 2. Each island's delay is
scaled from `BASE_CYCLES` at 1.0 V and rounded up to whole cycles:

```
cycles(V) = ceil( BASE_CYCLES · (V / 1.0) · ((1.0 − V_T) / (V − V_T))² )
```

With the defaults (V_T = 300 mV, `BASE_CYCLES` = 4):

| V (V) | 1.0 | 0.9 | 0.8 | 0.7 | 0.6 |
|---|---|---|---|---|---|
| island delay (cycles) | 4 | 5 | 7 | 9 | 14 |

A stage's delay is the sum of its two islands, so 8 to 28 cycles. The model
is written in integer millivolt arithmetic, so it elaborates and synthesizes.
It stands for what the supplies do to the silicon, however. A netlist for a
real chip would drop it, and the stage's completion would come from the
asynchronous handshake.

V_T and the cycle scale are not given by the source and are assumptions.
Both are parameters.

## Key handling

`aes256_key_expand` runs the standard FIPS-197 schedule for 8-word keys:

* Round keys 0 and 1 are the two halves of the key.
* One further round key (four words) is computed per clock from a sliding
  window of the last eight words.
* `keys_valid_o` rises 13 cycles after the key is taken.

The 15 round keys are held in registers, and each stage reads its two.
The core takes a key only when the pipeline is empty (`key_ready_o`), so
round keys never change under an encryption in flight. An assertion in the
top checks this. Plaintexts are accepted only while `keys_valid_o` is high.
The source does not describe how keys are loaded, so all of this is this
design's choice.

## Modules

| file | what it is |
|---|---|
| `rtl/irdvs_pkg.sv` | sizes (14 rounds, 7 stages, 4 domains), types, configuration enum; GF(2^8) arithmetic, computed S-box, SubBytes / ShiftRows / MixColumns |
| `rtl/aes_round.sv` | one round = one island (combinational) |
| `rtl/irdvs_stage.sv` | two rounds, input register, busy counter, valid/ready on both sides, stall |
| `rtl/aes256_key_expand.sv` | key schedule, one round key per cycle |
| `rtl/island_domain_map.sv` | island → domain for each configuration |
| `rtl/island_delay_model.sv` | behavioural voltage-to-delay model |
| `rtl/irdvs_aes256_core.sv` | top: all of the above wired into the core |

### Top-level ports (`irdvs_aes256_core`)

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (empties the pipeline) |
| `key_valid_i` / `key_ready_o` / `key_i` | in/out/in | 1/1/256 | key load; first key byte in `[255:248]` |
| `keys_valid_o` | out | 1 | round keys ready |
| `pt_valid_i` / `pt_ready_o` / `pt_i` | in/out/in | 1/1/128 | plaintext channel |
| `ct_valid_o` / `ct_ready_i` / `ct_o` | out/in/out | 1/1/128 | ciphertext channel, in order |
| `cfg_i` | in | 2 | island configuration |
| `dom_vcode_i` | in | 4 × 3 | voltage code of each domain |
| `stage_busy_o`, `stage_stall_o` | out | 7 | per-stage status |
| `island_delay_o` | out | 14 × 8 | modelled island delays (observation only) |

Byte order follows FIPS-197 throughout. The first byte of a block is in the
most significant bits, and state byte r + 4c is row r of column c.

## How far to trust it, and where it departs from the silicon

Followed from the design description:
* AES-256 with seven stages of two rounds.
* One island per round.
* Flow control between stages of unequal delay.
* Four independent power domains.
* The four measured configurations.
* Voltage levels 0.6–1.0 V in 0.1 V steps.
* The alpha-power delay law with α = 2.

Choices of this implementation:
* Synchronous valid/ready channels and a busy counter in place of
  asynchronous handshakes and completion detection.
* The adjacent and alternating groupings.
* V_T = 0.3 V and 4 cycles per round at 1.0 V.
* The key-load protocol and an expand-once key schedule.
* A computed rather than tabulated S-box.
* Reset values.

Not modelled at all:
* Power consumption. This RTL shows *when* each island computes, not how
  much current it draws, so leakage tests cannot be run in simulation.
* Voltage generation and the random number generator that would drive it.
* The control processor that feeds the core on the chip.
* The synchronous and unprotected asynchronous AES variants that shared the
  chip as references.

Nothing enforces the rule that the voltages be chosen so that all stages
take roughly the same time. That is the job of whatever sets `dom_vcode_i`.

## Verification

Each module has a self-checking testbench in `tb/`. The reference is
`tb/aes_ref_pkg.sv`, an AES-256 written separately. It works on byte arrays
and uses the FIPS-197 S-box as a lookup table (`tb/aes_sbox.hex`), whereas
the RTL computes the S-box. The reference reproduces the FIPS-197 AES-256
example: key `00…1f`, plaintext `00112233…ff`, ciphertext
`8ea2b7ca516745bfeafc49904b496089`.

* `tb_aes_round` checks the 14 rounds of the FIPS example and 2000 random
  rounds.
* `tb_aes256_key_expand` checks all round keys of the FIPS keys and 20
  random keys, the 13-cycle expansion, and that a key offered during an
  expansion is ignored.
* `tb_irdvs_stage` uses random delays and random downstream ready. It checks
  data, exact latency `max(delay,1)`, and results held during stalls.
* `tb_island_domain_map` checks the four configurations against
  hand-written tables.
* `tb_island_delay_model` applies all 4096 domain voltage codes and checks
  island and stage delays against the hand-computed table above.
* `tb_irdvs_aes256_core` is the end-to-end test at full size. The core has
  no parameters. First it runs the FIPS example alone, checking the
  ciphertext and the exact empty-pipeline latency. Then it runs 16 batches
  of 32 encryptions, in the style of a fixed-vs-random leakage test: the
  plaintext of interest, fixed or random, sits in the middle of 31 random
  ones. The batches cycle through all four configurations with fresh random
  voltages each time, and there is a key change while encryptions are in
  flight. All 513 ciphertexts are checked in order. The testbench counts,
  and requires at least once: stalls between stages, output backpressure,
  held-off plaintexts, overlapping encryptions, batches with unequal stage
  delays, every configuration, voltage changes, and a key load held off by
  a busy pipeline.

* `tb_tvla_batches` runs the four measured cases as 24 batches of 32
  encryptions each. Plaintexts are always offered and ciphertexts always
  taken. Each batch must last exactly `Σ d_s + 6 + 31·(max d_s + 1)` cycles,
  with `d_s = max(delay,1)`: the first word crosses the empty pipeline, and
  then the slowest stage releases one word every `max d_s + 1` cycles. The
  constant case always takes 569 cycles, and DVS takes one of three times.
  Under iRDVS, batch times spread from about 450 to about 1100 cycles, and
  the slowest stage decides the time. The same effect is why the measured
  power traces of a batch varied several-fold in length.

To simulate with Verilator (the package first, then the module files, the
reference package and the testbench):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/irdvs_pkg.sv rtl/aes_round.sv rtl/irdvs_stage.sv rtl/aes256_key_expand.sv \
  rtl/island_domain_map.sv rtl/island_delay_model.sv rtl/irdvs_aes256_core.sv \
  tb/aes_ref_pkg.sv tb/tb_irdvs_aes256_core.sv --top-module tb_irdvs_aes256_core
./obj_dir/Vtb_irdvs_aes256_core
```

Run it from the repository root, because the S-box table is read by the
relative path `tb/aes_sbox.hex`. Each testbench ends with a line
`TB_RESULT checks=N failures=M`. The full-size core test runs in well under
a second.

To change the timing behaviour, edit `VT_MV` and `BASE_CYCLES` of
`island_delay_model`. To change the island groupings, edit
`island_domain_map`. The flow control works for any delays, so the stages
need no change.
