# An RNS analog matrix-vector core with redundant-residue error correction

Analog matrix-vector multiplication (MVM) is cheap in energy, but its precision is bounded by the
data converters. A 128-element dot product of 6-bit numbers has 18 significant bits, and an ADC
with 18 bits of resolution is far too slow and costly to sit at every output of an analog array.
This design removes that bound with a residue number system (RNS). Every integer is split into its
remainders modulo a few co-prime moduli of about 6 bits. The MVM is then run separately for each
modulus, and each result is read back modulo that modulus. A 6-bit ADC per output therefore loses
nothing: the Chinese remainder theorem (CRT) puts the full-precision result back together
from the 6-bit residues.

The same structure makes the core fault tolerant. Extra (redundant) moduli add residues that carry
no new information when everything is right. When one residue is wrong, the sets of residues
disagree, and a majority vote over them finds and removes the error. If an error cannot be
corrected, the core repeats the MVM.

The RTL below implements this core end to end. It covers:

- forward conversion;
- N+K parallel modular MVM units;
- CRT reverse conversion inside a majority-logic RRNS decoder;
- a controller that retries;
- bit-accurate behavioural models of the two analog modulo circuits the design is built around: an
  optical phase-shifter cascade and an electronic ring oscillator.

## Number system

| Symbol | Meaning | Default |
|---|---|---|
| `BW` | bits of the signed integer weights and inputs | 6 |
| `H` | MVM size (H×H weights, H inputs, H outputs) | 128 |
| `N` | non-redundant moduli | 4: {63, 62, 61, 59} |
| `K` | redundant moduli | 2: {55, 53} |
| `M` | product of the N moduli | 14,295,222 ≈ 2^23.8 |
| `M_L` | smallest product of any N of the N+K moduli (the legitimate range) | 61·59·55·53 = 10,491,085 |
| `ψ_L` | largest magnitude that can be represented, (M_L−1)/2 | 5,245,542 |
| `MAX_ATTEMPTS` | maximum number of times one MVM is run (0 = until clean) | 2 |

Signed numbers are stored as their residues modulo each m_i, with negative numbers taken modulo
m_i into [0, m_i). A dot product of H signed BW-bit values is at most H·2^(2BW−2) = 131,072 in
magnitude at the defaults, well inside ±ψ_L. No intermediate overflow can alias, so every output
is exact integer arithmetic.

The CRT result lies in [0, M). Results above ψ are read as negative (x − M). This puts zero in the
middle of the range and keeps the signed mapping symmetric.

All moduli must be pairwise co-prime. A value is recovered from any N residues only if it lies
below the product of those N moduli. The range the code can protect, the legitimate range M_L, is
therefore the *smallest* product of any N of the N+K moduli. Textbook RRNS codes pick redundant
moduli larger than the others, so that M_L equals M. Here every residue is meant to fit the same
6-bit converters, and no number co-prime to the set lies between 63 and 64. The redundant moduli
are therefore the next co-prime values below the set, 55 and 53. This shrinks the range to
M_L ≈ 2^23.3, which is still far above the 18 bits a dot product needs. 62 is the only even
modulus; the set for the ring-oscillator units (below) is the all-odd {63, 61, 59, 55 | 53, 47}.

Other precisions are set through `BW` and `MODULI`:

| Precision | Moduli |
|---|---|
| 4 bit | {15, 14, 13, 11} |
| 5 bit | {31, 29, 28, 27} |
| 7 bit | {127, 126, 125} |
| 8 bit | {255, 254, 253} |

Only the 6-bit set has been simulated.

## Dataflow and timing (`rns_analog_core`)

```
 w_data/x_data ─► fwd_conv ─► x_hold ─► analog_mvm_unit[0..N+K-1] ─► y_hold ─► rrns_decoder ─► y_data
   (signed)       (residues)            (one per modulus, H×H,          (6-bit        (15 CRTs +      y_corrected
                                          modular, with ADC)             residues)     vote)          y_error
                          ▲                                                                 │
                          └──────────────── rns_core_ctrl (retry on any detected lane) ◄────┘
```

1. **Weights.** A row handshake on `w_valid`/`w_ready` carries `w_row` and `w_data`. It passes
   through the same forward converter and is written into row `w_row` of every unit, as that unit's
   residues. Rows can be reloaded at any time the core is idle.
2. **Inputs.** The `x_valid`/`x_ready` handshake starts one MVM. The input vector is converted
   once and held in `x_hold` for every attempt.
3. **Analog MVM.** All N+K units run at the same time. Each one:
   - multiplies its weight residues by the input residues;
   - reduces every row sum modulo its own modulus in the analog domain;
   - digitises the result with a ⌈log2 m_i⌉-bit ADC.
   The core waits until every unit has delivered (`got` flags) and registers all residues in
   `y_hold`.
4. **Decode.** The `rrns_decoder` returns a signed value per lane with two flags:
   - `y_corrected`: some residue of that lane was wrong and has been outvoted;
   - `y_error`: the lane could not be decoded.
5. **Retry.** If any lane could not be decoded and fewer than `MAX_ATTEMPTS` runs have been made,
   the controller repeats steps 3–4 with the same held input. Otherwise it raises `y_valid` for
   one clock. A lane still flagged in `y_error` then holds an unreliable value, and the host
   decides what to do with it.

**Latency.** With the optical units (`LATENCY = 2`), `y_valid` is high 8 rising clock edges
after the edge that accepts the input:

| Clocks | Step |
|---|---|
| 1 | accept into the forward converter |
| 1 | forward conversion |
| 1 | issue to the units |
| 3 | analog MVM + ADC (`LATENCY + 1`) |
| 2 | decode |

Each retry adds the analog and decode part again. The electronic units take as long as the ring
oscillator needs, A·t_prop, plus a few clocks of synchronisation.

**Throughput.** There is one MVM in flight at a time. The design favours clarity over overlapping
successive MVMs.

The residue-error inputs `err_mask[i]` and `err_offset[i]` add `err_offset[i]` modulo m_i to every
output lane of unit i whose bit is set. They exist for testing and are tied to 0 in use.

## The RRNS decoder: what it corrects and what it cannot

With N+K residues, any N of them are enough to reconstruct a value in the legitimate range. The
decoder forms all G = C(N+K, N) groups of N residues: 15 at the defaults. It reconstructs each group
with its own CRT (`crt_unit`, combinational) and compares the 15 results.

- **No error.** All 15 results agree.
- **One wrong residue.** It spoils every group that contains it. The C(5,4) = 5 groups that avoid it
  still agree on the true value. The spoiled groups usually give values outside ±ψ_L, which cannot
  come from a real result, and they give no vote.
- **Rule.** A value is accepted when at least `THRESH = C(N+K−⌊K/2⌋, N)` groups agree: 5 at the
  defaults. This corrects up to ⌊K/2⌋ wrong residues per lane.
- **Two wrong residues (K = 2).** Only one group is clean, so nothing reaches 5 and the lane is
  flagged for a retry. That is the intended behaviour.

**Miscorrection.** A code with K = 2 has minimum distance 3, so two errors can occasionally push
the codeword close to a *different* legitimate value. Five groups then agree on a wrong value,
and the lane is accepted with `y_corrected` set. In a random test about 5% of two-error
codewords were miscorrected and the rest were detected. More redundant moduli make this rarer.
Set `K = 4` for two-error correction, after choosing two more co-prime moduli.

**Departure from the usual description.** Majority-logic RRNS decoding is often described as "more
than half of the groups agree". With K = 2 a single error leaves only 5 of 15 groups clean, so that
rule would correct nothing. The threshold above is the one that achieves the ⌊K/2⌋ correction
capability, and it is the parameter default. `THRESH` can be overridden.

**Cost.** The decoder holds G·H CRT units, each a few multiplications by constants and a modular
sum: 1,920 at the defaults. It is pipelined over 2 clocks. A Garner-style, or
syndrome-plus-lookup, decoder would be much smaller; this one is chosen because it is easy to
check.

## Analog modular MVM units (`analog_mvm_unit`)

A unit stores H×H weight residues and, on `x_valid`, computes for every row r
`|Σ_c w[r][c]·x[c]|_m` and registers it through the ADC model. Digital code cannot do the analog
modulo itself, so the unit instantiates one of two behavioural circuit models, chosen by the
`TECH` parameter.

### Optical: phase-shifter cascade (`ps_modular_dot`)

Light passes through a chain of phase shifters. Weight element w_i is written in binary, and its
digit j switches in a phase-shifter pair of length 2^j·L. The input x_i is applied as a voltage
proportional to x_i·2π/m. The total phase picked up is therefore (2π/m)·Σ w_i x_i. Phase wraps at
2π, which is exactly the modulo m. Reading the phase and scaling by m/2π gives the residue.

- **What the model adds.** It computes the real-valued phase of every shifter, wraps the sum and
  rounds the readout. This checks the geometry (the 2^j lengths, the voltage scale) rather than
  assuming the result.
- **Voltage scale.** The voltage is chosen so that each shifter adds (2π/m)·2^j·x_i. A formula for
  the voltage that also carries a 1/(πL) factor does not produce that phase, and is not used.
- **Size.** The cascade model has 2 elements of 3 digits by default. In the unit it is sized to H
  elements of RW digits.

### Electronic: ring oscillator (`ro_modulo` + `ro_sampler`)

A ring of N = m inverters oscillates. At any moment exactly one inverter has its input equal to its
output, and that position moves one step every inverter delay t_prop. The ring therefore counts
modulo m on its own. A voltage-to-time converter turns the analog dot product A into a window
A·t_prop. The sampler (`ro_sampler`, synthesizable) reads the ring state at both ends of the window,
and the difference is |A|_m.

- **Model.** `ro_modulo` models the ring exactly but lazily: the node values at any time are
  computed from the elapsed number of steps, so a long window costs no simulation events.
- **Even moduli.** A ring with an even number of inverters latches instead of oscillating, so
  `ro_modulo` stops with an error for even N. Cores with `TECH = TECH_ELECTRICAL` must use an
  all-odd moduli set, such as `MODULI_6B_ODD_RRNS` = {63, 61, 59, 55 | 53, 47}.
- **Handshake.** The unit passes the row sum to each row's ring and starts the conversion. It
  synchronises the `done` flags back into the clock domain, and masks stale flags for a few clocks
  after each start.

### What is not RTL

The DACs, the analog multiply-accumulate array, the photodetectors and the ADC front ends are
physical circuits. The models represent them as ideal: exact products, rounding readout and an
ADC that returns the residue. Analog noise is represented only by the injected residue errors.
The models use `real` arithmetic and `#` delays, and are not synthesizable. Each says so in its
opening comment.

## Controller (`rns_core_ctrl`)

| State | What happens |
|---|---|
| IDLE | Accept a weight row or an input; weights have priority. |
| CONV | Wait one clock for forward conversion. |
| ISSUE | Start all units. |
| WAIT | Wait for all units, then start the decoder. |
| DEC | On the decoder result, retry or finish. |

A retry happens when any lane is flagged and `attempt < MAX_ATTEMPTS`, or always when
`MAX_ATTEMPTS = 0`. The output `attempt` counts runs of the current MVM from 1. Two assertions
check that:

- `y_valid` never coincides with a retry;
- `attempt` never exceeds `MAX_ATTEMPTS`.

## Around the core: left to the host

The core computes exact signed integer MVMs of size H×H. Several things are left to the host:

- Scaling FP32 tensors into BW-bit integers (per-row or per-block maximum).
- Accumulating partial sums when a layer is wider than H.
- Rescaling the results to FP32.
- Non-linear functions.

A layer of any size runs as a sequence of H×H tiles. Extending the range with a carry residue
between tiles (an "extended RNS" that chains cores for results wider than M_L) is not built.

## Departures from the published architecture

1. **Decoding threshold.** A value needs C(N+K−⌊K/2⌋, N) agreeing groups, not a majority of all
   groups (see the decoder section).
2. **Redundant moduli and range.** The redundant moduli {55, 53} are this design's choice. They are
   smaller than the others, so the protected range is 61·59·55·53 rather than the product of the
   four non-redundant moduli.
3. **Code size.** K = 2 and MAX_ATTEMPTS = 2 are chosen from the evaluated range (k = 1, 2, 4;
   one, two or unlimited attempts). Both are parameters.
4. **Ring-oscillator moduli.** Even ring lengths do not oscillate, so ring-oscillator cores use the
   odd set {63, 61, 59, 55 | 53, 47}.
5. **Phase-shifter voltage.** The drive voltage is the one that yields the stated total phase
   (2π/m)·Σ w_i x_i.
6. **Not built.**
   - FP32 scaling, partial-sum accumulation and non-linear functions are left to the host.
   - The range-extending carry residue is not built.
   - The DAC, ADC and analog multiply-accumulate circuits appear only as ideal behavioural models.
7. **Not in the published description.**
   - weight loading one row at a time;
   - the handshakes;
   - the two-stage decoder pipeline;
   - the residue-error injection ports.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. Each compares against an independent model written
differently from the RTL:

| Testbench | What it checks |
|---|---|
| `tb_fwd_conv` | random and boundary signed values, all moduli |
| `tb_crt_unit` | random signed values in ±ψ, round trip through residues |
| `tb_rrns_decoder` | clean, 1-error (must correct), 2-error (must detect or, rarely, miscorrect) codewords against a search-based reference decoder |
| `tb_ps_modular_dot` | exhaustive 3-digit operands for several moduli |
| `tb_ro_sampler`, `tb_ro_modulo` | ring state decoding, all residues, latency A·t_prop + 2·t_setup |
| `tb_analog_mvm_unit` | H = 16, optical (m = 62) and electronic (m = 61) units, against a reference MVM, including error injection |
| `tb_rns_core_ctrl` | handshakes, retry limit, priority of weight writes |
| `tb_rns_analog_core` | end to end at H = 8 with both technologies: clean MVMs, single-unit errors (corrected), two-unit errors on the first attempt only (retried), persistent two-unit errors (flagged), weight reloads, refused inputs while busy; counts each mechanism and requires each to occur |
| `tb_rns_analog_core_full` | the top at its defaults (H = 128, optical, K = 2); loads all 128 rows and runs a clean MVM (latency 8 checked), a corrected MVM and a retried MVM |

**Size limits.** At the default size the simulation is dominated by compilation. The decoder
unrolls into 1,920 CRT units, and each analog unit has 128×128 multipliers. Verilator's C++ build of
`tb_rns_analog_core_full` takes about 12 minutes on one core; the simulation then finishes in
seconds.

The largest configurations checked routinely are:

- H = 8 for the whole core (`tb_rns_analog_core`, which builds in under a minute);
- H = 16 for a single analog unit.

The default H = 128 core was simulated end to end with `tb_rns_analog_core_full`, and all 390
checks passed. The testbench is kept, but a fresh build makes it much slower than a normal
regression run.

### Simulating

With Verilator 5 (the package must come first):

```
verilator --binary --timing --assert -Irtl rtl/rns_pkg.sv tb/tb_rns_analog_core.sv --top tb_rns_analog_core
./obj_dir/Vtb_rns_analog_core
```

Replace the testbench name for any other block. Each testbench ends with `$finish`, and has a
watchdog that fails the run if it hangs.

## Changing the design

- **Precision.** Set `BW` and `MODULI`, with N and K to match. Keep the moduli pairwise co-prime and
  the redundant ones smallest. Make sure H·2^(2BW−2) ≤ ψ_L. The package functions (`min_group_range`,
  `out_width`, `residue_width`) size every bus from these values.
- **Fault tolerance.** Set `K` (with `THRESH` following it) and `MAX_ATTEMPTS`.
- **Technology.** Set `TECH = TECH_ELECTRICAL` with an all-odd moduli set.
- **Different analog circuit.** Replace `analog_mvm_unit`, keeping its handshake (`x_valid` in,
  `y_valid` out, then the H residues). The rest of the core is independent of how the modulo is
  done.
