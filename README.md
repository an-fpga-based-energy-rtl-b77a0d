# Online energy correction for a multiplexed one-to-one SiPM PET detector

A PET detector block of 8 × 8 LYSO crystals, each glued to its own SiPM, gives 64 analog
signals. A resistor network folds them into 8 column (X) and 8 row (Y) signals plus one sum
signal. Only the sum is digitised, so the readout does not know how much energy each crystal
received. That causes two problems:

* Each SiPM saturates in its own way. A single-crystal event can be linearised with that
  crystal's calibration, once the crystal is known.
* A photon that Compton-scatters between two crystals (inter-crystal scatter, ICS) fires two
  X lines and/or two Y lines. The only energy measurement is the sum over both crystals. Each
  crystal's share went through a different saturation curve.

This RTL is the FPGA signal processor for such a detector. For every event it:

1. measures the length of each X and Y discriminator pulse with a multi-phase-clock TDC;
2. decides whether one or two crystals were hit, and which ones;
3. integrates the sum signal into an energy code `k`;
4. corrects `k` into keV with per-crystal parameters `(n, b)`. Single-crystal events use the
   inverted SiPM saturation model. Two-crystal events use a closed-form approximation that
   needs only the two crystals' single-crystal parameters;
5. emits one 32-bit packet with crystal, ICS flag and energy.

The logarithms and reciprocals that the correction needs come from two 4096-entry look-up
tables. Bit shifts bring each argument into table range. A single-crystal result takes 5 clocks
and a two-crystal result takes 10 clocks, at 100 MHz. One FPGA serves 12 detector blocks.

## Signal chain

```
             per detector block (detector_channel), x12 in pet_frontend_fpga
 LED X[8] ──► tdc_channel x8 ─┐   400 MHz, 8 phases          100 MHz
 LED Y[8] ──► tdc_channel x8 ─┴─► sync_2ff ─► position_decoder ──┬── crystal, ICS ──► packager ─► packet
                                      │ (first activity = trigger)  │                     ▲
 ADC 50 Msps ─────────────────────────┴─► energy_integration ─► join ─► energy_correction ─┘
                                                                      (E_RAM, non-ICS pipe,
                                                                       ICS pipe, select)
```

The TDCs run on eight 400 MHz clock phases that are 45° apart. Everything after the
synchronisers runs on one 100 MHz clock. The ADC samples arrive on that clock with a strobe
`adc_valid` on every second cycle. The analog front end is outside this RTL: the resistor
network, the discriminators, the ADC chip, the PLL that makes the clock phases, and the fibre
link to the data acquisition. Their signals are ports of the top module.

## Pulse widths: `tdc_channel`

Eight flip-flops sample the discriminator output, one on each clock phase. At every phase-0
edge, the eight samples of the past 2.5 ns form one word. The width counter adds the number of
ones in each word while the pulse lasts. So the width is the time over threshold in 312.5 ps
bins. It has 12 bits and saturates at about 1.28 µs. A 511 keV pulse lasts more than 200 ns,
which is about 640 bins. The first all-zero word ends the measurement:

* `done_tgl` toggles;
* `width` then holds its value until the next pulse starts.

The 100 MHz side reads `active` and `done_tgl` through two-flop synchronisers. Once the done
edge has been seen, `width` is stable there.

## Which crystal: `position_decoder`

An event opens when any of the 16 TDCs becomes active while the decoder is idle. That same
clock edge triggers the energy integration. The event closes when all TDCs are idle again and
3 more clocks have passed. Every line that finished a pulse in the event counts as a hit. Then
the decoder applies these rules:

| hits X × Y | decision |
|---|---|
| 1 × 1 | single crystal (x, y) |
| 2 × 2 | ICS. The wider X pulse pairs with the wider Y pulse, and the narrower with the narrower. The wider pair is reported as the crystal; the other is the second crystal. |
| 2 × 1, 1 × 2 | ICS along one line. The wider pulse on the two-hit axis gives the reported crystal. |
| 0 on an axis, or ≥ 3 on an axis | rejected: no packet, `n_rejected` counts it |

The pairing rule relies on pulse width growing with deposited energy. Example: hits on X 3 and
5 and on Y 4 and 2, with X 3 and Y 4 the wider pulses. The four candidates are (3,2), (3,4),
(5,2) and (5,4). The decoder reports (3,4) and uses (3,4) and (5,2) for the parameter look-up.

If the two widths on an axis are exactly equal, bit 0 (X) or bit 1 (Y) of a free-running 16-bit
LFSR picks the order on that axis. The pairing is then random. Crystal numbers are
`idx = 8*y + x`.

## Energy code: `energy_integration`

The samples pass a 4-sample delay line, which covers the sync delay and the rise before the
discriminator fired. From the trigger on, the unit sums 16 delayed samples. It subtracts the
`baseline` input from each sample, and negative differences count as zero. The sum is shifted
right by 2 and saturated to 14 bits. With 12-bit samples it stays below the limit. A trigger
that arrives while a window is still open is ignored. `detector_channel` then drops that
event's position, and `n_dropped` counts it. Pile-up is not untangled.

## The correction formulas

Each crystal has two calibration numbers. Its SiPM model is E = n·[ln n − ln(n − b·k)], with
n = ε·N and b = ε·B:

* N is the number of microcells;
* B·k is the number of fired microcells;
* ε converts photons to keV.

Two or more sources calibrate (n, b) per crystal. The numbers are stored as one 32-bit word
per crystal in `E_RAM`: `n` in bits 31:16, `b` in bits 15:0.

### Single crystal: `non_ics_correction` (5 clocks)

```
E = ( n * { L[n >> λ] − L[(n − b·k) >> λ] } ) >> 12,    L[x] = 2^12·ln x
```

One shift λ, chosen from `n`, brings both table arguments below 4096. Because both arguments
get the same shift, the difference of the logarithms does not change.

Number formats. The source sets only the bit widths (n[15:0], b[15:0], k[13:0], E[9:0]);
these formats are this design's choice:

| signal | format |
|---|---|
| `n` | integer, keV |
| `b` | Q0.16, keV per ADC code (the product b·k is shifted right by 16 before the subtraction) |
| `k` | 14-bit integer |
| `E` | 10-bit integer, keV |

The logarithm table has 4096 × 14 bits. The full value 2^12·ln 4095 needs 16 bits, so each
entry keeps only its low 14 bits. That is enough because only the difference of two entries is
used, and it is taken modulo 2^14. The difference is exact while n/(n − b·k) < e^4 ≈ 54.6.

The output saturates: `sat` = 1 and E = 1023 in any of these cases:

* b·k ≥ n;
* the shifted second argument is 0;
* the ratio is ≥ 54;
* E > 1023.

Stages:

| clock | work |
|---|---|
| 1 | multiply b·k |
| 2 | subtract from n |
| 3 | shift both arguments |
| 4 | two table reads |
| 5 | subtract, multiply by n, shift right by 12 |

### Two crystals: `ics_correction` (10 clocks)

The two crystals' energies are assumed equal, and n0 ≈ n1. exp(−x) is approximated by the mean
of 1 − x and 1/(1 + x). With these assumptions the source formula is

```
E = 1 / ( k·(1/b0 + 1/b1) − 1/n0 )  +  1 / ( k·(1/b0 + 1/b1) )
```

Every reciprocal is a read of a 4096 × 20-bit table R[x] = 2^20/x. The argument is shifted
right by λ to bring it into range, and the table output is shifted right by the same λ. The
first three reciprocals carry the scale 2^20. The last two divide it out again, so E comes out
as a plain integer. Here `n0` and `b0` belong to the reported (larger-deposit) crystal and `b1`
to the other one.

Stages:

| clocks | work |
|---|---|
| 1–2 | shift b0 and b1, two table reads |
| 3–4 | shift back and add; table read of n0 |
| 5 | multiply by k |
| 6–7 | subtract 1/n0, shift |
| 8 | two table reads |
| 9–10 | shift back, add, saturate |

The result saturates when k·(1/b0+1/b1) ≤ 1/n0 or the sum exceeds 1023.

**Caution: this unit evaluates the formula exactly as the source prints it. That formula does
not match its own saturation model.** From k_i = n_i·(1 − e^(−E_i/n_i))/b_i, the same two
approximations lead to

```
E ≈ 1/( S/k − 1/n0 ) + k/S,   with S = 1/b0 + 1/b1
```

In this form k divides the sum of reciprocals instead of multiplying it. The printed form is
not consistent in units and falls as k rises. Example: a crystal pair with n = 1200 keV and
b = 0.104 keV/code (stored as 6820), sharing 511 keV, gives k ≈ 4420:

* the printed formula, and so this RTL, returns E = 0;
* the derived form gives 515 keV.

The reported measurements show the ICS peak corrected to 511 keV, so the hardware that produced
them cannot have computed the printed expression on these number formats. The datapath here
follows the printed formula and the block diagram, which agree with each other. To use the
derived form instead, replace the multiplier input `k` by a sixth reciprocal read R[k]. Then
1/(S/k) = k/S, which changes the last stages and the scaling. The testbenches check the
printed formula.

## Selection, ordering and packets

`energy_correction` holds each accepted event for one clock while `E_RAM` reads both crystals
through two read ports. It then issues the event to one pipeline, chosen by the ICS flag.
Results must leave in input order, because `packager` pairs each energy with the oldest crystal
index in its 4-entry FIFO. For that reason, a single-crystal event waits while an ICS event
issued fewer than 5 clocks earlier is still ahead of it; `in_ready` is low meanwhile. With real
event rates (microseconds apart) this never happens. An assertion checks that the two
pipelines never finish in the same clock, and another checks that the packet's crystal matches
the tag carried through the pipeline.

Packet (`pet_pkg::packet_t`, 32 bits, MSB first):

| field | bits |
|---|---|
| `module_id` | 4 |
| `reserved` | 10, zero |
| `ics` | 1 |
| `sat` | 1 |
| `crystal` | 6, `8*y + x` |
| `energy` | 10, keV |

## Top level: `pet_frontend_fpga`

`NMOD = 12` instances of `detector_channel`. Ports:

| port | meaning |
|---|---|
| `clk` | 100 MHz processing clock |
| `clk_ph[7:0]` | the eight 400 MHz TDC phases; phase 0 is the TDC domain |
| `rst_n` | asynchronous reset |
| `led_x[m]`, `led_y[m]` | discriminator outputs of module m |
| `adc_valid`, `adc_data[m]` | shared sample strobe; 12-bit samples of module m |
| `baseline` | ADC pedestal, shared |
| `wr_en`, `wr_module`, `wr_addr`, `wr_data` | host write of (n, b) for crystal `wr_addr` of module `wr_module` |
| `pkt_valid[m]`, `pkt[m]` | packet stream of module m |
| `n_rejected[m]`, `n_dropped[m]` | event counters |

Latency from the end of the last pulse of an event to its packet is about 0.1 µs. The decoder
closes the event about 30 ns after the pulses end. If the integration window is still open, the
event waits for it, at most 16 samples (320 ns) after the trigger. Correction and packaging
take 8 (single) or 13 (ICS) clocks.

## What follows the source and what does not

Taken from the source:

* 8 × 8 crystals per module, 16 TDCs at 400 MHz × 8 phases (312.5 ps), 12 modules and 192 TDCs
  per FPGA;
* the decoding rules and the random choice for equal hits;
* E_RAM of 64 × 32 bits;
* table sizes 4096 × 14 (2^12·ln x) and 4096 × 20 (2^20/x) and the normalising shifts;
* both correction formulas as printed, their datapath structure, and the latencies of 5 and 10
  clocks at 100 MHz;
* the bit widths n, b: 16, k: 14, E: 10.

Choices of this design, where the source is silent:

* the fixed-point meaning of n and b;
* keeping the logarithm modulo 2^14;
* the saturation rules;
* table rounding (log rounded to nearest, reciprocal floored, entries 0 and 1 = 2^20 − 1);
* TDC popcount accumulation and 12-bit width;
* event framing by TDC activity;
* the energy integration window (16 samples, 4 before the trigger, shift right by 2);
* the second E_RAM read port and the host write port;
* the in-order stall, the packet layout and the per-module packet outputs;
* n0 taken from the larger-deposit crystal.

Memory use differs from the source. Each correction unit here owns its tables: two logarithm
tables and five reciprocal tables per detector block, as in the block diagrams. That is about
14 block RAMs of 36 kbit. The source reports 6.5 block RAMs and 3 DSP multipliers per channel.
That suggests dual-ported tables shared between look-ups, which the source does not describe.
The multiplier count matches: b·k and n·Δln for single-crystal events, and k·(1/b0 + 1/b1) for
two-crystal events.

Not built, and left as ports: the resistor multiplexer, the discriminators, the ADC chip, the
clock generator and the fibre link.

The two tables are filled at elaboration by functions in `pet_pkg`: round(4096·ln x) mod 16384
from the double-precision `$ln`, and floor(2^20/x) in integers. A full front end holds 84
tables of 4096 entries, and some synthesis front ends stop their constant evaluation before
filling all of them. In that case, share one copy of each table among the instances, or load
the same values from a memory file built from the two formulas.

## Sizes against the source's configurations

| configuration | needed | built |
|---|---|---|
| Laboratory module: one 8 × 8 LYSO/SiPM block | 64 crystals, 16 TDC channels | one `detector_channel` (64 E_RAM words, 16 TDCs) |
| Front-end board | 12 blocks, 192 TDCs | `pet_frontend_fpga` with `NMOD = 12` |
| Clinical scanner | 32 detector sections and 384 crystals: 6 arrays of 64 | one `pet_frontend_fpga` (12 arrays). If 384 counts arrays (32 sections × 12), one top module per section |
| Energy window 425–650 keV | — | the 10-bit energy reaches 1023 keV |

## Simulation

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`. Build any of them
with Verilator 5, for example the full 12-module system:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/pet_pkg.sv tb/corr_model_pkg.sv tb/tb_pet_frontend_fpga.sv \
    --top-module tb_pet_frontend_fpga -o sim && obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_l_rom`, `tb_r_rom` | every table entry against `$ln` and division |
| `tb_e_ram` | power-up clear, writes, both read ports |
| `tb_non_ics_correction`, `tb_ics_correction` | random streams, bit-exact against `corr_model_pkg`; against the real-valued formulas within table precision; exact 5- and 10-clock latency |
| `tb_energy_correction` | mixed streams, in-order results, latency, the ordering stall |
| `tb_tdc_channel` | random pulse widths within one 312.5 ps bin, saturation |
| `tb_position_decoder` | all hit patterns, the example above, rejection, random pairing on ties |
| `tb_energy_integration` | window alignment and k for both trigger phases, k_valid timing |
| `tb_packager` | FIFO pairing, full flag, packet fields |
| `tb_detector_channel`, `tb_pet_frontend_fpga` | end to end with a behavioural detector (`module_stim`), listed below |
| `tb_na22_spectrum` | one module under a simulated 22Na source: 511 keV photopeak with 9 % resolution, LYSO lines at 202 and 307 keV, scatter events. Corrected peak position, share inside the 425–650 keV window, LYSO lines; prints the spectra |

In the two end-to-end tests, `module_stim` makes:

* discriminator pulses of 100 ns + 0.5 ns/keV;
* a sum pulse whose integral follows the saturation model of the crystals hit.

The tests check that single-crystal events come out within 2 % + 3 keV of the deposited
energy, and that every packet matches the reference model. They also check that each of these
cases occurs: two-crystal events across two lines and along one line, equal deposits, rejected
three-crystal events and pile-ups.
