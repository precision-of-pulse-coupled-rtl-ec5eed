# Pulse-coupled oscillator synchronization for FPGA radios

A group of radio nodes has no shared clock. Each node keeps time with its own
oscillator, and the nodes try to fire at the same moment. Each node has a phase
that runs from 0 to 1 and starts over. When the phase reaches 1, the node
"fires" and may send a short radio packet, which acts as a pulse. A node that
hears a pulse moves its own phase to a new value H(φ). H is the phase
response function of the synchronization algorithm in use. After a few
periods, the firings of all nodes line up. The precision Γ is the largest
phase distance between any two nodes.

This RTL describes one node. It has four parts:

* The oscillator: a 22-bit phase register clocked at 40 MHz, so one period
  is 2^22 cycles = 104.86 ms.
* The synchronization algorithm: a refractory check and one of four
  response functions.
* A BPSK transmitter that sends a 12-byte packet, 19.2 µs long, as the
  pulse.
* A receiver that detects that packet: gain control, carrier offset
  removal, and a sync-word correlator.

The node's ports carry the intermediate-frequency (IF) sample streams. The
analog front end sits outside the node: DAC/ADC, 2.4 GHz mixers,
amplifiers and the antenna switch.

The default algorithm is IES\*. It uses inhibitory and excitatory coupling,
a stochastic pulse emission, and two corrections: one for the mean
propagation delay and one for the board's clock rate. PS, SISA and plain IES
are also built in and can be selected with a parameter.

```
            tx trigger                                                       tx_i/tx_q
 ┌──────────┐ ───────► packetizer/modulator ─► interpolator ─► upconverter ─────────────►
 │oscillator│                                                                 (to the RF part)
 │ counter  │◄── upd, H(φ) ──┐
 │ + offset │                │
 │ + c_i    │── φ ──► sync algorithm ◄── sync detected ── correlator ◄── downconverter ◄── AGC ◄── rx_i/rx_q
 └──────────┘                                                        + CFO loop
```

## Contents

1. The phase as a sum of three registers
2. Response functions and refractory intervals
3. What the IES formulas do to two nodes
4. Stochastic pulses and the IES\* quiet window
5. The pulse on air: packet and transmitter
6. Receiver: AGC, carrier loop, correlator
7. Delays and the value of τ
8. Rate correction c_i
9. Parameters
10. Verification and measured precision
11. Departures and open points
12. Simulating and changing the design

## 1. The phase as a sum of three registers

The oscillator (`oscillator.sv`) never loads its phase directly. The phase is
the sum, modulo 2^22, of three registers:

| register | module | behaviour |
|---|---|---|
| counter | `phase_counter` | +1 every clock |
| offset accumulator | `offset_accumulator` | on an update, adds `H − phase` |
| rate correction | `rate_corrector` | adds c_i every clock; its integer part is used |

To move the phase to H, the offset accumulator adds the difference between H
and the present phase. The counter itself keeps running freely. The next cycle
shows `H + 1`.

A phase in [0, 1) is held as an unsigned count, with φ = count · 2^-22.
Scaling by 2^22 and 2^-22 is only a change of interpretation, so it costs
no logic.

**Reaching 1.** The sum wraps through 2^22 in one of two ways:

* the counter plus the correction rolls over;
* an update pushes the phase through 1.

The oscillator keeps the "base" of the coming step: the present phase, or H
if an update was accepted. It raises `fire` when the new phase is smaller
than that base. H has one integer bit (it is 23 bits wide). An update with
H ≥ 1 therefore also counts as reaching 1.

This matters for PS, whose response is always 1 once the excitation
saturates. That node must fire at once, not wait for its next wrap.

`fire` is high for exactly the one cycle in which the phase holds its
wrapped value.

## 2. Response functions and refractory intervals

`sync_algorithm.sv` is combinational. When the correlator reports a sync
word, the block looks at φ:

* If φ lies in the refractory interval [0, φ_ref], the reception is ignored.
* Otherwise it raises `upd` and presents H(φ). The oscillator takes that
  value in the same cycle.

Delays are in clock cycles. Since the phase is counted in cycles, h(τ) = τ.

| ALGO | H(φ) | φ_ref |
|---|---|---|
| PS | min(1, e·φ + 1) | 2(1+ν_max)·τ_max → 1777 |
| SISA | 1.5·φ mod 1; at φ = 1 the phase is set to H(1) = ½ | H(1) + 2(1+ν_max)·τ_max → 2^21 + 1777 |
| IES | H̃(φ − τ_min mod 1) + τ_min | (1+ν_max)·τ_max → 889 |
| IES\* | H̃(φ − τ̄ mod 1) + τ̄ | (1+ν_max)·τ_max → 889 |

The shared map H̃ is piecewise linear:

* H̃(x) = a(x − τ_max) + τ_max for x ≤ ½
* H̃(x) = b(x − 1) + 1 for x > ½

with

* a = (¼ − 2τ_max − τ_min) / (½ − τ_max)
* b = ½ + 2τ_min − 2τ_max

The delay values are τ_min = 868, τ_max = 888 and τ̄ = 877 cycles. These are
21.7, 22.2 and 21.92 µs, and ν_max = 6 ppm.

**Fixed point.** The constants a, b, e and 1.5 are unsigned, with 24
fraction bits. They are computed at elaboration from the delay parameters,
so changing a delay changes the constants. The products are done in 64-bit
arithmetic and truncated to whole counts. The refractory bounds are
rounded up to whole counts: (1 + 6·10^-6)·888 = 888.005 becomes 889.

**SISA self-adjustment.** When a SISA node reaches 1, the algorithm itself
asserts an update with H = ½ in the firing cycle. So a SISA node runs from
½ to 1. Its cycle is therefore half a counter period: 2^21 cycles, or
52.43 ms, at the default 22-bit phase.

## 3. What the IES formulas do to two nodes

This section matters most for anyone who wants to reproduce sub-microsecond
precision with IES or IES\*.

The response functions are built exactly as written above. Take two nodes,
A ahead of B by δ counts, and let the delay be τ. Then:

* **B hears A.** B hears A's pulse τ after A fired. If δ < τ, B has already
  fired by then, so B's phase is τ − δ. That lies inside B's refractory
  interval, and B does nothing.
* **A hears B.** A hears B's pulse at phase δ + τ. That lies outside A's
  refractory interval. With the delay compensation, x = δ, and A moves to
  H̃(δ) + τ. So A's new lead over B is δ' = a·δ + (1 − a)·τ_max.

With 0 < a < 1 (a ≈ 0.5), this map pulls δ towards τ_max, not towards zero.
Once δ ≈ τ_max:

* A's corrections stop moving it;
* B's receptions stay refractory.

The pair therefore settles about τ_max = 888 counts (22 µs) apart.

With the paper's own values, the refractory interval never removes this
equilibrium: a lead of τ_max puts A's reception at about 2τ_max, far beyond
φ_ref.

Simulation shows the same thing (section 10). IES and IES\* settle with a
mean Γ of roughly 640–1160 counts (16–29 µs) over 2, 4 and 6 nodes. The
published measurements report 1.5–4 µs for IES and 0.2–0.6 µs for IES\*.

PS behaves as published. Its response sends the receiver straight to 1,
which is one delay after the sender fired, so PS settles exactly τ apart
(877 counts, 21.9 µs).

The difference must therefore come from a detail of IES that the formulas
do not show, for example:

* a different sign convention for the delay term;
* a different meaning of x in H̃;
* a refractory rule that also blocks the leading node.

This RTL keeps the formulas as stated and does not guess a correction. If
the intended form becomes known, only `sync_algorithm.sv` needs to change.
The relevant lines are the computation of `x` and `h_phase`.

## 4. Stochastic pulses and the IES\* quiet window

A node that reaches 1 does not always transmit. `pulse_emitter.sv` draws
from a 32-bit Galois LFSR (taps 0x80200003) and sends a pulse with
probability p = P_NUM / 2^P_LOG2:

* p = ½ for IES and IES\*;
* p = 1 for PS and SISA.

With p = ½, nodes can hear each other even though a radio cannot receive
while it transmits. Of two nodes that fire together, one will often stay
silent and listen.

IES\* adds a **quiet window**. For τ̄ − τ_min = 9 cycles after an update, a
firing does not send a pulse. An update can carry the phase through 1 (IES\*
shifts by τ̄, not τ_min). In that case the node would otherwise answer a
pulse it has only just heard, and the window stops that.

The window length follows from the delays. The LFSR seed is a parameter, so
the nodes of a network can be given different seeds.

## 5. The pulse on air: packet and transmitter

A pulse is a 12-byte packet (96 bits):

* 8 training bytes of 0x55, which let the receiver set its gains and lock
  its carrier loop;
* the 4-byte sync word, 0xB53CE24D by default.

Bits are sent MSB first and mapped to BPSK (1 → +A, 0 → −A). There are 8
samples per symbol at 40 MHz (5 Msymbol/s), so a packet lasts 768 cycles
(19.2 µs).

The transmitter is a chain of three blocks:

* **`packetizer_modulator`** holds `busy` (also the transmit/receive
  switch, `tr_tx`) for the whole packet.
* **`interpolator`** turns the symbol-rate steps into a linear ramp from one
  symbol value to the next over 8 samples, with a triangular impulse
  response. This keeps the spectrum narrower than rectangular pulses.
* **`upconverter`** shifts the baseband to an IF of fs/4 = 10 MHz. It
  multiplies by e^(jπn/2), which needs only sign changes and an I/Q swap.

The radio board's own mixer is outside the design and moves the IF to
2.4 GHz.

## 6. Receiver: AGC, carrier loop, correlator

### AGC (`agc.sv`)

While idle, the gain is 1. When |I| + |Q| first exceeds ENERGY_TH, a packet
is assumed to start. The block tracks the peak level for 64 samples, then
picks the largest g in 0..7 with peak · 2^g < 2 · TARGET (TARGET = 4096).
The gain 2^g is applied with saturation and held for 768 samples, one
packet; then the block returns to idle.

The gain code goes out on `rx_gain`, so that it can drive the radio's
amplifiers.

### Downconversion and carrier offset (`downconverter_cfo.sv`)

The fs/4 IF is removed with the inverse sign/swap pattern. What is left is
BPSK turned by a slowly rotating phase: the difference between the two
boards' carriers.

A Costas loop removes that rotation. It needs no knowledge of the data. An
NCO holds the phase estimate θ, and a 14-stage CORDIC turns each sample by
−θ. For BPSK the quadrature part of a correctly turned sample is zero, so
e = sign(I) · Q measures the remaining phase error.

A proportional-integral filter steers the NCO:

* freq += e << 4
* θ += freq + (e << 11)

The CORDIC gain of 1.647 is halved at the output, for an overall gain of
0.82. The loop settles within the training bytes for offsets of tens of
kHz. It can lock with either sign (a 180° ambiguity).

### Correlator (`correlator.sv`)

An FIR filter with 32 taps of ±1 (the sync word's bits), placed 8 samples
apart, runs over the sign of the in-phase sample. A detection is declared:

* one cycle after |sum| has passed 80 000 and starts to fall, which is one
  cycle after the peak;
* once only, then further peaks are ignored for 768 cycles.

Using the magnitude makes the 180° ambiguity of the carrier loop harmless.

## 7. Delays and the value of τ

The response functions assume that a pulse is heard τ after the sender
reached 1, with τ between τ_min = 868 and τ_max = 888 cycles. For one node
pair, the delay from `tx_trigger` to `sync_det` is made up of:

* the packet itself: the last sync-word sample leaves 768 cycles after the
  trigger;
* a few register stages each in the transmitter and the receiver;
* the correlator's one-cycle peak picking;
* the path through the analog front ends and the air.

In simulation, the node's own share is 778 cycles. With 99 cycles for the
analog path, the total is 877 = τ̄. The test benches check this exact value.

On real hardware, the analog path's share has to be measured for the
boards. It then either goes into TAU_MEAN_CYC, or the channel is what it is.

## 8. Rate correction c_i

IES\* assumes that every board knows how far its crystal is from nominal.
For that board, c_i is stored as a signed value in counts per clock, with 32
fraction bits. It is loaded through `ci_we`/`ci_wdata`.

A 54-bit accumulator adds c_i every cycle. Its integer part is added to the
phase. A board 6 ppm fast has c_i = −6·10^-6 · 2^32 ≈ −25 770. Its phase
then loses one count every 166 667 cycles.

One LSB is 2.3·10^-4 ppm, well below the ±0.25 ppm to which such offsets can
be measured. For the other algorithms, c_i is left at zero.

## 9. Parameters

Top: `pco_radio`.

| parameter | default | meaning |
|---|---|---|
| ALGO | ALGO_IES_STAR | PS, SISA, IES or IES\* |
| PHASE_BITS | 22 | phase width; period 2^PHASE_BITS cycles (half of that for SISA) |
| CORR_FRAC_BITS | 32 | fraction bits of c_i |
| TAU_MIN_CYC / TAU_MAX_CYC / TAU_MEAN_CYC | 868 / 888 / 877 | delay bounds and mean, in cycles |
| NU_MAX_PPM | 6 | largest clock offset, used in the refractory bounds |
| SYNC_WORD | 0xB53CE24D | 32-bit sync word |
| LFSR_SEED | 0xACE12B5D | seed of the emission LFSR; give each node its own |

The parameters of the blocks below the top are set in `pco_radio.sv` and in
the package `pco_pkg.sv`. These include the AGC thresholds, the loop gains,
the correlator threshold and the hold-off.

## 10. Verification and measured precision

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each compares
the block with values worked out inside the testbench, independently of the
block. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

The response functions are checked against a `real`-number model over
thousands of phases, within ±2 counts. The CORDIC/Costas loop is checked on
a rotated BPSK signal. The correlator is checked for its exact detection
cycle and hold-off.

`tb_pco_radio` runs three IES\* nodes over a behavioural channel, defined in
`tb/pco_network.sv`. The channel models:

* delay;
* attenuation;
* pairwise carrier offsets of 7 kHz steps;
* noise;
* 5 % packet loss;
* half duplex: a node cannot hear while it sends.

The testbench uses a 16-bit phase. It checks τ and the final precision. It
counts every mechanism at least once:

* sent and silent firings;
* quiet-window silences;
* detections;
* refractory rejections;
* updates, and updates that carry the phase through one;
* AGC locks;
* rate-correction steps.

`tb_pco_radio_full` runs two nodes at the full defaults (22-bit phase) and
checks:

* a period of exactly 2^22 cycles;
* a detection 877 cycles after the trigger;
* one IES\* update against the reference.

The four `tb_workload_*` benches repeat the measurement setup: 2, 4 and 6
nodes from random phases, 20 periods of a 16-bit phase, with Γ taken over
the last quarter:

| algorithm | n = 2 | n = 4 | n = 6 | published |
|---|---|---|---|---|
| PS | 877 (21.9 µs) | 877 | 877 | ≈ 21 µs |
| SISA | 8 (0.2 µs) | not converged in 20 periods | not converged | converges more slowly as n grows |
| IES | 662 (16.6 µs) | 867 | 1159 | 1.5 / 2 / 4 µs |
| IES\* | 637 (15.9 µs) | 1033 | 891 | 0.2 / 0.4 / 0.6 µs |

The table gives mean Γ in counts, where 1 count = 25 ns. PS agrees with the
published result. IES and IES\* do not, for the reason given in section 3.

The shortened phase changes how many cycles a run needs, but not the
delays. Because the delays stay at full size, the precision in counts can
be compared directly.

## 11. Departures and open points

* **IES/IES\* equilibrium.** See section 3. This is the one place where
  the built design does not reach the published precision.
* **SISA.** The response is implemented as 1.5·φ mod 1. A prose
  description of the same algorithm says that a node "halves" its phase on
  reception; the formula was followed.
* **Extension of H̃ below φ_ref.** For IES, H̃ is defined only above φ_ref.
  For x in (0, φ_ref], its first piece is applied too.
* **Receiver details.** These are this design's own choices; only the kind
  of block (gain setting from I/Q, a non-data-aided CFO algorithm, an FIR
  correlator) is given:
  * the AGC rule and its numbers;
  * the Costas loop and its gains;
  * the correlator threshold, peak picking and hold-off;
  * the interpolator filter;
  * the fs/4 IF;
  * the training byte 0x55 and the sync word.
* **Outside this RTL.** The analog front end is not modelled except in the
  testbench channel. The manual measurement of each board's clock offset,
  which produces c_i, is also outside.
* **c_i storage.** c_i sits in a single register with a load port, rather
  than a memory.

## 12. Simulating and changing the design

All files are plain SystemVerilog. `rtl/pco_pkg.sv` must come first. For
example, with Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -y rtl -y tb \
    rtl/pco_pkg.sv tb/tb_pco_radio.sv --top-module tb_pco_radio -o sim
./obj_dir/sim
```

Run times:

* block testbenches: seconds;
* `tb_pco_radio`: about 40 s;
* `tb_pco_radio_full`: about 45 s;
* each `tb_workload_*`: about 40 s.

Common changes:

* **Algorithm:** set `ALGO` on `pco_radio`.
* **Period:** set `PHASE_BITS`. All constants scale with it.
* **Delays:** change the `TAU_*` parameters. a, b and the refractory
  bounds are recomputed.
* **Test networks:** in testbenches, instantiate `pco_network` with the
  node count, algorithm, channel delay, loss and carrier step you want. Use
  `gamma_monitor` to measure Γ.
