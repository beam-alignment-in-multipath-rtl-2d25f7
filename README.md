# Radar-assisted UCB beam alignment for a 60 GHz ISAC base station

A millimetre-wave base station serving a moving user has to keep choosing one
narrow beam out of many. Learning the best beam by trial is what a
multi-armed bandit does: each time slot the station transmits a data frame
on one beam, the user reports the SNR it saw, and an upper-confidence-bound
(UCB) rule picks the next beam. The costly part is exploration, because every
beam must be tried before the rule can trust its estimates.

This design shortens the exploration with radar. The 512-chip Golay sequence
that every IEEE 802.11ad frame already carries in its channel-estimation
field is reused as a radar pulse:

1. The station sweeps all beams with short bursts of these pulses.
2. It compresses the echoes in range and estimates their Doppler.
3. It keeps only the beams in which something is *moving*.

The bandit then runs on that shortlist (K~ beams, typically a handful, instead
of all 32). The radar also gives the user's range and radial speed. From
them the station predicts how many slots the user will stay inside the chosen
beam (T_inf). When that time runs out, or when the SNR on the chosen beam
collapses earlier, it searches again.

The RTL is a complete, synthesizable accelerator for this loop:

- the radar waveform and capture;
- the radar signal processing (RSP): matched filter, target detection, MUSIC
  Doppler estimation and selection of the candidate beams;
- a four-lane UCB engine with 24-bit arithmetic;
- the T_inf estimator;
- the controller that sequences the phases.

The RF front end, data converters and the 802.11ad data path are outside the
design and are reached through plain ports.

## The loop

```
            go
             |
   +---------v----------+   empty set
   |  RADAR SEARCH      |<-----------+
   |  sweep K beams     |            |
   |  RSP -> beta, K~   |------------+
   +---------+----------+
             | K~ > 0: clear S, N; t = 1
   +---------v----------+
   |  ROUND ROBIN       |  one slot on each beta[q], q = 0..K~-1
   +---------+----------+
             |
   +---------v----------+  first pick = optimal beam k-bar -> T_inf
   |  REGRET            |  Q_t = argmax UCB, beam = beta[Q_t]
   |  (one slot each)   |
   +---------+----------+
             | t >= T_inf, or DROP_N low-SNR slots in a row on k-bar
             +--------------> back to RADAR SEARCH
```

Each data slot is a handshake:

- `slot_start` pulses with `beam`.
- The communication side answers with `slot_done`, `ack`, and the normalized
  SNR `snr` that the user reported over the uplink (unsigned Q8.16).
- The reward is `snr` when `ack` is 1, otherwise 0.
- The reward goes into the statistics of the arm that was served.

Output `phase` shows the current phase: `PH_RADAR`, `PH_RR`, `PH_REGRET` or
`PH_IDLE`.

## Block map

```
isac_mab_top
 |- radar_waveform_gen   sweep: beam, packet, fast-time counters; tx chip; capture address
 |- rsp_core
 |   |- sdp_ram (radar data square, K*P*2N x 24 bit)
 |   |- sdp_ram (range spectra, 2 banks x P x NR x 32 bit, LANES bins per word)
 |   |- matched_filter   fast-time correlation with the Golay code, LANES bins at a time
 |   |- peak_detector    packet-integrated power, local maxima above a mean-based threshold
 |   |- music_doppler    rank-one MUSIC over slow time (cordic_sincos steering vector)
 |   '- beam_subset      mobile / far classification, far-beam drop, beta list
 |- ucb_engine
 |   |- log_unit         2 ln t
 |   '- 4 x ucb_lane     S/N + sqrt(2 ln t / N)   (seq_divider x2, isqrt)
 |- tinf_estimator       r * dphi / (v cos phi)    (cordic_sincos, seq_divider)
 '- mab_controller       phase sequencing, slot handshake, restarts, event counters
```

`isac_pkg` holds the shared types:

- `samp_t`: complex 12-bit ADC sample;
- `yval_t`: complex 16-bit range-spectrum value;
- `phase_e`: the phase encoding;
- the Golay chip-sign function.

All blocks share one clock and an asynchronous active-low reset. The numbers
below assume a 100 MHz clock.

## Radar waveform and the radar data square

The 802.11ad channel-estimation field contains the 512-chip sequence
g_u512 = [a256, b256]. The 256-chip halves form a Golay complementary pair.

Build the pair recursively with a(m+1) = [a(m), b(m)] and
b(m+1) = [a(m), -b(m)]. The concatenation [a256, b256] is then a512 itself.
Its chip i is negative exactly when the number of adjacent `11` bit pairs in
i is odd (the Rudin-Shapiro rule). The chip generator is therefore a parity
function of the chip index, and no table is needed (`golay_neg`). Its partner
b512 differs only in the second half.

Packets alternate between a512 and b512 following the Prouhet-Thue-Morse bit
of the packet index (`ptm_bit`). This ordering is a common choice that keeps
the complementary property under small Doppler shifts. The testbenches do not
depend on it.

One pulse repetition interval (PRI) is 2N = 1024 samples:

- In the first N samples the chips are sent (`tx_on`, `tx_neg`).
- In the other N samples the transmitter is silent.

This gives a 50 % duty cycle. At 1.76 GS/s the PRI is 0.58 us. P = 20 pulses
on one beam form a coherent processing interval (CPI), and the sweep visits
all K = 32 beams.

Each received sample is written into the radar data square at
`(beam*P + packet)*2N + fast_time`. That is 655,360 complex 12-bit samples,
or 15.7 Mbit, held in `sdp_ram`.

The sweep advances on `samp_en`, one sample per enabled cycle. At the real
ADC rate the whole sweep takes 0.37 ms. A capture that runs at the design
clock takes 6.6 ms at 100 MHz.

## Range compression (matched filter)

For every packet, range bin n is the correlation of the received window
x[n .. n+N-1] with that packet's ±1 chip sequence. Because the chips are ±1,
the correlator only adds or subtracts.

`matched_filter` holds a shift-register window and computes LANES = 32
adjacent bins in parallel:

- A group of 32 bins takes N + LANES + 1 cycles: one sample per cycle, plus
  the fill and the write.
- The 32 results are scaled by 2^-SHIFT (SHIFT = 5 for N = 512) to 16-bit
  I/Q and written as one 1024-bit word.
- One beam is P × NR / LANES × (N + LANES + 1) = **174,400 cycles, 1.74 ms**.

The range bin spacing is c/(2 × 1.76 GHz) = 8.5 cm, and 512 bins cover
43.6 m.

The range spectra go into one of two banks (ping-pong). While the matched
filter fills one bank with beam b+1, the back end (detection, Doppler,
classification) works on beam b in the other bank. A bank is reused only
after the back end has released it. With this pipelining a new beam starts
every matched-filter time. `rsp_overlap` shows the cycles in which both
stages are busy.

## Target detection

`peak_detector` makes two passes over one beam's spectra:

1. It integrates the power of each range bin over the P packets,
   pw[n] = Σ_p |Y_p[n]|², and sums the total power.
2. In range order, it reports bin n as a target when all of these hold:
   - pw[n] ≥ pw[n-1] and pw[n] > pw[n+1] (a local maximum);
   - pw[n] × NR > THR_MUL × total, i.e. THR_MUL = 16 times the mean bin power.

A matched Golay echo stands far above its own range sidelobes. For this code
the strongest sidelobe carries about 1 % of the peak power, so sidelobes are
not detected. The same test rejects noise and uplink preambles that do not
match.

A detection is flagged **far** when it lies in the last eighth of the range
(n ≥ RGATE = 448) and is not STRONG_MUL = 64 times the mean. Such weak late
echoes are typically long multipath.

At most MAX_TGT = 4 targets are reported, nearest first. The unit takes
P × NR/LANES + NR + 2 = 834 cycles.

## Doppler by single-snapshot MUSIC

For each detected range bin r, the slow-time vector is y = (Y_0[r] … Y_{P-1}[r]).
A target moving with Doppler f makes y rotate by 2π f T_p per packet.

MUSIC builds the autocorrelation R = y yᴴ and splits its eigenvectors into a
signal vector and a noise subspace A_n. The Doppler estimate is the f that
minimizes eᴴ(f) A_n A_nᴴ e(f), with e(f) = (1, e^{j2πfT_p}, …).

With a single snapshot, R has rank one. Its signal eigenvector is exactly
y/‖y‖ and A_n A_nᴴ = I − y yᴴ/‖y‖². Multiplying by the constant ‖y‖² gives

    den(f) = P·‖y‖² − |Σ_p y_p · e^{−j2π f T_p p}|²

So the MUSIC peak can be found without an eigen-solver: the unit returns the
grid point with the smallest `den`.

`music_doppler` evaluates this on a grid of D = 61 Doppler bins:

- The grid is spaced 400 Hz, which is 1 m/s at 60 GHz, so it spans ±30 m/s.
- The per-packet phase step of one bin is `DPHASE` = 400 Hz × 0.58 µs × 2³².
- One bin and one packet rotate by only 2.3·10⁻⁴ turns. The steering terms
  therefore come from a 24-iteration, 24-bit CORDIC (`cordic_sincos`); a
  coarser rotator would blur neighbouring bins.
- Each bin takes P + 1 cycles: the projection is accumulated over the
  packets, then squared and compared.
- One target takes P + 2 + D·(P+1) = 1,303 cycles (13 µs).

The output `vbin` = bin − 30 is the radial speed in m/s.

## Candidate beams

`rsp_core` records one entry per beam in `beam_subset`:

- whether the beam has a *mobile* target, i.e. |vbin| ≥ VMIN = 1;
- whether all its mobile targets were far;
- the range and Doppler of its strongest mobile target.

Beams that see only static returns are clutter and are left out.

When all beams are in, `beam_subset` lists the mobile beams in increasing
index as `beta`, with their count `kt` (K~). If more than MANY = 16 beams are
mobile, far beams are dropped and counted in `n_dropped`. An empty list makes
the controller repeat the radar search.

The query port (`q_beam` → `q_rbin`, `q_vbin`) gives the stored range and
Doppler of any beam.

## The UCB engine

The engine keeps a cumulative reward S_q and a pull count N_q for each arm.
Arm q stands for beam beta[q]. The formats follow a 24-bit word length:

| quantity | format |
|---|---|
| reward, UCB value, 2 ln t | unsigned Q8.16, 24 bit |
| S_q | unsigned Q16.16, 32 bit |
| N_q | 16-bit integer |

UCB_q(t) = S_q/N_q + sqrt(2 ln t / N_q) is computed by `ucb_lane`:

- a 32/16 restoring divider for the mean;
- a 40/16 divider for (2 ln t · 2^16)/N;
- a bit-serial 40-bit integer square root.

One lane takes 63 cycles. An arm that has never been pulled gets the largest
value.

`log_unit` computes 2 ln t once per request: the leading-one position gives
the integer part of log2 t, 16 squaring steps give the fraction, and the
result is scaled by 2 ln 2. This takes 18 cycles.

Four lanes work in parallel on four arms. The K~ arms take ⌈K~/4⌉ rounds, and
after each round the best value so far is carried forward (ties go to the
lower arm). From the `req` edge to `sel_valid`:

    19 + ⌈K~/4⌉ · 65 cycles   (539 for 32 arms = 5.4 µs; 149 for 8 arms)

`upd` adds one reward in one cycle. `clear` zeroes all statistics at the
start of each round-robin phase.

## Time in beam and restarts

Assume the user moves sideways. It then leaves a beam of width Δφ pointing at
φ after T_inf = r·Δφ / (v·cos φ). `tinf_estimator` evaluates this in slots:

    T_inf = rbin · G / (|vbin| · cos φ_k),  G = ΔR·Δφ/(Δv·T) = 0.0852 m · 4° / (1 m/s · 5.5 ms)

G is stored in Q16 as 70898. The other terms are:

- Beam k points at −64° + (k + ½)·128°/K, which is −62°, −58°, …, 62° for
  32 beams.
- cos φ_k comes from the same CORDIC.
- A 40/32 divider produces the quotient.
- The result saturates at 65535 slots, is at least 1, and is 65535 for
  zero speed.

The latency is 43 cycles.

`mab_controller` computes T_inf for the first beam chosen after the round
robin; this beam is taken as the optimal one, k-bar. The controller goes back
to the radar search in two cases:

- the slot count t reaches T_inf;
- DROP_N = 2 consecutive slots on k-bar return a reward below
  SNR_LOW = 0.25. This catches users that leave the beam sooner than the
  lateral-motion model predicts.

Seven 16-bit counters record the events:

- radar searches;
- empty searches;
- round-robin slots;
- regret slots;
- T_inf restarts;
- SNR restarts;
- slots without an ack.

## Top-level interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `go` | in | 1 | run the loop (level); when it drops, the loop stops after the current slot |
| `samp_en` | in | 1 | one radar ADC sample this cycle |
| `adc` | in | 24 | complex 12-bit sample (`samp_t`), belonging to the chip position shown in the same cycle |
| `tx_on`, `tx_neg` | out | 1 | radar chip present, and its sign |
| `beam` | out | 5 | beam index for the beamformer: the sweep beam in `PH_RADAR`, the slot beam otherwise |
| `phase` | out | 3 | current phase |
| `slot_start` | out | 1 | transmit a data frame on `beam` |
| `slot_done`, `ack`, `snr` | in | 1, 1, 24 | slot result: acknowledgement and normalized SNR (Q8.16) |
| `kt`, `n_dropped` | out | 6 | size of the candidate set; beams dropped as far |
| `rsp_overlap` | out | 1 | RSP pipeline stages overlap |
| `tinf` | out | 16 | T_inf of the current optimal beam, in slots |
| `cnt_*` | out | 16 | event counters |

Cycle counts at the default size:

- slot turnaround: 2 cycles in round robin, UCB latency + 4 in the regret
  phase;
- radar search: 655,360 sweep cycles (one sample per cycle), then
  32 × 174,400 matched-filter cycles plus one back end, about 6.3 M cycles in
  all.

At the defaults yosys maps the top to about 3.8 k cells, 8.0 k flip-flop bits
and 16.4 Mbit of memory (the data square and the range-spectrum banks).

## Against the numbers of the reference design

| item | reference | this RTL at 100 MHz |
|---|---|---|
| matched filter per beam | 2 ms | 1.74 ms |
| MUSIC per beam | 1.5 ms | 13 µs per detected target |
| RSP of 32 beams, pipelined | ≤ 67 ms | 55.9 ms |
| UCB selection, 32 arms | 1.5 ms | 5.4 µs |
| bandit word length | 24 bit | 24 bit |
| parallel UCB blocks | 4 | 4 |

## Verification

Every block has a self-checking testbench in `tb/`:

- Each checks its outputs against values computed independently inside the
  testbench (floating point, or a direct model).
- Each checks the block's cycle counts.
- Each ends with a `TB_RESULT checks=… failures=…` line and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_sdp_ram` | every word written with a pseudo-random pattern and read back with one-cycle latency; read-during-write returns the old word |
| `tb_radar_waveform_gen` | chip signs against a recursively built Golay pair, 50 % duty, packet pairing, beam and address sequence, sweep length |
| `tb_matched_filter` | range spectra against a direct correlation, bank and address map, cycle count |
| `tb_peak_detector` | planted peaks, threshold, the far flag, the target limit, latency |
| `tb_music_doppler` | Doppler bins of synthetic slow-time vectors (including the full 61-bin, 20-packet grid), latency |
| `tb_beam_subset` | beta construction, far-beam drop when too many beams qualify, query port |
| `tb_rsp_core` | a 4-beam scene (moving, static, empty, moving + static beams), stage overlap, total time |
| `tb_ucb_lane` | UCB values of random (S, N, t) against floating point within 2^-11 (this also checks `log_unit`), n = 0, latency |
| `tb_ucb_engine` | argmax against a floating-point UCB bandit over 2 × 150 slots (7 and 10 arms), latency formula, clear, best arm pulled most |
| `tb_tinf_estimator` | T_inf against the formula for all 32 beams, signs, saturation, latency |
| `tb_mab_controller` | phase sequence, round-robin order, slot index t, rewards and no-ack, T_inf and SNR restarts, handshake latencies |
| `tb_isac_mab_top` | see below |

`tb_isac_mab_top` runs the whole design at the default size, with no
parameter overrides. The testbench plays the outside world.

**Radar channel.** Each ADC sample is built from the design's own `tx_on` /
`tx_neg` outputs and the beam the design currently drives:

- the transmitted chip, delayed by each target's range bin;
- rotated by that target's Doppler phase;
- plus noise.

**User link.** The link returns SNR 0.9 on the user's beam, 0.45 on its
neighbours and 0.1 elsewhere. Every 9th slot is not acknowledged.

The scene changes at each radar search:

1. Clutter only. The search must come back empty.
2. 20 beams with moving targets; four of them have only a weak moving echo
   near maximum range. These four must be dropped. The user is in beam 10 at
   range bin 100 and +5 m/s. T_inf must end the session after exactly the
   predicted number of slots, and that number must match the formula.
3. Three moving beams, with the user in beam 20 at 1 m/s. UCB must settle on
   it. A blockage then drops its SNR, and a restart must follow.

The testbench counts each mechanism and fails if any never occurs:

- empty search;
- RSP overlap;
- far drop;
- round robin;
- regret slots;
- T_inf restart;
- SNR restart;
- missing ack.

It simulates about 19 M cycles in under half a minute with Verilator.

To run any testbench with Verilator (the package must come first):

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl rtl/isac_pkg.sv \
          tb/tb_isac_mab_top.sv --top-module tb_isac_mab_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. Parameters are ordinary module
parameters. Most unit testbenches override them to small sizes, for example
4 beams, 4 packets and 16 chips in `tb_rsp_core`.

## Where this design departs from the reference, and its limits

- **Matched filter architecture.** The reference implementation computes the
  matched filter with an FFT / IFFT pair (24-bit FFT, 16-bit IFFT). Here it is
  a time-domain ±1 correlator. The range spectrum is the same, and so is the
  16-bit output word, but the frequency-domain datapath is not built. The
  correlator is cheaper for a binary code and meets the per-beam time at
  32 lanes.
- **MUSIC.** The reference runs MUSIC in single-precision floating point.
  Here a single-snapshot, rank-one form is used in fixed point. It is exact
  for one snapshot per range bin. Several targets in the *same* range bin are
  not separated.
- **Detection thresholds** (16 × and 64 × the mean power, the last eighth of
  the range as "far", four targets per beam, more than 16 mobile beams
  triggering the far drop) are this design's values. The reference states the
  criteria only qualitatively.
- **Beam geometry.** 32 beams of 4° over −64°…64° is assumed for the T_inf
  angle. Another K divides the same span into K beams. The beam width is also
  part of G_Q16, so that parameter must change with K.
- **Restart details.** The SNR threshold and count, taking the first regret
  pick as the optimal beam, zero reward for a missing ack, and repeating an
  empty search are choices of this design.
- **Capture rate.** The sweep takes one sample per enabled clock. Capturing
  at 1.76 GS/s needs a wider sample port or a faster capture clock in front of
  the data square.
- **Other beam counts** (81 beams of 2°, or 21 of 8°) are a rebuild with
  another K. The number of beams is not programmable at run time.
- **Not included:** the host processor, the phased array and RF chain, the
  DAC/ADC, and the 802.11ad OFDM data path. Their signals are the top-level
  ports above.
