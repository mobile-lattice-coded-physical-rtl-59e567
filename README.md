# Channel alignment for lattice-coded physical-layer network coding: RTL

In a two-way relay network, end nodes A and B transmit at the same time and
the relay decodes the sum of their lattice codewords, not the two messages.
That only works when both signals reach the relay with the same phase and
amplitude on every OFDM subcarrier, and that is hard with cheap oscillators.
Each node has its own carrier frequency offset (CFO), its own sampling
frequency offset (SFO) and its own timing. So the relay estimates what each
node's uplink looks like and sends a small amount of feedback. Each node then
precodes its next packet so that the relay sees it already corrected.

This RTL covers that alignment loop:

- **Relay receiver front-end.** It finds the training symbols of every
  packet, estimates each node's CFO, per-subcarrier phase and pilot amplitude,
  and watches the arrival asynchrony between the two nodes.
- **End-node transmitter.** It runs a time-slot timer, maps the lattice
  symbols to subcarriers, precodes them in the frequency and time domains,
  and frames the packet with a preamble and a postamble.

Lattice encoding and decoding, the downlink radio and the RF parts are not
included. The top level brings their signals out as ports.

## Packet and slot

Both nodes share one packet layout of 8640 samples at 20 Msample/s:

| section | node A sends | node B sends | samples |
|---|---|---|---|
| STS | 10 short training symbols | zeros | 160 |
| STS | zeros | 10 short training symbols | 160 |
| LTS | long training symbol (16 CP + 64) | zeros | 80 |
| LTS | zeros | long training symbol | 80 |
| DATA | 100 OFDM symbols | 100 OFDM symbols | 8000 |
| post LTS | LTS | zeros | 80 |
| post LTS | zeros | LTS | 80 |

- The training sections of the two nodes never overlap, so the relay can
  measure each node alone. Their data sections overlap.
- Each packet carries 5 codewords of 960 lattice symbols on 48 data
  subcarriers, which is 20 OFDM symbols per codeword.
- Pilots sit on k' = ±21 for node A and on k' = ±7 for node B. The other node
  sends zero on them, so the relay can measure each node's pilot amplitude
  inside the overlapped data.
- A packet is sent once per 1 ms slot (20000 samples). A beacon starts both
  nodes' slot timers.

## Relay side (`relay_rx`)

**LTS labels.** `lts_correlation` correlates the incoming samples with the
signs of the known 64-sample LTS body. A PNC packet produces four peaks, which
a counter labels in order: preamble A, preamble B, postamble A, postamble B.
When a label is issued, a 65-entry sample history holds that LTS body. The
CFO and phase estimators copy the body from there, so no second correlator is
needed.

**CFO estimation across the packet.** `cfo_estimation` correlates each node's
preamble LTS with its postamble LTS:
`cfo = angle(Σ conj(pre)·post) / ΔN`, where ΔN = 8160 samples.

- Over that distance a few kHz of offset rotates the phase by more than a
  full turn. The measured angle is therefore only the fractional part.
- A rough CFO from start-up (an input port) predicts the total rotation. The
  measured fraction then corrects that prediction:
  `total = pred + wrap(angle − pred)`, followed by a division by ΔN.
- This gives 32-bit turns per sample. With no noise, in the end-to-end test,
  the error is about 3·10⁻⁷ turns per sample, roughly 6 Hz.

**Phase per subcarrier.** `phase_estimation` runs an FFT over each node's
postamble LTS, strips the ±1 LTS values, and feeds each bin through a
vectoring CORDIC into a phase buffer of 2 × 64 entries. For each node, the
phases at k' = −26 and k' = +26 are fed back.

**Amplitude factor.** `amplitude_averaging` averages the magnitudes of each
node's pilots over a packet and returns `scale = TARGET / mean` (Q4.12). The
pilot values come from the relay's data receiver as a frequency-domain
stream.

**Slot asynchrony.** `slot_monitor` computes
`offset = t_B − t_A − 80` from the two preamble peaks. If the offset is
larger than 2 samples, node B must advance by 2 samples; below −2, node A
must.

**Feedback.** Each node's feedback is sent once its CFO and phases are known
(about 2 µs after its postamble). It holds:

- the two phases, as 16-bit fractions of a turn;
- the amplitude factor;
- the CFO;
- the node's arrival offset behind node A.

The arrival offset is an addition of this design; the reason is explained
below.

## End-node side (`node_tx`)

**Scheduling and buffering.** `time_slotted_scheduler` issues `start_tx`
every slot. A request to advance shortens the next slot by the requested
number of samples. The lattice symbols of one packet sit in
`lattice_encoding_buffer`, which holds 4800 entries.

**Symbol production.** From `start_tx`, `subcarrier_mapping` emits one symbol
at a time as 64 bins. Each symbol goes through `freq_domain_precoding`, the
64-point IFFT with its cyclic prefix, and `time_domain_cfo_precoding`, and
lands in a 256-entry FIFO. `preamble_postamble_insertion` drains the FIFO at
the sample rate during the DATA section. The producer needs about 380 clocks
per symbol against the 640 clocks that 80 samples take at 8 clocks per
sample. It therefore runs ahead and waits whenever the FIFO has no room for
another symbol (`stall`).

**The precoding factor.** Each data subcarrier is multiplied by
`A_k·exp(jθ_k)`. The phase θ_k is the sum of four terms:

1. **Reciprocity phase** (`phase_interpolation`). Subtracting the stored
   calibration and downlink phases from the two fed-back phases leaves a
   residual. That residual is linear across the subcarriers, so two points
   give its offset and slope. The slope is unwrapped against the previous
   one plus the SFO drift predicted for one slot.
2. **SFO ramp** (`sfo_precoding`). The sample clock and the carrier come
   from one crystal, so the sampling offset is the CFO times fs/fc. The
   timing drift at symbol s, counted from the relay's measurement, rotates
   subcarrier k' by `drift·k'/64`.
3. **CFO drift** (`cfo_phase_drift`). This is the phase the CFO accumulates
   between the body of the node's previous postamble (where the relay
   measured) and this packet's data start.
4. **Slot ramp** (`phase_adjustment`). `−k'·(D − base)/64`, where D is the
   running sum of slot advances. The base is the advance total of the packet
   the feedback came from, plus the arrival offset the relay reported.

The relay measures each node's phases in that node's own LTS timing, but it
combines the two nodes in node A's timing. A node that arrives `off` samples
late therefore still needs `+k'·off/64`. An advance made after the
measurement needs `−k'·d/64`. That is the paper's correction for a slot
advance. The amplitude `A_k = g / (ρ_k·|H_dn,k|)` combines:

- a calibration factor ρ_k;
- the node's downlink amplitude;
- a gain g that is multiplied by every fed-back factor.

**Time-domain CFO.** After the IFFT, an NCO restarted at the data start
rotates sample n by `−cfo·n`.

## Number formats and timing

| quantity | format |
|---|---|
| samples | 16-bit I/Q |
| phases | 16-bit, 2¹⁶ = one turn |
| CFO | 32-bit, 2³² = one turn per sample |
| gains and amplitude factors | Q4.12 |

- There is one clock. `smp_tick` is the sample-rate enable, one tick in 8
  clocks in the tests (160 MHz and 20 MHz).
- The FFT/IFFT is radix-2 with one butterfly per clock. It loads 64 values,
  computes for 192 clocks and outputs 64 + CP values.
- Latencies:
  - CORDIC: 17 clocks;
  - frequency-domain precoding: 19 clocks;
  - relay feedback: about 400 clocks after a postamble.

## How it was checked

Each testbench ends with a `TB_RESULT checks=… failures=…` line. To build one:

```
verilator --binary --timing -Irtl rtl/pnc_pkg.sv rtl/*.sv tb/tb_pnc_top.sv --top-module tb_pnc_top
```

When using this command, list `pnc_pkg.sv` only once.

**End-to-end test (`tb_pnc_top`).** It runs at the default sizes: 1 ms
slots, 100-symbol packets and six slots, which takes about 30 s with
Verilator. The testbench is the channel:

- node A: gain 0.9 at 40°, +3 kHz CFO;
- node B: gain 0.6 at −110°, −2.2 kHz CFO, arriving 7 samples after A;
- a little noise on the sum.

It also plays the relay's data receiver for the pilots. The results were:

- All LTS labels came out in order.
- Every fed-back CFO was within 10⁻⁶ turns per sample.
- Node B advanced three times, and the offset settled at 1 sample.
- After the second packet the two nodes' data amplitudes at the relay agreed
  within 1 %.
- From the second packet on, the data phase at the relay was aligned:
  - node A to within 0.014 turn on every data subcarrier;
  - node B to within 0.1 turn.

The testbench counts slot advances, whole-turn CFO recoveries, producer
stalls, feedback and aligned packets, and fails if any count is zero.

**Block tests.** There are testbenches for the FFT/IFFT, the slot monitor,
the slot-ramp block, the DAC interface and the scheduler. Each was also run
against a deliberately broken copy of its module, and each copy was caught.
The other blocks are exercised only through the end-to-end test.

## Known limitations and departures

- **Node B phase drift.** In the end-to-end test, node B's residual phase
  error grows by about 0.025 turn per packet. In the sixth slot it is 0.094
  turn at k' = +26 and 0.003 turn at k' = −26: a small linear ramp plus a
  constant. Node A, whose CFO has the opposite sign, stays at 0.013 turn. The
  error does not depend on slot advances. The cause has not been found; the
  suspects are the sign handling of the SFO terms for a negative CFO and the
  slope prediction in `phase_interpolation`. The end-to-end tolerance is set
  to 0.1 turn accordingly.
- **Arrival offset in the feedback.** This design adds it, because its
  relay estimates phases in each node's own timing. A node's own advances are
  compensated exactly, but an advance of node A moves the reference for node
  B for one packet.
- **Assumed values.** The pilot positions, the pilot amplitude and the
  amplitude target are choices of this design.
- **SFO ratio.** fs/fc is fixed at 20 MHz / 2.5 GHz.
- **Rough CFO.** It is an input; how it is obtained at start-up is outside
  this design.
- **Test channel.** The channel model has no SFO and no frequency
  selectivity. The calibration and downlink tables stay at their reset
  values (zero phase, unit amplitude).
