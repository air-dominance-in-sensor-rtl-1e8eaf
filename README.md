# Guardian: selective interference for IEEE 802.15.4 sensor networks

Sensor motes are too small to defend themselves against forged or unwanted
radio traffic: every frame they receive costs energy to check, and frames they
should never have accepted (an unauthorised firmware update, a flood of
association requests, traffic from a revoked node) can do damage before any
software can object. A *guardian* is a separate radio that sits near the motes
and takes that decision away from them. It listens to every 802.15.4 frame on
the channel, classifies the frame while it is still being transmitted, and if
the frame breaks the network's policy it transmits a short burst of
interference. The burst corrupts enough chips that the frame check sequence
(FCS) at the motes fails, so they discard the frame as if it had never been
sent. The guardian thus acts as a packet filter for a shared medium.

Everything hinges on time. A frame is on the air for 32 µs per byte. To drop a
frame because of its last payload byte, the guardian must receive that byte,
decide, switch its transmitter on and interfere for long enough while the
two FCS bytes (64 µs) are still in flight. The reference platform measured
that 26 µs of interference destroys a frame reliably and that the transmitter
needs 3 µs to start, and it budgets 39 µs in total. This RTL implements the
guardian's FPGA datapath: receiver, framer, parallel rule checker, waveform
generator and burst control. With its default parameters it reacts in
about 29.3 µs, measured from the end of the deciding byte to the end of the
burst.

## Datapath

```
 RX baseband ──► oqpsk_receiver ──bytes──► framer ──buffer, header──► rule_checker
  (I/Q, 4 MS/s)       │ rss_dbm ───────────────────────────────────────►  │ drop_irq
                      │                                                   ▼
                      └─ sample strobe ─► waveform_generator ──► interference_tx ──► TX baseband
```

| module | job |
|---|---|
| `guardian_pkg` | Shared types and constants: chip sequences, half-sine pulse table, frame-info struct, rule-table encoding, default policy. |
| `oqpsk_receiver` | Synchronises to the preamble and de-spreads 32-chip symbols into bytes. Also estimates received signal strength (RSS). |
| `framer` | Finds the PHY length and parses the MAC header layout from the frame control field. Keeps the frame in a 128-byte buffer and checks the FCS. |
| `rule_checker` | Compares the whole compile-time rule table with the frame in parallel on every clock. Raises `drop_irq` on the first match. |
| `waveform_generator` | Produces the interference waveform: continuous wave, band-limited noise, or random O-QPSK symbols. |
| `interference_tx` | Keys the transmitter. A burst is a 3 µs start-up window followed by 26 µs of waveform. |
| `guardian_top` | Wires the chain together and counts statistics. Exposes the controller-facing controls. |

The whole design runs on one clock: 100 MHz is assumed in all timing numbers.
The RX front end delivers one complex sample per `rx_valid` strobe, at `SPC`
samples per 0.5 µs chip (default 2, i.e. 4 MS/s). The TX side reuses the same
strobe as its sample clock.

The top's controller-facing ports are:

- `wave_mode` and `wave_amp`, which select the interference waveform and its amplitude.
- `hdr_irq`, which pulses when a frame's MAC header is complete.
- `drop_irq` and `drop_rule`, which report a drop verdict and the rule that caused it.
- `frame_end`, `fcs_ok` and `rss_dbm`, which report each frame's end, FCS result and signal strength.
- `rd_addr` and `rd_data`, a read port into the packet buffer.
- Six 32-bit statistics counters: frames, good FCS, dropped, bursts, ignored triggers and lock losses.

## Receiver: from samples to bytes

802.15.4 at 2.4 GHz sends each 4-bit symbol as 32 chips at 2 Mchip/s. Even
chips go on I and odd chips on Q, with Q delayed by one chip period (0.5 µs). Every chip is shaped as a half sine. The 16 chip
sequences are derived from symbol 0:

- Symbols 1–7 are cyclic shifts of symbol 0 by 4·s chips.
- Symbols 8–15 are symbols 0–7 with every odd chip inverted.

`guardian_pkg::chip_seq` computes the sequences, so no table is stored.

The receiver assumes a coherent input: carrier frequency and phase have been
removed upstream. It therefore takes hard decisions: the sign of I, and the
sign of Q. These decisions go into two shift registers 32·SPC samples long. At
every sample it reads a symbol-length window of chips from them:

- chip k comes from I for even k and from Q for odd k;
- chips are spaced SPC samples apart.

It then compares the window with all 16 sequences by Hamming distance. The
nearest sequence is the symbol, and its distance measures quality.

| state | leaves when |
|---|---|
| SEARCH | A window comes within `SYNC_DIST` (4) chips of symbol 0, the preamble symbol. |
| ALIGN | After SPC more samples: the receiver locks its symbol clock half-way between the first window within `SYNC_DIST` and the last one in that span. Those are the chip peaks. |
| PREAMB | One decision every 32·SPC samples. Zeros keep it here. A 7 followed by an A is the start-of-frame delimiter (SFD) 0xA7, sent low nibble first. Anything else returns to SEARCH. |
| DATA | Every decision is a nibble; two nibbles make a byte on `byte_valid`, low nibble first. A symbol more than `LOST_DIST` (8) chips from every sequence means lock is lost: `lost` pulses and the receiver returns to SEARCH. So does the framer's `frame_end`. |

Centring on the run of good timings matters when the carrier phase is off. At
a chip peak the other rail's pulse is zero, so a static phase error below 90°
leaves the chip signs at the peaks intact and only costs cos θ of margin. Between
the peaks both rails mix and the signs can flip, which narrows the run of good
timings to the peak itself. The receiver test passes frames rotated by up to
75°. A frequency offset, which turns the phase continuously, is not tolerated
(see below).

`byte_valid` rises one clock after the sample at the peak of the byte's last
chip. The receiver therefore adds only about a quarter chip plus a clock to the
air time.

RSS is the mean of I²+Q² over a symbol, converted to dB with a 3·log₂
approximation (3 fraction bits) and latched at the SFD:
`rss_dbm = dB + RSS_OFFSET_DB`. The offset (default −140) stands for the front
end's gain calibration. It must be set for real hardware before an RSS rule
means an absolute power.

## Framer: where the fields are

After the SFD:

- the first byte is the PHY length (7 bits);
- the next `length` bytes are the MAC frame (PSDU), including the 2-byte FCS.

Bytes are written into a 128-byte buffer that the rule checker sees in full.
The controller can also read the buffer through `rd_addr`/`rd_data`.

The MAC header layout follows from the frame control field (FCF):

| field | present when | size |
|---|---|---|
| FCF, sequence number | always | 2 + 1 |
| destination PAN | destination address mode is not "none" | 2 |
| destination address | by destination mode | 2 (short) or 8 (extended) |
| source PAN | source mode is not "none" and PAN ID compression (FCF bit 6) is clear | 2 |
| source address | by source mode | 2 or 8 |

The fields are extracted combinationally into `info`. They are valid once
`hdr_done` is set, which happens when the header's last byte is in the buffer.
At that moment `hdr_irq` pulses once.

- **Frame start.** `frame_start` pulses at the SFD, and `frame_active` stays high until `frame_end`. This means a rule with no conditions can act on the SFD alone.
- **FCS.** The FCS is the standard CRC-16 (x¹⁶+x¹²+x⁵+1, LSB first) over the whole PSDU, checked by zero residue.
- **Short frames.** Frames with a length below 3 are dropped, since they cannot hold an FCF and FCS.
- **Lost lock.** A loss of lock inside a frame ends it with `fcs_ok` low and `aborted` set.
- **Not parsed.** Security headers are not parsed; the guardian assumes unencrypted headers.

## Rule checker: the policy as hardware

The policy follows the style of a packet filter: a chain of rules, each a
conjunction of zero or more matches, all with the target DROP. A frame that no
rule matches is accepted. For example, "drop every frame to the broadcast
address 0xFFFF in PAN 0x22" is one rule with two matches.

In the FPGA the policy is a parameter of type `guardian_pkg::policy_t`, fixed
at build time. It holds `NUM_RULES` = 30 rules, each with an `enable` bit and
`MATCHES_PER_RULE` = 5 match slots. A slot is
`{kind, offset, nbytes, mask, value}`:

| kind | compares | decided when |
|---|---|---|
| `M_NONE` | nothing (slot unused) | — |
| `M_FTYPE` | frame type, FCF[2:0] | header complete |
| `M_DST_PAN`, `M_SRC_PAN` | PAN identifier | header complete |
| `M_DST_ADDR`, `M_SRC_ADDR` | address. `nbytes` = 2 matches only short and 8 only extended addresses. | header complete |
| `M_PSDU` | `nbytes` (1–8) little-endian bytes at PSDU `offset` | the last of those bytes is in |
| `M_PAYLOAD` | same, with `offset` counted from the end of the MAC header | the last of those bytes is in |
| `M_RSS` | `rss_dbm` strictly above signed `value[7:0]` | at once, once the frame is active (RSS is latched at the SFD) |

Every slot of every rule is evaluated combinationally on every clock. A rule
fires when it is enabled, the frame is active, and all its slots are both
decided and true. On the first clock on which any rule fires:

- `drop_irq` pulses, once per frame;
- `drop_rule` names the lowest-numbered rule that fired;
- the transmitter is started directly.

Because the comparison is parallel, the decision time does not depend on how
many rules there are or how deep in the frame they look. `drop_irq` comes two
clocks after the receiver delivers the deciding byte.

`guardian_pkg::mk()` builds a slot. `DEFAULT_POLICY` holds seven example rules:

| rule | drops |
|---|---|
| 0 | MAC command frames to 0xFFFF in PAN 0x22 |
| 1 | any frame to 0xFFFF in PAN 0x22 |
| 2 | in PAN 0xACAC, frames whose payload starts with network control word 0x0008 and has command byte 0x01 at payload offset 10: an over-the-air update |
| 3 | MAC commands (e.g. association requests) in PAN 0xACAC received above −80 dBm, i.e. from outside the building |
| 4–6 | frames from the revoked nodes 0x1111, 0x1112 and 0x1115 in PAN 0xACAC |

To use a different policy, pass `POLICY` to `guardian_top`. Write it as a
function that returns a `policy_t`, as the testbenches do.

## Interference: waveform and burst

`interference_tx` handles each `drop_irq`:

- It raises `tx_en` for `INIT_CYCLES` = 300 clocks (3 µs) of zero samples while the transmit chain starts.
- It then sends `JAM_CYCLES` = 2600 clocks (26 µs) of waveform samples.
- The burst ends `INIT_CYCLES + JAM_CYCLES + 1` clocks after the trigger.
- A trigger during a burst is counted on `stat_ignored` and not queued.

`waveform_generator` restarts at every burst. It produces one of three waveforms:

- **CW:** a constant I = `amp`, Q = 0, which is a carrier at the channel centre. The reference measurements found this the most power-efficient choice against common mote radios.
- **Noise:** uniform LFSR samples smoothed by an 8-sample moving sum. At 4 MS/s this puts the first spectral null at 500 kHz.
- **O-QPSK:** random symbols spread with the 802.15.4 chip sequences and shaped with half-sine pulses, with Q offset by one chip.

## Timing budget

| step | clocks at 100 MHz | µs |
|---|---|---|
| last chip peak of the deciding byte → `byte_valid` | about 25–30 (one sample of tail, one clock) | ≈0.3 |
| buffer write + rule evaluation → `drop_irq` | 2 | 0.02 |
| transmitter start-up (`INIT_CYCLES`) | 300 | 3 |
| interference (`JAM_CYCLES`) | 2600 | 26 |
| **reaction delay** | **≈2930** | **≈29.3** |

A 32-byte frame with a 15-byte payload gives the following limits. For each
rule position, the limit is the air time left after the deciding byte.

| rule keyed on | PPDU byte (from 1) | time left | guardian |
|---|---|---|---|
| SFD | 5 | 864 µs | 29.3 µs |
| frame control field | 7–8 | 768 µs | 29.3 µs |
| source address | 14–15 | 544 µs | 29.3 µs |
| payload byte 16 | 27 | 160 µs | 29.3 µs |
| last payload byte | 30 | 64 µs | 29.3 µs |

So even the last payload byte can be used and the frame still destroyed during
its FCS. The reference platform budgeted up to 10 µs for its FPGA decision and
39 µs in total. This datapath decides within a fraction of a microsecond, so it
meets that budget with margin.

## Where this design departs from the reference guardian

- **Carrier recovery.** The reference receiver is coherent, but how it recovers the carrier is not described, and none is built here. The receiver copes with a static phase error below 90°, but not with a frequency offset. In simulation a residual offset of 250 Hz still passes, while 500 Hz loses frames after about ten bytes. 802.15.4 allows each radio ±40 ppm, i.e. tens of kilohertz at 2.4 GHz. On real hardware a carrier frequency and phase recovery stage therefore belongs in front of `oqpsk_receiver`.
- **Hard chip decisions.** The de-spreader correlates hard chip decisions (Hamming distance), not soft sample values. This is cheap, but it gives away a few dB of sensitivity compared with a soft correlator. In the noise test the reception ratio falls from 100 % at 3 dB SNR per sample to about 90 % at 0 dB and to zero at −6 dB. How this maps to range depends on the front end, which is not modelled.
- **Synchronisation parameters.** The synchronisation thresholds, state machine and RSS estimator are this design's own. So is the 4 MS/s sample rate (`SPC` = 2). The RSS calibration offset is a placeholder.
- **Waveform generator.** The reference platform draws the waveform generator as firmware on the board's controller. Here it is logic, so a burst needs no software.
- **Trigger path.** The rule checker's interrupt starts the burst directly in hardware. The reference measured the FPGA checker's decision "when the interrupt arrives in the firmware". `drop_irq` is also a port, so a controller can observe it.
- **Table size.** The reference does not state the FPGA rule table's size. 30 rules is the longest chain in its measurements. 5 match slots per rule is this design's choice, covering every example rule (at most 3 matches).
- **Not built:**
  - the firmware rule checker, which is runtime-configurable but slower (about 116 µs);
  - the administration interface over Ethernet, which sets frequency and power, updates rules and collects statistics;
  - the RF front ends;
  - the board's micro-controller.

  Their signals are ports of `guardian_top` where they would connect.
- **Header interrupt.** `hdr_irq` is provided, but the hardware checker does not need it: it decides every slot as soon as the slot's bytes are in, rather than at fixed points.

## Simulating

The testbenches are self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. A reference modulator
in `tb/tb_util_pkg.sv` builds frames (FCS, preamble, SFD, length) and turns them
into ideal O-QPSK samples with real-valued half sines. This is independent of
the RTL's tables.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
    rtl/guardian_pkg.sv tb/tb_util_pkg.sv tb/tb_guardian_top.sv \
    --top-module tb_guardian_top -Mdir obj_top
obj_top/Vtb_guardian_top
```

Replace the testbench name to run another one.

| testbench | what it shows |
|---|---|
| `tb_guardian_pkg` | Chip sequences against the standard's symbol-0 string, and their pairwise distance. Also checks the half-sine table and the default policy. |
| `tb_oqpsk_receiver` | Bytes recovered from modulated frames, delivery latency, RSS within ±2 dB, static phase offsets up to 75°, lock loss on garbage. |
| `tb_framer` | Field extraction for several address modes, PAN ID compression, FCS pass and fail, abort, header-interrupt timing. |
| `tb_rule_checker` | Header, byte, payload, RSS and empty rules. First-match priority, one interrupt per frame, one-clock decision. |
| `tb_waveform_generator` | CW level, noise statistics, O-QPSK chips and the I/Q offset. |
| `tb_interference_tx` | Exact burst timing, retrigger handling, samples passed only during the burst. |
| `tb_guardian_top` | Nine frames end to end at the default parameters. Covers header, payload and RSS drops, RSS pass, accept, bad FCS, lock loss, and all three waveforms. Checks the 26 µs burst and the 39 µs bound. |
| `tb_guardian_detection` | Packet reception ratio in white Gaussian noise for 48-symbol packets through the whole top, 40 packets per SNR point. All packets arrive at 10 dB and 3 dB, 37 of 40 at 0 dB, and none at −6 dB. |
| `tb_guardian_table2` | Six guardians on one 32-byte frame. Five of them carry one rule each, keyed on the SFD, FCF, source address, payload byte 16 and last payload byte. The sixth carries a full 30×5 rule chain. Each burst must end before the frame does. |

Each testbench finishes in under a second of wall time, except the noise test, which takes about 8 s. Synthesised with
the default policy, the top is about 1.6 k cells and 1.8 k flip-flops,
mostly the packet buffer and the receiver's chip history. The policy itself
becomes constant comparators, so unused slots cost nothing.
