# Channel estimation and subcarrier equalization for an 802.11a/g/n OFDM receiver

An OFDM Wi-Fi receiver turns each received symbol into 64 frequency-domain
samples (one per subcarrier) with an FFT. Before these samples can be
demodulated, two impairments must be removed:

* **The radio channel.** Every subcarrier sees its own complex gain. The gain
  is measured once per packet on a long training field (LTF) whose values the
  receiver knows.
* **The sampling frequency offset.** The transmitter and receiver clocks differ
  slightly, so a phase error appears that changes from symbol to symbol. It is
  a constant part (common phase error, CPE) plus a part that grows linearly
  with the subcarrier index (phase error gradient, PEG). It is tracked on the
  four pilot subcarriers of every symbol.

This RTL implements both stages for 20 MHz, single-stream 802.11a/g (Legacy)
and 802.11n (HT) packets. It also includes the state machine that walks a
packet through its Legacy and HT parts. The algorithm is the one used in the
openwifi receiver, organised as in a published high-level-synthesis rework of
it. This code is an independent RTL description of that design, not the
authors' code.

It is meant to run at 100 MHz. The FFT delivers a symbol as a burst of 64
samples at one sample per clock. A new symbol arrives every 3.6 µs (360 cycles)
with the short guard interval, or every 4.0 µs with the long one.

```
 packet detection -> frequency offset correction -> FFT
      |                                              |  64 samples / symbol
      v pkt_start                                    v
 +-------------------------- wifi_rx_chest_eq ---------------------------+
 |   chan_est  (LTF -> CSI memory, optional smoothing)                   |
 |       | CSI read port                                                 |
 |   equalizer (polarity, CPE, pilot LVPE, PEG, data LVPE, zero-forcing) |
 +-----------------------------------------------------------------------+
      | equalized subcarriers                        ^ signal-field results
      v                                              |
 demodulation / decoding ----------------------------+
```

Packet detection, frequency offset correction, the FFT and the decoder are not
part of this RTL. Their signals are ports of the top module.

## Packet sequence

The top module `wifi_rx_chest_eq` routes each FFT burst to the right block. It
follows the frame layout:

| Symbol(s)        | Legacy packet                     | HT packet                                  |
|------------------|-----------------------------------|--------------------------------------------|
| L-LTF (2 symbols)| channel estimate, Legacy          | same                                       |
| L-SIG            | equalize, Legacy, polarity idx 0  | same                                       |
| (decoder)        | `sig_valid`, `sig_ht=0`, `sig_nsym` | `sig_valid`, `sig_ht=1`                  |
| data / HT-SIG1,2 | equalize `sig_nsym` symbols, idx 1 | equalize 2 symbols (HT-SIG), Legacy, idx 1 |
| (decoder)        |                                   | `htsig_valid`, `htsig_nsym`, `htsig_smooth` |
| HT-STF           |                                   | dropped (64 samples accepted and discarded) |
| HT-LTF           |                                   | new channel estimate, HT, smoothing per HT-SIG |
| HT data          |                                   | equalizer restarted in HT mode, `htsig_nsym` symbols, idx 3 |

The equalizer is restarted at the switch from Legacy to HT for three reasons:

* HT symbols use a different pilot pattern.
* They carry 52 data subcarriers instead of 48.
* They need the new HT channel estimate.

A restart also clears the accumulated PEG.

The "polarity idx" column is the starting position in the pilot polarity
sequence (see below). It follows the 802.11 symbol numbering:

* L-SIG is symbol 0.
* The first symbol after L-SIG is symbol 1.
* The HT data symbols start at 3, because HT-SIG1 and HT-SIG2 take 1 and 2.

The decoder must report its results through `sig_valid` and `htsig_valid`
before the next symbol's samples arrive. A sample that arrives while no block
can take it is dropped, and the 16-bit counter `dropped` counts it. The top
has no parameters. Legacy smoothing is chosen by the configuration input
`leg_smooth`. HT smoothing follows the bit the transmitter sets in HT-SIG.

Outputs to the decoder:

* `eq_valid`, `eq_data`, `eq_k`, `eq_last`: one equalized data subcarrier per
  clock, in increasing subcarrier index.
* `eq_sym_done`: pulses at the end of each symbol.
* `eq_ht`: marks the HT part.
* `pkt_done`: pulses at the end of the packet.

## Number formats and phase convention

All values are signed two's complement. The package `wifi_rx_pkg` holds them
together with the 802.11 tables.

| Quantity                      | Format                                   |
|-------------------------------|------------------------------------------|
| FFT sample, CSI               | 16-bit I, 16-bit Q (`cplx16_t`)          |
| phase                         | units of π/2048: one turn = 4096, wraps mod 4096 |
| CPE                           | 16 bits                                  |
| per-subcarrier phase CPE+k·PEG| 18 bits                                  |
| Sxy (PEG regression numerator)| 24 bits                                  |
| accumulated PEG               | 20 bits, 6 fractional bits (phase units per subcarrier) |
| equalized output              | 16 bits, 1.0 = 1024                      |

The 16/18/24-bit phase widths and the 7-bit polarity counter match the
published HLS code. The phase unit, the PEG fraction and the output scale are
this design's choices.

Subcarriers are indexed k = −32…31. The FFT bin of subcarrier k is k mod 64,
which is simply `k[5:0]`. The 802.11 convention of −31…32 differs only on the
unused Nyquist bin.

**Sign convention.** The CPE and PEG are measured on conj(X)·P·H, where:

* X is the received sample;
* P is the pilot's polarity;
* H is the channel.

What is measured is therefore the *negated* phase error. Rotating a sample by
`+CPE + k·PEG` removes the error. Inside the design no negation appears
anywhere. Read `cpe` and `acc_peg` as "phase to apply", not "phase observed".

## Channel estimation (`chan_est`)

The estimate for subcarrier k is the received LTF value times the known one
(±1):

* **Legacy.** Two L-LTF symbols arrive. The first is written to a 64-entry
  buffer `raw`. As the second streams in, the block computes
  `H = floor((L1+L2)/2) · LT` on the 52 active subcarriers.
* **HT.** A single HT-LTF gives `H = L · LT` on 56 subcarriers.

Inactive bins get 0. The LTF reference values are a 53-bit constant from the
802.11 standard. HT adds k = ±27, ±28.

**Smoothing (optional).** A second pass walks the list of active subcarriers
in increasing k and writes into `csi` the mean of each entry and its two
list neighbours:

* Across DC the neighbours are k = −1 and k = +1.
* At the two band edges the mean is over 2 points.
* The division by 3 is a multiplication by 21845/65536 with rounding.

The window length and the edge handling are choices of this design.

**Timing.** `done` rises:

* 1 cycle after the last LTF sample without smoothing;
* 53 cycles (Legacy) or 57 cycles (HT) after it with smoothing.

The requirement is to be ready before the next symbol (3.6 µs = 360 cycles).
The equalizer reads `csi` through a combinational port.

## Equalizer (`equalizer`)

For each symbol the equalizer runs six steps in a fixed schedule. Each step
walks a list of active subcarriers from `sc_index_rom`. Legacy and HT
therefore differ only in:

* which list is walked (48 or 52 data subcarriers);
* the pilot pattern.

| State      | Cycles | Work |
|------------|--------|------|
| LOAD       | 64     | store the symbol in bin order |
| CPE_ACC    | 4      | Σ conj(X)·P·H over the 4 pilots (step 1, polarity; step 2, CPE sum) |
| CPE_ISSUE/WAIT | 1 + 27 | angle of the sum → CPE |
| PEG_ISSUE  | 4      | rotate each pilot by CPE + k·accPEG (step 3), angle of conj(X')·P·H (pipelined) |
| PEG_WAIT / PEG_UPD | 27 + 1 | Sxy = Σ k·angle; accPEG += Sxy/980 (step 4) |
| EQ_ISSUE   | 48/52  | per data subcarrier: phase CPE + k·accPEG (step 5), rotate, then zero-force (step 6) |
| EQ_WAIT    | 46     | drain the two dividers |

The last output of a symbol appears 221 cycles (Legacy) or 225 cycles (HT)
after the symbol's first sample. The next symbol is accepted only after that
(`in_ready` low). A symbol slot therefore fits easily in 360 cycles, which
gives about 28 samples/µs against the 17.8 required.

**PEG tracking.** The pilots are first rotated by the PEG accumulated over the
previous symbols. Only the remaining increment is measured:

* Sxy = Σ k·angle over the rotated pilots.
* The increment is Sxy / Σk², where Σk² = 21² + 7² + 7² + 21² = 980.
* The division by 980 is a multiplication by round(2²⁶/980) = 68478.

This keeps the measured angles small, so they never wrap between symbols.
There is one `lvpe_correction` instance. The pilot pass and the data pass
share it.

**Zero-forcing.** Y = X'·conj(H)·1024 / |H|². The real and imaginary parts go
to two pipelined dividers. A zero |H|² (an unused bin) gives a saturated
quotient rather than an error. Results are saturated to 16 bits.

## Phase arithmetic

* **`phase_calc`** computes the angle of a 36-bit complex value in 27 cycles,
  one input per clock:
  1. Fold the value into the first octant.
  2. Normalise the larger component to 12 bits.
  3. Compute ratio = 1024·min/max with a divider.
  4. Look up atan in a 1025-entry table.
  5. Undo the fold.
* **`phase_rotate`** multiplies by exp(jθ) using a quarter-wave sine table of
  1025 entries with amplitude 2¹⁴. It is combinational.

Both tables are computed at elaboration by constant functions that evaluate a
fixed-point Taylor series. There are no data files. Table-based trigonometry
with limited resolution is what the original hardware uses. The table sizes
are this design's choices.

**`pipe_divider`** is a restoring divider with one stage per quotient bit. It
accepts one division per clock and has a latency of NUM_W+2 cycles (46 at the
default 44 bits). It truncates toward zero. Three instances exist: two in the
equalizer and one inside `phase_calc`.

## Pilot polarity (`pilot_polarity`)

The pilots are BPSK symbols whose sign changes every symbol. The sign is the
product of two terms:

* the 127-long 802.11 polarity sequence (the x⁷+x⁴+1 scrambler started from
  all ones), built at elaboration;
* a base pattern for the four pilots:
  * Legacy: {+1, +1, +1, −1} for k = −21, −7, 7, 21;
  * HT: the same pattern, rotated by the HT symbol number.

`pol_nr` wraps from 126 to 0. Packets longer than 127 symbols therefore reuse
the sequence from its start.

## Files

| File | Content |
|------|---------|
| `rtl/wifi_rx_pkg.sv` | types, widths, LTF tables, subcarrier list functions |
| `rtl/pipe_divider.sv` | pipelined signed divider |
| `rtl/phase_calc.sv` | pipelined angle (atan2) |
| `rtl/phase_rotate.sv` | complex rotation by a phase |
| `rtl/sc_index_rom.sv` | active-subcarrier lists as ROM |
| `rtl/pilot_polarity.sv` | pilot sign per symbol |
| `rtl/lvpe_correction.sv` | CPE + k·PEG and PEG update |
| `rtl/chan_est.sv` | channel estimator with smoothing |
| `rtl/equalizer.sv` | per-symbol phase tracking and zero-forcing |
| `rtl/wifi_rx_chest_eq.sv` | top: packet sequencing |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_ht512_mcs_sweep.sv` | load test: 512-byte HT packets at MCS 0-7 |

## Simulation

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. A watchdog ends a run that hangs. The
package must come first on the command line. For example:

```
verilator --binary --timing --top-module tb_wifi_rx_chest_eq \
    rtl/wifi_rx_pkg.sv rtl/pipe_divider.sv rtl/phase_calc.sv rtl/phase_rotate.sv \
    rtl/sc_index_rom.sv rtl/pilot_polarity.sv rtl/lvpe_correction.sv \
    rtl/chan_est.sv rtl/equalizer.sv rtl/wifi_rx_chest_eq.sv tb/tb_wifi_rx_chest_eq.sv
./obj_dir/Vtb_wifi_rx_chest_eq
```

The testbenches compute their reference values independently of the RTL:

* with `real` arithmetic where trigonometry or division is involved;
* with plain integer models for the divider, the subcarrier lists and the
  polarity sequence.

Operands, LTF symbols, channels and phase errors are drawn from `$urandom`.

The end-to-end test `tb_wifi_rx_chest_eq` uses the top at its defaults. It
runs four cases:

1. a 6-symbol Legacy packet;
2. an 8-symbol HT packet with smoothing and a different channel for the HT
   part;
3. a 130-symbol Legacy packet, so the polarity sequence wraps;
4. a stray burst that must be dropped.

Across these cases it checks every equalized subcarrier (L-SIG, HT-SIG and
data) against the transmitted QPSK point × 1024, within 40 units. The channel
is a complex gain with a delay. On top of it comes a per-symbol phase error
with a drifting gradient. It also counts how often each mechanism was
exercised:

* Legacy and HT estimates;
* smoothing;
* the HT restart;
* the HT-STF skip;
* PEG tracking;
* the polarity wrap;
* dropped samples.

The test fails if any mechanism never occurred. The run takes well under a
second.

`tb_ht512_mcs_sweep` is a load test. It sends one HT packet with a 512-byte
payload for each of MCS 0 to 7 (159 down to 16 data symbols, 413 in all).
Data symbols follow each other every 360 cycles, the short-guard-interval
rate. The data subcarriers carry BPSK, QPSK, 16-QAM or 64-QAM points. The test
checks:

* every output value;
* that no sample is dropped;
* that each HT symbol finishes exactly 225 cycles after its first sample.

## Departures and limits

* The exact fixed-point behaviour of the reference hardware (rounding points,
  table sizes, divider width) is not published. Results agree with ideal
  arithmetic to within a few least significant bits, but they are not
  bit-identical to any other implementation.
* The handshake with the decoder (`sig_*`, `htsig_*`) and the dropping of late
  samples are this design's own interface.
* The channel estimate is not refined during the packet. It stays as
  measured on the LTF.
* The HT part supports one spatial stream and one HT-LTF only.
* Only the 20 MHz modes are covered.
* There is no per-packet configuration of the guard interval: the design does
  not need it, since it only sees FFT bursts.
* Reset is asynchronous and active low. It resets control state only. The
  sample and CSI memories are not reset.
* The cycle schedule is tighter than the published figures for the HLS
  version of this stage:
  * per symbol, after the 64-sample burst: 1.57 µs (Legacy) and 1.61 µs
    (HT), against 2.82 µs and 2.90 µs;
  * channel estimate with smoothing: 0.53 µs and 0.57 µs, against 1.62 µs
    and 1.66 µs.

  Any schedule that stays within the 360-cycle symbol slot is equivalent for
  the receiver.
* FPGA resource use has not been measured.
