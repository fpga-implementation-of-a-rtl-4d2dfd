# Multi-standard OFDM packet detector

A receiver that must handle several OFDM standards has to work out two things
from the raw I/Q stream: *where* a packet starts and *which* standard sent it.
Standards differ mainly in the known preamble at the front of each packet, in
its values and its length. This design finds packets by cross-correlating the
received stream with up to three preambles at once. The preambles are not
built into the hardware: a host processor loads them at run time as bit
patterns, together with each preamble's length and detection threshold.

The correlators need no multipliers. Every received sample and every preamble
sample is reduced to its sign, so each product is an XNOR and each correlation
is a count of matching bits. A correlator is a stack of identical 32-sample
"windowing cores", so a longer preamble only needs more cores.

The RTL is written in SystemVerilog (IEEE 1800-2017). It is synthesizable and
its sizes are parameters. It is the RTL of a design described in a published
FPGA paper, which was built there with a model-based tool flow. The
reconstruction follows the paper's block structure and arithmetic. Widths,
pipelining, the register map and the control details are choices made here;
the section *Where this design goes beyond the description* lists them.

## Signal flow

```
 I/Q in ──► energy_detector ──► fine_detection ───────────────► standard_detection ──► I/Q out
             |Σ|y|²| > thr       categorizer (sign)               longest preamble wins    frame_start
             Energy Detect ────► NUM_STD × cross_correlator        parameter set out        std_id, active
                                  (stack of window_core)                                    in_packet
                 ▲                     ▲                                  ▲
                 └──────────── shared_regs (host register bus) ───────────┘
```

| Stage | Module | Latency (clocks) | Decides |
|---|---|---|---|
| Energy detection | `energy_detector` | 3 | is there any signal? |
| Fine detection | `fine_detection` → `categorizer`, `cross_correlator`, `window_core` | 4 | does the stream match preamble *s*? |
| Standard detection | `standard_detection` | 1 | which standard, and where does the frame start |
| Configuration | `shared_regs` | – | everything the host sets |

`packet_detector` is the top level. Samples travel with a strobe
(`in_valid`), so the sample rate can be any fraction of the clock, up to one
sample per clock. The samples come out 8 clocks after they go in. `frame_start`
is high on the same output sample as the *last* sample of the detected
preamble, so a downstream receiver can take its symbol timing from that point.

## The sign cross-correlator (the part to understand first)

For a received sample y = I + jQ and a reference preamble h = h_I + j h_Q,
the correlation splits into four real correlations:

```
Re{P} = P_II + P_QQ        Im{P} = P_QI − P_IQ
```

Here P_XY is the correlation of received component X with reference
component Y. After the categorizer, every value is +1 or −1 and is stored as one
bit (1 = +1, meaning "≥ 0"; 0 = −1). The product of two such values is +1
exactly when the bits are equal, so over n taps

```
P_XY = 2·popcount(mask & ~(x ^ y)) − n
```

`window_core` computes the four popcounts for its 32 taps. It returns its
share of Re and Im, registered. With no noise, an L-sample preamble gives
Re{P} = 2L at the sample where it has fully arrived: 64 for 32 samples, 128 for
64 samples. Everywhere else a pseudo-noise preamble gives small values. The
detection rule is **Re{P} > threshold**, with a signed, per-standard threshold.
For example, the reference setup uses 50 for 32-point and 100 for 64-point
correlators, which leaves room for sign errors caused by noise. Im{P} is
computed and brought out, but the detection rule does not use it.

**Window and bit order.** The window is a shift register of sign bits, one for
I and one for Q. Bit 0 holds the newest sample. Coefficient bit k multiplies
window bit k. The host therefore loads a preamble h[0..L−1] (h[0] sent first)
*time-reversed*:

```
core c, bit k  =  sign( h[L − 1 − (32·c + k)] )      for 32·c + k < L
```

Tap k of core c takes part only if 32·c + k < `corr_len`. A correlation of 16
points therefore uses the low half of the first register, and one of 64 points
uses two full registers. The cores of one correlator are chained: the oldest
bit of core c shifts into core c+1. `N_CORES` sets the longest possible
correlation (32·`N_CORES`), and `corr_len` picks the length actually used at
run time.

**Enable.** The windows advance only on a sample that is valid *and* arrives
while Energy Detect is high. Otherwise they hold their content, and no
detection is reported. This saves switching activity, and noise alone cannot
trigger a detection. The price: if Energy Detect drops for even a few samples
inside a preamble, those samples are missing from the window and the peak is
lost. The energy threshold must sit well below the signal-plus-noise level
(see *Measured behaviour*).

## Energy detection

The per-sample energy (I² + Q²) >> `E_SHIFT` goes into a `MAX_WIN`-deep
shift register whose taps are addressable. A running sum adds each new value
and subtracts the value at address `win_len − 1`, the one that leaves the
window. So the sum always covers exactly the last `win_len` samples, with no
adder tree. Energy Detect is `sum > threshold`. If `win_len` changes, the sum
restarts, and the output stays low until the window has filled again. Both
`win_len` (1..64) and the threshold are host registers. The intent is that the
host sets the threshold from the channel it observes.

## Standard detection

Several correlators can fire on the same sample, for example when one preamble
contains the other. Among the enabled standards that fire, the one with the
**longest programmed preamble** wins, because a long preamble is the less
likely false alarm. A tie goes to the lower index. The block then does three
things:

* pulses `frame_start` and reports `std_id`;
* latches that standard's parameter set into `active`: packet length, symbol
  size and training length, as the host loaded them;
* holds `in_packet` high for `packet_len` samples, counting the frame-start
  sample, and ignores every detection until then. A `packet_len` of 0
  disables this lock-out.

## Host register map

There is one 32-bit word per address. A write takes effect on the clock edge
where `bus_we` is high. `bus_rdata` follows `bus_addr` combinationally.
Unmapped addresses read as 0. A bridge from the host's own bus (AXI-Lite, for
example) has to be added.

| Address | Name | Bits | Reset |
|---|---|---|---|
| 0x00 | energy window length N | [6:0], 1..64 | 16 |
| 0x01 | energy threshold | [31:0] | 0xFFFFFFFF |
| 0x02 | standard enable | bit s | 0 |
| 0x03 | status (read) | [31:16] frame count, [1:0] last standard | 0 |
| 0x10 + 16·s + 0 | correlation length | [7:0], 1..64 | 0 |
| … + 1 | detection threshold on Re{P} | [8:0] signed | +255 |
| … + 2 / 3 / 4 | packet length / symbol size / training length | [15:0] | 0 |
| … + 5 | frames detected for s (read) | [15:0] | 0 |
| … + 8 + 2c | I coefficient register of core c | [31:0] | 0 |
| … + 9 + 2c | Q coefficient register of core c | [31:0] | 0 |

A standard is configured in this order: write its length, threshold,
coefficients and parameters, then set its bit in the enable register. All of
these can be rewritten while samples flow. A register change reaches the
datapath on the next clock, so a correlator whose coefficients change in the
middle of a preamble gives one undefined result for that preamble.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_STD` | 3 | standards searched in parallel |
| `N_CORES` | 2 | 32-tap cores per correlator (longest preamble 64) |
| `TAPS` | 32 | taps per core = width of a coefficient register |
| `SAMPLE_W` | 16 | signed I and Q width |
| `MAX_WIN` | 64 | deepest energy window |
| `E_SHIFT` | 8 | right shift of the per-sample energy |

The number of standards, the 32-bit coefficient registers and the 32- and
64-sample preambles (hence two cores) come from the reference configuration.
Sample width, energy window depth and scaling are choices made here. With 16-bit
samples and `E_SHIFT` = 8 the 32-bit energy sum cannot overflow. The register
map assumes `TAPS` ≤ 32, `NUM_STD` ≤ 15 and `N_CORES` ≤ 4.

Yosys coarse synthesis of the default top gives about 800 word-level cells,
1.6 k flip-flop bits and the 64 × 32-bit energy shift register.

## Where this design goes beyond the description

The published description gives the block diagram, the energy equation, the
sign reduction, the four-correlation form, 32-bit coefficient registers,
stackable windowing cores, priority for the longer preamble, and the 32/64/64
example with thresholds 50/100/100. The rest was decided here:

* **Sign convention.** The correlation is written as Σ y*[m] h[m+n], which
  would give Im = P_IQ − P_QI. The hardware form given is Im = P_QI − P_IQ,
  which is y·h*, and this RTL follows the hardware form. Detection uses only
  Re{P}. That matches the stated ideal peaks (2L) but assumes no carrier phase
  offset.
* **Energy decision.** The description says a detection occurs when "the
  number of energy samples within a window" exceeds a threshold. Here this is
  read as the windowed energy sum of the energy equation. The addressable shift
  register holds energies, not raw I and Q.
* **Enable semantics.** The windows freeze while Energy Detect is low. An
  always-running window with only the decision gated would be the other
  reading.
* **Lock-out, tie rule, parameter widths, restart of the energy sum, reset
  values, register bus and address map, pipeline depths.** All are choices made
  here.
* **Not included:** the host processor (software that sign-maps preambles and
  writes the registers), the radio front end, and any Schmidl-Cox coarse
  timing stage. The latter is mentioned as background but is not part of the
  block diagram. RSSI input is not used.

## Measured behaviour

`tb_snr_sweep` runs the reference setup: three standards with preambles of 32,
64 and 64 random complex samples, and thresholds 50/100/100. Each trial adds
complex white Gaussian noise; SNR is the signal power per sample divided by
the noise power per sample. The energy threshold is set a quarter of the way
from the noise-only level to the signal-plus-noise level. A trial is correct
when exactly one frame start occurs and it names the standard that was sent.
Results for 300 trials per point (they vary a little with the random seed):

| SNR (dB) | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 10 |
|---|---|---|---|---|---|---|---|---|
| 32-sample preamble | 0.08 | 0.23 | 0.49 | 0.78 | 0.93 | 0.99 | 1.00 | 1.00 |
| 64-sample preamble | 0.03 | 0.20 | 0.53 | 0.86 | 0.99 | 1.00 | 1.00 | 1.00 |

The shape matches the published hardware simulation. The 32-sample preamble is
ahead at the lowest SNR, the 64-sample one overtakes it near 2 dB, and both
reach 1 by 5–6 dB. The absolute values at 0–1 dB are lower than published
(about 0.2 and 0.15 at 0 dB). The published noise model and SNR definition are
not known, and a threshold fixed at 78 % of the ideal peak is very sensitive to
them. At 10 dB every trial is detected, and the sent standard's correlator is
above its threshold while the other two stay below theirs, as in the published
scope capture.

## Verification

Each module has a self-checking testbench in `tb/` that compares the module
with an independent integer model and ends with a `TB_RESULT checks=… failures=…`
line:

| Testbench | What it establishes |
|---|---|
| `tb_categorizer` | sign rule including 0 and the extremes, one-clock alignment |
| `tb_window_core` | two chained cores against the ±1 model of Re/Im for lengths 1..64, cascade bit |
| `tb_cross_correlator` | embedded preambles give peaks of exactly 2L; Re/Im/detect on every cycle; 2-clock latency |
| `tb_correlator_stack` | the same correlator built from four cores, with preambles of 128, 100, 64 and 32 samples |
| `tb_energy_detector` | windowed sum and decision for every output, window changes, strobe gaps, 3-clock latency |
| `tb_fine_detection` | 3 correlators (32/64/64) with the enable dropping; every output checked, 4-clock latency |
| `tb_standard_detection` | priority on same-cycle detections, lock-out, disabled standards, in_packet length |
| `tb_shared_regs` | every register written and read back, reset values, frame counters |
| `tb_packet_detector` | end to end at default size: each standard found at the right sample with peak 2L, 32/64 conflict resolved to 64, detection inside a packet ignored, weak preamble gated by energy, standard disabled and reprogrammed at run time, counters read back |
| `tb_snr_sweep` | the SNR sweep above (a few seconds of simulation) |

`tb_packet_detector` counts how often each mechanism occurs and fails if one
never does.

To run one with Verilator (here `tb_packet_detector`), from the folder that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/pd_pkg.sv tb/tb_packet_detector.sv --top-module tb_packet_detector
./obj_dir/Vtb_packet_detector
```

The package has to be named first; everything else is found through `-y`.
For lint, use `verilator --lint-only -Wall -y rtl +libext+.sv rtl/pd_pkg.sv
rtl/packet_detector.sv`.

Things that are *not* verified: timing closure on any FPGA, behaviour under a
carrier frequency offset, and interaction with a real host bus.
