# Opto-link ASICs for the ATLAS pixel detector: decoder RTL and chip models

The ATLAS pixel detector talks to its off-detector readout over optical
fibres. Two small radiation-hard chips sit at the detector end of each link:

* **DORIC** (Digital Opto-Receiver IC) receives one light signal per channel
  through a PIN photodiode. That signal carries both the 40 MHz bunch-crossing
  clock and a serial command stream, merged into a single bi-phase-mark (BPM)
  code. The DORIC recovers the clock and the commands and hands them to the
  module controller as two LVDS pairs.
* **VDC** (VCSEL Driver Chip) goes the other way. It takes the module
  controller's LVDS data (up to 80 Mbit/s) and switches the current of a
  VCSEL laser between a small standing "dim" current and a "bright" current.
  It does this while drawing the same current from the supply in both states.

Each chip has four channels. Most of both chips is analog: amplifiers,
comparators, current sources. The one function that is logic through and
through is the DORIC's BPM decoder: it takes a transition stream and produces
a clock and data. This repository gives:

* synthesizable SystemVerilog for that decoder (`doric_logic`);
* real-valued behavioural models of the analog parts: the DORIC front end,
  and the VDC's LVDS receiver and VCSEL driver. With these the two chips can
  be simulated end to end;
* chip-level wrappers (`doric`, `vdc`) and a top level that holds one of each
  (`optolink_asics`);
* self-checking testbenches for every module, plus an end-to-end loop-back
  and a PIN-threshold scan.

The oversampling approach to clock recovery, described below, belongs to this
implementation. The real chip's decoder circuit is not public in enough
detail to copy, so its required behaviour was reproduced instead.

## The bi-phase-mark code

Time is divided into 25 ns bit cells, one per period of the 40 MHz clock.

* The line **always changes level at the start of a cell**. This is where the
  clock's leading edge falls.
* A command bit of **1 adds a second transition in the middle of the cell**,
  where the clock's trailing edge falls.
* A 0 adds nothing.

So an idle link (all zeros) is a 20 MHz square wave, and a run of ones is a
40 MHz square wave:

```
bit     0       0       1       0       1       1       0      
BPM    |‾‾‾ ‾‾‾|___ ___|‾‾‾|___|‾‾‾ ‾‾‾|___|‾‾‾|___|‾‾‾|___ ___
start  ^       ^       ^       ^       ^       ^       ^
middle     ^       ^       ^       ^       ^       ^       ^
```

The code carries no absolute level: only transitions matter. That is why
the light can be AC-coupled, and why an inverted fibre signal decodes the
same way.

There is one ambiguity. A transition on its own does not say whether it marks
a cell start or a mid-cell 1. During a run of ones, transitions arrive every
12.5 ns, and either half of the run could be taken as the cell starts. The
decoder resolves this from the zeros (next section).

## The decoder (`rtl/doric_logic.sv`)

### Sampling

The decoder runs on its own oversampling clock, `clk_os`, at
`OSR` × 40 MHz. The default is OSR = 32, which is 1.28 GHz and gives a sample
every 0.78 ns. This is the smallest power of two under the 1 ns timing-error
budget of the recovered clock.

The input passes through a two-flop synchroniser. A third flop keeps the
previous sample, so a transition appears as a one-cycle pulse, `edge_det`.
A phase counter `ph` (0 … OSR−1) counts samples within the cell.

### Acquiring lock

In state `ACQUIRE`, the decoder measures the gap between consecutive
transitions. A mid-cell transition is always followed, half a cell later, by
the next cell-start transition. So two transitions a whole cell apart
(OSR ± WIN samples) with nothing between them can only be two cell starts.
On the second of them the decoder sets `ph` to the start of a cell and
enters `LOCKED`.

This means lock needs at least one 0 bit. An idle link gives one every cell.
A link sending only ones cannot be locked by any decoder, because its two
phases cannot be told apart.

### Tracking

In `LOCKED`, every transition is classified by where `ph` is when it arrives:

| `ph` at the transition                | meaning                   | action                         |
|---------------------------------------|---------------------------|--------------------------------|
| within ±WIN of 0 (mod OSR)            | cell start (clock edge)   | `ph` re-aligned to the start   |
| within ±WIN of OSR/2                  | mid-cell: command bit = 1 | remember for this cell         |
| anywhere else                         | not BPM                   | back to `ACQUIRE`              |

Two more cases also send the decoder back to `ACQUIRE`:

* no cell-start transition before the start window closes (`ph` = WIN+1);
* Reset.

With WIN = 4 each window is ±3.1 ns wide. Re-aligning on every cell start lets
the decoder follow input jitter. It also follows a sampling clock that is not
an exact multiple of 40 MHz: the testbenches use 782 ps instead of 781.25 ps.

### Outputs and their timing

All outputs are registered in `clk_os`.

* **CLK** rises on the sample after a cell-start transition is detected. This
  is two to three `clk_os` periods after the light changes, so rising edges
  have a spread of one sample (0.78 ns). CLK then stays high for exactly
  OSR/2 samples (12.5 ns). The duty cycle is 50 %, give or take one sample of
  input jitter (46.9–53.1 % at most; the requirement is 50 ± 4 %). CLK never
  rises on a predicted edge, only on a detected one.
* **DATA** for cell *k* is decided when the mid-cell window of cell *k* closes
  (`ph` = OSR/2 + WIN + 1, about two thirds of the way through the cell). It is held until the
  same point of cell *k*+1. The rising CLK edge that starts cell *k*+1
  therefore samples bit *k* with about 9 ns of setup and 16 ns of hold. The
  receiver sees each command bit one clock period late.
* **CLK̄** and **DATĀ** are the complements, standing in for the LVDS pairs.
* While not locked, CLK and DATA are held low, so the controller sees no clock
  rather than a wrong one.

An assertion checks that CLK is high only while locked and only in the first
half of a cell.

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `OSR` | 32 | samples per 25 ns cell; a power of two ≥ 8. It sets the timing resolution (25 ns/OSR). |
| `WIN` | 4 | half-width of both acceptance windows in samples. It needs 4·WIN < OSR so the windows do not overlap. Wider windows tolerate more jitter but make a misplaced edge harder to reject. |

Synthesized alone, the decoder comes to about 110 word-level cells and
20 flip-flops.

## The DORIC front end (`rtl/doric_gain_stage.sv`, behavioural)

The PIN diode's bias voltage (up to 10 V) is kept off the chip, so the diode's
current enters a single-ended preamplifier. Single-ended amplifiers pick up
supply noise. To cancel it, the chip has a second, identical preamplifier
whose input sees only a dummy capacitor matched to the PIN's capacitance.
The differential gain stage then takes the difference of the two. Noise
common to both paths cancels; the light signal does not.

The model works on the two input currents directly:

```
bpm = (i_signal − i_noise) > I_THRESH        I_THRESH = 20 µA
```

The expected signal amplitude is 40–1000 µA, and a dark PIN is taken to give
no current. A fixed threshold at half the smallest amplitude then decodes the
whole range. The testbenches add up to ±300 µA of noise to both inputs, far
above the threshold. The output is unaffected. The same noise on the signal
input alone corrupts the decisions.

The model leaves out:

* preamplifier gain;
* the AC coupling between preamplifiers and gain stage;
* bandwidth and hysteresis;
* random (uncorrelated) noise.

It therefore says nothing about bit error rate or jitter from the analog path.

## The VDC (`rtl/vdc_lvds_receiver.sv`, `rtl/vdc_driver.sv`, behavioural)

**LVDS receiver.** The model works on the pair's two logic levels:
`out = in_p & ~in_n`. An invalid pair, with both wires at the same level
(open or shorted), gives 0 and leaves the laser dim. That fail-safe choice
belongs to this model.

**Driver.** The driver sources current into the VCSEL anode; the cathodes of
the laser array are common and grounded. Two pad voltages set the currents:
V_Iset sets the bright-minus-dim amplitude and Tunepad sets the dim current.
A dummy branch draws the amplitude from the supply whenever the laser is dim,
so the chip's supply current does not depend on the data. This keeps
switching noise off the shared board supply. Model, with all currents in
amperes:

```
Iset     = max(V_Iset, 0) / 1 kΩ
I_dim    = min(max(Tunepad, 0) / 1 kΩ, 20 mA)          (1 V → 1 mA)
I_amp    = min(20 · Iset, 20 mA − I_dim)
i_anode  = I_dim + (bright ? I_amp : 0)
i_dummy  = bright ? 0 : I_amp
i_supply = I_dim + I_amp                                (constant)
```

The following come from the published design:

* the 0–20 mA output range;
* the ~1 mA dim current;
* the dummy branch.

The following are this model's choices:

* the two pad conversions;
* the gain of 20 (full range at Iset = 1 mA).

Measured chips reach only about 12–13 mA, because of the laser's own series
resistance. That belongs to the laser and is not modelled. The model has zero
delay; the real driver has rise and fall times under 1 ns.

## Chips and top level

```
optolink_asics            top: one DORIC, one VDC, all pins brought out
├── doric   (NCH = 4)     shared Reset and clk_os
│   └── per channel: doric_gain_stage → doric_logic
└── vdc     (NCH = 4)     shared V_Iset and Tunepad; total supply current
    └── per channel: vdc_lvds_receiver → vdc_driver
optolink_pkg              channel count, bit period, OSR, WIN
```

On the detector the two chips share a board but no signal. The DORIC's
outputs and the VDC's inputs both connect to the module controller, so the
top level just exposes both chips' pins. Two choices here are this design's
own, because the source does not say:

* Reset and the decoder clock are shared by the four DORIC channels.
* V_Iset and Tunepad are shared by the four VDC channels.

Ports with currents or voltages are `real`; the rest are `logic`. Only
`doric_logic` and `vdc_lvds_receiver` are synthesizable. The other modules
contain real-valued behavioural code and exist for simulation.

A detector board carries seven links. One top level (four channels of each
chip) therefore covers just over half a board; a board uses two of each
chip.

## Verification

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each also has a watchdog.

| testbench | what it does |
|-----------|--------------|
| `tb_doric_logic` | Jittered BPM with a sampling clock 0.1 % off frequency. It covers lock on idle bits, random data, loss of lock when the input freezes, relock, a burst of ones, and Reset. On every rising CLK it checks the DATA value, the CLK latency (spread < 1 ns, measured 0.76 ns), the 25 ± 2 ns period and the 46–54 % duty cycle. |
| `tb_doric_gain_stage` | Amplitudes of 40–1000 µA with and without common noise; noise on the signal input only. |
| `tb_doric` | Four channels at 40, 200, 600 and 1000 µA, each with its own PRBS-7 data and noise. |
| `tb_vdc_lvds_receiver` | All four pair states, then an 80 Mbit/s stream. |
| `tb_vdc_driver` | A V_Iset sweep at three Tunepad settings: dim, bright and clamp currents, constant supply current, then 80 Mbit/s switching. |
| `tb_vdc` | Four channels of random data at four pad settings. |
| `tb_optolink_asics` | End-to-end loop-back at the default parameters (details below). |
| `tb_pin_threshold_scan` | The link's "minimum PIN current with no bit errors" measurement, repeated on the model (details below). |

**`tb_optolink_asics`.** DORIC DATA is wired back into the VDC, and the VCSEL
current is compared with the PRBS-7 data that was sent. The data comes in
three segments separated by fibre-dark gaps. Reset and a change of V_Iset
happen during a gap. The test counts the following, and fails if any count is
zero: lock acquisitions, losses of lock, Reset, ones, zeros, decisions made
under noise above threshold, bright and dim laser states, and the V_Iset
change.

**`tb_pin_threshold_scan`.** The test scans the light amplitude from 10 to
60 µA. No bit arrives at ≤ 20 µA, and every bit arrives at ≥ 22 µA. Measured
chips showed 15–40 µA, and under 55 µA after irradiation.

To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl -Irtl \
    rtl/optolink_pkg.sv tb/tb_optolink_asics.sv --top-module tb_optolink_asics
./obj_dir/Vtb_optolink_asics
```

`-y rtl` lets Verilator find each module in `rtl/<name>.sv`. To run another
testbench, replace the testbench file and the top-module name. Every run
finishes in well under a second.

## How far to trust it, and where it departs from the chips

* **Clock recovery method.** The decoder's function matches the published
  code and the clock requirements: 40 MHz, 50 ± 4 % duty cycle, under 1 ns
  timing error. Its method does not match the chip. The real DORIC is analog,
  and it needs no 1.28 GHz clock. To build this RTL in silicon, you need a
  fast sampling clock that is free of the recovered clock, or you can lower
  OSR and accept coarser timing (at OSR = 16, 1.56 ns).
* **Lock and output rules are this design's.** This covers the lock rule, the
  windows, the outputs held low while unlocked, and the DATA timing. Reset is
  taken as active high and asynchronous.
* **DATA polarity.** The source's wording on the polarity of a "data bit"
  could be read either way. Here, a mid-cell transition decodes as 1. The
  other reading would only invert DATA.
* **Analog behaviour is idealised.** There are no delays, no random noise and
  no AC coupling. Bit error rate (required < 10⁻¹¹), jitter from the analog
  path, LVDS levels, rise and fall times, and radiation effects are not
  modelled. The radiation hardness of these chips comes from their layout
  (enclosed transistors, guard rings), not from their logic.
* **Assumed numbers.** All numeric choices not given by the source are
  collected as parameters: OSR, WIN, I_THRESH, GAIN, R_ISET, R_TUNE and
  I_OUT_MAX.
