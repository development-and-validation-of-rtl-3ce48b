# A 64-channel time-over-threshold front end for a directional dark-matter micro-TPC

The MIMAC micro-TPC finds the 3D track of a low-energy nuclear recoil. Its
anode has two crossed sets of pixel strips, X and Y. A hit pixel shows up as a
coincidence: at least one X strip and one Y strip fire in the same time slice.
The third coordinate, Z, comes from the drift time. The anode is therefore
sampled every 20 ns, and each sample is one slice of the track.

The chip described here serves 64 strips. For each strip it reports only one
bit per 20 ns slice: whether the strip current is above a programmable
threshold (time over threshold). All 64 bits are sampled together on a shared
50 MHz reference clock. They leave the chip on eight serial links running at
400 Mbit/s. Chips that share the reference clock sample in step, so a board
with many chips can build coincidences across them. The design follows the
front end ASIC published by Richer, Bourrion et al. (LPSC Grenoble) in
"Development and validation of a 64 channel front end ASIC for 3D directional
detection for MIMAC". This RTL is an independent rendering of that
description, not the authors' design files.

Most of the chip is analog. The RTL here has two kinds of files:

* **synthesizable logic**: the slow-control register, the 50 MHz sampler with
  its test-pattern multiplexer, the 8:1 serializers and the PLL divider;
* **behavioural models** of the analog and mixed-signal parts: the current
  preamplifier, the auto-zero amplifier, the threshold DAC, the current
  comparator, the pulse-lengthening monostable, the phase detector, the
  charge pump with its loop filter, and the VCO. They use `real` currents
  in nA and `#` delays, and each one says so in its first comment.

With them the whole chip can be simulated from strip current to serial bit.

## Hierarchy

```
mimac_asic                      the chip (64 channels, 8 links)
├── slow_control                404-bit configuration shift register
├── pll                         50 MHz -> 400 MHz, x8
│   ├── phase_detector          tri-state PFD                (model)
│   ├── charge_pump             + series R-C loop filter     (model)
│   ├── vco                     linear V-to-f                (model)
│   └── pll_divider             /8 counter = serializer bit slot
└── channel_group  x4           16 channels, 2 links
    ├── fe_channel x16          one analog channel           (model)
    │   ├── current_preamp      x15, with offset             (model)
    │   ├── autozero_amp        offset correction loop       (model)
    │   ├── current_dac         5 bit, 200 nA LSB            (model)
    │   ├── current_comparator  time over threshold          (model)
    │   └── monostable          16..22 ns pulse stretcher    (model)
    ├── sample_mux              50 MHz sampling, enables, pattern mux
    └── serializer8 x2          LSB link (D7..D0), MSB link (D15..D8)
```

`mimac_pkg` holds the sizes (64 channels, 4 groups of 16, 5 DAC bits, ratio
8, 8 links), the configuration record `asic_cfg_t` and the channel offset
function. There is one module per file, named after the module.

## One channel: from strip current to a digital pulse

Each strip drives a charge preamplifier. A current mirror copies the
preamplifier current with a gain of 15 into an output branch. That branch
feeds a current comparator, whose threshold current comes from a 5-bit DAC.
The DAC has a 200 nA LSB, so its full scale is 31 × 200 nA = 6.2 µA at the
comparator. Referred to the strip, that is 13.3 nA per step and at most
413 nA. The comparator output stays high for as long as the current is above
threshold.

Pulses shorter than one 20 ns sampling period could fall between two
sampling edges. To prevent this, each rising edge of the comparator also
fires a monostable. Its width is programmable from 16 ns to 22 ns with a 3-bit
setting. The channel output is the OR of the comparator and the monostable,
so:

* a long pulse keeps its true time over threshold;
* a short pulse becomes at least one monostable width long.

A pulse that starts *t* ns before the next sampling edge is sampled if
*t* ≤ max(pulse width, monostable width). Only monostable settings 5 to 7
(20.3 to 22 ns) guarantee that every pulse, however short, is sampled at
least once.

In the models:

* currents are in nA, and the strip current is negative for a hit;
* `i_out = −15·i_in + offset − correction`;
* `threshold = code · I_REF` (I_REF is 200 nA);
* the comparator is ideal, with no delay;
* the monostable width is `16 + adjust·6/7` ns and it cannot be retriggered
  while its pulse lasts.

The linear width steps and the non-retriggering are this design's choices.
Only the range 16 to 22 ns and the 3-bit `adjust` input come from the
published schematic.

### Offsets and the auto-zero phase

The DAC can only be 5 bits wide because the preamplifier's output offset is
removed first. Without correction, transistor mismatch gives offsets of
several µA. The measured spread over 200 channels has a mean of −1180 nA and
an RMS of 4991 nA, which is as large as the whole DAC range. An auto-zero loop
removes this offset:

1. While `az_clk` is high, the preamplifier output is switched away from the
   comparator. In the chip this happens about once a second, for a few tens
   of µs.
2. A differential amplifier adjusts a correction current on the `control`
   line until the output branch carries no current.
3. The correction is held until the next auto-zero phase.

After correction the measured spread is a mean of −20 nA and an RMS of 29 nA,
well below one LSB.

`autozero_amp` models the loop as a discrete update. Every 10 ns while
`az_clk` is high, it adds 0.25 × (output current − `RESIDUAL_NA`) to the
correction, so after 2 µs the output offset is within 1 nA of `RESIDUAL_NA`.
`RESIDUAL_NA` stands for the imperfection of the real loop; with the default
of 0 the loop is perfect. Putting the residue in this amplifier is the
model's choice, since where it arises in the chip is not known.

By default (`MISMATCH = 1`), every channel of `mimac_asic` gets a fixed
offset with the measured mean and RMS: `mismatch_offset_na(ch)` in
`mimac_pkg`. The spread is uniform, of half width 4991·√3 nA, over the
channel order `k = 37·ch mod 64`. Before its first auto-zero phase the chip
therefore behaves like real silicon: channels whose offset exceeds the
threshold fire continuously. Drive `az_clk` high for about 2 µs after power-up.
After that, each channel keeps the residual offset `residual_offset_na(ch)`:
a uniform spread with mean −20 nA and RMS 29 nA over the order
`k = (29·ch + 7) mod 64`. At the input this is −r/15, about 2 nA RMS, and it
is what spreads the thresholds from channel to channel.

## Sampling, frames and the serial links

`sample_mux` registers the 16 channel outputs of a group on every rising
edge of the 50 MHz reference. It clears the bits of disabled channels. It
then passes on either these samples or the fixed 16-bit training pattern
from the configuration, chosen by `pattern_sel`. This gives a 16-bit word,
D15..D0.

Each group has two serializers, which together carry one 16-bit word per
20 ns reference period:

| link           | `ser_out` bit | slot 0 | 1   | 2   | 3   | 4   | 5   | 6  | 7  |
|----------------|---------------|--------|-----|-----|-----|-----|-----|----|----|
| LSB of group g | 2g            | D7     | D6  | D5  | D4  | D3  | D2  | D1 | D0 |
| MSB of group g | 2g+1          | D15    | D14 | D13 | D12 | D11 | D10 | D9 | D8 |

Channel 16g + i is bit Di of group g.

The slots are 2.5 ns wide. Slot 0 starts at the rising edge of the
reference clock, as long as the PLL is locked.

**Timing in the 400 MHz domain.** The serializer runs on the PLL clock. The
word comes from the 50 MHz domain, and its edges line up with slot 0. To stay
clear of that edge, `serializer8` works like this:

* it copies the word into a holding register at the end of slot 3, in the
  middle of the reference period;
* it moves the holding register into the shift register at the end of
  slot 7;
* it shifts the word out MSB first.

The latency from strip to link is therefore:

```
ref edge n      : channel outputs sampled by sample_mux
slot 3 of n     : word captured by the serializers
ref period n+1  : word on the links, slot 0 .. slot 7
```

In other words, the slice sampled at edge n is received during period n+1.
In the testbenches, a stimulus applied a little after edge p is sampled at
edge p+1 and received in period p+2.

**Training pattern.** A receiver does not know where the frames on a link
begin. With `pattern_sel = 1`, every frame carries the known pattern (its low
byte on the LSB links, its high byte on the MSB links). The receiver slides
its 8-bit window until it finds the pattern, and then switches the chip back
to data. `tb_mimac_asic` does exactly this search on all eight links.

## The PLL

The 400 MHz clock is made from the 50 MHz reference by an x8 charge-pump
PLL. Its four parts come from the published description: phase detector,
charge pump, VCO (a seven-stage starved-inverter ring) and divider by eight.
The loop filter is off-chip because its capacitors are large; here it is
inside `charge_pump`.

| part             | kind  | behaviour | values (this design's) |
|------------------|-------|-----------|------------------------|
| `phase_detector` | model | tri-state PFD: idle, up (reference edge came first), dn (divider edge came first) | – |
| `charge_pump`    | model | ±I into a series R-C; integrated exactly between UP/DN changes | 50 µA, 11 kΩ, 50 pF |
| `vco`            | model | f = 300 MHz + 100 MHz/V · vctrl, clamped to 100..700 MHz | 400 MHz at 1.0 V |
| `pll_divider`    | logic | 3-bit counter; `div_clk` high for counts 0..3 | – |

The PLL locks in a few µs, with damping near 1. The divider count
doubles as the serializers' bit slot. The phase detector aligns the rising
edge of `div_clk` (count wrapping to 0) with the reference edge, and this
alignment fixes the frame boundaries.

In silicon the phase detector is two flip-flops that clear each other through
a gate. With zero delays, a simulator cannot resolve that loop reliably. It
is therefore written as a three-state machine updated by the edges of both
clocks. The design has no lock detector. Allow about 10 µs after reset before
you use the links.

## Configuration: the slow serial link

`slow_control` is a 404-bit shift register. It takes `sc_din` on each rising
`sc_clk` edge, MSB first. A rising `sc_clk` edge with `sc_load` high does not
shift. Instead, it copies the register into the working configuration.
`sc_dout` is the last stage of the register. While a new value goes in, the
previous one comes out, which allows readback or a daisy chain.

Keep `sc_clk` stopped between transfers, because every edge shifts. The
first bit sent is bit 403:

| bits      | field            | meaning |
|-----------|------------------|---------|
| 403..388  | `pattern[15:0]`  | training pattern D15..D0 |
| 387       | `pattern_sel`    | 1: send the pattern, 0: send the samples |
| 386..384  | `mono_adjust`    | monostable width 16 + 6/7·adjust ns, whole chip |
| 383..320  | `ch_enable[63:0]`| 1: channel enabled (disabled channels read 0) |
| 319..0    | `dac[63:0]`      | 5-bit threshold of channel c in bits 5c+4..5c |

Reset (`rst_n` low) gives:

* all thresholds at code 31;
* all channels disabled;
* sample data selected (`pattern_sel = 0`);
* pattern 0 and adjust 0.

The configuration is static. It crosses into the 50 MHz domain with no
synchroniser, so change it only while its output is ignored.

## Top-level ports of `mimac_asic`

| port | dir | meaning |
|------|-----|---------|
| `clk_ref` | in | 50 MHz reference (on the chip it arrives through an LVDS receiver) |
| `rst_n` | in | asynchronous reset, active low |
| `i_strip_na[64]` | in, `real` | strip currents in nA (negative = signal) |
| `az_clk` | in | high during an auto-zero phase |
| `sc_clk`, `sc_din`, `sc_load` / `sc_dout` | in / out | slow serial link |
| `ser_out[7:0]` | out | the eight serial links (LVDS drivers on the chip) |
| `ch_out[63:0]` | out | channel outputs before sampling, for observation |
| `clk_fast` | out | PLL output, for observation |

## Simulating

The testbenches need verilator 5 with `--timing`. Each testbench prints one
line, `TB_RESULT checks=N failures=M`, and then stops. For example, to run
the whole chip:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mimac_pkg.sv tb/tb_mimac_asic.sv --top-module tb_mimac_asic
./obj_dir/Vtb_mimac_asic
```

Verilator is a two-state simulator. Give `rst_n` a falling edge (start it at
1, pull it low, release it); the registers with asynchronous reset are not
reset otherwise.

| testbench | what it shows |
|-----------|---------------|
| `tb_mimac_asic` | The whole chip at default parameters, about 10 s: channels firing on their offset before auto-zero, quiet after it; configuration written and read back; PLL lock and pattern alignment on all 8 links; a track plus random hits and short pulses, every 64-bit slice compared with a reference model; disabled channels masked. |
| `tb_prototype_2x256` | The published prototype: 2 × 256 strips on eight chips sharing one reference. A 24-slice track is rebuilt as X and Y strip lists per slice, and all 24 slices are seen as coincidences in the same slice on all chips. |
| `tb_threshold_scan` | The threshold measurement of one chip after auto-zero: with all 64 DACs at one code, each channel's smallest detected 100 ns pulse is found by bisection through the serial links and compared with (code × 200 nA − r) / 15, r being the channel's residual offset (codes 3, 10 and 31: about 41, 135 and 415 nA). Prints the mean and RMS over the channels. About 11 s. |
| `tb_channel_group` | One group with ideal clocks: pattern frames, data frames with the two-period latency, short pulses caught through the monostable. |
| `tb_pll` | Lock within 20 µs, 8 edges per reference period, 2.5 ns ± 2 %, slot 0 at the reference edge. |
| `tb_fe_channel` | Offset firing, auto-zero, a 10 ns pulse stretched to the monostable width, a 100 ns pulse kept, a sub-threshold pulse ignored. |
| `tb_slow_control`, `tb_sample_mux`, `tb_serializer8`, `tb_pll_divider`, `tb_phase_detector`, `tb_charge_pump`, `tb_vco`, `tb_current_dac`, `tb_current_preamp`, `tb_autozero_amp`, `tb_current_comparator`, `tb_monostable` | Each block against values worked out independently. |

## Where this design departs from the published chip

Taken from the publication:

* 64 channels in four groups of 16;
* gain 15, a 5-bit DAC with a 200 nA LSB, and a comparator with an OR-ed
  16–22 ns monostable controlled by `adjust<2:0>`;
* auto-zero offset correction;
* 50 MHz sampling, 8:1 serialisation at 400 MHz, and the frame bit order
  D7..D0 / D15..D8;
* a pattern/data multiplexer in front of the serializers;
* an x8 PLL built from a PFD, a charge pump, a seven-stage ring VCO and a
  divider by 8;
* a slow serial link for thresholds, channel enables and the training
  pattern.

Chosen here, because the publication does not give them:

* the slow-link protocol, the bit map and the reset values;
* one monostable setting for the whole chip, and its linear steps;
* the 16-bit pattern width (one pattern for all groups);
* disabled channels forced to 0 after sampling;
* the serializer capture slot, and with it the one-period latency;
* the link numbering;
* the PLL loop values and the VCO characteristic;
* the discrete auto-zero loop;
* a reset pin;
* `az_clk` as a chip input. The publication does not say where the
  once-per-second auto-zero timing comes from.

Not modelled:

* the LVDS drivers and receiver;
* the global bias generator of each group (the four comparator bias voltages);
* the `V_clamp` filtering adjustment of the auto-zero loop;
* the analog test multiplexer outputs (`EN_MUX`, `MUX_Ithreshold`,
  `MUX_Icompar`) that appear in the input-stage schematic, whose function is
  not described;
* comparator delay and noise, and the spread of the DAC. A channel's
  threshold is therefore exactly (code × 200 nA − r) / 15, with r its
  residual offset. At code 3 this gives a mean of 41.4 nA and an RMS of
  2.0 nA over the 64 channels, close to the 39.6 nA and 1.9 nA measured on
  silicon. The silicon's smallest detected signal at that code, near
  126 nA and varying by about 80 nA between channels, is not reproduced:
  the model detects the threshold itself.

The models use `real` signals or delays and are for simulation only. The
logic blocks (`slow_control`, `sample_mux`, `serializer8` and
`pll_divider`) are plain synthesizable SystemVerilog.
