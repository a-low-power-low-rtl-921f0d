# LOCx2 digital core: a low-latency dual-channel serializer for calorimeter trigger readout

LOCx2 is a serializer ASIC for detector front-end readout. It was built for the
trigger readout of the ATLAS Liquid Argon calorimeter, where the samples of
16 ADC channels must leave the detector within a latency budget of 50 ns
and a power budget of 1 W. The GBTX link chip is too slow for that budget.
LOCx2 has two identical links. Each link takes the 40 MHz samples of eight
ADC channels, wraps them in a short frame with very little overhead, and
sends the frame at 5.12 Gbps to an optical transmitter. Each frame lasts one
25 ns bunch crossing. The chip was made in a 0.25 µm silicon-on-sapphire
process and measured at 24.1 to 27.3 ns latency and about 0.9 W.

This repository holds synthesizable SystemVerilog for the digital part of
one LOCx2 chip. It also holds timed behavioural models of two analog parts,
the PLL and the duty-cycle correction in front of each serializer's last
stage, and testbenches for every block and for the whole chip. The other
analog parts are not modelled: the CML clock buffers, the CML output
drivers and the VCO's circuit. Where the drivers would connect, the top
level has plain ports instead.

```
  Nevis ADC A ─┐                                       2.56 GHz
  Nevis ADC B ─┴─ adc_rx x2 ─ locic_encoder ─16b@320MHz─ serializer_16to1 ─ ser_o[0] ─> CML driver ─> optical link
  Nevis ADC C ─┐                                    ▲
  Nevis ADC D ─┴─ adc_rx x2 ─ locic_encoder ─16b@320MHz─ serializer_16to1 ─ ser_o[1] ─> CML driver ─> optical link
                                                    │
                                     dcc_clock_aligner (one per link)
                                                    │ CK, CKb
  40 MHz reference ─ lc_pll (x64) ──────────────────┘
  SCL / SDA / address pins ── i2c_slave ── mode per link, PLL settings, driver settings, lock status
  BCID_Reset ── both encoders (restarts the header PRBS)
```

## The frame

Each link sends one frame per bunch crossing. 5.12 Gbps × 25 ns gives
128 bits. The serializer takes 16 bits at a time, so a frame is eight
16-bit words at 320 MHz. The most significant bit goes first:

| bits      | data mode (`MODE_DATA`)                    | calibration mode (`MODE_CAL`)       |
|-----------|--------------------------------------------|-------------------------------------|
| 127:124   | fixed code `0101`                          | fixed code `0101`                   |
| 123:120   | 4-bit PRBS                                 | 4-bit PRBS                          |
| 119:24    | 8 × 12 bits: channel 0 first, 12 MSBs of each 14-bit sample | 119:8 — 8 × 14 bits, channel 0 first |
| 23:8      | CRC-16 over bits 119:24                    |                                     |
| 7:0       | zero                                       | zero                                |

The Nevis ADC has 12-bit resolution but sends 14 bits per sample. The
two extra bits serve its own calibration. In data mode a link carries the
12-bit values and protects them with a 16-bit CRC. In calibration mode
the CRC is dropped, which frees room for all 14 bits. Either way the
header and payload take 120 bits. The header's `0101` code marks where a
frame starts. The PRBS advances by one step per frame. A receiver can
therefore check that it holds consecutive frames and can measure how
often the framing breaks.

Some parts of this layout are choices of this design, not of the
original chip:

* **Published layout.** The published description gives the 120-bit
  frame of the chip's 130-nm version (4.8 Gbps, 120 bits per bunch
  crossing). For the 5.12 Gbps chip it says only that the header is the
  same. Here the 120-bit content is placed at the top of the 128-bit
  frame and the 8 spare bits are sent as zeros. The encoder's `FRAME_W`
  and `WORD_W` parameters also give the 130-nm format:
  `FRAME_W = 120, WORD_W = 30` produces four 30-bit words per bunch
  crossing, for a 30:1 serializer.
* **CRC.** The CRC is CRC-16-CCITT: x^16 + x^12 + x^5 + 1, preset to
  `FFFF`, fed MSB first. It covers the 96 payload bits only.
* **PRBS.** The PRBS is x^4 + x^3 + 1, period 15. It is seeded `1111`
  after reset and again after each BCID reset.
* **Field order and bit choice.** The order of the fields is this
  design's choice. So is taking the 12 most significant of the 14 bits
  in data mode.

All constants are in `rtl/locx2_pkg.sv`.

## Clocks and the serializer

A single LC-PLL multiplies the 40 MHz bunch-crossing reference by 64 to
2.56 GHz and feeds both links. Each serializer divides that clock by 8 to
make the 320 MHz word clock. It sends the word clock back to its
encoder, so encoder and serializer are locked to each other and no FIFO
is needed between them.

The output stage is the part of the published design that is drawn in
detail:

* Two flip-flops hold the next even bit (`In0`) and odd bit (`In1`).
* A 2:1 multiplexer picks one of them.
* The multiplexer's select is the 2.56 GHz clock itself.

One clock period therefore carries two bits, which gives 5.12 Gbps from
a 2.56 GHz clock. In `serializer_16to1` the odd bit goes out while the
clock is high and the even bit while it is low. Because of this, a
16-bit word leaves MSB first: bit 15 (odd), bit 14 (even), bit 13, and
so on. A 16-bit shift register feeds the two flip-flops and moves two
bits per fast cycle. That shift register is this design's own choice;
only the last stage is published.

Because the clock phase decides the bit, the two bits of a pair last as
long as the clock's high and low phases. A clock with a duty cycle away
from 50 % gives unequal bit widths, which is duty-cycle distortion (DCD)
on the serial data. The first prototype of the chip had this problem
after irradiation. The fix was analog: AC coupling and common-mode
feedback in the CML clock buffers, plus duty-cycle correctors and
clock aligners on the complementary CMOS clocks CK and CKb. The CML
buffers are not modelled. The PLL model gives an exact 50 % duty cycle.

## Duty-cycle correction and clock alignment

`dcc_clock_aligner` is a timed behavioural model of the correction stage.
One sits in front of each serializer. It cannot be logic, because it acts
on edge times and not on levels. The circuit it stands for has two parts:

* **Duty-cycle correction**, twice in series. An AC-coupled inverter with
  resistive feedback sets its input's mid level so that high and low
  phases come out nearly equal. Two such stages bring a 70 % or 30 % duty
  cycle to within a few percent of 50 %.
* **Clock aligner**, twice in series. CK and CKb each pass an inverter, and
  half-strength inverters couple the two paths. That pulls each CK edge
  towards the opposite CKb edge. Two stages leave 20 % of the phase error
  between the two clocks.

The model measures each cycle of CK and CKb and rebuilds the next cycle of
CK from the numbers. This assumes a steady clock, as a clock tree has:

1. Each correction stage keeps the centre of a pulse and leaves 0.3 of its
   width error. After two stages 70 % becomes 51.8 %.
2. Each aligner stage moves a CK edge and the matching CKb edge towards
   their midpoint, leaving 0.447 of their distance. After two stages 20 %
   is left.
3. All edges come out 100 ps later than the input edges they are built
   from.

The factors are set from the published two-stage results; the per-stage
split, the centre-keeping correction and the delay are this model's own.
Only CK leaves the model: the serializer here selects on one clock line.
In the chip the clock normally reaches the model undistorted, since the
CML buffers that cause the distortion are not modelled, so it only adds its
delay. The chip test also overrides that clock with a 65 % duty copy for a
while.
Its testbench drives distorted clocks directly. It also shows the
distortion on the serial line: a serializer sending 1010 from a 70 % clock
sends 273 ps high bits, and one clocked through the correction sends
202 ps high bits, against a 195 ps unit interval.

## Getting samples in: the ADC link and the frame phase

Each Nevis ADC sends a bit clock, a frame strobe and four serial lanes,
one per channel. `adc_rx` shifts each lane in MSB first on the rising
ADC clock edge. The frame strobe is high during the first bit. After 14
bits the receiver copies the four samples to its outputs and flips a
toggle flag. The published description gives only the signal names;
this timing is this design's own. Any bit clock that gives at least 14
bits per bunch crossing works, because bits after the 14th are ignored
until the next strobe. The testbenches use 640 MHz, which gives 16 bit
slots with 2 idle bits.

The encoder runs on the word clock and takes the samples across clock
domains:

1. Two flip-flops synchronize each toggle flag.
2. When a toggle is seen, the encoder takes the samples. They stay stable
   for a whole bunch crossing.
3. After reset, the encoder sends frames of zero samples until the first
   sample from ADC A arrives.
4. It then starts a frame on that same word clock, cutting the running
   frame short once.
5. From then on it keeps this frame phase.

As a result each frame leaves as soon as its data is in, and the delay
stays fixed. This relies on the ADC clocks and the PLL sharing one
40 MHz reference, as they do in the experiment. The frame phase then
does not drift. ADC B, and ADC D on the second link, must deliver in the
same word clock as A (or C).

Latency of the digital path:

* Synchronization and frame load take two to three word clocks.
* Serializer load and the first bit take 1.56 ns.
* The clock correction adds 0.1 ns.
* Total: 7.9 to 11.0 ns, from the ADC clock edge that completes a sample
  to the first header bit of its frame on `ser_o`. The exact value
  depends on the ADC clock phase. The chip-level test measures 9.7 ns.
  It then resets the chip at eight ADC clock phases spread over one word
  clock and measures 8.8 to 10.0 ns, constant at each phase.
* The chip's measured 24.1 to 27.3 ns also includes the ADC link itself
  and the analog output path.

## Configuration (I2C)

`i2c_slave` is a plain I2C slave oversampled by the 40 MHz reference,
with SCL up to about 4 MHz. Its 7-bit address is `ADDR_HI` (default
`0000`) followed by the three address pins. A write sets a register
pointer and then data bytes. A read starts at the pointer. The pointer
increments after each byte.

| reg | name         | bits                                                    |
|-----|--------------|---------------------------------------------------------|
| 0   | `REG_MODE`   | [0] link 0 calibration mode, [1] link 1 calibration mode |
| 1   | `REG_PLL`    | PLL settings (analog, passed to the PLL, not modelled)   |
| 2   | `REG_DRIVER` | CML driver settings, on port `drv_cfg_o`                |
| 3   | `REG_STATUS` | read only, [0] PLL lock                                 |

All registers reset to 0, which means data mode on both links. A mode
change takes effect at the next frame boundary. The register map is this
design's own. The published description says only that an I2C slave
configures the chip and that the user can turn the CRC off.

`BCID_Reset` from the control link goes to both encoders. Its use here
is this design's choice: it restarts the PRBS at its seed in the next
frame, so the PRBS counts frames from the BCID reset.

## Files

| file | contents |
|------|----------|
| `rtl/locx2_pkg.sv` | sizes, header code, CRC and PRBS polynomials, register addresses, `mode_e` |
| `rtl/adc_rx.sv` | Nevis ADC receiver (4 lanes × 14 bits) |
| `rtl/locic_encoder.sv` | frame builder, clock-domain crossing, framing, assertions on header and frame cadence |
| `rtl/serializer_16to1.sv` | word-clock divider, shift register, DDR last stage |
| `rtl/i2c_slave.sv` | configuration registers |
| `rtl/lc_pll.sv` | behavioural PLL model (not synthesizable) |
| `rtl/dcc_clock_aligner.sv` | behavioural model of the duty-cycle correction and clock aligner (not synthesizable) |
| `rtl/locx2.sv` | top level: two links, shared PLL, I2C |
| `tb/tb_*.sv` | one self-checking testbench per block, `tb_locx2` for the chip, `tb_locic_encoder_130` for the 120-bit frame |
| `tb/nevis_adc_model.sv` | ADC model used by the testbenches |

Every module uses `timeprecision 1fs`, with `timeunit 1ps`, except the
two behavioural models, which count in whole femtoseconds (`timeunit 1fs`). The half
period of 2.56 GHz is 195.3125 ps, so femtosecond precision is needed.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. Example
for the whole chip, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_locx2 \
  -y rtl -y tb +libext+.sv -Irtl rtl/locx2_pkg.sv tb/tb_locx2.sv
./obj_dir/Vtb_locx2
```

For a block testbench, replace `tb_locx2` with its name, for example
`tb_locic_encoder` or `tb_serializer_16to1`.

`tb_locx2` runs the top level at its default sizes for 89 µs, about
3200 frames per link in its main run. It takes under a second. It checks:

* every frame on both serial lines, after finding the frame boundary from
  the header and the PRBS;
* the samples against the ADC models, with no bunch crossing lost;
* the CRC, recomputed independently;
* the frame rate: one 128-bit frame every 25 ns on each line;
* the latency, which must be constant and below 27.3 ns;
* the latency again after a reset at each of eight ADC clock phases,
  which must be constant at each phase and lie within 7.5 to 11.2 ns;
* the PLL lock status read over I2C;
* the links under a 65 % duty-cycle clock fed to the correction stages:
  frames stay correct and the shortest serial bit is 190 ps, where it
  would be 137 ps without the correction.

It also switches each link into calibration mode and back, pulses
BCID_Reset and writes the driver settings. It counts each of these
mechanisms and fails if one never happened.

The block testbenches compare against models written separately from
the RTL. The CRC reference is itself checked against the standard
CRC-16/CCITT-FALSE value of "123456789" (`29B1`). They also check the
timing the comments give in clock cycles:

* the toggle on the ADC edge that takes the last bit;
* a frame starting on the third word-clock edge after the toggle;
* the first serial bit of a word in the high phase after the fifth fast
  clock edge that follows the rise of the word clock;
* 64 PLL edges per reference period.

## How far to trust it

* **Published and followed:** the block structure, clock frequencies and
  16:1 ratio; the ADC signal names; the DDR last stage with its even/odd
  flip-flops; the frame header; the 12-bit payload with 16-bit CRC in
  data mode and the 14-bit payload without CRC in calibration mode; the
  two-stage duty-cycle correction and clock aligner and their published
  correction results (as a timed model).
* **This design's own choices:** everything else in the frame (field
  order, polynomials, padding); the ADC link timing; the clock-domain
  crossing and framing; the register map; the use of BCID_Reset; the
  reset scheme (one asynchronous active-low reset).
* **Chip-level claims:** only the digital behaviour is modelled. Data
  rate, latency of the digital path, frame content and configuration are
  checked in simulation. Power, the analog path and radiation behaviour
  are not.
* **Not built:**
  * the receiver for the COTS ADS5272 ADC, which the chip also supports
    but whose interface is not described;
  * the CML drivers and CML clock buffers (analog);
  * the 30:1 serializer of the 130-nm version, which comes from another
    design.
* **Synthesis:** everything except `lc_pll` and `dcc_clock_aligner` is
  synthesizable. A synthesis flow must replace `lc_pll` with the real PLL
  macro, which takes the 40 MHz reference and gives 2.56 GHz, and
  `dcc_clock_aligner` with the analog correction cells (a plain clock
  buffer in a purely digital flow).
