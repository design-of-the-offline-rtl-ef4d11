# Ionisation-chamber signal simulator: programmable-logic RTL

A proton pencil-beam nozzle watches its beam with a parallel-plate
ionisation chamber. The chamber has an integral plane, which reports the
dose, and strip planes of 128 strips at 2 mm pitch, which report where the
beam is. When no beam is available, the nozzle electronics and the
treatment control system can still be commissioned if something else
produces the chamber's signals. This RTL is the real-time part of such a
generator. It follows the design described in *Design of the offline test
electronics for the nozzle system of proton therapy* (Huang et al., China
Institute of Atomic Energy).

The idea is simple. Each strip output is a DAC voltage *U* switched into a
resistor *R* for a time *t* in every period of a fast PWM. The charge per
period is then *Q = (U/R)·t*. The DAC voltage sets the overall amplitude,
which follows the beam current. The on-time of each strip sets its share of
the charge, which follows where the beam is. A Gaussian beam spot therefore
becomes 128 PWM duty cycles. This logic works those duty cycles out from
the beam-centre coordinate and generates the 128 PWM signals. It also
generates a dose channel, drives the DAC and reads the chamber's high
voltage back through an ADC.

## From beam centre to strip duties: the quarter-strip rule

This is the part that needs the most care.

**Coordinates.** Strips are numbered 1 to 128, and strip *k* has its centre
at strip coordinate *S = k*. The chamber axis lies between strips 64 and
65, so a beam at position *x* (mm) sits at *S = x / 2 mm + 64.5*. That
conversion is done in software. The logic receives *S* as an unsigned 8.4
fixed-point number, so 1/16 strip is 0.125 mm.

**Rounding.** The logic rounds *S* to the nearest quarter strip (0.5 mm).
An exact half between two quarters rounds up. The quarter that is left
over selects one of four precomputed shapes and a reference strip *n*:

| S after rounding | situation | table used | reference strip *n* |
|---|---|---|---|
| m        | centre of strip m        | centre        | m   |
| m + 1/4  | right quarter of strip m | right quarter | m   |
| m + 1/2  | gap between m and m+1    | gap           | m+1 |
| m + 3/4  | left quarter of strip m+1| left quarter  | m+1 |

Rounding to a quarter strip limits the error of the simulated position to
±0.25 mm. Beam-position tolerances in treatment are ±0.5 mm or more.

**Tables.** Each table has 13 entries, for strips *n−6* to *n+6*. Each
entry is the strip's on-time in tenths of a percent of the PWM period. The
peak strip has 1000, which keeps its switch closed for the whole period.
Every other strip gets 0. Thirteen strips cover ±13 mm, which is about
3 σ for the largest beam. At reset the tables hold the values for
σ = 4 mm (100 MeV):

| entry (strip)  | n−6 | n−5 | n−4 | n−3 | n−2 | n−1 | n | n+1 | n+2 | n+3 | n+4 | n+5 | n+6 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| centre         | 12 | 47 | 142 | 334 | 608 | 885 | 1000 | 885 | 608 | 334 | 142 | 47 | 12 |
| gap            | 26 | 86 | 230 | 479 | 783 | 1000 | 1000 | 783 | 479 | 230 | 86 | 26 | 6 |
| left quarter   | 17 | 64 | 180 | 399 | 693 | 941 | 1000 | 832 | 542 | 277 | 110 | 35 | 9 |
| right quarter  | 9 | 35 | 110 | 277 | 542 | 832 | 1000 | 941 | 693 | 399 | 180 | 64 | 17 |

Every row is the charge a Gaussian beam deposits on each 2 mm strip,
divided by the peak strip's charge. For the row's situation the beam sits
at *n*, *n − 1/2*, *n − 1/4* or *n + 1/4*, with σ = 2 strips. A direct
numerical integration reproduces every entry to within 0.5 % of the peak.
The gap row is not symmetric. Its peak pair is *n−1, n*, so its window
reaches one strip further to the right of the beam than to the left.

**Other beam sizes.** The tables are registers, and the host may rewrite
any entry. A host that serves other energies loads rows built by the same
integration for the new σ (3.28 mm at 230 MeV up to 4.41 mm at 70 MeV).

**Edges.** Entries that fall off the plane (strip < 1 or > 128) are
dropped, and the `edge_clip` status bit is set.

## PWM timing

A single counter runs from 0 to 999, one step per clock. At 100 MHz this
gives a 10 µs period. The chamber read-out integrates for 100 µs or more,
and 10 µs is the longest period that still fits ten periods into that
window. Channel *i* is high while the counter is below its duty, so all
channels start their on-time together. The on-time starts one clock after
`pwm_period_start` and lasts exactly *duty* clocks.

The duties are copied into shadow registers at the end of each period. A
new beam position or an on/off change therefore never cuts a pulse short
or doubles it. It takes effect from the first period that begins at least
three clocks after the register write. The dose channel is a 129th channel
of the same bank, so it runs in the same period.

The 0.1 % step matches the precision of the tables. The period is
`PWM_STEPS × PRESCALE` clocks, so a slower clock can keep 10 µs by
reducing `PRESCALE` or `PWM_STEPS`. Changing `PWM_STEPS` also changes the
unit of the table entries, which are a fraction of `PWM_STEPS`.

## Blocks

```
ote_top
├── host_regs          AXI4-Lite register bank (processor side)
├── strip_pattern_gen  coordinate → situation → 128 duties
│   └── gauss_lut      4 × 13 writable table, reset to σ = 4 mm
├── pwm_bank           129-channel PWM (128 strips + dose)
├── dac8532_ctrl       serial writes to the dual 16-bit DAC
└── ads8691_ctrl       serial reads of the 18-bit HV ADC
ote_pkg                shared types: duty_t, situation_e, reset tables
```

The top's outputs are the switch controls (`pwm_strip[0..127]` for strips
1 to 128, `pwm_dose`) and the DAC and ADC serial pins. The switches, the
resistors, the DAC, the ADC and the analog dose, environment and HV
circuits are board parts and are not modelled here. Bit-level models of
the DAC and ADC serial ports exist for the testbenches only
(`tb/dac8532_model.sv`, `tb/ads8691_model.sv`).

## Register map (AXI4-Lite, 32-bit words)

| addr | name | access | contents |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] beam_on (strip PWM), [1] dose_on, [2] adc_en |
| 0x04 | POSITION | rw | [11:0] beam centre *S*, 8.4 fixed point. A write loads it. |
| 0x08 | DOSE_DUTY | rw | [9:0] dose on-time, per mille |
| 0x0C | DAC_A | rw | [15:0] code. A write sends it to DAC output A. |
| 0x10 | DAC_B | rw | [15:0] code. A write sends it to DAC output B. |
| 0x14 | HV_ADC | ro | [17:0] latest HV sample |
| 0x18 | STATUS | ro | [1:0] situation (0 centre, 1 gap, 2 left q., 3 right q.), [10:2] reference strip, [11] edge_clip, [12] dac_busy |
| 0x1C | ADC_COUNT | ro | number of HV samples taken |
| 0x100 + 4·(16·sit + tap) | table | wo | [9:0] entry *tap* (0 = strip n−6) of table *sit* |

A write is accepted when address and data are both valid, and the response
follows one clock later. A read is answered one clock after the address.
Write strobes are ignored, and all responses are OKAY. Assertions in
`host_regs` check that a response stays valid and unchanged until it is
taken.

The host interface of the published system sends beam position, σ, dose,
beam current and energy. Software turns these into the registers above: σ
selects the tables, the beam current sets the DAC code for the strip
amplitude, and the dose setting sets the dose duty and the DAC code for the
dose channel.

## Serial converters

**DAC8532.** Each write is a 24-bit frame with `sync_n` low, MSB first.
Bits [23:22] are 00, [21] is LD B, [20] is LD A, [19] is 0, [18] selects
the buffer (0 = A, 1 = B), [17:16] are 00 (normal power) and [15:0] are the
code. Both load bits are set, so the output changes at the end of the
frame. `din` changes on the rising edge of `sclk`, and the DAC takes it on
the falling edge. `sclk` runs at 25 MHz, a frame takes 0.96 µs, and 40 ns
of `sync_n` high separate frames. A request that arrives while a frame is
on the wire is held and sent with its latest code. Output A goes first
when both are requested.

**ADS8691.** While `adc_en` is set, `cs_n` high starts a conversion and
stays high for 0.8 µs. Then 18 clocks at 25 MHz read the result, MSB first,
with SPI mode 0 and `sdi` held low (no-op command). One sample takes
1.52 µs.

These frame formats come from the converters' data sheets. The published
design names the parts but not the protocols. Its text calls the ADC
"ADAS8691" while its architecture drawing says "ADS8691". The RTL follows
the ADS8691.

## Verification

Each block has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=… failures=…` line.

* `tb_strip_pattern_gen` loads about 300 random coordinates plus
  hand-picked cases: the four situations, rounding, both edges and a table
  write. It compares all 128 duties with a numerically integrated
  Gaussian, within 0.7 % of the peak. Strips outside the window must be
  exactly 0. It also checks the two-clock latency.
* `tb_pwm_bank` checks the exact on-time of every channel in every period,
  the 10 µs period, duty 0 and full duty, and that a mid-period duty
  change waits for the next period.
* `tb_dac8532_ctrl` and `tb_ads8691_ctrl` run against the bit-level
  converter models. They check codes, frame layout, ordering, serial clock
  rate, conversion time and sample rate.
* `tb_host_regs` checks every register, the strobes, the table-window
  decoding and bus back-pressure.
* `tb_ote_top` runs the whole design at its default size. For each beam
  centre it counts the on-time of all 129 outputs over a whole period and
  compares them with the tables. It must see each of these at least once:
  the four situations, edge clipping, beam off, dose off, a clean
  mid-period position change, a table reload, DAC writes to both outputs
  and an HV read-back.
* `tb_position_scan` repeats the published position-error scan: x from
  −100 mm to +100 mm in 4.5 mm steps, at 70, 100, 180 and 230 MeV. The
  three energies other than 100 MeV use tables loaded by the testbench.
  The beam position and σ are recovered from the measured on-times by
  centroid and second moment. The worst position errors are 0.003 to
  0.032 mm and the worst σ errors 0.005 to 0.084 mm. Every point of this
  scan falls exactly on a quarter strip, so rounding adds nothing here.
  Arbitrary positions add up to ±0.25 mm.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/ote_pkg.sv tb/tb_ote_top.sv --top-module tb_ote_top -o sim
./obj_dir/sim
```

Replace `tb_ote_top` with any other testbench name. Every testbench
finishes in seconds.

Synthesised, the top is about 3400 word-level cells and 3500 flip-flops.
Most of these are the 129 × 10-bit shadow duties, the 128 × 10-bit
pattern registers and the table.

## Where this departs from, or adds to, the published design

* **One strip plane.** The chamber has an X and a Y plane, 256 strips in
  all. The published electronics drive 128 strip outputs (four 32-channel
  cards), so this is one plane. Both planes need two instances or two
  boards.
* **Own choices.** The following are not specified in the source, so they
  are choices of this design:
  * the 100 MHz clock;
  * the 1000-step PWM and its shared counter;
  * the 8.4 coordinate format and round-half-up;
  * the AXI4-Lite register map;
  * the beam-on and dose-on bits;
  * the period-aligned duty update;
  * the asynchronous active-low reset;
  * the serial clock rates.
* **Writable tables.** Only the σ = 4 mm tables are published, yet scans
  at other energies are reported. This design keeps the tables in
  registers so the host can load others.
* **Text versus figures.** The text describes the fourth situation as a
  second "left quarter". The table and figure show a right quarter, and
  that is what is built.
* **Not here.** The following are left out: the processor software (host
  communication and the conversion from position, σ, current and dose to
  register values), the analog switch, resistor, dose, environment and
  HV circuits, and the converters themselves. The source does not describe
  any closed-loop use of the HV sample, so it is only read back.
