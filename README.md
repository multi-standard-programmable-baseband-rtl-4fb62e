# A programmable QPSK-family baseband modulator with a distributed-arithmetic RRC filter

This is synthesizable SystemVerilog for a transmit baseband modulator that
serves several 2G/3G air interfaces with one datapath. One set of hardware
produces four phase modulations, chosen at run time by a 2-bit `MOD_SEL`:

| `mod_sel` | modulation  | amplitudes per rail            | used by (examples)            |
|-----------|-------------|--------------------------------|-------------------------------|
| 0         | QPSK        | {-1, 0, 1}                     | IS-95, UMTS, GPS, DVB-S       |
| 1         | pi/4 DQPSK  | {-1, -0.707, 0, 0.707, 1}      | PHS/PACS, IS-54/136, PDC      |
| 2         | DQPSK       | {-1, 1}                        | DAB                           |
| 3         | OQPSK       | {-0.707, 0.707}, Q half a symbol late | IS-95, Zigbee          |

The symbols are shaped by a root-raised-cosine (RRC) filter with four
selectable roll-offs (`FLT_SEL` 0..3: alpha = 0.22, 0.35, 0.5, 0.9). The
filter interpolates by four and uses no multipliers: every product is read from
pre-computed look-up tables (distributed arithmetic). The shaped I and Q rails
are then moved to an intermediate frequency of one quarter of the sample rate.
At that frequency the mixer is just a multiplexer that outputs I, Q, -I, -Q in
turn.

The architecture follows a published FPGA design of a programmable baseband
modulator for software-defined radio. The block structure, mode set,
roll-offs, table structure and carrier scheme come from that design. Details it
leaves open were filled in here, and each one is listed under
[Departures and choices](#departures-from-the-published-design-and-choices-made-here).

## Signal flow

```
ser_in ─► data generator ─► symbol mapper ─┬─► upsampler I ─► DA RRC filter I ─► irail ─┐
          (bit split,       (4 mappers,    │   (7 symbols)    (8 DALUTs)                ├─► carrier gen ─► finalout
           OQPSK delay)      MOD_SEL mux)  └─► upsampler Q ─► DA RRC filter Q ─► qrail ─┘   (I,Q,-I,-Q)
                                                                 ▲ flt_sel
```

| module                 | role |
|------------------------|------|
| `pbm_data_generator`   | serial-to-parallel: even bit to I, odd bit to Q, plus a Q copy delayed by one bit for OQPSK |
| `pbm_symbol_mapper`    | holds the four mappers below, selects one with `mod_sel`, registers the 3-bit I and Q symbols |
| `pbm_qpsk_mapper`      | bit pair to absolute phase 0, pi/2, pi, 3pi/2, then IQ table |
| `pbm_pi4dqpsk_mapper`  | phase accumulator, steps pi/4, 3pi/4, 5pi/4, 7pi/4, then IQ table |
| `pbm_dqpsk_mapper`     | Boolean differential encoder with a one-symbol feedback register |
| `pbm_oqpsk_mapper`     | +-0.707 per rail |
| `pbm_iq_lut`           | phase (in units of pi/4) to the (cos, sin) amplitude codes |
| `pbm_upsampler`        | seven-symbol shift register (table addresses) and the 0..3 sample-phase counter |
| `pbm_dalut`            | one distributed-arithmetic table: four roll-off ROMs and a 4:1 `flt_sel` multiplexer |
| `pbm_rrc_filter`       | eight DALUTs, four adders and an output register: one 1:4 polyphase RRC interpolator |
| `pbm_carrier_gen`      | fs/4 upconversion with a 4:1 multiplexer and two's complement |
| `pbm_top`              | wires it all together |
| `pbm_pkg`              | symbol code, mode enums, tap constants, the partial-product rule |

## Clocking and timing

The design has a single clock, `clk`, and it is the **output sample clock**.
Everything else runs on enables derived from one 2-bit counter in the data
generator:

* one output sample per clock on `irail`, `qrail` and `finalout`;
* one symbol every 4 clocks (the 1:4 interpolation);
* one serial bit every 2 clocks (two bits per symbol).

So the data rate is `f_clk / 2`. For example, a 2.5 MHz clock carries 1.25 Mbit/s.

The data source has to follow `bit_en`. `ser_in` is sampled at the end of every
cycle in which `bit_en` is high, so the source should present the next bit after
such a cycle. The bits alternate between I (even) and Q (odd).

Latencies, counted from the clock edge that takes the second (Q) bit of a pair:

| event | cycles later |
|-------|--------------|
| `sym_stb` (pair valid inside the data generator) | 1 |
| new I/Q symbol in the mapper output register | 2 |
| symbol enters the upsampler, sample phase 0 | 3 |
| first shaped sample of that symbol on `irail` (and `qrail`) | 4 |
| same sample through the mixer on `finalout` | 5 |
| OQPSK: first shaped sample on `qrail` | 6 |

`mod_sel` and `flt_sel` may change at any time. After a change the rails
carry a mix of old and new symbols until the seven-symbol window has been
refilled, which takes 28 clocks.

## The symbol alphabet

Every mapper emits, per rail, one of five amplitudes. They are carried as a 3-bit
code (`pbm_pkg::lvl_e`):

| code | 0 | 1 | 2 | 3 | 4 | 5..7 |
|------|---|---|---|---|---|------|
| amplitude | 0 | +0.707 | +1 | -0.707 | -1 | unused, read as 0 |

The code is not a number. Nothing downstream does arithmetic on it. It is only
an address into the filter's tables, so any 3-bit encoding would work.

## The four mappers

**QPSK** takes the absolute phase from the bit pair (IQ = 00, 01, 10, 11 give
0, pi/2, pi, 3pi/2). It then emits (cos, sin) of that phase, so the points lie
on the axes.

**pi/4 DQPSK** keeps a 3-bit phase accumulator in units of pi/4. Each bit pair
adds pi/4, 3pi/4, 5pi/4 or 7pi/4, and the symbol is (cos, sin) of the new
phase. Since every step is an odd multiple of pi/4, the symbols alternate
between axis points and diagonal points. That alternation keeps the largest
phase jump at 135 degrees. The accumulator starts at phase 0 after reset.

**DQPSK** encodes differentially with combinational logic and a one-symbol
register holding the previous encoded pair (I', Q'):

```
I'n = In.~I'.~Q' + Qn.~I'.Q' + ~In.I'.Q' + ~Qn.I'.~Q'
Q'n = Qn.~I'.~Q' + ~In.~I'.Q' + ~Qn.I'.Q' + In.I'.~Q'
```

Per previous state, the output is (I,Q), (Q,~I), (~I,~Q) or (~Q,I). Take a bit
as the amplitude 1-2b. Then this is the input point rotated by the phase of the
previous encoded point minus 45 degrees, which is a proper differential code.
Each encoded bit is sent antipodally (0 becomes +1, 1 becomes -1), so the
constellation is the square (+-1, +-1).

**OQPSK** sends each bit as +-0.707. The offset between the rails is not made in
the mapper. The data generator provides a Q bit delayed by one bit period (two
clocks). In OQPSK mode the symbol mapper loads the Q rail from it two clocks
after it loads the I rail. From that point the whole Q chain (upsampler,
filter, sample phase) runs half a symbol behind I, so only one rail changes at
a time.

The two stateful mappers advance only on symbols for which they are selected.
Switching away and back resumes from the phase or encoded pair that was
current at the time of the switch.

## The distributed-arithmetic polyphase RRC filter

This is the part of the design that most needs explaining.

### From an interpolating FIR to four short sums

The pulse shaper is a 25-tap FIR, h0..h24, at four samples per symbol. Its
input is the symbol stream with three zeros stuffed after each symbol, and 25
taps span about seven symbols. Write x_j for the symbol j periods old, where
x_0 is the newest and `ADD[j]` in the upsampler. Output sample p of the current
symbol (p = 0..3) is then

```
DOUT_p = sum_j h[4j + p] * x_j          (j = 0..6, 4j+p <= 24)
```

This is seven terms for p = 0 and six for p = 1..3. The upsampler holds
x_0..x_6 in a seven-stage shift register that moves once per symbol. Its phase
counter steps p through 0, 1, 2, 3. The filter computes all four DOUT_p at once
and registers `DOUT[phase]` every clock.

### Folding the symmetric taps

The RRC response is symmetric, h(24-k) = h(k), so only h0..h12 are stored.
The terms are grouped into eight tables. Four of them are addressed by the
four newest symbols and four by the older ones:

| adder | table on ADD0..ADD3   | table on ADD4..ADD6 |
|-------|-----------------------|---------------------|
| DOUT0 | H0 H4 H8 H12          | H8 H4 H0 (ADD4..6)  |
| DOUT1 | H1 H5 H9 H11 (=H13)   | H7 H3 (=H17, H21)   |
| DOUT2 | H2 H6 H10 H10 (=H14)  | H6 H2 (=H18, H22)   |
| DOUT3 | H3 H7 H11 H9 (=H15)   | H5 H1 (=H19, H23)   |

### What a table holds

A distributed-arithmetic table stores the whole sum of products for every
combination of its inputs, so no multiplier or adder tree is needed inside it.
The address is the concatenation of the N input codes, with ADD0 in the low
bits. Each table therefore has 2^(3N) entries:

* 4096 for a 4-input table;
* 512 for the 3-input one;
* 64 for the 2-input ones.

Only 5^N of them are reachable, because codes 5..7 never occur. Each table keeps
one such ROM per roll-off and a 4:1 multiplexer driven by `flt_sel`. One filter
holds 4 x 4 x 4096 + 4 x 512 + 3 x 4 x 64 = 68352 entries of 16 bits. The
design has two filters, one per rail, each with its own tables. Per output
sample the only arithmetic is one adder per DOUT_p.

The ROMs are filled by an `initial` block from the tap constants in `pbm_pkg`.
For entry `a` of roll-off `f`:

```
rom[f][a] = sum_k  P(h[IDX_k], code_k(a)),   code_k(a) = (a >> 3k) & 7
P(c, +-1)     = +-c
P(c, +-0.707) = +-((c * 2896 + 2048) >>> 12)     (0.707 = 2896/4096, rounded half up)
```

### Tap values

The taps are the continuous root-raised-cosine impulse response for symbol
period T = 1:

```
h(t) = [sin(pi t (1-a)) + 4 a t cos(pi t (1+a))] / [pi t (1 - (4 a t)^2)]
h(0) = 1 - a + 4a/pi
h(+-1/(4a)) = a/sqrt(2) [(1 + 2/pi) sin(pi/(4a)) + (1 - 2/pi) cos(pi/(4a))]
```

It is sampled at t = (k-12)/4 for k = 0..24 and normalised to unit energy
(sum of h^2 = 1). It is then multiplied by 4096 and rounded to the nearest
integer. The values of h0..h12 are in `pbm_pkg::RRC_COEF`.

The centre tap is 2174, 2244, 2328 and 2552 for the four roll-offs. So a
full-scale symbol produces peak rail values of about 2000 to 3000. The largest
possible |DOUT| (all symbols at full scale with the worst signs) is 3616, well inside the 16-bit output.

How good these filters are: the DC gain is about 8200 for every roll-off.
Measured 0.02·pi beyond the stop-band edge (1+a)/4·pi, the largest stop-band
lobe of the quantised 25-tap response is -25 dB (alpha 0.22), -32 dB (0.35),
-35 dB (0.5) and -39 dB (0.9), relative to DC. The published design reports
-41 dB for alpha = 0.35 with a longer filter (see below).

## Carrier generator

At an IF of fs/4, cos(wc t) runs through 1, 0, -1, 0 and sin(wc t) through
0, 1, 0, -1. So `Y = I cos + Q sin` is I, Q, -I, -Q on four consecutive
clocks. `pbm_carrier_gen` selects among `irail`, `qrail` and their two's
complements with a free-running 2-bit counter, and registers the result. The
`cphase` output reports which of the four carrier phases the current
`finalout` sample used. The counter is not tied to the symbol timing, so the
carrier phase relative to the symbols is fixed but arbitrary after reset.

## Top-level ports (`pbm_top`)

| port       | dir | width | meaning |
|------------|-----|-------|---------|
| `clk`      | in  | 1     | sample clock |
| `rst_n`    | in  | 1     | asynchronous reset, active low |
| `ser_in`   | in  | 1     | serial message bits |
| `mod_sel`  | in  | 2     | modulation (table above) |
| `flt_sel`  | in  | 2     | roll-off: 0 = 0.22, 1 = 0.35, 2 = 0.5, 3 = 0.9 |
| `bit_en`   | out | 1     | `ser_in` is taken at the end of this cycle |
| `irail`    | out | 16    | shaped I rail, signed, taps scaled by 4096 |
| `qrail`    | out | 16    | shaped Q rail |
| `finalout` | out | 16    | modulated IF signal |
| `cphase`   | out | 2     | carrier phase of `finalout` (0: +I, 1: +Q, 2: -I, 3: -Q) |

The only parameter is `DW` (sample width, default 16).

## Departures from the published design and choices made here

* **Filter length.** The published text speaks of a 32-tap RRC filter. Its
  table diagram, together with the seven-symbol address register, describes a
  25-tap filter symmetric about h12, and that is what is built. The published
  tap values were not given. They were recomputed as described above, so the
  stop-band figures differ from the published -41 dB.
* **DQPSK equations.** The published Boolean equations mix encoded and
  non-encoded previous bits, but the published encoder schematic feeds back only
  the encoded pair. The RTL uses the encoded pair throughout. DQPSK bits are sent
  antipodally on each rail; the published constellation plot for DQPSK is a
  square, which this matches.
* **Mode numbering.** The published constellation captures give MOD_SEL = 1 for
  pi/4 DQPSK and 2 for DQPSK. The published waveform captures show the opposite.
  The first was followed. QPSK = 0 and OQPSK = 3 are this design's choice.
  FLT_SEL follows the order in which the roll-offs are listed.
* **Rates.** The published design claims 77 Mbit/s at a 77 MHz FPGA clock, which
  would be one bit per clock. Its carrier description instead gives four
  samples per symbol at one sample per clock, which is two clocks per bit. The
  RTL does the latter, so 77 Mbit/s needs a 154 MHz clock here. The timing of
  this RTL has not been characterised.
* **Interpolation factor input.** The published block diagram shows an
  "interpolation factor" input on the carrier generator, but its function is
  not described. It is not built; the IF is fixed at fs/4 and the
  interpolation at 4.
* **Clocking.** The published simulation shows divided clocks (by 2 and by 4).
  Here they are clock enables from one counter in a single clock domain.
* **Not included.** The analog-to-digital converter that feeds the serial
  input, and any DAC or RF stage after `finalout`.
* Also chosen here: the 3-bit symbol code, the 16-bit sample width, the
  0.707 rounding rule, unit-energy tap normalisation, the reset states (zero
  phase, zero history), and that stateful mappers freeze while not selected.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The expected values
come from `tb/tb_pbm_ref_pkg.sv`. That package derives them without reusing the
RTL's structure:

* symbol amplitudes come from real `$cos`/`$sin` of the ideal phase;
* DQPSK is modelled as a complex rotation;
* filter outputs come from a direct-form convolution of the zero-stuffed symbol
  stream with all 25 taps, with no polyphase split and no tables.

| testbench | what it checks |
|-----------|----------------|
| `tb_pbm_data_generator` | bit order, 4-cycle symbol period, 2-cycle bit period, one-bit Q delay |
| `tb_pbm_iq_lut`, `tb_pbm_qpsk_mapper`, `tb_pbm_oqpsk_mapper` | all input codes |
| `tb_pbm_pi4dqpsk_mapper` | 300 random symbols against an accumulated real phase; axis/diagonal alternation |
| `tb_pbm_dqpsk_mapper` | 300 random symbols against the complex-rotation model, with idle cycles |
| `tb_pbm_symbol_mapper` | all four modes with switches and no reset; OQPSK Q rail two cycles after I |
| `tb_pbm_upsampler` | shift-register contents and the 0..3 phase sequence |
| `tb_pbm_dalut` | 4- and 3-input tables, random addresses, all roll-offs |
| `tb_pbm_rrc_filter` | impulse response reproduces h0..h24 for every roll-off; 3000 random windows |
| `tb_pbm_carrier_gen` | I, Q, -I, -Q sequence, one-cycle latency, carrier phase advancing every clock |
| `tb_pbm_top` | whole chain at default parameters (below) |
| `tb_pbm_capture` | the prototype's capture experiments: 512 output samples after reset for pi/4 DQPSK and DQPSK at alpha 0.35 and pi/4 DQPSK at alpha 0.22; every sample against the reference, open eye at every pulse peak, rail ranges printed |

`tb_pbm_top` feeds random serial data through all 16 `mod_sel`/`flt_sel`
settings, 40 symbols each, with no reset between them. That is 642 symbols, or
about 2600 clocks. It checks every `irail`/`qrail` sample against the reference
at the exact latency given above; the OQPSK Q rail is checked two clocks later.
It checks every `finalout` sample and carrier phase, and the bit rate. It
counts how often each modulation, each roll-off, each mode switch and the
OQPSK offset were exercised, and fails if any never happened. The first eight
symbols after each switch are not compared.

To run a testbench with Verilator (5.x), from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/pbm_pkg.sv tb/tb_pbm_ref_pkg.sv tb/tb_pbm_top.sv --top-module tb_pbm_top
./obj_dir/Vtb_pbm_top
```

Swap the last file and the top module for any other testbench.

`tb_pbm_capture` prints the range of each rail over its 512 samples. On one
random stream these were about +-2650 (pi/4 DQPSK, alpha 0.35), +-3150 (DQPSK,
alpha 0.35) and +-3090 (pi/4 DQPSK, alpha 0.22). The published waveform
captures show rail values of the same order (about 2100 to 2400 in
magnitude). The published constellation plots span only about +-1300, so that
capture was probably scaled down by one bit; that scaling is not reproduced
here. Each one
finishes in well under a second.

Limits of what has been verified:

* the testbenches compare against a model written from this description, not
  against data from the published hardware;
* no gate-level or timing analysis has been done;
* the tap values are recomputed, not the published ones.

## Changing the design

* **Taps or roll-offs:** edit `RRC_COEF` in `pbm_pkg`. The ROMs and the
  testbench reference follow automatically.
* **Sample width:** `DW` on `pbm_top`.
* **Filter length:** changing it means changing the number of upsampler stages
  (`DEPTH`) and the DALUT grouping in `pbm_rrc_filter`, which is written out
  explicitly to mirror the table diagram.
