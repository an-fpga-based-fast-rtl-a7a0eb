# Fast linear discharge digitiser: FPGA logic of one channel

A detector pulse carries its energy as charge. This channel measures that
charge as a time, using a Wilkinson-style converter built from one op-amp,
one capacitor, two resistors and an FPGA. The capacitor integrates the pulse.
A constant current then empties it, and the time the capacitor voltage spends
above a low threshold is proportional to the charge. The FPGA does two jobs.
It **switches the constant discharge current on and off** through an ordinary
tri-state output pin. It also **measures the resulting pulse width** with a
time-to-digital converter (TDC).

The RTL here is the FPGA side of that loop:

| file | what it is |
|---|---|
| `rtl/fld_pkg.sv` | shared constants: clock period, counter width, synchroniser depth |
| `rtl/discharge_tristate.sv` | the tri-state pin that drives the discharge |
| `rtl/pulse_width_tdc.sv` | synchroniser and counter that turn the comparator pulse into a count |
| `rtl/fld_channel.sv` | top: one channel, both blocks wired as in the circuit |
| `tb/fld_analog_model.sv` | behavioural model of the analog parts, for simulation only |
| `tb/tb_*.sv` | self-checking testbenches |

The method was published as "An FPGA Based Fast Linear Discharge Method for
Nuclear Pulse Digitization" (Kong, Wang, Wang, Xiao, Kuang). This RTL is an
independent rendering of that circuit, and the sections below say where it
follows the publication and where it makes its own choices.

## The circuit and why a tri-state pin is enough

```
              +-------------- R1 ---+--- R2 ------+
              |                     |             |
              +-------- C ----------|-------------+
              |                     |             |
 input --Rin--+--(-)                |             |
                    AMP >-----------|-------------+---- vout ---(+)
         GND ---(+)                 |                             COMP >--+-- comp_i
                                    |                  Vth -------(-)     |   (to TDC)
                                    +------<| tri-state pin <-------------+
                                           (dis_pad, driven while comp_i=1)
```

The amplifier is an inverting integrator, so its inverting input is a virtual
ground. Feedback capacitor C and two resistors R1 and R2 in series sit between
that input and the output. The midpoint of R1 and R2 goes to an FPGA pin.

* **Idle (pin floating).** R1 + R2 together are a plain feedback resistor
  across C. Charge from leakage or noise drains through them, so the output
  settles at `I_leak * (R1 + R2)`, below the threshold. Without a resistor
  this charge would pile up and move the baseline. With a resistor that stays
  connected during a measurement, the discharge would be exponential, not
  linear. Switching the resistor's role solves both problems.
* **Measuring (pin driven high).** Once the output exceeds the threshold, the
  comparator output goes high and the pin drives a logic high, a fixed voltage
  `V_IO`. R1 then holds `V_IO` against the virtual ground and carries a
  constant current `V_IO / R1` that removes charge from C at a constant rate.
  R2 connects `V_IO` to the amplifier output, which the amplifier drives, so
  it takes no charge from C. When the output falls back through the
  threshold, the comparator drops and the pin floats again.

The comparator pulse therefore lasts about `Q / (V_IO / R1)`. The pulse
starts almost as soon as the detector pulse arrives, because the discharge
runs while the input still integrates. The width stays linear as long as the
discharge lasts several times longer than the detector pulse's decay time.

Only the width measurement is clocked. The comparator-to-pin path is
combinational and has no clock in it, exactly as in the original circuit. The
comparator is the FPGA's LVDS differential input buffer, used on an analog
voltage. It is not logic and is not part of the RTL. Its output is the
`comp_i` input of `fld_channel`.

## `discharge_tristate`

`dis_pad = comp_i ? 1 : 'z`. The pin never drives a low level. `drive_o`
repeats the output enable so that other logic can see it. In an FPGA this is
an output buffer with a tri-state control (e.g. an OBUFT whose T input is
`~comp_i`). Written as a plain `assign` with `'z`, synthesis tools infer the
same thing at a top-level pin. Keep `dis_pad` a top-level `inout`.

## `pulse_width_tdc`: measuring the discharge time

The original work relies on the authors' own high-precision FPGA TDC and does
not describe how it works. This design uses the simplest block that does the
job:

1. `SYNC_STAGES` (default 2) flip-flops bring the asynchronous comparator
   output into the clock domain.
2. On the first synchronised high cycle a counter loads 1. On each further
   high cycle it increments, and it saturates at `2**WIDTH_BITS - 1`, setting
   an overflow flag.
3. On the first low cycle after a high one, `width_o` and `ovf_o` are loaded
   and `valid_o` pulses for one cycle.

Properties the testbenches check:

* `width_o` equals the number of rising clock edges that sampled `pulse_i`
  high. It therefore differs from `true_width / T_clk` by less than one
  count. At the default 500 MHz clock (`TDC_CLK_PERIOD_PS = 2000`) one count
  is 2 ns, about 2.6 mV of input amplitude in the 2.4 kOhm set-up.
* `valid_o` is set by the `SYNC_STAGES`-th rising edge after the edge that
  first samples `pulse_i` low.
* `busy_o` is the synchronised pulse. The channel's dead time per event is the
  discharge time plus the synchroniser delay, and a new pulse can be measured
  as soon as `busy_o` has fallen.
* A pulse longer than the counter range reads `width_o = '1, ovf_o = 1`.

A concurrent assertion checks that a result is never published while a pulse
is still being counted.

The default counter is 12 bits, 8.19 us at 2 ns. The longest discharge times
in the published linearity plots and spectra are about 730 ns (365 counts),
so 9 bits would be enough. The extra range leaves room for larger pulses or
larger R1.

Resolution is the main point where this RTL is weaker than the original. A
counter resolves one clock period. The publication stresses that a
finer-grained TDC lets the discharge current be raised, which shortens the
dead time for the same energy resolution. To do that, replace the counter
with a coarse-counter-plus-interpolator TDC (a tapped delay line, for
example) that keeps the same `valid_o` / `width_o` interface. At the
published component values the 2 ns bins are already well below the width of
the 511 keV peak: about 25 ns FWHM for LYSO and about 8 ns for LaBr3.

## The top: `fld_channel`

`fld_channel` wires `comp_i` to both blocks and has these ports:

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | TDC clock, `fld_pkg::TDC_CLK_PERIOD_PS` (2 ns) |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `comp_i` | in | 1 | LVDS comparator output |
| `dis_pad` | inout | 1 | pin to the R1/R2 midpoint |
| `drive_o` | out | 1 | pin output enable |
| `busy_o` | out | 1 | a pulse is being measured |
| `valid_o` | out | 1 | one-cycle strobe: new result |
| `width_o` | out | `WIDTH_BITS` (12) | discharge time in clock cycles |
| `ovf_o` | out | 1 | discharge longer than the counter range |

Parameters are `WIDTH_BITS` (12) and `SYNC_STAGES` (2). The top handles one
channel, as in the published prototype. For more channels, instantiate it
once per channel; nothing is shared between channels. What happens to the
results afterwards (histogramming, readout) is left to the surrounding
design.

After coarse synthesis the TDC is about 21 word-level cells and 30 flip-flops
at the default size.

## Analog model used in simulation

`tb/fld_analog_model.sv` closes the loop so that the testbenches exercise
the real feedback: the pin really switches the discharge current. It steps
the capacitor charge every 50 ps with:

```
dq/dt = i_in + i_leak - i_fb,   vout = q / C   (clamped at +/-4 V)
i_fb  = V_IO / R1            while dis_pad is driven high
      = vout / (R1 + R2)     while dis_pad floats
```

A detector pulse is the current `amp / Rin * exp(-t / tau)`. The model reads
the pin through a weak pull-down that the testbench supplies, so a floating
pin reads 0. Its comparator rises at `VTH` and falls at `VTH - VHYS`. It
records the true comparator width, which the testbenches compare with the
count.

The component values are the published ones: Rin = 100 Ohm, R2 = 1 kOhm,
C = 80 pF, and R1 = 2.4 kOhm or 3.9 kOhm. The remaining values are fitted or
chosen:

* `V_IO = 1.25 V` and `tau = 40 ns` are fitted so that both published
  linearity slopes come out close: the model gives 0.774 and 1.25 ns/mV,
  the plots about 0.78 and 1.21 ns/mV.
* `VTH = 50 mV` and `VHYS = 20 mV` are chosen. The publication gives no
  threshold value. Without hysteresis, the decaying tail of a short pulse can
  hold the output at the threshold after the discharge ends. The comparator
  then chatters and produces an extra sub-clock pulse.

## Testbenches

| testbench | what it does | parameters |
|---|---|---|
| `tb_discharge_tristate` | every comparator / pull combination: pin driven high or floating, never driven low | none |
| `tb_pulse_width_tdc` | 306 asynchronous pulses, 2.2 to 802 ns, against an independent edge count; one-clock accuracy, result latency, busy, overflow (second instance with a 4-bit counter) | default, plus `WIDTH_BITS=4` |
| `tb_fld_channel` | closed loop, R1 = 3.9 kOhm, 8-bit counter: baseline hold with 5 uA leakage (24.5 mV, no events), 150-600 mV pulses, pin follows comparator, overflow; counts each mechanism and fails if one never occurs | `WIDTH_BITS=8` |
| `tb_fld_channel_full` | both linearity set-ups at the default sizes, 10 amplitudes each; per-pulse check against the model, line fit, nonlinearity < 1 %, slope within 5 % of `tau * R1 / (Rin * V_IO)` | defaults |
| `tb_fld_spectrum` | synthetic 22Na source (511 and 1274 keV peaks plus Compton continua) through both set-ups, 1500 events each, at the default sizes; histogram peak and 511 keV resolution recovered from the counts | defaults |

The line fit in `tb_fld_channel_full` gives a nonlinearity of 0.85 % and
0.33 %. That is what 2 ns quantisation over a 350-560 ns range, plus the
slightly shorter first point, allows. The published 0.01 % comes from the
authors' finer TDC and from averaging over many pulses, and is not reproduced
here. In `tb_fld_spectrum`, the 511 keV resolution recovered from the counts
is 12.75 % (LYSO) and 5.23 % (LaBr3), against 12.67 % and 5.17 % put into the
source. At these settings the channel adds almost nothing. The energy-to-amplitude
gain and the source mixture are this testbench's own.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. To
run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl \
  rtl/fld_pkg.sv rtl/discharge_tristate.sv rtl/pulse_width_tdc.sv rtl/fld_channel.sv \
  tb/fld_analog_model.sv tb/tb_fld_channel_full.sv --top-module tb_fld_channel_full
obj_dir/Vtb_fld_channel_full
```

`tb_fld_spectrum` runs for about 30 s, and the others for under a second.

## What follows the publication and what does not

Follows the publication:

* the topology: comparator output driving a tri-state pin at the R1/R2
  midpoint;
* the drive-high / float behaviour and its combinational path;
* the comparator pulse width as the energy measure;
* the component values of both test set-ups.

Choices of this design, where the publication is silent:

* the TDC's internals (counter and synchroniser, 2 ns resolution);
* the 500 MHz clock;
* the 12-bit range;
* the overflow flag, busy output and result timing;
* reset behaviour;
* the `drive_o` monitor output.

Departure: the original TDC is described as high-precision, and this one
resolves one clock period (see above).

Not in the RTL:

* the analog integrator and the LVDS comparator, which are analog and are
  modelled only in `tb/`;
* any histogramming, calibration or readout after the TDC. The publication
  calibrates energy against time offline, using the 511 and 1274 keV peaks.
