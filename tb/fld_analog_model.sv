// fld_analog_model: behavioural model of the analog parts around the FPGA of
// a fast-linear-discharge channel, for simulation only.
//
// It models the inverting integrator (input resistor RIN, feedback capacitor
// C, feedback resistors R1 and R2 in series across C, ideal amplifier with a
// virtual-ground input, output clamped at +/-VRAIL) and the LVDS input used as
// a comparator against the threshold VTH. The model advances in fixed steps
// of DT_NS. Per step the capacitor charge changes by
//   (i_in + ileak - i_fb) * dt,  vout = q / C,
// where i_in is the detector current, ileak a constant leakage current and
// i_fb the feedback current: VIO/R1 while dis_pad is driven high (constant
// current, linear discharge) and vout/(R1+R2) while dis_pad floats (resistive
// bleed that holds the baseline). The testbench must put a weak pull-down on
// dis_pad so that a floating pin reads 0.
// A detector pulse is started with fire(amp_v): a current amp_v/RIN that
// decays exponentially with TAU_NS, i.e. a pulse of peak amp_v on RIN and
// charge amp_v*TAU/RIN. comp_o rises when vout exceeds VTH and falls when
// vout drops below VTH-VHYS. Without that hysteresis the tail of a short
// detector pulse can hold vout at the threshold after the discharge and make
// the comparator chatter. The model records when comp_o
// rises and falls, so a testbench knows the true pulse width independently
// of the digital logic under test.
// VIO = 1.25 V and TAU = 40 ns are chosen so that the widths of the two
// linearity set-ups (R1 = 2.4 kOhm and 3.9 kOhm, C = 80 pF) land close to the
// published linearity plots; VTH = 50 mV and VHYS = 20 mV are choices of this model.
`timescale 1ns/1ps
module fld_analog_model #(
  parameter real RIN    = 100.0,
  parameter real R1     = 2400.0,
  parameter real R2     = 1000.0,
  parameter real C      = 80.0e-12,
  parameter real VIO    = 1.25,
  parameter real VTH    = 0.05,
  parameter real VHYS   = 0.02,
  parameter real TAU_NS = 40.0,
  parameter real VRAIL  = 4.0,
  parameter real DT_NS  = 0.05
) (
  input  wire  dis_pad,
  output logic comp_o,
  output real  vout_o
);

  real q;           // charge on C [C]
  real iin;         // detector current [A]
  real ileak;       // leakage current [A], set by the testbench
  real decay;
  real t_rise_ns, t_fall_ns, last_width_ns, peak_v;
  int  n_pulses;    // comparator pulses seen

  task automatic fire(input real amp_v);
    iin = iin + amp_v / RIN;
  endtask

  initial begin
    q = 0.0; iin = 0.0; ileak = 0.0; vout_o = 0.0; comp_o = 1'b0;
    t_rise_ns = 0.0; t_fall_ns = 0.0; last_width_ns = 0.0; peak_v = 0.0;
    n_pulses = 0;
    decay = $exp(-DT_NS / TAU_NS);
    forever begin
      real ifb, v;
      #(DT_NS);
      ifb = (dis_pad === 1'b1) ? VIO / R1 : vout_o / (R1 + R2);
      q   = q + (iin + ileak - ifb) * DT_NS * 1.0e-9;
      iin = iin * decay;
      v   = q / C;
      if (v > VRAIL)  begin v = VRAIL;  q = v * C; end
      if (v < -VRAIL) begin v = -VRAIL; q = v * C; end
      vout_o = v;
      if (comp_o && v > peak_v) peak_v = v;
      if (!comp_o && v > VTH) begin
        comp_o    = 1'b1;
        t_rise_ns = $realtime;
        peak_v    = v;
      end else if (comp_o && v <= VTH - VHYS) begin
        comp_o        = 1'b0;
        t_fall_ns     = $realtime;
        last_width_ns = t_fall_ns - t_rise_ns;
        n_pulses++;
      end
    end
  end

endmodule : fld_analog_model
