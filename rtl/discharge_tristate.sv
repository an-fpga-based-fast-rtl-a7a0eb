// discharge_tristate: the tri-state output that switches the linear discharge.
//
// The pin is wired to the midpoint of the two feedback resistors R1 and R2
// that sit in series across the integrating capacitor. While the comparator
// output comp_i is high (the capacitor voltage is above threshold) the pin
// drives a logic high: R1 then sees a fixed voltage against the amplifier's
// virtual ground and carries a constant current that discharges the
// capacitor linearly. While comp_i is low the pin is high impedance, so
// R1+R2 act as one feedback resistor that bleeds leakage charge and holds the
// baseline below threshold. This drive-high / float behaviour follows the
// source circuit.
//
// Interface: comp_i is the comparator output (asynchronous, no clock is
// involved); dis_pad is the package pin; drive_o mirrors the output enable
// for on-chip monitoring (this design's own addition).
// Timing: purely combinational, comp_i to dis_pad through the pad buffer.
// The pin never drives a low level.
`timescale 1ns / 1ps
module discharge_tristate (
  input  logic comp_i,
  output logic drive_o,
  inout  wire  dis_pad
);

  always_comb drive_o = comp_i;

  assign dis_pad = drive_o ? 1'b1 : 1'bz;

endmodule : discharge_tristate
