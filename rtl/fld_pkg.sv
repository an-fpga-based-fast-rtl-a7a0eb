// fld_pkg: constants shared by the fast-linear-discharge channel.
//
// The channel turns the charge of a detector pulse into the width of a
// rectangular comparator pulse and measures that width in clock cycles.
// The numbers here are this design's own choices; the source circuit gives
// no clock rate or counter width for its time measurement.
//   TDC_CLK_PERIOD_PS : period of the counting clock (500 MHz, a rate a
//                       Kintex-7 fabric counter reaches).
//   WIDTH_BITS        : width of the pulse-width counter. 12 bits at 2 ns
//                       cover 8.19 us, above the largest discharge time
//                       measured in the spectra (about 700 ns).
//   SYNC_STAGES       : flip-flops that bring the asynchronous comparator
//                       output into the clock domain.
`timescale 1ns / 1ps
package fld_pkg;

  localparam int unsigned TDC_CLK_PERIOD_PS = 2000;
  localparam int unsigned WIDTH_BITS        = 12;
  localparam int unsigned SYNC_STAGES       = 2;

endpackage : fld_pkg
