// fld_channel: FPGA part of one fast-linear-discharge digitiser channel.
//
// A detector current pulse is integrated on a capacitor by an external
// inverting amplifier. The amplifier output goes to an LVDS input of the
// FPGA used as a comparator against a fixed low threshold; that comparator
// output arrives here as comp_i. While comp_i is high, discharge_tristate
// drives the midpoint of the feedback resistors high, which makes one of
// them a constant-current source that empties the capacitor linearly; when
// the capacitor voltage falls back through the threshold, comp_i drops and
// the pin floats again. The comp_i pulse is therefore as wide as the charge
// is large, and pulse_width_tdc converts that width into a count. The loop
// comp_i -> dis_pad is combinational, as in the source circuit; only the
// width measurement is clocked.
//
// Interface: clk (TDC clock, TDC_CLK_PERIOD_PS in fld_pkg), rst_n (async,
// active low), comp_i (comparator output), dis_pad (tri-state pin to the
// R1/R2 midpoint), drive_o (pin output enable), busy_o (measurement in
// progress), valid_o / width_o / ovf_o (one result per pulse, see
// pulse_width_tdc for its timing). The comparator itself is the FPGA's
// analog input buffer and is not part of this module.
`timescale 1ns / 1ps
module fld_channel #(
  parameter int unsigned WIDTH_BITS  = fld_pkg::WIDTH_BITS,
  parameter int unsigned SYNC_STAGES = fld_pkg::SYNC_STAGES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  comp_i,
  inout  wire                   dis_pad,
  output logic                  drive_o,
  output logic                  busy_o,
  output logic                  valid_o,
  output logic [WIDTH_BITS-1:0] width_o,
  output logic                  ovf_o
);

  discharge_tristate u_dis (
    .comp_i  (comp_i),
    .drive_o (drive_o),
    .dis_pad (dis_pad)
  );

  pulse_width_tdc #(
    .WIDTH_BITS  (WIDTH_BITS),
    .SYNC_STAGES (SYNC_STAGES)
  ) u_tdc (
    .clk     (clk),
    .rst_n   (rst_n),
    .pulse_i (comp_i),
    .busy_o  (busy_o),
    .valid_o (valid_o),
    .width_o (width_o),
    .ovf_o   (ovf_o)
  );

endmodule : fld_channel
