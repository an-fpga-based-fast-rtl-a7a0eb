// tb_fld_channel_full: linearity measurement with fld_channel at its default
// parameters (12-bit counter, 500 MHz clock, 2-stage synchroniser).
//
// Two channels run side by side, each closed through fld_analog_model with
// one of the two published linearity set-ups: Rin = 100 Ohm, R2 = 1 kOhm,
// C = 80 pF and R1 = 2.4 kOhm (input pulses 200..650 mV) or R1 = 3.9 kOhm
// (150..600 mV), 50 mV steps. For every pulse the count must agree with the
// comparator width seen by the model to within one clock. A straight line is
// then fitted to count*Tclk against amplitude; the largest residual relative
// to the full range (the integral nonlinearity) must stay below 1 %, which is
// what one-clock quantisation allows over this range, and the slope must lie
// within 5 % of the ideal charge/current ratio TAU*R1/(RIN*VIO).
`timescale 1ns/1ps
module tb_fld_channel_full;

  localparam real TCLK = real'(fld_pkg::TDC_CLK_PERIOD_PS) / 1000.0;   // ns
  localparam int  NPTS = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  wire  pad_a, pad_b;
  logic comp_a, comp_b, drive_a, drive_b, busy_a, busy_b, valid_a, valid_b, ovf_a, ovf_b;
  logic [fld_pkg::WIDTH_BITS-1:0] width_a, width_b;
  real  vout_a, vout_b;

  int checks = 0, failures = 0;

  always #(TCLK / 2) clk = ~clk;

  assign (weak0, weak1) pad_a = 1'b0;
  assign (weak0, weak1) pad_b = 1'b0;

  fld_channel dut_a (
    .clk(clk), .rst_n(rst_n), .comp_i(comp_a), .dis_pad(pad_a),
    .drive_o(drive_a), .busy_o(busy_a), .valid_o(valid_a), .width_o(width_a), .ovf_o(ovf_a));
  fld_channel dut_b (
    .clk(clk), .rst_n(rst_n), .comp_i(comp_b), .dis_pad(pad_b),
    .drive_o(drive_b), .busy_o(busy_b), .valid_o(valid_b), .width_o(width_b), .ovf_o(ovf_b));

  fld_analog_model #(.R1(2400.0)) afe_a (.dis_pad(pad_a), .comp_o(comp_a), .vout_o(vout_a));
  fld_analog_model #(.R1(3900.0)) afe_b (.dis_pad(pad_b), .comp_o(comp_b), .vout_o(vout_b));

  real amp_a[NPTS], amp_b[NPTS], t_a[NPTS], t_b[NPTS];

  task automatic fail(input string msg);
    failures++;
    $display("FAIL @%0t: %s", $time, msg);
  endtask

  // Least-squares line; returns slope, intercept and nonlinearity in %.
  task automatic fit(input real x[NPTS], input real y[NPTS],
                     output real slope, output real icpt, output real inl_pct);
    real sx = 0, sy = 0, sxx = 0, sxy = 0, rmax = 0, ymin = 1.0e9, ymax = -1.0e9, r;
    for (int i = 0; i < NPTS; i++) begin
      sx += x[i]; sy += y[i]; sxx += x[i] * x[i]; sxy += x[i] * y[i];
      if (y[i] < ymin) ymin = y[i];
      if (y[i] > ymax) ymax = y[i];
    end
    slope = (NPTS * sxy - sx * sy) / (NPTS * sxx - sx * sx);
    icpt  = (sy - slope * sx) / NPTS;
    for (int i = 0; i < NPTS; i++) begin
      r = y[i] - (slope * x[i] + icpt);
      if (r < 0) r = -r;
      if (r > rmax) rmax = r;
    end
    inl_pct = 100.0 * rmax / (ymax - ymin);
  endtask

  task automatic check_setup(input string name, input real r1,
                             input real x[NPTS], input real y[NPTS]);
    real slope, icpt, inl, ideal;
    fit(x, y, slope, icpt, inl);
    ideal = afe_a.TAU_NS * r1 / (afe_a.RIN * afe_a.VIO);   // ns per V
    $display("%s: slope %0.4f ns/mV (ideal %0.4f), intercept %0.1f ns, nonlinearity %0.3f %%",
             name, slope / 1000.0, ideal / 1000.0, icpt, inl);
    checks++;
    if (inl >= 1.0) fail($sformatf("%s nonlinearity %0.3f %%", name, inl));
    checks++;
    if (slope < 0.95 * ideal || slope > 1.05 * ideal) fail($sformatf("%s slope off", name));
  endtask

  // One pulse on one channel; the count is checked against the model.
  task automatic measure(input bit b, input real amp_v, output real t_ns);
    real tw;
    bit  got = 1'b0;
    if (b) afe_b.fire(amp_v); else afe_a.fire(amp_v);
    fork
      begin
        if (b) @(posedge clk iff valid_b); else @(posedge clk iff valid_a);
        got = 1'b1;
      end
      #5us;
    join_any
    disable fork;
    #0.1ns;
    tw   = b ? afe_b.last_width_ns : afe_a.last_width_ns;
    t_ns = real'(b ? width_b : width_a) * TCLK;
    checks++;
    if (!got || (b ? ovf_b : ovf_a) || t_ns - tw >= TCLK || tw - t_ns >= TCLK)
      fail($sformatf("ch %0d amp %0.3f V: count time %0.1f ns, comparator %0.2f ns", b, amp_v, t_ns, tw));
  endtask

  initial begin
    #500us;
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    #0.013ns rst_n = 1'b1;
    #2us;
    for (int i = 0; i < NPTS; i++) begin
      amp_a[i] = 0.200 + 0.050 * i;
      amp_b[i] = 0.150 + 0.050 * i;
      fork
        measure(1'b0, amp_a[i], t_a[i]);
        measure(1'b1, amp_b[i], t_b[i]);
      join
      $display("R1=2.4k %0.0f mV -> %0.0f ns   R1=3.9k %0.0f mV -> %0.0f ns",
               amp_a[i] * 1000.0, t_a[i], amp_b[i] * 1000.0, t_b[i]);
      #4us;
    end
    check_setup("R1=2.4k", 2400.0, amp_a, t_a);
    check_setup("R1=3.9k", 3900.0, amp_b, t_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_fld_channel_full
