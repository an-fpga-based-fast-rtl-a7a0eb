// tb_fld_channel: end-to-end test of fld_channel in a closed analog loop.
//
// fld_channel drives fld_analog_model (integrator, R1/R2, comparator), whose
// comparator output returns to fld_channel: the pin really switches the
// discharge. The counter is reduced to 8 bits (510 ns at 500 MHz) so that the
// larger pulses of the R1 = 3.9 kOhm set-up overflow it. The test checks:
//   * baseline hold: with a 5 uA leakage current and no pulses the capacitor
//     voltage settles at ileak*(R1+R2), below threshold, with no result;
//   * linear discharge: for pulses of 150..600 mV every result agrees with
//     the comparator pulse width seen by the model to within one clock;
//   * the pin is driven exactly while the comparator is high, else floats;
//   * overflow: pulses longer than the counter range are flagged;
//   * dead time: busy_o covers the comparator pulse.
// Each mechanism must occur at least once.
`timescale 1ns/1ps
module tb_fld_channel;

  localparam int unsigned WB   = 8;
  localparam real         TCLK = 2.0;        // ns
  localparam real         R1   = 3900.0;
  localparam real         R2   = 1000.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic comp, drive, busy, valid, ovf;
  logic [WB-1:0] width;
  wire  pad;
  real  vout;

  int checks = 0, failures = 0;
  int n_discharge = 0, n_overflow = 0, n_baseline = 0;
  int n_drive_cycles = 0, n_float_cycles = 0, n_busy_cycles = 0;

  always #(TCLK / 2) clk = ~clk;

  assign (weak0, weak1) pad = 1'b0;    // a floating pin reads 0

  fld_channel #(.WIDTH_BITS(WB)) dut (
    .clk(clk), .rst_n(rst_n), .comp_i(comp), .dis_pad(pad),
    .drive_o(drive), .busy_o(busy), .valid_o(valid), .width_o(width), .ovf_o(ovf));

  fld_analog_model #(.R1(R1), .R2(R2)) afe (.dis_pad(pad), .comp_o(comp), .vout_o(vout));

  task automatic fail(input string msg);
    failures++;
    $display("FAIL @%0t: %s", $time, msg);
  endtask

  // The pin must follow the comparator: driven high while it is high.
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (drive !== comp || pad !== comp) fail($sformatf("pin %b drive %b comp %b", pad, drive, comp));
    if (comp) n_drive_cycles++; else n_float_cycles++;
    if (busy) n_busy_cycles++;
  end

  // Wait for one result and compare it with the model's comparator width.
  task automatic expect_result(input real amp_mv);
    real   tw;
    bit    got = 1'b0;
    fork
      begin
        @(posedge clk iff valid);
        got = 1'b1;
      end
      #5us;
    join_any
    disable fork;
    checks++;
    if (!got) begin
      fail($sformatf("no result for %0.0f mV", amp_mv));
      return;
    end
    #0.1ns;
    tw = afe.last_width_ns;
    $display("amp %0.0f mV: comparator width %0.2f ns, count %0d ovf %b", amp_mv, tw, width, ovf);
    checks++;
    if (tw > (2.0 ** WB - 1.0) * TCLK + TCLK) begin
      n_overflow++;
      if (!ovf || width != '1) fail("overflow not flagged");
    end else if (tw < (2.0 ** WB - 1.0) * TCLK - TCLK) begin
      n_discharge++;
      if (ovf || real'(width) * TCLK - tw >= TCLK || tw - real'(width) * TCLK >= TCLK)
        fail($sformatf("count %0d does not match width %0.2f ns", width, tw));
    end
  endtask

  initial begin
    #200us;
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nres;
    #1ns afe.ileak = 5.0e-6;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    // Baseline hold: leakage only, the R1+R2 bleed keeps vout below threshold.
    nres = 0;
    fork
      forever begin @(posedge clk iff valid); nres++; end
      #6us;
    join_any
    disable fork;
    checks++;
    if (nres != 0 || afe.n_pulses != 0) fail("spurious result without a pulse");
    checks++;
    if (vout < 0.95 * 5.0e-6 * (R1 + R2) || vout > 1.05 * 5.0e-6 * (R1 + R2) || vout >= afe.VTH)
      fail($sformatf("baseline %0.4f V, expected %0.4f V", vout, 5.0e-6 * (R1 + R2)));
    else n_baseline++;
    $display("baseline with 5 uA leakage: %0.2f mV", vout * 1000.0);
    // Pulses across the linearity range of the 3.9 kOhm set-up.
    for (int a = 150; a <= 600; a += 50) begin
      #(0.013ns);
      afe.fire(a / 1000.0);
      expect_result(real'(a));
      checks++;
      if (busy) fail("busy after result");
      #4us;
    end
    checks++;
    if (n_busy_cycles < n_drive_cycles - 4 * 10) fail("busy does not cover the discharge");
    $display("mechanisms: discharge=%0d overflow=%0d baseline_hold=%0d drive_cycles=%0d float_cycles=%0d",
             n_discharge, n_overflow, n_baseline, n_drive_cycles, n_float_cycles);
    checks++;
    if (n_discharge == 0 || n_overflow == 0 || n_baseline == 0 || n_drive_cycles == 0 || n_float_cycles == 0)
      fail("a mechanism was never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_fld_channel
