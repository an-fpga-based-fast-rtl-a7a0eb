// tb_fld_spectrum: 22Na energy-spectrum run through two default-size
// fld_channel instances, one per published set-up.
//
// Channel A uses the LYSO set-up (R1 = 2.4 kOhm), channel B the LaBr3 set-up
// (R1 = 3.9 kOhm); both have Rin = 100 Ohm, R2 = 1 kOhm, C = 80 pF and close
// the loop through fld_analog_model. The testbench draws gamma energies from
// a simple 22Na mixture (511 keV photopeak, 1274 keV photopeak and flat
// Compton continua below 340 keV and 1062 keV), smears them with a Gaussian
// whose FWHM at 511 keV is 12.67 % (LYSO) or 5.17 % (LaBr3) and scales as
// sqrt(E), and turns them into input pulses with an amplitude proportional to
// energy. The gain puts the 511 keV peak near 200 ns, as in the published
// spectra. The mixture and gain are this testbench's own; the resolutions are
// the published results, used here as the input.
// Checks: every count agrees with the model's comparator width within one
// clock and never overflows; the histogram maximum of the counts lies on the
// 511 keV peak; and the 511 keV resolution recovered from the counts, using
// the two photopeaks for calibration, is within 20 % of the resolution that
// was put in. A coarse histogram of each spectrum is printed.
`timescale 1ns/1ps
module tb_fld_spectrum;

  localparam real TCLK    = real'(fld_pkg::TDC_CLK_PERIOD_PS) / 1000.0;
  localparam int  NEV     = 1500;            // events per channel
  localparam int  NBIN    = 2 ** fld_pkg::WIDTH_BITS;
  localparam real RES_A   = 0.1267;          // FWHM/E at 511 keV, LYSO
  localparam real RES_B   = 0.0517;          // FWHM/E at 511 keV, LaBr3
  localparam real GAIN_A  = 0.270 / 511.0;   // V per keV
  localparam real GAIN_B  = 0.165 / 511.0;

  logic clk = 1'b0, rst_n = 1'b0;
  wire  pad_a, pad_b;
  logic comp_a, comp_b, drive_a, drive_b, busy_a, busy_b, valid_a, valid_b, ovf_a, ovf_b;
  logic [fld_pkg::WIDTH_BITS-1:0] width_a, width_b;
  real  vout_a, vout_b;

  int checks = 0, failures = 0;
  int hist_a[NBIN], hist_b[NBIN];

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

  task automatic fail(input string msg);
    failures++;
    $display("FAIL @%0t: %s", $time, msg);
  endtask

  function automatic real uniform();
    return (real'($urandom % 1000000) + 0.5) / 1000000.0;
  endfunction

  function automatic real gauss();
    return $sqrt(-2.0 * $ln(uniform())) * $cos(6.283185307 * uniform());
  endfunction

  // Draws an energy in keV; kind 0 = 511 peak, 1 = 1274 peak, 2 = continuum.
  function automatic real draw_energy(input real res511, output int kind);
    real u = uniform(), e, sig;
    if (u < 0.40)      begin kind = 0; e = 511.0;  end
    else if (u < 0.47) begin kind = 1; e = 1274.0; end
    else if (u < 0.80) begin kind = 2; return 60.0 + 280.0 * uniform(); end
    else               begin kind = 2; return 60.0 + 1000.0 * uniform(); end
    sig = res511 / 2.3548 * 511.0 * $sqrt(e / 511.0);
    return e + sig * gauss();
  endfunction

  // Statistics of the counts of the two photopeaks, per channel.
  real s_n[2][2], s_sum[2][2], s_sq[2][2];

  task automatic event_on(input bit b, input real gain, input real res);
    int  kind;
    real e, tw, t;
    bit  got = 1'b0;
    e = draw_energy(res, kind);
    if (b) afe_b.fire(e * gain); else afe_a.fire(e * gain);
    fork
      begin
        if (b) @(posedge clk iff valid_b); else @(posedge clk iff valid_a);
        got = 1'b1;
      end
      #5us;
    join_any
    disable fork;
    #0.1ns;
    tw = b ? afe_b.last_width_ns : afe_a.last_width_ns;
    t  = real'(b ? width_b : width_a) * TCLK;
    checks++;
    if (!got || (b ? ovf_b : ovf_a) || t - tw >= TCLK || tw - t >= TCLK) begin
      fail($sformatf("ch %0d E %0.1f keV: count time %0.1f ns, comparator %0.2f ns", b, e, t, tw));
      return;
    end
    if (b) hist_b[width_b]++; else hist_a[width_a]++;
    if (kind < 2) begin
      s_n[b][kind]   += 1.0;
      s_sum[b][kind] += t;
      s_sq[b][kind]  += t * t;
    end
  endtask

  task automatic analyse(input string name, input bit b, input int hist[NBIN], input real res_in);
    real m0, m1, sd0, keV_per_ns, res_out;
    int  best = 0, best_c = -1, c;
    // histogram maximum, smoothed over 5 bins, above 40 ns
    for (int i = 22; i < NBIN - 2; i++) begin
      c = hist[i-2] + hist[i-1] + hist[i] + hist[i+1] + hist[i+2];
      if (c > best_c) begin best_c = c; best = i; end
    end
    m0  = s_sum[b][0] / s_n[b][0];
    m1  = s_sum[b][1] / s_n[b][1];
    sd0 = $sqrt(s_sq[b][0] / s_n[b][0] - m0 * m0);
    keV_per_ns = (1274.0 - 511.0) / (m1 - m0);
    res_out = 2.3548 * sd0 * keV_per_ns / 511.0;
    $display("%s: 511 keV peak %0.1f ns, 1274 keV peak %0.1f ns, histogram maximum %0.0f ns",
             name, m0, m1, real'(best) * TCLK);
    $display("%s: 511 keV resolution from counts %0.2f %% (input %0.2f %%)",
             name, 100.0 * res_out, 100.0 * res_in);
    checks++;
    if ((real'(best) * TCLK - m0) > 3.0 * sd0 + TCLK || (m0 - real'(best) * TCLK) > 3.0 * sd0 + TCLK)
      fail($sformatf("%s histogram maximum not on the 511 keV peak", name));
    checks++;
    if (res_out < 0.8 * res_in || res_out > 1.2 * res_in)
      fail($sformatf("%s resolution %0.2f %% vs %0.2f %%", name, 100.0 * res_out, 100.0 * res_in));
    // coarse spectrum, 20 ns bins
    for (int lo = 0; lo < 800; lo += 20) begin
      int    n = 0;
      string bar = "";
      for (int i = lo / 2; i < (lo + 20) / 2; i++) n += hist[i];
      for (int i = 0; i < n / 8; i++) bar = {bar, "#"};
      $display("%s %3d-%3d ns %5d %s", name, lo, lo + 20, n, bar);
    end
  endtask

  initial begin
    #200ms;
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (hist_a[i]) begin hist_a[i] = 0; hist_b[i] = 0; end
    foreach (s_n[i, j]) begin s_n[i][j] = 0.0; s_sum[i][j] = 0.0; s_sq[i][j] = 0.0; end
    repeat (4) @(posedge clk);
    #0.013ns rst_n = 1'b1;
    #2us;
    for (int k = 0; k < NEV; k++) begin
      fork
        event_on(1'b0, GAIN_A, RES_A);
        event_on(1'b1, GAIN_B, RES_B);
      join
      #(2us + (($urandom % 1000) / 100.0) * 1ns);
    end
    analyse("LYSO ", 1'b0, hist_a, RES_A);
    analyse("LaBr3", 1'b1, hist_b, RES_B);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_fld_spectrum
