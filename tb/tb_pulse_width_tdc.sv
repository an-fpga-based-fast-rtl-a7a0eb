// tb_pulse_width_tdc: self-checking test of pulse_width_tdc.
//
// Two instances share a 500 MHz clock: one at the default counter width and
// one with a 4-bit counter so that overflow is reached quickly. Asynchronous
// pulses of random width and phase are applied. The testbench independently
// counts the rising clock edges that sample the pulse high; that count is the
// expected width (the synchroniser delays the pulse but keeps its length).
// It also checks that the counted width is within one clock period of the
// true width, that overflow is flagged exactly when the count exceeds the
// range, the result latency (valid set SYNC_STAGES edges after the first edge
// that samples the pulse low), and that busy_o covers the measurement.
`timescale 1ns/1ps
module tb_pulse_width_tdc;

  localparam int unsigned WB = fld_pkg::WIDTH_BITS;
  localparam int unsigned SS = fld_pkg::SYNC_STAGES;
  localparam int unsigned WS = 4;
  localparam realtime     TCLK = 2.0ns;

  logic clk = 1'b0, rst_n = 1'b0, pulse = 1'b0;
  logic          busy_a, valid_a, ovf_a;
  logic [WB-1:0] width_a;
  logic          busy_b, valid_b, ovf_b;
  logic [WS-1:0] width_b;

  int checks = 0, failures = 0;
  int n_ovf = 0;
  int edges_high;       // clock edges that sampled the pulse high
  int edge_no = 0;      // running clock edge index
  int low_edge;         // first edge that sampled the pulse low
  int valid_edge_a, valid_edge_b;

  always #(TCLK / 2) clk = ~clk;

  pulse_width_tdc dut_a (
    .clk(clk), .rst_n(rst_n), .pulse_i(pulse),
    .busy_o(busy_a), .valid_o(valid_a), .width_o(width_a), .ovf_o(ovf_a));

  pulse_width_tdc #(.WIDTH_BITS(WS)) dut_b (
    .clk(clk), .rst_n(rst_n), .pulse_i(pulse),
    .busy_o(busy_b), .valid_o(valid_b), .width_o(width_b), .ovf_o(ovf_b));

  // Reference monitor. It runs in the same time step as the DUT's flip-flops
  // and, like them, sees the values from before the edge. The pulse edges are
  // placed off the clock grid, so there is no race on pulse.
  bit measuring = 1'b0;
  always @(posedge clk) begin
    edge_no++;
    if (valid_a) valid_edge_a = edge_no - 1;   // edge that set valid_a
    if (valid_b) valid_edge_b = edge_no - 1;
    if (measuring) begin
      if (pulse) edges_high++;
      else if (low_edge < 0) low_edge = edge_no;
    end
  end

  task automatic one_pulse(input real width_ns);
    int  exp_a, exp_b;
    bit  exp_ovf_b;
    edges_high = 0;
    valid_edge_a = -1; valid_edge_b = -1;
    low_edge = -1;
    measuring = 1'b1;
    pulse = 1'b1;
    #(width_ns * 1ns);
    pulse = 1'b0;
    repeat (SS + 4) @(posedge clk);
    measuring = 1'b0;
    exp_a     = edges_high;
    exp_ovf_b = (edges_high > (2 ** WS - 1));
    exp_b     = exp_ovf_b ? (2 ** WS - 1) : edges_high;
    if (exp_ovf_b) n_ovf++;
    checks++;
    if (width_a != WB'(exp_a) || ovf_a) begin
      failures++;
      $display("FAIL width %0.3f ns: got %0d ovf=%b, exp %0d", width_ns, width_a, ovf_a, exp_a);
    end
    checks++;
    if ((real'(width_a) * 2.0 - width_ns) >= 2.0 || (width_ns - real'(width_a) * 2.0) >= 2.0) begin
      failures++;
      $display("FAIL width %0.3f ns: count %0d more than a cycle off", width_ns, width_a);
    end
    checks++;
    if (width_b != WS'(exp_b) || ovf_b != exp_ovf_b) begin
      failures++;
      $display("FAIL small counter, width %0.3f ns: got %0d ovf=%b, exp %0d ovf=%b",
               width_ns, width_b, ovf_b, exp_b, exp_ovf_b);
    end
    checks++;
    if (valid_edge_a != low_edge + int'(SS) || valid_edge_b != low_edge + int'(SS)) begin
      failures++;
      $display("FAIL latency: low at edge %0d, valid at %0d / %0d", low_edge, valid_edge_a, valid_edge_b);
    end
    checks++;
    if (busy_a || busy_b) begin
      failures++;
      $display("FAIL busy still high after result");
    end
    #((($urandom % 1000) / 100.0 + 0.003) * 1ns);
  endtask

  // busy must be high while the counter runs: sample during pulses
  always @(negedge clk) begin
    if (rst_n && edges_high > SS && pulse && !busy_a) begin
      failures++;
      $display("FAIL busy low during a long pulse");
    end
  end

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    edges_high = 0;
    repeat (3) @(posedge clk);
    #0.3ns rst_n = 1'b1;
    repeat (3) @(posedge clk);
    #0.137ns;
    // short, exact-multiple and long widths, then random ones
    one_pulse(2.5);
    one_pulse(10.0);
    one_pulse(31.9);
    one_pulse(33.1);
    one_pulse(160.0);
    one_pulse(729.7);
    for (int i = 0; i < 300; i++) begin
      one_pulse(2.2 + ($urandom % 80000) / 100.0);
    end
    checks++;
    if (n_ovf == 0) begin
      failures++;
      $display("FAIL overflow never exercised");
    end
    $display("pulses with small-counter overflow: %0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_pulse_width_tdc
