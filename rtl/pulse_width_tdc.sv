// pulse_width_tdc: measures the width of the comparator pulse in clock cycles.
//
// In the fast-linear-discharge channel the width of the comparator pulse is
// proportional to the charge of the detector pulse, so this width is the
// channel's energy measurement. The source circuit only says that a TDC in
// the FPGA measures the pulse width; how it does so is this design's choice,
// and the simplest form is used: the asynchronous pulse is brought into the
// clock domain by SYNC_STAGES flip-flops and a counter counts the cycles in
// which the synchronised pulse is high. The resolution is one clock period.
// A pulse longer than 2**WIDTH_BITS-1 cycles saturates the counter and is
// reported with ovf_o set.
//
// Interface:
//   pulse_i  asynchronous comparator output (high during the discharge)
//   busy_o   high while a pulse is being measured (the channel's dead time)
//   valid_o  one-cycle strobe; width_o and ovf_o hold the last result
//   width_o  number of cycles the synchronised pulse was high (>= 1)
//   ovf_o    the pulse exceeded the counter range
// Timing: valid_o is set by the SYNC_STAGES-th rising edge after the edge
// that first samples pulse_i low. width_o differs from the true width divided by the
// clock period by less than one cycle. A new pulse may start the cycle after
// the synchronised pulse has fallen. Reset is asynchronous, active low.
`timescale 1ns / 1ps
module pulse_width_tdc #(
  parameter int unsigned WIDTH_BITS  = fld_pkg::WIDTH_BITS,
  parameter int unsigned SYNC_STAGES = fld_pkg::SYNC_STAGES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  pulse_i,
  output logic                  busy_o,
  output logic                  valid_o,
  output logic [WIDTH_BITS-1:0] width_o,
  output logic                  ovf_o
);

  localparam logic [WIDTH_BITS-1:0] CNT_MAX = '1;

  logic [SYNC_STAGES-1:0] sync_q;
  logic                   level, level_d;
  logic [WIDTH_BITS-1:0]  cnt_q;
  logic                   ovf_q;

  // Synchroniser: sync_q[0] samples the asynchronous input.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_q <= '0;
    else        sync_q <= {sync_q[SYNC_STAGES-2:0], pulse_i};
  end

  assign level = sync_q[SYNC_STAGES-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      level_d <= 1'b0;
      cnt_q   <= '0;
      ovf_q   <= 1'b0;
      valid_o <= 1'b0;
      width_o <= '0;
      ovf_o   <= 1'b0;
    end else begin
      level_d <= level;
      valid_o <= 1'b0;
      if (level) begin
        if (!level_d) begin            // leading edge: first high cycle
          cnt_q <= WIDTH_BITS'(1);
          ovf_q <= 1'b0;
        end else if (cnt_q == CNT_MAX) begin
          ovf_q <= 1'b1;               // saturate, remember the overflow
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end else if (level_d) begin      // trailing edge: publish the result
        valid_o <= 1'b1;
        width_o <= cnt_q;
        ovf_o   <= ovf_q;
      end
    end
  end

  assign busy_o = level;

  initial begin
    assert (SYNC_STAGES >= 2) else $error("SYNC_STAGES must be at least 2");
  end

  // A result is never published while a pulse is still being counted.
  a_valid_after_fall: assert property (@(posedge clk) disable iff (!rst_n)
                                       valid_o |-> !level_d);

endmodule : pulse_width_tdc
