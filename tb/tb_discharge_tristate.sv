// tb_discharge_tristate: self-checking test of discharge_tristate.
//
// The pin carries a weak pull whose level the testbench toggles. A pin that
// is driven reads 1 whatever the pull; a floating pin follows the pull. For
// every combination of comparator level and pull level the test checks the
// pin level and the drive_o monitor against these rules: comparator high ->
// pin driven high, comparator low -> pin floating (never driven low).
`timescale 1ns/1ps
module tb_discharge_tristate;

  logic comp, pull, drive;
  wire  pad;
  int   checks = 0, failures = 0;

  discharge_tristate dut (.comp_i(comp), .drive_o(drive), .dis_pad(pad));

  assign (weak0, weak1) pad = pull;

  task automatic check(input logic c, input logic p);
    logic exp_pad;
    comp = c; pull = p;
    #1;
    exp_pad = c ? 1'b1 : p;
    checks++;
    if (pad !== exp_pad || drive !== c) begin
      failures++;
      $display("FAIL comp=%b pull=%b: pad=%b (exp %b) drive=%b", c, p, pad, exp_pad, drive);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) check(i[1], i[0]);
    for (int i = 0; i < 200; i++) check(1'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_discharge_tristate
