// tb_reram_1t1r: self-checking test of the 1T1R behavioural model.
//
// Checks that a pristine device is in HRS, that set and reset pulses change
// the state only while the gate is on, and that the conductance seen is the
// off-leakage with the gate off and the LRS or HRS value with it on.
module tb_reram_1t1r;
  import cmor_pkg::*;
  localparam int LRS = 400, HRS = 20, OFF = 16;
  logic gate, pulse;
  prog_op_e op;
  logic lrs;
  logic [15:0] g;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  reram_1t1r #(.G_W(16), .G_LRS_US(LRS), .G_HRS_US(HRS), .G_OFF_US(OFF)) dut (
    .gate(gate), .prog_pulse(pulse), .prog_op(op), .lrs(lrs), .g_us(g));

  task automatic expect_state(logic e_lrs, string what);
    gate = 1'b0; #1;
    checks += 3;
    if (g !== 16'(OFF)) begin failures++; $display("FAIL %s: off conductance %0d", what, g); end
    gate = 1'b1; #1;
    if (lrs !== e_lrs) begin failures++; $display("FAIL %s: state %b", what, lrs); end
    if (g !== 16'(e_lrs ? LRS : HRS)) begin failures++; $display("FAIL %s: on conductance %0d", what, g); end
  endtask

  task automatic pulse_with(logic gt, prog_op_e o);
    gate = gt; op = o; #1;
    pulse = 1'b1; #2;
    pulse = 1'b0; #2;
  endtask

  initial begin
    pulse = 1'b0; gate = 1'b0; op = PROG_RESET;
    #1;
    expect_state(1'b0, "pristine");
    pulse_with(1'b0, PROG_SET);   expect_state(1'b0, "set, gate off");
    pulse_with(1'b1, PROG_SET);   expect_state(1'b1, "set, gate on");
    pulse_with(1'b0, PROG_RESET); expect_state(1'b1, "reset, gate off");
    pulse_with(1'b1, PROG_RESET); expect_state(1'b0, "reset, gate on");
    pulse_with(1'b1, PROG_SET);   expect_state(1'b1, "set again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
