// reram_1t1r: BEHAVIOURAL MODEL (not synthesizable logic) of one 1T1R
// element of the RSVM: a select transistor in series with a ReRAM device
// built in the level-1 via (TiN bottom electrode stud, HfO2 switching layer,
// Ti oxygen-scavenger layer, TiN top electrode).
//
// The device holds a binary state, low-resistance (LRS, after forming or
// set) or high-resistance (HRS, pristine or after reset). A programming
// pulse is applied across the array's common source/drain terminals; it
// changes this device only while its gate is on, i.e. the transistor passes
// the current. prog_op chooses set or reset. Read-out: with the gate on the
// element contributes G_LRS_US or G_HRS_US to the parallel sum; with the gate
// off it still leaks G_OFF_US, the disabled-element contribution the
// measurements showed to be non-negligible.
//
// Follows the paper: binary HRS/LRS programming through the select
// transistor, gate-controlled contribution. This model's choices: the
// conductance values (set so that one LRS element against a 1.2 mS
// boundary separates the classes), starting in HRS, and abstracting the
// 3.3 V / 1 mA-compliance pulse into an edge on prog_pulse.
//
// Timing: the state changes on the rising edge of prog_pulse; g_us follows
// gate and the state at once.
module reram_1t1r #(
  parameter int unsigned G_W      = cmor_pkg::G_W_DEF,
  parameter int unsigned G_LRS_US = 400,  // on-state conductance in LRS, uS
  parameter int unsigned G_HRS_US = 20,   // on-state conductance in HRS, uS
  parameter int unsigned G_OFF_US = 16    // leakage with the gate off, uS
) (
  input  logic              gate,        // select-transistor gate
  input  logic              prog_pulse,  // rising edge = one programming pulse
  input  cmor_pkg::prog_op_e prog_op,    // set or reset
  output logic              lrs,         // 1 = low-resistance state
  output logic [G_W-1:0]    g_us         // conductance through the element
);

  initial lrs = 1'b0;  // pristine device: unformed, high resistance

  always @(posedge prog_pulse) begin
    if (gate) lrs <= (prog_op == cmor_pkg::PROG_SET);
  end

  always_comb begin
    if (!gate)    g_us = G_W'(G_OFF_US);
    else if (lrs) g_us = G_W'(G_LRS_US);
    else          g_us = G_W'(G_HRS_US);
  end

endmodule
