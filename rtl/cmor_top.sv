// cmor_top: the cellular memristive-output reservoir (CMOR) circuit.
//
// An n-bit input drives a stack of m rings of rule multiplexers (eca_stack),
// which settles into m generations of an elementary cellular automaton.
// Each of the n x m cell outputs drives the gate of one 1T1R ReRAM element
// (rsvm_gate_ctrl, rsvm_array); the elements are wired in parallel, so the
// conductance between the bank's two terminals is the dot product of the
// automaton state with the stored conductance map, and comparing it with a
// boundary G_b classifies the input (rsvm_classifier). A row/column address
// (element_select) reads out any one cell's state and, in programming mode,
// enables only that element's transistor so that a pulse on the common
// terminals sets or resets that one ReRAM device.
//
// Interface: din, the address, prog_en / prog_pulse / prog_op and g_b_us
// are inputs; the full CA state, the addressed cell's state, the device
// states, the conductance code and the class are outputs.
//
// Timing: no clock. Everything is combinational except the ReRAM states,
// which change on prog_pulse rising edges while prog_en = 1. The structure
// follows the paper; the programming-mode signal, the address encoding and
// the digital conductance code are this design's choices.
module cmor_top #(
  parameter int unsigned N_CELLS = cmor_pkg::N_CELLS_DEF,
  parameter int unsigned M_GENS  = cmor_pkg::M_GENS_DEF,
  parameter logic [7:0]  RULE    = cmor_pkg::RULE_DEF,
  parameter int unsigned G_W     = cmor_pkg::G_W_DEF,
  localparam int unsigned RW = (M_GENS  > 1) ? $clog2(M_GENS)  : 1,
  localparam int unsigned CW = (N_CELLS > 1) ? $clog2(N_CELLS) : 1
) (
  input  logic [N_CELLS-1:0]             din,         // digital input
  input  logic [RW-1:0]                  row_addr,    // element row (generation - 1)
  input  logic [CW-1:0]                  col_addr,    // element column (cell)
  input  logic                           prog_en,     // 1 = programming mode
  input  logic                           prog_pulse,  // programming pulse
  input  cmor_pkg::prog_op_e             prog_op,     // set or reset
  input  logic [G_W-1:0]                 g_b_us,      // boundary G_b, uS
  output logic [M_GENS-1:0][N_CELLS-1:0] gens,        // reservoir state
  output logic                           state_out,   // addressed cell's state
  output logic [M_GENS-1:0][N_CELLS-1:0] lrs_map,     // ReRAM states
  output logic [G_W-1:0]                 g_sum_us,    // RSVM conductance, uS
  output logic                           y_pos        // 1 = class +1
);

  logic [M_GENS-1:0][N_CELLS-1:0] sel;
  logic [M_GENS-1:0][N_CELLS-1:0] gate;

  eca_stack #(.N_CELLS(N_CELLS), .M_GENS(M_GENS), .RULE(RULE)) u_stack (
    .din (din),
    .gens(gens)
  );

  element_select #(.N_CELLS(N_CELLS), .M_GENS(M_GENS)) u_select (
    .row_addr (row_addr),
    .col_addr (col_addr),
    .gens     (gens),
    .sel      (sel),
    .state_out(state_out)
  );

  rsvm_gate_ctrl #(.N_CELLS(N_CELLS), .M_GENS(M_GENS)) u_gates (
    .prog_en(prog_en),
    .gens   (gens),
    .sel    (sel),
    .gate   (gate)
  );

  rsvm_array #(.N_CELLS(N_CELLS), .M_GENS(M_GENS), .G_W(G_W)) u_bank (
    .gate      (gate),
    .prog_pulse(prog_pulse),
    .prog_op   (prog_op),
    .lrs_map   (lrs_map),
    .g_sum_us  (g_sum_us)
  );

  rsvm_classifier #(.G_W(G_W)) u_class (
    .g_sum_us(g_sum_us),
    .g_b_us  (g_b_us),
    .y_pos   (y_pos)
  );

endmodule
