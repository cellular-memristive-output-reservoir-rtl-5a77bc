// rsvm_gate_ctrl: gate drive of the 1T1R select transistors in the ReRAM
// support-vector machine (RSVM).
//
// In compute mode (prog_en = 0) the gate of element (r,c) follows the binary
// output of reservoir cell (r,c), so the automaton's state decides which
// ReRAM devices conduct. In programming mode (prog_en = 1) the gates follow
// the one-hot address select instead, so only the addressed element is on
// while a programming pulse is applied to the array's common terminals.
//
// On silicon these gates are thick-oxide devices able to pass the higher
// programming voltages; only their logic is modelled. That the CA drives the
// gates and that each element can also be enabled by an external select
// follows the paper; the explicit mode input is this design's choice.
//
// Timing: purely combinational.
module rsvm_gate_ctrl #(
  parameter int unsigned N_CELLS = cmor_pkg::N_CELLS_DEF,
  parameter int unsigned M_GENS  = cmor_pkg::M_GENS_DEF
) (
  input  logic                           prog_en,  // 1 = programming mode
  input  logic [M_GENS-1:0][N_CELLS-1:0] gens,     // reservoir state
  input  logic [M_GENS-1:0][N_CELLS-1:0] sel,      // one-hot address select
  output logic [M_GENS-1:0][N_CELLS-1:0] gate      // 1T1R gate enables
);

  always_comb begin
    gate = prog_en ? sel : gens;
  end

endmodule
