// rsvm_array: BEHAVIOURAL MODEL (not synthesizable logic) of the ReRAM
// bank of the RSVM, an M_GENS x N_CELLS matrix of 1T1R elements whose
// sources and drains all join two common terminals.
//
// Because the elements are in parallel, the conductance between the
// terminals is the sum of the element conductances. With the gates driven
// by the reservoir this is the dot product of the binary CA state with the
// stored conductance map, G_sum = vec(CA) . vec(G), plus the small
// contribution of elements whose gate is off. A programming pulse on the
// common terminals reaches every element, but only an element whose gate is
// on changes state.
//
// The structure (n x m bank, parallel wiring, gate per element) follows the
// paper; the integer microsiemens representation is this model's choice.
//
// Timing: device states change on prog_pulse rising edges; g_sum_us follows
// the gates at once.
module rsvm_array #(
  parameter int unsigned N_CELLS = cmor_pkg::N_CELLS_DEF,
  parameter int unsigned M_GENS  = cmor_pkg::M_GENS_DEF,
  parameter int unsigned G_W     = cmor_pkg::G_W_DEF
) (
  input  logic [M_GENS-1:0][N_CELLS-1:0] gate,        // 1T1R gate enables
  input  logic                           prog_pulse,  // pulse on the terminals
  input  cmor_pkg::prog_op_e             prog_op,     // set or reset
  output logic [M_GENS-1:0][N_CELLS-1:0] lrs_map,     // device states
  output logic [G_W-1:0]                 g_sum_us     // total conductance, uS
);

  logic [G_W-1:0] g_elem [M_GENS][N_CELLS];

  for (genvar r = 0; r < M_GENS; r++) begin : g_row
    for (genvar c = 0; c < N_CELLS; c++) begin : g_col
      reram_1t1r #(.G_W(G_W)) u_elem (
        .gate      (gate[r][c]),
        .prog_pulse(prog_pulse),
        .prog_op   (prog_op),
        .lrs       (lrs_map[r][c]),
        .g_us      (g_elem[r][c])
      );
    end
  end

  always_comb begin
    g_sum_us = '0;
    for (int unsigned r = 0; r < M_GENS; r++)
      for (int unsigned c = 0; c < N_CELLS; c++)
        g_sum_us = g_sum_us + g_elem[r][c];
  end

endmodule
