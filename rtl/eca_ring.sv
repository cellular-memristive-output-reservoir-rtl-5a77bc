// eca_ring: one generation of the automaton, n cells wired into a ring.
//
// Cell c reads its own input bit and those of cells c-1 (left) and c+1
// (right), indices taken modulo N_CELLS, so the ring has periodic
// boundaries and needs no boundary condition. Every input bit thus fans out
// to three cells. The output word is the next generation of the whole ring.
// "Left" is the lower column index, the orientation that reproduces the
// measured rule-60 pattern where a single 1 spreads towards higher columns.
//
// Timing: purely combinational.
module eca_ring #(
  parameter int unsigned N_CELLS = cmor_pkg::N_CELLS_DEF,
  parameter logic [7:0]  RULE    = cmor_pkg::RULE_DEF
) (
  input  logic [N_CELLS-1:0] state_in,   // current generation
  output logic [N_CELLS-1:0] state_out   // next generation
);

  for (genvar c = 0; c < N_CELLS; c++) begin : g_cell
    localparam int unsigned LEFT  = (c + N_CELLS - 1) % N_CELLS;
    localparam int unsigned RIGHT = (c + 1) % N_CELLS;
    eca_cell #(.RULE(RULE)) u_cell (
      .s0        (state_in[LEFT]),
      .s1        (state_in[c]),
      .s2        (state_in[RIGHT]),
      .next_state(state_out[c])
    );
  end

endmodule
