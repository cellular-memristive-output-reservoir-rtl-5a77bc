// eca_stack: the cellular-automaton reservoir, m rings stacked.
//
// Ring 0 takes the n-bit digital input and produces generation 1; ring g
// takes the output of ring g-1. All M_GENS generations therefore settle
// together after the input changes, limited only by propagation through the
// chain of multiplexers, and stay available on wires for the read-out layer
// (gens[g] is generation g+1). The input word itself is not part of gens.
//
// Timing: purely combinational; the depth is M_GENS multiplexer levels.
module eca_stack #(
  parameter int unsigned N_CELLS = cmor_pkg::N_CELLS_DEF,
  parameter int unsigned M_GENS  = cmor_pkg::M_GENS_DEF,
  parameter logic [7:0]  RULE    = cmor_pkg::RULE_DEF
) (
  input  logic [N_CELLS-1:0]             din,   // initial state (digital input)
  output logic [M_GENS-1:0][N_CELLS-1:0] gens   // gens[g] = generation g+1
);

  logic [N_CELLS-1:0] ring_in  [M_GENS];
  logic [N_CELLS-1:0] ring_out [M_GENS];

  for (genvar g = 0; g < M_GENS; g++) begin : g_ring
    if (g == 0) begin : g_first
      assign ring_in[g] = din;
    end else begin : g_next
      assign ring_in[g] = ring_out[g-1];
    end
    eca_ring #(.N_CELLS(N_CELLS), .RULE(RULE)) u_ring (
      .state_in (ring_in[g]),
      .state_out(ring_out[g])
    );
    assign gens[g] = ring_out[g];
  end

endmodule
