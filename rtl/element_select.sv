// element_select: row/column addressing of the n x m reservoir elements.
//
// A binary row address (generation; row r is generation r+1) and column
// address (cell) are decoded into a one-hot select map. The same address
// steers a multiplexer that routes the addressed cell's logic state to a
// single output terminal, which is how every cell of the automaton can be
// observed through few pins. The select map is what lets one ReRAM element
// be enabled alone for programming (see rsvm_gate_ctrl). An address outside
// the array selects nothing and reads 0.
//
// The paper states what the addressing does, not how: the decoder and mux
// here, the 0-based binary encoding and the out-of-range behaviour are this
// design's choices.
//
// Timing: purely combinational.
module element_select #(
  parameter int unsigned N_CELLS = cmor_pkg::N_CELLS_DEF,
  parameter int unsigned M_GENS  = cmor_pkg::M_GENS_DEF,
  localparam int unsigned RW = (M_GENS  > 1) ? $clog2(M_GENS)  : 1,
  localparam int unsigned CW = (N_CELLS > 1) ? $clog2(N_CELLS) : 1
) (
  input  logic [RW-1:0]                  row_addr,  // generation index, 0-based
  input  logic [CW-1:0]                  col_addr,  // cell index, 0-based
  input  logic [M_GENS-1:0][N_CELLS-1:0] gens,      // reservoir state
  output logic [M_GENS-1:0][N_CELLS-1:0] sel,       // one-hot element select
  output logic                           state_out  // addressed cell's state
);

  always_comb begin
    sel       = '0;
    state_out = 1'b0;
    for (int unsigned r = 0; r < M_GENS; r++) begin
      for (int unsigned c = 0; c < N_CELLS; c++) begin
        if (int'(row_addr) == int'(r) && int'(col_addr) == int'(c)) begin
          sel[r][c] = 1'b1;
          state_out = gens[r][c];
        end
      end
    end
  end

endmodule
