// eca_cell: one cell of the elementary cellular automaton (ECA).
//
// The cell is a 3-bit (8:1) multiplexer. Its select lines are the state of
// the left neighbour (s0), of the cell itself (s1) and of the right neighbour
// (s2); its eight data inputs are the bits of the rule number, so that
// neighbourhood {left,self,right} = k yields bit k of RULE (Wolfram's
// numbering: left is the most significant select bit). The rule is a
// parameter, i.e. wired at design time, as in the fabricated circuits whose
// rules are fixed in the mask; the run-time programmable variant with a
// storage element per cell is not part of this design.
//
// Timing: purely combinational, no clock.
module eca_cell #(
  parameter logic [7:0] RULE = cmor_pkg::RULE_DEF
) (
  input  logic s0,          // left neighbour's current state
  input  logic s1,          // own current state
  input  logic s2,          // right neighbour's current state
  output logic next_state   // state in the next generation
);

  logic [2:0] nbhd;

  always_comb begin
    nbhd       = {s0, s1, s2};
    next_state = RULE[nbhd];
  end

endmodule
