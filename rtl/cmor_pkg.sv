// cmor_pkg: constants and types shared by the CMOR (cellular memristive-output
// reservoir) modules.
//
// The array size follows the fabricated circuit: an 8-bit input and 7
// generations of an elementary cellular automaton, hence 8 x 7 = 56 ReRAM
// weights. The default rule is 60, the rule of the circuit on which the
// ReRAM read-out was demonstrated. Conductances are carried as unsigned
// integers in microsiemens; that unit and its 16-bit width are this design's
// choice.
package cmor_pkg;

  localparam int unsigned N_CELLS_DEF = 8;     // n: cells per ring (input bits)
  localparam int unsigned M_GENS_DEF  = 7;     // m: stacked rings (generations)
  localparam logic [7:0]  RULE_DEF    = 8'd60; // ECA rule wired into every mux
  localparam int unsigned G_W_DEF     = 16;    // conductance code width, in uS

  // Operation applied by a programming pulse on the common RSVM terminals.
  typedef enum logic {
    PROG_RESET = 1'b0,  // return the device to its high-resistance state
    PROG_SET   = 1'b1   // form / set the device into its low-resistance state
  } prog_op_e;

endpackage
