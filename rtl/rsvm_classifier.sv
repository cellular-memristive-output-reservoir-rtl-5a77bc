// rsvm_classifier: hard classification of the RSVM output,
// y = sgn(G_sum - G_b).
//
// The summed bank conductance is compared with a boundary conductance G_b;
// a conductance above the boundary is class +1 (y_pos = 1), anything else
// class -1 (y_pos = 0). Making G_b an input lets the boundary be trained
// along with the stored weights. The equation is the paper's; on the
// fabricated chip the comparison was made by the measurement equipment,
// here it is a digital comparator on the conductance code. Treating
// G_sum == G_b as class -1 is this design's choice.
//
// Timing: purely combinational.
module rsvm_classifier #(
  parameter int unsigned G_W = cmor_pkg::G_W_DEF
) (
  input  logic [G_W-1:0] g_sum_us,  // bank conductance, uS
  input  logic [G_W-1:0] g_b_us,    // boundary G_b, uS
  output logic           y_pos      // 1 = class +1, 0 = class -1
);

  always_comb begin
    y_pos = (g_sum_us > g_b_us);
  end

endmodule
