// tb_eca_cell: self-checking test of eca_cell.
//
// Instantiates one cell for each of the eight fabricated rules and applies
// all eight neighbourhoods. The expected next state comes from each rule's
// Boolean form (rule 60 = L^C, 90 = L^R, 102 = C^R, 105 = ~(L^C^R),
// 153 = ~(C^R), 165 = ~(L^R), 180 = L^(C&~R), 195 = ~(L^C)), which is
// independent of the rule-number lookup inside the cell.
module tb_eca_cell;
  localparam int NR = 8;
  localparam logic [7:0] RULES [NR] = '{8'd60, 8'd90, 8'd102, 8'd105,
                                       8'd153, 8'd165, 8'd180, 8'd195};
  logic l, c, r;
  logic [NR-1:0] y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  for (genvar k = 0; k < NR; k++) begin : g_dut
    eca_cell #(.RULE(RULES[k])) dut (.s0(l), .s1(c), .s2(r), .next_state(y[k]));
  end

  function automatic logic ref_next(int k, logic a, logic b, logic d);
    case (k)
      0: return a ^ b;
      1: return a ^ d;
      2: return b ^ d;
      3: return ~(a ^ b ^ d);
      4: return ~(b ^ d);
      5: return ~(a ^ d);
      6: return a ^ (b & ~d);
      default: return ~(a ^ b);
    endcase
  endfunction

  initial begin
    for (int n = 0; n < 8; n++) begin
      {l, c, r} = 3'(n);
      #1;
      for (int k = 0; k < NR; k++) begin
        checks++;
        if (y[k] !== ref_next(k, l, c, r)) begin
          failures++;
          $display("FAIL rule %0d nbhd %03b: got %b", RULES[k], 3'(n), y[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
