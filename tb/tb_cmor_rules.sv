// tb_cmor_rules: logic verification of the eight fabricated rule variants.
//
// One CMOR circuit is instantiated per rule (60, 90, 102, 105, 153, 165,
// 180, 195), all at 8 cells x 7 generations. Every one of the 256 inputs is
// applied and every cell of every generation is read back twice: on the
// parallel state output, and one by one through the row/column address and
// the single read-out terminal, as the chips were checked by probing. The
// reference is a software automaton built from each rule's Boolean form,
// independent of the rule-number multiplexer.
module tb_cmor_rules;
  import cmor_pkg::*;
  localparam int NR = 8;
  localparam logic [7:0] RULES [NR] = '{8'd60, 8'd90, 8'd102, 8'd105,
                                       8'd153, 8'd165, 8'd180, 8'd195};
  logic [7:0] din;
  logic [2:0] row_addr, col_addr;
  logic [6:0][7:0] gens [NR];
  logic [NR-1:0] state_out;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  for (genvar k = 0; k < NR; k++) begin : g_chip
    logic [6:0][7:0] lrs_map;
    logic [15:0] g_sum_us;
    logic y_pos;
    cmor_top #(.RULE(RULES[k])) dut (
      .din(din), .row_addr(row_addr), .col_addr(col_addr),
      .prog_en(1'b0), .prog_pulse(1'b0), .prog_op(PROG_RESET), .g_b_us(16'd1200),
      .gens(gens[k]), .state_out(state_out[k]), .lrs_map(lrs_map),
      .g_sum_us(g_sum_us), .y_pos(y_pos));
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

  function automatic logic [55:0] ref_gens(int k, logic [7:0] x);
    logic [7:0] s, n;
    logic [55:0] all;
    s = x;
    for (int g = 0; g < 7; g++) begin
      for (int c = 0; c < 8; c++) n[c] = ref_next(k, s[(c + 7) % 8], s[c], s[(c + 1) % 8]);
      all[g*8 +: 8] = n;
      s = n;
    end
    return all;
  endfunction

  initial begin
    row_addr = '0; col_addr = '0;
    for (int x = 0; x < 256; x++) begin
      logic [55:0] eg [NR];
      din = 8'(x); #1;
      for (int k = 0; k < NR; k++) begin
        eg[k] = ref_gens(k, 8'(x));
        checks++;
        if (gens[k] !== eg[k]) begin failures++; $display("FAIL rule %0d x=%0d gens", RULES[k], x); end
      end
      for (int r = 0; r < 7; r++)
        for (int c = 0; c < 8; c++) begin
          row_addr = 3'(r); col_addr = 3'(c); #1;
          for (int k = 0; k < NR; k++) begin
            checks++;
            if (state_out[k] !== eg[k][r*8 + c]) begin
              failures++; $display("FAIL rule %0d x=%0d cell (%0d,%0d)", RULES[k], x, r, c);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
