// tb_cmor_top: end-to-end test of the CMOR circuit at its default size
// (8-bit input, 7 generations, rule 60, 56 ReRAM elements).
//
// It replays the experiment sequence of the fabricated chip:
//  1. pristine bank: sweep all 256 inputs, check every generation against a
//     software rule-60 automaton (x[c-1] ^ x[c] on a ring), the summed
//     conductance against the count formula, and class -1 everywhere;
//  2. read every cell through the address/read-out path;
//  3. program one element (generation 1, cell 7) to LRS in programming
//     mode; sweep all inputs: the class must be bit7 XOR bit6 (the
//     non-linear XOR classification with G_b = 1.2 mS);
//  4. program a second element (generation 4, cell 7): the conductance must
//     take three major levels (0, 1 or 2 LRS elements enabled);
//  5. reset the first element and check the class follows the second one;
//  6. pulse with an out-of-range address: no device may change.
// In every sweep the conductance of x and of its bitwise inverse must agree
// (rule 60 is invariant under flipping all bits).
// Each mechanism (set, reset, read-out, both classes, each conductance
// level, out-of-range programming) is counted; one that never happens is a
// failure.
module tb_cmor_top;
  import cmor_pkg::*;
  logic [7:0] din;
  logic [2:0] row_addr, col_addr;
  logic prog_en, prog_pulse;
  prog_op_e prog_op;
  logic [15:0] g_b_us;
  logic [6:0][7:0] gens, lrs_map;
  logic state_out;
  logic [15:0] g_sum_us;
  logic y_pos;

  logic [55:0] model_lrs;
  int checks = 0, failures = 0;
  int n_sym = 0, n_set = 0, n_reset = 0, n_read = 0, n_pos = 0, n_neg = 0, n_oor = 0;
  int n_level [3] = '{0, 0, 0};
  logic clk = 0;
  always #5 clk = ~clk;

  cmor_top dut (
    .din(din), .row_addr(row_addr), .col_addr(col_addr),
    .prog_en(prog_en), .prog_pulse(prog_pulse), .prog_op(prog_op), .g_b_us(g_b_us),
    .gens(gens), .state_out(state_out), .lrs_map(lrs_map),
    .g_sum_us(g_sum_us), .y_pos(y_pos));

  function automatic logic [55:0] ref_gens(logic [7:0] x);
    logic [7:0] s, n;
    logic [55:0] all;
    s = x;
    for (int g = 0; g < 7; g++) begin
      for (int c = 0; c < 8; c++) n[c] = s[(c + 7) % 8] ^ s[c];
      all[g*8 +: 8] = n;
      s = n;
    end
    return all;
  endfunction

  function automatic int ref_g(logic [55:0] gt, logic [55:0] lrs);
    int e = 0;
    for (int b = 0; b < 56; b++) e += !gt[b] ? 16 : (lrs[b] ? 400 : 20);
    return e;
  endfunction

  task automatic program_elem(int r, int c, prog_op_e op);
    din = 8'($urandom);          // the input must not matter while programming
    prog_en = 1'b1; row_addr = 3'(r); col_addr = 3'(c); prog_op = op;
    #1 prog_pulse = 1'b1;
    #2 prog_pulse = 1'b0;
    #1 prog_en = 1'b0;
    if (r < 7) begin
      if (op == PROG_SET) begin model_lrs[r*8 + c] = 1'b1; n_set++; end
      else begin model_lrs[r*8 + c] = 1'b0; n_reset++; end
    end else n_oor++;
    #1;
    checks++;
    if (lrs_map !== model_lrs) begin failures++; $display("FAIL program r%0d c%0d: map %h exp %h", r, c, lrs_map, model_lrs); end
  endtask

  // Sweep all inputs; expected class per mode: 0: always -1, 1: bit7^bit6,
  // 2: bit7^bit3, 3: either of those (any LRS element enabled exceeds G_b).
  task automatic sweep(int mode);
    logic [55:0] eg;
    logic ey;
    int k;
    for (int x = 0; x < 256; x++) begin
      din = 8'(x); #1;
      eg = ref_gens(8'(x));
      checks += 3;
      if (gens !== eg) begin failures++; $display("FAIL gens x=%0d", x); end
      if (int'(g_sum_us) != ref_g(eg, model_lrs)) begin
        failures++; $display("FAIL G x=%0d got %0d exp %0d", x, g_sum_us, ref_g(eg, model_lrs));
      end
      case (mode)
        0: ey = 1'b0;
        1: ey = din[7] ^ din[6];
        2: ey = din[7] ^ din[3];
        default: ey = (din[7] ^ din[6]) | (din[7] ^ din[3]);
      endcase
      if (y_pos !== ey) begin failures++; $display("FAIL class x=%0d mode %0d got %b", x, mode, y_pos); end
      if (y_pos) n_pos++; else n_neg++;
      // Rule 60 maps an input and its bitwise inverse to the same next
      // state, so the conductance is mirror-symmetric: G(x) == G(255 - x).
      begin
        logic [15:0] g_x;
        g_x = g_sum_us;
        din = ~8'(x); #1;
        checks++;
        if (g_sum_us !== g_x) begin failures++; $display("FAIL symmetry x=%0d", x); end
        else n_sym++;
      end
      k = 0;
      for (int b = 0; b < 56; b++) if (eg[b] && model_lrs[b]) k++;
      if (k < 3) n_level[k]++;
    end
  endtask

  initial begin
    prog_en = 1'b0; prog_pulse = 1'b0; prog_op = PROG_RESET;
    row_addr = '0; col_addr = '0; din = '0;
    g_b_us = 16'd1200;  // G_b = 1.2 mS
    model_lrs = '0;
    #1;
    checks++;
    if (lrs_map !== '0) begin failures++; $display("FAIL bank not pristine"); end

    sweep(0);

    for (int t = 0; t < 16; t++) begin
      logic [55:0] eg;
      din = (t == 0) ? 8'h01 : 8'($urandom);
      eg = ref_gens(din);
      for (int r = 0; r < 7; r++)
        for (int c = 0; c < 8; c++) begin
          row_addr = 3'(r); col_addr = 3'(c); #1;
          checks++; n_read++;
          if (state_out !== eg[r*8 + c]) begin failures++; $display("FAIL readout x=%h r%0d c%0d", din, r, c); end
        end
    end
    // Single seed in column 0: generation 7 of rule 60 is all ones.
    din = 8'h01; #1;
    checks++;
    if (gens[6] !== 8'hFF) begin failures++; $display("FAIL seed gen7 %b", gens[6]); end

    program_elem(0, 7, PROG_SET);
    sweep(1);
    program_elem(3, 7, PROG_SET);
    sweep(3);
    program_elem(0, 7, PROG_RESET);
    sweep(2);
    program_elem(7, 2, PROG_SET);   // out-of-range row: nothing changes

    checks++;
    if (n_set == 0 || n_reset == 0 || n_read == 0 || n_pos == 0 || n_neg == 0 || n_sym == 0 || n_oor == 0 ||
        n_level[0] == 0 || n_level[1] == 0 || n_level[2] == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("mechanisms: symmetric pairs=%0d set=%0d reset=%0d readout=%0d class+1=%0d class-1=%0d levels0/1/2=%0d/%0d/%0d out-of-range=%0d",
             n_sym, n_set, n_reset, n_read, n_pos, n_neg, n_level[0], n_level[1], n_level[2], n_oor);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
