// tb_rsvm_array: self-checking test of the RSVM bank model (7 x 8).
//
// Programs chosen elements to LRS one at a time (only that gate on), then
// applies random gate patterns and checks the summed conductance against
// the count formula G = 16*(off) + 20*(on, HRS) + 400*(on, LRS). Also
// checks that a pulse with several gates on programs all of them and that
// reset returns an element to HRS.
module tb_rsvm_array;
  import cmor_pkg::*;
  logic [6:0][7:0] gate, lrs_map;
  logic pulse;
  prog_op_e op;
  logic [15:0] gsum;
  logic [55:0] model;  // expected LRS map
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  rsvm_array #(.N_CELLS(8), .M_GENS(7), .G_W(16)) dut (
    .gate(gate), .prog_pulse(pulse), .prog_op(op), .lrs_map(lrs_map), .g_sum_us(gsum));

  task automatic prog(logic [55:0] gmask, prog_op_e o);
    gate = gmask; op = o; #1;
    pulse = 1'b1; #2; pulse = 1'b0; #2;
    if (o == PROG_SET) model |= gmask; else model &= ~gmask;
  endtask

  task automatic check_sum(logic [55:0] gmask);
    int e;
    gate = gmask; #1;
    e = 0;
    for (int b = 0; b < 56; b++)
      e += !gmask[b] ? 16 : (model[b] ? 400 : 20);
    checks += 2;
    if (gsum !== 16'(e)) begin failures++; $display("FAIL sum gates %h: got %0d exp %0d", gmask, gsum, e); end
    if (lrs_map !== model) begin failures++; $display("FAIL map %h exp %h", lrs_map, model); end
  endtask

  initial begin
    pulse = 1'b0; op = PROG_RESET; model = '0;
    check_sum('0);
    check_sum('1);
    prog(56'd1 << 7, PROG_SET);           // generation 1, cell 7
    check_sum('1);
    prog(56'd1 << (3 * 8 + 7), PROG_SET); // generation 4, cell 7
    for (int t = 0; t < 100; t++) check_sum(56'({$urandom, $urandom}));
    prog((56'd1 << 0) | (56'd1 << 55), PROG_SET);  // two at once
    check_sum('1);
    prog(56'd1 << 7, PROG_RESET);
    for (int t = 0; t < 50; t++) check_sum(56'({$urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
