// tb_rsvm_gate_ctrl: self-checking test of rsvm_gate_ctrl (7 x 8).
//
// With random state and select maps, checks bit by bit that the gates
// follow the automaton state in compute mode and the select map in
// programming mode.
module tb_rsvm_gate_ctrl;
  logic pe;
  logic [6:0][7:0] gens, sel, gate;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  rsvm_gate_ctrl #(.N_CELLS(8), .M_GENS(7)) dut (.prog_en(pe), .gens(gens), .sel(sel), .gate(gate));

  initial begin
    for (int t = 0; t < 100; t++) begin
      gens = 56'({$urandom, $urandom});
      sel  = 56'd1 << ($urandom % 56);
      pe   = t[0];
      #1;
      for (int b = 0; b < 56; b++) begin
        logic e;
        e = pe ? sel[b / 8][b % 8] : gens[b / 8][b % 8];
        checks++;
        if (gate[b / 8][b % 8] !== e) begin failures++; $display("FAIL t%0d bit %0d", t, b); end
      end
    end
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
