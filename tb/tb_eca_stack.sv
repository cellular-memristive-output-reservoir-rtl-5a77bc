// tb_eca_stack: self-checking test of eca_stack at the fabricated size
// (8 cells, 7 generations) for rules 60 and 90.
//
// Two independent references are used. (1) Closed forms: under rule 60
// generation g, cell c is the XOR of x[c-j] over all j with C(g,j) odd
// (Pascal's triangle mod 2), so a single 1 in column 0 makes generation 7
// all ones; under rule 90 on an 8-ring a single 1 dies out at generation 4.
// (2) For random inputs a step-by-step software automaton built from the
// rules' Boolean forms. All 256 inputs are swept for rule 60.
module tb_eca_stack;
  logic [7:0] din;
  logic [6:0][7:0] g60, g90;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  eca_stack #(.N_CELLS(8), .M_GENS(7), .RULE(8'd60)) dut60 (.din(din), .gens(g60));
  eca_stack #(.N_CELLS(8), .M_GENS(7), .RULE(8'd90)) dut90 (.din(din), .gens(g90));

  function automatic logic binom_odd(int g, int j);
    return ((g & j) == j);  // Lucas: C(g,j) odd iff j's bits are a subset of g's
  endfunction

  task automatic run(logic [7:0] x);
    logic [7:0] s60, s90, n60, n90, cf;
    din = x;
    #1;
    s60 = x; s90 = x;
    for (int g = 0; g < 7; g++) begin
      for (int c = 0; c < 8; c++) begin
        n60[c] = s60[(c + 7) % 8] ^ s60[c];
        n90[c] = s90[(c + 7) % 8] ^ s90[(c + 1) % 8];
        cf[c] = 1'b0;
        for (int j = 0; j <= g + 1; j++)
          if (binom_odd(g + 1, j)) cf[c] ^= x[(c - j + 64) % 8];
      end
      s60 = n60; s90 = n90;
      checks += 3;
      if (g60[g] !== s60) begin failures++; $display("FAIL r60 x=%h gen%0d got %b exp %b", x, g+1, g60[g], s60); end
      if (g60[g] !== cf)  begin failures++; $display("FAIL r60 closed form x=%h gen%0d", x, g+1); end
      if (g90[g] !== s90) begin failures++; $display("FAIL r90 x=%h gen%0d got %b exp %b", x, g+1, g90[g], s90); end
    end
  endtask

  initial begin
    din = 8'h01;
    #1;
    checks += 3;
    if (g60[6] !== 8'hFF) begin failures++; $display("FAIL r60 single seed gen7 %b", g60[6]); end
    if (g60[0] !== 8'h03) begin failures++; $display("FAIL r60 single seed gen1 %b", g60[0]); end
    if (g90[3] !== 8'h00) begin failures++; $display("FAIL r90 single seed gen4 %b", g90[3]); end
    for (int x = 0; x < 256; x++) run(8'(x));
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
