// tb_element_select: self-checking test of element_select (7 x 8).
//
// For every address, including the out-of-range row 7, checks that exactly
// the addressed bit of the select map is set (none for row 7) and that the
// read-out equals the addressed bit of a random state map, for several maps.
module tb_element_select;
  logic [2:0] row, col;
  logic [6:0][7:0] gens, sel;
  logic st;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  element_select #(.N_CELLS(8), .M_GENS(7)) dut (
    .row_addr(row), .col_addr(col), .gens(gens), .sel(sel), .state_out(st));

  initial begin
    for (int t = 0; t < 6; t++) begin
      gens = 56'({$urandom, $urandom});
      if (t == 0) gens = '0;
      if (t == 1) gens = '1;
      for (int r = 0; r < 8; r++) begin
        for (int c = 0; c < 8; c++) begin
          logic [55:0] esel;
          logic est;
          row = 3'(r); col = 3'(c);
          #1;
          esel = (r < 7) ? (56'd1 << (r * 8 + c)) : 56'd0;
          est  = (r < 7) ? gens[r][c] : 1'b0;
          checks += 2;
          if (sel !== esel) begin failures++; $display("FAIL sel r%0d c%0d: %h", r, c, sel); end
          if (st !== est)   begin failures++; $display("FAIL state r%0d c%0d: %b", r, c, st); end
        end
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
