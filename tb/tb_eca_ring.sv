// tb_eca_ring: self-checking test of eca_ring.
//
// Checks an 8-cell rule-60 ring and a 5-cell rule-90 ring with random and
// corner inputs. The reference computes each cell from its neighbours with
// explicit modulo indexing: rule 60 gives x[c-1]^x[c], rule 90 gives
// x[c-1]^x[c+1]. The wrap-around cells 0 and N-1 are thereby covered.
module tb_eca_ring;
  logic [7:0] a_in, a_out;
  logic [4:0] b_in, b_out;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  eca_ring #(.N_CELLS(8), .RULE(8'd60)) dut_a (.state_in(a_in), .state_out(a_out));
  eca_ring #(.N_CELLS(5), .RULE(8'd90)) dut_b (.state_in(b_in), .state_out(b_out));

  task automatic check_vec(logic [7:0] va, logic [4:0] vb);
    logic [7:0] ea;
    logic [4:0] eb;
    a_in = va; b_in = vb;
    #1;
    for (int c = 0; c < 8; c++) ea[c] = va[(c + 7) % 8] ^ va[c];
    for (int c = 0; c < 5; c++) eb[c] = vb[(c + 4) % 5] ^ vb[(c + 1) % 5];
    checks += 2;
    if (a_out !== ea) begin failures++; $display("FAIL r60 in %b got %b exp %b", va, a_out, ea); end
    if (b_out !== eb) begin failures++; $display("FAIL r90 in %b got %b exp %b", vb, b_out, eb); end
  endtask

  initial begin
    check_vec(8'h01, 5'h01);
    check_vec(8'h80, 5'h10);
    check_vec(8'hFF, 5'h1F);
    check_vec(8'h00, 5'h00);
    for (int i = 0; i < 200; i++) check_vec(8'($urandom), 5'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
