// tb_rsvm_classifier: self-checking test of rsvm_classifier.
//
// Checks the boundary cases around G_b = 1200 uS (1199, 1200, 1201) and
// random pairs against sgn(G - G_b) worked out with signed integers.
module tb_rsvm_classifier;
  logic [15:0] g, gb;
  logic y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  rsvm_classifier #(.G_W(16)) dut (.g_sum_us(g), .g_b_us(gb), .y_pos(y));

  task automatic chk(int gv, int gbv);
    logic e;
    g = 16'(gv); gb = 16'(gbv); #1;
    e = (gv - gbv) > 0;
    checks++;
    if (y !== e) begin failures++; $display("FAIL g=%0d gb=%0d y=%b", gv, gbv, y); end
  endtask

  initial begin
    chk(1199, 1200); chk(1200, 1200); chk(1201, 1200);
    chk(0, 0); chk(65535, 0); chk(0, 65535);
    for (int t = 0; t < 300; t++) chk(int'($urandom % 65536), int'($urandom % 65536));
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
