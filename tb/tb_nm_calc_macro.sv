// tb_nm_calc_macro: self-checking test of the NM-CALC macro.
// Runs the checker nm_macro_harness on two configurations at once: the
// default 4b/4b macro (M = 64, N = 64, D = 2), and a reconfigured one with
// 8-bit activations, 8-bit (two-nibble) weights and D = 4 divisions on a
// 16 x 8 layer.
module tb_nm_calc_macro;
  logic clk = 1'b0;
  int c0, f0, c1, f1;
  logic fin0, fin1;
  int checks, failures;

  always #5 clk = ~clk;

  nm_macro_harness u_default (.clk(clk), .checks(c0), .failures(f0), .finished(fin0));
  nm_macro_harness #(.M(16), .N(8), .D(4), .IN_BITS(8), .W_NIBBLES(2))
    u_wide (.clk(clk), .checks(c1), .failures(f1), .finished(fin1));

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    wait (fin0 && fin1);
    checks = c0 + c1;
    failures = f0 + f1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
