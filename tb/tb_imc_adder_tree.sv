// tb_imc_adder_tree: random test of the adder tree.
// A 64-term tree (power of two) and a 13-term tree (zero padded) get random
// 7-bit terms, plus the all-maximum case; sums are checked against a loop sum.
module tb_imc_adder_tree;
  logic clk = 1'b0;
  logic [6:0]  t64 [64];
  logic [12:0] s64;
  logic [6:0]  t13 [13];
  logic [10:0] s13;
  int checks = 0, failures = 0;

  imc_adder_tree #(.M(64), .IN_W(7)) dut64 (.terms(t64), .sum(s64));
  imc_adder_tree #(.M(13), .IN_W(7)) dut13 (.terms(t13), .sum(s13));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      int e64, e13;
      e64 = 0; e13 = 0;
      for (int i = 0; i < 64; i++) begin
        t64[i] = (r == 0) ? 7'h7f : 7'($urandom);
        e64 += int'(t64[i]);
      end
      for (int i = 0; i < 13; i++) begin
        t13[i] = (r == 0) ? 7'h7f : 7'($urandom);
        e13 += int'(t13[i]);
      end
      @(negedge clk);
      checks++;
      if (int'(s64) != e64) begin failures++; $display("FAIL M=64 %0d vs %0d", s64, e64); end
      checks++;
      if (int'(s13) != e13) begin failures++; $display("FAIL M=13 %0d vs %0d", s13, e13); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
