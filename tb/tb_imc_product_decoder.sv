// tb_imc_product_decoder: exhaustive test of the product decoder.
// Shift codes 0..6 must decode to 2^shift (computed by repeated doubling);
// the unused code 7 must decode to zero.
module tb_imc_product_decoder;
  logic clk = 1'b0;
  logic [2:0] shift;
  logic [6:0] value;
  int checks = 0, failures = 0;

  imc_product_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 8; s++) begin
      int p;
      p = 1;
      for (int t = 0; t < s; t++) p = p * 2;
      if (s == 7) p = 0;
      shift = 3'(s);
      @(negedge clk);
      checks++;
      if (int'(value) != p) begin
        failures++;
        $display("FAIL shift=%0d value=%0d expected %0d", s, value, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
