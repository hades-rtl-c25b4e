// tb_imc_rbl_divider: exhaustive test of the read-bit-line level model.
// The level must count the cells holding a 1: none -> RBL_0, one -> RBL_VPRE,
// both -> RBL_1.
module tb_imc_rbl_divider;
  import hades_pkg::*;
  logic clk = 1'b0;
  logic w_bit, x_bit;
  rbl_level_t level;
  int checks = 0, failures = 0;

  imc_rbl_divider dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rbl_level_t expect_lvl [3] = '{RBL_0, RBL_VPRE, RBL_1};
    for (int v = 0; v < 4; v++) begin
      {w_bit, x_bit} = 2'(v);
      @(negedge clk);
      checks++;
      if (level != expect_lvl[int'(w_bit) + int'(x_bit)]) begin
        failures++;
        $display("FAIL w=%0b x=%0b level=%0d", w_bit, x_bit, level);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
