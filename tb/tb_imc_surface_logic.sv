// tb_imc_surface_logic: exhaustive test of the surface logic.
// For every weight code kw and input code kx (0..3) the two bit-line levels
// are formed from the per-bit counts of ones, and the output shift must equal
// kw + kx. All nine level pairs are covered this way.
module tb_imc_surface_logic;
  import hades_pkg::*;
  logic clk = 1'b0;
  rbl_level_t lvl_hi, lvl_lo;
  logic [2:0] shift;
  int checks = 0, failures = 0;

  imc_surface_logic dut (.*);

  always #5 clk = ~clk;

  function automatic rbl_level_t lvl(input int ones);
    return (ones == 0) ? RBL_0 : (ones == 1) ? RBL_VPRE : RBL_1;
  endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int kw = 0; kw < 4; kw++) begin
      for (int kx = 0; kx < 4; kx++) begin
        lvl_hi = lvl(((kw >> 1) & 1) + ((kx >> 1) & 1));
        lvl_lo = lvl((kw & 1) + (kx & 1));
        @(negedge clk);
        checks++;
        if (int'(shift) != kw + kx) begin
          failures++;
          $display("FAIL kw=%0d kx=%0d shift=%0d", kw, kx, shift);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
