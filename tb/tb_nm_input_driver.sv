// tb_nm_input_driver: test of the NM-CALC input driver.
// Loads M = 16 random activations for D = 4 divisions and, for every index k
// within a division, checks that division d receives activation d*M/D + k one
// cycle after the read, and that the outputs hold while re is low.
module tb_nm_input_driver;
  localparam int unsigned M = 16, D = 4, IN_BITS = 4, MD = M / D;
  logic clk = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [3:0] waddr = '0;
  logic [IN_BITS-1:0] wdata = '0;
  logic [1:0] rk = '0;
  logic [IN_BITS-1:0] act [D];
  logic [IN_BITS-1:0] ref_x [M];
  int checks = 0, failures = 0;

  nm_input_driver #(.M(M), .D(D), .IN_BITS(IN_BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < M; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 4'(i); wdata = IN_BITS'($urandom); ref_x[i] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int k = 0; k < MD; k++) begin
      @(negedge clk); re = 1'b1; rk = 2'(k);
      @(negedge clk); re = 1'b0;
      for (int d = 0; d < D; d++) begin
        checks++;
        if (act[d] != ref_x[d*MD + k]) begin
          failures++;
          $display("FAIL k=%0d d=%0d: %0d expected %0d", k, d, act[d], ref_x[d*MD+k]);
        end
      end
      rk = 2'(k + 1);
      @(negedge clk);
      checks++;
      if (act[0] != ref_x[k]) begin failures++; $display("FAIL hold k=%0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
