// tb_nm_barrel_shifter: exhaustive test of the modified barrel shifter.
// Every 4-bit activation is applied with every one-hot weight 1, 2, 4, 8;
// the 7-bit product must equal activation * weight. A zero select must give
// zero. A second instance with 8-bit activations checks the wider setting.
module tb_nm_barrel_shifter;
  logic clk = 1'b0;
  logic [3:0] in4;  logic [3:0] sel; logic [6:0]  p4;
  logic [7:0] in8;                   logic [10:0] p8;
  int checks = 0, failures = 0;

  nm_barrel_shifter #(.IN_BITS(4)) dut4 (.in_act(in4), .sel(sel), .product(p4));
  nm_barrel_shifter #(.IN_BITS(8)) dut8 (.in_act(in8), .sel(sel), .product(p8));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 16; x++) begin
      for (int k = 0; k < 4; k++) begin
        int w;
        w   = 1 << k;
        in4 = 4'(x); in8 = 8'($urandom); sel = 4'(w);
        @(negedge clk);
        checks++;
        if (int'(p4) != x * w) begin
          failures++; $display("FAIL 4b: %0d*%0d got %0d", x, w, p4);
        end
        checks++;
        if (int'(p8) != int'(in8) * w) begin
          failures++; $display("FAIL 8b: %0d*%0d got %0d", in8, w, p8);
        end
      end
      in4 = 4'(x); sel = '0;
      @(negedge clk);
      checks++;
      if (p4 != '0) begin failures++; $display("FAIL zero select"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
