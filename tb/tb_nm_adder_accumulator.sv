// tb_nm_adder_accumulator: random test of the adder-accumulator.
// Streams of random 7-bit products, each started with 'first', with random
// idle cycles (en low) in between, are compared with a running reference sum.
module tb_nm_adder_accumulator;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 1'b0, first = 1'b0;
  logic [6:0]  addend = '0;
  logic [11:0] acc;
  int checks = 0, failures = 0;

  nm_adder_accumulator #(.IN_W(7), .ACC_W(12)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_sum;
    repeat (2) @(negedge clk);
    checks++;
    if (acc != '0) begin failures++; $display("FAIL reset value"); end
    rst_n = 1'b1;
    for (int s = 0; s < 50; s++) begin
      int len;
      len = $urandom_range(1, 32);
      ref_sum = 0;
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        en = 1'b1; first = (t == 0); addend = 7'($urandom_range(0, 120));
        ref_sum += int'(addend);
        @(negedge clk);
        en = 1'b0; first = 1'b0;
        checks++;
        if (int'(acc) != ref_sum) begin
          failures++;
          $display("FAIL seq %0d step %0d: acc %0d expected %0d", s, t, acc, ref_sum);
        end
        if ($urandom_range(3) == 0) begin
          @(negedge clk);
          checks++;
          if (int'(acc) != ref_sum) begin failures++; $display("FAIL hold"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
