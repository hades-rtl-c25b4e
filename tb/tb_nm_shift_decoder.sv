// tb_nm_shift_decoder: exhaustive test of the 2-bit shift-code decoder.
// For each code k the one-hot output must equal the weight value 2^k, which
// is computed here by arithmetic, not by indexing.
module tb_nm_shift_decoder;
  import hades_pkg::*;
  logic clk = 1'b0;
  code_t code;
  logic [3:0] onehot;
  int checks = 0, failures = 0;

  nm_shift_decoder dut (.code(code), .onehot(onehot));

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int weight;
    for (int k = 0; k < 4; k++) begin
      code = code_t'(k);
      @(negedge clk);
      weight = 1;
      for (int s = 0; s < k; s++) weight = weight * 2;
      checks++;
      if (int'(onehot) != weight) begin
        failures++;
        $display("FAIL code %0d: onehot %b expected %0d", k, onehot, weight);
      end
      checks++;
      if ($countones(onehot) != 1) begin
        failures++;
        $display("FAIL code %0d: not one-hot %b", k, onehot);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
