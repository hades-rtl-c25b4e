// tb_imc_bitcell_array: test of the IM-CALC bit-cell array.
// Uses two-nibble weights and two input rows (WN = XN = 2) on an 8-input,
// 4-row array. Writes random codes into every weight and every input, then
// reads each weight row together with each input row and checks, one cycle
// after re, the weight codes of that row on every column block and the input
// nibble code copied under each of the input's column blocks. Also checks
// that rewriting one input is seen by the next read.
module tb_imc_bitcell_array;
  import hades_pkg::*;
  localparam int unsigned M = 8, ROWS = 4, WN = 2, XN = 2, COLS = M * WN;
  logic clk = 1'b0;
  logic w_we = 1'b0, x_we = 1'b0, re = 1'b0;
  logic [1:0] w_row = '0, r_row = '0;
  logic [2:0] w_col = '0, x_col = '0;
  logic [0:0] r_xrow = '0;
  logic [2*WN-1:0] w_code = '0;
  logic [2*XN-1:0] x_code = '0;
  code_t w_bits [COLS], x_bits [COLS];
  int ref_w [ROWS][M][WN], ref_x [M][XN];
  int checks = 0, failures = 0;

  imc_bitcell_array #(.M(M), .ROWS(ROWS), .WN(WN), .XN(XN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input int r, input int q);
    @(negedge clk); re = 1'b1; r_row = 2'(r); r_xrow = 1'(q);
    @(negedge clk); re = 1'b0;
    for (int i = 0; i < M; i++)
      for (int n = 0; n < WN; n++) begin
        checks++;
        if (int'(w_bits[i*WN + n]) != ref_w[r][i][n]) begin
          failures++; $display("FAIL w row %0d input %0d nibble %0d", r, i, n);
        end
        checks++;
        if (int'(x_bits[i*WN + n]) != ref_x[i][q]) begin
          failures++; $display("FAIL x input %0d block %0d row %0d", i, n, q);
        end
      end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < M; i++) begin
        @(negedge clk);
        for (int n = 0; n < WN; n++) begin
          ref_w[r][i][n] = $urandom_range(3);
          w_code[2*n +: 2] = 2'(ref_w[r][i][n]);
        end
        w_we = 1'b1; w_row = 2'(r); w_col = 3'(i);
      end
    @(negedge clk); w_we = 1'b0;
    for (int i = 0; i < M; i++) begin
      @(negedge clk);
      for (int q = 0; q < XN; q++) begin
        ref_x[i][q] = $urandom_range(3);
        x_code[2*q +: 2] = 2'(ref_x[i][q]);
      end
      x_we = 1'b1; x_col = 3'(i);
    end
    @(negedge clk); x_we = 1'b0;
    for (int r = 0; r < ROWS; r++)
      for (int q = 0; q < XN; q++) read_check(r, q);
    @(negedge clk);
    ref_x[5][0] = (ref_x[5][0] + 1) % 4;
    ref_x[5][1] = (ref_x[5][1] + 2) % 4;
    x_code = {2'(ref_x[5][1]), 2'(ref_x[5][0])};
    x_we = 1'b1; x_col = 3'd5;
    @(negedge clk); x_we = 1'b0;
    for (int r = ROWS - 1; r >= 0; r--)
      for (int q = 0; q < XN; q++) read_check(r, q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
