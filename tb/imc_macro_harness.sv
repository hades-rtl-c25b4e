// imc_macro_harness: reusable stimulus and checker for one imc_calc_macro
// configuration, instantiated by tb_imc_calc_macro.
//
// Loads random weight and input nibble codes, runs a layer and checks every
// output against sum_i sum_n sum_q 2^(4n + kw_n(j,i)) * 2^(4q + kx_q(i))
// computed here, that all D divisions deliver in the same cycle, one row
// every XN cycles (D outputs at a time), the run time and done. A second run
// with new input codes follows, with a start pulse while busy that must be
// ignored. Reports its counts on checks/failures and raises finished.
module imc_macro_harness
  import hades_pkg::*;
#(
  parameter int unsigned M  = DEF_M,
  parameter int unsigned N  = DEF_N,
  parameter int unsigned D  = DEF_D,
  parameter int unsigned WN = 1,
  parameter int unsigned XN = 1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned ROWS = N / D;
  localparam int unsigned SW = 7 + 4 * (WN - 1) + $clog2(M * WN);
  localparam int unsigned OUT_W = SW + 4 * (XN - 1) + ((XN > 1) ? 1 : 0);
  // reads occupy cycles 1..ROWS*XN after the start edge; done is high two
  // cycles after the last read
  localparam int unsigned RUN_CYCLES = ROWS * XN + 2;

  logic rst_n = 1'b0;
  logic w_we = 1'b0, x_we = 1'b0, start = 1'b0;
  logic [$clog2(M*N)-1:0] w_addr = '0;
  logic [2*WN-1:0] w_code = '0;
  logic [2*XN-1:0] x_code = '0;
  logic [$clog2(M)-1:0] x_addr = '0;
  logic busy, done;
  logic [D-1:0] out_valid;
  logic [$clog2(N)-1:0] out_idx [D];
  logic [OUT_W-1:0] out_data [D];

  longint wval [N][M];   // decoded weight value
  longint xval [M];      // decoded input value
  int cycle = 0;

  imc_calc_macro #(.M(M), .N(N), .D(D), .WN(WN), .XN(XN)) dut (.*);

  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL [imc M=%0d WN=%0d XN=%0d] %s", M, WN, XN, what); end
  endtask

  task automatic load_weights();
    for (int j = 0; j < N; j++)
      for (int i = 0; i < M; i++) begin
        @(negedge clk);
        wval[j][i] = 0;
        for (int n = 0; n < WN; n++) begin
          int c;
          c = $urandom_range(3);
          w_code[2*n +: 2] = 2'(c);
          wval[j][i] += longint'(1) << (4*n + c);
        end
        w_we = 1'b1; w_addr = $bits(w_addr)'(j*M + i);
      end
    @(negedge clk); w_we = 1'b0;
  endtask

  task automatic load_inputs();
    for (int i = 0; i < M; i++) begin
      @(negedge clk);
      xval[i] = 0;
      for (int q = 0; q < XN; q++) begin
        int c;
        c = $urandom_range(3);
        x_code[2*q +: 2] = 2'(c);
        xval[i] += longint'(1) << (4*q + c);
      end
      x_we = 1'b1; x_addr = $bits(x_addr)'(i);
    end
    @(negedge clk); x_we = 1'b0;
  endtask

  task automatic run_layer(input bit poke_busy);
    int t_start, t_prev, nrow, ndone;
    bit seen [N];
    foreach (seen[j]) seen[j] = 1'b0;
    @(negedge clk); start = 1'b1;
    @(posedge clk); t_start = cycle;
    @(negedge clk); start = 1'b0;
    nrow = 0; ndone = 0; t_prev = -1;
    while (nrow < ROWS || ndone == 0) begin
      @(posedge clk); #1;
      start = (poke_busy && nrow == 2);
      if (out_valid != '0) begin
        check(out_valid == '1, "all divisions valid together");
        for (int d = 0; d < D; d++) begin
          int j;
          longint e;
          j = int'(out_idx[d]);
          e = 0;
          for (int i = 0; i < M; i++) e += wval[j][i] * xval[i];
          check(j == d*ROWS + nrow, $sformatf("div %0d idx %0d expected %0d", d, j, d*ROWS + nrow));
          check(longint'(out_data[d]) == e, $sformatf("out[%0d] = %0d expected %0d", j, out_data[d], e));
          seen[j] = 1'b1;
        end
        if (t_prev >= 0) check(cycle - t_prev == XN, $sformatf("row spacing %0d", cycle - t_prev));
        t_prev = cycle;
        nrow++;
      end
      if (done) begin
        ndone++;
        check(cycle - t_start == RUN_CYCLES,
              $sformatf("run took %0d cycles, expected %0d", cycle - t_start, RUN_CYCLES));
      end
    end
    start = 1'b0;
    @(posedge clk); #1;
    check(!busy, "busy cleared after done");
    for (int j = 0; j < N; j++) check(seen[j], $sformatf("output %0d produced", j));
  endtask

  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_weights();
    load_inputs();
    run_layer(1'b1);
    load_inputs();
    run_layer(1'b0);
    finished = 1'b1;
  end
endmodule
