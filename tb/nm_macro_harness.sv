// nm_macro_harness: reusable stimulus and checker for one nm_calc_macro
// configuration, instantiated by tb_nm_calc_macro.
//
// Loads random weight nibble codes and random IN_BITS activations, runs a
// layer and checks every output against sum_i x(i) * sum_n 2^(4n + code_n)
// computed here, the output order, the M/D-cycle output spacing, the total run
// time and the single done pulse. A second run with new activations follows,
// with a start pulse while busy that must be ignored. Reports its counts on
// checks/failures and raises finished when done.
module nm_macro_harness
  import hades_pkg::*;
#(
  parameter int unsigned M = DEF_M,
  parameter int unsigned N = DEF_N,
  parameter int unsigned D = DEF_D,
  parameter int unsigned IN_BITS = DEF_IN_BITS,
  parameter int unsigned W_NIBBLES = 1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned MD = M / D;
  localparam int unsigned PW = (W_NIBBLES == 1) ? IN_BITS + 3 : IN_BITS + 4 * W_NIBBLES;
  localparam int unsigned OUT_W = PW + $clog2(M);
  // reads occupy cycles 1..N*MD after the start edge; done is high three
  // cycles after the last read
  localparam int unsigned RUN_CYCLES = N * MD + 3;

  logic rst_n = 1'b0;
  logic w_we = 1'b0, x_we = 1'b0, start = 1'b0;
  logic [$clog2(M*N)-1:0] w_addr = '0;
  logic [2*W_NIBBLES-1:0] w_code = '0;
  logic [$clog2(M)-1:0] x_addr = '0;
  logic [IN_BITS-1:0] x_data = '0;
  logic busy, done, out_valid;
  logic [$clog2(N)-1:0] out_idx;
  logic [OUT_W-1:0] out_data;

  longint wval [N][M];   // decoded weight value
  longint xval [M];
  int cycle = 0;

  nm_calc_macro #(.M(M), .N(N), .D(D), .IN_BITS(IN_BITS), .W_NIBBLES(W_NIBBLES)) dut (.*);

  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL [nm M=%0d WN=%0d] %s", M, W_NIBBLES, what); end
  endtask

  task automatic load_weights();
    for (int j = 0; j < N; j++)
      for (int i = 0; i < M; i++) begin
        @(negedge clk);
        wval[j][i] = 0;
        for (int n = 0; n < W_NIBBLES; n++) begin
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
      x_data  = IN_BITS'($urandom);
      xval[i] = longint'(x_data);
      x_we = 1'b1; x_addr = $bits(x_addr)'(i);
    end
    @(negedge clk); x_we = 1'b0;
  endtask

  task automatic run_layer(input bit poke_busy);
    int t_start, t_prev, nout, ndone;
    @(negedge clk); start = 1'b1;
    @(posedge clk); t_start = cycle;
    @(negedge clk); start = 1'b0;
    nout = 0; ndone = 0; t_prev = -1;
    while (nout < N || ndone == 0) begin
      @(posedge clk); #1;
      start = (poke_busy && nout == 3);   // must be ignored
      if (out_valid) begin
        longint e;
        e = 0;
        for (int i = 0; i < M; i++) e += xval[i] * wval[nout][i];
        check(int'(out_idx) == nout, $sformatf("order: idx %0d expected %0d", out_idx, nout));
        check(longint'(out_data) == e, $sformatf("out[%0d] = %0d expected %0d", nout, out_data, e));
        if (t_prev >= 0)
          check(cycle - t_prev == MD, $sformatf("output spacing %0d", cycle - t_prev));
        t_prev = cycle;
        nout++;
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
    check(ndone == 1 && nout == N, "one done, N outputs");
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
