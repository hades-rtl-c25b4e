// tb_hades_top_wide: whole-design test of hades_top in its wider precision
// setting: 8-bit weights (two nibbles) in both macros, 8-bit activations in
// NM-CALC and 8-bit (two-nibble) inputs in IM-CALC, on a 32 x 16 layer with
// D = 2.
//
// Each nonzero 4-bit nibble of a weight is approximated to the alphabet set
// {1} here (nearest power of two, ties to the larger) and the nibble codes
// are loaded into both macros over the shared host bus. NM-CALC gets 8-bit
// activations; IM-CALC gets the same activations approximated nibble by
// nibble (a zero nibble is first raised to 1, as zero has no code). Both macros are started in the same cycle and
// run concurrently; every result is compared with a reference computed from
// the decoded values. Three layers are run (new activations each time, new
// weights for the last). The mechanisms of the design are counted and each
// must occur: multi-cycle accumulation in NM-CALC, the cross-division sum,
// D outputs per cycle from IM-CALC, both macros busy together, a start
// ignored while busy, and an input-row update between runs.
module tb_hades_top_wide;
  import hades_pkg::*;
  localparam int unsigned M = 32, N = 16, D = 2, IN_BITS = 8, WN = 2, XN = 2;
  localparam int unsigned MD = M / D, ROWS = N / D;

  logic clk = 1'b0, rst_n = 1'b0;
  host_wr_t host_wr = '0;
  logic nm_start = 1'b0, im_start = 1'b0;
  logic nm_busy, nm_done, nm_out_valid;
  logic [$clog2(N)-1:0] nm_out_idx;
  logic [IN_BITS+4*WN+$clog2(M)-1:0] nm_out_data;
  logic im_busy, im_done;
  logic [D-1:0] im_out_valid;
  logic [$clog2(N)-1:0] im_out_idx [D];
  logic [7+4*(WN-1)+$clog2(M*WN)+4*(XN-1)+1-1:0] im_out_data [D];

  longint wval [N][M];  // decoded weights
  longint xval  [M];    // NM activations (8 bit)
  longint xapx  [M];    // decoded IM inputs
  int checks = 0, failures = 0;

  // mechanism counters
  int n_nm_accum = 0, n_nm_divsum = 0, n_im_parallel = 0, n_overlap = 0;
  int n_start_ignored = 0, n_input_update = 0, n_upper_nibble = 0;

  hades_top #(.M(M), .N(N), .D(D), .IN_BITS(IN_BITS), .W_NIBBLES(WN), .X_NIBBLES(XN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Approximate a nonzero 4-bit value to alphabet set {1}: the nearest power
  // of two (ties to the larger). Returns the shift code.
  function automatic int asm_encode(input int v);
    int best;
    best = 0;
    for (int k = 1; k < 4; k++) begin
      int dk, db;
      dk = (v > (1 << k)) ? v - (1 << k) : (1 << k) - v;
      db = (v > (1 << best)) ? v - (1 << best) : (1 << best) - v;
      if (dk <= db) best = k;
    end
    return best;
  endfunction

  task automatic host_write(input host_target_t tgt, input int addr, input int data);
    @(negedge clk);
    host_wr.en = 1'b1; host_wr.target = tgt;
    host_wr.addr = 16'(addr); host_wr.data = 16'(data);
  endtask

  task automatic host_idle();
    @(negedge clk); host_wr = '0;
  endtask

  task automatic load_weights();
    for (int j = 0; j < N; j++)
      for (int i = 0; i < M; i++) begin
        int code;
        code = 0; wval[j][i] = 0;
        for (int n = 0; n < WN; n++) begin
          int c;
          c = asm_encode($urandom_range(1, 15));
          code |= c << (2*n);
          wval[j][i] += longint'(1) << (4*n + c);
        end
        host_write(TGT_NM_WEIGHT, j*M + i, code);
        host_write(TGT_IM_WEIGHT, j*M + i, code);
      end
    host_idle();
  endtask

  task automatic load_inputs();
    for (int i = 0; i < M; i++) begin
      int code;
      xval[i] = $urandom_range(0, 255);
      code = 0; xapx[i] = 0;
      for (int q = 0; q < XN; q++) begin
        int nib, c;
        nib = int'((xval[i] >> (4*q)) & 15);
        c = asm_encode((nib == 0) ? 1 : nib);
        code |= c << (2*q);
        xapx[i] += longint'(1) << (4*q + c);
      end
      host_write(TGT_NM_INPUT, i, int'(xval[i]));
      host_write(TGT_IM_INPUT, i, code);
    end
    host_idle();
  endtask

  task automatic run_both(input bit poke);
    int nm_n, im_n, nm_d, im_d, cyc;
    @(negedge clk); nm_start = 1'b1; im_start = 1'b1;
    @(negedge clk); nm_start = 1'b0; im_start = 1'b0;
    nm_n = 0; im_n = 0; nm_d = 0; im_d = 0; cyc = 0;
    while (nm_d == 0 || im_d == 0) begin
      @(posedge clk); #1;
      cyc++;
      if (nm_busy && im_busy) n_overlap++;
      // a start while busy must not restart the NM macro
      if (poke && cyc == 40) begin
        nm_start = 1'b1;
        n_start_ignored++;
      end else begin
        nm_start = 1'b0;
      end
      if (nm_out_valid) begin
        longint e, p0, p1;
        e = 0; p0 = 0; p1 = 0;
        for (int i = 0; i < M; i++) begin
          longint p;
          p = xval[i] * wval[nm_n][i];
          if (wval[nm_n][i] >= 16 && xval[i] != 0) n_upper_nibble++;
          e += p;
          if (i < MD) p0 += p; else p1 += p;
        end
        check(int'(nm_out_idx) == nm_n, $sformatf("NM order %0d/%0d", nm_out_idx, nm_n));
        check(longint'(nm_out_data) == e, $sformatf("NM out[%0d] %0d expected %0d", nm_n, nm_out_data, e));
        n_nm_accum++;
        if (p0 != 0 && p1 != 0) n_nm_divsum++;
        nm_n++;
      end
      if (im_out_valid != '0) begin
        check(im_out_valid == '1, "IM divisions in lockstep");
        if (im_out_valid == '1 && D > 1) n_im_parallel++;
        for (int d = 0; d < D; d++) begin
          int j;
          longint e;
          j = int'(im_out_idx[d]);
          e = 0;
          for (int i = 0; i < M; i++) e += wval[j][i] * xapx[i];
          check(j == d*ROWS + im_n, $sformatf("IM idx %0d", j));
          check(longint'(im_out_data[d]) == e, $sformatf("IM out[%0d] %0d expected %0d", j, im_out_data[d], e));
        end
        im_n++;
      end
      if (nm_done) nm_d++;
      if (im_done) im_d++;
    end
    nm_start = 1'b0;
    check(nm_n == N, $sformatf("NM produced %0d outputs", nm_n));
    check(im_n == ROWS, $sformatf("IM produced %0d rows", im_n));
    check(nm_d == 1 && im_d == 1, "one done each");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_weights();
    load_inputs();
    run_both(1'b1);
    load_inputs();
    n_input_update++;
    run_both(1'b0);
    load_weights();
    load_inputs();
    n_input_update++;
    run_both(1'b0);
    $display("mechanisms: nm_accumulate=%0d nm_division_sum=%0d im_parallel_rows=%0d overlap_cycles=%0d start_ignored=%0d input_updates=%0d upper_nibble_products=%0d",
             n_nm_accum, n_nm_divsum, n_im_parallel, n_overlap, n_start_ignored, n_input_update, n_upper_nibble);
    check(n_nm_accum > 0 && MD > 1, "NM multi-cycle accumulation happened");
    check(n_nm_divsum > 0, "NM cross-division sum happened");
    check(n_im_parallel > 0, "IM parallel division outputs happened");
    check(n_overlap > 0, "both macros busy together");
    check(n_start_ignored > 0, "start while busy exercised");
    check(n_input_update > 0, "input update between runs");
    check(n_upper_nibble > 0, "upper weight nibble used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
