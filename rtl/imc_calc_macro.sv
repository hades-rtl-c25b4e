// imc_calc_macro: IM-CALC, the in-memory alphabet-set MVM macro.
//
// Computes Out_j = sum_i W(j,i) * I(i) for i = 0..M-1, j = 0..N-1, where
// both the weights and the input activations are powers of two stored as
// 2-bit shift codes. The weight array is split into D divisions of N/D rows;
// division d stores output nodes d*N/D .. (d+1)*N/D-1 and keeps its own copy
// of the input codes at the end of its column blocks (input stationary). For
// one row read every column block yields two ternary read-bit-line levels
// (imc_rbl_divider), the surface logic turns them into the product exponent
// kw+kx, the specialised decoder into 2^(kw+kx), and the adder tree sums all
// M products. So each division delivers a complete output node per cycle and
// the macro D nodes per cycle; a layer takes N/D cycles.
//
// Precision: with 4*WN-bit weights and 4*XN-bit inputs each 4-bit nibble is
// approximated and coded on its own. Weight nibble n has its own column block
// and its decoded products enter the adder tree shifted by 4n; input nibble q
// has its own input row, the rows are read in XN successive cycles and the
// tree sums are accumulated with weight 2^(4q). An output then takes XN
// cycles. The default is the 4b/4b configuration (WN = XN = 1).
//
// Timing: a row read issued in cycle t is latched by the array at the end of
// t; bit-line levels, surface logic, decoders and adder tree settle in t+1 and
// are registered at its end, so out_valid is high in t+2 after the read of
// the row's last input nibble. Division d reports row r as
// out_idx[d] = d*N/D + r in the same cycle as the other divisions; done
// pulses with the last row.
//
// Host side: w_we/w_addr/w_code write W(j,i) at logical index j*M+i (nibble
// n in bits 2n+1:2n); x_we writes the codes of input i into every division.
// Loads must not overlap a run; start is ignored while busy.
//
// The encoding, the input row, the three-level bit line, surface logic,
// decoder, adder tree, D = 2 and the 4-bit-multiple precisions follow the
// paper; sizes, the nibble-serial input scheme, register placement and the
// handshake are this design's choices.
module imc_calc_macro
  import hades_pkg::*;
#(
  parameter int unsigned M      = DEF_M,
  parameter int unsigned N      = DEF_N,
  parameter int unsigned D      = DEF_D,
  parameter int unsigned WN     = 1,
  parameter int unsigned XN     = 1,
  localparam int unsigned ROWS  = N / D,
  localparam int unsigned COLS  = M * WN,
  localparam int unsigned TW    = PVAL_W + 4 * (WN - 1),            // tree term
  localparam int unsigned SW    = TW + ((COLS > 1) ? $clog2(COLS) : 0), // tree sum
  localparam int unsigned OUT_W = SW + 4 * (XN - 1) + ((XN > 1) ? 1 : 0),
  localparam int unsigned WAW   = $clog2(M*N),
  localparam int unsigned XAW   = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned JW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned QW    = (XN > 1) ? $clog2(XN) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weight load
  input  logic                 w_we,
  input  logic [WAW-1:0]       w_addr,
  input  logic [CODE_W*WN-1:0] w_code,
  // input load (broadcast to every division's input rows)
  input  logic                 x_we,
  input  logic [XAW-1:0]       x_addr,
  input  logic [CODE_W*XN-1:0] x_code,
  // control
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // result streams, one per division
  output logic [D-1:0]         out_valid,
  output logic [JW-1:0]        out_idx  [D],
  output logic [OUT_W-1:0]     out_data [D]
);

  // ---------------------------------------------------------------- control
  logic          issuing;
  logic [RW-1:0] r_q;
  logic [QW-1:0] q_q;
  logic          p1_valid, p1_first, p1_last, p1_end;
  logic [RW-1:0] p1_r;
  logic [QW-1:0] p1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing  <= 1'b0;
      busy     <= 1'b0;
      r_q      <= '0;
      q_q      <= '0;
      p1_valid <= 1'b0;
      p1_first <= 1'b0;
      p1_last  <= 1'b0;
      p1_end   <= 1'b0;
      p1_r     <= '0;
      p1_q     <= '0;
    end else begin
      if (start && !busy) begin
        issuing <= 1'b1;
        busy    <= 1'b1;
        r_q     <= '0;
        q_q     <= '0;
      end else if (issuing) begin
        if (int'(q_q) == XN-1) begin
          q_q <= '0;
          if (int'(r_q) == ROWS-1) issuing <= 1'b0;
          else                     r_q     <= r_q + 1'b1;
        end else begin
          q_q <= q_q + 1'b1;
        end
      end
      if (done) busy <= 1'b0;
      p1_valid <= issuing;
      p1_first <= (q_q == '0);
      p1_last  <= (int'(q_q) == XN-1);
      p1_end   <= issuing && (int'(q_q) == XN-1) && (int'(r_q) == ROWS-1);
      p1_r     <= r_q;
      p1_q     <= q_q;
    end
  end

  // ------------------------------------------------- host weight addressing
  // Logical index j*M+i -> division j/(N/D), row j%(N/D), input i.
  logic [WAW-1:0] wj;
  logic [XAW-1:0] wi;
  logic [RW-1:0]  w_row;
  always_comb begin
    wj    = w_addr / WAW'(M);
    wi    = XAW'(w_addr % WAW'(M));
    w_row = RW'(wj % WAW'(ROWS));
  end

  // ------------------------------------------------------------- divisions
  for (genvar d = 0; d < D; d++) begin : g_div
    code_t             w_bits [COLS];
    code_t             x_bits [COLS];
    logic [TW-1:0]     terms  [COLS];
    logic [SW-1:0]     sum;
    logic [OUT_W-1:0]  acc, acc_next;

    imc_bitcell_array #(.M(M), .ROWS(ROWS), .WN(WN), .XN(XN)) u_array (
      .clk    (clk),
      .w_we   (w_we && (wj / WAW'(ROWS) == WAW'(d))),
      .w_row  (w_row),
      .w_col  (wi),
      .w_code (w_code),
      .x_we   (x_we),
      .x_col  (x_addr),
      .x_code (x_code),
      .re     (issuing),
      .r_row  (r_q),
      .r_xrow (q_q),
      .w_bits (w_bits),
      .x_bits (x_bits)
    );

    for (genvar c = 0; c < COLS; c++) begin : g_col
      rbl_level_t          lvl_hi, lvl_lo;
      logic [PSHIFT_W-1:0] shift;
      logic [PVAL_W-1:0]   value;

      imc_rbl_divider u_rbl_hi (.w_bit(w_bits[c][1]), .x_bit(x_bits[c][1]), .level(lvl_hi));
      imc_rbl_divider u_rbl_lo (.w_bit(w_bits[c][0]), .x_bit(x_bits[c][0]), .level(lvl_lo));

      imc_surface_logic u_surf (.lvl_hi(lvl_hi), .lvl_lo(lvl_lo), .shift(shift));

      imc_product_decoder u_dec (.shift(shift), .value(value));

      // weight nibble c % WN carries weight 2^(4*(c % WN))
      assign terms[c] = TW'(value) << (4 * (c % WN));
    end

    imc_adder_tree #(.M(COLS), .IN_W(TW)) u_tree (
      .terms (terms),
      .sum   (sum)
    );

    // input nibble q carries weight 2^(4q); for XN = 1 this is just the sum
    assign acc_next = (p1_first ? '0 : acc) + (OUT_W'(sum) << (4 * int'(p1_q)));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc          <= '0;
        out_valid[d] <= 1'b0;
        out_idx[d]   <= '0;
        out_data[d]  <= '0;
      end else begin
        out_valid[d] <= p1_valid && p1_last;
        if (p1_valid) acc <= acc_next;
        if (p1_valid && p1_last) begin
          out_idx[d]  <= JW'(d * ROWS) + JW'(p1_r);
          out_data[d] <= acc_next;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= p1_end;
  end

  initial begin
    assert (N % D == 0) else $error("imc_calc_macro: N must be a multiple of D");
  end

  // Every division reports in the same cycle.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid == '0 || out_valid == '1);

endmodule
