// nm_calc_macro: NM-CALC, the near-memory alphabet-set MVM macro.
//
// Computes one DNN layer Out_j = sum_i W(j,i) * I(i), i = 0..M-1,
// j = 0..N-1, where every weight is a power of two stored as a 2-bit shift
// code (alphabet set {1}) and every activation is an IN_BITS-bit unsigned
// number. The weight array is split into D divisions; division d stores the
// weights of inputs d*M/D .. (d+1)*M/D-1 in its own 8T SRAM and owns one
// shift decoder, one modified barrel shifter and one adder-accumulator. Each
// cycle every division reads one weight word, decodes it to a one-hot weight,
// shifts the matching activation and accumulates, so an output node takes M/D
// cycles; the D partial sums are then added and driven out.
//
// Pipeline (per read issued in cycle t): t+1 SRAM word and activation
// available, product accumulated at the end of t+1; t+2 the last accumulate
// of an output is complete and the D sums are added into the output register;
// out_valid is high in cycle t+3 of that output's last read. Outputs leave
// in order j = 0..N-1, one every M/D cycles; done pulses with the last one.
//
// Precision: activations may be 4..16 bits (IN_BITS). Weights may be
// 4*W_NIBBLES bits, each 4-bit nibble n again approximated to a power of two
// and stored as its own 2-bit code; a weight word then holds W_NIBBLES codes,
// each decoded and shifted by its own decoder and barrel shifter, and the
// nibble products are added with nibble n weighted by 2^(4n) before
// accumulation. The default is the 4b/4b configuration.
//
// Host side: w_we/w_addr/w_code write W(j,i) at logical index j*M+i (all
// nibble codes at once, nibble 0 in bits 1:0); x_we writes activation i.
// Loads must not overlap a run. start is ignored while busy.
//
// The division scheme, 2-bit encoding, decoder / barrel shifter /
// adder-accumulator chain, D = 2 and the 4-bit-multiple precisions follow the
// paper; array size, pipeline, handshake and the output adder are this
// design's choices.
module nm_calc_macro
  import hades_pkg::*;
#(
  parameter int unsigned M       = DEF_M,
  parameter int unsigned N       = DEF_N,
  parameter int unsigned D       = DEF_D,
  parameter int unsigned IN_BITS = DEF_IN_BITS,
  parameter int unsigned W_NIBBLES = 1,
  localparam int unsigned MD     = M / D,
  localparam int unsigned WCW    = CODE_W * W_NIBBLES,            // weight word
  localparam int unsigned BW     = IN_BITS + ONEHOT_W - 1,        // nibble product
  // whole product: 7 bits for a 4-bit weight, else IN_BITS + 4*W_NIBBLES
  localparam int unsigned PW     = (W_NIBBLES == 1) ? BW : IN_BITS + 4 * W_NIBBLES,
  localparam int unsigned ACC_W  = PW + ((MD > 1) ? $clog2(MD) : 0),
  localparam int unsigned OUT_W  = PW + ((M > 1) ? $clog2(M) : 0),
  localparam int unsigned WAW    = $clog2(M*N),
  localparam int unsigned XAW    = (M  > 1) ? $clog2(M)  : 1,
  localparam int unsigned JW     = (N  > 1) ? $clog2(N)  : 1,
  localparam int unsigned KW     = (MD > 1) ? $clog2(MD) : 1,
  localparam int unsigned DEPTH  = N * MD,
  localparam int unsigned SAW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight load
  input  logic               w_we,
  input  logic [WAW-1:0]     w_addr,
  input  logic [WCW-1:0]     w_code,
  // activation load
  input  logic               x_we,
  input  logic [XAW-1:0]     x_addr,
  input  logic [IN_BITS-1:0] x_data,
  // control
  input  logic               start,
  output logic               busy,
  output logic               done,
  // result stream
  output logic               out_valid,
  output logic [JW-1:0]      out_idx,
  output logic [OUT_W-1:0]   out_data
);

  // ---------------------------------------------------------------- control
  logic [JW-1:0] j_q;
  logic [KW-1:0] k_q;
  logic          issuing;

  typedef struct packed {
    logic          valid;
    logic          first;
    logic          last;
    logic [JW-1:0] j;
  } stage_t;

  stage_t p1;
  logic          p2_valid;
  logic [JW-1:0] p2_j;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      busy    <= 1'b0;
      j_q     <= '0;
      k_q     <= '0;
    end else begin
      if (start && !busy) begin
        issuing <= 1'b1;
        busy    <= 1'b1;
        j_q     <= '0;
        k_q     <= '0;
      end else if (issuing) begin
        if (int'(k_q) == MD-1) begin
          k_q <= '0;
          if (int'(j_q) == N-1) issuing <= 1'b0;
          else                  j_q     <= j_q + 1'b1;
        end else begin
          k_q <= k_q + 1'b1;
        end
      end
      if (done) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1 <= '0;
      p2_valid <= 1'b0;
      p2_j     <= '0;
    end else begin
      p1.valid <= issuing;
      p1.first <= (k_q == '0);
      p1.last  <= (int'(k_q) == MD-1);
      p1.j     <= j_q;
      p2_valid <= p1.valid && p1.last;
      p2_j     <= p1.j;
    end
  end

  // ------------------------------------------------- host weight addressing
  // Logical index j*M+i -> division i/(M/D), word j*(M/D) + i%(M/D).
  logic [WAW-1:0] wj, wi;
  logic [SAW-1:0] w_word;
  always_comb begin
    wj     = w_addr / WAW'(M);
    wi     = w_addr % WAW'(M);
    w_word = SAW'(wj * WAW'(MD) + (wi % WAW'(MD)));
  end

  // ------------------------------------------------------------ input driver
  logic [IN_BITS-1:0] act [D];

  nm_input_driver #(.M(M), .D(D), .IN_BITS(IN_BITS)) u_in (
    .clk   (clk),
    .we    (x_we),
    .waddr (x_addr),
    .wdata (x_data),
    .re    (issuing),
    .rk    (k_q),
    .act   (act)
  );

  // ------------------------------------------------------------- divisions
  logic [SAW-1:0]   raddr;
  logic [ACC_W-1:0] acc [D];

  assign raddr = SAW'(j_q) * SAW'(MD) + SAW'(k_q);

  for (genvar d = 0; d < D; d++) begin : g_div
    logic [WCW-1:0]       word;
    logic [PW-1:0]        part [W_NIBBLES];
    logic [PW-1:0]        product;

    sram_8t_array #(.WIDTH(WCW), .DEPTH(DEPTH)) u_sram (
      .clk   (clk),
      .we    (w_we && (wi / WAW'(MD) == WAW'(d))),
      .waddr (w_word),
      .wdata (w_code),
      .re    (issuing),
      .raddr (raddr),
      .rdata (word)
    );

    for (genvar n = 0; n < W_NIBBLES; n++) begin : g_nib
      logic [ONEHOT_W-1:0] onehot;
      logic [BW-1:0]       nib_product;

      nm_shift_decoder u_dec (
        .code   (word[CODE_W*n +: CODE_W]),
        .onehot (onehot)
      );

      nm_barrel_shifter #(.IN_BITS(IN_BITS)) u_bs (
        .in_act  (act[d]),
        .sel     (onehot),
        .product (nib_product)
      );

      assign part[n] = PW'(nib_product) << (4 * n);
    end

    // concurrent addition of the nibble products (a wire for W_NIBBLES = 1)
    always_comb begin
      product = '0;
      for (int n = 0; n < W_NIBBLES; n++) product = product + part[n];
    end

    nm_adder_accumulator #(.IN_W(PW), .ACC_W(ACC_W)) u_acc (
      .clk    (clk),
      .rst_n  (rst_n),
      .en     (p1.valid),
      .first  (p1.first),
      .addend (product),
      .acc    (acc[d])
    );
  end

  // ----------------------------------------------------------- output driver
  logic [OUT_W-1:0] sum_all;
  always_comb begin
    sum_all = '0;
    for (int d = 0; d < D; d++) sum_all = sum_all + OUT_W'(acc[d]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= p2_valid;
      done      <= p2_valid && (int'(p2_j) == N-1);
      if (p2_valid) begin
        out_idx  <= p2_j;
        out_data <= sum_all;
      end
    end
  end

  initial begin
    assert (M % D == 0) else $error("nm_calc_macro: M must be a multiple of D");
  end

  // A new run is only accepted when idle; results come out in index order.
  a_done_single: assert property (@(posedge clk) disable iff (!rst_n)
                                  done |-> out_valid && int'(out_idx) == N-1);

endmodule
