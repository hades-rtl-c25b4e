// hades_top: the two alphabet-set MVM macros behind one host load bus.
//
// The design offers two ways to run a DNN layer whose weights are quantized to
// the single-alphabet set {1} (powers of two, stored as 2-bit shift codes):
//   * NM-CALC (nm_calc_macro): near-memory; 4-bit activations are shifted by
//     the decoded weights next to the SRAM and accumulated, M/D cycles per
//     output node.
//   * IM-CALC (imc_calc_macro): in-memory; activations are also shift codes,
//     stored in the array, and each division produces a whole output node per
//     cycle from the read bit lines, surface logic, decoders and adder tree.
// Both macros are always present and run independently. host_wr is a one-
// cycle load request: target selects NM weights, NM activations, IM weights
// or IM input codes; addr is the logical index (j*M+i for W(j,i), i for an
// input); data holds the 2-bit shift codes of one weight or IM input (one
// code per 4-bit nibble) or one IN_BITS-bit NM activation.
// Precision: W_NIBBLES sets the weight precision of both macros (4, 8 or 16
// bits), IN_BITS the NM activation precision (4..16 bits) and X_NIBBLES the
// IM input precision; the defaults are the 4b/4b configuration.
// nm_start / im_start begin one layer; results stream out with valid and the
// output node index, and done pulses after the last one.
// The two macros are the paper's; placing them side by side with a shared
// load bus is this design's choice, as the paper gives no system around them.
module hades_top
  import hades_pkg::*;
#(
  parameter int unsigned M       = DEF_M,
  parameter int unsigned N       = DEF_N,
  parameter int unsigned D       = DEF_D,
  parameter int unsigned IN_BITS = DEF_IN_BITS,
  parameter int unsigned W_NIBBLES = 1,
  parameter int unsigned X_NIBBLES = 1,
  localparam int unsigned NM_PW    = (W_NIBBLES == 1) ? IN_BITS + ONEHOT_W - 1
                                                      : IN_BITS + 4 * W_NIBBLES,
  localparam int unsigned NM_OUT_W = NM_PW + ((M > 1) ? $clog2(M) : 0),
  localparam int unsigned IM_SW    = PVAL_W + 4 * (W_NIBBLES - 1)
                                     + ((M * W_NIBBLES > 1) ? $clog2(M * W_NIBBLES) : 0),
  localparam int unsigned IM_OUT_W = IM_SW + 4 * (X_NIBBLES - 1) + ((X_NIBBLES > 1) ? 1 : 0),
  localparam int unsigned WAW      = $clog2(M*N),
  localparam int unsigned XAW      = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned JW       = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  host_wr_t            host_wr,
  // NM-CALC
  input  logic                nm_start,
  output logic                nm_busy,
  output logic                nm_done,
  output logic                nm_out_valid,
  output logic [JW-1:0]       nm_out_idx,
  output logic [NM_OUT_W-1:0] nm_out_data,
  // IM-CALC
  input  logic                im_start,
  output logic                im_busy,
  output logic                im_done,
  output logic [D-1:0]        im_out_valid,
  output logic [JW-1:0]       im_out_idx  [D],
  output logic [IM_OUT_W-1:0] im_out_data [D]
);

  logic nm_w_we, nm_x_we, im_w_we, im_x_we;

  always_comb begin
    nm_w_we = host_wr.en && (host_wr.target == TGT_NM_WEIGHT);
    nm_x_we = host_wr.en && (host_wr.target == TGT_NM_INPUT);
    im_w_we = host_wr.en && (host_wr.target == TGT_IM_WEIGHT);
    im_x_we = host_wr.en && (host_wr.target == TGT_IM_INPUT);
  end

  nm_calc_macro #(.M(M), .N(N), .D(D), .IN_BITS(IN_BITS), .W_NIBBLES(W_NIBBLES)) u_nm (
    .clk       (clk),
    .rst_n     (rst_n),
    .w_we      (nm_w_we),
    .w_addr    (WAW'(host_wr.addr)),
    .w_code    (host_wr.data[CODE_W*W_NIBBLES-1:0]),
    .x_we      (nm_x_we),
    .x_addr    (XAW'(host_wr.addr)),
    .x_data    (host_wr.data[IN_BITS-1:0]),
    .start     (nm_start),
    .busy      (nm_busy),
    .done      (nm_done),
    .out_valid (nm_out_valid),
    .out_idx   (nm_out_idx),
    .out_data  (nm_out_data)
  );

  imc_calc_macro #(.M(M), .N(N), .D(D), .WN(W_NIBBLES), .XN(X_NIBBLES)) u_im (
    .clk       (clk),
    .rst_n     (rst_n),
    .w_we      (im_w_we),
    .w_addr    (WAW'(host_wr.addr)),
    .w_code    (host_wr.data[CODE_W*W_NIBBLES-1:0]),
    .x_we      (im_x_we),
    .x_addr    (XAW'(host_wr.addr)),
    .x_code    (host_wr.data[CODE_W*X_NIBBLES-1:0]),
    .start     (im_start),
    .busy      (im_busy),
    .done      (im_done),
    .out_valid (im_out_valid),
    .out_idx   (im_out_idx),
    .out_data  (im_out_data)
  );

  initial begin
    assert (M * N <= (1 << 16)) else $error("hades_top: host address is 16 bits");
    assert (IN_BITS <= 16 && W_NIBBLES <= 4 && X_NIBBLES <= 4)
      else $error("hades_top: operand wider than the 16-bit host data");
  end

endmodule
