// imc_bitcell_array: 8T SRAM array of one IM-CALC division.
//
// Row r holds the encoded weights of one output node. Each input i owns WN
// column blocks of two cells (WN = weight nibbles, 1 for 4-bit weights);
// block c = i*WN + n holds the 2-bit shift code of nibble n of W(r,i).
// Below the weight rows sit XN input rows (XN = input nibbles, 1 for 4-bit
// inputs): at the end of every column block of input i, input row q holds
// the code of nibble q of I(i). Input stationary: the codes stay in the array
// while the weight rows are read one after another. A read raises the read
// word line of weight row r together with that of input row q, so every read
// bit line carries one weight bit and one input bit. The array delivers these
// cell pairs, latched at the clock edge, to the bit-line model
// (imc_rbl_divider), which gives the level the shared bit line settles at.
//
// Writes use the separate 8T write port: one weight (all its nibble codes,
// nibble 0 in bits 1:0) or one input (all its nibble codes, copied under each
// of the input's WN column blocks) per cycle. Read data appears one cycle
// after re. Contents are not reset. The input row at the end of the column
// blocks and the two-cell bit-line sharing follow the paper; the layout, the
// extra input rows for wider inputs and the port timing are this design's.
module imc_bitcell_array
  import hades_pkg::*;
#(
  parameter int unsigned M    = DEF_M,
  parameter int unsigned ROWS = DEF_N / DEF_D,
  parameter int unsigned WN   = 1,
  parameter int unsigned XN   = 1,
  localparam int unsigned COLS = M * WN,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned QW  = (XN > 1) ? $clog2(XN) : 1
) (
  input  logic                 clk,
  // weight write port: W(w_row, w_col), WN nibble codes
  input  logic                 w_we,
  input  logic [RW-1:0]        w_row,
  input  logic [CW-1:0]        w_col,
  input  logic [CODE_W*WN-1:0] w_code,
  // input-row write port: I(x_col), XN nibble codes
  input  logic                 x_we,
  input  logic [CW-1:0]        x_col,
  input  logic [CODE_W*XN-1:0] x_code,
  // compute read: weight row r + input row q on the same read bit lines
  input  logic                 re,
  input  logic [RW-1:0]        r_row,
  input  logic [QW-1:0]        r_xrow,
  output code_t                w_bits [COLS],
  output code_t                x_bits [COLS]
);

  code_t wmem [ROWS][COLS];
  code_t xmem [XN][COLS];

  always_ff @(posedge clk) begin
    if (w_we) begin
      for (int n = 0; n < WN; n++)
        wmem[w_row][int'(w_col)*WN + n] <= w_code[CODE_W*n +: CODE_W];
    end
    if (x_we) begin
      for (int q = 0; q < XN; q++)
        for (int n = 0; n < WN; n++)
          xmem[q][int'(x_col)*WN + n] <= x_code[CODE_W*q +: CODE_W];
    end
  end

  always_ff @(posedge clk) begin
    if (re) begin
      w_bits <= wmem[r_row];
      x_bits <= xmem[r_xrow];
    end
  end

endmodule
