// hades_pkg: types and constants shared by the near-memory (NM-CALC) and
// in-memory (IM-CALC) alphabet-set MAC macros.
//
// With the single-alphabet set {1}, every 4-bit quantized weight (and, for
// IM-CALC, every input activation) is one of 0001, 0010, 0100, 1000, i.e. a
// power of two. It is stored as a 2-bit shift code k meaning the value 2^k.
// A product with such a weight is therefore a left shift, and the product of
// two such codes is 2^(kw+kx), a 3-bit exponent decoded into a 7-bit value.
// The 4b/4b precision and the division count D = 2 follow the paper; the
// array size (64 inputs x 64 outputs) and the host bus are this design's
// own choices.
package hades_pkg;

  // Encoded operand: 2-bit shift code of a power-of-two 4-bit value.
  localparam int unsigned CODE_W    = 2;
  localparam int unsigned ONEHOT_W  = 4;   // decoded 4-bit one-hot weight
  localparam int unsigned PSHIFT_W  = 3;   // product exponent kw + kx (0..6)
  localparam int unsigned PVAL_W    = 7;   // decoded product 2^(kw+kx)

  // Defaults of the macros.
  localparam int unsigned DEF_M       = 64; // input nodes per layer
  localparam int unsigned DEF_N       = 64; // output nodes per layer
  localparam int unsigned DEF_D       = 2;  // array divisions
  localparam int unsigned DEF_IN_BITS = 4;  // NM-CALC activation precision

  typedef logic [CODE_W-1:0] code_t;

  // Level a read bit line settles at when two 8T cells drive it together
  // through the voltage-divider scheme: discharged, near precharge, or high.
  typedef enum logic [1:0] {
    RBL_0    = 2'd0,
    RBL_VPRE = 2'd1,
    RBL_1    = 2'd2
  } rbl_level_t;

  // Destination of a host load on the top-level bus.
  typedef enum logic [1:0] {
    TGT_NM_WEIGHT = 2'd0,
    TGT_NM_INPUT  = 2'd1,
    TGT_IM_WEIGHT = 2'd2,
    TGT_IM_INPUT  = 2'd3
  } host_target_t;

  // Host load request. addr is the logical index: j*M+i for a weight W(j,i),
  // i for an input. data carries the shift codes of one operand (2 bits per
  // 4-bit nibble, nibble 0 in bits 1:0) or one NM activation (up to 16 bits).
  typedef struct packed {
    logic         en;
    host_target_t target;
    logic [15:0]  addr;
    logic [15:0]  data;
  } host_wr_t;

endpackage
