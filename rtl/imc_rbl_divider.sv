// imc_rbl_divider: read-bit-line level of IM-CALC (digital abstraction).
//
// In IM-CALC one weight cell and one input cell share a precharged read bit
// line (RBL) and their read word lines are raised together. Through a
// voltage-divider arrangement of the two read stacks the RBL settles at one
// of three levels: discharged (0), held near the precharge voltage (Vpre),
// or high (1). The level therefore tells how many of the two cells store a 1:
// none -> RBL_0, one -> RBL_VPRE, both -> RBL_1. This module gives that
// mapping as logic so the array can be simulated and synthesised; in silicon
// it is the analog bit line itself plus two reference sense amplifiers.
// The three-level RBL is from the paper; which level stands for which cell
// pair is this design's assumption. Combinational.
module imc_rbl_divider
  import hades_pkg::*;
(
  input  logic       w_bit,
  input  logic       x_bit,
  output rbl_level_t level
);

  always_comb begin
    unique case ({w_bit, x_bit})
      2'b00:        level = RBL_0;
      2'b11:        level = RBL_1;
      default:      level = RBL_VPRE;
    endcase
  end

endmodule
