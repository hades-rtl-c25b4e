// imc_product_decoder: specialised decoder of IM-CALC.
//
// Turns the 3-bit product exponent from the surface logic into the product
// value 2^shift, a 7-bit one-hot word (shift 0..6). The unused code 7 gives
// zero. Combinational. The decoder's role is the paper's; the unused-code
// behaviour is this design's choice.
module imc_product_decoder
  import hades_pkg::*;
(
  input  logic [PSHIFT_W-1:0] shift,
  output logic [PVAL_W-1:0]   value
);

  always_comb begin
    value = '0;
    if (int'(shift) < PVAL_W) value[shift] = 1'b1;
  end

endmodule
