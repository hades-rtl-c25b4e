// nm_barrel_shifter: modified barrel shifter interface of NM-CALC.
//
// Multiplies an IN_BITS activation by a power-of-two weight given as a 4-bit
// one-hot word: product = in_act << k where sel[k] is set. With 4-bit inputs
// the product is 7 bits, as in the paper. Each output bit is an AND-OR of at
// most four input bits (one level of pass gates in a transistor-level
// version), so the path is purely combinational. An all-zero select (never
// produced by the decoder) gives zero.
module nm_barrel_shifter
  import hades_pkg::*;
#(
  parameter int unsigned IN_BITS = 4,
  localparam int unsigned OUT_W  = IN_BITS + ONEHOT_W - 1
) (
  input  logic [IN_BITS-1:0]  in_act,
  input  logic [ONEHOT_W-1:0] sel,
  output logic [OUT_W-1:0]    product
);

  always_comb begin
    product = '0;
    for (int k = 0; k < ONEHOT_W; k++) begin
      if (sel[k]) product = product | (OUT_W'(in_act) << k);
    end
  end

endmodule
