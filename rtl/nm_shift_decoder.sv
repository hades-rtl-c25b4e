// nm_shift_decoder: barrel-shifter control of NM-CALC.
//
// Decodes a stored 2-bit shift code k into the 4-bit one-hot weight 2^k
// (00->0001, 01->0010, 10->0100, 11->1000), which selects the shift of the
// modified barrel shifter. Purely combinational. The code-to-one-hot mapping
// is the paper's encoding of the alphabet set {1}; the bit order is chosen so
// the one-hot word equals the weight value.
module nm_shift_decoder
  import hades_pkg::*;
(
  input  code_t                code,
  output logic [ONEHOT_W-1:0]  onehot
);

  always_comb begin
    onehot = '0;
    onehot[code] = 1'b1;
  end

endmodule
