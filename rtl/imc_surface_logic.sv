// imc_surface_logic: surface logic of IM-CALC.
//
// A weight code kw and an input code kx each stand for a power of two, so
// their product is 2^(kw+kx) and only the exponent kw+kx (0..6, 3 bits) needs
// to be formed. The two bit lines of a column block report, per bit position,
// how many of the two cells hold a 1 (RBL_0 = 0, RBL_VPRE = 1, RBL_1 = 2).
// The exponent is then 2*digit(hi) + digit(lo), resolved with two gates per
// bit: shift[0] = (lo is VPRE); with carry c = (lo is 1),
// shift[1] = (hi is VPRE) xor c and shift[2] = (hi is 1) or ((hi is VPRE) and c).
// The name and role are the paper's; the gate-level form is this design's.
// Combinational.
module imc_surface_logic
  import hades_pkg::*;
(
  input  rbl_level_t            lvl_hi,
  input  rbl_level_t            lvl_lo,
  output logic [PSHIFT_W-1:0]   shift
);

  logic lo_mid, lo_one, hi_mid, hi_one;

  always_comb begin
    lo_mid   = (lvl_lo == RBL_VPRE);
    lo_one   = (lvl_lo == RBL_1);
    hi_mid   = (lvl_hi == RBL_VPRE);
    hi_one   = (lvl_hi == RBL_1);
    shift[0] = lo_mid;
    shift[1] = hi_mid ^ lo_one;
    shift[2] = hi_one | (hi_mid & lo_one);
  end

endmodule
