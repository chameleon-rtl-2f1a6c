// log2_pe: shift-only processing element.
//
// A weight is a 4-bit signed power of two, {sign, exponent[2:0]}, worth
// (-1)^sign * 2^exponent, except code 4'b1000 which stands for zero (needed
// for unused channels and for identity matrices). The PE left-shifts the 4-bit unsigned activation by
// the exponent and then applies the sign, so no multiplier is needed. The
// result fits a 12-bit signed number (15 << 7 = 1920).
//
// Purely combinational. The shift-then-sign structure and the 12-bit signed
// output follow the published PE; the bit order of the weight (sign in the
// MSB) and the zero code are choices of this implementation.
// The enable input forces the product to zero; it stands for the clock
// gating of PEs that are unused in 4x4 mode.
module log2_pe
  import chameleon_pkg::*;
(
  input  logic  en,
  input  act_t  act,
  input  wgt_t  wgt,
  output logic signed [PROD_W-1:0] prod
);
  logic [PROD_W-1:0] shifted;

  always_comb begin
    shifted = PROD_W'(act) << wgt[2:0];
    if (!en || wgt == WZERO) prod = '0;
    else if (wgt[3])  prod = -$signed(shifted);
    else              prod = $signed(shifted);
  end
endmodule
