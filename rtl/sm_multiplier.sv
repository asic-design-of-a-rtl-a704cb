// sm_multiplier: 7-bit sign-magnitude multiplier of the noise update unit.
//
// Scales a unit-variance Gaussian noise sample (a) by the wanted standard deviation (b).
// Both operands and the product use the decoder's 7-bit format: sign, two integer bits,
// four fraction bits. The sign of the product is the XOR of the operand signs; the
// magnitude is the 12-bit product of the two 6-bit magnitudes shifted right by four
// (truncated toward zero) and saturated at 63/16. A zero product is given the + sign.
// Purely combinational.
//
// The paper names a seven-bit sign-magnitude multiplier; truncation, saturation and the
// sign of zero are this design's choices.
module sm_multiplier
  import ngdbf_pkg::*;
(
  input  sm7_t a,
  input  sm7_t b,
  output sm7_t c
);

  logic [2*(Q-1)-1:0] prod;
  logic [2*(Q-1)-1:0] scaled;
  logic [Q-2:0]       mag;

  always_comb begin
    prod   = a[Q-2:0] * b[Q-2:0];
    scaled = prod >> FRAC;
    mag    = (scaled > {{(Q-1){1'b0}}, SM_MAG_MAX}) ? SM_MAG_MAX : scaled[Q-2:0];
    c      = {(a[Q-1] ^ b[Q-1]) & (mag != '0), mag};
  end

endmodule
