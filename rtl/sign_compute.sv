// sign_compute: sign of the sum of two 7-bit sign-magnitude numbers.
//
// The last stage of a symbol node. Input a is the noise sample minus the inversion
// threshold, input b is x_k*y_k + w*sum(s_i); the output neg is 1 when a + b < 0, i.e.
// when the inversion function E_k lies below the threshold and the decision must flip.
// Only the sign is needed, so the block compares magnitudes instead of forming the sum:
// with equal signs the common sign wins (a zero sum of two "-0" operands counts as not
// negative), otherwise the sign of the larger magnitude wins and a tie gives 0.
// Purely combinational.
//
// The paper gives the block's purpose (sign only, no magnitude); the comparator form is
// this design's.
module sign_compute
  import ngdbf_pkg::*;
(
  input  sm7_t a,
  input  sm7_t b,
  output logic neg
);

  always_comb begin
    if (a[Q-1] == b[Q-1])
      neg = a[Q-1] & ((a[Q-2:0] != '0) | (b[Q-2:0] != '0));
    else if (a[Q-2:0] > b[Q-2:0])
      neg = a[Q-1];
    else if (b[Q-2:0] > a[Q-2:0])
      neg = b[Q-1];
    else
      neg = 1'b0;
  end

endmodule
