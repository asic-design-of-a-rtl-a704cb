// sm_adder: 7-bit sign-magnitude adder.
//
// Used twice in the decoder: in the noise update unit it adds the (negated) inversion
// threshold to each scaled noise sample, and in every symbol node it adds x_k*y_k to the
// scaled syndrome sum. Equal signs add the magnitudes (saturating at 63/16); different
// signs subtract the smaller magnitude from the larger and take the larger operand's
// sign. A zero result is given the + sign. Purely combinational.
//
// The paper names a seven-bit sign-magnitude adder; saturation and the sign of zero are
// this design's choices.
module sm_adder
  import ngdbf_pkg::*;
(
  input  sm7_t a,
  input  sm7_t b,
  output sm7_t c
);

  logic [Q-1:0] sum;   // one bit wider than a magnitude
  logic [Q-2:0] mag;
  logic         sgn;

  always_comb begin
    if (a[Q-1] == b[Q-1]) begin
      sum = {1'b0, a[Q-2:0]} + {1'b0, b[Q-2:0]};
      mag = sum[Q-1] ? SM_MAG_MAX : sum[Q-2:0];
      sgn = a[Q-1];
    end else if (a[Q-2:0] >= b[Q-2:0]) begin
      sum = '0;
      mag = a[Q-2:0] - b[Q-2:0];
      sgn = a[Q-1];
    end else begin
      sum = '0;
      mag = b[Q-2:0] - a[Q-2:0];
      sgn = b[Q-1];
    end
    c = {sgn & (mag != '0), mag};
  end

endmodule
