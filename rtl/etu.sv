// etu: early termination unit.
//
// ORs all M syndromes (M = 384). chk_out is 1 while any parity check is unsatisfied and
// falls to 0 in the cycle in which the current decisions form a codeword, which tells
// the frame source to take the decisions and load the next frame. Purely combinational,
// as in the paper.
module etu #(
  parameter int unsigned M = 384
) (
  input  logic [M-1:0] s,
  output logic         chk_out
);

  assign chk_out = |s;

endmodule
