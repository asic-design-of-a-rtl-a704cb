// check_node: one parity check of the decoder.
//
// XOR of the DC neighbouring decisions (DC = 32 for the 10GBASE-T code). With decision
// bits coded 0 = +1 and 1 = -1, the output is 0 when the check is satisfied (bipolar
// syndrome +1) and 1 when it is not. Purely combinational, as in the paper.
module check_node #(
  parameter int unsigned DC = 32
) (
  input  logic [DC-1:0] x,
  output logic          s
);

  assign s = ^x;

endmodule
