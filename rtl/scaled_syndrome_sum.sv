// scaled_syndrome_sum: weighted syndrome term w * sum(s_i) of a symbol node, w = 1/6.
//
// Each of the six neighbouring checks reports 1 when unsatisfied (bipolar s_i = -1) and
// 0 when satisfied (s_i = +1). A count module adds the six bits with three full adders
// and a half adder: FA1 takes S0..S2, FA2 takes S3..S5, HA1 adds the two sum bits and
// gives C0, FA3 adds the two FA carries and the HA carry and gives C1 (sum) and C2
// (carry). The count c maps to (6 - 2c)/6 in the 7-bit sign-magnitude format:
//
//   count : 0        1        2        3        4        5        6
//   value : +1       +0.625   +0.3125  0        -0.3125  -0.625   -1
//   bits  : 0010000  0001010  0000101  0000000  1000101  1001010  1010000
//
// The adder tree and the table follow the paper; the table is written as a case
// statement rather than as the paper's gate netlist. Purely combinational.
module scaled_syndrome_sum
  import ngdbf_pkg::*;
(
  input  logic [D_V-1:0] syn,
  output sm7_t           sout
);

  logic fa1_s, fa1_c, fa2_s, fa2_c, ha1_s, ha1_c, fa3_s, fa3_c;
  logic [2:0] count;

  always_comb begin
    {fa1_c, fa1_s} = 2'(syn[0]) + 2'(syn[1]) + 2'(syn[2]);
    {fa2_c, fa2_s} = 2'(syn[3]) + 2'(syn[4]) + 2'(syn[5]);
    {ha1_c, ha1_s} = 2'(fa1_s) + 2'(fa2_s);
    {fa3_c, fa3_s} = 2'(fa1_c) + 2'(ha1_c) + 2'(fa2_c);
    count = {fa3_c, fa3_s, ha1_s};   // {C2, C1, C0}
    unique case (count)
      3'd0:    sout = 7'b0010000;
      3'd1:    sout = 7'b0001010;
      3'd2:    sout = 7'b0000101;
      3'd3:    sout = 7'b0000000;
      3'd4:    sout = 7'b1000101;
      3'd5:    sout = 7'b1001010;
      3'd6:    sout = 7'b1010000;
      default: sout = 7'b0000000;   // a count of 7 cannot occur
    endcase
  end

endmodule
