// cnu: check node unit, the M check nodes and the early termination unit.
//
// Check node i receives its DC decisions in cn_in[i] (block order 0..DC-1, as delivered
// by the interleaver) and produces syndrome s[i] (1 = unsatisfied). The ETU ORs all
// syndromes into chk_out. Purely combinational. M is fixed by the code at 384 (six
// bundles of 64 checks); DC defaults to 32 and is a parameter only so that smaller test
// instances can be built.
module cnu
  import ngdbf_pkg::*;
#(
  parameter int unsigned DC = D_C
) (
  input  logic [M_CHK-1:0][DC-1:0] cn_in,
  output logic [M_CHK-1:0]         s,
  output logic                     chk_out
);

  for (genvar i = 0; i < M_CHK; i++) begin : g_chk
    check_node #(.DC(DC)) u_chk (.x(cn_in[i]), .s(s[i]));
  end

  etu #(.M(M_CHK)) u_etu (.s(s), .chk_out(chk_out));

endmodule
