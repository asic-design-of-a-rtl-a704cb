// interleaver: the fixed routing between symbol nodes and check nodes.
//
// The decoder is fully parallel, so the interleaver is wiring only: it carries each of
// the N decisions to the six check nodes that hold it and each of the 384 syndromes
// back to the DC symbol nodes it covers, following the parity-check matrix H. H is not
// stored; its connections are computed at elaboration by ngdbf_pkg::h_row / h_col
// (an RS-LDPC construction over GF(64), see ngdbf_pkg):
//   cn_in[r][j] = x[h_col(r, j)]     decision of block j seen by check r
//   syn[c][i]   = s[h_row(c, i)]     syndrome of bundle i seen by symbol c
// The paper describes the interleaver only by what it does; the matrix is the code's,
// and here it is a generated matrix of the code's size and degrees, not the 10GBASE-T
// standard's published one. DC (number of 64-column blocks) defaults to 32 and can be
// reduced for small test instances. Purely combinational.
module interleaver
  import ngdbf_pkg::*;
#(
  parameter int unsigned DC = D_C,
  parameter int unsigned N  = GF_Q * DC
) (
  input  logic [N-1:0]               x,
  output logic [M_CHK-1:0][DC-1:0]   cn_in,
  input  logic [M_CHK-1:0]           s,
  output logic [N-1:0][D_V-1:0]      syn
);

  for (genvar r = 0; r < M_CHK; r++) begin : g_to_chk
    for (genvar j = 0; j < DC; j++) begin : g_blk
      localparam int unsigned COL = h_col(r, j);
      assign cn_in[r][j] = x[COL];
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_to_sym
    for (genvar i = 0; i < D_V; i++) begin : g_bnd
      localparam int unsigned ROW = h_row(c, i);
      assign syn[c][i] = s[ROW];
    end
  end

endmodule
