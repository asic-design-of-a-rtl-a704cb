// ngdbf_pkg: constants, number formats and parity-check-matrix functions shared by
// the NGDBF (noisy gradient descent bit flip) decoder for the 10GBASE-T LDPC code.
//
// Numbers are sign-magnitude. A 7-bit value (sm7_t) holds a sign bit, two integer
// bits and four fraction bits, so it spans -3.9375..+3.9375 in steps of 1/16. A noise
// sample is stored with its integer MSB removed (sm6_t: sign, one integer bit, four
// fraction bits). A decision bit is 0 for +1 and 1 for -1, which is also the sign bit
// of a sign-magnitude number.
//
// The parity-check matrix H is generated, not stored. The code is a regular (6,32)
// RS-LDPC code of 2048 columns and 384 rows. Columns are numbered 64*j + beta
// (block j = 0..31, beta an element of GF(64) written as a 6-bit vector) and rows
// 64*i + gamma (bundle i = 0..5). Column (j,beta) belongs to row (i, beta + alpha^(i+j)),
// where GF(64) is built on the primitive polynomial x^6 + x + 1. Each column then has
// one 1 in each bundle, each row one 1 in each block, and two columns never share two
// rows (no 4-cycles). This is the same construction family as the standard's matrix,
// with the same size and degrees, but not its published bit pattern.
package ngdbf_pkg;

  localparam int unsigned Q      = 7;     // sample width, sign-magnitude
  localparam int unsigned FRAC   = 4;     // fraction bits
  localparam int unsigned N_SYM  = 2048;  // symbol nodes (code length)
  localparam int unsigned M_CHK  = 384;   // check nodes
  localparam int unsigned D_V    = 6;     // checks per symbol
  localparam int unsigned D_C    = 32;    // symbols per check
  localparam int unsigned N_NREG = 2648;  // noise shift-register stages
  localparam int unsigned GF_Q   = 64;    // GF(2^6): symbols per block, checks per bundle

  typedef logic [Q-1:0] sm7_t;   // {sign, int[1:0], frac[3:0]}
  typedef logic [Q-2:0] sm6_t;   // {sign, int[0], frac[3:0]}

  localparam logic [Q-2:0] SM_MAG_MAX = '1;  // 63/16 = 3.9375

  // alpha^e in GF(64), x^6 + x + 1
  function automatic logic [5:0] gf64_pow(input int unsigned e);
    logic [5:0] v;
    v = 6'd1;
    for (int unsigned k = 0; k < (e % 63); k++)
      v = v[5] ? {v[4:0], 1'b0} ^ 6'b000011 : {v[4:0], 1'b0};
    return v;
  endfunction

  // Row (check node) that column col meets in bundle i
  function automatic int unsigned h_row(input int unsigned col, input int unsigned i);
    int unsigned j;
    logic [5:0] beta, gamma;
    j     = col / GF_Q;
    beta  = 6'(col % GF_Q);
    gamma = beta ^ gf64_pow(i + j);
    return i * GF_Q + int'(gamma);
  endfunction

  // Column (symbol node) that row meets in block j
  function automatic int unsigned h_col(input int unsigned row, input int unsigned j);
    int unsigned i;
    logic [5:0] gamma, beta;
    i     = row / GF_Q;
    gamma = 6'(row % GF_Q);
    beta  = gamma ^ gf64_pow(i + j);
    return j * GF_Q + int'(beta);
  endfunction

endpackage
