// ngdbf_ref_pkg: integer reference model of the NGDBF decoder arithmetic, used by the
// testbenches to compute expected values independently of the RTL.
//
// A 7-bit sign-magnitude value is turned into a signed integer count of 1/16 steps,
// the algorithm step is done on integers, and the result is turned back. The model
// also builds the parity-check matrix with its own GF(64) log table.
package ngdbf_ref_pkg;

  function automatic int sm_val(input logic [6:0] v);
    return v[6] ? -int'(v[5:0]) : int'(v[5:0]);
  endfunction

  function automatic int clamp63(input int v);
    return (v > 63) ? 63 : (v < -63) ? -63 : v;
  endfunction

  function automatic logic [6:0] sm_enc(input int v);
    int m;
    m = clamp63(v);
    m = (m < 0) ? -m : m;
    return {(v < 0) && (m != 0), 6'(m)};
  endfunction

  // Noise register content for one Noisein sample: (noise*std truncated) - theta,
  // i.e. + theta input, with the integer MSB removed.
  function automatic logic [5:0] nuu_sample(input logic [6:0] noise, std, theta);
    int p, m;
    logic [6:0] s7;
    p  = sm_val(noise) * sm_val(std);
    m  = ((p < 0) ? -p : p) / 16;
    m  = (m > 63) ? 63 : m;
    s7 = sm_enc(clamp63(((p < 0) ? -m : m) + sm_val(theta)));
    return {s7[6], s7[4:0]};
  endfunction

  // Next decision of one symbol node.
  function automatic logic sym_next(input logic x, input logic [6:0] y, input logic [5:0] syn,
                                    input logic [5:0] noise, input logic ff, input logic en);
    int xy, cnt, ss, part, nz;
    logic neg;
    xy   = x ? -sm_val(y) : sm_val(y);
    cnt  = $countones(syn);
    ss   = ((6 - 2 * cnt) * 16) / 6;      // truncates toward zero
    part = clamp63(xy + ss);
    nz   = noise[5] ? -int'(noise[4:0]) : int'(noise[4:0]);
    neg  = (part + nz) < 0;
    if (en) return y[6];
    return x ^ (ff & neg);
  endfunction

  // GF(64) with x^6 + x + 1: exp table built by repeated multiplication by alpha.
  function automatic int gf_exp(input int e);
    int v;
    v = 1;
    for (int k = 0; k < e % 63; k++) begin
      v = v * 2;
      if (v >= 64) v = (v - 64) ^ 3;
    end
    return v;
  endfunction

  // Row of H joined to column col in bundle i (col = 64*j + beta).
  function automatic int ref_row(input int col, input int i);
    return 64 * i + ((col % 64) ^ gf_exp(i + col / 64));
  endfunction

endpackage
