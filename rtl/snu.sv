// snu: symbol node unit, the array of N symbol nodes working in parallel.
//
// Node k takes channel sample y[k], its six syndromes syn[k] (in bundle order
// 0..5, as delivered by the interleaver) and noise sample noise[k] from register k+1 of
// the noise update unit, and drives decision x[k]. All nodes share the clock, reset and
// the two phase controls. One iteration per clock cycle. N defaults to the code length,
// 2048; it is a parameter only so that smaller test instances can be built.
module snu
  import ngdbf_pkg::*;
#(
  parameter int unsigned N = N_SYM
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   first_frame,
  input  logic                   enable,
  input  sm7_t         [N-1:0]   y,
  input  logic [N-1:0][D_V-1:0]  syn,
  input  sm6_t         [N-1:0]   noise,
  output logic         [N-1:0]   x
);

  for (genvar k = 0; k < N; k++) begin : g_node
    symbol_node u_node (
      .clk, .rst_n, .first_frame, .enable,
      .y(y[k]), .syn(syn[k]), .noise(noise[k]), .x(x[k])
    );
  end

endmodule
