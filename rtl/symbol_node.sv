// symbol_node: one symbol (variable) node of the fully parallel NGDBF decoder.
//
// Every clock cycle is one decoding iteration. The node evaluates
//     E_k - theta = x_k*y_k + w*sum(s_i) + q_k - theta
// and flips its decision x_k when the result is negative:
//   * XOR1 + Concat: x_k*y_k is y_k with its sign bit XORed with the decision bit.
//   * scaled_syndrome_sum turns the six incoming syndromes into w*sum(s_i).
//   * sm_adder adds the two.
//   * The 6-bit noise sample from the noise update unit already holds q_k - theta with
//     its integer MSB dropped; a 0 is put back in that position ("Append 0").
//   * sign_compute gives sign(E_k - theta).
//   * Multiplexer1 (select first_frame) passes that sign in the decoding phase and 0 in
//     the start-up phase, XOR2 applies it to x_k, and Multiplexer2 (select enable) loads
//     sign(y_k) instead when a new frame is loaded.
// The decision register is the node's only state; it resets (rst_n low) to 0 (+1).
//
// Timing: y, syn and noise are sampled at the rising clock edge; x is the register
// output. y must be held for the whole frame (the node does not store it).
//
// The datapath follows the paper's symbol-node diagram. The value 0 on Multiplexer1's
// unlabelled input, the reset value and the bit encoding (0 = +1) are this design's.
module symbol_node
  import ngdbf_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           first_frame,
  input  logic           enable,
  input  sm7_t           y,
  input  logic [D_V-1:0] syn,
  input  sm6_t           noise,
  output logic           x
);

  sm7_t xy;         // x_k * y_k
  sm7_t ssum;       // w * sum(s_i)
  sm7_t partial;    // x_k*y_k + w*sum(s_i)
  sm7_t noise7;     // q_k - theta with the dropped bit restored
  logic flip_sign;  // sign(E_k - theta)
  logic flip;       // Multiplexer1 output
  logic x_new;      // XOR2 output
  logic x_d;        // Multiplexer2 output

  assign xy     = {y[Q-1] ^ x, y[Q-2:0]};
  assign noise7 = {noise[Q-2], 1'b0, noise[Q-3:0]};

  scaled_syndrome_sum u_ssum (.syn(syn), .sout(ssum));
  sm_adder            u_add  (.a(ssum), .b(xy), .c(partial));
  sign_compute        u_sign (.a(noise7), .b(partial), .neg(flip_sign));

  assign flip  = first_frame ? flip_sign : 1'b0;
  assign x_new = flip ^ x;
  assign x_d   = enable ? y[Q-1] : x_new;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) x <= 1'b0;
    else        x <= x_d;

endmodule
