// nuu: noise update unit.
//
// Prepares the perturbation term q_k - theta of every symbol node ahead of decoding,
// so that no Gaussian generator is needed on chip:
//   * Start-up phase (first_frame = 0), one sample per clock: the unit-variance sample
//     noise_in is multiplied by std_dev (sm_multiplier), theta is added (sm_adder; the
//     theta input therefore carries the negated inversion threshold, e.g. +0.5625 for
//     theta = -0.55), the integer MSB of the 7-bit sum is dropped and the 6-bit result
//     enters register 1 of the shift register. After NREG (2648) cycles every register
//     holds a sample.
//   * Decoding phase (first_frame = 1): register NREG is fed back to register 1, so the
//     samples circulate by one position per cycle and each symbol node sees a new sample
//     every iteration.
// noise[k] is the output of register k+1 and goes to symbol node k+1.
//
// Timing: inputs are sampled at the rising edge; noise_in must be valid in each of the
// NREG cycles of the start-up phase. The structure follows the paper; truncation and
// saturation inside the arithmetic and shifting in every cycle are this design's.
module nuu
  import ngdbf_pkg::*;
#(
  parameter int unsigned N    = N_SYM,
  parameter int unsigned NREG = N_NREG
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          first_frame,
  input  sm7_t          noise_in,
  input  sm7_t          std_dev,
  input  sm7_t          theta,
  output sm6_t [N-1:0]  noise
);

  sm7_t scaled;    // multiplier output
  sm7_t shifted;   // adder output
  sm6_t dropped;   // integer MSB removed
  sm6_t reg1_d;    // multiplexer output
  sm6_t last;      // register NREG output

  sm_multiplier u_mul (.a(noise_in), .b(std_dev), .c(scaled));
  sm_adder      u_add (.a(scaled),   .b(theta),   .c(shifted));

  assign dropped = {shifted[Q-1], shifted[Q-3:0]};
  assign reg1_d  = first_frame ? last : dropped;

  noise_shift_register #(.N(N), .NREG(NREG)) u_sr (
    .clk, .rst_n, .d(reg1_d), .q_last(last), .taps(noise)
  );

endmodule
