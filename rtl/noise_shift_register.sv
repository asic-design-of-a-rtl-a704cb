// noise_shift_register: the NREG-stage chain of 6-bit noise registers.
//
// Register 1 (regs[0]) loads d; register r+1 loads register r; every register shifts on
// every rising clock edge. q_last is the output of the last register (register 2648),
// which the noise update unit feeds back to register 1 in the decoding phase, and taps
// are the outputs of registers 1..N, which go to symbol nodes 1..N. All registers reset
// to 0 on rst_n low (asynchronous), as the paper draws a reset pin on each.
//
// NREG = 2648 and N = 2048 are the paper's; the reset value is this design's choice.
module noise_shift_register
  import ngdbf_pkg::*;
#(
  parameter int unsigned N    = N_SYM,
  parameter int unsigned NREG = N_NREG
) (
  input  logic           clk,
  input  logic           rst_n,
  input  sm6_t           d,
  output sm6_t           q_last,
  output sm6_t [N-1:0]   taps
);

  sm6_t regs [NREG];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int r = 0; r < NREG; r++) regs[r] <= '0;
    end else begin
      regs[0] <= d;
      for (int r = 1; r < NREG; r++) regs[r] <= regs[r-1];
    end

  assign q_last = regs[NREG-1];

  for (genvar k = 0; k < N; k++) begin : g_tap
    assign taps[k] = regs[k];
  end

  initial assert (NREG >= N) else $error("noise_shift_register: NREG must be at least N");

endmodule
