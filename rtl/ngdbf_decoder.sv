// ngdbf_decoder: fully parallel noisy gradient descent bit flip (M-NGDBF) decoder for
// the (2048,1723) regular (6,32) LDPC code of 10GBASE-T Ethernet.
//
// Blocks: the noise update unit (NUU) prepares and circulates noise samples, the symbol
// node unit (SNU) holds the 2048 decisions and decides which to flip, the interleaver
// routes decisions to the 384 check nodes and syndromes back, and the check node unit
// (CNU) computes the syndromes and, in its early termination unit, ChkOut.
//
// Operation (controls as in the paper's control table):
//   Reset low            all registers cleared.
//   FirstFrame=0         start-up phase: one Noisein sample per cycle for NREG = 2648
//                        cycles fills the noise shift register.
//   FirstFrame=1,Enable=1  a frame is loaded: every decision becomes sign(y_k).
//   FirstFrame=1,Enable=0  one decoding iteration per clock cycle (check nodes first,
//                        then symbol nodes, all within the cycle).
//   ChkOut=0             the decisions currently on Decisions form a codeword.
// ChannelSamples must be held for the whole frame; the frame source decides when to give
// up (the paper's limit is 600 iterations) and when to load the next frame.
//
// Parameters: DC, the number of 64-column blocks (32: N = 2048 columns), and NREG, the
// noise register count (2648). Both default to the paper's values and are exposed only
// so that smaller test instances can be built. The parity-check matrix is a generated
// RS-LDPC matrix of the code's size and degrees (see ngdbf_pkg), not the standard's
// published table.
module ngdbf_decoder
  import ngdbf_pkg::*;
#(
  parameter int unsigned DC   = D_C,
  parameter int unsigned N    = GF_Q * DC,
  parameter int unsigned NREG = N_NREG
) (
  input  logic            Clock,
  input  logic            Reset,           // active low
  input  logic            FirstFrame,
  input  logic            Enable,
  input  sm7_t  [N-1:0]   ChannelSamples,
  input  sm7_t            Noisein,
  input  sm7_t            StdDev,
  input  sm7_t            Theta,
  output logic  [N-1:0]   Decisions,
  output logic            ChkOut
);

  sm6_t [N-1:0]                noise;
  logic [N-1:0][D_V-1:0]       syn;
  logic [M_CHK-1:0][DC-1:0]    cn_in;
  logic [M_CHK-1:0]            s;

  nuu #(.N(N), .NREG(NREG)) u_nuu (
    .clk(Clock), .rst_n(Reset), .first_frame(FirstFrame),
    .noise_in(Noisein), .std_dev(StdDev), .theta(Theta), .noise(noise)
  );

  snu #(.N(N)) u_snu (
    .clk(Clock), .rst_n(Reset), .first_frame(FirstFrame), .enable(Enable),
    .y(ChannelSamples), .syn(syn), .noise(noise), .x(Decisions)
  );

  interleaver #(.DC(DC), .N(N)) u_ilv (
    .x(Decisions), .cn_in(cn_in), .s(s), .syn(syn)
  );

  cnu #(.DC(DC)) u_cnu (
    .cn_in(cn_in), .s(s), .chk_out(ChkOut)
  );

  initial assert (N == GF_Q * DC) else $error("ngdbf_decoder: N must equal 64*DC");

endmodule
