// tb_ngdbf_decoder: end-to-end test of the full-size decoder (2048 symbols, 384
// checks, 2648 noise registers), with the top at its default parameters.
//
// The testbench plays the frame source: it holds Reset low for two cycles, runs the
// start-up phase for exactly 2648 cycles with unit-variance Gaussian samples on Noisein
// (sum of 12 uniforms, 1/16 steps), then loads frames (FirstFrame=1, Enable=1 for one
// cycle) and lets the decoder iterate, one iteration per cycle, until ChkOut falls or
// 600 iterations have passed. The next frame is loaded in the cycle the previous one
// ends.
//
// Frames are codewords of the generated parity-check matrix: every check has exactly
// one column in each 64-column block, so any even number of whole blocks set to 1 is a
// codeword. They are sent over a BPSK/AWGN channel at Eb/N0 = 4.55 dB and 5.5 dB
// (rate 0.841), quantized to 1/16 and saturated at 47/16 (2.95 rounded down). Three
// last frames of pure noise cannot converge and run into the iteration limit; they
// also carry the decoding phase past 2648 cycles, one full turn of the noise ring.
//
// Every cycle the decisions, ChkOut and all 2048 noise outputs of the NUU are compared
// with an integer model of the whole decoder (ngdbf_ref_pkg). Counted mechanisms, each
// required at least once: start-up cycles, frame loads, bit flips, convergence,
// iteration-limit hits, full rotations of the noise ring. Average iterations per SNR
// are printed.
module tb_ngdbf_decoder;
  import ngdbf_pkg::*;
  import ngdbf_ref_pkg::*;

  localparam int N = 2048, M = 384, NREG = 2648, MAX_ITER = 600;
  localparam int FRAMES_PER_SNR = 50;
  localparam logic [6:0] STD_DEV = 7'b0000111;   // 0.4375
  localparam logic [6:0] THETA   = 7'b0001001;   // -theta = +0.5625 (theta = -0.55)

  logic Clock = 0, Reset = 0, FirstFrame = 0, Enable = 0;
  sm7_t [N-1:0] ChannelSamples;
  sm7_t Noisein, StdDev, Theta;
  logic [N-1:0] Decisions;
  logic ChkOut;
  always #5 Clock = ~Clock;

  ngdbf_decoder dut (.Clock, .Reset, .FirstFrame, .Enable, .ChannelSamples,
                     .Noisein, .StdDev, .Theta, .Decisions, .ChkOut);

  // reference state
  int rows_of [N][6];
  logic [5:0] m_noise [NREG];
  logic [N-1:0] m_x;
  int checks = 0, failures = 0;
  int n_startup = 0, n_loads = 0, n_flips = 0, n_conv = 0, n_limit = 0, n_wraps = 0;
  int n_correct = 0, phase2_cycles = 0;

  function automatic real gauss();
    real acc;
    acc = 0.0;
    for (int k = 0; k < 12; k++) acc += real'($urandom_range(0, 65535)) / 65536.0;
    return acc - 6.0;
  endfunction

  function automatic logic [6:0] quant(input real v, input int sat);
    int q;
    q = int'($floor(v * 16.0 + 0.5));
    if (q > sat) q = sat;
    if (q < -sat) q = -sat;
    return {q < 0, 6'((q < 0) ? -q : q)};
  endfunction

  // stops the run after 20 failures: a broken decoder would otherwise spend 600
  // iterations on every frame
  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
    if (failures >= 20) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  function automatic logic model_chk();
    logic [M-1:0] s;
    s = '0;
    for (int c = 0; c < N; c++)
      for (int i = 0; i < 6; i++) s[rows_of[c][i]] ^= m_x[c];
    return |s;
  endfunction

  // one clock edge of the model, given the inputs applied in this cycle
  task automatic model_step(input logic [6:0] nin);
    logic [M-1:0] s;
    logic [N-1:0] nx;
    logic [5:0] last;
    s = '0;
    for (int c = 0; c < N; c++)
      for (int i = 0; i < 6; i++) s[rows_of[c][i]] ^= m_x[c];
    for (int c = 0; c < N; c++) begin
      logic [5:0] sy;
      for (int i = 0; i < 6; i++) sy[i] = s[rows_of[c][i]];
      nx[c] = sym_next(m_x[c], ChannelSamples[c], sy, m_noise[c], FirstFrame, Enable);
    end
    if (FirstFrame && !Enable) for (int c = 0; c < N; c++) if (nx[c] != m_x[c]) n_flips++;
    m_x = nx;
    last = m_noise[NREG-1];
    for (int r = NREG - 1; r > 0; r--) m_noise[r] = m_noise[r-1];
    m_noise[0] = FirstFrame ? last : nuu_sample(nin, StdDev, Theta);
  endtask

  task automatic compare();
    checks++;
    if (Decisions !== m_x) fail("Decisions differ from model");
    checks++;
    if (ChkOut !== model_chk()) fail($sformatf("ChkOut=%b expected %b", ChkOut, model_chk()));
    for (int c = 0; c < N; c++) begin
      checks++;
      if (dut.u_nuu.noise[c] !== m_noise[c]) begin
        fail($sformatf("noise output %0d = %b expected %b", c, dut.u_nuu.noise[c], m_noise[c]));
        break;
      end
    end
  endtask

  task automatic tick(input logic [6:0] nin);
    Noisein = nin;
    @(posedge Clock);
    model_step(nin);
    if (FirstFrame) begin
      phase2_cycles++;
      if (phase2_cycles % NREG == 0) n_wraps++;
    end
    #1 compare();
  endtask

  // build a frame: codeword of random whole blocks (even count) plus channel noise
  task automatic make_frame(input real sigma, input bit pure_noise, output logic [N-1:0] cw);
    logic [31:0] blocks;
    blocks = $urandom;
    if (^blocks) blocks[0] = ~blocks[0];
    for (int c = 0; c < N; c++) begin
      cw[c] = blocks[c / 64];
      if (pure_noise) ChannelSamples[c] = quant(gauss(), 47);
      else ChannelSamples[c] = quant((cw[c] ? -1.0 : 1.0) + sigma * gauss(), 47);
    end
  endtask

  // decode one frame: load cycle, then iterate until ChkOut = 0 or the limit
  task automatic run_frame(input real sigma, input bit pure_noise, output int iters);
    logic [N-1:0] cw;
    make_frame(sigma, pure_noise, cw);
    Enable = 1'b1;
    tick(7'($urandom));
    Enable = 1'b0;
    n_loads++;
    iters = 0;
    while (ChkOut && iters < MAX_ITER) begin
      tick(7'($urandom));
      iters++;
    end
    if (!ChkOut) begin
      n_conv++;
      if (Decisions == cw) n_correct++;
      else if (!pure_noise) $display("note: frame converged to another codeword");
    end else n_limit++;
  endtask

  initial begin
    real snr_db [2] = '{4.55, 5.5};
    real sigma;
    int it, total;
    for (int c = 0; c < N; c++) for (int i = 0; i < 6; i++) rows_of[c][i] = ref_row(c, i);
    for (int r = 0; r < NREG; r++) m_noise[r] = '0;
    m_x = '0;
    ChannelSamples = '0; Noisein = '0; StdDev = STD_DEV; Theta = THETA;
    repeat (2) @(posedge Clock);
    #1 compare();
    Reset = 1'b1;
    // start-up phase: exactly NREG cycles
    for (int n = 0; n < NREG; n++) begin
      tick(quant(gauss(), 63));
      n_startup++;
    end
    // the first sample is now in the last register and register 1 holds the newest one
    FirstFrame = 1'b1;
    for (int p = 0; p < 2; p++) begin
      sigma = $sqrt(1.0 / (2.0 * 0.841 * (10.0 ** (snr_db[p] / 10.0))));
      total = 0;
      for (int f = 0; f < FRAMES_PER_SNR; f++) begin
        run_frame(sigma, 1'b0, it);
        total += it;
      end
      $display("Eb/N0 %0.2f dB: %0d frames, average iterations %0.2f", snr_db[p], FRAMES_PER_SNR,
               real'(total) / FRAMES_PER_SNR);
    end
    for (int f = 0; f < 3; f++) run_frame(0.0, 1'b1, it);
    $display("startup=%0d loads=%0d flips=%0d converged=%0d correct=%0d limit=%0d ring_wraps=%0d",
             n_startup, n_loads, n_flips, n_conv, n_correct, n_limit, n_wraps);
    checks++; if (n_startup != NREG) fail("start-up length");
    checks++; if (n_loads == 0) fail("no frame load");
    checks++; if (n_flips == 0) fail("no bit flip");
    checks++; if (n_conv == 0) fail("no convergence");
    checks++; if (n_limit == 0) fail("iteration limit never reached");
    checks++; if (n_wraps == 0) fail("noise ring never completed a rotation");
    checks++; if (n_correct < FRAMES_PER_SNR) fail("too few frames decoded to the sent codeword");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge Clock);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
