// tb_nuu: noise update unit with 12 registers and 8 outputs.
// Start-up phase: NREG random Noisein samples with random StdDev and Theta; after
// NREG cycles register r must hold the reference value of the sample that entered
// NREG-1-r cycles earlier. Decoding phase: 40 cycles of circular shifting, checked
// against a rotating software copy, so that every sample passes every output.
// Counts the wrap-around of the register chain.
module tb_nuu;
  import ngdbf_pkg::*;
  import ngdbf_ref_pkg::*;

  localparam int N = 8, NREG = 12;
  logic clk = 0, rst_n = 0, first_frame = 0;
  sm7_t noise_in, std_dev, theta;
  sm6_t [N-1:0] noise;
  logic [5:0] model [NREG];
  logic [5:0] tmp;
  int checks = 0, failures = 0, wraps = 0;
  always #5 clk = ~clk;

  nuu #(.N(N), .NREG(NREG)) dut (.clk, .rst_n, .first_frame, .noise_in, .std_dev, .theta, .noise);

  task automatic compare();
    for (int k = 0; k < N; k++) begin
      checks++;
      if (noise[k] !== model[k]) begin
        failures++;
        if (failures < 10) $display("FAIL out %0d = %b expected %b", k, noise[k], model[k]);
      end
    end
  endtask

  initial begin
    noise_in = '0; std_dev = 7'b0000111; theta = 7'b0001001;
    for (int r = 0; r < NREG; r++) model[r] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // start-up phase, several runs of operand settings
    for (int n = 0; n < 3 * NREG; n++) begin
      noise_in = 7'($urandom);
      if (n % NREG == 0) begin std_dev = 7'($urandom); theta = 7'($urandom); end
      @(posedge clk);
      for (int r = NREG - 1; r > 0; r--) model[r] = model[r-1];
      model[0] = nuu_sample(noise_in, std_dev, theta);
      #1 compare();
    end
    // decoding phase: circulate
    first_frame = 1;
    noise_in = 7'($urandom);
    for (int n = 0; n < 40; n++) begin
      @(posedge clk);
      tmp = model[NREG-1];
      for (int r = NREG - 1; r > 0; r--) model[r] = model[r-1];
      model[0] = tmp;
      if (n % NREG == NREG - 1) wraps++;
      noise_in = 7'($urandom);   // must be ignored
      #1 compare();
    end
    checks++;
    if (wraps == 0) failures++;
    $display("wraps=%0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
