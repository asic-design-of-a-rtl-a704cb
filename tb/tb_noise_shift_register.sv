// tb_noise_shift_register: a 12-stage chain with 8 taps. Random 6-bit words are
// shifted in; a software copy of the chain predicts every tap and the last stage each
// cycle. Also checks that reset clears all stages.
module tb_noise_shift_register;
  import ngdbf_pkg::*;

  localparam int N = 8, NREG = 12;
  logic clk = 0, rst_n = 0;
  sm6_t d, q_last;
  sm6_t [N-1:0] taps;
  logic [5:0] model [NREG];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  noise_shift_register #(.N(N), .NREG(NREG)) dut (.clk, .rst_n, .d, .q_last, .taps);

  task automatic compare();
    for (int k = 0; k < N; k++) begin
      checks++;
      if (taps[k] !== model[k]) begin
        failures++;
        if (failures < 10) $display("FAIL tap %0d = %h expected %h", k, taps[k], model[k]);
      end
    end
    checks++;
    if (q_last !== model[NREG-1]) begin
      failures++;
      if (failures < 10) $display("FAIL q_last = %h expected %h", q_last, model[NREG-1]);
    end
  endtask

  initial begin
    d = '0;
    for (int r = 0; r < NREG; r++) model[r] = '0;
    repeat (2) @(posedge clk);
    #1 compare();
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      d = 6'($urandom);
      @(posedge clk);
      for (int r = NREG - 1; r > 0; r--) model[r] = model[r-1];
      model[0] = d;
      #1 compare();
    end
    rst_n = 0;
    for (int r = 0; r < NREG; r++) model[r] = '0;
    #1 compare();
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
