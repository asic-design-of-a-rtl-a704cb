// tb_scaled_syndrome_sum: all 64 syndrome patterns. The expected output is
// (6 - 2*count)/6 with count the number of unsatisfied checks, in 1/16 steps truncated
// toward zero, as a 7-bit sign-magnitude number.
module tb_scaled_syndrome_sum;
  import ngdbf_pkg::*;

  logic [5:0] syn;
  sm7_t sout;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  scaled_syndrome_sum dut (.syn, .sout);

  initial begin
    int cnt, num, mag;
    logic [6:0] exp_v;
    for (int p = 0; p < 64; p++) begin
      syn = 6'(p);
      #1;
      cnt = $countones(syn);
      num = 6 - 2 * cnt;
      mag = (16 * ((num < 0) ? -num : num)) / 6;
      exp_v = {num < 0, 6'(mag)};
      checks++;
      if (sout !== exp_v) begin
        failures++;
        $display("FAIL syn=%b sout=%b expected %b", syn, sout, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
