// tb_sign_compute: exhaustive check that sign_compute reports exactly the pairs of
// 7-bit sign-magnitude operands whose integer sum is negative.
module tb_sign_compute;
  import ngdbf_pkg::*;

  sm7_t a, b;
  logic neg;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sign_compute dut (.a, .b, .neg);

  function automatic int val(input logic [6:0] v);
    return v[6] ? -int'(v[5:0]) : int'(v[5:0]);
  endfunction

  initial begin
    for (int i = 0; i < 128; i++)
      for (int k = 0; k < 128; k++) begin
        a = 7'(i); b = 7'(k);
        #1;
        checks++;
        if (neg !== (val(a) + val(b) < 0)) begin
          failures++;
          if (failures < 10) $display("FAIL a=%b b=%b neg=%b", a, b, neg);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
