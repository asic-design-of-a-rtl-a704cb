// tb_sm_adder: exhaustive check of the 7-bit sign-magnitude adder against integer
// addition of the operand values, saturated to +/-63/16, with + sign for zero.
module tb_sm_adder;
  import ngdbf_pkg::*;

  sm7_t a, b, c;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sm_adder dut (.a, .b, .c);

  function automatic int val(input logic [6:0] v);
    return v[6] ? -int'(v[5:0]) : int'(v[5:0]);
  endfunction

  function automatic logic [6:0] enc(input int v);
    int m;
    m = (v < 0) ? -v : v;
    if (m > 63) m = 63;
    return {(v < 0) && (m != 0), 6'(m)};
  endfunction

  initial begin
    for (int i = 0; i < 128; i++)
      for (int k = 0; k < 128; k++) begin
        a = 7'(i); b = 7'(k);
        #1;
        checks++;
        if (c !== enc(val(a) + val(b))) begin
          failures++;
          if (failures < 10) $display("FAIL a=%b b=%b c=%b", a, b, c);
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
