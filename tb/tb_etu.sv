// tb_etu: ChkOut must be 0 only when all 384 syndromes are 0 (every check satisfied).
// Applies all-zero, every single-one pattern and random sparse patterns.
module tb_etu;
  logic [383:0] s;
  logic chk_out;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  etu #(.M(384)) dut (.s, .chk_out);

  task automatic check_one(input logic [383:0] v);
    logic any;
    s = v;
    #1;
    any = 1'b0;
    for (int k = 0; k < 384; k++) if (v[k]) any = 1'b1;
    checks++;
    if (chk_out !== any) begin
      failures++;
      $display("FAIL chk_out=%b expected %b", chk_out, any);
    end
  endtask

  initial begin
    logic [383:0] v;
    check_one('0);
    for (int k = 0; k < 384; k++) begin
      v = '0; v[k] = 1'b1;
      check_one(v);
    end
    for (int n = 0; n < 500; n++) begin
      v = '0;
      for (int k = 0; k < 384; k++) v[k] = ($urandom_range(0, 399) == 0);
      check_one(v);
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
