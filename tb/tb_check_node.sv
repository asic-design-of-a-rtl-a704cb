// tb_check_node: random and corner 32-bit decision vectors; the syndrome must be 1
// exactly when an odd number of the neighbouring decisions are -1.
module tb_check_node;
  logic [31:0] x;
  logic s;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  check_node #(.DC(32)) dut (.x, .s);

  task automatic check_one(input logic [31:0] v);
    int ones;
    x = v;
    #1;
    ones = 0;
    for (int k = 0; k < 32; k++) ones += int'(v[k]);
    checks++;
    if (s !== logic'(ones % 2)) begin
      failures++;
      $display("FAIL x=%h s=%b", v, s);
    end
  endtask

  initial begin
    check_one('0);
    check_one('1);
    for (int k = 0; k < 32; k++) check_one(32'd1 << k);
    for (int n = 0; n < 2000; n++) check_one($urandom);
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
