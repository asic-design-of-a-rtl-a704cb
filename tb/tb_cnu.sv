// tb_cnu: check node unit with 384 checks of 32 inputs. Random decision patterns
// (dense and sparse, plus all-zero) are applied; every syndrome must be the parity of
// its check's inputs and ChkOut must be 0 exactly when all parities are even.
module tb_cnu;
  import ngdbf_pkg::*;

  logic [M_CHK-1:0][D_C-1:0] cn_in;
  logic [M_CHK-1:0] s;
  logic chk_out;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  cnu dut (.cn_in, .s, .chk_out);

  task automatic apply(input int density);  // density: percent of ones, 0 = all zero
    logic any, par;
    for (int r = 0; r < M_CHK; r++)
      for (int k = 0; k < D_C; k++)
        cn_in[r][k] = (density != 0) && ($urandom_range(0, 99) < density);
    #1;
    any = 1'b0;
    for (int r = 0; r < M_CHK; r++) begin
      par = 1'b0;
      for (int k = 0; k < D_C; k++) par ^= cn_in[r][k];
      any |= par;
      checks++;
      if (s[r] !== par) begin
        failures++;
        if (failures < 10) $display("FAIL check %0d s=%b expected %b", r, s[r], par);
      end
    end
    checks++;
    if (chk_out !== any) begin
      failures++;
      $display("FAIL chk_out=%b expected %b", chk_out, any);
    end
  endtask

  initial begin
    apply(0);
    for (int n = 0; n < 20; n++) apply(50);
    for (int n = 0; n < 20; n++) apply(1);
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
