// tb_snu: symbol node unit of 16 nodes. Each node gets its own random sample,
// syndromes and noise; all nodes must follow the integer reference model every cycle,
// which shows that inputs and outputs are wired to the right node index.
module tb_snu;
  import ngdbf_pkg::*;
  import ngdbf_ref_pkg::*;

  localparam int N = 16;
  logic clk = 0, rst_n = 0, first_frame = 0, enable = 0;
  sm7_t [N-1:0] y;
  logic [N-1:0][5:0] syn;
  sm6_t [N-1:0] noise;
  logic [N-1:0] x, x_exp;
  int checks = 0, failures = 0, flips = 0;
  always #5 clk = ~clk;

  snu #(.N(N)) dut (.clk, .rst_n, .first_frame, .enable, .y, .syn, .noise, .x);

  initial begin
    y = '0; syn = '0; noise = '0; x_exp = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      first_frame = (n >= 20);
      enable = (n == 20) || ((n > 20) && ($urandom_range(0, 29) == 0));
      for (int k = 0; k < N; k++) begin
        if (enable) y[k] = 7'($urandom);
        syn[k] = 6'($urandom);
        noise[k] = 6'($urandom);
      end
      @(posedge clk);
      for (int k = 0; k < N; k++) begin
        logic nx;
        nx = sym_next(x_exp[k], y[k], syn[k], noise[k], first_frame, enable);
        if (first_frame && !enable && nx != x_exp[k]) flips++;
        x_exp[k] = nx;
      end
      #1;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (x[k] !== x_exp[k]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d node %0d x=%b exp=%b", n, k, x[k], x_exp[k]);
          x_exp[k] = x[k];
        end
      end
    end
    checks++;
    if (flips == 0) failures++;
    $display("flips=%0d", flips);
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
