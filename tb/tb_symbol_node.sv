// tb_symbol_node: one symbol node driven with random channel samples, syndromes and
// noise samples through all three control states (start-up, frame load, decoding).
// Each cycle the decision register is compared with the integer reference model;
// the test also counts cycles in which the node flipped and requires some.
module tb_symbol_node;
  import ngdbf_pkg::*;
  import ngdbf_ref_pkg::*;

  logic clk = 0, rst_n = 0, first_frame = 0, enable = 0;
  sm7_t y;
  logic [5:0] syn;
  sm6_t noise;
  logic x, x_exp;
  int checks = 0, failures = 0, flips = 0;
  always #5 clk = ~clk;

  symbol_node dut (.clk, .rst_n, .first_frame, .enable, .y, .syn, .noise, .x);

  initial begin
    y = '0; syn = '0; noise = '0; x_exp = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (x !== 1'b0) failures++;
    for (int n = 0; n < 20000; n++) begin
      // control: start-up for the first 200 cycles, then loads 1 in 20 cycles
      first_frame = (n >= 200);
      enable      = (n == 200) || ((n > 200) && ($urandom_range(0, 19) == 0));
      if (enable || (n % 50 == 0)) y = 7'($urandom);
      syn   = 6'($urandom);
      noise = 6'($urandom);
      @(posedge clk);
      x_exp = sym_next(x_exp, y, syn, noise, first_frame, enable);
      if (first_frame && !enable && (x_exp != x)) flips++;
      #1;
      checks++;
      if (x !== x_exp) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d x=%b exp=%b y=%b syn=%b noise=%b ff=%b en=%b", n, x, x_exp, y, syn, noise, first_frame, enable);
        x_exp = x;
      end
    end
    checks++;
    if (flips == 0) begin failures++; $display("FAIL no flip observed"); end
    $display("flips=%0d", flips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
