// tb_interleaver: full-size interleaver (2048 symbols, 384 checks).
// For every symbol c a one-hot decision vector is applied; the symbol must appear at
// exactly six check inputs, at rows 64*i + (beta XOR alpha^(i+j)) (reference GF(64)
// model, c = 64*j + beta), each at input position j. For every check r a one-hot
// syndrome vector is applied; exactly the 32 symbols of that row must receive it, on
// input i = r/64. Finally no two symbols may share two checks (no 4-cycles).
module tb_interleaver;
  import ngdbf_pkg::*;
  import ngdbf_ref_pkg::*;

  localparam int N = 2048, M = 384, DC = 32, DV = 6;
  logic [N-1:0] x;
  logic [M-1:0][DC-1:0] cn_in;
  logic [M-1:0] s;
  logic [N-1:0][DV-1:0] syn;
  int checks = 0, failures = 0;
  int rows_of [N][DV];
  logic clk = 0;
  always #5 clk = ~clk;

  interleaver dut (.x, .cn_in, .s, .syn);

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  initial begin
    int hits, exp_row;
    bit pair_seen [int];
    s = '0;
    for (int c = 0; c < N; c++) begin
      x = '0; x[c] = 1'b1;
      #1;
      hits = 0;
      for (int r = 0; r < M; r++)
        for (int j = 0; j < DC; j++)
          if (cn_in[r][j]) begin
            hits++;
            if (j != c / 64) fail($sformatf("symbol %0d at check %0d input %0d", c, r, j));
            if (r != ref_row(c, r / 64)) fail($sformatf("symbol %0d at wrong check %0d", c, r));
            rows_of[c][r / 64] = r;
          end
      checks++;
      if (hits != DV) fail($sformatf("symbol %0d reaches %0d checks", c, hits));
      for (int i = 0; i < DV; i++) begin
        exp_row = ref_row(c, i);
        checks++;
        if (!cn_in[exp_row][c / 64]) fail($sformatf("symbol %0d missing at check %0d", c, exp_row));
      end
    end
    x = '0;
    for (int r = 0; r < M; r++) begin
      s = '0; s[r] = 1'b1;
      #1;
      hits = 0;
      for (int c = 0; c < N; c++)
        for (int i = 0; i < DV; i++)
          if (syn[c][i]) begin
            hits++;
            if (i != r / 64 || rows_of[c][i] != r) fail($sformatf("check %0d reaches symbol %0d input %0d", r, c, i));
          end
      checks++;
      if (hits != DC) fail($sformatf("check %0d reaches %0d symbols", r, hits));
    end
    // no two columns share two rows
    for (int r = 0; r < M; r++) begin
      int cols [$];
      cols = {};
      for (int c = 0; c < N; c++)
        for (int i = 0; i < DV; i++) if (rows_of[c][i] == r) cols.push_back(c);
      for (int a = 0; a < cols.size(); a++)
        for (int b = a + 1; b < cols.size(); b++) begin
          int key;
          key = cols[a] * N + cols[b];
          checks++;
          if (pair_seen.exists(key)) fail($sformatf("symbols %0d and %0d share two checks", cols[a], cols[b]));
          pair_seen[key] = 1;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
