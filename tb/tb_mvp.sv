// tb_mvp: one 64x64 tile by one 64-element vector, 1..4-bit unsigned
// operands; checks all 64 outputs against the integer matrix-vector product
// and that a tile takes b_a*b_w input cycles.
module tb_mvp;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, in_valid, clr, shift, neg, last, y_valid;
  logic [63:0] x;
  logic [63:0][63:0] w;
  logic [63:0][31:0] y;
  int av [64], wv [64][64];
  mvp dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 1; in_valid = 0; clr = 0; shift = 0; neg = 0; last = 0; x = '0; w = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      automatic int ba = $urandom_range(1, 4), bw = $urandom_range(1, 4), n = 0;
      automatic bit first = 1;
      for (int l = 0; l < 64; l++) begin
        av[l] = $urandom_range(0, (1 << ba) - 1);
        for (int r = 0; r < 64; r++) wv[r][l] = $urandom_range(0, (1 << bw) - 1);
      end
      for (int i = ba + bw - 2; i >= 0; i--) begin
        automatic bit nd = 1;
        for (int j = 0; j < ba; j++) begin
          automatic int k = i - j;
          if (k < 0 || k >= bw) continue;
          @(negedge clk); n++;
          for (int l = 0; l < 64; l++) begin
            x[l] = av[l][j];
            for (int r = 0; r < 64; r++) w[r][l] = wv[r][l][k];
          end
          in_valid = 1; clr = first; shift = nd && !first; last = (i == 0);
          first = 0; nd = 0;
        end
      end
      @(negedge clk); in_valid = 0; last = 0;
      @(negedge clk);
      checks++;
      if (n != ba * bw || !y_valid) begin failures++; $display("FAIL cycles %0d valid %0b", n, y_valid); end
      for (int r = 0; r < 64; r++) begin
        automatic int e = 0;
        for (int l = 0; l < 64; l++) e += av[l] * wv[r][l];
        checks++;
        if (y[r] != 32'(e)) begin failures++; $display("FAIL t=%0d r=%0d %0d exp %0d", t, r, y[r], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
