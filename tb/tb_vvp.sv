// tb_vvp: checks one VVP against integer dot products.
// Random 64-element vectors of random precision (1..8 bits, signed or
// unsigned) are fed bit-serially in order of falling magnitude, as the MVU
// sequencer does; the result must equal sum(x[l]*w[l]) and appear two cycles
// after the input marked last.
module tb_vvp;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, in_valid, clr, shift, neg, last;
  logic [63:0] x, w;
  logic signed [31:0] acc;
  logic acc_valid;

  vvp dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int av [64], wv [64];
  initial begin
    en = 1; in_valid = 0; clr = 0; shift = 0; neg = 0; last = 0; x = '0; w = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int ba = 1 + $urandom_range(0, 7);
      automatic int bw = 1 + $urandom_range(0, 7);
      automatic bit as = 1'($urandom_range(0, 1)), ws = 1'($urandom_range(0, 1));
      automatic longint expv = 0;
      automatic bit first = 1;
      automatic int lat;
      for (int l = 0; l < 64; l++) begin
        av[l] = $urandom_range(0, (1 << ba) - 1);
        wv[l] = $urandom_range(0, (1 << bw) - 1);
        if (t == 0) begin av[l] = (1 << ba) - 1; wv[l] = (1 << bw) - 1; end
      end
      for (int l = 0; l < 64; l++)
        expv += longint'(as && av[l] >= (1 << (ba-1)) ? av[l] - (1 << ba) : av[l]) *
                longint'(ws && wv[l] >= (1 << (bw-1)) ? wv[l] - (1 << bw) : wv[l]);
      for (int i = ba + bw - 2; i >= 0; i--) begin
        automatic bit nd = 1;
        for (int j = 0; j < ba; j++) begin
          automatic int k = i - j;
          if (k < 0 || k >= bw) continue;
          @(negedge clk);
          for (int l = 0; l < 64; l++) begin x[l] = av[l][j]; w[l] = wv[l][k]; end
          in_valid = 1; clr = first; shift = nd && !first;
          neg = (as && j == ba-1) ^ (ws && k == bw-1);
          last = (i == 0);
          first = 0; nd = 0;
        end
      end
      @(negedge clk); in_valid = 0; last = 0;
      lat = 1;
      while (!acc_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (!acc_valid || acc != 32'(expv) || lat != 2) begin
        failures++;
        $display("FAIL t=%0d ba=%0d bw=%0d got %0d exp %0d lat %0d", t, ba, bw, acc, expv, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
