// tb_agu: checks the loop-nest address sequence against a software model.
// Random counts (1..4) and signed jumps for five loops; every address of the
// nest and the position of last are compared, then one more step must
// restart at base.
module tb_agu;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, step, last;
  logic [14:0] base, addr;
  logic [4:0][15:0] cnt;
  logic [4:0][15:0] jump;
  agu dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; step = 0; base = '0; cnt = '0; jump = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      automatic int c [5];
      automatic int jv [5];
      automatic int total = 1, n = 0;
      automatic int a;
      automatic int ctr [5] = '{0, 0, 0, 0, 0};
      for (int i = 0; i < 5; i++) begin
        c[i] = $urandom_range(1, 4); jv[i] = int'($urandom_range(0, 200)) - 100;
        cnt[i] = 16'(c[i]); jump[i] = 16'(jv[i]); total *= c[i];
      end
      base = 15'($urandom_range(1000, 20000)); a = base;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int s = 0; s < total; s++) begin
        checks++;
        if (addr != 15'(a) || last != (s == total - 1)) begin
          failures++; $display("FAIL t=%0d s=%0d addr %0d exp %0d last %0b", t, s, addr, a, last);
        end
        step = 1; @(negedge clk); step = 0;
        // model
        begin
          automatic bit done = 0;
          for (int i = 0; i < 5; i++) if (!done) begin
            if (ctr[i] < c[i] - 1) begin ctr[i]++; a += jv[i]; done = 1; end
            else ctr[i] = 0;
          end
          if (!done) a = base;
        end
      end
      checks++;
      if (addr != base) begin failures++; $display("FAIL restart"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
