// tb_scaler: random lane values, 16-bit scalers and 32-bit biases; checks
// y = x[26:0] * s + b (mod 2^32) on every lane, the one-cycle latency and the
// bypass mode.
module tb_scaler;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, en_scale, x_valid, y_valid;
  logic [63:0][31:0] x, b, y;
  logic [63:0][15:0] s;
  scaler dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 1; en_scale = 1; x_valid = 0; x = '0; s = '0; b = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      en_scale = (t % 5 != 4);
      for (int i = 0; i < 64; i++) begin
        x[i] = $urandom; s[i] = 16'($urandom); b[i] = $urandom;
        if (t < 20) x[i] = 32'($signed(int'($urandom_range(0, 2000)) - 1000));
      end
      x_valid = 1;
      @(negedge clk); x_valid = 0;
      checks++;
      if (!y_valid) begin failures++; $display("FAIL valid"); end
      for (int i = 0; i < 64; i++) begin
        automatic longint xe = longint'($signed(x[i][26:0]));
        automatic longint e = en_scale ? xe * longint'($signed(s[i])) + longint'($signed(b[i])) : longint'($signed(x[i]));
        checks++;
        if (y[i] != 32'(e)) begin failures++; $display("FAIL t=%0d lane %0d %h exp %h", t, i, y[i], 32'(e)); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
