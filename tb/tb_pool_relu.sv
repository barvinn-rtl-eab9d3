// tb_pool_relu: feeds windows of 1..9 random signed tiles and checks each
// lane's output against max(window) (plain max pool) or max(0, window)
// (with ReLU), and that exactly one output appears per window.
module tb_pool_relu;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, relu, x_valid, y_valid;
  logic [7:0] pool_len;
  logic [63:0][31:0] x, y;
  int mx [64];
  pool_relu dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 1; relu = 0; x_valid = 0; x = '0; pool_len = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int pl = $urandom_range(1, 9);
      @(negedge clk); relu = 1'(t % 2); pool_len = 8'(pl);
      for (int i = 0; i < 64; i++) mx[i] = relu ? 0 : 32'h8000_0000;
      for (int v = 0; v < pl; v++) begin
        for (int i = 0; i < 64; i++) begin
          x[i] = 32'(int'($urandom_range(0, 200000)) - 100000);
          if ($signed(x[i]) > mx[i]) mx[i] = x[i];
        end
        x_valid = 1; @(negedge clk);
        checks++;
        if (y_valid != (v > 0 ? 1'b0 : y_valid)) ;
        if (v < pl - 1 && y_valid && v > 0) begin failures++; $display("FAIL early"); end
      end
      x_valid = 0;
      checks++;
      if (!y_valid) begin failures++; $display("FAIL no output t=%0d", t); end
      for (int i = 0; i < 64; i++) begin
        checks++;
        if ($signed(y[i]) != mx[i]) begin failures++; $display("FAIL t=%0d lane %0d", t, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
