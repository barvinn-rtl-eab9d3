// tb_quantser: loads random lane values with random output depth and MSB
// position; checks every emitted plane bit against the selected bit of the
// value, the addresses, back-pressure through out_ready, and back-to-back
// loads (can_load on the last word).
module tb_quantser;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic load, can_load, out_valid, out_ready;
  logic [63:0][31:0] x;
  logic [4:0] oprec, qmsb;
  logic [14:0] obase, out_addr;
  logic [63:0] out_data;
  quantser dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [63:0][31:0] xs;
  initial begin
    load = 0; x = '0; oprec = 1; qmsb = 0; obase = 0; out_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 80; t++) begin
      automatic int op = $urandom_range(1, 8);
      automatic int msb = $urandom_range(op - 1, 31);
      automatic int nsent = 0;
      @(negedge clk);
      while (!can_load) @(negedge clk);
      for (int i = 0; i < 64; i++) x[i] = $urandom;
      xs = x; oprec = 5'(op); qmsb = 5'(msb); obase = 15'($urandom_range(0, 30000));
      load = 1; @(negedge clk); load = 0;
      while (nsent < op) begin
        out_ready = 1'($urandom_range(0, 3) != 0);
        checks++;
        if (!out_valid) begin failures++; $display("FAIL not valid"); break; end
        for (int i = 0; i < 64; i++)
          if (out_data[i] != xs[i][msb - nsent]) begin failures++; $display("FAIL t=%0d bit", t); break; end
        if (out_addr != obase + 15'(nsent)) begin failures++; $display("FAIL addr"); end
        if (out_ready) nsent++;
        @(negedge clk);
      end
      out_ready = 1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL extra word"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
