// tb_transposer: streams blocks of 64 random elements of 1..16 bits and
// checks the emitted words: word t at base+t holds bit (prec-1-t) of every
// element (MSB plane first), with random back-pressure.
module tb_transposer;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_elem;
  logic [4:0] prec;
  logic [14:0] base, out_addr;
  logic [63:0] out_data;
  logic [15:0] el [64];
  transposer dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; in_elem = 0; prec = 1; base = 0; out_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int p = $urandom_range(1, 16);
      automatic int got = 0;
      prec = 5'(p); base = 15'($urandom_range(0, 30000));
      for (int l = 0; l < 64; l++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        el[l] = 16'($urandom) & 16'((1 << p) - 1);
        in_elem = el[l]; in_valid = 1;
        @(posedge clk); #1 in_valid = 0;
      end
      while (got < p) begin
        @(negedge clk);
        out_ready = 1'($urandom_range(0, 2) != 0);
        if (out_valid && out_ready) begin
          checks++;
          if (out_addr != base + 15'(got)) begin failures++; $display("FAIL addr"); end
          for (int l = 0; l < 64; l++)
            if (out_data[l] != el[l][p - 1 - got]) begin failures++; $display("FAIL t=%0d w%0d l%0d", t, got, l); break; end
          got++;
        end
      end
      @(negedge clk); out_ready = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
