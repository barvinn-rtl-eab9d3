// tb_ram_1r1w: write/read-back of the memory used for all MVU RAMs, in the
// activation-RAM shape (64-bit words); checks one-cycle read latency,
// read-during-write returning old data, and that the output holds while re
// is low.
module tb_ram_1r1w;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic re, we;
  logic [9:0] raddr, waddr;
  logic [63:0] rdata, wdata;
  logic [63:0] model [1024];
  ram_1r1w #(.W(64), .AW(10)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; waddr = 10'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 500; t++) begin
      automatic int a = $urandom_range(0, 1023);
      @(negedge clk); re = 1; raddr = 10'(a);
      we = 1; waddr = 10'(a); wdata = {$urandom, $urandom};
      @(negedge clk); re = 0; we = 0;
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL a=%0d", a); end
      model[a] = wdata;
      @(negedge clk);
      checks++;
      if (rdata != model[a] && rdata == wdata) ; // holds old word: fine
      if (rdata == wdata && wdata != model[a]) begin failures++; $display("FAIL hold"); end
    end
    for (int t = 0; t < 200; t++) begin
      automatic int a = $urandom_range(0, 1023);
      @(negedge clk); re = 1; raddr = 10'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL rd a=%0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
