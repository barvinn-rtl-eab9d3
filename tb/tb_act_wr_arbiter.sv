// tb_act_wr_arbiter: all eight request combinations, random data; checks the
// order interconnect > controller > MVU and that the winner's write passes.
module tb_act_wr_arbiter;
  import barvinn_pkg::*;
  int checks = 0, failures = 0;
  act_wr_t xbar_wr, ctrl_wr, self_wr, ram_wr;
  logic xbar_gnt, ctrl_gnt, self_gnt;
  act_wr_arbiter dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 64; t++) begin
      automatic act_wr_t e;
      xbar_wr = {1'(t), 15'($urandom), {$urandom, $urandom}};
      ctrl_wr = {1'(t >> 1), 15'($urandom), {$urandom, $urandom}};
      self_wr = {1'(t >> 2), 15'($urandom), {$urandom, $urandom}};
      #1;
      e = xbar_wr.valid ? xbar_wr : ctrl_wr.valid ? ctrl_wr : self_wr;
      checks++;
      if (ram_wr.valid != (xbar_wr.valid | ctrl_wr.valid | self_wr.valid) ||
          (ram_wr.valid && ram_wr != e)) begin failures++; $display("FAIL t=%0d data", t); end
      checks++;
      if (xbar_gnt != xbar_wr.valid || ctrl_gnt != (ctrl_wr.valid && !xbar_wr.valid) ||
          self_gnt != (self_wr.valid && !xbar_wr.valid && !ctrl_wr.valid)) begin
        failures++; $display("FAIL t=%0d grants", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
