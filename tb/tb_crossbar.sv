// tb_crossbar: random requests with random destination masks (single and
// broadcast); checks each destination takes the lowest-numbered source that
// addresses it, and that a source is granted only when it won every
// destination in its mask.
module tb_crossbar;
  import barvinn_pkg::*;
  int checks = 0, failures = 0;
  xbar_req_t [7:0] req;
  logic [7:0] gnt;
  act_wr_t [7:0] dst_wr;
  crossbar dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      automatic int win [8];
      for (int s = 0; s < 8; s++) begin
        req[s].valid = 1'($urandom_range(0, 2) != 0);
        req[s].dest  = (t % 3 == 0) ? 8'(1 << $urandom_range(0, 7)) : 8'($urandom);
        req[s].addr  = 15'($urandom);
        req[s].data  = {$urandom, $urandom};
      end
      #1;
      for (int d = 0; d < 8; d++) begin
        win[d] = -1;
        for (int s = 7; s >= 0; s--) if (req[s].valid && req[s].dest[d]) win[d] = s;
        checks++;
        if (win[d] < 0 ? dst_wr[d].valid :
            (!dst_wr[d].valid || dst_wr[d].addr != req[win[d]].addr || dst_wr[d].data != req[win[d]].data)) begin
          failures++; $display("FAIL t=%0d dest %0d", t, d);
        end
      end
      for (int s = 0; s < 8; s++) begin
        automatic bit g = req[s].valid && req[s].dest != 0;
        for (int d = 0; d < 8; d++) if (req[s].dest[d] && win[d] != s) g = 0;
        checks++;
        if (gnt[s] != g) begin failures++; $display("FAIL t=%0d gnt %0d", t, s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
