// tb_mvu_ctrl: runs a convolution-shaped job (3 blocks per dot product,
// 2 output tiles, 3-bit activations, 2-bit weights) and records every issued
// read.  Checks the count (b_a*b_w*blocks*tiles), the bit-combination order
// (falling j+k, every (j,k) once per block), the addresses of each read, the
// clr/shift/neg/last flags, the scaler/bias addresses, and that a stall
// (en low) freezes the sequence.
module tb_mvu_ctrl;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, start, running, rd_valid, f_clr, f_shift, f_neg, f_last;
  mvu_job_t job_in, job;
  logic [14:0] a_addr, w_addr, s_addr, b_addr;
  mvu_ctrl dut (.*);
  localparam int BA = 3, BW = 2, NB = 3, NT = 2;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    automatic int n = 0, stalls = 0;
    job_in = '0;
    job_in.aprec = BA; job_in.wprec = BW; job_in.asigned = 1; job_in.wsigned = 1;
    job_in.abase = 50; job_in.wbase = 7; job_in.sbase = 20; job_in.bbase = 30;
    for (int l = 0; l < 5; l++) begin job_in.icnt[l] = 1; job_in.ocnt[l] = 1; end
    job_in.icnt[0] = NB; job_in.iajump[0] = 10; job_in.iwjump[0] = BW;   // blocks 10 words apart
    job_in.ocnt[0] = NT; job_in.oajump[0] = 16'(-5); job_in.owjump[0] = NB * BW;
    job_in.osjump[0] = 2; job_in.objump[0] = 3;
    en = 1; start = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int o = 0; o < NT; o++)
      for (int i = BA + BW - 2; i >= 0; i--) begin
        automatic bit nd = 1;
        for (int j = 0; j < BA; j++) begin
          automatic int k = i - j;
          if (k < 0 || k >= BW) continue;
          for (int b = 0; b < NB; b++) begin
            // random stall: sequence must not move
            while ($urandom_range(0, 3) == 0) begin
              en = 0; @(negedge clk); stalls++;
            end
            en = 1;
            checks++;
            if (!rd_valid || a_addr != 15'(50 - 5 * o + 10 * b + (BA - 1 - j)) ||
                w_addr != 15'(7 + NB * BW * o + BW * b + (BW - 1 - k)) ||
                f_clr != (i == BA + BW - 2 && b == 0) ||
                f_shift != (nd && b == 0 && i != BA + BW - 2) ||
                f_neg != ((j == BA - 1) ^ (k == BW - 1)) ||
                f_last != (i == 0 && b == NB - 1) ||
                (f_last && (s_addr != 15'(20 + 2 * o) || b_addr != 15'(30 + 3 * o)))) begin
              failures++;
              $display("FAIL o=%0d i=%0d j=%0d b=%0d a=%0d w=%0d flags %b%b%b%b", o, i, j, b,
                       a_addr, w_addr, f_clr, f_shift, f_neg, f_last);
            end
            n++;
            @(negedge clk);
          end
          nd = 0;
        end
      end
    checks++;
    if (running || n != BA * BW * NB * NT) begin failures++; $display("FAIL end n=%0d", n); end
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
