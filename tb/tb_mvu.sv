// tb_mvu: runs GEMV jobs on one MVU and checks the activations it writes.
// Job 1: 128-element input (2 blocks, 2-bit unsigned), 128x128 matrix
// (2-bit signed, 2x2 tiles), scaler and bias, ReLU, 2-bit output from a
// chosen MSB, written to the MVU's own activation RAM.  Its registers are
// programmed and its start is issued; job 2's registers and start are then
// written while job 1 runs (programming while busy).  Job 2 is the same
// product max-pooled over the two output tiles and sent to the interconnect;
// the testbench plays the interconnect and withholds the grant at random, so
// the pipeline stalls.  Checks: every output bit, the read-issue cycle count
// (b_a * b_w * blocks * tiles), the interrupt and its clearing.
module tb_mvu;
  import barvinn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  csr_wr_t csr_wr;
  logic [5:0] csr_raddr;
  logic [31:0] csr_rdata;
  logic irq, busy, host_act_gnt, host_act_re, host_w_we, host_s_we, host_b_we, xbar_gnt;
  act_wr_t host_act_wr, xbar_in;
  logic [14:0] host_act_raddr, host_w_addr, host_s_addr, host_b_addr;
  logic [63:0] host_act_rdata;
  logic [63:0][63:0] host_w_data;
  logic [63:0][15:0] host_s_data;
  logic [63:0][31:0] host_b_data;
  xbar_req_t xbar_req;

  mvu dut (.*);

  localparam int BA = 2, BW = 2, NB = 2, NT = 2, OP = 2, QM = 6;
  int a [128], wm [128][128], sc [128], bs [128], res [128];
  int stalls = 0, xwords = 0, run_cycles = 0;
  logic [63:0] xcap [16];
  logic [14:0] xaddr [16];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wcsr(input logic [5:0] ad, input logic [31:0] d);
    @(negedge clk); csr_wr.we = 1; csr_wr.addr = ad; csr_wr.wdata = d;
    @(negedge clk); csr_wr.we = 0;
  endtask

  task automatic job_regs(input int dest, input int pool, input int obase);
    wcsr(R_APREC, BA); wcsr(R_WPREC, BW); wcsr(R_OPREC, OP);
    wcsr(R_QUANT, QM | (1 << 9));                   // weights signed
    wcsr(R_MODE, 32'h3 | (pool << 8));              // scale + relu
    wcsr(R_DEST, dest);
    wcsr(R_ABASE, 100); wcsr(R_WBASE, 8); wcsr(R_SBASE, 3); wcsr(R_BBASE, 5);
    wcsr(R_OBASE, obase); wcsr(R_OJUMP, OP);
    for (int l = 0; l < 5; l++) begin
      wcsr(R_ICNT + 6'(l), l == 0 ? NB : 1); wcsr(R_OCNT + 6'(l), l == 0 ? NT : 1);
      wcsr(R_IAJUMP + 6'(l), l == 0 ? BA : 0); wcsr(R_IWJUMP + 6'(l), l == 0 ? BW : 0);
      wcsr(R_OAJUMP + 6'(l), 0); wcsr(R_OWJUMP + 6'(l), l == 0 ? NB * BW : 0);
      wcsr(R_OSJUMP + 6'(l), l == 0 ? 1 : 0); wcsr(R_OBJUMP + 6'(l), l == 0 ? 1 : 0);
    end
  endtask

  function automatic int quant(input int v);
    int q = 0;
    for (int t = 0; t < OP; t++) q = (q << 1) | ((v >> (QM - t)) & 1);
    return q;
  endfunction

  // interconnect model: random grant, capture granted words
  always @(negedge clk) begin
    xbar_gnt <= 1'($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) begin
    if (xbar_req.valid && xbar_gnt && xwords < 16) begin
      xcap[xwords] <= xbar_req.data; xaddr[xwords] <= xbar_req.addr; xwords <= xwords + 1;
    end
    if (xbar_req.valid && !xbar_gnt) stalls <= stalls + 1;
    if (dut.running) run_cycles <= run_cycles + 1;
  end

  initial begin
    csr_wr = '0; csr_raddr = R_STATUS; host_act_wr = '0; host_act_re = 0; host_act_raddr = 0;
    host_w_we = 0; host_s_we = 0; host_b_we = 0; host_w_addr = 0; host_s_addr = 0; host_b_addr = 0;
    host_w_data = '0; host_s_data = '0; host_b_data = '0; xbar_in = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // data
    for (int i = 0; i < 128; i++) begin
      a[i] = $urandom_range(0, 3); sc[i] = $urandom_range(1, 3); bs[i] = int'($urandom_range(0, 60)) - 30;
      for (int j = 0; j < 128; j++) wm[i][j] = int'($urandom_range(0, 3)) - 2;
    end
    // activations: block b at 100 + b*BA, word for bit j at +(BA-1-j)
    for (int b = 0; b < NB; b++)
      for (int j = 0; j < BA; j++) begin
        @(negedge clk);
        host_act_wr.valid = 1; host_act_wr.addr = 15'(100 + b * BA + (BA - 1 - j));
        for (int l = 0; l < 64; l++) host_act_wr.data[l] = 1'(a[b * 64 + l] >> j);
      end
    @(negedge clk); host_act_wr = '0;
    // weights: tile (o,b) at 8 + (o*NB + b)*BW, plane k at +(BW-1-k); row r = output o*64+r
    for (int o = 0; o < NT; o++)
      for (int b = 0; b < NB; b++)
        for (int k = 0; k < BW; k++) begin
          @(negedge clk); host_w_we = 1; host_w_addr = 15'(8 + (o * NB + b) * BW + (BW - 1 - k));
          for (int r = 0; r < 64; r++) for (int l = 0; l < 64; l++)
            host_w_data[r][l] = 1'(wm[o * 64 + r][b * 64 + l] >> k);
        end
    for (int o = 0; o < NT; o++) begin
      @(negedge clk); host_w_we = 0; host_s_we = 1; host_b_we = 1;
      host_s_addr = 15'(3 + o); host_b_addr = 15'(5 + o);
      for (int r = 0; r < 64; r++) begin host_s_data[r] = 16'(sc[o*64+r]); host_b_data[r] = 32'(bs[o*64+r]); end
    end
    @(negedge clk); host_s_we = 0; host_b_we = 0;
    // expected
    for (int i = 0; i < 128; i++) begin
      automatic int d = 0;
      for (int j = 0; j < 128; j++) d += a[j] * wm[i][j];
      d = d * sc[i] + bs[i];
      res[i] = d < 0 ? 0 : d;
    end
    // job 1, then job 2 prepared and started while job 1 runs
    job_regs(0, 1, 2000);
    wcsr(R_COMMAND, 1);
    checks++;
    if (!busy) begin failures++; $display("FAIL not busy after start"); end
    // job 2 differs in destination, pooling and output base only
    wcsr(R_DEST, 8'b0000_0100); wcsr(R_MODE, 32'h3 | (2 << 8)); wcsr(R_OBASE, 3000);
    checks++;
    if (!busy) begin failures++; $display("FAIL job 1 finished before job 2 was programmed"); end
    wcsr(R_COMMAND, 1);
    wait (irq);
    checks++;
    if (run_cycles != BA * BW * NB * NT) begin
      failures++; $display("FAIL job 1 issue cycles %0d exp %0d", run_cycles, BA * BW * NB * NT);
    end
    wcsr(R_COMMAND, 2);
    checks++;
    if (irq) begin failures++; $display("FAIL irq not cleared"); end
    wait (irq);
    checks++;
    if (run_cycles != 2 * BA * BW * NB * NT) begin failures++; $display("FAIL job 2 cycles %0d", run_cycles); end
    wcsr(R_COMMAND, 2);
    repeat (3) @(negedge clk);
    // job 1 results in own RAM: tile o at 2000 + o*OP, plane t at +t
    for (int o = 0; o < NT; o++)
      for (int t = 0; t < OP; t++) begin
        @(negedge clk); host_act_re = 1; host_act_raddr = 15'(2000 + o * OP + t);
        @(negedge clk); host_act_re = 0;
        for (int r = 0; r < 64; r++) begin
          checks++;
          if (host_act_rdata[r] != 1'(quant(res[o*64+r]) >> (OP - 1 - t))) begin
            failures++; $display("FAIL job1 o=%0d t=%0d r=%0d val %0d", o, t, r, res[o*64+r]);
          end
        end
      end
    // job 2 results: pooled over the two tiles, OP words to 3000.. via interconnect
    checks++;
    if (xwords != OP) begin failures++; $display("FAIL xbar words %0d", xwords); end
    for (int t = 0; t < OP; t++) begin
      checks++;
      if (xaddr[t] != 15'(3000 + t)) begin failures++; $display("FAIL xbar addr"); end
      for (int r = 0; r < 64; r++) begin
        automatic int m = res[r] > res[64 + r] ? res[r] : res[64 + r];
        checks++;
        if (xcap[t][r] != 1'(quant(m) >> (OP - 1 - t))) begin failures++; $display("FAIL job2 t=%0d r=%0d", t, r); end
      end
    end
    $display("interconnect stall cycles: %0d", stalls);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
