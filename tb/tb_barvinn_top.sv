// tb_barvinn_top: end-to-end run of the whole accelerator at its default size.
// The host loads a program into the controller, weight tiles into MVUs 0, 1
// and 2, and a 64-element 2-bit input vector into MVUs 0 and 2 through the
// transposer.  Then the harts, one per MVU, run a two-layer pipeline:
//   hart 0: MVU0 computes relu(W0 x), 8-bit output, and broadcasts it over the
//           crossbar to MVU1 and MVU3 (address 0)
//   hart 2: MVU2 computes the same product and sends it to MVU3 (address 100)
//           at the same time, so it loses the fixed-priority arbitration at
//           MVU3 and stalls
//   hart 1: waits for hart 0's flag in data memory, then has MVU1 compute
//           relu(W1 y) (8-bit input, 2-bit signed weights) into its own RAM
// Each hart waits for its MVU's interrupt (status bit) and sets a flag.
// Checks: layer-1 words in MVU1 and MVU3, MVU2's words in MVU3, the layer-2
// result in MVU1, and that a broadcast, a crossbar stall, three interrupts and
// the transposer each happened at least once.
module tb_barvinn_top;
  import barvinn_pkg::*;
  import rv32_asm::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_imem_we, host_dmem_we, host_t_valid, host_t_ready, host_w_we, host_s_we, host_b_we, host_act_re;
  logic [10:0] host_imem_addr, host_dmem_addr;
  logic [31:0] host_imem_wdata, host_dmem_wdata, host_dmem_rdata;
  logic [2:0] host_mvu;
  logic [15:0] host_t_elem;
  logic [4:0] host_t_prec;
  logic [14:0] host_t_base, host_w_addr, host_s_addr, host_b_addr, host_act_raddr;
  logic [63:0][63:0] host_w_data;
  logic [63:0][15:0] host_s_data;
  logic [63:0][31:0] host_b_data;
  logic [63:0] host_act_rdata;
  logic [7:0] mvu_irq, mvu_busy;

  barvinn_top dut (.*);

  int x [64], w0 [64][64], w1 [64][64], y1 [64], q1 [64], y2 [64];
  logic [31:0] prog [512];
  int p;
  int n_bcast = 0, n_stall = 0, n_tp = 0;
  logic [7:0] irq_seen = '0;

  always @(posedge clk) begin
    if (dut.xreq[0].valid && dut.xgnt[0] && $countones(dut.xreq[0].dest) > 1) n_bcast <= n_bcast + 1;
    if (dut.xreq[2].valid && !dut.xgnt[2]) n_stall <= n_stall + 1;
    if (dut.t_valid && dut.t_ready) n_tp <= n_tp + 1;
    if (rst_n) irq_seen <= irq_seen | mvu_irq;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_t(imm, rs1, 7, rd, 7'h13); endfunction
  task automatic emit(input logic [31:0] i); prog[p++] = i; endtask
  task automatic wreg(input int r, input int v); emit(addi(5, 0, v)); emit(csrrw(0, 12'h7C0 + r, 5)); endtask
  task automatic wait_irq_and_flag(input int flag);
    emit(csrrs(7, 12'h7C0 + R_STATUS, 0));
    emit(andi(7, 7, 2));
    emit(beq(7, 0, -8));
    emit(addi(6, 0, 1));
    emit(sw(6, 0, flag));
    wreg(R_COMMAND, 2);
  endtask
  task automatic layer(input int ap, input int ws, input int op, input int qm, input int dest, input int ob);
    wreg(R_APREC, ap); wreg(R_WPREC, 2); wreg(R_OPREC, op); wreg(R_QUANT, qm | (ws << 9));
    wreg(R_MODE, 2); wreg(R_DEST, dest); wreg(R_OBASE, ob); wreg(R_OJUMP, op);
    wreg(R_COMMAND, 1);
  endtask

  task automatic read_act(input int m, input int a, output logic [63:0] v);
    @(negedge clk); host_mvu = 3'(m); host_act_re = 1; host_act_raddr = 15'(a);
    @(negedge clk); host_act_re = 0; v = host_act_rdata;
  endtask

  initial begin
    host_imem_we = 0; host_dmem_we = 0; host_t_valid = 0; host_w_we = 0; host_s_we = 0; host_b_we = 0;
    host_act_re = 0; host_imem_addr = 0; host_dmem_addr = 0; host_imem_wdata = 0; host_dmem_wdata = 0;
    host_mvu = 0; host_t_elem = 0; host_t_prec = 2; host_t_base = 0; host_w_addr = 0; host_s_addr = 0;
    host_b_addr = 0; host_act_raddr = 0; host_w_data = '0; host_s_data = '0; host_b_data = '0;
    for (int l = 0; l < 64; l++) begin
      x[l] = $urandom_range(0, 3);
      for (int r = 0; r < 64; r++) begin w0[r][l] = $urandom_range(0, 3); w1[r][l] = int'($urandom_range(0, 3)) - 2; end
    end
    // program: branch on hart id
    for (int i = 0; i < 512; i++) prog[i] = addi(0, 0, 0);
    p = 0;
    emit(csrrs(1, 12'hF14, 0));
    emit(addi(2, 0, 1));
    emit(beq(1, 0, 20));          // hart 0 -> word 7
    emit(beq(1, 2, 100 * 4 - 12));// hart 1 -> word 100
    emit(addi(2, 0, 2));
    emit(beq(1, 2, 200 * 4 - 20));// hart 2 -> word 200 ; others fall to 6
    p = 6;  emit(jal(0, 0));
    p = 7;  emit(lw(6, 0, 12'h30C)); emit(beq(6, 0, -4));
    layer(2, 0, 8, 9, 8'b0000_1010, 0);  wait_irq_and_flag(12'h300); emit(jal(0, 0));
    p = 100;
    emit(lw(6, 0, 12'h30C)); emit(beq(6, 0, -4));
    emit(lw(6, 0, 12'h300)); emit(beq(6, 0, -4));
    layer(8, 1, 4, 12, 0, 500); wait_irq_and_flag(12'h304); emit(jal(0, 0));
    p = 200; emit(lw(6, 0, 12'h30C)); emit(beq(6, 0, -4));
    layer(2, 0, 8, 9, 8'b0000_1000, 100); wait_irq_and_flag(12'h308); emit(jal(0, 0));
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); host_imem_we = 1; host_imem_addr = 11'(i); host_imem_wdata = prog[i];
    end
    @(negedge clk); host_imem_we = 0;
    // flags at 0x300..0x30C cleared; 0x30C is the host's go flag
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); host_dmem_we = 1; host_dmem_addr = 11'((12'h300 >> 2) + i); host_dmem_wdata = 0;
    end
    @(negedge clk); host_dmem_we = 0;
    rst_n = 1;
    // weights: plane k of the tile at address 1-k
    for (int m = 0; m < 3; m++)
      for (int k = 0; k < 2; k++) begin
        @(negedge clk); host_mvu = 3'(m); host_w_we = 1; host_w_addr = 15'(1 - k);
        for (int r = 0; r < 64; r++) for (int l = 0; l < 64; l++)
          host_w_data[r][l] = (m == 1) ? 1'(w1[r][l] >> k) : 1'(w0[r][l] >> k);
      end
    @(negedge clk); host_w_we = 0;
    // input vector through the transposer into MVUs 0 and 2
    for (int m = 0; m < 3; m += 2) begin
      host_mvu = 3'(m); host_t_prec = 2; host_t_base = 0;
      for (int l = 0; l < 64; l++) begin
        @(negedge clk); while (!host_t_ready) @(negedge clk);
        host_t_elem = 16'(x[l]); host_t_valid = 1;
        @(posedge clk); #1 host_t_valid = 0;
      end
      repeat (4) @(negedge clk);
    end
    // model
    for (int r = 0; r < 64; r++) begin
      automatic int d = 0;
      for (int l = 0; l < 64; l++) d += w0[r][l] * x[l];
      y1[r] = d; q1[r] = (d >> 2) & 255;
    end
    for (int r = 0; r < 64; r++) begin
      automatic int d = 0;
      for (int l = 0; l < 64; l++) d += w1[r][l] * q1[l];
      y2[r] = d < 0 ? 0 : (d >> 9) & 15;
    end
    @(negedge clk); host_dmem_we = 1; host_dmem_addr = 11'(12'h30C >> 2); host_dmem_wdata = 1;
    @(negedge clk); host_dmem_we = 0;
    // wait for hart 1's flag
    begin
      automatic logic [31:0] f = 0;
      automatic int tries = 0;
      while (f != 1 && tries < 2000) begin
        repeat (20) @(negedge clk); host_dmem_addr = 11'(12'h304 >> 2); @(negedge clk); f = host_dmem_rdata; tries++;
      end
      checks++;
      if (f != 1) begin failures++; $display("FAIL layer 2 never finished"); end
      repeat (20) @(negedge clk);
    end
    // layer-1 words in MVU1 and MVU3, MVU2's copy in MVU3 at 100
    for (int t = 0; t < 8; t++) begin
      logic [63:0] v1, v3, v3b;
      read_act(1, t, v1); read_act(3, t, v3); read_act(3, 100 + t, v3b);
      for (int r = 0; r < 64; r++) begin
        checks++;
        if (v1[r] != 1'(q1[r] >> (7 - t)) || v3[r] != 1'(q1[r] >> (7 - t)) || v3b[r] != 1'(q1[r] >> (7 - t))) begin
          failures++; $display("FAIL layer1 t=%0d r=%0d", t, r);
        end
      end
    end
    for (int t = 0; t < 4; t++) begin
      logic [63:0] v;
      read_act(1, 500 + t, v);
      for (int r = 0; r < 64; r++) begin
        checks++;
        if (v[r] != 1'(y2[r] >> (3 - t))) begin failures++; $display("FAIL layer2 t=%0d r=%0d", t, r); end
      end
    end
    $display("events: broadcast words %0d, crossbar stall cycles %0d, interrupts %b, transposer words %0d",
             n_bcast, n_stall, irq_seen, n_tp);
    checks++; if (n_bcast == 0) begin failures++; $display("FAIL no broadcast"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (irq_seen[2:0] != 3'b111) begin failures++; $display("FAIL interrupts"); end
    checks++; if (n_tp != 4) begin failures++; $display("FAIL transposer words %0d", n_tp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
