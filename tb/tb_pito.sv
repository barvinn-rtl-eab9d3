// tb_pito: all eight harts run one RV32I program from address 0 and use
// mhartid to work on their own data.  The program exercises ALU, a counted
// branch loop, stores and loads, a write and a read of an MVU control
// register, ECALL into a trap handler and back with MRET, and finally an MVU
// interrupt.  The testbench plays the MVUs and checks: data memory contents
// per hart, that each MVU register write came from the right hart with the
// right value, the trap causes, and that the harts take turns every cycle.
module tb_pito;
  import barvinn_pkg::*;
  import rv32_asm::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic host_imem_we, host_dmem_we;
  logic [10:0] host_imem_addr, host_dmem_addr;
  logic [31:0] host_imem_wdata, host_dmem_wdata, host_dmem_rdata, mvu_csr_rdata;
  logic [2:0] mvu_sel;
  csr_wr_t mvu_csr_wr;
  logic [5:0] mvu_csr_raddr;
  logic [7:0] mvu_irq;
  pito dut (.*);

  logic [31:0] prog [256];
  int csr_seen [8];
  int csr_val [8];
  assign mvu_csr_rdata = 32'h40 + 32'(mvu_sel) + (mvu_csr_raddr == R_STATUS ? 32'h100 : 0);
  always @(posedge clk)
    if (mvu_csr_wr.we) begin
      csr_seen[mvu_sel] <= csr_seen[mvu_sel] + 1;
      if (mvu_csr_wr.addr == R_ABASE) csr_val[mvu_sel] <= mvu_csr_wr.wdata;
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic rd(input int a, output logic [31:0] v);
    @(negedge clk); host_dmem_addr = 11'(a); @(negedge clk); v = host_dmem_rdata;
  endtask

  initial begin
    automatic int p = 0;
    host_imem_we = 0; host_dmem_we = 0; host_imem_addr = 0; host_dmem_addr = 0;
    host_imem_wdata = 0; host_dmem_wdata = 0; mvu_irq = 0;
    for (int i = 0; i < 256; i++) prog[i] = addi(0, 0, 0);
    prog[p++] = csrrs(1, 12'hF14, 0);         // x1 = hart id
    prog[p++] = slli(2, 1, 2);                // x2 = 4*h
    prog[p++] = addi(3, 1, 100);              // x3 = h + 100
    prog[p++] = addi(4, 0, 5);
    prog[p++] = addi(5, 0, 0);
    prog[p++] = add(5, 5, 4);                 // loop: x5 += x4
    prog[p++] = addi(4, 4, -1);
    prog[p++] = bne(4, 0, -8);
    prog[p++] = add(3, 3, 5);                 // x3 = h + 115
    prog[p++] = sw(3, 2, 256);                // dmem[64+h]
    prog[p++] = lw(6, 2, 256);
    prog[p++] = addi(6, 6, 1);
    prog[p++] = sw(6, 2, 512);                // dmem[128+h] = h + 116
    prog[p++] = csrrw(0, 12'h7C0 + R_ABASE, 3);   // MVU h register ABASE = h + 115
    prog[p++] = csrrs(7, 12'h7C0 + R_STATUS, 0);  // read MVU status
    prog[p++] = sw(7, 2, 640);                // dmem[160+h]
    prog[p++] = addi(9, 0, 512);
    prog[p++] = csrrw(0, 12'h305, 9);         // mtvec = 0x200
    prog[p++] = ecall();
    prog[p++] = lui(9, 1);                    // x9 = 0x1000
    prog[p++] = addi(9, 9, -2048);            // x9 = 0x800 (MEIE)
    prog[p++] = csrrw(0, 12'h304, 9);
    prog[p++] = csrrsi(0, 12'h300, 8);        // MIE
    prog[p++] = jal(0, 0);                    // wait
    p = 128;                                  // handler at 0x200
    prog[p++] = csrrs(8, 12'h342, 0);         // x8 = mcause
    prog[p++] = blt(8, 0, 24);                // interrupt -> +24
    prog[p++] = sw(8, 2, 768);                // dmem[192+h] = 11
    prog[p++] = csrrs(10, 12'h341, 0);
    prog[p++] = addi(10, 10, 4);
    prog[p++] = csrrw(0, 12'h341, 10);
    prog[p++] = mret();
    prog[p++] = sw(8, 2, 1024);               // dmem[256+h] = 0x8000000B
    prog[p++] = jal(0, 0);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); host_imem_we = 1; host_imem_addr = 11'(i); host_imem_wdata = prog[i];
    end
    @(negedge clk); host_imem_we = 0;
    rst_n = 1;
    repeat (600) @(negedge clk);
    for (int h = 0; h < 8; h++) begin
      logic [31:0] v;
      rd(64 + h, v);  checks++; if (v != 32'(h + 115)) begin failures++; $display("FAIL h%0d st %0d", h, v); end
      rd(128 + h, v); checks++; if (v != 32'(h + 116)) begin failures++; $display("FAIL h%0d ld %0d", h, v); end
      rd(160 + h, v); checks++; if (v != 32'h140 + 32'(h)) begin failures++; $display("FAIL h%0d csr rd %h", h, v); end
      rd(192 + h, v); checks++; if (v != 32'd11) begin failures++; $display("FAIL h%0d ecall cause %h", h, v); end
      checks++;
      if (csr_seen[h] != 1 || csr_val[h] != h + 115) begin failures++; $display("FAIL h%0d mvu write", h); end
    end
    mvu_irq = 8'hFF;
    repeat (100) @(negedge clk);
    for (int h = 0; h < 8; h++) begin
      logic [31:0] v;
      rd(256 + h, v); checks++; if (v != 32'h8000_000B) begin failures++; $display("FAIL h%0d irq cause %h", h, v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // barrel order: the hart in execute advances by one every cycle
  logic [2:0] prev_sel;
  always @(posedge clk) begin
    if (rst_n && dut.e_v && dut.m_v) begin
      if (mvu_sel != prev_sel + 3'd1) begin failures++; $display("FAIL barrel order"); end
    end
    prev_sel <= mvu_sel;
  end
endmodule
