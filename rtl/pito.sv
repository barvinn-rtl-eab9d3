// pito: eight-hart barrel RV32I controller for the MVU array.
//
// One hardware thread (hart) per MVU.  A hart scheduler hands the pipeline to
// hart 0, 1, ..., 7, 0, ... on successive cycles, so each hart has exactly one
// instruction in flight and meets it again 8 cycles later.  The five stages
// (fetch, decode, execute, memory, commit) are therefore never in conflict
// for one hart: no forwarding, no hazard stalls and no branch prediction.
//   F  instruction memory read at the hart's PC
//   D  decode, register file read (each hart has its own 32 registers)
//   E  ALU, branch/jump resolution and PC update, CSR access, data address
//   M  data memory read/write returns
//   C  register file write
// Instruction and data memories are 8 KB each (2048 words), shared by all
// harts (Harvard).  The host loads them through the host_* ports.
//
// Machine-mode CSRs per hart: mstatus (MIE, MPIE), mie, mip (MEIP = the
// hart's MVU interrupt), mtvec, mepc, mcause, mscratch, mhartid, and the
// shared cycle/mcycle counter.  ECALL/EBREAK and illegal instructions trap
// to mtvec; MRET returns.  The MVU control registers appear as CSRs
// 0x7C0 + n (n < N_MVU_CSR, see barvinn_pkg); an access by hart h reaches
// MVU h through mvu_csr_* (write valid for one cycle, read combinational).
// All harts start at address 0 and tell themselves apart by mhartid.
// From the paper: RV32I, barrel of 8 harts each managing one MVU, the five
// stages, 8 KB + 8 KB shared memories, CSRs and interrupts for the MVU array.
// The CSR numbers, the reset address and the single-cycle CSR link to the MVUs
// (the paper uses an APB bus) are this design's.
module pito
  import barvinn_pkg::*;
#(
  parameter int unsigned NH = N_MVU,
  parameter int unsigned IAW = IMEM_AW,
  parameter int unsigned DAW = DMEM_AW
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host access to the memories
  input  logic                    host_imem_we,
  input  logic [IAW-1:0]          host_imem_addr,
  input  logic [31:0]             host_imem_wdata,
  input  logic                    host_dmem_we,
  input  logic [DAW-1:0]          host_dmem_addr,
  input  logic [31:0]             host_dmem_wdata,
  output logic [31:0]             host_dmem_rdata,
  // MVU control-register link
  output logic [$clog2(NH)-1:0]   mvu_sel,
  output csr_wr_t                 mvu_csr_wr,
  output logic [5:0]              mvu_csr_raddr,
  input  logic [31:0]             mvu_csr_rdata,
  input  logic [NH-1:0]           mvu_irq
);

  localparam int unsigned HW = $clog2(NH);


  // ---------------------------------------------------------------- state
  logic [31:0] pc      [NH];
  logic [31:0] rf      [NH][32];
  logic [NH-1:0] st_mie, st_mpie, ie_meie;
  logic [31:0] mtvec [NH], mepc [NH], mcause [NH], mscratch [NH];
  logic [31:0] cycle_q;
  logic [HW-1:0] sched;

  // ---------------------------------------------------------------- F
  logic [31:0]   imem_rdata;
  logic          f_v;
  logic [HW-1:0] f_h;
  logic [31:0]   f_pc;

  ram_1r1w #(.W(32), .AW(IAW)) u_imem (
    .clk, .re(1'b1), .raddr(pc[sched][IAW+1:2]), .rdata(imem_rdata),
    .we(host_imem_we), .waddr(host_imem_addr), .wdata(host_imem_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sched <= '0; f_v <= 1'b0; f_h <= '0; f_pc <= '0; cycle_q <= '0;
    end else begin
      sched   <= sched + 1'b1;
      f_v     <= 1'b1;
      f_h     <= sched;
      f_pc    <= pc[sched];
      cycle_q <= cycle_q + 32'd1;
    end
  end

  // ---------------------------------------------------------------- D
  logic          e_v;
  logic [HW-1:0] e_h;
  logic [31:0]   e_pc, e_ir, e_rs1, e_rs2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_v <= 1'b0; e_h <= '0; e_pc <= '0; e_ir <= 32'h13; e_rs1 <= '0; e_rs2 <= '0;
    end else begin
      e_v   <= f_v;
      e_h   <= f_h;
      e_pc  <= f_pc;
      e_ir  <= imem_rdata;
      e_rs1 <= (imem_rdata[19:15] == 5'd0) ? '0 : rf[f_h][imem_rdata[19:15]];
      e_rs2 <= (imem_rdata[24:20] == 5'd0) ? '0 : rf[f_h][imem_rdata[24:20]];
    end
  end

  // ---------------------------------------------------------------- E
  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [4:0]  rd;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  logic [31:0] op_b, alu_y, res, nxt_pc, csr_old, csr_new, csr_src, mem_addr;
  logic        wb_en, is_load, is_store, take_br, illegal, trap, is_mret, csr_we;
  logic [11:0] csr_a;
  logic [31:0] trap_cause;
  logic        irq_pend;

  always_comb begin
    opc   = e_ir[6:0];
    f3    = e_ir[14:12];
    f7    = e_ir[31:25];
    rd    = e_ir[11:7];
    imm_i = {{20{e_ir[31]}}, e_ir[31:20]};
    imm_s = {{20{e_ir[31]}}, e_ir[31:25], e_ir[11:7]};
    imm_b = {{19{e_ir[31]}}, e_ir[31], e_ir[7], e_ir[30:25], e_ir[11:8], 1'b0};
    imm_u = {e_ir[31:12], 12'd0};
    imm_j = {{11{e_ir[31]}}, e_ir[31], e_ir[19:12], e_ir[20], e_ir[30:21], 1'b0};
    csr_a = e_ir[31:20];

    // ALU, shared by OP and OP-IMM
    op_b = (opc == 7'b0110011) ? e_rs2 : imm_i;
    unique case (f3)
      3'd0: alu_y = (opc == 7'b0110011 && f7[5]) ? e_rs1 - op_b : e_rs1 + op_b;
      3'd1: alu_y = e_rs1 << op_b[4:0];
      3'd2: alu_y = {31'd0, $signed(e_rs1) < $signed(op_b)};
      3'd3: alu_y = {31'd0, e_rs1 < op_b};
      3'd4: alu_y = e_rs1 ^ op_b;
      3'd5: alu_y = f7[5] ? 32'($signed(e_rs1) >>> op_b[4:0]) : e_rs1 >> op_b[4:0];
      3'd6: alu_y = e_rs1 | op_b;
      default: alu_y = e_rs1 & op_b;
    endcase

    unique case (f3)
      3'd0: take_br = (e_rs1 == e_rs2);
      3'd1: take_br = (e_rs1 != e_rs2);
      3'd4: take_br = ($signed(e_rs1) <  $signed(e_rs2));
      3'd5: take_br = ($signed(e_rs1) >= $signed(e_rs2));
      3'd6: take_br = (e_rs1 <  e_rs2);
      3'd7: take_br = (e_rs1 >= e_rs2);
      default: take_br = 1'b0;
    endcase

    // CSR read
    mvu_csr_raddr = csr_a[5:0];
    unique case (csr_a)
      12'h300: csr_old = {24'd0, st_mpie[e_h], 3'd0, st_mie[e_h], 3'd0};
      12'h304: csr_old = {20'd0, ie_meie[e_h], 11'd0};
      12'h344: csr_old = {20'd0, mvu_irq[e_h], 11'd0};
      12'h305: csr_old = mtvec[e_h];
      12'h340: csr_old = mscratch[e_h];
      12'h341: csr_old = mepc[e_h];
      12'h342: csr_old = mcause[e_h];
      12'hF14: csr_old = 32'(e_h);
      12'hB00, 12'hC00: csr_old = cycle_q;
      default: csr_old = (csr_a >= CSR_MVU_BASE && csr_a < CSR_MVU_BASE + 12'(N_MVU_CSR))
                         ? mvu_csr_rdata : '0;
    endcase
    csr_src = f3[2] ? {27'd0, e_ir[19:15]} : e_rs1;
    unique case (f3[1:0])
      2'd1:    csr_new = csr_src;
      2'd2:    csr_new = csr_old | csr_src;
      default: csr_new = csr_old & ~csr_src;
    endcase
    csr_we = (f3[1:0] == 2'd1) || (e_ir[19:15] != 5'd0);

    // Instruction class
    wb_en = 1'b0; res = '0; is_load = 1'b0; is_store = 1'b0; is_mret = 1'b0;
    illegal = 1'b0; trap_cause = 32'd2;
    nxt_pc = e_pc + 32'd4;
    unique case (opc)
      7'b0110111: begin wb_en = 1'b1; res = imm_u; end                       // LUI
      7'b0010111: begin wb_en = 1'b1; res = e_pc + imm_u; end                // AUIPC
      7'b1101111: begin wb_en = 1'b1; res = e_pc + 32'd4; nxt_pc = e_pc + imm_j; end
      7'b1100111: begin wb_en = 1'b1; res = e_pc + 32'd4; nxt_pc = (e_rs1 + imm_i) & ~32'd1; end
      7'b1100011: begin if (take_br) nxt_pc = e_pc + imm_b; end              // branches
      7'b0000011: begin wb_en = 1'b1; is_load = 1'b1; end
      7'b0100011: begin is_store = 1'b1; end
      7'b0010011, 7'b0110011: begin wb_en = 1'b1; res = alu_y; end
      7'b0001111: ;                                                          // FENCE
      7'b1110011: begin
        if (f3 == 3'd0) begin
          if (e_ir[31:20] == 12'h302)      is_mret = 1'b1;
          else if (e_ir[31:20] == 12'h105) ;                                 // WFI
          else if (e_ir[31:20] == 12'h000) begin illegal = 1'b1; trap_cause = 32'd11; end
          else if (e_ir[31:20] == 12'h001) begin illegal = 1'b1; trap_cause = 32'd3;  end
          else illegal = 1'b1;
        end else begin
          wb_en = 1'b1; res = csr_old;
        end
      end
      default: illegal = 1'b1;
    endcase
    if (rd == 5'd0) wb_en = 1'b0;

    irq_pend = st_mie[e_h] && ie_meie[e_h] && mvu_irq[e_h];
    trap     = e_v && (irq_pend || illegal);
    if (irq_pend) trap_cause = 32'h8000_000B;
    mem_addr = e_rs1 + (is_store ? imm_s : imm_i);
  end

  // MVU control-register writes
  always_comb begin
    mvu_sel        = e_h;
    mvu_csr_wr     = '0;
    mvu_csr_wr.we  = e_v && !trap && opc == 7'b1110011 && f3 != 3'd0 && csr_we &&
                     csr_a >= CSR_MVU_BASE && csr_a < CSR_MVU_BASE + 12'(N_MVU_CSR);
    mvu_csr_wr.addr  = 6'(csr_a - CSR_MVU_BASE);
    mvu_csr_wr.wdata = csr_new;
  end

  // PC, machine CSRs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < NH; h++) begin
        pc[h] <= '0; mtvec[h] <= '0; mepc[h] <= '0; mcause[h] <= '0; mscratch[h] <= '0;
      end
      st_mie <= '0; st_mpie <= '0; ie_meie <= '0;
    end else if (e_v) begin
      if (trap) begin
        mepc[e_h]    <= e_pc;
        mcause[e_h]  <= trap_cause;
        st_mpie[e_h] <= st_mie[e_h];
        st_mie[e_h]  <= 1'b0;
        pc[e_h]      <= mtvec[e_h];
      end else if (is_mret) begin
        st_mie[e_h] <= st_mpie[e_h];
        pc[e_h]     <= mepc[e_h];
      end else begin
        pc[e_h] <= nxt_pc;
        if (opc == 7'b1110011 && f3 != 3'd0 && csr_we) begin
          unique case (csr_a)
            12'h300: begin st_mie[e_h] <= csr_new[3]; st_mpie[e_h] <= csr_new[7]; end
            12'h304: ie_meie[e_h]  <= csr_new[11];
            12'h305: mtvec[e_h]    <= csr_new;
            12'h340: mscratch[e_h] <= csr_new;
            12'h341: mepc[e_h]     <= csr_new;
            12'h342: mcause[e_h]   <= csr_new;
            default: ;
          endcase
        end
      end
    end
  end

  // ---------------------------------------------------------------- M
  logic [31:0]   dmem [2**DAW];
  logic [31:0]   dmem_q;
  logic          m_v, m_wb, m_load;
  logic [HW-1:0] m_h;
  logic [4:0]    m_rd;
  logic [31:0]   m_res;
  logic [2:0]    m_f3;
  logic [1:0]    m_off;
  logic [DAW-1:0] d_idx;

  assign d_idx = mem_addr[DAW+1:2];

  always_ff @(posedge clk) begin
    if (e_v && !trap && is_store) begin
      unique case (f3[1:0])
        2'd0: dmem[d_idx][8*mem_addr[1:0] +: 8]   <= e_rs2[7:0];
        2'd1: dmem[d_idx][16*mem_addr[1] +: 16]   <= e_rs2[15:0];
        default: dmem[d_idx] <= e_rs2;
      endcase
    end else if (host_dmem_we) begin
      dmem[host_dmem_addr] <= host_dmem_wdata;
    end
    dmem_q          <= dmem[d_idx];
    host_dmem_rdata <= dmem[host_dmem_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_v <= 1'b0; m_wb <= 1'b0; m_load <= 1'b0; m_h <= '0; m_rd <= '0;
      m_res <= '0; m_f3 <= '0; m_off <= '0;
    end else begin
      m_v    <= e_v;
      m_wb   <= e_v && !trap && wb_en;
      m_load <= is_load;
      m_h    <= e_h;
      m_rd   <= rd;
      m_res  <= res;
      m_f3   <= f3;
      m_off  <= mem_addr[1:0];
    end
  end

  // ---------------------------------------------------------------- C
  logic [31:0] ld_val, w_sh;
  always_comb begin
    w_sh = dmem_q >> (8 * m_off);
    unique case (m_f3)
      3'd0: ld_val = {{24{w_sh[7]}},  w_sh[7:0]};
      3'd1: ld_val = {{16{w_sh[15]}}, w_sh[15:0]};
      3'd4: ld_val = {24'd0, w_sh[7:0]};
      3'd5: ld_val = {16'd0, w_sh[15:0]};
      default: ld_val = dmem_q;
    endcase
  end

  always_ff @(posedge clk) begin
    if (m_v && m_wb) rf[m_h][m_rd] <= m_load ? ld_val : m_res;
  end

endmodule
