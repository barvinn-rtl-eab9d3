// barvinn_top: the BARVINN accelerator, eight MVUs under one barrel RV32I core.
//
// Pito (pito.sv) runs one hart per MVU; hart h writes MVU h's control
// registers and takes MVU h's completion interrupt.  The eight MVUs
// (mvu.sv) exchange output activations over an 8-way crossbar with broadcast
// (crossbar.sv).  The host side, which in the paper is an AXI memory
// interface, is brought out here as plain load ports:
//   host_imem_* / host_dmem_*   controller instruction and data memories
//   host_t_*                    element stream for an activation block; the
//                               transposer (transposer.sv) turns it into
//                               bit-transposed words written into the
//                               activation RAM of MVU host_mvu
//   host_w_* / host_s_* / host_b_*  weight tiles, scalers and biases of MVU host_mvu
//   host_act_*                  read-back of an activation RAM word of MVU host_mvu
// mvu_irq and mvu_busy are brought out for observation.
// Timing: everything runs on one clock; see the sub-modules for latencies.
// The block list and connections follow the paper's architecture figure; the
// host port shapes are this design's.
module barvinn_top
  import barvinn_pkg::*;
#(
  parameter int unsigned NM = N_MVU
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       host_imem_we,
  input  logic [IMEM_AW-1:0]         host_imem_addr,
  input  logic [31:0]                host_imem_wdata,
  input  logic                       host_dmem_we,
  input  logic [DMEM_AW-1:0]         host_dmem_addr,
  input  logic [31:0]                host_dmem_wdata,
  output logic [31:0]                host_dmem_rdata,
  input  logic [$clog2(NM)-1:0]      host_mvu,
  input  logic                       host_t_valid,
  output logic                       host_t_ready,
  input  logic [15:0]                host_t_elem,
  input  logic [PREC_W-1:0]          host_t_prec,
  input  logic [ACT_AW-1:0]          host_t_base,
  input  logic                       host_w_we,
  input  logic [ACT_AW-1:0]          host_w_addr,
  input  logic [LANES-1:0][LANES-1:0] host_w_data,
  input  logic                       host_s_we,
  input  logic [ACT_AW-1:0]          host_s_addr,
  input  logic [LANES-1:0][SCALE_W-1:0] host_s_data,
  input  logic                       host_b_we,
  input  logic [ACT_AW-1:0]          host_b_addr,
  input  logic [LANES-1:0][BIAS_W-1:0]  host_b_data,
  input  logic                       host_act_re,
  input  logic [ACT_AW-1:0]          host_act_raddr,
  output logic [LANES-1:0]           host_act_rdata,
  output logic [NM-1:0]              mvu_irq,
  output logic [NM-1:0]              mvu_busy
);

  localparam int unsigned HW = $clog2(NM);

  // ---------------------------------------------------------------- controller
  logic [HW-1:0] sel;
  csr_wr_t       csr_wr;
  logic [5:0]    csr_raddr;
  logic [31:0]   csr_rdata [NM];

  pito #(.NH(NM)) u_pito (
    .clk, .rst_n,
    .host_imem_we, .host_imem_addr, .host_imem_wdata,
    .host_dmem_we, .host_dmem_addr, .host_dmem_wdata, .host_dmem_rdata,
    .mvu_sel(sel), .mvu_csr_wr(csr_wr), .mvu_csr_raddr(csr_raddr),
    .mvu_csr_rdata(csr_rdata[sel]), .mvu_irq
  );

  // ---------------------------------------------------------------- transposer
  logic              t_valid, t_ready;
  logic [ACT_AW-1:0] t_addr;
  logic [LANES-1:0]  t_data;
  logic [NM-1:0]     host_gnt;

  transposer u_tp (
    .clk, .rst_n, .in_valid(host_t_valid), .in_ready(host_t_ready), .in_elem(host_t_elem),
    .prec(host_t_prec), .base(host_t_base),
    .out_valid(t_valid), .out_addr(t_addr), .out_data(t_data), .out_ready(t_ready)
  );
  assign t_ready = host_gnt[host_mvu];

  // ---------------------------------------------------------------- MVU array
  xbar_req_t [NM-1:0] xreq;
  logic      [NM-1:0] xgnt;
  act_wr_t   [NM-1:0] xdst;
  logic [LANES-1:0]   act_rd [NM];

  crossbar #(.N(NM)) u_xbar (.req(xreq), .gnt(xgnt), .dst_wr(xdst));

  for (genvar m = 0; m < NM; m++) begin : g_mvu
    csr_wr_t  m_csr;
    act_wr_t  m_host;
    logic     mine;
    assign mine = (host_mvu == HW'(m));
    always_comb begin
      m_csr       = csr_wr;
      m_csr.we    = csr_wr.we && (sel == HW'(m));
      m_host.valid = t_valid && mine;
      m_host.addr  = t_addr;
      m_host.data  = t_data;
    end
    mvu u_mvu (
      .clk, .rst_n,
      .csr_wr(m_csr), .csr_raddr, .csr_rdata(csr_rdata[m]),
      .irq(mvu_irq[m]), .busy(mvu_busy[m]),
      .host_act_wr(m_host), .host_act_gnt(host_gnt[m]),
      .host_act_re(host_act_re && mine), .host_act_raddr, .host_act_rdata(act_rd[m]),
      .host_w_we(host_w_we && mine), .host_w_addr, .host_w_data,
      .host_s_we(host_s_we && mine), .host_s_addr, .host_s_data,
      .host_b_we(host_b_we && mine), .host_b_addr, .host_b_data,
      .xbar_req(xreq[m]), .xbar_gnt(xgnt[m]), .xbar_in(xdst[m])
    );
  end

  assign host_act_rdata = act_rd[host_mvu];

endmodule
