// mvu: Matrix Vector Unit, a 64-lane bit-serial vector pipeline.
//
// Datapath, in pipeline order:
//   mvu_ctrl   issues one activation-word / weight-tile read per cycle
//   act RAM    64-bit words, 32 banks x 1024 (15-bit word address)
//   weight RAM 4096-bit words, each a 64x64 bit tile (row = output channel)
//   mvp        64 VVPs: 1-bit products, adder tree, shifter/accumulator
//   scaler     x * s + b per lane; s from the scaler RAM (64 x 16 bit per
//              word), b from the bias RAM (64 x 32 bit per word)
//   pool_relu  running max per lane over a pooling window, optional ReLU
//   quantser   picks oprec bits below qmsb, emits them as 64-bit planes
// Output planes go to this MVU's own activation RAM (dest = 0) or to the
// interconnect with a destination mask.  The activation RAM's write port is
// shared by the interconnect, the controller/host and the MVU's own output, in
// that order of priority (act_wr_arbiter).
//
// Control: the controller (one hart of the barrel core) writes the control
// registers through csr_wr (register numbers in barvinn_pkg).  Writing
// COMMAND bit 0 starts the job held in the registers; if the MVU is still busy
// the start waits until it is idle, so the next job can be prepared while one
// runs.  When a job has fully drained the MVU raises irq, which stays high
// until COMMAND bit 1 is written.  STATUS reads {irq, busy}.
//
// Stall: when the quantiser cannot take a finished tile (it is still sending
// the previous one, or its write was not granted) every stage before it holds.
// Latency: a tile's result reaches the quantiser 6 cycles after the tile's last
// read is issued (RAM, two VVP stages, scaler, pool/ReLU, load), and then
// takes oprec cycles to send.
// The host reads the activation RAM through host_rd only while no job runs.
// From the paper: the module list and order, widths (Fig. 1), memory roles,
// priorities, interrupt on completion, programming while busy.  Memory depths
// other than the activation RAM, the register map and stall scheme are this
// design's.
module mvu
  import barvinn_pkg::*;
#(
  parameter int unsigned N      = LANES,
  parameter int unsigned A_AW   = ACT_AW,
  parameter int unsigned W_AW   = WGT_AW,
  parameter int unsigned S_AW   = SB_AW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // control registers
  input  csr_wr_t                  csr_wr,
  input  logic [5:0]               csr_raddr,
  output logic [31:0]              csr_rdata,
  output logic                     irq,
  output logic                     busy,
  // host / controller side memory access
  input  act_wr_t                  host_act_wr,
  output logic                     host_act_gnt,
  input  logic                     host_act_re,
  input  logic [ACT_AW-1:0]        host_act_raddr,
  output logic [N-1:0]             host_act_rdata,
  input  logic                     host_w_we,
  input  logic [ACT_AW-1:0]        host_w_addr,
  input  logic [N-1:0][N-1:0]      host_w_data,
  input  logic                     host_s_we,
  input  logic [ACT_AW-1:0]        host_s_addr,
  input  logic [N-1:0][SCALE_W-1:0] host_s_data,
  input  logic                     host_b_we,
  input  logic [ACT_AW-1:0]        host_b_addr,
  input  logic [N-1:0][BIAS_W-1:0] host_b_data,
  // interconnect
  output xbar_req_t                xbar_req,
  input  logic                     xbar_gnt,
  input  act_wr_t                  xbar_in
);

  // ---------------------------------------------------------------- registers
  logic [31:0] regs [N_MVU_CSR];
  mvu_job_t    job_in, job;
  logic        start_pend, irq_q, busy_q;
  logic        running, en;

  always_comb begin
    job_in          = '0;
    job_in.aprec    = regs[R_APREC][PREC_W-1:0];
    job_in.wprec    = regs[R_WPREC][PREC_W-1:0];
    job_in.oprec    = regs[R_OPREC][PREC_W-1:0];
    job_in.qmsb     = regs[R_QUANT][4:0];
    job_in.asigned  = regs[R_QUANT][8];
    job_in.wsigned  = regs[R_QUANT][9];
    job_in.scale_en = regs[R_MODE][0];
    job_in.relu     = regs[R_MODE][1];
    job_in.pool_len = regs[R_MODE][15:8];
    job_in.dest     = regs[R_DEST][N_MVU-1:0];
    job_in.abase    = regs[R_ABASE][ACT_AW-1:0];
    job_in.wbase    = regs[R_WBASE][ACT_AW-1:0];
    job_in.sbase    = regs[R_SBASE][ACT_AW-1:0];
    job_in.bbase    = regs[R_BBASE][ACT_AW-1:0];
    job_in.obase    = regs[R_OBASE][ACT_AW-1:0];
    job_in.ojump    = regs[R_OJUMP][ACT_AW-1:0];
    for (int l = 0; l < NLOOPS; l++) begin
      job_in.icnt[l]   = regs[R_ICNT   + 6'(l)][CNT_W-1:0];
      job_in.iajump[l] = regs[R_IAJUMP + 6'(l)][ACT_AW:0];
      job_in.iwjump[l] = regs[R_IWJUMP + 6'(l)][ACT_AW:0];
      job_in.ocnt[l]   = regs[R_OCNT   + 6'(l)][CNT_W-1:0];
      job_in.oajump[l] = regs[R_OAJUMP + 6'(l)][ACT_AW:0];
      job_in.owjump[l] = regs[R_OWJUMP + 6'(l)][ACT_AW:0];
      job_in.osjump[l] = regs[R_OSJUMP + 6'(l)][ACT_AW:0];
      job_in.objump[l] = regs[R_OBJUMP + 6'(l)][ACT_AW:0];
    end
  end

  logic start_now;
  assign start_now = start_pend && !busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_MVU_CSR; r++) regs[r] <= '0;
      start_pend <= 1'b0;
      irq_q      <= 1'b0;
    end else begin
      if (start_now) start_pend <= 1'b0;
      if (busy_q && !busy) irq_q <= 1'b1;        // job drained
      if (csr_wr.we && csr_wr.addr < 6'(N_MVU_CSR)) begin
        if (csr_wr.addr == R_COMMAND) begin
          if (csr_wr.wdata[0]) start_pend <= 1'b1;
          if (csr_wr.wdata[1]) irq_q      <= 1'b0;
        end else if (csr_wr.addr != R_STATUS) begin
          regs[csr_wr.addr] <= csr_wr.wdata;
        end
      end
    end
  end

  always_comb begin
    if (csr_raddr == R_STATUS)          csr_rdata = {30'd0, irq_q, busy_q | start_pend};
    else if (csr_raddr < 6'(N_MVU_CSR)) csr_rdata = regs[csr_raddr];
    else                                csr_rdata = '0;
  end
  assign irq = irq_q;

  // ---------------------------------------------------------------- sequencer
  logic              rd_valid, f_clr, f_shift, f_neg, f_last;
  logic [ACT_AW-1:0] a_addr, w_addr, s_addr, b_addr;

  mvu_ctrl u_ctrl (
    .clk, .rst_n, .en, .start(start_now), .job_in, .job, .running,
    .rd_valid, .a_addr, .w_addr, .s_addr, .b_addr,
    .f_clr, .f_shift, .f_neg, .f_last
  );

  // ---------------------------------------------------------------- memories
  act_wr_t   act_w;
  logic      self_gnt;
  act_wr_t   self_wr;
  logic [N-1:0]          act_q;
  logic [N-1:0][N-1:0]   wgt_q;
  logic [N*SCALE_W-1:0]  s_q;
  logic [N*BIAS_W-1:0]   b_q;

  ram_1r1w #(.W(N), .AW(A_AW)) u_act (
    .clk,
    .re(running ? en : host_act_re),
    .raddr(running ? a_addr[A_AW-1:0] : host_act_raddr[A_AW-1:0]),
    .rdata(act_q),
    .we(act_w.valid), .waddr(act_w.addr[A_AW-1:0]), .wdata(act_w.data[N-1:0])
  );
  assign host_act_rdata = act_q;

  ram_1r1w #(.W(N*N), .AW(W_AW)) u_wgt (
    .clk, .re(en), .raddr(w_addr[W_AW-1:0]), .rdata(wgt_q),
    .we(host_w_we), .waddr(host_w_addr[W_AW-1:0]), .wdata(host_w_data)
  );

  // Scaler and bias reads are issued two stages after the tile's last read so
  // that their data meets the tile's result at the scaler.
  logic [1:0]             sb_v;
  logic [1:0][ACT_AW-1:0] sa_d, ba_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sb_v <= '0; sa_d <= '0; ba_d <= '0;
    end else if (en) begin
      sb_v <= {sb_v[0], rd_valid & f_last};
      sa_d <= {sa_d[0], s_addr};
      ba_d <= {ba_d[0], b_addr};
    end
  end

  ram_1r1w #(.W(N*SCALE_W), .AW(S_AW)) u_sram (
    .clk, .re(en & sb_v[1]), .raddr(sa_d[1][S_AW-1:0]), .rdata(s_q),
    .we(host_s_we), .waddr(host_s_addr[S_AW-1:0]), .wdata(host_s_data)
  );
  ram_1r1w #(.W(N*BIAS_W), .AW(S_AW)) u_bram (
    .clk, .re(en & sb_v[1]), .raddr(ba_d[1][S_AW-1:0]), .rdata(b_q),
    .we(host_b_we), .waddr(host_b_addr[S_AW-1:0]), .wdata(host_b_data)
  );

  // Flags travel one stage to meet the RAM data.
  logic d_valid, d_clr, d_shift, d_neg, d_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {d_valid, d_clr, d_shift, d_neg, d_last} <= '0;
    end else if (en) begin
      {d_valid, d_clr, d_shift, d_neg, d_last} <= {rd_valid, f_clr, f_shift, f_neg, f_last};
    end
  end

  // ---------------------------------------------------------------- pipeline
  logic [N-1:0][ACC_W-1:0] mvp_y, sc_y, pr_y;
  logic                    mvp_v, sc_v, pr_v;

  mvp #(.N(N)) u_mvp (
    .clk, .rst_n, .en, .in_valid(d_valid), .x(act_q), .w(wgt_q),
    .clr(d_clr), .shift(d_shift), .neg(d_neg), .last(d_last),
    .y(mvp_y), .y_valid(mvp_v)
  );

  scaler #(.N(N)) u_scaler (
    .clk, .rst_n, .en, .en_scale(job.scale_en), .x_valid(mvp_v), .x(mvp_y),
    .s(s_q), .b(b_q), .y(sc_y), .y_valid(sc_v)
  );

  pool_relu #(.N(N)) u_pool (
    .clk, .rst_n, .en, .relu(job.relu), .pool_len(job.pool_len),
    .x_valid(sc_v), .x(sc_y), .y(pr_y), .y_valid(pr_v)
  );

  logic              qs_can_load, qs_valid, qs_ready;
  logic [ACT_AW-1:0] qs_addr, out_ptr;
  logic [N-1:0]      qs_data;

  assign en = !(pr_v && !qs_can_load);

  quantser #(.N(N)) u_qs (
    .clk, .rst_n, .load(pr_v), .x(pr_y), .oprec(job.oprec), .qmsb(job.qmsb),
    .obase(out_ptr), .can_load(qs_can_load), .out_valid(qs_valid),
    .out_addr(qs_addr), .out_data(qs_data), .out_ready(qs_ready)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    out_ptr <= '0;
    else if (start_now)            out_ptr <= job_in.obase;
    else if (pr_v && qs_can_load)  out_ptr <= out_ptr + job.ojump;
  end

  // ---------------------------------------------------------------- output
  always_comb begin
    self_wr        = '0;
    xbar_req       = '0;
    if (job.dest == '0) begin
      self_wr.valid = qs_valid;
      self_wr.addr  = qs_addr;
      self_wr.data  = qs_data;
      qs_ready      = self_gnt;
    end else begin
      xbar_req.valid = qs_valid;
      xbar_req.dest  = job.dest;
      xbar_req.addr  = qs_addr;
      xbar_req.data  = qs_data;
      qs_ready       = xbar_gnt;
    end
  end

  act_wr_arbiter u_arb (
    .xbar_wr(xbar_in), .ctrl_wr(host_act_wr), .self_wr,
    .ram_wr(act_w), .xbar_gnt(), .ctrl_gnt(host_act_gnt), .self_gnt
  );

  // ---------------------------------------------------------------- busy / irq
  logic [4:0] occ;   // read in flight in RAM, VVP x2, scaler, pool stages
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ    <= '0;
      busy_q <= 1'b0;
    end else begin
      if (en) occ <= {occ[3:0], rd_valid};
      busy_q <= busy;
    end
  end
  assign busy = running || start_now || (occ != '0) || pr_v || qs_valid;

endmodule
