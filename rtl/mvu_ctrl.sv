// mvu_ctrl: job sequencer of an MVU; drives memory reads and the MVP flags.
//
// A job computes a sequence of output tiles.  For each tile it runs the
// bit-serial dot product of the paper's Algorithm 1: the bit combinations
// (j, k) of activation bit j and weight bit k are taken in order of falling
// magnitude i = j + k, from (b_a-1)+(b_w-1) down to 0, and for each
// combination every block of the dot product is read (the blocks are the 64-
// element pieces of a long dot product, e.g. the input-channel blocks and the
// 3x3 kernel positions of a convolution).  One read pair is issued per cycle,
// so a tile takes b_a * b_w * blocks cycles.
//
// Addresses come from six AGUs (agu.sv).  Two inner AGUs (activation and
// weight, shared loop counts icnt) walk the blocks of one dot product and are
// replayed for every bit combination.  Four outer AGUs (activation, weight,
// scaler, bias, shared counts ocnt) step once per output tile, e.g. along an
// output row and over output-channel sets.  A block of b bits occupies b
// consecutive words, MSB first, so bit j of a block at address A is at
// A + (b-1-j).
//
// Flags for the MVP: clr on the first read of a tile, shift on the first read
// of each later magnitude, neg when exactly one of the two bits is the sign bit
// of a signed operand, last on the tile's final read.  sb_* carry the tile's
// scaler and bias addresses with last.
// Timing: start is taken when idle; the first read is issued the next cycle.
// Everything advances only while en is high (en low = pipeline stall).
// From the paper: the bit-serial ordering, b_w*b_a cycles per tile, up to five
// nested loops with forward/backward jumps, independent scaler/bias AGUs.  The
// split into inner and outer nests is this design's.
module mvu_ctrl
  import barvinn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               start,
  input  mvu_job_t           job_in,
  output mvu_job_t           job,      // latched job, used by the whole pipeline
  output logic               running,
  output logic               rd_valid,
  output logic [ACT_AW-1:0]  a_addr,
  output logic [ACT_AW-1:0]  w_addr,
  output logic [ACT_AW-1:0]  s_addr,
  output logic [ACT_AW-1:0]  b_addr,
  output logic               f_clr,
  output logic               f_shift,
  output logic               f_neg,
  output logic               f_last
);

  logic [PREC_W:0] i_q, j_q;          // magnitude and activation bit
  logic [PREC_W:0] k, jmax, kmax, jhi, i_nxt, j_first;
  logic            first_tile_rd, diag_first;
  logic            in_last, out_last, combo_last;
  logic [ACT_AW-1:0] ia, iw, oa, ow;

  logic agu_start, in_step, out_step;

  always_comb begin
    jmax = {1'b0, job.aprec} - 1'b1;
    kmax = {1'b0, job.wprec} - 1'b1;
    k    = i_q - j_q;
    jhi  = (i_q < jmax) ? i_q : jmax;
    combo_last = (i_q == '0);
    i_nxt   = i_q - 1'b1;
    j_first = (i_nxt > kmax) ? i_nxt - kmax : '0;
  end

  assign agu_start = start && !running;
  assign in_step   = running && en;
  assign out_step  = running && en && in_last && combo_last;

  agu #(.AW(ACT_AW)) u_ia (.clk, .rst_n, .start(agu_start), .step(in_step), .base('0),
    .cnt(job.icnt), .jump(job.iajump), .addr(ia), .last(in_last));
  agu #(.AW(ACT_AW)) u_iw (.clk, .rst_n, .start(agu_start), .step(in_step), .base('0),
    .cnt(job.icnt), .jump(job.iwjump), .addr(iw), .last());
  agu #(.AW(ACT_AW)) u_oa (.clk, .rst_n, .start(agu_start), .step(out_step), .base(job_in.abase),
    .cnt(job.ocnt), .jump(job.oajump), .addr(oa), .last(out_last));
  agu #(.AW(ACT_AW)) u_ow (.clk, .rst_n, .start(agu_start), .step(out_step), .base(job_in.wbase),
    .cnt(job.ocnt), .jump(job.owjump), .addr(ow), .last());
  agu #(.AW(ACT_AW)) u_os (.clk, .rst_n, .start(agu_start), .step(out_step), .base(job_in.sbase),
    .cnt(job.ocnt), .jump(job.osjump), .addr(s_addr), .last());
  agu #(.AW(ACT_AW)) u_ob (.clk, .rst_n, .start(agu_start), .step(out_step), .base(job_in.bbase),
    .cnt(job.ocnt), .jump(job.objump), .addr(b_addr), .last());

  // The AGUs load their bases from job_in on start and then follow the loop
  // counts and jumps of the latched job, so software may already write the
  // next job's registers while this one runs.

  always_comb begin
    rd_valid = running;
    a_addr   = oa + ia + ACT_AW'(jmax - j_q);
    w_addr   = ow + iw + ACT_AW'(kmax - k);
    f_clr    = first_tile_rd;
    f_shift  = diag_first && !first_tile_rd;
    f_neg    = (job.asigned && (j_q == jmax)) ^ (job.wsigned && (k == kmax));
    f_last   = in_last && combo_last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      job <= '0; running <= 1'b0; i_q <= '0; j_q <= '0;
      first_tile_rd <= 1'b0; diag_first <= 1'b0;
    end else if (agu_start) begin
      automatic logic [PREC_W:0] ja = {1'b0, job_in.aprec} - 1'b1;
      automatic logic [PREC_W:0] kw = {1'b0, job_in.wprec} - 1'b1;
      job           <= job_in;
      running       <= 1'b1;
      i_q           <= ja + kw;
      j_q           <= ja;          // i = ja + kw, so j starts at i - kw = ja
      first_tile_rd <= 1'b1;
      diag_first    <= 1'b1;
    end else if (running && en) begin
      first_tile_rd <= 1'b0;
      diag_first    <= 1'b0;
      if (in_last) begin
        if (combo_last) begin
          if (out_last) begin
            running <= 1'b0;
          end else begin
            i_q           <= jmax + kmax;
            j_q           <= jmax;
            first_tile_rd <= 1'b1;
            diag_first    <= 1'b1;
          end
        end else if (j_q < jhi) begin
          j_q <= j_q + 1'b1;
        end else begin
          i_q        <= i_nxt;
          j_q        <= j_first;
          diag_first <= 1'b1;
        end
      end
    end
  end

endmodule
