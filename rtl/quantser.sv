// quantser: quantiser / serialiser at the end of the MVU pipeline.
//
// It takes one 32-bit value from each of the 64 lanes and sends it out as
// oprec one-bit planes, most significant first: plane t holds bit (qmsb - t) of
// every lane.  The 64 bits of a plane form one 64-bit word in the same
// bit-transposed layout the activation RAM uses, so the words can be written
// back as the next layer's input (to address obase + t).  Selecting the MSB
// position and the bit depth implements the quantisation; bits below qmsb -
// oprec + 1 are dropped and bits above qmsb are ignored (no rounding or
// saturation: the paper does not describe any).
//
// Handshake: load is accepted when can_load is high (empty, or sending its
// last word this cycle).  Each word is offered with out_valid and leaves on a
// cycle when out_ready is high.  Timing: the first word is offered the cycle
// after load; one word per cycle while out_ready stays high.
module quantser
  import barvinn_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic [N-1:0][ACC_W-1:0] x,
  input  logic [PREC_W-1:0]       oprec,
  input  logic [4:0]              qmsb,
  input  logic [ACT_AW-1:0]       obase,
  output logic                    can_load,
  output logic                    out_valid,
  output logic [ACT_AW-1:0]       out_addr,
  output logic [N-1:0]            out_data,
  input  logic                    out_ready
);

  logic [N-1:0][ACC_W-1:0] hold;
  logic [PREC_W-1:0]       left;   // words still to send
  logic [4:0]              bitpos;

  assign out_valid = (left != '0);
  assign can_load  = (left == '0) || (left == PREC_W'(1) && out_ready);

  always_comb
    for (int i = 0; i < N; i++) out_data[i] = hold[i][bitpos];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold     <= '0;
      left     <= '0;
      bitpos   <= '0;
      out_addr <= '0;
    end else if (load && can_load) begin
      hold     <= x;
      left     <= (oprec == '0) ? PREC_W'(1) : oprec;
      bitpos   <= qmsb;
      out_addr <= obase;
    end else if (out_valid && out_ready) begin
      left     <= left - PREC_W'(1);
      bitpos   <= bitpos - 5'd1;
      out_addr <= out_addr + ACT_AW'(1);
    end
  end

endmodule
