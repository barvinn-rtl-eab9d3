// transposer: converts host data into the bit-transposed activation layout.
//
// The host streams the elements of one 64-element block, one element of up to
// 16 bits per cycle (element l of the block on the l-th accepted cycle).  Once
// the 64th element is in, the unit emits prec words of 64 bits, one per cycle:
// word t holds bit (prec-1-t) of all 64 elements, so the MSB plane comes first
// and lands at the lowest address, as in the paper's layout.  Words go to
// consecutive addresses starting at the base given with the block's first
// element.  The element-per-cycle input and the handshake are this design's;
// the paper only says that such a module converts data from the host.
// Handshake: in_ready is low while a block is being emitted; out_valid words
// leave when out_ready is high.
module transposer
  import barvinn_pkg::*;
#(
  parameter int unsigned N  = LANES,
  parameter int unsigned EW = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [EW-1:0]      in_elem,
  input  logic [PREC_W-1:0]  prec,
  input  logic [ACT_AW-1:0]  base,
  output logic               out_valid,
  output logic [ACT_AW-1:0]  out_addr,
  output logic [N-1:0]       out_data,
  input  logic               out_ready
);

  logic [N-1:0][EW-1:0]  buf_q;
  logic [$clog2(N):0]    n_in;
  logic [PREC_W-1:0]     left, bitpos;
  logic [ACT_AW-1:0]     addr_q;

  assign in_ready  = (left == '0);
  assign out_valid = (left != '0);
  assign out_addr  = addr_q;

  always_comb
    for (int i = 0; i < N; i++) out_data[i] = buf_q[i][bitpos[3:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; n_in <= '0; left <= '0; bitpos <= '0; addr_q <= '0;
    end else if (in_ready) begin
      if (in_valid) begin
        buf_q[n_in[$clog2(N)-1:0]] <= in_elem;
        if (n_in == '0) addr_q <= base;
        if (n_in == ($clog2(N)+1)'(N-1)) begin
          n_in   <= '0;
          left   <= (prec == '0) ? PREC_W'(1) : prec;
          bitpos <= (prec == '0) ? '0 : prec - PREC_W'(1);
        end else begin
          n_in <= n_in + 1'b1;
        end
      end
    end else if (out_ready) begin
      left   <= left - PREC_W'(1);
      bitpos <= bitpos - PREC_W'(1);
      addr_q <= addr_q + ACT_AW'(1);
    end
  end

endmodule
