// ram_1r1w: synchronous memory with one read and one write port.
//
// Used for the activation, weight, scaler and bias memories of an MVU and for
// the controller's instruction and data memories.  The read has one cycle of
// latency and holds its output while re is low, so a stalled
// pipeline keeps the word it was given.  A read and a write of the same address
// in one cycle return the old word.  Written as a plain array so that a
// synthesis tool maps it to on-chip block RAM.
module ram_1r1w #(
  parameter int unsigned W  = 64,
  parameter int unsigned AW = 10
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);

  logic [W-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
