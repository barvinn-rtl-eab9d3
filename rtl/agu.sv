// agu: address generation unit with a nest of up to five loops.
//
// Each loop has an iteration count and a signed address jump.  On every step
// the innermost loop that has not reached its last iteration advances: its
// counter increments, the loops inside it restart at 0, and that loop's jump
// is added to the address.  A jump may be negative, so an outer loop's jump
// also carries the backward correction for the inner loops it restarts.  This
// is the "small accumulators and small adders" scheme of the paper; the exact
// register set is this design's.
//
// Interface: start loads base and clears the counters; step advances.
// addr is the current address; last is high while every loop is on its final
// iteration, i.e. the current address is the last of the sequence.  A step
// taken while last is high restarts the nest at base.  Count 0 is read as 1.
// Timing: addr changes on the clock edge after start or step.
module agu
  import barvinn_pkg::*;
#(
  parameter int unsigned L  = NLOOPS,
  parameter int unsigned AW = ACT_AW
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       step,
  input  logic [AW-1:0]              base,
  input  logic [L-1:0][CNT_W-1:0]    cnt,
  input  logic [L-1:0][AW:0]         jump,
  output logic [AW-1:0]              addr,
  output logic                       last
);

  logic [L-1:0][CNT_W-1:0] ctr;
  logic [L-1:0]            at_end;

  always_comb begin
    for (int i = 0; i < L; i++)
      at_end[i] = (ctr[i] + CNT_W'(1) >= cnt[i]);
    last = &at_end;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctr  <= '0;
      addr <= '0;
    end else if (start || (step && last)) begin
      ctr  <= '0;
      addr <= base;
    end else if (step) begin
      // Advance the innermost loop that is not on its final iteration.
      automatic logic done = 1'b0;
      for (int i = 0; i < L; i++) begin
        if (!done) begin
          if (!at_end[i]) begin
            ctr[i] <= ctr[i] + CNT_W'(1);
            addr   <= addr + jump[i][AW-1:0];
            done = 1'b1;
          end else begin
            ctr[i] <= '0;
          end
        end
      end
    end
  end

endmodule
