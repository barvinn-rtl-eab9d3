// crossbar: 8-way MVU-to-MVU interconnect with broadcast.
//
// Each source MVU offers one activation-RAM write with a destination mask;
// several mask bits send the same word to several MVUs (broadcast).  Every
// destination port picks, by fixed priority, the lowest-numbered source that
// addresses it and passes that source's address and data through.  A source is
// granted once every destination in its mask has picked it; until then it
// holds its request.  A broadcast that is blocked at one destination may
// already have been written at another; the repeat write is of the same word
// to the same address, so it is harmless.
// From the paper: 8-way crossbar, broadcast, fixed priority among sources.
// The priority order (lower index first) and the grant rule are this design's.
// Purely combinational; the destination's write arbiter gives it top priority.
module crossbar
  import barvinn_pkg::*;
#(
  parameter int unsigned N = N_MVU
) (
  input  xbar_req_t [N-1:0] req,
  output logic      [N-1:0] gnt,
  output act_wr_t   [N-1:0] dst_wr
);

  logic [N-1:0][N-1:0] pick;   // pick[d][s]: destination d takes source s

  always_comb begin
    for (int d = 0; d < N; d++) begin
      automatic logic found = 1'b0;
      pick[d]   = '0;
      dst_wr[d] = '0;
      for (int s = 0; s < N; s++) begin
        if (!found && req[s].valid && req[s].dest[d]) begin
          found        = 1'b1;
          pick[d][s]   = 1'b1;
          dst_wr[d].valid = 1'b1;
          dst_wr[d].addr  = req[s].addr;
          dst_wr[d].data  = req[s].data;
        end
      end
    end
    for (int s = 0; s < N; s++) begin
      gnt[s] = req[s].valid && (req[s].dest[N-1:0] != '0);
      for (int d = 0; d < N; d++)
        if (req[s].dest[d] && !pick[d][s]) gnt[s] = 1'b0;
    end
  end

endmodule
