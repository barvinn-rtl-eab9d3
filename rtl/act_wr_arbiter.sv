// act_wr_arbiter: fixed-priority arbiter for the write port of an activation RAM.
//
// Three sources may write an MVU's activation RAM: the interconnect (results
// from other MVUs), the controller side (data loaded from the host) and the
// MVU's own output stage.  As the paper specifies, the interconnect has the
// highest priority, then the controller, then the MVU itself.  The winner's
// write goes to the RAM in the same cycle; a source that loses sees its grant
// low and must hold its request.  Purely combinational.
module act_wr_arbiter
  import barvinn_pkg::*;
(
  input  act_wr_t xbar_wr,
  input  act_wr_t ctrl_wr,
  input  act_wr_t self_wr,
  output act_wr_t ram_wr,
  output logic    xbar_gnt,
  output logic    ctrl_gnt,
  output logic    self_gnt
);

  always_comb begin
    xbar_gnt = xbar_wr.valid;
    ctrl_gnt = ctrl_wr.valid && !xbar_wr.valid;
    self_gnt = self_wr.valid && !xbar_wr.valid && !ctrl_wr.valid;
    if (xbar_gnt)      ram_wr = xbar_wr;
    else if (ctrl_gnt) ram_wr = ctrl_wr;
    else               ram_wr = self_wr;
  end

endmodule
