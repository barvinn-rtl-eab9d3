// mvp: Matrix Vector Product unit, 64 VVP pipelines side by side.
//
// The 64-bit activation word (one bit plane of 64 elements) is broadcast to all
// VVPs; row r of the 64x64 weight tile (one bit plane of output channel r) goes
// to VVP r.  All VVPs share the control flags, so the unit yields a 64-element
// vector of 32-bit dot products every time a dot product ends.  For b_w-bit
// weights and b_a-bit activations one 64x64 tile takes b_w*b_a cycles.
// Interface and timing are those of vvp (two cycles from input to result).
module mvp
  import barvinn_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  logic                           in_valid,
  input  logic [N-1:0]                   x,
  input  logic [N-1:0][N-1:0]            w,
  input  logic                           clr,
  input  logic                           shift,
  input  logic                           neg,
  input  logic                           last,
  output logic [N-1:0][ACC_W-1:0]        y,
  output logic                           y_valid
);

  logic [N-1:0] v;

  for (genvar r = 0; r < N; r++) begin : g_vvp
    logic signed [ACC_W-1:0] acc_r;
    vvp #(.N(N)) u_vvp (
      .clk, .rst_n, .en, .in_valid, .x, .w(w[r]), .clr, .shift, .neg, .last,
      .acc(acc_r), .acc_valid(v[r])
    );
    assign y[r] = acc_r;
  end

  assign y_valid = v[0];

endmodule
