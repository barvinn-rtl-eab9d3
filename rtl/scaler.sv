// scaler: per-lane fixed-point multiply-add behind the MVP (batch norm, LSQ scale).
//
// Each of the 64 lanes computes y = x * s + b, where x is the lane's 32-bit MVP
// result, s a signed 16-bit operand from the scaler RAM and b a signed 32-bit
// bias from the bias RAM.  As in the paper the multiplier is 27 x 16 bits (the
// FPGA DSP port widths), so x enters through its low 27 bits, sign-extended;
// the sum is kept to 32 bits (wraps on overflow).  With en_scale low the unit
// passes x unchanged.  Fixed-point point position and overflow handling are
// this design's choices: the binary point is left to the quantiser's MSB
// setting.
// Timing: one register stage; y_valid follows x_valid by one enabled cycle.
module scaler
  import barvinn_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic                        en_scale,
  input  logic                        x_valid,
  input  logic [N-1:0][ACC_W-1:0]     x,
  input  logic [N-1:0][SCALE_W-1:0]   s,
  input  logic [N-1:0][BIAS_W-1:0]    b,
  output logic [N-1:0][ACC_W-1:0]     y,
  output logic                        y_valid
);

  for (genvar i = 0; i < N; i++) begin : g_lane
    logic signed [MUL_A_W+SCALE_W-1:0] prod;
    logic signed [ACC_W-1:0]           sum;
    always_comb begin
      prod = $signed(x[i][MUL_A_W-1:0]) * $signed(s[i]);
      sum  = ACC_W'(prod) + $signed(b[i]);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  y[i] <= '0;
      else if (en) y[i] <= en_scale ? sum : x[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y_valid <= 1'b0;
    else if (en) y_valid <= x_valid;
  end

endmodule
