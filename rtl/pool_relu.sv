// pool_relu: combined max-pool / ReLU stage, a comparator and a register per lane.
//
// The controller produces the values of one max-pool window as consecutive
// tiles; this unit keeps the running maximum of each lane in a register.  At
// the start of a window the register starts from 0 when relu is set (so the
// result is max(0, window)) and from the most negative value otherwise (plain
// max pool).  With pool_len = 1 and relu set the unit is a plain ReLU; with
// pool_len = 1 and relu clear it passes values through.  After pool_len values
// the window's result is output and the register restarts.
// From the paper: comparator with an internal register, initialised to 0 for
// ReLU, max pool done by ordering the data.  The window counter is this design's.
// Timing: one register stage; y_valid is high one enabled cycle after the
// window's last input.
module pool_relu
  import barvinn_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    relu,
  input  logic [7:0]              pool_len,
  input  logic                    x_valid,
  input  logic [N-1:0][ACC_W-1:0] x,
  output logic [N-1:0][ACC_W-1:0] y,
  output logic                    y_valid
);

  logic [7:0] cnt;
  logic       first, final_in;
  logic [N-1:0][ACC_W-1:0] run;    // running maximum

  assign first    = (cnt == 8'd0);
  assign final_in = (cnt + 8'd1 >= pool_len);

  for (genvar i = 0; i < N; i++) begin : g_lane
    logic signed [ACC_W-1:0] ref_v, nxt;
    always_comb begin
      ref_v = first ? (relu ? '0 : {1'b1, {(ACC_W-1){1'b0}}}) : $signed(run[i]);
      nxt   = ($signed(x[i]) > ref_v) ? $signed(x[i]) : ref_v;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        run[i] <= '0;
        y[i]   <= '0;
      end else if (en && x_valid) begin
        run[i] <= nxt;
        if (final_in) y[i] <= nxt;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      y_valid <= 1'b0;
    end else if (en) begin
      y_valid <= x_valid && final_in;
      if (x_valid) cnt <= final_in ? 8'd0 : cnt + 8'd1;
    end
  end

endmodule
