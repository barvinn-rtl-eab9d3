// vvp: vector-vector product pipeline, one of the 64 rows of an MVP.
//
// Each cycle it takes bit j of 64 activations (x) and bit k of 64 weights (w),
// forms the 64 one-bit products with AND gates, sums them in a pairwise adder
// tree to an 8-bit count, and adds that count into a 32-bit shifter/accumulator.
// Following the paper's bit-serial scheme, partial sums are produced from the
// most to the least significant order of magnitude; when the magnitude drops,
// the accumulator is shifted left by one before the add (shift).  For 2's
// complement operands the MSB bit plane carries negative weight, so the
// controller marks those bit combinations with neg and the count is subtracted.
//
// Interface: x, w, clr (first add of a new dot product: start from 0), shift,
// neg, last (final add of the dot product), en (pipeline advance; low = stall).
// Timing: two register stages.  The count is registered one cycle after the
// inputs; the accumulator is updated the cycle after.  acc/acc_valid present
// the finished dot product two cycles after the input marked last.
// From the paper: 64 lanes, 1-bit multipliers, adder tree with 8-bit output,
// 32-bit shifter/accumulator, shift-by-one on a change of magnitude.  The
// subtract for signed operands and the exact flag timing are this design's.
module vvp
  import barvinn_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic [N-1:0]            x,
  input  logic [N-1:0]            w,
  input  logic                    clr,
  input  logic                    shift,
  input  logic                    neg,
  input  logic                    last,
  output logic signed [ACC_W-1:0] acc,
  output logic                    acc_valid
);

  localparam int unsigned LVLS = $clog2(N);

  // Adder tree over the one-bit products.
  logic [POP_W-1:0] tree [LVLS+1][N];
  always_comb begin
    for (int l = 0; l <= LVLS; l++)
      for (int i = 0; i < N; i++)
        tree[l][i] = '0;
    for (int i = 0; i < N; i++)
      tree[0][i] = POP_W'(x[i] & w[i]);
    for (int l = 1; l <= LVLS; l++)
      for (int i = 0; i < (N >> l); i++)
        tree[l][i] = tree[l-1][2*i] + tree[l-1][2*i+1];
  end

  // Stage 1: registered count and control flags.
  logic [POP_W-1:0] pop_q;
  logic             v_q, clr_q, shift_q, neg_q, last_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pop_q <= '0; v_q <= 1'b0; clr_q <= 1'b0; shift_q <= 1'b0; neg_q <= 1'b0; last_q <= 1'b0;
    end else if (en) begin
      pop_q   <= tree[LVLS][0];
      v_q     <= in_valid;
      clr_q   <= clr;
      shift_q <= shift;
      neg_q   <= neg;
      last_q  <= last;
    end
  end

  // Stage 2: shifter/accumulator.
  logic signed [ACC_W-1:0] base, term;
  always_comb begin
    base = clr_q ? '0 : (shift_q ? (acc <<< 1) : acc);
    term = neg_q ? -$signed({{(ACC_W-POP_W){1'b0}}, pop_q}) : $signed({{(ACC_W-POP_W){1'b0}}, pop_q});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else if (en) begin
      if (v_q) acc <= base + term;
      acc_valid <= v_q & last_q;
    end
  end

endmodule
