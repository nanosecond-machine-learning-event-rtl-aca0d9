// score_processor -- combines the scores of all trees into the BDT output.
//
// out' = sum over t of in'_t, then out'' = f(out'). Because the offline flow
// stores each tree's score already multiplied by its normalised boost weight,
// AdaBoost needs only the sum (f = passthrough). Gradient boost needs
// f = tanh, done here by the piece-wise approximation in tanh_pwl.
// The sum is kept at full width (SCORE_W + clog2(N_TREE) bits) so it cannot
// overflow; with tanh the result has the magnitude scale 2**(SCORE_W-1)-1.
//
// Timing: sum and transform are combinational, the result is registered:
// out_score follows the tree scores by one clock, one result every clock.
// out_valid is in_valid delayed by that clock (reset to 0).
//
// Parameters: N_TREE trees, SCORE_W width of one tree score, XFORM transform,
// TANH_SHIFT breakpoint scale of the tanh.
module score_processor
  import bdt_pkg::*;
#(
  parameter int unsigned N_TREE     = 10,
  parameter int unsigned SCORE_W    = 8,
  parameter xform_e      XFORM      = XFORM_PASS,
  parameter int unsigned TANH_SHIFT = 0,
  localparam int unsigned SUM_W     = SCORE_W + ((N_TREE > 1) ? $clog2(N_TREE) : 0)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic signed [N_TREE-1:0][SCORE_W-1:0] in_score,
  output logic                           out_valid,
  output logic signed [SUM_W-1:0]        out_score
);

  logic signed [SUM_W-1:0] sum;     // out'
  logic signed [SUM_W-1:0] xformed; // out''

  always_comb begin
    sum = '0;
    for (int unsigned t = 0; t < N_TREE; t++)
      sum = sum + SUM_W'(signed'(in_score[t]));
  end

  if (XFORM == XFORM_TANH) begin : g_tanh
    tanh_pwl #(.IN_W(SUM_W), .Q(SCORE_W - 1), .SHIFT(TANH_SHIFT)) u_tanh (
      .s(sum),
      .y(xformed)
    );
  end else begin : g_pass
    assign xformed = sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_score <= '0;
    end else begin
      out_valid <= in_valid;
      out_score <= xformed;
    end
  end

endmodule
