// evaluation_processor -- fully parallel evaluation of a flattened, merged
// boosted-decision-tree forest; one event in and one score out every clock.
//
// The forest has N_TREE final trees over N_VAR input variables of N_BIT bits.
// Every tree has been flattened: each of its cut thresholds is extended through
// the whole input space, so the tree is a grid of bins and evaluating it means
// (1) finding, for each variable independently, which bin the value falls in,
// and (2) reading the score of the resulting grid cell. Datapath:
//
//   x --bus tap--> x_v --Bin Engine (t,v)--> b_{t,v} --tree_lut t--> O_t
//                                     --score_processor--> sum, transform --> score
//
// There are N_TREE * N_VAR Bin Engines, one per (tree, variable), all working
// in parallel; ENGINE selects the Bit Shift (BSBE) or Look Up (LUBE) kind.
// Each tree_lut holds prod_v NB_{t,v} scores in a synchronously read memory.
// The score processor adds the N_TREE scores (already weighted by the offline
// flow) and applies a passthrough (AdaBoost) or tanh (gradient boost).
//
// Timing (no stalls, no back-pressure; in_valid may be high every clock):
//   BSBE: latency 3 clocks  (bin register, score memory, sum register)
//   LUBE: latency 4 clocks  (one more for the threshold memory read)
// out_valid is in_valid delayed by LATENCY. The bin boundaries and scores are
// constants made at elaboration by bdt_pkg from SEED, standing in for a
// trained forest; NB_MIN..NB_MAX is the range of bins per variable per tree
// drawn for it (5..9 gives 27 730 score words at the defaults, near the
// source's 26 132 bins). Defaults are the benchmark of the source design: 4 variables,
// 8-bit inputs, thresholds and scores, 10 final trees, BSBE, AdaBoost
// passthrough, for which the source reports a latency of 3 and an interval of
// 1 clock. The grid depth N_LAYER = N_BIT and the valid/reset scheme are this
// design's choices.
module evaluation_processor
  import bdt_pkg::*;
#(
  parameter int unsigned N_VAR      = 4,
  parameter int unsigned N_BIT      = 8,
  parameter int unsigned N_TREE     = 10,
  parameter int unsigned SCORE_W    = 8,
  parameter int unsigned N_LAYER    = N_BIT,
  parameter engine_e     ENGINE     = ENG_BSBE,
  parameter xform_e      XFORM      = XFORM_PASS,
  parameter int unsigned TANH_SHIFT = 0,
  parameter int unsigned SEED       = 1,
  parameter int unsigned NB_MIN     = 5,
  parameter int unsigned NB_MAX     = 9,
  localparam int unsigned SUM_W     = SCORE_W + ((N_TREE > 1) ? $clog2(N_TREE) : 0),
  localparam int unsigned ENG_LAT   = (ENGINE == ENG_BSBE) ? 1 : 2,
  localparam int unsigned LATENCY   = ENG_LAT + 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N_VAR-1:0][N_BIT-1:0]   x,
  output logic                          out_valid,
  output logic signed [SUM_W-1:0]       score
);

  logic signed [N_TREE-1:0][SCORE_W-1:0] tree_score;
  logic [LATENCY-2:0]                    vld;

  for (genvar t = 0; t < N_TREE; t++) begin : g_tree
    localparam nb_vec_t NBV = tree_nbv(ENGINE, SEED, t, N_VAR, N_BIT, N_LAYER, NB_MIN, NB_MAX);
    logic [N_VAR-1:0][BIN_W-1:0] bin;

    for (genvar v = 0; v < N_VAR; v++) begin : g_var
      localparam int unsigned NB = NBV[v];
      localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;
      logic [BW-1:0] b;

      if (ENGINE == ENG_BSBE) begin : g_bsbe
        localparam grid_t G = bsbe_grid(SEED, t, v, N_BIT, N_LAYER, NB_MIN, NB_MAX);
        bsbe #(.N(N_BIT), .L(N_LAYER), .NB(NB), .BIN_LO(G.lo), .BIN_DEPTH(G.dep)) u_be (
          .clk(clk), .rst_n(rst_n), .x(x[v]), .b(b)
        );
      end else begin : g_lube
        localparam thr_t E = lube_thr(SEED, t, v, N_BIT, NB_MIN, NB_MAX);
        lube #(.N(N_BIT), .NB(NB), .EDGES(E.edges)) u_be (
          .clk(clk), .rst_n(rst_n), .x(x[v]), .b(b)
        );
      end

      assign bin[v] = BIN_W'(b);
    end

    tree_lut #(.N_VAR(N_VAR), .NBV(NBV), .SCORE_W(SCORE_W), .SEED(SEED), .TREE(t)) u_lut (
      .clk(clk), .bin(bin), .score(tree_score[t])
    );
  end

  // Valid pipeline up to the score processor, which adds the last stage.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LATENCY-3:0], in_valid};
  end

  score_processor #(
    .N_TREE(N_TREE), .SCORE_W(SCORE_W), .XFORM(XFORM), .TANH_SHIFT(TANH_SHIFT)
  ) u_sp (
    .clk(clk), .rst_n(rst_n),
    .in_valid(vld[LATENCY-2]), .in_score(tree_score),
    .out_valid(out_valid), .out_score(score)
  );

endmodule
