// tree_lut -- score look-up of one flattened tree (LUT_t).
//
// After flattening and merging, a tree is a V-dimensional grid of bins, and
// each grid cell holds one pre-normalised score alpha_t = O_t * w_t. This block
// takes the V bin indices b_0 .. b_{V-1} produced by the Bin Engines of tree t,
// folds them into one mixed-radix address
//     addr = ((b_0 * NB_1 + b_1) * NB_2 + b_2) ... * NB_{V-1} + b_{V-1}
// and reads the score from a memory with exactly prod(NB_v) words, so the
// memory holds one word per bin of the flattened tree and no holes. The
// memory is read synchronously, like a block RAM; its contents are filled at
// elaboration from bdt_pkg::score_value (a stand-in for the trained forest).
// The address folding is this design's choice; the source design only says the
// table maps the list of bin indices to the score.
//
// Timing: address is combinational from the bin indices, score is valid one
// clock after the indices. No reset on the read register (a block RAM output).
//
// Parameters: N_VAR variables, NBV bins of each variable, SCORE_W score width,
// SEED and TREE select the contents.
module tree_lut
  import bdt_pkg::*;
#(
  parameter int unsigned N_VAR   = 2,
  parameter nb_vec_t     NBV     = {{(V_MAX-2)*16{1'b0}}, 16'd3, 16'd5},
  parameter int unsigned SCORE_W = 8,
  parameter int unsigned SEED    = 1,
  parameter int unsigned TREE    = 0,
  localparam int unsigned DEPTH  = tree_depth(NBV, N_VAR),
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                       clk,
  input  logic [N_VAR-1:0][BIN_W-1:0] bin,
  output logic signed [SCORE_W-1:0]  score
);

  logic signed [SCORE_W-1:0] mem [DEPTH];

  initial begin
    for (int unsigned a = 0; a < DEPTH; a++)
      mem[a] = SCORE_W'(score_value(SEED, TREE, a, SCORE_W));
  end

  logic [AW-1:0] addr;

  always_comb begin
    addr = '0;
    for (int unsigned v = 0; v < N_VAR; v++)
      addr = AW'(addr * NBV[v]) + AW'(bin[v]);
  end

  always_ff @(posedge clk) score <= mem[addr];

endmodule
