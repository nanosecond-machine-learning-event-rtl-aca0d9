// bsbe -- Bit Shift Bin Engine: finds the bin index of one N-bit input value
// when all bin boundaries lie on a binary grid.
//
// The input x is shifted right by N-1, N-2, ..., N-L bits, giving its grid_cell index
// in L grid layers (layer l has 2**(l+1) cells). Each bin b is a power-of-two
// interval that is fully described by its grid_cell index in the first depth(b)
// layers; for every such layer one equality comparator checks the shifted input
// against the constant lo(b) >> (N-1-l). Comparators of layers below depth(b)
// are not built (they are the dotted elements of the source diagram). An AND
// per bin of its comparators marks the bin that holds x; exactly one AND is 1,
// and the active-array table turns that one-hot vector into the index b.
// All constants are parameters, so no memory is read.
//
// Example from the source design (the defaults): N=4, L=3, bins [0,8) [8,12)
// [12,14) [14,16); x=13 gives cells 1, 3, 6 in the three layers and b=2.
//
// Timing: the shift/compare/AND/encode path is combinational and the bin index
// is registered, so b follows x by one clock; a new x is accepted every clock.
// The output register and its reset to 0 are this design's choice.
//
// Parameters: N input bits, L grid layers (L <= N), NB bins, BIN_LO lower edge
// of each bin, BIN_DEPTH number of layers that define each bin (1..L).
module bsbe
  import bdt_pkg::*;
#(
  parameter int unsigned N  = 4,
  parameter int unsigned L  = 3,
  parameter int unsigned NB = 4,
  parameter word_vec_t  BIN_LO    = {{(B_MAX-4)*N_MAX{1'b0}}, 16'd14, 16'd12, 16'd8, 16'd0},
  parameter depth_vec_t BIN_DEPTH = {{(B_MAX-4)*5{1'b0}}, 5'd3, 5'd3, 5'd2, 5'd1},
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  x,
  output logic [BW-1:0] b
);

  // Cell index of x in every layer: x >> (N-1-l).
  logic [L-1:0][N-1:0] grid_cell;
  // One-hot bin vector, in_b of the source diagram.
  logic [NB-1:0]       in_active;
  logic [BW-1:0]       b_comb;

  for (genvar l = 0; l < L; l++) begin : g_layer
    assign grid_cell[l] = x >> (N - 1 - l);
  end

  for (genvar bi = 0; bi < NB; bi++) begin : g_bin
    logic [L-1:0] eq;
    for (genvar l = 0; l < L; l++) begin : g_cmp
      if (l < BIN_DEPTH[bi]) begin : g_present
        localparam logic [N-1:0] GRID_CELL = N'(BIN_LO[bi][N-1:0] >> (N - 1 - l));
        assign eq[l] = (grid_cell[l] == GRID_CELL);
      end else begin : g_absent
        assign eq[l] = 1'b1;
      end
    end
    assign in_active[bi] = &eq;
  end

  active_array_lut #(.NB(NB), .BW(BW)) u_lut (
    .in_active(in_active),
    .out_index(b_comb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) b <= '0;
    else        b <= b_comb;
  end

  // The bins tile the input range, so exactly one AND gate is active.
  a_onehot : assert property (@(posedge clk) disable iff (!rst_n)
                              in_active != '0 && (in_active & (in_active - 1'b1)) == '0)
    else $error("bsbe: bin vector %b is not one-hot for x=%0d", in_active, x);

endmodule
