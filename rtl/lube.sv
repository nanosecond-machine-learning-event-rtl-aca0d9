// lube -- Look Up Bin Engine: finds the bin index of one N-bit input value for
// arbitrary sorted bin edges.
//
// The NB-1 thresholds e_0 < e_1 < ... < e_{NB-2} sit in a small memory that is
// read on every clock. One "<" comparator per threshold gives c_i = (x < e_i);
// because the edges are sorted, c is 0 below the first edge above x and 1 from
// there on. The first 1 marks the bin: in_0 = c_0, in_i = c_i XOR c_{i-1}, and
// the last bin in_{NB-1} is set when no other in_i is, which is the loop over
// all edges with a "found" flag turned into parallel logic. The active-array
// table then gives the index.
//
// Example from the source design (the defaults): N=4, edges 8, 12, 14; x=13
// gives c = 0,0,1, in = 0,0,1,0 and b=2.
//
// Timing: x is registered together with the threshold read (the memory's clock
// edge), compare/XOR/encode is combinational, and the index is registered:
// b follows x by two clocks, a new x every clock. The source design reports an
// interval of 2 for this engine from its HLS build; this RTL keeps 1.
// The last bin is formed as NOT(OR) of in_0..in_{NB-2}: the source diagram
// labels this gate NAND but prints output 0 for inputs 0,0,1, which only a NOR
// gives.
//
// Parameters: N input bits, NB bins, EDGES threshold i in EDGES[i], i < NB-1.
module lube
  import bdt_pkg::*;
#(
  parameter int unsigned N  = 4,
  parameter int unsigned NB = 4,
  parameter word_vec_t  EDGES = {{(B_MAX-3)*N_MAX{1'b0}}, 16'd14, 16'd12, 16'd8},
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned NE = (NB > 1) ? NB - 1 : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  x,
  output logic [BW-1:0] b
);

  // Threshold memory, one word per edge, read every clock.
  logic [N-1:0] thr_mem [NE];
  logic [N-1:0] thr_q   [NE];
  logic [N-1:0] x_q;

  for (genvar i = 0; i < NE; i++) begin : g_mem
    assign thr_mem[i] = EDGES[i][N-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0;
      for (int unsigned i = 0; i < NE; i++) thr_q[i] <= '0;
    end else begin
      x_q <= x;
      for (int unsigned i = 0; i < NE; i++) thr_q[i] <= thr_mem[i];
    end
  end

  logic [NE-1:0] c;
  logic [NB-1:0] in_active;
  logic [BW-1:0] b_comb;

  for (genvar i = 0; i < NE; i++) begin : g_cmp
    assign c[i] = (x_q < thr_q[i]);
  end

  if (NB > 1) begin : g_xor
    assign in_active[0] = c[0];
    for (genvar i = 1; i < NB - 1; i++) begin : g_in
      assign in_active[i] = c[i] ^ c[i-1];
    end
    assign in_active[NB-1] = ~|in_active[NB-2:0];
  end else begin : g_single
    assign in_active[0] = 1'b1;
  end

  active_array_lut #(.NB(NB), .BW(BW)) u_lut (
    .in_active(in_active),
    .out_index(b_comb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) b <= '0;
    else        b <= b_comb;
  end

  // Sorted edges make the bin vector one-hot.
  a_onehot : assert property (@(posedge clk) disable iff (!rst_n)
                              in_active != '0 && (in_active & (in_active - 1'b1)) == '0)
    else $error("lube: bin vector %b is not one-hot for x=%0d", in_active, x_q);

endmodule
