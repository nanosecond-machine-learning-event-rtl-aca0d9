// tb_bsbe -- Bit Shift Bin Engine.
// (1) The example of the source design: N=4, L=3, bins [0,8) [8,12) [12,14)
//     [14,16); every x is checked, x=13 must give bin 2.
// (2) An 8-bit, 8-layer grid made by recursive gridification, all 256 inputs,
//     compared with an interval search over the grid.
// Inputs change every clock (interval 1) and the index must appear exactly one
// clock later.
module tb_bsbe;
  import bdt_pkg::*;
  import bdt_ref_pkg::*;

  localparam grid_t G = bsbe_grid(7, 3, 1, 8, 8, 30, 60);
  localparam int unsigned NB2 = G.nb;
  localparam int unsigned BW2 = (NB2 > 1) ? $clog2(NB2) : 1;
  localparam grid_t GFIG = '{nb: 16'd4,
                              lo: {{(B_MAX-4)*N_MAX{1'b0}}, 16'd14, 16'd12, 16'd8, 16'd0},
                              dep: {{(B_MAX-4)*5{1'b0}}, 5'd3, 5'd3, 5'd2, 5'd1}};

  logic clk = 0, rst_n = 0;
  logic [3:0] x1;
  logic [1:0] b1;
  logic [7:0] x2;
  logic [BW2-1:0] b2;
  int checks = 0, failures = 0;

  bsbe dut1 (.clk(clk), .rst_n(rst_n), .x(x1), .b(b1));
  bsbe #(.N(8), .L(8), .NB(NB2), .BIN_LO(G.lo), .BIN_DEPTH(G.dep)) dut2 (
    .clk(clk), .rst_n(rst_n), .x(x2), .b(b2));

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp1, exp2;
  initial begin
    x1 = 0; x2 = 0;
    checks++;
    if (!grid_tiles(G, 8) || NB2 < 2) begin failures++; $display("FAIL grid does not tile"); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      x1 = 4'(i); x2 = 8'(i);
      exp1 = ref_bin_grid(GFIG, i % 16);
      exp2 = ref_bin_grid(G, i);
      @(negedge clk);  // one clock later
      checks += 2;
      if (int'(b1) != exp1) begin failures++; $display("FAIL fig x=%0d b=%0d exp %0d", i % 16, b1, exp1); end
      if (int'(b2) != exp2) begin failures++; $display("FAIL grid x=%0d b=%0d exp %0d", i, b2, exp2); end
      if (i == 13) begin
        checks++;
        if (b1 != 2'd2) begin failures++; $display("FAIL x=13 must give bin 2"); end
      end
    end
    // Back-to-back stream: each clock a new value, index one clock behind.
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      if (i > 0) begin
        checks++;
        if (int'(b2) != ref_bin_grid(G, (i - 1) * 37 % 256)) begin
          failures++; $display("FAIL stream i=%0d", i);
        end
      end
      x2 = 8'((i * 37) % 256);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
