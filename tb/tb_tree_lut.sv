// tb_tree_lut -- score look-up of one tree with 3 variables of 5, 7 and 4 bins.
// Every combination of bin indices is presented, one per clock; the score must
// be the word at the mixed-radix position of the bins, one clock later.
module tb_tree_lut;
  import bdt_pkg::*;

  localparam nb_vec_t NBV = {{(V_MAX-3)*16{1'b0}}, 16'd4, 16'd7, 16'd5};
  localparam int unsigned SEED = 9, TREE = 2, SW = 8;

  logic clk = 0;
  logic [2:0][BIN_W-1:0] bin;
  logic signed [SW-1:0] score;
  int checks = 0, failures = 0;
  int exp_q [$];
  int exp;

  tree_lut #(.N_VAR(3), .NBV(NBV), .SCORE_W(SW), .SEED(SEED), .TREE(TREE)) dut (
    .clk(clk), .bin(bin), .score(score));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bin = '0;
    @(negedge clk);
    for (int b0 = 0; b0 < 5; b0++)
      for (int b1 = 0; b1 < 7; b1++)
        for (int b2 = 0; b2 < 4; b2++) begin
          bin[0] = BIN_W'(b0); bin[1] = BIN_W'(b1); bin[2] = BIN_W'(b2);
          exp_q.push_back(score_value(SEED, TREE, (b0 * 7 + b1) * 4 + b2, SW));
          @(negedge clk);
          exp = exp_q.pop_front();
          checks++;
          if (int'(score) != exp) begin
            failures++; $display("FAIL bins %0d %0d %0d score %0d exp %0d", b0, b1, b2, score, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
