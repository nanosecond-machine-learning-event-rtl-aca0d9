// tb_score_processor -- sum of 10 tree scores with passthrough (AdaBoost) and
// with tanh (gradient boost). Random scores, including all-maximum and
// all-minimum, one set per clock; result and valid must follow one clock later.
module tb_score_processor;
  import bdt_pkg::*;
  import bdt_ref_pkg::*;

  localparam int unsigned T = 10, SW = 8, SUMW = 12;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [T-1:0][SW-1:0] in_score;
  logic out_valid_p, out_valid_t;
  logic signed [SUMW-1:0] out_p, out_t;
  int checks = 0, failures = 0;

  score_processor #(.N_TREE(T), .SCORE_W(SW), .XFORM(XFORM_PASS)) dut_p (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_score(in_score),
    .out_valid(out_valid_p), .out_score(out_p));
  score_processor #(.N_TREE(T), .SCORE_W(SW), .XFORM(XFORM_TANH), .TANH_SHIFT(1)) dut_t (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_score(in_score),
    .out_valid(out_valid_t), .out_score(out_t));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sum, prev_sum;
  bit prev_v;
  initial begin
    in_score = '0;
    prev_v = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      sum = 0;
      for (int t = 0; t < T; t++) begin
        int v;
        if (i == 0)      v = 127;
        else if (i == 1) v = -127;
        else             v = int'($urandom_range(254)) - 127 - ((i % 3 == 0) ? 0 : 0);
        in_score[t] = SW'(v);
        sum += v;
      end
      in_valid = (i % 5) != 4;
      @(negedge clk);
      checks += 3;
      if (out_valid_p != in_valid || out_valid_t != in_valid) begin
        failures++; $display("FAIL valid at %0d", i);
      end
      if (int'(out_p) != sum) begin failures++; $display("FAIL sum %0d exp %0d", out_p, sum); end
      if (int'(out_t) - ref_tanh(sum, 7, 1) > 1 || ref_tanh(sum, 7, 1) - int'(out_t) > 1) begin
        failures++; $display("FAIL tanh(%0d) %0d exp %0d", sum, out_t, ref_tanh(sum, 7, 1));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
