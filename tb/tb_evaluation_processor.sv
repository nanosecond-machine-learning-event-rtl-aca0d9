// tb_evaluation_processor -- end-to-end test of the evaluation processor in
// four configurations, each against the reference model:
//   A  benchmark defaults: BSBE, 4 variables x 8 bits, 10 trees, passthrough
//   B  LUBE with tanh: 3 variables x 6 bits, 3 trees
//   C  BSBE with tanh and a grid shallower than the input (12-bit inputs,
//      6 layers), 2 variables, 4 trees, 20..60 bins per variable (capped at
//      the 64 bins six layers allow)
//   D  LUBE with passthrough: 5 variables x 8 bits, 16-bit scores, 2 trees
// Every configuration must see back-to-back events and gaps, every tanh piece
// must be reached in B and C, and both engine kinds and both transforms run.
module tb_evaluation_processor;
  import bdt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [4];
  int   chk [4], fail [4], b2b [4], gap [4], unhit [4];
  int   seg [4][7];

  ep_harness #(.N_EVENTS(1500)) h_a (
    .clk(clk), .rst_n(rst_n), .done(done[0]), .checks(chk[0]), .failures(fail[0]),
    .n_b2b(b2b[0]), .n_gap(gap[0]), .n_seg(seg[0]), .n_bins_unhit(unhit[0]));
  ep_harness #(.N_VAR(3), .N_BIT(6), .N_TREE(3), .ENGINE(ENG_LUBE), .XFORM(XFORM_TANH),
               .TANH_SHIFT(1), .SEED(2), .N_EVENTS(1500)) h_b (
    .clk(clk), .rst_n(rst_n), .done(done[1]), .checks(chk[1]), .failures(fail[1]),
    .n_b2b(b2b[1]), .n_gap(gap[1]), .n_seg(seg[1]), .n_bins_unhit(unhit[1]));
  ep_harness #(.N_VAR(2), .N_BIT(12), .N_LAYER(6), .N_TREE(4), .ENGINE(ENG_BSBE),
               .XFORM(XFORM_TANH), .TANH_SHIFT(1), .SEED(3), .NB_MIN(20), .NB_MAX(60),
               .N_EVENTS(1500)) h_c (
    .clk(clk), .rst_n(rst_n), .done(done[2]), .checks(chk[2]), .failures(fail[2]),
    .n_b2b(b2b[2]), .n_gap(gap[2]), .n_seg(seg[2]), .n_bins_unhit(unhit[2]));
  ep_harness #(.N_VAR(5), .N_BIT(8), .N_TREE(2), .SCORE_W(16), .ENGINE(ENG_LUBE),
               .SEED(4), .N_EVENTS(1500)) h_d (
    .clk(clk), .rst_n(rst_n), .done(done[3]), .checks(chk[3]), .failures(fail[3]),
    .n_b2b(b2b[3]), .n_gap(gap[3]), .n_seg(seg[3]), .n_bins_unhit(unhit[3]));

  int checks, failures;

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    checks = 0; failures = 0;
    for (int i = 0; i < 4; i++) begin
      checks += chk[i]; failures += fail[i];
      $display("config %0d: checks=%0d failures=%0d back-to-back=%0d after-gap=%0d unvisited-bins=%0d",
               i, chk[i], fail[i], b2b[i], gap[i], unhit[i]);
      checks += 2;
      if (b2b[i] == 0) begin failures++; $display("FAIL config %0d: no back-to-back events", i); end
      if (gap[i] == 0) begin failures++; $display("FAIL config %0d: no event after a gap", i); end
    end
    for (int i = 1; i <= 2; i++)
      for (int p = 0; p < 7; p++) begin
        checks++;
        if (seg[i][p] == 0) begin failures++; $display("FAIL config %0d: tanh piece %0d never used", i, p); end
      end
    $display("tanh pieces B: %0d %0d %0d %0d %0d %0d %0d", seg[1][0], seg[1][1], seg[1][2],
             seg[1][3], seg[1][4], seg[1][5], seg[1][6]);
    $display("tanh pieces C: %0d %0d %0d %0d %0d %0d %0d", seg[2][0], seg[2][1], seg[2][2],
             seg[2][3], seg[2][4], seg[2][5], seg[2][6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
