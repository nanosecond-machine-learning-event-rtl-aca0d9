// tb_workload_vbf -- runs the evaluation processor at the sizes of the two
// vector-boson-fusion Higgs classifiers the design was evaluated with, against
// the reference model.
//
//   opt     look-up binning, 5 variables x 8 bits, 100 trees, 16-bit scores
//   non-opt bit-shift binning, 7 variables x 12 bits, 50 trees, 16-bit scores
//
// The engine kinds, variable counts, widths, tree counts and score width are
// those of the two published classifiers. Their trained cuts and scores are
// not published, so the forest is the synthetic one; the bins per variable
// (3..4 and 3..5) are this design's choice, picked so the total number of score
// words (54 290 and 674 416) is of the order of the reported 39 308 and
// 996 710 bins.
// Each classifier gets a random stream with back-to-back events and gaps; the
// latency is checked for every event (4 clocks for look-up binning, 3 for
// bit-shift binning in this RTL).
module tb_workload_vbf;
  import bdt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [2];
  int   chk [2], fail [2], b2b [2], gap [2], unhit [2];
  int   seg [2][7];

  ep_harness #(.N_VAR(5), .N_BIT(8), .N_TREE(100), .SCORE_W(16), .ENGINE(ENG_LUBE),
               .SEED(11), .NB_MIN(3), .NB_MAX(4), .N_EVENTS(400)) h_opt (
    .clk(clk), .rst_n(rst_n), .done(done[0]), .checks(chk[0]), .failures(fail[0]),
    .n_b2b(b2b[0]), .n_gap(gap[0]), .n_seg(seg[0]), .n_bins_unhit(unhit[0]));
  ep_harness #(.N_VAR(7), .N_BIT(12), .N_TREE(50), .SCORE_W(16), .ENGINE(ENG_BSBE),
               .SEED(12), .NB_MIN(3), .NB_MAX(5), .N_EVENTS(400)) h_nonopt (
    .clk(clk), .rst_n(rst_n), .done(done[1]), .checks(chk[1]), .failures(fail[1]),
    .n_b2b(b2b[1]), .n_gap(gap[1]), .n_seg(seg[1]), .n_bins_unhit(unhit[1]));

  int checks, failures;

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1]);
    checks = 0; failures = 0;
    for (int i = 0; i < 2; i++) begin
      checks += chk[i] + 2; failures += fail[i];
      if (b2b[i] == 0) begin failures++; $display("FAIL config %0d: no back-to-back events", i); end
      if (gap[i] == 0) begin failures++; $display("FAIL config %0d: no gaps", i); end
      $display("config %0d: checks %0d failures %0d back-to-back %0d gaps %0d bins never hit %0d",
               i, chk[i], fail[i], b2b[i], gap[i], unhit[i]);
    end
    begin
      longint w0, w1;
      w0 = 0; w1 = 0;
      for (int t = 0; t < 100; t++) w0 += tree_depth(tree_nbv(ENG_LUBE, 11, t, 5, 8, 8, 3, 4), 5);
      for (int t = 0; t < 50; t++) w1 += tree_depth(tree_nbv(ENG_BSBE, 12, t, 7, 12, 12, 3, 5), 7);
      $display("score words: opt %0d, non-opt %0d", w0, w1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
