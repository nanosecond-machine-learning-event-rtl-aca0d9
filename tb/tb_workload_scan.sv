// tb_workload_scan -- runs the evaluation processor at the ends of the
// one-parameter scans around the electron/photon benchmark (4 variables x
// 8 bits, 10 trees, 8-bit scores), each against the reference model.
//
// The scanned ranges are those of the published latency scans: input and
// score width 2..16 bits, 5..20 final trees, 1..8 input variables and tree
// depth 2..8, with both bin engine kinds for the width and tree scans. A
// deeper tree only means more bins per variable here, so the depth scan is
// stood in for by 10..14 bins per variable. With 8 variables the bins per
// variable are cut to 2..3 to keep the score tables small (this design's
// choice). One parameter moves at a time:
//   0 BSBE N_BIT=2     1 BSBE N_BIT=16    2 LUBE N_BIT=16
//   3 BSBE N_TREE=5    4 BSBE N_TREE=20   5 LUBE N_TREE=20
//   6 BSBE N_VAR=1     7 BSBE N_VAR=8     8 BSBE 10..14 bins per variable
// Every configuration sends a random stream with back-to-back events and gaps,
// and every score must come out exactly at the RTL latency (3 clocks for
// bit-shift, 4 for look-up binning) with an interval of one clock.
module tb_workload_scan;
  import bdt_pkg::*;

  localparam int NC = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [NC];
  int   chk [NC], fail [NC], b2b [NC], gap [NC], unhit [NC];
  int   seg [NC][7];

  ep_harness #(.N_BIT(2), .SCORE_W(2), .SEED(21), .N_EVENTS(300)) h0 (
    .clk(clk), .rst_n(rst_n), .done(done[0]), .checks(chk[0]), .failures(fail[0]),
    .n_b2b(b2b[0]), .n_gap(gap[0]), .n_seg(seg[0]), .n_bins_unhit(unhit[0]));
  ep_harness #(.N_BIT(16), .SCORE_W(16), .SEED(22), .N_EVENTS(300)) h1 (
    .clk(clk), .rst_n(rst_n), .done(done[1]), .checks(chk[1]), .failures(fail[1]),
    .n_b2b(b2b[1]), .n_gap(gap[1]), .n_seg(seg[1]), .n_bins_unhit(unhit[1]));
  ep_harness #(.N_BIT(16), .SCORE_W(16), .ENGINE(ENG_LUBE), .SEED(23), .N_EVENTS(300)) h2 (
    .clk(clk), .rst_n(rst_n), .done(done[2]), .checks(chk[2]), .failures(fail[2]),
    .n_b2b(b2b[2]), .n_gap(gap[2]), .n_seg(seg[2]), .n_bins_unhit(unhit[2]));
  ep_harness #(.N_TREE(5), .SEED(24), .N_EVENTS(300)) h3 (
    .clk(clk), .rst_n(rst_n), .done(done[3]), .checks(chk[3]), .failures(fail[3]),
    .n_b2b(b2b[3]), .n_gap(gap[3]), .n_seg(seg[3]), .n_bins_unhit(unhit[3]));
  ep_harness #(.N_TREE(20), .SEED(25), .N_EVENTS(300)) h4 (
    .clk(clk), .rst_n(rst_n), .done(done[4]), .checks(chk[4]), .failures(fail[4]),
    .n_b2b(b2b[4]), .n_gap(gap[4]), .n_seg(seg[4]), .n_bins_unhit(unhit[4]));
  ep_harness #(.N_TREE(20), .ENGINE(ENG_LUBE), .SEED(26), .N_EVENTS(300)) h5 (
    .clk(clk), .rst_n(rst_n), .done(done[5]), .checks(chk[5]), .failures(fail[5]),
    .n_b2b(b2b[5]), .n_gap(gap[5]), .n_seg(seg[5]), .n_bins_unhit(unhit[5]));
  ep_harness #(.N_VAR(1), .SEED(27), .N_EVENTS(300)) h6 (
    .clk(clk), .rst_n(rst_n), .done(done[6]), .checks(chk[6]), .failures(fail[6]),
    .n_b2b(b2b[6]), .n_gap(gap[6]), .n_seg(seg[6]), .n_bins_unhit(unhit[6]));
  ep_harness #(.N_VAR(8), .NB_MIN(2), .NB_MAX(3), .SEED(28), .N_EVENTS(300)) h7 (
    .clk(clk), .rst_n(rst_n), .done(done[7]), .checks(chk[7]), .failures(fail[7]),
    .n_b2b(b2b[7]), .n_gap(gap[7]), .n_seg(seg[7]), .n_bins_unhit(unhit[7]));
  ep_harness #(.NB_MIN(10), .NB_MAX(14), .SEED(29), .N_EVENTS(300)) h8 (
    .clk(clk), .rst_n(rst_n), .done(done[8]), .checks(chk[8]), .failures(fail[8]),
    .n_b2b(b2b[8]), .n_gap(gap[8]), .n_seg(seg[8]), .n_bins_unhit(unhit[8]));

  int checks, failures;

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (4) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all_done = 1;
      for (int i = 0; i < NC; i++) all_done &= done[i];
    end while (!all_done);
    checks = 0; failures = 0;
    for (int i = 0; i < NC; i++) begin
      checks += chk[i] + 2; failures += fail[i];
      if (b2b[i] == 0) begin failures++; $display("FAIL config %0d: no back-to-back events", i); end
      if (gap[i] == 0) begin failures++; $display("FAIL config %0d: no gaps", i); end
      $display("config %0d: checks %0d failures %0d back-to-back %0d gaps %0d bins never hit %0d",
               i, chk[i], fail[i], b2b[i], gap[i], unhit[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
