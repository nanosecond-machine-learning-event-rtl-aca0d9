// tb_evaluation_processor_full -- the evaluation processor exactly as
// delivered (benchmark defaults: BSBE, 4 variables x 8 bits, 10 final trees,
// 8-bit scores, passthrough), with 5000 events in a random stream with gaps.
// Each score is compared with the reference model and must appear 3 clocks
// after its event (the latency of the benchmark); back-to-back events check
// the interval of 1 clock. Also counts bins never visited.
module tb_evaluation_processor_full;
  import bdt_pkg::*;
  import bdt_ref_pkg::*;

  localparam int unsigned N_VAR = 4, N_BIT = 8, N_TREE = 10, SCORE_W = 8, N_LAYER = 8;
  localparam engine_e ENGINE = ENG_BSBE;
  localparam xform_e XFORM = XFORM_PASS;
  localparam int unsigned TANH_SHIFT = 0, SEED = 1, NB_MIN = 5, NB_MAX = 9, N_EVENTS = 5000, EXP_LAT = 3;
  localparam int unsigned SUM_W = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic done;
  int checks, failures, n_b2b, n_gap, n_bins_unhit;
  int n_seg [7];

  logic                         in_valid;
  logic [N_VAR-1:0][N_BIT-1:0]  x;
  logic                         out_valid;
  logic signed [SUM_W-1:0]      score;

  evaluation_processor dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .score(score)
  );

  // Reference copies of the forest's bin definitions.
  grid_t grids [N_TREE][N_VAR];
  thr_t  thrs  [N_TREE][N_VAR];
  int    nbins [N_TREE][N_VAR];
  bit    hit   [N_TREE][N_VAR][B_MAX];

  function automatic int ref_bin(int t, int v, int unsigned xv);
    return (ENGINE == ENG_BSBE) ? ref_bin_grid(grids[t][v], xv) : ref_bin_thr(thrs[t][v], xv);
  endfunction

  function automatic int edge_of(int t, int v, int k);
    if (ENGINE == ENG_BSBE) return int'(grids[t][v].lo[k % nbins[t][v]]);
    return (nbins[t][v] > 1) ? int'(thrs[t][v].edges[k % (nbins[t][v] - 1)]) : 0;
  endfunction

  function automatic int piece(int v, int unsigned sh);
    int u;
    u = 1 << sh;
    if (v <= -64 * u) return 0;
    if (v <= -32 * u) return 1;
    if (v <= -16 * u) return 2;
    if (v <  16 * u)  return 3;
    if (v <  32 * u)  return 4;
    if (v <  64 * u)  return 5;
    return 6;
  endfunction

  int exp_score [$];
  int exp_sum [$];
  longint exp_cycle [$];
  longint cycle;

  always_ff @(posedge clk) cycle <= rst_n ? cycle + 1 : 0;

  // Output side: compare every result with the oldest outstanding event.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_score.size() == 0) begin
        failures++; $display("FAIL %m: output without an event");
      end else begin
        int e, sm; longint c;
        e = exp_score.pop_front();
        sm = exp_sum.pop_front();
        c = exp_cycle.pop_front();
        if (int'(score) != e) begin
          failures++; $display("FAIL %m: score %0d expected %0d", score, e);
        end
        checks++;
        if (cycle - c != longint'(EXP_LAT)) begin
          failures++; $display("FAIL %m: latency %0d expected %0d", cycle - c, EXP_LAT);
        end
        n_seg[piece(sm, TANH_SHIFT)]++;
      end
    end
  end

  initial begin
    done = 0; checks = 0; failures = 0; n_b2b = 0; n_gap = 0; n_bins_unhit = 0;
    for (int i = 0; i < 7; i++) n_seg[i] = 0;
    in_valid = 0; x = '0;
    for (int t = 0; t < N_TREE; t++)
      for (int v = 0; v < N_VAR; v++) begin
        grids[t][v] = bsbe_grid(SEED, t, v, N_BIT, N_LAYER, NB_MIN, NB_MAX);
        thrs[t][v]  = lube_thr(SEED, t, v, N_BIT, NB_MIN, NB_MAX);
        nbins[t][v] = (ENGINE == ENG_BSBE) ? int'(grids[t][v].nb) : int'(thrs[t][v].nb);
        for (int b = 0; b < B_MAX; b++) hit[t][v][b] = 0;
        if (ENGINE == ENG_BSBE) begin
          checks++;
          if (!grid_tiles(grids[t][v], N_BIT)) begin
            failures++; $display("FAIL %m: grid (%0d,%0d) does not tile", t, v);
          end
        end
      end
    @(posedge rst_n);
    begin
      bit prev;
      int n_sent;
      prev = 0; n_sent = 0;
      while (n_sent < N_EVENTS) begin
        @(negedge clk);
        in_valid = ($urandom_range(3) != 0);
        if (in_valid) begin
          int sum, addr, bv;
          for (int v = 0; v < N_VAR; v++) begin
            if ($urandom_range(7) == 0) begin
              int ev;
              ev = edge_of($urandom_range(N_TREE - 1), v, $urandom_range(B_MAX - 1))
                   - int'($urandom_range(1));
              x[v] = N_BIT'((ev < 0) ? 0 : ev);
            end else begin
              x[v] = N_BIT'($urandom);
            end
          end
          sum = 0;
          for (int t = 0; t < N_TREE; t++) begin
            addr = 0;
            for (int v = 0; v < N_VAR; v++) begin
              bv = ref_bin(t, v, int'(x[v]));
              hit[t][v][bv] = 1;
              addr = addr * nbins[t][v] + bv;
            end
            sum += score_value(SEED, t, addr, SCORE_W);
          end
          exp_score.push_back((XFORM == XFORM_TANH) ? ref_tanh(sum, SCORE_W - 1, TANH_SHIFT) : sum);
          exp_sum.push_back(sum);
          exp_cycle.push_back(cycle);
          if (prev) n_b2b++; else n_gap++;
          n_sent++;
        end else begin
          x = N_VAR*N_BIT'($urandom);  // must be ignored
        end
        prev = in_valid;
      end
      @(negedge clk);
      in_valid = 0;
      repeat (EXP_LAT + 3) @(negedge clk);
      checks++;
      if (exp_score.size() != 0) begin
        failures++; $display("FAIL %m: %0d events never came out", exp_score.size());
      end
      for (int t = 0; t < N_TREE; t++)
        for (int v = 0; v < N_VAR; v++)
          for (int b = 0; b < nbins[t][v]; b++)
            if (!hit[t][v][b]) n_bins_unhit++;
      done = 1;
    end
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done);
    checks += 2;
    if (n_b2b == 0) begin failures++; $display("FAIL no back-to-back events"); end
    if (n_gap == 0) begin failures++; $display("FAIL no event after a gap"); end
    $display("events back-to-back=%0d after-gap=%0d unvisited-bins=%0d", n_b2b, n_gap, n_bins_unhit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
