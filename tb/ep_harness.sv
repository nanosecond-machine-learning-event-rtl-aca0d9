// ep_harness -- drives one evaluation_processor with a random event stream and
// scores its output against the reference model.
//
// Events arrive on random clocks (about 3 in 4), so the stream contains both
// back-to-back events (interval 1) and gaps. Input values are drawn uniformly,
// and on one event in eight every variable is set to a bin edge (or the value
// just below one) to test the boundaries. For every event the expected score
// is computed from the bin intervals, the score tables and a real-valued tanh,
// and it must come out exactly LATENCY clocks after it went in.
// Counters report how often each mechanism was exercised.
module ep_harness
  import bdt_pkg::*;
  import bdt_ref_pkg::*;
#(
  parameter int unsigned N_VAR      = 4,
  parameter int unsigned N_BIT      = 8,
  parameter int unsigned N_TREE     = 10,
  parameter int unsigned SCORE_W    = 8,
  parameter int unsigned N_LAYER    = N_BIT,
  parameter engine_e     ENGINE     = ENG_BSBE,
  parameter xform_e      XFORM      = XFORM_PASS,
  parameter int unsigned TANH_SHIFT = 0,
  parameter int unsigned SEED       = 1,
  parameter int unsigned NB_MIN     = 5,
  parameter int unsigned NB_MAX     = 9,
  parameter int unsigned N_EVENTS   = 1000,
  parameter int unsigned EXP_LAT    = (ENGINE == ENG_BSBE) ? 3 : 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_b2b,        // events that followed another on the next clock
  output int   n_gap,        // events after an idle clock
  output int   n_seg [7],    // events per tanh piece of their summed score
  output int   n_bins_unhit  // (tree, variable, bin) triples never visited
);
  localparam int unsigned SUM_W = SCORE_W + ((N_TREE > 1) ? $clog2(N_TREE) : 0);

  logic                         in_valid;
  logic [N_VAR-1:0][N_BIT-1:0]  x;
  logic                         out_valid;
  logic signed [SUM_W-1:0]      score;

  evaluation_processor #(
    .N_VAR(N_VAR), .N_BIT(N_BIT), .N_TREE(N_TREE), .SCORE_W(SCORE_W), .N_LAYER(N_LAYER),
    .ENGINE(ENGINE), .XFORM(XFORM), .TANH_SHIFT(TANH_SHIFT), .SEED(SEED),
    .NB_MIN(NB_MIN), .NB_MAX(NB_MAX)
  ) dut (
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
          x = (N_VAR*N_BIT)'({$urandom, $urandom, $urandom, $urandom});  // must be ignored
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
endmodule
