// bdt_ref_pkg -- reference model used by the testbenches.
//
// It evaluates the same forest as the RTL, but the way the forest is defined
// rather than the way the hardware computes it: a bin is found by searching
// the list of bin intervals / thresholds for the one that contains x (no shift
// grid, no one-hot vector), and tanh is evaluated with real arithmetic between
// knots taken from $tanh.
package bdt_ref_pkg;
  import bdt_pkg::*;

  // Bin of x for the bit-shift grid: the last bin whose lower edge is <= x.
  function automatic int unsigned ref_bin_grid(input grid_t g, input int unsigned x);
    int unsigned b;
    b = 0;
    for (int unsigned i = 0; i < g.nb; i++)
      if (int'(g.lo[i]) <= int'(x)) b = i;
    return b;
  endfunction

  // Bin of x for a threshold list: the number of thresholds that are <= x.
  function automatic int unsigned ref_bin_thr(input thr_t e, input int unsigned x);
    int unsigned b;
    b = 0;
    for (int unsigned i = 0; i + 1 < e.nb; i++)
      if (int'(e.edges[i]) <= int'(x)) b++;
    return b;
  endfunction

  // The grid must tile [0, 2**n_bit): every bin starts where the previous ends.
  function automatic bit grid_tiles(input grid_t g, input int unsigned n_bit);
    int unsigned nxt;
    nxt = 0;
    for (int unsigned i = 0; i < g.nb; i++) begin
      if (int'(g.lo[i]) != int'(nxt)) return 1'b0;
      nxt = nxt + (1 << (n_bit - int'(g.dep[i])));
    end
    return nxt == (1 << n_bit);
  endfunction

  // Piece-wise tanh with knots at 0, 16, 32, 64 (times 2**shift), knot values
  // round(fs * tanh(s/32)) except 1.0 at 64, linear in between, floor of the
  // magnitude, odd symmetry.
  function automatic int ref_tanh(input int s, input int unsigned q, input int unsigned shift);
    real fs, unit, a, y, x0, x1, y0, y1;
    int  m;
    fs   = real'((1 << q) - 1);
    unit = real'(1 << shift);
    a    = (s < 0) ? -real'(s) : real'(s);
    a    = a / unit;
    if (a >= 64.0) begin
      m = (1 << q) - 1;
    end else begin
      if (a >= 32.0)      begin x0 = 32.0; x1 = 64.0; end
      else if (a >= 16.0) begin x0 = 16.0; x1 = 32.0; end
      else                begin x0 = 0.0;  x1 = 16.0; end
      y0 = (x0 == 0.0) ? 0.0 : real'($rtoi(fs * $tanh(x0 / 32.0) + 0.5));
      y1 = (x1 == 64.0) ? fs : real'($rtoi(fs * $tanh(x1 / 32.0) + 0.5));
      y  = y0 + (a - x0) * (y1 - y0) / (x1 - x0);
      m  = $rtoi(y + 1.0e-9);
    end
    return (s < 0) ? -m : m;
  endfunction

endpackage
