// bdt_pkg -- types, sizes and constant functions shared by the BDT evaluation
// processor.
//
// A flattened, merged boosted-decision-tree forest is fully described by two
// kinds of constants: for every (tree, variable) pair the bin boundaries of that
// variable, and for every tree a table of output scores indexed by the bin
// indices of all variables. In a real deployment these constants come out of the
// offline optimisation flow (flatten, merge, quantise, erase cuts). Here they are
// produced by deterministic constant functions of a SEED, so that the RTL can be
// elaborated at any size without large data files. The functions model the two
// binning schemes:
//
//   * bit-shift binning (BSBE): bins are aligned power-of-two intervals obtained
//     by repeatedly halving bins, starting from the two halves of the input
//     range ("recursive binary gridification"). A bin is stored as its lower
//     edge and its depth d (number of grid layers that define it); its width is
//     2**(N-d).
//   * look-up binning (LUBE): bins are separated by arbitrary sorted thresholds.
//
// Everything here is elaborated at compile time; nothing in this package
// becomes logic by itself. The synthetic constants are this design's own choice,
// the data structures follow the two binning schemes of the source design.
package bdt_pkg;

  // Largest sizes the packed constant vectors can carry.
  localparam int unsigned N_MAX  = 16;   // widest input / threshold word
  localparam int unsigned B_MAX  = 256;  // most bins per variable per tree
  localparam int unsigned V_MAX  = 8;    // most input variables
  localparam int unsigned BIN_W  = 8;    // width of a bin index, $clog2(B_MAX)

  typedef enum logic [0:0] {ENG_BSBE = 1'b0, ENG_LUBE = 1'b1} engine_e;
  typedef enum logic [0:0] {XFORM_PASS = 1'b0, XFORM_TANH = 1'b1} xform_e;

  typedef logic [B_MAX-1:0][N_MAX-1:0] word_vec_t;  // one N_MAX-bit word per bin / edge
  typedef logic [B_MAX-1:0][4:0]       depth_vec_t; // grid depth of each bin
  typedef logic [V_MAX-1:0][15:0]      nb_vec_t;    // number of bins of each variable

  // Bit-shift grid of one variable: nb bins, bin i covers
  // [lo[i], lo[i] + 2**(N-dep[i])).
  typedef struct packed {
    logic [15:0] nb;
    word_vec_t  lo;
    depth_vec_t dep;
  } grid_t;

  // Threshold list of one variable: nb bins separated by nb-1 sorted edges.
  typedef struct packed {
    logic [15:0] nb;
    word_vec_t  edges;
  } thr_t;

  // 32-bit integer mixer (xorshift-multiply finaliser).
  function automatic logic [31:0] mix32(input logic [31:0] a);
    logic [31:0] h;
    h = a ^ (a >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] hash4(input logic [31:0] seed, input logic [31:0] a,
                                        input logic [31:0] b, input logic [31:0] c);
    return mix32(mix32(mix32(mix32(seed) + a) + b) + c);
  endfunction

  // Number of bins of variable v in tree t, drawn from [nb_lo, nb_hi], before
  // the per-scheme caps.
  function automatic int unsigned bin_target(input int unsigned seed, input int unsigned t,
                                             input int unsigned v, input int unsigned nb_lo,
                                             input int unsigned nb_hi);
    return nb_lo + int'(hash4(seed, t, v, 32'd1) % (nb_hi - nb_lo + 1));
  endfunction

  // Recursive binary gridification: start with the two halves of [0, 2**n_bit)
  // and halve pseudo-randomly chosen bins until the target count is reached.
  // No bin is split below depth 'layers'.
  function automatic grid_t bsbe_grid(input int unsigned seed, input int unsigned t,
                                      input int unsigned v, input int unsigned n_bit,
                                      input int unsigned layers, input int unsigned nb_lo,
                                      input int unsigned nb_hi);
    grid_t       g;
    int unsigned cnt, target, j;
    g = '0;
    target = bin_target(seed, t, v, nb_lo, nb_hi);
    if (target > B_MAX) target = B_MAX;
    if (layers < 31 && target > (1 << layers)) target = 1 << layers;
    g.lo[0]  = '0;
    g.dep[0] = 5'd1;
    g.lo[1]  = N_MAX'(1 << (n_bit - 1));
    g.dep[1] = 5'd1;
    cnt = 2;
    for (int unsigned it = 0; it < 8 * B_MAX && cnt < target; it++) begin
      j = hash4(seed, t * 64 + v, it, 32'd2) % cnt;
      if (int'(g.dep[j]) < layers) begin
        for (int unsigned k = cnt; k > j + 1; k--) begin
          g.lo[k]  = g.lo[k-1];
          g.dep[k] = g.dep[k-1];
        end
        g.dep[j]   = g.dep[j] + 5'd1;
        g.lo[j+1]  = g.lo[j] + N_MAX'(1 << (n_bit - int'(g.dep[j])));
        g.dep[j+1] = g.dep[j];
        cnt++;
      end
    end
    g.nb = 16'(cnt);
    return g;
  endfunction

  // Sorted, distinct thresholds: edge i lies in the (i+1)-th of nb equal slices,
  // jittered by less than half a slice.
  function automatic thr_t lube_thr(input int unsigned seed, input int unsigned t,
                                    input int unsigned v, input int unsigned n_bit,
                                    input int unsigned nb_lo, input int unsigned nb_hi);
    thr_t        e;
    int unsigned nb, sp, jit;
    e  = '0;
    nb = bin_target(seed, t, v, nb_lo, nb_hi);
    if (nb > B_MAX) nb = B_MAX;
    if (nb > (1 << n_bit)) nb = 1 << n_bit;
    sp  = (1 << n_bit) / nb;
    jit = (sp / 2 > 0) ? sp / 2 : 1;
    for (int unsigned i = 0; i + 1 < nb; i++)
      e.edges[i] = N_MAX'(((i + 1) << n_bit) / nb + hash4(seed, t * 64 + v, i, 32'd3) % jit);
    e.nb = 16'(nb);
    return e;
  endfunction

  // Bins of variable v in tree t under the chosen scheme.
  function automatic int unsigned var_bins(input engine_e engine, input int unsigned seed,
                                           input int unsigned t, input int unsigned v,
                                           input int unsigned n_bit, input int unsigned layers,
                                           input int unsigned nb_lo, input int unsigned nb_hi);
    grid_t g;
    thr_t  e;
    if (engine == ENG_BSBE) begin
      g = bsbe_grid(seed, t, v, n_bit, layers, nb_lo, nb_hi);
      return int'(g.nb);
    end
    e = lube_thr(seed, t, v, n_bit, nb_lo, nb_hi);
    return int'(e.nb);
  endfunction

  // Bin counts of all variables of tree t, packed for a parameter.
  function automatic nb_vec_t tree_nbv(input engine_e engine, input int unsigned seed,
                                       input int unsigned t, input int unsigned n_var,
                                       input int unsigned n_bit, input int unsigned layers,
                                       input int unsigned nb_lo, input int unsigned nb_hi);
    nb_vec_t r;
    r = '0;
    for (int unsigned v = 0; v < n_var; v++)
      r[v] = 16'(var_bins(engine, seed, t, v, n_bit, layers, nb_lo, nb_hi));
    return r;
  endfunction

  // Number of score words of one tree: the product of its bin counts.
  function automatic int unsigned tree_depth(input nb_vec_t nbv, input int unsigned n_var);
    int unsigned d;
    d = 1;
    for (int unsigned v = 0; v < n_var; v++) d = d * nbv[v];
    return d;
  endfunction

  // Pre-normalised score alpha_t = O_t * w_t of word 'addr' of tree t, as a
  // signed integer in [-(2**(score_w-1)-1), 2**(score_w-1)-1].
  function automatic int score_value(input int unsigned seed, input int unsigned t,
                                     input int unsigned addr, input int unsigned score_w);
    int unsigned m;
    m = (1 << (score_w - 1)) - 1;
    return int'(hash4(seed, t, addr, 32'd4) % (2 * m + 1)) - int'(m);
  endfunction

  // Knots of the piece-wise tanh at |s| = 0, 16, 32, 64 (in units of
  // 2**shift): 0, tanh(0.5), tanh(1) and 1 (saturation), scaled to full_scale.
  function automatic int unsigned tanh_knot(input int unsigned idx, input int unsigned full_scale);
    longint unsigned fs;
    fs = longint'(full_scale);
    case (idx)
      0:       return 0;
      1:       return int'((fs * 46212 + 50000) / 100000);
      2:       return int'((fs * 76159 + 50000) / 100000);
      default: return full_scale;
    endcase
  endfunction

endpackage
