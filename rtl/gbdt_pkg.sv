// gbdt_pkg: types, fixed-point formats and arithmetic shared by the GBDT
// training engines.
//
// Feature values are 8-bit bin indices produced off-chip; bin 255 is the bin
// reserved for missing values, so bins 0..254 hold ordered values (the paper
// reserves "one of the bins" for missing values without saying which; the
// choice of 255 is this design's). Gradients, hessians, scores and leaf
// weights are two's-complement fixed point with FRAC fractional bits.
//
// The loss is binary cross-entropy: p = sigmoid(score), g = p - y and
// h = p(1 - p), as in xgboost. The sigmoid is the piecewise-linear "PLAN"
// approximation (only shifts and adds); the paper does not say how the
// hardware evaluates it, so this is this design's choice.
package gbdt_pkg;

  localparam int FEAT_W      = 8;                 // feature bit width (paper)
  localparam int N_BINS      = 1 << FEAT_W;       // 256 bins
  localparam int MISSING_BIN = N_BINS - 1;        // bin reserved for missing values
  localparam int FRAC        = 12;                // fractional bits of all fixed point values
  localparam int GH_W        = 16;                // gradient / hessian width (Q3.12)
  localparam int SCORE_W     = 24;                // score and leaf weight width (Q11.12)
  localparam int SUM_W       = 32;                // histogram sum width
  localparam int GAIN_W      = 64;                // split gain width

  typedef logic [FEAT_W-1:0]         feat_t;
  typedef logic signed [GH_W-1:0]    gh_t;
  typedef logic signed [SCORE_W-1:0] score_t;
  typedef logic signed [SUM_W-1:0]   sum_t;
  typedef logic signed [GAIN_W-1:0]  gain_t;

  // Per-sample state held in the state memory.
  typedef struct packed {
    score_t score;   // accumulated leaf weights ("sample weight" in the paper)
    gh_t    g;       // first-order gradient
    gh_t    h;       // second-order gradient
    logic   label;   // binary label
  } state_t;

  // One node of the decision tree held in the model memory.
  typedef struct packed {
    logic   leaf;          // 1: node is a leaf
    logic   missing_left;  // 1: missing values branch to the left child
    logic [7:0] feature;   // split feature index
    feat_t  threshold;     // bin <= threshold goes left
    score_t weight;        // leaf weight (valid when leaf)
  } node_t;

  localparam logic signed [GH_W-1:0] ONE_GH = GH_W'(1 << FRAC);

  // Piecewise-linear sigmoid, result in Q.FRAC, range 0..1.0.
  function automatic logic [FRAC:0] sigmoid_plan(input score_t s);
    logic [SCORE_W-1:0] x;
    logic [SCORE_W-1:0] y;
    x = s[SCORE_W-1] ? SCORE_W'(-s) : SCORE_W'(s);
    if (x >= SCORE_W'(5 << FRAC))
      y = SCORE_W'(1 << FRAC);
    else if (x >= SCORE_W'(19 << (FRAC - 3)))                      // 2.375
      y = (x >> 5) + SCORE_W'(27 << (FRAC - 5));                    // x/32 + 0.84375
    else if (x >= SCORE_W'(1 << FRAC))
      y = (x >> 3) + SCORE_W'(5 << (FRAC - 3));                     // x/8 + 0.625
    else
      y = (x >> 2) + SCORE_W'(1 << (FRAC - 1));                     // x/4 + 0.5
    if (s[SCORE_W-1]) y = SCORE_W'(1 << FRAC) - y;
    return y[FRAC:0];
  endfunction

  // Cross-entropy gradient and hessian for a score and a label.
  function automatic gh_t grad_of(input score_t s, input logic label);
    logic [FRAC:0] p;
    p = sigmoid_plan(s);
    return gh_t'($signed({3'b000, p})) - (label ? ONE_GH : gh_t'(0));
  endfunction

  function automatic gh_t hess_of(input score_t s);
    logic [FRAC:0]     p;
    logic [2*FRAC+1:0] prod;
    p    = sigmoid_plan(s);
    prod = p * (FRAC+1)'((1 << FRAC) - p);
    return gh_t'(prod >> FRAC);
  endfunction

  // Saturating addition of a leaf weight to a score.
  function automatic score_t sat_add(input score_t a, input score_t b);
    logic signed [SCORE_W:0] r;
    r = {a[SCORE_W-1], a} + {b[SCORE_W-1], b};
    if (r[SCORE_W] != r[SCORE_W-1])
      return r[SCORE_W] ? {1'b1, {(SCORE_W-1){1'b0}}} : {1'b0, {(SCORE_W-1){1'b1}}};
    return r[SCORE_W-1:0];
  endfunction

endpackage
