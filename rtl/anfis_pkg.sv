// anfis_pkg: shared sizes, fixed-point formats, latencies and default tables
// of the three-input, zero-order Takagi-Sugeno ANFIS accelerator.
//
// Fixed-point formats used throughout the datapath:
//   inputs  THW_rms, TETH, TITH : 8-bit unsigned fraction, Q0.8, value = code/256
//   membership degree mu        : 16-bit unsigned Q1.15 (1.0 = 32768)
//   rule weight w               : 16-bit unsigned Q1.15, truncated product of three mu
//   consequent c                : 16-bit signed Q3.12
//   N and D accumulators        : 38-bit signed, scale 2^27 (w * c and w * 1.0)
//   output y                    : 32-bit two's complement Q7.24
// The 8-bit inputs and the 32-bit two's-complement output follow the paper;
// the intermediate widths and binary points are this design's choice.
//
// Latencies follow the paper: one cycle for the membership look-up, two for
// the rule product, ceil(log2 K)+2 = 7 for the sum-of-products units and 43
// for the divider, 53 cycles in all.
//
// The membership-function parameters (a, b, e) and the consequents c_j of
// the trained networks are not published. The defaults below are
// placeholders: every label is the evenly spaced generalized bell
// (a = 0.25, b = 2, centres 0, 0.5, 1) and the consequents are a hand-made
// 0 / 0.3 / 0.5 / 1 pattern that follows the verbal description of each
// cluster. Trained values are dropped in here without touching the RTL.
package anfis_pkg;

  // ---------------- structure ----------------
  localparam int unsigned N_IN     = 3;   // THW_rms, TETH, TITH
  localparam int unsigned N_MF     = 3;   // LOW, MEDIUM, HIGH
  localparam int unsigned N_RULES  = 27;  // N_MF ** N_IN
  localparam int unsigned N_CLUST  = 3;   // one ANFIS core per driving-style cluster

  // ---------------- widths ----------------
  localparam int unsigned IN_W     = 8;
  localparam int unsigned LUT_DEPTH = 1 << IN_W;
  localparam int unsigned MU_W     = 16;
  localparam int unsigned MU_FRAC  = 15;
  localparam int unsigned W_W      = 16;
  localparam int unsigned C_W      = 16;
  localparam int unsigned C_FRAC   = 12;
  localparam int unsigned ACC_W    = 38;  // (W_W+1)+C_W bits of product + 5 bits of growth for 27 terms
  localparam int unsigned Y_W      = 32;
  localparam int unsigned Y_FRAC   = 24;

  // ---------------- latencies (clock cycles) ----------------
  localparam int unsigned LUT_LAT  = 1;
  localparam int unsigned MULT_LAT = 2;
  localparam int unsigned LOG2K    = $clog2(N_RULES);      // 5
  localparam int unsigned SOP_LAT  = LOG2K + 2;            // 7
  localparam int unsigned DIV_LAT  = 43;
  localparam int unsigned TOTAL_LAT = LUT_LAT + MULT_LAT + SOP_LAT + DIV_LAT;  // 53

  typedef logic        [IN_W-1:0]  in_t;
  typedef logic        [MU_W-1:0]  mu_t;
  typedef logic        [W_W-1:0]   w_t;
  typedef logic signed [C_W-1:0]   c_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [Y_W-1:0]   y_t;

  typedef enum logic [1:0] {LBL_LOW = 2'd0, LBL_MED = 2'd1, LBL_HIGH = 2'd2} label_e;

  // The three features of one car-following segment.
  typedef struct packed {
    in_t tith;
    in_t teth;
    in_t thw_rms;
  } features_t;

  // 1.0 in the consequent format: the v input of the D unit.
  localparam c_t C_ONE = c_t'(1 << C_FRAC);

  // ---------------- membership functions ----------------
  // Generalized bell of Eq. (5): mu = 1 / (1 + |(x - e) / a|^(2b)).
  // Parameters of label `lbl` (0 LOW, 1 MEDIUM, 2 HIGH) of input `inp`
  // (0 THW_rms, 1 TETH, 2 TITH) in the core of cluster `cl` (0..2).
  // Placeholder: the same evenly spaced bells for every input and cluster.
  function automatic real mf_a(int unsigned cl, int unsigned inp, int unsigned lbl);
    return 0.25;
  endfunction

  function automatic real mf_b(int unsigned cl, int unsigned inp, int unsigned lbl);
    return 2.0;
  endfunction

  function automatic real mf_e(int unsigned cl, int unsigned inp, int unsigned lbl);
    return 0.5 * real'(lbl);
  endfunction

  // ROM content of one label at address addr, rounded to Q1.15.
  function automatic mu_t gbell_q(int unsigned addr, real a, real b, real e);
    real x, t, mu;
    int  q;
    x  = real'(addr) / real'(LUT_DEPTH);
    t  = (x - e) / a;
    if (t < 0.0) t = -t;
    mu = 1.0 / (1.0 + t ** (2.0 * b));
    q  = $rtoi(mu * real'(1 << MU_FRAC) + 0.5);
    if (q > (1 << MU_FRAC)) q = 1 << MU_FRAC;
    return mu_t'(q);
  endfunction

  // ---------------- rules ----------------
  // Rule j (0-based) = 9*label(THW_rms) + 3*label(TETH) + label(TITH),
  // the order in which the rules of cluster 1 are listed in the paper.
  // Placeholder consequents, rules 1..27 from left to right.
  localparam real CONSEQ [N_CLUST][N_RULES] = '{
    // cluster 1: most aggressive (low THW_rms, high TETH and TITH)
    '{0.0, 1.0, 1.0,  1.0, 1.0, 1.0,  1.0, 1.0, 1.0,
      0.0, 0.0, 0.5,  0.0, 0.5, 0.5,  0.5, 0.5, 0.5,
      0.0, 0.0, 0.0,  0.0, 0.0, 0.0,  0.0, 0.0, 0.0},
    // cluster 2: least aggressive (high THW_rms, minimum TETH and TITH)
    '{0.0, 0.0, 0.0,  0.0, 0.0, 0.0,  0.0, 0.0, 0.0,
      1.0, 0.0, 0.0,  0.5, 0.0, 0.0,  0.0, 0.0, 0.0,
      1.0, 0.5, 0.0,  1.0, 0.0, 0.0,  0.5, 0.0, 0.0},
    // cluster 3: medium (low THW_rms, medium-to-low TETH, lowest TITH)
    '{0.3, 0.0, 0.0,  0.3, 0.0, 0.0,  0.0, 0.0, 0.0,
      1.0, 0.5, 0.0,  1.0, 0.3, 0.0,  0.3, 0.0, 0.0,
      0.0, 0.0, 0.0,  0.0, 0.0, 0.0,  0.0, 0.0, 0.0}
  };

  function automatic c_t conseq_q(real c);
    return c_t'($rtoi(c * real'(1 << C_FRAC) + (c < 0.0 ? -0.5 : 0.5)));
  endfunction

endpackage
