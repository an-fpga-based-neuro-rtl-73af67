// rule_activation: firing strengths of the 27 fuzzy rules, Eq. (2).
//
// Each rule weight is the product of one membership degree of each input,
// w_j = mu_THW(l1) * mu_TETH(l2) * mu_TITH(l3), with j = 9*l1 + 3*l2 + l3.
// The three-input products are done two by two in a two-stage multiplier
// pipeline, as the paper describes for its DSP-only design: stage 1 forms the
// nine THW x TETH products and holds them in pipeline registers (the TITH
// degrees are delayed alongside); stage 2 multiplies each stored partial
// product by one TITH degree and registers the 27 weights. Sharing the nine
// partial products among the 27 rules is this design's choice (36
// multipliers instead of 54). Each product of two Q1.15 values is truncated
// back to Q1.15.
//
// Timing: both stages advance only while ce_mult is high; with ce_mult high
// for two consecutive cycles, the weights of the degrees present in the
// first of them are on `w` after the second rising edge. rst (synchronous,
// active high) clears all pipeline registers.
module rule_activation
  import anfis_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic ce_mult,
  input  mu_t  mu [N_IN][N_MF],   // [input][label], input 0 = THW_rms, 1 = TETH, 2 = TITH
  output w_t   w  [N_RULES]
);

  localparam int unsigned P_W = 2 * MU_W;

  // Q1.15 x Q1.15 -> Q2.30, truncated to Q1.15. Degrees never exceed 1.0,
  // so the result never exceeds 1.0 either and the top bits are always zero.
  function automatic w_t mul_q15(mu_t p_a, mu_t p_b);
    logic [P_W-1:0] p;
    p = P_W'(p_a) * P_W'(p_b);
    return w_t'(p >> MU_FRAC);
  endfunction

  w_t  pair_q [N_MF][N_MF];   // stage-1 registers: THW x TETH
  mu_t tith_q [N_MF];         // TITH degrees delayed by one stage

  always_ff @(posedge clk) begin
    if (rst) begin
      pair_q <= '{default: '0};
      tith_q <= '{default: '0};
      w      <= '{default: '0};
    end else if (ce_mult) begin
      for (int l1 = 0; l1 < N_MF; l1++)
        for (int l2 = 0; l2 < N_MF; l2++)
          pair_q[l1][l2] <= mul_q15(mu[0][l1], mu[1][l2]);
      tith_q <= mu[2];
      for (int l1 = 0; l1 < N_MF; l1++)
        for (int l2 = 0; l2 < N_MF; l2++)
          for (int l3 = 0; l3 < N_MF; l3++)
            w[N_MF*N_MF*l1 + N_MF*l2 + l3] <= mul_q15(pair_q[l1][l2], tith_q[l3]);
    end
  end

endmodule
