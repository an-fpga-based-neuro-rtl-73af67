// anfis_core: one ANFIS accelerator, a three-input, 27-rule zero-order
// Takagi-Sugeno fuzzy system computing y = sum(w_j c_j) / sum(w_j).
//
// Four layers, as in the paper:
//   1. nine membership-function ROMs (LOW, MEDIUM, HIGH for each of
//      THW_rms, TETH and TITH), one cycle;
//   2. the 27 rule weights w_j, a two-stage product pipeline (ce_mult);
//   3. two sum-of-products units in parallel: N with v_j = c_j from the
//      consequent ROM and D with v_j = 1 (is_prod / ce protocol, 7 cycles);
//   4. the divider y = N / D (ce_div, 43 cycles).
// The core has no sequencer of its own: like the paper's core it is driven
// by the control signals rst, ce_mult, is_prod, ce and ce_div (see
// anfis_ctrl for the sequence). With the features applied in cycle 0 the
// result appears with `ready` 53 cycles later. The features need to be
// stable only in cycle 0.
//
// CLUSTER selects the membership functions and consequents of one cluster
// from anfis_pkg; three cores, one per cluster, make up the accelerator.
// The trained parameters are not published, so the package holds
// placeholders. The paper's core also has an is_first_op input whose
// function is not described; it is left out.
module anfis_core
  import anfis_pkg::*;
#(
  parameter int unsigned CLUSTER = 0   // 0, 1 or 2: cluster 1, 2 or 3
) (
  input  logic clk,
  input  logic rst,
  input  logic ce_mult,
  input  logic is_prod,
  input  logic ce,
  input  logic ce_div,
  input  in_t  thw_rms,
  input  in_t  teth,
  input  in_t  tith,
  output y_t   y,
  output logic ready,
  output acc_t n_sum,    // numerator N, valid after the last ce cycle
  output acc_t d_sum     // denominator D
);

  // ---------------- layer 1: membership functions ----------------
  in_t feat [N_IN];
  mu_t mu   [N_IN][N_MF];

  assign feat[0] = thw_rms;
  assign feat[1] = teth;
  assign feat[2] = tith;

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    for (genvar l = 0; l < N_MF; l++) begin : g_lbl
      mf_lut #(
        .A(mf_a(CLUSTER, i, l)),
        .B(mf_b(CLUSTER, i, l)),
        .E(mf_e(CLUSTER, i, l))
      ) u_lut (
        .clk (clk),
        .addr(feat[i]),
        .mu  (mu[i][l])
      );
    end
  end

  // ---------------- layer 2: rule activation ----------------
  w_t w [N_RULES];

  rule_activation u_rules (
    .clk    (clk),
    .rst    (rst),
    .ce_mult(ce_mult),
    .mu     (mu),
    .w      (w)
  );

  // ---------------- layer 3: N and D ----------------
  // Consequent ROM of this cluster and the all-ones vector of the D unit.
  c_t cons [N_RULES];
  c_t ones [N_RULES];
  for (genvar j = 0; j < N_RULES; j++) begin : g_cons
    assign cons[j] = conseq_q(CONSEQ[CLUSTER][j]);
    assign ones[j] = C_ONE;
  end

  sop_accum #(.K(N_RULES), .U_W(W_W), .V_W(C_W), .ACC_W(ACC_W)) u_n (
    .clk(clk), .rst(rst), .ce(ce), .is_prod(is_prod),
    .u(w), .v(cons), .sum(n_sum)
  );

  sop_accum #(.K(N_RULES), .U_W(W_W), .V_W(C_W), .ACC_W(ACC_W)) u_d (
    .clk(clk), .rst(rst), .ce(ce), .is_prod(is_prod),
    .u(w), .v(ones), .sum(d_sum)
  );

  // ---------------- layer 4: division ----------------
  nd_divider #(.N_W(ACC_W), .Y_W(Y_W), .Y_FRAC(Y_FRAC), .LAT(DIV_LAT)) u_div (
    .clk(clk), .rst(rst), .ce_div(ce_div),
    .n(n_sum), .d(d_sum), .y(y), .ready(ready)
  );

  // Control protocol: the layers are enabled one after another, never
  // together, except for the one-cycle overlap of is_prod and ce.
  a_div_alone: assert property (@(posedge clk) disable iff (rst)
                                ce_div |-> !(ce || is_prod || ce_mult));
  a_mult_alone: assert property (@(posedge clk) disable iff (rst)
                                 ce_mult |-> !(ce || is_prod));

endmodule
