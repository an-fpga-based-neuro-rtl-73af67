// anfis_ref_pkg: floating-point reference model of the ANFIS inference for
// the testbenches. It evaluates Eqs. (2), (4) and (5) directly in real
// arithmetic from the membership parameters and consequents held in
// anfis_pkg, without any of the fixed-point datapath, so the hardware can
// be compared with the mathematical result to within its rounding.
package anfis_ref_pkg;
  import anfis_pkg::*;

  function automatic real ref_bell(real x, real a, real b, real e);
    real t;
    t = (x - e) / a;
    if (t < 0.0) t = -t;
    return 1.0 / (1.0 + t ** (2.0 * b));
  endfunction

  // Output of the core of cluster cl (0..2) for 8-bit feature codes.
  function automatic real ref_anfis(int unsigned cl, int unsigned thw, int unsigned teth,
                                    int unsigned tith);
    real x [3];
    real mu [3][3];
    real num, den, w;
    x[0] = real'(thw) / 256.0;
    x[1] = real'(teth) / 256.0;
    x[2] = real'(tith) / 256.0;
    for (int i = 0; i < 3; i++)
      for (int l = 0; l < 3; l++)
        mu[i][l] = ref_bell(x[i], mf_a(cl, i, l), mf_b(cl, i, l), mf_e(cl, i, l));
    num = 0.0;
    den = 0.0;
    for (int l1 = 0; l1 < 3; l1++)
      for (int l2 = 0; l2 < 3; l2++)
        for (int l3 = 0; l3 < 3; l3++) begin
          w   = mu[0][l1] * mu[1][l2] * mu[2][l3];
          num += w * CONSEQ[cl][9*l1 + 3*l2 + l3];
          den += w;
        end
    return num / den;
  endfunction

  function automatic real q24_to_real(logic signed [31:0] v);
    return real'(v) / 16777216.0;
  endfunction

endpackage
