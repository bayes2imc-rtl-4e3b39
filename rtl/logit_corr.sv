// logit_corr: Bayesian affine correction of one output logit (combinational).
//
// On the programmed hardware, the logit L~ of class k is modelled as a mixture of two Gaussians:
// one for inputs whose label is k (mean mu~1, std sigma~1), one for all others (mu~0, sigma~0).
// Software statistics of the ideal network give (mu1, sigma1) and (mu0, sigma0). The corrected
// logit is the expectation of the ideal logit given L~:
//   l^ = P1 * E1 + (1 - P1) * E0,  E_c = a_c * L~ + b_c,  a_c = sigma_c / sigma~_c,
//   b_c = mu_c - a_c * mu~_c,       P1 = Pr(y = k | L~) = 1 / (1 + exp(d)),
// where d = qa*L~^2 + qb*L~ + qc is the log-ratio of the two prior-weighted Gaussian
// likelihoods (the quadratic form of Bayes' rule with priors (n-1)/n and 1/n). All seven
// coefficients are computed off-line from the calibration run and loaded per class.
//
// Formats (this design's choice): L~ is an integer column sum; a_c Q4.12; b_c and the result
// Q.8; qa Q.36, qb Q.28, qc Q.16. d is clamped to [-8, 8) and the logistic function is a
// 256-entry table, step 1/16, computed at elaboration. With `en` low the logit passes unchanged
// (scaled to Q.8). The correction formula is the paper's; the evaluation scheme is this design's.
module logit_corr
  import b2i_pkg::*;
#(
  parameter int unsigned LW = 19
) (
  input  logic                en,
  input  logic signed [LW-1:0] l_in,
  input  lc_coef_t            coef,
  output logic signed [31:0]  l_out
);
  typedef logic [16:0] lut_t [256];

  // sig[i] = 1 / (1 + exp(d)) at d = -8 + (i + 0.5) / 16, unsigned Q1.16.
  function automatic lut_t mk_sig();
    lut_t t;
    real d;
    for (int i = 0; i < 256; i++) begin
      d    = -8.0 + (real'(i) + 0.5) / 16.0;
      t[i] = 17'($rtoi(65536.0 / (1.0 + $exp(d)) + 0.5));
    end
    return t;
  endfunction

  localparam lut_t SIG = mk_sig();

  logic signed [79:0] l2, t_a, t_b, d_q16;
  logic signed [47:0] e1, e0, diff;
  logic signed [19:0] dcl;
  logic [7:0]         idx;
  logic [16:0]        p1;
  logic signed [67:0] mix;

  always_comb begin
    l2    = 80'(l_in) * 80'(l_in);
    t_a   = (l2 * 80'(coef.qa)) >>> 20;           // Q.36 -> Q.16
    t_b   = (80'(l_in) * 80'(coef.qb)) >>> 12;    // Q.28 -> Q.16
    d_q16 = t_a + t_b + 80'(coef.qc);
    if (d_q16 < -80'sd524288)     dcl = -20'sd524288;
    else if (d_q16 > 80'sd524287) dcl = 20'sd524287;
    else                          dcl = 20'(d_q16);
    idx   = 8'((32'(dcl) + 32'sd524288) >>> 12);
    p1    = SIG[idx];
    e1    = ((48'(l_in) * 48'(coef.a1)) >>> 4) + 48'(coef.b1);
    e0    = ((48'(l_in) * 48'(coef.a0)) >>> 4) + 48'(coef.b0);
    diff  = e1 - e0;
    mix   = 68'(diff) * signed'({51'd0, p1});
    l_out = en ? 32'(e0 + 48'(mix >>> 16)) : 32'(48'(l_in) <<< 8);
  end
endmodule
