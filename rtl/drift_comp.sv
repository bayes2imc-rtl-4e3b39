// drift_comp: Bayes2IMC drift compensation (BBDC) of the read-pulse lengths.
//
// PCM conductance drifts down as G(t) = G(T0) * (t/T0)^-nu. Because the weight plane stores
// z_w = Phi^-1(p_w) scaled into conductance, one global factor alpha_t = (t/T0)^nu_c, with
// nu_c = 0.06 (the drift exponent near 8 uS), restores p_w over the whole range. It is applied
// by shortening the noise-plane pulse relative to the weight-plane pulse: T_NP/T_WP =
// kappa / (n_r * alpha_t), rounded to a whole number of clock cycles since T_WP is one cycle.
// This gives 8 (n_r = 1) or 4 (n_r = 2) right after programming and 2 for n_r = 2 at 1e7 s.
//
// Implementation: instead of evaluating a power at run time, the times at which the rounded
// value steps down are computed at elaboration, t_m = T0 * (kappa / (n_r * (m + 0.5)))^(1/nu_c),
// and `t_s` (seconds since programming, supplied from outside) is compared against them. The
// output is combinational. With `comp_en` low the uncompensated kappa / n_r is returned.
// The formula and constants are the paper's; the threshold table and the time input are this
// design's.
module drift_comp #(
  parameter int unsigned KAPPA = 8,
  parameter int unsigned T0_S  = 20,
  parameter real         NU_C  = 0.06
) (
  input  logic [31:0] t_s,
  input  logic        nr2,
  input  logic        comp_en,
  output logic [3:0]  t_np
);
  typedef longint unsigned th_t [KAPPA];

  // th[m] = time after which T_NP drops from m+1 to m (m = 1 .. KAPPA/nr - 1).
  function automatic th_t thresholds(input int unsigned nr);
    th_t th;
    real a, t;
    for (int m = 0; m < KAPPA; m++) begin
      if (m == 0) th[m] = 64'hFFFF_FFFF_FFFF;
      else begin
        a = real'(KAPPA) / (real'(nr) * (real'(m) + 0.5));
        t = real'(T0_S) * (a ** (1.0 / NU_C));
        th[m] = (t > 1.0e15) ? 64'hFFFF_FFFF_FFFF : longint'(t);
      end
    end
    return th;
  endfunction

  localparam th_t TH1 = thresholds(1);
  localparam th_t TH2 = thresholds(2);

  always_comb begin
    int unsigned base, steps;
    base  = nr2 ? KAPPA / 2 : KAPPA;
    steps = 0;
    if (comp_en)
      for (int m = 1; m < KAPPA; m++)
        if (m < base && 64'(t_s) > (nr2 ? TH2[m] : TH1[m])) steps++;
    t_np = 4'(base - steps);
  end
endmodule
