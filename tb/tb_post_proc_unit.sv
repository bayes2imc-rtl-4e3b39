// tb_post_proc_unit: sends ensembles of N_MC = 10 members of 10 class logits (followed by extra
// columns that must be dropped) and compares the averaged probabilities and the predicted class
// with a floating-point evaluation of the same mathematics: the Gaussian two-mode posterior
// Pr(y = k | L) by Bayes' rule, the affine corrections, softmax and the ensemble mean. The
// fixed-point tables allow a tolerance of 0.04 per probability. Runs ensembles with logit
// correction on and two with it off (one with logits close together), and checks that a member takes NCLASS+1 cycles of
// back-pressure after its last class.
module tb_post_proc_unit;
  import b2i_pkg::*;
  localparam int NCL = 10, NMC = 10;
  logic clk = 0, rst_n = 0, lc_en = 1, cfg_we = 0; logic [3:0] cfg_cls = 0; lc_coef_t cfg_coef;
  logic in_valid = 0, in_ready; logic [6:0] in_cls = 0; logic signed [18:0] in_logit = 0;
  logic res_valid, member_done; logic [NCL-1:0][16:0] res_prob; logic [3:0] res_class;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  post_proc_unit #(.LW(19), .NCL(NCL), .NMC(NMC)) dut (.*);

  real mt1 = 40.0, st1 = 15.0, mt0 = -10.0, st0 = 20.0;   // hardware logit statistics
  real m1 = 8.0, s1 = 2.0, m0 = -1.0, s0 = 1.5;           // ideal logit statistics
  real ra1, rb1, ra0, rb0, rqa, rqb, rqc;                  // quantized coefficients, as reals
  real acc [NCL];
  int n_res = 0;
  bit close = 0;   // logits k mod 4: a softmax far from one-hot

  initial begin
    #5ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real corr(input real l);
    real d, p1;
    if (!lc_en) return l;
    d  = rqa * l * l + rqb * l + rqc;
    p1 = 1.0 / (1.0 + $exp(d));
    return p1 * (ra1 * l + rb1) + (1.0 - p1) * (ra0 * l + rb0);
  endfunction

  task automatic member(input int truth);
    int l [NCL]; real c [NCL]; real mx, se;
    for (int k = 0; k < NCL; k++)
      l[k] = close ? (k % 4) : (k == truth) ? $rtoi(mt1 + st1 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0))
                          : $rtoi(mt0 + st0 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
    for (int k = 0; k < NCL; k++) c[k] = corr(real'(l[k]));
    mx = c[0]; for (int k = 1; k < NCL; k++) if (c[k] > mx) mx = c[k];
    se = 0.0; for (int k = 0; k < NCL; k++) se += $exp(c[k] - mx);
    for (int k = 0; k < NCL; k++) acc[k] += $exp(c[k] - mx) / se / real'(NMC);
    for (int col = 0; col < NCL + 6; ) begin
      @(negedge clk);
      in_valid = 1; in_cls = 7'(col); in_logit = (col < NCL) ? 19'(l[col]) : 19'(12345);
      #1; if (in_ready) col++;
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic ensemble(input int truth);
    real best; int bi; int n_before;
    for (int k = 0; k < NCL; k++) acc[k] = 0.0;
    n_before = n_res;
    for (int m = 0; m < NMC; m++) member(truth);
    repeat (NCL + 4) @(negedge clk);
    checks++; if (n_res != n_before + 1) begin failures++; $display("no result for ensemble"); end
    best = acc[0]; bi = 0;
    for (int k = 0; k < NCL; k++) begin
      checks++;
      if (real'(res_prob[k]) / 65536.0 - acc[k] > 0.04 || acc[k] - real'(res_prob[k]) / 65536.0 > 0.04) begin
        failures++; $display("class %0d: p=%f exp %f", k, real'(res_prob[k]) / 65536.0, acc[k]);
      end
      if (acc[k] > best) begin best = acc[k]; bi = k; end
    end
    checks++; if (int'(res_class) != bi) begin failures++; $display("class %0d exp %0d", res_class, bi); end
  endtask

  always @(posedge clk) if (res_valid) n_res++;

  initial begin
    real a1, b1, a0, b0, qa, qb, qc;
    int bp;
    a1 = s1 / st1; b1 = m1 - a1 * mt1; a0 = s0 / st0; b0 = m0 - a0 * mt0;
    qa = 1.0 / (2.0 * st1 * st1) - 1.0 / (2.0 * st0 * st0);
    qb = mt0 / (st0 * st0) - mt1 / (st1 * st1);
    qc = $ln(9.0) + $ln(st1 / st0) + mt1 * mt1 / (2.0 * st1 * st1) - mt0 * mt0 / (2.0 * st0 * st0);
    cfg_coef.a1 = 16'($rtoi(a1 * 4096.0)); cfg_coef.b1 = 24'($rtoi(b1 * 256.0));
    cfg_coef.a0 = 16'($rtoi(a0 * 4096.0)); cfg_coef.b0 = 24'($rtoi(b0 * 256.0));
    cfg_coef.qa = 40'($rtoi(qa * 68719476736.0));
    cfg_coef.qb = 40'($rtoi(qb * 268435456.0));
    cfg_coef.qc = 32'($rtoi(qc * 65536.0));
    ra1 = real'(cfg_coef.a1) / 4096.0; rb1 = real'(cfg_coef.b1) / 256.0;
    ra0 = real'(cfg_coef.a0) / 4096.0; rb0 = real'(cfg_coef.b0) / 256.0;
    rqa = real'(cfg_coef.qa) / 68719476736.0; rqb = real'(cfg_coef.qb) / 268435456.0; rqc = real'(cfg_coef.qc) / 65536.0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NCL; k++) begin @(negedge clk); cfg_we = 1; cfg_cls = 4'(k); end
    @(negedge clk); cfg_we = 0;
    lc_en = 1;
    ensemble(3); ensemble(7); ensemble(0);
    lc_en = 0;
    ensemble(5);
    close = 1;
    ensemble(2);
    // Back-pressure length after the last class of a member.
    @(negedge clk);
    for (int col = 0; col < NCL; col++) begin in_valid = 1; in_cls = 7'(col); in_logit = 19'(col); @(negedge clk); end
    in_valid = 0; bp = 0;
    while (!in_ready) begin bp++; @(negedge clk); end
    checks++; if (bp != NCL + 1) begin failures++; $display("busy for %0d cycles", bp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
