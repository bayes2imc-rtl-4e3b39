// tb_b2i_top: end-to-end test of the accelerator at its default size (2 tiles of 4 cores, 128x128
// weight planes, 16 noise rows, 10 classes, ensembles of 10), with no parameter overrides.
//
// A two-layer binary network is run. Layer 1 (512 inputs -> 128 outputs, max-pooled over two
// stochastic passes) uses all four cores of tile 0; the host then copies its 128 activations into
// core 0 of tile 1, which runs layer 2 as the last layer (logits bypass BN/ReLU and go to the
// post-processing unit). Three ensembles of 10 members are run on layer 2:
//   A: n_r = 1, no drift compensation (T_NP = 8), logit correction on;
//   B: n_r = 2 with drift compensation at t = 1e7 s (T_NP = 2), logit correction off;
//   C: frequentist mode (noise plane off, one cycle per row), started back to back so that the
//      post-processing back-pressure makes the tile stall, logit correction on.
// The testbench keeps its own copy of every programmed conductance and models each core's LFSR
// noise-row arbitration and charge comparison, so every weight sample is known: layer-1
// activations and every logit are checked exactly, the ensemble probabilities against a
// floating-point evaluation (tolerance 0.04) and the predicted class exactly. Each mechanism is
// counted (stochastic sampling, n_r = 2, drift-compensated T_NP, frequentist mode, pooling,
// last-layer bypass, logit correction, stall and back-pressure); one that never happened counts
// as a failure. Tile 1 cores 1..3 are left unprogrammed with zero inputs, so they add nothing.
module tb_b2i_top;
  import b2i_pkg::*;
  localparam int NC = 128, WPR = 128, NPR = 16, NCORES = 4, NU = 5;   // NU: cores used
  logic clk = 0, rst_n = 0; logic [31:0] seed = 32'hB2_1C_0042;
  logic prog_en = 0, prog_np = 0, prog_neg = 0; logic [0:0] prog_tile = 0; logic [1:0] prog_core = 0;
  logic [6:0] prog_row = 0, prog_col = 0; logic [7:0] prog_g = 0;
  logic bn_we = 0; logic [0:0] bn_tile = 0; logic [6:0] bn_waddr = 0; logic [15:0] bn_wa = 0, bn_wb = 0;
  logic in_we = 0; logic [0:0] in_tile = 0; logic [1:0] in_core = 0; logic [6:0] in_addr = 0; logic [7:0] in_data = 0;
  logic [0:0] out_tile = 0; logic [6:0] out_raddr = 0; logic [7:0] out_rdata;
  logic nr2 = 0, freq_mode = 0, comp_en = 0; logic [31:0] t_s = 0; logic [3:0] t_np;
  logic [1:0] start = 0; logic [1:0][2:0] pool_n = '{3'd1, 3'd1}; logic [1:0] last_layer = 0;
  logic [1:0] busy, mvm_done, vec_done, stall;
  logic [0:0] ppu_tile = 1; logic lc_en = 0, cfg_we = 0; logic [3:0] cfg_cls = 0; lc_coef_t cfg_coef;
  logic res_valid, member_done; logic [NCLASS-1:0][16:0] res_prob; logic [3:0] res_class;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  b2i_top dut (.*);

  // Conductances of the used cores: 0..3 = tile 0 cores 0..3, 4 = tile 1 core 0.
  byte unsigned gwp [NU][2][WPR][NC];
  byte unsigned gnp [NU][2][NPR][NC];
  int xv [NU][WPR];
  int bna [NC], bnb [NC];
  logic [31:0] lm [NU]; int bp [NU];

  // Mechanism counters.
  int n_stoch = 0, n_nr2 = 0, n_drift = 0, n_freq = 0, n_pool = 0, n_bypass = 0, n_lc = 0;
  int n_stall = 0, n_bp = 0;

  initial begin
    #30ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] nxt(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  task automatic prog(input int u, input bit np, input int r, input int c, input bit neg, input int g);
    @(negedge clk);
    prog_en = 1; prog_tile = 1'(u / 4); prog_core = 2'(u % 4); prog_np = np;
    prog_row = 7'(r); prog_col = 7'(c); prog_neg = neg; prog_g = 8'(g);
  endtask

  task automatic wr_in(input int t, input int k, input int a, input int v);
    @(negedge clk); in_we = 1; in_tile = 1'(t); in_core = 2'(k); in_addr = 7'(a); in_data = 8'(v);
  endtask

  // Reference MVM over used cores lo..hi: y[c] = sum_k sum_j w_kjc * x_kj with the sampled weights.
  task automatic ref_mvm(input int lo, input int hi, input bit n2, input bit fm, input int p, output int y [NC]);
    int a, b, qp, qn;
    for (int c = 0; c < NC; c++) y[c] = 0;
    for (int k = lo; k <= hi; k++)
      for (int j = 0; j < WPR; j++) begin
        a = lm[k][8*bp[k] +: 4]; b = lm[k][8*((bp[k]+1)%4) +: 4]; if (b == a) b = a ^ 1;
        bp[k] = (bp[k] + (n2 ? 2 : 1)) % 4; if (bp[k] == 0) lm[k] = nxt(lm[k]);
        for (int c = 0; c < NC; c++) begin
          qp = gwp[k][0][j][c]; qn = gwp[k][1][j][c];
          if (!fm) begin
            qp += p * gnp[k][0][a][c]; qn += p * gnp[k][1][a][c];
            if (n2) begin qp += p * gnp[k][0][b][c]; qn += p * gnp[k][1][b][c]; end
          end
          y[c] += (qp >= qn) ? xv[k][j] : -xv[k][j];
        end
      end
  endtask

  function automatic int bn(input int s, input int c);
    int y; y = ((s * bna[c]) >>> 8) + bnb[c];
    return (y < 0) ? 0 : (y > 127) ? 127 : y;
  endfunction

  // Layer-2 logit stream of tile 1, checked against the expected member.
  int exp_logit [N_MC][NC]; int n_logit = 0; int prev [NC];
  always @(posedge clk) if (dut.l_valid[1] && dut.l_ready[1]) begin
    checks++;
    if (int'($signed(dut.l_data[1])) != exp_logit[n_logit / NC][dut.l_col[1]]) begin
      failures++; if (failures < 10) $display("logit %0d: %0d exp %0d", dut.l_col[1], $signed(dut.l_data[1]), exp_logit[n_logit / NC][dut.l_col[1]]);
    end
    n_logit++;
  end
  always @(posedge clk) begin
    if (stall[1]) n_stall++;
    if (dut.l_valid[1] && !dut.l_ready[1]) n_bp++;
    if (vec_done[0] && pool_n[0] == 2) n_pool++;
  end

  // Floating-point model of the post-processing unit.
  real ra1, rb1, ra0, rb0, rqa, rqb, rqc; real acc [NCLASS];
  function automatic real corr(input real l, input bit en);
    real d, p1;
    if (!en) return l;
    d  = rqa * l * l + rqb * l + rqc;
    p1 = 1.0 / (1.0 + $exp(d));
    return p1 * (ra1 * l + rb1) + (1.0 - p1) * (ra0 * l + rb0);
  endfunction
  task automatic add_member(input int l [NC], input bit en);
    real c [NCLASS]; real mx, se;
    for (int k = 0; k < NCLASS; k++) c[k] = corr(real'(l[k]), en);
    mx = c[0]; for (int k = 1; k < NCLASS; k++) if (c[k] > mx) mx = c[k];
    se = 0.0; for (int k = 0; k < NCLASS; k++) se += $exp(c[k] - mx);
    for (int k = 0; k < NCLASS; k++) acc[k] += $exp(c[k] - mx) / se / real'(N_MC);
  endtask

  int n_res = 0; logic [NCLASS-1:0][16:0] last_prob; logic [3:0] last_class;
  always @(posedge clk) if (res_valid) begin n_res++; last_prob <= res_prob; last_class <= res_class; end

  // One layer-2 ensemble of N_MC members on tile 1 core 0.
  task automatic ensemble(input bit n2, input bit cen, input bit fm, input bit lc, input bit b2b);
    int y [NC]; int p; int r0; real best; int bi;
    @(negedge clk);
    nr2 = n2; comp_en = cen; t_s = cen ? 32'd10_000_000 : 32'd0; freq_mode = fm; lc_en = lc;
    #1;
    p = int'(t_np);
    if (cen) begin
      checks++; if (p != 2) begin failures++; $display("T_NP after drift = %0d, exp 2", p); end
    end else begin
      checks++; if (p != (n2 ? 4 : 8)) begin failures++; $display("T_NP = %0d", p); end
    end
    r0 = n_res;
    for (int k = 0; k < NCLASS; k++) acc[k] = 0.0;
    for (int m = 0; m < N_MC; m++) begin
      ref_mvm(4, 4, n2, fm, p, y);
      for (int c = 0; c < NC; c++) exp_logit[m][c] = y[c];
      if (!b2b || m == 0) while (busy[1]) @(negedge clk);
      @(negedge clk); start[1] = 1; @(negedge clk); start[1] = 0;
      while (!mvm_done[1]) @(negedge clk);
      add_member(y, lc);
      if (m > 0) begin
        bit diff; diff = 0;
        for (int c = 0; c < NC; c++) if (y[c] != prev[c]) diff = 1;
        if (fm) begin checks++; if (diff) begin failures++; $display("frequentist members differ"); end else n_freq++; end
        else if (diff) n_stoch++;
      end
      for (int c = 0; c < NC; c++) prev[c] = y[c];
      if (n2 && !fm) n_nr2++;
      if (cen) n_drift++;
      if (lc) n_lc++;
    end
    while (n_logit < N_MC * NC || busy[1]) @(negedge clk);
    repeat (NCLASS + 6) @(negedge clk);
    n_logit = 0;
    checks++; if (n_res != r0 + 1) begin failures++; $display("ensemble gave %0d results", n_res - r0); end
    else n_bypass++;
    best = acc[0]; bi = 0;
    for (int k = 0; k < NCLASS; k++) begin
      real hw; hw = real'(last_prob[k]) / 65536.0;
      checks++; if (hw - acc[k] > 0.04 || acc[k] - hw > 0.04) begin failures++; $display("class %0d: p=%f exp %f", k, hw, acc[k]); end
      if (acc[k] > best) begin best = acc[k]; bi = k; end
    end
    checks++; if (int'(last_class) != bi) begin failures++; $display("class %0d exp %0d", last_class, bi); end
  endtask

  task automatic mech(input string name, input int n);
    checks++;
    $display("mechanism %-28s happened %0d times", name, n);
    if (n == 0) begin failures++; $display("mechanism %s never happened", name); end
  endtask

  initial begin
    int d; int y1 [NC], y2 [NC];
    real mt1, st1, mt0, st0, m1, s1, m0, s0, a1, b1, a0, b0, qa, qb, qc;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int u = 0; u < NU; u++) begin lm[u] = seed + 32'((u / 4) * 1024 + u % 4); bp[u] = 0; end
    // Program the used crossbars: weight-plane pairs around a random z, noise pairs near 100.
    for (int u = 0; u < NU; u++) begin
      for (int r = 0; r < WPR; r++) for (int c = 0; c < NC; c++) begin
        d = $urandom_range(0, 400) - 200;
        gwp[u][0][r][c] = 8'(125 + d / 2); gwp[u][1][r][c] = 8'(125 + d / 2 - d);
        prog(u, 0, r, c, 0, gwp[u][0][r][c]); prog(u, 0, r, c, 1, gwp[u][1][r][c]);
      end
      for (int r = 0; r < NPR; r++) for (int c = 0; c < NC; c++) begin
        gnp[u][0][r][c] = 8'(100 + $urandom_range(0, 24) - 12); gnp[u][1][r][c] = 8'(100 + $urandom_range(0, 24) - 12);
        prog(u, 1, r, c, 0, gnp[u][0][r][c]); prog(u, 1, r, c, 1, gnp[u][1][r][c]);
      end
    end
    @(negedge clk); prog_en = 0;
    // Layer-1 inputs; unused cores of tile 1 get zero inputs.
    for (int k = 0; k < 4; k++) for (int j = 0; j < WPR; j++) begin xv[k][j] = $urandom_range(0, 127); wr_in(0, k, j, xv[k][j]); end
    for (int k = 1; k < 4; k++) for (int j = 0; j < WPR; j++) wr_in(1, k, j, 0);
    @(negedge clk); in_we = 0;
    // Tile-0 BN: small gains so the layer-2 logits stay in the range of the logit statistics.
    for (int c = 0; c < NC; c++) begin
      bna[c] = $urandom_range(1, 3); bnb[c] = $urandom_range(0, 8) - 4;
      @(negedge clk); bn_we = 1; bn_tile = 0; bn_waddr = 7'(c); bn_wa = 16'(bna[c]); bn_wb = 16'(bnb[c]);
    end
    @(negedge clk); bn_we = 0;
    // Logit-correction coefficients (two-mode Gaussian logit statistics).
    mt1 = 40.0; st1 = 15.0; mt0 = -10.0; st0 = 20.0; m1 = 8.0; s1 = 2.0; m0 = -1.0; s0 = 1.5;
    a1 = s1 / st1; b1 = m1 - a1 * mt1; a0 = s0 / st0; b0 = m0 - a0 * mt0;
    qa = 1.0 / (2.0 * st1 * st1) - 1.0 / (2.0 * st0 * st0);
    qb = mt0 / (st0 * st0) - mt1 / (st1 * st1);
    qc = $ln(9.0) + $ln(st1 / st0) + mt1 * mt1 / (2.0 * st1 * st1) - mt0 * mt0 / (2.0 * st0 * st0);
    cfg_coef.a1 = 16'($rtoi(a1 * 4096.0)); cfg_coef.b1 = 24'($rtoi(b1 * 256.0));
    cfg_coef.a0 = 16'($rtoi(a0 * 4096.0)); cfg_coef.b0 = 24'($rtoi(b0 * 256.0));
    cfg_coef.qa = 40'($rtoi(qa * 68719476736.0)); cfg_coef.qb = 40'($rtoi(qb * 268435456.0));
    cfg_coef.qc = 32'($rtoi(qc * 65536.0));
    ra1 = real'(cfg_coef.a1) / 4096.0; rb1 = real'(cfg_coef.b1) / 256.0;
    ra0 = real'(cfg_coef.a0) / 4096.0; rb0 = real'(cfg_coef.b0) / 256.0;
    rqa = real'(cfg_coef.qa) / 68719476736.0; rqb = real'(cfg_coef.qb) / 268435456.0; rqc = real'(cfg_coef.qc) / 65536.0;
    for (int k = 0; k < NCLASS; k++) begin @(negedge clk); cfg_we = 1; cfg_cls = 4'(k); end
    @(negedge clk); cfg_we = 0;

    // Layer 1 on tile 0: n_r = 1, T_NP = 8, max-pooling over two passes.
    pool_n[0] = 2; last_layer[0] = 0;
    ref_mvm(0, 3, 0, 0, 8, y1);
    @(negedge clk); start[0] = 1; @(negedge clk); start[0] = 0;
    while (!mvm_done[0]) @(negedge clk);
    ref_mvm(0, 3, 0, 0, 8, y2);
    while (busy[0]) @(negedge clk);
    @(negedge clk); start[0] = 1; @(negedge clk); start[0] = 0;
    while (!mvm_done[0]) @(negedge clk);
    while (busy[0]) @(negedge clk);
    repeat (3) @(negedge clk);
    // Check the pooled activations and copy them into tile 1 core 0.
    out_tile = 0;
    for (int c = 0; c < NC; c++) begin
      int e; e = (bn(y1[c], c) > bn(y2[c], c)) ? bn(y1[c], c) : bn(y2[c], c);
      @(negedge clk); in_we = 0; out_raddr = 7'(c); @(posedge clk); #1;
      checks++; if (int'(out_rdata) != e) begin failures++; if (failures < 10) $display("act %0d: %0d exp %0d", c, out_rdata, e); end
      xv[4][c] = int'(out_rdata);
      wr_in(1, 0, c, xv[4][c]);
    end
    @(negedge clk); in_we = 0;

    // Layer 2 on tile 1 as the last layer.
    last_layer[1] = 1; ppu_tile = 1;
    ensemble(0, 0, 0, 1, 0);   // A
    ensemble(1, 1, 0, 0, 0);   // B
    ensemble(0, 0, 1, 1, 1);   // C

    mech("stochastic sampling", n_stoch);
    mech("n_r = 2 read", n_nr2);
    mech("drift-compensated T_NP", n_drift);
    mech("frequentist mode", n_freq);
    mech("max-pooling", n_pool);
    mech("last-layer bypass to PPU", n_bypass);
    mech("logit correction", n_lc);
    mech("tile stall", n_stall);
    mech("PPU back-pressure", n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
