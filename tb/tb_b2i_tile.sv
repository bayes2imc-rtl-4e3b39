// tb_b2i_tile: a tile with 2 cores (full-size cores) runs a 256-input layer. The crossbar is
// programmed with random weight parameters and noise cells; the testbench models the LFSR
// arbitration of each core (seed + core index) and the charge balance, so it knows every weight
// sample and checks exactly: the activations written to the output buffer (sum of both cores,
// BN, ReLU, saturation; pooling over 2 MVMs in the second run), and, in last-layer mode, the
// logit stream. Also checks that all cores run in lock step (assertion in the tile).
module tb_b2i_tile;
  import b2i_pkg::*;
  localparam int NCORES = 2, WPR = 128, NPR = 16, NC = 128;
  logic clk = 0, rst_n = 0; logic [31:0] seed = 32'h5EED_0001;
  logic prog_en = 0, prog_np = 0, prog_neg = 0; logic [0:0] prog_core = 0; logic [6:0] prog_row = 0, prog_col = 0; logic [7:0] prog_g = 0;
  logic bn_we = 0; logic [6:0] bn_waddr = 0; logic [15:0] bn_wa = 0, bn_wb = 0;
  logic in_we = 0; logic [0:0] in_core = 0; logic [6:0] in_addr = 0; logic [7:0] in_data = 0;
  logic [6:0] out_raddr = 0; logic [7:0] out_rdata;
  logic start = 0, nr2 = 0, freq_mode = 0, last_layer = 0; logic [3:0] t_np = 8; logic [2:0] pool_n = 1;
  logic busy, mvm_done, vec_done, stall;
  logic logit_valid, logit_ready = 1; logic [6:0] logit_col; logic signed [17:0] logit_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  b2i_tile #(.NCORES(NCORES), .WPR(WPR), .NPR(NPR), .NC(NC)) dut (.*);

  int gwp [NCORES][2][WPR][NC];
  int gnp [NCORES][2][NPR][NC];
  int xv [NCORES][WPR];
  int bna [NC], bnb [NC];
  logic [31:0] lm [NCORES]; int bp [NCORES];

  initial begin
    #40ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] nxt(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  task automatic prog(input int k, input bit np, input int r, input int c, input bit neg, input int g);
    @(negedge clk);
    prog_en = 1; prog_core = 1'(k); prog_np = np; prog_row = 7'(r); prog_col = 7'(c); prog_neg = neg; prog_g = 8'(g);
    @(negedge clk); prog_en = 0;
  endtask

  task automatic ref_mvm(input bit n2, input int p, output int y [NC]);
    int a, b, qp, qn;
    for (int c = 0; c < NC; c++) y[c] = 0;
    for (int k = 0; k < NCORES; k++)
      for (int j = 0; j < WPR; j++) begin
        a = lm[k][8*bp[k] +: 4]; b = lm[k][8*((bp[k]+1)%4) +: 4]; if (b == a) b = a ^ 1;
        bp[k] = (bp[k] + (n2 ? 2 : 1)) % 4; if (bp[k] == 0) lm[k] = nxt(lm[k]);
        for (int c = 0; c < NC; c++) begin
          qp = gwp[k][0][j][c] + p * gnp[k][0][a][c]; qn = gwp[k][1][j][c] + p * gnp[k][1][a][c];
          if (n2) begin qp += p * gnp[k][0][b][c]; qn += p * gnp[k][1][b][c]; end
          y[c] += (qp >= qn) ? xv[k][j] : -xv[k][j];
        end
      end
  endtask

  function automatic int bn(input int s, input int c);
    int y; y = ((s * bna[c]) >>> 8) + bnb[c];
    return (y < 0) ? 0 : (y > 127) ? 127 : y;
  endfunction

  task automatic go(input bit n2, input int p);
    @(negedge clk); start = 1; nr2 = n2; t_np = 4'(p);
    @(negedge clk); start = 0;
    while (!mvm_done) @(negedge clk);
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  int n_logit = 0; int exp_logit [NC];
  always @(posedge clk) if (logit_valid && logit_ready) begin
    checks++;
    if (int'(logit_data) != exp_logit[logit_col]) begin failures++; if (failures < 10) $display("logit %0d: %0d exp %0d", logit_col, logit_data, exp_logit[logit_col]); end
    n_logit++;
  end

  initial begin
    int d; int y1 [NC], y2 [NC];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NCORES; k++) begin lm[k] = seed + 32'(k); bp[k] = 0; end
    for (int k = 0; k < NCORES; k++) begin
      for (int r = 0; r < WPR; r++) for (int c = 0; c < NC; c++) begin
        d = $urandom_range(0, 480) - 240;
        gwp[k][0][r][c] = 125 + d / 2; gwp[k][1][r][c] = gwp[k][0][r][c] - d;
        prog(k, 0, r, c, 0, gwp[k][0][r][c]); prog(k, 0, r, c, 1, gwp[k][1][r][c]);
      end
      for (int r = 0; r < NPR; r++) for (int c = 0; c < NC; c++) begin
        gnp[k][0][r][c] = 100 + $urandom_range(0, 24) - 12; gnp[k][1][r][c] = 100 + $urandom_range(0, 24) - 12;
        prog(k, 1, r, c, 0, gnp[k][0][r][c]); prog(k, 1, r, c, 1, gnp[k][1][r][c]);
      end
      for (int j = 0; j < WPR; j++) begin
        xv[k][j] = $urandom_range(0, 127);
        @(negedge clk); in_we = 1; in_core = 1'(k); in_addr = 7'(j); in_data = 8'(xv[k][j]);
      end
    end
    for (int c = 0; c < NC; c++) begin
      bna[c] = $urandom_range(1, 40); bnb[c] = $urandom_range(0, 60) - 30;
      @(negedge clk); in_we = 0; bn_we = 1; bn_waddr = 7'(c); bn_wa = 16'(bna[c]); bn_wb = 16'(bnb[c]);
    end
    @(negedge clk); bn_we = 0;
    // Run 1: n_r = 1, no pooling.
    ref_mvm(0, 8, y1);
    go(0, 8);
    for (int c = 0; c < NC; c++) begin
      @(negedge clk); out_raddr = 7'(c); @(posedge clk); #1;
      checks++; if (int'(out_rdata) != bn(y1[c], c)) begin failures++; if (failures < 10) $display("act %0d: %0d exp %0d", c, out_rdata, bn(y1[c], c)); end
    end
    // Run 2: n_r = 2, T_NP = 4, pooling over two MVMs.
    pool_n = 2;
    ref_mvm(1, 4, y1); go(1, 4);
    ref_mvm(1, 4, y2); go(1, 4);
    for (int c = 0; c < NC; c++) begin
      int e; e = (bn(y1[c], c) > bn(y2[c], c)) ? bn(y1[c], c) : bn(y2[c], c);
      @(negedge clk); out_raddr = 7'(c); @(posedge clk); #1;
      checks++; if (int'(out_rdata) != e) begin failures++; if (failures < 10) $display("pooled %0d: %0d exp %0d", c, out_rdata, e); end
    end
    // Run 3: last layer, logits with back-pressure.
    last_layer = 1;
    ref_mvm(0, 8, y1);
    for (int c = 0; c < NC; c++) exp_logit[c] = y1[c];
    fork
      go(0, 8);
      begin
        repeat (1200) begin @(negedge clk); logit_ready = 1'($urandom); end
        logit_ready = 1;
      end
    join
    logit_ready = 1;
    repeat (200) @(negedge clk);
    checks++; if (n_logit != NC) begin failures++; $display("%0d logits", n_logit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
