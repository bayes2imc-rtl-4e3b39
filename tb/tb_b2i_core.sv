// tb_b2i_core: end-to-end test of one core at full size (128 WP rows, 16 NP rows, 128 columns).
//
// The crossbar is programmed with random weight parameters (G+ - G- in -240..240 codes) and
// noise cells (G+, G- around 100 codes with a few codes of mismatch). The testbench keeps its
// own model of the LFSR arbitration and of the charge balance, so it knows exactly which weight
// sample every cell gives in every row read, and from that each column sum y_i = sum x_j w_ji.
// It runs MVMs in the standard mode (n_r = 1, T_NP = 8), the high-throughput mode (n_r = 2,
// T_NP = 4), the drift-compensated mode (n_r = 2, T_NP = 2) and the frequentist mode (no NP,
// one cycle per row), checks every column sum and the latency of WP_ROWS * T_NP + 3 cycles, and
// provokes a transfer-register stall by holding out_ready low across the end of the next MVM.
// Since every hardware sum matches the model exactly, the last check (on the model's draws for
// the following reads) confirms that the samples really vary: a column with z_w = 0 must give
// different sums over repeated MVMs with this seed.
module tb_b2i_core;
  localparam int WPR = 128, NPR = 16, NC = 128;
  logic clk = 0, rst_n = 0;
  logic [31:0] seed = 32'hC0FF_EE01;
  logic prog_en = 0, prog_np = 0, prog_neg = 0; logic [6:0] prog_row = 0, prog_col = 0; logic [7:0] prog_g = 0;
  logic start = 0, nr2 = 0, freq_mode = 0; logic [3:0] t_np = 8;
  logic busy, done, stall, x_rd_en; logic [6:0] x_rd_addr; logic signed [7:0] x_rd_data;
  logic out_valid, out_ready = 1; logic [6:0] out_col; logic [15:0] out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  b2i_core #(.WPR(WPR), .NPR(NPR), .NC(NC)) dut (.*);

  logic signed [7:0] xv [WPR];
  always_ff @(posedge clk) if (x_rd_en) x_rd_data <= xv[x_rd_addr];

  int gwp [2][WPR][NC];
  int gnp [2][NPR][NC];
  logic [31:0] lfsr_m; int bptr;
  int stall_cycles = 0;
  always @(posedge clk) if (stall) stall_cycles++;

  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] nxt(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  task automatic prog(input bit np, input int r, input int c, input bit neg, input int g);
    @(negedge clk);
    prog_en = 1; prog_np = np; prog_row = 7'(r); prog_col = 7'(c); prog_neg = neg; prog_g = 8'(g);
    @(negedge clk); prog_en = 0;
  endtask

  // Reference: column sums of one MVM, drawing NP rows like the arbiter does.
  task automatic ref_mvm(input bit n2, input int p, input bit fm, output int y [NC]);
    int a, b, qp, qn;
    for (int c = 0; c < NC; c++) y[c] = 0;
    for (int j = 0; j < WPR; j++) begin
      a = lfsr_m[8*bptr +: 4];
      b = lfsr_m[8*((bptr+1)%4) +: 4];
      if (b == a) b = a ^ 1;
      if (n2) begin bptr = (bptr + 2) % 4; if (bptr == 0) lfsr_m = nxt(lfsr_m); end
      else    begin bptr = (bptr + 1) % 4; if (bptr == 0) lfsr_m = nxt(lfsr_m); end
      for (int c = 0; c < NC; c++) begin
        qp = gwp[0][j][c]; qn = gwp[1][j][c];
        if (!fm) begin
          qp += p * gnp[0][a][c]; qn += p * gnp[1][a][c];
          if (n2) begin qp += p * gnp[0][b][c]; qn += p * gnp[1][b][c]; end
        end
        y[c] += (qp >= qn) ? int'(xv[j]) : -int'(xv[j]);
      end
    end
  endtask

  task automatic run_mvm(input bit n2, input int p, input bit fm, input bit hold, output int lat);
    int y [NC]; int got; int t0;
    ref_mvm(n2, p, fm, y);
    @(negedge clk); start = 1; nr2 = n2; t_np = 4'(p); freq_mode = fm;
    @(posedge clk); t0 = $time; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    lat = int'(($time - t0) / 10) + 1;
    if (hold) return;
    got = 0;
    while (got < NC) begin
      if (out_valid && out_ready) begin
        checks++;
        if (int'(out_col) != got || int'(signed'(out_data)) != y[got]) begin
          failures++; if (failures < 10) $display("nr2=%0d p=%0d fm=%0d col %0d: got %0d exp %0d", n2, p, fm, out_col, signed'(out_data), y[got]);
        end
        got++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    int lat, d; int first_y [4]; bit differs;
    for (int j = 0; j < WPR; j++) xv[j] = 8'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    lfsr_m = seed; bptr = 0;
    for (int r = 0; r < WPR; r++) for (int c = 0; c < NC; c++) begin
      d = (c == 7) ? 0 : $urandom_range(0, 480) - 240;
      gwp[0][r][c] = 125 + d / 2; gwp[1][r][c] = gwp[0][r][c] - d;
      prog(0, r, c, 0, gwp[0][r][c]); prog(0, r, c, 1, gwp[1][r][c]);
    end
    for (int r = 0; r < NPR; r++) for (int c = 0; c < NC; c++) begin
      gnp[0][r][c] = 100 + $urandom_range(0, 24) - 12; gnp[1][r][c] = 100 + $urandom_range(0, 24) - 12;
      prog(1, r, c, 0, gnp[0][r][c]); prog(1, r, c, 1, gnp[1][r][c]);
    end
    // Standard, high-throughput and drift-compensated modes.
    run_mvm(0, 8, 0, 0, lat); checks++; if (lat != WPR*8 + 3) begin failures++; $display("latency n_r=1: %0d", lat); end
    run_mvm(1, 4, 0, 0, lat); checks++; if (lat != WPR*4 + 3) begin failures++; $display("latency n_r=2: %0d", lat); end
    run_mvm(1, 2, 0, 0, lat); checks++; if (lat != WPR*2 + 3) begin failures++; $display("latency T_NP=2: %0d", lat); end
    // Frequentist mode (the arbiter still draws, the NP stays dark).
    run_mvm(0, 8, 1, 0, lat); checks++; if (lat != WPR + 3) begin failures++; $display("latency frequentist: %0d", lat); end
    // Stall: leave the first result in the transfer registers, run another MVM.
    out_ready = 0;
    run_mvm(0, 1, 1, 1, lat);
    begin
      int y [NC];
      // The second MVM must wait for the registers: release them after a while.
      @(negedge clk); start = 1; nr2 = 0; t_np = 4'd1; freq_mode = 1;
      @(negedge clk); start = 0;
      repeat (WPR + 20) @(negedge clk);
      checks++; if (stall_cycles == 0 || !busy) begin failures++; $display("no stall seen"); end
      out_ready = 1;
      ref_mvm(0, 1, 1, y);   // first held MVM
      ref_mvm(0, 1, 1, y);   // second MVM (frequentist sums do not depend on the draws)
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int got = 0; got < NC; ) begin
        if (out_valid && out_ready) begin
          checks++; if (int'(signed'(out_data)) != y[got]) failures++;
          got++;
        end
        @(negedge clk);
      end
    end
    // Stochasticity of the z_w = 0 column (column 7) over repeated MVMs.
    differs = 0;
    for (int k = 0; k < 4; k++) begin
      int y [NC];
      ref_mvm(0, 8, 0, y);
      first_y[k] = y[7];
      if (k > 0 && first_y[k] != first_y[0]) differs = 1;
    end
    checks++; if (!differs) begin failures++; $display("column with z_w = 0 is not stochastic"); end
    $display("stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
