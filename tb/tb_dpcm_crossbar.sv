// tb_dpcm_crossbar: programs every device of the crossbar model with random codes through the
// source-line-selected write port, then turns on random WP/NP word-line combinations (one WP
// row plus one or two NP rows, as in a read) and compares every column's SL+ and SL- current
// with sums computed from the testbench's own copy of the codes. Also checks that a column
// whose source lines are off carries no current.
module tb_dpcm_crossbar;
  localparam int WPR = 128, NPR = 16, NC = 128;
  logic clk = 0;
  logic prog_en = 0, prog_np = 0; logic [6:0] prog_row = 0; logic [7:0] prog_g = 0;
  logic [NC-1:0] sl_pos_en, sl_neg_en;
  logic [WPR-1:0] wl_wp = '0; logic [NPR-1:0] wl_np = '0;
  logic [NC-1:0][15:0] i_pos, i_neg;
  int checks = 0, failures = 0;
  logic [7:0] rwp [2][WPR][NC];
  logic [7:0] rnp [2][NPR][NC];
  always #5 clk = ~clk;

  dpcm_crossbar #(.WPR(WPR), .NPR(NPR), .NC(NC)) dut (.*);

  initial begin
    #50ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic prog(input bit np, input int r, input int c, input bit neg, input logic [7:0] g);
    @(negedge clk);
    prog_en = 1; prog_np = np; prog_row = 7'(r); prog_g = g;
    sl_pos_en = neg ? '0 : (128'd1 << c); sl_neg_en = neg ? (128'd1 << c) : '0;
    @(negedge clk); prog_en = 0; sl_pos_en = '1; sl_neg_en = '1;
  endtask

  initial begin
    int r, a, b, ep, en_;
    sl_pos_en = '1; sl_neg_en = '1;
    for (int rr = 0; rr < WPR; rr++) for (int c = 0; c < NC; c++) for (int d = 0; d < 2; d++) begin
      rwp[d][rr][c] = 8'($urandom_range(0, 250)); prog(0, rr, c, d[0], rwp[d][rr][c]);
    end
    for (int rr = 0; rr < NPR; rr++) for (int c = 0; c < NC; c++) for (int d = 0; d < 2; d++) begin
      rnp[d][rr][c] = 8'($urandom_range(80, 120)); prog(1, rr, c, d[0], rnp[d][rr][c]);
    end
    for (int t = 0; t < 40; t++) begin
      r = $urandom_range(0, WPR-1); a = $urandom_range(0, NPR-1); b = $urandom_range(0, NPR-1);
      @(negedge clk);
      wl_wp = '0; wl_wp[r] = 1'b1; wl_np = '0; wl_np[a] = 1'b1; if (t % 2) wl_np[b] = 1'b1;
      #1;
      for (int c = 0; c < NC; c++) begin
        ep = rwp[0][r][c] + rnp[0][a][c]; en_ = rwp[1][r][c] + rnp[1][a][c];
        if ((t % 2) && b != a) begin ep += rnp[0][b][c]; en_ += rnp[1][b][c]; end
        checks++;
        if (int'(i_pos[c]) != ep || int'(i_neg[c]) != en_) begin
          failures++; if (failures < 10) $display("t%0d c%0d: got %0d/%0d exp %0d/%0d", t, c, i_pos[c], i_neg[c], ep, en_);
        end
      end
    end
    sl_pos_en[5] = 1'b0; sl_neg_en[5] = 1'b0; #1;
    checks++; if (i_pos[5] != 0 || i_neg[5] != 0) failures++;
    wl_wp = '0; wl_np = '0; #1;
    checks++; if (i_pos != '0 || i_neg != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
