// tb_sl_integrator: drives random per-cycle SL currents into the integrators over windows of
// 1..8 cycles (clr in the first cycle of each window, sense in the first cycle of the next) and
// checks every column's weight bit against the sign of the summed current difference, ties
// giving +1. Also checks that a window of equal currents gives +1.
module tb_sl_integrator;
  localparam int NC = 16;
  logic clk = 0, rst_n = 0, en = 0, clr = 0, sense = 0;
  logic [NC-1:0][15:0] i_pos, i_neg;
  logic [NC-1:0] w_pos;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sl_integrator #(.NC(NC)) dut (.*);

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint qp [NC], qn [NC]; logic [NC-1:0] expw;
    i_pos = '0; i_neg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int w = 0; w < 60; w++) begin
      int len; len = 1 + (w % 8);
      for (int c = 0; c < NC; c++) begin qp[c] = 0; qn[c] = 0; end
      for (int p = 0; p < len; p++) begin
        @(negedge clk);
        en = 1; clr = (p == 0); sense = (p == 0) && (w > 0);
        for (int c = 0; c < NC; c++) begin
          i_pos[c] = 16'($urandom_range(0, 400)); i_neg[c] = 16'($urandom_range(0, 400));
          if (w == 7) i_neg[c] = i_pos[c];
          qp[c] += i_pos[c]; qn[c] += i_neg[c];
        end
        if (p == 0 && w > 0) begin
          @(posedge clk); #1;
          checks++; if (w_pos !== expw) begin failures++; $display("window %0d: got %b exp %b", w-1, w_pos, expw); end
        end
      end
      for (int c = 0; c < NC; c++) expw[c] = (qp[c] >= qn[c]);
      if (w == 7) begin checks++; if (expw !== '1) failures++; end
    end
    @(negedge clk); en = 0; clr = 0; sense = 1;
    @(posedge clk); #1; checks++; if (w_pos !== expw) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
