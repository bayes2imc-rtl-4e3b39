// tb_tx_reg_mux: loads random column sums, then drains them with a random ready pattern and
// checks order, values, that a column moves only on valid && ready, that the registers keep
// their values while the source changes, and that busy drops after the last column (NC moves).
module tb_tx_reg_mux;
  localparam int NC = 128;
  logic clk = 0, rst_n = 0, load = 0, out_ready = 0;
  logic [NC-1:0][15:0] acc, snap;
  logic busy, out_valid; logic [6:0] out_col; logic [15:0] out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tx_reg_mux #(.NC(NC)) dut (.*);

  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int got; int cyc;
    acc = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      for (int c = 0; c < NC; c++) acc[c] = 16'($urandom);
      snap = acc;
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      for (int c = 0; c < NC; c++) acc[c] = 16'($urandom);   // source moves on
      got = 0; cyc = 0;
      while (got < NC && cyc < 1000) begin
        out_ready = (m == 0) ? 1'b1 : 1'($urandom);
        #1;
        if (out_valid && out_ready) begin
          checks++;
          if (int'(out_col) != got || out_data !== snap[got]) begin
            failures++; if (failures < 10) $display("m%0d: col %0d data %h exp col %0d data %h", m, out_col, out_data, got, snap[got]);
          end
          got++;
        end
        @(negedge clk); cyc++;
      end
      out_ready = 0;
      checks++; if (busy || out_valid) begin failures++; $display("busy after drain"); end
      if (m == 0) begin checks++; if (cyc != NC) begin failures++; $display("full-rate drain took %0d cycles", cyc); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
