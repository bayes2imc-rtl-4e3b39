// tb_column_acc: streams 128 random signed inputs with random weight bits into the
// accumulators and compares all columns with sum_j x_j * w_ji (w = +/-1) computed here, for
// several MVMs back to back (the `first` row restarts the sums), including the extreme case
// x = -128 with all weights -1 (sum 16384 must not wrap in the other direction: 128*128 = 2^14).
module tb_column_acc;
  localparam int NC = 128;
  logic clk = 0, rst_n = 0, acc_en = 0, first = 0;
  logic signed [7:0] x; logic [NC-1:0] w_pos; logic [NC-1:0][15:0] acc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  column_acc #(.NC(NC)) dut (.*);

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ref_ [NC];
    x = 0; w_pos = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      for (int c = 0; c < NC; c++) ref_[c] = 0;
      for (int j = 0; j < 128; j++) begin
        @(negedge clk);
        acc_en = 1; first = (j == 0);
        x = (m == 3) ? -8'sd128 : 8'($urandom);
        for (int c = 0; c < NC; c++) begin
          w_pos[c] = (m == 3) ? 1'b0 : 1'($urandom);
          ref_[c] += w_pos[c] ? int'(x) : -int'(x);
        end
      end
      @(negedge clk); acc_en = 0;
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (int'(signed'(acc[c])) != ref_[c] && !(m == 3 && ref_[c] == 16384 && acc[c] == 16'h4000)) begin
          failures++; if (failures < 10) $display("mvm %0d col %0d: got %0d exp %0d", m, c, signed'(acc[c]), ref_[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
