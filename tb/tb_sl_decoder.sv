// tb_sl_decoder: in read mode all source lines are enabled; in programming mode exactly the
// addressed column's G+ or G- source line is.
module tb_sl_decoder;
  logic prog, dev_neg; logic [6:0] col; logic [127:0] sl_pos_en, sl_neg_en;
  int checks = 0, failures = 0;

  sl_decoder #(.COLS(128)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    prog = 0; dev_neg = 0; col = 0; #1;
    checks++; if (sl_pos_en !== '1 || sl_neg_en !== '1) failures++;
    prog = 1;
    for (int c = 0; c < 128; c++)
      for (int d = 0; d < 2; d++) begin
        col = 7'(c); dev_neg = d[0]; #1;
        checks++;
        if (sl_pos_en !== (d ? 128'd0 : (128'd1 << c)) || sl_neg_en !== (d ? (128'd1 << c) : 128'd0)) begin
          failures++; $display("col %0d dev %0d wrong", c, d);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
