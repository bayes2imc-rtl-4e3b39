// tb_bn_coeff_mem: writes 128 random (scale, offset) pairs and reads every column back.
module tb_bn_coeff_mem;
  logic clk = 0, we = 0; logic [6:0] waddr = 0, raddr = 0; logic [15:0] wa = 0, wb = 0, ra, rb;
  logic [15:0] refa [128], refb [128];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bn_coeff_mem #(.NC(128)) dut (.*);

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < 128; a++) begin
      @(negedge clk); we = 1; waddr = 7'(a); wa = 16'($urandom); wb = 16'($urandom); refa[a] = wa; refb[a] = wb;
    end
    @(negedge clk); we = 0;
    for (int a = 127; a >= 0; a--) begin
      raddr = 7'(a); #1; checks++;
      if (ra !== refa[a] || rb !== refb[a]) begin failures++; $display("col %0d wrong", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
