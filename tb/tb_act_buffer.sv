// tb_act_buffer: writes random data to every address, reads all back (one-cycle read latency)
// and checks them; then checks a read and a write to different addresses in the same cycle.
module tb_act_buffer;
  logic clk = 0, we = 0, re = 0; logic [6:0] waddr = 0, raddr = 0; logic [7:0] wdata = 0, rdata;
  logic [7:0] ref_ [128];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  act_buffer #(.DEPTH(128), .W(8)) dut (.*);

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < 128; a++) begin
      @(negedge clk); we = 1; waddr = 7'(a); wdata = 8'($urandom); ref_[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 128; a++) begin
      @(negedge clk); re = 1; raddr = 7'(a);
      @(posedge clk); #1; checks++;
      if (rdata !== ref_[a]) begin failures++; $display("addr %0d: %h exp %h", a, rdata, ref_[a]); end
    end
    @(negedge clk); we = 1; waddr = 7'd3; wdata = ~ref_[3]; re = 1; raddr = 7'd9;
    @(posedge clk); #1; checks++; if (rdata !== ref_[9]) failures++;
    @(negedge clk); we = 0; raddr = 7'd3;
    @(posedge clk); #1; checks++; if (rdata !== ~ref_[3]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
