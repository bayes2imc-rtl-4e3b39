// tb_np_arbiter: checks the NP row arbiter against an independent model of the 32-bit Galois
// LFSR (x^32+x^22+x^2+x+1) and of the byte-reuse rule: rows are the low nibbles of bytes
// 0,1,2,3 of each LFSR word in turn, the LFSR steps once per four bytes, and with n_r = 2 the
// two rows of a draw are distinct. Also checks that all 16 rows are used.
module tb_np_arbiter;
  logic clk = 0, rst_n = 0, nr2 = 0, req = 0;
  logic [31:0] seed = 32'h1234_5678;
  logic [3:0] row_a, row_b;
  int checks = 0, failures = 0, n_coll = 0;
  always #5 clk = ~clk;

  np_arbiter #(.NP_ROWS(16)) dut (.*);

  function automatic logic [31:0] nxt(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  initial begin
    #2000000; failures++;
    // The distinct-row rule must have been exercised.
    checks++; if (n_coll == 0) begin failures++; $display("no equal-byte draw seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] m; int bp; logic [15:0] seen; logic [3:0] ea, eb;
    m = seed; bp = 0; seen = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // n_r = 1
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); req = 1; nr2 = 0;
      @(negedge clk); req = 0;
      ea = m[8*bp +: 4];
      checks++; if (row_a !== ea) begin failures++; $display("nr1 draw %0d: got %0d exp %0d", i, row_a, ea); end
      seen[row_a] = 1'b1;
      bp++; if (bp == 4) begin bp = 0; m = nxt(m); end
    end
    checks++; if (seen !== 16'hFFFF) begin failures++; $display("not all rows used: %h", seen); end
    // n_r = 2 (pointer is at 0 after 64 draws)
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); req = 1; nr2 = 1;
      @(negedge clk); req = 0;
      ea = m[8*bp +: 4]; eb = m[8*(bp+1) +: 4];
      if (eb == ea) eb = ea ^ 4'd1;
      checks++; if (row_a !== ea || row_b !== eb) begin failures++; $display("nr2 draw %0d: got %0d,%0d exp %0d,%0d", i, row_a, row_b, ea, eb); end
      checks++; if (row_a == row_b) failures++;
      if (m[8*bp +: 4] == m[8*(bp+1) +: 4]) n_coll++;
      bp += 2; if (bp == 4) begin bp = 0; m = nxt(m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
