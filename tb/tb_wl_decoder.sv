// tb_wl_decoder: checks the WP decoder (128 rows, one index) and the NP decoder (16 rows, two
// indices) for every index against a one-hot reference, with the enable off and on.
module tb_wl_decoder;
  logic en;
  logic [0:0] v1; logic [0:0][6:0] i1; logic [127:0] wl1;
  logic [1:0] v2; logic [1:0][3:0] i2; logic [15:0] wl2;
  int checks = 0, failures = 0;

  wl_decoder #(.ROWS(128), .NSEL(1)) u_wp (.en, .sel_valid(v1), .sel_idx(i1), .wl(wl1));
  wl_decoder #(.ROWS(16),  .NSEL(2)) u_np (.en, .sel_valid(v2), .sel_idx(i2), .wl(wl2));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    v1 = 1'b1;
    for (int r = 0; r < 128; r++) begin
      i1[0] = 7'(r);
      en = 0; #1; checks++; if (wl1 !== '0) failures++;
      en = 1; #1; checks++; if (wl1 !== (128'd1 << r)) begin failures++; $display("wp row %0d: %h", r, wl1); end
    end
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++) begin
        i2[0] = 4'(a); i2[1] = 4'(b);
        en = 1; v2 = 2'b01; #1; checks++; if (wl2 !== (16'd1 << a)) failures++;
        v2 = 2'b11; #1; checks++; if (wl2 !== ((16'd1 << a) | (16'd1 << b))) begin failures++; $display("np %0d %0d: %h", a, b, wl2); end
        en = 0; #1; checks++; if (wl2 !== '0) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
