// tb_drift_comp: checks T_NP against round(kappa / (n_r * (t/T0)^0.06)) evaluated here in
// floating point at many times from 1 s to 4e9 s, both n_r, and the paper's operating points:
// 8 / 4 cycles right after programming and 2 cycles for n_r = 2 at 1e7 s. With compensation off
// T_NP stays kappa / n_r.
module tb_drift_comp;
  logic [31:0] t_s; logic nr2, comp_en; logic [3:0] t_np;
  int checks = 0, failures = 0;

  drift_comp dut (.*);

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int expect_np(input real t, input int nr);
    real a, v;
    a = (t <= 20.0) ? 1.0 : (t / 20.0) ** 0.06;
    v = 8.0 / (real'(nr) * a);
    return ($rtoi(v + 0.5) < 1) ? 1 : $rtoi(v + 0.5);
  endfunction

  initial begin
    real t;
    comp_en = 1;
    for (int nr = 1; nr <= 2; nr++) begin
      nr2 = (nr == 2);
      t = 1.0;
      while (t < 4.0e9) begin
        t_s = 32'($rtoi(t)); #1;
        checks++;
        if (int'(t_np) != expect_np(real'(t_s), nr)) begin
          failures++; $display("t=%0d nr=%0d got %0d exp %0d", t_s, nr, t_np, expect_np(real'(t_s), nr));
        end
        t = t * 1.07;
      end
    end
    nr2 = 0; t_s = 32'd1;        #1; checks++; if (t_np != 8) failures++;
    nr2 = 1; t_s = 32'd1;        #1; checks++; if (t_np != 4) failures++;
    nr2 = 1; t_s = 32'd10000000; #1; checks++; if (t_np != 2) begin failures++; $display("1e7 s nr2: %0d", t_np); end
    comp_en = 0;                 #1; checks++; if (t_np != 4) failures++;
    nr2 = 0;                     #1; checks++; if (t_np != 8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
