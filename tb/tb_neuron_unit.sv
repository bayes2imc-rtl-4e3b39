// tb_neuron_unit: feeds random partial sums of 4 cores, column by column, and checks:
// the activations against BN (a Q8.8, integer b), ReLU, saturation to 0..127 and max-pooling
// over 2 vectors computed here; in last-layer mode, that the summed logits pass unchanged and
// that logit_ready low holds the stream (back-pressure) without losing a column.
module tb_neuron_unit;
  localparam int NCORES = 4, NC = 128;
  logic clk = 0, rst_n = 0, last_layer = 0; logic [2:0] pool_n = 1;
  logic in_valid = 0, in_ready; logic [6:0] in_col = 0; logic [NCORES-1:0][15:0] in_psum = '0;
  logic [6:0] bn_raddr; logic signed [15:0] bn_a, bn_b;
  logic act_valid, vec_done; logic [6:0] act_col; logic [7:0] act_data;
  logic logit_valid, logit_ready = 1; logic [6:0] logit_col; logic signed [18:0] logit_data;
  int checks = 0, failures = 0;
  logic signed [15:0] ta [NC], tb_ [NC];
  always #5 clk = ~clk;

  neuron_unit #(.NCORES(NCORES), .NC(NC)) dut (.*);
  assign bn_a = ta[bn_raddr];
  assign bn_b = tb_[bn_raddr];

  int exp_act [NC]; int exp_logit [NC];
  int n_act = 0, n_logit = 0, n_bp = 0;
  always @(posedge clk) begin
    if (act_valid) begin
      checks++; n_act++;
      if (int'(act_data) != exp_act[act_col]) begin failures++; if (failures < 10) $display("act col %0d: %0d exp %0d", act_col, act_data, exp_act[act_col]); end
    end
    if (logit_valid && logit_ready) begin
      checks++;
      if (int'(logit_col) != n_logit % NC || int'(logit_data) != exp_logit[logit_col]) begin failures++; if (failures < 10) $display("logit col %0d: %0d exp %0d", logit_col, logit_data, exp_logit[logit_col]); end
      n_logit++;
    end
    if (logit_valid && !logit_ready) n_bp++;
  end

  initial begin
    #2ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int bn(input int s, input int c);
    int y; y = ((s * int'(ta[c])) >>> 8) + int'(tb_[c]);
    return (y < 0) ? 0 : (y > 127) ? 127 : y;
  endfunction

  logic [NCORES-1:0][15:0] vec [2][NC];
  int sums [2][NC];

  task automatic gen(input int v);
    for (int c = 0; c < NC; c++) begin
      sums[v][c] = 0;
      for (int k = 0; k < NCORES; k++) begin
        vec[v][c][k] = 16'($urandom_range(0, 4000) - 2000); sums[v][c] += int'(signed'(vec[v][c][k]));
      end
    end
  endtask

  task automatic send_vec(input int v, input bit random_gaps);
    for (int c = 0; c < NC; ) begin
      @(negedge clk);
      in_valid = random_gaps ? 1'($urandom) : 1'b1; in_col = 7'(c); in_psum = vec[v][c];
      logit_ready = random_gaps ? 1'($urandom) : 1'b1;
      #1; if (in_valid && in_ready) c++;
    end
    @(negedge clk); in_valid = 0; logit_ready = 1;
  endtask

  initial begin
    int vd;
    for (int c = 0; c < NC; c++) begin ta[c] = 16'($urandom_range(0, 512)); tb_[c] = 16'($urandom_range(0, 60) - 30); end
    repeat (2) @(posedge clk); rst_n = 1;
    // No pooling.
    gen(0); pool_n = 1;
    for (int c = 0; c < NC; c++) exp_act[c] = bn(sums[0][c], c);
    send_vec(0, 0);
    repeat (3) @(negedge clk);
    checks++; if (n_act != NC) begin failures++; $display("pool 1: %0d activations", n_act); end
    // Pooling over 2 vectors.
    gen(0); gen(1); pool_n = 2; n_act = 0;
    for (int c = 0; c < NC; c++) exp_act[c] = (bn(sums[0][c], c) > bn(sums[1][c], c)) ? bn(sums[0][c], c) : bn(sums[1][c], c);
    vd = 0;
    send_vec(0, 0);
    repeat (3) @(negedge clk);
    checks++; if (n_act != 0) begin failures++; $display("pooled output before window end"); end
    send_vec(1, 0);
    repeat (3) @(negedge clk);
    checks++; if (n_act != NC) begin failures++; $display("pool 2: %0d activations", n_act); end
    // Last layer: bypass with back-pressure.
    gen(0); last_layer = 1; n_act = 0;
    for (int c = 0; c < NC; c++) exp_logit[c] = sums[0][c];
    send_vec(0, 1);
    repeat (3) @(negedge clk);
    checks++; if (n_logit != NC || n_act != 0) begin failures++; $display("last layer: %0d logits %0d acts", n_logit, n_act); end
    checks++; if (n_bp == 0) begin failures++; $display("no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
