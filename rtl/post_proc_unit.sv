// post_proc_unit: off-tile post-processing of the last layer (logit correction, softmax,
// ensemble averaging).
//
// Bayesian inference repeats the whole network N_MC times with fresh weight samples and
// averages the predictive distributions: p(y|x) ~ (1/N_MC) * sum_i softmax(l(x, w_i)). This unit
// receives the logit stream of each ensemble member (the column sums of the last layer; columns
// 0..NCLASS-1 are the classes, later columns are accepted and dropped), corrects each logit
// with logit_corr (coefficients per class, loaded through cfg_*), and once all NCLASS logits of
// a member are in, computes softmax: e_k = exp(l_k - max) from a 256-entry table (step 1/16,
// range 0..-16, computed at elaboration) and p_k = e_k / sum(e), one class per cycle. The
// probabilities are summed over N_MC members; after the last member `res_valid` pulses with the
// averages (Q1.16) and the arg-max class, and the sums restart.
//
// Timing: a member occupies the unit for NCLASS + 1 cycles after its class NCLASS-1 logit, during
// which in_ready is low (the back-pressure reaches the cores through the tile). The correction
// and softmax follow the paper; table sizes, formats and the schedule are this design's.
module post_proc_unit
  import b2i_pkg::*;
#(
  parameter int unsigned LW   = 19,
  parameter int unsigned NCL  = NCLASS,
  parameter int unsigned NMC  = N_MC
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          lc_en,
  input  logic                          cfg_we,
  input  logic [$clog2(NCL)-1:0]        cfg_cls,
  input  lc_coef_t                      cfg_coef,
  // logit stream
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [6:0]                    in_cls,
  input  logic signed [LW-1:0]          in_logit,
  // result
  output logic                          res_valid,
  output logic [NCL-1:0][PROB_W-1:0]    res_prob,
  output logic [$clog2(NCL)-1:0]        res_class,
  output logic                          member_done
);
  typedef logic [16:0] lut_t [256];

  // ex[i] = exp(-i / 16), Q1.16, ex[0] = 1.0.
  function automatic lut_t mk_exp();
    lut_t t;
    for (int i = 0; i < 256; i++) t[i] = 17'($rtoi(65536.0 * $exp(-real'(i) / 16.0) + 0.5));
    return t;
  endfunction
  localparam lut_t EXP = mk_exp();

  typedef enum logic [1:0] {P_COLLECT, P_NORM, P_DIV} pstate_t;
  pstate_t state;

  lc_coef_t                       coef [NCL];
  logic signed [31:0]             lg [NCL];
  logic [NCL-1:0][16:0]           ev;
  logic [NCL-1:0][PROB_W+3:0]     psum;
  logic signed [31:0]             lmax;
  logic [23:0]                    esum;
  logic [$clog2(NCL)-1:0]         k;
  logic [$clog2(NMC)-1:0]         mc;
  logic signed [31:0]             lc_out;
  logic [$clog2(NCL)-1:0]         cls_i;

  assign cls_i = in_cls[$clog2(NCL)-1:0];

  logit_corr #(.LW(LW)) u_lc (
    .en(lc_en), .l_in(in_logit), .coef(coef[cls_i]), .l_out(lc_out)
  );

  assign in_ready = (state == P_COLLECT);

  // Maximum of the member's logits and the exponentials.
  always_comb begin
    logic signed [31:0] dlt;
    lmax = lg[0];
    for (int c = 1; c < NCL; c++) if (lg[c] > lmax) lmax = lg[c];
    esum = '0;
    for (int c = 0; c < NCL; c++) begin
      dlt   = (lmax - lg[c]) >>> 4;          // Q.8 -> steps of 1/16
      ev[c] = (dlt > 255) ? EXP[255] : EXP[dlt[7:0]];
      esum  = esum + 24'(ev[c]);
    end
  end

  always_ff @(posedge clk) begin
    if (cfg_we) coef[cfg_cls] <= cfg_coef;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= P_COLLECT;
      k           <= '0;
      mc          <= '0;
      psum        <= '0;
      res_valid   <= 1'b0;
      res_prob    <= '0;
      res_class   <= '0;
      member_done <= 1'b0;
      for (int c = 0; c < NCL; c++) lg[c] <= '0;
    end else begin
      res_valid   <= 1'b0;
      member_done <= 1'b0;
      unique case (state)
        P_COLLECT: if (in_valid && 32'(in_cls) < NCL) begin
          lg[cls_i] <= lc_out;
          if (32'(in_cls) == NCL - 1) state <= P_NORM;
        end
        P_NORM: begin
          k     <= '0;
          state <= P_DIV;
        end
        P_DIV: begin
          psum[k] <= psum[k] + (PROB_W+4)'((41'(ev[k]) << 16) / 41'(esum));
          if (32'(k) == NCL - 1) begin
            state       <= P_COLLECT;
            member_done <= 1'b1;
            if (32'(mc) == NMC - 1) mc <= '0;
            else                    mc <= mc + 1'b1;
          end else k <= k + 1'b1;
        end
        default: state <= P_COLLECT;
      endcase

      // Ensemble complete: publish averages and arg-max, restart the sums.
      if (state == P_COLLECT && 32'(mc) == 0 && member_done) begin
        logic [$clog2(NCL)-1:0] best;
        best = '0;
        for (int c = 0; c < NCL; c++) begin
          res_prob[c] <= PROB_W'(psum[c] / (PROB_W+4)'(NMC));
          if (psum[c] > psum[best]) best = ($clog2(NCL))'(c);
        end
        res_class <= best;
        res_valid <= 1'b1;
        psum      <= '0;
      end
    end
  end
endmodule
