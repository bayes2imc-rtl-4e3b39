// b2i_pkg: sizes and types shared by the Bayes2IMC core, tile and post-processing unit.
//
// The crossbar geometry (128 weight-plane rows, 16 noise-plane rows, 128 columns), the 8-bit
// inputs, the 16-bit column accumulators and the WP-to-NP scale kappa = 8 are the values of the
// Bayes2IMC design. The conductance code width, the bus widths between blocks and the
// fixed-point formats of the post-processing unit are this implementation's own choices.
package b2i_pkg;

  // Crossbar geometry.
  localparam int unsigned WP_ROWS = 128;  // weight-plane rows (M)
  localparam int unsigned NP_ROWS = 16;   // noise-plane rows (L)
  localparam int unsigned COLS    = 128;  // columns (N)

  // Datapath widths.
  localparam int unsigned X_W    = 8;     // input activation, signed
  localparam int unsigned ACC_W  = 16;    // column accumulator, signed
  localparam int unsigned G_W    = 8;     // device conductance code, 1 LSB = 0.1 uS
  localparam int unsigned I_W    = 16;    // summed SL current code (all 144 rows on: 36000)
  localparam int unsigned Q_W    = 24;    // integrated charge code (up to 255 cycles)
  localparam int unsigned TNP_W  = 4;     // T_NP in clock cycles, 1..8

  // Read-pulse scale between NP and WP (T_NP = KAPPA * T_WP for n_r = 1).
  localparam int unsigned KAPPA  = 8;

  // Post-processing.
  localparam int unsigned NCLASS = 10;    // classes of CIFAR-10
  localparam int unsigned N_MC   = 10;    // ensemble members per prediction
  localparam int unsigned PROB_W = 17;    // probability, unsigned Q1.16 (1.0 = 65536)

  // Per-class logit-correction coefficients (see post_proc_unit).
  typedef struct packed {
    logic signed [15:0] a1;   // sigma_1 / sigma~_1, Q4.12
    logic signed [23:0] b1;   // mu_1 - a1 * mu~_1, Q.8
    logic signed [15:0] a0;   // sigma_0 / sigma~_0, Q4.12
    logic signed [23:0] b0;   // mu_0 - a0 * mu~_0, Q.8
    logic signed [39:0] qa;   // quadratic term of the log-likelihood ratio, Q.36
    logic signed [39:0] qb;   // linear term, Q.28
    logic signed [31:0] qc;   // constant term incl. log prior ratio, Q.16
  } lc_coef_t;

endpackage
