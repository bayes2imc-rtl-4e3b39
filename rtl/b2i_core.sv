// b2i_core: one Bayes2IMC in-memory-computing core.
//
// The core computes y_i = sum_j x_j * w_ji for a 128 x 128 block of a binary Bayesian layer,
// drawing a fresh binary sample of every weight as it goes. The weight plane (WP) of the
// crossbar stores each weight's sampling parameter z_w = Phi^-1(Pr(w = +1)) as the conductance
// difference of a differential PCM cell; the noise plane (NP) holds cells whose difference is
// pure programming noise, zeta ~ N(0,1). Reading a WP row together with pseudo-randomly chosen
// NP row(s) sums both currents on the source lines; the sign of the integrated difference is the
// weight sample w = +1 if zeta <= z_w, -1 otherwise. No ADC is needed: the sample only steers
// whether the broadcast input x_j is added or subtracted in each column accumulator.
//
// Blocks: dpcm_crossbar (behavioural model of the 144 x 128 array), wl_decoder (WP and NP),
// sl_decoder, np_arbiter (LFSR-based stochastic arbitration), sl_integrator (behavioural
// integrators + sense amplifiers), column_acc, tx_reg_mux and the read sequencer core_ctrl.
//
// Interface: program one device with prog_en (plane, row, column, G+/G- device, code). `start`
// begins one MVM with the given T_NP (cycles), n_r (nr2) and mode (freq_mode = deterministic
// weights, no NP read); the core reads x_j from an external buffer through x_rd_* (data one
// cycle after the address), and emits the 128 column sums on the out_* valid/ready stream while
// the next MVM may already run. `done` pulses when the sums enter the transfer registers;
// `stall` is high in cycles where the core waits for the transfer registers.
module b2i_core
  import b2i_pkg::*;
#(
  parameter int unsigned WPR = WP_ROWS,
  parameter int unsigned NPR = NP_ROWS,
  parameter int unsigned NC  = COLS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [31:0]                seed,
  // programming
  input  logic                       prog_en,
  input  logic                       prog_np,
  input  logic [$clog2(WPR)-1:0]     prog_row,
  input  logic [$clog2(NC)-1:0]      prog_col,
  input  logic                       prog_neg,
  input  logic [G_W-1:0]             prog_g,
  // inference control
  input  logic                       start,
  input  logic [TNP_W-1:0]           t_np,
  input  logic                       nr2,
  input  logic                       freq_mode,
  output logic                       busy,
  output logic                       done,
  output logic                       stall,
  // input vector
  output logic                       x_rd_en,
  output logic [$clog2(WPR)-1:0]     x_rd_addr,
  input  logic signed [X_W-1:0]      x_rd_data,
  // column sums
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [$clog2(NC)-1:0]      out_col,
  output logic [ACC_W-1:0]           out_data
);
  localparam int unsigned NRW = $clog2(NPR);

  logic                     wp_en, np_en, arb_req;
  logic [$clog2(WPR)-1:0]   wp_row;
  logic [NRW-1:0]           np_a, np_b;
  logic [WPR-1:0]           wl_wp;
  logic [NPR-1:0]           wl_np;
  logic [NC-1:0]            sl_pos_en, sl_neg_en;
  logic [NC-1:0][I_W-1:0]   i_pos, i_neg;
  logic                     integ_en, integ_clr, sense;
  logic [NC-1:0]            w_pos;
  logic                     acc_en, acc_first, tx_load, tx_busy;
  logic [NC-1:0][ACC_W-1:0] acc;
  logic                     nr2_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) nr2_q <= 1'b0;
    else if (start && !busy) nr2_q <= nr2;

  core_ctrl #(.WPR(WPR)) u_ctrl (
    .clk, .rst_n, .start, .t_np, .freq_mode, .tx_busy, .busy, .done, .stall,
    .wp_en, .wp_row, .np_en, .arb_req, .integ_en, .integ_clr, .sense,
    .x_rd_en, .x_rd_addr, .acc_en, .acc_first, .tx_load
  );

  np_arbiter #(.NP_ROWS(NPR)) u_arb (
    .clk, .rst_n, .seed, .nr2(start && !busy ? nr2 : nr2_q), .req(arb_req), .row_a(np_a), .row_b(np_b)
  );

  wl_decoder #(.ROWS(WPR), .NSEL(1)) u_wp_dec (
    .en(wp_en), .sel_valid(1'b1), .sel_idx(wp_row), .wl(wl_wp)
  );

  wl_decoder #(.ROWS(NPR), .NSEL(2)) u_np_dec (
    .en(np_en), .sel_valid({nr2_q, 1'b1}), .sel_idx({np_b, np_a}), .wl(wl_np)
  );

  sl_decoder #(.COLS(NC)) u_sl_dec (
    .prog(prog_en), .col(prog_col), .dev_neg(prog_neg), .sl_pos_en, .sl_neg_en
  );

  dpcm_crossbar #(.WPR(WPR), .NPR(NPR), .NC(NC)) u_xbar (
    .clk, .prog_en, .prog_np, .prog_row, .prog_g, .sl_pos_en, .sl_neg_en,
    .wl_wp, .wl_np, .i_pos, .i_neg
  );

  sl_integrator #(.NC(NC)) u_integ (
    .clk, .rst_n, .en(integ_en), .clr(integ_clr), .sense, .i_pos, .i_neg, .w_pos
  );

  column_acc #(.NC(NC)) u_acc (
    .clk, .rst_n, .acc_en, .first(acc_first), .x(x_rd_data), .w_pos, .acc
  );

  tx_reg_mux #(.NC(NC)) u_tx (
    .clk, .rst_n, .load(tx_load), .acc, .busy(tx_busy), .out_valid, .out_ready, .out_col, .out_data
  );

  a_no_prog_during_mvm: assert property (@(posedge clk) disable iff (!rst_n) !(prog_en && busy));
endmodule
