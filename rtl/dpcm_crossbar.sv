// dpcm_crossbar: behavioural model of the 144 x 128 differential-PCM crossbar of one core.
//
// This is a behavioural model of an analog array, not logic to be synthesized into a chip; it
// is written in synthesizable style only so that the whole core can be linted and simulated.
// Every cell has two devices whose conductances G+ and G- are stored as G_W-bit codes
// (1 LSB = 0.1 uS, so 250 is the 25 uS top of the usable range). Rows 0..127 form the weight
// plane (WP): a weight parameter z_w is stored as G+ - G- = kappa * z_w. Rows 0..15 of the
// noise plane (NP) are programmed with G+ ~= G-, and the programming error of the two devices
// is the Gaussian noise used for sampling.
//
// Read: the SL+ current of a column is the sum of the G+ codes of all cells on word lines that
// are on, the SL- current the sum of the G- codes (Kirchhoff summation on the source lines).
// Only columns whose source lines are enabled carry current. The outputs are combinational.
// The model supports the read patterns the core uses, one WP row plus up to two NP rows at a
// time (n_r <= 2), and asserts that no other pattern occurs.
// Program: with `prog_en` high at a clock edge, the device selected by the enabled source line
// (`sl_pos_en` or `sl_neg_en`) in row `prog_row` of the plane chosen by `prog_np` takes the code
// `prog_g`. This stands for the end result of the program-and-verify loop, programming noise
// included; the loop itself, read noise and drift are not modelled.
module dpcm_crossbar
  import b2i_pkg::*;
#(
  parameter int unsigned WPR = WP_ROWS,
  parameter int unsigned NPR = NP_ROWS,
  parameter int unsigned NC  = COLS
) (
  input  logic                      clk,
  input  logic                      prog_en,
  input  logic                      prog_np,
  input  logic [$clog2(WPR)-1:0]    prog_row,
  input  logic [G_W-1:0]            prog_g,
  input  logic [NC-1:0]             sl_pos_en,
  input  logic [NC-1:0]             sl_neg_en,
  input  logic [WPR-1:0]            wl_wp,
  input  logic [NPR-1:0]            wl_np,
  output logic [NC-1:0][I_W-1:0]    i_pos,
  output logic [NC-1:0][I_W-1:0]    i_neg
);
  logic [G_W-1:0] wp_p [WPR][NC];
  logic [G_W-1:0] wp_n [WPR][NC];
  logic [G_W-1:0] np_p [NPR][NC];
  logic [G_W-1:0] np_n [NPR][NC];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < NC; c++) begin
        if (!prog_np) begin
          if (sl_pos_en[c]) wp_p[prog_row][c] <= prog_g;
          if (sl_neg_en[c]) wp_n[prog_row][c] <= prog_g;
        end else if (32'(prog_row) < NPR) begin
          if (sl_pos_en[c]) np_p[prog_row[$clog2(NPR)-1:0]][c] <= prog_g;
          if (sl_neg_en[c]) np_n[prog_row[$clog2(NPR)-1:0]][c] <= prog_g;
        end
      end
    end
  end

  // Rows on this cycle. A read turns on one WP row and at most two NP rows (n_r <= 2).
  logic                    wp_on;
  logic [$clog2(WPR)-1:0]  wp_r;
  logic [1:0]              np_on;
  logic [$clog2(NPR)-1:0]  np_r [2];
  logic [1:0]              n_wp, n_np;

  always_comb begin
    wp_on = 1'b0; wp_r = '0; n_wp = '0;
    np_on = '0;   np_r[0] = '0; np_r[1] = '0; n_np = '0;
    for (int r = 0; r < WPR; r++)
      if (wl_wp[r]) begin
        if (!wp_on) begin wp_on = 1'b1; wp_r = ($clog2(WPR))'(r); end
        if (n_wp != 2'd3) n_wp = n_wp + 1'b1;
      end
    for (int r = 0; r < NPR; r++)
      if (wl_np[r]) begin
        if (n_np < 2'd2) begin np_on[n_np[0]] = 1'b1; np_r[n_np[0]] = ($clog2(NPR))'(r); end
        if (n_np != 2'd3) n_np = n_np + 1'b1;
      end
  end

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      i_pos[c] = '0;
      i_neg[c] = '0;
      if (wp_on) begin
        i_pos[c] = i_pos[c] + I_W'(wp_p[wp_r][c]);
        i_neg[c] = i_neg[c] + I_W'(wp_n[wp_r][c]);
      end
      for (int k = 0; k < 2; k++)
        if (np_on[k]) begin
          i_pos[c] = i_pos[c] + I_W'(np_p[np_r[k]][c]);
          i_neg[c] = i_neg[c] + I_W'(np_n[np_r[k]][c]);
        end
      if (!sl_pos_en[c]) i_pos[c] = '0;
      if (!sl_neg_en[c]) i_neg[c] = '0;
    end
  end

  // The model covers the read patterns of the core: one WP row and up to two NP rows at once.
  a_read_pattern: assert property (@(posedge clk) n_wp <= 2'd1 && n_np <= 2'd2);
endmodule
