// wl_decoder: word-line decoder of one crossbar plane.
//
// Turns up to NSEL binary row indices into a word-line vector. A word line is on while `en` is
// high and its index is one of the valid `sel_idx` entries, so the pulse width on the word line
// (T_WP for the weight plane, T_NP for the noise plane) is the width of `en`, which the core's
// read sequencer drives. The weight plane uses one instance with NSEL = 1 over 128 rows; the
// noise plane one with NSEL = 2 over 16 rows, so that with n_r = 2 two NP rows are on together.
// Purely combinational. The paper gives each plane its own decoder; the one-hot decode is the
// plain choice.
module wl_decoder #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned NSEL = 1
) (
  input  logic                                 en,
  input  logic [NSEL-1:0]                      sel_valid,
  input  logic [NSEL-1:0][$clog2(ROWS)-1:0]    sel_idx,
  output logic [ROWS-1:0]                      wl
);
  always_comb begin
    wl = '0;
    for (int s = 0; s < NSEL; s++)
      if (en && sel_valid[s]) wl[sel_idx[s]] = 1'b1;
  end
endmodule
