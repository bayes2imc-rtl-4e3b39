// sl_decoder: source-line decoder of the crossbar.
//
// Every column has two source lines, one for the G+ device and one for the G- device of its
// differential cells. In inference (`prog` low) all source lines are connected to their
// integrators, so the currents of all word-line-selected cells of a column add up on them. While
// a device is programmed (`prog` high) only the source line of the addressed column and device
// is enabled, so no other device on the same word line is switched on. Combinational.
module sl_decoder #(
  parameter int unsigned COLS = 128
) (
  input  logic                    prog,
  input  logic [$clog2(COLS)-1:0] col,
  input  logic                    dev_neg,
  output logic [COLS-1:0]         sl_pos_en,
  output logic [COLS-1:0]         sl_neg_en
);
  always_comb begin
    if (!prog) begin
      sl_pos_en = '1;
      sl_neg_en = '1;
    end else begin
      sl_pos_en = '0;
      sl_neg_en = '0;
      if (dev_neg) sl_neg_en[col] = 1'b1;
      else         sl_pos_en[col] = 1'b1;
    end
  end
endmodule
