// column_acc: the sign-controlled accumulators (AC) of a core, one per column.
//
// Bayes2IMC needs no multiplier and no ADC: a weight is +1 or -1, so the product x_j * w_ji is
// +x_j or -x_j. For each weight-plane row j the 8-bit input x_j is broadcast to all column
// accumulators, and each adds it or subtracts it according to the weight bit that its sense
// amplifier sampled for that row. After all 128 rows the accumulators hold the column sums
// y_i = sum_j x_j * w_ji.
//
// Interface and timing: in a cycle with `acc_en` high, acc[i] <= acc[i] +/- x (w_pos[i] = 1
// adds); with `first` also high the old value is dropped (acc[i] <= +/- x), which starts a new
// MVM without a clear cycle. x is signed; with 128 rows |y| <= 128 * 128 = 16384, so 16 signed
// bits never overflow. The 8-bit input and 16-bit accumulator widths follow the paper; the
// signed input format is this design's choice.
module column_acc
  import b2i_pkg::*;
#(
  parameter int unsigned NC = COLS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            acc_en,
  input  logic                            first,
  input  logic signed [X_W-1:0]           x,
  input  logic [NC-1:0]                   w_pos,
  output logic [NC-1:0][ACC_W-1:0]        acc
);
  logic signed [ACC_W-1:0] xe;
  assign xe = ACC_W'(x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (acc_en) begin
      for (int c = 0; c < NC; c++) begin
        logic signed [ACC_W-1:0] base;
        base   = first ? '0 : signed'(acc[c]);
        acc[c] <= w_pos[c] ? base + xe : base - xe;
      end
    end
  end
endmodule
