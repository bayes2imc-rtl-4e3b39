// bn_coeff_mem: batch-normalization coefficient memory of a tile.
//
// Holds one (scale, offset) pair per crossbar column, 128 pairs, written one pair per cycle and
// read combinationally by the tile's single BN multiplier-adder for the column it is
// processing. The scale is signed Q8.8, the offset a signed integer in units of the column sum;
// both formats are this design's choice. Whether the array is SRAM or one-bit-per-device PCM is
// below the level of this RTL.
module bn_coeff_mem #(
  parameter int unsigned NC  = 128,
  parameter int unsigned A_W = 16,
  parameter int unsigned B_W = 16
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [$clog2(NC)-1:0]  waddr,
  input  logic [A_W-1:0]         wa,
  input  logic [B_W-1:0]         wb,
  input  logic [$clog2(NC)-1:0]  raddr,
  output logic [A_W-1:0]         ra,
  output logic [B_W-1:0]         rb
);
  logic [A_W-1:0] mem_a [NC];
  logic [B_W-1:0] mem_b [NC];

  always_ff @(posedge clk) begin
    if (we) begin
      mem_a[waddr] <= wa;
      mem_b[waddr] <= wb;
    end
  end

  assign ra = mem_a[raddr];
  assign rb = mem_b[raddr];
endmodule
