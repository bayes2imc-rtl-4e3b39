// act_buffer: activation buffer (tile and chip I/O buffers).
//
// A simple dual-port memory of DEPTH words of W bits: one write port and one read port with a
// registered read (data one cycle after the address, as an SRAM macro delivers it). In a tile,
// one bank per core holds that core's 128-element slice of the input vector, and one bank
// collects the tile's output activations. The paper shows the buffers only as blocks; size and
// organisation are this design's choices.
module act_buffer #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned W     = 8
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
