// tx_reg_mux: transfer registers and output multiplexer of a core.
//
// When an MVM is complete, `load` copies all column sums into the transfer registers at once;
// each register then holds its value (the load-or-hold multiplexer in front of each register)
// while the output multiplexer puts one column per cycle on the core's output bus. The
// accumulators are free as soon as the load is done, so the next MVM overlaps the transfer of
// the previous one.
//
// Interface: valid/ready stream (out_valid, out_ready) carrying out_col and out_data, columns in
// order 0..NC-1; a column moves in a cycle with both high. `busy` is high from the load until the
// last column has moved; `load` must not be asserted while `busy` is high (asserted). The
// handshake and column order are this design's choices.
module tx_reg_mux
  import b2i_pkg::*;
#(
  parameter int unsigned NC = COLS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  logic [NC-1:0][ACC_W-1:0]     acc,
  output logic                         busy,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [$clog2(NC)-1:0]        out_col,
  output logic [ACC_W-1:0]             out_data
);
  logic [NC-1:0][ACC_W-1:0] txr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      out_col <= '0;
    end else if (load) begin
      busy    <= 1'b1;
      out_col <= '0;
    end else if (busy && out_ready) begin
      if (32'(out_col) == NC - 1) busy <= 1'b0;
      out_col <= out_col + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (load) txr <= acc;
  end

  assign out_valid = busy;
  assign out_data  = txr[out_col];

  a_no_load_when_busy: assert property (@(posedge clk) disable iff (!rst_n) !(load && busy));
endmodule
