// np_arbiter: stochastic arbitration of the noise-plane (NP) rows.
//
// For every weight-plane row that the core reads, one (n_r = 1) or two (n_r = 2) NP rows are
// read together with it, chosen pseudo-randomly so that the weights of a column are not all
// sampled against the same noise cell. Each NP row index is the low bits of one byte of a 32-bit
// LFSR word; the four bytes of a word are used in turn and the LFSR steps only when all four
// have been used (the "maximal reuse" of the LFSR named by the paper). With n_r = 2 the second
// row is the next byte; if it equals the first, its lowest bit is flipped so the two rows are
// distinct (this design's choice).
//
// Interface: `req` high for one cycle draws the rows for the next WP row; `row_a`/`row_b` are
// registered and valid from the cycle after `req`. Reset loads `seed`.
module np_arbiter #(
  parameter int unsigned NP_ROWS = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [31:0]                seed,
  input  logic                       nr2,
  input  logic                       req,
  output logic [$clog2(NP_ROWS)-1:0] row_a,
  output logic [$clog2(NP_ROWS)-1:0] row_b
);
  localparam int unsigned RW = $clog2(NP_ROWS);

  logic [31:0] word;
  logic [1:0]  byte_ptr;          // next unused byte of `word`
  logic        step;
  logic [RW-1:0] ra, rb;
  logic [1:0]  used;              // bytes consumed by this request
  logic [2:0]  ptr_next;

  lfsr32 u_lfsr (.clk, .rst_n, .seed, .step, .q(word));

  function automatic logic [RW-1:0] byte_row(input logic [31:0] w, input logic [1:0] b);
    logic [7:0] by;
    by = w[8*b +: 8];
    return by[RW-1:0];
  endfunction

  always_comb begin
    used     = nr2 ? 2'd2 : 2'd1;
    ra       = byte_row(word, byte_ptr);
    rb       = byte_row(word, byte_ptr + 2'd1);
    if (nr2 && rb == ra) rb = ra ^ RW'(1);
    ptr_next = {1'b0, byte_ptr} + {1'b0, used};
    // Step the LFSR when this request uses the last byte of the word. With n_r = 2 the pointer
    // is kept even, so both rows of a request come from the same word.
    step     = req && ptr_next[2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      byte_ptr <= '0;
      row_a    <= '0;
      row_b    <= RW'(1);
    end else if (req) begin
      row_a    <= ra;
      row_b    <= rb;
      byte_ptr <= nr2 ? {ptr_next[1], 1'b0} : ptr_next[1:0];
    end
  end
endmodule
