// lfsr32: 32-bit Galois linear feedback shift register, the pseudo-random source of the core's
// stochastic arbitration.
//
// Polynomial x^32 + x^22 + x^2 + x + 1 (maximal length). The register loads `seed` while
// `rst_n` is low (a zero seed, which would lock the register, is replaced by a fixed non-zero
// constant) and advances one step in every cycle with `step` high. `q` is the current state.
// The paper asks only for a lightweight LFSR; the polynomial and seeding are this design's.
module lfsr32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] seed,
  input  logic        step,
  output logic [31:0] q
);
  localparam logic [31:0] TAPS     = 32'h8020_0003;  // bits 31, 21, 1, 0
  localparam logic [31:0] NZ_SEED  = 32'hACE1_2024;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= (seed == '0) ? NZ_SEED : seed;
    else if (step) q <= q[0] ? ((q >> 1) ^ TAPS) : (q >> 1);
  end
endmodule
